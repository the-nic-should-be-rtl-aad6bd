// rpc_decoder: demultiplexes a UDP payload to a service and unmarshals it
// into the message a CPU core will load.
//
// The payload stream from the header decoder is stored byte by byte: the
// 8-byte RPC header (transaction id, procedure number) into a register, the
// arguments straight into their place in a message image of one control line
// plus AUX_LINES auxiliary lines (argument byte j at message byte 24+j). On
// the last beat the frame is checked; in the commit state the UDP
// destination port is looked up among the services the OS registered
// (content-addressed, NUM_SERVICES entries) and (service, procedure) in the
// function table, which gives the handler's code pointer and the data
// pointer of the process. A hit takes a free slot in the message buffer,
// writes the completed message and the reply header there, and pushes
// (slot, service) to the scheduler in the same cycle; the commit waits while
// no slot is free or the service's queue is full, and the input stream is
// held off meanwhile (pl_ready low). A frame that fails the header checks,
// names an unknown port or procedure, or carries more argument bytes than
// the message holds is dropped and counted. The message image is cleared
// after every frame so that no bytes leak from one request to the next.
//
// Both tables are written by the OS through the *_we ports. The paper gives
// the function (demultiplex, then yield process, code pointer, data pointer
// and arguments from OS-supplied state); the wire format, table shapes and
// the one-frame-at-a-time structure are this design's own.
module rpc_decoder
  import lh_pkg::*;
#(
  parameter int unsigned DATA_BYTES   = 64,
  parameter int unsigned NUM_SERVICES = 16,
  parameter int unsigned NUM_PROCS    = 16,
  parameter int unsigned AUX_LINES    = 2,
  parameter int unsigned NUM_SLOTS    = 64,
  localparam int unsigned SW    = $clog2(NUM_SLOTS),
  localparam int unsigned VW    = $clog2(NUM_SERVICES),
  localparam int unsigned PW    = $clog2(NUM_PROCS),
  localparam int unsigned LINES = 1 + AUX_LINES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // payload stream from the header decoder
  input  logic                      pl_valid,
  output logic                      pl_ready,
  input  logic [DATA_BYTES*8-1:0]   pl_data,
  input  logic [DATA_BYTES-1:0]     pl_keep,
  input  logic signed [16:0]        pl_base,
  input  logic                      pl_last,
  input  logic                      pl_ok,
  input  rx_meta_t                  pl_meta,
  // service table: UDP port -> service
  input  logic                      svc_we,
  input  logic [VW-1:0]             svc_idx,
  input  logic                      svc_en,
  input  logic [15:0]               svc_port,
  // function table: (service, procedure) -> code pointer, data pointer
  input  logic                      fn_we,
  input  logic [VW-1:0]             fn_svc,
  input  logic [PW-1:0]             fn_proc,
  input  logic                      fn_en,
  input  logic [63:0]               fn_code,
  input  logic [63:0]               fn_data,
  // message buffer
  input  logic                      alloc_valid,
  input  logic [SW-1:0]             alloc_slot,
  output logic                      buf_wr_en,
  output logic [SW-1:0]             buf_wr_slot,
  output logic [LINES*CL_BITS-1:0]  buf_wr_msg,
  output reply_hdr_t                buf_wr_reply,
  // control info to the scheduler
  output logic                      q_valid,
  input  logic                      q_ready,
  output logic [SW-1:0]             q_slot,
  output logic [VW-1:0]             q_svc,
  // statistics
  output logic [31:0]               rx_count,
  output logic [31:0]               drop_count
);
  localparam int unsigned MSG_BYTES = LINES * CL_BYTES;
  localparam int unsigned MAX_ARGS  = MSG_BYTES - CTRL_HDR_BYTES;

  typedef enum logic [0:0] {S_RX, S_COMMIT} state_e;
  state_e state;

  logic [7:0]  args [MAX_ARGS];
  logic [7:0]  rh   [RPC_HDR_BYTES];
  logic        ovf;
  rx_meta_t    meta_q;
  logic        ok_q;

  // tables
  logic [15:0] svc_port_t [NUM_SERVICES];
  logic        svc_en_t   [NUM_SERVICES];
  logic [63:0] fn_code_t  [NUM_SERVICES][NUM_PROCS];
  logic [63:0] fn_data_t  [NUM_SERVICES][NUM_PROCS];
  logic        fn_en_t    [NUM_SERVICES][NUM_PROCS];

  // ---------------- lookup (commit state) ----------------
  logic          svc_hit, fn_hit, hit;
  logic [VW-1:0] svc_sel;
  logic [15:0]   proc_id;
  logic [31:0]   xid;
  logic [15:0]   arg_len;
  always_comb begin
    svc_hit = 1'b0;
    svc_sel = '0;
    for (int s = NUM_SERVICES - 1; s >= 0; s--) begin
      if (svc_en_t[s] && svc_port_t[s] == meta_q.dst_port) begin
        svc_hit = 1'b1;
        svc_sel = VW'(s);
      end
    end
    proc_id = {rh[4], rh[5]};
    xid     = {rh[0], rh[1], rh[2], rh[3]};
    arg_len = meta_q.pl_len - 16'(RPC_HDR_BYTES);
    fn_hit  = (32'(proc_id) < NUM_PROCS) && fn_en_t[svc_sel][PW'(proc_id)];
    hit     = ok_q && svc_hit && fn_hit;
  end

  always_comb begin
    logic [63:0] code, data;
    code = fn_code_t[svc_sel][PW'(proc_id)];
    data = fn_data_t[svc_sel][PW'(proc_id)];
    buf_wr_msg = '0;
    buf_wr_msg[7:0]    = MSG_RPC;
    buf_wr_msg[15:8]   = 8'(svc_sel);
    buf_wr_msg[31:16]  = arg_len;
    buf_wr_msg[63:32]  = xid;
    buf_wr_msg[127:64] = code;
    buf_wr_msg[191:128] = data;
    for (int j = 0; j < MAX_ARGS; j++) buf_wr_msg[8*(CTRL_HDR_BYTES+j) +: 8] = args[j];
  end

  assign buf_wr_reply = '{mac: meta_q.src_mac, ip: meta_q.src_ip, port: meta_q.src_port,
                          svc_port: meta_q.dst_port, xid: xid, proc_id: proc_id};
  assign q_valid     = (state == S_COMMIT) && hit && alloc_valid;
  assign q_slot      = alloc_slot;
  assign q_svc       = svc_sel;
  assign buf_wr_en   = q_valid && q_ready;
  assign buf_wr_slot = alloc_slot;
  assign pl_ready    = (state == S_RX);

  // ---------------- receive ----------------
  // a payload byte beyond what the lines can hold marks the message overflowed
  logic ovf_beat;
  always_comb begin
    ovf_beat = 1'b0;
    for (int b = 0; b < DATA_BYTES; b++)
      if (pl_keep[b] && int'(pl_base) + b >= RPC_HDR_BYTES + MAX_ARGS) ovf_beat = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_RX;
      ovf        <= 1'b0;
      ok_q       <= 1'b0;
      meta_q     <= '0;
      rx_count   <= '0;
      drop_count <= '0;
      for (int j = 0; j < MAX_ARGS; j++) args[j] <= '0;
      for (int j = 0; j < RPC_HDR_BYTES; j++) rh[j] <= '0;
    end else begin
      case (state)
        S_RX: if (pl_valid) begin
          for (int b = 0; b < DATA_BYTES; b++) begin
            if (pl_keep[b]) begin
              if (int'(pl_base) + b < RPC_HDR_BYTES)
                rh[int'(pl_base) + b] <= pl_data[8*b +: 8];
              else if (int'(pl_base) + b < RPC_HDR_BYTES + MAX_ARGS)
                args[int'(pl_base) + b - RPC_HDR_BYTES] <= pl_data[8*b +: 8];
            end
          end
          ovf <= ovf | ovf_beat;
          if (pl_last) begin
            meta_q <= pl_meta;
            ok_q   <= pl_ok && !(ovf | ovf_beat) && (pl_meta.pl_len >= 16'(RPC_HDR_BYTES));
            state  <= S_COMMIT;
          end
        end
        S_COMMIT: begin
          if (!hit || buf_wr_en) begin
            if (hit) rx_count   <= rx_count + 1;
            else     drop_count <= drop_count + 1;
            ovf   <= 1'b0;
            state <= S_RX;
            for (int j = 0; j < MAX_ARGS; j++) args[j] <= '0;
            for (int j = 0; j < RPC_HDR_BYTES; j++) rh[j] <= '0;
          end
        end
        default: state <= S_RX;
      endcase
    end
  end

  // ---------------- tables ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SERVICES; s++) begin
        svc_en_t[s]   <= 1'b0;
        svc_port_t[s] <= '0;
        for (int p = 0; p < NUM_PROCS; p++) begin
          fn_en_t[s][p]   <= 1'b0;
          fn_code_t[s][p] <= '0;
          fn_data_t[s][p] <= '0;
        end
      end
    end else begin
      if (svc_we) begin
        svc_en_t[svc_idx]   <= svc_en;
        svc_port_t[svc_idx] <= svc_port;
      end
      if (fn_we) begin
        fn_en_t[fn_svc][fn_proc]   <= fn_en;
        fn_code_t[fn_svc][fn_proc] <= fn_code;
        fn_data_t[fn_svc][fn_proc] <= fn_data;
      end
    end
  end

  a_commit_slot: assert property (@(posedge clk) disable iff (!rst_n) buf_wr_en |-> alloc_valid);

endmodule
