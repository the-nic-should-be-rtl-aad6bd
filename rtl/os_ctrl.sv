// os_ctrl: the register interface between the kernel and the NIC.
//
// Through it the kernel pushes the state the NIC needs to deliver requests
// on its own: the NIC's addresses, the service table (UDP port of each
// service), the function table (code and data pointer of every procedure),
// and, on every context switch, which service's process each core is running
// in its user-mode receive loop. It also issues the two commands of the
// paper: kick (answer a blocked load of an endpoint with TryAgain so the
// core enters the kernel) and retire (answer a kernel endpoint with Retire so
// the kernel thread gives up its core). It reads back which endpoints have a
// core blocked on them and the per-service load the scheduler measures.
//
// Writes take effect at the clock edge with cfg_we; reads are combinational
// from cfg_raddr. Word addresses (64-bit data):
//   0x0000 W/R local MAC           0x0001 W/R local IPv4
//   0x0002 W   staged code pointer 0x0003 W   staged data pointer
//   0x0100+s   W service s: [15:0] UDP port, [16] enable
//   0x1000+(s<<PW)+p W procedure p of service s: [0] enable, pointers from
//              the staged registers
//   0x0300+c W/R core c binding: [7:0] service, [8] running
//   0x0400+e W   kick endpoint e        0x0500+e W retire endpoint e
//   0x0600+e R   [0] a core is blocked on endpoint e
//   0x0700+s R   [15:0] queued requests, [16] running, [17] hot, [18] unserved
//   0x0800..0x0804 R  received, dropped, transmitted, bad line addresses,
//              free message slots
// The paper has this state pushed over the coherent interconnect; a plain
// register port with this map is this design's own choice.
//
// The table-write outputs (svc_idx, svc_port, svc_en, fn_proc, fn_en) are
// fields of the write address and data, decoded but not registered.
module os_ctrl #(
  parameter int unsigned NUM_CORES    = 48,
  parameter int unsigned NUM_SERVICES = 16,
  parameter int unsigned NUM_PROCS    = 16,
  parameter int unsigned QDEPTH       = 16,
  parameter int unsigned NUM_SLOTS    = 64,
  localparam int unsigned NUM_EP = 2 * NUM_CORES,
  localparam int unsigned VW = $clog2(NUM_SERVICES),
  localparam int unsigned PW = $clog2(NUM_PROCS),
  localparam int unsigned CW = $clog2(QDEPTH+1),
  localparam int unsigned SW = $clog2(NUM_SLOTS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [15:0]             cfg_waddr,
  input  logic [63:0]             cfg_wdata,
  input  logic [15:0]             cfg_raddr,
  output logic [63:0]             cfg_rdata,
  // state for the datapath
  output logic [47:0]             local_mac,
  output logic [31:0]             local_ip,
  output logic                    svc_we,
  output logic [VW-1:0]           svc_idx,
  output logic                    svc_en,
  output logic [15:0]             svc_port,
  output logic                    fn_we,
  output logic [VW-1:0]           fn_svc,
  output logic [PW-1:0]           fn_proc,
  output logic                    fn_en,
  output logic [63:0]             fn_code,
  output logic [63:0]             fn_data,
  output logic [NUM_CORES-1:0]    bind_valid,
  output logic [VW-1:0]           bind_svc [NUM_CORES],
  output logic [NUM_EP-1:0]       kick,
  output logic [NUM_EP-1:0]       retire,
  // status from the datapath
  input  logic [NUM_EP-1:0]       ep_blocked,
  input  logic [CW-1:0]           q_count [NUM_SERVICES],
  input  logic [NUM_SERVICES-1:0] svc_running,
  input  logic [NUM_SERVICES-1:0] hot,
  input  logic [NUM_SERVICES-1:0] unserved,
  input  logic [31:0]             rx_count,
  input  logic [31:0]             drop_count,
  input  logic [31:0]             tx_count,
  input  logic [31:0]             bad_addr_count,
  input  logic [SW:0]             free_slots
);
  logic [7:0] page;
  logic [7:0] idx;
  assign page = cfg_waddr[15:8];
  assign idx  = cfg_waddr[7:0];

  // table writes are forwarded straight to the RPC decoder
  assign svc_we   = cfg_we && (page == 8'h01) && (32'(idx) < NUM_SERVICES);
  assign svc_idx  = VW'(idx);
  assign svc_en   = cfg_wdata[16];
  assign svc_port = cfg_wdata[15:0];
  assign fn_we    = cfg_we && (cfg_waddr[15:12] == 4'h1)
                    && (32'(cfg_waddr[11:0] >> PW) < NUM_SERVICES);
  assign fn_svc   = VW'(cfg_waddr[11:0] >> PW);
  assign fn_proc  = cfg_waddr[PW-1:0];
  assign fn_en    = cfg_wdata[0];

  always_comb begin
    kick   = '0;
    retire = '0;
    for (int e = 0; e < NUM_EP; e++) begin
      kick[e]   = cfg_we && page == 8'h04 && 32'(idx) == e;
      retire[e] = cfg_we && page == 8'h05 && 32'(idx) == e;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_mac  <= '0;
      local_ip   <= '0;
      fn_code    <= '0;
      fn_data    <= '0;
      bind_valid <= '0;
      for (int c = 0; c < NUM_CORES; c++) bind_svc[c] <= '0;
    end else if (cfg_we) begin
      if (cfg_waddr == 16'h0000) local_mac <= cfg_wdata[47:0];
      if (cfg_waddr == 16'h0001) local_ip  <= cfg_wdata[31:0];
      if (cfg_waddr == 16'h0002) fn_code   <= cfg_wdata;
      if (cfg_waddr == 16'h0003) fn_data   <= cfg_wdata;
      for (int c = 0; c < NUM_CORES; c++) begin
        if (page == 8'h03 && 32'(idx) == c) begin
          bind_svc[c]   <= VW'(cfg_wdata[7:0]);
          bind_valid[c] <= cfg_wdata[8];
        end
      end
    end
  end

  always_comb begin
    logic [7:0] rp, ri;
    rp = cfg_raddr[15:8];
    ri = cfg_raddr[7:0];
    cfg_rdata = '0;
    case (rp)
      8'h00: begin
        if (ri == 8'h00) cfg_rdata = 64'(local_mac);
        if (ri == 8'h01) cfg_rdata = 64'(local_ip);
      end
      8'h03: for (int c = 0; c < NUM_CORES; c++)
               if (32'(ri) == c) cfg_rdata = {55'd0, bind_valid[c], 8'(bind_svc[c])};
      8'h06: for (int e = 0; e < NUM_EP; e++)
               if (32'(ri) == e) cfg_rdata = 64'(ep_blocked[e]);
      8'h07: for (int s = 0; s < NUM_SERVICES; s++)
               if (32'(ri) == s)
                 cfg_rdata = {45'd0, unserved[s], hot[s], svc_running[s], 16'(q_count[s])};
      8'h08: case (ri)
               8'h00: cfg_rdata = 64'(rx_count);
               8'h01: cfg_rdata = 64'(drop_count);
               8'h02: cfg_rdata = 64'(tx_count);
               8'h03: cfg_rdata = 64'(bad_addr_count);
               8'h04: cfg_rdata = 64'(free_slots);
               default: cfg_rdata = '0;
             endcase
      default: cfg_rdata = '0;
    endcase
  end

endmodule
