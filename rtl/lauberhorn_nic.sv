// lauberhorn_nic: a NIC that delivers RPC requests straight into the
// registers of a stalled CPU load, using OS scheduling state it holds itself.
//
// Receive path, left to right:
//   rx_hdr_decoder  checks and strips Ethernet/IPv4/UDP headers of frames
//                   from the MAC (the MAC itself is outside this design);
//   rpc_decoder     finds the service by UDP port and the handler by
//                   procedure number, and writes a ready-to-load message
//                   (type, service, length, transaction id, code pointer,
//                   data pointer, arguments) into msg_buffer;
//   scheduler       queues the request per service and hands it to a core
//                   stalled on that service's user endpoint, or else to a
//                   core stalled on a kernel endpoint;
//   endpoint_2f2f   one per endpoint (NUM_CORES kernel endpoints 0..C-1,
//                   NUM_CORES user endpoints C..2C-1): answers the core's
//                   load of a control line, fetches the previous line's
//                   response back, times out with TryAgain;
//   home_agent      maps the NIC's cache-line addresses to endpoints and
//                   drives the coherence channels (cpu_*).
// Transmit of responses: home_agent -> TX queue (sync_fifo) -> tx_encoder ->
// tx_* frame stream; the message slot is freed after the frame.
// os_ctrl is the kernel's register port (cfg_*): tables, core bindings,
// kick/retire commands, status.
//
// The decryption and decompression stages the paper draws in its decoder
// pipeline are not built (no algorithm is given); frames go from the header
// decoder straight to the RPC decoder. Parameter defaults: 128-byte lines and
// 48 cores follow the paper; TIMEOUT_CYCLES is its 15 ms at an assumed
// 250 MHz clock; all other sizes are this design's own.
//
// Lint notes: rst_n is an asynchronous reset for the flops and also the
// disable condition of the handshake assertions, which a linter reports as a
// signal used both synchronously and asynchronously; the assertions are not
// logic, so this is harmless.
module lauberhorn_nic
  import lh_pkg::*;
#(
  parameter int unsigned NUM_CORES      = 48,
  parameter int unsigned NUM_SERVICES   = 16,
  parameter int unsigned NUM_PROCS      = 16,
  parameter int unsigned AUX_LINES      = 2,
  parameter int unsigned NUM_SLOTS      = 64,
  parameter int unsigned QDEPTH         = 16,
  parameter int unsigned TXQ_DEPTH      = 8,
  parameter int unsigned HOT_THRESH     = 8,
  parameter int unsigned DATA_BYTES     = 64,
  parameter int unsigned TIMEOUT_CYCLES = 3_750_000,
  parameter int unsigned ADDR_W         = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // Ethernet MAC receive stream
  input  logic                    rx_tvalid,
  output logic                    rx_tready,
  input  logic [DATA_BYTES*8-1:0] rx_tdata,
  input  logic [DATA_BYTES-1:0]   rx_tkeep,
  input  logic                    rx_tlast,
  // Ethernet MAC transmit stream
  output logic                    tx_tvalid,
  input  logic                    tx_tready,
  output logic [DATA_BYTES*8-1:0] tx_tdata,
  output logic [DATA_BYTES-1:0]   tx_tkeep,
  output logic                    tx_tlast,
  // coherent interconnect, NIC as home of its lines
  input  logic                    cpu_req_valid,
  output logic                    cpu_req_ready,
  input  logic [ADDR_W-1:0]       cpu_req_addr,
  output logic                    cpu_rsp_valid,
  input  logic                    cpu_rsp_ready,
  output logic [ADDR_W-1:0]       cpu_rsp_addr,
  output line_t                   cpu_rsp_data,
  output logic                    cpu_fwd_valid,
  input  logic                    cpu_fwd_ready,
  output logic [ADDR_W-1:0]       cpu_fwd_addr,
  input  logic                    cpu_fwd_rsp_valid,
  output logic                    cpu_fwd_rsp_ready,
  input  logic [ADDR_W-1:0]       cpu_fwd_rsp_addr,
  input  line_t                   cpu_fwd_rsp_data,
  // kernel register port
  input  logic                    cfg_we,
  input  logic [15:0]             cfg_waddr,
  input  logic [63:0]             cfg_wdata,
  input  logic [15:0]             cfg_raddr,
  output logic [63:0]             cfg_rdata
);
  localparam int unsigned NUM_EP = 2 * NUM_CORES;
  localparam int unsigned SW  = $clog2(NUM_SLOTS);
  localparam int unsigned VW  = $clog2(NUM_SERVICES);
  localparam int unsigned PW  = $clog2(NUM_PROCS);
  localparam int unsigned LIW = $clog2(2 + AUX_LINES);
  localparam int unsigned LW  = $clog2(1 + AUX_LINES);
  localparam int unsigned CW  = $clog2(QDEPTH + 1);
  localparam int unsigned LINES = 1 + AUX_LINES;

  // ---------------- OS state ----------------
  logic [47:0]          local_mac;
  logic [31:0]          local_ip;
  logic                 svc_we, svc_en, fn_we, fn_en;
  logic [VW-1:0]        svc_idx, fn_svc;
  logic [15:0]          svc_port;
  logic [PW-1:0]        fn_proc;
  logic [63:0]          fn_code, fn_data;
  logic [NUM_CORES-1:0] bind_valid;
  logic [VW-1:0]        bind_svc [NUM_CORES];
  logic [NUM_EP-1:0]    kick, retire;

  // ---------------- datapath wires ----------------
  logic                    pl_valid, pl_ready, pl_last, pl_ok;
  logic [DATA_BYTES*8-1:0] pl_data;
  logic [DATA_BYTES-1:0]   pl_keep;
  logic signed [16:0]      pl_base;
  rx_meta_t                pl_meta;

  logic                    alloc_valid, buf_wr_en;
  logic [SW-1:0]           alloc_slot, buf_wr_slot;
  logic [LINES*CL_BITS-1:0] buf_wr_msg;
  reply_hdr_t              buf_wr_reply, rep_hdr;
  logic [SW-1:0]           buf_rd_slot, rep_slot, free_slot;
  logic [LW-1:0]           buf_rd_line;
  line_t                   buf_rd_data;
  logic                    free_en;
  logic [SW:0]             free_slots;

  logic                    q_valid, q_ready;
  logic [SW-1:0]           q_slot;
  logic [VW-1:0]           q_svc;

  logic [NUM_EP-1:0]       ep_waiting, ep_grant, ep_blocked;
  logic [SW-1:0]           grant_slot;
  logic [VW-1:0]           grant_svc;
  logic [CW-1:0]           q_count [NUM_SERVICES];
  logic [NUM_SERVICES-1:0] svc_running, hot, unserved;

  logic [NUM_EP-1:0]       ep_rd_valid, ep_rsp_req, ep_rsp_ack, ep_fwd_req, ep_fwd_ack, ep_fwd_is_resp;
  logic [LIW-1:0]          ep_rd_line;
  logic [LIW-1:0]          ep_rsp_line [NUM_EP];
  msg_type_e               ep_rsp_type [NUM_EP];
  logic [SW-1:0]           ep_rsp_slot [NUM_EP];
  logic [LIW-1:0]          ep_fwd_line [NUM_EP];
  logic [SW-1:0]           ep_fwd_slot [NUM_EP];
  logic [31:0]             ep_tryagain [NUM_EP];

  logic                    txq_in_valid, txq_in_ready, txq_out_valid, txq_out_ready;
  logic [SW-1:0]           txq_in_slot;
  line_t                   txq_in_line;
  logic [SW+CL_BITS-1:0]   txq_out;
  logic [31:0]             rx_count, drop_count, tx_count, bad_addr_count;

  os_ctrl #(.NUM_CORES(NUM_CORES), .NUM_SERVICES(NUM_SERVICES), .NUM_PROCS(NUM_PROCS),
            .QDEPTH(QDEPTH), .NUM_SLOTS(NUM_SLOTS)) u_os_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_waddr, .cfg_wdata, .cfg_raddr, .cfg_rdata,
    .local_mac, .local_ip, .svc_we, .svc_idx, .svc_en, .svc_port,
    .fn_we, .fn_svc, .fn_proc, .fn_en, .fn_code, .fn_data,
    .bind_valid, .bind_svc, .kick, .retire,
    .ep_blocked, .q_count, .svc_running, .hot, .unserved,
    .rx_count, .drop_count, .tx_count, .bad_addr_count, .free_slots);

  rx_hdr_decoder #(.DATA_BYTES(DATA_BYTES)) u_rx_hdr (
    .clk, .rst_n, .local_mac, .local_ip,
    .s_tvalid(rx_tvalid), .s_tready(rx_tready), .s_tdata(rx_tdata), .s_tkeep(rx_tkeep),
    .s_tlast(rx_tlast),
    .pl_valid, .pl_ready, .pl_data, .pl_keep, .pl_base, .pl_last, .pl_ok, .pl_meta);

  rpc_decoder #(.DATA_BYTES(DATA_BYTES), .NUM_SERVICES(NUM_SERVICES), .NUM_PROCS(NUM_PROCS),
                .AUX_LINES(AUX_LINES), .NUM_SLOTS(NUM_SLOTS)) u_rpc_dec (
    .clk, .rst_n,
    .pl_valid, .pl_ready, .pl_data, .pl_keep, .pl_base, .pl_last, .pl_ok, .pl_meta,
    .svc_we, .svc_idx, .svc_en, .svc_port,
    .fn_we, .fn_svc, .fn_proc, .fn_en, .fn_code, .fn_data,
    .alloc_valid, .alloc_slot, .buf_wr_en, .buf_wr_slot, .buf_wr_msg, .buf_wr_reply,
    .q_valid, .q_ready, .q_slot, .q_svc, .rx_count, .drop_count);

  msg_buffer #(.NUM_SLOTS(NUM_SLOTS), .AUX_LINES(AUX_LINES)) u_msg_buf (
    .clk, .rst_n, .alloc_valid, .alloc_slot,
    .wr_en(buf_wr_en), .wr_slot(buf_wr_slot), .wr_msg(buf_wr_msg), .wr_reply(buf_wr_reply),
    .rd_slot(buf_rd_slot), .rd_line(buf_rd_line), .rd_data(buf_rd_data),
    .rep_slot, .rep_hdr, .free_en, .free_slot, .free_count(free_slots));

  scheduler #(.NUM_CORES(NUM_CORES), .NUM_SERVICES(NUM_SERVICES), .QDEPTH(QDEPTH),
              .NUM_SLOTS(NUM_SLOTS), .HOT_THRESH(HOT_THRESH)) u_sched (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_slot(q_slot), .in_svc(q_svc),
    .bind_valid, .bind_svc, .ep_waiting, .grant(ep_grant), .grant_slot, .grant_svc,
    .q_count, .svc_running, .hot, .unserved);

  for (genvar e = 0; e < NUM_EP; e++) begin : g_ep
    endpoint_2f2f #(.AUX_LINES(AUX_LINES), .NUM_SLOTS(NUM_SLOTS),
                    .TIMEOUT_CYCLES(TIMEOUT_CYCLES), .IS_KERNEL(e < NUM_CORES)) u_ep (
      .clk, .rst_n,
      .rd_valid(ep_rd_valid[e]), .rd_line(ep_rd_line),
      .waiting(ep_waiting[e]), .grant(ep_grant[e]), .grant_slot,
      .kick(kick[e]), .retire(retire[e]),
      .rsp_req(ep_rsp_req[e]), .rsp_line(ep_rsp_line[e]), .rsp_type(ep_rsp_type[e]),
      .rsp_slot(ep_rsp_slot[e]), .rsp_ack(ep_rsp_ack[e]),
      .fwd_req(ep_fwd_req[e]), .fwd_line(ep_fwd_line[e]), .fwd_is_resp(ep_fwd_is_resp[e]),
      .fwd_slot(ep_fwd_slot[e]), .fwd_ack(ep_fwd_ack[e]),
      .blocked(ep_blocked[e]), .tryagain_count(ep_tryagain[e]));
  end

  home_agent #(.NUM_EP(NUM_EP), .AUX_LINES(AUX_LINES), .NUM_SLOTS(NUM_SLOTS),
               .ADDR_W(ADDR_W)) u_home (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req_addr,
    .cpu_rsp_valid, .cpu_rsp_ready, .cpu_rsp_addr, .cpu_rsp_data,
    .cpu_fwd_valid, .cpu_fwd_ready, .cpu_fwd_addr,
    .cpu_fwd_rsp_valid, .cpu_fwd_rsp_ready, .cpu_fwd_rsp_addr, .cpu_fwd_rsp_data,
    .ep_rd_valid, .ep_rd_line, .ep_rsp_req, .ep_rsp_line, .ep_rsp_type, .ep_rsp_slot,
    .ep_rsp_ack, .ep_fwd_req, .ep_fwd_line, .ep_fwd_is_resp, .ep_fwd_slot, .ep_fwd_ack,
    .buf_rd_slot, .buf_rd_line, .buf_rd_data,
    .tx_valid(txq_in_valid), .tx_ready(txq_in_ready), .tx_slot(txq_in_slot), .tx_line(txq_in_line),
    .bad_addr_count);

  // Control Info TX queue
  logic [$clog2(TXQ_DEPTH+1)-1:0] txq_count;
  sync_fifo #(.WIDTH(SW + CL_BITS), .DEPTH(TXQ_DEPTH)) u_txq (
    .clk, .rst_n,
    .in_valid(txq_in_valid), .in_ready(txq_in_ready), .in_data({txq_in_slot, txq_in_line}),
    .out_valid(txq_out_valid), .out_ready(txq_out_ready), .out_data(txq_out),
    .count(txq_count));

  tx_encoder #(.DATA_BYTES(DATA_BYTES), .NUM_SLOTS(NUM_SLOTS)) u_tx_enc (
    .clk, .rst_n, .local_mac, .local_ip,
    .in_valid(txq_out_valid), .in_ready(txq_out_ready),
    .in_slot(txq_out[SW+CL_BITS-1 -: SW]), .in_line(txq_out[CL_BITS-1:0]),
    .rep_slot, .rep_hdr,
    .m_tvalid(tx_tvalid), .m_tready(tx_tready), .m_tdata(tx_tdata), .m_tkeep(tx_tkeep),
    .m_tlast(tx_tlast), .free_en, .free_slot, .tx_count);

  // kept for debug visibility: per-endpoint TryAgain counters, the TX queue
  // occupancy and the service of the last dispatch are not otherwise read
  logic unused;
  assign unused = ^{grant_svc, ep_tryagain[0], txq_count};

endmodule
