// home_agent: home of the cache lines the NIC exposes to the CPU.
//
// The NIC's line address space is split per endpoint: line address
// {endpoint, line} with 2^LIW lines per endpoint (lines 0 and 1 are the
// control lines, 2.. the auxiliary lines). The home agent
//   - decodes each CPU line load (cpu_req) and passes it to its endpoint
//     (always accepted; loads of unknown lines are counted and ignored);
//   - picks, round robin, one endpoint that wants to answer a load, reads the
//     line from the message buffer (or forms a TryAgain / Retire line: the
//     type in byte 0, all else zero) and registers it on cpu_rsp;
//   - picks, round robin, one endpoint that wants a line back and issues the
//     fetch-exclusive on cpu_fwd, at most one outstanding per endpoint;
//   - routes the CPU's answer (cpu_fwd_rsp) to that endpoint and, when the
//     line held a handler's response, pushes (slot, line) toward the
//     transmit path. cpu_fwd_rsp is accepted only when that queue has room.
// Both outputs are registered valid/ready channels. The coherence link
// itself (the platform's interconnect) is outside this design; these
// channels stand for its read, read-response, fetch-exclusive and
// fetch-response messages. That abstraction is this design's own.
//
// That the NIC is the home of these lines, and that the address a core loads
// tells the NIC which endpoint (and so kernel or user mode) is polling,
// follows the NIC design.
//
// Some outputs are plain wires or constants by design: tx_line is the
// fetched line as it came from the CPU, ep_rd_line the line field of the load
// address, cpu_req_ready is always 1, cpu_fwd_rsp_ready is the TX queue's
// ready, and the address bits above {endpoint, line} are zero.
module home_agent
  import lh_pkg::*;
#(
  parameter int unsigned NUM_EP    = 96,
  parameter int unsigned AUX_LINES = 2,
  parameter int unsigned NUM_SLOTS = 64,
  parameter int unsigned ADDR_W    = 32,
  localparam int unsigned SW  = $clog2(NUM_SLOTS),
  localparam int unsigned LIW = $clog2(2 + AUX_LINES),
  localparam int unsigned EW  = $clog2(NUM_EP),
  localparam int unsigned LW  = $clog2(1 + AUX_LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // CPU side
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  logic [ADDR_W-1:0] cpu_req_addr,
  output logic              cpu_rsp_valid,
  input  logic              cpu_rsp_ready,
  output logic [ADDR_W-1:0] cpu_rsp_addr,
  output line_t             cpu_rsp_data,
  output logic              cpu_fwd_valid,
  input  logic              cpu_fwd_ready,
  output logic [ADDR_W-1:0] cpu_fwd_addr,
  input  logic              cpu_fwd_rsp_valid,
  output logic              cpu_fwd_rsp_ready,
  input  logic [ADDR_W-1:0] cpu_fwd_rsp_addr,
  input  line_t             cpu_fwd_rsp_data,
  // endpoints
  output logic [NUM_EP-1:0] ep_rd_valid,
  output logic [LIW-1:0]    ep_rd_line,
  input  logic [NUM_EP-1:0] ep_rsp_req,
  input  logic [LIW-1:0]    ep_rsp_line [NUM_EP],
  input  msg_type_e         ep_rsp_type [NUM_EP],
  input  logic [SW-1:0]     ep_rsp_slot [NUM_EP],
  output logic [NUM_EP-1:0] ep_rsp_ack,
  input  logic [NUM_EP-1:0] ep_fwd_req,
  input  logic [LIW-1:0]    ep_fwd_line [NUM_EP],
  input  logic [NUM_EP-1:0] ep_fwd_is_resp,
  input  logic [SW-1:0]     ep_fwd_slot [NUM_EP],
  output logic [NUM_EP-1:0] ep_fwd_ack,
  // message buffer read port
  output logic [SW-1:0]     buf_rd_slot,
  output logic [LW-1:0]     buf_rd_line,
  input  line_t             buf_rd_data,
  // fetched responses to the transmit queue
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [SW-1:0]     tx_slot,
  output line_t             tx_line,
  // statistics
  output logic [31:0]       bad_addr_count
);
  // ---------------- load decode ----------------
  logic [ADDR_W-1:0] req_ep;
  logic [LIW-1:0]    req_line;
  logic              req_ok;
  assign req_ep   = cpu_req_addr >> LIW;
  assign req_line = cpu_req_addr[LIW-1:0];
  assign req_ok   = (req_ep < ADDR_W'(NUM_EP)) && (32'(req_line) < 2 + AUX_LINES);
  assign cpu_req_ready = 1'b1;
  assign ep_rd_line    = req_line;
  always_comb begin
    ep_rd_valid = '0;
    if (cpu_req_valid && req_ok) ep_rd_valid[EW'(req_ep)] = 1'b1;
  end

  // ---------------- line responses ----------------
  logic [NUM_EP-1:0] rsp_grant;
  logic [EW-1:0]     rsp_idx;
  logic              rsp_take;
  rr_arbiter #(.N(NUM_EP)) u_rsp_arb (
    .clk, .rst_n, .req(ep_rsp_req), .advance(rsp_take), .grant(rsp_grant), .grant_idx(rsp_idx));
  assign rsp_take   = (|ep_rsp_req) && (!cpu_rsp_valid || cpu_rsp_ready);
  assign ep_rsp_ack = rsp_take ? rsp_grant : '0;

  logic [LIW-1:0] g_line;
  msg_type_e      g_type;
  line_t          rsp_line_data;
  assign g_line      = ep_rsp_line[rsp_idx];
  assign g_type      = ep_rsp_type[rsp_idx];
  assign buf_rd_slot = ep_rsp_slot[rsp_idx];
  assign buf_rd_line = (g_line < LIW'(2)) ? '0 : LW'(32'(g_line) - 1);
  always_comb begin
    rsp_line_data = '0;
    case (g_type)
      MSG_RPC:                  rsp_line_data = buf_rd_data;
      MSG_TRYAGAIN, MSG_RETIRE: rsp_line_data[7:0] = g_type;
      default:                  rsp_line_data = '0;
    endcase
  end

  // ---------------- fetch-exclusive ----------------
  logic [NUM_EP-1:0] issued, fwd_grant;
  logic [EW-1:0]     fwd_idx;
  logic              fwd_take;
  rr_arbiter #(.N(NUM_EP)) u_fwd_arb (
    .clk, .rst_n, .req(ep_fwd_req & ~issued), .advance(fwd_take), .grant(fwd_grant), .grant_idx(fwd_idx));
  assign fwd_take = (|(ep_fwd_req & ~issued)) && (!cpu_fwd_valid || cpu_fwd_ready);

  logic [ADDR_W-1:0] frsp_ep;
  logic              frsp_ok;
  assign frsp_ep  = cpu_fwd_rsp_addr >> LIW;
  assign frsp_ok  = frsp_ep < ADDR_W'(NUM_EP);
  assign cpu_fwd_rsp_ready = tx_ready;
  always_comb begin
    ep_fwd_ack = '0;
    if (cpu_fwd_rsp_valid && cpu_fwd_rsp_ready && frsp_ok) ep_fwd_ack[EW'(frsp_ep)] = 1'b1;
  end
  assign tx_valid = cpu_fwd_rsp_valid && frsp_ok && ep_fwd_is_resp[EW'(frsp_ep)]
                    && (cpu_fwd_rsp_addr[LIW-1:0] < LIW'(2));
  assign tx_slot  = ep_fwd_slot[EW'(frsp_ep)];
  assign tx_line  = cpu_fwd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cpu_rsp_valid  <= 1'b0;
      cpu_rsp_addr   <= '0;
      cpu_rsp_data   <= '0;
      cpu_fwd_valid  <= 1'b0;
      cpu_fwd_addr   <= '0;
      issued         <= '0;
      bad_addr_count <= '0;
    end else begin
      if (cpu_req_valid && !req_ok) bad_addr_count <= bad_addr_count + 1;
      if (rsp_take) begin
        cpu_rsp_valid <= 1'b1;
        cpu_rsp_addr  <= (ADDR_W'(rsp_idx) << LIW) | ADDR_W'(g_line);
        cpu_rsp_data  <= rsp_line_data;
      end else if (cpu_rsp_ready) begin
        cpu_rsp_valid <= 1'b0;
      end
      if (fwd_take) begin
        cpu_fwd_valid <= 1'b1;
        cpu_fwd_addr  <= (ADDR_W'(fwd_idx) << LIW) | ADDR_W'(ep_fwd_line[fwd_idx]);
      end else if (cpu_fwd_ready) begin
        cpu_fwd_valid <= 1'b0;
      end
      issued <= (issued | (fwd_take ? fwd_grant : '0)) & ~ep_fwd_ack;
    end
  end

  // The CPU returns only lines the NIC asked for.
  a_fwd_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    cpu_fwd_rsp_valid && frsp_ok |-> issued[EW'(frsp_ep)]
      && ep_fwd_line[EW'(frsp_ep)] == cpu_fwd_rsp_addr[LIW-1:0]);

endmodule
