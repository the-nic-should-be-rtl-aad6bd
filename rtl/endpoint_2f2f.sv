// endpoint_2f2f: protocol engine of one endpoint, a pair of control cache
// lines (lines 0 and 1) plus AUX_LINES auxiliary lines homed on the NIC.
//
// A core asks for the next request by loading a control line. The engine
// then
//   1. takes back the other control line with a fetch-exclusive (fwd_req).
//      If that line carried a request, the line the CPU returns holds the
//      handler's response and goes to the transmit path (fwd_is_resp and
//      fwd_slot tell the home agent so). Auxiliary lines handed out with
//      that request are fetched back too, to invalidate them.
//   2. leaves the load unanswered (waiting = 1, the core is stalled) until
//      the scheduler grants it a request, which it answers with (rsp_req,
//      MSG_RPC, the message's slot).
//   3. answers with MSG_TRYAGAIN instead when TIMEOUT_CYCLES pass without a
//      request, so that the core's coherence protocol never times out, or at
//      once when the OS asked to preempt the process (kick). A kernel
//      endpoint answers MSG_RETIRE when the OS asks to take its core back
//      (retire). A kick or retire that arrives while the core is running is
//      kept and served at its next load.
// Loads of an auxiliary line are answered at once with that line of the
// request last delivered. Every answered line is remembered, so the next
// load of the opposite control line fetches it back; the core is expected to
// alternate between the two control lines.
//
// The ping-pong of two control lines, the fetch of the response before the
// next request, the 15 ms TryAgain, preemption through TryAgain and Retire
// all follow the paper. The handshake signals, the order of the
// fetch-exclusives and the assumption of one outstanding load per endpoint
// are this design's own.
module endpoint_2f2f
  import lh_pkg::*;
#(
  parameter int unsigned AUX_LINES      = 2,
  parameter int unsigned NUM_SLOTS      = 64,
  parameter int unsigned TIMEOUT_CYCLES = 3_750_000,
  parameter bit          IS_KERNEL      = 1'b0,
  localparam int unsigned SW  = $clog2(NUM_SLOTS),
  localparam int unsigned LIW = $clog2(2 + AUX_LINES),
  localparam int unsigned TW  = $clog2(TIMEOUT_CYCLES + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // CPU load of one of this endpoint's lines (from the home agent)
  input  logic            rd_valid,
  input  logic [LIW-1:0]  rd_line,
  // scheduler
  output logic            waiting,
  input  logic            grant,
  input  logic [SW-1:0]   grant_slot,
  // OS commands
  input  logic            kick,
  input  logic            retire,
  // line response to the CPU
  output logic            rsp_req,
  output logic [LIW-1:0]  rsp_line,
  output msg_type_e       rsp_type,
  output logic [SW-1:0]   rsp_slot,
  input  logic            rsp_ack,
  // fetch-exclusive to the CPU
  output logic            fwd_req,
  output logic [LIW-1:0]  fwd_line,
  output logic            fwd_is_resp,
  output logic [SW-1:0]   fwd_slot,
  input  logic            fwd_ack,
  // status
  output logic            blocked,
  output logic [31:0]     tryagain_count
);
  typedef enum logic [2:0] {S_IDLE, S_INVAL, S_WAIT, S_RESP, S_AUX} state_e;
  state_e state;

  logic [1:0]         cl_out;        // control line handed to the CPU
  msg_type_e          cl_type [2];
  logic [SW-1:0]      cl_slot [2];
  logic [AUX_LINES-1:0] aux_out;     // auxiliary lines handed to the CPU
  logic               cur_rpc;       // last control answer was a request
  logic [SW-1:0]      cur_slot;
  logic               req_line;      // control line being loaded
  logic [LIW-1:0]     aux_line;
  logic               kick_pend, retire_pend;
  logic [TW-1:0]      timer;
  msg_type_e          ans_type;
  logic [SW-1:0]      ans_slot;

  logic other;
  assign other = !req_line;

  // fetch-exclusive queue: other control line first, then auxiliary lines
  logic           need_fwd;
  logic [LIW-1:0] next_fwd;
  always_comb begin
    need_fwd = 1'b0;
    next_fwd = '0;
    for (int k = AUX_LINES - 1; k >= 0; k--) begin
      if (aux_out[k]) begin
        need_fwd = 1'b1;
        next_fwd = LIW'(2 + k);
      end
    end
    if (cl_out[other]) begin
      need_fwd = 1'b1;
      next_fwd = LIW'(other);
    end
  end

  assign fwd_req     = (state == S_INVAL) && need_fwd;
  assign fwd_line    = next_fwd;
  assign fwd_is_resp = (next_fwd == LIW'(other)) && (cl_type[other] == MSG_RPC);
  assign fwd_slot    = cl_slot[other];

  assign waiting  = (state == S_WAIT) && !kick_pend && !retire_pend;
  assign blocked  = (state == S_WAIT);
  assign rsp_req  = (state == S_RESP) || (state == S_AUX);
  assign rsp_line = (state == S_AUX) ? aux_line : LIW'(req_line);
  assign rsp_type = (state == S_AUX) ? (cur_rpc ? MSG_RPC : MSG_NONE) : ans_type;
  assign rsp_slot = (state == S_AUX) ? cur_slot : ans_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cl_out         <= '0;
      cl_type[0]     <= MSG_NONE;
      cl_type[1]     <= MSG_NONE;
      cl_slot[0]     <= '0;
      cl_slot[1]     <= '0;
      aux_out        <= '0;
      cur_rpc        <= 1'b0;
      cur_slot       <= '0;
      req_line       <= 1'b0;
      aux_line       <= '0;
      kick_pend      <= 1'b0;
      retire_pend    <= 1'b0;
      timer          <= '0;
      ans_type       <= MSG_NONE;
      ans_slot       <= '0;
      tryagain_count <= '0;
    end else begin
      if (kick)               kick_pend   <= 1'b1;
      if (retire && IS_KERNEL) retire_pend <= 1'b1;
      case (state)
        S_IDLE: if (rd_valid) begin
          if (rd_line < LIW'(2)) begin
            req_line <= rd_line[0];
            state    <= S_INVAL;
          end else begin
            aux_line <= rd_line;
            if (cur_rpc) aux_out[32'(rd_line) - 2] <= 1'b1;
            state    <= S_AUX;
          end
        end
        S_INVAL: begin
          if (!need_fwd) begin
            timer <= '0;
            state <= S_WAIT;
          end else if (fwd_ack) begin
            if (next_fwd < LIW'(2)) cl_out[next_fwd[0]] <= 1'b0;
            else                    aux_out[32'(next_fwd) - 2] <= 1'b0;
          end
        end
        S_WAIT: begin
          timer <= timer + 1'b1;
          if (retire_pend) begin
            ans_type    <= MSG_RETIRE;
            retire_pend <= 1'b0;
            state       <= S_RESP;
          end else if (kick_pend) begin
            ans_type  <= MSG_TRYAGAIN;
            kick_pend <= kick;
            tryagain_count <= tryagain_count + 1;
            state     <= S_RESP;
          end else if (grant) begin
            ans_type <= MSG_RPC;
            ans_slot <= grant_slot;
            state    <= S_RESP;
          end else if (32'(timer) >= TIMEOUT_CYCLES - 1) begin
            ans_type <= MSG_TRYAGAIN;
            tryagain_count <= tryagain_count + 1;
            state    <= S_RESP;
          end
        end
        S_RESP: if (rsp_ack) begin
          cl_out[req_line]  <= 1'b1;
          cl_type[req_line] <= ans_type;
          cl_slot[req_line] <= ans_slot;
          cur_rpc  <= (ans_type == MSG_RPC);
          cur_slot <= ans_slot;
          state    <= S_IDLE;
        end
        S_AUX: if (rsp_ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // One outstanding load per endpoint, and the two control lines alternate.
  a_one_load: assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> state == S_IDLE);
  a_alternate: assert property (@(posedge clk) disable iff (!rst_n)
                                rd_valid && rd_line < LIW'(2) |-> !cl_out[rd_line[0]]);
  a_grant: assert property (@(posedge clk) disable iff (!rst_n) grant |-> waiting);

endmodule
