// tb_home_agent: self-checking test of the NIC's cache-line home agent.
//
// Four endpoints with two auxiliary lines (four lines each). The endpoints
// and the message buffer are modelled; a buffer line reads as a pattern of
// (slot, line). Checks load decoding to endpoint and line and the count of
// bad addresses; line answers for a request's control and auxiliary lines
// (taken from the right buffer line), for TryAgain and Retire (type in byte
// 0, rest zero); round-robin service of simultaneous answers; that a
// fetch-exclusive is issued once per request even while the endpoint keeps
// asking; routing of the fetched line to the endpoint and, for a response,
// to the TX queue with its slot; and backpressure from a full TX queue.
//
// Clock period 10 ns, watchdog as in every test here. The address split and
// the channel handshakes checked are this design's own.
`timescale 1ns/1ps
module tb_home_agent;
  import lh_pkg::*;
  localparam int NE = 4, AW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cpu_req_valid = 0, cpu_req_ready; logic [AW-1:0] cpu_req_addr = 0;
  logic cpu_rsp_valid, cpu_rsp_ready = 1; logic [AW-1:0] cpu_rsp_addr; line_t cpu_rsp_data;
  logic cpu_fwd_valid, cpu_fwd_ready = 1; logic [AW-1:0] cpu_fwd_addr;
  logic cpu_fwd_rsp_valid = 0, cpu_fwd_rsp_ready; logic [AW-1:0] cpu_fwd_rsp_addr = 0; line_t cpu_fwd_rsp_data = '0;
  logic [NE-1:0] ep_rd_valid; logic [1:0] ep_rd_line;
  logic [NE-1:0] ep_rsp_req = '0, ep_rsp_ack, ep_fwd_req = '0, ep_fwd_is_resp = '0, ep_fwd_ack;
  logic [1:0] ep_rsp_line [NE] = '{default: '0}; msg_type_e ep_rsp_type [NE] = '{default: MSG_NONE};
  logic [2:0] ep_rsp_slot [NE] = '{default: '0};
  logic [1:0] ep_fwd_line [NE] = '{default: '0}; logic [2:0] ep_fwd_slot [NE] = '{default: '0};
  logic [2:0] buf_rd_slot; logic [1:0] buf_rd_line; line_t buf_rd_data;
  logic tx_valid, tx_ready = 1; logic [2:0] tx_slot; line_t tx_line; logic [31:0] bad_addr_count;

  home_agent #(.NUM_EP(NE), .AUX_LINES(2), .NUM_SLOTS(8), .ADDR_W(AW)) dut (.*);

  function automatic line_t pattern(int slot, int line);
    line_t l;
    for (int w = 0; w < CL_BITS/32; w++) l[32*w +: 32] = 32'(slot * 1000 + line * 100 + w + 1);
    return l;
  endfunction
  assign buf_rd_data = pattern(buf_rd_slot, buf_rd_line);

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // endpoint models: drop the request when acknowledged
  always @(posedge clk) for (int e = 0; e < NE; e++) if (ep_rsp_ack[e]) ep_rsp_req[e] <= 1'b0;
  // captured CPU answers
  logic [AW-1:0] rsp_addr_q[$]; line_t rsp_data_q[$]; logic [AW-1:0] fwd_addr_q[$];
  always @(posedge clk) begin
    if (rst_n && cpu_rsp_valid && cpu_rsp_ready) begin rsp_addr_q.push_back(cpu_rsp_addr); rsp_data_q.push_back(cpu_rsp_data); end
    if (rst_n && cpu_fwd_valid && cpu_fwd_ready) fwd_addr_q.push_back(cpu_fwd_addr);
  end
  int tx_n = 0; logic [2:0] tx_slot_q; line_t tx_line_q;
  always @(posedge clk) if (tx_valid && tx_ready) begin tx_n++; tx_slot_q = tx_slot; tx_line_q = tx_line; end
  int fack_n [NE] = '{default: 0};
  always @(posedge clk) for (int e = 0; e < NE; e++) if (ep_fwd_ack[e]) fack_n[e]++;

  initial begin
    line_t exp;
    repeat (2) @(posedge clk); rst_n = 1;
    // load decode
    @(negedge clk); cpu_req_valid = 1; cpu_req_addr = 16'((2 << 2) | 3); #1;
    check("decode ep 2 line 3", ep_rd_valid == 4'b0100 && ep_rd_line == 3 && cpu_req_ready);
    cpu_req_addr = 16'((5 << 2) | 0); #1;
    check("out of range ignored", ep_rd_valid == 0);
    @(negedge clk); cpu_req_valid = 0; #1;
    check("bad address counted", bad_addr_count == 1);
    // answers: ep1 control line 0 request slot 5, ep3 aux line 3 slot 6, ep0 TryAgain line 1, ep2 Retire
    @(negedge clk);
    ep_rsp_req = 4'b1111;
    ep_rsp_line[1] = 0; ep_rsp_type[1] = MSG_RPC; ep_rsp_slot[1] = 5;
    ep_rsp_line[3] = 3; ep_rsp_type[3] = MSG_RPC; ep_rsp_slot[3] = 6;
    ep_rsp_line[0] = 1; ep_rsp_type[0] = MSG_TRYAGAIN;
    ep_rsp_line[2] = 0; ep_rsp_type[2] = MSG_RETIRE;
    repeat (8) @(negedge clk);
    check("four answers", rsp_addr_q.size() == 4 && ep_rsp_req == 0);
    foreach (rsp_addr_q[i]) begin
      int e, l;
      e = int'(rsp_addr_q[i] >> 2);
      l = int'(rsp_addr_q[i][1:0]);
      case (e)
        1: exp = pattern(5, 0);
        3: exp = pattern(6, 2);
        0: begin exp = '0; exp[7:0] = 8'h02; end
        default: begin exp = '0; exp[7:0] = 8'h03; end
      endcase
      check($sformatf("answer ep %0d line %0d", e, l), rsp_data_q[i] == exp && l == int'(ep_rsp_line[e]));
    end
    check("round robin order", rsp_addr_q.size() == 4 && (rsp_addr_q[0] >> 2) == 0 && (rsp_addr_q[1] >> 2) == 1
          && (rsp_addr_q[2] >> 2) == 2 && (rsp_addr_q[3] >> 2) == 3);
    // fetch-exclusive: ep2 response line 1 slot 4, ep0 aux line 2 (no response)
    ep_fwd_req = 4'b0101; ep_fwd_line[2] = 1; ep_fwd_is_resp[2] = 1; ep_fwd_slot[2] = 4;
    ep_fwd_line[0] = 2; ep_fwd_is_resp[0] = 0;
    repeat (10) @(negedge clk);
    check($sformatf("one fetch per endpoint (%0d)", fwd_addr_q.size()), fwd_addr_q.size() == 2);
    check("fetch addresses", fwd_addr_q.size() == 2 && fwd_addr_q[0] == 16'((0 << 2) | 2) && fwd_addr_q[1] == 16'((2 << 2) | 1));
    // CPU returns ep2's line while the TX queue is full: not accepted
    tx_ready = 0; cpu_fwd_rsp_valid = 1; cpu_fwd_rsp_addr = 16'((2 << 2) | 1); cpu_fwd_rsp_data = pattern(7, 7); #1;
    check("held while TX full", !cpu_fwd_rsp_ready && !tx_valid == 0 && ep_fwd_ack == 0);
    @(negedge clk); tx_ready = 1; @(negedge clk); ep_fwd_req[2] = 0;
    cpu_fwd_rsp_valid = 1; cpu_fwd_rsp_addr = 16'((0 << 2) | 2); cpu_fwd_rsp_data = pattern(1, 1);
    @(negedge clk); ep_fwd_req[0] = 0; cpu_fwd_rsp_valid = 0;
    repeat (2) @(negedge clk);
    check("response to TX", tx_n == 1 && tx_slot_q == 4 && tx_line_q == pattern(7, 7));
    check("endpoints acknowledged", fack_n[2] == 1 && fack_n[0] == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
