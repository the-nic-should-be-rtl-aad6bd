// tb_endpoint_2f2f: self-checking test of one endpoint's protocol engine.
//
// Plays the CPU and the scheduler around a kernel endpoint (TIMEOUT_CYCLES
// shortened to 50) and a user endpoint fed the same commands. Checks the
// sequence of the paper's figure: load of control line 0 stalls until a
// request is granted and is answered with it; an auxiliary line load is
// answered at once; the load of line 1 first fetches line 0 back (marked as
// a response, with its slot) and the auxiliary line (not a response), then
// stalls; with no request a TryAgain comes exactly TIMEOUT_CYCLES after the
// stall began; a kick answers a stalled load with TryAgain at once, a kick
// during handler execution answers the next load at once; retire answers
// Retire on the kernel endpoint and is ignored by the user endpoint.
//
// Clock period 10 ns; a watchdog ends the run after a fixed number of cycles.
// The load/fetch-exclusive order and the TryAgain/Retire cases follow the NIC
// design; the exact cycle counts checked are those of this implementation.
`timescale 1ns/1ps
module tb_endpoint_2f2f;
  import lh_pkg::*;
  localparam int T = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_valid = 0; logic [1:0] rd_line = 0;
  logic grant = 0; logic [3:0] grant_slot = 0; logic kick = 0, retire = 0;
  logic rsp_ack = 0, fwd_ack = 0;
  logic waiting, rsp_req, fwd_req, fwd_is_resp, blocked;
  logic [1:0] rsp_line, fwd_line; msg_type_e rsp_type; logic [3:0] rsp_slot, fwd_slot;
  logic [31:0] tryagain_count;
  // user endpoint copy, only its answer type is compared
  logic u_waiting, u_rsp_req, u_fwd_req, u_fwd_is_resp, u_blocked;
  logic [1:0] u_rsp_line, u_fwd_line; msg_type_e u_rsp_type; logic [3:0] u_rsp_slot, u_fwd_slot;
  logic [31:0] u_tryagain;
  logic u_sel = 0;

  endpoint_2f2f #(.AUX_LINES(2), .NUM_SLOTS(16), .TIMEOUT_CYCLES(T), .IS_KERNEL(1)) dut (.*);
  endpoint_2f2f #(.AUX_LINES(2), .NUM_SLOTS(16), .TIMEOUT_CYCLES(T), .IS_KERNEL(0)) dut_user (
    .clk, .rst_n, .rd_valid(rd_valid && u_sel), .rd_line, .waiting(u_waiting), .grant(1'b0), .grant_slot,
    .kick, .retire, .rsp_req(u_rsp_req), .rsp_line(u_rsp_line), .rsp_type(u_rsp_type),
    .rsp_slot(u_rsp_slot), .rsp_ack(u_rsp_req), .fwd_req(u_fwd_req), .fwd_line(u_fwd_line),
    .fwd_is_resp(u_fwd_is_resp), .fwd_slot(u_fwd_slot), .fwd_ack(u_fwd_req),
    .blocked(u_blocked), .tryagain_count(u_tryagain));

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic load(int line);
    @(negedge clk); rd_valid = 1; rd_line = 2'(line); @(negedge clk); rd_valid = 0;
  endtask
  // wait for a fetch-exclusive, check it, acknowledge it
  task automatic expect_fwd(int line, bit is_resp, int slot);
    int n = 0;
    while (!fwd_req && n < 20) begin @(negedge clk); n++; end
    check($sformatf("fwd line %0d", line), fwd_req && fwd_line == 2'(line) && fwd_is_resp == is_resp
          && (!is_resp || fwd_slot == 4'(slot)));
    repeat ($urandom_range(0, 3)) @(negedge clk);
    fwd_ack = 1; @(negedge clk); fwd_ack = 0;
  endtask
  // wait for the answer, check it, return cycles waited
  task automatic expect_rsp(int line, msg_type_e t, int slot, output int cycles);
    cycles = 0;
    while (!rsp_req && cycles < 2*T) begin @(negedge clk); cycles++; end
    check($sformatf("rsp line %0d type %0d (got %0d %0d)", line, t, rsp_line, rsp_type),
          rsp_req && rsp_line == 2'(line) && rsp_type == t && (t != MSG_RPC || rsp_slot == 4'(slot)));
    rsp_ack = 1; @(negedge clk); rsp_ack = 0;
  endtask

  initial begin
    int c;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1: load line 0, nothing to fetch, stall, grant
    load(0);
    repeat (3) @(negedge clk);
    check("stalled and waiting", waiting && blocked && !rsp_req && !fwd_req);
    grant = 1; grant_slot = 4'd3; @(negedge clk); grant = 0;
    expect_rsp(0, MSG_RPC, 3, c);
    check("not waiting while handler runs", !waiting);
    // 2: auxiliary line 2 of that request
    load(2); expect_rsp(2, MSG_RPC, 3, c);
    // 3: next request on line 1: fetch line 0 (response) and aux 2, then TryAgain after T
    load(1);
    expect_fwd(0, 1, 3);
    expect_fwd(2, 0, 0);
    @(negedge clk);
    check("waiting after fetches", waiting);
    expect_rsp(1, MSG_TRYAGAIN, 0, c);
    check($sformatf("TryAgain after %0d cycles, expected %0d", c, T), c == T);
    check("TryAgain counted", tryagain_count == 1);
    // 4: load line 0: fetch line 1 (TryAgain, not a response), kick while stalled
    load(0);
    expect_fwd(1, 0, 0);
    repeat (2) @(negedge clk);
    kick = 1; @(negedge clk); kick = 0;
    expect_rsp(0, MSG_TRYAGAIN, 0, c);
    check("kick answered at once", c <= 2);
    // 5: kick while the core runs: next load answered with TryAgain, no wait
    kick = 1; @(negedge clk); kick = 0;
    load(1);
    expect_fwd(0, 0, 0);
    expect_rsp(1, MSG_TRYAGAIN, 0, c);
    check("pending kick served at next load", c <= 2);
    // 6: retire on the kernel endpoint
    retire = 1; @(negedge clk); retire = 0;
    u_sel = 1;
    load(0);
    u_sel = 0;
    expect_fwd(1, 0, 0);
    expect_rsp(0, MSG_RETIRE, 0, c);
    // the user endpoint saw the earlier kicks: it answers TryAgain, never Retire
    check("user endpoint answered its pending kick", u_tryagain == 1);
    // 7: a granted request on line 1 is fetched back as a response on the next load
    load(1);
    expect_fwd(0, 0, 0);
    @(negedge clk); grant = 1; grant_slot = 4'd9; @(negedge clk); grant = 0;
    expect_rsp(1, MSG_RPC, 9, c);
    load(0);
    expect_fwd(1, 1, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the user endpoint must never answer Retire
  always @(posedge clk) if (u_rsp_req && u_rsp_type == MSG_RETIRE) begin
    failures++; $display("FAIL: user endpoint answered Retire");
  end
endmodule
