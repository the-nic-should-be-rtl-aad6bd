// tb_scheduler: self-checking test of the multi-level scheduler.
//
// Four cores (kernel endpoints 0..3, user endpoints 4..7), four services.
// Endpoints are modelled: a waiting endpoint stops waiting when granted.
// Directed cases check: a request for a running service goes to a waiting
// user endpoint bound to it (fast path) and never to a kernel endpoint; a
// request for a service no core runs goes to a waiting kernel endpoint; user
// endpoints win over kernel endpoints; two cores running one service share
// its requests; FIFO order per service; at most one grant per cycle; the
// queue count, hot, running and unserved flags; backpressure when a
// service's queue is full.
//
// Clock period 10 ns, watchdog. The two levels checked follow the NIC
// design; round-robin order and the hot threshold are this design's own.
`timescale 1ns/1ps
module tb_scheduler;
  localparam int NC = 4, NSV = 4, QD = 4, NS = 16, NE = 2 * NC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready; logic [3:0] in_slot = 0; logic [1:0] in_svc = 0;
  logic [NC-1:0] bind_valid = '0; logic [1:0] bind_svc [NC] = '{default: '0};
  logic [NE-1:0] ep_waiting = '0, grant; logic [3:0] grant_slot; logic [1:0] grant_svc;
  logic [2:0] q_count [NSV]; logic [NSV-1:0] svc_running, hot, unserved;
  scheduler #(.NUM_CORES(NC), .NUM_SERVICES(NSV), .QDEPTH(QD), .NUM_SLOTS(NS), .HOT_THRESH(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // grant log
  int g_ep[$]; int g_slot[$]; int g_svc[$];
  always @(posedge clk) if (rst_n) begin
    if (!$onehot0(grant)) begin failures++; $display("FAIL: more than one grant"); end
    for (int e = 0; e < NE; e++) if (grant[e]) begin
      g_ep.push_back(e); g_slot.push_back(grant_slot); g_svc.push_back(grant_svc);
      ep_waiting[e] <= 1'b0;
    end
  end

  task automatic push(int svc, int slot);
    @(negedge clk); in_valid = 1; in_svc = 2'(svc); in_slot = 4'(slot);
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask
  task automatic settle(); repeat (3) @(posedge clk); @(negedge clk); endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // core 2 runs service 1, core 3 runs service 1 too later
    @(negedge clk); bind_valid[2] = 1; bind_svc[2] = 1;
    ep_waiting[6] = 1; ep_waiting[0] = 1;
    #1 check("running flag", svc_running == 4'b0010);
    push(1, 9); settle();
    check("fast path to user ep 6", g_ep.size() == 1 && g_ep[0] == 6 && g_slot[0] == 9 && g_svc[0] == 1);
    // service 3 not running -> kernel endpoint 0
    push(3, 4); settle();
    check("kernel path", g_ep.size() == 2 && g_ep[1] == 0 && g_slot[1] == 4 && g_svc[1] == 3);
    // service 1 running but its core busy: kernel endpoint must not take it
    ep_waiting[1] = 1;
    push(1, 5); push(1, 6); settle();
    check("held for running service", g_ep.size() == 2 && q_count[1] == 2 && !unserved[1]);
    ep_waiting[6] = 1; settle();
    check("served when core waits", g_ep.size() == 3 && g_ep[2] == 6 && g_slot[2] == 5);
    // second core joins service 1; both wait; remaining request and one more
    bind_valid[3] = 1; bind_svc[3] = 1; ep_waiting[6] = 1; ep_waiting[7] = 1; settle();
    push(1, 7); settle();
    check("two cores share service", g_ep.size() == 5 && g_slot[3] == 6 && g_slot[4] == 7
          && ((g_ep[3] == 6 && g_ep[4] == 7) || (g_ep[3] == 7 && g_ep[4] == 6)));
    // user endpoints win over kernel: service 0 unbound, service 1 bound, both queued
    ep_waiting = '0;
    push(0, 1); push(1, 2); push(0, 3);
    check("unserved flag", unserved == 4'b0001 && q_count[0] == 2 && q_count[1] == 1);
    @(negedge clk); ep_waiting[6] = 1; ep_waiting[1] = 1; ep_waiting[2] = 1;
    @(posedge clk); #1;
    check("user first", g_ep.size() == 6 && g_ep[5] == 6 && g_slot[5] == 2);
    settle();
    check("kernel gets oldest of service 0", g_ep.size() == 8 && g_slot[6] == 1 && g_slot[7] == 3
          && g_svc[6] == 0 && g_svc[7] == 0);
    // fill queue of service 2 (unbound, nobody waiting) -> hot, then full
    for (int i = 0; i < QD; i++) push(2, 10 + i);
    #1 check("hot and full", hot[2] && q_count[2] == 3'(QD) && unserved[2]);
    @(negedge clk); in_valid = 1; in_svc = 2; in_slot = 15; #1;
    check("backpressure", !in_ready);
    @(negedge clk); in_valid = 0;
    ep_waiting[0] = 1; ep_waiting[1] = 1; ep_waiting[2] = 1; ep_waiting[3] = 1;
    settle(); settle();
    check("drained in order", g_ep.size() == 12 && g_slot[8] == 10 && g_slot[9] == 11
          && g_slot[10] == 12 && g_slot[11] == 13 && q_count[2] == 0 && !hot[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
