// tb_sync_fifo: self-checking test of the FIFO used for the scheduler and
// TX queues. Random pushes and pops against a queue model; checks order,
// full/empty flags, the occupancy count and that a push into a full FIFO is
// refused.
//
// Clock period 10 ns, watchdog; about 8000 random cycles.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int W = 12, D = 5;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0) ^ (i > 1000 && i < 1200);
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 2) == 0) || (i > 1200 && i < 1300);
      #1;
      check("count", count == model.size());
      check("in_ready", in_ready == (model.size() < D));
      check("out_valid", out_valid == (model.size() > 0));
      if (out_valid) check("head", out_data == model[0]);
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
