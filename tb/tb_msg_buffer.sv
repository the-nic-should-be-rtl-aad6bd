// tb_msg_buffer: self-checking test of the message SRAM and its free list.
// Allocates every slot (checking that the lowest free slot is offered),
// writes random messages and reply headers, reads every line and header
// back, frees slots in random order and checks the free count and that the
// freed slot is offered again.
//
// Eight slots, clock period 10 ns, watchdog. The lowest-free allocation
// order checked is this design's own choice.
`timescale 1ns/1ps
module tb_msg_buffer;
  import lh_pkg::*;
  localparam int NS = 8, AUX = 2, L = 1 + AUX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_valid; logic [2:0] alloc_slot;
  logic wr_en = 0; logic [2:0] wr_slot = 0; logic [L*CL_BITS-1:0] wr_msg = '0;
  reply_hdr_t wr_reply = '0, rep_hdr;
  logic [2:0] rd_slot = 0, rep_slot = 0, free_slot = 0; logic [1:0] rd_line = 0;
  line_t rd_data; logic free_en = 0; logic [3:0] free_count;
  msg_buffer #(.NUM_SLOTS(NS), .AUX_LINES(AUX)) dut (.*);

  int checks = 0, failures = 0;
  logic [L*CL_BITS-1:0] msgs [NS];
  reply_hdr_t reps [NS];
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      check($sformatf("alloc %0d", s), alloc_valid && alloc_slot == 3'(s));
      check("free count", free_count == 4'(NS - s));
      for (int w = 0; w < L*CL_BITS/32; w++) msgs[s][32*w +: 32] = $urandom;
      reps[s] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      wr_en = 1; wr_slot = alloc_slot; wr_msg = msgs[s]; wr_reply = reps[s];
      @(negedge clk); wr_en = 0;
    end
    check("full", !alloc_valid && free_count == 0);
    for (int s = 0; s < NS; s++) for (int l = 0; l < L; l++) begin
      rd_slot = 3'(s); rd_line = 2'(l); rep_slot = 3'(s); #1;
      check("line readback", rd_data == msgs[s][l*CL_BITS +: CL_BITS]);
      check("reply readback", rep_hdr == reps[s]);
    end
    // free 5 then 2, lowest free must be offered
    @(negedge clk); free_en = 1; free_slot = 5; @(negedge clk); free_en = 0; #1;
    check("realloc 5", alloc_valid && alloc_slot == 5 && free_count == 1);
    free_en = 1; free_slot = 2; @(negedge clk); free_en = 0; #1;
    check("realloc 2", alloc_valid && alloc_slot == 2 && free_count == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
