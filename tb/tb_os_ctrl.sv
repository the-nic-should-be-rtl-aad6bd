// tb_os_ctrl: self-checking test of the kernel register interface.
// Writes every kind of register and checks what reaches the datapath
// (addresses, service and function table writes with the staged pointers,
// core bindings, one-cycle kick and retire pulses on the addressed endpoint
// only, out-of-range indices ignored), then reads status words back.
//
// Clock period 10 ns, watchdog. The register map checked is this design's own;
// kick and retire as commands follow the NIC design.
`timescale 1ns/1ps
module tb_os_ctrl;
  localparam int NC = 4, NSV = 4, NP = 4, NE = 2 * NC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [15:0] cfg_waddr = 0, cfg_raddr = 0; logic [63:0] cfg_wdata = 0, cfg_rdata;
  logic [47:0] local_mac; logic [31:0] local_ip;
  logic svc_we, svc_en, fn_we, fn_en; logic [1:0] svc_idx, fn_svc, fn_proc; logic [15:0] svc_port;
  logic [63:0] fn_code, fn_data; logic [NC-1:0] bind_valid; logic [1:0] bind_svc [NC];
  logic [NE-1:0] kick, retire;
  logic [NE-1:0] ep_blocked = 8'b1010_0001; logic [2:0] q_count [NSV] = '{3'd1, 3'd2, 3'd3, 3'd4};
  logic [NSV-1:0] svc_running = 4'b0010, hot = 4'b1000, unserved = 4'b0100;
  logic [31:0] rx_count = 11, drop_count = 22, tx_count = 33, bad_addr_count = 44; logic [4:0] free_slots = 9;
  os_ctrl #(.NUM_CORES(NC), .NUM_SERVICES(NSV), .NUM_PROCS(NP), .QDEPTH(4), .NUM_SLOTS(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int kicks = 0, retires = 0;
  always @(posedge clk) begin kicks += $countones(kick); retires += $countones(retire); end

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_waddr = 16'(a); cfg_wdata = d;
  endtask
  task automatic rd_check(string what, int a, logic [63:0] exp);
    cfg_raddr = 16'(a); #1;
    check($sformatf("%s: read %h = %h, expected %h", what, a, cfg_rdata, exp), cfg_rdata == exp);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wr(16'h0000, 64'h0000_0200_0000_0001); wr(16'h0001, 64'h0A00_0001);
    wr(16'h0002, 64'h1111_2222_3333_4444); wr(16'h0003, 64'h5555_6666_7777_8888);
    wr(16'h0102, 64'h1_1B58); #1;
    check("service write", svc_we && svc_idx == 2 && svc_en && svc_port == 16'h1B58);
    wr(16'h1000 | (3 << 2) | 1, 64'h1); #1;
    check("function write", fn_we && fn_svc == 3 && fn_proc == 1 && fn_en
          && fn_code == 64'h1111_2222_3333_4444 && fn_data == 64'h5555_6666_7777_8888);
    wr(16'h0301, 64'h102);
    wr(16'h0405, 0); #1;
    check("kick pulse", kick == 8'b0010_0000 && retire == 0);
    wr(16'h0502, 0); #1;
    check("retire pulse", retire == 8'b0000_0100 && kick == 0);
    wr(16'h0409, 0); #1;
    check("out-of-range kick ignored", kick == 0);
    @(negedge clk); cfg_we = 0; #1;
    check("no write strobes when idle", !svc_we && !fn_we && kick == 0 && retire == 0);
    check("pulses one cycle", kicks == 1 && retires == 1);
    check("addresses", local_mac == 48'h0200_0000_0001 && local_ip == 32'h0A00_0001);
    check("binding", bind_valid == 4'b0010 && bind_svc[1] == 2);
    rd_check("MAC", 16'h0000, 64'h0200_0000_0001);
    rd_check("binding", 16'h0301, 64'h102);
    rd_check("blocked 0", 16'h0600, 1);
    rd_check("blocked 1", 16'h0601, 0);
    rd_check("blocked 7", 16'h0607, 1);
    rd_check("load 3", 16'h0703, {45'd0, 1'b0, 1'b1, 1'b0, 16'd4});
    rd_check("load 1", 16'h0701, {45'd0, 3'b001, 16'd2});
    rd_check("load 2", 16'h0702, {45'd0, 3'b100, 16'd3});
    rd_check("rx", 16'h0800, 11);
    rd_check("drop", 16'h0801, 22);
    rd_check("tx", 16'h0802, 33);
    rd_check("bad", 16'h0803, 44);
    rd_check("free", 16'h0804, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
