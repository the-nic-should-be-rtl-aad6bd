// tb_tx_encoder: self-checking test of the reply frame builder.
//
// Feeds response lines with random lengths (0, short ones that need
// padding, 120, and an over-long length that must be clipped) and random
// reply headers, with random backpressure on the output, using a 16-byte
// beat. The expected frame is built here field by field with an independent
// checksum; every byte, the frame length (tkeep/tlast), the beat count when
// never stalled, and the release of the right slot after the last beat are
// checked.
//
// Clock period 10 ns, watchdog. The reply frame format is this design's own.
`timescale 1ns/1ps
module tb_tx_encoder;
  import lh_pkg::*;
  import tb_net_pkg::*;
  localparam int DB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [47:0] local_mac = 48'h02_00_00_00_00_01; logic [31:0] local_ip = 32'h0A00_0001;
  logic in_valid = 0, in_ready; logic [3:0] in_slot = 0; line_t in_line = '0;
  logic [3:0] rep_slot; reply_hdr_t rep_hdr;
  logic m_tvalid, m_tready = 1, m_tlast; logic [DB*8-1:0] m_tdata; logic [DB-1:0] m_tkeep;
  logic free_en; logic [3:0] free_slot; logic [31:0] tx_count;
  tx_encoder #(.DATA_BYTES(DB), .NUM_SLOTS(16)) dut (.*);

  reply_hdr_t reps [16];
  assign rep_hdr = reps[rep_slot];

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #400000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  bit stall = 0;
  always @(negedge clk) m_tready <= stall ? 1'($urandom_range(0, 1)) : 1'b1;
  bytes_t got; int beats = 0, frees = 0; logic [3:0] freed;
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      beats++;
      for (int b = 0; b < DB; b++) if (m_tkeep[b]) got.push_back(m_tdata[8*b +: 8]);
    end
    if (free_en) begin frees++; freed = free_slot; end
  end

  function automatic bytes_t expected(reply_hdr_t r, line_t l);
    bytes_t f; int n = int'(l[15:0]); logic [15:0] c; int udp, ip;
    if (n > 120) n = 120;
    udp = 16 + n; ip = 20 + udp;
    for (int i = 0; i < 6; i++) f.push_back(r.mac[47-8*i -: 8]);
    for (int i = 0; i < 6; i++) f.push_back(local_mac[47-8*i -: 8]);
    f.push_back(8'h08); f.push_back(8'h00);
    f.push_back(8'h45); f.push_back(8'h00); f.push_back(8'(ip >> 8)); f.push_back(8'(ip));
    f.push_back(0); f.push_back(0); f.push_back(8'h40); f.push_back(0);
    f.push_back(64); f.push_back(17); f.push_back(0); f.push_back(0);
    for (int i = 0; i < 4; i++) f.push_back(local_ip[31-8*i -: 8]);
    for (int i = 0; i < 4; i++) f.push_back(r.ip[31-8*i -: 8]);
    c = csum16(f, 14, 20); f[24] = c[15:8]; f[25] = c[7:0];
    f.push_back(r.svc_port[15:8]); f.push_back(r.svc_port[7:0]);
    f.push_back(r.port[15:8]); f.push_back(r.port[7:0]);
    f.push_back(8'(udp >> 8)); f.push_back(8'(udp)); f.push_back(0); f.push_back(0);
    for (int i = 0; i < 4; i++) f.push_back(r.xid[31-8*i -: 8]);
    f.push_back(r.proc_id[15:8]); f.push_back(r.proc_id[7:0]); f.push_back(0); f.push_back(0);
    for (int i = 0; i < n; i++) f.push_back(l[8*(8+i) +: 8]);
    while (f.size() < 60) f.push_back(0);
    return f;
  endfunction

  task automatic one(int len, int slot);
    line_t l; bytes_t e; int f0 = frees;
    for (int w = 0; w < CL_BITS/32; w++) l[32*w +: 32] = $urandom;
    l[15:0] = 16'(len);
    reps[slot] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    e = expected(reps[slot], l);
    got.delete(); beats = 0;
    @(negedge clk); in_valid = 1; in_slot = 4'(slot); in_line = l;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
    while (frees == f0) @(negedge clk);
    check($sformatf("length %0d: frame size %0d vs %0d", len, got.size(), e.size()), got.size() == e.size());
    for (int i = 0; i < e.size() && i < got.size(); i++)
      if (got[i] !== e[i]) begin check($sformatf("len %0d byte %0d: %h vs %h", len, i, got[i], e[i]), 0); break; end
    check("slot freed", freed == 4'(slot));
    if (!stall) check($sformatf("beats %0d", beats), beats == (e.size() + DB - 1) / DB);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    one(0, 1); one(5, 2); one(120, 3); one(500, 4);
    for (int i = 0; i < 10; i++) one($urandom_range(0, 120), $urandom_range(0, 15));
    stall = 1;
    for (int i = 0; i < 10; i++) one($urandom_range(0, 120), $urandom_range(0, 15));
    check("tx count", tx_count == 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
