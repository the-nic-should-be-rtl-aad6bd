// tb_rx_hdr_decoder: self-checking test of the streaming header decoder.
//
// Uses a 16-byte beat so that the 42 header bytes span three beats. Sends
// good request frames of random argument length (including ones short
// enough to be padded) and frames with a wrong MAC, IP, checksum, protocol
// or ethertype, with random gaps and backpressure. Checks the payload bytes
// collected from pl_keep/pl_base against the bytes sent, pl_ok, and the
// metadata fields; one cycle per beat when the consumer is always ready.
//
// Clock period 10 ns, watchdog. The checks made on the headers are this
// design's own choice.
`timescale 1ns/1ps
module tb_rx_hdr_decoder;
  import lh_pkg::*;
  import tb_net_pkg::*;

  localparam int DB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [47:0] local_mac = 48'h02_00_00_00_00_01;
  logic [31:0] local_ip  = 32'h0A00_0001;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [DB*8-1:0] s_tdata = '0;
  logic [DB-1:0] s_tkeep = '0;
  logic pl_valid, pl_ready = 1, pl_last, pl_ok;
  logic [DB*8-1:0] pl_data;
  logic [DB-1:0] pl_keep;
  logic signed [16:0] pl_base;
  rx_meta_t pl_meta;

  rx_hdr_decoder #(.DATA_BYTES(DB)) dut (.*);

  int checks = 0, failures = 0;
  bit random_ready = 0;
  always @(negedge clk) pl_ready <= random_ready ? 1'($urandom_range(0, 3) != 0) : 1'b1;

  // collector
  bytes_t got;
  logic got_ok; rx_meta_t got_meta; bit got_done = 0;
  always @(posedge clk) if (pl_valid && pl_ready) begin
    for (int b = 0; b < DB; b++) if (pl_keep[b]) begin
      int p;
      p = int'(pl_base) + b;
      while (got.size() <= p) got.push_back(8'hXX);
      got[p] = pl_data[8*b +: 8];
    end
    if (pl_last) begin got_ok = pl_ok; got_meta = pl_meta; got_done = 1; end
  end

  task automatic send(bytes_t f, output int cycles);
    int n = (f.size() + DB - 1) / DB;
    cycles = 0;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      s_tvalid = 1;
      for (int b = 0; b < DB; b++) begin
        s_tdata[8*b +: 8] = (k*DB+b < f.size()) ? f[k*DB+b] : 8'h00;
        s_tkeep[b] = (k*DB+b < f.size());
      end
      s_tlast = (k == n-1);
      @(posedge clk); cycles++;
      while (!s_tready) begin @(posedge clk); cycles++; end
    end
    @(negedge clk); s_tvalid = 0; s_tlast = 0;
  endtask

  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(req_t r, int nargs, bit expect_ok);
    bytes_t args = random_bytes(nargs);
    bytes_t f = make_request(r, args);
    int cyc;
    got.delete(); got_done = 0;
    send(f, cyc);
    check("frame end seen", got_done);
    check($sformatf("pl_ok=%0d expected %0d", got_ok, expect_ok), got_ok == expect_ok);
    if (expect_ok) begin
      check($sformatf("payload length %0d vs %0d", got.size(), 8+nargs), got.size() == 8 + nargs);
      for (int i = 0; i < nargs && i + 8 < got.size(); i++)
        if (got[8+i] !== args[i]) begin check($sformatf("arg byte %0d", i), 0); break; end
      check("xid bytes", {got[0],got[1],got[2],got[3]} == r.xid);
      check("meta", got_meta.src_mac == r.src_mac && got_meta.src_ip == r.src_ip &&
                    got_meta.src_port == r.sport && got_meta.dst_port == r.dport &&
                    got_meta.pl_len == 16'(8 + nargs));
      if (!random_ready) check($sformatf("one beat per cycle (%0d cycles)", cyc),
                               cyc == (f.size() + DB - 1) / DB);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    r = '{dst_mac: local_mac, src_mac: 48'h02_AA_BB_CC_DD_EE, src_ip: 32'hC0A8_0102,
          dst_ip: local_ip, sport: 16'd40000, dport: 16'd7000, xid: 32'hDEAD_BEEF,
          proc_id: 16'd3, bad_csum: 0, bad_proto: 0, bad_ethertype: 0};
    for (int i = 0; i < 12; i++) begin
      r.xid = $urandom; r.sport = 16'($urandom);
      one(r, (i < 3) ? i : $urandom_range(0, 300), 1);
    end
    begin req_t q = r; q.dst_mac ^= 48'h1;     one(q, 20, 0); end
    begin req_t q = r; q.dst_ip  ^= 32'h100;   one(q, 20, 0); end
    begin req_t q = r; q.bad_csum = 1;         one(q, 20, 0); end
    begin req_t q = r; q.bad_proto = 1;        one(q, 20, 0); end
    begin req_t q = r; q.bad_ethertype = 1;    one(q, 20, 0); end
    random_ready = 1;
    for (int i = 0; i < 10; i++) begin r.xid = $urandom; one(r, $urandom_range(0, 200), 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
