// tb_rpc_decoder: self-checking test of the RPC demultiplexer/unmarshaller.
//
// Frames built by tb_net_pkg pass through the header decoder (the
// decoder's source in the NIC) into the block. The test programs three
// services and some procedures, then sends requests to them with random
// argument lengths up to the message capacity (360 bytes with two auxiliary
// lines) and checks the whole message image written to the buffer (header
// fields, code and data pointer, arguments, zeros after them), the reply
// header and the (slot, service) pushed to the scheduler. Frames for an
// unknown port, a disabled or out-of-range procedure, with too many
// arguments or a bad IP checksum must be dropped and counted. The buffer
// allocation and the scheduler queue are modelled with random stalls.
//
// Clock period 10 ns, watchdog. Wire format and control-line layout are
// those of lh_pkg, which are this design's own.
`timescale 1ns/1ps
module tb_rpc_decoder;
  import lh_pkg::*;
  import tb_net_pkg::*;
  localparam int DB = 64, NSV = 4, NP = 4, AUX = 2, NS = 8, L = 1 + AUX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [47:0] local_mac = 48'h02_00_00_00_00_01;
  logic [31:0] local_ip  = 32'h0A00_0001;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [DB*8-1:0] s_tdata = '0; logic [DB-1:0] s_tkeep = '0;
  logic pl_valid, pl_ready, pl_last, pl_ok; logic [DB*8-1:0] pl_data; logic [DB-1:0] pl_keep;
  logic signed [16:0] pl_base; rx_meta_t pl_meta;
  logic svc_we = 0, svc_en = 0, fn_we = 0, fn_en = 0;
  logic [1:0] svc_idx = 0, fn_svc = 0, fn_proc = 0; logic [15:0] svc_port = 0;
  logic [63:0] fn_code = 0, fn_data = 0;
  logic alloc_valid = 1; logic [2:0] alloc_slot = 0;
  logic buf_wr_en; logic [2:0] buf_wr_slot; logic [L*CL_BITS-1:0] buf_wr_msg; reply_hdr_t buf_wr_reply;
  logic q_valid, q_ready = 1; logic [2:0] q_slot; logic [1:0] q_svc;
  logic [31:0] rx_count, drop_count;

  rx_hdr_decoder #(.DATA_BYTES(DB)) u_src (.*);
  rpc_decoder #(.DATA_BYTES(DB), .NUM_SERVICES(NSV), .NUM_PROCS(NP), .AUX_LINES(AUX), .NUM_SLOTS(NS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // buffer / queue models with random stalls
  always @(negedge clk) begin
    alloc_valid <= $urandom_range(0, 3) != 0;
    q_ready     <= $urandom_range(0, 3) != 0;
  end
  logic [L*CL_BITS-1:0] w_msg; reply_hdr_t w_rep; logic [1:0] w_svc; logic [2:0] w_slot; int writes = 0;
  always @(posedge clk) if (buf_wr_en) begin
    w_msg = buf_wr_msg; w_rep = buf_wr_reply; w_svc = q_svc; w_slot = buf_wr_slot; writes++;
    if (!(q_valid && q_ready && q_slot == buf_wr_slot)) begin failures++; $display("FAIL: write without push"); end
    alloc_slot <= alloc_slot + 1;
  end

  logic [15:0] ports [NSV] = '{16'd7000, 16'd7001, 16'd7002, 16'd7003};
  logic [63:0] codes [NSV][NP], datas [NSV][NP];

  task automatic send(bytes_t f);
    int n = (f.size() + DB - 1) / DB;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      s_tvalid = 1;
      for (int b = 0; b < DB; b++) begin
        s_tdata[8*b +: 8] = (k*DB+b < f.size()) ? f[k*DB+b] : 8'h00;
        s_tkeep[b] = (k*DB+b < f.size());
      end
      s_tlast = (k == n-1);
      @(posedge clk); while (!s_tready) @(posedge clk);
    end
    @(negedge clk); s_tvalid = 0; s_tlast = 0;
  endtask

  task automatic request(int svc, int proc_id, int nargs, bit expect_ok, bit bad_csum = 0, int port = -1);
    req_t r; bytes_t a; int w0 = writes, d0 = drop_count; logic [L*CL_BITS-1:0] exp;
    r = '{dst_mac: local_mac, src_mac: 48'h02_11_22_33_44_55, src_ip: 32'hC0A8_0007,
          dst_ip: local_ip, sport: 16'($urandom), dport: (port >= 0) ? 16'(port) : ports[svc],
          xid: $urandom, proc_id: 16'(proc_id), bad_csum: bad_csum, bad_proto: 0, bad_ethertype: 0};
    a = random_bytes(nargs);
    send(make_request(r, a));
    repeat (40) @(posedge clk);
    if (!expect_ok) begin
      check("dropped", writes == w0 && drop_count == d0 + 1);
      return;
    end
    check($sformatf("written svc %0d proc %0d len %0d", svc, proc_id, nargs), writes == w0 + 1);
    exp = '0;
    exp[7:0] = 8'h01; exp[15:8] = 8'(svc); exp[31:16] = 16'(nargs); exp[63:32] = r.xid;
    exp[127:64] = codes[svc][proc_id]; exp[191:128] = datas[svc][proc_id];
    foreach (a[i]) exp[8*(24+i) +: 8] = a[i];
    check("message image", w_msg == exp);
    check("service pushed", w_svc == 2'(svc));
    check("reply header", w_rep.mac == r.src_mac && w_rep.ip == r.src_ip && w_rep.port == r.sport
                          && w_rep.svc_port == r.dport && w_rep.xid == r.xid && w_rep.proc_id == 16'(proc_id));
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // program tables: services 0..2 enabled, procs 0..2 of each enabled
    for (int s = 0; s < NSV; s++) begin
      @(negedge clk); svc_we = 1; svc_idx = 2'(s); svc_en = (s < 3); svc_port = ports[s];
      for (int p = 0; p < NP; p++) begin
        codes[s][p] = {$urandom, $urandom}; datas[s][p] = {$urandom, $urandom};
        @(negedge clk); svc_we = 0; fn_we = 1; fn_svc = 2'(s); fn_proc = 2'(p); fn_en = (p < 3);
        fn_code = codes[s][p]; fn_data = datas[s][p];
      end
      @(negedge clk); fn_we = 0;
    end
    request(0, 0, 0, 1);
    request(1, 2, 360, 1);              // fills control + both auxiliary lines
    request(2, 1, 5, 1);                // stale bytes of the long one must be gone
    for (int i = 0; i < 25; i++) request($urandom_range(0, 2), $urandom_range(0, 2), $urandom_range(0, 360), 1);
    request(3, 0, 10, 0);               // service disabled
    request(0, 3, 10, 0);               // procedure disabled
    request(0, 9, 10, 0);               // procedure out of range
    request(0, 0, 361, 0);              // too many arguments
    request(0, 0, 10, 0, 1);            // bad IP checksum
    request(0, 0, 10, 0, 0, 9999);      // unknown port
    request(1, 1, 100, 1);
    check("rx count", rx_count == 29);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
