// tb_lauberhorn_env: end-to-end test of the NIC with a behavioural model
// of the CPU cores and of the coherent interconnect.
//
// The CPU model: each core runs either a kernel thread polling its kernel
// endpoint or a process's user-mode loop polling its user endpoint, always
// alternating between the two control lines of an endpoint. A load is sent
// on cpu_req and the core waits (stalls) until cpu_rsp brings the line.
//   - A request (type 1) is checked against what the client sent
//     (service, code/data pointer of the procedure, arguments, read from the
//     auxiliary lines when longer than the control line holds), the handler
//     computes the reply (reply byte i = argument byte i ^ procedure ^ 0x5A,
//     length min(args, 120)) and writes it into the line in its cache.
//   - A request that came to a kernel thread makes the kernel switch the
//     core to that service: it loads its next kernel line, the OS kicks the
//     kernel endpoint, and on the TryAgain the OS binds the core to the
//     service and the core enters the user-mode loop.
//   - A TryAgain in the user loop after the OS kicked the process sends the
//     core back to the kernel (binding cleared); otherwise it polls again.
//   - A Retire ends the kernel thread on that core.
// The interconnect model answers the NIC's fetch-exclusives from the cores'
// caches. A client model sends request frames and checks every reply frame
// (addresses, IP checksum, transaction id, reply bytes).
//
// Mechanisms counted, each must occur: fast-path delivery to a user
// endpoint, delivery to a kernel endpoint, auxiliary line loads, TryAgain on
// timeout (and not before TIMEOUT cycles), TryAgain on kick, Retire, switch
// of a core from kernel to user loop and back, dropped frame, a service
// flagged hot by the load statistics, and reply frames sent.
//
// Parameters: FULL selects the NIC at its defaults (no parameter list),
// NC/TO tell the models the core count and TryAgain timeout, NREQ the number
// of random requests. Clock period 4 ns; a watchdog bounds the run. The core
// behaviour (kernel thread, user loop, kick, retire) follows the NIC design;
// the kernel's policy for giving cores to services is this test's own.
`timescale 1ns/1ps
module tb_lauberhorn_env #(
  parameter bit FULL = 1'b0,
  parameter int NC   = 4,
  parameter int TO   = 3000,
  parameter int NREQ = 60
);
  import lh_pkg::*;
  import tb_net_pkg::*;
  localparam int DB = 64, AW = 32, LIW = 2;
  localparam int NE = 2 * NC;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic rx_tvalid = 0, rx_tready, rx_tlast = 0; logic [DB*8-1:0] rx_tdata = '0; logic [DB-1:0] rx_tkeep = '0;
  logic tx_tvalid, tx_tready = 1, tx_tlast; logic [DB*8-1:0] tx_tdata; logic [DB-1:0] tx_tkeep;
  logic cpu_req_valid = 0, cpu_req_ready; logic [AW-1:0] cpu_req_addr = 0;
  logic cpu_rsp_valid, cpu_rsp_ready = 1; logic [AW-1:0] cpu_rsp_addr; line_t cpu_rsp_data;
  logic cpu_fwd_valid, cpu_fwd_ready = 1; logic [AW-1:0] cpu_fwd_addr;
  logic cpu_fwd_rsp_valid = 0, cpu_fwd_rsp_ready; logic [AW-1:0] cpu_fwd_rsp_addr = 0; line_t cpu_fwd_rsp_data = '0;
  logic cfg_we = 0; logic [15:0] cfg_waddr = 0, cfg_raddr = 0; logic [63:0] cfg_wdata = 0, cfg_rdata;

  if (FULL) begin : g_full
    lauberhorn_nic dut (.*);
  end else begin : g_small
    lauberhorn_nic #(.NUM_CORES(NC), .NUM_SLOTS(16), .QDEPTH(8), .TIMEOUT_CYCLES(TO)) dut (.*);
  end

  localparam logic [47:0] NIC_MAC = 48'h02_00_00_00_00_01, CLI_MAC = 48'h02_C1_1E_47_00_01;
  localparam logic [31:0] NIC_IP = 32'h0A00_0001, CLI_IP = 32'h0A00_0063;

  int checks = 0, failures = 0;
  task automatic check(string what, bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_fast = 0, n_kernel = 0, n_aux = 0, n_try_timeout = 0, n_try_kick = 0, n_retire = 0;
  int n_to_user = 0, n_to_kernel = 0, n_drop = 0, n_hot = 0, n_replies = 0, n_sent = 0, n_rx_stall = 0;
  always @(posedge clk) if (rst_n && rx_tvalid && !rx_tready) n_rx_stall++;

  // ---------------- register port (one user at a time) ----------------
  bit cfg_lock = 0;
  task automatic cfg_write(int a, logic [63:0] d);
    while (cfg_lock) @(posedge clk);
    cfg_lock = 1;
    @(negedge clk); cfg_we = 1; cfg_waddr = 16'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
    cfg_lock = 0;
  endtask
  task automatic cfg_read(int a, output logic [63:0] d);
    while (cfg_lock) @(posedge clk);
    cfg_lock = 1;
    @(negedge clk); cfg_raddr = 16'(a); #0.5; d = cfg_rdata;
    cfg_lock = 0;
  endtask

  // ---------------- interconnect model ----------------
  logic [AW-1:0] req_q[$];
  line_t cache [int];          // lines held (written) by the cores
  line_t rsp_line [int];       // load answers not yet consumed
  always @(posedge clk) if (rst_n && cpu_rsp_valid) rsp_line[int'(cpu_rsp_addr)] = cpu_rsp_data;
  initial forever begin
    @(negedge clk);
    cpu_req_valid = 0;
    if (req_q.size() > 0) begin cpu_req_valid = 1; cpu_req_addr = req_q.pop_front(); end
  end
  logic [AW-1:0] fwd_q[$];
  always @(posedge clk) if (rst_n && cpu_fwd_valid) fwd_q.push_back(cpu_fwd_addr);
  initial forever begin
    @(negedge clk);
    if (fwd_q.size() > 0) begin
      logic [AW-1:0] a;
      a = fwd_q.pop_front();
      repeat (2) @(negedge clk);
      cpu_fwd_rsp_valid = 1; cpu_fwd_rsp_addr = a;
      cpu_fwd_rsp_data = cache.exists(int'(a)) ? cache[int'(a)] : '0;
      @(posedge clk); while (!cpu_fwd_rsp_ready) @(posedge clk);
      @(negedge clk); cpu_fwd_rsp_valid = 0;
      cache.delete(int'(a));
    end
  end

  task automatic load(int ep, int line, output line_t d, output int cycles);
    int a;
    a = (ep << LIW) | line;
    cycles = 0;
    req_q.push_back(AW'(a)); if ($test$plusargs("dbg")) $display("%0t load ep %0d line %0d", $time, ep, line);
    while (!rsp_line.exists(a)) begin @(posedge clk); cycles++; end
    d = rsp_line[a]; if ($test$plusargs("dbg")) $display("%0t got ep %0d line %0d type %0d after %0d", $time, ep, line, d[7:0], cycles);
    rsp_line.delete(a);
  endtask

  // ---------------- client model and scoreboard ----------------
  typedef struct { int svc; int proc_id; bytes_t args; } sent_t;
  sent_t sent [int];            // by transaction id
  int    pending = 0;
  function automatic logic [15:0] svc_port(int s); return 16'(7000 + s); endfunction
  function automatic logic [63:0] code_ptr(int s, int p); return 64'h4000_0000 + 64'(s * 'h1000 + p * 'h10); endfunction
  function automatic logic [63:0] data_ptr(int s); return 64'h8000_0000 + 64'(s * 'h1000); endfunction
  int next_xid = 100;

  task automatic send_frame(bytes_t f);
    int n;
    n = (f.size() + DB - 1) / DB;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      rx_tvalid = 1;
      for (int b = 0; b < DB; b++) begin
        rx_tdata[8*b +: 8] = (k*DB+b < f.size()) ? f[k*DB+b] : 8'h00;
        rx_tkeep[b] = (k*DB+b < f.size());
      end
      rx_tlast = (k == n-1);
      @(posedge clk); while (!rx_tready) @(posedge clk);
    end
    @(negedge clk); rx_tvalid = 0; rx_tlast = 0;
  endtask

  task automatic send_request(int svc, int proc_id, int nargs, int port = -1);
    req_t r; bytes_t a; sent_t s;
    r = '{dst_mac: NIC_MAC, src_mac: CLI_MAC, src_ip: CLI_IP, dst_ip: NIC_IP,
          sport: 16'(20000 + next_xid % 100), dport: (port >= 0) ? 16'(port) : svc_port(svc),
          xid: 32'(next_xid), proc_id: 16'(proc_id), bad_csum: 0, bad_proto: 0, bad_ethertype: 0};
    a = random_bytes(nargs);
    if (port < 0) begin
      s.svc = svc; s.proc_id = proc_id; s.args = a;
      sent[next_xid] = s;
      pending++;
      n_sent++;
    end
    next_xid++;
    send_frame(make_request(r, a));
  endtask

  // reply frames
  bytes_t rx_frame;
  always @(posedge clk) if (rst_n && tx_tvalid && tx_tready) begin
    for (int b = 0; b < DB; b++) if (tx_tkeep[b]) rx_frame.push_back(tx_tdata[8*b +: 8]);
    if (tx_tlast) begin
      check_reply(rx_frame);
      rx_frame.delete();
    end
  end
  function automatic void check_reply(bytes_t f);
    int xid, n, p;
    logic [15:0] udp_len;
    checks++;
    if (f.size() < 60) begin failures++; $display("FAIL: short reply"); return; end
    xid = int'({f[42], f[43], f[44], f[45]});
    udp_len = {f[38], f[39]};
    if (!sent.exists(xid)) begin failures++; $display("FAIL: reply to unknown xid %0d", xid); return; end
    n = sent[xid].args.size() > 120 ? 120 : sent[xid].args.size();
    p = sent[xid].proc_id;
    if ({f[0],f[1],f[2],f[3],f[4],f[5]} != CLI_MAC || {f[30],f[31],f[32],f[33]} != CLI_IP
        || {f[34], f[35]} != svc_port(sent[xid].svc) || csum16(f, 14, 20) != 16'h0000
        || int'(udp_len) != 16 + n) begin
      failures++; $display("FAIL: reply header for xid %0d", xid); return;
    end
    for (int i = 0; i < n; i++)
      if (f[50+i] != (sent[xid].args[i] ^ 8'(p) ^ 8'h5A)) begin
        failures++; $display("FAIL: reply byte %0d of xid %0d", i, xid); return;
      end
    sent.delete(xid);
    pending--;
    n_replies++;
  endfunction

  // ---------------- cores ----------------
  typedef enum int {M_KERNEL, M_USER, M_OFF} mode_e;
  mode_e mode [NC];
  int    bound [NC];
  bit    os_kicked_user [NC];
  bit    leaving_kernel [NC];
  bit    claim [NC];
  function automatic bit svc_has_core(int s);
    for (int c = 0; c < NC; c++) if ((mode[c] == M_USER || claim[c]) && bound[c] == s) return 1;
    return 0;
  endfunction

  task automatic handle(int c, int ep, int line, line_t d);
    int svc, len, xid, p; logic [63:0] code; bytes_t args; line_t resp; line_t aux; int cyc;
    svc  = int'(d[15:8]); len = int'(d[31:16]); xid = int'(d[63:32]); code = d[127:64];
    p    = int'((code - code_ptr(svc, 0)) >> 4);
    for (int i = 0; i < len && i < 104; i++) args.push_back(d[8*(24+i) +: 8]);
    for (int k = 0; 104 + 128*k < len; k++) begin
      load(ep, 2 + k, aux, cyc);
      n_aux++;
      for (int i = 0; i < 128 && args.size() < len; i++) args.push_back(aux[8*i +: 8]);
    end
    checks++;
    if (!sent.exists(xid) || sent[xid].svc != svc || sent[xid].proc_id != p || code != code_ptr(svc, p)
        || d[191:128] != data_ptr(svc) || args != sent[xid].args) begin
      failures++; $display("FAIL: request delivered to core %0d (xid %0d svc %0d) differs from the one sent", c, xid, svc);
    end
    resp = '0;
    resp[15:0] = 16'(len > 120 ? 120 : len);
    for (int i = 0; i < len && i < 120; i++) resp[8*(8+i) +: 8] = args[i] ^ 8'(p) ^ 8'h5A;
    cache[(ep << LIW) | line] = resp;
    repeat ($urandom_range(5, 40)) @(posedge clk);       // handler run time
  endtask

  task automatic core(int c);
    int par [2] = '{0, 0};
    line_t d; int cyc, ep, l, k;
    while (mode[c] != M_OFF) begin
      k  = (mode[c] == M_USER) ? 1 : 0;
      ep = k ? NC + c : c;
      l  = par[k];
      par[k] ^= 1;
      if (leaving_kernel[c]) fork
        begin repeat (20) @(posedge clk); cfg_write('h0400 + c, 0); end   // IPI + kick
      join_none
      load(ep, l, d, cyc);
      case (d[7:0])
        8'h01: begin
          if (k) n_fast++; else n_kernel++;
          if ($test$plusargs("dbg")) $display("%0t core %0d ep %0d rpc", $time, c, ep);
          handle(c, ep, l, d);
          // kernel policy: a core is given to services 1 and 2 when none runs them
          if (!k && (d[15:8] == 8'd1 || d[15:8] == 8'd2) && c != NC - 1 && !svc_has_core(int'(d[15:8]))) begin
            leaving_kernel[c] = 1;
            bound[c] = int'(d[15:8]);
            claim[c] = 1;
          end
        end
        8'h02: begin
          if (leaving_kernel[c]) begin
            // a kick must end the load well before the timeout would
            check($sformatf("kick TryAgain after %0d cycles < %0d", cyc, TO), cyc < TO);
            if (cyc < TO) n_try_kick++;
            leaving_kernel[c] = 0;
            claim[c] = 0;
            cfg_write('h0300 + c, 64'h100 | 64'(bound[c]));
            mode[c] = M_USER; n_to_user++;
          end else if (k && os_kicked_user[c]) begin
            check($sformatf("kick TryAgain after %0d cycles < %0d", cyc, TO), cyc < TO);
            if (cyc < TO) n_try_kick++;
            os_kicked_user[c] = 0;
            cfg_write('h0300 + c, 0);
            mode[c] = M_KERNEL; n_to_kernel++;
          end else begin
            n_try_timeout++;
            check($sformatf("TryAgain after %0d cycles >= %0d", cyc, TO), cyc >= TO);
          end
        end
        8'h03: begin n_retire++; mode[c] = M_OFF; end
        default: check($sformatf("core %0d got line type %0d", c, d[7:0]), 0);
      endcase
    end
  endtask

  bit cores_go = 0;
  for (genvar g = 0; g < NC; g++) begin : g_core
    initial begin
      while (!cores_go) @(posedge clk);
      core(g);
    end
  end

  // ---------------- scenario ----------------
  initial begin
    int wd;
    wd = 0;
    while (wd < 400000 + 40 * TO) begin @(posedge clk); wd++; end
    failures++;
    $display("watchdog expired, %0d replies outstanding", pending);
    foreach (sent[x]) $display("  outstanding xid %0d service %0d", x, sent[x].svc);
    for (int c = 0; c < NC; c++) $display("  core %0d mode %0d bound %0d", c, mode[c], bound[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg_write('h0000, 64'(NIC_MAC));
    cfg_write('h0001, 64'(NIC_IP));
    for (int s = 0; s < 4; s++) begin
      cfg_write('h0100 + s, 64'h1_0000 | 64'(svc_port(s)));
      for (int p = 0; p < 4; p++) begin
        cfg_write('h0002, code_ptr(s, p));
        cfg_write('h0003, data_ptr(s));
        cfg_write('h1000 + (s << 4) + p, 1);
      end
    end
    // core 0 runs service 0 in user mode, the others run kernel threads
    for (int c = 0; c < NC; c++) begin
      mode[c] = (c == 0) ? M_USER : M_KERNEL; bound[c] = 0; os_kicked_user[c] = 0; leaving_kernel[c] = 0; claim[c] = 0;
    end
    cfg_write('h0300, 64'h100);
    cores_go = 1;
    repeat (50) @(posedge clk);
    // fast path, kernel path, long arguments
    send_request(0, 1, 16);
    send_request(1, 2, 40);
    send_request(0, 3, 300);
    send_request(0, 0, 0);
    send_request(2, 0, 200, 9999);           // unknown port: dropped
    repeat (300) @(posedge clk);
    // burst to service 0, whose only core is busy in its handler: the
    // queue builds up (requests of a running service wait for its cores)
    fork
      begin
        logic [63:0] h;
        for (int t = 0; t < 400; t++) begin cfg_read('h0700, h); if (h[17]) n_hot++; @(posedge clk); end
      end
    join_none
    for (int i = 0; i < 12; i++) send_request(0, i % 4, 8 + i);
    for (int i = 0; i < NREQ; i++) begin
      send_request($urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(0, 360));
      repeat ($urandom_range(0, 200)) @(posedge clk);
    end
    // idle long enough for TryAgain on timeout
    repeat (TO + 500) @(posedge clk);
    // preempt core 0's process
    os_kicked_user[0] = 1;
    cfg_write('h0400 + NC + 0, 0);
    repeat (300) @(posedge clk);
    // take the last core back from its kernel thread (it never runs a process)
    cfg_write('h0500 + NC - 1, 0);
    repeat (100) @(posedge clk);
    for (int i = 0; i < 8; i++) send_request(i % 4, i % 4, 24);
    while (pending > 0) @(posedge clk);
    repeat (TO + 200) @(posedge clk);
    cfg_read('h0801, v); n_drop = int'(v);
    $display("fast %0d kernel %0d aux %0d try_timeout %0d try_kick %0d retire %0d to_user %0d to_kernel %0d drop %0d hot %0d replies %0d/%0d rx stall cycles %0d",
             n_fast, n_kernel, n_aux, n_try_timeout, n_try_kick, n_retire, n_to_user, n_to_kernel, n_drop, n_hot, n_replies, n_sent, n_rx_stall);
    check("fast path used", n_fast > 0);
    check("kernel path used", n_kernel > 0);
    check("auxiliary lines loaded", n_aux > 0);
    check("TryAgain on timeout", n_try_timeout > 0);
    check("TryAgain on kick", n_try_kick > 0);
    check("Retire", n_retire > 0);
    check("kernel to user switch", n_to_user > 0);
    check("user to kernel switch", n_to_kernel > 0);
    check("frame dropped", n_drop == 1);
    check("hot service seen", n_hot > 0);
    check("every request answered", n_replies == n_sent && pending == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
