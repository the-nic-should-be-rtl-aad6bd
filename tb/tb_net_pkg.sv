// tb_net_pkg: frame building and checking helpers shared by the testbenches.
//
// make_request() returns the bytes of an Ethernet/IPv4/UDP frame carrying
// an RPC request in the wire format of lh_pkg (transaction id, procedure,
// reserved, arguments), padded to 60 bytes. Options let a test spoil one
// header field at a time. The checksum is computed here independently of the
// design, with a plain 32-bit sum and fold.
//
// No timing of its own; used from initial blocks.
package tb_net_pkg;

  typedef logic [7:0] bytes_t[$];

  typedef struct {
    logic [47:0] dst_mac, src_mac;
    logic [31:0] src_ip, dst_ip;
    logic [15:0] sport, dport;
    logic [31:0] xid;
    logic [15:0] proc_id;
    bit          bad_csum, bad_proto, bad_ethertype;
  } req_t;

  function automatic logic [15:0] csum16(bytes_t b, int off, int len);
    int unsigned s = 0;
    for (int i = 0; i < len; i += 2) s += {b[off+i], b[off+i+1]};
    while (s >> 16) s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  function automatic bytes_t make_request(req_t r, bytes_t args);
    bytes_t f;
    int udp_len = 8 + 8 + args.size();
    int ip_len  = 20 + udp_len;
    logic [15:0] c;
    for (int i = 0; i < 6; i++) f.push_back(r.dst_mac[47-8*i -: 8]);
    for (int i = 0; i < 6; i++) f.push_back(r.src_mac[47-8*i -: 8]);
    f.push_back(r.bad_ethertype ? 8'h86 : 8'h08); f.push_back(r.bad_ethertype ? 8'hDD : 8'h00);
    f.push_back(8'h45); f.push_back(8'h00);
    f.push_back(8'(ip_len >> 8)); f.push_back(8'(ip_len));
    f.push_back(8'h12); f.push_back(8'h34); f.push_back(8'h40); f.push_back(8'h00);
    f.push_back(8'd64); f.push_back(r.bad_proto ? 8'd6 : 8'd17);
    f.push_back(8'h00); f.push_back(8'h00);
    for (int i = 0; i < 4; i++) f.push_back(r.src_ip[31-8*i -: 8]);
    for (int i = 0; i < 4; i++) f.push_back(r.dst_ip[31-8*i -: 8]);
    c = csum16(f, 14, 20);
    if (r.bad_csum) c ^= 16'h0101;
    f[24] = c[15:8]; f[25] = c[7:0];
    f.push_back(r.sport[15:8]); f.push_back(r.sport[7:0]);
    f.push_back(r.dport[15:8]); f.push_back(r.dport[7:0]);
    f.push_back(8'(udp_len >> 8)); f.push_back(8'(udp_len));
    f.push_back(8'h00); f.push_back(8'h00);
    for (int i = 0; i < 4; i++) f.push_back(r.xid[31-8*i -: 8]);
    f.push_back(r.proc_id[15:8]); f.push_back(r.proc_id[7:0]);
    f.push_back(8'h00); f.push_back(8'h00);
    foreach (args[i]) f.push_back(args[i]);
    while (f.size() < 60) f.push_back(8'h00);
    return f;
  endfunction

  function automatic bytes_t random_bytes(int n);
    bytes_t b;
    for (int i = 0; i < n; i++) b.push_back(8'($urandom));
    return b;
  endfunction

endpackage
