// rx_hdr_decoder: streaming Ethernet / IPv4 / UDP header decoder.
//
// Frames arrive from the Ethernet MAC as a stream of DATA_BYTES-wide beats
// (s_tdata byte b = frame byte cnt+b, s_tkeep marks valid bytes, s_tlast the
// final beat). The decoder is a pass-through: each beat leaves on the pl_*
// side in the same cycle, with pl_keep cleared for every byte that belongs to
// the 42 bytes of network headers or to Ethernet padding, so only UDP payload
// bytes remain. pl_base is the payload offset of byte lane 0 (negative while
// headers pass), so a consumer stores lane b at payload byte pl_base+b.
// Header bytes are collected in a register as they stream past; on the last
// beat pl_ok says whether the frame is for us (destination MAC and IP match,
// IPv4 without options or fragments, correct header checksum, protocol UDP,
// consistent lengths) and pl_meta carries the sender's addresses and ports
// and the payload length. The consumer discards the frame when pl_ok is low.
// Backpressure: s_tready = pl_ready.
//
// The header decoding follows the receive path of the NIC design; the beat
// width, the pass-through structure and the set of checks are this design's
// own choices. The UDP checksum is not verified (it is optional in IPv4).
//
// Because the decoder is a pass-through, pl_data, pl_last and s_tready are
// wires from the other side; only pl_keep, pl_base, pl_ok and pl_meta are
// computed here.
module rx_hdr_decoder
  import lh_pkg::*;
#(
  parameter int unsigned DATA_BYTES = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [47:0]             local_mac,
  input  logic [31:0]             local_ip,
  // from the MAC
  input  logic                    s_tvalid,
  output logic                    s_tready,
  input  logic [DATA_BYTES*8-1:0] s_tdata,
  input  logic [DATA_BYTES-1:0]   s_tkeep,
  input  logic                    s_tlast,
  // payload stream to the RPC decoder
  output logic                    pl_valid,
  input  logic                    pl_ready,
  output logic [DATA_BYTES*8-1:0] pl_data,
  output logic [DATA_BYTES-1:0]   pl_keep,
  output logic signed [16:0]      pl_base,
  output logic                    pl_last,
  output logic                    pl_ok,
  output rx_meta_t                pl_meta
);
  localparam int unsigned H = NET_HDR_BYTES;

  logic [15:0] cnt;                 // frame offset of lane 0 of this beat
  logic [7:0]  hdr_q [H];
  logic [7:0]  hdr   [H];           // header bytes including this beat
  logic [15:0] frame_len;

  assign s_tready = pl_ready;
  assign pl_valid = s_tvalid;
  assign pl_data  = s_tdata;
  assign pl_last  = s_tlast;
  assign pl_base  = 17'(signed'({1'b0, cnt})) - 17'sd42;

  always_comb begin
    for (int i = 0; i < H; i++) hdr[i] = hdr_q[i];
    for (int b = 0; b < DATA_BYTES; b++) begin
      if (s_tkeep[b] && (32'(cnt) + 32'(b) < H)) hdr[32'(cnt) + 32'(b)] = s_tdata[8*b +: 8];
    end
  end

  // header fields
  logic [47:0]  dst_mac, src_mac;
  logic [15:0]  ethertype, ip_len, ip_frag, udp_len, src_port, dst_port;
  logic [31:0]  src_ip, dst_ip;
  logic [159:0] ip_hdr;
  always_comb begin
    dst_mac   = {hdr[0], hdr[1], hdr[2], hdr[3], hdr[4], hdr[5]};
    src_mac   = {hdr[6], hdr[7], hdr[8], hdr[9], hdr[10], hdr[11]};
    ethertype = {hdr[12], hdr[13]};
    for (int i = 0; i < 20; i++) ip_hdr[159-8*i -: 8] = hdr[14+i];
    ip_len    = {hdr[16], hdr[17]};
    ip_frag   = {hdr[20], hdr[21]};
    src_ip    = {hdr[26], hdr[27], hdr[28], hdr[29]};
    dst_ip    = {hdr[30], hdr[31], hdr[32], hdr[33]};
    src_port  = {hdr[34], hdr[35]};
    dst_port  = {hdr[36], hdr[37]};
    udp_len   = {hdr[38], hdr[39]};
  end

  // payload bytes end at frame byte 34 + udp_len; later bytes are padding
  always_comb begin
    for (int b = 0; b < DATA_BYTES; b++) begin
      pl_keep[b] = s_tkeep[b] && (32'(cnt) + 32'(b) >= H)
                   && (32'(cnt) + 32'(b) < 32'(udp_len) + 32'd34);
    end
  end

  always_comb begin
    frame_len = cnt;
    for (int b = 0; b < DATA_BYTES; b++) frame_len += 16'(s_tkeep[b]);
  end

  assign pl_ok = (frame_len >= 16'(H))
              && (dst_mac == local_mac)
              && (ethertype == ETHERTYPE_IPV4)
              && (hdr[14] == 8'h45)
              && ((ip_frag & 16'h3FFF) == 16'h0000)      // MF = 0, offset = 0
              && (hdr[23] == IPPROTO_UDP)
              && (ip_sum(ip_hdr) == 16'hFFFF)
              && (dst_ip == local_ip)
              && (32'(ip_len) + 32'd14 <= 32'(frame_len))
              && (32'(udp_len) + 32'd20 == 32'(ip_len))
              && (udp_len >= 16'd8);

  assign pl_meta = '{src_mac: src_mac, src_ip: src_ip, src_port: src_port,
                     dst_port: dst_port, pl_len: udp_len - 16'd8};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < H; i++) hdr_q[i] <= '0;
    end else if (s_tvalid && s_tready) begin
      cnt <= s_tlast ? '0 : cnt + 16'(DATA_BYTES);
      for (int i = 0; i < H; i++) hdr_q[i] <= s_tlast ? 8'h00 : hdr[i];
    end
  end

endmodule
