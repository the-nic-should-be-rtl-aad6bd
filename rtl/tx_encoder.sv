// tx_encoder: turns a handler's response line into a UDP reply frame.
//
// Input is one entry of the Control Info TX queue: the message slot of the
// request and the control line the CPU wrote its response into (bytes 0..1
// response length, bytes 8.. data). With the request's reply header from the
// message buffer (client MAC, IP and port, our port, transaction id,
// procedure) the encoder builds
//   Ethernet (to the client, from local_mac, type IPv4)
//   IPv4 (no options, DF set, TTL 64, UDP, checksum computed here)
//   UDP (from our port to the client's, checksum 0 = not used)
//   RPC reply header (transaction id, procedure, status 0)
//   response data (the length is clipped to 120 bytes)
// padded to the 60-byte Ethernet minimum, and streams it out in
// DATA_BYTES-wide beats (byte b of a beat = frame byte k*DATA_BYTES+b). After
// the last beat the slot is released in the message buffer. One frame is in
// flight at a time; in_ready is high only while idle.
//
// The paper says only that the NIC fetches the response and sends it out
// over the network; the reply format mirrors the receive side and is this
// design's own.
module tx_encoder
  import lh_pkg::*;
#(
  parameter int unsigned DATA_BYTES = 64,
  parameter int unsigned NUM_SLOTS  = 64,
  localparam int unsigned SW = $clog2(NUM_SLOTS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [47:0]             local_mac,
  input  logic [31:0]             local_ip,
  // from the TX queue
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [SW-1:0]           in_slot,
  input  line_t                   in_line,
  // reply header lookup
  output logic [SW-1:0]           rep_slot,
  input  reply_hdr_t              rep_hdr,
  // frame out to the MAC
  output logic                    m_tvalid,
  input  logic                    m_tready,
  output logic [DATA_BYTES*8-1:0] m_tdata,
  output logic [DATA_BYTES-1:0]   m_tkeep,
  output logic                    m_tlast,
  // slot release
  output logic                    free_en,
  output logic [SW-1:0]           free_slot,
  output logic [31:0]             tx_count
);
  localparam int unsigned HDRS = NET_HDR_BYTES + RPC_HDR_BYTES;     // 50
  localparam int unsigned MAXF = HDRS + MAX_RESP_BYTES;             // 170
  localparam int unsigned NBEATS = (MAXF + DATA_BYTES - 1) / DATA_BYTES;
  localparam int unsigned BW = (NBEATS > 1) ? $clog2(NBEATS) : 1;

  logic          busy;
  logic [SW-1:0] slot_q;
  line_t         line_q;
  logic [BW-1:0] beat;

  assign in_ready = !busy;
  assign rep_slot = slot_q;

  logic [15:0]  rlen, ip_len, udp_len, flen, csum;
  logic [159:0] iph;
  logic [7:0]   fb [MAXF];
  always_comb begin
    rlen    = line_q[15:0];
    if (rlen > 16'(MAX_RESP_BYTES)) rlen = 16'(MAX_RESP_BYTES);
    udp_len = 16'd8 + 16'(RPC_HDR_BYTES) + rlen;
    ip_len  = 16'd20 + udp_len;
    flen    = 16'(HDRS) + rlen;
    if (flen < 16'(MIN_FRAME_BYTES)) flen = 16'(MIN_FRAME_BYTES);
    iph  = {8'h45, 8'h00, ip_len, 16'h0000, 16'h4000, 8'd64, IPPROTO_UDP, 16'h0000,
            local_ip, rep_hdr.ip};
    csum = ~ip_sum(iph);
    iph[79:64] = csum;
    for (int i = 0; i < MAXF; i++) fb[i] = 8'h00;
    for (int i = 0; i < 6; i++) begin
      fb[i]     = rep_hdr.mac[47-8*i -: 8];
      fb[6 + i] = local_mac[47-8*i -: 8];
    end
    fb[12] = ETHERTYPE_IPV4[15:8];
    fb[13] = ETHERTYPE_IPV4[7:0];
    for (int i = 0; i < 20; i++) fb[14 + i] = iph[159-8*i -: 8];
    fb[34] = rep_hdr.svc_port[15:8];
    fb[35] = rep_hdr.svc_port[7:0];
    fb[36] = rep_hdr.port[15:8];
    fb[37] = rep_hdr.port[7:0];
    fb[38] = udp_len[15:8];
    fb[39] = udp_len[7:0];
    for (int i = 0; i < 4; i++) fb[42 + i] = rep_hdr.xid[31-8*i -: 8];
    fb[46] = rep_hdr.proc_id[15:8];
    fb[47] = rep_hdr.proc_id[7:0];
    for (int i = 0; i < MAX_RESP_BYTES; i++)
      if (16'(i) < rlen) fb[HDRS + i] = line_q[8*(RESP_HDR_BYTES + i) +: 8];
  end

  always_comb begin
    for (int b = 0; b < DATA_BYTES; b++) begin
      int unsigned idx;
      idx = 32'(beat) * DATA_BYTES + 32'(b);
      m_tdata[8*b +: 8] = (idx < MAXF) ? fb[idx] : 8'h00;
      m_tkeep[b]        = idx < 32'(flen);
    end
    m_tlast = (32'(beat) + 1) * DATA_BYTES >= 32'(flen);
  end
  assign m_tvalid  = busy;
  assign free_en   = busy && m_tready && m_tlast;
  assign free_slot = slot_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      slot_q   <= '0;
      line_q   <= '0;
      beat     <= '0;
      tx_count <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy   <= 1'b1;
        slot_q <= in_slot;
        line_q <= in_line;
        beat   <= '0;
      end
    end else if (m_tready) begin
      if (m_tlast) begin
        busy     <= 1'b0;
        tx_count <= tx_count + 1;
      end else begin
        beat <= beat + 1'b1;
      end
    end
  end

endmodule
