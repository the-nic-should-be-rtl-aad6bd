// lh_pkg: types and constants shared by the NIC blocks.
//
// The NIC hands requests to CPU cores as 128-byte cache lines homed on the
// NIC (the line size of the platform the design targets). A request message
// occupies one control line plus AUX_LINES auxiliary lines. Byte i of a line
// sits at bits [8i+7:8i]; multi-byte fields inside a line are little endian
// (the host is a 64-bit ARM), fields on the wire are big endian.
//
// Control-line layout of a request (this design's own choice):
//   bytes  0     message type (msg_type_e)
//   byte   1     service index
//   bytes  2..3  argument length in bytes
//   bytes  4..7  transaction id of the request
//   bytes  8..15 code pointer (virtual address of the handler)
//   bytes 16..23 data pointer
//   bytes 24..   arguments, continued in the auxiliary lines
// The CPU writes its response into the same control line:
//   bytes 0..1 response length, bytes 8.. response data (at most 120 bytes).
//
// RPC wire format inside the UDP payload (this design's own choice):
//   bytes 0..3 transaction id, 4..5 procedure number, 6..7 reserved, 8.. arguments.
//
// The 128-byte line and the split into two control lines plus auxiliary
// lines follow the NIC design; the byte layouts above do not come from it.
package lh_pkg;

  localparam int unsigned CL_BYTES       = 128;
  localparam int unsigned CL_BITS        = CL_BYTES * 8;
  localparam int unsigned NET_HDR_BYTES  = 42;   // Ethernet 14 + IPv4 20 + UDP 8
  localparam int unsigned RPC_HDR_BYTES  = 8;
  localparam int unsigned CTRL_HDR_BYTES = 24;
  localparam int unsigned RESP_HDR_BYTES = 8;
  localparam int unsigned MAX_RESP_BYTES = CL_BYTES - RESP_HDR_BYTES;
  localparam int unsigned MIN_FRAME_BYTES = 60; // Ethernet minimum without FCS

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IPPROTO_UDP    = 8'd17;

  typedef logic [CL_BITS-1:0] line_t;

  typedef enum logic [7:0] {
    MSG_NONE     = 8'h00,
    MSG_RPC      = 8'h01,
    MSG_TRYAGAIN = 8'h02,
    MSG_RETIRE   = 8'h03
  } msg_type_e;

  // What the receive path learns from the network headers of a frame.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [31:0] src_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] pl_len;    // UDP payload length
  } rx_meta_t;

  // What the transmit path needs to answer a request, kept with its message.
  typedef struct packed {
    logic [47:0] mac;       // client MAC
    logic [31:0] ip;        // client IP
    logic [15:0] port;      // client UDP port
    logic [15:0] svc_port;  // our UDP port (the service's)
    logic [31:0] xid;       // transaction id
    logic [15:0] proc_id;   // procedure number
  } reply_hdr_t;

  // One's-complement sum of an IPv4 header of 20 bytes, hdr[159:152] being
  // its first byte. A received header is intact when this is 16'hFFFF; for a
  // header whose checksum field is zero, ~ip_sum(hdr) is the checksum.
  function automatic logic [15:0] ip_sum(input logic [159:0] hdr);
    logic [19:0] s;
    s = '0;
    for (int i = 0; i < 10; i++) s += 20'(hdr[159-16*i -: 16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return s[15:0];
  endfunction

endpackage
