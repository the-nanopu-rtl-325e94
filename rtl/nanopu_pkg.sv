// nanopu_pkg: types and constants shared by the nanoPU NIC and per-core network interface.
//
// The datapath is one 64-bit word per cycle everywhere. At the 3.2 GHz target clock this is
// 204.8 Gb/s, which matches the 200 Gb/s line rate the design is built for.
//
// Application header (first word of every message a thread reads or writes):
//   [63:32] IP address (source on RX, destination on TX)
//   [31:16] layer-4 port (source on RX, destination on TX)
//   [15:0]  message length in bytes
// These bit positions are the ones the design's header figure prints.
//
// Wire packet: a 64-byte header of eight words followed by the payload. The header holds an
// Ethernet header, an IPv4 header and a small NDP header; the NDP field layout, the flag
// encoding and the CSR numbers below are this design's own choices (the paper gives none).
package nanopu_pkg;

  localparam int unsigned WORD_W        = 64;
  localparam int unsigned HDR_WORDS     = 8;     // 64B of headers: 72B packet for an 8B message
  localparam int unsigned MAX_PKT_WORDS = 128;   // 1024B payload, 1088B packet
  localparam int unsigned MAX_MSG_BYTES = 2048;  // largest buffer class
  localparam int unsigned MAX_PKTS      = MAX_MSG_BYTES / (MAX_PKT_WORDS * 8);
  localparam int unsigned PORT_W        = 16;
  localparam int unsigned LEN_W         = 16;
  localparam int unsigned MSGID_W       = 8;

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic [31:0] ip;
    logic [15:0] port;
    logic [15:0] len;
  } app_hdr_t;

  // NDP flag bits
  localparam int unsigned F_DATA = 0;
  localparam int unsigned F_ACK  = 1;
  localparam int unsigned F_NACK = 2;
  localparam int unsigned F_PULL = 3;
  localparam int unsigned F_CHOP = 4;   // trimmed DATA packet (TRIM)

  typedef struct packed {
    // Ethernet (112 bits)
    logic [47:0] eth_dst;
    logic [47:0] eth_src;
    logic [15:0] eth_type;
    // IPv4 (160 bits)
    logic [3:0]  ip_ver;
    logic [3:0]  ip_ihl;
    logic [7:0]  ip_tos;
    logic [15:0] ip_len;
    logic [15:0] ip_id;
    logic [15:0] ip_frag;
    logic [7:0]  ip_ttl;
    logic [7:0]  ip_proto;
    logic [15:0] ip_csum;
    logic [31:0] ip_src;
    logic [31:0] ip_dst;
    // NDP (88 bits) + padding to 512
    logic [7:0]  flags;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] msg_len;
    logic [MSGID_W-1:0] msg_id;     // sender's message identifier
    logic [7:0]  pkt_offset;         // packet index within the message
    logic [15:0] pull_offset;
    logic [151:0] pad;
  } pkt_hdr_t;

  localparam logic [15:0] ETH_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_NDP = 8'd199;

  // Control-packet request (ACK/NACK/PULL) from reassembly to egress
  typedef struct packed {
    logic [7:0]  flags;
    logic [31:0] dst_ip;
    logic [15:0] dst_port;
    logic [15:0] src_port;
    logic [MSGID_W-1:0] msg_id;
    logic [7:0]  pkt_offset;
    logic [15:0] pull_offset;
  } ctrl_req_t;

  // Transmit-side event (arriving ACK/NACK/PULL) from ingress to packetization
  typedef struct packed {
    logic [7:0]  flags;
    logic [MSGID_W-1:0] msg_id;
    logic [7:0]  pkt_offset;
    logic [15:0] pull_offset;
  } tx_event_t;

  // Networking CSRs (custom read/write range); numbers are this design's choice
  localparam logic [11:0] CSR_LCURPORT     = 12'h800;
  localparam logic [11:0] CSR_LCURPRIORITY = 12'h801;
  localparam logic [11:0] CSR_LNICCMD      = 12'h802;
  localparam logic [11:0] CSR_LMSGSRDY     = 12'h803;
  localparam logic [11:0] CSR_LIDLE        = 12'h804;
  localparam logic [11:0] CSR_LMSGDONE     = 12'h805;
  localparam logic [11:0] CSR_LNEXTTHREAD  = 12'h806;

  // lniccmd bits: value 1 binds lcurport at lcurpriority (from the paper); the others are ours
  localparam int unsigned CMD_BIND   = 0;
  localparam int unsigned CMD_UNBIND = 1;
  localparam int unsigned CMD_PRIO   = 2;

  // number of 64-bit words in a message of len bytes (header word excluded)
  function automatic logic [LEN_W-1:0] len_words(input logic [LEN_W-1:0] len);
    return LEN_W'((32'(len) + 7) >> 3);
  endfunction

  // number of packets for a message of len bytes (at least one)
  function automatic logic [7:0] len_pkts(input logic [LEN_W-1:0] len);
    logic [LEN_W-1:0] w;
    w = len_words(len);
    return (w == 0) ? 8'd1 : 8'((32'(w) + MAX_PKT_WORDS - 1) / MAX_PKT_WORDS);
  endfunction

endpackage
