// egress_pipeline: packet generator and transmit scheduler in front of the Ethernet MAC.
//
// Three sources feed the wire: ACK/NACK requests from reassembly (queued here in a small FIFO),
// paced PULL requests from the pull pacer, and DATA packets from packetization (a header
// descriptor, then payload words). Control packets (ACK, NACK, PULL) go first, as NDP asks;
// among them ACK/NACK before PULL; DATA packets are sent only when no control packet waits.
// The choice is made between packets, never inside one.
//
// Every packet gets the 64-byte Ethernet/IPv4/NDP header built here from the request fields
// and the node's own addresses: eight 64-bit words, most significant word first, then the
// payload. Control packets are header only. Ethernet and IP lengths are filled in; the IP
// checksum is left zero and the destination MAC is a single next-hop address (peer_mac), since
// the node has one link to one switch port. Those two points and the header layout are this
// design's choices.
//
// Timing: one word per cycle on tx_*; a packet's first header word leaves the cycle after it is
// chosen; tx_ready is the MAC's backpressure.
module egress_pipeline
  import nanopu_pkg::*;
#(
  parameter int unsigned CTRL_DEPTH = 16,
  localparam int unsigned AW = $clog2(CTRL_DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] my_mac,
  input  logic [47:0] peer_mac,
  input  logic [31:0] my_ip,
  // ACK / NACK requests
  input  logic        ctrl_valid,
  input  ctrl_req_t   ctrl_req,
  output logic        ctrl_ready,
  // paced PULL requests
  input  logic        pull_valid,
  input  ctrl_req_t   pull_req,
  output logic        pull_ready,
  // DATA packets
  input  logic        d_valid,
  input  pkt_hdr_t    d_hdr,
  output logic        d_ready,
  input  logic        p_valid,
  input  word_t       p_data,
  input  logic        p_last,
  output logic        p_ready,
  // to the MAC
  output logic        tx_valid,
  output word_t       tx_data,
  output logic        tx_last,
  input  logic        tx_ready,
  output logic        ctrl_pkt_evt,
  output logic        data_pkt_evt
);
  ctrl_req_t   cq [CTRL_DEPTH];
  logic [AW:0] cwp, crp;
  assign ctrl_ready = (cwp - crp) < (AW+1)'(CTRL_DEPTH);

  function automatic pkt_hdr_t fill(input pkt_hdr_t h, input logic [15:0] payload_bytes,
                                    input logic [47:0] smac, input logic [47:0] dmac,
                                    input logic [31:0] sip);
    pkt_hdr_t r = h;
    r.eth_dst  = dmac;
    r.eth_src  = smac;
    r.eth_type = ETH_IPV4;
    r.ip_ver   = 4'd4;
    r.ip_ihl   = 4'd5;
    r.ip_len   = 16'(64 - 14) + payload_bytes;
    r.ip_ttl   = 8'd64;
    r.ip_proto = IP_PROTO_NDP;
    r.ip_src   = sip;
    return r;
  endfunction

  function automatic pkt_hdr_t from_req(input ctrl_req_t c);
    pkt_hdr_t h = '0;
    h.flags       = c.flags;
    h.ip_dst      = c.dst_ip;
    h.dst_port    = c.dst_port;
    h.src_port    = c.src_port;
    h.msg_id      = c.msg_id;
    h.pkt_offset  = c.pkt_offset;
    h.pull_offset = c.pull_offset;
    return h;
  endfunction

  typedef enum logic [1:0] {E_IDLE, E_HDR, E_DATA} e_state_e;
  e_state_e  st;
  pkt_hdr_t  hdr;
  logic [2:0] widx;
  logic       has_data;

  logic [15:0] d_bytes;
  always_comb begin
    logic [31:0] mw, start, w;
    mw    = 32'(len_words(d_hdr.msg_len));
    start = 32'(d_hdr.pkt_offset) * MAX_PKT_WORDS;
    w     = (mw <= start) ? 0 : ((mw - start) > MAX_PKT_WORDS) ? MAX_PKT_WORDS : (mw - start);
    d_bytes = 16'(w * 8);
  end

  logic ctrl_have;
  assign ctrl_have = (cwp != crp);
  assign pull_ready = (st == E_IDLE) && !ctrl_have;
  assign d_ready    = (st == E_IDLE) && !ctrl_have && !pull_valid;

  logic [511:0] hbits;
  assign hbits    = hdr;
  assign tx_valid = (st == E_HDR) || (st == E_DATA && p_valid);
  assign tx_data  = (st == E_HDR) ? hbits[511 - 64*widx -: 64] : p_data;
  assign tx_last  = (st == E_HDR) ? (widx == 3'd7 && !has_data) : p_last;
  assign p_ready  = (st == E_DATA) && tx_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      cwp <= '0; crp <= '0; st <= E_IDLE; hdr <= '0; widx <= '0; has_data <= 1'b0;
      ctrl_pkt_evt <= 1'b0; data_pkt_evt <= 1'b0;
    end else begin
      ctrl_pkt_evt <= 1'b0; data_pkt_evt <= 1'b0;
      if (ctrl_valid && ctrl_ready) begin cq[cwp[AW-1:0]] <= ctrl_req; cwp <= cwp + 1'b1; end
      case (st)
        E_IDLE: begin
          widx <= '0;
          if (ctrl_have) begin
            hdr <= fill(from_req(cq[crp[AW-1:0]]), 16'd0, my_mac, peer_mac, my_ip);
            crp <= crp + 1'b1; has_data <= 1'b0; st <= E_HDR; ctrl_pkt_evt <= 1'b1;
          end else if (pull_valid) begin
            hdr <= fill(from_req(pull_req), 16'd0, my_mac, peer_mac, my_ip);
            has_data <= 1'b0; st <= E_HDR; ctrl_pkt_evt <= 1'b1;
          end else if (d_valid) begin
            hdr <= fill(d_hdr, d_bytes, my_mac, peer_mac, my_ip);
            has_data <= (d_bytes != 0); st <= E_HDR; data_pkt_evt <= 1'b1;
          end
        end
        E_HDR: if (tx_ready) begin
          widx <= widx + 1'b1;
          if (widx == 3'd7) st <= has_data ? E_DATA : E_IDLE;
        end
        E_DATA: if (p_valid && tx_ready && p_last) st <= E_IDLE;
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
