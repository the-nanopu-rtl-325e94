// ingress_pipeline: header parser and packet steering behind the Ethernet MAC.
//
// Packets arrive one 64-bit word per cycle. The first eight words, the Ethernet/IPv4/NDP
// header, are collected into a header register. A packet that is not IPv4, not NDP or not
// addressed to this node's IP is dropped. DATA packets and TRIM packets (a DATA packet whose
// payload a switch cut off) go to reassembly as a stream of beats that carry the parsed header
// alongside each payload word, marked sop/eop; a TRIM packet or an empty DATA packet becomes a
// single beat. ACK, NACK and PULL packets are for the transmit side: they become one transport
// event for packetization, in the cycle after their last header word.
//
// The paper builds this stage from a programmable P4 (PISA) pipeline; here it is fixed logic
// that parses the one header format this design uses, so reprogramming it is not possible.
//
// Timing: header words are always accepted; payload words pass straight through to reassembly
// with the same cycle's backpressure; the first payload word leaves in the cycle it arrives.
module ingress_pipeline
  import nanopu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] my_ip,
  input  logic        rx_valid,
  input  word_t       rx_data,
  input  logic        rx_last,
  output logic        rx_ready,
  // to reassembly
  output logic        out_valid,
  output pkt_hdr_t    out_hdr,
  output word_t       out_data,
  output logic        out_sop,
  output logic        out_eop,
  input  logic        out_ready,
  // to packetization
  output logic        ev_valid,
  output tx_event_t   ev,
  output logic        drop_evt
);
  typedef enum logic [1:0] {I_HDR, I_PAY, I_ONE, I_DROP} i_state_e;
  i_state_e   st;
  logic [511:0] hsh;
  logic [2:0] widx;
  logic       first;

  pkt_hdr_t   nh;                 // header as it completes with the current word
  assign nh = pkt_hdr_t'({hsh[447:0], rx_data});
  assign out_hdr = pkt_hdr_t'(hsh);

  logic for_us, to_rx;
  always_comb begin
    for_us = nh.eth_type == ETH_IPV4 && nh.ip_proto == IP_PROTO_NDP && nh.ip_dst == my_ip;
    to_rx  = nh.flags[F_DATA] || nh.flags[F_CHOP];
  end

  always_comb begin
    unique case (st)
      I_HDR:   rx_ready = 1'b1;
      I_PAY:   rx_ready = out_ready;
      I_DROP:  rx_ready = 1'b1;
      default: rx_ready = 1'b0;
    endcase
    out_valid = (st == I_PAY && rx_valid) || (st == I_ONE);
    out_data  = (st == I_PAY) ? rx_data : '0;
    out_sop   = (st == I_ONE) || first;
    out_eop   = (st == I_ONE) || rx_last;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= I_HDR; hsh <= '0; widx <= '0; first <= 1'b0;
      ev_valid <= 1'b0; ev <= '0; drop_evt <= 1'b0;
    end else begin
      ev_valid <= 1'b0; drop_evt <= 1'b0;
      case (st)
        I_HDR: if (rx_valid) begin
          hsh  <= {hsh[447:0], rx_data};
          widx <= widx + 1'b1;
          if (widx == 3'd7) begin
            widx <= '0;
            if (!for_us) begin
              drop_evt <= 1'b1;
              st <= rx_last ? I_HDR : I_DROP;
            end else if (to_rx) begin
              st    <= rx_last ? I_ONE : I_PAY;
              first <= 1'b1;
            end else begin
              ev_valid       <= 1'b1;
              ev.flags       <= nh.flags;
              ev.msg_id      <= nh.msg_id;
              ev.pkt_offset  <= nh.pkt_offset;
              ev.pull_offset <= nh.pull_offset;
              st <= rx_last ? I_HDR : I_DROP;
            end
          end else if (rx_last) begin
            widx <= '0;            // runt packet
            drop_evt <= 1'b1;
          end
        end
        I_PAY: if (rx_valid && out_ready) begin
          first <= 1'b0;
          if (rx_last) st <= I_HDR;
        end
        I_ONE: if (out_ready) begin first <= 1'b0; st <= I_HDR; end
        I_DROP: if (rx_valid && rx_last) st <= I_HDR;
        default: st <= I_HDR;
      endcase
    end
  end
endmodule
