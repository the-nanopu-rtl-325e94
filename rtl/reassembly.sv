// reassembly: receive half of the hardware NDP transport; turns packets into messages.
//
// Input is the ingress pipeline's stream of DATA and TRIM packets. Every beat carries the
// parsed packet header; sop/eop mark a packet's first and last payload beat (a TRIM packet, or a
// DATA packet of an empty message, is one beat whose data is ignored).
//
// For each DATA packet the block looks up the message in its table by (source IP, source port,
// sender's message id). The table is indexed by the local buffer id, which serves as the local
// message identifier. On a miss it allocates the smallest free fixed-size buffer that holds the
// whole message (msg_buffer_alloc); if none is free, the packet is dropped and not acknowledged,
// so the sender will retransmit it. Payload word i of packet k is written at
// base + k*MAX_PKT_WORDS + i, so packets may arrive in any order. A per-message bitmap records
// the packets received; at the end of each packet an ACK and a PULL request are issued. A TRIM
// packet (payload cut by a congested switch) produces a NACK and a PULL request instead. When
// the bitmap is full the message id enters a completion FIFO, and the delivery engine streams
// the message into the global RX queue of its destination port: first the RX app header (source
// IP, source port, length), then the data words; the buffer is then freed. Messages for a port
// no thread is bound to are discarded at this point.
//
// Buffers: three fixed-size classes, as in the paper. Their sizes and counts are this design's:
// 64 x 8 words, 96 x 128 words, 8 x 256 words (168 buffers, 14848 words). The 96 buffers of
// 1 KB let an 80-to-1 incast of 1 KB messages be held at once.
//
// Timing: one payload word per cycle in, one message word per cycle out; a single-packet
// message starts leaving two cycles after its last word arrives. in_ready drops only when the
// control-packet request outputs are not ready at a packet's last beat.
module reassembly
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 16,
  // buffer classes (words per buffer, number of buffers); sized so an 80-to-1 incast of 1 KB
  // messages is held at once
  parameter int unsigned CLASS_WORDS [3] = '{8, 128, 256},
  parameter int unsigned CLASS_COUNT [3] = '{64, 96, 8},
  localparam int unsigned NBUF = CLASS_COUNT[0] + CLASS_COUNT[1] + CLASS_COUNT[2],
  localparam int unsigned TOTAL = CLASS_WORDS[0]*CLASS_COUNT[0] + CLASS_WORDS[1]*CLASS_COUNT[1] +
                                  CLASS_WORDS[2]*CLASS_COUNT[2],
  localparam int unsigned IDW = $clog2(NBUF),
  localparam int unsigned ADW = $clog2(TOTAL),
  localparam int unsigned QW = $clog2(NUM_PORTS)
) (
  input  logic           clk,
  input  logic           rst,
  // from ingress
  input  logic           in_valid,
  input  pkt_hdr_t       in_hdr,
  input  word_t          in_data,
  input  logic           in_sop,
  input  logic           in_eop,
  output logic           in_ready,
  // ACK/NACK and PULL requests
  output logic           ctrl_valid,
  output ctrl_req_t      ctrl_req,
  input  logic           ctrl_ready,
  output logic           pull_valid,
  output ctrl_req_t      pull_req,
  input  logic           pull_ready,
  // port lookup
  output logic [15:0]    lk_port,
  input  logic           lk_hit,
  input  logic [QW-1:0]  lk_q,
  // to the global RX queues
  output logic           msg_valid,
  output logic [QW-1:0]  msg_q,
  output word_t          msg_data,
  output logic           msg_last,
  input  logic           msg_ready,
  // observability
  output logic           drop_evt,       // packet dropped: no buffer
  output logic           complete_evt,   // message fully reassembled
  output logic           ooo_evt         // packet arrived ahead of a missing earlier packet
);
  typedef struct packed {
    logic        valid;
    logic [31:0] src_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [MSGID_W-1:0] msg_id;
    logic [15:0] len;
    logic [ADW-1:0] base;
    logic [MAX_PKTS-1:0] got;
  } rx_entry_t;

  rx_entry_t tbl [NBUF];
  word_t     mem [TOTAL];

  // ---- buffer allocator
  logic           a_req, a_ok, f_req;
  logic [IDW-1:0] a_id, f_id;
  logic [ADW-1:0] a_base;
  msg_buffer_alloc #(.CLASS_WORDS(CLASS_WORDS), .CLASS_COUNT(CLASS_COUNT)) u_alloc (
    .clk, .rst, .alloc_req(a_req), .alloc_len(in_hdr.msg_len), .alloc_ok(a_ok), .alloc_id(a_id),
    .alloc_base(a_base), .free_req(f_req), .free_id(f_id), .free_count()
  );

  // ---- lookup of the arriving packet's message
  logic           hit;
  logic [IDW-1:0] hit_id;
  always_comb begin
    hit = 1'b0; hit_id = '0;
    for (int i = 0; i < NBUF; i++)
      if (tbl[i].valid && tbl[i].src_ip == in_hdr.ip_src && tbl[i].src_port == in_hdr.src_port &&
          tbl[i].msg_id == in_hdr.msg_id) begin
        hit = 1'b1; hit_id = IDW'(i);
      end
  end

  logic           is_data, is_trim;
  assign is_trim = in_hdr.flags[F_CHOP];
  assign is_data = in_hdr.flags[F_DATA] && !is_trim;

  // per-packet state (held from sop to eop)
  logic           p_drop;
  logic [IDW-1:0] p_id;
  logic [7:0]     p_beat;

  logic           cur_drop;
  logic [IDW-1:0] cur_id;
  always_comb begin
    if (in_sop) begin
      cur_id   = hit ? hit_id : a_id;
      cur_drop = is_data && !hit && !a_ok;
    end else begin
      cur_id   = p_id;
      cur_drop = p_drop;
    end
  end

  assign in_ready = !(in_eop && (!ctrl_ready || !pull_ready));
  logic fire;
  assign fire  = in_valid && in_ready;
  assign a_req = fire && in_sop && is_data && !hit;

  // payload words that this packet really carries
  logic [15:0] pkt_words;
  always_comb begin
    logic [31:0] mw, start;
    mw    = 32'(len_words(in_hdr.msg_len));
    start = 32'(in_hdr.pkt_offset) * MAX_PKT_WORDS;
    pkt_words = (mw <= start) ? 16'd0 :
                ((mw - start) > MAX_PKT_WORDS) ? 16'(MAX_PKT_WORDS) : 16'(mw - start);
  end

  logic [ADW-1:0] wbase;
  assign wbase = in_sop ? (hit ? tbl[hit_id].base : a_base) : tbl[p_id].base;
  logic [7:0] beat;
  assign beat = in_sop ? 8'd0 : p_beat;

  always_ff @(posedge clk)
    if (fire && is_data && !cur_drop && 16'(beat) < pkt_words)
      mem[ADW'(32'(wbase) + 32'(in_hdr.pkt_offset) * MAX_PKT_WORDS + 32'(beat))] <= in_data;

  // control requests at the end of a packet
  always_comb begin
    ctrl_req = '0;
    ctrl_req.flags      = is_trim ? 8'(1 << F_NACK) : 8'(1 << F_ACK);
    ctrl_req.dst_ip     = in_hdr.ip_src;
    ctrl_req.dst_port   = in_hdr.src_port;
    ctrl_req.src_port   = in_hdr.dst_port;
    ctrl_req.msg_id     = in_hdr.msg_id;
    ctrl_req.pkt_offset = in_hdr.pkt_offset;
    pull_req = ctrl_req;
    pull_req.flags       = 8'(1 << F_PULL);
    pull_req.pull_offset = 16'(in_hdr.pkt_offset);
    ctrl_valid = in_valid && in_eop && (is_trim || (is_data && !cur_drop)) && pull_ready;
    pull_valid = in_valid && in_eop && (is_trim || (is_data && !cur_drop)) && ctrl_ready;
  end

  // ---- completion FIFO and delivery engine
  logic [IDW-1:0] cq [2**IDW];                 // power of two so the pointers wrap correctly
  logic [IDW:0]   cq_wp, cq_rp;
  logic           dl_busy, dl_hdr;
  logic [IDW-1:0] dl_id;
  logic [15:0]    dl_idx, dl_words;

  assign lk_port = tbl[dl_id].dst_port;
  assign msg_q   = lk_q;
  assign msg_data = dl_hdr ? {tbl[dl_id].src_ip, tbl[dl_id].src_port, tbl[dl_id].len}
                           : mem[ADW'(32'(tbl[dl_id].base) + 32'(dl_idx))];
  assign msg_last  = dl_hdr ? (dl_words == 0) : (dl_idx + 1 == dl_words);
  logic dl_disc, dl_adv;
  assign dl_disc   = dl_hdr && !lk_hit;        // no thread bound to the port: discard
  assign msg_valid = dl_busy && !dl_disc;
  assign dl_adv    = dl_busy && (dl_disc || msg_ready);
  assign f_req     = dl_adv && (dl_disc || msg_last);
  assign f_id   = dl_id;

  logic [MAX_PKTS-1:0] got_next, need_mask;
  always_comb begin
    logic [7:0] np;
    np = len_pkts(in_hdr.msg_len);
    need_mask = '0;
    for (int k = 0; k < MAX_PKTS; k++) if (8'(k) < np) need_mask[k] = 1'b1;
    got_next = (in_sop && !hit) ? '0 : tbl[cur_id].got;
    got_next[in_hdr.pkt_offset[$clog2(MAX_PKTS > 1 ? MAX_PKTS : 2)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NBUF; i++) tbl[i] <= '0;
      p_drop <= 1'b0; p_id <= '0; p_beat <= '0;
      cq_wp <= '0; cq_rp <= '0; dl_busy <= 1'b0; dl_hdr <= 1'b0; dl_id <= '0;
      dl_idx <= '0; dl_words <= '0;
      drop_evt <= 1'b0; complete_evt <= 1'b0; ooo_evt <= 1'b0;
    end else begin
      drop_evt <= 1'b0; complete_evt <= 1'b0; ooo_evt <= 1'b0;
      if (fire) begin
        p_id   <= cur_id;
        p_drop <= cur_drop;
        p_beat <= beat + 1'b1;
        if (in_sop && is_data && !hit && a_ok) begin
          tbl[a_id].valid    <= 1'b1;
          tbl[a_id].src_ip   <= in_hdr.ip_src;
          tbl[a_id].src_port <= in_hdr.src_port;
          tbl[a_id].dst_port <= in_hdr.dst_port;
          tbl[a_id].msg_id   <= in_hdr.msg_id;
          tbl[a_id].len      <= in_hdr.msg_len;
          tbl[a_id].base     <= a_base;
          tbl[a_id].got      <= '0;
        end
        if (in_sop && is_data && cur_drop) drop_evt <= 1'b1;
        if (in_sop && is_data && !cur_drop && in_hdr.pkt_offset != 0 &&
            !(hit && tbl[hit_id].got[0])) ooo_evt <= 1'b1;
        if (in_eop && is_data && !cur_drop) begin
          // a message completes once; later duplicates of its packets are only acknowledged
          if (tbl[cur_id].got != need_mask || (in_sop && !hit)) begin
            tbl[cur_id].got <= got_next;
            if (got_next == need_mask) begin
              cq[cq_wp[IDW-1:0]] <= cur_id;
              cq_wp <= cq_wp + 1'b1;
              complete_evt <= 1'b1;
            end
          end
        end
      end
      // delivery
      if (!dl_busy) begin
        if (cq_wp != cq_rp) begin
          dl_busy  <= 1'b1; dl_hdr <= 1'b1; dl_idx <= '0;
          dl_id    <= cq[cq_rp[IDW-1:0]];
          dl_words <= len_words(tbl[cq[cq_rp[IDW-1:0]]].len);
          cq_rp    <= cq_rp + 1'b1;
        end
      end else begin
        if (dl_adv) begin
          if (f_req) begin
            dl_busy <= 1'b0;
            tbl[dl_id].valid <= 1'b0;
          end
          if (dl_hdr) dl_hdr <= 1'b0;
          else dl_idx <= dl_idx + 1'b1;
        end
      end
    end
  end
endmodule
