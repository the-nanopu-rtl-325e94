// packetization: transmit half of the hardware NDP transport; turns messages into packets.
//
// A message arrives from the global TX queues: the TX app header word (destination IP,
// destination port, length in bytes) and its data words, with the sending thread's port. On the
// header word a fixed-size buffer is allocated (msg_buffer_alloc); while none is free, the input
// is stalled. The buffer id is the message id carried in every packet, and a table indexed by it
// holds the destination, length, buffer pointer and the per-packet state: to_send (queued for
// transmission), acked, nacked. The first INIT_WIN packets are queued as soon as the whole
// message is stored (NDP's first window, sent without waiting); each further packet is released
// by a PULL from the receiver. A NACK (the receiver saw a TRIM) marks the packet for resending,
// and the next PULL for the message queues the lowest NACKed packet before any new packet. An
// ACK marks a packet delivered; when all packets of a message are ACKed the buffer is freed.
//
// Timers: a scan pointer visits one message per cycle. A message that has seen no ACK for
// RTX_TIMEOUT cycles requeues all packets released and not yet ACKed (loss without a TRIM, e.g.
// a drop at the receiver), and a fully ACKed message is freed when it is not being sent.
//
// The send engine takes the lowest message id with a queued packet, offers its header as a
// descriptor (d_*) and then streams the packet's payload words (p_*): packet k of a message
// carries words k*MAX_PKT_WORDS onwards, read at buffer pointer plus offset.
//
// Timing: one word per cycle in and out. INIT_WIN defaults to one bandwidth-delay product of
// the paper's 3 us RTT at 200 Gb/s (about 69 packets of 1088 B), rounded to 64; RTX_TIMEOUT to
// about 3 RTTs. Both are this design's choices.
module packetization
  import nanopu_pkg::*;
#(
  parameter int unsigned INIT_WIN    = 64,
  parameter int unsigned RTX_TIMEOUT = 28800,
  localparam int unsigned NBUF  = 56,          // must match msg_buffer_alloc's default classes
  localparam int unsigned TOTAL = 3328,
  localparam int unsigned IDW = $clog2(NBUF),
  localparam int unsigned ADW = $clog2(TOTAL)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] now,
  // from the global TX queues
  input  logic        in_valid,
  input  word_t       in_data,
  input  logic        in_last,
  input  logic [15:0] in_port,
  output logic        in_ready,
  // transport events from ingress (ACK / NACK / PULL)
  input  logic        ev_valid,
  input  tx_event_t   ev,
  // data-packet descriptor and payload to egress
  output logic        d_valid,
  output pkt_hdr_t    d_hdr,
  input  logic        d_ready,
  output logic        p_valid,
  output word_t       p_data,
  output logic        p_last,
  input  logic        p_ready,
  // observability
  output logic        rtx_evt,
  output logic        stall_evt
);
  typedef struct packed {
    logic        valid;
    logic        ready;          // whole message stored
    logic [31:0] dst_ip;
    logic [15:0] dst_port;
    logic [15:0] src_port;
    logic [15:0] len;
    logic [ADW-1:0] base;
    logic [7:0]  npkts;
    logic [7:0]  released;
    logic [MAX_PKTS-1:0] to_send;
    logic [MAX_PKTS-1:0] acked;
    logic [MAX_PKTS-1:0] nacked;
    logic [31:0] last_prog;
  } tx_entry_t;

  localparam int unsigned PW = (MAX_PKTS > 1) ? $clog2(MAX_PKTS) : 1;

  tx_entry_t tbl [NBUF];
  word_t     mem [TOTAL];

  function automatic logic [MAX_PKTS-1:0] mask_n(input logic [7:0] n);
    logic [MAX_PKTS-1:0] m = '0;
    for (int k = 0; k < MAX_PKTS; k++) if (8'(k) < n) m[k] = 1'b1;
    return m;
  endfunction
  function automatic logic [PW:0] lowest(input logic [MAX_PKTS-1:0] m);
    for (int k = 0; k < MAX_PKTS; k++) if (m[k]) return {1'b1, PW'(k)};
    return '0;
  endfunction

  // ---- input: allocate on the header word, then store data words
  logic           a_req, a_ok, f_req;
  logic [IDW-1:0] a_id, f_id;
  logic [ADW-1:0] a_base;
  logic           w_busy;
  logic [IDW-1:0] w_id;
  logic [15:0]    w_idx;

  msg_buffer_alloc u_alloc (
    .clk, .rst, .alloc_req(a_req), .alloc_len(in_data[15:0]), .alloc_ok(a_ok), .alloc_id(a_id),
    .alloc_base(a_base), .free_req(f_req), .free_id(f_id), .free_count()
  );

  assign in_ready  = w_busy || a_ok;
  assign a_req     = in_valid && !w_busy && a_ok;
  assign stall_evt = in_valid && !w_busy && !a_ok;

  always_ff @(posedge clk)
    if (in_valid && w_busy) mem[ADW'(32'(tbl[w_id].base) + 32'(w_idx))] <= in_data;

  // ---- send engine
  logic           s_pick_ok;
  logic [IDW-1:0] s_pick;
  always_comb begin
    s_pick_ok = 1'b0; s_pick = '0;
    for (int i = NBUF-1; i >= 0; i--)
      if (tbl[i].valid && tbl[i].ready && tbl[i].to_send != 0) begin
        s_pick_ok = 1'b1; s_pick = IDW'(i);
      end
  end
  logic [PW:0] s_low;
  assign s_low = lowest(tbl[s_pick].to_send);

  typedef enum logic [1:0] {S_IDLE, S_DESC, S_DATA} s_state_e;
  s_state_e       s_st;
  logic [IDW-1:0] s_id;
  logic [7:0]     s_pkt;
  logic [15:0]    s_idx, s_words;

  always_comb begin
    logic [31:0] mw, start;
    d_hdr            = '0;
    d_hdr.flags      = 8'(1 << F_DATA);
    d_hdr.ip_dst     = tbl[s_id].dst_ip;
    d_hdr.dst_port   = tbl[s_id].dst_port;
    d_hdr.src_port   = tbl[s_id].src_port;
    d_hdr.msg_len    = tbl[s_id].len;
    d_hdr.msg_id     = MSGID_W'(s_id);
    d_hdr.pkt_offset = s_pkt;
    mw    = 32'(len_words(tbl[s_id].len));
    start = 32'(s_pkt) * MAX_PKT_WORDS;
    s_words = (mw <= start) ? 16'd0 :
              ((mw - start) > MAX_PKT_WORDS) ? 16'(MAX_PKT_WORDS) : 16'(mw - start);
  end
  assign d_valid = (s_st == S_DESC);
  assign p_valid = (s_st == S_DATA);
  assign p_data  = mem[ADW'(32'(tbl[s_id].base) + 32'(s_pkt) * MAX_PKT_WORDS + 32'(s_idx))];
  assign p_last  = (s_idx + 1 == s_words);

  // ---- timer / free scan
  logic [IDW-1:0] sc;
  logic           sc_free, sc_rtx;
  always_comb begin
    sc_free = tbl[sc].valid && tbl[sc].ready && (tbl[sc].acked == mask_n(tbl[sc].npkts)) &&
              !(s_st != S_IDLE && s_id == sc) && !(w_busy && w_id == sc);
    sc_rtx  = tbl[sc].valid && tbl[sc].ready && !sc_free &&
              ((now - tbl[sc].last_prog) >= RTX_TIMEOUT) &&
              ((mask_n(tbl[sc].released) & ~tbl[sc].acked & ~tbl[sc].to_send) != 0);
  end
  assign f_req = sc_free;
  assign f_id  = sc;

  logic [IDW-1:0] ev_id;
  assign ev_id = ev.msg_id[IDW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NBUF; i++) tbl[i] <= '0;
      w_busy <= 1'b0; w_id <= '0; w_idx <= '0;
      s_st <= S_IDLE; s_id <= '0; s_pkt <= '0; s_idx <= '0;
      sc <= '0; rtx_evt <= 1'b0;
    end else begin
      rtx_evt <= 1'b0;
      // store the message
      if (in_valid && in_ready) begin
        if (!w_busy) begin
          tbl[a_id]          <= '0;
          tbl[a_id].valid    <= 1'b1;
          tbl[a_id].dst_ip   <= in_data[63:32];
          tbl[a_id].dst_port <= in_data[31:16];
          tbl[a_id].src_port <= in_port;
          tbl[a_id].len      <= in_data[15:0];
          tbl[a_id].base     <= a_base;
          tbl[a_id].npkts    <= len_pkts(in_data[15:0]);
          w_id <= a_id; w_idx <= '0;
          if (!in_last) w_busy <= 1'b1;
        end else begin
          w_idx <= w_idx + 1'b1;
          if (in_last) w_busy <= 1'b0;
        end
        if (in_last) begin
          logic [IDW-1:0] id;
          logic [7:0] np, rel;
          id  = w_busy ? w_id : a_id;
          np  = w_busy ? tbl[w_id].npkts : len_pkts(in_data[15:0]);
          rel = (np > 8'(INIT_WIN)) ? 8'(INIT_WIN) : np;
          tbl[id].ready     <= 1'b1;
          tbl[id].released  <= rel;
          tbl[id].to_send   <= mask_n(rel);
          tbl[id].last_prog <= now;
        end
      end
      // transport events
      if (ev_valid && tbl[ev_id].valid && tbl[ev_id].ready) begin
        if (ev.flags[F_ACK] && ev.pkt_offset < tbl[ev_id].npkts) begin
          tbl[ev_id].acked[PW'(ev.pkt_offset)]  <= 1'b1;
          tbl[ev_id].nacked[PW'(ev.pkt_offset)] <= 1'b0;
          tbl[ev_id].last_prog <= now;
        end
        if (ev.flags[F_NACK] && ev.pkt_offset < tbl[ev_id].npkts &&
            !tbl[ev_id].acked[PW'(ev.pkt_offset)]) begin
          tbl[ev_id].nacked[PW'(ev.pkt_offset)] <= 1'b1;
          tbl[ev_id].last_prog <= now;
        end
        if (ev.flags[F_PULL]) begin
          logic [PW:0] n;
          n = lowest(tbl[ev_id].nacked);
          if (n[PW]) begin
            tbl[ev_id].nacked[n[PW-1:0]]  <= 1'b0;
            tbl[ev_id].to_send[n[PW-1:0]] <= 1'b1;
          end else if (tbl[ev_id].released < tbl[ev_id].npkts) begin
            tbl[ev_id].to_send[PW'(tbl[ev_id].released)] <= 1'b1;
            tbl[ev_id].released <= tbl[ev_id].released + 1'b1;
          end
        end
      end
      // send engine
      case (s_st)
        S_IDLE: if (s_pick_ok) begin
          s_id  <= s_pick;
          s_pkt <= 8'(s_low[PW-1:0]);
          s_idx <= '0;
          tbl[s_pick].to_send[s_low[PW-1:0]] <= 1'b0;
          s_st  <= S_DESC;
        end
        S_DESC: if (d_ready) s_st <= (s_words == 0) ? S_IDLE : S_DATA;
        S_DATA: if (p_ready) begin
          s_idx <= s_idx + 1'b1;
          if (p_last) s_st <= S_IDLE;
        end
        default: s_st <= S_IDLE;
      endcase
      // timers and freeing
      sc <= (32'(sc) == NBUF-1) ? '0 : sc + 1'b1;
      if (sc_free) tbl[sc].valid <= 1'b0;
      if (sc_rtx) begin
        tbl[sc].to_send   <= tbl[sc].to_send | (mask_n(tbl[sc].released) & ~tbl[sc].acked);
        tbl[sc].nacked    <= '0;
        tbl[sc].last_prog <= now;
        rtx_evt <= 1'b1;
      end
    end
  end
endmodule
