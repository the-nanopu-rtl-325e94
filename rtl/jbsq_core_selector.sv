// jbsq_core_selector: hardware core selection with the JBSQ(n) policy (Join-Bounded-Shortest-Queue).
//
// Two tables are indexed by the global RX queue of a layer-4 port: a bitmap of the cores that
// run a thread bound to the port, and for each core the number of the port's messages that core
// is holding (delivered and not yet reported done). When a global RX queue holds a complete
// message, the selector looks for a bound core holding fewer than JBSQ_N of that port's messages
// and forwards the message to the one with the smallest count (lowest core index on a tie). If
// every bound core already holds JBSQ_N messages the message waits in the global queue until a
// core reports, through done_valid, that it finished one of them. JBSQ_N = 2 by default, as in
// the paper; JBSQ(1) behaves like a single shared queue.
//
// The port-to-queue mapping is a small fully associative table filled by bind commands from the
// cores (bind allocates the port's global queue the first time it is bound); lookup gives the
// queue of a port for reassembly. Queues are scanned round-robin, one message is forwarded at a
// time, one word per cycle (out_*); out_first marks the RX app header word.
//
// Timing: a message available in cycle t starts leaving in cycle t+1 at the earliest.
// Table size, scan order and tie-break are this design's choices.
module jbsq_core_selector
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
  parameter int unsigned NUM_PORTS = 16,
  parameter int unsigned JBSQ_N    = 2,
  localparam int unsigned QW = $clog2(NUM_PORTS),
  localparam int unsigned CW = $clog2(NUM_CORES)
) (
  input  logic                  clk,
  input  logic                  rst,
  // bind / unbind from the cores
  input  logic                  bind_valid,
  input  logic                  bind_unbind,   // 0: bind, 1: unbind
  input  logic [CW-1:0]         bind_core,
  input  logic [15:0]           bind_port,
  // port lookup (for reassembly)
  input  logic [15:0]           lk_port,
  output logic                  lk_hit,
  output logic [QW-1:0]         lk_q,
  // message done from each core
  input  logic [NUM_CORES-1:0]  done_valid,
  input  logic [NUM_CORES-1:0][15:0] done_port,
  // global RX queue read side
  input  logic [NUM_PORTS-1:0]  msg_avail,
  input  word_t                 q_data,
  input  logic                  q_last,
  input  logic                  q_valid,
  output logic [QW-1:0]         q_sel,
  output logic                  q_pop,
  // to the cores' local RX queues
  output logic [NUM_CORES-1:0]  out_valid,
  output word_t                 out_data,
  output logic                  out_first,
  output logic [15:0]           out_port,
  input  logic [NUM_CORES-1:0]  out_ready,
  // observability
  output logic                  dispatch_evt,
  output logic                  wait_evt
);
  logic [NUM_PORTS-1:0]                 pvalid;
  logic [NUM_PORTS-1:0][15:0]           pport;
  logic [NUM_PORTS-1:0][NUM_CORES-1:0]  bitmap;
  logic [7:0]                           cnt [NUM_PORTS][NUM_CORES];

  logic          busy, first;
  logic [QW-1:0] cur_q, rr;
  logic [CW-1:0] cur_c;

  // ---- associative port lookups
  function automatic logic [QW:0] find(input logic [15:0] p);
    for (int q = 0; q < NUM_PORTS; q++) if (pvalid[q] && pport[q] == p) return {1'b1, QW'(q)};
    return '0;
  endfunction
  always_comb {lk_hit, lk_q} = find(lk_port);

  // ---- selection: first queue (round-robin) with a message and an eligible core
  logic          sel_ok, any_wait;
  logic [QW-1:0] sel_q;
  logic [CW-1:0] sel_c;
  always_comb begin
    sel_ok = 1'b0; sel_q = '0; sel_c = '0; any_wait = 1'b0;
    for (int i = 0; i < NUM_PORTS; i++) begin
      logic [QW-1:0] q;
      logic          ok;
      logic [CW-1:0] c_best;
      q = QW'(rr + QW'(i));
      ok = 1'b0; c_best = '0;
      for (int c = 0; c < NUM_CORES; c++)
        if (bitmap[q][c] && cnt[q][c] < 8'(JBSQ_N) && (!ok || cnt[q][c] < cnt[q][c_best])) begin
          ok = 1'b1; c_best = CW'(c);
        end
      if (pvalid[q] && msg_avail[q]) begin
        if (ok && !sel_ok) begin sel_ok = 1'b1; sel_q = q; sel_c = c_best; end
        if (!ok && |bitmap[q]) any_wait = 1'b1;
      end
    end
  end

  assign q_sel     = busy ? cur_q : sel_q;
  assign out_data  = q_data;
  assign out_first = first;
  assign out_port  = pport[cur_q];
  always_comb begin
    out_valid = '0;
    out_valid[cur_c] = busy && q_valid;
  end
  assign q_pop = busy && q_valid && out_ready[cur_c];

  // free table entry for a new bind
  logic [QW:0] bhit, bfree;
  always_comb begin
    bhit = find(bind_port);
    bfree = '0;
    for (int q = NUM_PORTS-1; q >= 0; q--) if (!pvalid[q]) bfree = {1'b1, QW'(q)};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pvalid <= '0; pport <= '0; bitmap <= '0; busy <= 1'b0; first <= 1'b0;
      cur_q <= '0; cur_c <= '0; rr <= '0; dispatch_evt <= 1'b0; wait_evt <= 1'b0;
      for (int q = 0; q < NUM_PORTS; q++) for (int c = 0; c < NUM_CORES; c++) cnt[q][c] <= '0;
    end else begin
      dispatch_evt <= 1'b0;
      wait_evt     <= !busy && any_wait && !sel_ok;
      // bind / unbind
      if (bind_valid) begin
        if (!bind_unbind) begin
          if (bhit[QW]) bitmap[bhit[QW-1:0]][bind_core] <= 1'b1;
          else if (bfree[QW]) begin
            pvalid[bfree[QW-1:0]] <= 1'b1;
            pport[bfree[QW-1:0]]  <= bind_port;
            bitmap[bfree[QW-1:0]] <= '0;
            bitmap[bfree[QW-1:0]][bind_core] <= 1'b1;
          end
        end else if (bhit[QW]) begin
          bitmap[bhit[QW-1:0]][bind_core] <= 1'b0;
        end
      end
      // message counts: +1 when a message is forwarded, -1 when the core reports it done
      for (int q = 0; q < NUM_PORTS; q++)
        for (int c = 0; c < NUM_CORES; c++) begin
          logic inc, dec;
          inc = !busy && sel_ok && sel_q == QW'(q) && sel_c == CW'(c);
          dec = done_valid[c] && pvalid[q] && pport[q] == done_port[c] && cnt[q][c] != 0;
          if (!(bind_valid && bind_unbind && bhit == {1'b1, QW'(q)} && bind_core == CW'(c)))
            cnt[q][c] <= cnt[q][c] + 8'(inc) - 8'(dec);
          else
            cnt[q][c] <= '0;
        end
      // dispatch
      if (!busy) begin
        if (sel_ok) begin
          busy <= 1'b1; first <= 1'b1; cur_q <= sel_q; cur_c <= sel_c;
          rr <= QW'(sel_q + 1'b1);
          dispatch_evt <= 1'b1;
        end
      end else if (q_pop) begin
        first <= 1'b0;
        if (q_last) busy <= 1'b0;
      end
    end
  end
endmodule
