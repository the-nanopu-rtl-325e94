// local_rx_queues: the per-core, per-thread network RX queues that sit next to the register file.
//
// Each thread bound on a core owns one FIFO of 64-bit words. The core selector writes whole
// messages into the FIFO of the destination thread, one word per cycle (wr_*). The running
// thread reads the head of its FIFO through GPR netRX. That read happens in the decode stage,
// before the instruction is known to retire, so it is speculative: rd_pop advances a speculative
// read pointer by up to two words per cycle (rs1 and rs2 may both name netRX); commit advances
// the committed pointer as reading instructions retire; flush moves the speculative pointer back
// to the committed one, undoing the destructive reads of squashed instructions. Space for writes
// is counted against the committed pointer, so undone words are never overwritten. The paper
// bounds the undo depth by the pipeline depth (two reads on the five-stage core); MAX_UNDO
// checks that bound with an assertion.
//
// For the thread scheduler the block also keeps, per thread, the number of messages that have
// arrived and not been reported done (msg_done), and the arrival time of the oldest of them
// (head_ts), taken from the free-running counter 'now' when a message's first word is written.
//
// Timing: a word written in cycle t can be read in cycle t+1. rd_data0/rd_data1 are the two
// words at the speculative head of the current thread (combinational).
// Queue depth, timestamp width and the per-thread message limit MAX_MSGS are this design's choice.
module local_rx_queues
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned DEPTH       = 256,
  parameter int unsigned MAX_MSGS    = 4,
  parameter int unsigned MAX_UNDO    = 2,
  localparam int unsigned TW = $clog2(NUM_THREADS),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         now,
  // write side (from the core selector)
  input  logic                wr_valid,
  input  logic [TW-1:0]       wr_thread,
  input  word_t               wr_data,
  input  logic                wr_first,     // first word of a message (its app header)
  output logic                wr_ready,
  // read side (current thread, netRX)
  input  logic [TW-1:0]       cur_thread,
  output word_t               rd_data0,
  output word_t               rd_data1,
  output logic [1:0]          rd_avail,     // words readable now (saturated at 2)
  input  logic [1:0]          rd_pop,
  input  logic [1:0]          commit,
  input  logic                flush,
  // message bookkeeping
  input  logic                msg_done,
  input  logic [TW-1:0]       done_thread,
  output logic [NUM_THREADS-1:0] msg_pending,
  output logic [NUM_THREADS-1:0][31:0] head_ts
);
  word_t mem [NUM_THREADS][DEPTH];
  logic [AW:0] wp  [NUM_THREADS];
  logic [AW:0] srp [NUM_THREADS];
  logic [AW:0] crp [NUM_THREADS];
  logic [31:0] ts  [NUM_THREADS][MAX_MSGS];
  logic [$clog2(MAX_MSGS):0] mcnt [NUM_THREADS];
  logic [$clog2(MAX_MSGS)-1:0] mhead [NUM_THREADS];

  logic [AW:0] used_w, avail_w;
  always_comb begin
    used_w   = wp[wr_thread] - crp[wr_thread];
    wr_ready = (used_w < (AW+1)'(DEPTH)) &&
               (!wr_first || mcnt[wr_thread] < ($clog2(MAX_MSGS)+1)'(MAX_MSGS));
    avail_w  = wp[cur_thread] - srp[cur_thread];
    rd_avail = (avail_w >= 2) ? 2'd2 : 2'(avail_w);
    rd_data0 = mem[cur_thread][srp[cur_thread][AW-1:0]];
    rd_data1 = mem[cur_thread][AW'(srp[cur_thread][AW-1:0] + 1'b1)];
    for (int t = 0; t < NUM_THREADS; t++) begin
      msg_pending[t] = (mcnt[t] != 0);
      head_ts[t]     = ts[t][mhead[t]];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wr_thread][wp[wr_thread][AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < NUM_THREADS; t++) begin
        wp[t] <= '0; srp[t] <= '0; crp[t] <= '0; mcnt[t] <= '0; mhead[t] <= '0;
        for (int m = 0; m < MAX_MSGS; m++) ts[t][m] <= '0;
      end
    end else begin
      if (wr_valid && wr_ready) begin
        wp[wr_thread] <= wp[wr_thread] + 1'b1;
      end
      // committed pointer always advances; speculative pointer either rolls back or advances
      crp[cur_thread] <= crp[cur_thread] + (AW+1)'(commit);
      if (flush) srp[cur_thread] <= crp[cur_thread] + (AW+1)'(commit);
      else       srp[cur_thread] <= srp[cur_thread] + (AW+1)'(rd_pop);
      for (int t = 0; t < NUM_THREADS; t++) begin
        logic inc, dec;
        inc = wr_valid && wr_ready && wr_first && (wr_thread == TW'(t));
        dec = msg_done && (done_thread == TW'(t)) && (mcnt[t] != 0);
        if (inc) ts[t][($clog2(MAX_MSGS))'(mhead[t] + mcnt[t])] <= now;
        if (dec) mhead[t] <= mhead[t] + 1'b1;
        mcnt[t] <= mcnt[t] + inc - dec;
      end
    end
  end

  // reads never pass the written data, and no more than MAX_UNDO reads are outstanding
  assert property (@(posedge clk) disable iff (rst) !flush |-> (2'(rd_pop) <= rd_avail));
  assert property (@(posedge clk) disable iff (rst)
                   (srp[cur_thread] - crp[cur_thread]) <= (AW+1)'(MAX_UNDO));
endmodule
