// local_tx_queues: the per-core, per-thread network TX queues written through GPR netTX.
//
// The running thread writes a message as a sequence of 64-bit words: first the TX application
// header (destination IP, destination port, length in bytes), then ceil(length/8) data words.
// Writes happen at write-back, so they are never undone. Each thread has its own FIFO, so a
// context switch in the middle of a message cannot interleave two threads' words. The block
// counts words per message using the length in the header and, once a message is complete in a
// FIFO, forwards it as one burst to the core's global TX queue. Bursts from different threads
// are chosen round-robin. The thread's bound port travels with the burst (out_port) as the
// message's source port.
//
// Timing: one word per cycle in and out; a message can start leaving the cycle after its last
// word was written. wr_ready deasserts when the current thread's FIFO is full (the core stalls).
// FIFO depth is this design's choice; it must hold one whole message of the largest buffer
// class (2 KB of data plus the header word = 257 words), since only complete messages leave.
module local_tx_queues
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned DEPTH       = 512,
  localparam int unsigned TW = $clog2(NUM_THREADS),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            wr_valid,
  input  logic [TW-1:0]   wr_thread,
  input  word_t           wr_data,
  output logic            wr_ready,
  input  logic [NUM_THREADS-1:0][15:0] thread_port,
  output logic            out_valid,
  output word_t           out_data,
  output logic            out_last,
  output logic [15:0]     out_port,
  input  logic            out_ready
);
  word_t mem [NUM_THREADS][DEPTH];
  logic [AW:0]  wp [NUM_THREADS];
  logic [AW:0]  rp [NUM_THREADS];
  logic [15:0]  wr_rem [NUM_THREADS];    // data words still to come for the message being written
  logic [7:0]   ncomplete [NUM_THREADS]; // complete messages waiting
  logic         busy;
  logic [TW-1:0] sel, rr;
  logic [15:0]  rd_rem;                   // words left in the burst after the current one

  assign wr_ready = (wp[wr_thread] - rp[wr_thread]) < (AW+1)'(DEPTH);

  word_t head;
  assign head     = mem[sel][rp[sel][AW-1:0]];
  assign out_valid = busy;
  assign out_data  = head;
  assign out_last  = busy && (rd_rem == 0);
  assign out_port  = thread_port[sel];

  logic          pick_ok;
  logic [TW-1:0] pick;
  always_comb begin
    pick_ok = 1'b0; pick = rr;
    for (int i = 0; i < NUM_THREADS; i++) begin
      logic [TW-1:0] t;
      t = TW'(rr + TW'(i));
      if (!pick_ok && ncomplete[t] != 0) begin pick_ok = 1'b1; pick = t; end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wr_thread][wp[wr_thread][AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; sel <= '0; rr <= '0; rd_rem <= '0;
      for (int t = 0; t < NUM_THREADS; t++) begin
        wp[t] <= '0; rp[t] <= '0; wr_rem[t] <= '0; ncomplete[t] <= '0;
      end
    end else begin
      logic fin;
      fin = 1'b0;
      if (wr_valid && wr_ready) begin
        wp[wr_thread] <= wp[wr_thread] + 1'b1;
        if (wr_rem[wr_thread] == 0) begin
          // header word: length in bits [15:0]
          wr_rem[wr_thread] <= len_words(wr_data[15:0]);
          if (len_words(wr_data[15:0]) == 0) fin = 1'b1;
        end else begin
          wr_rem[wr_thread] <= wr_rem[wr_thread] - 1'b1;
          if (wr_rem[wr_thread] == 1) fin = 1'b1;
        end
      end
      for (int t = 0; t < NUM_THREADS; t++) begin
        logic inc, dec;
        inc = fin && (wr_thread == TW'(t));
        dec = !busy && pick_ok && (pick == TW'(t));
        ncomplete[t] <= ncomplete[t] + 8'(inc) - 8'(dec);
      end
      if (!busy) begin
        if (pick_ok) begin
          busy   <= 1'b1;
          sel    <= pick;
          rr     <= TW'(pick + 1'b1);
          rd_rem <= len_words(mem[pick][rp[pick][AW-1:0]][15:0]);
        end
      end else if (out_ready) begin
        rp[sel] <= rp[sel] + 1'b1;
        rd_rem  <= rd_rem - 1'b1;
        if (rd_rem == 0) busy <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
