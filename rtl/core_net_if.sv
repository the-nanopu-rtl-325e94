// core_net_if: the network interface of one CPU core, the part of the core the nanoPU changes.
//
// It joins the core's pipeline to the NIC through three paths.
//  * Register file: two general-purpose registers are reserved. A decode-stage read of netRX
//    (NETRX_REG) returns the word at the head of the current thread's local RX queue and pops
//    it speculatively; rs1 and rs2 may both name netRX and then read two consecutive words, rs1
//    first. Retiring instructions report their netRX reads through wb_commit, and a pipeline
//    flush undoes the uncommitted ones. A write-back to netTX (NETTX_REG) appends the word to the
//    current thread's local TX queue. Reading an empty queue returns an undefined value, as in
//    the paper; this implementation returns the stale memory word and pops nothing.
//  * CSRs: lcurport and lcurpriority hold a port and a priority; writing 1 (bit 0) to lniccmd
//    binds lcurport at lcurpriority: a free thread slot is allocated, the port's global queue is
//    bound for this core, and the slot becomes the running thread. Bit 1 unbinds lcurport, bit 2
//    sets its priority anew. lmsgsrdy reads 1 while the running thread's RX queue has a word;
//    writing lidle declares the thread idle; writing lmsgdone ends the current message (resets
//    the processing timer, releases the JBSQ slot). lnextthread reads the scheduler's choice.
//    Writing lcurport with a port bound on this core makes that thread the running one, which
//    is how the kernel completes a context switch.
//  * Thread scheduler: the block holds the local queues and the scheduler, and raises irq.
//
// CSR numbers, lniccmd bits 1 and 2, the register numbers, the port-write context switch and
// the empty-read behaviour are this design's choices; the register and CSR names, the
// bind-by-writing-1 command and the two-read undo bound are from the paper.
//
// Timing: netRX data is combinational in the decode cycle; all other effects take one cycle.
module core_net_if
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_THREADS     = 4,
  parameter int unsigned NETRX_REG       = 31,
  parameter int unsigned NETTX_REG       = 30,
  parameter int unsigned RXQ_DEPTH       = 256,
  parameter int unsigned TXQ_DEPTH       = 512,
  parameter int unsigned MAX_PROC_CYCLES = 3200,
  parameter int unsigned IDLE_TIMEOUT    = 3200,
  localparam int unsigned TW = $clog2(NUM_THREADS)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] now,
  input  logic        bound_en,
  // decode stage
  input  logic        dec_valid,
  input  logic [4:0]  dec_rs1,
  input  logic [4:0]  dec_rs2,
  output word_t       rs1_net_data,
  output word_t       rs2_net_data,
  // retirement / flush of netRX reads
  input  logic [1:0]  wb_commit,
  input  logic        flush,
  // write-back
  input  logic        wb_valid,
  input  logic [4:0]  wb_rd,
  input  word_t       wb_data,
  output logic        tx_stall,
  // CSR access
  input  logic        csr_valid,
  input  logic        csr_write,
  input  logic [11:0] csr_addr,
  input  word_t       csr_wdata,
  output word_t       csr_rdata,
  output logic        irq,
  // from the core selector
  input  logic        rx_valid,
  input  word_t       rx_data,
  input  logic        rx_first,
  input  logic [15:0] rx_port,
  output logic        rx_ready,
  // to the global TX queues
  output logic        tx_valid,
  output word_t       tx_data,
  output logic        tx_last,
  output logic [15:0] tx_port,
  input  logic        tx_ready,
  // to the core selector
  output logic        bind_valid,
  output logic        bind_unbind,
  output logic [15:0] bind_port,
  output logic        done_valid,
  output logic [15:0] done_port,
  // observability
  output logic        downgrade_evt,
  output logic        rotate_evt,
  output logic [TW-1:0] cur_thread_o
);
  logic [NUM_THREADS-1:0]       registered;
  logic [NUM_THREADS-1:0][15:0] tport;
  logic [NUM_THREADS-1:0][1:0]  tprio;
  logic [NUM_THREADS-1:0]       prio_wr;
  logic [15:0] lcurport;
  logic [1:0]  lcurprio;
  logic        cur_valid;
  logic [TW-1:0] cur_thread;
  assign cur_thread_o = cur_thread;

  function automatic logic [TW:0] find(input logic [15:0] p);
    for (int t = 0; t < NUM_THREADS; t++) if (registered[t] && tport[t] == p) return {1'b1, TW'(t)};
    return '0;
  endfunction

  // ---- local RX queues
  logic [TW:0]   rx_hit;
  logic          lrx_ready;
  word_t         rd0, rd1;
  logic [1:0]    rd_avail, rd_pop;
  logic [NUM_THREADS-1:0] msg_pending, msg_arrive;
  logic [NUM_THREADS-1:0][31:0] head_ts;
  logic          csr_done, csr_idle;

  assign rx_hit   = find(rx_port);
  assign rx_ready = lrx_ready || !rx_hit[TW];       // unknown port: drop the word

  local_rx_queues #(.NUM_THREADS(NUM_THREADS), .DEPTH(RXQ_DEPTH)) u_rxq (
    .clk, .rst, .now,
    .wr_valid(rx_valid && rx_hit[TW]), .wr_thread(rx_hit[TW-1:0]), .wr_data(rx_data),
    .wr_first(rx_first), .wr_ready(lrx_ready),
    .cur_thread, .rd_data0(rd0), .rd_data1(rd1), .rd_avail, .rd_pop,
    .commit(wb_commit), .flush,
    .msg_done(csr_done && cur_valid), .done_thread(cur_thread),
    .msg_pending, .head_ts
  );
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++)
      msg_arrive[t] = rx_valid && lrx_ready && rx_first && rx_hit == {1'b1, TW'(t)};
  end

  // decode-stage netRX reads
  logic r1, r2;
  always_comb begin
    r1 = dec_valid && cur_valid && dec_rs1 == 5'(NETRX_REG);
    r2 = dec_valid && cur_valid && dec_rs2 == 5'(NETRX_REG);
    rs1_net_data = rd0;
    rs2_net_data = r1 ? rd1 : rd0;
    rd_pop = 2'(r1) + 2'(r2);
    if (rd_pop > rd_avail) rd_pop = rd_avail;
    if (flush) rd_pop = '0;
  end

  // ---- local TX queues
  logic ltx_ready, tx_wr;
  assign tx_wr    = wb_valid && cur_valid && wb_rd == 5'(NETTX_REG);
  assign tx_stall = tx_wr && !ltx_ready;
  local_tx_queues #(.NUM_THREADS(NUM_THREADS), .DEPTH(TXQ_DEPTH)) u_txq (
    .clk, .rst, .wr_valid(tx_wr), .wr_thread(cur_thread), .wr_data(wb_data), .wr_ready(ltx_ready),
    .thread_port(tport), .out_valid(tx_valid), .out_data(tx_data), .out_last(tx_last),
    .out_port(tx_port), .out_ready(tx_ready)
  );

  // ---- thread scheduler
  logic [TW-1:0] next_thread;
  logic [NUM_THREADS-1:0] active;
  logic [NUM_THREADS-1:0][1:0] eff_prio;
  thread_scheduler #(.NUM_THREADS(NUM_THREADS), .MAX_PROC_CYCLES(MAX_PROC_CYCLES),
                     .IDLE_TIMEOUT(IDLE_TIMEOUT)) u_sched (
    .clk, .rst, .registered, .prio(tprio), .prio_wr, .msg_pending, .msg_arrive, .head_ts,
    .cur_valid, .cur_thread, .idle_wr(csr_idle && cur_valid), .msg_done(csr_done && cur_valid),
    .bound_en, .irq, .next_thread, .active, .eff_prio, .downgrade_evt, .rotate_evt
  );

  // ---- CSRs
  logic csr_wr;
  assign csr_wr   = csr_valid && csr_write;
  assign csr_done = csr_wr && csr_addr == CSR_LMSGDONE;
  assign csr_idle = csr_wr && csr_addr == CSR_LIDLE;

  always_comb begin
    unique case (csr_addr)
      CSR_LCURPORT:     csr_rdata = 64'(lcurport);
      CSR_LCURPRIORITY: csr_rdata = 64'(lcurprio);
      CSR_LMSGSRDY:     csr_rdata = 64'(cur_valid && rd_avail != 0);
      CSR_LNEXTTHREAD:  csr_rdata = 64'(next_thread);
      default:          csr_rdata = '0;
    endcase
  end

  logic [TW:0] cp_hit, free_slot;
  always_comb begin
    cp_hit = find(lcurport);
    free_slot = '0;
    for (int t = NUM_THREADS-1; t >= 0; t--) if (!registered[t]) free_slot = {1'b1, TW'(t)};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      registered <= '0; tport <= '0; tprio <= '0; prio_wr <= '0;
      lcurport <= '0; lcurprio <= '0; cur_valid <= 1'b0; cur_thread <= '0;
      bind_valid <= 1'b0; bind_unbind <= 1'b0; bind_port <= '0;
      done_valid <= 1'b0; done_port <= '0;
    end else begin
      prio_wr    <= '0;
      bind_valid <= 1'b0;
      done_valid <= csr_done && cur_valid;
      done_port  <= tport[cur_thread];
      if (csr_wr) begin
        case (csr_addr)
          CSR_LCURPORT: begin
            lcurport <= csr_wdata[15:0];
            if (find(csr_wdata[15:0]) != '0) begin
              cur_thread <= find(csr_wdata[15:0])[TW-1:0];
              cur_valid  <= 1'b1;
            end
          end
          CSR_LCURPRIORITY: lcurprio <= csr_wdata[1:0];
          CSR_LNICCMD: begin
            if (csr_wdata[CMD_BIND] && !cp_hit[TW] && free_slot[TW]) begin
              registered[free_slot[TW-1:0]] <= 1'b1;
              tport[free_slot[TW-1:0]]      <= lcurport;
              tprio[free_slot[TW-1:0]]      <= lcurprio;
              prio_wr[free_slot[TW-1:0]]    <= 1'b1;
              cur_thread <= free_slot[TW-1:0];
              cur_valid  <= 1'b1;
              bind_valid <= 1'b1; bind_unbind <= 1'b0; bind_port <= lcurport;
            end else if (csr_wdata[CMD_UNBIND] && cp_hit[TW]) begin
              registered[cp_hit[TW-1:0]] <= 1'b0;
              if (cur_thread == cp_hit[TW-1:0]) cur_valid <= 1'b0;
              bind_valid <= 1'b1; bind_unbind <= 1'b1; bind_port <= lcurport;
            end else if (csr_wdata[CMD_PRIO] && cp_hit[TW]) begin
              tprio[cp_hit[TW-1:0]]   <= lcurprio;
              prio_wr[cp_hit[TW-1:0]] <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) flush |-> wb_commit <= 2'd2);
endmodule
