// thread_scheduler: the per-core hardware thread scheduler.
//
// A thread is active when it is registered (bound to a port), has at least one message in its
// local RX queue that it has not finished, and has not declared itself idle since that message
// arrived. Among the active threads the scheduler picks the one with the numerically lowest
// effective priority (0 is highest); ties go to the thread whose oldest pending message arrived
// first, so equal-priority threads serve messages in FIFO order; remaining ties go to the lower
// thread index. The choice is published continuously as next_thread (read by the kernel through a
// CSR), and irq is raised while it differs from the running thread.
//
// Bounded processing time: every thread has a processing timer that counts while it runs with a
// pending message and is cleared by lmsgdone. When a priority-0 thread's timer reaches
// MAX_PROC_CYCLES (1 us at 3.2 GHz by default) and bound_en is set, its effective priority drops
// to 1 until software rewrites its priority (prio_wr, which also restarts the timer) or
// rebinds it. With no active thread, the
// running thread is rotated out after IDLE_TIMEOUT cycles so that every registered thread can
// make progress; next_thread is then the next registered thread in index order.
//
// Timing: all outputs are registered-state functions; a message arrival shows in irq one cycle
// after msg_pending rises. The paper gives the policy and x = 1 us; the timer semantics across
// preemption, the idle-flag clearing rule and IDLE_TIMEOUT are this design's choices.
module thread_scheduler #(
  parameter int unsigned NUM_THREADS     = 4,
  parameter int unsigned MAX_PROC_CYCLES = 3200,
  parameter int unsigned IDLE_TIMEOUT    = 3200,
  localparam int unsigned TW = $clog2(NUM_THREADS)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [NUM_THREADS-1:0] registered,
  input  logic [NUM_THREADS-1:0][1:0] prio,       // configured priority
  input  logic [NUM_THREADS-1:0] prio_wr,         // software (re)wrote the priority: clear downgrade
  input  logic [NUM_THREADS-1:0] msg_pending,
  input  logic [NUM_THREADS-1:0] msg_arrive,      // a new message entered the thread's RX queue
  input  logic [NUM_THREADS-1:0][31:0] head_ts,
  input  logic                   cur_valid,
  input  logic [TW-1:0]          cur_thread,
  input  logic                   idle_wr,         // lidle written by the running thread
  input  logic                   msg_done,        // lmsgdone written by the running thread
  input  logic                   bound_en,
  output logic                   irq,
  output logic [TW-1:0]          next_thread,
  output logic [NUM_THREADS-1:0] active,
  output logic [NUM_THREADS-1:0][1:0] eff_prio,
  output logic                   downgrade_evt,   // one-cycle pulse when a thread is downgraded
  output logic                   rotate_evt       // one-cycle pulse when idle rotation is requested
);
  logic [NUM_THREADS-1:0] idle_f, downgraded;
  logic [31:0] ptimer [NUM_THREADS];
  logic [31:0] itimer;
  logic [TW-1:0] last_cur;
  logic          last_valid;

  logic          best_ok;
  logic [TW-1:0] best;
  logic          rot_ok;
  logic [TW-1:0] rot;

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      active[t]   = registered[t] && msg_pending[t] && !idle_f[t];
      eff_prio[t] = (downgraded[t] && prio[t] == 2'd0) ? 2'd1 : prio[t];
    end
    best_ok = 1'b0; best = '0;
    for (int t = 0; t < NUM_THREADS; t++) begin
      if (active[t]) begin
        if (!best_ok || eff_prio[t] < eff_prio[best] ||
            (eff_prio[t] == eff_prio[best] && head_ts[t] < head_ts[best])) begin
          best_ok = 1'b1; best = TW'(t);
        end
      end
    end
    rot_ok = 1'b0; rot = cur_thread;
    for (int i = 1; i <= NUM_THREADS; i++) begin
      logic [TW-1:0] t;
      t = TW'(cur_thread + TW'(i));
      if (!rot_ok && registered[t] && (t != cur_thread || i == NUM_THREADS)) begin
        rot_ok = 1'b1; rot = t;
      end
    end
  end

  logic rotate;
  assign rotate = !best_ok && cur_valid && rot_ok && (rot != cur_thread) &&
                  (itimer >= IDLE_TIMEOUT);

  always_comb begin
    if (best_ok) begin
      next_thread = best;
      irq         = !cur_valid || (best != cur_thread);
    end else begin
      next_thread = rotate ? rot : cur_thread;
      irq         = rotate;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      idle_f <= '0; downgraded <= '0; itimer <= '0; last_cur <= '0; last_valid <= 1'b0;
      downgrade_evt <= 1'b0; rotate_evt <= 1'b0;
      for (int t = 0; t < NUM_THREADS; t++) ptimer[t] <= '0;
    end else begin
      last_cur   <= cur_thread;
      last_valid <= cur_valid;
      downgrade_evt <= 1'b0;
      rotate_evt    <= rotate && !(itimer > IDLE_TIMEOUT);
      // idle-rotation timer: cycles the current thread has run with nothing active
      if (!cur_valid || best_ok || cur_thread != last_cur || !last_valid) itimer <= '0;
      else if (itimer <= IDLE_TIMEOUT) itimer <= itimer + 1;
      for (int t = 0; t < NUM_THREADS; t++) begin
        logic running;
        running = cur_valid && cur_thread == TW'(t);
        if (msg_arrive[t]) idle_f[t] <= 1'b0;
        else if (running && idle_wr) idle_f[t] <= 1'b1;
        if (prio_wr[t] || !registered[t]) downgraded[t] <= 1'b0;
        if ((running && msg_done) || prio_wr[t]) ptimer[t] <= '0;
        else if (running && msg_pending[t] && ptimer[t] < MAX_PROC_CYCLES) ptimer[t] <= ptimer[t] + 1;
        if (bound_en && running && prio[t] == 2'd0 && !downgraded[t] && !prio_wr[t] &&
            ptimer[t] >= MAX_PROC_CYCLES) begin
          downgraded[t] <= 1'b1;
          downgrade_evt <= 1'b1;
        end
      end
    end
  end
endmodule
