// tb_thread_scheduler: drives thread states and checks the scheduler's decisions: idle-timeout
// rotation, wake-up on a message, preemption by a higher-priority thread, downgrade of a
// priority-0 thread after MAX_PROC_CYCLES (and the cycle at which it happens), FIFO order
// between equal priorities, restoring the priority, the idle flag, and no downgrade when the
// bound is disabled.
module tb_thread_scheduler;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int MAXP = 50, IDLE = 20;
  logic [3:0] registered = 0, prio_wr = 0, msg_pending = 0, msg_arrive = 0;
  logic [3:0][1:0] prio = 0;
  logic [3:0][31:0] head_ts = 0;
  logic cur_valid = 0, idle_wr = 0, msg_done = 0, bound_en = 1;
  logic [1:0] cur_thread = 0, next_thread;
  logic irq, downgrade_evt, rotate_evt;
  logic [3:0] active;
  logic [3:0][1:0] eff_prio;
  int checks = 0, failures = 0, dg_seen = 0, dg_cycle = -1, cyc = 0;
  always @(posedge clk) begin cyc++; if (downgrade_evt) begin dg_seen++; if (dg_cycle < 0) dg_cycle = cyc; end end

  thread_scheduler #(.NUM_THREADS(4), .MAX_PROC_CYCLES(MAXP), .IDLE_TIMEOUT(IDLE)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic arrive(input int t, input int ts);
    msg_pending[t] = 1; head_ts[t] = ts; msg_arrive[t] = 1;
    @(posedge clk); #1 msg_arrive = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int start;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    registered = 4'b0011; prio[0] = 2'd1; prio[1] = 2'd0; cur_valid = 1; cur_thread = 0;
    @(posedge clk); #1;
    check(!irq, "no interrupt with nothing to do");
    repeat (IDLE + 2) @(posedge clk); #1;
    check(irq && next_thread == 1, "idle timeout rotates to thread 1");
    cur_thread = 1; @(posedge clk); #1;
    check(!irq, "rotation taken");
    arrive(0, 100);
    check(irq && next_thread == 0, "message for thread 0 wakes it");
    cur_thread = 0; @(posedge clk); #1;
    check(!irq, "thread 0 running");
    arrive(1, 200);
    check(irq && next_thread == 1, "priority-0 message preempts priority-1 thread");
    cur_thread = 1; start = cyc;
    @(posedge clk); #1;
    check(!irq, "thread 1 running");
    repeat (MAXP + 3) @(posedge clk); #1;
    check(dg_seen == 1, "thread 1 downgraded once");
    check(dg_cycle - start >= MAXP && dg_cycle - start <= MAXP + 2,
          $sformatf("downgrade after %0d cycles, limit %0d", dg_cycle - start, MAXP));
    check(eff_prio[1] == 1, "effective priority lowered to 1");
    check(irq && next_thread == 0, "older equal-priority message now goes first");
    prio_wr[1] = 1; @(posedge clk); #1 prio_wr = 0; @(posedge clk); #1;
    check(eff_prio[1] == 0 && next_thread == 1, "priority rewrite restores priority 0");
    msg_done = 1; @(posedge clk); #1 msg_done = 0;
    idle_wr = 1; @(posedge clk); #1 idle_wr = 0;
    check(!active[1] && active[0], "idle write makes thread 1 inactive");
    check(irq && next_thread == 0, "switch to the remaining active thread");
    // bound disabled: no downgrade
    bound_en = 0; cur_thread = 0; msg_pending[0] = 1; prio[0] = 0; prio_wr[0] = 1;
    @(posedge clk); #1 prio_wr = 0;
    repeat (2 * MAXP) @(posedge clk); #1;
    check(dg_seen == 1 && eff_prio[0] == 0, "no downgrade when bound disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
