// tb_local_rx_queues: writes messages into per-thread queues and checks netRX head words,
// two-word reads, undo of speculative reads on a flush, committed reads surviving a flush,
// message counts, arrival timestamps, and backpressure when a queue is full.
module tb_local_rx_queues;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] now = 0;
  always @(posedge clk) now <= now + 1;
  logic wr_valid = 0, wr_first = 0, wr_ready, flush = 0, msg_done = 0;
  logic [1:0] wr_thread = 0, cur_thread = 0, done_thread = 0, rd_avail, rd_pop = 0, commit = 0;
  word_t wr_data = 0, rd_data0, rd_data1;
  logic [3:0] msg_pending;
  logic [3:0][31:0] head_ts;
  int checks = 0, failures = 0;

  local_rx_queues #(.NUM_THREADS(4), .DEPTH(16)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input int t, input word_t d, input bit first);
    wr_thread = 2'(t); wr_data = d; wr_first = first; wr_valid = 1;
    @(posedge clk); #1 wr_valid = 0; wr_first = 0;
  endtask
  task automatic step(input int pop, input int com, input bit fl);
    rd_pop = 2'(pop); commit = 2'(com); flush = fl;
    @(posedge clk); #1 rd_pop = 0; commit = 0; flush = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ts1;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check(msg_pending == 0, "nothing pending after reset");
    ts1 = now;
    wr(1, 64'hA0, 1); wr(1, 64'hA1, 0); wr(1, 64'hA2, 0);
    wr(2, 64'hB0, 1); wr(2, 64'hB1, 0);
    check(msg_pending == 4'b0110, "threads 1 and 2 pending");
    check(head_ts[1] == ts1, "arrival timestamp of thread 1");
    check(head_ts[2] == ts1 + 3, "arrival timestamp of thread 2");
    cur_thread = 1; #1;
    check(rd_avail == 2 && rd_data0 == 64'hA0 && rd_data1 == 64'hA1, "head words of thread 1");
    step(2, 0, 0);
    check(rd_avail == 1 && rd_data0 == 64'hA2, "after two speculative reads");
    step(0, 0, 1);   // flush: undo both reads
    check(rd_data0 == 64'hA0 && rd_avail == 2, "flush restored the reads");
    step(1, 0, 0);
    step(1, 1, 0);   // second read while the first retires
    step(0, 0, 1);   // flush undoes only the uncommitted read
    check(rd_data0 == 64'hA1, "committed read survives flush");
    cur_thread = 2; #1;
    check(rd_data0 == 64'hB0, "thread 2 queue is separate");
    cur_thread = 1; #1;
    done_thread = 1; msg_done = 1; @(posedge clk); #1 msg_done = 0;
    check(msg_pending == 4'b0100, "message done clears thread 1 pending");
    // fill thread 3 (DEPTH 16)
    for (int i = 0; i < 16; i++) wr(3, word_t'(i), i == 0);
    wr_thread = 3; #1;
    check(!wr_ready, "thread 3 full");
    wr_thread = 0; #1;
    check(wr_ready, "thread 0 not full");
    cur_thread = 3; #1;
    check(rd_data0 == 0 && rd_data1 == 1, "thread 3 head");
    step(2, 0, 0); step(0, 2, 0);
    wr_thread = 3; #1;
    check(wr_ready, "space after committed reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
