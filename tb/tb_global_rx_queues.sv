// tb_global_rx_queues: writes messages into several port queues and checks message-available
// flags, per-queue FIFO order, last-word marks, independence of queues and full-queue
// backpressure.
module tb_global_rx_queues;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_last = 0, wr_ready, rd_pop = 0, rd_last, rd_valid;
  logic [3:0] wr_q = 0, rd_q = 0;
  word_t wr_data = 0, rd_data;
  logic [15:0] msg_avail;
  int checks = 0, failures = 0;

  global_rx_queues #(.NUM_PORTS(16), .DEPTH(8)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input int q, input word_t d, input bit last);
    wr_q = 4'(q); wr_data = d; wr_last = last; wr_valid = 1;
    @(posedge clk); #1 wr_valid = 0; wr_last = 0;
  endtask
  task automatic rd(input int q, input word_t exp_d, input bit exp_last);
    rd_q = 4'(q); #1;
    check(rd_valid && rd_data == exp_d && rd_last == exp_last,
          $sformatf("queue %0d word %h exp %h", q, rd_data, exp_d));
    rd_pop = 1; @(posedge clk); #1 rd_pop = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wr(3, 64'h30, 0);
    check(msg_avail == 0, "incomplete message not available");
    wr(3, 64'h31, 1);
    wr(7, 64'h70, 1);
    wr(3, 64'h32, 1);
    check(msg_avail == 16'h0088, "queues 3 and 7 have messages");
    rd(7, 64'h70, 1);
    check(msg_avail == 16'h0008, "queue 7 drained");
    rd(3, 64'h30, 0); rd(3, 64'h31, 1);
    check(msg_avail == 16'h0008, "queue 3 still holds one");
    rd(3, 64'h32, 1);
    check(msg_avail == 0, "all drained");
    for (int i = 0; i < 8; i++) wr(5, word_t'(i), i == 7);
    wr_q = 5; #1;
    check(!wr_ready, "queue 5 full at 8 words");
    wr_q = 6; #1;
    check(wr_ready, "queue 6 has space");
    rd(5, 64'h0, 0);
    wr_q = 5; #1;
    check(wr_ready, "space after pop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
