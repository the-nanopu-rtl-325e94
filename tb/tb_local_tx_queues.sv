// tb_local_tx_queues: two threads write interleaved messages through netTX; checks that each
// message leaves whole and in order, tagged with its thread's port, that a partial message is
// held back, and that an empty message (header only) is forwarded.
module tb_local_tx_queues;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_ready, out_valid, out_last, out_ready = 1;
  logic [1:0] wr_thread = 0;
  word_t wr_data = 0, out_data;
  logic [3:0][15:0] thread_port = {16'd40, 16'd30, 16'd20, 16'd10};
  logic [15:0] out_port;
  int checks = 0, failures = 0;

  local_tx_queues #(.NUM_THREADS(4), .DEPTH(16)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input int t, input word_t d);
    wr_thread = 2'(t); wr_data = d; wr_valid = 1;
    @(posedge clk); #1 wr_valid = 0;
  endtask

  // capture output
  word_t got [$];
  logic [15:0] gport [$];
  logic glast [$];
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    got.push_back(out_data); gport.push_back(out_port); glast.push_back(out_last);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wr(1, {32'h0a000001, 16'd7, 16'd16});   // thread 1: 16 bytes = 2 words
    wr(1, 64'h11);
    wr(2, {32'h0a000002, 16'd8, 16'd8});    // thread 2: 8 bytes = 1 word
    repeat (3) @(posedge clk); #1;
    check(got.size() == 0, "partial messages held back");
    wr(2, 64'h21);                          // thread 2 complete
    wr(1, 64'h12);                          // thread 1 complete
    repeat (5) @(posedge clk); #1;
    wr(3, {32'h0a000003, 16'd9, 16'd0});    // thread 3: empty message
    repeat (10) @(posedge clk); #1;
    check(got.size() == 6, $sformatf("6 words out, got %0d", got.size()));
    if (got.size() == 6) begin
      check(got[0][15:0] == 16'd8 && got[1] == 64'h21 && gport[0] == 16'd30 && glast[1],
            "thread 2 message first, port 30");
      check(got[2][15:0] == 16'd16 && got[3] == 64'h11 && got[4] == 64'h12 && glast[4] &&
            !glast[3] && gport[2] == 16'd20, "thread 1 message whole, port 20");
      check(got[5][15:0] == 16'd0 && glast[5] && gport[5] == 16'd40, "empty message of thread 3");
    end
    // backpressure: output stalled keeps data
    out_ready = 0;
    wr(0, {32'h0a000004, 16'd1, 16'd8}); wr(0, 64'h31);
    repeat (3) @(posedge clk); #1;
    check(out_valid && out_data[15:0] == 16'd8, "held under backpressure");
    out_ready = 1;
    repeat (3) @(posedge clk); #1;
    check(got.size() == 8 && got[7] == 64'h31, "released after backpressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
