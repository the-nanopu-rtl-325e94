// tb_global_tx_queues: four cores send messages at once; checks that every message leaves
// whole (no interleaving), with its source port, that cores are served round-robin, and that
// the output keeps one word per cycle.
module tb_global_tx_queues;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [3:0] in_valid = 0, in_last = 0, in_ready;
  word_t [3:0] in_data = 0;
  logic [3:0][15:0] in_port = 0;
  logic out_valid, out_last, out_ready = 1;
  word_t out_data;
  logic [15:0] out_port;
  int checks = 0, failures = 0;

  global_tx_queues #(.NUM_CORES(4), .DEPTH(16)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  word_t got [$];
  logic [15:0] gport [$];
  logic glast [$];
  int first_cyc = -1, last_cyc = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid && out_ready) begin
      got.push_back(out_data); gport.push_back(out_port); glast.push_back(out_last);
      if (first_cyc < 0) first_cyc = cyc;
      last_cyc = cyc;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // each core c sends two 3-word messages, words {c, m, i}, port 100+c
    for (int m = 0; m < 2; m++)
      for (int i = 0; i < 3; i++) begin
        for (int c = 0; c < 4; c++) begin
          in_valid[c] = 1; in_data[c] = word_t'(c * 256 + m * 16 + i);
          in_last[c] = (i == 2); in_port[c] = 16'(100 + c);
        end
        @(posedge clk); #1;
      end
    in_valid = 0;
    repeat (40) @(posedge clk); #1;
    check(got.size() == 24, $sformatf("24 words out, got %0d", got.size()));
    if (got.size() == 24) begin
      for (int k = 0; k < 8; k++) begin
        int c, m;
        c = int'(got[3*k] >> 8);
        m = int'((got[3*k] >> 4) & 15);
        check(got[3*k+1] == word_t'(c*256 + m*16 + 1) && got[3*k+2] == word_t'(c*256 + m*16 + 2)
              && glast[3*k+2] && !glast[3*k+1] && gport[3*k] == 16'(100 + c),
              $sformatf("message %0d whole and tagged", k));
        check(c == k % 4, $sformatf("round robin: message %0d from core %0d", k, c));
      end
      // 8 messages of 3 words with one idle cycle between messages: <= 32 cycles
      check(last_cyc - first_cyc + 1 <= 32, $sformatf("drain took %0d cycles", last_cyc - first_cyc + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
