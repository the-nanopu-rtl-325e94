// tb_jbsq_core_selector: binds a port on three cores and another port on a fourth, queues
// messages in a global RX queue and checks the JBSQ(2) decisions against a reference model of
// the policy (smallest outstanding count below 2, lowest core on ties), that the 7th message
// waits while all three cores hold two, that a message-done releases it to that core, that
// another port's messages go only to its own core, and that unbound ports are not found.
module tb_jbsq_core_selector;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic bind_valid = 0, bind_unbind = 0, lk_hit, q_last, q_valid, q_pop, out_first;
  logic [1:0] bind_core = 0;
  logic [15:0] bind_port = 0, lk_port = 0, out_port;
  logic [1:0] lk_q, q_sel;
  logic [3:0] done_valid = 0, out_valid, out_ready = 4'hf;
  logic [3:0][15:0] done_port = 0;
  logic [3:0] msg_avail;
  word_t q_data, out_data;
  logic dispatch_evt, wait_evt;
  // global RX queue feeding the selector
  logic wr_valid = 0, wr_last = 0, wr_ready;
  logic [1:0] wr_q = 0;
  word_t wr_data = 0;
  int checks = 0, failures = 0, waits = 0;

  jbsq_core_selector #(.NUM_CORES(4), .NUM_PORTS(4), .JBSQ_N(2)) dut (.*);
  global_rx_queues #(.NUM_PORTS(4), .DEPTH(64)) u_q (
    .clk, .rst, .wr_valid, .wr_q, .wr_data, .wr_last, .wr_ready, .rd_q(q_sel), .rd_pop(q_pop),
    .rd_data(q_data), .rd_last(q_last), .rd_valid(q_valid), .msg_avail);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic bind_p(input int core, input int port);
    bind_core = 2'(core); bind_port = 16'(port); bind_valid = 1;
    @(posedge clk); #1 bind_valid = 0;
  endtask
  task automatic put(input int port, input int tag);
    lk_port = 16'(port); #1;
    wr_q = lk_q; wr_data = {32'h0, 16'(port), 16'd8}; wr_valid = 1; @(posedge clk); #1;
    wr_data = word_t'(tag); wr_last = 1; @(posedge clk); #1 wr_valid = 0; wr_last = 0;
  endtask
  task automatic done(input int core, input int port);
    done_valid[core] = 1; done_port[core] = 16'(port); @(posedge clk); #1 done_valid = 0;
  endtask

  // record the destination core of every message (at its data word)
  int dest [$];
  int tags [$];
  always @(posedge clk) begin
    if (wait_evt) waits++;
    for (int c = 0; c < 4; c++)
      if (!rst && out_valid[c] && out_ready[c] && !out_first) begin dest.push_back(c); tags.push_back(int'(out_data)); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int model_cnt [4];
  int exp_core;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    bind_p(0, 80); bind_p(1, 80); bind_p(2, 80); bind_p(3, 90);
    lk_port = 80; #1; check(lk_hit, "port 80 bound");
    lk_port = 81; #1; check(!lk_hit, "port 81 not bound");
    for (int i = 0; i < 7; i++) put(80, i);
    repeat (30) @(posedge clk); #1;
    check(dest.size() == 6, $sformatf("six messages forwarded, %0d", dest.size()));
    for (int c = 0; c < 4; c++) model_cnt[c] = 0;
    for (int i = 0; i < dest.size() && i < 6; i++) begin
      exp_core = 0;
      for (int c = 1; c < 3; c++) if (model_cnt[c] < model_cnt[exp_core]) exp_core = c;
      check(dest[i] == exp_core && tags[i] == i, $sformatf("message %0d to core %0d (exp %0d)", i, dest[i], exp_core));
      model_cnt[exp_core]++;
    end
    check(waits > 0, "seventh message waited");
    done(1, 80);
    repeat (6) @(posedge clk); #1;
    check(dest.size() == 7 && dest[6] == 1 && tags[6] == 6, "done on core 1 releases message 6 to core 1");
    put(90, 100);
    repeat (6) @(posedge clk); #1;
    check(dest.size() == 8 && dest[7] == 3 && tags[7] == 100, "port 90 goes to core 3");
    // two cores free up; smallest count wins
    done(2, 80); done(2, 80); done(0, 80);
    put(80, 7);
    repeat (6) @(posedge clk); #1;
    check(dest.size() == 9 && dest[8] == 2, "message goes to the core holding fewest (core 2)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
