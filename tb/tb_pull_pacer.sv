// tb_pull_pacer: queues a burst of PULL requests and checks that they leave in order, the
// first at once and the rest exactly GAP cycles apart, and that a full FIFO refuses requests.
module tb_pull_pacer;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int GAP = 10;
  logic req_valid = 0, req_ready, out_valid, out_ready = 1;
  ctrl_req_t req = '0, out_req;
  int checks = 0, failures = 0, cyc = 0;
  int t_out [$];
  int o_tag [$];

  pull_pacer #(.GAP(GAP), .DEPTH(8)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid && out_ready) begin t_out.push_back(cyc); o_tag.push_back(int'(out_req.msg_id)); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int t0;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    t0 = cyc + 1;
    for (int i = 0; i < 5; i++) begin
      req = '0; req.flags = 8'(1 << F_PULL); req.msg_id = 8'(i); req_valid = 1;
      @(posedge clk); #1;
    end
    req_valid = 0;
    repeat (6 * GAP) @(posedge clk); #1;
    check(t_out.size() == 5, "five pulls out");
    if (t_out.size() == 5) begin
      check(t_out[0] - t0 <= 1, "first pull leaves at once");
      for (int i = 1; i < 5; i++) begin
        check(t_out[i] - t_out[i-1] == GAP, $sformatf("spacing %0d", t_out[i] - t_out[i-1]));
        check(o_tag[i] == i, "order kept");
      end
    end
    out_ready = 0;
    for (int i = 0; i < 8; i++) begin req_valid = 1; @(posedge clk); #1; end
    req_valid = 0; #1;
    check(!req_ready, "full after 8 requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
