// tb_msg_buffer_alloc: checks smallest-fit class choice, base addresses, exhaustion and reuse
// of the message buffer allocator against values computed from the class table
// (classes of 8, 64 and 256 words, 32, 16 and 8 buffers).
module tb_msg_buffer_alloc;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic alloc_req = 0, free_req = 0, alloc_ok;
  logic [15:0] alloc_len = 0;
  logic [5:0] alloc_id, free_id = 0;
  logic [11:0] alloc_base;
  logic [6:0] free_count;
  int checks = 0, failures = 0;

  msg_buffer_alloc dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected base address of a buffer id
  function automatic int exp_base(input int id);
    if (id < 32) return id * 8;
    if (id < 48) return 256 + (id - 32) * 64;
    return 1280 + (id - 48) * 256;
  endfunction

  task automatic alloc(input int len, input bit exp_ok, input int exp_id);
    alloc_len = 16'(len); alloc_req = 1;
    #1;
    check(alloc_ok == exp_ok, $sformatf("alloc ok for len %0d", len));
    if (exp_ok) begin
      check(alloc_id == 6'(exp_id), $sformatf("len %0d id %0d exp %0d", len, alloc_id, exp_id));
      check(alloc_base == 12'(exp_base(exp_id)), $sformatf("base of id %0d", exp_id));
    end
    @(posedge clk); #1 alloc_req = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check(free_count == 56, "all free after reset");
    alloc(8, 1, 0);
    alloc(64, 1, 1);
    alloc(0, 1, 2);
    alloc(65, 1, 32);
    alloc(512, 1, 33);
    alloc(513, 1, 48);
    alloc(2048, 1, 49);
    alloc(2049, 0, 0);
    check(free_count == 49, "7 allocated");
    for (int i = 3; i < 32; i++) alloc(16, 1, i);
    alloc(8, 1, 34);                 // class 0 exhausted: next class up
    free_id = 6'd5; free_req = 1; @(posedge clk); #1 free_req = 0;
    alloc(8, 1, 5);                  // freed buffer reused
    for (int i = 50; i < 56; i++) alloc(1000, 1, i);
    alloc(1000, 0, 0);               // class 2 exhausted, nothing larger
    check(free_count == 56 - 32 - 3 - 8, "count after exhaustion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
