// tb_core_net_if: plays the role of one core's pipeline and kernel. It binds two threads
// through the CSRs, delivers a message for the idle thread and checks the interrupt and
// lnextthread, switches thread by writing lcurport, reads the message through netRX (single and
// double reads, undo on flush), sends a reply through netTX and checks it leaves tagged with the
// thread's port, and checks that lmsgdone is reported to the core selector.
module tb_core_net_if;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] now = 0;
  always @(posedge clk) now <= now + 1;
  logic bound_en = 1, dec_valid = 0, flush = 0, wb_valid = 0, tx_stall;
  logic [4:0] dec_rs1 = 0, dec_rs2 = 0, wb_rd = 0;
  word_t rs1_net_data, rs2_net_data, wb_data = 0, csr_wdata = 0, csr_rdata;
  logic [1:0] wb_commit = 0;
  logic csr_valid = 0, csr_write = 0, irq;
  logic [11:0] csr_addr = 0;
  logic rx_valid = 0, rx_first = 0, rx_ready;
  word_t rx_data = 0, tx_data;
  logic [15:0] rx_port = 0, tx_port, bind_port, done_port;
  logic tx_valid, tx_last, tx_ready = 1, bind_valid, bind_unbind, done_valid;
  logic downgrade_evt, rotate_evt;
  logic [1:0] cur_thread_o;
  int checks = 0, failures = 0, binds = 0, dones = 0;

  core_net_if dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic csrw(input logic [11:0] a, input word_t d);
    csr_valid = 1; csr_write = 1; csr_addr = a; csr_wdata = d;
    @(posedge clk); #1 csr_valid = 0; csr_write = 0;
  endtask
  // CSR read: the data is combinational for the address
  task automatic chk_csr(input logic [11:0] a, input word_t exp, input string what);
    csr_addr = a; #1;
    check(csr_rdata == exp, what);
  endtask
  task automatic rxw(input word_t d, input bit first, input int port);
    rx_valid = 1; rx_data = d; rx_first = first; rx_port = 16'(port);
    @(posedge clk); #1 rx_valid = 0; rx_first = 0;
  endtask

  word_t txw [$];
  logic [15:0] txp [$];
  always @(posedge clk) if (!rst) begin
    if (bind_valid && !bind_unbind) binds++;
    if (done_valid) begin dones++; check(done_port == 16'd80, "done reported for port 80"); end
    if (tx_valid && tx_ready) begin txw.push_back(tx_data); txp.push_back(tx_port); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  word_t a, b;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    csrw(CSR_LCURPORT, 80); csrw(CSR_LCURPRIORITY, 0); csrw(CSR_LNICCMD, 1);
    csrw(CSR_LCURPORT, 90); csrw(CSR_LCURPRIORITY, 1); csrw(CSR_LNICCMD, 1);
    @(posedge clk); #1;
    check(binds == 2, "two binds sent to the core selector");
    check(cur_thread_o == 1 && !irq, "thread of port 90 running, nothing pending");
    chk_csr(CSR_LMSGSRDY, 0, "no message ready");
    rxw({32'h0a000009, 16'd1000, 16'd16}, 1, 80);
    rxw(64'h111, 0, 80); rxw(64'h222, 0, 80);
    @(posedge clk); #1;
    check(irq, "interrupt"); chk_csr(CSR_LNEXTTHREAD, 0, "lnextthread: run thread 0");
    csrw(CSR_LCURPORT, 80);             // kernel switches to the thread of port 80
    @(posedge clk); #1;
    check(!irq && cur_thread_o == 0, "switched");
    chk_csr(CSR_LMSGSRDY, 1, "message ready");
    // netRX read of the header, then flush undoes it
    dec_valid = 1; dec_rs1 = 31; #1 a = rs1_net_data;
    @(posedge clk); #1 dec_valid = 0;
    check(a[15:0] == 16'd16 && a[63:32] == 32'h0a000009, "netRX returns the RX app header");
    flush = 1; @(posedge clk); #1 flush = 0;
    dec_valid = 1; dec_rs1 = 31; #1 a = rs1_net_data;
    @(posedge clk); #1 dec_valid = 0;
    check(a[15:0] == 16'd16, "header read again after flush");
    wb_commit = 1; @(posedge clk); #1 wb_commit = 0;
    // both operands from netRX: two words in order
    dec_valid = 1; dec_rs1 = 31; dec_rs2 = 31; #1 a = rs1_net_data; b = rs2_net_data;
    @(posedge clk); #1 dec_valid = 0; dec_rs2 = 0;
    check(a == 64'h111 && b == 64'h222, "rs1 and rs2 read consecutive words");
    wb_commit = 2; @(posedge clk); #1 wb_commit = 0;
    flush = 1; @(posedge clk); #1 flush = 0;
    chk_csr(CSR_LMSGSRDY, 0, "committed reads stay read after a flush");
    // reply through netTX
    wb_valid = 1; wb_rd = 30; wb_data = {32'h0a000009, 16'd1000, 16'd8}; @(posedge clk); #1;
    wb_data = 64'h112; @(posedge clk); #1 wb_valid = 0;
    repeat (4) @(posedge clk); #1;
    check(txw.size() == 2 && txw[1] == 64'h112 && txp[0] == 16'd80, "reply leaves with port 80");
    csrw(CSR_LMSGDONE, 1);
    @(posedge clk); #1;
    check(dones == 1, "message done reported");
    // a message for an unknown port is dropped, not blocking
    rxw(64'h0, 1, 99); #1;
    check(rx_ready, "unknown port does not block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
