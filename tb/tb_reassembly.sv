// tb_reassembly: feeds DATA and TRIM packets and checks the delivered messages word for word
// (RX app header, data in order even when packets arrive out of order), the ACK/NACK and PULL
// requests, discarding of messages for unbound ports, dropping without ACK when no buffer of
// the right class is free, and that a single-packet message is delivered within a few cycles.
module tb_reassembly;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sop = 0, in_eop = 0, in_ready;
  pkt_hdr_t in_hdr = '0;
  word_t in_data = 0, msg_data;
  logic ctrl_valid, ctrl_ready = 1, pull_valid, pull_ready = 1;
  ctrl_req_t ctrl_req, pull_req;
  logic [15:0] lk_port;
  logic lk_hit;
  logic [3:0] lk_q, msg_q;
  logic msg_valid, msg_last, msg_ready = 1, drop_evt, complete_evt, ooo_evt;
  int checks = 0, failures = 0, drops = 0, ooos = 0, cyc = 0;

  assign lk_hit = (lk_port == 16'd80);
  assign lk_q   = 4'd3;

  reassembly dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t wval(input int id, input int k, input int i);
    return word_t'(id * 65536 + k * 256 + i);
  endfunction
  // send packet k of a message; nwords payload words (0 = single dummy beat)
  task automatic pkt(input int id, input int len, input int k, input bit trim, input int dport, input int src);
    int mw, nw;
    in_hdr = '0;
    in_hdr.flags = trim ? 8'(1 << F_DATA | 1 << F_CHOP) : 8'(1 << F_DATA);
    in_hdr.ip_src = 32'h0a000000 + src; in_hdr.src_port = 16'd1000; in_hdr.dst_port = 16'(dport);
    in_hdr.msg_len = 16'(len); in_hdr.msg_id = 8'(id); in_hdr.pkt_offset = 8'(k);
    mw = (len + 7) / 8;
    nw = trim ? 0 : ((mw - k * 128) > 128 ? 128 : (mw - k * 128));
    if (nw < 1) nw = 1;
    for (int i = 0; i < nw; i++) begin
      in_valid = 1; in_sop = (i == 0); in_eop = (i == nw - 1); in_data = wval(id, k, i);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0; in_sop = 0; in_eop = 0;
  endtask

  word_t got [$];
  logic  glast [$];
  ctrl_req_t ctrls [$], pulls [$];
  int t_first_out = -1, t_last_in = -1;
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (msg_valid && msg_ready) begin
        got.push_back(msg_data); glast.push_back(msg_last);
        check(msg_q == 4'd3, "message written to port 80's queue");
        if (t_first_out < 0) t_first_out = cyc;
      end
      if (in_valid && in_ready && in_eop && t_last_in < 0) t_last_in = cyc;
      if (ctrl_valid && ctrl_ready) ctrls.push_back(ctrl_req);
      if (pull_valid && pull_ready) pulls.push_back(pull_req);
      if (drop_evt) drops++;
      if (ooo_evt) ooos++;
    end
  end

  task automatic expect_msg(input int id, input int len, input int src, input string what);
    int mw;
    mw = (len + 7) / 8;
    check(got.size() == mw + 1, $sformatf("%s: %0d words, exp %0d", what, got.size(), mw + 1));
    if (got.size() == mw + 1) begin
      check(got[0] == {32'h0a000000 + src, 16'd1000, 16'(len)}, {what, ": RX app header"});
      for (int i = 0; i < mw; i++)
        if (got[i+1] != wval(id, i / 128, i % 128)) begin
          check(0, $sformatf("%s: word %0d", what, i)); break;
        end
      check(glast[mw] && (mw == 0 || !glast[mw-1]), {what, ": last mark"});
    end
    got = {}; glast = {};
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 1. single-packet message
    pkt(1, 24, 0, 0, 80, 1);
    repeat (10) @(posedge clk); #1;
    expect_msg(1, 24, 1, "single packet");
    check(t_first_out - t_last_in <= 3, $sformatf("delivery starts %0d cycles after last word", t_first_out - t_last_in));
    check(ctrls.size() == 1 && ctrls[0].flags == 8'(1 << F_ACK) && ctrls[0].dst_ip == 32'h0a000001 &&
          ctrls[0].msg_id == 1 && ctrls[0].dst_port == 1000 && ctrls[0].src_port == 80, "ACK request");
    check(pulls.size() == 1 && pulls[0].flags == 8'(1 << F_PULL), "PULL request");
    // 2. two-packet message, out of order
    pkt(2, 1032, 1, 0, 80, 2);
    repeat (5) @(posedge clk); #1;
    check(got.size() == 0, "not delivered before complete");
    pkt(2, 1032, 0, 0, 80, 2);
    repeat (150) @(posedge clk); #1;
    expect_msg(2, 1032, 2, "out of order");
    check(ooos == 1, "out-of-order arrival seen");
    check(ctrls.size() == 3 && ctrls[1].pkt_offset == 1 && ctrls[2].pkt_offset == 0, "ACK per packet");
    // 3. TRIM -> NACK + PULL, nothing delivered
    pkt(3, 24, 0, 1, 80, 3);
    repeat (5) @(posedge clk); #1;
    check(ctrls.size() == 4 && ctrls[3].flags == 8'(1 << F_NACK) && pulls.size() == 4, "TRIM gives NACK and PULL");
    check(got.size() == 0, "TRIM delivers nothing");
    // then the retransmission completes it
    pkt(3, 24, 0, 0, 80, 3);
    repeat (10) @(posedge clk); #1;
    expect_msg(3, 24, 3, "retransmitted");
    // 4. unbound port: discarded
    pkt(4, 8, 0, 0, 81, 4);
    repeat (10) @(posedge clk); #1;
    check(got.size() == 0, "unbound port discarded");
    // 5. empty message
    pkt(5, 0, 0, 0, 80, 5);
    repeat (10) @(posedge clk); #1;
    expect_msg(5, 0, 5, "empty message");
    // 6. exhaust the 8 large buffers with first halves, then a 9th is dropped
    for (int m = 0; m < 8; m++) pkt(10 + m, 2048, 1, 0, 80, 6);
    pkt(18, 2048, 1, 0, 80, 6);
    repeat (5) @(posedge clk); #1;
    check(drops == 1, $sformatf("ninth large message dropped (%0d)", drops));
    check(ctrls.size() == 7 + 8, $sformatf("no ACK for the dropped packet (%0d)", ctrls.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
