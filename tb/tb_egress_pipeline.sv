// tb_egress_pipeline: offers an ACK, a PULL and a DATA packet at the same time and checks that
// control packets leave first (ACK, then PULL, then DATA), whole, with correctly built headers
// (addresses, flags, IP length) and the payload after the DATA header; also that a control
// packet arriving during a DATA packet waits for its end.
module tb_egress_pipeline;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [47:0] my_mac = 48'h020000000005, peer_mac = 48'h0200000000ff;
  logic [31:0] my_ip = 32'h0a000005;
  logic ctrl_valid = 0, ctrl_ready, pull_valid = 0, pull_ready, d_valid = 0, d_ready;
  logic p_valid = 0, p_last, p_ready, tx_valid, tx_last, tx_ready = 1, ctrl_pkt_evt, data_pkt_evt;
  ctrl_req_t ctrl_req = '0, pull_req = '0;
  pkt_hdr_t d_hdr = '0;
  word_t p_data, tx_data;
  int checks = 0, failures = 0;

  egress_pipeline dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // collect packets from the wire
  word_t cur [$];
  word_t pkts [$][$];
  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    cur.push_back(tx_data);
    if (tx_last) begin pkts.push_back(cur); cur = {}; end
  end
  function automatic pkt_hdr_t hdr_of(input int k);
    logic [511:0] b;
    for (int i = 0; i < 8; i++) b[511 - 64*i -: 64] = pkts[k][i];
    return pkt_hdr_t'(b);
  endfunction

  // payload source: 3 words after the descriptor is taken
  int pidx = 0;
  always @(posedge clk) begin
    if (d_valid && d_ready) begin d_valid <= 0; p_valid <= 1; pidx <= 0; end
    if (p_valid && p_ready) begin
      pidx <= pidx + 1;
      if (pidx == 2) p_valid <= 0;
    end
  end
  assign p_data = word_t'(64'hE000 + pidx);
  assign p_last = (pidx == 2);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  pkt_hdr_t h;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    ctrl_req.flags = 8'(1 << F_ACK); ctrl_req.dst_ip = 32'h0a000009; ctrl_req.dst_port = 16'd1234;
    ctrl_req.src_port = 16'd80; ctrl_req.msg_id = 8'd3; ctrl_req.pkt_offset = 8'd1;
    pull_req = ctrl_req; pull_req.flags = 8'(1 << F_PULL); pull_req.pull_offset = 16'd5;
    d_hdr.flags = 8'(1 << F_DATA); d_hdr.ip_dst = 32'h0a000009; d_hdr.msg_len = 16'd24; d_hdr.msg_id = 8'd4;
    tx_ready = 0;                       // hold the wire so that all three wait together
    ctrl_valid = 1; @(posedge clk); #1 ctrl_valid = 0;
    pull_valid = 1; d_valid = 1;
    repeat (3) @(posedge clk); #1 tx_ready = 1;
    while (!pull_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1 pull_valid = 0;
    repeat (40) @(posedge clk); #1;
    check(pkts.size() == 3, $sformatf("three packets, got %0d", pkts.size()));
    if (pkts.size() == 3) begin
      h = hdr_of(0);
      check(pkts[0].size() == 8 && h.flags == 8'(1 << F_ACK) && h.ip_dst == 32'h0a000009 &&
            h.ip_src == my_ip && h.eth_dst == peer_mac && h.eth_src == my_mac &&
            h.msg_id == 3 && h.pkt_offset == 1 && h.ip_len == 50, "ACK first, header only");
      h = hdr_of(1);
      check(pkts[1].size() == 8 && h.flags == 8'(1 << F_PULL) && h.pull_offset == 5, "PULL second");
      h = hdr_of(2);
      check(pkts[2].size() == 11 && h.flags == 8'(1 << F_DATA) && h.msg_id == 4 && h.ip_len == 50 + 24 &&
            pkts[2][8] == 64'hE000 && pkts[2][10] == 64'hE002, "DATA last with payload");
    end
    // control request during a DATA packet waits for the packet end
    d_valid = 1;
    wait (p_valid); #1;
    ctrl_valid = 1; @(posedge clk); #1 ctrl_valid = 0;
    repeat (40) @(posedge clk); #1;
    check(pkts.size() == 5 && pkts[3].size() == 11 && pkts[4].size() == 8, "no preemption inside a packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
