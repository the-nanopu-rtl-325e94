// tb_packetization: writes messages as the global TX queue would and checks the packets that
// come out: header fields, payload words per packet offset, the first window (INIT_WIN = 1 here)
// with the next packet released by a PULL, resending a NACKed packet on the next PULL,
// retransmission after RTX_TIMEOUT without ACKs, and buffer release once all packets are ACKed.
module tb_packetization;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] now = 0;
  always @(posedge clk) now <= now + 1;
  localparam int TMO = 300;
  logic in_valid = 0, in_last = 0, in_ready, ev_valid = 0;
  word_t in_data = 0, p_data;
  logic [15:0] in_port = 0;
  tx_event_t ev = '0;
  logic d_valid, d_ready = 1, p_valid, p_last, p_ready = 1, rtx_evt, stall_evt;
  pkt_hdr_t d_hdr;
  int checks = 0, failures = 0, rtxs = 0;

  packetization #(.INIT_WIN(1), .RTX_TIMEOUT(TMO)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send_msg(input int len, input int tag);
    in_valid = 1; in_port = 16'd55; in_data = {32'h0a000009, 16'd80, 16'(len)};
    in_last = (len == 0);
    do @(posedge clk); while (!in_ready);
    #1;
    for (int i = 0; i < (len + 7) / 8; i++) begin
      in_data = word_t'(tag * 4096 + i); in_last = (i == (len + 7) / 8 - 1);
      @(posedge clk); #1;
    end
    in_valid = 0; in_last = 0;
  endtask
  task automatic event_in(input int flag, input int id, input int k);
    ev = '0; ev.flags = 8'(1 << flag); ev.msg_id = 8'(id); ev.pkt_offset = 8'(k); ev_valid = 1;
    @(posedge clk); #1 ev_valid = 0;
  endtask

  // collected packets
  pkt_hdr_t hdrs [$];
  int       nwords [$];
  word_t    first_w [$];
  int       cnt = 0;
  always @(posedge clk) if (!rst) begin
    if (rtx_evt) rtxs++;
    if (d_valid && d_ready) begin hdrs.push_back(d_hdr); nwords.push_back(0); first_w.push_back('0); end
    if (p_valid && p_ready) begin
      if (nwords[$] == 0) first_w[$] = p_data;
      nwords[$] = nwords[$] + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ida, idb, idc;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    send_msg(24, 1);
    repeat (10) @(posedge clk); #1;
    check(hdrs.size() == 1, "one packet for a 24-byte message");
    if (hdrs.size() == 1) begin
      check(hdrs[0].ip_dst == 32'h0a000009 && hdrs[0].dst_port == 80 && hdrs[0].src_port == 55 &&
            hdrs[0].msg_len == 24 && hdrs[0].pkt_offset == 0 && hdrs[0].flags == 8'(1 << F_DATA),
            "header fields");
      check(nwords[0] == 3 && first_w[0] == word_t'(4096), "payload");
      ida = int'(hdrs[0].msg_id);
    end
    event_in(F_ACK, ida, 0);
    send_msg(1032, 2);                     // 2 packets, window 1
    repeat (150) @(posedge clk); #1;
    check(hdrs.size() == 2 && hdrs[1].pkt_offset == 0 && nwords[1] == 128, "first window: packet 0 only");
    idb = int'(hdrs[1].msg_id);
    event_in(F_PULL, idb, 0);
    repeat (10) @(posedge clk); #1;
    check(hdrs.size() == 3 && hdrs[2].pkt_offset == 1 && nwords[2] == 1 && first_w[2] == word_t'(2*4096 + 128),
          "PULL releases packet 1 (word 128)");
    event_in(F_NACK, idb, 0);
    repeat (5) @(posedge clk); #1;
    check(hdrs.size() == 3, "NACK alone sends nothing");
    event_in(F_PULL, idb, 0);
    repeat (140) @(posedge clk); #1;
    check(hdrs.size() == 4 && hdrs[3].pkt_offset == 0 && nwords[3] == 128, $sformatf("NACKed packet resent on PULL (%0d pkts, rtx %0d)", hdrs.size(), rtxs));
    event_in(F_ACK, idb, 0);
    event_in(F_ACK, idb, 1);
    repeat (70) @(posedge clk); #1;
    check(!dut.tbl[ida].valid && !dut.tbl[idb].valid, "fully ACKed messages freed");
    // timeout: no ACK for message C
    send_msg(8, 3);
    repeat (10) @(posedge clk); #1;
    idc = int'(hdrs[$].msg_id);
    check(hdrs.size() == 5 && rtxs == 0, "message C sent once");
    repeat (TMO + 80) @(posedge clk); #1;
    check(rtxs >= 1 && hdrs.size() >= 6 && int'(hdrs[5].msg_id) == idc, "retransmitted after timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
