// tb_ingress_pipeline: sends DATA, TRIM, ACK and misaddressed packets, built from the header
// layout, and checks what reaches reassembly (header fields, payload words, sop/eop, one beat
// for a TRIM), the transport event for the ACK, and that the misaddressed packet is dropped.
module tb_ingress_pipeline;
  import nanopu_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] my_ip = 32'h0a000005;
  logic rx_valid = 0, rx_last = 0, rx_ready, out_valid, out_sop, out_eop, out_ready = 1;
  logic ev_valid, drop_evt;
  word_t rx_data = 0, out_data;
  pkt_hdr_t out_hdr;
  tx_event_t ev;
  int checks = 0, failures = 0, drops = 0;

  ingress_pipeline dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pkt_hdr_t mk(input logic [7:0] flags, input logic [31:0] dst, input int id);
    pkt_hdr_t h = '0;
    h.eth_type = 16'h0800; h.ip_ver = 4; h.ip_ihl = 5; h.ip_proto = 8'd199;
    h.ip_src = 32'h0a000009; h.ip_dst = dst; h.flags = flags;
    h.src_port = 16'd1234; h.dst_port = 16'd80; h.msg_len = 16'd24; h.msg_id = 8'(id);
    h.pkt_offset = 8'd0; h.pull_offset = 16'd3;
    return h;
  endfunction
  task automatic send(input pkt_hdr_t h, input int npay);
    logic [511:0] b;
    b = h;
    for (int i = 0; i < 8 + npay; i++) begin
      rx_valid = 1;
      rx_data  = (i < 8) ? b[511 - 64*i -: 64] : word_t'(64'hD000 + i - 8);
      rx_last  = (i == 8 + npay - 1);
      do @(posedge clk); while (!rx_ready);
      #1;
    end
    rx_valid = 0; rx_last = 0;
  endtask

  word_t pay [$];
  logic psop [$], peop [$];
  pkt_hdr_t phdr [$];
  tx_event_t evs [$];
  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      pay.push_back(out_data); psop.push_back(out_sop); peop.push_back(out_eop); phdr.push_back(out_hdr);
    end
    if (ev_valid) evs.push_back(ev);
    if (drop_evt) drops++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    send(mk(8'h01, my_ip, 7), 3);                       // DATA, 3 words
    repeat (2) @(posedge clk); #1;
    check(pay.size() == 3, "three payload beats");
    if (pay.size() == 3) begin
      check(pay[0] == 64'hD000 && pay[2] == 64'hD002, "payload words in order");
      check(psop[0] && !psop[1] && !peop[1] && peop[2], "sop/eop marks");
      check(phdr[0].msg_id == 7 && phdr[0].ip_src == 32'h0a000009 && phdr[0].src_port == 1234 &&
            phdr[0].msg_len == 24, "parsed header fields");
    end
    send(mk(8'h11, my_ip, 8), 0);                       // TRIM (DATA|CHOP), header only
    repeat (3) @(posedge clk); #1;
    check(pay.size() == 4 && psop[3] && peop[3] && phdr[3].flags[F_CHOP], "TRIM gives one beat");
    send(mk(8'h02, my_ip, 9), 0);                       // ACK
    repeat (3) @(posedge clk); #1;
    check(evs.size() == 1 && evs[0].flags[F_ACK] && evs[0].msg_id == 9 && evs[0].pull_offset == 3,
          "ACK becomes a transport event");
    send(mk(8'h01, 32'h0a000006, 10), 2);               // not for us
    repeat (3) @(posedge clk); #1;
    check(pay.size() == 4 && drops == 1, "misaddressed packet dropped");
    // backpressure on the payload
    out_ready = 0;
    fork send(mk(8'h01, my_ip, 11), 2); begin repeat (15) @(posedge clk); #1 out_ready = 1; end join
    repeat (3) @(posedge clk); #1;
    check(pay.size() == 6 && pay[4] == 64'hD000 && pay[5] == 64'hD001, "payload held under backpressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
