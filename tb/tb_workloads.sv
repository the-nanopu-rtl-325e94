// tb_workloads: three of the paper's experiments, run on the whole design at its
// default parameters.
//
// The harness is the one of the end-to-end test: a remote host on the MAC side that sends
// requests, checks and acknowledges replies, and a model of each core's kernel and application.
// Here the application streams: after the header it copies each request word plus one to netTX
// in the same cycle it reads it, as an unrolled `addi netTX, netRX, 1` loop does. The service
// time, taken from the first request word, is spent after that first word has been read.
//
// 1. Single-core throughput with 1 KB messages (the paper's fixed-length application: 195 Gb/s
//    RX, 200 Gb/s TX). Sixteen 1 KB requests arrive back to back for a port bound on core 0
//    only. The core's RX and TX rates are measured over the whole burst. The wire delivers at
//    most 128 data words per 136-cycle packet (192.8 Gb/s). The check is that the core keeps up
//    with 90 % of that.
// 2. Bounded message processing time. Core 1 runs two priority-0 threads:
//    * a well-behaved one (port 80), 500 ns = 1600 cycles per request;
//    * a misbehaving one (port 81), 1600 cycles except every third request, which takes
//      5 us = 16000 cycles.
//    The well-behaved client keeps one request outstanding. The misbehaving client always has
//    one. The experiment runs first with the bound disabled (bound_en = 0), where a well-behaved
//    request can wait behind a 5 us one, and then enabled. The paper's bound for this case is
//    2 x 43 ns + 13 ns + 2 x 1 us + 50 ns = 2.15 us = 6880 cycles. The well-behaved worst case
//    must stay below it with the bound on and exceed it with the bound off.
// 3. 80-to-1 incast (the paper's NDP incast: 80 clients each send one 1 KB message to one
//    server at once). Each client has its own source port. The switch model holds 74 full
//    packets; the other 6 are trimmed to headers, which the switch forwards first. The NIC must
//    buffer every message. It must NACK and PULL each trimmed one, and the client resends it on
//    the NACK. The check is that all 80 requests are answered to the right client with no
//    timeout, and that exactly 6 NACKs were sent.
module tb_workloads;
  import nanopu_pkg::*;
  localparam int NC = 4, CTX = 160;
  localparam logic [31:0] MY_IP = 32'h0a000001, REM_IP = 32'h0a000002;
  localparam logic [15:0] REM_PORT = 16'd5000;
  localparam int BOUND = 6880;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic bound_en = 0;
  logic rx_valid = 0, rx_last = 0, rx_ready, tx_valid, tx_last;
  word_t rx_data = 0, tx_data;
  logic [NC-1:0] dec_valid, flush, wb_valid, tx_stall, csr_valid, csr_write, irq;
  logic [NC-1:0][4:0] dec_rs1, dec_rs2, wb_rd;
  logic [NC-1:0][1:0] wb_commit;
  logic [NC-1:0][11:0] csr_addr;
  word_t [NC-1:0] rs1_net_data, rs2_net_data, wb_data, csr_wdata, csr_rdata;

  nanopu_top dut (
    .clk, .rst, .my_mac(48'h02_00_00_00_00_01), .peer_mac(48'h02_00_00_00_00_02),
    .my_ip(MY_IP), .bound_en,
    .rx_valid, .rx_data, .rx_last, .rx_ready, .tx_valid, .tx_data, .tx_last, .tx_ready(1'b1),
    .dec_valid, .dec_rs1, .dec_rs2, .rs1_net_data, .rs2_net_data, .wb_commit, .flush,
    .wb_valid, .wb_rd, .wb_data, .tx_stall, .csr_valid, .csr_write, .csr_addr, .csr_wdata,
    .csr_rdata, .irq
  );

  int checks = 0, failures = 0;
  function automatic void check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endfunction

  // ------------------------------------------------------------------ remote host: sending
  word_t sw [$];
  bit    sl [$];
  word_t req_words [int][$];
  int    req_port  [int];
  int    req_sport [int];       // client's source port
  bit    req_done  [int];
  int    req_sent  [int];       // cycle the request's last word was accepted
  int    req_lat   [int];       // from that cycle to the reply's last word
  int    pend_tag  [$];         // tag of each queued last word, in order

  function automatic pkt_hdr_t mkhdr(input int flags, input int dport, input int len,
                                     input int id, input int off, input int sport = REM_PORT);
    pkt_hdr_t h = '0;
    h.eth_dst = 48'h02_00_00_00_00_01; h.eth_src = 48'h02_00_00_00_00_02;
    h.eth_type = 16'h0800; h.ip_ver = 4; h.ip_ihl = 5; h.ip_ttl = 8'd64;
    h.ip_proto = 8'd199; h.ip_src = REM_IP; h.ip_dst = MY_IP;
    h.flags = 8'(flags); h.src_port = 16'(sport); h.dst_port = 16'(dport);
    h.msg_len = 16'(len); h.msg_id = 8'(id); h.pkt_offset = 8'(off);
    return h;
  endfunction

  function automatic void push_words(input pkt_hdr_t h, input word_t pay [$], input int tag);
    logic [511:0] b;
    b = h;
    for (int i = 0; i < 8; i++) begin sw.push_back(b[511-64*i -: 64]); sl.push_back(pay.size() == 0 && i == 7); end
    for (int i = 0; i < pay.size(); i++) begin sw.push_back(pay[i]); sl.push_back(i == pay.size()-1); end
    pend_tag.push_back(tag);
  endfunction

  // one-packet request `tag` for `port`: `nw` data words, service time `spin` cycles
  function automatic void send_req(input int tag, input int port, input int nw, input int spin,
                                   input int sport = REM_PORT, input bit trim = 1'b0);
    req_words[tag].delete();
    req_words[tag].push_back({16'h0, 16'(tag), 16'h0, 16'(spin)});
    for (int i = 1; i < nw; i++) req_words[tag].push_back({$urandom, $urandom});
    req_port[tag] = port;
    req_done[tag] = 1'b0;
    req_sport[tag] = sport;
    if (trim) push_words(mkhdr(1 << F_CHOP, port, nw * 8, tag, 0, sport), '{}, -1);
    else push_words(mkhdr(1 << F_DATA, port, nw * 8, tag, 0, sport), req_words[tag], tag);
  endfunction

  initial forever begin
    bit take;
    @(negedge clk); take = rx_valid && rx_ready;
    @(posedge clk); #1;
    if (take) begin
      if (sl[0]) begin
        int t;
        t = pend_tag.pop_front();
        if (t >= 0) req_sent[t] = int'(cyc) - 1;
      end
      void'(sw.pop_front()); void'(sl.pop_front());
    end
    if (sw.size() > 0) begin rx_valid = 1; rx_data = sw[0]; rx_last = sl[0]; end
    else begin rx_valid = 0; rx_last = 0; end
  end

  // ------------------------------------------------------------------ remote host: receiving
  word_t rp [$];
  int    tx_first = -1, tx_last_c = -1, n_resp = 0, n_nack = 0;

  always @(negedge clk) if (!rst && tx_valid) begin
    rp.push_back(tx_data);
    if (tx_last) begin
      pkt_hdr_t h;
      word_t pay [$];
      logic [511:0] b;
      for (int i = 0; i < 8; i++) b[511-64*i -: 64] = rp[i];
      h = b;
      pay.delete();
      for (int i = 8; i < rp.size(); i++) pay.push_back(rp[i]);
      if (h.flags[F_NACK]) begin                  // resend the trimmed packet in full
        int tag;
        tag = int'(h.msg_id);
        n_nack++;
        if (req_words.exists(tag))
          push_words(mkhdr(1 << F_DATA, req_port[tag], req_words[tag].size() * 8, tag, 0,
                           req_sport[tag]), req_words[tag], tag);
      end
      if (h.flags[F_DATA]) begin
        int tag;
        bit ok;
        tag = int'(pay[0][47:32]);
        push_words(mkhdr(1 << F_ACK, h.src_port, 0, h.msg_id, h.pkt_offset), '{}, -1);
        ok = req_words.exists(tag) && !req_done[tag] && pay.size() == req_words[tag].size() &&
             h.src_port == 16'(req_port[tag]) && h.dst_port == 16'(req_sport[tag]);
        for (int i = 0; i < pay.size() && ok; i++) ok = (pay[i] == req_words[tag][i] + 1);
        check(ok, $sformatf("reply to request %0d", tag));
        if (ok) begin
          req_done[tag] = 1'b1;
          req_lat[tag] = int'(cyc) - req_sent[tag];
          n_resp++;
        end
      end
      rp.delete();
    end
  end

  // ------------------------------------------------------------------ cores
  int bind_port [NC][2] = '{'{90, -1}, '{80, 81}, '{92, -1}, '{93, -1}};
  int bound = 0;
  int rx_first_rd = -1, rx_last_rd = -1, rx_words = 0, tx_first_wr = -1, tx_last_wr = -1, tx_words = 0;
  int n_preempt = 0;

  for (genvar c = 0; c < NC; c++) begin : g_cm
    logic dv = 0, wv = 0, cv = 0, cw = 0;
    logic [1:0] cm = 0;
    logic [11:0] ca = CSR_LMSGSRDY;
    word_t wd = 0, cwd = 0;
    assign dec_valid[c] = dv; assign dec_rs1[c] = 5'd31; assign dec_rs2[c] = 5'd0;
    assign flush[c] = 1'b0; assign wb_commit[c] = cm; assign wb_valid[c] = wv;
    assign wb_rd[c] = 5'd30; assign wb_data[c] = wd; assign csr_valid[c] = cv;
    assign csr_write[c] = cw; assign csr_addr[c] = ca; assign csr_wdata[c] = cwd;

    int ph [4], left [4], spin [4];
    word_t hdr [4], w0 [4];
    int sport [4];
    int nslots = 0, cur = 0, target = 0, sw_timer = 0;
    bit pend = 0;

    task automatic csrw(input logic [11:0] a, input word_t d);
      cv = 1; cw = 1; ca = a; cwd = d;
      @(posedge clk); #1 cv = 0; cw = 0; ca = CSR_LMSGSRDY;
    endtask

    function automatic void count_rd();
      if (c == 0) begin
        if (rx_first_rd < 0) rx_first_rd = int'(cyc);
        rx_last_rd = int'(cyc); rx_words++;
      end
    endfunction
    function automatic void count_wr();
      if (c == 0) begin
        if (tx_first_wr < 0) tx_first_wr = int'(cyc);
        tx_last_wr = int'(cyc); tx_words++;
      end
    endfunction

    // one cycle of the running thread
    task automatic step(input int t);
      case (ph[t])
        0: if (csr_rdata[c][0]) ph[t] = 1;
           else begin cv = 1; cw = 1; ca = CSR_LIDLE; end
        1: if (csr_rdata[c][0]) begin                  // header
             dv = 1; #1; hdr[t] = rs1_net_data[c]; pend = 1;
             left[t] = int'(len_words(hdr[t][15:0])); ph[t] = 2;
           end
        2: if (csr_rdata[c][0]) begin                  // first word: holds the service time
             dv = 1; #1; w0[t] = rs1_net_data[c]; pend = 1; count_rd();
             left[t]--; spin[t] = int'(w0[t][15:0]); ph[t] = 3;
           end
        3: if (spin[t] > 0) spin[t]--; else ph[t] = 4;
        4: begin wv = 1; wd = hdr[t]; #1; if (!tx_stall[c]) ph[t] = 5; end
        5: begin wv = 1; wd = w0[t] + 1; #1;
             if (!tx_stall[c]) begin count_wr(); ph[t] = (left[t] == 0) ? 7 : 6; end
           end
        6: begin                                       // addi netTX, netRX, 1
             wv = 1; #1;
             if (!tx_stall[c] && csr_rdata[c][0]) begin
               dv = 1; #1; wd = rs1_net_data[c] + 1; pend = 1; count_rd(); count_wr();
               left[t]--; if (left[t] == 0) ph[t] = 7;
             end else wv = 0;
           end
        default: begin cv = 1; cw = 1; ca = CSR_LMSGDONE; ph[t] = 0; end
      endcase
    endtask

    initial begin
      for (int t = 0; t < 4; t++) ph[t] = 0;
      wait (!rst);
      @(posedge clk); #1;
      for (int k = 0; k < 2; k++) if (bind_port[c][k] >= 0) begin
        csrw(CSR_LCURPORT, word_t'(bind_port[c][k]));
        csrw(CSR_LCURPRIORITY, 64'd0);
        csrw(CSR_LNICCMD, 64'd1);
        sport[nslots] = bind_port[c][k]; cur = nslots; nslots++;
      end
      bound++;
      forever begin
        dv = 0; wv = 0; cv = 0; cw = 0; ca = CSR_LMSGSRDY;
        cm = pend ? 2'd1 : 2'd0; pend = 0;
        #1;
        if (sw_timer > 0) begin
          sw_timer--;
          if (sw_timer == 0) begin
            cv = 1; cw = 1; ca = CSR_LCURPORT; cwd = word_t'(sport[target]); cur = target;
          end
        end else if (irq[c] && cm == 0) begin
          ca = CSR_LNEXTTHREAD; #1;
          target = int'(csr_rdata[c]);
          ca = CSR_LMSGSRDY;
          if (target != cur) begin
            if (ph[cur] != 0) n_preempt++;
            sw_timer = CTX;
          end
        end else step(cur);
        @(posedge clk); #1;
      end
    end
  end

  // ------------------------------------------------------------------ scenario
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int next_tag = 1;
  int wb_max [2], mb_tag, wb_tag;

  // one bounded-processing experiment: `n` well-behaved requests
  task automatic bounded_run(input int k, input int n);
    int mb_n, wb_done;
    mb_n = 0; wb_done = 0; wb_max[k] = 0;
    mb_tag = next_tag++; send_req(mb_tag, 81, 1, 1600); mb_n++;
    wb_tag = next_tag++; send_req(wb_tag, 80, 1, 1600);
    while (wb_done < n) begin
      @(posedge clk); #1;
      if (req_done[mb_tag]) begin
        mb_tag = next_tag++;
        send_req(mb_tag, 81, 1, (mb_n % 3 == 1) ? 16000 : 1600);
        mb_n++;
      end
      if (req_done[wb_tag]) begin
        if (req_lat[wb_tag] > wb_max[k]) wb_max[k] = req_lat[wb_tag];
        wb_done++;
        repeat ($urandom_range(0, 800)) @(posedge clk);
        #1;
        if (wb_done < n) begin wb_tag = next_tag++; send_req(wb_tag, 80, 1, 1600); end
      end
    end
    while (!req_done[mb_tag]) @(posedge clk);
    repeat (100) @(posedge clk); #1;
    if (next_tag > 200) next_tag = 1;           // tags are 8-bit message ids on the wire
  endtask

  initial begin
    real rx_gbps, tx_gbps;
    int dgs;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    wait (bound == NC);
    repeat (20) @(posedge clk); #1;

    // 1. throughput: sixteen 1 KB requests back to back for core 0
    for (int i = 0; i < 16; i++) send_req(next_tag++, 90, 128, 0);
    wait (n_resp == 16);
    repeat (200) @(posedge clk); #1;
    rx_gbps = 64.0 * rx_words * 3.2 / real'(rx_last_rd - rx_first_rd + 1);
    tx_gbps = 64.0 * tx_words * 3.2 / real'(tx_last_wr - tx_first_wr + 1);
    $display("single core, 1 KB messages: RX %0.1f Gb/s, TX %0.1f Gb/s (paper: 195 / 200; wire limit 192.8)",
             rx_gbps, tx_gbps);
    check(rx_words == 16 * 128 && tx_words == 16 * 128, "every word read and written once");
    check(rx_gbps >= 0.9 * 192.8, "core RX keeps up with 90% of the data rate the link can deliver");
    check(tx_gbps >= 0.9 * 192.8, "core TX keeps up with 90% of the data rate the link can deliver");

    // 2. bounded processing time: bound off, then on
    bound_en = 0;
    bounded_run(0, 24);
    dgs = n_preempt;
    bound_en = 1;
    bounded_run(1, 24);
    $display("well-behaved thread worst latency: %0d cycles with the bound off, %0d with it on (paper bound %0d cycles = 2.15 us)",
             wb_max[0], wb_max[1], BOUND);
    check(wb_max[0] > BOUND, "without the bound a well-behaved request waits behind a 5 us one");
    check(wb_max[1] <= BOUND, "with the bound the well-behaved thread stays within 2.15 us");
    check(n_preempt > dgs, "the misbehaving thread was preempted with the bound on");

    // 3. 80-to-1 incast of 1 KB messages; trimmed headers arrive ahead of the full packets
    begin
      int r0, t0, nack0;
      r0 = n_resp; nack0 = n_nack; next_tag = 150; t0 = int'(cyc);
      for (int i = 74; i < 80; i++) send_req(next_tag + i, 90, 128, 0, 6000 + i, 1'b1);
      for (int i = 0; i < 74; i++) send_req(next_tag + i, 90, 128, 0, 6000 + i);
      while (n_resp - r0 < 80 && int'(cyc) - t0 < 200000) @(posedge clk);
      $display("incast 80-to-1, 1 KB messages: %0d of 80 answered in %0d cycles, %0d NACKs",
               n_resp - r0, int'(cyc) - t0, n_nack - nack0);
      check(n_resp - r0 == 80, "every incast request answered");
      check(n_nack - nack0 == 6, "one NACK per trimmed packet");
      for (int i = 0; i < 80; i++) check(req_done[next_tag + i], $sformatf("incast client %0d answered", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
