// tb_nanopu_top: end-to-end test of the whole NIC with four cores, at the design's default
// (full-size) parameters.
//
// The testbench plays two parties.
//  * A remote host on the MAC side. It sends request messages as NDP packets, collects the
//    replies, checks them, and acknowledges every reply packet. When the NIC returns a NACK for
//    a trimmed request packet it resends that packet on the next PULL from the NIC, as an NDP
//    sender does.
//  * Four cores. Each runs a small kernel and a loopback-increment application per thread,
//    driving only the core-side ports. The application reads the request through netRX (with
//    the commit/flush protocol of a pipelined core, including some deliberately flushed
//    reads), spins for a service time taken from the first request word, and writes a reply of
//    the same length with every data word incremented through netTX. It then writes lmsgdone.
//    With no message it writes lidle. The kernel reacts to irq: it reads lnextthread, waits the
//    paper's 160-cycle context-switch cost, and writes lcurport. Thread state lives in the
//    testbench, so a preempted message resumes where it stopped.
//
// Threads: core 0 binds port 80 at priority 1 and port 81 at priority 0. Core 1 binds port 80
// and port 82 at priority 0. Cores 2 and 3 bind port 80 at priority 0.
//
// Phases:
//  1. A single 8-byte request to measure NIC latency.
//  2. A burst to port 80 that needs JBSQ waits. A priority-0 request to port 81 arrives during
//     it and preempts core 0.
//  3. A request to port 82 that runs too long. It is downgraded and port-80 work preempts it.
//  4. A two-packet request sent out of order, giving a two-packet reply.
//  5. A trimmed request: NACK, PULL, resend.
//  6. An unacknowledged reply, which the NIC must retransmit.
//  7. Nine half-sent 2 KB requests exhaust the 2 KB buffers; the ninth is dropped and later sent
//     again.
// Idle-rotation events happen during the quiet periods.
//
// At the end every request must have a correct reply, and every mechanism counter must be
// non-zero. Latency and PULL spacing are checked against the paper's figures.
module tb_nanopu_top;
  import nanopu_pkg::*;
  localparam int NC = 4, CTX = 160;
  localparam logic [31:0] MY_IP = 32'h0a000001, REM_IP = 32'h0a000002;
  localparam logic [15:0] REM_PORT = 16'd5000;
  localparam int GAP = 136;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic rx_valid = 0, rx_last = 0, rx_ready, tx_valid, tx_last;
  word_t rx_data = 0, tx_data;
  logic [NC-1:0] dec_valid, flush, wb_valid, tx_stall, csr_valid, csr_write, irq;
  logic [NC-1:0][4:0] dec_rs1, dec_rs2, wb_rd;
  logic [NC-1:0][1:0] wb_commit;
  logic [NC-1:0][11:0] csr_addr;
  word_t [NC-1:0] rs1_net_data, rs2_net_data, wb_data, csr_wdata, csr_rdata;

  nanopu_top dut (
    .clk, .rst, .my_mac(48'h02_00_00_00_00_01), .peer_mac(48'h02_00_00_00_00_02),
    .my_ip(MY_IP), .bound_en(1'b1),
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

  // mechanism counters
  int n_resp = 0, n_multi = 0, n_wait = 0, n_preempt = 0, n_dg = 0, n_rot = 0, n_ooo = 0;
  int n_nack = 0, n_pull = 0, n_resend = 0, n_rtx = 0, n_drop = 0, n_flush = 0, n_dup = 0;
  int n_ack_in = 0, n_switch = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.js_wait)  n_wait++;
    if (dut.ra_ooo)   n_ooo++;
    if (dut.pk_rtx)   n_rtx++;
    if (dut.ra_drop)  n_drop++;
    if (|dut.dg_evt)  n_dg++;
    if (|dut.rot_evt) n_rot++;
    if (lat_t0 >= 0 && lat_core < 0 && |(dut.to_valid & dut.to_ready)) lat_core = int'(cyc) - lat_t0;
  end

  // ------------------------------------------------------------------ remote host: sending
  word_t sw [$];
  bit    sl [$];
  word_t req_words [int][$];     // request data words by tag (tag = remote msg_id)
  int    req_port  [int];
  bit    req_done  [int];
  int    trim_pending [$];       // packets (tag*256+offset) to resend on the next PULL

  function automatic pkt_hdr_t mkhdr(input int flags, input int dport, input int len,
                                     input int id, input int off);
    pkt_hdr_t h = '0;
    h.eth_dst = 48'h02_00_00_00_00_01; h.eth_src = 48'h02_00_00_00_00_02;
    h.eth_type = 16'h0800; h.ip_ver = 4; h.ip_ihl = 5; h.ip_ttl = 8'd64;
    h.ip_proto = 8'd199; h.ip_src = REM_IP; h.ip_dst = MY_IP;
    h.flags = 8'(flags); h.src_port = REM_PORT; h.dst_port = 16'(dport);
    h.msg_len = 16'(len); h.msg_id = 8'(id); h.pkt_offset = 8'(off);
    return h;
  endfunction

  function automatic void push_words(input pkt_hdr_t h, input word_t pay [$]);
    logic [511:0] b;
    b = h;
    for (int i = 0; i < 8; i++) begin sw.push_back(b[511-64*i -: 64]); sl.push_back(pay.size() == 0 && i == 7); end
    for (int i = 0; i < pay.size(); i++) begin sw.push_back(pay[i]); sl.push_back(i == pay.size()-1); end
  endfunction

  // queue packet `off` of request `tag`; trim = send only the header with the CHOP flag
  function automatic void send_pkt(input int tag, input int off, input bit trim);
    word_t pay [$];
    int nw, len;
    nw  = req_words[tag].size();
    len = nw * 8;
    if (!trim)
      for (int i = off*MAX_PKT_WORDS; i < nw && i < (off+1)*MAX_PKT_WORDS; i++) pay.push_back(req_words[tag][i]);
    push_words(mkhdr(trim ? (1 << F_CHOP) : (1 << F_DATA), req_port[tag], len, tag, off), pay);
  endfunction

  // create request `tag` for `port` with `nw` data words and a service time of `spin` cycles
  function automatic void mkreq(input int tag, input int port, input int nw, input int spin);
    req_words[tag].delete();
    req_words[tag].push_back({16'h0, 16'(tag), 16'h0, 16'(spin)});
    for (int i = 1; i < nw; i++) req_words[tag].push_back({$urandom, $urandom});
    req_port[tag] = port;
    req_done[tag] = 1'b0;
  endfunction

  task automatic send_req(input int tag, input int port, input int nw, input int spin);
    mkreq(tag, port, nw, spin);
    for (int k = 0; k < (nw + MAX_PKT_WORDS - 1) / MAX_PKT_WORDS; k++) send_pkt(tag, k, 1'b0);
  endtask

  initial forever begin
    bit take;
    @(negedge clk); take = rx_valid && rx_ready;
    @(posedge clk); #1;
    if (take) begin
      if (sl[0] && lat_t0 == -2) lat_t0 = int'(cyc) - 1;   // cycle in which the last word entered
      void'(sw.pop_front()); void'(sl.pop_front());
    end
    if (sw.size() > 0) begin rx_valid = 1; rx_data = sw[0]; rx_last = sl[0]; end
    else begin rx_valid = 0; rx_last = 0; end
  end

  // ------------------------------------------------------------------ remote host: receiving
  word_t rp [$];
  word_t rbuf [int][int];        // reply words by NIC msg_id, then word index
  int    rcnt [int];
  int    rpk  [int];
  int    noack_tag = -1;         // the first reply packet of this tag is not acknowledged
  bit    noack_used = 0;
  int    last_pull = -1, min_pull_gap = 1 << 30;
  int    lat_t0 = -1, lat_first = -1, lat_core = -1;

  function automatic void got_reply(input pkt_hdr_t h, input word_t pay [$]);
    int id, nw, tag;
    bit ok;
    id = int'(h.msg_id);
    nw = int'(len_words(h.msg_len));
    if (!rcnt.exists(id)) begin rcnt[id] = 0; rpk[id] = 0; end
    for (int i = 0; i < pay.size(); i++)
      if (!rbuf[id].exists(int'(h.pkt_offset)*MAX_PKT_WORDS + i)) begin
        rbuf[id][int'(h.pkt_offset)*MAX_PKT_WORDS + i] = pay[i];
        rcnt[id]++;
      end
    rpk[id]++;
    if (rcnt[id] == nw) begin
      tag = int'(rbuf[id][0][47:32]);
      if (!req_words.exists(tag)) check(0, "reply for an unknown request");
      else if (req_done[tag]) n_dup++;
      else begin
        ok = (nw == req_words[tag].size()) && (h.src_port == 16'(req_port[tag])) &&
             (h.dst_port == REM_PORT) && (h.ip_dst == REM_IP);
        for (int i = 0; i < nw && ok; i++) ok = (rbuf[id][i] == req_words[tag][i] + 1);
        check(ok, $sformatf("reply for request %0d carries the incremented words", tag));
        req_done[tag] = 1'b1;
        n_resp++;
        if (rpk[id] > 1) n_multi++;
      end
      rbuf.delete(id); rcnt.delete(id); rpk.delete(id);
    end
  endfunction

  always @(negedge clk) if (!rst && tx_valid) begin
    if (lat_t0 >= 0 && lat_first < 0 && rp.size() == 0) lat_first = int'(cyc);
    rp.push_back(tx_data);
    if (tx_last) begin
      pkt_hdr_t h;
      word_t pay [$];
      logic [511:0] b;
      for (int i = 0; i < 8; i++) b[511-64*i -: 64] = rp[i];
      h = b;
      pay.delete();
      for (int i = 8; i < rp.size(); i++) pay.push_back(rp[i]);
      check(h.eth_type == 16'h0800 && h.ip_proto == 8'd199 && h.ip_src == MY_IP &&
            h.ip_len == 16'(50 + 8*pay.size()),
            $sformatf("egress packet headers (type %h proto %0d src %h len %0d, %0d words)",
                      h.eth_type, h.ip_proto, h.ip_src, h.ip_len, pay.size()));
      if (h.flags[F_DATA]) begin
        int tag;
        tag = (h.pkt_offset == 0 && pay.size() > 0) ? int'(pay[0][47:32]) : -2;
        if (tag == noack_tag && !noack_used) noack_used = 1;
        else push_words(mkhdr(1 << F_ACK, h.src_port, 0, h.msg_id, h.pkt_offset), '{});
        got_reply(h, pay);
      end
      if (h.flags[F_ACK])  n_ack_in++;
      if (h.flags[F_NACK]) begin
        n_nack++;
        trim_pending.push_back(int'(h.msg_id) * 256 + int'(h.pkt_offset));
      end
      if (h.flags[F_PULL]) begin
        n_pull++;
        if (last_pull >= 0 && int'(cyc) - last_pull < min_pull_gap) min_pull_gap = int'(cyc) - last_pull;
        last_pull = int'(cyc);
        if (trim_pending.size() > 0) begin
          int p;
          p = trim_pending.pop_front();
          send_pkt(p / 256, p % 256, 1'b0);
          n_resend++;
        end
      end
      rp.delete();
    end
  end

  // ------------------------------------------------------------------ cores
  int bind_port [NC][2] = '{'{80, 81}, '{80, 82}, '{80, -1}, '{80, -1}};
  int bind_prio [NC][2] = '{'{1, 0}, '{0, 0}, '{0, 0}, '{0, 0}};
  int bound = 0;
  int first_deliver = -1;

  for (genvar c = 0; c < NC; c++) begin : g_cm
    logic dv = 0, fl = 0, wv = 0, cv = 0, cw = 0;
    logic [4:0] wrd = 0;
    logic [1:0] cm = 0;
    logic [11:0] ca = CSR_LMSGSRDY;
    word_t wd = 0, cwd = 0;
    assign dec_valid[c] = dv; assign dec_rs1[c] = 5'd31; assign dec_rs2[c] = 5'd0;
    assign flush[c] = fl; assign wb_commit[c] = cm; assign wb_valid[c] = wv;
    assign wb_rd[c] = wrd; assign wb_data[c] = wd; assign csr_valid[c] = cv;
    assign csr_write[c] = cw; assign csr_addr[c] = ca; assign csr_wdata[c] = cwd;

    int ph [4], nrd [4], nwr [4], spin [4], total [4];
    word_t hdr [4];
    word_t dat [4][$];
    int sport [4];
    int nslots = 0, cur = 0, target = 0, sw_timer = 0;
    bit pend = 0, flush_next = 0;

    task automatic csrw(input logic [11:0] a, input word_t d);
      cv = 1; cw = 1; ca = a; cwd = d;
      @(posedge clk); #1 cv = 0; cw = 0; ca = CSR_LMSGSRDY;
    endtask

    // one cycle of the running thread; signals were defaulted, outputs are settled
    task automatic step(input int t);
      case (ph[t])
        0: if (csr_rdata[c][0]) ph[t] = 1;
           else begin cv = 1; cw = 1; ca = CSR_LIDLE; end
        1: if (csr_rdata[c][0]) begin
             dv = 1; #1;
             hdr[t] = rs1_net_data[c]; pend = 1;
             if (first_deliver < 0) first_deliver = int'(cyc);
             total[t] = int'(len_words(hdr[t][15:0])); nrd[t] = 0; dat[t].delete();
             ph[t] = (total[t] == 0) ? 3 : 2; spin[t] = 0;
           end
        2: if (csr_rdata[c][0]) begin
             dv = 1; #1;
             if (nrd[t] > 0 && $urandom_range(0, 15) == 0) begin
               flush_next = 1; n_flush++;            // wrong-path read: will be undone
             end else begin
               dat[t].push_back(rs1_net_data[c]); pend = 1; nrd[t]++;
               if (nrd[t] == total[t]) begin ph[t] = 3; spin[t] = int'(dat[t][0][15:0]); end
             end
           end
        3: if (spin[t] > 0) spin[t]--; else begin ph[t] = 4; nwr[t] = 0; end
        4: begin
             wv = 1; wrd = 5'd30; wd = hdr[t]; #1;
             if (!tx_stall[c]) ph[t] = (total[t] == 0) ? 6 : 5;
           end
        5: begin
             wv = 1; wrd = 5'd30; wd = dat[t][nwr[t]] + 1; #1;
             if (!tx_stall[c]) begin nwr[t]++; if (nwr[t] == total[t]) ph[t] = 6; end
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
        csrw(CSR_LCURPRIORITY, word_t'(bind_prio[c][k]));
        csrw(CSR_LNICCMD, 64'd1);
        sport[nslots] = bind_port[c][k]; cur = nslots; nslots++;
      end
      bound++;
      forever begin
        dv = 0; fl = 0; wv = 0; cv = 0; cw = 0; ca = CSR_LMSGSRDY;
        cm = pend ? 2'd1 : 2'd0; pend = 0;
        if (flush_next) begin fl = 1; flush_next = 0; end
        #1;
        if (sw_timer > 0) begin
          sw_timer--;
          if (sw_timer == 0) begin
            cv = 1; cw = 1; ca = CSR_LCURPORT; cwd = word_t'(sport[target]); cur = target;
          end
        end else if (irq[c] && !fl && cm == 0) begin
          ca = CSR_LNEXTTHREAD; #1;
          target = int'(csr_rdata[c]);
          ca = CSR_LMSGSRDY;
          if (target != cur) begin
            n_switch++;
            if (ph[cur] != 0) n_preempt++;
            sw_timer = CTX;
          end
        end else if (!fl) step(cur);   // a flush cycle carries no new read
        @(posedge clk); #1;
      end
    end
  end

  // ------------------------------------------------------------------ scenario
  task automatic wait_done(input int lo, input int hi, input int maxc);
    int t0;
    bit all;
    t0 = int'(cyc);
    do begin
      @(posedge clk);
      all = 1;
      for (int i = lo; i <= hi; i++) if (req_done.exists(i) && !req_done[i]) all = 0;
    end while (!all && int'(cyc) - t0 < maxc);
    check(all, $sformatf("requests %0d..%0d answered", lo, hi));
    if (!all) for (int i = lo; i <= hi; i++) if (req_done.exists(i) && !req_done[i])
      $display("  request %0d (port %0d) has no reply", i, req_port[i]);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    #1 rst = 0;
    wait (bound == NC);
    repeat (20) @(posedge clk); #1;

    // 1. latency of one 8-byte request (one header word plus one data word, no service time)
    lat_t0 = -2;                    // armed: set when the request's last word is accepted
    send_req(1, 80, 1, 0);
    wait_done(1, 1, 5000);
    $display("after the request's last word: header word into a core queue %0d cycles, first netRX read %0d, first egress word (the ACK) %0d",
             lat_core, first_deliver - lat_t0, lat_first - lat_t0);
    // NIC share of the paper's receive time: ingress 5.3 ns + assembly/delivery 2.2 ns = 24
    // cycles at 3.2 GHz. The core's first read can also include a 160-cycle thread switch.
    check(lat_core >= 0 && lat_core <= 24, "receive path latency within the paper's 7.5 ns");
    check(first_deliver - lat_t0 <= 24 + CTX + 8, "first netRX read");

    // 2. burst on port 80 with JBSQ waits, and a priority-0 request to core 0's second thread
    for (int i = 0; i < 12; i++) send_req(10 + i, 80, 2, 600);
    repeat (1200) @(posedge clk);
    send_req(30, 81, 2, 0);
    wait_done(10, 30, 40000);

    // 3. runaway request on port 82 (core 1), then port-80 work that must preempt it
    send_req(40, 82, 1, 6000);
    repeat (300) @(posedge clk);
    for (int i = 0; i < 8; i++) send_req(41 + i, 80, 1, 200);
    wait_done(40, 48, 40000);

    // 4. two-packet request delivered out of order
    mkreq(50, 80, 129, 0);
    send_pkt(50, 1, 1'b0);
    send_pkt(50, 0, 1'b0);
    wait_done(50, 50, 20000);

    // 5. trimmed request: NACK, PULL, resend
    mkreq(51, 80, 8, 0);
    send_pkt(51, 0, 1'b1);
    wait_done(51, 51, 20000);

    // 6. the reply is not acknowledged the first time, so the NIC retransmits it
    noack_tag = 52;
    send_req(52, 80, 4, 0);
    wait_done(52, 52, 20000);
    repeat (32000) @(posedge clk);

    // 7. nine 2 KB requests, second packet first; only eight 2 KB buffers exist
    for (int i = 0; i < 9; i++) begin mkreq(60 + i, 80, 256, 0); send_pkt(60 + i, 1, 1'b0); end
    repeat (3000) @(posedge clk);
    for (int i = 0; i < 8; i++) send_pkt(60 + i, 0, 1'b0);
    wait_done(60, 67, 60000);
    send_pkt(68, 0, 1'b0); send_pkt(68, 1, 1'b0);    // the dropped one, sent again whole
    wait_done(68, 68, 20000);
    repeat (4000) @(posedge clk);

    $display("replies=%0d multi-packet=%0d jbsq-waits=%0d switches=%0d preemptions=%0d downgrades=%0d rotations=%0d",
             n_resp, n_multi, n_wait, n_switch, n_preempt, n_dg, n_rot);
    $display("out-of-order=%0d nacks=%0d pulls=%0d resends=%0d retransmits=%0d duplicates=%0d drops=%0d flushes=%0d acks=%0d min-pull-gap=%0d",
             n_ooo, n_nack, n_pull, n_resend, n_rtx, n_dup, n_drop, n_flush, n_ack_in, min_pull_gap);
    check(n_resp == 1 + 12 + 1 + 9 + 1 + 1 + 1 + 9, "every request answered once");
    check(n_multi >= 9, "multi-packet replies");
    check(n_wait > 0, "JBSQ held a message back");
    check(n_preempt > 0, "a running thread was preempted");
    check(n_dg > 0, "a priority-0 thread was downgraded");
    check(n_rot > 0, "idle rotation happened");
    check(n_ooo > 0, "out-of-order packet reassembled");
    check(n_nack > 0 && n_resend > 0, "trimmed packet NACKed and resent on PULL");
    check(n_pull > 0 && n_ack_in > 0, "ACKs and PULLs sent");
    check(n_rtx > 0 && n_dup > 0, "unacknowledged reply retransmitted");
    check(n_drop > 0, "packet dropped with no free buffer");
    check(n_flush > 0, "flushed netRX reads undone");
    check(min_pull_gap >= GAP, "PULLs paced at least one MTU time apart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
