// nanopu_top: the nanoPU network path, from the Ethernet MAC interface to the register files
// of NUM_CORES cores.
//
// Receive: ingress_pipeline parses each packet; DATA/TRIM packets go to reassembly, which
// rebuilds messages in fixed-size buffers, asks egress for ACK/NACK and (through pull_pacer)
// PULL packets, and writes complete messages into the global RX queue of their port. The JBSQ
// core selector forwards each message to one of the cores bound to the port, into the local RX
// queue of the bound thread, where the program reads it through GPR netRX.
// Transmit: a thread writes a message through GPR netTX into its local TX queue; complete
// messages go through the global TX queues to packetization, which buffers them, cuts them into
// packets, and retransmits on NACK/PULL or timeout; egress puts control packets ahead of data.
//
// The CPU pipelines themselves (RISC-V cores), caches, memory and the Ethernet MAC/SerDes are
// outside this RTL: each core's decode, write-back and CSR signals are ports of this module, and
// the MAC side is a 64-bit word stream (rx_* in, tx_* out), one word per cycle, i.e. 204.8 Gb/s
// at the 3.2 GHz target clock. now is a free-running cycle counter used for message timestamps
// and timers.
module nanopu_top
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_CORES       = 4,
  parameter int unsigned NUM_THREADS     = 4,
  parameter int unsigned NUM_PORTS       = 16,
  parameter int unsigned JBSQ_N          = 2,
  parameter int unsigned MAX_PROC_CYCLES = 3200,
  parameter int unsigned IDLE_TIMEOUT    = 3200,
  parameter int unsigned INIT_WIN        = 64,
  parameter int unsigned RTX_TIMEOUT     = 28800,
  parameter int unsigned PULL_GAP        = 136,
  localparam int unsigned TW = $clog2(NUM_THREADS)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] my_mac,
  input  logic [47:0] peer_mac,
  input  logic [31:0] my_ip,
  input  logic        bound_en,
  // MAC side
  input  logic        rx_valid,
  input  word_t       rx_data,
  input  logic        rx_last,
  output logic        rx_ready,
  output logic        tx_valid,
  output word_t       tx_data,
  output logic        tx_last,
  input  logic        tx_ready,
  // CPU side, one entry per core
  input  logic  [NUM_CORES-1:0]        dec_valid,
  input  logic  [NUM_CORES-1:0][4:0]   dec_rs1,
  input  logic  [NUM_CORES-1:0][4:0]   dec_rs2,
  output word_t [NUM_CORES-1:0]        rs1_net_data,
  output word_t [NUM_CORES-1:0]        rs2_net_data,
  input  logic  [NUM_CORES-1:0][1:0]   wb_commit,
  input  logic  [NUM_CORES-1:0]        flush,
  input  logic  [NUM_CORES-1:0]        wb_valid,
  input  logic  [NUM_CORES-1:0][4:0]   wb_rd,
  input  word_t [NUM_CORES-1:0]        wb_data,
  output logic  [NUM_CORES-1:0]        tx_stall,
  input  logic  [NUM_CORES-1:0]        csr_valid,
  input  logic  [NUM_CORES-1:0]        csr_write,
  input  logic  [NUM_CORES-1:0][11:0]  csr_addr,
  input  word_t [NUM_CORES-1:0]        csr_wdata,
  output word_t [NUM_CORES-1:0]        csr_rdata,
  output logic  [NUM_CORES-1:0]        irq
);
  localparam int unsigned QW = $clog2(NUM_PORTS);
  localparam int unsigned CW = $clog2(NUM_CORES);

  logic [31:0] now;
  always_ff @(posedge clk) now <= rst ? '0 : now + 1;

  // ---------------- receive side ----------------
  logic       ig_valid, ig_sop, ig_eop, ig_ready, ev_valid, ig_drop;
  pkt_hdr_t   ig_hdr;
  word_t      ig_data;
  tx_event_t  ev;
  ingress_pipeline u_ingress (
    .clk, .rst, .my_ip, .rx_valid, .rx_data, .rx_last, .rx_ready,
    .out_valid(ig_valid), .out_hdr(ig_hdr), .out_data(ig_data), .out_sop(ig_sop),
    .out_eop(ig_eop), .out_ready(ig_ready), .ev_valid, .ev, .drop_evt(ig_drop)
  );

  logic       c_valid, c_ready, pr_valid, pr_ready, pp_valid, pp_ready;
  ctrl_req_t  c_req, pr_req, pp_req;
  logic [15:0] lk_port;
  logic        lk_hit;
  logic [QW-1:0] lk_q, m_q;
  logic       m_valid, m_last, m_ready, ra_drop, ra_complete, ra_ooo;
  word_t      m_data;
  reassembly #(.NUM_PORTS(NUM_PORTS)) u_reasm (
    .clk, .rst, .in_valid(ig_valid), .in_hdr(ig_hdr), .in_data(ig_data), .in_sop(ig_sop),
    .in_eop(ig_eop), .in_ready(ig_ready),
    .ctrl_valid(c_valid), .ctrl_req(c_req), .ctrl_ready(c_ready),
    .pull_valid(pr_valid), .pull_req(pr_req), .pull_ready(pr_ready),
    .lk_port, .lk_hit, .lk_q,
    .msg_valid(m_valid), .msg_q(m_q), .msg_data(m_data), .msg_last(m_last), .msg_ready(m_ready),
    .drop_evt(ra_drop), .complete_evt(ra_complete), .ooo_evt(ra_ooo)
  );

  pull_pacer #(.GAP(PULL_GAP)) u_pacer (
    .clk, .rst, .req_valid(pr_valid), .req(pr_req), .req_ready(pr_ready),
    .out_valid(pp_valid), .out_req(pp_req), .out_ready(pp_ready)
  );

  logic [NUM_PORTS-1:0] msg_avail;
  word_t        q_data;
  logic         q_last, q_valid, q_pop;
  logic [QW-1:0] q_sel;
  global_rx_queues #(.NUM_PORTS(NUM_PORTS)) u_grxq (
    .clk, .rst, .wr_valid(m_valid), .wr_q(m_q), .wr_data(m_data), .wr_last(m_last),
    .wr_ready(m_ready), .rd_q(q_sel), .rd_pop(q_pop), .rd_data(q_data), .rd_last(q_last),
    .rd_valid(q_valid), .msg_avail
  );

  logic [NUM_CORES-1:0]       b_valid, b_unbind, d_done, to_valid, to_ready;
  logic [NUM_CORES-1:0][15:0] b_port, d_port;
  logic         sel_bind_valid, sel_bind_unbind;
  logic [CW-1:0] sel_bind_core;
  logic [15:0]  sel_bind_port;
  word_t        to_data;
  logic         to_first, js_dispatch, js_wait;
  logic [15:0]  to_port;

  // Bind commands from the cores. Each core's command is held in a pending register until the
  // selector takes it; one is granted per cycle, round-robin, so a command waits at most
  // NUM_CORES-1 cycles. A core needs three CSR writes per bind, so with up to four cores a
  // pending command is always granted before the same core can issue the next one.
  logic [NUM_CORES-1:0]       pb_valid, pb_unbind, pb_grant;
  logic [NUM_CORES-1:0][15:0] pb_port;
  logic [CW-1:0]              pb_rr;
  always_comb begin
    sel_bind_valid = 1'b0; sel_bind_unbind = 1'b0; sel_bind_core = '0; sel_bind_port = '0;
    pb_grant = '0;
    for (int i = 0; i < NUM_CORES; i++) begin
      logic [CW-1:0] c;
      c = CW'((32'(pb_rr) + 32'(i)) % NUM_CORES);
      if (pb_valid[c] && !sel_bind_valid) begin
        sel_bind_valid = 1'b1; sel_bind_unbind = pb_unbind[c];
        sel_bind_core = c; sel_bind_port = pb_port[c]; pb_grant[c] = 1'b1;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      pb_valid <= '0; pb_unbind <= '0; pb_port <= '0; pb_rr <= '0;
    end else begin
      if (sel_bind_valid) pb_rr <= CW'((32'(sel_bind_core) + 1) % NUM_CORES);
      for (int c = 0; c < NUM_CORES; c++) begin
        if (b_valid[c]) begin
          pb_valid[c] <= 1'b1; pb_unbind[c] <= b_unbind[c]; pb_port[c] <= b_port[c];
        end else if (pb_grant[c]) pb_valid[c] <= 1'b0;
      end
    end
  end
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_bind_chk
    assert property (@(posedge clk) disable iff (rst) b_valid[c] |-> (!pb_valid[c] || pb_grant[c]));
  end

  jbsq_core_selector #(.NUM_CORES(NUM_CORES), .NUM_PORTS(NUM_PORTS), .JBSQ_N(JBSQ_N)) u_jbsq (
    .clk, .rst, .bind_valid(sel_bind_valid), .bind_unbind(sel_bind_unbind),
    .bind_core(sel_bind_core), .bind_port(sel_bind_port),
    .lk_port, .lk_hit, .lk_q, .done_valid(d_done), .done_port(d_port),
    .msg_avail, .q_data, .q_last, .q_valid, .q_sel, .q_pop,
    .out_valid(to_valid), .out_data(to_data), .out_first(to_first), .out_port(to_port),
    .out_ready(to_ready), .dispatch_evt(js_dispatch), .wait_evt(js_wait)
  );

  // ---------------- cores ----------------
  logic  [NUM_CORES-1:0]       ct_valid, ct_last, ct_ready;
  word_t [NUM_CORES-1:0]       ct_data;
  logic  [NUM_CORES-1:0][15:0] ct_port;
  logic  [NUM_CORES-1:0]       dg_evt, rot_evt;
  logic  [NUM_CORES-1:0][TW-1:0] cur_thread;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    core_net_if #(.NUM_THREADS(NUM_THREADS), .MAX_PROC_CYCLES(MAX_PROC_CYCLES),
                  .IDLE_TIMEOUT(IDLE_TIMEOUT)) u_cif (
      .clk, .rst, .now, .bound_en,
      .dec_valid(dec_valid[c]), .dec_rs1(dec_rs1[c]), .dec_rs2(dec_rs2[c]),
      .rs1_net_data(rs1_net_data[c]), .rs2_net_data(rs2_net_data[c]),
      .wb_commit(wb_commit[c]), .flush(flush[c]),
      .wb_valid(wb_valid[c]), .wb_rd(wb_rd[c]), .wb_data(wb_data[c]), .tx_stall(tx_stall[c]),
      .csr_valid(csr_valid[c]), .csr_write(csr_write[c]), .csr_addr(csr_addr[c]),
      .csr_wdata(csr_wdata[c]), .csr_rdata(csr_rdata[c]), .irq(irq[c]),
      .rx_valid(to_valid[c]), .rx_data(to_data), .rx_first(to_first), .rx_port(to_port),
      .rx_ready(to_ready[c]),
      .tx_valid(ct_valid[c]), .tx_data(ct_data[c]), .tx_last(ct_last[c]), .tx_port(ct_port[c]),
      .tx_ready(ct_ready[c]),
      .bind_valid(b_valid[c]), .bind_unbind(b_unbind[c]), .bind_port(b_port[c]),
      .done_valid(d_done[c]), .done_port(d_port[c]),
      .downgrade_evt(dg_evt[c]), .rotate_evt(rot_evt[c]), .cur_thread_o(cur_thread[c])
    );
  end

  // ---------------- transmit side ----------------
  logic       gt_valid, gt_last, gt_ready;
  word_t      gt_data;
  logic [15:0] gt_port;
  global_tx_queues #(.NUM_CORES(NUM_CORES)) u_gtxq (
    .clk, .rst, .in_valid(ct_valid), .in_data(ct_data), .in_last(ct_last), .in_port(ct_port),
    .in_ready(ct_ready), .out_valid(gt_valid), .out_data(gt_data), .out_last(gt_last),
    .out_port(gt_port), .out_ready(gt_ready)
  );

  logic       d_valid, d_ready, p_valid, p_last, p_ready, pk_rtx, pk_stall;
  pkt_hdr_t   d_hdr;
  word_t      p_data;
  packetization #(.INIT_WIN(INIT_WIN), .RTX_TIMEOUT(RTX_TIMEOUT)) u_pkt (
    .clk, .rst, .now, .in_valid(gt_valid), .in_data(gt_data), .in_last(gt_last),
    .in_port(gt_port), .in_ready(gt_ready), .ev_valid, .ev,
    .d_valid, .d_hdr, .d_ready, .p_valid, .p_data, .p_last, .p_ready,
    .rtx_evt(pk_rtx), .stall_evt(pk_stall)
  );

  logic eg_ctrl, eg_data;
  egress_pipeline u_egress (
    .clk, .rst, .my_mac, .peer_mac, .my_ip,
    .ctrl_valid(c_valid), .ctrl_req(c_req), .ctrl_ready(c_ready),
    .pull_valid(pp_valid), .pull_req(pp_req), .pull_ready(pp_ready),
    .d_valid, .d_hdr, .d_ready, .p_valid, .p_data, .p_last, .p_ready,
    .tx_valid, .tx_data, .tx_last, .tx_ready, .ctrl_pkt_evt(eg_ctrl), .data_pkt_evt(eg_data)
  );
endmodule
