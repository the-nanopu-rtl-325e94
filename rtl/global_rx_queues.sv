// global_rx_queues: the NIC's global RX queues, one message FIFO per bound layer-4 port.
//
// Reassembly writes complete messages (RX app header word first, then data words) into the
// queue of the message's destination port, one word per cycle. All cores running a thread bound
// to that port are served from the same queue: the core selector chooses the queue and the
// destination core and pops one whole message at a time (rd_*). The queues share one memory of
// NUM_PORTS x DEPTH words, each queue owning a fixed slice; a 65th bit marks the last word of a
// message. msg_avail shows which queues hold at least one complete message.
//
// Timing: one write and one read per cycle; a message becomes visible in msg_avail the cycle
// after its last word is written. Backpressure is per word (wr_ready). Queue count and depth
// are this design's choice; the two-level RX queue structure is the paper's.
module global_rx_queues
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 16,
  parameter int unsigned DEPTH     = 512,
  localparam int unsigned QW = $clog2(NUM_PORTS),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 wr_valid,
  input  logic [QW-1:0]        wr_q,
  input  word_t                wr_data,
  input  logic                 wr_last,
  output logic                 wr_ready,
  input  logic [QW-1:0]        rd_q,
  input  logic                 rd_pop,
  output word_t                rd_data,
  output logic                 rd_last,
  output logic                 rd_valid,
  output logic [NUM_PORTS-1:0] msg_avail
);
  logic [WORD_W:0] mem [NUM_PORTS * DEPTH];
  logic [AW:0] wp [NUM_PORTS];
  logic [AW:0] rp [NUM_PORTS];
  logic [15:0] nmsg [NUM_PORTS];

  assign wr_ready = (wp[wr_q] - rp[wr_q]) < (AW+1)'(DEPTH);
  assign {rd_last, rd_data} = mem[{rd_q, rp[rd_q][AW-1:0]}];
  assign rd_valid = (wp[rd_q] != rp[rd_q]);
  always_comb for (int q = 0; q < NUM_PORTS; q++) msg_avail[q] = (nmsg[q] != 0);

  always_ff @(posedge clk)
    if (wr_valid && wr_ready) mem[{wr_q, wp[wr_q][AW-1:0]}] <= {wr_last, wr_data};

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int q = 0; q < NUM_PORTS; q++) begin wp[q] <= '0; rp[q] <= '0; nmsg[q] <= '0; end
    end else begin
      if (wr_valid && wr_ready) wp[wr_q] <= wp[wr_q] + 1'b1;
      if (rd_pop && rd_valid)   rp[rd_q] <= rp[rd_q] + 1'b1;
      for (int q = 0; q < NUM_PORTS; q++) begin
        logic inc, dec;
        inc = wr_valid && wr_ready && wr_last && wr_q == QW'(q);
        dec = rd_pop && rd_valid && rd_last && rd_q == QW'(q);
        nmsg[q] <= nmsg[q] + 16'(inc) - 16'(dec);
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) rd_pop |-> rd_valid);
endmodule
