// global_tx_queues: the NIC's global TX queues between the cores and the packetization logic.
//
// Each core's local TX queues hand over complete messages (TX app header first) with the
// sending thread's port. Here every core has one FIFO; the block forwards one complete message
// at a time to packetization, choosing among cores round-robin at message boundaries, so one
// core cannot hold the transmit path in the middle of another core's message. The source port
// rides along with every word (out_port). A message is only eligible once its last word is in
// the FIFO, so packetization always sees a message without gaps.
//
// Timing: one word per cycle per input and on the output; out_* is combinational from the FIFO
// head. Organising the global TX queues per core (rather than per port) and their depth are this
// design's choices; the paper only shows a set of global TX queues feeding packetization.
module global_tx_queues
  import nanopu_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
  parameter int unsigned DEPTH     = 512,
  localparam int unsigned CW = $clog2(NUM_CORES),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [NUM_CORES-1:0]        in_valid,
  input  word_t [NUM_CORES-1:0]       in_data,
  input  logic [NUM_CORES-1:0]        in_last,
  input  logic [NUM_CORES-1:0][15:0]  in_port,
  output logic [NUM_CORES-1:0]        in_ready,
  output logic                        out_valid,
  output word_t                       out_data,
  output logic                        out_last,
  output logic [15:0]                 out_port,
  input  logic                        out_ready
);
  logic [NUM_CORES-1:0][WORD_W+16:0] head;   // word at each FIFO's read pointer
  logic [AW:0] wp [NUM_CORES];
  logic [AW:0] rp [NUM_CORES];
  logic [15:0] nmsg [NUM_CORES];
  logic          busy;
  logic [CW-1:0] sel, rr;

  always_comb for (int c = 0; c < NUM_CORES; c++) in_ready[c] = (wp[c] - rp[c]) < (AW+1)'(DEPTH);
  assign {out_last, out_port, out_data} = head[sel];
  assign out_valid = busy;

  logic          pick_ok;
  logic [CW-1:0] pick;
  always_comb begin
    pick_ok = 1'b0; pick = rr;
    for (int i = 0; i < NUM_CORES; i++) begin
      logic [CW-1:0] c;
      c = CW'(rr + CW'(i));
      if (!pick_ok && nmsg[c] != 0) begin pick_ok = 1'b1; pick = c; end
    end
  end

  // one memory per core: one write port and one read port each
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_mem
    logic [WORD_W+16:0] mem [DEPTH];
    always_ff @(posedge clk)
      if (in_valid[c] && in_ready[c]) mem[wp[c][AW-1:0]] <= {in_last[c], in_port[c], in_data[c]};
    assign head[c] = mem[rp[c][AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; sel <= '0; rr <= '0;
      for (int c = 0; c < NUM_CORES; c++) begin wp[c] <= '0; rp[c] <= '0; nmsg[c] <= '0; end
    end else begin
      for (int c = 0; c < NUM_CORES; c++) begin
        logic inc, dec;
        inc = in_valid[c] && in_ready[c] && in_last[c];
        dec = !busy && pick_ok && pick == CW'(c);
        if (in_valid[c] && in_ready[c]) wp[c] <= wp[c] + 1'b1;
        nmsg[c] <= nmsg[c] + 16'(inc) - 16'(dec);
      end
      if (!busy) begin
        if (pick_ok) begin busy <= 1'b1; sel <= pick; rr <= CW'(pick + 1'b1); end
      end else if (out_ready) begin
        rp[sel] <= rp[sel] + 1'b1;
        if (out_last) busy <= 1'b0;
      end
    end
  end
endmodule
