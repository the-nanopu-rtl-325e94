// pull_pacer: paces the PULL packets of the NDP receiver.
//
// Every DATA or TRIM packet received asks for one PULL. The requests wait in a FIFO and are
// released no closer together than GAP cycles, the time one full-size packet takes on the link,
// so that the DATA packets the senders send in answer arrive at the bottleneck at line rate and
// do not build a new queue. The default GAP is a 1088-byte packet at one 64-bit word per cycle
// (136 cycles); the FIFO depth is this design's choice. When the FIFO is full, req_ready is low.
//
// Timing: a request that finds the pacer idle leaves the next cycle; afterwards one request per
// GAP cycles at most.
module pull_pacer
  import nanopu_pkg::*;
#(
  parameter int unsigned GAP   = 136,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      req_valid,
  input  ctrl_req_t req,
  output logic      req_ready,
  output logic      out_valid,
  output ctrl_req_t out_req,
  input  logic      out_ready
);
  ctrl_req_t   q [DEPTH];
  logic [AW:0] wp, rp;
  logic [15:0] credit_timer;   // cycles since the last PULL left

  assign req_ready = (wp - rp) < (AW+1)'(DEPTH);
  assign out_valid = (wp != rp) && (credit_timer >= 16'(GAP));
  assign out_req   = q[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; credit_timer <= 16'(GAP);
    end else begin
      if (req_valid && req_ready) begin q[wp[AW-1:0]] <= req; wp <= wp + 1'b1; end
      if (out_valid && out_ready) begin
        rp <= rp + 1'b1;
        credit_timer <= 16'd1;
      end else if (credit_timer < 16'(GAP)) credit_timer <= credit_timer + 1'b1;
    end
  end
endmodule
