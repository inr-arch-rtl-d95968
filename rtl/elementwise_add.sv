// elementwise_add: N:1 kernel adding two array streams of the same shape,
// element by element (the "Add" node of a computation graph).
//
// It needs no buffer: when a block is present on both inputs and the output
// register can take a result, the BS lane-wise sums are registered and both
// input blocks are consumed together. Sums wrap on overflow, as the fixed-
// point element type does (see inr_pkg).
//
// Interface: valid/ready, BS elements per block on each stream. Inputs are
// read in lock step, which blocks like reading them alternately would.
// Timing: one block per cycle, one cycle latency.
// Reset: synchronous active-low, empties the output register.
module elementwise_add
  import inr_pkg::*;
#(
  parameter int unsigned BS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_valid,
  output logic             a_ready,
  input  data_t [BS-1:0]   a_data,
  input  logic             b_valid,
  output logic             b_ready,
  input  data_t [BS-1:0]   b_data,
  output logic             out_valid,
  input  logic             out_ready,
  output data_t [BS-1:0]   out_data
);

  logic take;
  assign take    = a_valid && b_valid && (!out_valid || out_ready);
  assign a_ready = take;
  assign b_ready = take;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (take) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (take)
      for (int i = 0; i < BS; i++) out_data[i] <= fx_add(a_data[i], b_data[i]);
  end

endmodule
