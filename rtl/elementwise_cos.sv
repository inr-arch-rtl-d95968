// elementwise_cos: 1:1 kernel computing the cosine of every element of an
// array stream (the "Cos" node of a computation graph; it appears where a
// gradient is taken through a sine activation, as d sin(z) = cos(z) dz).
//
// It is fully streaming: one block of BS elements enters per cycle and the
// result leaves LAT = ITER+3 cycles later. Each lane is a pipelined CORDIC
// unit (cordic_sincos); this module keeps the valid bits that travel along
// with the data and picks the cosine output. The whole pipeline advances when
// its last stage is empty or being read (a stall freezes every stage), so
// in_ready = !out_valid || out_ready.
//
// Interface: valid/ready, BS elements per block, elements in Q10.22 radians.
// Accuracy: within 2 LSB of the exactly rounded cosine over the input range.
// Reset: synchronous active-low, clears the valid pipeline.
module elementwise_cos
  import inr_pkg::*;
#(
  parameter int unsigned BS   = 4,
  parameter int unsigned ITER = 24
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [BS-1:0] in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [BS-1:0] out_data
);

  localparam int unsigned LAT = ITER + 3;

  logic [LAT-1:0] vld;
  logic           en;

  assign out_valid = vld[LAT-1];
  assign en        = !out_valid || out_ready;
  assign in_ready  = en;

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (en) vld <= {vld[LAT-2:0], in_valid};
  end

  for (genvar l = 0; l < BS; l++) begin : g_lane
    data_t unused_sin;
    cordic_sincos #(.ITER(ITER)) u_cordic (
      .clk   (clk),
      .en    (en),
      .x     (in_data[l]),
      .sin_x (unused_sin),
      .cos_x (out_data[l])
    );
  end

endmodule
