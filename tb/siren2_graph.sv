// siren2_graph: the first-order input gradient of a two-layer SIREN,
// assembled from two inr_arch_top layer accelerators. Used by
// tb_siren_gradient.
//
//   layer 1: X  -> Z1 = X W1^T + B1,  Y1 = sin Z1
//   layer 2: Y1 -> Z2 = Y1 W2^T + B2, Y2 = sin Z2
//   backward: U2 (given) -> layer 2 gives G2 = dL/dY1, which is layer 1's
//             upstream gradient U1 -> layer 1 gives G1 = dL/dX.
// Layer 1's Y stream becomes layer 2's X input (re-packed to one element
// per beat) and layer 2's G stream becomes layer 1's U input (re-packed to
// BS elements per beat). Layer 1's G_SEL output is not used (tied ready).
//
// The gradient of layer 1 needs U1, which exists only after layer 2 has
// consumed all of Y1; meanwhile layer 1's cosine branch has nowhere to put
// cos(Z1). Unless the stream after the cosine (S_C of layer 1) can hold the
// whole BATCH x H1 array, the two layers deadlock. C_DEPTH sets that depth.
module siren2_graph
  import inr_pkg::*;
  import inr_arch_top_pkg::*;
#(
  parameter int unsigned BATCH = 8,
  parameter int unsigned IN_F  = 2,
  parameter int unsigned H1    = 8,
  parameter int unsigned H2    = 4,
  parameter int unsigned P     = 4,
  parameter int unsigned BS    = 2,
  parameter int unsigned C_DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           x_valid,  output logic x_ready,  input data_t x_data,
  input  logic           w1_valid, output logic w1_ready, input data_t [BS-1:0] w1_data,
  input  logic           b1_valid, output logic b1_ready, input data_t [BS-1:0] b1_data,
  input  logic           w2_valid, output logic w2_ready, input data_t [BS-1:0] w2_data,
  input  logic           b2_valid, output logic b2_ready, input data_t [BS-1:0] b2_data,
  input  logic           u2_valid, output logic u2_ready, input data_t [BS-1:0] u2_data,
  output logic           y2_valid, input  logic y2_ready, output data_t [BS-1:0] y2_data,
  output logic           g_valid,  input  logic g_ready,  output data_t g_data
);

  localparam int unsigned DEPTH1 [NUM_STREAMS] = '{S_C: C_DEPTH, default: 2};

  // layer 1 Y -> narrow -> layer 2 X
  logic y1_valid, y1_ready, y1n_valid, y1n_ready;
  data_t [BS-1:0] y1_data;
  data_t [0:0]    y1n_data;
  // layer 2 G (narrow) -> wide -> layer 1 U
  logic g2_valid, g2_ready, u1_valid, u1_ready;
  data_t g2_data;
  data_t [BS-1:0] u1_data;
  // unused outputs
  logic gs1_valid, gs2_valid, gs2_ready;
  data_t [BS-1:0] gs1_data, gs2_data;
  logic [NUM_STREAMS-1:0][15:0] peak1, peak2;
  assign gs2_ready = 1'b1;

  inr_arch_top #(.BATCH(BATCH), .IN_F(IN_F), .HID(H1), .P(P), .BS(BS), .DEPTH(DEPTH1)) u_l1 (
    .clk, .rst_n,
    .x_valid, .x_ready, .x_data,
    .w_valid(w1_valid), .w_ready(w1_ready), .w_data(w1_data),
    .b_valid(b1_valid), .b_ready(b1_ready), .b_data(b1_data),
    .u_valid(u1_valid), .u_ready(u1_ready), .u_data(u1_data),
    .y_valid(y1_valid), .y_ready(y1_ready), .y_data(y1_data),
    .g_valid, .g_ready, .g_data,
    .gs_valid(gs1_valid), .gs_ready(1'b1), .gs_data(gs1_data),
    .fifo_peak(peak1));

  block_size_adapter #(.BS_IN(BS), .BS_OUT(1)) u_y1n (
    .clk, .rst_n,
    .in_valid(y1_valid), .in_ready(y1_ready), .in_data(y1_data),
    .out_valid(y1n_valid), .out_ready(y1n_ready), .out_data(y1n_data));

  inr_arch_top #(.BATCH(BATCH), .IN_F(H1), .HID(H2), .P(P), .BS(BS)) u_l2 (
    .clk, .rst_n,
    .x_valid(y1n_valid), .x_ready(y1n_ready), .x_data(y1n_data[0]),
    .w_valid(w2_valid), .w_ready(w2_ready), .w_data(w2_data),
    .b_valid(b2_valid), .b_ready(b2_ready), .b_data(b2_data),
    .u_valid(u2_valid), .u_ready(u2_ready), .u_data(u2_data),
    .y_valid(y2_valid), .y_ready(y2_ready), .y_data(y2_data),
    .g_valid(g2_valid), .g_ready(g2_ready), .g_data(g2_data),
    .gs_valid(gs2_valid), .gs_ready(gs2_ready), .gs_data(gs2_data),
    .fifo_peak(peak2));

  block_size_adapter #(.BS_IN(1), .BS_OUT(BS)) u_u1w (
    .clk, .rst_n,
    .in_valid(g2_valid), .in_ready(g2_ready), .in_data(g2_data),
    .out_valid(u1_valid), .out_ready(u1_ready), .out_data(u1_data));

endmodule
