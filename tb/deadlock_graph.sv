// deadlock_graph: the four-node graph Input -> {Mm, Cos} -> Mul, built from
// the kernel library, used by tb_deadlock_example.
//
// The input stream is copied to a matrix multiply (Mm, which must buffer
// its whole input before writing) and to a cosine (Cos, which writes one
// element per element read); Mul multiplies their results element by
// element. When the stream from the copy into Cos is too shallow, Cos stops
// once its output stream is full (Mul is still waiting for Mm), the copy
// then stops, and Mm never receives the rest of its input: the graph
// deadlocks. COS_IN_DEPTH sets the depth of that one stream; all others
// have depth 2. BS is 1. The Mm's second operand W arrives on its own
// stream. `active` is high in every cycle where any stream moves a block.
module deadlock_graph
  import inr_pkg::*;
#(
  parameter int unsigned M = 8,
  parameter int unsigned K = 8,
  parameter int unsigned COS_IN_DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  input  logic  w_valid,
  output logic  w_ready,
  input  data_t w_data,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data,
  output logic  active
);

  // streams: 0 in, 1 to Mm, 2 to Cos, 3 W, 4 Mm out, 5 Cos out, 6 Mul out
  localparam int unsigned NS = 7;
  logic [NS-1:0] iv, ir, ov, ordy;
  data_t         id [NS];
  data_t         od [NS];

  for (genvar s = 0; s < NS; s++) begin : g_fifo
    logic [$clog2(((s == 2) ? COS_IN_DEPTH : 2) + 1)-1:0] unused_peak;
    array_stream_fifo #(.BS(1), .DW(DATA_W), .DEPTH((s == 2) ? COS_IN_DEPTH : 2)) u_fifo (
      .clk, .rst_n,
      .in_valid (iv[s]), .in_ready (ir[s]), .in_data (id[s]),
      .out_valid(ov[s]), .out_ready(ordy[s]), .out_data(od[s]),
      .peak_occ (unused_peak));
  end

  assign active = |(iv & ir);

  assign iv[0] = in_valid;  assign in_ready = ir[0];  assign id[0] = in_data;
  assign iv[3] = w_valid;   assign w_ready  = ir[3];  assign id[3] = w_data;
  assign out_valid = ov[6]; assign ordy[6] = out_ready; assign out_data = od[6];

  data_t [1:0][0:0] cp;
  copy_stream #(.BS(1), .DW(DATA_W), .N_OUT(2)) u_copy (
    .clk, .rst_n, .in_valid(ov[0]), .in_ready(ordy[0]), .in_data(od[0]),
    .out_valid({iv[2], iv[1]}), .out_ready({ir[2], ir[1]}), .out_data(cp));
  assign id[1] = cp[0];
  assign id[2] = cp[1];

  mm #(.M(M), .K(K), .N(K), .P(K), .BS(1)) u_mm (
    .clk, .rst_n,
    .a_valid(ov[1]), .a_ready(ordy[1]), .a_data(od[1]),
    .b_valid(ov[3]), .b_ready(ordy[3]), .b_data(od[3]),
    .out_valid(iv[4]), .out_ready(ir[4]), .out_data(id[4]));

  elementwise_cos #(.BS(1)) u_cos (
    .clk, .rst_n, .in_valid(ov[2]), .in_ready(ordy[2]), .in_data(od[2]),
    .out_valid(iv[5]), .out_ready(ir[5]), .out_data(id[5]));

  elementwise_mul #(.BS(1)) u_mul (
    .clk, .rst_n,
    .a_valid(ov[4]), .a_ready(ordy[4]), .a_data(od[4]),
    .b_valid(ov[5]), .b_ready(ordy[5]), .b_data(od[5]),
    .out_valid(iv[6]), .out_ready(ir[6]), .out_data(id[6]));

endmodule
