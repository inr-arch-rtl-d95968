// inr_arch_top: a dataflow accelerator for one SIREN layer together with the
// first-order gradient of that layer with respect to its input.
//
// A SIREN layer maps a batch of coordinates X (BATCH x IN) to
//     Z = X * W^T + B,   Y = sin(Z)                       (forward)
// and, given the gradient U = dL/dY arriving from the layers above,
//     D = U .* cos(Z),   G = dL/dX = D * W                 (backward)
// The frequency factor omega_0 of SIREN is taken as already folded into W
// and B. This is the pattern that makes up the gradient graphs of INR
// editing: Mm, Add, Sin, Cos, Mul, T and Select kernels connected by array
// streams.
//
// Architecture: every kernel is its own module running concurrently with the
// others; every edge of the computation graph is one array stream (an
// array_stream_fifo with its own depth). Each stream has one producer and
// one consumer; a result used twice goes through a copy_stream. The graph:
//
//   X --[S_X]--> block_size_adapter 1->BS --[S_XB]--------------> mm1.A
//   W --[S_W]--> copy_stream --[S_W1]--> transpose --[S_WT]----> mm1.B
//                            \-[S_W2]-----------------------------> mm2.B
//   mm1 --[S_MM1]--> elementwise_add <--[S_B]-- B
//   add --[S_Z]--> copy_stream --[S_Z1]--> elementwise_sin --[S_Y]--> Y
//                              \-[S_Z2]--> elementwise_cos --[S_C]--> mul.B
//   U --[S_U]--> elementwise_mul.A ; mul --[S_D]--> mm2.A
//   mm2 --[S_G]--> copy_stream --[S_G1]--> block_size_adapter BS->1 --[S_GN]--> G
//                              \-[S_G2]--> dim_select --[S_GS]--> G_SEL
//
// mm1 computes X * W^T (M=BATCH, K=IN, N=HID) and mm2 computes D * W
// (M=BATCH, K=HID, N=IN), both with P multipliers. The transposed weight is
// produced on chip from the same W stream, as a "T" node would be in a
// compiled graph. G_SEL is column SEL_IDX of G, e.g. d/dx of the loss.
//
// Ports: one valid/ready stream per graph input (X, W, B, U) and output
// (Y, G, G_SEL), row-major. X and G carry one element per beat; the others
// BS elements per beat. B must be supplied broadcast to BATCH x HID. All
// inputs of one operation may be offered at once; the depths chosen by
// DEPTH (all 2 by default, the smallest FIFO) are deadlock-free for this
// graph because mm reads its two inputs independently. fifo_peak[s] is the
// largest number of blocks stream s has held since reset, zero-extended to
// 16 bits (its upper bits are constant while the depths are small).
//
// What follows the INR-Arch paper: the kernel set, the array-stream FIFOs with a
// default depth of 2, the copy stream for every fan-out, batch 64, the
// 32-bit element with 10 integer bits and MM parallelism 64. What is this
// design's own: the choice of one SIREN layer as the graph, the hidden width
// of 256, the block size of 4 and the valid/ready handshake.
module inr_arch_top
  import inr_pkg::*;
  import inr_arch_top_pkg::*;
#(
  parameter int unsigned BATCH   = 64,   // coordinates per operation
  parameter int unsigned IN_F    = 2,    // input features (x, y)
  parameter int unsigned HID     = 256,  // layer width
  parameter int unsigned P       = 64,   // MM parallelism
  parameter int unsigned BS      = 4,    // block size of the wide streams
  parameter int unsigned SEL_IDX = 0,    // column of G sent to G_SEL
  parameter int unsigned DEPTH [NUM_STREAMS] = '{default: 2}
) (
  input  logic           clk,
  input  logic           rst_n,
  // X: BATCH x IN_F coordinates
  input  logic           x_valid,
  output logic           x_ready,
  input  data_t          x_data,
  // W: HID x IN_F weight
  input  logic           w_valid,
  output logic           w_ready,
  input  data_t [BS-1:0] w_data,
  // B: BATCH x HID bias (broadcast)
  input  logic           b_valid,
  output logic           b_ready,
  input  data_t [BS-1:0] b_data,
  // U: BATCH x HID upstream gradient
  input  logic           u_valid,
  output logic           u_ready,
  input  data_t [BS-1:0] u_data,
  // Y: BATCH x HID layer output
  output logic           y_valid,
  input  logic           y_ready,
  output data_t [BS-1:0] y_data,
  // G: BATCH x IN_F gradient w.r.t. X
  output logic           g_valid,
  input  logic           g_ready,
  output data_t          g_data,
  // G_SEL: BATCH x 1, column SEL_IDX of G
  output logic           gs_valid,
  input  logic           gs_ready,
  output data_t [BS-1:0] gs_data,
  // observed peak occupancy of every stream, in blocks
  output logic [NUM_STREAMS-1:0][15:0] fifo_peak
);

  localparam int unsigned NS   = NUM_STREAMS;
  localparam int unsigned DW_C = DATA_W;

  // Both ends of every stream. For the two one-element streams (S_X, S_GN)
  // only lane 0 is used.
  logic [NS-1:0]  s_in_valid, s_in_ready, s_out_valid, s_out_ready;
  data_t [BS-1:0] s_in_data  [NS];
  data_t [BS-1:0] s_out_data [NS];

  for (genvar s = 0; s < NS; s++) begin : g_stream
    localparam int unsigned SBS = (s == S_X || s == S_GN) ? 1 : BS;
    localparam int unsigned PW  = $clog2(DEPTH[s] + 1);
    logic [PW-1:0]          peak;
    logic [SBS-1:0][DW_C-1:0] fo_data;

    array_stream_fifo #(.BS(SBS), .DW(DW_C), .DEPTH(DEPTH[s])) u_fifo (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (s_in_valid[s]),
      .in_ready  (s_in_ready[s]),
      .in_data   (s_in_data[s][SBS-1:0]),
      .out_valid (s_out_valid[s]),
      .out_ready (s_out_ready[s]),
      .out_data  (fo_data),
      .peak_occ  (peak)
    );

    always_comb begin
      s_out_data[s] = '0;
      s_out_data[s][SBS-1:0] = fo_data;
    end
    assign fifo_peak[s] = 16'(peak);
  end


  // ---------------- graph inputs ----------------
  assign s_in_valid[S_X] = x_valid;
  assign x_ready         = s_in_ready[S_X];
  always_comb begin
    s_in_data[S_X]    = '0;
    s_in_data[S_X][0] = x_data;
  end

  assign s_in_valid[S_W] = w_valid;
  assign w_ready         = s_in_ready[S_W];
  assign s_in_data[S_W]  = w_data;

  assign s_in_valid[S_B] = b_valid;
  assign b_ready         = s_in_ready[S_B];
  assign s_in_data[S_B]  = b_data;

  assign s_in_valid[S_U] = u_valid;
  assign u_ready         = s_in_ready[S_U];
  assign s_in_data[S_U]  = u_data;

  // ---------------- kernels ----------------
  // X: widen from one element to BS elements per beat
  block_size_adapter #(.BS_IN(1), .BS_OUT(BS)) u_bsa_x (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_X]), .in_ready (s_out_ready[S_X]),
    .in_data   (s_out_data[S_X][0:0]),
    .out_valid (s_in_valid[S_XB]), .out_ready (s_in_ready[S_XB]),
    .out_data  (s_in_data[S_XB])
  );

  // W fans out to the transpose and to the gradient MM
  data_t [1:0][BS-1:0] w_copy;
  copy_stream #(.BS(BS), .DW(DATA_W), .N_OUT(2)) u_copy_w (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_W]), .in_ready (s_out_ready[S_W]),
    .in_data   (s_out_data[S_W]),
    .out_valid ({s_in_valid[S_W2], s_in_valid[S_W1]}),
    .out_ready ({s_in_ready[S_W2], s_in_ready[S_W1]}),
    .out_data  (w_copy)
  );
  assign s_in_data[S_W1] = w_copy[0];
  assign s_in_data[S_W2] = w_copy[1];

  transpose #(.ROWS(HID), .COLS(IN_F), .BS(BS)) u_t (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_W1]), .in_ready (s_out_ready[S_W1]),
    .in_data   (s_out_data[S_W1]),
    .out_valid (s_in_valid[S_WT]), .out_ready (s_in_ready[S_WT]),
    .out_data  (s_in_data[S_WT])
  );

  mm #(.M(BATCH), .K(IN_F), .N(HID), .P(P), .BS(BS)) u_mm1 (
    .clk, .rst_n,
    .a_valid   (s_out_valid[S_XB]), .a_ready (s_out_ready[S_XB]),
    .a_data    (s_out_data[S_XB]),
    .b_valid   (s_out_valid[S_WT]), .b_ready (s_out_ready[S_WT]),
    .b_data    (s_out_data[S_WT]),
    .out_valid (s_in_valid[S_MM1]), .out_ready (s_in_ready[S_MM1]),
    .out_data  (s_in_data[S_MM1])
  );

  elementwise_add #(.BS(BS)) u_add (
    .clk, .rst_n,
    .a_valid   (s_out_valid[S_MM1]), .a_ready (s_out_ready[S_MM1]),
    .a_data    (s_out_data[S_MM1]),
    .b_valid   (s_out_valid[S_B]), .b_ready (s_out_ready[S_B]),
    .b_data    (s_out_data[S_B]),
    .out_valid (s_in_valid[S_Z]), .out_ready (s_in_ready[S_Z]),
    .out_data  (s_in_data[S_Z])
  );

  // Z fans out to Sin (forward) and Cos (backward)
  data_t [1:0][BS-1:0] z_copy;
  copy_stream #(.BS(BS), .DW(DATA_W), .N_OUT(2)) u_copy_z (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_Z]), .in_ready (s_out_ready[S_Z]),
    .in_data   (s_out_data[S_Z]),
    .out_valid ({s_in_valid[S_Z2], s_in_valid[S_Z1]}),
    .out_ready ({s_in_ready[S_Z2], s_in_ready[S_Z1]}),
    .out_data  (z_copy)
  );
  assign s_in_data[S_Z1] = z_copy[0];
  assign s_in_data[S_Z2] = z_copy[1];

  elementwise_sin #(.BS(BS)) u_sin (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_Z1]), .in_ready (s_out_ready[S_Z1]),
    .in_data   (s_out_data[S_Z1]),
    .out_valid (s_in_valid[S_Y]), .out_ready (s_in_ready[S_Y]),
    .out_data  (s_in_data[S_Y])
  );

  elementwise_cos #(.BS(BS)) u_cos (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_Z2]), .in_ready (s_out_ready[S_Z2]),
    .in_data   (s_out_data[S_Z2]),
    .out_valid (s_in_valid[S_C]), .out_ready (s_in_ready[S_C]),
    .out_data  (s_in_data[S_C])
  );

  elementwise_mul #(.BS(BS)) u_mul (
    .clk, .rst_n,
    .a_valid   (s_out_valid[S_U]), .a_ready (s_out_ready[S_U]),
    .a_data    (s_out_data[S_U]),
    .b_valid   (s_out_valid[S_C]), .b_ready (s_out_ready[S_C]),
    .b_data    (s_out_data[S_C]),
    .out_valid (s_in_valid[S_D]), .out_ready (s_in_ready[S_D]),
    .out_data  (s_in_data[S_D])
  );

  mm #(.M(BATCH), .K(HID), .N(IN_F), .P(P), .BS(BS)) u_mm2 (
    .clk, .rst_n,
    .a_valid   (s_out_valid[S_D]), .a_ready (s_out_ready[S_D]),
    .a_data    (s_out_data[S_D]),
    .b_valid   (s_out_valid[S_W2]), .b_ready (s_out_ready[S_W2]),
    .b_data    (s_out_data[S_W2]),
    .out_valid (s_in_valid[S_G]), .out_ready (s_in_ready[S_G]),
    .out_data  (s_in_data[S_G])
  );

  // G fans out to the narrow output and to Select
  data_t [1:0][BS-1:0] g_copy;
  copy_stream #(.BS(BS), .DW(DATA_W), .N_OUT(2)) u_copy_g (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_G]), .in_ready (s_out_ready[S_G]),
    .in_data   (s_out_data[S_G]),
    .out_valid ({s_in_valid[S_G2], s_in_valid[S_G1]}),
    .out_ready ({s_in_ready[S_G2], s_in_ready[S_G1]}),
    .out_data  (g_copy)
  );
  assign s_in_data[S_G1] = g_copy[0];
  assign s_in_data[S_G2] = g_copy[1];

  data_t gn_data;
  block_size_adapter #(.BS_IN(BS), .BS_OUT(1)) u_bsa_g (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_G1]), .in_ready (s_out_ready[S_G1]),
    .in_data   (s_out_data[S_G1]),
    .out_valid (s_in_valid[S_GN]), .out_ready (s_in_ready[S_GN]),
    .out_data  (gn_data)
  );
  always_comb begin
    s_in_data[S_GN]    = '0;
    s_in_data[S_GN][0] = gn_data;
  end

  dim_select #(.ROWS(BATCH), .COLS(IN_F), .DIM(1), .IDX(SEL_IDX), .BS(BS)) u_sel (
    .clk, .rst_n,
    .in_valid  (s_out_valid[S_G2]), .in_ready (s_out_ready[S_G2]),
    .in_data   (s_out_data[S_G2]),
    .out_valid (s_in_valid[S_GS]), .out_ready (s_in_ready[S_GS]),
    .out_data  (s_in_data[S_GS])
  );

  // ---------------- graph outputs ----------------
  assign y_valid          = s_out_valid[S_Y];
  assign s_out_ready[S_Y] = y_ready;
  assign y_data           = s_out_data[S_Y];

  assign g_valid           = s_out_valid[S_GN];
  assign s_out_ready[S_GN] = g_ready;
  assign g_data            = s_out_data[S_GN][0];

  assign gs_valid          = s_out_valid[S_GS];
  assign s_out_ready[S_GS] = gs_ready;
  assign gs_data           = s_out_data[S_GS];

endmodule
