// dim_select: 1:1 kernel taking one slice of a 2-D array stream (the
// "Select" node of a computation graph, torch.select(dim, index)).
//
// The input is ROWS x COLS in row-major order. With DIM = 1 the output is
// column IDX (ROWS elements, in row order); with DIM = 0 it is row IDX (COLS
// elements). The kernel knows the array shape from its parameters, so it
// can tell from the position of each element whether it belongs to the
// slice. It walks each input block one element per cycle, so an input block
// takes BS cycles; selected elements are packed BS to an output block. This
// element-serial walk is the simplest form and this design's choice.
//
// Interface: valid/ready, BS elements per block on both sides; the slice
// length must be a multiple of BS.
// Timing: BS cycles per input block, plus waits for a full output block to
// be taken.
// Reset: synchronous active-low.
module dim_select
  import inr_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 2,
  parameter int unsigned DIM  = 1,
  parameter int unsigned IDX  = 0,
  parameter int unsigned BS   = 4
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

  localparam int unsigned TOTAL = ROWS * COLS;
  localparam int unsigned OUT_N = (DIM == 1) ? ROWS : COLS;
  localparam int unsigned PW    = $clog2(TOTAL + 1);
  localparam int unsigned SW    = (BS > 1) ? $clog2(BS) : 1;

  initial begin
    assert (DIM <= 1 && ((DIM == 1) ? IDX < COLS : IDX < ROWS))
      else $fatal(1, "dim_select: DIM or IDX out of range");
    assert (OUT_N % BS == 0 && TOTAL % BS == 0)
      else $fatal(1, "dim_select: sizes must be multiples of BS");
  end

  logic [PW-1:0] pos;    // array position of the element under inspection
  logic [SW-1:0] lane;   // its lane within the current input block
  logic [SW-1:0] slot;   // next free slot of the output block
  logic          stall, hit, last_lane;

  assign stall     = out_valid && !out_ready;
  assign hit       = (DIM == 1) ? ((int'(pos) % COLS) == IDX) : ((int'(pos) / COLS) == IDX);
  assign last_lane = (lane == SW'(BS - 1));
  assign in_ready  = in_valid && !stall && last_lane;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos       <= '0;
      lane      <= '0;
      slot      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && !stall) begin
        if (hit) begin
          out_data[slot] <= in_data[lane];
          if (slot == SW'(BS - 1)) begin
            slot      <= '0;
            out_valid <= 1'b1;
          end else slot <= slot + 1'b1;
        end
        lane <= last_lane ? '0 : lane + 1'b1;
        pos  <= (pos == PW'(TOTAL - 1)) ? '0 : pos + 1'b1;
      end
    end
  end

endmodule
