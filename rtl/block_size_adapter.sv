// block_size_adapter: 1:1 kernel re-packing an array stream from blocks of
// BS_IN elements to blocks of BS_OUT elements, keeping the row-major order.
//
// Kernels with different parallelism can exchange data only if their block
// sizes agree; this adapter sits between them. The larger block size must be
// a multiple of the smaller one.
//   Widening (BS_OUT > BS_IN): R = BS_OUT/BS_IN input blocks are collected,
//     the first in the lowest elements; with the R-th the full block moves to
//     the output register and is offered downstream while the next group is
//     being collected.
//   Narrowing (BS_OUT < BS_IN): an input block is held and its R slices are
//     offered one per cycle, lowest elements first; the input is consumed
//     with its last slice.
//   Equal sizes: a register stage.
// Element 0 of a block is the earliest element of the array.
//
// Interface: valid/ready on both sides.
// Timing: widening takes one input block per cycle, giving an output block
// one cycle after the last block of its group; narrowing gives one output
// block per cycle and consumes the input with its last slice.
// Reset: synchronous active-low.
module block_size_adapter
  import inr_pkg::*;
#(
  parameter int unsigned BS_IN  = 1,
  parameter int unsigned BS_OUT = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [BS_IN-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [BS_OUT-1:0] out_data
);

  initial begin
    assert ((BS_OUT % BS_IN == 0) || (BS_IN % BS_OUT == 0))
      else $fatal(1, "block_size_adapter: block sizes must divide each other");
  end

  if (BS_OUT >= BS_IN) begin : g_widen
    localparam int unsigned R  = BS_OUT / BS_IN;
    localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;
    logic [RW-1:0] fill;
    data_t [BS_OUT-1:0] col;   // blocks collected for the next output

    // The first R-1 input blocks of a group go to the collect register and
    // never wait; the last one waits only while a full output block is
    // still pending.
    assign in_ready = (fill != RW'(R - 1)) || !out_valid || out_ready;

    always_ff @(posedge clk) begin
      if (in_valid && in_ready) begin
        for (int e = 0; e < BS_IN; e++)
          col[int'(fill) * BS_IN + e] <= in_data[e];
        if (fill == RW'(R - 1)) begin
          for (int e = 0; e < BS_OUT - BS_IN; e++) out_data[e] <= col[e];
          for (int e = 0; e < BS_IN; e++) out_data[BS_OUT - BS_IN + e] <= in_data[e];
        end
      end
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        fill      <= '0;
        out_valid <= 1'b0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          if (fill == RW'(R - 1)) begin
            fill      <= '0;
            out_valid <= 1'b1;
          end else fill <= fill + 1'b1;
        end
      end
    end
  end else begin : g_narrow
    localparam int unsigned R  = BS_IN / BS_OUT;
    localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;
    logic [RW-1:0] sel;

    assign out_valid = in_valid;
    assign in_ready  = out_ready && (sel == RW'(R - 1));

    always_comb
      for (int e = 0; e < BS_OUT; e++) out_data[e] = in_data[int'(sel) * BS_OUT + e];

    always_ff @(posedge clk) begin
      if (!rst_n) sel <= '0;
      else if (out_valid && out_ready) sel <= (sel == RW'(R - 1)) ? '0 : sel + 1'b1;
    end
  end

endmodule
