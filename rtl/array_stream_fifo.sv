// array_stream_fifo: the storage of one array stream.
//
// An array stream moves a multi-dimensional array between two kernels in
// row-major order. Each beat carries one block of BS elements; the array's
// shape is not carried on wires but fixed at elaboration by the parameters
// of the kernels at both ends, so the stream itself is a plain FIFO of
// blocks. DEPTH is the number of blocks it can hold (2 is the default depth
// of a stream; a compiler may size each stream differently to avoid
// deadlock or stalls).
//
// Interface: valid/ready on both sides. A beat moves on a rising clock edge
// where valid and ready are both high. in_ready is high whenever the FIFO
// holds fewer than DEPTH blocks; out_valid whenever it holds at least one.
// A push into a full FIFO waits; a pop and push in the same cycle are both
// allowed when the FIFO is full (the freed slot is refilled).
// Latency: one cycle from a push to the element being visible at the output.
//
// peak_occ reports the largest number of blocks held at once since reset.
// This is the "observed FIFO depth" a depth optimiser reads back from a
// simulation; it is this design's way of exposing that number in hardware.
//
// Reset: synchronous, active-low rst_n empties the FIFO and clears peak_occ.
module array_stream_fifo #(
  parameter int unsigned BS    = 4,   // elements per block (beat)
  parameter int unsigned DW    = 32,  // bits per element
  parameter int unsigned DEPTH = 2    // blocks of storage
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [BS-1:0][DW-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [BS-1:0][DW-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] peak_occ
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [BS-1:0][DW-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0] count;
  logic push, pop;

  assign in_ready  = (count < CW'(DEPTH)) || out_ready;
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      peak_occ <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (count > peak_occ) peak_occ <= count;
    end
  end

  // Handshake rules: nothing is popped from an empty FIFO, count stays
  // within the storage.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (count <= CW'(DEPTH)) else $error("array_stream_fifo: count overflow");
      assert (!(pop && count == '0)) else $error("array_stream_fifo: pop while empty");
    end
  end

endmodule
