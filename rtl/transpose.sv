// transpose: 1:1 kernel writing the transpose of a 2-D array stream (the
// "T" node of a computation graph).
//
// The input is ROWS x COLS in row-major order; the output is COLS x ROWS in
// row-major order, i.e. the input read column by column. Since the first
// output block needs elements from every input row, the whole array is
// buffered before anything is written, which makes T a point where the
// dataflow cannot overlap (the reason a graph compiler removes pairs of T
// nodes and merges duplicate ones). The kernel then reads BS elements of
// the buffer per cycle, one block per cycle.
//
// Interface: valid/ready, BS elements per block on both sides.
// Timing: ROWS*COLS/BS input beats, then ROWS*COLS/BS output beats, one per
// cycle when the consumer is ready. Loading the next array starts after the
// last output block has been taken.
// Reset: synchronous active-low, returns to loading.
module transpose
  import inr_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 2,
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

  localparam int unsigned BEATS = ROWS * COLS / BS;
  localparam int unsigned CW    = $clog2(BEATS + 1);

  initial begin
    assert ((ROWS * COLS) % BS == 0)
      else $fatal(1, "transpose: array size must be a multiple of BS");
  end

  typedef enum logic {LOAD, DRAIN} state_t;
  state_t state;

  data_t        buffer [ROWS*COLS];
  logic [CW-1:0] cnt;

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == DRAIN);

  // Output element e of beat cnt is output index o = cnt*BS+e of the
  // COLS x ROWS result: o = c*ROWS + r, taken from input index r*COLS + c.
  always_comb begin
    for (int e = 0; e < BS; e++) begin
      int o;
      o = int'(cnt) * BS + e;
      out_data[e] = buffer[(o % ROWS) * COLS + (o / ROWS)];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int e = 0; e < BS; e++) buffer[int'(cnt) * BS + e] <= in_data[e];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= LOAD;
      cnt   <= '0;
    end else begin
      unique case (state)
        LOAD:
          if (in_valid) begin
            if (cnt == CW'(BEATS - 1)) begin
              cnt   <= '0;
              state <= DRAIN;
            end else cnt <= cnt + 1'b1;
          end
        DRAIN:
          if (out_ready) begin
            if (cnt == CW'(BEATS - 1)) begin
              cnt   <= '0;
              state <= LOAD;
            end else cnt <= cnt + 1'b1;
          end
      endcase
    end
  end

endmodule
