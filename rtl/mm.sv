// mm: N:1 matrix-multiply kernel, C (M x N) = A (M x K) * B (K x N).
//
// All three arrays are array streams in row-major order, BS elements per
// block. Like the MM kernel it models, it must see all of its inputs before
// it can write any output, so it works in two phases:
//   LOAD    A and B are read, each as soon as its own stream offers a block,
//           into two local buffers. The two inputs are read independently,
//           so a stalled B stream never stops A from being drained.
//   COMPUTE C is produced in row-major order. For each element c[i][j] the
//           dot product over k is formed P terms per cycle with P multipliers
//           and an adder tree (P is the "MM parallelism factor"), so one
//           element takes ceil(K/P) cycles. BS results are packed into one
//           output block; the kernel waits while a finished block is not yet
//           taken.
// After the last block of C has left, it returns to LOAD for the next
// operation. Products are truncated to the element format and accumulated
// with wrap-around in it (inr_pkg), as an accumulator of the element type
// would. The buffering order, the independent reading of the two inputs and
// the accumulator format are this design's choices.
//
// Timing: M*K/BS and K*N/BS input beats (overlapping), then
// M*N*ceil(K/P) compute cycles plus one, with output stalls added.
// Reset: synchronous active-low, returns to LOAD with empty buffers.
module mm
  import inr_pkg::*;
#(
  parameter int unsigned M  = 64,  // rows of A and C (the batch)
  parameter int unsigned K  = 256, // columns of A, rows of B
  parameter int unsigned N  = 256, // columns of B and C
  parameter int unsigned P  = 64,  // multipliers (MM parallelism)
  parameter int unsigned BS = 4    // elements per stream block
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           a_valid,
  output logic           a_ready,
  input  data_t [BS-1:0] a_data,
  input  logic           b_valid,
  output logic           b_ready,
  input  data_t [BS-1:0] b_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [BS-1:0] out_data
);

  localparam int unsigned A_BEATS = M * K / BS;
  localparam int unsigned B_BEATS = K * N / BS;
  localparam int unsigned KC      = (K + P - 1) / P;      // cycles per element
  localparam int unsigned ABW     = $clog2(A_BEATS + 1);
  localparam int unsigned BBW     = $clog2(B_BEATS + 1);
  localparam int unsigned IW      = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned JW      = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned KW      = (KC > 1) ? $clog2(KC) : 1;
  localparam int unsigned SW      = (BS > 1) ? $clog2(BS) : 1;

  initial begin
    assert ((M * K) % BS == 0 && (K * N) % BS == 0 && (M * N) % BS == 0)
      else $fatal(1, "mm: every array size must be a multiple of BS");
  end

  typedef enum logic {LOAD, COMPUTE} state_t;
  state_t state;

  data_t a_buf [M*K];
  data_t b_buf [K*N];

  logic [ABW-1:0] a_cnt;
  logic [BBW-1:0] b_cnt;
  logic           a_full, b_full;

  assign a_full  = (a_cnt == ABW'(A_BEATS));
  assign b_full  = (b_cnt == BBW'(B_BEATS));
  assign a_ready = (state == LOAD) && !a_full;
  assign b_ready = (state == LOAD) && !b_full;

  // ---------------- load phase ----------------
  always_ff @(posedge clk) begin
    if (a_valid && a_ready)
      for (int e = 0; e < BS; e++) a_buf[int'(a_cnt) * BS + e] <= a_data[e];
    if (b_valid && b_ready)
      for (int e = 0; e < BS; e++) b_buf[int'(b_cnt) * BS + e] <= b_data[e];
  end

  // ---------------- compute phase ----------------
  logic [IW-1:0] i_idx;
  logic [JW-1:0] j_idx;
  logic [KW-1:0] kc;
  logic [SW-1:0] slot;
  data_t         acc;
  data_t         partial;
  logic          stall, last_k, last_elem;

  // P products of this cycle, summed (terms past K contribute zero)
  always_comb begin
    partial = '0;
    for (int p = 0; p < P; p++) begin
      int k;
      k = int'(kc) * P + p;
      if (k < K)
        partial = fx_add(partial, fx_mul(a_buf[int'(i_idx) * K + k],
                                         b_buf[k * N + int'(j_idx)]));
    end
  end

  assign stall     = out_valid && !out_ready;
  assign last_k    = (kc == KW'(KC - 1));
  assign last_elem = (i_idx == IW'(M - 1)) && (j_idx == JW'(N - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= LOAD;
      a_cnt     <= '0;
      b_cnt     <= '0;
      i_idx     <= '0;
      j_idx     <= '0;
      kc        <= '0;
      slot      <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        LOAD: begin
          if (a_valid && a_ready) a_cnt <= a_cnt + 1'b1;
          if (b_valid && b_ready) b_cnt <= b_cnt + 1'b1;
          if (a_full && b_full) begin
            state <= COMPUTE;
            i_idx <= '0;
            j_idx <= '0;
            kc    <= '0;
            slot  <= '0;
            acc   <= '0;
          end
        end
        COMPUTE: begin
          if (!stall) begin
            if (!last_k) begin
              kc  <= kc + 1'b1;
              acc <= fx_add(acc, partial);
            end else begin
              kc  <= '0;
              acc <= '0;
              out_data[slot] <= fx_add(acc, partial);
              if (slot == SW'(BS - 1)) begin
                slot      <= '0;
                out_valid <= 1'b1;
              end else begin
                slot <= slot + 1'b1;
              end
              if (j_idx == JW'(N - 1)) begin
                j_idx <= '0;
                i_idx <= i_idx + 1'b1;
              end else begin
                j_idx <= j_idx + 1'b1;
              end
              if (last_elem) begin
                state <= LOAD;
                a_cnt <= '0;
                b_cnt <= '0;
              end
            end
          end
        end
      endcase
    end
  end

endmodule
