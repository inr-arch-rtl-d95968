// cordic_sincos: pipelined sine and cosine of one fixed-point element.
//
// Helper of the elementwise_sin and elementwise_cos kernels. The input is an
// angle in radians in the element format of inr_pkg (Q10.22, range about
// +-512). It is computed in three parts:
//   1. Range reduction (2 stages): k = round(x * 2/pi), r = x - k*pi/2, so
//      that |r| <= pi/4; pi/2 is held with 40 fraction bits so that the error
//      of the reduction stays below one output LSB over the whole range.
//   2. ITER CORDIC rotation stages on r with 30 fraction bits, starting from
//      (1/G, 0) where G is the CORDIC gain, giving cos r and sin r.
//   3. One output stage folding the quadrant k mod 4 back in:
//      sin x = sin r, cos r, -sin r, -cos r and cos x = cos r, -sin r,
//      -cos r, sin r for k mod 4 = 0, 1, 2, 3; results rounded to Q10.22.
// The algorithm is this design's choice; the INR-Arch paper only names Sin and Cos
// kernels.
//
// Interface: no handshake of its own. When en is high every stage advances
// by one; the caller keeps a matching valid pipeline. Latency ITER+3 enabled
// cycles. No reset: the data registers hold no control state.
module cordic_sincos
  import inr_pkg::*;
#(
  parameter int unsigned ITER = 24
) (
  input  logic  clk,
  input  logic  en,
  input  data_t x,
  output data_t sin_x,
  output data_t cos_x
);

  localparam int unsigned CF = 30;                        // CORDIC fraction bits
  localparam logic signed [63:0] TWO_OVER_PI_Q30 = 64'sd683565276;
  localparam logic signed [63:0] PI_OVER_2_Q40   = 64'sd1727108826179;
  localparam logic signed [31:0] INV_GAIN_Q30    = 32'sd652032874;

  // atan(2^-i) with 30 fraction bits: round(atan(2^-i) * 2^30) with the
  // value computed at elaboration time.
  function automatic logic signed [31:0] atan_q30(input int i);
    real v;
    v = $atan(1.0 / (2.0 ** i)) * (2.0 ** 30);
    return 32'($rtoi(v + 0.5));
  endfunction

  // Stage A: k = round(x * 2/pi)
  logic signed [63:0] prod_a;
  logic signed [31:0] x_a;
  logic signed [15:0] k_a;
  assign prod_a = 64'(x) * TWO_OVER_PI_Q30;               // Q52

  always_ff @(posedge clk) begin
    if (en) begin
      x_a <= x;
      k_a <= 16'((prod_a + (64'sd1 <<< 51)) >>> 52);
    end
  end

  // Stage B: r = x - k*pi/2 (Q40 -> Q30), quadrant = k mod 4
  logic signed [63:0] r_q40;
  assign r_q40 = (64'(x_a) <<< 18) - 64'(k_a) * PI_OVER_2_Q40;

  logic signed [31:0] cx [ITER+1];
  logic signed [31:0] cy [ITER+1];
  logic signed [31:0] cz [ITER+1];
  logic [1:0]         quad [ITER+1];

  always_ff @(posedge clk) begin
    if (en) begin
      cx[0]   <= INV_GAIN_Q30;
      cy[0]   <= '0;
      cz[0]   <= 32'(r_q40 >>> 10);
      quad[0] <= k_a[1:0];
    end
  end

  // CORDIC rotation stages
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [31:0] ATAN = atan_q30(i);
    always_ff @(posedge clk) begin
      if (en) begin
        if (cz[i] >= 0) begin
          cx[i+1] <= cx[i] - (cy[i] >>> i);
          cy[i+1] <= cy[i] + (cx[i] >>> i);
          cz[i+1] <= cz[i] - ATAN;
        end else begin
          cx[i+1] <= cx[i] + (cy[i] >>> i);
          cy[i+1] <= cy[i] - (cx[i] >>> i);
          cz[i+1] <= cz[i] + ATAN;
        end
        quad[i+1] <= quad[i];
      end
    end
  end

  // Output stage: quadrant fold and rounding Q30 -> Q22
  function automatic data_t to_q22(input logic signed [31:0] v);
    return data_t'((v + 32'sd128) >>> (CF - FRAC_BITS));
  endfunction

  data_t s_r, c_r;
  assign s_r = to_q22(cy[ITER]);
  assign c_r = to_q22(cx[ITER]);

  always_ff @(posedge clk) begin
    if (en) begin
      unique case (quad[ITER])
        2'd0: begin sin_x <= s_r;  cos_x <= c_r;  end
        2'd1: begin sin_x <= c_r;  cos_x <= -s_r; end
        2'd2: begin sin_x <= -s_r; cos_x <= -c_r; end
        2'd3: begin sin_x <= -c_r; cos_x <= s_r;  end
      endcase
    end
  end

endmodule
