// tb_deadlock_example: the deadlock of the Input -> {Mm, Cos} -> Mul graph,
// reproduced with the kernel library.
//
// Two copies of deadlock_graph (an 8 x 8 input, 64 elements, W 8 x 8) are
// driven with the same data, everything always valid and ready:
//   * with every stream at the default depth of 2, the graph must stop
//     moving (no block moves for 500 cycles) before all 64 results are out,
//     with the source stalled partway through its input;
//   * with the stream into Cos as deep as the whole input (64), as the
//     deadlock resolution prescribes, all 64 results must come out, each
//     equal to (Input * W)[i][j] * cos(Input[i][j]) within K+4 LSB (the MM
//     truncates each of its K products, Mul truncates once more).
// Because the Cos kernel is a 27-stage pipeline and the other kernels hold a
// few elements each, the depth-2 graph stalls later than after the fifth
// element of the idealised description; the test reports where.
module tb_deadlock_example;
  import inr_pkg::*;
  localparam int unsigned M = 8, K = 8, NEL = M * K;
  localparam real SC = 4194304.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  data_t X [NEL];
  data_t W [K*K];
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // graph 0: all depths 2; graph 1: Cos input as deep as the whole input
  logic [1:0] in_valid, in_ready, w_valid, w_ready, out_valid, active;
  data_t in_data [2];
  data_t w_data [2];
  data_t out_data [2];
  int sent [2], wsent [2], got [2], idle [2];

  deadlock_graph #(.M(M), .K(K), .COS_IN_DEPTH(2)) u_g0 (
    .clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .w_valid(w_valid[0]), .w_ready(w_ready[0]), .w_data(w_data[0]),
    .out_valid(out_valid[0]), .out_ready(1'b1), .out_data(out_data[0]), .active(active[0]));
  deadlock_graph #(.M(M), .K(K), .COS_IN_DEPTH(NEL)) u_g1 (
    .clk, .rst_n, .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_data(in_data[1]),
    .w_valid(w_valid[1]), .w_ready(w_ready[1]), .w_data(w_data[1]),
    .out_valid(out_valid[1]), .out_ready(1'b1), .out_data(out_data[1]), .active(active[1]));

  for (genvar g = 0; g < 2; g++) begin : g_drive
    assign in_valid[g] = rst_n && sent[g] < NEL;
    assign in_data[g]  = X[sent[g] % NEL];
    assign w_valid[g]  = rst_n && wsent[g] < K*K;
    assign w_data[g]   = W[wsent[g] % (K*K)];
  end

  function automatic real expected(int idx);
    real s;
    s = 0.0;
    for (int k = 0; k < K; k++)
      s += (real'(X[(idx / K)*K + k]) / SC) * (real'(W[k*K + idx % K]) / SC);
    return s * $cos(real'(X[idx]) / SC);
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 2; g++) begin
      if (in_valid[g] && in_ready[g]) sent[g]++;
      if (w_valid[g] && w_ready[g]) wsent[g]++;
      if (out_valid[g]) begin
        if (g == 1) begin
          real err;
          err = real'(out_data[g]) - expected(got[g]) * SC;
          check(err <= real'(K + 4) && err >= -real'(K + 4), $sformatf("result %0d: %f vs %f", got[g],
                real'(out_data[g]) / SC, expected(got[g])));
        end
        got[g]++;
      end
      idle[g] = active[g] ? 0 : idle[g] + 1;
    end
  end

  initial begin
    foreach (X[i]) X[i] = data_t'($signed($urandom_range(0, 32'h007F_FFFF)) - 32'sh0040_0000);
    foreach (W[i]) W[i] = data_t'($signed($urandom_range(0, 32'h007F_FFFF)) - 32'sh0040_0000);
    for (int g = 0; g < 2; g++) begin sent[g] = 0; wsent[g] = 0; got[g] = 0; idle[g] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!((got[1] == NEL || idle[1] > 500) && (got[0] == NEL || idle[0] > 500))) @(posedge clk);
    $display("depth 2:  source stalled after %0d of %0d elements, %0d results", sent[0], NEL, got[0]);
    $display("depth %0d: %0d elements sent, %0d results", NEL, sent[1], got[1]);
    check(idle[0] > 500 && got[0] == 0, "all-depth-2 graph deadlocks");
    check(sent[0] > 5 && sent[0] < NEL, "source stalls partway through its input");
    check(got[1] == NEL, "deep Cos input stream removes the deadlock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
