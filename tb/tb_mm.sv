// tb_mm: self-checking test of the matrix-multiply kernel.
//
// Parameters are reduced (M=4, K=5, N=6, P=2, BS=2) so that K is not a
// multiple of P and the last group of multipliers is partly idle. Three
// operations run back to back: the first with all handshakes high, to check
// the timing, the other two with random valid and ready on all streams.
// The expected C is computed in the testbench from A and B with products
// floored to 22 fraction bits and summed modulo 2^32 (independent of the
// summation order); it is also checked against the real-valued product
// within K LSB. Timing: no output may appear before both inputs are
// complete, and with a ready consumer the last output block must leave
// M*N*ceil(K/P) + 2 cycles after the last input block was taken.
module tb_mm;
  import inr_pkg::*;
  localparam int unsigned M = 4, K = 5, N = 6, P = 2, BS = 2, NOPS = 3;
  localparam int unsigned KC = (K + P - 1) / P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  data_t [BS-1:0] a_data, b_data, out_data;

  mm #(.M(M), .K(K), .N(N), .P(P), .BS(BS)) dut (.*);

  int checks = 0, failures = 0;
  data_t A [NOPS][M*K];
  data_t B [NOPS][K*N];
  int a_sent = 0, b_sent = 0, got = 0, cyc = 0, last_in_cyc = 0, last_out_cyc = 0;
  bit a_fire = 0, b_fire = 0;

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

  function automatic data_t expected(int op, int idx);
    int i, j;
    logic [31:0] s;
    i = idx / N; j = idx % N; s = '0;
    for (int k = 0; k < K; k++)
      s += 32'((longint'(A[op][i*K+k]) * longint'(B[op][k*N+j])) >>> 22);
    return data_t'(s);
  endfunction

  function automatic real expected_real(int op, int idx);
    real s;
    s = 0.0;
    for (int k = 0; k < K; k++)
      s += (real'(A[op][(idx / N)*K+k]) / 4194304.0) * (real'(B[op][k*N+(idx % N)]) / 4194304.0);
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    a_fire = a_valid && a_ready;
    b_fire = b_valid && b_ready;
    if (a_fire) begin a_sent++; if (a_sent % (M*K/BS) == 0) last_in_cyc = cyc; end
    if (b_fire) begin b_sent++; if (b_sent % (K*N/BS) == 0 && cyc > last_in_cyc) last_in_cyc = cyc; end
    if (out_valid && out_ready) begin
      int op, base;
      op = got / (M*N/BS);
      base = (got % (M*N/BS)) * BS;
      check(a_sent >= (op + 1) * (M*K/BS) && b_sent >= (op + 1) * (K*N/BS),
            "no output before both inputs are complete");
      for (int e = 0; e < BS; e++) begin
        real d;
        check(out_data[e] == expected(op, base + e),
              $sformatf("op %0d C[%0d] = %h, expected %h", op, base + e, out_data[e], expected(op, base + e)));
        d = real'(out_data[e]) / 4194304.0 - expected_real(op, base + e);
        check(d <= 0.0 && d > -real'(K) / 4194304.0, "within K LSB of the real product");
      end
      got++;
      last_out_cyc = cyc;
    end
  end

  initial begin
    for (int op = 0; op < NOPS; op++) begin
      foreach (A[op][x]) A[op][x] = data_t'($signed($urandom_range(0, 32'h03FF_FFFF)) - 32'sh0200_0000);
      foreach (B[op][x]) B[op][x] = data_t'($signed($urandom_range(0, 32'h03FF_FFFF)) - 32'sh0200_0000);
    end
    a_valid = 0; b_valid = 0; out_ready = 0; a_data = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // operation 0: everything at full rate
    out_ready = 1;
    while (got < M*N/BS) begin
      @(negedge clk);
      a_valid = a_sent < M*K/BS;
      b_valid = b_sent < K*N/BS;
      for (int e = 0; e < BS; e++) begin
        a_data[e] = A[0][(a_sent % (M*K/BS)) * BS + e];
        b_data[e] = B[0][(b_sent % (K*N/BS)) * BS + e];
      end
    end
    check(last_out_cyc - last_in_cyc == M*N*KC + 2,
          $sformatf("compute took %0d cycles, expected %0d", last_out_cyc - last_in_cyc, M*N*KC + 2));
    // operations 1 and 2: random handshakes
    while (got < NOPS * M*N/BS) begin
      @(negedge clk);
      if (!a_valid || a_fire) a_valid = (a_sent < NOPS*M*K/BS) && ($urandom_range(0, 2) != 0);
      if (!b_valid || b_fire) b_valid = (b_sent < NOPS*K*N/BS) && ($urandom_range(0, 2) != 0);
      for (int e = 0; e < BS; e++) begin
        a_data[e] = A[a_sent / (M*K/BS)][(a_sent % (M*K/BS)) * BS + e];
        b_data[e] = B[b_sent / (K*N/BS)][(b_sent % (K*N/BS)) * BS + e];
      end
      out_ready = ($urandom_range(0, 2) != 0);
    end
    check(got == NOPS * M*N/BS, "all output blocks delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
