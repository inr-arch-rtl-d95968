// tb_elementwise_sin: self-checking test of the sine kernel.
//
// Sends 400 blocks of random angles: most in [-4, 4] rad, some across the
// whole Q10.22 range (about +-512 rad), plus the multiples of pi/2 near the
// quadrant boundaries. Each result is compared with the real-valued sine
// and must be within 3 LSB (about 7e-7). Random valid and ready exercise
// the stall of the pipeline. A full-rate phase then checks the latency of
// ITER+3 = 27 cycles from the first input to the first output and one block
// per cycle after that.
module tb_elementwise_sin;
  import inr_pkg::*;
  localparam int unsigned BS = 4, NBLK = 400, ITER = 24, LAT = ITER + 3;
  localparam real SCALE = 4194304.0;  // 2^22
  localparam real TOL   = 3.0;        // LSB

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [BS-1:0] in_data, out_data;

  elementwise_sin #(.BS(BS), .ITER(ITER)) dut (.*);

  int checks = 0, failures = 0;
  data_t [BS-1:0] q [$];
  int sent = 0, got = 0;
  real worst = 0.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real ref_f(input real x);
    return $sin(x);
  endfunction

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t rnd(input int n);
    int sel;
    sel = $urandom_range(0, 9);
    if (sel == 0) return data_t'($urandom);                       // full range
    if (sel == 1) return data_t'($rtoi((1.5707963267948966 * $itor($urandom_range(0, 40)) - 31.4159)
                                       * SCALE) + $signed($urandom_range(0, 6)) - 3);
    return data_t'($signed($urandom_range(0, 32'h01FF_FFFF)) - 32'sh0100_0000);  // [-4, 4)
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
    if (out_valid && out_ready) begin
      data_t [BS-1:0] e;
      e = q.pop_front();
      for (int i = 0; i < BS; i++) begin
        real err;
        err = real'(out_data[i]) - ref_f(real'(e[i]) / SCALE) * SCALE;
        if (err < 0) err = -err;
        if (err > worst) worst = err;
        check(err <= TOL, $sformatf("x=%f got %f ref %f", real'(e[i]) / SCALE,
                                    real'(out_data[i]) / SCALE, ref_f(real'(e[i]) / SCALE)));
      end
      got++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < NBLK) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = (sent < NBLK) && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < BS; i++) in_data[i] = rnd(i);
      end
      out_ready = ($urandom_range(0, 3) != 0);
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (LAT + 2) @(negedge clk);
    // latency and rate: 40 blocks back to back
    begin
      int t, first, n0;
      n0 = got; first = -1; t = 0;
      in_valid = 1;
      while (got < n0 + 40) begin
        for (int i = 0; i < BS; i++) in_data[i] = rnd(i);
        if (sent - n0 >= 40) in_valid = 0;
        @(negedge clk);
        t++;
        if (first < 0 && got > n0) first = t;
      end
      // a block is taken one edge after out_valid rises, LAT edges after it entered
      check(first == LAT + 1, $sformatf("latency %0d cycles, expected %0d", first - 1, LAT));
      check(t == LAT + 40, $sformatf("40 blocks done after %0d cycles, expected %0d", t, LAT + 40));
    end
    $display("worst error %f LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
