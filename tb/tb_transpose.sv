// tb_transpose: self-checking test of the transpose kernel.
//
// A 6 x 4 array (BS = 4) is sent three times, the first time at full rate
// and then with random valid and ready. Each output block must hold the
// next BS elements of the 4 x 6 transpose in row-major order. Timing: no
// output before the whole array has arrived, and at full rate the kernel
// takes ROWS*COLS/BS cycles to load and as many to drain.
module tb_transpose;
  import inr_pkg::*;
  localparam int unsigned ROWS = 6, COLS = 4, BS = 4, NOPS = 3;
  localparam int unsigned BEATS = ROWS * COLS / BS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [BS-1:0] in_data, out_data;

  transpose #(.ROWS(ROWS), .COLS(COLS), .BS(BS)) dut (.*);

  int checks = 0, failures = 0;
  data_t X [NOPS][ROWS*COLS];
  int sent = 0, got = 0, cyc = 0, first_in = -1, last_out = 0;
  bit in_fire = 0;

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

  always @(posedge clk) if (rst_n) begin
    cyc++;
    in_fire = in_valid && in_ready;
    if (in_fire) begin if (first_in < 0) first_in = cyc; sent++; end
    if (out_valid && out_ready) begin
      int op;
      op = got / BEATS;
      check(sent >= (op + 1) * BEATS, "no output before the whole array is in");
      for (int e = 0; e < BS; e++) begin
        int o;
        o = (got % BEATS) * BS + e;       // index in the COLS x ROWS result
        check(out_data[e] == X[op][(o % ROWS) * COLS + (o / ROWS)],
              $sformatf("op %0d out[%0d][%0d]", op, o / ROWS, o % ROWS));
      end
      got++;
      last_out = cyc;
    end
  end

  initial begin
    foreach (X[op, i]) X[op][i] = data_t'($urandom);
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    out_ready = 1;
    while (got < BEATS) begin
      @(negedge clk);
      in_valid = sent < BEATS;
      for (int e = 0; e < BS; e++) in_data[e] = X[0][(sent % BEATS) * BS + e];
    end
    check(last_out - first_in + 1 == 2 * BEATS,
          $sformatf("full-rate pass took %0d cycles, expected %0d", last_out - first_in + 1, 2 * BEATS));
    while (got < NOPS * BEATS) begin
      @(negedge clk);
      if (!in_valid || in_fire) in_valid = (sent < NOPS * BEATS) && ($urandom_range(0, 2) != 0);
      for (int e = 0; e < BS; e++) in_data[e] = X[(sent / BEATS) % NOPS][(sent % BEATS) * BS + e];
      out_ready = ($urandom_range(0, 2) != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
