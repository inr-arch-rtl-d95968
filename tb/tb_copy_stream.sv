// tb_copy_stream: self-checking test of the 1:N copy kernel (N_OUT = 3).
//
// Random blocks enter with random valid; each output has its own random
// ready. Every output must deliver exactly the input sequence, in order,
// each block once. The test also checks that no output runs more than one
// block ahead of the slowest one (the copy does not buffer), counts the
// cycles where outputs were served at different times, and checks that with
// all outputs ready the copy passes one block per cycle.
module tb_copy_stream;
  localparam int unsigned BS = 2, DW = 32, N_OUT = 3, NBLK = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready;
  logic [BS-1:0][DW-1:0] in_data;
  logic [N_OUT-1:0] out_valid, out_ready;
  logic [N_OUT-1:0][BS-1:0][DW-1:0] out_data;

  copy_stream #(.BS(BS), .DW(DW), .N_OUT(N_OUT)) dut (.*);

  int checks = 0, failures = 0;
  logic [BS-1:0][DW-1:0] sent_q [$];
  int sent = 0, got [N_OUT], split = 0;
  bit in_fire = 0;  // the input block was consumed at the last edge

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
    int fired;
    fired = 0;
    in_fire = in_valid && in_ready;
    if (in_fire) begin sent_q.push_back(in_data); sent++; end
    for (int o = 0; o < N_OUT; o++)
      if (out_valid[o] && out_ready[o]) begin
        // the block offered now is the next one after those already consumed
        check(out_data[o] == ((got[o] < sent_q.size()) ? sent_q[got[o]] : in_data),
              $sformatf("output %0d block %0d", o, got[o]));
        check(got[o] <= sent, "output at most one block ahead of the input");
        got[o]++;
        fired++;
      end
    if (fired != 0 && fired != N_OUT && in_valid) split++;
  end

  initial begin
    for (int o = 0; o < N_OUT; o++) got[o] = 0;
    in_valid = 0; out_ready = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got[0] < NBLK || got[1] < NBLK || got[2] < NBLK) begin
      @(negedge clk);
      if (!in_valid || in_fire) begin
        in_valid = (sent < NBLK) && ($urandom_range(0, 3) != 0);
        in_data  = {$urandom, $urandom};
      end
      for (int o = 0; o < N_OUT; o++) out_ready[o] = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk);
    in_valid = 0; out_ready = '1;
    repeat (3) @(negedge clk);
    for (int o = 0; o < N_OUT; o++)
      check(got[o] == NBLK, $sformatf("output %0d delivered %0d of %0d", o, got[o], NBLK));
    check(split > 0, "outputs were served at different times");
    // full rate
    begin
      int n0;
      n0 = sent;
      in_valid = 1;
      repeat (50) begin in_data = {$urandom, $urandom}; @(negedge clk); end
      in_valid = 0;
      check(sent - n0 == 50, $sformatf("%0d blocks in 50 cycles", sent - n0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
