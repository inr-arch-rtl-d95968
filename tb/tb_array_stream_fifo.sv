// tb_array_stream_fifo: self-checking test of the array-stream FIFO.
//
// Phase 1 pushes 400 random blocks with random valid and ready and compares
// every popped block with a queue model; it also checks that the FIFO never
// holds more than DEPTH blocks, that in_ready drops only when it is full,
// and that peak_occ equals the model's largest occupancy. Phase 2 runs with
// valid and ready always high and checks one block per cycle.
module tb_array_stream_fifo;
  localparam int unsigned BS = 2, DW = 32, DEPTH = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [BS-1:0][DW-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] peak_occ;

  array_stream_fifo #(.BS(BS), .DW(DW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [BS-1:0][DW-1:0] model [$];
  int occ = 0, model_peak = 0, sent = 0, got = 0;
  int rate_valid = 1;

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

  // monitor on the clock edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(model.size() > 0 && out_data == model[0], "popped data matches model");
      if (model.size() > 0) void'(model.pop_front());
      got++;
      occ--;
    end
    if (in_valid && in_ready) begin
      model.push_back(in_data);
      sent++;
      occ++;
    end
    if (occ > model_peak) model_peak = occ;
    check(occ <= DEPTH, "occupancy within depth");
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random traffic
    while (sent < 400) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(0, 2) != 0);
        in_data  = {$urandom, $urandom};
      end
      out_ready = ($urandom_range(0, 3) == 0) ? 1'b0 : ($urandom_range(0, 1) == 1);
      // in_ready may only be low when the FIFO is full and not being read
      #1 check(in_ready || (occ == DEPTH && !out_ready), "in_ready low only when full");
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    while (model.size() > 0) @(negedge clk);
    @(negedge clk);
    check(int'(peak_occ) == model_peak, $sformatf("peak_occ %0d vs %0d", peak_occ, model_peak));
    check(model_peak == DEPTH, "random traffic filled the FIFO at least once");
    // phase 2: full rate
    begin
      int start_got, cyc;
      start_got = got;
      in_valid = 1; out_ready = 1;
      for (cyc = 0; cyc < 100; cyc++) begin
        in_data = {$urandom, $urandom};
        @(negedge clk);
      end
      in_valid = 0;
      // 100 pushes; 99 pops in the same window (one cycle latency)
      check(got - start_got >= 99, $sformatf("full rate: %0d pops in 100 cycles", got - start_got));
    end
    repeat (5) @(negedge clk);
    check(model.size() == 0, "all blocks delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
