// tb_block_size_adapter: self-checking test of the block size adapter.
//
// Two instances are chained: the first widens blocks of 1 element to blocks
// of 4, the second narrows them back to blocks of 2. A random element
// sequence with random valid and ready goes in; the test checks every wide
// block (element 0 is the earliest element) and the element order at the
// end of the chain. A full-rate phase checks that the widening stage takes
// one input per cycle and that the narrowing stage gives one block per
// cycle.
module tb_block_size_adapter;
  import inr_pkg::*;
  localparam int unsigned NEL = 800;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, mid_valid, mid_ready, out_valid, out_ready;
  data_t [0:0] in_data;
  data_t [3:0] mid_data;
  data_t [1:0] out_data;

  block_size_adapter #(.BS_IN(1), .BS_OUT(4)) u_widen (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(mid_valid), .out_ready(mid_ready), .out_data(mid_data));
  block_size_adapter #(.BS_IN(4), .BS_OUT(2)) u_narrow (
    .clk, .rst_n, .in_valid(mid_valid), .in_ready(mid_ready), .in_data(mid_data),
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  data_t seq [$];
  int sent = 0, mid_got = 0, got = 0;

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
    if (in_valid && in_ready) begin seq.push_back(in_data[0]); sent++; end
    if (mid_valid && mid_ready) begin
      for (int e = 0; e < 4; e++)
        check(mid_data[e] == seq[mid_got * 4 + e], $sformatf("wide block %0d element %0d", mid_got, e));
      mid_got++;
    end
    if (out_valid && out_ready) begin
      for (int e = 0; e < 2; e++)
        check(out_data[e] == seq[got * 2 + e], $sformatf("narrow block %0d element %0d", got, e));
      got++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (sent < NEL) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_data[0] = data_t'($urandom);
      end
      out_ready = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    check(got == NEL / 2, $sformatf("%0d narrow blocks, expected %0d", got, NEL / 2));
    // full rate: 80 elements in 80 cycles, 40 narrow blocks soon after
    begin
      int n0, g0, t;
      n0 = sent; g0 = got; t = 0;
      in_valid = 1;
      while (got < g0 + 40) begin
        in_data[0] = data_t'($urandom);
        if (sent - n0 >= 80) in_valid = 0;
        @(negedge clk);
        t++;
      end
      check(sent - n0 == 80, "80 elements accepted");
      check(t <= 80 + 3, $sformatf("80 elements passed in %0d cycles", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
