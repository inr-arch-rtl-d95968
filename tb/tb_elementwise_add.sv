// tb_elementwise_add: self-checking test of the elementwise add kernel.
//
// Random Q10.22 operands (including sums that overflow and wrap) are sent
// with random valid on both inputs and random ready on the output. Each
// output lane is compared with the sum computed in 64-bit integers and
// wrapped to 32 bits, and with the real-valued sum when no wrap occurs. A
// second phase with all handshakes high checks one block per cycle.
module tb_elementwise_add;
  import inr_pkg::*;
  localparam int unsigned BS = 4, NBLK = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  data_t [BS-1:0] a_data, b_data, out_data;

  elementwise_add #(.BS(BS)) dut (.*);

  int checks = 0, failures = 0;
  data_t [BS-1:0] a_q [$], b_q [$];
  int a_sent = 0, b_sent = 0, got = 0;

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

  function automatic data_t rnd();
    // mostly small values, sometimes full range to exercise wrap-around
    if ($urandom_range(0, 7) == 0) return data_t'($urandom);
    return data_t'($signed($urandom_range(0, 32'h3FFF_FFFF)) - 32'sh2000_0000);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (a_valid && a_ready) begin a_q.push_back(a_data); a_sent++; end
    if (b_valid && b_ready) begin b_q.push_back(b_data); b_sent++; end
    if (out_valid && out_ready) begin
      data_t [BS-1:0] ea, eb;
      ea = a_q.pop_front(); eb = b_q.pop_front();
      for (int i = 0; i < BS; i++) begin
        longint s;
        real    r;
        s = longint'(ea[i]) + longint'(eb[i]);
        check(out_data[i] == data_t'(s), $sformatf("blk %0d lane %0d: %h + %h -> %h", got, i, ea[i], eb[i], out_data[i]));
        if (s >= -(64'sd1 <<< 31) && s < (64'sd1 <<< 31)) begin
          r = real'(ea[i]) / 4194304.0 + real'(eb[i]) / 4194304.0;
          check(real'(out_data[i]) / 4194304.0 == r, "sum equals real-valued sum");
        end
      end
      got++;
    end
  end

  initial begin
    a_valid = 0; b_valid = 0; out_ready = 0;
    a_data = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < NBLK) begin
      @(negedge clk);
      if (!(a_valid && !a_ready)) begin
        a_valid = (a_sent < NBLK) && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < BS; i++) a_data[i] = rnd();
      end
      if (!(b_valid && !b_ready)) begin
        b_valid = (b_sent < NBLK) && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < BS; i++) b_data[i] = rnd();
      end
      out_ready = ($urandom_range(0, 3) != 0);
    end
    @(negedge clk);
    a_valid = 0; b_valid = 0;
    // full-rate phase: 50 blocks must take 51 cycles
    begin
      int t0, n0;
      n0 = got;
      out_ready = 1;
      a_valid = 1; b_valid = 1;
      t0 = 0;
      while (got < n0 + 50) begin
        for (int i = 0; i < BS; i++) begin a_data[i] = rnd(); b_data[i] = rnd(); end
        if (a_sent - n0 >= 50) begin a_valid = 0; b_valid = 0; end
        @(negedge clk);
        t0++;
      end
      check(t0 == 51, $sformatf("50 blocks took %0d cycles, expected 51", t0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
