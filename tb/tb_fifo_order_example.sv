// tb_fifo_order_example: two processes joined by two array_stream_fifo
// instances, A and B, showing how the order of FIFO operations inside each
// process and the FIFO depths together decide deadlock.
//
// The producer writes A0, A1, A2 and then B0. The consumer reads B0 first
// and then A0, A1, A2. B0 can only be written after A2, and A2 can only be
// written once A has room. A has room for A2 only if its depth is at least
// 3, because the consumer reads nothing from A before B0. So:
//   g[0]: depth 2 for A and B. The producer must stall on A2 for ever
//         and the consumer must never get B0.
//   g[1]: A deepened to 3 (B stays at 2). All four elements must arrive
//         in the consumer's order with the right values, and A's observed
//         peak occupancy must be 3.
// Processes are written as clocked behavioural code; each FIFO operation is
// one valid/ready handshake.
module tb_fifo_order_example;
  import inr_pkg::*;
  localparam int unsigned HANG = 200;   // cycles without progress = deadlock
  localparam int unsigned WATCHDOG = 5000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit finished [2];
  bit hung [2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar k = 0; k < 2; k++) begin : g
    localparam int unsigned DA = (k == 0) ? 2 : 3;
    logic a_in_valid, a_in_ready, a_out_valid, a_out_ready;
    logic b_in_valid, b_in_ready, b_out_valid, b_out_ready;
    data_t [0:0] a_in_data, a_out_data, b_in_data, b_out_data;
    logic [$clog2(DA+1)-1:0] a_peak;
    logic [$clog2(3)-1:0]    b_peak;
    int wr = 0;    // producer step: 0..2 = A0..A2, 3 = B0, 4 = done
    int rd = 0;    // consumer step: 0 = B0, 1..3 = A0..A2, 4 = done
    int still = 0;
    data_t got [4];

    array_stream_fifo #(.BS(1), .DW(32), .DEPTH(DA)) u_a (
      .clk, .rst_n,
      .in_valid(a_in_valid), .in_ready(a_in_ready), .in_data(a_in_data),
      .out_valid(a_out_valid), .out_ready(a_out_ready), .out_data(a_out_data),
      .peak_occ(a_peak));
    array_stream_fifo #(.BS(1), .DW(32), .DEPTH(2)) u_b (
      .clk, .rst_n,
      .in_valid(b_in_valid), .in_ready(b_in_ready), .in_data(b_in_data),
      .out_valid(b_out_valid), .out_ready(b_out_ready), .out_data(b_out_data),
      .peak_occ(b_peak));

    // producer: one write per step, in program order
    assign a_in_valid   = rst_n && wr < 3;
    assign a_in_data[0] = data_t'(32'h0A0 + wr);
    assign b_in_valid   = rst_n && wr == 3;
    assign b_in_data[0] = data_t'(32'h0B0);
    // consumer: one read per step, in program order
    assign b_out_ready  = rst_n && rd == 0;
    assign a_out_ready  = rst_n && rd >= 1 && rd <= 3;

    always_ff @(posedge clk) begin
      if (rst_n) begin
        automatic bit moved = 1'b0;
        if ((a_in_valid && a_in_ready) || (b_in_valid && b_in_ready)) begin
          wr <= wr + 1;
          moved = 1'b1;
        end
        if (b_out_valid && b_out_ready) begin
          got[0] <= b_out_data[0];
          rd <= rd + 1;
          moved = 1'b1;
        end
        if (a_out_valid && a_out_ready) begin
          got[rd] <= a_out_data[0];
          rd <= rd + 1;
          moved = 1'b1;
        end
        still <= moved ? 0 : still + 1;
        if (rd == 4) finished[k] <= 1'b1;
        if (still == HANG && rd < 4) hung[k] <= 1'b1;
      end
    end
  end

  initial begin : finish
    wait ((hung[0] || finished[0]) && (hung[1] || finished[1]));
    @(posedge clk);
    // depth 2: deadlock with the producer stuck on A2
    check(hung[0] && !finished[0], "depth 2 did not deadlock");
    check(g[0].wr == 2, $sformatf("depth 2: producer stopped at step %0d, expected 2 (A2)", g[0].wr));
    check(g[0].rd == 0, $sformatf("depth 2: consumer reached step %0d, expected 0 (B0)", g[0].rd));
    check(g[0].a_peak == 2, $sformatf("depth 2: peak occupancy of A %0d", g[0].a_peak));
    // depth 3 on A: completes in order
    check(finished[1] && !hung[1], "depth 3 did not complete");
    check(g[1].got[0] == 32'h0B0, $sformatf("first read %h, expected B0", g[1].got[0]));
    for (int i = 0; i < 3; i++)
      check(g[1].got[i+1] == data_t'(32'h0A0 + i),
            $sformatf("read %0d = %h, expected A%0d", i + 1, g[1].got[i+1], i));
    check(g[1].a_peak == 3, $sformatf("depth 3: peak occupancy of A %0d, expected 3", g[1].a_peak));
    check(g[1].b_peak == 1, $sformatf("depth 3: peak occupancy of B %0d, expected 1", g[1].b_peak));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
