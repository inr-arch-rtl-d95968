// tb_dim_select: self-checking test of the Select kernel.
//
// Two instances read the same 8 x 6 array stream (BS = 2): one selects
// column 3 (DIM = 1, 8 elements out), the other row 5 (DIM = 0, 6 elements
// out). Arrays are sent three times with random valid and ready; every
// output element is compared with the array element at the selected
// position. Timing: an input block occupies the kernel for BS cycles.
module tb_dim_select;
  import inr_pkg::*;
  localparam int unsigned ROWS = 8, COLS = 6, BS = 2, NOPS = 3;
  localparam int unsigned BEATS = ROWS * COLS / BS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready_c, in_ready_r, c_valid, c_ready, r_valid, r_ready;
  data_t [BS-1:0] in_data, c_data, r_data;
  // the row selector gets its own copy of the input stream
  logic in_valid_r;
  data_t [BS-1:0] in_data_r;

  dim_select #(.ROWS(ROWS), .COLS(COLS), .DIM(1), .IDX(3), .BS(BS)) u_col (
    .clk, .rst_n, .in_valid, .in_ready(in_ready_c), .in_data,
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data));
  dim_select #(.ROWS(ROWS), .COLS(COLS), .DIM(0), .IDX(5), .BS(BS)) u_row (
    .clk, .rst_n, .in_valid(in_valid_r), .in_ready(in_ready_r), .in_data(in_data_r),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data));

  int checks = 0, failures = 0;
  data_t X [NOPS][ROWS*COLS];
  int sent_c = 0, sent_r = 0, got_c = 0, got_r = 0, cyc = 0, busy = 0;
  bit fire_c = 0, fire_r = 0;

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
    fire_c = in_valid && in_ready_c;
    fire_r = in_valid_r && in_ready_r;
    if (fire_c) sent_c++;
    if (fire_r) sent_r++;
    if (c_valid && c_ready) begin
      for (int e = 0; e < BS; e++) begin
        int k, op;
        k = got_c * BS + e; op = k / ROWS;
        check(c_data[e] == X[op][(k % ROWS) * COLS + 3], $sformatf("column element %0d", k));
      end
      got_c++;
    end
    if (r_valid && r_ready) begin
      for (int e = 0; e < BS; e++) begin
        int k, op;
        k = got_r * BS + e; op = k / COLS;
        check(r_data[e] == X[op][5 * COLS + (k % COLS)], $sformatf("row element %0d", k));
      end
      got_r++;
    end
  end

  initial begin
    foreach (X[op, i]) X[op][i] = data_t'($urandom);
    in_valid = 0; in_valid_r = 0; c_ready = 0; r_ready = 0; in_data = '0; in_data_r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one block at full rate: it must be taken on the BS-th cycle
    c_ready = 1; r_ready = 1;
    @(negedge clk);
    in_valid = 1;
    for (int e = 0; e < BS; e++) in_data[e] = X[0][e];
    while (!fire_c) begin @(negedge clk); busy++; end
    in_valid = 0;
    check(busy == BS, $sformatf("one block took %0d cycles, expected %0d", busy, BS));
    while (got_c < NOPS * ROWS / BS || got_r < NOPS * COLS / BS) begin
      @(negedge clk);
      if (!in_valid || fire_c) in_valid = (sent_c < NOPS * BEATS) && ($urandom_range(0, 2) != 0);
      if (!in_valid_r || fire_r) in_valid_r = (sent_r < NOPS * BEATS) && ($urandom_range(0, 2) != 0);
      for (int e = 0; e < BS; e++) begin
        in_data[e]   = X[(sent_c / BEATS) % NOPS][(sent_c % BEATS) * BS + e];
        in_data_r[e] = X[(sent_r / BEATS) % NOPS][(sent_r % BEATS) * BS + e];
      end
      c_ready = ($urandom_range(0, 2) != 0);
      r_ready = ($urandom_range(0, 2) != 0);
    end
    check(got_c == NOPS * ROWS / BS && got_r == NOPS * COLS / BS, "all selected blocks delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
