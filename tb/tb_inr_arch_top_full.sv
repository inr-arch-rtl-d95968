// tb_inr_arch_top_full: end-to-end test of the SIREN-layer dataflow
// accelerator at its default size (BATCH=64, IN_F=2, HID=256, P=64, BS=4,
// G_SEL = column 0), the top instantiated without any parameter override.
//
// Runs one complete operation of the layer and its input gradient. It is
// the same test as tb_inr_arch_top, which runs three operations on a
// reduced configuration. The stream inputs X, W, B, U are offered with random valid and the
// outputs Y, G, G_SEL are read with random ready, so that back-pressure
// travels through the whole graph.
//
// Expected values are worked out in the testbench:
//   Z = X*W^T + B exactly as the fixed-point hardware forms it (products
//       floored to 22 fraction bits, sums modulo 2^32);
//   Y must be within 3 LSB of the real sin(Z);
//   G = (U .* cos Z) * W is computed in real arithmetic and must be within
//       4*HID+8 LSB (truncations of the products and of cos Z add up);
//   G_SEL must equal column SEL_IDX of the G the design sends out.
//
// The test also counts, and fails if it never saw, each mechanism of the
// architecture: a stall of an internal stream (producer valid, FIFO full),
// a FIFO filled to its depth, a copy_stream serving its outputs at
// different times, the transpose holding back output until its input was
// complete, both MMs switching from loading to computing, the widening and
// narrowing block-size adapters, and the Select kernel skipping elements.
module tb_inr_arch_top_full;
  import inr_pkg::*;
  import inr_arch_top_pkg::*;
  localparam int unsigned BATCH = 64, IN_F = 2, HID = 256, P = 64, BS = 4, SEL = 0;
  localparam int unsigned NOPS = 1;
  localparam int unsigned WATCHDOG = 400000;
  localparam bit RANDOM_HS = 1;
  localparam int unsigned OUT_READY_PCT = 20;  // chance an output is ready
  localparam real SC = 4194304.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_valid, x_ready, w_valid, w_ready, b_valid, b_ready, u_valid, u_ready;
  logic y_valid, y_ready, g_valid, g_ready, gs_valid, gs_ready;
  data_t x_data, g_data;
  data_t [BS-1:0] w_data, b_data, u_data, y_data, gs_data;
  logic [NUM_STREAMS-1:0][15:0] fifo_peak;

  inr_arch_top dut (.*);

  int checks = 0, failures = 0;
  data_t X [NOPS][BATCH*IN_F];
  data_t W [NOPS][HID*IN_F];
  data_t B [NOPS][BATCH*HID];
  data_t U [NOPS][BATCH*HID];
  data_t Z [NOPS][BATCH*HID];
  real   Gr [NOPS][BATCH*IN_F];
  data_t Gout [NOPS][BATCH*IN_F];
  int xs = 0, ws = 0, bs_ = 0, us = 0, yg = 0, gg = 0, sg = 0, cyc = 0;
  bit xf = 0, wf = 0, bf = 0, uf = 0;
  real worst_y = 0.0, worst_g = 0.0;

  // mechanism counters
  int n_stall = 0, n_full = 0, n_split = 0, n_t_hold = 0, n_mm_compute = 0;
  int n_widen = 0, n_narrow = 0, n_skip = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired (y %0d g %0d gs %0d)", yg, gg, sg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t rnd1();  // uniform in [-1, 1)
    return data_t'($signed($urandom_range(0, 32'h007F_FFFF)) - 32'sh0040_0000);
  endfunction

  // reference model
  task automatic build_reference(int op);
    for (int i = 0; i < BATCH; i++)
      for (int h = 0; h < HID; h++) begin
        logic [31:0] s;
        s = '0;
        for (int k = 0; k < IN_F; k++)
          s += 32'((longint'(X[op][i*IN_F+k]) * longint'(W[op][h*IN_F+k])) >>> 22);
        s += B[op][i*HID+h];
        Z[op][i*HID+h] = data_t'(s);
      end
    for (int i = 0; i < BATCH; i++)
      for (int k = 0; k < IN_F; k++) begin
        real s;
        s = 0.0;
        for (int h = 0; h < HID; h++)
          s += (real'(U[op][i*HID+h]) / SC) * $cos(real'(Z[op][i*HID+h]) / SC) * (real'(W[op][h*IN_F+k]) / SC);
        Gr[op][i*IN_F+k] = s;
      end
  endtask

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    cyc++;
    xf = x_valid && x_ready; wf = w_valid && w_ready;
    bf = b_valid && b_ready; uf = u_valid && u_ready;
    if (xf) xs++;
    if (wf) ws++;
    if (bf) bs_++;
    if (uf) us++;
    if (y_valid && y_ready) begin
      for (int e = 0; e < BS; e++) begin
        int k, op;
        real err;
        k = yg * BS + e; op = k / (BATCH*HID);
        err = real'(y_data[e]) - $sin(real'(Z[op][k % (BATCH*HID)]) / SC) * SC;
        if (err < 0) err = -err;
        if (err > worst_y) worst_y = err;
        check(err <= 3.0, $sformatf("op %0d Y[%0d] err %f LSB", op, k % (BATCH*HID), err));
      end
      yg++;
    end
    if (g_valid && g_ready) begin
      int op, k;
      real err;
      op = gg / (BATCH*IN_F); k = gg % (BATCH*IN_F);
      Gout[op][k] = g_data;
      err = real'(g_data) - Gr[op][k] * SC;
      if (err < 0) err = -err;
      if (err > worst_g) worst_g = err;
      check(err <= real'(4*HID + 8), $sformatf("op %0d G[%0d] = %f, expected %f", op, k, real'(g_data) / SC, Gr[op][k]));
      gg++;
    end
    if (gs_valid && gs_ready) begin
      for (int e = 0; e < BS; e++) begin
        int k, op, r;
        k = sg * BS + e; op = k / BATCH; r = k % BATCH;
        // G_SEL row r: compare with the real reference, and with G once it is out
        check((real'(gs_data[e]) - Gr[op][r*IN_F+SEL] * SC) <= real'(4*HID + 8) &&
              (Gr[op][r*IN_F+SEL] * SC - real'(gs_data[e])) <= real'(4*HID + 8),
              $sformatf("op %0d G_SEL[%0d]", op, r));
        if (gg > op*BATCH*IN_F + r*IN_F + SEL)
          check(gs_data[e] == Gout[op][r*IN_F+SEL], "G_SEL equals the selected column of G");
      end
      sg++;
    end
    // mechanisms
    for (int s = 0; s < NUM_STREAMS; s++)
      if (dut.s_in_valid[s] && !dut.s_in_ready[s] && s != S_X && s != S_W && s != S_B && s != S_U)
        n_stall++;
    if (dut.u_copy_w.done != 0 || dut.u_copy_z.done != 0 || dut.u_copy_g.done != 0) n_split++;
    if (dut.u_t.in_ready && dut.s_out_valid[S_W1] && dut.s_in_ready[S_WT]) n_t_hold++;
    if (dut.u_mm1.state == 1'b0 && dut.u_mm1.a_full && dut.u_mm1.b_full) n_mm_compute++;
    if (dut.u_mm2.state == 1'b0 && dut.u_mm2.a_full && dut.u_mm2.b_full) n_mm_compute++;
    if (dut.s_in_valid[S_XB] && dut.s_in_ready[S_XB]) n_widen++;
    if (dut.s_in_valid[S_GN] && dut.s_in_ready[S_GN]) n_narrow++;
    if (dut.u_sel.in_valid && !dut.u_sel.stall && !dut.u_sel.hit) n_skip++;
  end

  // ---------------- drivers ----------------
  function automatic bit coin();
    return !RANDOM_HS || ($urandom_range(0, 3) != 0);
  endfunction

  initial begin
    for (int op = 0; op < NOPS; op++) begin
      foreach (X[op][i]) X[op][i] = rnd1();
      foreach (W[op][i]) W[op][i] = rnd1();
      foreach (B[op][i]) B[op][i] = rnd1();
      foreach (U[op][i]) U[op][i] = rnd1();
      build_reference(op);
    end
    x_valid = 0; w_valid = 0; b_valid = 0; u_valid = 0;
    y_ready = 0; g_ready = 0; gs_ready = 0;
    x_data = '0; w_data = '0; b_data = '0; u_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (yg < NOPS*BATCH*HID/BS || gg < NOPS*BATCH*IN_F || sg < NOPS*BATCH/BS) begin
      @(negedge clk);
      if (!x_valid || xf) x_valid = (xs < NOPS*BATCH*IN_F) && coin();
      if (!w_valid || wf) w_valid = (ws < NOPS*HID*IN_F/BS) && coin();
      if (!b_valid || bf) b_valid = (bs_ < NOPS*BATCH*HID/BS) && coin();
      if (!u_valid || uf) u_valid = (us < NOPS*BATCH*HID/BS) && coin();
      x_data = X[(xs / (BATCH*IN_F)) % NOPS][xs % (BATCH*IN_F)];
      for (int e = 0; e < BS; e++) begin
        w_data[e] = W[(ws / (HID*IN_F/BS)) % NOPS][(ws % (HID*IN_F/BS)) * BS + e];
        b_data[e] = B[(bs_ / (BATCH*HID/BS)) % NOPS][(bs_ % (BATCH*HID/BS)) * BS + e];
        u_data[e] = U[(us / (BATCH*HID/BS)) % NOPS][(us % (BATCH*HID/BS)) * BS + e];
      end
      y_ready  = !RANDOM_HS || ($urandom_range(0, 99) < OUT_READY_PCT);
      g_ready  = !RANDOM_HS || ($urandom_range(0, 99) < OUT_READY_PCT);
      gs_ready = !RANDOM_HS || ($urandom_range(0, 99) < OUT_READY_PCT);
    end
    // every stream's observed peak must be within its depth (2)
    for (int s = 0; s < NUM_STREAMS; s++) begin
      check(fifo_peak[s] <= 2, $sformatf("stream %0d peak %0d", s, fifo_peak[s]));
      if (fifo_peak[s] == 2) n_full++;
    end
    $display("cycles %0d, worst Y error %f LSB, worst G error %f LSB", cyc, worst_y, worst_g);
    $display("mechanisms: stall %0d, fifo_full %0d, copy_split %0d, t_hold %0d, mm_compute %0d, widen %0d, narrow %0d, select_skip %0d",
             n_stall, n_full, n_split, n_t_hold, n_mm_compute, n_widen, n_narrow, n_skip);
    check(n_stall > 0, "internal stream stall seen");
    check(n_full > 0, "a FIFO reached its depth");
    check(n_split > 0, "copy_stream served outputs at different times");
    check(n_t_hold > 0, "transpose held output until its input was complete");
    check(n_mm_compute == 2 * NOPS, $sformatf("MM load->compute switches %0d, expected %0d", n_mm_compute, 2 * NOPS));
    check(n_widen == NOPS*BATCH*IN_F/BS, "widening adapter produced every X block");
    check(n_narrow == NOPS*BATCH*IN_F, "narrowing adapter produced every G element");
    check(n_skip > 0, "Select skipped unselected elements");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
