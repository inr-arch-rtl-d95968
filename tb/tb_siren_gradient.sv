// tb_siren_gradient: workload test of the first-order input gradient of a
// two-layer SIREN (siren2_graph, two inr_arch_top layers chained), at a
// reduced size: BATCH=16 coordinates, 2 inputs, widths 8 and 4, P=4, BS=2.
//
//   Z1 = X W1^T + B1, Y1 = sin Z1, Z2 = Y1 W2^T + B2, Y2 = sin Z2,
//   G2 = (U2 .* cos Z2) W2,  G1 = (G2 .* cos Z1) W1  (= dL/dX for
//   L = sum(U2 .* Y2)).
//
// Two copies of the graph get the same data with independent random
// handshakes:
//   g[0]: layer 1's stream after the cosine keeps the default depth 2. The
//         graph must deadlock: layer 1 cannot finish Y1 until the cosine
//         branch drains, and the cosine branch drains only into the
//         gradient, which needs all of Y1 first. The test checks that all
//         handshakes stop for IDLE_LIMIT cycles with G1 incomplete.
//   g[1]: that stream holds the whole BATCH x H1 array (BATCH*H1/BS
//         blocks). The graph must finish; Y2 and G1 are compared with a
//         real-arithmetic reference (Y2 within 4*H1+16 LSB, G1 within
//         16*(H1*H2+H1)+64 LSB).
module tb_siren_gradient;
  import inr_pkg::*;
  localparam int unsigned BATCH = 16, IN_F = 2, H1 = 8, H2 = 4, P = 4, BS = 2;
  localparam int unsigned IDLE_LIMIT = 4000;
  localparam int unsigned WATCHDOG = 200000;
  localparam real SC = 4194304.0;
  localparam int unsigned NY = BATCH*H2, NG = BATCH*IN_F;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t X [BATCH*IN_F];
  data_t W1 [H1*IN_F];
  data_t B1 [BATCH*H1];
  data_t W2 [H2*H1];
  data_t B2 [BATCH*H2];
  data_t U2 [BATCH*H2];
  real   Y2r [NY];
  real   G1r [NG];
  bit    done [2];
  bit    stuck [2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic data_t rnd(real amp);  // uniform in [-amp, amp)
    return data_t'($rtoi((($urandom_range(0, 1000000) / 500000.0) - 1.0) * amp * SC));
  endfunction
  function automatic real r(data_t v);
    return $itor(v) / SC;
  endfunction

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus and real-arithmetic reference
  initial begin : stimulus
    real z1 [BATCH][H1];
    real y1 [BATCH][H1];
    real z2 [BATCH][H2];
    real g2 [BATCH][H1];
    foreach (X[i])  X[i]  = rnd(1.0);
    foreach (W1[i]) W1[i] = rnd(1.0);
    foreach (B1[i]) B1[i] = rnd(0.5);
    foreach (W2[i]) W2[i] = rnd(0.5);
    foreach (B2[i]) B2[i] = rnd(0.5);
    foreach (U2[i]) U2[i] = rnd(1.0);
    for (int n = 0; n < BATCH; n++) begin
      for (int h = 0; h < H1; h++) begin
        z1[n][h] = r(B1[n*H1+h]);
        for (int i = 0; i < IN_F; i++) z1[n][h] += r(X[n*IN_F+i]) * r(W1[h*IN_F+i]);
        y1[n][h] = $sin(z1[n][h]);
      end
      for (int o = 0; o < H2; o++) begin
        z2[n][o] = r(B2[n*H2+o]);
        for (int h = 0; h < H1; h++) z2[n][o] += y1[n][h] * r(W2[o*H1+h]);
        Y2r[n*H2+o] = $sin(z2[n][o]);
      end
      for (int h = 0; h < H1; h++) begin
        g2[n][h] = 0.0;
        for (int o = 0; o < H2; o++)
          g2[n][h] += r(U2[n*H2+o]) * $cos(z2[n][o]) * r(W2[o*H1+h]);
      end
      for (int i = 0; i < IN_F; i++) begin
        G1r[n*IN_F+i] = 0.0;
        for (int h = 0; h < H1; h++)
          G1r[n*IN_F+i] += g2[n][h] * $cos(z1[n][h]) * r(W1[h*IN_F+i]);
      end
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
  end

  for (genvar k = 0; k < 2; k++) begin : g
    localparam int unsigned C_DEPTH = (k == 0) ? 2 : BATCH*H1/BS;
    logic x_valid, x_ready, w1_valid, w1_ready, b1_valid, b1_ready;
    logic w2_valid, w2_ready, b2_valid, b2_ready, u2_valid, u2_ready;
    logic y2_valid, y2_ready, g_valid, g_ready;
    data_t [0:0] x_blk;
    data_t g_data;
    data_t [BS-1:0] w1_data, b1_data, w2_data, b2_data, u2_data, y2_data;
    int xs, w1s, b1s, w2s, b2s, u2s;
    int ny = 0, ngo = 0, idle = 0;
    data_t Y2o [NY];
    data_t G1o [NG];

    stream_src #(.N(BATCH*IN_F), .BS(1))  s_x  (.clk, .rst_n, .mem(X),  .valid(x_valid),  .ready(x_ready),  .data(x_blk),   .sent(xs));
    stream_src #(.N(H1*IN_F),    .BS(BS)) s_w1 (.clk, .rst_n, .mem(W1), .valid(w1_valid), .ready(w1_ready), .data(w1_data), .sent(w1s));
    stream_src #(.N(BATCH*H1),   .BS(BS)) s_b1 (.clk, .rst_n, .mem(B1), .valid(b1_valid), .ready(b1_ready), .data(b1_data), .sent(b1s));
    stream_src #(.N(H2*H1),      .BS(BS)) s_w2 (.clk, .rst_n, .mem(W2), .valid(w2_valid), .ready(w2_ready), .data(w2_data), .sent(w2s));
    stream_src #(.N(BATCH*H2),   .BS(BS)) s_b2 (.clk, .rst_n, .mem(B2), .valid(b2_valid), .ready(b2_ready), .data(b2_data), .sent(b2s));
    stream_src #(.N(BATCH*H2),   .BS(BS)) s_u2 (.clk, .rst_n, .mem(U2), .valid(u2_valid), .ready(u2_ready), .data(u2_data), .sent(u2s));

    siren2_graph #(.BATCH(BATCH), .IN_F(IN_F), .H1(H1), .H2(H2), .P(P), .BS(BS),
                   .C_DEPTH(C_DEPTH)) dut (
      .clk, .rst_n,
      .x_valid, .x_ready, .x_data(x_blk[0]),
      .w1_valid, .w1_ready, .w1_data, .b1_valid, .b1_ready, .b1_data,
      .w2_valid, .w2_ready, .w2_data, .b2_valid, .b2_ready, .b2_data,
      .u2_valid, .u2_ready, .u2_data,
      .y2_valid, .y2_ready, .y2_data,
      .g_valid, .g_ready, .g_data);

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        y2_ready <= 1'b0;
        g_ready  <= 1'b0;
      end else begin
        y2_ready <= ($urandom_range(0, 99) < 70);
        g_ready  <= ($urandom_range(0, 99) < 70);
        if (y2_valid && y2_ready) begin
          for (int e = 0; e < BS; e++) Y2o[ny*BS+e] <= y2_data[e];
          ny <= ny + 1;
        end
        if (g_valid && g_ready) begin
          G1o[ngo] <= g_data;
          ngo <= ngo + 1;
        end
        if ((x_valid && x_ready) || (w1_valid && w1_ready) || (b1_valid && b1_ready) ||
            (w2_valid && w2_ready) || (b2_valid && b2_ready) || (u2_valid && u2_ready) ||
            (y2_valid && y2_ready) || (g_valid && g_ready))
          idle <= 0;
        else
          idle <= idle + 1;
        if (ngo == NG) done[k] <= 1'b1;
        if (idle == IDLE_LIMIT && ngo < NG) stuck[k] <= 1'b1;
      end
    end
  end

  initial begin : finish
    real err, worst_y, worst_g;
    wait (rst_n);
    wait ((done[1] || stuck[1]) && (done[0] || stuck[0]));
    repeat (2) @(posedge clk);
    // depth 2: deadlock
    check(stuck[0] && !done[0], "graph with depth-2 cosine stream did not deadlock");
    check(g[0].ngo == 0, $sformatf("deadlocked graph still produced %0d G1 elements", g[0].ngo));
    $display("depth %0d: stopped with %0d/%0d Y2 blocks, %0d/%0d G1 elements, %0d/%0d X elements taken",
             2, g[0].ny, NY/BS, g[0].ngo, NG, g[0].xs, BATCH*IN_F);
    // sized depth: complete and correct
    check(done[1] && !stuck[1], "graph with sized cosine stream did not finish");
    check(g[1].ny == NY/BS, $sformatf("Y2 blocks %0d, expected %0d", g[1].ny, NY/BS));
    worst_y = 0.0; worst_g = 0.0;
    for (int i = 0; i < NY; i++) begin
      err = r(g[1].Y2o[i]) - Y2r[i];
      if (err < 0) err = -err;
      if (err > worst_y) worst_y = err;
      check(err * SC <= 4.0*H1 + 16.0,
            $sformatf("Y2[%0d] = %f, expected %f", i, r(g[1].Y2o[i]), Y2r[i]));
    end
    for (int i = 0; i < NG; i++) begin
      err = r(g[1].G1o[i]) - G1r[i];
      if (err < 0) err = -err;
      if (err > worst_g) worst_g = err;
      check(err * SC <= 16.0*(H1*H2 + H1) + 64.0,
            $sformatf("G1[%0d] = %f, expected %f", i, r(g[1].G1o[i]), G1r[i]));
    end
    $display("depth %0d: finished, worst error Y2 %0.1f LSB, G1 %0.1f LSB",
             BATCH*H1/BS, worst_y*SC, worst_g*SC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
