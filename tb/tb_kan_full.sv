// tb_kan_full: the kernel at its default parameters ([2,7,1], G=10, S=3,
// <7,3>, learning rate 0.05, grid [-4,4) = the whole input range), run for
// 2000 samples. Same checks as tb_kan_online_top; clamping cannot occur here
// because the grid spans every representable input, so it is not required. Coefficients start at small random values loaded
// through the host port. The testbench streams random IQ-like inputs,
// compares each prediction with a bit-exact model, returns the feedback
// dL/dy = y - target for a target of +-1 (XOR of the signs of the inputs),
// with a few coefficients of the output layer starting at the format limits,
// and checks the input gradient and, every 16 samples, all 273
// coefficients. It counts and requires each mechanism: forward pass,
// update, zero_grad (no update), coefficient saturation,
// and a non-zero gradient reaching the first layer. The forward and
// backward latencies are checked in cycles against the schedule and against
// the paper's figures for this configuration (80 ns / 60 ns = 16 / 12 cycles
// at 200 MHz).
module tb_kan_full;
  import kan_ref_pkg::*;

  localparam int D0 = 2, D1 = 7, D2 = 1, NC = 13, ETA = 1, NS = 2000;
  localparam longint LO = -64, HI = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_upd = 0, n_skip = 0, n_clamp = 0, n_sat = 0, n_hid = 0;
  int m_sat = 0;

  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, fb_valid, fb_ready, zero_grad;
  logic signed [6:0] in_x [D0], out_y [D2], fb_grad [D2], in_grad [D0];
  logic cfg_we, cfg_layer;
  logic [2:0] cfg_q, cfg_p;
  logic [3:0] cfg_c;
  logic signed [6:0] cfg_wdata, cfg_rdata;
  logic ev_clamp, ev_sat;

  kan_online_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .fb_valid, .fb_ready,
    .fb_grad, .zero_grad, .in_grad, .cfg_we, .cfg_layer, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata,
    .cfg_rdata, .ev_clamp, .ev_sat);

  always @(posedge clk) begin
    if (ev_clamp) n_clamp++;
    if (ev_sat) n_sat++;
  end

  longint w0 [D1][D0][NC], w1 [D2][D1][NC];
  longint bt [16][4], dbt [16][4];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(bit layer, int q, int p, int c, longint v);
    @(negedge clk);
    cfg_we = 1; cfg_layer = layer; cfg_q = 3'(q); cfg_p = 3'(p); cfg_c = 4'(c);
    cfg_wdata = 7'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic compare_all();
    for (int q = 0; q < D1; q++)
      for (int p = 0; p < D0; p++)
        for (int c = 0; c < NC; c++) begin
          cfg_layer = 0; cfg_q = 3'(q); cfg_p = 3'(p); cfg_c = 4'(c);
          #1;
          check("layer0 coef", cfg_rdata, w0[q][p][c]);
        end
    for (int p = 0; p < D1; p++)
      for (int c = 0; c < NC; c++) begin
        cfg_layer = 1; cfg_q = 0; cfg_p = 3'(p); cfg_c = 4'(c);
        #1;
        check("layer1 coef", cfg_rdata, w1[0][p][c]);
      end
  endtask

  initial begin
    int k0 [D0], u0 [D0], k1 [D1], u1 [D1];
    longint h [D1], y, gy, gh [D1], tgt;
    big_t acc, s, wide;
    int lat;
    bit zg;
    for (int u = 0; u < 16; u++)
      for (int r = 0; r < 4; r++) begin
        bt[u][r]  = lut_b(3, 4, r, u, 4, 7);
        dbt[u][r] = lut_db(3, 4, r, u, 10, 4, HI - LO, 4, 7);
      end
    in_valid = 0; fb_valid = 0; zero_grad = 0; cfg_we = 0; cfg_layer = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0;
    for (int p = 0; p < D0; p++) in_x[p] = 0;
    fb_grad[0] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < D1; q++)
      for (int p = 0; p < D0; p++)
        for (int c = 0; c < NC; c++) begin
          w0[q][p][c] = $urandom_range(0, 8) - 4;
          load(0, q, p, c, w0[q][p][c]);
        end
    for (int p = 0; p < D1; p++)
      for (int c = 0; c < NC; c++) begin
        w1[0][p][c] = $urandom_range(0, 8) - 4;
        if (p == 0 && c >= 4 && c <= 8) w1[0][p][c] = (c % 2 == 0) ? 63 : -64;   // at the limits
        load(1, 0, p, c, w1[0][p][c]);
      end
    compare_all();

    for (int t = 0; t < NS; t++) begin
      // ---- input
      repeat ($urandom_range(0, 2)) @(negedge clk);
      for (int p = 0; p < D0; p++) in_x[p] = 7'($urandom);
      in_valid = 1;
      #1;
      check("in_ready", in_ready, 1);
      for (int p = 0; p < D0; p++) begin
        k0[p] = grid_k(in_x[p], LO, HI, 10, 4);
        u0[p] = grid_u(in_x[p], LO, HI, 10, 4);
      end
      tgt = ((in_x[0] < 0) != (in_x[1] < 0)) ? 16 : -16;   // +-1.0
      @(negedge clk);
      in_valid = 0;
      for (int p = 0; p < D0; p++) in_x[p] = 7'($urandom);   // inputs are not held
      lat = 0;
      while (!out_valid && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      n_fwd++;
      check("forward latency (cycles after handshake)", lat, 3);
      checks++;
      if (lat + 1 > 16) begin
        failures++;
        $display("FAIL forward slower than the paper's 16 cycles");
      end
      // ---- model forward
      for (int q = 0; q < D1; q++) begin
        acc = 0;
        for (int p = 0; p < D0; p++)
          for (int r = 0; r < 4; r++) acc += big_t'(w0[q][p][k0[p] + r]) * bt[u0[p]][r];
        h[q]  = longint'(rnd_sat(acc, 4, 7));
        k1[q] = grid_k(h[q], LO, HI, 10, 4);
        u1[q] = grid_u(h[q], LO, HI, 10, 4);
      end
      acc = 0;
      for (int p = 0; p < D1; p++)
        for (int r = 0; r < 4; r++) acc += big_t'(w1[0][p][k1[p] + r]) * bt[u1[p]][r];
      y = longint'(rnd_sat(acc, 4, 7));
      check("prediction", out_y[0], y);
      // ---- feedback
      repeat ($urandom_range(0, 2)) @(negedge clk);
      check("prediction held", out_y[0], y);
      gy = longint'(rnd_sat(big_t'(y - tgt), 0, 7));
      if (t % 50 == 49) gy = (t % 100 == 49) ? 63 : -64;   // occasional large error
      zg = ($urandom_range(0, 9) == 0);
      fb_grad[0] = 7'(gy);
      zero_grad = zg;
      fb_valid = 1;
      #1;
      check("fb_ready", fb_ready, 1);
      @(negedge clk);
      fb_valid = 0;
      zero_grad = 0;
      lat = 1;
      while (!in_ready && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      check("backward latency (cycles incl. handshake)", lat, zg ? 1 : 2);
      checks++;
      if (lat > 12) begin
        failures++;
        $display("FAIL backward slower than the paper's 12 cycles");
      end
      if (zg) begin
        n_skip++;
      end else begin
        longint nw1 [D2][D1][NC], nw0 [D1][D0][NC];
        bit hid;
        n_upd++;
        nw1 = w1;
        for (int p = 0; p < D1; p++) begin
          s = 0;
          for (int r = 0; r < 4; r++) begin
            s += big_t'(w1[0][p][k1[p] + r]) * dbt[u1[p]][r];
            wide = big_t'(w1[0][p][k1[p] + r]) * 256 - big_t'(ETA) * gy * bt[u1[p]][r];
            nw1[0][p][k1[p] + r] = longint'(rnd_sat(wide, 8, 7));
            if (rnd_sat(wide, 8, 7) != rnd_sat(wide, 8, 100)) m_sat++;
          end
          gh[p] = longint'(rnd_sat(s * gy, 8, 7));
        end
        w1 = nw1;
        nw0 = w0;
        hid = 0;
        for (int p = 0; p < D0; p++) begin
          acc = 0;
          for (int q = 0; q < D1; q++) begin
            s = 0;
            for (int r = 0; r < 4; r++) begin
              s += big_t'(w0[q][p][k0[p] + r]) * dbt[u0[p]][r];
              wide = big_t'(w0[q][p][k0[p] + r]) * 256 - big_t'(ETA) * gh[q] * bt[u0[p]][r];
              nw0[q][p][k0[p] + r] = longint'(rnd_sat(wide, 8, 7));
              if (nw0[q][p][k0[p] + r] != w0[q][p][k0[p] + r]) hid = 1;
              if (rnd_sat(wide, 8, 7) != rnd_sat(wide, 8, 100)) m_sat++;
            end
            acc += s * gh[q];
          end
          check("input gradient", in_grad[p], longint'(rnd_sat(acc, 8, 7)));
        end
        w0 = nw0;
        if (hid) n_hid++;
      end
      if (t % 16 == 15 || t == NS - 1) compare_all();
    end
    repeat (2) @(negedge clk);
    $display("forward %0d, updates %0d, zero_grad %0d, clamp events %0d, saturation events %0d (model %0d), first-layer updates %0d",
             n_fwd, n_upd, n_skip, n_clamp, n_sat, m_sat, n_hid);
    checks++;
    if (n_fwd == 0 || n_upd == 0 || n_skip == 0 || n_clamp != 0 || n_sat == 0 || n_hid == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    checks++;
    if ((n_sat == 0) != (m_sat == 0)) begin
      failures++;
      $display("FAIL: saturation events disagree with the model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
