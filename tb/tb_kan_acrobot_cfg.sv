// tb_kan_acrobot_cfg: the kernel in the actor-critic configuration used for
// Acrobot control: one layer [6,4] (three action logits and a state value),
// G=5, linear splines (S=1), <22,8> for all formats, learning rate 1e-3
// (code 16 with 14 fractional bits), grid [-8,8). The control environment
// and the policy/advantage arithmetic lie outside the kernel, so the stream
// here is random 6-D states and random per-output feedback; every
// prediction, input gradient and, every 8 steps, all 144 coefficients are
// compared with a bit-exact model. Checks the one-layer schedule
// (1 + 1 cycles forward, 1 cycle backward) against the paper's 35 ns + 35 ns
// (7 + 7 cycles at 200 MHz).
module tb_kan_acrobot_cfg;
  import kan_ref_pkg::*;

  localparam int DI = 6, DO = 4, G = 5, S = 1, NC = G + S, F = 4, W = 22, FR = 14;
  localparam longint ETA = 16;
  localparam longint LO = -(longint'(8) << FR), HI = longint'(8) << FR;
  localparam int NS = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0, n_clamp = 0;

  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, fb_valid, fb_ready, zero_grad;
  logic signed [W-1:0] in_x [DI], out_y [DO], fb_grad [DO], in_grad [DI];
  logic cfg_we, cfg_layer;
  logic [2:0] cfg_q, cfg_p;
  logic [2:0] cfg_c;
  logic signed [W-1:0] cfg_wdata, cfg_rdata;
  logic ev_clamp, ev_sat;

  kan_online_top #(
    .D_IN(DI), .D_HID(1), .D_OUT(DO), .NUM_LAYERS(1), .G(G), .S(S), .F(F),
    .XW(W), .XI(8), .WW(W), .WI(8), .OW(W), .OI(8), .ETA(0.001), .GRID_MIN(-8.0), .GRID_MAX(8.0)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .fb_valid, .fb_ready,
    .fb_grad, .zero_grad, .in_grad, .cfg_we, .cfg_layer, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata,
    .cfg_rdata, .ev_clamp, .ev_sat);

  always @(posedge clk) if (ev_clamp) n_clamp++;

  longint w [DO][DI][NC];
  longint bt [16][2], dbt [16][2];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic compare_all();
    for (int q = 0; q < DO; q++)
      for (int p = 0; p < DI; p++)
        for (int c = 0; c < NC; c++) begin
          cfg_q = 3'(q); cfg_p = 3'(p); cfg_c = 3'(c);
          #1;
          check("coef", cfg_rdata, w[q][p][c]);
        end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k [DI], u [DI], lat;
    longint gq [DO];
    big_t acc, s, wide;
    for (int uu = 0; uu < 16; uu++)
      for (int r = 0; r < 2; r++) begin
        bt[uu][r]  = lut_b(S, F, r, uu, FR, W);
        dbt[uu][r] = lut_db(S, F, r, uu, G, FR, HI - LO, FR, W);
      end
    in_valid = 0; fb_valid = 0; zero_grad = 0; cfg_we = 0; cfg_layer = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0;
    for (int p = 0; p < DI; p++) in_x[p] = 0;
    for (int q = 0; q < DO; q++) fb_grad[q] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < DO; q++)
      for (int p = 0; p < DI; p++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          w[q][p][c] = longint'($urandom_range(0, 1 << 13)) - (1 << 12);   // +-0.25
          cfg_we = 1; cfg_q = 3'(q); cfg_p = 3'(p); cfg_c = 3'(c); cfg_wdata = W'(w[q][p][c]);
        end
    @(negedge clk);
    cfg_we = 0;
    compare_all();
    for (int t = 0; t < NS; t++) begin
      @(negedge clk);
      // cos/sin of two angles in [-1,1], two angular velocities up to +-12
      for (int p = 0; p < DI; p++) begin
        if (p < 4) in_x[p] = W'(longint'($urandom_range(0, 1 << 15)) - (1 << 14));
        else       in_x[p] = W'(longint'($urandom_range(0, 24 << 14)) - (12 << 14));
        k[p] = grid_k(in_x[p], LO, HI, G, F);
        u[p] = grid_u(in_x[p], LO, HI, G, F);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!out_valid) begin
        @(negedge clk);
        lat++;
      end
      check("forward cycles", lat, 2);
      check("forward within 35 ns", lat <= 7, 1);
      for (int q = 0; q < DO; q++) begin
        acc = 0;
        for (int p = 0; p < DI; p++)
          for (int r = 0; r <= S; r++) acc += big_t'(w[q][p][k[p] + r]) * bt[u[p]][r];
        check("prediction", out_y[q], longint'(rnd_sat(acc, FR, W)));
      end
      for (int q = 0; q < DO; q++) begin
        gq[q] = longint'($urandom_range(0, 1 << 16)) - (1 << 15);   // +-2.0
        fb_grad[q] = W'(gq[q]);
      end
      fb_valid = 1;
      @(negedge clk);
      fb_valid = 0;
      lat = 1;
      while (!in_ready) begin
        @(negedge clk);
        lat++;
      end
      check("backward cycles", lat, 1);
      for (int p = 0; p < DI; p++) begin
        acc = 0;
        for (int q = 0; q < DO; q++) begin
          s = 0;
          for (int r = 0; r <= S; r++) begin
            s += big_t'(w[q][p][k[p] + r]) * dbt[u[p]][r];
            wide = (big_t'(w[q][p][k[p] + r]) <<< (2 * FR)) - big_t'(ETA) * gq[q] * bt[u[p]][r];
            w[q][p][k[p] + r] = longint'(rnd_sat(wide, 2 * FR, W));
          end
          acc += s * gq[q];
        end
        check("input gradient", in_grad[p], longint'(rnd_sat(acc, 2 * FR, W)));
      end
      if (t % 8 == 7) compare_all();
    end
    $display("samples %0d, clamp events %0d", NS, n_clamp);
    check("clamping exercised", n_clamp > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
