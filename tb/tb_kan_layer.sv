// tb_kan_layer: a 2-input, 3-output layer with <7,3> formats, G=10, S=3 and a
// grid of [-3,3) (span 96 codes, so inputs near the ends clamp). Coefficients
// are loaded at random; for each sample the testbench maps x, evaluates y,
// then changes x (the backward step must use the stored context) and applies
// a random gradient, checking y, dx and all 78 coefficients against a model
// built from the reference grid map, Cox-de Boor tables and rounding.
module tb_kan_layer;
  import kan_ref_pkg::*;

  localparam int IN = 2, OUT = 3, NC = 13, ETA = 4;
  localparam longint LO = -48, HI = 48;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0, clamps = 0, samples = 0;

  always #5 clk = ~clk;

  logic map_en, eval_en, bwd_en, clamp_any, upd_sat, cfg_we;
  logic signed [6:0] x [IN], y [OUT], g [OUT], dx [IN], cfg_wdata, cfg_rdata;
  logic [1:0] cfg_q;
  logic [0:0] cfg_p;
  logic [3:0] cfg_c;

  kan_layer #(.IN(IN), .OUT(OUT), .GRID_LO(LO), .GRID_HI(HI), .ETA(ETA)) dut (
    .clk, .rst_n, .map_en, .x, .eval_en, .y, .bwd_en, .g, .dx, .clamp_any, .upd_sat,
    .cfg_we, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata, .cfg_rdata);

  longint w [OUT][IN][NC];
  longint bt [16][4], dbt [16][4];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kk [IN], uu [IN];
    bit cl;
    big_t acc, wide;
    longint nw [OUT][IN][NC];
    for (int u = 0; u < 16; u++)
      for (int r = 0; r < 4; r++) begin
        bt[u][r]  = lut_b(3, 4, r, u, 4, 7);
        dbt[u][r] = lut_db(3, 4, r, u, 10, 4, HI - LO, 4, 7);
      end
    map_en = 0; eval_en = 0; bwd_en = 0; cfg_we = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0;
    for (int p = 0; p < IN; p++) x[p] = 0;
    for (int q = 0; q < OUT; q++) g[q] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < OUT; q++)
      for (int p = 0; p < IN; p++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          w[q][p][c] = $signed(7'($urandom_range(0, 63) - 32));
          cfg_we = 1; cfg_q = 2'(q); cfg_p = 1'(p); cfg_c = 4'(c); cfg_wdata = 7'(w[q][p][c]);
        end
    @(negedge clk);
    cfg_we = 0;
    for (int it = 0; it < 200; it++) begin
      // map
      @(negedge clk);
      cl = 0;
      for (int p = 0; p < IN; p++) begin
        x[p]  = 7'($urandom);
        kk[p] = grid_k(x[p], LO, HI, 10, 4);
        uu[p] = grid_u(x[p], LO, HI, 10, 4);
        if (grid_clamp(x[p], LO, HI)) cl = 1;
      end
      map_en = 1;
      @(negedge clk);
      map_en = 0;
      check("clamp", clamp_any, cl);
      if (clamp_any) clamps++;
      eval_en = 1;
      @(negedge clk);
      eval_en = 0;
      for (int q = 0; q < OUT; q++) begin
        acc = 0;
        for (int p = 0; p < IN; p++)
          for (int r = 0; r < 4; r++) acc += big_t'(w[q][p][kk[p] + r]) * bt[uu[p]][r];
        check($sformatf("y[%0d]", q), y[q], longint'(rnd_sat(acc, 4, 7)));
      end
      // backward with a different x on the inputs
      for (int p = 0; p < IN; p++) x[p] = 7'($urandom);
      for (int q = 0; q < OUT; q++) g[q] = 7'($urandom);
      bwd_en = 1;
      @(negedge clk);
      bwd_en = 0;
      samples++;
      nw = w;
      for (int p = 0; p < IN; p++) begin
        acc = 0;
        for (int q = 0; q < OUT; q++) begin
          big_t s;
          s = 0;
          for (int r = 0; r < 4; r++) s += big_t'(w[q][p][kk[p] + r]) * dbt[uu[p]][r];
          acc += s * g[q];
          for (int r = 0; r < 4; r++) begin
            wide = big_t'(w[q][p][kk[p] + r]) * 256 - big_t'(ETA) * g[q] * bt[uu[p]][r];
            nw[q][p][kk[p] + r] = longint'(rnd_sat(wide, 8, 7));
          end
        end
        check($sformatf("dx[%0d]", p), dx[p], longint'(rnd_sat(acc, 8, 7)));
      end
      w = nw;
      for (int q = 0; q < OUT; q++)
        for (int p = 0; p < IN; p++)
          for (int c = 0; c < NC; c++) begin
            cfg_q = 2'(q); cfg_p = 1'(p); cfg_c = 4'(c);
            #1;
            check("coef", cfg_rdata, w[q][p][c]);
          end
    end
    checks++;
    if (clamps == 0) begin
      failures++;
      $display("FAIL: clamping never happened");
    end
    $display("samples %0d, clamped samples %0d", samples, clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
