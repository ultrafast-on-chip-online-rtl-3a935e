// tb_kan_edge: random coefficients, basis values, slopes and gradients for
// one edge with the default <7,3> formats. Checks the forward sum phi, the
// gradient share gx (old coefficients), that an update changes exactly the
// S+1 active coefficients by -ETA*g*b[r] with convergent rounding and
// saturation, the saturation flag, and that nothing changes without upd_en.
// Two learning rates: 1 code (0.0625) and 12 codes (0.75, saturates often).
module tb_kan_edge;
  import kan_ref_pkg::*;

  localparam int NC = 13;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0, sats = 0, moved = 0;

  always #5 clk = ~clk;

  logic [3:0] k;
  logic signed [6:0] b [4], db [4], g, cw;
  logic [3:0] cc;
  logic upd, cwe;
  logic signed [16:0] phi_a, phi_b;
  logic signed [23:0] gx_a, gx_b;
  logic sat_a, sat_b;
  logic signed [6:0] cr_a, cr_b;

  kan_edge #(.ETA(1)) dut_a (.clk, .rst_n, .k, .b, .db, .phi(phi_a), .upd_en(upd), .g, .gx(gx_a),
    .upd_sat(sat_a), .cfg_we(cwe), .cfg_c(cc), .cfg_wdata(cw), .cfg_rdata(cr_a));
  kan_edge #(.ETA(12)) dut_b (.clk, .rst_n, .k, .b, .db, .phi(phi_b), .upd_en(upd), .g, .gx(gx_b),
    .upd_sat(sat_b), .cfg_we(cwe), .cfg_c(cc), .cfg_wdata(cw), .cfg_rdata(cr_b));

  longint wa [NC], wb [NC];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // reference of one edge: returns phi, gx, and the updated window
  task automatic model(ref longint w [NC], input longint eta, output longint phi,
                       output longint gx, output bit sat, output longint nw [NC]);
    big_t wide, r1, r2;
    phi = 0; gx = 0; sat = 0;
    nw = w;
    for (int r = 0; r < 4; r++) begin
      phi += w[k + r] * b[r];
      gx  += w[k + r] * db[r];
      wide = (big_t'(w[k + r]) * 256) - big_t'(eta) * g * b[r];   // 2^(WF+OF) = 256
      r1 = rnd_sat(wide, 8, 7);
      r2 = rnd_sat(wide, 8, 100);
      if (r1 != r2) sat = 1;
      nw[k + r] = longint'(r1);
    end
    gx = gx * g;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint pa, pb, ga, gb, na [NC], nb [NC];
    bit sa, sb;
    upd = 0; cwe = 0; k = 0; g = 0; cc = 0; cw = 0;
    for (int r = 0; r < 4; r++) begin b[r] = 0; db[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      wa[c] = $signed(7'($urandom));
      wb[c] = wa[c];
      cwe = 1; cc = 4'(c); cw = 7'(wa[c]);
    end
    @(negedge clk);
    cwe = 0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      k = 4'($urandom_range(0, 9));
      for (int r = 0; r < 4; r++) begin
        b[r]  = 7'($urandom_range(0, 16));
        db[r] = 7'($urandom);
      end
      g = 7'($urandom);
      upd = ($urandom_range(0, 3) != 0);
      #1;
      model(wa, 1, pa, ga, sa, na);
      model(wb, 12, pb, gb, sb, nb);
      check("phi_a", phi_a, pa);
      check("phi_b", phi_b, pb);
      check("gx_a", gx_a, ga);
      check("gx_b", gx_b, gb);
      check("sat_a", sat_a, sa);
      check("sat_b", sat_b, sb);
      @(posedge clk);
      if (upd) begin
        if (sb) sats++;
        for (int c = 0; c < NC; c++) if (nb[c] != wb[c]) moved++;
        wa = na;
        wb = nb;
      end
      @(negedge clk);
      upd = 0;
      for (int c = 0; c < NC; c++) begin
        cc = 4'(c);
        #1;
        check("coef_a", cr_a, wa[c]);
        check("coef_b", cr_b, wb[c]);
      end
    end
    checks++;
    if (sats == 0 || moved == 0) begin
      failures++;
      $display("FAIL: no saturation (%0d) or no coefficient change (%0d)", sats, moved);
    end
    $display("saturating updates %0d, coefficient changes %0d", sats, moved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
