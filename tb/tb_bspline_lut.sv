// tb_bspline_lut: compares every entry of the basis table with values from
// the Cox-de Boor recursion, for the default cubic table (G=10, span 8.0,
// <7,3>) and for a linear table in a wide format (S=1, G=5, <22,8>, span
// 256.0). Also checks that the cubic values sum to about 1 in every bin
// (partition of unity, within rounding).
module tb_bspline_lut;
  import kan_ref_pkg::*;

  logic [3:0] u0;
  logic [2:0] u1;
  logic signed [6:0]  b0 [4], db0 [4];
  logic signed [21:0] b1 [2], db1 [2];
  int checks = 0, failures = 0;

  bspline_lut dut0 (.u(u0), .b(b0), .db(db0));
  bspline_lut #(.S(1), .F(3), .WW(22), .WF(14), .G(5), .XF(14), .SPAN(longint'(256) << 14)) dut1 (
    .u(u1), .b(b1), .db(db1));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum;
    for (int u = 0; u < 16; u++) begin
      u0 = 4'(u);
      #1;
      sum = 0;
      for (int r = 0; r < 4; r++) begin
        check($sformatf("b[%0d] u=%0d", r, u), b0[r], lut_b(3, 4, r, u, 4, 7));
        check($sformatf("db[%0d] u=%0d", r, u), db0[r], lut_db(3, 4, r, u, 10, 4, 128, 4, 7));
        sum += int'(b0[r]);
      end
      checks++;
      if (sum < 14 || sum > 18) begin
        failures++;
        $display("FAIL partition of unity u=%0d sum=%0d", u, sum);
      end
    end
    for (int u = 0; u < 8; u++) begin
      u1 = 3'(u);
      #1;
      for (int r = 0; r < 2; r++) begin
        check($sformatf("lin b[%0d] u=%0d", r, u), b1[r], lut_b(1, 3, r, u, 14, 22));
        check($sformatf("lin db[%0d] u=%0d", r, u), db1[r],
              lut_db(1, 3, r, u, 5, 14, longint'(256) << 14, 14, 22));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
