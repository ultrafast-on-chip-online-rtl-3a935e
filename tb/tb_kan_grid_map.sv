// tb_kan_grid_map: exhaustive check of the grid mapper for every input code,
// for the default grid (whole input range, power-of-two span) and for a grid
// with a span of 50 codes, which exercises the reciprocal multiply and the
// clamping at both ends. Also checks that the context holds while capture is
// low.
module tb_kan_grid_map;
  import kan_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic capture;
  logic signed [6:0] x;
  logic [3:0] k0, k1;
  logic [3:0] u0, u1;
  logic c0, c1;
  int checks = 0, failures = 0, clamps = 0;

  always #5 clk = ~clk;

  kan_grid_map dut0 (.clk, .rst_n, .capture, .x, .k(k0), .u(u0), .clamped(c0));
  kan_grid_map #(.XW(7), .G(10), .F(4), .GRID_LO(-20), .GRID_HI(30)) dut1 (
    .clk, .rst_n, .capture, .x, .k(k1), .u(u1), .clamped(c1));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (x=%0d)", what, got, exp, x);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    capture = 1'b0;
    x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int xi = -64; xi < 64; xi++) begin
      @(negedge clk);
      x = 7'(xi);
      capture = 1'b1;
      @(negedge clk);
      capture = 1'b0;
      check("k0", k0, grid_k(xi, -64, 64, 10, 4));
      check("u0", u0, grid_u(xi, -64, 64, 10, 4));
      check("c0", c0, grid_clamp(xi, -64, 64));
      check("k1", k1, grid_k(xi, -20, 30, 10, 4));
      check("u1", u1, grid_u(xi, -20, 30, 10, 4));
      check("c1", c1, grid_clamp(xi, -20, 30));
      if (c1) clamps++;
      // hold: a new x without capture must not disturb the context
      x = 7'(-xi - 1);
      @(negedge clk);
      check("k1 hold", k1, grid_k(xi, -20, 30, 10, 4));
      check("u1 hold", u1, grid_u(xi, -20, 30, 10, 4));
    end
    checks++;
    if (clamps != 128 - 50) begin
      failures++;
      $display("FAIL clamp count %0d", clamps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
