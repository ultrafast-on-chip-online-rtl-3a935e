// tb_kan_regression: the drifting-regression benchmark run on the kernel in
// its [1,1] configuration (one layer, one edge, G=10, S=3, <6,2> for all
// formats, learning rate 0.5, grid [-1,1) over the input range). 1500 steps
// with x ~ U[-1,1] and a target function that changes at t=500 and t=1000:
//   sin(x)+0.3x^2,  -cos(2x)+0.1x^3+1,  exp(-0.5(x-1)^2)+0.05x^3.
// Feedback is the error y_hat - y (the squared-error gradient up to a factor
// 2), quantised to <6,2>. The testbench accumulates the regret sum of squared
// errors and requires it to be well below that of a learner that never
// updates (all-zero prediction), and the error late in each regime to be
// below the error right after each change. It also checks the per-sample
// cycle count against the paper's 50 ns (10 cycles at 200 MHz).
module tb_kan_regression;
  localparam int T = 1500;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, fb_valid, fb_ready, zero_grad;
  logic signed [5:0] in_x [1], out_y [1], fb_grad [1], in_grad [1];
  logic cfg_we, cfg_layer;
  logic [0:0] cfg_q, cfg_p;
  logic [3:0] cfg_c;
  logic signed [5:0] cfg_wdata, cfg_rdata;
  logic ev_clamp, ev_sat;

  kan_online_top #(
    .D_IN(1), .D_HID(1), .D_OUT(1), .NUM_LAYERS(1), .G(10), .S(3), .F(4),
    .XW(6), .XI(2), .WW(6), .WI(2), .OW(6), .OI(2), .ETA(0.5), .GRID_MIN(-1.0), .GRID_MAX(1.0)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .fb_valid, .fb_ready,
    .fb_grad, .zero_grad, .in_grad, .cfg_we, .cfg_layer, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata,
    .cfg_rdata, .ev_clamp, .ev_sat);

  function automatic real target(int t, real x);
    if (t < 500)  return $sin(x) + 0.3 * x * x;
    if (t < 1000) return -$cos(2.0 * x) + 0.1 * x * x * x + 1.0;
    return $exp(-0.5 * (x - 1.0) * (x - 1.0)) + 0.05 * x * x * x;
  endfunction

  function automatic int to_code(real v);
    int c;
    c = int'(v * 16.0);
    if (c > 31) c = 31;
    if (c < -32) c = -32;
    return c;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, y, yh, e, regret, frozen;
    real early [3], late [3];
    int  cyc, g;
    in_valid = 0; fb_valid = 0; zero_grad = 0; cfg_we = 0; cfg_layer = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0; in_x[0] = 0; fb_grad[0] = 0;
    regret = 0; frozen = 0;
    for (int i = 0; i < 3; i++) begin early[i] = 0; late[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      x = ($urandom_range(0, 1000000) / 500000.0) - 1.0;
      in_x[0] = 6'(to_code(x));
      x = in_x[0] / 16.0;                       // the learner sees the quantised input
      y = target(t, x);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid) begin
        @(negedge clk);
        cyc++;
      end
      yh = out_y[0] / 16.0;
      e  = (yh - y) * (yh - y);
      regret += e;
      frozen += y * y;
      if (t % 500 < 100) early[t / 500] += e;
      if (t % 500 >= 400) late[t / 500] += e;
      g = int'(out_y[0]) - to_code(y);
      if (g > 31) g = 31;
      if (g < -32) g = -32;
      fb_grad[0] = 6'(g);
      fb_valid = 1;
      @(negedge clk);
      fb_valid = 0;
      cyc++;
      while (!in_ready) begin
        @(negedge clk);
        cyc++;
      end
      if (t == 0) $display("cycles per sample: %0d (%0d ns at 200 MHz)", cyc, cyc * 5);
      check("sample within the paper's 50 ns", cyc <= 10);
    end
    $display("cumulative regret %f (no-update learner %f)", regret, frozen);
    for (int i = 0; i < 3; i++)
      $display("regime %0d: mean squared error first 100 steps %f, last 100 steps %f",
               i, early[i] / 100, late[i] / 100);
    check("regret below half of the no-update learner", regret < 0.5 * frozen);
    for (int i = 0; i < 3; i++)
      check($sformatf("regime %0d error falls", i), late[i] < early[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
