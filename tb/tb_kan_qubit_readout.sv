// tb_kan_qubit_readout: the adaptive single-shot readout benchmark on the
// kernel at its default configuration ([2,7,1], G=10, S=3, <7,3>, learning
// rate 0.05). The stream is the rotating XOR constellation: one of four
// Gaussian blobs at (+-1.5, +-1.5) with sigma 0.4, label by parity, a Kerr
// phase twist of 0.4 r^2, breathing 1+0.2 sin(0.01 t) and a global rotation
// of 0.05 degrees per step. Each step the kernel predicts sign(y), then gets
// the feedback y - label (label +-1) and updates once. Coefficients start at
// small random values (all-zero coefficients give the first layer no
// gradient). Requires the running accuracy over the last 1000 of 6000 steps
// to be well above chance.
module tb_kan_qubit_readout;
  localparam int T = 6000;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, fb_valid, fb_ready, zero_grad;
  logic signed [6:0] in_x [2], out_y [1], fb_grad [1], in_grad [2];
  logic cfg_we, cfg_layer;
  logic [2:0] cfg_q, cfg_p;
  logic [3:0] cfg_c;
  logic signed [6:0] cfg_wdata, cfg_rdata;
  logic ev_clamp, ev_sat;

  kan_online_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .fb_valid, .fb_ready,
    .fb_grad, .zero_grad, .in_grad, .cfg_we, .cfg_layer, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata,
    .cfg_rdata, .ev_clamp, .ev_sat);

  function automatic real urand();
    return ($urandom_range(1, 1000000) / 1000001.0);
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  function automatic int to_code(real v);
    int c;
    c = int'(v * 16.0);
    if (c > 63) c = 63;
    if (c < -64) c = -64;
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
    real i_, q_, r, ph, th, p, mi, mq, ti;
    int  s, lab, correct, last, g;
    in_valid = 0; fb_valid = 0; zero_grad = 0; cfg_we = 0; cfg_layer = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0;
    in_x[0] = 0; in_x[1] = 0; fb_grad[0] = 0;
    correct = 0; last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 2; l++)
      for (int q = 0; q < (l == 0 ? 7 : 1); q++)
        for (int pp = 0; pp < (l == 0 ? 2 : 7); pp++)
          for (int c = 0; c < 13; c++) begin
            @(negedge clk);
            cfg_we = 1; cfg_layer = 1'(l); cfg_q = 3'(q); cfg_p = 3'(pp); cfg_c = 4'(c);
            cfg_wdata = 7'($urandom_range(0, 8) - 4);
          end
    @(negedge clk);
    cfg_we = 0;
    for (int t = 0; t < T; t++) begin
      s   = $urandom_range(0, 3);
      lab = (s < 2) ? -1 : 1;
      mi  = (s == 0 || s == 3) ? 1.5 : -1.5;
      mq  = (s == 0 || s == 2) ? 1.5 : -1.5;
      i_  = mi + 0.4 * gauss();
      q_  = mq + 0.4 * gauss();
      r   = $sqrt(i_ * i_ + q_ * q_);
      ph  = $atan2(q_, i_) + 0.4 * r * r;
      p   = 1.0 + 0.2 * $sin(0.01 * t);
      i_  = p * r * $cos(ph);
      q_  = p * r * $sin(ph);
      th  = t * 0.05 * PI / 180.0;
      ti  = $cos(th) * i_ - $sin(th) * q_;
      q_  = $sin(th) * i_ + $cos(th) * q_;
      i_  = ti;
      @(negedge clk);
      in_x[0] = 7'(to_code(i_));
      in_x[1] = 7'(to_code(q_));
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      if ((out_y[0] >= 0) == (lab > 0)) begin
        correct++;
        if (t >= T - 1000) last++;
      end
      g = int'(out_y[0]) - 16 * lab;
      if (g > 63) g = 63;
      if (g < -64) g = -64;
      fb_grad[0] = 7'(g);
      fb_valid = 1;
      @(negedge clk);
      fb_valid = 0;
      while (!in_ready) @(negedge clk);
      if (t % 1000 == 999) $display("t=%0d running accuracy %f", t + 1, correct / real'(t + 1));
    end
    $display("accuracy over the last 1000 steps %f", last / 1000.0);
    check("accuracy well above chance", last > 650);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
