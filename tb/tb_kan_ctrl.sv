// tb_kan_ctrl: drives the sequencer for 2 and 3 layers with random gaps on
// the input and feedback handshakes and random zero_grad. Every cycle the
// enables are compared with the expected schedule: map 0 on the input
// handshake, then eval 0, map 1, eval 1, ...; out_valid after 2*NL-1 further
// cycles; on the feedback handshake bwd NL-1, then NL-2 .. 0 one per cycle,
// or no update at all with zero_grad. Latencies are checked in cycles.
module tb_kan_ctrl;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0, skips = 0, updates = 0;

  always #5 clk = ~clk;

  logic in_v2, in_v3, fb_v2, fb_v3, zero_grad;
  logic in_ready2, out_valid2, fb_ready2, idle2;
  logic [1:0] map2, eval2, bwd2;
  logic in_ready3, out_valid3, fb_ready3, idle3;
  logic [2:0] map3, eval3, bwd3;

  kan_ctrl dut2 (.clk, .rst_n, .in_valid(in_v2), .in_ready(in_ready2), .out_valid(out_valid2),
    .fb_valid(fb_v2), .fb_ready(fb_ready2), .zero_grad, .idle(idle2), .map_en(map2), .eval_en(eval2),
    .bwd_en(bwd2));
  kan_ctrl #(.NL(3)) dut3 (.clk, .rst_n, .in_valid(in_v3), .in_ready(in_ready3), .out_valid(out_valid3),
    .fb_valid(fb_v3), .fb_ready(fb_ready3), .zero_grad, .idle(idle3), .map_en(map3), .eval_en(eval3),
    .bwd_en(bwd3));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample on the NL-layer controller selected by nl
  task automatic run(int nl, int gap_in, int gap_fb, bit zg);
    logic       ir, ov, fr;
    logic [2:0] m, e, bw;
    int         n;
    for (int i = 0; i < gap_in; i++) @(negedge clk);
    if (nl == 2) in_v2 = 1; else in_v3 = 1;
    #1;
    ir = (nl == 2) ? in_ready2 : in_ready3;
    m  = (nl == 2) ? {1'b0, map2} : map3;
    check("in_ready", ir, 1);
    check("map0 on handshake", m, 1);
    @(negedge clk);
    in_v2 = 0; in_v3 = 0;
    n = 0;
    for (int s = 1; s < 2 * nl; s++) begin
      #1;
      m = (nl == 2) ? {1'b0, map2} : map3;
      e = (nl == 2) ? {1'b0, eval2} : eval3;
      ov = (nl == 2) ? out_valid2 : out_valid3;
      if (s % 2 == 1) check($sformatf("eval step %0d", s), e, 1 << ((s - 1) / 2));
      else            check($sformatf("map step %0d", s), m, 1 << (s / 2));
      check("no out_valid yet", ov, 0);
      @(negedge clk);
      n++;
    end
    #1;
    ov = (nl == 2) ? out_valid2 : out_valid3;
    check("forward latency", ov ? n : -1, 2 * nl - 1);
    for (int i = 0; i < gap_fb; i++) begin
      @(negedge clk);
      #1;
      ov = (nl == 2) ? out_valid2 : out_valid3;
      check("out_valid held", ov, 1);
    end
    if (nl == 2) fb_v2 = 1; else fb_v3 = 1;
    zero_grad = zg;
    #1;
    fr = (nl == 2) ? fb_ready2 : fb_ready3;
    bw = (nl == 2) ? {1'b0, bwd2} : bwd3;
    check("fb_ready", fr, 1);
    check("bwd last", bw, zg ? 0 : (1 << (nl - 1)));
    @(negedge clk);
    fb_v2 = 0; fb_v3 = 0;
    zero_grad = 0;
    if (zg) skips++;
    else begin
      updates++;
      for (int l = nl - 2; l >= 0; l--) begin
        #1;
        bw = (nl == 2) ? {1'b0, bwd2} : bwd3;
        check($sformatf("bwd layer %0d", l), bw, 1 << l);
        @(negedge clk);
      end
    end
    #1;
    ir = (nl == 2) ? in_ready2 : in_ready3;
    check("back to idle", ir, 1);
  endtask

  initial begin
    in_v2 = 0; in_v3 = 0; fb_v2 = 0; fb_v3 = 0; zero_grad = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    #1;
    check("idle after reset", {idle2, idle3}, 3);
    for (int it = 0; it < 200; it++) begin
      bit zg;
      zg = ($urandom_range(0, 4) == 0);
      fork
        begin
          if (it % 2 == 0) run(2, $urandom_range(0, 3), $urandom_range(0, 3), zg);
          else             run(3, $urandom_range(0, 3), $urandom_range(0, 3), zg);
        end
      join
      // the other controller must not have started
      #1;
      check("other idle", {idle2, idle3}, 3);
    end
    checks++;
    if (skips == 0 || updates == 0) begin
      failures++;
      $display("FAIL: zero_grad %0d / update %0d never exercised", skips, updates);
    end
    $display("updates %0d, zero_grad samples %0d", updates, skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
