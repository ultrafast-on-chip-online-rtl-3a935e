// tb_kan_acrobot_control: closed-loop online actor-critic on the swing-up
// pendulum task Acrobot with randomized dynamics, using the kernel in its
// actor-critic configuration: one layer [6,4] (three action logits and one
// state value), G=5, linear splines (S=1), <22,8> for all formats, learning
// rate 1e-3, grid [-8,8).
//
// Environment (modelled here in real arithmetic): the standard two-link
// Acrobot equations of motion, integrated with one 4th-order Runge-Kutta step
// of 0.2 s per action; torques -1/0/+1; link velocities clipped to 4*pi and
// 9*pi; reward -1 per step, episode ends when the tip rises above one link
// length over the pivot or after 500 steps. At the start of every episode
// both link masses are drawn from [0.8,1.2] and the first link length from
// [0.9,1.1], so the dynamics keep changing. The observation is
// (cos t1, sin t1, cos t2, sin t2, dt1, dt2); this bench scales it into the
// grid as (6 cos, 6 sin, 6 cos, 6 sin, dt1/2, dt2/4), its own choice.
//
// Learner (host side, also modelled here): each step the state is sent with
// zero_grad set, the action is sampled from the softmax of the three logits,
// and the environment advances. Once N=3 further rewards are known, the state
// from N steps back is sent again and the kernel gets the actor-critic
// feedback for it: dL/dlogit_i = (pi_i - [i == a]) * A and dL/dV = V - R,
// with R the N-step bootstrapped return (discount 0.99) and A = R - V. The
// feedback is limited to +-32. The N, the discount and the feedback limit
// are this bench's choices.
//
// Checks: every transaction takes 2 cycles forward (handshake included) and
// 1 cycle backward; an inference transaction with zero_grad leaves all 144
// coefficients unchanged (read back through the host port once per
// episode); and learning: the mean return of the last 20 episodes must be
// better than that of the first 20.
module tb_kan_acrobot_control;
  localparam int DI = 6, DO = 4, NA = 3, W = 22, FR = 14, NC = 6;
  localparam int NSTEP = 3, TMAX = 500, EPISODES = 160;
  localparam real PI = 3.14159265358979;
  localparam real GAMMA = 0.99, DT = 0.2, GRAV = 9.8, FB_MAX = 32.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, fb_valid, fb_ready, zero_grad;
  logic signed [W-1:0] in_x [DI], out_y [DO], fb_grad [DO], in_grad [DI];
  logic cfg_we, cfg_layer;
  logic [2:0] cfg_q, cfg_p;
  logic [2:0] cfg_c;
  logic signed [W-1:0] cfg_wdata, cfg_rdata;
  logic ev_clamp, ev_sat;

  kan_online_top #(
    .D_IN(DI), .D_HID(1), .D_OUT(DO), .NUM_LAYERS(1), .G(5), .S(1), .F(4),
    .XW(W), .XI(8), .WW(W), .WI(8), .OW(W), .OI(8), .ETA(0.001), .GRID_MIN(-8.0), .GRID_MAX(8.0)
  ) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_x, .out_valid, .out_y, .fb_valid, .fb_ready,
    .fb_grad, .zero_grad, .in_grad, .cfg_we, .cfg_layer, .cfg_q, .cfg_p, .cfg_c, .cfg_wdata,
    .cfg_rdata, .ev_clamp, .ev_sat);

  // environment state and per-episode dynamics
  real st [4];
  real m1, m2, l1, lc1, lc2;

  real obs_h [TMAX+1][DI];
  int  act_h [TMAX];
  real rew_h [TMAX];
  real ret_ep [EPISODES];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic real wrap(real a);
    real r = a;
    while (r > PI) r -= 2.0 * PI;
    while (r < -PI) r += 2.0 * PI;
    return r;
  endfunction

  function automatic real clip(real v, real lim);
    return v > lim ? lim : (v < -lim ? -lim : v);
  endfunction

  // time derivative of (t1, t2, dt1, dt2) under torque a on the second joint
  task automatic dsdt(input real s [4], input real a, output real d [4]);
    real d1, d2, phi1, phi2, dd1, dd2;
    d1 = m1 * lc1 * lc1 + m2 * (l1 * l1 + lc2 * lc2 + 2.0 * l1 * lc2 * $cos(s[1])) + 2.0;
    d2 = m2 * (lc2 * lc2 + l1 * lc2 * $cos(s[1])) + 1.0;
    phi2 = m2 * lc2 * GRAV * $cos(s[0] + s[1] - PI / 2.0);
    phi1 = -m2 * l1 * lc2 * s[3] * s[3] * $sin(s[1])
           - 2.0 * m2 * l1 * lc2 * s[3] * s[2] * $sin(s[1])
           + (m1 * lc1 + m2 * l1) * GRAV * $cos(s[0] - PI / 2.0) + phi2;
    dd2 = (a + d2 / d1 * phi1 - m2 * l1 * lc2 * s[2] * s[2] * $sin(s[1]) - phi2)
          / (m2 * lc2 * lc2 + 1.0 - d2 * d2 / d1);
    dd1 = -(d2 * dd2 + phi1) / d1;
    d = '{s[2], s[3], dd1, dd2};
  endtask

  task automatic env_step(input int a, output real r, output bit done);
    real k1 [4], k2 [4], k3 [4], k4 [4], tmp [4];
    real tq = real'(a - 1);
    dsdt(st, tq, k1);
    for (int i = 0; i < 4; i++) tmp[i] = st[i] + DT / 2.0 * k1[i];
    dsdt(tmp, tq, k2);
    for (int i = 0; i < 4; i++) tmp[i] = st[i] + DT / 2.0 * k2[i];
    dsdt(tmp, tq, k3);
    for (int i = 0; i < 4; i++) tmp[i] = st[i] + DT * k3[i];
    dsdt(tmp, tq, k4);
    for (int i = 0; i < 4; i++) st[i] += DT / 6.0 * (k1[i] + 2.0 * k2[i] + 2.0 * k3[i] + k4[i]);
    st[0] = wrap(st[0]);
    st[1] = wrap(st[1]);
    st[2] = clip(st[2], 4.0 * PI);
    st[3] = clip(st[3], 9.0 * PI);
    done = (-$cos(st[0]) - $cos(st[1] + st[0])) > 1.0;
    r = done ? 0.0 : -1.0;
  endtask

  task automatic observe(output real o [DI]);
    o = '{6.0 * $cos(st[0]), 6.0 * $sin(st[0]), 6.0 * $cos(st[1]), 6.0 * $sin(st[1]),
          st[2] / 2.0, st[3] / 4.0};
  endtask

  function automatic logic signed [W-1:0] code(real v);
    return W'(longint'(clip(v, 127.0) * real'(1 << FR)));
  endfunction

  // one forward pass; returns the four outputs as reals
  task automatic fwd(input real o [DI], output real y [DO]);
    int lat;
    @(negedge clk);
    for (int p = 0; p < DI; p++) in_x[p] = code(o[p]);
    check("ready for input", longint'(in_ready), 1);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    check("forward cycles", longint'(lat), 2);
    for (int q = 0; q < DO; q++) y[q] = real'(out_y[q]) / real'(1 << FR);
  endtask

  // the feedback beat that closes the transaction
  task automatic bwd(input real g [DO], input bit zg);
    int lat;
    for (int q = 0; q < DO; q++) fb_grad[q] = code(clip(g[q], FB_MAX));
    zero_grad = zg;
    fb_valid = 1;
    @(negedge clk);
    fb_valid = 0;
    zero_grad = 0;
    lat = 1;
    while (!in_ready && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    check("backward cycles", longint'(lat), 1);
  endtask

  task automatic softmax(input real y [DO], output real pr [NA]);
    real mx = y[0], sum = 0.0;
    for (int i = 1; i < NA; i++) if (y[i] > mx) mx = y[i];
    for (int i = 0; i < NA; i++) begin
      pr[i] = $exp(y[i] - mx);
      sum += pr[i];
    end
    for (int i = 0; i < NA; i++) pr[i] /= sum;
  endtask

  // actor-critic update of the state at step tau toward return ret
  task automatic update(int tau, real ret);
    real y [DO], pr [NA], g [DO], adv;
    fwd(obs_h[tau], y);
    softmax(y, pr);
    adv = ret - y[3];
    for (int i = 0; i < NA; i++) g[i] = (pr[i] - (i == act_h[tau] ? 1.0 : 0.0)) * adv;
    g[3] = y[3] - ret;
    bwd(g, 1'b0);
  endtask

  function automatic real nstep_return(int tau, int t_end, real boot);
    real ret = boot;
    for (int i = t_end - 1; i >= tau; i--) ret = rew_h[i] + GAMMA * ret;
    return ret;
  endfunction

  longint snap [DO][DI][NC];

  task automatic read_all(output longint v [DO][DI][NC]);
    for (int q = 0; q < DO; q++)
      for (int p = 0; p < DI; p++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk);
          cfg_q = 3'(q); cfg_p = 3'(p); cfg_c = 3'(c);
          #1;
          v[q][p][c] = longint'(cfg_rdata);
        end
  endtask

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real y [DO], pr [NA], zero [DO], r, u, ret, first, last;
    longint after [DO][DI][NC];
    int t, a, same;
    bit done;
    in_valid = 0; fb_valid = 0; zero_grad = 0; cfg_we = 0; cfg_layer = 0;
    cfg_q = 0; cfg_p = 0; cfg_c = 0; cfg_wdata = 0;
    for (int p = 0; p < DI; p++) in_x[p] = 0;
    for (int q = 0; q < DO; q++) begin
      fb_grad[q] = 0;
      zero[q] = 0.0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int ep = 0; ep < EPISODES; ep++) begin
      m1 = 0.8 + 0.4 * urand();
      m2 = 0.8 + 0.4 * urand();
      l1 = 0.9 + 0.2 * urand();
      lc1 = l1 / 2.0;
      lc2 = 0.5;
      for (int i = 0; i < 4; i++) st[i] = -0.1 + 0.2 * urand();
      observe(obs_h[0]);
      // inference must not change any coefficient
      read_all(snap);
      fwd(obs_h[0], y);
      bwd(zero, 1'b1);
      read_all(after);
      same = 1;
      for (int q = 0; q < DO; q++)
        for (int p = 0; p < DI; p++)
          for (int c = 0; c < NC; c++) if (after[q][p][c] != snap[q][p][c]) same = 0;
      check("zero_grad leaves coefficients", longint'(same), 1);
      t = 0;
      done = 0;
      ret = 0.0;
      while (!done && t < TMAX) begin
        fwd(obs_h[t], y);
        bwd(zero, 1'b1);
        if (t >= NSTEP) update(t - NSTEP, nstep_return(t - NSTEP, t, y[3]));
        softmax(y, pr);
        u = urand();
        a = NA - 1;
        for (int i = 0; i < NA - 1; i++) begin
          if (u < pr[i]) begin
            a = i;
            break;
          end
          u -= pr[i];
        end
        act_h[t] = a;
        env_step(a, r, done);
        rew_h[t] = r;
        ret += r;
        t++;
        observe(obs_h[t]);
      end
      // remaining states: bootstrap from the last state unless it is terminal
      if (done) y[3] = 0.0;
      else begin
        fwd(obs_h[t], y);
        bwd(zero, 1'b1);
      end
      for (int tau = (t > NSTEP ? t - NSTEP : 0); tau < t; tau++)
        update(tau, nstep_return(tau, t, y[3]));
      ret_ep[ep] = ret;
      if (ep % 20 == 19) $display("episode %0d: return %0.0f", ep + 1, ret);
    end
    first = 0.0;
    last = 0.0;
    for (int i = 0; i < 20; i++) begin
      first += ret_ep[i] / 20.0;
      last += ret_ep[EPISODES - 20 + i] / 20.0;
    end
    $display("mean return: first 20 episodes %0.1f, last 20 episodes %0.1f", first, last);
    checks++;
    if (!(last > first)) begin
      failures++;
      $display("FAIL no improvement in return");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
