// tb_ffrk_core: self-checking testbench of ffrk_core at its default
// parameters (PHASE_LEN = 16, h = 2^-7, the paper's initial condition).
//
// Checks:
//  * right after reset, state_o holds the initial condition;
//  * step_o pulses every 65 cycles (the paper's FFRK delay) and the first
//    new state appears 65 cycles after reset;
//  * every new state equals one Runge-Kutta-4 step of the bit-exact integer
//    reference tb_ref_pkg::ref_step applied to the previous state
//    (10000 steps, which covers the first large excursions of the
//    trajectory);
//  * the first step agrees with a floating-point RK4 of the ODE within
//    1e-6 (independent of the fixed-point details);
//  * the state does not stay at the initial point and stays inside
//    |value| < 8 (on the attractor, no fixed-point wrap-around).
module tb_ffrk_core;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int STEP   = 65;
  localparam int NSTEPS = 10000;

  logic     clk = 1'b0;
  logic     rst = 1'b1;
  state_t   st;
  logic     step;
  ffrk_en_t en;
  int       checks = 0, failures = 0;

  ffrk_core dut (.clk(clk), .rst(rst), .state_o(st), .step_o(step), .en_o(en));

  always #5 clk = ~clk;

  function automatic vec5_t to_vec(state_t s);
    vec5_t v;
    v = '{s.x, s.y, s.z, s.u, s.v};
    return v;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  // floating-point RK4 of the ODE, for one step
  typedef real rvec_t [5];
  function automatic rvec_t rf(rvec_t s);
    rvec_t f;
    f[0] = s[1];
    f[1] = s[2];
    f[2] = s[3];
    f[3] = -s[2] - 0.5 * s[3] + (s[0] - 1.0) * s[1];
    f[4] = -s[3] - 0.5 * s[4] + (s[0] - 1.0) * s[2];
    return f;
  endfunction

  function automatic rvec_t rk4(rvec_t s, real h);
    rvec_t k1, k2, k3, k4, t, r;
    k1 = rf(s);
    foreach (t[i]) t[i] = s[i] + 0.5 * h * k1[i];
    k2 = rf(t);
    foreach (t[i]) t[i] = s[i] + 0.5 * h * k2[i];
    k3 = rf(t);
    foreach (t[i]) t[i] = s[i] + h * k3[i];
    k4 = rf(t);
    foreach (r[i]) r[i] = s[i] + h / 6.0 * (k1[i] + 2.0 * k2[i] + 2.0 * k3[i] + k4[i]);
    return r;
  endfunction

  initial begin
    vec5_t prev, exp_s, init;
    rvec_t rs;
    int    last_step, t, nstep, moved;
    init = '{26844, 67109, 6711, 134218, 0};
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    #1;
    for (int i = 0; i < 5; i++) check("init", to_vec(st)[i], init[i]);
    prev      = to_vec(st);
    last_step = -1;
    t         = 0;
    nstep     = 0;
    moved     = 0;
    while (nstep < NSTEPS) begin
      @(posedge clk);
      #1;
      t++;
      if (step) begin
        checks++;
        if (t - last_step != STEP && last_step >= 0) begin
          failures++;
          $display("FAIL step interval %0d", t - last_step);
        end else if (last_step < 0 && t != STEP - 1) begin
          failures++;
          $display("FAIL first E0 in cycle %0d, expected %0d", t, STEP - 1);
        end
        last_step = t;
      end
      if (to_vec(st) != prev) begin
        // the first new state must appear 65 cycles after reset
        if (nstep == 0) check("first update cycle", t, STEP);
        exp_s = ref_step(prev, 7);
        for (int i = 0; i < 5; i++) check($sformatf("step %0d var %0d", nstep, i), to_vec(st)[i], exp_s[i]);
        if (nstep == 0) begin
          foreach (rs[i]) rs[i] = real'(init[i]) / real'(64'd1 << 27);
          rs = rk4(rs, 1.0 / 128.0);
          for (int i = 0; i < 5; i++) begin
            real d;
            d = real'(to_vec(st)[i]) / real'(64'd1 << 27) - rs[i];
            checks++;
            if (d > 1e-6 || d < -1e-6) begin
              failures++;
              $display("FAIL float RK4 var %0d diff %g", i, d);
            end
          end
        end
        for (int i = 0; i < 5; i++) begin
          checks++;
          if (to_vec(st)[i] >= 32'sh4000_0000 || to_vec(st)[i] <= -32'sh4000_0000) begin
            failures++;
            $display("FAIL step %0d var %0d left |value| < 8", nstep, i);
          end
        end
        prev = to_vec(st);
        nstep++;
        moved++;
      end
    end
    checks++;
    if (moved == 0) failures++;
    $display("state after %0d steps: x=%0d y=%0d z=%0d u=%0d v=%0d", NSTEPS, st.x, st.y, st.z, st.u, st.v);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSTEPS * STEP + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
