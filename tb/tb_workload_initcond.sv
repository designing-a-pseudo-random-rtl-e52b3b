// tb_workload_initcond: the initial-condition sweep of the source's
// transition-to-chaos study, x0 = c in {0.6, 0.4, 0.2, 0.05} with the other
// initial values at their defaults, run on four generator instances side by
// side for 20,000 Runge-Kutta steps each (1.3 M cycles).
//
// For every instance the state is compared bit-exactly with the reference
// RK4 of tb_ref_pkg after every step. Then the regime is checked:
//   c = 0.6          stable: |y|, |z|, |u|, |v| < 1e-4 at the end;
//   c = 0.4, 0.2, 0.05  oscillating: max |y| over the last 10,000 steps
//                    exceeds 0.1;
//   all              bounded: every variable stays within |value| < 8.
// Expected regimes follow the source's bifurcation analysis (stable for
// 0.5 < c < 0.92, dynamic and bounded for c < 0.5) and a double-precision
// RK4 of the same equations.
module tb_workload_initcond;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int NINST  = 4;
  localparam int NSTEPS = 20000;
  localparam int STEP   = 65;
  localparam fx_t C [NINST] = '{32'sd80530637, 32'sd53687091, 32'sd26843546, 32'sd6710886};
  localparam real C_REAL [NINST] = '{0.6, 0.4, 0.2, 0.05};

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  state_t     st   [NINST];
  logic       step [NINST];
  int         checks = 0, failures = 0;

  for (genvar g = 0; g < NINST; g++) begin : g_inst
    logic [4:0] b, frame;
    ffrk_en_t   en;
    prng5d_top #(.X0(C[g])) dut (
      .clk(clk), .rst(rst), .b_o(b), .state_o(st[g]), .step_o(step[g]), .en_o(en), .frame_o(frame)
    );
  end

  always #5 clk = ~clk;

  function automatic vec5_t to_vec(state_t s);
    vec5_t v;
    v = '{s.x, s.y, s.z, s.u, s.v};
    return v;
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  initial begin
    vec5_t ref_s [NINST];
    real   ymax  [NINST];
    int    mism  [NINST];
    int    oob   [NINST];
    real   scale;
    scale = real'(64'd1 << 27);
    for (int i = 0; i < NINST; i++) begin
      ref_s[i] = '{C[i], 67109, 6711, 134218, 0};
      ymax[i]  = 0.0;
      mism[i]  = 0;
      oob[i]   = 0;
    end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 1; n <= NSTEPS; n++) begin
      repeat (STEP) @(posedge clk);
      #1;
      for (int i = 0; i < NINST; i++) begin
        vec5_t v;
        ref_s[i] = ref_step(ref_s[i], 7);
        v = to_vec(st[i]);
        checks++;
        if (v != ref_s[i]) begin
          failures++;
          if (mism[i]++ < 3) $display("FAIL c=%f step %0d state differs from reference", C_REAL[i], n);
        end
        for (int k = 0; k < 5; k++)
          if (v[k] >= 32'sh4000_0000 || v[k] <= -32'sh4000_0000) oob[i]++;
        if (n > NSTEPS / 2 && absr(real'(v[1]) / scale) > ymax[i]) ymax[i] = absr(real'(v[1]) / scale);
      end
    end
    for (int i = 0; i < NINST; i++) begin
      vec5_t v;
      v = to_vec(st[i]);
      $display("c=%f: final x=%f y=%f z=%f u=%f v=%f, max|y| over last half %f",
               C_REAL[i], v[0] / scale, v[1] / scale, v[2] / scale, v[3] / scale, v[4] / scale, ymax[i]);
      checks++;
      if (oob[i] != 0) begin
        failures++;
        $display("FAIL c=%f left |value| < 8", C_REAL[i]);
      end
      checks++;
      if (C_REAL[i] > 0.5) begin
        if (absr(v[1] / scale) > 1e-4 || absr(v[2] / scale) > 1e-4 ||
            absr(v[3] / scale) > 1e-4 || absr(v[4] / scale) > 1e-4) begin
          failures++;
          $display("FAIL c=%f did not converge to the equilibrium line", C_REAL[i]);
        end
      end else if (ymax[i] < 0.1) begin
        failures++;
        $display("FAIL c=%f does not oscillate", C_REAL[i]);
      end
    end
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
