// tb_hyperchaos_f: self-checking testbench of hyperchaos_f.
//
// Applies random state vectors (mostly in [-2, 2), a few full-range to
// exercise wrap-around), holds each for 8 cycles and compares the output
// with the integer reference model tb_ref_pkg::ref_f. Checks: Fx, Fy, Fz
// follow the input in the same cycle; Fu, Fv equal the reference exactly 5
// cycles after the input changed (the paper's F latency) and not yet after 4
// (checked only where the new value differs from the old).
module tb_hyperchaos_f;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  logic   clk = 1'b0;
  logic   rst = 1'b1;
  state_t s, f;
  int     checks = 0, failures = 0;

  hyperchaos_f dut (.clk(clk), .rst(rst), .s_i(s), .f_o(f));

  always #5 clk = ~clk;

  function automatic vec5_t to_vec(state_t st);
    vec5_t v;
    v = '{st.x, st.y, st.z, st.u, st.v};
    return v;
  endfunction

  function automatic int rnd_fx(int i);
    if (i % 7 == 6) return int'($urandom);
    return int'($urandom_range(0, 32'h1FFF_FFFF)) - 32'sh1000_0000;  // [-2, 2)
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    vec5_t e, e_old;
    s = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    e_old = ref_f(to_vec(s));
    repeat (8) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      s <= '{x: rnd_fx(n), y: rnd_fx(n + 1), z: rnd_fx(n + 2), u: rnd_fx(n + 3), v: rnd_fx(n + 4)};
      @(negedge clk);
      e = ref_f(to_vec(s));
      check("Fx", f.x, e[0]);
      check("Fy", f.y, e[1]);
      check("Fz", f.z, e[2]);
      // after 4 rising edges the slowest path must not yet show the new value
      repeat (4) @(posedge clk);
      #1;
      if (e[3] != e_old[3]) begin
        checks++;
        if (f.u == e[3]) begin
          failures++;
          $display("FAIL Fu settled after 4 cycles (expected 5)");
        end
      end
      @(posedge clk);
      #1;
      check("Fu", f.u, e[3]);
      check("Fv", f.v, e[4]);
      repeat (3) @(posedge clk);
      e_old = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
