// tb_ffrk_control: self-checking testbench of ffrk_control.
//
// Runs the default configuration (PHASE_LEN = 16; L below must match it)
// for 20 steps and compares the enables in every cycle with the expected
// schedule computed from the cycle number since reset: E1 for 16 cycles,
// then E2, E3, E4 for 16 each, then E0 for one cycle; a step is 65 cycles.
// Also checks that the E0 pulses are exactly 65 cycles apart and that a
// reset in mid-step restarts the schedule at E1.
module tb_ffrk_control;
  import prng_pkg::*;

  localparam int L    = 16;
  localparam int STEP = 4 * L + 1;

  logic     clk = 1'b0;
  logic     rst = 1'b1;
  ffrk_en_t en;
  int       checks = 0, failures = 0;

  ffrk_control dut (.clk(clk), .rst(rst), .en_o(en));

  always #5 clk = ~clk;

  function automatic ffrk_en_t expected(int t);
    ffrk_en_t e;
    int p;
    p    = t % STEP;
    e    = '0;
    e.e1 = (p < L);
    e.e2 = (p >= L)     && (p < 2 * L);
    e.e3 = (p >= 2 * L) && (p < 3 * L);
    e.e4 = (p >= 3 * L) && (p < 4 * L);
    e.e0 = (p == 4 * L);
    return e;
  endfunction

  task automatic run(int ncycles);
    int last_e0;
    last_e0 = -1;
    for (int t = 0; t < ncycles; t++) begin
      #1;
      checks++;
      if (en !== expected(t)) begin
        failures++;
        $display("FAIL t=%0d en=%b exp=%b", t, en, expected(t));
      end
      if (en.e0) begin
        if (last_e0 >= 0) begin
          checks++;
          if (t - last_e0 != STEP) begin
            failures++;
            $display("FAIL step length %0d", t - last_e0);
          end
        end
        last_e0 = t;
      end
      @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    run(20 * STEP);
    // reset in the middle of a step
    repeat (37) @(posedge clk);
    rst <= 1'b1;
    @(posedge clk);
    rst <= 1'b0;
    run(3 * STEP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
