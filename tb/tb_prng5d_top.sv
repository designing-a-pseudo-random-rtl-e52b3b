// tb_prng5d_top: end-to-end, self-checking testbench of the whole generator
// at its default parameters (no parameter overrides).
//
// An independent cycle model built from tb_ref_pkg predicts every output:
//   * state S_n advances by one RK4 step (ref_step, h = 2^-7) every 65
//     cycles; S_n is visible in cycles 65n .. 65n+64 after reset;
//   * each lane samples bits [11:0] of its variable in cycles 0, 12, 24, ...
//     and sends them MSB first in the next 12 cycles;
//   * the V lane drives the reference scrambler; B5 = scrambler output and
//     Bi = lane i ^ B5, registered once.
// b_o and state_o are compared in every cycle for NSTEPS Runge-Kutta steps.
// Mechanism counters (each must occur at least once): the four evaluation
// phases E1..E4, the state update E0, a lane sampling a new state word, a
// lane sampling the same state word again (up-sampling by repetition), and
// a one on every output stream. The fraction of ones per stream is printed.
module tb_prng5d_top;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int STEP   = 65;
  localparam int NSTEPS = 1500;
  localparam int NCYC   = NSTEPS * STEP;

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  logic [4:0] b, frame;
  state_t     st;
  logic       step;
  ffrk_en_t   en;
  int         checks = 0, failures = 0;

  prng5d_top dut (
    .clk(clk), .rst(rst), .b_o(b), .state_o(st), .step_o(step), .en_o(en), .frame_o(frame)
  );

  always #5 clk = ~clk;

  function automatic vec5_t to_vec(state_t s);
    vec5_t v;
    v = '{s.x, s.y, s.z, s.u, s.v};
    return v;
  endfunction

  initial begin
    vec5_t     s_cur, word_src;
    bit [11:0] word [5];
    bit [11:0] last_word [5];
    bit [23:0] scr;
    bit [4:0]  ser, exp_b;
    bit        key;
    int        n_e [5];
    int        n_new, n_repeat, mism_b, mism_s;
    int        ones [5];
    bit        have_word;

    s_cur     = '{26844, 67109, 6711, 134218, 0};
    scr       = '0;
    exp_b     = '0;
    have_word = 1'b0;
    n_e       = '{default: 0};
    ones      = '{default: 0};
    n_new     = 0;
    n_repeat  = 0;
    mism_b    = 0;
    mism_s    = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int t = 0; t < NCYC; t++) begin
      #1;
      if (t > 0 && t % STEP == 0) s_cur = ref_step(s_cur, 7);
      // state
      checks++;
      if (to_vec(st) != s_cur) begin
        failures++;
        if (mism_s++ < 5) $display("FAIL state mismatch in cycle %0d", t);
      end
      // serial lanes: bit shown in this cycle
      for (int i = 0; i < 5; i++) begin
        int k;
        k      = (t - 1) % 12;
        ser[i] = (t == 0) ? 1'b0 : word[i][11 - k];
      end
      // outputs
      checks++;
      if (b !== exp_b) begin
        failures++;
        if (mism_b++ < 5) $display("FAIL b_o=%b exp=%b in cycle %0d", b, exp_b, t);
      end
      for (int i = 0; i < 5; i++) if (b[i]) ones[i]++;
      // mechanism counters
      if (en.e1) n_e[1]++;
      if (en.e2) n_e[2]++;
      if (en.e3) n_e[3]++;
      if (en.e4) n_e[4]++;
      if (en.e0) n_e[0]++;
      checks++;
      if (frame[0] !== (t % 12 == 0)) begin
        failures++;
        $display("FAIL frame marker in cycle %0d", t);
      end
      // next cycle's model state
      key   = ref_scr_out(scr);
      exp_b = {key, ser[3:0] ^ {4{key}}};
      scr   = ref_scr_next(scr, ser[4]);
      if (t % 12 == 0) begin
        for (int i = 0; i < 5; i++) begin
          word[i] = s_cur[i][11:0];
        end
        if (have_word && word == last_word) n_repeat++;
        else if (have_word)                 n_new++;
        last_word = word;
        have_word = 1'b1;
      end
      @(posedge clk);
    end
    $display("mechanisms: E1=%0d E2=%0d E3=%0d E4=%0d E0(steps)=%0d new-word samples=%0d repeated-word samples=%0d",
             n_e[1], n_e[2], n_e[3], n_e[4], n_e[0], n_new, n_repeat);
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (n_e[i] == 0) begin
        failures++;
        $display("FAIL enable E%0d never high", i);
      end
      checks++;
      if (ones[i] == 0) begin
        failures++;
        $display("FAIL B%0d never 1", i + 1);
      end
      $display("B%0d: fraction of ones %f over %0d bits", i + 1, real'(ones[i]) / real'(NCYC), NCYC);
    end
    checks++;
    if (n_new == 0)    begin failures++; $display("FAIL no new-word sample"); end
    checks++;
    if (n_repeat == 0) begin failures++; $display("FAIL no repeated-word sample"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
