// tb_workload_entropy: average entropy per bit of the truncated chaotic
// signals as a function of the truncation length Nb = 8 .. 16.
//
// Runs the FFRK integrator (ffrk_core, default parameters and initial
// condition) for NSAMP Runge-Kutta steps and keeps, for each of the five
// state variables, a histogram of its 16 least-significant bits, one sample
// per step. The histogram for a shorter length Nb is obtained by folding the
// 16-bit one modulo 2^Nb. For each Nb the Shannon entropy
//   H = -sum p_i log2 p_i   over the N = 2^Nb symbols
// is divided by Nb to give the average entropy per bit E(Nb), which is
// printed next to the value an ideal uniform source would show with the
// same number of samples (1 - (N-1) / (2 NSAMP ln2 Nb), the usual
// small-sample bias of the plug-in entropy estimate).
//
// The number of samples (100,000, the count used for the truncated-signal
// histogram) is this testbench's choice; the curve it is compared with gives
// no sample count. Checks, per variable: E(Nb) >= 0.99 for Nb <= 12, E(Nb)
// does not grow with Nb, and E(16) is clearly below E(12), i.e. the knee
// above 12 bits that motivates keeping 12 bits.
module tb_workload_entropy;
  import prng_pkg::*;

  localparam int NSAMP = 100000;
  localparam int NB_LO = 8;
  localparam int NB_HI = 16;

  logic     clk = 1'b0;
  logic     rst = 1'b1;
  state_t   st;
  logic     step;
  ffrk_en_t en;
  int       checks = 0, failures = 0;

  ffrk_core dut (.clk(clk), .rst(rst), .state_o(st), .step_o(step), .en_o(en));

  always #5 clk = ~clk;

  int hist [5][1 << NB_HI];

  function automatic real entropy_per_bit(logic [2:0] sig, int nb);
    int  nsym;
    real h, p;
    int  fold [];
    nsym = 1 << nb;
    fold = new[nsym];
    foreach (fold[k]) fold[k] = 0;
    for (int k = 0; k < (1 << NB_HI); k++) fold[k % nsym] += hist[sig][k];
    h = 0.0;
    foreach (fold[k]) begin
      if (fold[k] != 0) begin
        p = real'(fold[k]) / real'(NSAMP);
        h -= p * $ln(p) / $ln(2.0);
      end
    end
    return h / real'(nb);
  endfunction

  initial begin
    int  nsamp;
    real e [NB_LO:NB_HI];
    real ideal;
    string names [5];
    names = '{"X", "Y", "Z", "U", "V"};
    foreach (hist[i, k]) hist[i][k] = 0;
    nsamp = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    while (nsamp < NSAMP) begin
      @(posedge clk);
      #1;
      if (step) begin
        hist[0][st.x[NB_HI-1:0]]++;
        hist[1][st.y[NB_HI-1:0]]++;
        hist[2][st.z[NB_HI-1:0]]++;
        hist[3][st.u[NB_HI-1:0]]++;
        hist[4][st.v[NB_HI-1:0]]++;
        nsamp++;
      end
    end
    for (int s = 0; s < 5; s++) begin
      for (int nb = NB_LO; nb <= NB_HI; nb++) begin
        e[nb] = entropy_per_bit(s, nb);
        ideal = 1.0 - real'((1 << nb) - 1) / (2.0 * real'(NSAMP) * $ln(2.0) * real'(nb));
        $display("%s~ Nb=%0d  E=%f  (ideal source, same sample count: %f)", names[s], nb, e[nb], ideal);
        if (nb <= 12) begin
          checks++;
          if (e[nb] < 0.99) begin
            failures++;
            $display("FAIL %s~ E(%0d) = %f below 0.99", names[s], nb, e[nb]);
          end
        end
        if (nb > NB_LO) begin
          checks++;
          if (e[nb] > e[nb-1] + 1.0e-4) begin
            failures++;
            $display("FAIL %s~ E(%0d) = %f above E(%0d) = %f", names[s], nb, e[nb], nb - 1, e[nb-1]);
          end
        end
      end
      checks++;
      if (e[NB_HI] > e[12] - 0.01) begin
        failures++;
        $display("FAIL %s~ no drop above 12 bits: E(16) = %f, E(12) = %f", names[s], e[NB_HI], e[12]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSAMP * 65 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
