// ffrk_core: 5D hyperchaotic system integrated with the FFRK method
// (fourth-order Runge-Kutta with a single, time-shared F block).
//
// Classic RK4 needs four copies of F(S); here one hyperchaos_f is evaluated
// four times per step and its results are parked in R1..R4:
//
//   k1 = F(S)               R1, enable E1, F input = S
//   k2 = F(S + h/2 k1)      R2, enable E2, F input = S + (R1 >>> m)
//   k3 = F(S + h/2 k2)      R3, enable E3, F input = S + (R2 >>> m)
//   k4 = F(S + h k3)        R4, enable E4, F input = S + (R3 >>> n)
//   S' = S + h/6 (k1 + 2k2 + 2k3 + k4)      R0, enable E0
//
// The muxing follows the paper's FFRK block diagram: the main input mux has
// a 2-bit select {E2 xor E3, E4} choosing S (00), S + (kmux >>> m) (10) or
// S + (R3 >>> n) (01); a small mux selected by E3 gives kmux = E3 ? R2 : R1.
// The step h is a power of two so that h*k and h/2*k are shifts by n and
// m = n + 1; the output side adds (R2 + R3) << 1 to R1 + R4, multiplies by
// the constant h/6 and adds S.
//
// Step size: the paper states h = 0.01 but draws the products as shifts by
// n = log2(h). This design keeps the shifts and uses h = 2^-H_SHIFT with
// H_SHIFT = 7 (h = 0.0078125, the power of two nearest 0.01); the h/6
// constant is 2^-H_SHIFT/6 rounded to Q4.27 so that the whole step uses the
// same h. Initial conditions default to the paper's x0 = 0.0002,
// y0 = 0.0005, z0 = 0.00005, u0 = 0.001, v0 = 0 (the paper prints the fourth
// one as "v = 0.001"; it is read as u0), rounded to Q4.27 (the literals
// below are round(value * 2^27)).
//
// Interface: state_o is S_n (the R0 output); step_o pulses in the cycle R0
// takes S_{n+1}; en_o exposes the enables. Synchronous active-high rst loads
// R0 with the initial condition and clears R1..R4.
// Timing: a step takes 4*PHASE_LEN + 1 cycles (65 at the defaults, as in the
// paper); state_o changes in the cycle after step_o.
module ffrk_core
  import prng_pkg::*;
#(
  parameter int unsigned PHASE_LEN = 16,
  parameter int unsigned H_SHIFT   = 7,
  parameter fx_t         X0        = 32'sd26844,   // 0.0002
  parameter fx_t         Y0        = 32'sd67109,   // 0.0005
  parameter fx_t         Z0        = 32'sd6711,    // 0.00005
  parameter fx_t         U0        = 32'sd134218,  // 0.001
  parameter fx_t         V0        = 32'sd0
) (
  input  logic     clk,
  input  logic     rst,
  output state_t   state_o,
  output logic     step_o,
  output ffrk_en_t en_o
);

  localparam int unsigned N_SHIFT = H_SHIFT;      // h     = 2^-n
  localparam int unsigned M_SHIFT = H_SHIFT + 1;  // h / 2 = 2^-m
  // h/6 in Q4.27 = round(2^(27-n) / 6)
  localparam fx_t H_DIV6 = fx_t'(((64'd1 << (FX_FRAC - H_SHIFT)) + 64'd3) / 64'd6);

  typedef enum logic [1:0] {
    SEL_S      = 2'b00,   // F(S)
    SEL_HALF   = 2'b10,   // F(S + h/2 k)
    SEL_FULL   = 2'b01    // F(S + h k3)
  } fsel_e;

  ffrk_en_t en;
  state_t   r0_q, r1_q, r2_q, r3_q, r4_q;
  state_t   kmux, s_half, s_full, f_in, f_out, s_next;
  logic [1:0] sel;

  ffrk_control #(.PHASE_LEN(PHASE_LEN)) u_ctrl (
    .clk  (clk),
    .rst  (rst),
    .en_o (en)
  );

  hyperchaos_f u_f (
    .clk (clk),
    .rst (rst),
    .s_i (f_in),
    .f_o (f_out)
  );

  // ---- input side: shifts, adders and muxes ------------------------------
  function automatic state_t add_shift(state_t s, state_t k, int unsigned sh);
    state_t r;
    r.x = s.x + (k.x >>> sh);
    r.y = s.y + (k.y >>> sh);
    r.z = s.z + (k.z >>> sh);
    r.u = s.u + (k.u >>> sh);
    r.v = s.v + (k.v >>> sh);
    return r;
  endfunction

  always_comb begin
    kmux   = en.e3 ? r2_q : r1_q;
    s_half = add_shift(r0_q, kmux, M_SHIFT);
    s_full = add_shift(r0_q, r3_q, N_SHIFT);
    sel    = {en.e2 ^ en.e3, en.e4};
    unique case (fsel_e'(sel))
      SEL_HALF: f_in = s_half;
      SEL_FULL: f_in = s_full;
      default:  f_in = r0_q;
    endcase
  end

  // ---- output side: S + h/6 (k1 + 2k2 + 2k3 + k4) -------------------------
  // The weighted sum k1 + 2k2 + 2k3 + k4 is kept at full precision
  // (ACC_W = 35 bits) before the multiplication by h/6; a 32-bit sum would
  // wrap whenever |k| exceeds 16/6 and throw the trajectory off the attractor.
  localparam int unsigned ACC_W = FX_W + 3;
  typedef logic signed [ACC_W-1:0]        acc_t;
  typedef logic signed [ACC_W+FX_W-1:0]   prod_t;

  function automatic fx_t rk_sum(fx_t s, fx_t k1, fx_t k2, fx_t k3, fx_t k4);
    acc_t  acc;
    prod_t p;
    acc = ((acc_t'(k2) + acc_t'(k3)) <<< 1) + (acc_t'(k1) + acc_t'(k4));
    p   = prod_t'(acc) * prod_t'(H_DIV6);
    return s + fx_t'(p >>> FX_FRAC);
  endfunction

  always_comb begin
    s_next.x = rk_sum(r0_q.x, r1_q.x, r2_q.x, r3_q.x, r4_q.x);
    s_next.y = rk_sum(r0_q.y, r1_q.y, r2_q.y, r3_q.y, r4_q.y);
    s_next.z = rk_sum(r0_q.z, r1_q.z, r2_q.z, r3_q.z, r4_q.z);
    s_next.u = rk_sum(r0_q.u, r1_q.u, r2_q.u, r3_q.u, r4_q.u);
    s_next.v = rk_sum(r0_q.v, r1_q.v, r2_q.v, r3_q.v, r4_q.v);
  end

  // ---- registers R0..R4 ---------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      r0_q <= '{x: X0, y: Y0, z: Z0, u: U0, v: V0};
      r1_q <= '0;
      r2_q <= '0;
      r3_q <= '0;
      r4_q <= '0;
    end else begin
      if (en.e1) r1_q <= f_out;
      if (en.e2) r2_q <= f_out;
      if (en.e3) r3_q <= f_out;
      if (en.e4) r4_q <= f_out;
      if (en.e0) r0_q <= s_next;
    end
  end

  assign state_o = r0_q;
  assign step_o  = en.e0;
  assign en_o    = en;

endmodule
