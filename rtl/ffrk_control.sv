// ffrk_control: enable sequencer of the FFRK (fourth-folding Runge-Kutta)
// integrator.
//
// One Runge-Kutta step is split into four evaluation phases and one update
// cycle, repeated forever:
//
//   cycles  0 .. L-1     E1 high   (F evaluates S,           R1 <- k1)
//   cycles  L .. 2L-1    E2 high   (F evaluates S + h/2 k1,  R2 <- k2)
//   cycles 2L .. 3L-1    E3 high   (F evaluates S + h/2 k2,  R3 <- k3)
//   cycles 3L .. 4L-1    E4 high   (F evaluates S + h k3,    R4 <- k4)
//   cycle  4L            E0 high   (R0 <- S_{n+1})
//
// with L = PHASE_LEN, so a step takes 4L+1 cycles. The order E1, E2, E3, E4,
// E0 and the non-overlapping enables follow the paper's timing diagram; the
// paper reports 65 cycles per step, and PHASE_LEN = 16 (4*16+1 = 65) is this
// design's split of that figure. The paper builds the unit from delay blocks;
// here a cycle counter does the same job. A phase must be longer than the
// 5-cycle latency of F so that the last capture of each Ri sees a settled F
// output (checked by an elaboration-time assertion).
//
// Interface: en_o (ffrk_en_t, exactly one enable high in every cycle).
// Timing: the first cycle after rst is cycle 0 of phase E1.
module ffrk_control
  import prng_pkg::*;
#(
  parameter int unsigned PHASE_LEN = 16,
  parameter int unsigned F_LATENCY = 5
) (
  input  logic     clk,
  input  logic     rst,
  output ffrk_en_t en_o
);

  localparam int unsigned STEP_LEN = 4 * PHASE_LEN + 1;
  localparam int unsigned CW       = $clog2(STEP_LEN);

  if (PHASE_LEN < F_LATENCY + 1) begin : g_bad_phase
    $error("ffrk_control: PHASE_LEN must exceed the F latency");
  end

  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (rst || cnt_q == CW'(STEP_LEN - 1)) cnt_q <= '0;
    else                                   cnt_q <= cnt_q + 1'b1;
  end

  always_comb begin
    en_o    = '0;
    en_o.e1 = (cnt_q <  CW'(PHASE_LEN));
    en_o.e2 = (cnt_q >= CW'(PHASE_LEN))     && (cnt_q < CW'(2 * PHASE_LEN));
    en_o.e3 = (cnt_q >= CW'(2 * PHASE_LEN)) && (cnt_q < CW'(3 * PHASE_LEN));
    en_o.e4 = (cnt_q >= CW'(3 * PHASE_LEN)) && (cnt_q < CW'(4 * PHASE_LEN));
    en_o.e0 = (cnt_q == CW'(4 * PHASE_LEN));
  end

  // exactly one enable at a time
  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot(en_o));

endmodule
