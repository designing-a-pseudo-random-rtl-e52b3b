// prng5d_top: pseudo-random bit generator built on a 5D hyperchaotic system.
//
// Data flow (one clock domain):
//
//   ffrk_core            integrates x' = y, y' = z, z' = u,
//                        u' = -z - u/2 + (x-1) y, v' = -u - v/2 + (x-1) z
//                        with Runge-Kutta 4 in Q4.27; new state every 65
//                        cycles
//   trunc_upsample_p2s   x5: keep bits [11:0] of each variable, sample every
//                        12 cycles, shift out one bit per cycle
//   post_processing      V bits drive the data scrambler; B5 = scrambler
//                        output, Bi = (X, Y, Z, U bit) ^ B5, registered
//
// All parameters default to the paper's values (32-bit words, 27 fraction
// bits, 12 kept bits, m = 6) or, where the paper gives none, to this
// design's choices described in the sub-modules (16-cycle phases, h = 2^-7).
// X0..V0 set the initial condition (Q4.27 integers, round(value * 2^27));
// the defaults are the paper's. The paper shows that x0 = c decides the
// regime: stable for 0.5 < c < 0.92, bounded oscillation below 0.5, rich
// chaos below about 0.05.
//
// Interface: b_o[0..4] = B1..B5, one bit each per clock after reset;
// state_o is the chaotic state S_n, step_o pulses when it advances, en_o
// shows the integrator's phase enables and frame_o[i] marks the cycles in
// which lane i samples a new 12-bit word; these are for observation. Synchronous active-high rst restarts the system from its
// initial condition. Timing: b_o is valid from the second cycle after reset
// is released.
module prng5d_top
  import prng_pkg::*;
#(
  parameter int unsigned PHASE_LEN = 16,
  parameter int unsigned H_SHIFT   = 7,
  parameter int unsigned NB        = 12,
  parameter int unsigned M         = 6,
  parameter fx_t         X0        = 32'sd26844,   // 0.0002
  parameter fx_t         Y0        = 32'sd67109,   // 0.0005
  parameter fx_t         Z0        = 32'sd6711,    // 0.00005
  parameter fx_t         U0        = 32'sd134218,  // 0.001
  parameter fx_t         V0        = 32'sd0
) (
  input  logic       clk,
  input  logic       rst,
  output logic [4:0] b_o,
  output state_t     state_o,
  output logic       step_o,
  output ffrk_en_t   en_o,
  output logic [4:0] frame_o
);

  state_t     state;
  ffrk_en_t   en;
  logic [4:0] ser;
  logic [4:0] load;
  fx_t        lane [5];

  ffrk_core #(
    .PHASE_LEN (PHASE_LEN),
    .H_SHIFT   (H_SHIFT),
    .X0        (X0),
    .Y0        (Y0),
    .Z0        (Z0),
    .U0        (U0),
    .V0        (V0)
  ) u_core (
    .clk     (clk),
    .rst     (rst),
    .state_o (state),
    .step_o  (step_o),
    .en_o    (en)
  );

  assign lane[0] = state.x;
  assign lane[1] = state.y;
  assign lane[2] = state.z;
  assign lane[3] = state.u;
  assign lane[4] = state.v;

  for (genvar i = 0; i < 5; i++) begin : g_lane
    trunc_upsample_p2s #(.W_IN(FX_W), .NB(NB)) u_p2s (
      .clk    (clk),
      .rst    (rst),
      .word_i (lane[i]),
      .bit_o  (ser[i]),
      .load_o (load[i])
    );
  end

  post_processing #(.M(M)) u_pp (
    .clk   (clk),
    .rst   (rst),
    .ser_i (ser),
    .b_o   (b_o)
  );

  assign state_o = state;
  assign en_o    = en;
  assign frame_o = load;

endmodule
