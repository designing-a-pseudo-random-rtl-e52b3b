// prng_pkg: types and constants shared by the 5D-hyperchaotic random bit
// generator.
//
// All datapath words are 32-bit two's-complement fixed point with one sign
// bit, four integer bits and 27 fraction bits (Q4.27), so the representable
// range is [-16, 16). The word width and the 27 fraction bits follow the
// paper; the four integer bits are what remains of 32 bits. A state vector
// S = (x, y, z, u, v) is carried as one packed struct.
//
// fx_mul() is the single fixed-point multiply used everywhere: full 64-bit
// product, arithmetic shift right by the fraction width (rounds toward minus
// infinity), low 32 bits kept. Overflow wraps.
package prng_pkg;

  localparam int unsigned FX_W    = 32;  // word width
  localparam int unsigned FX_FRAC = 27;  // fraction bits

  typedef logic signed [FX_W-1:0] fx_t;

  // 1.0 in Q4.27
  localparam fx_t FX_ONE = fx_t'(1) <<< FX_FRAC;

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
    fx_t u;
    fx_t v;
  } state_t;

  // Register enables of the FFRK integrator: E1..E4 load R1..R4 with k1..k4,
  // E0 loads R0 with the next state.
  typedef struct packed {
    logic e0;
    logic e1;
    logic e2;
    logic e3;
    logic e4;
  } ffrk_en_t;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

endpackage
