// hyperchaos_f: the vector field F(S) of the 5D hyperchaotic system
//
//   Fx = y
//   Fy = z
//   Fz = u
//   Fu = (x - 1) * y - (z + u/2)
//   Fv = (x - 1) * z - (u + v/2)
//
// in Q4.27 fixed point. This is the one F block that the FFRK integrator
// evaluates four times per Runge-Kutta step.
//
// Structure and register counts follow the paper's block diagram:
//   Fx, Fy, Fz   plain wires (no register);
//   x - 1        1 register;
//   (x-1) * y    3 registers (the multiplier takes the registered x-1 and
//                the live y; the same for z in the Fv branch);
//   u >> 1       1 register, then + z in 1 register (v >> 1 and + u for Fv);
//   a - b        1 register.
// The longest path therefore has 5 registers, the shorter "b" path only 3;
// the paths are deliberately left unbalanced as drawn, so Fu/Fv are valid
// 5 cycles after the input S has become stable and as long as it stays
// stable. The caller (ffrk_core) holds S for a whole phase.
//
// Design choices of this implementation (not in the paper): the x - 1 term
// is computed once and shared by the Fu and Fv branches (the diagram draws
// two identical subtractors); products truncate toward minus infinity;
// overflow wraps; reset clears the pipeline.
//
// Interface: s_i (state_t) in, f_o (state_t) out; clk, synchronous
// active-high rst.
module hyperchaos_f
  import prng_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  state_t s_i,
  output state_t f_o
);

  fx_t xm1_q;                       // x - 1           (z^-1)
  fx_t mul_u_q [3];                 // (x-1)*y         (z^-3)
  fx_t mul_v_q [3];                 // (x-1)*z         (z^-3)
  fx_t uh_q, vh_q;                  // u>>1, v>>1      (z^-1)
  fx_t bu_q, bv_q;                  // z+u/2, u+v/2    (z^-1)
  fx_t fu_q, fv_q;                  // a - b           (z^-1)

  always_ff @(posedge clk) begin
    if (rst) begin
      xm1_q   <= '0;
      mul_u_q <= '{default: '0};
      mul_v_q <= '{default: '0};
      uh_q    <= '0;
      vh_q    <= '0;
      bu_q    <= '0;
      bv_q    <= '0;
      fu_q    <= '0;
      fv_q    <= '0;
    end else begin
      xm1_q      <= s_i.x - FX_ONE;
      mul_u_q[0] <= fx_mul(xm1_q, s_i.y);
      mul_u_q[1] <= mul_u_q[0];
      mul_u_q[2] <= mul_u_q[1];
      mul_v_q[0] <= fx_mul(xm1_q, s_i.z);
      mul_v_q[1] <= mul_v_q[0];
      mul_v_q[2] <= mul_v_q[1];
      uh_q       <= s_i.u >>> 1;
      vh_q       <= s_i.v >>> 1;
      bu_q       <= s_i.z + uh_q;
      bv_q       <= s_i.u + vh_q;
      fu_q       <= mul_u_q[2] - bu_q;
      fv_q       <= mul_v_q[2] - bv_q;
    end
  end

  always_comb begin
    f_o.x = s_i.y;
    f_o.y = s_i.z;
    f_o.z = s_i.u;
    f_o.u = fu_q;
    f_o.v = fv_q;
  end

endmodule
