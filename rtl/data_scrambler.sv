// data_scrambler: bias-removing scrambler of the post-processing stage.
//
// Four M-stage shift registers A, B, C, D (M = 6 flip-flops each, as in the
// paper) are cross-coupled through XOR gates and fed by the serial,
// truncated V stream. Index 0 is the first flip-flop of a register, M-1 its
// output. Wiring, as traced from the paper's scrambler diagram:
//
//   fa     = B[0] ^ B[M-1]          fb     = D[0] ^ D[M-1]
//   A.in   = v_i ^ fa               B.in   = A[M-1] ^ fb
//   C.in   = A[0] ^ fb              D.in   = C[M-1] ^ fa
//   s_o    = C.in
//
// The drawing has no stage numbers; the taps after the first flip-flop are
// read from where the lines leave the first DI/DO cell. s_o depends only on
// register contents, so it carries no combinational path from v_i.
// Reset (synchronous, active high) clears all 4*M flip-flops, which is this
// design's choice.
//
// Interface: v_i serial input bit, s_o scrambler output bit (B5 of the
// generator and the key bit of B1..B4); one bit per clock.
module data_scrambler #(
  parameter int unsigned M = 6
) (
  input  logic clk,
  input  logic rst,
  input  logic v_i,
  output logic s_o
);

  logic [M-1:0] a_q, b_q, c_q, d_q;
  logic         fa, fb, a_in, b_in, c_in, d_in;

  always_comb begin
    fa   = b_q[0] ^ b_q[M-1];
    fb   = d_q[0] ^ d_q[M-1];
    a_in = v_i ^ fa;
    b_in = a_q[M-1] ^ fb;
    c_in = a_q[0] ^ fb;
    d_in = c_q[M-1] ^ fa;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_q <= '0;
      b_q <= '0;
      c_q <= '0;
      d_q <= '0;
    end else begin
      a_q <= {a_q[M-2:0], a_in};
      b_q <= {b_q[M-2:0], b_in};
      c_q <= {c_q[M-2:0], c_in};
      d_q <= {d_q[M-2:0], d_in};
    end
  end

  assign s_o = c_in;

endmodule
