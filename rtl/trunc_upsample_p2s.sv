// trunc_upsample_p2s: truncation, up-sampling and parallel-to-serial
// conversion of one chaotic state variable.
//
// Truncation keeps the NB = 12 least-significant bits word_i[11:0] of the
// 32-bit fixed-point value (the paper picks 12 bits because the average
// entropy per bit falls off for longer fields). The state changes only once
// per Runge-Kutta step (65 cycles), while the serial output runs at one bit
// per clock, so the truncated word is up-sampled by sample-and-hold: every
// NB cycles the current word is copied into the shift register and then
// shifted out, most-significant of the 12 bits first. A state that lasts 65
// cycles is therefore serialized about 5.4 times.
//
// Truncation width and position follow the paper; the sample-and-hold form
// of up-sampling, the NB-cycle frame and the MSB-first order are this
// design's choices (the paper gives none of them).
//
// Interface: word_i (32-bit; bits above NB-1 are unused by design, that is
// the truncation), bit_o (1 bit per cycle), load_o high in the
// cycle a new word is sampled. Timing: the word sampled at a load_o cycle
// appears on bit_o in the following NB cycles. Synchronous active-high rst
// clears the shift register; the first sample happens in the first cycle
// after reset.
module trunc_upsample_p2s #(
  parameter int unsigned W_IN = 32,
  parameter int unsigned NB   = 12
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [W_IN-1:0] word_i,
  output logic            bit_o,
  output logic            load_o
);

  localparam int unsigned CW = $clog2(NB);

  logic [NB-1:0] trunc;
  logic [NB-1:0] sh_q;
  logic [CW-1:0] cnt_q;

  assign trunc  = word_i[NB-1:0];
  assign load_o = (cnt_q == CW'(NB - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q <= CW'(NB - 1);
      sh_q  <= '0;
    end else if (load_o) begin
      cnt_q <= '0;
      sh_q  <= trunc;
    end else begin
      cnt_q <= cnt_q + 1'b1;
      sh_q  <= {sh_q[NB-2:0], 1'b0};
    end
  end

  assign bit_o = sh_q[NB-1];

endmodule
