// post_processing: turns the five serial chaotic bit streams into the five
// output random bit streams B1..B5.
//
// The serial V stream seeds the data scrambler; its output bit is B5 and is
// XORed with the serial X, Y, Z and U bits to give B1..B4. The five results
// are registered once, matching the paper's remark that the random outputs
// have a latency of one cycle. The structure follows the paper; the bit
// numbering of the ports is this design's.
//
// Interface: ser_i[0..4] = serial X, Y, Z, U, V bits; b_o[0..4] = B1..B5.
// Timing: b_o in cycle t+1 is computed from ser_i[3:0] and the scrambler
// state in cycle t. Synchronous active-high rst clears the scrambler and
// the output register.
module post_processing #(
  parameter int unsigned M = 6
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [4:0] ser_i,
  output logic [4:0] b_o
);

  logic key;

  data_scrambler #(.M(M)) u_scr (
    .clk (clk),
    .rst (rst),
    .v_i (ser_i[4]),
    .s_o (key)
  );

  always_ff @(posedge clk) begin
    if (rst) b_o <= '0;
    else     b_o <= {key, ser_i[3:0] ^ {4{key}}};
  end

endmodule
