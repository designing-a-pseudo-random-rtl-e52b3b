// tb_trunc_upsample_p2s: self-checking testbench of trunc_upsample_p2s.
//
// Drives a random 32-bit word that changes at random times. An independent
// model expects: load_o in cycles 0, 12, 24, ... after reset; the word's
// bits [11:0] sampled in a load cycle appear on bit_o during the next 12
// cycles, bit 11 first; a 0 bit in the first cycle (cleared register).
module tb_trunc_upsample_p2s;

  logic        clk = 1'b0;
  logic        rst = 1'b1;
  logic [31:0] w;
  logic        b, ld;
  int          checks = 0, failures = 0;

  trunc_upsample_p2s dut (.clk(clk), .rst(rst), .word_i(w), .bit_o(b), .load_o(ld));

  always #5 clk = ~clk;

  initial begin
    logic [11:0] cur;
    int          pos;
    w = $urandom;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    cur = '0;
    pos = 12;   // no word yet: expect zeros
    for (int t = 0; t < 3000; t++) begin
      #1;
      if ($urandom_range(0, 9) == 0) w = $urandom;
      #1;
      checks++;
      if (ld !== (t % 12 == 0)) begin
        failures++;
        $display("FAIL load_o=%b at cycle %0d", ld, t);
      end
      checks++;
      if (b !== ((pos < 12) ? cur[11 - pos] : 1'b0)) begin
        failures++;
        $display("FAIL bit at cycle %0d", t);
      end
      pos++;
      if (t % 12 == 0) begin
        cur = w[11:0];
        pos = 0;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
