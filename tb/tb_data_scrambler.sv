// tb_data_scrambler: self-checking testbench of data_scrambler (M = 6).
//
// Feeds a random serial V stream and compares s_o in every cycle with the
// reference scrambler tb_ref_pkg::ref_scr_out / ref_scr_next, which keeps
// the four 6-bit shift registers in one 24-bit vector. Also checks that a
// constant-zero input after reset keeps the output at zero (all registers
// cleared) and that a single 1 bit on V reaches the output.
module tb_data_scrambler;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic v, s;
  int   checks = 0, failures = 0;

  data_scrambler dut (.clk(clk), .rst(rst), .v_i(v), .s_o(s));

  always #5 clk = ~clk;

  initial begin
    bit [23:0] st;
    int        ones;
    v = 1'b0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    st   = '0;
    ones = 0;
    for (int t = 0; t < 5000; t++) begin
      #1;
      // zeros for 20 cycles, a single one, zeros for 20 more, then random
      if (t < 41) v = (t == 20);
      else        v = 1'($urandom);
      #1;
      checks++;
      if (s !== ref_scr_out(st)) begin
        failures++;
        $display("FAIL cycle %0d s_o=%b exp=%b", t, s, ref_scr_out(st));
      end
      if (t > 20 && t < 41 && s) ones++;
      st = ref_scr_next(st, v);
      @(posedge clk);
    end
    checks++;
    if (ones == 0) begin
      failures++;
      $display("FAIL impulse on V never reached the output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
