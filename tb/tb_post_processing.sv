// tb_post_processing: self-checking testbench of post_processing.
//
// Drives random serial bits on all five inputs and checks, one cycle later,
// B5 = scrambler output and Bi = serial bit i XOR scrambler output for
// i = 1..4, using the reference scrambler of tb_ref_pkg. This also checks
// the single cycle of output latency.
module tb_post_processing;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  logic [4:0] ser, b;
  int         checks = 0, failures = 0;

  post_processing dut (.clk(clk), .rst(rst), .ser_i(ser), .b_o(b));

  always #5 clk = ~clk;

  initial begin
    bit [23:0] st;
    bit [4:0]  exp_b;
    bit        key;
    ser = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    st    = '0;
    exp_b = '0;
    for (int t = 0; t < 5000; t++) begin
      #1;
      ser = 5'($urandom);
      #1;
      checks++;
      if (b !== exp_b) begin
        failures++;
        $display("FAIL cycle %0d b=%b exp=%b", t, b, exp_b);
      end
      key   = ref_scr_out(st);
      exp_b = {key, ser[3:0] ^ {4{key}}};
      st    = ref_scr_next(st, ser[4]);
      @(posedge clk);
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
