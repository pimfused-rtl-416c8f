// tb_mac_unit: drives random operand words into the MAC, with and without
// the accumulator clear, and checks the accumulator one cycle after each
// step against a software dot-product model (one step per cycle).
module tb_mac_unit;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, en = 0, first = 0;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  word_t a, b;
  logic signed [ACC_W-1:0] acc;
  longint model = 0;
  int cycles = 0;

  mac_unit dut (.clk, .rst_n, .en, .first, .a, .b, .acc);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en    = ($urandom_range(3, 0) != 0);
      first = (t % 9 == 0);
      a     = rand_word((t % 5 == 0) ? 32767 : 500);
      b     = rand_word((t % 5 == 0) ? 32767 : 500);
      if (en) model = (first ? 0 : model) + r_dot(a, b);
      @(negedge clk);   // result one edge later
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        $display("FAIL t=%0d acc %0d expected %0d", t, acc, model);
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles > 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
