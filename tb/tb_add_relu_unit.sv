// tb_add_relu_unit: checks y[i] = max(sat(a[i]+b[i]), 0) lane by lane,
// including saturation at both ends of the 16-bit range.
module tb_add_relu_unit;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  int checks = 0, failures = 0;
  word_t a, b, y;
  add_relu_unit dut (.a, .b, .y);

  initial begin
    for (int t = 0; t < 1000; t++) begin
      a = rand_word((t % 2) ? 32767 : 300);
      b = rand_word((t % 2) ? 32767 : 300);
      if (t == 0) begin a = '{default: 16'sh7000}; b = '{default: 16'sh7000}; end
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (longint'(y[i]) != r_add_relu(a[i], b[i])) begin
          failures++;
          $display("FAIL lane %0d: %0d + %0d -> %0d", i, a[i], b[i], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
