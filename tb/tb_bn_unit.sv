// tb_bn_unit: checks y = sat(((acc*scale) >>> shift) + bias) for random
// accumulator values, scales, biases and shifts, including saturation.
module tb_bn_unit;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] acc;
  elem_t scale, bias, y;
  logic [5:0] shift;
  bn_unit dut (.acc, .scale, .bias, .shift, .y);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint a;
      a = longint'($signed($urandom)) >>> $urandom_range(24, 0);
      if (t % 3 == 0) a = a * 1000;
      acc   = a[ACC_W-1:0];
      scale = elem_t'($urandom);
      bias  = elem_t'($urandom);
      shift = $urandom_range(30, 0);
      #1;
      checks++;
      if (longint'(y) != r_bn(a, scale, bias, shift)) begin
        failures++;
        $display("FAIL bn acc %0d scale %0d bias %0d shift %0d -> %0d exp %0d",
                 a, scale, bias, shift, y, r_bn(a, scale, bias, shift));
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
