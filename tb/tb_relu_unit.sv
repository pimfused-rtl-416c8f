// tb_relu_unit: checks y = max(x, 0) on random and corner inputs.
module tb_relu_unit;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  int checks = 0, failures = 0;
  elem_t x, y;
  relu_unit dut (.x, .y);

  task automatic check_one(input elem_t v);
    x = v;
    #1;
    checks++;
    if (longint'(y) != r_relu(longint'(v))) begin
      failures++;
      $display("FAIL relu(%0d) = %0d", v, y);
    end
  endtask

  initial begin
    check_one(0); check_one(1); check_one(-1); check_one(16'sh7fff); check_one(-16'sh8000);
    repeat (2000) check_one(elem_t'($urandom));
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
