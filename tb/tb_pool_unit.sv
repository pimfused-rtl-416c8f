// tb_pool_unit: checks one pooling step lane by lane for max and average
// pooling, with and without window start (init), and pools a whole random
// window step by step against the reference.
module tb_pool_unit;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  int checks = 0, failures = 0;
  word_t old, x, y;
  logic init, avg;
  logic [3:0] shift;
  pool_unit dut (.old, .x, .init, .avg, .shift, .y);

  initial begin
    for (int t = 0; t < 1500; t++) begin
      old = rand_word(20000); x = rand_word(20000);
      init = $urandom_range(1, 0); avg = $urandom_range(1, 0); shift = $urandom_range(3, 0);
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (longint'(y[i]) != r_pool(old[i], x[i], init, avg, shift)) begin
          failures++;
          $display("FAIL lane %0d old %0d x %0d init %0d avg %0d sh %0d -> %0d",
                   i, old[i], x[i], init, avg, shift, y[i]);
        end
      end
    end
    // A 2x2 max window and a 2x2 average window, fed one word per step.
    for (int m = 0; m < 2; m++) begin
      word_t win [4];
      word_t run;
      for (int k = 0; k < 4; k++) win[k] = rand_word(1000);
      avg = m; shift = 2;
      for (int k = 0; k < 4; k++) begin
        old = run; x = win[k]; init = (k == 0); #1; run = y;
      end
      for (int i = 0; i < LANES; i++) begin
        longint e;
        if (m == 0) e = win[0][i];
        else        e = 0;
        for (int k = 0; k < 4; k++)
          if (m == 0) e = (win[k][i] > e) ? win[k][i] : e;
          else        e += longint'(win[k][i]) >>> 2;
        checks++;
        if (longint'(run[i]) != e) begin
          failures++;
          $display("FAIL window mode %0d lane %0d: %0d expected %0d", m, i, run[i], e);
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
