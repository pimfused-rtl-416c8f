// pool_unit: one step of a pooling window, lane by lane.
//
// Max pooling: y[i] = init ? x[i] : max(old[i], x[i]).
// Average pooling: every input is pre-scaled by 2^-shift (the window size)
// and summed: y[i] = init ? x[i]>>>shift : sat(old[i] + (x[i]>>>shift)).
// A window is pooled by feeding its elements one per step with the running
// value fed back as `old`; the caller holds that value (a register in the
// GBcore and the PIMcore vector path, the LBUF lane in a fused CONV+POOL).
// One instance sits in every PIMcore and one in the GBcore (POOL flag).
// Pre-scaled summation for averages is this design's choice.
// Purely combinational.
module pool_unit
  import pimfused_pkg::*;
(
  input  word_t      old,
  input  word_t      x,
  input  logic       init,
  input  logic       avg,
  input  logic [3:0] shift,
  output word_t      y
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      elem_t xs;
      xs = x[i] >>> shift;
      if (avg) y[i] = init ? xs : sat_elem(64'(old[i]) + 64'(xs));
      else     y[i] = (init || (x[i] > old[i])) ? x[i] : old[i];
    end
  end
endmodule
