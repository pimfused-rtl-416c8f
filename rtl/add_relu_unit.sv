// add_relu_unit: residual addition followed by ReLU, lane by lane.
//
// y[i] = max(sat(a[i] + b[i]), 0) for each of the LANES elements of a word.
// One instance sits in every PIMcore and one in the GBcore (ADD_RELU flag).
// The addition saturates to DATA_W bits (own choice; the paper does not
// give number formats). Purely combinational.
module add_relu_unit
  import pimfused_pkg::*;
(
  input  word_t a,
  input  word_t b,
  output word_t y
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      elem_t s;
      s    = sat_elem(64'(a[i]) + 64'(b[i]));
      y[i] = s[DATA_W-1] ? elem_t'(0) : s;
    end
  end
endmodule
