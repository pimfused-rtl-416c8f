// relu_unit: rectified linear unit, y = max(x, 0), on one element.
//
// Follows the BN stage of a PIMcore and is applied when the CONV_BN_RELU
// flag is set. Purely combinational; signed two's complement input.
module relu_unit
  import pimfused_pkg::*;
(
  input  elem_t x,
  output elem_t y
);
  assign y = x[DATA_W-1] ? elem_t'(0) : x;
endmodule
