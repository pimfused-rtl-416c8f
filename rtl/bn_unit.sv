// bn_unit: batch normalisation of one accumulated MAC result.
//
// Inference-time batch normalisation folds into one scale and one bias per
// output channel: y = sat(((acc * scale) >>> shift) + bias). The scale is a
// signed fixed-point factor with `shift` fraction bits; the result is
// saturated to one DATA_W element. The block sits after the MAC register in
// every PIMcore (CONV_BN and CONV_BN_RELU flags). The folded fixed-point
// form is this design's choice; the paper names the BN stage only.
//
// Purely combinational.
module bn_unit
  import pimfused_pkg::*;
#(
  parameter int unsigned AW = ACC_W
) (
  input  logic signed [AW-1:0] acc,
  input  elem_t                scale,
  input  elem_t                bias,
  input  logic [5:0]           shift,
  output elem_t                y
);
  logic signed [AW+DATA_W-1:0] prod;
  logic signed [63:0]          scaled;

  always_comb begin
    prod   = acc * scale;
    scaled = 64'(prod >>> shift) + 64'(bias);
    y      = sat_elem(scaled);
  end
endmodule
