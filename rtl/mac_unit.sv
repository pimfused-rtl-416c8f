// mac_unit: the multiply-accumulate datapath of a PIMcore.
//
// LANES multipliers form the element products of two words (one from the
// LBUF, one broadcast from the GBUF); a binary adder tree reduces them to
// one sum; a feedback multiplexer picks either zero (first step) or the
// accumulator register, and a final adder adds the sum into the register.
// This is the structure drawn for the MAC of a PIMcore (multipliers, adder
// tree, multiplexer, adder, Reg with feedback); the widths, the two's
// complement integer arithmetic and the single-cycle timing are this
// design's own choices.
//
// Timing: when en is high, acc is updated at the clock edge; the new value
// is visible one cycle later. first=1 discards the old accumulator.
// No overflow handling: ACC_W is wide enough for 2^(ACC_W-2*DATA_W-LANE_W)
// accumulation steps of full-scale products.
module mac_unit
  import pimfused_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned AW    = ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        first,
  input  logic signed [N-1:0][DW-1:0] a,
  input  logic signed [N-1:0][DW-1:0] b,
  output logic signed [AW-1:0]        acc
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP     = 1 << LEVELS;   // tree width, padded to 2^k

  // tree[l][i]: node i of level l; level 0 holds the products.
  logic signed [AW-1:0] tree [LEVELS+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (i < N) tree[0][i] = AW'($signed(a[i]) * $signed(b[i]));
      else       tree[0][i] = '0;
    end
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < NP; i++) begin
        if (i < (NP >> l)) tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
        else               tree[l][i] = '0;
      end
    end
  end

  logic signed [AW-1:0] fb;
  assign fb = first ? '0 : acc;   // feedback multiplexer

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= fb + tree[LEVELS][0];
  end
endmodule
