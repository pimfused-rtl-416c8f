// pimcore: one near-bank processing core of the PIMfused channel.
//
// Holds a local buffer (LBUF) and the fused datapath MAC -> BN -> ReLU ->
// Add & ReLU -> Pool. Every PIMcore of the channel receives the same
// micro-op stream from the controller, so all of them execute one
// PIMcore_CMP in lock step, each on the data of its own LBUF (its own
// spatial tile in fused-layer dataflow, its own output channels in
// layer-by-layer dataflow), while the GBUF broadcasts the shared operand.
//
// Two stages. Issue: the micro-op's read strobes address both LBUF ports
// (and, in the GBcore, the GBUF word that arrives here as gb_bcast).
// Execute, one cycle later, on the returned data:
//   mac  : acc <= (mac_first ? 0 : acc) + dot(LBUF port A, gb_bcast)
//   post : r = BN(acc); ReLU if CONV_BN_RELU; Add & ReLU with lane `lane`
//          of port A (residual) if ADD_RELU; Pool with lane `lane` of port
//          B (old destination) if POOL and not pool_init; write r into lane
//          `lane` of LBUF[wr_addr].
//   vec  : v = ADD_RELU ? relu(A + B) : A; without POOL write v to wr_addr;
//          with POOL fold v into a running pool register and write the
//          pooled word to wr_addr on vec_last.
// Bank transfers: fill_* writes a word from the bank into the LBUF
// (PIM_BK2LBUF); lbuf_rdata is port A data going to the bank (PIM_LBUF2BK).
//
// From the paper: the unit list and order (multipliers, adder tree, Reg,
// BN, Relu, Add & Relu, Pool Unit, LBUF; operand from GBUF), the four
// PIMcore_CMP flags and the lock-step execution. This design's choices: the
// micro-op format, the scalar CONV result written lane by lane, the
// read-modify-write pooling across CONV results, and all widths.
module pimcore
  import pimfused_pkg::*;
#(
  parameter int unsigned LBUF_BYTES = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  uop_t                  uop,
  input  word_t                 gb_bcast,
  input  logic                  fill_wr,
  input  logic [BUF_ADDR_W-1:0] fill_addr,
  input  word_t                 fill_data,
  output word_t                 lbuf_rdata
);
  // ---------------- LBUF ----------------
  word_t                 rdata_a, rdata_b;
  logic                  lb_wr;
  logic [BUF_ADDR_W-1:0] lb_waddr;
  logic [LANES-1:0]      lb_wmask;
  word_t                 lb_wdata;

  lbuf #(.BYTES(LBUF_BYTES)) u_lbuf (
    .clk, .rst_n,
    .rd_a(uop.rd_a), .addr_a(uop.addr_a), .rdata_a,
    .rd_b(uop.rd_b), .addr_b(uop.addr_b), .rdata_b,
    .wr(lb_wr), .waddr(lb_waddr), .wmask(lb_wmask), .wdata(lb_wdata)
  );
  assign lbuf_rdata = rdata_a;

  // ---------------- execute stage ----------------
  uop_t s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= uop;
  end

  // MAC
  logic signed [ACC_W-1:0] acc;
  mac_unit u_mac (
    .clk, .rst_n,
    .en(s1.mac), .first(s1.mac_first),
    .a(rdata_a), .b(gb_bcast), .acc
  );

  // BN -> ReLU on the scalar CONV result
  elem_t bn_y, relu_y, conv_r;
  bn_unit u_bn (.acc, .scale(s1.bn_scale), .bias(s1.bn_bias), .shift(s1.bn_shift), .y(bn_y));
  relu_unit u_relu (.x(bn_y), .y(relu_y));
  assign conv_r = s1.flags.conv_bn_relu ? relu_y : bn_y;

  // Add & ReLU, shared by the CONV and the vector path
  word_t ar_a, ar_b, ar_y;
  always_comb begin
    if (s1.post) begin
      ar_a = {LANES{conv_r}};
      ar_b = {LANES{rdata_a[s1.lane]}};
    end else begin
      ar_a = rdata_a;
      ar_b = rdata_b;
    end
  end
  add_relu_unit u_add (.a(ar_a), .b(ar_b), .y(ar_y));

  // Pool, shared by the CONV and the vector path
  word_t vec_v, pool_reg, pl_old, pl_x, pl_y;
  logic  pl_init;
  assign vec_v = s1.flags.add_relu ? ar_y : rdata_a;
  always_comb begin
    if (s1.post) begin
      pl_old  = rdata_b;
      pl_x    = s1.flags.add_relu ? ar_y : {LANES{conv_r}};
      pl_init = s1.pool_init;
    end else begin
      pl_old  = pool_reg;
      pl_x    = vec_v;
      pl_init = s1.vec_first && s1.pool_init;
    end
  end
  pool_unit u_pool (.old(pl_old), .x(pl_x), .init(pl_init), .avg(s1.pool_avg),
                    .shift(s1.pool_shift), .y(pl_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          pool_reg <= '0;
    else if (s1.vec && s1.flags.pool)    pool_reg <= pl_y;
  end

  // LBUF write port: bank fill, CONV lane result, or vector result
  always_comb begin
    lb_wr    = 1'b0;
    lb_waddr = s1.wr_addr;
    lb_wmask = '1;
    lb_wdata = vec_v;
    if (fill_wr) begin
      lb_wr    = 1'b1;
      lb_waddr = fill_addr;
      lb_wdata = fill_data;
    end else if (s1.post) begin
      lb_wr    = 1'b1;
      lb_wmask = LANES'(1) << s1.lane;
      lb_wdata = s1.flags.pool ? pl_y : pl_x;
    end else if (s1.vec) begin
      lb_wr    = !s1.flags.pool || s1.vec_last;
      lb_wdata = s1.flags.pool ? pl_y : vec_v;
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(fill_wr && (s1.post || s1.vec)))
    else $error("pimcore: bank fill collides with a compute write");
endmodule
