// gbcore: the channel-level core, holding the global buffer (GBUF) and its
// own Add & ReLU and Pool units.
//
// The GBUF is the channel's shared buffer: PIM_BK2GBUF fills it from one
// bank at a time (fill_*), PIM_GBUF2BK drains it to one bank (gbuf_rdata),
// and during PIMcore_CMP its port A output is broadcast to every PIMcore
// (the same gbuf_rdata). GBcore_CMP runs vector operations on GBUF words,
// the reduction work (pooling, residual addition) that layer-by-layer
// dataflow leaves outside the PIMcores:
//   v_k = ADD_RELU ? relu(GBUF[A_k] + GBUF[B_k]) : GBUF[A_k]
//   without POOL: GBUF[wr_addr] <= v_k each step;
//   with POOL: fold v_k into a running pool register and write the pooled
//   word on vec_last (the register carries over to the next command when
//   pool_init is 0).
// Timing is that of pimcore: the micro-op issues reads, its op bits act one
// cycle later on the returned data.
//
// From the paper: the GBUF, the two GBcore units and the GBcore_CMP flags
// POOL and ADD_RELU. This design's choices: the vector-per-word operation
// format, the two-read-port GBUF and the micro-op interface.
module gbcore
  import pimfused_pkg::*;
#(
  parameter int unsigned GBUF_BYTES = 32768
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  uop_t                  uop,
  input  logic                  fill_wr,
  input  logic [BUF_ADDR_W-1:0] fill_addr,
  input  word_t                 fill_data,
  output word_t                 gbuf_rdata
);
  word_t                 rdata_a, rdata_b;
  logic                  gb_wr;
  logic [BUF_ADDR_W-1:0] gb_waddr;
  word_t                 gb_wdata;

  gbuf #(.BYTES(GBUF_BYTES)) u_gbuf (
    .clk, .rst_n,
    .rd_a(uop.rd_a), .addr_a(uop.addr_a), .rdata_a,
    .rd_b(uop.rd_b), .addr_b(uop.addr_b), .rdata_b,
    .wr(gb_wr), .waddr(gb_waddr), .wdata(gb_wdata)
  );
  assign gbuf_rdata = rdata_a;

  uop_t s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= uop;
  end

  word_t ar_y, vec_v, pool_reg, pl_y;
  add_relu_unit u_add (.a(rdata_a), .b(rdata_b), .y(ar_y));
  assign vec_v = s1.flags.add_relu ? ar_y : rdata_a;
  pool_unit u_pool (.old(pool_reg), .x(vec_v), .init(s1.vec_first && s1.pool_init),
                    .avg(s1.pool_avg), .shift(s1.pool_shift), .y(pl_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       pool_reg <= '0;
    else if (s1.vec && s1.flags.pool) pool_reg <= pl_y;
  end

  always_comb begin
    gb_wr    = 1'b0;
    gb_waddr = s1.wr_addr;
    gb_wdata = s1.flags.pool ? pl_y : vec_v;
    if (fill_wr) begin
      gb_wr    = 1'b1;
      gb_waddr = fill_addr;
      gb_wdata = fill_data;
    end else if (s1.vec) begin
      gb_wr    = !s1.flags.pool || s1.vec_last;
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(fill_wr && s1.vec))
    else $error("gbcore: bank fill collides with a compute write");
endmodule
