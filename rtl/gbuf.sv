// gbuf: channel-level global buffer in the GBcore.
//
// A word-organised SRAM of BYTES bytes (DEPTH words of LANES x DATA_W bits)
// with two synchronous read ports and one full-word write port. Port A
// serves bank transfers (GBUF2BK), the broadcast to all PIMcores during
// PIMcore_CMP and the first GBcore operand; port B serves the second
// GBcore operand (ADD_RELU). The default size is the paper's main
// configuration, 32 KB (1024 words); the port structure is this design's
// choice.
//
// Timing: read data appears the cycle after rd_* and holds until the next
// read on that port. A read and a write to the same word in one cycle
// return the old contents. Only the low address bits are used; an
// assertion flags addresses beyond DEPTH.
module gbuf
  import pimfused_pkg::*;
#(
  parameter int unsigned BYTES = 32768
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_a,
  input  logic [BUF_ADDR_W-1:0] addr_a,
  output word_t                 rdata_a,
  input  logic                  rd_b,
  input  logic [BUF_ADDR_W-1:0] addr_b,
  output word_t                 rdata_b,
  input  logic                  wr,
  input  logic [BUF_ADDR_W-1:0] waddr,
  input  word_t                 wdata
);
  localparam int unsigned DEPTH = (BYTES * 8) / WORD_W;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr) mem[waddr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata_a <= '0;
      rdata_b <= '0;
    end else begin
      if (rd_a) rdata_a <= mem[addr_a[AW-1:0]];
      if (rd_b) rdata_b <= mem[addr_b[AW-1:0]];
    end
  end

  a_range: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_a -> 32'(addr_a) < DEPTH) && (rd_b -> 32'(addr_b) < DEPTH) &&
    (wr -> 32'(waddr) < DEPTH))
    else $error("gbuf: address beyond %0d words", DEPTH);
endmodule
