// lbuf: local buffer of one PIMcore.
//
// A word-organised SRAM of LBUF_BYTES bytes (DEPTH words of LANES x DATA_W
// bits) with two synchronous read ports and one write port. Writes carry a
// lane mask so that a CONV result can update a single element of a word.
// Size follows the paper's main configuration (256 B, i.e. 8 words); the
// port structure (2 reads + 1 write, needed for ADD_RELU operands and
// read-modify-write of a lane) is this design's choice.
//
// Timing: read data appears the cycle after rd_* is high and holds until
// the next read on that port. A read and a write to the same word in one
// cycle return the old contents. Addresses beyond DEPTH wrap (only the low
// bits are used); an assertion flags them.
module lbuf
  import pimfused_pkg::*;
#(
  parameter int unsigned BYTES = 256
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
  input  logic [LANES-1:0]      wmask,
  input  word_t                 wdata
);
  localparam int unsigned DEPTH = (BYTES * 8) / WORD_W;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr)
      for (int i = 0; i < LANES; i++)
        if (wmask[i]) mem[waddr[AW-1:0]][i] <= wdata[i];
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
    else $error("lbuf: address beyond %0d words", DEPTH);
endmodule
