// pimfused_top: one PIMfused memory channel.
//
// The channel has NUM_BANKS DRAM banks. Every BANKS_PER_CORE banks share one
// near-bank PIMcore with its own local buffer (LBUF); the channel has one
// GBcore holding the global buffer (GBUF). The default is the paper's main
// configuration: 16 banks, 4-bank PIMcores (4 PIMcores), GBUF 32 KB,
// LBUF 256 B. A 1-bank-PIMcore channel is BANKS_PER_CORE = 1.
//
// The memory controller drives the channel with the six custom PIM
// commands (pimfused_pkg::pim_cmd_t) on a valid/ready port; `done` pulses
// when a command's results are visible. The DRAM banks themselves are not
// part of this RTL: each bank's word port (bk_req / bk_rsp, one word =
// LANES x DATA_W bits per access, read data returned with rvalid after any
// fixed latency) is a port of this module.
//
// Data paths: bank <-> LBUF for all PIMcores at once (PIM_BK2LBUF,
// PIM_LBUF2BK); bank <-> GBUF for one bank per command (PIM_BK2GBUF,
// PIM_GBUF2BK); GBUF -> all PIMcores as a broadcast operand during
// PIMcore_CMP. No LBUF <-> GBUF path exists. See pim_ctrl for timing.
module pimfused_top
  import pimfused_pkg::*;
#(
  parameter int unsigned NUM_BANKS      = 16,
  parameter int unsigned BANKS_PER_CORE = 4,
  parameter int unsigned GBUF_BYTES     = 32768,
  parameter int unsigned LBUF_BYTES     = 256,
  localparam int unsigned NUM_CORES     = NUM_BANKS / BANKS_PER_CORE
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  pim_cmd_t  cmd,
  output logic      done,
  output bank_req_t bk_req [NUM_BANKS],
  input  bank_rsp_t bk_rsp [NUM_BANKS]
);
  uop_t                  pc_uop, gb_uop;
  logic                  lb_fill_wr, gb_fill_wr;
  logic [BUF_ADDR_W-1:0] fill_addr;
  logic                  bus_lbuf, bus_gbuf, bk_rd, bk_wr, bk_rvalid;
  logic [BANK_SEL_W-1:0] bus_sel;
  logic [BK_ADDR_W-1:0]  bk_addr;

  pim_ctrl u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .done,
    .pc_uop, .gb_uop, .lb_fill_wr, .gb_fill_wr, .fill_addr,
    .bus_lbuf, .bus_gbuf, .bus_sel, .bk_rd, .bk_wr, .bk_addr, .bk_rvalid
  );

  word_t core_wdata [NUM_CORES];   // LBUF -> bank
  word_t core_rdata [NUM_CORES];   // bank -> LBUF
  word_t gbuf_rdata;               // GBUF -> bank, and broadcast to PIMcores
  word_t bus_gbuf_rdata;           // bank -> GBUF

  gbcore #(.GBUF_BYTES(GBUF_BYTES)) u_gbcore (
    .clk, .rst_n,
    .uop(gb_uop),
    .fill_wr(gb_fill_wr), .fill_addr, .fill_data(bus_gbuf_rdata),
    .gbuf_rdata
  );

  for (genvar g = 0; g < NUM_CORES; g++) begin : g_core
    pimcore #(.LBUF_BYTES(LBUF_BYTES)) u_core (
      .clk, .rst_n,
      .uop(pc_uop),
      .gb_bcast(gbuf_rdata),
      .fill_wr(lb_fill_wr), .fill_addr, .fill_data(core_rdata[g]),
      .lbuf_rdata(core_wdata[g])
    );
  end

  gbuf_bus #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_CORE(BANKS_PER_CORE)) u_bus (
    .bus_lbuf, .bus_gbuf, .sel(bus_sel),
    .rd(bk_rd), .wr(bk_wr), .addr(bk_addr),
    .core_wdata, .gbuf_wdata(gbuf_rdata),
    .bk_req, .bk_rsp,
    .core_rdata, .gbuf_rdata(bus_gbuf_rdata),
    .rvalid(bk_rvalid)
  );

  initial begin
    assert (NUM_BANKS % BANKS_PER_CORE == 0)
      else $error("pimfused_top: NUM_BANKS must be a multiple of BANKS_PER_CORE");
    assert (NUM_BANKS <= (1 << BANK_SEL_W))
      else $error("pimfused_top: NUM_BANKS exceeds the command's bank field");
  end
endmodule
