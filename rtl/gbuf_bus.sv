// gbuf_bus: the channel's internal bank bus.
//
// Connects the bank I/O of every bank either to the PIMcores or to the
// GBUF, as selected by the command being executed:
//   BUS_LBUF: every PIMcore c talks to bank c*BANKS_PER_CORE + sel (sel is
//             taken modulo BANKS_PER_CORE), all in parallel. Used by
//             PIM_BK2LBUF / PIM_LBUF2BK.
//   BUS_GBUF: only bank `sel` is connected, to the GBUF. Used by
//             PIM_BK2GBUF / PIM_GBUF2BK; several banks are served one after
//             another by successive commands, as in GDDR6-AiM.
// There is deliberately no path between an LBUF and the GBUF: such data
// always goes through a bank.
// rvalid is the AND of the connected banks' rvalid (all PIMcore banks
// answer together). Purely combinational; mode, sel and addr must stay
// stable while reads of a command are outstanding.
// The word address is broadcast to every bank, as on a shared DRAM
// address bus; only rd and wr are gated per bank.
//
// From the paper: the bus between banks and GBUF, parallel LBUF transfers,
// one-bank-at-a-time GBUF transfers, no direct LBUF-GBUF path. This
// design's choice: the bank-group to PIMcore assignment and the signals.
module gbuf_bus
  import pimfused_pkg::*;
#(
  parameter int unsigned NUM_BANKS      = 16,
  parameter int unsigned BANKS_PER_CORE = 4,
  localparam int unsigned NUM_CORES     = NUM_BANKS / BANKS_PER_CORE
) (
  input  logic                  bus_lbuf,   // BUS_LBUF mode
  input  logic                  bus_gbuf,   // BUS_GBUF mode
  input  logic [BANK_SEL_W-1:0] sel,
  input  logic                  rd,
  input  logic                  wr,
  input  logic [BK_ADDR_W-1:0]  addr,
  input  word_t                 core_wdata [NUM_CORES],
  input  word_t                 gbuf_wdata,
  output bank_req_t             bk_req     [NUM_BANKS],
  input  bank_rsp_t             bk_rsp     [NUM_BANKS],
  output word_t                 core_rdata [NUM_CORES],
  output word_t                 gbuf_rdata,
  output logic                  rvalid
);
  localparam int unsigned BPC_W = (BANKS_PER_CORE > 1) ? $clog2(BANKS_PER_CORE) : 1;

  logic [BPC_W-1:0] sub;
  assign sub = BPC_W'(sel % BANK_SEL_W'(BANKS_PER_CORE));

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      logic con;
      con = (bus_lbuf && (b % BANKS_PER_CORE) == int'(sub)) ||
            (bus_gbuf && b == int'(sel));
      bk_req[b].rd    = rd && con;
      bk_req[b].wr    = wr && con;
      bk_req[b].addr  = addr;
      bk_req[b].wdata = bus_lbuf ? core_wdata[b / BANKS_PER_CORE] : gbuf_wdata;
    end
    for (int c = 0; c < NUM_CORES; c++)
      core_rdata[c] = bk_rsp[c * BANKS_PER_CORE + int'(sub)].rdata;
    gbuf_rdata = bk_rsp[sel].rdata;
    if (bus_lbuf) begin
      rvalid = 1'b1;
      for (int c = 0; c < NUM_CORES; c++)
        rvalid = rvalid && bk_rsp[c * BANKS_PER_CORE + int'(sub)].rvalid;
    end else begin
      rvalid = bus_gbuf && bk_rsp[sel].rvalid;
    end
  end
endmodule
