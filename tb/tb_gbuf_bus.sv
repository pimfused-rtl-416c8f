// tb_gbuf_bus: checks the bank bus routing at the default size (16 banks,
// 4 banks per PIMcore): in LBUF mode every PIMcore reaches exactly bank
// c*4 + sel%4 in both directions; in GBUF mode only bank `sel` is connected
// and its data reaches the GBUF; with no mode no bank is touched; rvalid
// follows the connected banks.
module tb_gbuf_bus;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  localparam int NB = 16, BPC = 4, NC = NB / BPC;
  int checks = 0, failures = 0;
  logic bus_lbuf, bus_gbuf, rd, wr, rvalid;
  logic [BANK_SEL_W-1:0] sel;
  logic [BK_ADDR_W-1:0] addr;
  word_t core_wdata [NC], core_rdata [NC], gbuf_wdata, gbuf_rdata;
  bank_req_t bk_req [NB];
  bank_rsp_t bk_rsp [NB];

  gbuf_bus dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int mode;
      mode = $urandom_range(2, 0);
      bus_lbuf = (mode == 1); bus_gbuf = (mode == 2);
      sel = $urandom_range(NB - 1, 0); rd = $urandom_range(1, 0); wr = $urandom_range(1, 0);
      addr = BK_ADDR_W'($urandom);
      for (int c = 0; c < NC; c++) core_wdata[c] = rand_word(30000);
      gbuf_wdata = rand_word(30000);
      for (int b = 0; b < NB; b++) begin
        bk_rsp[b].rdata  = rand_word(30000);
        bk_rsp[b].rvalid = ($urandom_range(3, 0) != 0);
      end
      #1;
      for (int b = 0; b < NB; b++) begin
        bit con;
        con = (mode == 1 && b % BPC == sel % BPC) || (mode == 2 && b == sel);
        chk(bk_req[b].rd == (rd && con), $sformatf("rd bank %0d mode %0d", b, mode));
        chk(bk_req[b].wr == (wr && con), $sformatf("wr bank %0d mode %0d", b, mode));
        chk(bk_req[b].addr == addr, "addr");
        if (con) chk(bk_req[b].wdata == (mode == 1 ? core_wdata[b / BPC] : gbuf_wdata),
                     $sformatf("wdata bank %0d mode %0d", b, mode));
      end
      if (mode == 1) begin
        bit all_v;
        all_v = 1;
        for (int c = 0; c < NC; c++) begin
          chk(core_rdata[c] == bk_rsp[c * BPC + sel % BPC].rdata, $sformatf("core %0d rdata", c));
          all_v &= bk_rsp[c * BPC + sel % BPC].rvalid;
        end
        chk(rvalid == all_v, "rvalid lbuf");
      end else if (mode == 2) begin
        chk(gbuf_rdata == bk_rsp[sel].rdata, "gbuf rdata");
        chk(rvalid == bk_rsp[sel].rvalid, "rvalid gbuf");
      end else chk(rvalid == 0, "rvalid idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
