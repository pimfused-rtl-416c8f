// tb_pim_ctrl: issues random commands of all six kinds to the controller
// alone and records, cycle by cycle, what it drives: bank reads and writes
// (address, bus mode, bank select), buffer fills, and the micro-ops sent to
// the PIMcores and the GBcore. Each command's record is compared with the
// sequence the command should expand into, and its duration (acceptance to
// done) with the schedule. Bank read data is answered BK_LAT cycles later.
module tb_pim_ctrl;
  import pimfused_pkg::*;
  localparam int BK_LAT = 2;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic cmd_valid = 0, cmd_ready, done;
  pim_cmd_t cmd = '0;
  uop_t pc_uop, gb_uop;
  logic lb_fill_wr, gb_fill_wr, bus_lbuf, bus_gbuf, bk_rd, bk_wr, bk_rvalid;
  logic [BUF_ADDR_W-1:0] fill_addr;
  logic [BANK_SEL_W-1:0] bus_sel;
  logic [BK_ADDR_W-1:0] bk_addr;
  logic [BK_LAT-1:0] rv_pipe = '0;

  pim_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    rv_pipe <= {rv_pipe[BK_LAT-2:0], bk_rd};
  end
  assign bk_rvalid = rv_pipe[BK_LAT-1];

  // recorded activity of the current command
  int rd_addr [$], wr_addr [$], fill [$], pc_a [$], gb_a [$], pc_b [$], wr_dst [$];
  int n_mac_first, n_post, n_vec_first, n_vec_last, n_mode_bad;
  int post_a, post_b;
  logic rec = 0;
  pim_cmd_t cur;

  always @(negedge clk) if (rec) begin
    bit want_lbuf, want_gbuf;
    want_lbuf = (cur.op == CMD_BK2LBUF || cur.op == CMD_LBUF2BK);
    want_gbuf = (cur.op == CMD_BK2GBUF || cur.op == CMD_GBUF2BK);
    if ((bk_rd || bk_wr) && (bus_lbuf != want_lbuf || bus_gbuf != want_gbuf || bus_sel != cur.bank))
      n_mode_bad++;
    if (bk_rd) rd_addr.push_back(bk_addr);
    if (bk_wr) wr_addr.push_back(bk_addr);
    if (lb_fill_wr || gb_fill_wr) begin
      fill.push_back(fill_addr);
      if (lb_fill_wr != (cur.op == CMD_BK2LBUF)) n_mode_bad++;
    end
    if (pc_uop.mac) begin pc_a.push_back(pc_uop.addr_a); if (pc_uop.mac_first) n_mac_first++; end
    else if (pc_uop.rd_a && !pc_uop.post) pc_a.push_back(pc_uop.addr_a);
    if (gb_uop.rd_a) gb_a.push_back(gb_uop.addr_a);
    if ((pc_uop.vec || gb_uop.vec) && (pc_uop.rd_b || gb_uop.rd_b))
      pc_b.push_back(pc_uop.vec ? pc_uop.addr_b : gb_uop.addr_b);
    if (pc_uop.post) begin n_post++; post_a = pc_uop.addr_a; post_b = pc_uop.addr_b;
                           wr_dst.push_back(pc_uop.wr_addr); end
    if (pc_uop.vec || gb_uop.vec) begin
      wr_dst.push_back(pc_uop.vec ? pc_uop.wr_addr : gb_uop.wr_addr);
      if (pc_uop.vec_first || gb_uop.vec_first) n_vec_first++;
      if (pc_uop.vec_last  || gb_uop.vec_last)  n_vec_last++;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (op %s len %0d)", what, cur.op.name(), cur.len); end
  endtask

  function automatic bit seq(ref int q [$], input int base, input int n);
    if (q.size() != n) return 0;
    foreach (q[i]) if (q[i] != base + i) return 0;
    return 1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic pim_cmd_t c = '0;
      automatic int t0, dur, n, expd;
      automatic bit conv;
      c.op = cmd_op_e'($urandom_range(5, 0));
      c.flags = exec_flags_t'($urandom_range(15, 0));
      c.bank = $urandom_range(15, 0);
      c.bk_addr = $urandom_range(1000, 0);
      c.src_a = $urandom_range(100, 0); c.src_b = $urandom_range(100, 0);
      c.src_c = $urandom_range(100, 0); c.dst = $urandom_range(100, 0);
      c.len = (t % 50 == 7) ? 0 : $urandom_range(9, 1);
      c.acc_cont = $urandom_range(1, 0); c.acc_hold = $urandom_range(1, 0);
      n = c.len;
      conv = c.flags.conv_bn || c.flags.conv_bn_relu;
      rd_addr.delete(); wr_addr.delete(); fill.delete(); pc_a.delete(); gb_a.delete();
      pc_b.delete(); wr_dst.delete();
      n_mac_first = 0; n_post = 0; n_vec_first = 0; n_vec_last = 0; n_mode_bad = 0;
      cur = c;
      @(negedge clk); cmd = c; cmd_valid = 1;
      chk(cmd_ready, "ready while idle");
      @(negedge clk); cmd_valid = 0; t0 = cycles; rec = 1;
      while (!done) @(negedge clk);
      rec = 0;
      dur = cycles - t0;
      case (c.op)
        CMD_BK2LBUF, CMD_BK2GBUF: expd = n + BK_LAT;
        CMD_LBUF2BK, CMD_GBUF2BK: expd = n + 1;
        CMD_PIMCORE_CMP:          expd = (conv && !c.acc_hold) ? n + 2 : n + 1;
        default:                  expd = n + 1;
      endcase
      if (n == 0) expd = 0;
      chk(dur == expd, $sformatf("duration %0d expected %0d", dur, expd));
      chk(n_mode_bad == 0, "bus mode / bank select / fill target");
      if (n == 0) begin
        chk(rd_addr.size() == 0 && wr_addr.size() == 0 && fill.size() == 0 && pc_a.size() == 0 &&
            gb_a.size() == 0 && wr_dst.size() == 0, "empty command did something");
        continue;
      end
      case (c.op)
        CMD_BK2LBUF, CMD_BK2GBUF: begin
          chk(seq(rd_addr, c.bk_addr, n), "bank read addresses");
          chk(seq(fill, c.dst, n), "fill addresses");
          chk(wr_addr.size() == 0 && pc_a.size() == 0 && gb_a.size() == 0, "stray activity");
        end
        CMD_LBUF2BK, CMD_GBUF2BK: begin
          chk(seq(wr_addr, c.bk_addr, n), "bank write addresses");
          if (c.op == CMD_LBUF2BK) chk(seq(pc_a, c.src_a, n) && gb_a.size() == 0, "LBUF reads");
          else                     chk(seq(gb_a, c.src_a, n) && pc_a.size() == 0, "GBUF reads");
          chk(rd_addr.size() == 0 && fill.size() == 0, "stray activity");
        end
        CMD_PIMCORE_CMP: begin
          chk(rd_addr.size() == 0 && wr_addr.size() == 0 && fill.size() == 0, "stray bank activity");
          if (conv) begin
            chk(seq(pc_a, c.src_a, n), "MAC LBUF addresses");
            chk(seq(gb_a, c.src_b, n), "broadcast GBUF addresses");
            chk(n_mac_first == (c.acc_cont ? 0 : 1), "accumulator clear unless continued");
            if (c.acc_hold) chk(n_post == 0 && wr_dst.size() == 0, "no post when held");
            else chk(n_post == 1 && post_a == c.src_c && post_b == c.dst && wr_dst[0] == c.dst,
                     "post micro-op");
          end else begin
            chk(seq(pc_a, c.src_a, n) && gb_a.size() == 0, "vector LBUF addresses");
            if (c.flags.add_relu) chk(seq(pc_b, c.src_c, n), "vector second operand");
            chk(n_vec_first == 1 && n_vec_last == 1, "first/last marks");
            if (c.flags.pool) chk(wr_dst.size() == n && wr_dst[n-1] == c.dst, "pool destination");
            else              chk(seq(wr_dst, c.dst, n), "vector destinations");
          end
        end
        default: begin
          chk(rd_addr.size() == 0 && wr_addr.size() == 0 && fill.size() == 0 && pc_a.size() == 0,
              "stray activity");
          chk(seq(gb_a, c.src_a, n), "GBcore operand addresses");
          if (c.flags.add_relu) chk(seq(pc_b, c.src_c, n), "GBcore second operand");
          chk(n_vec_first == 1 && n_vec_last == 1, "first/last marks");
          if (c.flags.pool) chk(wr_dst.size() == n && wr_dst[n-1] == c.dst, "pool destination");
          else              chk(seq(wr_dst, c.dst, n), "GBcore destinations");
        end
      endcase
    end
    // ready must drop while busy
    begin
      automatic pim_cmd_t c = '0;
      c.op = CMD_GBUF2BK; c.len = 5;
      @(negedge clk); cmd = c; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0; cur = c;
      chk(!cmd_ready, "ready low while busy");
      while (!done) @(negedge clk);
      chk(cmd_ready, "ready back when done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles > 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
