// tb_pimcore: drives one PIMcore with micro-ops directly, the way the
// channel controller does, and checks its LBUF against a reference model.
//
// The GBUF broadcast word is supplied one cycle after the micro-op that
// reads it, as the GBUF's synchronous read would. Random CONV commands
// (CONV_BN / CONV_BN_RELU, optionally fused with ADD_RELU and POOL) and
// vector commands (ADD_RELU and/or POOL, max or average) are run; after
// each, the whole LBUF is read back through port A and compared.
module tb_pimcore;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  localparam int LBW = 256 * 8 / WORD_W;
  int checks = 0, failures = 0, cycles = 0;
  int n_conv = 0, n_vec = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  uop_t uop = '0;
  word_t gb_bcast = '0, bc_next = '0;
  logic fill_wr = 0;
  logic [BUF_ADDR_W-1:0] fill_addr = 0;
  word_t fill_data = '0, lbuf_rdata;
  word_t m_lb [LBW];
  word_t m_pp = '0;

  pimcore dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    gb_bcast <= bc_next;
  end

  task automatic issue(input uop_t u, input word_t bc);
    @(negedge clk);
    uop = u; bc_next = bc;
  endtask

  task automatic idle();
    issue('0, '0);
  endtask

  task automatic check_all(input string tag);
    for (int i = 0; i < LBW; i++) begin
      uop_t u = '0;
      u.rd_a = 1; u.addr_a = i;
      issue(u, '0);
      idle();
      checks++;
      if (lbuf_rdata != m_lb[i]) begin
        failures++;
        $display("FAIL %s: LBUF word %0d", tag, i);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < LBW; i++) begin
      @(negedge clk); fill_wr = 1; fill_addr = i; fill_data = rand_word(100); m_lb[i] = fill_data;
    end
    @(negedge clk); fill_wr = 0;
    check_all("fill");

    for (int t = 0; t < 300; t++) begin
      automatic uop_t b = '0;
      automatic int n = $urandom_range(4, 1);
      b.pool_init  = ($urandom_range(3, 0) != 0);
      b.pool_avg   = $urandom_range(1, 0);
      b.pool_shift = $urandom_range(2, 0);
      b.flags.add_relu = $urandom_range(1, 0);
      b.flags.pool     = $urandom_range(1, 0);
      if ($urandom_range(1, 0)) begin
        // CONV
        automatic int sa = $urandom_range(LBW - n, 0), sc = $urandom_range(LBW - 1, 0);
        automatic int d = $urandom_range(LBW - 1, 0), ln = $urandom_range(LANES - 1, 0);
        automatic word_t g [4];
        automatic longint acc = 0, r;
        if ($urandom_range(1, 0)) b.flags.conv_bn = 1; else b.flags.conv_bn_relu = 1;
        b.bn_scale = elem_t'($urandom_range(200, 0)) - 16'sd100;
        b.bn_bias  = elem_t'($urandom_range(200, 0)) - 16'sd100;
        b.bn_shift = $urandom_range(8, 0);
        b.lane     = ln;
        for (int k = 0; k < n; k++) begin
          automatic uop_t u = b;
          g[k] = rand_word(100);
          u.rd_a = 1; u.addr_a = sa + k; u.mac = 1; u.mac_first = (k == 0);
          issue(u, g[k]);
          acc += r_dot(m_lb[sa + k], g[k]);
        end
        begin
          automatic uop_t u = b;
          u.rd_a = 1; u.addr_a = sc; u.rd_b = 1; u.addr_b = d; u.post = 1; u.wr_addr = d;
          issue(u, '0);
        end
        idle();
        r = r_bn(acc, b.bn_scale, b.bn_bias, b.bn_shift);
        if (b.flags.conv_bn_relu) r = r_relu(r);
        if (b.flags.add_relu) r = r_add_relu(r, m_lb[sc][ln]);
        if (b.flags.pool) r = r_pool(m_lb[d][ln], r, b.pool_init, b.pool_avg, b.pool_shift);
        m_lb[d][ln] = elem_t'(r);
        n_conv++;
      end else begin
        // vector: sources in 0..3, destination in 4..7
        automatic int sa = $urandom_range(4 - n, 0), sc = $urandom_range(4 - n, 0);
        automatic int d = 4 + $urandom_range(4 - n, 0);
        for (int k = 0; k < n; k++) begin
          automatic uop_t u = b;
          automatic word_t v;
          u.rd_a = 1; u.addr_a = sa + k; u.rd_b = b.flags.add_relu; u.addr_b = sc + k;
          u.vec = 1; u.vec_first = (k == 0); u.vec_last = (k == n - 1);
          u.wr_addr = b.flags.pool ? d : d + k;
          issue(u, '0);
          for (int i = 0; i < LANES; i++)
            v[i] = b.flags.add_relu ? elem_t'(r_add_relu(m_lb[sa+k][i], m_lb[sc+k][i])) : m_lb[sa+k][i];
          if (b.flags.pool) begin
            for (int i = 0; i < LANES; i++)
              m_pp[i] = elem_t'(r_pool(m_pp[i], v[i], (k == 0) && b.pool_init, b.pool_avg, b.pool_shift));
            if (k == n - 1) m_lb[d] = m_pp;
          end else m_lb[d + k] = v;
        end
        idle();
        n_vec++;
      end
      check_all($sformatf("op %0d", t));
    end
    checks++;
    if (n_conv == 0 || n_vec == 0) failures++;
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
