// tb_gbcore: drives the GBcore with micro-ops and bank fills, and checks
// the GBUF against a reference model: random GBcore_CMP vector operations
// (ADD_RELU, POOL max/average, both, pooling continued across commands),
// plus broadcast reads (port A output) of every word used.
module tb_gbcore;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  localparam int USE = 64;           // GBUF words exercised
  int checks = 0, failures = 0, cycles = 0;
  int n_pool = 0, n_add = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  uop_t uop = '0;
  logic fill_wr = 0;
  logic [BUF_ADDR_W-1:0] fill_addr = 0;
  word_t fill_data = '0, gbuf_rdata;
  word_t m_gb [USE];
  word_t m_gp = '0;

  gbcore dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic issue(input uop_t u);
    @(negedge clk);
    uop = u;
  endtask

  task automatic check_all(input string tag);
    for (int i = 0; i < USE; i++) begin
      automatic uop_t u = '0;
      u.rd_a = 1; u.addr_a = i;
      issue(u);
      issue('0);
      checks++;
      if (gbuf_rdata != m_gb[i]) begin
        failures++;
        $display("FAIL %s: GBUF word %0d", tag, i);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < USE; i++) begin
      @(negedge clk); fill_wr = 1; fill_addr = i; fill_data = rand_word(20000); m_gb[i] = fill_data;
    end
    @(negedge clk); fill_wr = 0;
    check_all("fill");
    for (int t = 0; t < 200; t++) begin
      automatic uop_t b = '0;
      automatic int n  = $urandom_range(6, 1);
      automatic int sa = $urandom_range(32 - n, 0), sc = $urandom_range(32 - n, 0);
      automatic int d  = 32 + $urandom_range(32 - n, 0);
      b.pool_init  = ($urandom_range(3, 0) != 0);
      b.pool_avg   = $urandom_range(1, 0);
      b.pool_shift = $urandom_range(2, 0);
      b.flags.add_relu = $urandom_range(1, 0);
      b.flags.pool     = $urandom_range(1, 0);
      for (int k = 0; k < n; k++) begin
        automatic uop_t u = b;
        automatic word_t v;
        u.rd_a = 1; u.addr_a = sa + k; u.rd_b = b.flags.add_relu; u.addr_b = sc + k;
        u.vec = 1; u.vec_first = (k == 0); u.vec_last = (k == n - 1);
        u.wr_addr = b.flags.pool ? d : d + k;
        issue(u);
        for (int i = 0; i < LANES; i++)
          v[i] = b.flags.add_relu ? elem_t'(r_add_relu(m_gb[sa+k][i], m_gb[sc+k][i])) : m_gb[sa+k][i];
        if (b.flags.pool) begin
          for (int i = 0; i < LANES; i++)
            m_gp[i] = elem_t'(r_pool(m_gp[i], v[i], (k == 0) && b.pool_init, b.pool_avg, b.pool_shift));
          if (k == n - 1) m_gb[d] = m_gp;
        end else m_gb[d + k] = v;
      end
      issue('0);
      if (b.flags.pool) n_pool++;
      if (b.flags.add_relu) n_add++;
      check_all($sformatf("op %0d", t));
    end
    checks++;
    if (n_pool == 0 || n_add == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles > 40000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
