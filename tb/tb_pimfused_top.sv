// tb_pimfused_top: end-to-end test of one PIMfused channel at its default
// size (16 banks, 4-bank PIMcores, GBUF 32 KB, LBUF 256 B).
//
// The testbench plays the memory controller and the DRAM banks. Banks are
// an array here with a fixed read latency BK_LAT. A command-level reference
// model (banks, every LBUF, the GBUF and the pool registers) executes each
// command as it is issued; after every command the DUT's bank contents are
// compared with the model's, and at the end every LBUF word and the used
// GBUF words are drained to banks and compared too. Each command's
// duration (acceptance to done) is checked against the controller's
// schedule.
//
// Phases: (1) a directed fused-layer sequence in the spirit of a fused
// kernel: input tiles to the LBUFs in parallel, weights one bank at a time
// to the GBUF, two chained CONV layers with BN/ReLU per PIMcore writing into
// the LBUF, a residual Add & ReLU, max pooling across CONV results, a dot
// product longer than the LBUF split over refills with the accumulator
// carried between commands, write
// back, then a fused-kernel boundary reorganisation through the GBUF
// (BK2GBUF per bank, GBcore pooling and Add & ReLU, GBUF2BK); (2) a
// command held while the channel is busy (stall); (3) a random command
// stream. Every mechanism is counted and must occur at least once.
module tb_pimfused_top;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;

  localparam int NB     = 16;              // top defaults
  localparam int BPC    = 4;
  localparam int NC     = NB / BPC;
  localparam int LBW    = 256 * 8 / WORD_W;    // LBUF words
  localparam int GBW    = 32768 * 8 / WORD_W;  // GBUF words
  localparam int GBUSE  = 64;                  // GBUF words the test uses
  localparam int BDEPTH = 256;                 // bank words modelled
  localparam int BK_LAT = 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic      cmd_valid = 0, cmd_ready, done;
  pim_cmd_t  cmd;
  bank_req_t bk_req [NB];
  bank_rsp_t bk_rsp [NB];

  pimfused_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .bk_req, .bk_rsp);

  // ---------------- DRAM banks ----------------
  word_t bank [NB][BDEPTH];
  logic  pv [NB][BK_LAT];
  word_t pd [NB][BK_LAT];
  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      pv[b][0] <= bk_req[b].rd;
      pd[b][0] <= bank[b][bk_req[b].addr[7:0]];
      for (int i = 1; i < BK_LAT; i++) begin
        pv[b][i] <= pv[b][i-1];
        pd[b][i] <= pd[b][i-1];
      end
      if (bk_req[b].wr) bank[b][bk_req[b].addr[7:0]] <= bk_req[b].wdata;
    end
  end
  always_comb
    for (int b = 0; b < NB; b++) begin
      bk_rsp[b].rvalid = rst_n && pv[b][BK_LAT-1];
      bk_rsp[b].rdata  = pd[b][BK_LAT-1];
    end

  // ---------------- reference model ----------------
  word_t m_bank [NB][BDEPTH];
  word_t m_lb   [NC][LBW];
  word_t m_gb   [GBW];
  word_t m_pp   [NC];     // PIMcore pool registers
  word_t m_gp;            // GBcore pool register
  longint m_acc [NC];     // PIMcore accumulators

  // mechanism counters
  int n_op [6];
  int n_conv_bn, n_conv_bn_relu, n_conv_pool, n_conv_add, n_conv_pool_cont;
  int n_pc_vec_pool, n_pc_vec_add, n_gb_pool, n_gb_add, n_avg, n_vec_pool_cont;
  int n_stall, n_sat, n_bank_seq, n_len0, n_acc_cont, n_acc_hold;

  function automatic int expected_cycles(pim_cmd_t c);
    int n = c.len;
    if (n == 0) return 0;
    case (c.op)
      CMD_BK2LBUF, CMD_BK2GBUF: return n + BK_LAT;
      CMD_LBUF2BK, CMD_GBUF2BK: return n + 1;
      CMD_PIMCORE_CMP: return (c.flags.conv_bn || c.flags.conv_bn_relu) && !c.acc_hold ? n + 2 : n + 1;
      default: return n + 1;
    endcase
  endfunction

  task automatic model_exec(input pim_cmd_t c);
    int n = c.len;
    if (n == 0) begin n_len0++; return; end
    n_op[c.op]++;
    case (c.op)
      CMD_BK2LBUF: for (int k = 0; k < n; k++) for (int cc = 0; cc < NC; cc++)
                     m_lb[cc][c.dst + k] = m_bank[cc*BPC + c.bank % BPC][c.bk_addr + k];
      CMD_LBUF2BK: for (int k = 0; k < n; k++) for (int cc = 0; cc < NC; cc++)
                     m_bank[cc*BPC + c.bank % BPC][c.bk_addr + k] = m_lb[cc][c.src_a + k];
      CMD_BK2GBUF: for (int k = 0; k < n; k++) m_gb[c.dst + k] = m_bank[c.bank][c.bk_addr + k];
      CMD_GBUF2BK: for (int k = 0; k < n; k++) m_bank[c.bank][c.bk_addr + k] = m_gb[c.src_a + k];
      CMD_PIMCORE_CMP: begin
        if (c.flags.conv_bn || c.flags.conv_bn_relu) begin
          if (c.acc_cont) n_acc_cont++;
          if (c.acc_hold) n_acc_hold++;
          else begin
            if (c.flags.conv_bn_relu) n_conv_bn_relu++; else n_conv_bn++;
            if (c.flags.add_relu) n_conv_add++;
            if (c.flags.pool) begin n_conv_pool++; if (!c.pool_init) n_conv_pool_cont++; end
            if (c.flags.pool && c.pool_avg) n_avg++;
          end
          for (int cc = 0; cc < NC; cc++) begin
            longint acc, r;
            acc = c.acc_cont ? m_acc[cc] : 0;
            for (int k = 0; k < n; k++) acc += r_dot(m_lb[cc][c.src_a + k], m_gb[c.src_b + k]);
            m_acc[cc] = acc;
            if (c.acc_hold) continue;
            r = r_bn(acc, c.bn_scale, c.bn_bias, c.bn_shift);
            if (((acc * c.bn_scale) >>> c.bn_shift) + c.bn_bias != r) n_sat++;
            if (c.flags.conv_bn_relu) r = r_relu(r);
            if (c.flags.add_relu) r = r_add_relu(r, m_lb[cc][c.src_c][c.dst_lane]);
            if (c.flags.pool) r = r_pool(m_lb[cc][c.dst][c.dst_lane], r, c.pool_init,
                                         c.pool_avg, c.pool_shift);
            m_lb[cc][c.dst][c.dst_lane] = elem_t'(r);
          end
        end else begin
          if (c.flags.pool) begin n_pc_vec_pool++; if (!c.pool_init) n_vec_pool_cont++; end
          if (c.flags.pool && c.pool_avg) n_avg++;
          if (c.flags.add_relu) n_pc_vec_add++;
          for (int cc = 0; cc < NC; cc++)
            for (int k = 0; k < n; k++) begin
              word_t v;
              for (int i = 0; i < LANES; i++)
                v[i] = c.flags.add_relu ? elem_t'(r_add_relu(m_lb[cc][c.src_a+k][i], m_lb[cc][c.src_c+k][i]))
                                        : m_lb[cc][c.src_a+k][i];
              if (c.flags.pool) begin
                for (int i = 0; i < LANES; i++)
                  m_pp[cc][i] = elem_t'(r_pool(m_pp[cc][i], v[i], (k == 0) && c.pool_init,
                                               c.pool_avg, c.pool_shift));
                if (k == n - 1) m_lb[cc][c.dst] = m_pp[cc];
              end else m_lb[cc][c.dst + k] = v;
            end
        end
      end
      CMD_GBCORE_CMP: begin
        if (c.flags.pool) begin n_gb_pool++; if (!c.pool_init) n_vec_pool_cont++; end
        if (c.flags.pool && c.pool_avg) n_avg++;
        if (c.flags.add_relu) n_gb_add++;
        for (int k = 0; k < n; k++) begin
          word_t v;
          for (int i = 0; i < LANES; i++)
            v[i] = c.flags.add_relu ? elem_t'(r_add_relu(m_gb[c.src_a+k][i], m_gb[c.src_c+k][i]))
                                    : m_gb[c.src_a+k][i];
          if (c.flags.pool) begin
            for (int i = 0; i < LANES; i++)
              m_gp[i] = elem_t'(r_pool(m_gp[i], v[i], (k == 0) && c.pool_init,
                                       c.pool_avg, c.pool_shift));
            if (k == n - 1) m_gb[c.dst] = m_gp;
          end else m_gb[c.dst + k] = v;
        end
      end
      default: ;
    endcase
  endtask

  task automatic compare_banks(input string tag);
    int bad = 0;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < BDEPTH; a++)
        if (bank[b][a] != m_bank[b][a]) begin
          if (bad < 4) $display("FAIL %s: bank %0d word %0d differs", tag, b, a);
          bad++;
        end
    checks++;
    if (bad != 0) failures++;
  endtask

  // Issue one command, wait for done, check duration and banks.
  task automatic run(input pim_cmd_t c, input string tag);
    int t_acc, t_done;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) begin n_stall++; @(negedge clk); end
    @(posedge clk);
    model_exec(c);
    @(negedge clk); cmd_valid = 0; t_acc = cyc;
    while (!done) @(negedge clk);
    t_done = cyc;
    checks++;
    if (t_done - t_acc != expected_cycles(c)) begin
      failures++;
      $display("FAIL %s: op %s len %0d took %0d cycles, expected %0d", tag, c.op.name(), c.len,
               t_done - t_acc, expected_cycles(c));
    end
    compare_banks(tag);
  endtask

  function automatic pim_cmd_t mk(input cmd_op_e op);
    pim_cmd_t c = '0;
    c.op = op;
    c.bn_scale = 16'sd1;
    return c;
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    pim_cmd_t c;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < BDEPTH; a++) begin
        bank[b][a]   = rand_word(60);
        m_bank[b][a] = bank[b][a];
      end
    for (int cc = 0; cc < NC; cc++) begin m_pp[cc] = '0; m_acc[cc] = 0; end
    m_gp = '0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- (1) directed fused-layer sequence ----
    // Input tiles: each PIMcore loads 8 words of its own bank (sub-bank 0).
    c = mk(CMD_BK2LBUF); c.bk_addr = 0; c.dst = 0; c.len = LBW; run(c, "load tiles");
    // Weights and residuals: loaded one bank at a time into the GBUF.
    for (int b = 0; b < 4; b++) begin
      c = mk(CMD_BK2GBUF); c.bank = b; c.bk_addr = 16; c.dst = 8 * b; c.len = 8;
      run(c, "load weights"); n_bank_seq++;
    end
    // Layer A: CONV_BN_RELU, 4-word dot products, outputs into lanes of LBUF[6].
    for (int o = 0; o < 4; o++) begin
      c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn_relu = 1; c.src_a = 0; c.src_b = 4 * o;
      c.len = 4; c.dst = 6; c.dst_lane = o; c.bn_scale = 16'sd3; c.bn_bias = -16'sd20;
      c.bn_shift = 6; run(c, "conv A");
    end
    // Layer B: CONV_BN + residual ADD_RELU from LBUF[7], reading layer A's output.
    for (int o = 0; o < 2; o++) begin
      c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn = 1; c.flags.add_relu = 1; c.src_a = 6;
      c.src_b = 16 + o; c.len = 1; c.src_c = 7; c.dst = 5; c.dst_lane = o;
      c.bn_scale = 16'sd5; c.bn_bias = 16'sd3; c.bn_shift = 4; run(c, "conv B");
    end
    // CONV_BN_RELU + POOL: a max-pooling window over four CONV results in one lane.
    for (int w = 0; w < 4; w++) begin
      c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn_relu = 1; c.flags.pool = 1; c.pool_init = (w == 0);
      c.src_a = w; c.src_b = 20 + w; c.len = 1; c.dst = 4; c.dst_lane = 3;
      c.bn_scale = 16'sd1; c.bn_shift = 2; run(c, "conv+pool");
    end
    // A 24-word dot product, longer than the LBUF: three 8-word chunks with
    // LBUF refills in between, the accumulator held across commands.
    for (int ch = 0; ch < 3; ch++) begin
      c = mk(CMD_BK2LBUF); c.bank = 2; c.bk_addr = 40 + 8 * ch; c.dst = 0; c.len = LBW;
      run(c, "refill");
      c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn_relu = 1; c.src_a = 0; c.src_b = 8 * ch; c.len = 8;
      c.acc_cont = (ch != 0); c.acc_hold = (ch != 2); c.dst = 7; c.dst_lane = 15;
      c.bn_scale = 16'sd1; c.bn_shift = 4; run(c, "long conv");
    end
    // A saturating CONV (large scale).
    c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn = 1; c.src_a = 0; c.src_b = 0; c.len = 2;
    c.dst = 3; c.dst_lane = 9; c.bn_scale = 16'sd30000; c.bn_shift = 0; run(c, "conv sat");
    // PIMcore vector ops: Add & ReLU of words 0..1 with 2..3 into 6..7, average pool 0..3 into 5.
    c = mk(CMD_PIMCORE_CMP); c.flags.add_relu = 1; c.src_a = 0; c.src_c = 2; c.dst = 6; c.len = 2;
    run(c, "pc add_relu");
    c = mk(CMD_PIMCORE_CMP); c.flags.pool = 1; c.pool_init = 1; c.pool_avg = 1; c.pool_shift = 2;
    c.src_a = 0; c.dst = 5; c.len = 4; run(c, "pc avgpool");
    // Write the LBUFs back to sub-bank 1 of every PIMcore, all in parallel.
    c = mk(CMD_LBUF2BK); c.bank = 1; c.src_a = 0; c.bk_addr = 100; c.len = LBW; run(c, "store");
    // Fused-kernel boundary: gather sub-bank-1 results of all banks into the GBUF, one bank each.
    for (int i = 0; i < 4; i++) begin
      c = mk(CMD_BK2GBUF); c.bank = i * BPC + 1; c.bk_addr = 100; c.dst = 32 + 8 * i; c.len = 8;
      run(c, "gather"); n_bank_seq++;
    end
    c = mk(CMD_GBCORE_CMP); c.flags.pool = 1; c.pool_init = 1; c.src_a = 32; c.dst = 60; c.len = 4;
    run(c, "gb maxpool");
    c = mk(CMD_GBCORE_CMP); c.flags.pool = 1; c.pool_init = 0; c.src_a = 40; c.dst = 60; c.len = 4;
    run(c, "gb maxpool cont");
    c = mk(CMD_GBCORE_CMP); c.flags.add_relu = 1; c.src_a = 32; c.src_c = 40; c.dst = 48; c.len = 8;
    run(c, "gb add_relu");
    c = mk(CMD_GBUF2BK); c.bank = 14; c.src_a = 32; c.bk_addr = 200; c.len = 32; run(c, "scatter");
    c = mk(CMD_GBCORE_CMP); c.len = 0; run(c, "len0");

    // ---- (2) a command held while the channel is busy ----
    begin
      pim_cmd_t c1, c2;
      c1 = mk(CMD_BK2GBUF); c1.bank = 5; c1.bk_addr = 30; c1.dst = 0; c1.len = 6;
      c2 = mk(CMD_GBUF2BK); c2.bank = 9; c2.src_a = 0; c2.bk_addr = 220; c2.len = 6;
      @(negedge clk); cmd = c1; cmd_valid = 1;
      @(posedge clk); model_exec(c1);
      @(negedge clk); cmd = c2;                  // held until the channel is ready again
      while (!cmd_ready) begin n_stall++; @(negedge clk); end
      @(posedge clk); model_exec(c2);
      @(negedge clk); cmd_valid = 0;
      while (!done) @(negedge clk);
      compare_banks("stall");
    end

    // ---- (3) random command stream ----
    for (int t = 0; t < 400; t++) begin
      c = mk(cmd_op_e'($urandom_range(5, 0)));
      c.bank = $urandom_range(NB - 1, 0);
      c.len  = $urandom_range(4, 1);
      c.bk_addr = $urandom_range(BDEPTH - 8, 0);
      c.pool_avg = $urandom_range(1, 0); c.pool_shift = $urandom_range(2, 0);
      c.pool_init = ($urandom_range(3, 0) != 0);
      case (c.op)
        CMD_BK2LBUF: c.dst = $urandom_range(LBW - c.len, 0);
        CMD_LBUF2BK: c.src_a = $urandom_range(LBW - c.len, 0);
        CMD_BK2GBUF: c.dst = $urandom_range(GBUSE - c.len, 0);
        CMD_GBUF2BK: c.src_a = $urandom_range(GBUSE - c.len, 0);
        CMD_PIMCORE_CMP: begin
          if ($urandom_range(1, 0)) begin
            if ($urandom_range(1, 0)) c.flags.conv_bn = 1; else c.flags.conv_bn_relu = 1;
            c.flags.add_relu = $urandom_range(1, 0); c.flags.pool = $urandom_range(1, 0);
            c.src_a = $urandom_range(LBW - c.len, 0); c.src_b = $urandom_range(GBUSE - c.len, 0);
            c.src_c = $urandom_range(LBW - 1, 0); c.dst = $urandom_range(LBW - 1, 0);
            c.dst_lane = $urandom_range(LANES - 1, 0);
            c.bn_scale = elem_t'($urandom_range(200, 0)) - 16'sd100;
            c.bn_bias = elem_t'($urandom_range(200, 0)) - 16'sd100;
            c.bn_shift = $urandom_range(8, 0);
            c.acc_cont = ($urandom_range(3, 0) == 0); c.acc_hold = ($urandom_range(3, 0) == 0);
          end else begin
            // sources in words 0..3, destination in 4..7 (no overlap)
            c.flags.add_relu = $urandom_range(1, 0); c.flags.pool = $urandom_range(1, 0);
            c.src_a = $urandom_range(4 - c.len, 0); c.src_c = $urandom_range(4 - c.len, 0);
            c.dst = 4 + $urandom_range(4 - c.len, 0);
          end
        end
        default: begin // GBcore: sources in 0..31, destination in 32..63
          c.flags.add_relu = $urandom_range(1, 0); c.flags.pool = $urandom_range(1, 0);
          c.src_a = $urandom_range(32 - c.len, 0); c.src_c = $urandom_range(32 - c.len, 0);
          c.dst = 32 + $urandom_range(32 - c.len, 0);
        end
      endcase
      if (c.op == CMD_BK2GBUF || c.op == CMD_GBUF2BK) n_bank_seq++;
      run(c, $sformatf("random %0d", t));
    end

    // ---- drain every LBUF and the used GBUF words to the banks ----
    c = mk(CMD_LBUF2BK); c.bank = 2; c.src_a = 0; c.bk_addr = 240; c.len = LBW; run(c, "drain lbuf");
    c = mk(CMD_GBUF2BK); c.bank = 3; c.src_a = 0; c.bk_addr = 180; c.len = GBUSE; run(c, "drain gbuf");

    // ---- every mechanism must have occurred ----
    begin
      int counts [string];
      counts["BK2LBUF"] = n_op[CMD_BK2LBUF];  counts["LBUF2BK"] = n_op[CMD_LBUF2BK];
      counts["BK2GBUF"] = n_op[CMD_BK2GBUF];  counts["GBUF2BK"] = n_op[CMD_GBUF2BK];
      counts["PIMcore_CMP"] = n_op[CMD_PIMCORE_CMP]; counts["GBcore_CMP"] = n_op[CMD_GBCORE_CMP];
      counts["CONV_BN"] = n_conv_bn; counts["CONV_BN_RELU"] = n_conv_bn_relu;
      counts["CONV+POOL"] = n_conv_pool; counts["CONV+POOL continued"] = n_conv_pool_cont;
      counts["CONV+ADD_RELU"] = n_conv_add; counts["PIMcore vector POOL"] = n_pc_vec_pool;
      counts["PIMcore vector ADD_RELU"] = n_pc_vec_add; counts["GBcore POOL"] = n_gb_pool;
      counts["GBcore ADD_RELU"] = n_gb_add; counts["average pooling"] = n_avg;
      counts["vector pool continued"] = n_vec_pool_cont; counts["BN saturation"] = n_sat;
      counts["command stall"] = n_stall; counts["one-bank GBUF transfer"] = n_bank_seq;
      counts["empty command"] = n_len0;
      counts["accumulation continued"] = n_acc_cont; counts["accumulation held"] = n_acc_hold;
      foreach (counts[k]) begin
        $display("mechanism %-26s %0d", k, counts[k]);
        checks++;
        if (counts[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 200000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
