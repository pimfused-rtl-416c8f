// tb_resnet18_conv_tile: one fused-layer step of a ResNet18-style layer,
// 3x3 CONV_BN_RELU followed by 2x2 max pooling, run on the default channel
// (4 PIMcores of 4 banks, GBUF 32 KB, LBUF 256 B) and checked against a
// direct convolution.
//
// Spatial tiling: every PIMcore owns a 6x6-pixel input tile (a 4x4 output
// tile plus its one-pixel halo, the data duplicated by fused tiling) in its
// own bank, one 16-channel word per pixel at address y*6+x. Four 3x3x16
// filters (output channels 0..3) sit in bank 1 and are loaded once into
// the GBUF, which broadcasts them to all PIMcores. A receptive field is 9
// words, more than the 8-word LBUF, so each output is computed in two
// chained CONV commands: rows 0-1 (6 words, acc_hold) and row 2 (3 words,
// acc_cont), with the LBUF refilled in between. The second CONV applies BN,
// ReLU and pools into lane o of LBUF word 7 (pool_init at the first of the
// four window positions). Each pooled word goes back to the PIMcore's bank
// with PIM_LBUF2BK. The same command stream drives all four PIMcores.
//
// The reference computes the convolution, BN (scale 3, shift 6, bias 5,
// saturation to 16 bits), ReLU and the 2x2 maximum directly from the input
// arrays; lanes 0..3 of the 4 pooled words of every PIMcore are compared.
// The banks are word arrays with a fixed read latency. A watchdog ends a
// hung run.
module tb_resnet18_conv_tile;
  import pimfused_pkg::*;

  localparam int NB = 16, BPC = 4, NC = NB / BPC;
  localparam int BDEPTH = 256, BK_LAT = 3;
  localparam int TILE = 6, OUT = 4, NO = 4;           // input tile, output tile, filters
  localparam int W_ADDR = 64, O_ADDR = 100;
  localparam int BN_SCALE = 3, BN_SHIFT = 6, BN_BIAS = 5;

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

  // ---------------- reference data ----------------
  int x_in [NC][TILE][TILE][LANES];     // activations per PIMcore tile
  int w    [NO][3][3][LANES];           // filters

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int expect_out(input int c, input int py, input int px, input int o);
    int best = 0;
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++) begin
        longint acc = 0;
        int r;
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            for (int ch = 0; ch < LANES; ch++)
              acc += longint'(x_in[c][2*py+dy+ky][2*px+dx+kx][ch]) * w[o][ky][kx][ch];
        r = sat16(((acc * BN_SCALE) >>> BN_SHIFT) + longint'(BN_BIAS));
        if (r < 0) r = 0;
        if ((dy == 0 && dx == 0) || r > best) best = r;
      end
    return best;
  endfunction

  // ---------------- command driver ----------------
  task automatic run(input pim_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic pim_cmd_t mk(input cmd_op_e op);
    pim_cmd_t c = '0;
    c.op = op;
    return c;
  endfunction

  initial begin
    pim_cmd_t c;
    int t0;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < BDEPTH; a++) bank[b][a] = '0;
    for (int cc = 0; cc < NC; cc++)
      for (int y = 0; y < TILE; y++)
        for (int x = 0; x < TILE; x++)
          for (int ch = 0; ch < LANES; ch++) begin
            x_in[cc][y][x][ch] = int'($urandom_range(120)) - 40;
            bank[cc*BPC][y*TILE + x][ch] = elem_t'(x_in[cc][y][x][ch]);
          end
    for (int o = 0; o < NO; o++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          for (int ch = 0; ch < LANES; ch++) begin
            w[o][ky][kx][ch] = int'($urandom_range(60)) - 30;
            bank[1][W_ADDR + o*9 + ky*3 + kx][ch] = elem_t'(w[o][ky][kx][ch]);
          end
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;

    // filters: bank 1 -> GBUF[0..35], broadcast later to every PIMcore
    c = mk(CMD_BK2GBUF); c.bank = 1; c.bk_addr = BK_ADDR_W'(W_ADDR); c.dst = 0; c.len = LEN_W'(NO * 9); run(c);

    for (int py = 0; py < OUT / 2; py++)
      for (int px = 0; px < OUT / 2; px++) begin
        for (int dy = 0; dy < 2; dy++)
          for (int dx = 0; dx < 2; dx++)
            for (int o = 0; o < NO; o++) begin
              automatic int oy = 2*py + dy, ox = 2*px + dx;
              // rows 0 and 1 of the receptive field -> LBUF[0..5]
              for (int ky = 0; ky < 2; ky++) begin
                c = mk(CMD_BK2LBUF); c.bank = 0; c.bk_addr = BK_ADDR_W'((oy + ky) * TILE + ox);
                c.dst = BUF_ADDR_W'(3 * ky); c.len = 3; run(c);
              end
              c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn_relu = 1; c.flags.pool = 1;
              c.src_a = 0; c.src_b = BUF_ADDR_W'(o * 9); c.len = 6; c.acc_hold = 1; run(c);
              // row 2 -> LBUF[0..2], finish the sum, BN, ReLU, pool into lane o
              c = mk(CMD_BK2LBUF); c.bank = 0; c.bk_addr = BK_ADDR_W'((oy + 2) * TILE + ox);
              c.dst = 0; c.len = 3; run(c);
              c = mk(CMD_PIMCORE_CMP); c.flags.conv_bn_relu = 1; c.flags.pool = 1;
              c.src_a = 0; c.src_b = BUF_ADDR_W'(o * 9 + 6); c.len = 3; c.acc_cont = 1;
              c.dst = 7; c.dst_lane = LANE_W'(o); c.pool_init = (dy == 0 && dx == 0);
              c.bn_scale = elem_t'(BN_SCALE); c.bn_shift = 6'(BN_SHIFT); c.bn_bias = elem_t'(BN_BIAS); run(c);
            end
        c = mk(CMD_LBUF2BK); c.bank = 0; c.src_a = 7; c.bk_addr = BK_ADDR_W'(O_ADDR + py * 2 + px); c.len = 1;
        run(c);
      end
    repeat (2) @(posedge clk);

    for (int cc = 0; cc < NC; cc++)
      for (int py = 0; py < OUT / 2; py++)
        for (int px = 0; px < OUT / 2; px++)
          for (int o = 0; o < NO; o++) begin
            int got, exp;
            got = int'(bank[cc*BPC][O_ADDR + py*2 + px][o]);
            exp = expect_out(cc, py, px, o);
            checks++;
            if (got != exp) begin
              failures++;
              $display("FAIL core %0d pool (%0d,%0d) channel %0d: got %0d expected %0d",
                       cc, py, px, o, got, exp);
            end
          end
    $display("layer tile done in %0d cycles for %0d outputs", cyc - t0, NC * 4 * NO);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 100000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
