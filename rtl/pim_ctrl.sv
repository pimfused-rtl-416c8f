// pim_ctrl: command decoder and sequencer of the PIMfused channel.
//
// Accepts one custom PIM command at a time on a valid/ready handshake
// (ready is high only when idle) and expands it into per-cycle control:
//   PIM_BK2LBUF  : len bank reads issued back to back on every PIMcore's
//                  bank (bus in LBUF mode); each returning word is written
//                  to LBUF[dst+k] of all PIMcores at once.
//   PIM_LBUF2BK  : LBUF[src_a+k] read, written to bank address bk_addr+k
//                  one cycle later, all PIMcores in parallel.
//   PIM_BK2GBUF  : as BK2LBUF but from the single bank `bank` to GBUF.
//   PIM_GBUF2BK  : as LBUF2BK but from GBUF to the single bank `bank`.
//   PIMcore_CMP  : with a CONV flag, len MAC micro-ops (LBUF[src_a+k] with
//                  GBUF[src_b+k] broadcast; the first clears the
//                  accumulator unless acc_cont), then, unless acc_hold, one
//                  post micro-op that reads the residual LBUF[src_c] and the
//                  old LBUF[dst] and writes the result lane; without a CONV
//                  flag, len vector micro-ops.
//   GBcore_CMP   : len vector micro-ops on the GBUF.
// A command ends one cycle after its last buffer write is issued; `done`
// pulses in the first idle cycle, when results are readable.
// Cycle counts from the acceptance edge to the edge that raises done, with
// bank read latency L: BK2LBUF/BK2GBUF len+L, LBUF2BK/GBUF2BK len+1,
// CONV len+2 (len+1 with acc_hold), vector len+1. A command with len = 0
// does nothing and raises done at its acceptance edge.
//
// From the paper: the six commands, their flags, one command driving all
// PIMcores concurrently, GBUF transfers one bank per command. This design's
// choices: the command fields, the handshake, the micro-op schedule and the
// pipelining of bank accesses.
module pim_ctrl
  import pimfused_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // command port (from the memory controller)
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  pim_cmd_t              cmd,
  output logic                  done,
  // micro-ops for the PIMcores and the GBcore
  output uop_t                  pc_uop,
  output uop_t                  gb_uop,
  output logic                  lb_fill_wr,
  output logic                  gb_fill_wr,
  output logic [BUF_ADDR_W-1:0] fill_addr,
  // bank bus
  output logic                  bus_lbuf,
  output logic                  bus_gbuf,
  output logic [BANK_SEL_W-1:0] bus_sel,
  output logic                  bk_rd,
  output logic                  bk_wr,
  output logic [BK_ADDR_W-1:0]  bk_addr,
  input  logic                  bk_rvalid
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e          state;
  pim_cmd_t        c;
  logic [LEN_W:0]  iss, rcv;      // words issued / words received or written
  logic            wr_pend;       // buffer read issued last cycle, bank write due
  logic [LEN_W:0]  wr_k;
  logic            finish;        // last action of the command happens this cycle

  logic is_conv;
  assign is_conv = c.flags.conv_bn || c.flags.conv_bn_relu;

  wire [LEN_W:0] len = {1'b0, c.len};

  // ---------------- per-cycle control ----------------
  uop_t base;
  always_comb begin
    base            = '0;
    base.flags      = c.flags;
    base.pool_init  = c.pool_init;
    base.pool_avg   = c.pool_avg;
    base.pool_shift = c.pool_shift;
    base.bn_scale   = c.bn_scale;
    base.bn_bias    = c.bn_bias;
    base.bn_shift   = c.bn_shift;
    base.lane       = c.dst_lane;

    pc_uop     = base;
    gb_uop     = base;
    lb_fill_wr = 1'b0;
    gb_fill_wr = 1'b0;
    fill_addr  = c.dst + BUF_ADDR_W'(rcv);
    bus_lbuf   = 1'b0;
    bus_gbuf   = 1'b0;
    bus_sel    = c.bank;
    bk_rd      = 1'b0;
    bk_wr      = 1'b0;
    bk_addr    = c.bk_addr + BK_ADDR_W'(iss);
    finish     = 1'b0;

    if (state == S_RUN) begin
      unique case (c.op)
        CMD_BK2LBUF, CMD_BK2GBUF: begin
          bus_lbuf = (c.op == CMD_BK2LBUF);
          bus_gbuf = (c.op == CMD_BK2GBUF);
          bk_rd    = (iss < len);
          if (bk_rvalid) begin
            lb_fill_wr = (c.op == CMD_BK2LBUF);
            gb_fill_wr = (c.op == CMD_BK2GBUF);
            finish     = (rcv == len - 1);
          end
        end
        CMD_LBUF2BK, CMD_GBUF2BK: begin
          bus_lbuf = (c.op == CMD_LBUF2BK);
          bus_gbuf = (c.op == CMD_GBUF2BK);
          if (iss < len) begin
            pc_uop.rd_a   = (c.op == CMD_LBUF2BK);
            gb_uop.rd_a   = (c.op == CMD_GBUF2BK);
            pc_uop.addr_a = c.src_a + BUF_ADDR_W'(iss);
            gb_uop.addr_a = c.src_a + BUF_ADDR_W'(iss);
          end
          if (wr_pend) begin
            bk_wr   = 1'b1;
            bk_addr = c.bk_addr + BK_ADDR_W'(wr_k);
            finish  = (wr_k == len - 1);
          end
        end
        CMD_PIMCORE_CMP: begin
          if (is_conv) begin
            if (iss < len) begin
              pc_uop.rd_a      = 1'b1;
              pc_uop.addr_a    = c.src_a + BUF_ADDR_W'(iss);
              pc_uop.mac       = 1'b1;
              pc_uop.mac_first = (iss == 0) && !c.acc_cont;
              gb_uop.rd_a      = 1'b1;
              gb_uop.addr_a    = c.src_b + BUF_ADDR_W'(iss);
            end else if (!c.acc_hold) begin
              pc_uop.rd_a    = 1'b1;            // residual word
              pc_uop.addr_a  = c.src_c;
              pc_uop.rd_b    = 1'b1;            // old destination word
              pc_uop.addr_b  = c.dst;
              pc_uop.post    = 1'b1;
              pc_uop.wr_addr = c.dst;
            end
          end else begin
            pc_uop.rd_a      = 1'b1;
            pc_uop.addr_a    = c.src_a + BUF_ADDR_W'(iss);
            pc_uop.rd_b      = c.flags.add_relu;
            pc_uop.addr_b    = c.src_c + BUF_ADDR_W'(iss);
            pc_uop.vec       = 1'b1;
            pc_uop.vec_first = (iss == 0);
            pc_uop.vec_last  = (iss == len - 1);
            pc_uop.wr_addr   = c.flags.pool ? c.dst : c.dst + BUF_ADDR_W'(iss);
          end
        end
        CMD_GBCORE_CMP: begin
          gb_uop.rd_a      = 1'b1;
          gb_uop.addr_a    = c.src_a + BUF_ADDR_W'(iss);
          gb_uop.rd_b      = c.flags.add_relu;
          gb_uop.addr_b    = c.src_c + BUF_ADDR_W'(iss);
          gb_uop.vec       = 1'b1;
          gb_uop.vec_first = (iss == 0);
          gb_uop.vec_last  = (iss == len - 1);
          gb_uop.wr_addr   = c.flags.pool ? c.dst : c.dst + BUF_ADDR_W'(iss);
        end
        default: ;
      endcase
    end
  end

  // ---------------- sequencing ----------------
  logic last_issue;   // compute commands: the final micro-op issues this cycle
  always_comb begin
    last_issue = 1'b0;
    if (state == S_RUN) begin
      if (c.op == CMD_PIMCORE_CMP && is_conv)
        last_issue = c.acc_hold ? (iss == len - 1) : (iss == len);
      else if (c.op == CMD_PIMCORE_CMP || c.op == CMD_GBCORE_CMP)
        last_issue = (iss == len - 1);
    end
  end

  assign cmd_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      iss     <= '0;
      rcv     <= '0;
      wr_pend <= 1'b0;
      wr_k    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c       <= cmd;
          iss     <= '0;
          rcv     <= '0;
          wr_pend <= 1'b0;
          if (cmd.len == '0) done  <= 1'b1;
          else               state <= S_RUN;
        end
        S_RUN: begin
          if (bk_rd || pc_uop.rd_a || gb_uop.rd_a || pc_uop.vec) iss <= iss + 1'b1;
          if (lb_fill_wr || gb_fill_wr) rcv <= rcv + 1'b1;
          wr_pend <= (c.op == CMD_LBUF2BK || c.op == CMD_GBUF2BK) && (iss < len);
          wr_k    <= iss;
          if (finish) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (last_issue) begin
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The memory controller must hold a command steady until it is taken.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !cmd_ready) |=> (cmd_valid && $stable(cmd)))
    else $error("pim_ctrl: command changed while waiting for ready");
  a_no_unexpected_data: assert property (@(posedge clk) disable iff (!rst_n)
    bk_rvalid |-> (state == S_RUN && (c.op == CMD_BK2LBUF || c.op == CMD_BK2GBUF)))
    else $error("pim_ctrl: bank data returned outside a bank-to-buffer command");
endmodule
