// pimfused_pkg: types and constants shared by the PIMfused channel.
//
// A PIMfused channel is driven by six custom PIM commands (two compute
// commands and four data-movement commands). Each compute command carries
// execution flags naming the operations fused into it. Data is moved in
// "words": one bank column access, LANES elements of DATA_W bits each.
//
// Follows the paper: the six command names and the flag names (CONV_BN,
// CONV_BN_RELU, POOL, ADD_RELU). Own choices: the numeric encoding, the
// 16 x 16-bit word (a 256-bit bank access, as in GDDR6-AiM), signed
// fixed-point data, and every command field beyond op and flags.
package pimfused_pkg;

  // Element width and number of elements per word (one bank column access).
  parameter int unsigned DATA_W     = 16;
  parameter int unsigned LANES      = 16;
  parameter int unsigned WORD_W     = DATA_W * LANES;
  parameter int unsigned LANE_W     = $clog2(LANES);
  // Accumulator width of the MAC: 2*DATA_W product, log2(LANES) tree growth,
  // plus headroom for long accumulations.
  parameter int unsigned ACC_W      = 48;
  // Widths of the command fields.
  parameter int unsigned BK_ADDR_W  = 20;   // word address inside a bank
  parameter int unsigned BUF_ADDR_W = 16;   // word address inside LBUF or GBUF
  parameter int unsigned LEN_W      = 16;   // words per command
  parameter int unsigned BANK_SEL_W = 4;    // up to 16 banks per channel

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef elem_t [LANES-1:0]        word_t;

  typedef enum logic [2:0] {
    CMD_PIMCORE_CMP = 3'd0,  // fused operations in all PIMcores
    CMD_GBCORE_CMP  = 3'd1,  // operations in the GBcore
    CMD_BK2LBUF     = 3'd2,  // all banks -> all LBUFs, in parallel
    CMD_LBUF2BK     = 3'd3,  // all LBUFs -> all banks, in parallel
    CMD_BK2GBUF     = 3'd4,  // one bank -> GBUF
    CMD_GBUF2BK     = 3'd5   // GBUF -> one bank
  } cmd_op_e;

  typedef struct packed {
    logic add_relu;
    logic pool;
    logic conv_bn_relu;
    logic conv_bn;
  } exec_flags_t;

  // One command as issued by the memory controller.
  //   PIMcore_CMP with CONV_BN or CONV_BN_RELU:
  //     acc = sum_{k<len} dot(LBUF[src_a+k], GBUF[src_b+k]); r = BN(acc);
  //     r = relu(r) for CONV_BN_RELU; r = relu(r + LBUF[src_c].lane) for
  //     ADD_RELU; r = pool(LBUF[dst].lane, r) for POOL (unless pool_init);
  //     LBUF[dst].lane <= r, lane = dst_lane.  The GBUF word is broadcast.
  //     acc_cont: do not clear the accumulator, continue the previous CONV
  //     command's sum (a receptive field larger than the LBUF is reduced in
  //     several commands, with LBUF refills in between). acc_hold: stop
  //     after the MAC steps, no BN and no write (a later command finishes).
  //   PIMcore_CMP / GBcore_CMP without a CONV flag (vector mode, on LBUF
  //   resp. GBUF): v_k = ADD_RELU ? relu(A[src_a+k] + A[src_c+k]) : A[src_a+k];
  //     without POOL: dst+k <= v_k; with POOL: dst <= pool over k of v_k,
  //     continuing the previous command's window when pool_init is 0.
  //   BK2LBUF / LBUF2BK: len words between bank address bk_addr and LBUF
  //     address dst / src_a; PIMcore c uses bank c*BANKS_PER_CORE + bank.
  //   BK2GBUF / GBUF2BK: len words between bank `bank` and GBUF dst / src_a.
  typedef struct packed {
    cmd_op_e                 op;
    exec_flags_t             flags;
    logic [BANK_SEL_W-1:0]   bank;
    logic [BK_ADDR_W-1:0]    bk_addr;
    logic [BUF_ADDR_W-1:0]   src_a;
    logic [BUF_ADDR_W-1:0]   src_b;
    logic [BUF_ADDR_W-1:0]   src_c;
    logic [BUF_ADDR_W-1:0]   dst;
    logic [LANE_W-1:0]       dst_lane;
    logic [LEN_W-1:0]        len;
    logic                    acc_cont;
    logic                    acc_hold;
    logic                    pool_init;
    logic                    pool_avg;
    logic [3:0]              pool_shift;
    elem_t                   bn_scale;
    elem_t                   bn_bias;
    logic [5:0]              bn_shift;
  } pim_cmd_t;

  // Micro-op broadcast by the controller to every PIMcore and the GBcore.
  // Issue stage: the read strobes and addresses. The op bits are acted on
  // one cycle later, when the synchronous buffer reads return data.
  typedef struct packed {
    logic                  rd_a;      // read buffer port A at addr_a
    logic [BUF_ADDR_W-1:0] addr_a;
    logic                  rd_b;      // read buffer port B at addr_b
    logic [BUF_ADDR_W-1:0] addr_b;
    logic                  mac;       // port A x GBUF broadcast into the MAC
    logic                  mac_first; // clear the accumulator first
    logic                  post;      // finish a CONV: BN/ReLU/Add/Pool, write lane
    logic                  vec;       // vector step on port A (and B for ADD_RELU)
    logic                  vec_first; // first step of a vector command
    logic                  vec_last;  // last step: write the pooled word
    logic [BUF_ADDR_W-1:0] wr_addr;   // destination word
    logic [LANE_W-1:0]     lane;
    exec_flags_t           flags;
    logic                  pool_init;
    logic                  pool_avg;
    logic [3:0]            pool_shift;
    elem_t                 bn_scale;
    elem_t                 bn_bias;
    logic [5:0]            bn_shift;
  } uop_t;

  // Bank word port (as seen from the channel logic).
  typedef struct packed {
    logic                 rd;
    logic                 wr;
    logic [BK_ADDR_W-1:0] addr;
    word_t                wdata;
  } bank_req_t;

  typedef struct packed {
    logic  rvalid;
    word_t rdata;
  } bank_rsp_t;

  // Saturate a wide signed value to one element.
  function automatic elem_t sat_elem(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (DATA_W-1)) - 64'sd1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return elem_t'(MAXV);
    else if (v < MINV) return elem_t'(MINV);
    else               return elem_t'(v);
  endfunction

endpackage
