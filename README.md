# PIMfused channel RTL

Near-bank DRAM processing-in-memory puts a small compute core next to each DRAM
bank (or group of banks). The cores get the bank's internal bandwidth, but they
cannot read each other's banks. A CNN run layer by layer splits every layer
across the cores by output channel. The next layer then needs every channel,
so each layer boundary forces the feature map to be reshuffled between banks.
That data goes one bank at a time through a shared channel buffer, and this
cross-bank traffic dominates the run time.

PIMfused removes most of that traffic with a **fused-layer dataflow**.
Several consecutive layers are merged into one kernel and split
*spatially*: each core owns a tile of the output image (its `ox`, `oy` range)
across all channels. A tile's intermediate results stay in that core's local
buffer or local bank. Weights are the shared data, and the channel's global
buffer broadcasts them to all cores at once. A core needs a neighbour's data
only at the boundary of a fused kernel, where the global buffer regathers it.
Deep layers, whose images are too small to tile, fall back to layer-by-layer
mapping on the same hardware.

This repository holds synthesizable SystemVerilog for one PIMfused channel.
That covers:

- the bank-level PIMcores with their local buffers (LBUF);
- the channel-level GBcore with the global buffer (GBUF);
- the bus between banks and buffers;
- the controller that executes the six custom PIM commands.

The DRAM banks themselves and the host memory controller are not part of the
RTL. They meet it at two ports: the per-bank word ports and the command port.

## Channel organisation

```
            cmd (valid/ready) ──► pim_ctrl ──► done
                                    │ micro-ops, fill strobes, bus mode
        ┌───────────────┬───────────┴──────┬────────────────┐
     pimcore 0  ...  pimcore NC-1        gbcore          gbuf_bus
     (LBUF,          (LBUF, MAC,        (GBUF,         (bank ports
      MAC, BN, ...)   BN, ...)           Add&ReLU,       bk_req/bk_rsp
        ▲                ▲               Pool)           for 16 banks)
        └── GBUF read word broadcast ───┘
```

`pimfused_top` has these parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_BANKS` | 16 | banks per channel (a GDDR6 channel) |
| `BANKS_PER_CORE` | 4 | banks sharing one PIMcore; 4 gives 4 PIMcores ("Fused4"), 1 gives 16 ("Fused16") |
| `GBUF_BYTES` | 32768 | global buffer, 1024 words |
| `LBUF_BYTES` | 256 | local buffer per PIMcore, 8 words |

The 4-bank PIMcore with a 32 KB GBUF and 256 B LBUFs is the configuration
with the best overall power, performance and area balance, so it is the
default. The one-bank-per-core form is the same RTL with `BANKS_PER_CORE=1`.

**Words.** All transfers and buffer entries are words: `LANES`=16 signed
elements of `DATA_W`=16 bits, i.e. 256 bits. That is one 32-byte bank
column access. The types are in `pimfused_pkg`: `elem_t`, `word_t`,
`pim_cmd_t`, `uop_t`, `bank_req_t` and `bank_rsp_t`.

**Bank ports.** The top drives `bk_req[b] = {rd, wr, addr[19:0], wdata}` for
every bank. It expects `bk_rsp[b] = {rvalid, rdata}` back, with read data in
request order after any fixed latency. DRAM timing (activate, precharge,
tRCD and so on) is left to whatever sits behind these ports. The RTL only
needs in-order read data.

## The command set

One command is accepted when `cmd_valid && cmd_ready`. `cmd_ready` is high
only while the controller is idle. `done` pulses for one cycle when the
command's last result is readable. The six opcodes are:

| `op` | Name | Action |
|---|---|---|
| 0 | `PIMcore_CMP` | fused compute in **all** PIMcores at once (flags below) |
| 1 | `GBcore_CMP` | vector compute on the GBUF in the GBcore |
| 2 | `PIM_BK2LBUF` | `len` words from `bk_addr` to `LBUF[dst]`, every PIMcore from its own bank, in parallel |
| 3 | `PIM_LBUF2BK` | `len` words from `LBUF[src_a]` to `bk_addr`, every PIMcore in parallel |
| 4 | `PIM_BK2GBUF` | `len` words from bank `bank`, address `bk_addr`, to `GBUF[dst]` |
| 5 | `PIM_GBUF2BK` | `len` words from `GBUF[src_a]` to bank `bank`, address `bk_addr` |

In an LBUF transfer, PIMcore `c` uses bank `c*BANKS_PER_CORE + bank%BANKS_PER_CORE`.
The `bank` field therefore picks the same member of every core's bank group.
A GBUF transfer touches exactly one bank. Gathering from several banks takes
several commands.

There is **no direct LBUF↔GBUF path**. A PIMcore result that the GBUF needs
goes to the bank with `LBUF2BK` and comes back with `BK2GBUF`. The GBUF
reaches the PIMcores only by broadcasting the word it reads during a CONV.
This keeps every transfer on one bus and in a single, predictable order.

### Execution flags

`flags` is `{add_relu, pool, conv_bn_relu, conv_bn}` (MSB first). PIMcores
accept all four flags. The GBcore accepts `pool` and `add_relu`. Flags
combine, so a CONV+BN+ReLU layer followed by pooling is a single command with
`CONV_BN_RELU | POOL`.

### PIMcore_CMP with a CONV flag

Every PIMcore computes one output element per command and writes it into one
lane of one LBUF word:

```
acc = (acc_cont ? acc : 0) + Σ_{k<len} dot(LBUF[src_a+k], GBUF[src_b+k])
if (!acc_hold) {
  r = sat16(((acc * bn_scale) >>> bn_shift) + bn_bias)      // BN
  if CONV_BN_RELU: r = max(r, 0)
  if ADD_RELU:     r = max(sat16(r + LBUF[src_c][dst_lane]), 0)   // residual
  if POOL:         r = pool_init ? r : pool(LBUF[dst][dst_lane], r)
  LBUF[dst][dst_lane] = r                                   // other lanes kept
}
```

The GBUF word is the *same* for every PIMcore, so all cores apply the same
filter to their own tiles. Each `dot` is a 16-lane multiply with an adder
tree into a 48-bit accumulator.

An 8-word LBUF holds only 128 elements, while a 3×3×512 receptive field has
4608. The accumulation therefore can span commands:

- `acc_hold=1` stops after the MAC steps.
- The next CONV with `acc_cont=1` keeps adding to the same accumulator.

Between the two, a `BK2LBUF` may refill the LBUF. GBUF transfers may run in
between too, because the accumulator lives in the PIMcore.

`POOL` on a CONV result pools *across commands*. The old value is read from
the destination lane itself:

- the first window position uses `pool_init=1`;
- each later position of the window targets the same lane with `pool_init=0`.

### Vector mode (no CONV flag)

Without a CONV flag, both `PIMcore_CMP` (on each LBUF) and `GBcore_CMP` (on
the GBUF) run an element-wise pass over `len` words:

```
v_k = ADD_RELU ? max(sat16(A[src_a+k] + A[src_c+k]), 0) : A[src_a+k]
without POOL: A[dst+k] = v_k
with POOL:    P = pool(P, v_k) for each k, starting fresh if pool_init; A[dst] = P at the end
```

Pooling is max (`pool_avg=0`) or average (`pool_avg=1`). The average is the
sum of `x >>> pool_shift`, so the window must be a power of two, or its factor
must be folded into the next linear layer. The running pool register `P`
outlives the command. A later command with `pool_init=0` continues the same
window, so a window can cover data loaded in several steps.

## PIMcore and GBcore datapaths

`pimcore` is built from:

- `lbuf`: two synchronous read ports, one write port with a per-lane mask;
- `mac_unit`: multiplier array, adder tree, accumulator with a clear mux;
- `bn_unit`: multiply, arithmetic shift, bias, saturate;
- `relu_unit`;
- `add_relu_unit`: saturating add, then ReLU;
- `pool_unit`: max or shifted sum.

The Add&ReLU and Pool units are shared between the CONV post-processing path
(one lane) and the vector path (all lanes). The two never run in the same
cycle.

`gbcore` is the GBUF (`gbuf`, two read ports, one write port) with its own
`add_relu_unit`, `pool_unit` and pool register. Its read port A also feeds
the broadcast word to the PIMcores.

All buffer reads are synchronous. A micro-op therefore carries its read
strobes and addresses in the issue cycle. The operation bits act one cycle
later, when the data comes back (the `s1` stage in both cores). LBUF writes
have a fixed priority:

1. bank fill;
2. CONV result (one lane);
3. vector result.

An assertion checks that no two of them coincide.

## The controller and its timing

`pim_ctrl` registers the accepted command, then issues one micro-op or bank
access per cycle. It tracks words issued and words received separately, so
bank reads are pipelined: a new read goes out every cycle, however long the
bank latency `L`. Durations, counted in clock edges from the acceptance edge
to the edge that raises `done`:

| Command | Cycles |
|---|---|
| `BK2LBUF`, `BK2GBUF` | `len + L` |
| `LBUF2BK`, `GBUF2BK` | `len + 1` |
| CONV | `len + 2` (`len + 1` with `acc_hold`) |
| vector op | `len + 1` |
| any command with `len = 0` | 0 (done at acceptance) |

LBUF transfers move `len` words into every LBUF at once, i.e. `NC × len`
words. GBUF transfers move `len` words in total. This gap in parallel bandwidth
is why the fused dataflow keeps data local.

Assertions check several rules:

- the command stays stable while it is offered and not accepted;
- no bank data arrives that was not requested;
- buffer addresses stay in range;
- the top's parameters are consistent (`NUM_BANKS` divisible by `BANKS_PER_CORE`).

## The bank bus (`gbuf_bus`)

The bus has two modes, set per command by the controller:

- **LBUF mode.** PIMcore `c` is wired to bank `c*BPC + sel%BPC`. All cores
  read or write at the same address in the same cycle. `rvalid` is the AND
  of the valid bits of the connected banks.
- **GBUF mode.** Bank `sel` alone is wired to the GBUF.

Banks outside the active connection see no request.

## Mapping a fused kernel

Here is a CONV_BN_RELU + max-pool layer on the fused dataflow, for one
output lane, with activations spatially tiled across the banks and weights
in bank 0:

```
BK2GBUF  bank=0 bk_addr=W  dst=0   len=n        // filter into GBUF (once)
BK2LBUF  bank=1 bk_addr=A  dst=0   len=n        // each core: its tile's receptive field
PIMcore_CMP CONV_BN_RELU|POOL src_a=0 src_b=0 dst=7 dst_lane=j len=n pool_init=1
... next window position: BK2LBUF, PIMcore_CMP ... pool_init=0
LBUF2BK  bank=1 bk_addr=O  src_a=7 len=1        // pooled outputs back to each core's bank
```

For receptive fields longer than the LBUF, the CONV is split into commands
`acc_hold=1, acc_cont=0`, then `acc_hold=1, acc_cont=1`, and finally
`acc_cont=1`, with a `BK2LBUF` before each one. At a fused-kernel boundary,
the tiles are gathered with `BK2GBUF` from each bank and written back in the
new layout with `GBUF2BK`. `GBcore_CMP` can do a residual add or a pooling
step on the data in passing. For layer-by-layer layers the roles swap: the
LBUF holds a core's weights and the GBUF broadcasts activations. The CONV
command is the same.

## Where this RTL departs from, or adds to, the architecture

Taken from the architecture:

- 16 banks per channel, with one PIMcore per bank or per 4 banks;
- one GBcore with the GBUF, and an LBUF in each PIMcore;
- the six commands and the four flag names;
- LBUF transfers on all banks in parallel, GBUF transfers one bank at a time;
- no direct LBUF↔GBUF path;
- residual addition and pooling in both core types;
- 32 KB GBUF and 256 B LBUF.

Choices made here, because the architecture leaves them open:

- The command encoding, its fields, and the valid/ready/done handshake.
- The 16×16-bit signed word and the 48-bit accumulator.
- The BN form: an integer scale, a right shift and a bias, with saturation.
  Float BN parameters must be folded into these.
- Average pooling as a shifted sum.
- Which bank of a 4-bank group the LBUF transfers use (the `bank` field modulo 4).
- Accumulation across commands (`acc_cont`, `acc_hold`) and pool windows that span commands.
- The micro-op schedule and the cycle counts above.

Known gaps:

- **The MAC always takes one operand from the LBUF.** A configuration with no
  LBUF (GBUF only, as in an AiM-style design) cannot run a CONV here. Data
  must go through `BK2LBUF` first.
- **DRAM timing is not modelled.** Cycle counts here are controller cycles
  with a fixed bank latency, not DRAM memory cycles.
- **The GBcore does only the two operations it is flagged for** (pooling and
  residual Add&ReLU). Other reductions that a GBcore could do are not built.

## Files

`rtl/` holds one module or package per file:

- `pimfused_pkg`
- `mac_unit`, `bn_unit`, `relu_unit`, `add_relu_unit`, `pool_unit`
- `lbuf`, `gbuf`
- `pimcore`, `gbcore`
- `gbuf_bus`, `pim_ctrl`
- `pimfused_top`

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
compares against an independent reference: `pimfused_ref_pkg` provides the
saturation, dot-product, BN, ReLU, add and pool functions. Each testbench ends
by printing `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

- **`tb_pimfused_top`** runs the default channel end to end. It plays both the
  memory controller and the banks (a word array per bank, read latency 3).
  - A command-level model tracks every bank, LBUF, the GBUF and the pool
    registers.
  - Each command's duration is checked against the table above.
  - All banks are compared after every command.
  - At the end, every LBUF and the used GBUF words are drained and compared.
  - It runs a directed fused sequence: CONV with each flag combination, a
    24-word CONV chained over three LBUF loads, a pool window spanning
    commands, and a residual add. A back-pressure (stall) test and 400
    random commands follow.
  - Each mechanism is counted, and a failure is counted for one that never
    happened: every opcode, every flag combination, average pooling,
    continued pooling, BN saturation, held and continued accumulation,
    stalls, and empty commands.
- **`tb_pimfused_top_fused16`** runs the same test with `BANKS_PER_CORE=1`
  (16 PIMcores).
- **`tb_resnet18_conv_tile`** runs one real fused-layer step on the default
  channel: a 3×3, 16-input-channel CONV_BN_RELU with 4 filters, then 2×2 max
  pooling.
  - Each PIMcore owns a 6×6 input tile (its 4×4 output tile plus halo) in its
    own bank.
  - The filters are loaded once into the GBUF and broadcast.
  - Each 9-word receptive field is reduced in two chained CONV commands
    around an LBUF refill.
  - The pooled words are checked against a direct convolution computed in
    the testbench. The 64 outputs take 2618 cycles.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pimfused_pkg.sv tb/pimfused_ref_pkg.sv tb/tb_pimfused_top.sv \
    --top-module tb_pimfused_top
./obj_dir/Vtb_pimfused_top +verilator+rand+reset+2
```

Replace the testbench name to run any other one. Block testbenches that do
not use the reference package need only `rtl/pimfused_pkg.sv` and their own
file. The testbenches reset or initialise everything they read, so they pass
with random initial state (`+verilator+rand+reset+2`) and any seed.
