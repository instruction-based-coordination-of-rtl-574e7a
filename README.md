# Instruction-coordinated multi-PU DNN accelerator

This design splits a DNN accelerator into many small GEMM engines of two
sizes, called processing units (PUs). Each PU has its own instruction
controller (ICU). The PUs coordinate through a small ISA, not a central
scheduler. Producer and consumer PUs exchange one-word REQ/ACK tokens over a
lightweight token network. They move data through shared HBM buffers.

Because coordination is expressed as instructions, the same hardware can be
arranged in different ways:
- as one long layer pipeline across all PUs,
- as several shorter pipelines that serve separate batches,
- as independent PUs.

Switching between these takes only new programs, with no new bitstream.

The default configuration has ten PUs spread over two FPGA super logic
regions (SLRs):
- PIDs 3, 4, 5, 6 and 9 are **PU2x** units with a 64×8 array.
- PIDs 0, 1, 2, 7 and 8 are **PU1x** units with a 64×4 array.
- PIDs 0–4 sit in SLR0 and PIDs 5–9 in SLR1.

The top module is `accel_top`.

```
 host AXI4-Lite ─► cfg_axil_bridge ─► cfg_switch(0) ─► cfg_switch(1) ─► … ─► cfg_switch(9)
                                           │ beats for PID 0     │ PID 1
                                           ▼                     ▼
                    ┌──────── PU slot i ─────────────────────────────────────┐
                    │  icu  ── LD / CP / ST command channels ──►  pu          │
                    │   ▲ M0        │ S0                          │ 3 HBM ports│
                    │   └──── isu (3×3 token switch) ◄┘            ▼           │
                    └────────────│──────────│───────────────────── HBM ───────┘
            ISU of PID i-1 ◄─ M1 │          │ M2 ─► ISU of PID i+1
                    (13 register stages on the link between PID 4 and PID 5)
```

## The coordination ISA

Every PU's ICU has three **groups**: Load (LD), Compute (CP) and Store (ST).
Each group owns a 512×64-bit dual-port instruction RAM and a decoder. The
three groups run concurrently. Within a PU they meet only at the PU's two
ping-pong buffers:
- Load fills the input buffer.
- GEMM drains the input buffer and fills the output buffer.
- Store drains the output buffer.

Across PUs they meet only through tokens.

An instruction is 64 bits long:

```
[63:59] OPCD   [58] PRG_END   [57:0] payload (layout per type, see rtl/icu_pkg.sv)
```

| Type | Instructions | What the decoder does |
|---|---|---|
| ProgCtrl | `PRG_PRM` | latches NR (number of rounds, 0 = endless) and ICU_BA (loop start) |
| Config | `IM2COL_PRM`, `STRIDE_PRM`, `RES_ADD_STRIDE_PRM`, `URAM_PRM` | latches a transfer pattern or a weight-memory address for the next move |
| DataMove | `LINEAR_ADM`, `IM2COL_ADM`, `STRIDE_ADM`, `WEIGHTS_ADM`, `RES_ADD_ADM`, `RES_ADD_STRIDE_ADM` | turns (CUR_BA, LEN) plus the latched pattern into bursts for the PU |
| AddrCyc | `CYCLE_ADDR` | rewrites the CUR_BA of the preceding DataMove |
| Sync | `SEND_REQ`, `SEND_ACK`, `WAIT_REQ`, `WAIT_ACK` | sends a token, or blocks until one has arrived |
| Compute | `GEMM` | starts a GEMM and waits for it |

Every group decodes the full ISA but skips the instructions that do not belong
to it:
- Load runs `WAIT_REQ` and `SEND_ACK`.
- Store runs `WAIT_ACK` and `SEND_REQ`.
- Compute runs weight and residual loads and `GEMM`.

**Dynamic instructions.** Two instruction types write themselves back into the
instruction RAM after they execute. This is how a loop body that never changes
can walk through addresses and buffers.

`CYCLE_ADDR` has the fields BA, AOFFS, NC and IC:
- If IC = 0, the preceding DataMove gets CUR_BA = BA and IC is reloaded with NC.
- Otherwise the DataMove gets CUR_BA + AOFFS and IC is decremented.

A Sync instruction has the fields PID, BID, BASE_BID, NC and IC:
- NC = 0 is a *bypass*: the instruction never changes. It is used to
  pre-announce free buffers.
- If IC = 0, BID returns to BASE_BID and IC is reloaded with NC.
- Otherwise BID is incremented and IC is decremented.

This lets a Sync instruction cycle through the halves of a double buffer.

**Rounds.** A group runs from address 0. Each time an instruction with PRG_END
completes, the round counter advances and the group jumps to ICU_BA. After NR
rounds the group stops. A PU's `done` is set when all three groups have
stopped.

### Tokens and the REQ/ACK tables

A token holds two parts:
- TDEST carries the destination PID.
- TDATA carries {BID, source PID, REQ/ACK}.

At the receiver the token sets one bit in either the REQ table or the ACK
table. Each table is 16 BIDs × 16 source PIDs of single bits.

`WAIT_REQ` (Load) and `WAIT_ACK` (Store) poll the bit at {BID, SRC_PID}. Once
the bit is set they clear it and continue. If a token arrives in the same
cycle as the clear, the bit stays set, so no token is lost.

`SEND_*` instructions from Load and Store are merged round-robin into a
4-entry FIFO. A SEND therefore costs the group only the time to enter the
FIFO.

A token addressed to the sending PU's own PID does not enter the network. It
goes from the FIFO straight into the local table. The table is written on
the clock edge after the token enters the FIFO, so a `WAIT` sees it in the
second cycle after the `SEND`. If a token from the ISU arrives in the same
cycle, the ISU token is written first.

A typical producer → consumer pair through a double buffer in HBM works like
this:

```
consumer LD:  SEND_ACK bid0 (bypass)  SEND_ACK bid1 (bypass)
              loop: WAIT_REQ → LINEAR_ADM (+CYCLE_ADDR) → SEND_ACK
producer ST:  loop: WAIT_ACK → LINEAR_ADM (+CYCLE_ADDR) → SEND_REQ
```

## Token network (ISU)

Each PU has an ISU, a 3×3 switch for single-beat tokens:

| Port | Role |
|---|---|
| S0 | injection from the local ICU |
| S1 | tokens heading to lower PIDs |
| S2 | tokens heading to higher PIDs |
| M0 | delivery to the local ICU |
| M1 | output toward lower PIDs |
| M2 | output toward higher PIDs |

Routing compares TDEST with the node's PID:
- equal goes to M0,
- smaller goes to M1,
- larger goes to M2.

Each master port arbitrates among the slaves that want it with a round robin
that changes after every transfer.

The ISUs form a chain in PID order. Between PID 4 and PID 5, both directions
pass through 13 register stages, which model the SLR crossing.

Register slices sit on S1, S2 and every master port, so each hop costs two
cycles. From the Store group of PU7 to the REQ table of PU2, a token takes 24
cycles:
- ICU FIFO,
- five hops,
- the 13-stage crossing,
- M0 and the table write.

The end-to-end test measures this number.

## Configuration link (CfgLink)

The host programs everything through one AXI4-Lite slave, `cfg_axil_bridge`:

| Addr | Name | Access |
|---|---|---|
| 0x00 | INSTR_LO | W: instruction bits [31:0] |
| 0x04 | INSTR_HI | W: instruction bits [63:32] |
| 0x08 | TARGET | W: [8:0] RAM address, [13:12] group (0 LD, 1 CP, 2 ST), [19:16] PID; the write sends the word |
| 0x0C | CTRL | W: bit 0 starts all ICUs, bit 1 stops them |
| 0x10 | DONE | R: one bit per PU |
| 0x14 | BUSY | R: one bit per PU |
| 0x18 | BEATS | R: number of words sent |

A TARGET write emits one stream beat {PID, group, address, data}. The beat
travels down a daisy chain of `cfg_switch` nodes. Each node keeps the beats
for its own PID and forwards the rest through a register. The ICU then steers
the beat by group into one of its three instruction RAMs.

Reprogramming needs no reset: stop, load new programs, start. The end-to-end
test switches from a two-PU pipeline to ten independent PUs this way.

## Processing unit (PU)

A PU computes O[R×P] = W[R×M]·A[M×P] on INT8 data with 32-bit accumulation.
It has one command channel per ICU group, each with valid/ready and a one-cycle
`done`.

| Command | Group | Action |
|---|---|---|
| `PC_LD_ACT` | LD | read HBM into the free input bank; the last burst marks it full |
| `PC_LD_W` | CP | read HBM into the weight memory from a given word |
| `PC_LD_RES` | CP | read residual lines (R bytes per output column) |
| `PC_GEMM` | CP | needs a full input bank and a free output bank; runs P columns of K = M/C array steps; post-processes each column; marks the output bank full; optionally frees the input bank |
| `PC_ST_OUT` | ST | write the full output bank to HBM; the last burst frees it |

The PU is built from these parts:

- **`pu_systolic_array`**: R rows of C INT8 multipliers each.
  - Every cycle, each row multiplies C weights with the same C activations and
    accumulates the sum.
  - A column of M = K·C inputs takes K cycles.
  - The array does R·C MACs per cycle: 256 for a PU1x, 512 for a PU2x.
- **`pu_vector_unit`**: post-processes each accumulator in this order:
  1. optional rounding,
  2. arithmetic right shift by a power-of-two scale,
  3. optional residual add,
  4. optional ReLU,
  5. saturation to INT8.
- **`pu_pingpong`**: two banks, each either free or full. The producer is held
  while its next bank is full. This back-pressure throttles the groups
  upstream.
- **`pu_weight_mem`**: the weight store.
  - One word holds the R×C weights of one array step. A bias word holds R
    32-bit biases.
  - The depth is 64·4096·64/(R·C·8) words, which is 2 MiB per PU. That matches
    64 UltraRAMs of 4096×64 bits.
- **`pu_adm`** (×2): data movers with single-word HBM requests.
  - One mover serves input and output activations.
  - The other serves weights and residuals.

**Activation layout.** Activation column p, chunk k sits at byte (p·K+k)·C of
an input bank. An output line is R bytes spread over R/32 words of 256 bits.

**GEMM timing.** `done` pulses P·K + 7 cycles after the GEMM is accepted:
- 2 cycles for the bias fetch,
- P·K array steps,
- the pipeline drain.

## Timing summary

| Path | Cycles |
|---|---|
| ISU hop (neighbour to neighbour) | 2 |
| SLR crossing | +13 |
| PU7 SEND_REQ → PU2 REQ table | 24 |
| SEND to own PID → entry visible to WAIT | 2 |
| Instruction fetch | 2; Config/ProgCtrl 3; CYCLE_ADDR 4 |
| GEMM of P columns, K chunks | P·K + 7 |
| Data mover read of n words, memory latency L | n + L + 1 |
| Data mover write of n words | 2n |

## Files

- Package and helpers:
  - `rtl/icu_pkg.sv`: types, opcodes, write-back functions and instruction
    builders.
  - `rtl/axis_pipe.sv`: register slices.
  - `rtl/sync_fifo.sv`: FIFO.
- ICU:
  - `rtl/icu.sv` with `icu_instr_ram`, `icu_group_ctrl`, `icu_addr_gen`,
    `icu_sync_table` and `icu_token_out`.
- Network and configuration:
  - `rtl/isu.sv`: the token switch.
  - `rtl/cfg_axil_bridge.sv` and `rtl/cfg_switch.sv`: the configuration link.
- PU:
  - `rtl/pu.sv` with `pu_systolic_array`, `pu_vector_unit`, `pu_pingpong`,
    `pu_weight_mem` and `pu_adm`.
- Top: `rtl/accel_top.sv`.
- Testbenches:
  - `tb/tb_<module>.sv` is one self-checking testbench per module.
  - `tb/hbm_model.sv` is a behavioural multi-port HBM. It has a fixed latency
    and random back-pressure.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. Each
has a cycle watchdog.

`tb_accel_top` runs the whole accelerator at its default size, programming it
over AXI4-Lite only. It has two phases.

**Phase 1** is a PU2 → PU7 layer pipeline across the SLR boundary, with six
frames and a shared double buffer. It checks:
- every output byte against a reference model,
- the 24-cycle token latency,
- that each mechanism occurred: bypass SENDs, REQ and ACK wait stalls, SLR
  crossings in both directions, HBM back-pressure, and a GEMM held by the
  input buffer.

**Phase 2** reprograms all ten PUs to run independently without a reset.

`tb_accel_dp_a` uses the same top for the single-batch arrangement: one
ten-stage layer pipeline through PU0 … PU9 in PID order. Every inner PU is
consumer toward its predecessor and producer toward its successor. It checks
the final outputs against a ten-layer reference and counts the 18 bypass
SENDs, the tokens across the SLR crossing, and the REQ/ACK waits.

`tb_accel_dp_b` uses the same top for the five-batch, hybrid-parallel
arrangement. Five two-PU pipelines run at once, PU j → PU j+5. All their
tokens cross the SLR boundary and compete in the ISU chain. It checks:
- all outputs,
- ten bypass SENDs,
- the exact token counts across the crossing,
- that ISU arbitration conflicts, REQ and ACK waits, and HBM back-pressure
  all occur.

## Simulating

Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/icu_pkg.sv $(ls rtl/*.sv | grep -v icu_pkg) tb/hbm_model.sv tb/tb_accel_top.sv \
  --top-module tb_accel_top -o sim
obj_dir/sim
```

Replace `tb_accel_top` with any other `tb_*` to test one module.

Most unit testbenches override sizes to keep runs short. For example,
`tb_pu_weight_mem` uses a 64-word memory.

## Where this design departs from the source architecture

- **One clock.** The original PU runs its DSP array at twice the system clock.
  Here everything runs on one clock, so peak throughput is half the quoted
  4.6 TOPS: 3840 MACs per cycle for the ten PUs.
- **Array cells.** The cascade timing of the original DSP-based cells is not
  described. The array here broadcasts activations to each row, and a column
  finishes K cycles after it starts, in order. That is why there is no *wave
  reorder buffer*.
- **Data movers.** The original uses vendor AXI DataMover IP. `pu_adm` issues
  one request per 256-bit word, with no AXI4 bursts, outstanding-transaction
  limits or status channel. HBM bandwidth is therefore not modelled
  faithfully.
- **Direction of M1/M2.** The chain's two directions are assigned so that M1
  faces lower PIDs and M2 faces higher PIDs.
- **Choices made here.** The published text does not give any of the
  following, so they are this design's own:
  - the instruction bit layout,
  - the IM2COL/stride pattern encoding (n_outer × n_inner bursts at base +
    o·outer_stride + i·inner_stride),
  - the data layout in the buffers,
  - the vector-unit order of operations and rounding,
  - the CfgLink register map,
  - the FIFO depth.
- **Not built.** The following are outside the RTL:
  - HBM, which only has a testbench model,
  - the PCIe/host DMA,
  - clock generation,
  - host-side program generation (the testbenches build programs with the
    builders in `icu_pkg`).
- **Workloads.** The layer programs of the evaluated ResNet-50 deployments are
  not included. The hardware holds the ten-PU arrangements they use, but
  ResNet-50's weights (≈25 MB) exceed the 20 MiB of weight memory. They must be
  streamed with `WEIGHTS_ADM`, as the original does.
