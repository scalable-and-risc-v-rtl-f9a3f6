# Near-memory computing banks for a RISC-V microcontroller

A microcontroller spends most of its energy on data-parallel kernels moving
words between SRAM and the CPU, one load and one store at a time. This design
replaces ordinary 32 KiB SRAM banks of the system bus with two *near-memory
computing* (NMC) banks. From the outside, each still behaves as a plain
single-port memory: same bus and same address window. It also has one extra
pin, `imc`, that switches it into a computing mode. In that mode the bank
works on its own contents, so the data does not cross the system bus.

The two banks make different trade-offs:

* **NM-Caesar** is as small as possible. It has no program of its own. The
  host (the CPU, or a DMA stream) *writes instructions into it*. Each bus
  write in computing mode is one packed-SIMD operation on two words already
  stored in the bank. The bus write address gives the destination.
* **NM-Carus** is programmable. It holds a tiny RISC-V controller, the eCPU,
  with its own code memory (eMEM). The eCPU drives a vector unit (VPU) whose
  register file *is* the bank's memory. The host loads a kernel, starts it
  and gets an interrupt at the end. It can also keep using the bank as memory
  in the meantime.

Both banks handle 8-, 16- and 32-bit integer elements packed in 32-bit words.

The SystemVerilog is in `rtl/` and the self-checking testbenches are in `tb/`.
The top module, `nmc_mem_subsystem`, puts one conventional bank and one of
each NMC bank behind a single bus port.

## 1. The memory port and the subsystem

All memories share one request/response pair (`nmc_pkg`):

| signal | meaning |
|---|---|
| `req, we, be[3:0], addr[31:0], wdata[31:0]` | request; `addr` is a byte address |
| `gnt` | request accepted in this cycle (same cycle as `req`) |
| `rvalid, rdata` | read data, one cycle after the grant |

`nmc_mem_subsystem` decodes byte-address bits [16:15]:

* `0x0_0000` selects a 32 KiB SRAM (`nmc_sram`, 8192 words);
* `0x0_8000` selects NM-Caesar;
* `0x1_0000` selects NM-Carus.

Each NMC bank has its own mode pin (`caesar_imc_i`, `carus_imc_i`). In the
full microcontroller these pins come from a control register of the host. The
eCPU of NM-Carus is an existing RISC-V core and is not part of this RTL. Its
memory port (`ecpu_req_i/ecpu_rsp_o`), fetch enable and coprocessor interface
(`x_*`) are brought out as ports of the top. The completion interrupt
(`carus_irq_o`) and two busy flags are also outputs.

## 2. NM-Caesar

### 2.1 Instructions travel on the data bus

When `imc` is 1, a bus write is decoded as an instruction:

```
data[31:26] opcode    data[25:13] SRC2 word address    data[12:0] SRC1 word address
addr        destination (byte address of the word to write, as in a normal store)
```

Word addresses are relative to the bank and span its 8192 words (32 KiB).
Operations (`caesar_pkg::caesar_op_e`):

* `AND, OR, XOR` — bitwise logic;
* `ADD, SUB, MIN, MAX` — use the partitioned adder;
* `SLL, SLR` — shifts, with the amount taken per element from SRC2;
* `MUL` — the low half of each product;
* `MAC_INIT / MAC / MAC_STORE` — element-wise multiply-accumulate into an
  internal accumulator word. The `*_STORE` variant writes the result to the
  destination.
* `DOT_INIT / DOT / DOT_STORE` — the same for the sum of all element products
  of the word;
* `CSRW` — sets the element width (data[1:0] = 0, 1 or 2 for 8, 16 or 32
  bits). It stays in force until changed, so operations do not have to
  repeat it.

The numerical opcode values are this design's choice.

Reads are plain memory reads in both modes. Host software can therefore
collect results without switching back.

### 2.2 Controller pipeline (`caesar_ctrl`)

Each instruction passes through four steps:

1. **dec**: the instruction is accepted and its addresses latched;
2. **fetch**: both sources are read. They come from the two banks in the
   same cycle if they sit in different banks, and one after the other if
   not. Bank 0 holds words 0–4095 and bank 1 holds words 4096–8191.
3. **operands**: the words arrive and are handed to the ALU. *In this cycle
   the next instruction is already decoded.*
4. **writeback**: the ALU result comes out two cycles later and is written to
   the destination bank.

This gives one instruction every **2 cycles**. When both sources are in the
same bank, it gives one every **3 cycles**. The testbench measures both.

The bus sees the pipeline as back-pressure. `gnt` is held low while the
controller cannot accept a new instruction. A writer (CPU or DMA) simply
waits, and the instruction stream needs no software delays. Two conflicts are
resolved in hardware:

* a fetch whose bank is being written back in the same cycle waits one cycle
  (single-port banks);
* an instruction whose source is the destination of an instruction still in
  flight waits until that result is written (read-after-write).

A host access in memory mode is granted only when the controller is not
using the target bank.

### 2.3 SIMD ALU (`caesar_alu`)

The ALU has a fixed two-cycle latency, made of an input register stage and a
result stage.

* The adder is built from byte slices. The carry between slices is cut at
  every element boundary, so one adder serves 4×8, 2×16 or 1×32-bit
  add/sub/min/max.
* Multiplication uses four 17-bit signed multipliers:
  * 8 bits: four products;
  * 16 bits: two products, each on its own multiplier;
  * 32 bits: the low 32 bits of the product, built from three 16×16 partial
    products.
* The accumulator for MAC/DOT lives inside the ALU, so accumulation costs no
  memory traffic.

## 3. NM-Carus

### 3.1 Organisation

```
 host bus ──┬─(imc=0)─► VRF: 4 × 8 KiB single-port banks (interleaved)
            │                       ▲ one lane ALU per bank
            └─(imc=1)─► controller bus ─► eMEM 512 B   (kernel code)
                              ▲        └─► config register (start / done / irq_en)
                     eCPU ────┘  ──X-if──► VPU (decode/issue, CSR, arith, move/slide)
```

The 32 KiB data memory is also the vector register file (VRF). It holds 32
registers `v0`–`v31` of 1 KiB each.

Consecutive host words go to consecutive banks: word *w* is in bank
*w* mod 4, row *w*/4. Each register therefore occupies the same 64 rows in
all four banks. Element *i* of every register lives in the same bank, so each
bank with its ALU forms an independent **lane**. No operand ever crosses
lanes, except for slides.

The `imc` pin chooses what the host port sees:

* `imc = 0` — the VRF, so the host reads and writes vector data as plain
  memory.
* `imc = 1` — the controller bus. The host writes the kernel into the eMEM
  and writes the configuration register:
  * bit 0, *start*: releases the eCPU's fetch enable;
  * bit 1, *done*: written by the kernel at its end;
  * bit 2, *irq_en*: enables the interrupt, and resets to 1.

  `irq_o = done & irq_en`. Writing *done* also drops *start*, which stops the
  eCPU. The host clears *done* by writing 0.

The host keeps priority on the VRF while a kernel runs. In that cycle the
whole VPU is stalled, and no lane request is lost.

### 3.2 Instruction set (`carus_decoder`)

Vector instructions use the custom opcode `0x5b`, with the field layout of
the standard RISC-V vector extension (RVV):

* funct6 selects the operation;
* funct3 selects the operand form, as in RVV:
  * OPIVV (000) is `.vv`;
  * OPIVI (011) is `.vi`;
  * OPIVX (100) is `.vx`;
  * OPMVX (110) is used for the scalar moves;
  * OPCFG (111) is `vsetvli`, `vsetivli` or `vsetvl`.

Operations:

* `vadd, vsub, vmul, vmacc`;
* `vand, vor, vxor`;
* `vsll, vsrl, vsra`;
* `vmin[u], vmax[u]`;
* `vmv`;
* `vslideup/down` and `vslide1up/down`;
* `emvv` — scalar to element *idx* of `vd`;
* `emvx` — element *idx* of `vs2` to a scalar register. This is the only
  instruction that returns a value to the eCPU.

**Indirect register addressing.** When bit 25 is set, the register numbers
are taken from the scalar `rs2`, not from the instruction:

* `vd = rs2[7:0]`;
* `vs1 = rs2[15:8]`;
* `vs2 = rs2[23:16]`.

The scalar operand of a `.vx` form then comes from `rs1`. A loop over rows of
a matrix therefore needs one instruction and an incrementing register, not
an unrolled block of instructions. This keeps kernels small enough for the
512-byte eMEM.

funct6 values follow RVV wherever RVV has the instruction. The `emvv`/`emvx`
codes and the meaning of bit 25 are this design's choice.

### 3.3 VPU timing — the arithmetic schedule (`carus_vpu`)

All operands of an element-wise instruction sit in the same single-port bank.
A lane must therefore read its *R* source words one after another (R = 1 to
3), then write one result. The lane ALU needs *A* cycles per word, depending
on the operation and the element width (`carus_pkg::alu_cycles`).

The VPU runs all lanes in lock-step with a period of

    P = max(R + 1, A)

Row *k* of the operation is handled in three periods:

* period *k*: read;
* period *k+1*: compute;
* period *k+2*: write, in the slot after the reads of row *k+2*.

One bank port therefore serves reads and writes without collisions. An
instruction on *n* rows takes (n + 2)·P cycles plus one dispatch cycle. A full
1 KiB register has 64 rows per lane.

The cycle counts are chosen so that `vmacc.vx` (R = 2: `vd` and `vs2`)
reaches the published throughput per lane:

* 8 bits: 4 MACs per word every 4 cycles (1 MAC/cycle);
* 16 bits: 2 per 3 cycles (0.67);
* 32 bits: 1 per 3 cycles (0.33).

The testbench checks these times.

Tail handling: when `vl` does not fill the last word, byte enables protect
the elements beyond `vl`.

A small operand buffer bypasses the word that arrives in the same cycle as a
period boundary. Without it, the last operand of a P = R + 1 operation would
be taken one cycle too early. This is the subtlest timing point of the unit.

**Issue and commit.** The eCPU offers an instruction on the X interface. The
VPU accepts it into a one-entry issue register while the previous instruction
executes, so at most two are in flight. It dispatches from that register when
the execution units are free. `vsetvl*` executes in the CSR unit at dispatch
(`vl = min(AVL, VLMAX)`, with VLMAX = 1024/SEW-bytes). Its new `vl` is
returned as the scalar result one cycle later. `emvx` returns its element
through the same result channel, so it is the only vector-to-scalar
dependence.

**Move/slide unit.** Slides and `emvv`/`emvx` are handled one element at a
time. The unit reads the source word, reads the destination word, merges the
element and writes the destination back. This is slower than the arithmetic
unit but needs no cross-lane network.

### 3.4 Lane ALU (`carus_lane_alu`)

The lane ALU computes one 32-bit word of 8/16/32-bit elements
combinationally. The multi-cycle nature of the intended serial arithmetic is
expressed only through `alu_cycles` in the schedule above. Functionally the
results are exact; in area the ALU is larger than a shared serial circuit.

## 4. Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_nm_caesar`:
  * memory mode write/read;
  * 450 random instructions over all operations and widths, compared with an
    independent reference model (`caesar_ref_pkg`);
  * issue interval measured at 2 cycles for different banks and 3 for the
    same bank.
* `tb_nm_carus`:
  * the host fills the VRF, loads the eMEM and starts the kernel;
  * a behavioural stand-in for the eCPU drives the X interface with random
    `.vv/.vx/.vi` arithmetic, indirect forms, slides, `emvv/emvx` and odd `vl`
    tails for each width. Everything is compared with a byte-level VRF model
    (`carus_ref_pkg`).
  * `vmacc.vx` cycle counts are checked against (64+2)·P+1;
  * host reads during a kernel must stall the VPU;
  * *done* must raise the interrupt and stop the eCPU.
* `tb_caesar_alu`:
  * random operations of all kinds and widths, issued every one or two
    cycles, plus MAC/DOT chains;
  * every result must appear exactly two cycles after its operands and
    match the reference model.
* `tb_carus_csr_unit`: random `vset` requests (explicit AVL, AVL = VLMAX,
  keep vl, unsupported widths) checked against `vl = min(AVL, VLMAX)`.
* `tb_nmc_mem_subsystem` runs the top at its default sizes:
  * the conventional bank;
  * a Caesar kernel, including MAC/DOT and one same-bank instruction;
  * a Carus kernel running at the same time as host traffic.

  It counts mode switches, Caesar bus stalls, same-bank Caesar instructions,
  VPU stalls, indirect instructions, scalar/vector moves and interrupts, and
  fails if any of them never happened.

Run one testbench with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/nmc_pkg.sv rtl/caesar_pkg.sv rtl/carus_pkg.sv \
  tb/caesar_ref_pkg.sv tb/carus_ref_pkg.sv tb/tb_nmc_mem_subsystem.sv \
  --top-module tb_nmc_mem_subsystem
./obj_dir/Vtb_nmc_mem_subsystem
```

## 5. Where this RTL departs from the intended chip

* **No eCPU inside.** NM-Carus expects an RV32EC core with the CORE-V X
  coprocessor interface. Its ports are brought out, and the testbenches use a
  behavioural stand-in.
* **No clock gating.** The VPU is meant to be clock-gated when idle.
  `vpu_busy_o` is provided for an integration-level gate.
* **Serial arithmetic modelled by timing only** (section 3.4). The move/slide
  unit is element-serial.
* **Memories are arrays**, not foundry macros. The eMEM is the same array
  model as the banks.
* **Encodings chosen here:**
  * Caesar opcode numbers;
  * Caesar bank split at the address MSB;
  * `emvv/emvx` funct6 and the indirect bit;
  * configuration-register bit positions;
  * the subsystem address map;
  * host priority everywhere.

  These are easy to change in `caesar_pkg`, `carus_pkg` and the top.

## 6. Workloads

For each benchmark size, this is whether it fits the 32 KiB of one bank at
the default parameters.

* Element-wise ops: 8 KiB input on Caesar (plus 4 KiB output), 10 KiB on
  Carus (10 of 32 registers).
* Matrix multiply A[8,8]×B[8,p]: p up to 512 on Caesar and 1024 on Carus at
  8 bits. On Carus that is 8 KiB B + 8 KiB C, i.e. 16 registers.
* GEMM adds C: 24 registers on Carus.
* 2-D convolution on an 8×1024 byte image: 8 registers in, 8 out.
* ReLU, leaky ReLU and max-pool on 16 KiB: 16 registers, in place.
* The A[10,10]×B[10,1024] 8-bit layer of an anomaly-detection network:
  10 registers in, 10 out.

All fit, and in every case A is held in scalar registers.
