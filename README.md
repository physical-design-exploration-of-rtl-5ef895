# A wire-friendly Soft-SIMD processor tile

In deeply scaled nodes, transistors keep shrinking while wires do not: the cost of a
design shifts from its logic to its interconnect. This tile is a domain-specific
processor for machine-learning and signal-processing kernels built so that almost
every wire is short and straight. Memory and compute are stacked as layers of equal
width, and bit *j* of one layer sits right above bit *j* of the next:

```
   NoC  <->  SPM: 6 SRAM banks x 512 b, 64 lines of 3072 b    (L1)
                  |  3072 b
             tile shuffler: pass, or move the line one word left
                  |  3072 b
             6 very wide registers (VWRs), one line each       (L0)
             each cut into 16 slices of one 192-bit word
                  |  one slice of every VWR
             16 Soft-SIMD vector functional units (VFUs),
             192-bit datapath, one local register each
```

There is no register-file crossbar and no multi-ported storage. A VFU can reach only
its own slice of each VWR, so each VFU gets a private bundle of point-to-point wires.
Data that must cross slices goes through the shuffler, which shifts a whole line by one
word. The arithmetic is *Soft-SIMD*: a 192-bit word is split into 3, 4, 6, 8, 12 or 16
lanes, chosen by each instruction. Multiplication is vector-by-scalar. It runs as a
sequence of shift-and-add steps, one per non-zero digit of the scalar written in
canonical signed digits (CSD).

The RTL is SystemVerilog-2017 and synthesisable. Its default parameters are the
architecture's main configuration, listed in the next section. The other published
configurations are parameter sets of the same code.

## Sizes and configurations

| parameter (`dsip_tile`) | default | meaning |
|---|---|---|
| `DW` | 192 | VFU datapath and VWR word width |
| `NUM_BANKS`, `BANK_W`, `SPM_DEPTH` | 6, 512, 64 | SPM banks, bits per bank row, rows |
| `NUM_VWR` | 6 | VWRs |
| `SLICES` | 16 | slices per VWR; also the number of VFUs |
| `WPS` | 1 | words per slice |
| `HAS_SHUFFLER` | 1 | 0 connects the SPM and the VWRs directly |

The SPM line `NUM_BANKS*BANK_W` must equal `SLICES*WPS*DW`; elaboration stops
otherwise. `DW` must be a multiple of 48 so that every lane mode divides it.
Storage at the defaults is 24 KiB of SPM, 2304 B of VWRs and 384 B of VFU registers.

The architecture was also laid out in four smaller or differently shaped configurations:

| config | `DW` | `NUM_BANKS` | `NUM_VWR` | `SLICES` | `WPS` | `HAS_SHUFFLER` |
|---|---|---|---|---|---|---|
| A | 96 | 3 | 1 | 8 | 2 | 0 |
| B | 192 | 6 | 4 | 1 | 16 | 0 |
| C | 96 | 6 | 2 | 8 | 4 | 0 |
| D | 192 | 3 | 2 | 8 | 1 | 1 |
| E (default) | 192 | 6 | 6 | 16 | 1 | 1 |

All five satisfy the line-width rule. Only E is simulated by the included
testbenches. The published byte counts for the VWRs of A, C and D (188, 750 and 375 B)
are the exact values (192, 768 and 384 B) divided by 1.024, while B and E are given
exactly. The text also calls E's 2304 B of VWRs "2304 KiB". The exact values are used
here.

The simplest arrangement has no shuffler, one VWR and one word per slice
(`HAS_SHUFFLER=0`, `NUM_VWR=1`, `WPS=1`). In it, every connection between the SPM, the
VWR and a VFU is a plain wire.

## The memory layers

**SPM (`spm`, `spm_bank`).** This is the tile's L1 scratchpad and its only door to the
rest of the system. The banks share one enable, write enable and address, so one
access reads or writes one full 3072-bit line. Bank *k* holds line bits
`[k*512 +: 512]`. A read returns its line at the next clock edge. On silicon each bank
is an SRAM macro. Here it is a register array that simulates and maps to a memory cell.

**VWR (`vwr`).** A very wide register is one line deep and as wide as an SPM line. Its
single storage port has two interfaces:

* The wide interface writes a whole line from the shuffler, and always shows the whole
  line.
* The narrow interface lets the VFU of slice *s* write word *w* of its slice. That word
  is line bits `[(s*WPS+w)*DW +: DW]`.

A VFU reads its slice words as plain wires. A wide write and a narrow write in the same
cycle are forbidden, and an assertion checks this. The architecture builds VWR cells
from latches. This RTL uses flip-flops, so it contains no latches, and the behaviour at
the clock edge is the same.

**VFU register.** Each VFU has one 192-bit register `R`. The instruction's lane mode
decides how it is read.

## Soft-SIMD lanes on one carry chain

`softsimd_alu` adds, subtracts and arithmetic-right-shifts lane by lane. The lane mode
`sw_mode_e` selects 3, 4, 6, 8, 12 or 16 lanes, which are 64 down to 12 bits at
`DW=192`. Results wrap modulo the lane width.

Add and subtract use one carry chain the width of the word. Let `H` be the mask of every
lane's most significant bit. If those bits are removed from both operands, no carry can
leave a lane. Each lane's top bit is then rebuilt from the operands and the carry that
reached it:

```
y = ((a & ~H) + (b' & ~H) + cin) ^ ((a ^ b') & H)
    add:      b' = b,  cin = 0
    subtract: b' = ~b, cin = one bit at each lane's least significant position
```

A carry into a lane's top bit can never continue into the next lane, because that top
bit was zeroed before the addition. The masks for all six modes are constants, and the
mode selects among them. The shifter is built differently: it is one lane-wise shifter
per mode, and the mode selects among their outputs.

## Multiplying by a scalar

`VFU_MUL` sets `R` to `A * scalar` in every lane, where the scalar is an 8-bit two's-complement
instruction field. `csd_encoder` recodes it into canonical signed digits: each digit is -1,
0 or +1, and no two neighbouring digits are both non-zero. For `x = |scalar|`, with
`xh = x >> 1`, `x3 = x + xh` and `c = xh ^ x3`:

* the +1 digits are `x3 & c`;
* the -1 digits are `xh & c`;
* for a negative scalar the two masks are swapped.

The VFU then spends one cycle on each non-zero digit, from the lowest upwards:

* issue cycle: the multiplicand is captured, and `R = ±(A << k0)`;
* each later cycle: `R = R ± (multiplicand << k)`, shifted lane by lane with zero fill,
  added or subtracted through the same carry chain as ADD/SUB.

The cost is `max(1, number of non-zero CSD digits)` cycles. For example, 93 = 1011101b
becomes +1 0 -1 0 0 -1 0 +1 and takes 4 cycles instead of the 5 ones of the binary
form. 127 takes 2 cycles, and 0 takes 1. `busy` is high for every cycle but the last.

## Driving the tile

The tile has no sequencer of its own. An external control plane drives two command
ports, and all inputs are sampled at the rising edge.

**VFU instructions** (`vfu_instr`, type `vfu_instr_t` in `dsip_pkg`) go to all 16 VFUs
at once. Operands A and B are either `R` or one word of the VFU's own slice in a chosen
VWR.

| op | effect per VFU | cycles |
|---|---|---|
| `VFU_LD` | `R <= A` | 1 |
| `VFU_ADD`, `VFU_SUB` | `R <= A ± B` per lane | 1 |
| `VFU_SRA` | `R <= A >>> shamt` per lane | 1 |
| `VFU_MUL` | `R <= A * scalar` per lane | max(1, CSD weight) |
| `VFU_ST` | word `dst_word` of this slice in VWR `dst_vwr` `<= R` | 1 |

While `vfu_busy` is high, only `VFU_NOP` may be issued (asserted). `vfu_r` shows every
VFU's register.

**Line transfers** (`xfer_op`) move one line through the shuffler. With
`xfer_shift=1`, word *i* goes to word *i+1*, the top word is dropped and word 0 becomes
zero.

| op | path | VWR/SPM written at |
|---|---|---|
| `XF_SPM_TO_VWR` | SPM line `xfer_addr` -> VWR `xfer_dst_vwr` | second rising edge after issue |
| `XF_VWR_TO_SPM` | VWR `xfer_src_vwr` -> SPM line `xfer_addr` | first edge |
| `XF_VWR_TO_VWR` | VWR -> VWR | first edge |

A command is taken at the rising edge where `xfer_ready` is high. Until then it must be
held. `xfer_ready` goes low in two cases:

1. **NoC priority.** The NoC port (`noc_req`) uses the single SPM port in the same
   cycle, and the command needs the SPM.
2. **Shuffler busy.** The previous cycle's SPM read is passing through the shuffler
   into its VWR, and the command wants the shuffler for a VWR line.

Two `XF_SPM_TO_VWR` commands can go back to back.

The **NoC port** reads or writes whole SPM lines and always wins the SPM. Read data is
on `noc_rdata` with `noc_rvalid` one cycle later.

The control plane must also keep to two ordering rules that the tile does not enforce:

* It must not let a line transfer land in a VWR in the same cycle as a `VFU_ST` into
  that VWR. The `vwr` assertion checks this.
* It must not read a VWR through a VFU in the cycle before a pending SPM line lands in
  it. Such a read sees the old line.

The reset (`rst_n` low) is synchronous. It clears the VFU registers, the multiply state
and the transfer pipeline. It leaves the SPM and the VWRs as they are.

## What follows the published architecture, and what does not

These parts come from the architecture:

* the layer structure;
* the shared-control banked SPM and its bank size;
* the one-deep, line-wide, sliced VWRs with a wide and a narrow interface;
* the one-word left shifter;
* the one-word VFU register;
* Soft-SIMD add/subtract and right shift with a lane width chosen at run time;
* CSD shift-and-add multiplication;
* all default sizes.

The architecture does not give these, so they are this design's own choices:

* the instruction and transfer encodings, operand selection, and broadcasting one VFU
  instruction to all slices;
* the set of six lane counts, taken from a drawing of the Soft-SIMD word;
* carry masking instead of guard bits;
* wrap-around instead of saturating arithmetic;
* the 8-bit scalar, recoding it in hardware, and the one-digit-per-cycle multiplier with
  its hidden multiplicand register;
* the zero fill of the shuffler;
* the SPM read latency, sharing the SPM with the NoC, and both stall rules;
* flip-flops in place of latches in the VWRs.

The architecture's own description of the VFU internals and of the control plane is
published elsewhere and was not followed. Treat the VFU instruction set as a plausible
stand-in, not as the original ISA.

Not included:

* the control plane and the NoC (the tile exposes their ports);
* the system DMA controller;
* the tiles' 2D array;
* the Data Pack Unit, which is mentioned as a rarely used VFU-side block without any
  description.

## Files

| file | contents |
|---|---|
| `rtl/dsip_pkg.sv` | default sizes, lane modes, opcodes, `vfu_instr_t`, transfer commands |
| `rtl/dsip_tile.sv` | the tile: SPM, shuffler, VWRs, VFUs, transfer control |
| `rtl/spm.sv`, `rtl/spm_bank.sv` | banked scratchpad |
| `rtl/vwr.sv` | very wide register |
| `rtl/tile_shuffler.sv` | one-word line shifter |
| `rtl/vfu.sv` | Soft-SIMD VFU with its register and multiplier |
| `rtl/softsimd_alu.sv`, `rtl/softsimd_shl.sv` | lane-wise add/sub/shift-right, lane-wise shift-left |
| `rtl/csd_encoder.sv` | binary to CSD recoder |
| `tb/softsimd_ref_pkg.sv` | lane-by-lane integer reference model for the testbenches |
| `tb/tile_exerciser.sv` | control-plane and NoC model with a tile reference model; drives `tb_dsip_tile` |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A watchdog
counts a failure if a testbench hangs. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/dsip_pkg.sv tb/softsimd_ref_pkg.sv tb/tb_dsip_tile.sv --top-module tb_dsip_tile
./obj_dir/Vtb_dsip_tile +verilator+rand+reset+2
```

Replace `tb_dsip_tile` with any other `tb_*` name. What each testbench covers:

* `tb_dsip_tile` runs the full-size tile end to end, driven by `tile_exerciser`. The
  exerciser takes the tile's parameters, so it can drive the other configurations as
  well. Those configurations currently build very slowly with Verilator and have not
  been simulated.
  * It loads SPM lines over the NoC.
  * It moves them SPM->VWR (plain and shifted), VWR->VWR and VWR->SPM. A VFU load checks
    that an SPM line lands in its VWR at the second edge, not the first.
  * It runs a load/add/subtract/shift/multiply/store program in all six lane modes,
    checking all 16 VFU registers after every instruction, and every multiply's cycle
    count.
  * It reads everything back over the NoC and compares it with a reference model.
  * It forces both stall cases and counts every mechanism; one that never happens is a
    failure.
  * It builds in about two minutes and runs in well under a second.
* `tb_vfu` runs 1500 random instructions against the integer model, with two words per
  slice.
* `tb_softsimd_alu` checks random operands and lane-boundary carries in every mode.
* `tb_csd_encoder` checks all 256 scalars.
* `tb_vwr`, `tb_spm`, `tb_spm_bank` and `tb_tile_shuffler` check storage, slicing and
  shifting.

Every testbench has also been run against a copy of its module with one deliberate bug,
such as an uncut carry chain, a wrong shift direction or a missing stall, and it fails
there.

The complete tile lints cleanly with Verilator and elaborates with the yosys slang front
end. Yosys's coarse synthesis of the full-size tile takes more than ten minutes. Most of
that time goes into the sixteen VFUs, each holding six lane-wise shifters per shift
direction.
