# Cyber coherent Ising machine on an FPGA: RTL design

This is a SystemVerilog model of the FPGA circuit described in "Highly
Versatile FPGA-Implemented Cyber Coherent Ising Machine". The machine
repeats one kind of step, and each step has two phases:

- **Local field.** It computes the local field of every spin,
  `h = g + J (mu o sigma)`, with single-precision (FP32) floating point.
- **Time evolution.** It advances each spin's amplitudes with a short
  program that the host loads.

The program decides which algorithm runs, so the same hardware runs all
three of the paper's algorithms:

- open-loop CIM;
- closed-loop CIM (chaotic amplitude control);
- Jacobi successive over-relaxation (SOR), the update of `r` for a fixed
  `q`.

L0-regularised compressed sensing alternates CIM runs and SOR runs under
host control.

The default sizes are the paper's:

- up to N = 4096 spins;
- P_r = 64 MAC rows, P_c = 32 MAC inputs, P_b = 1, which gives 2048
  multiply-accumulate elements;
- 64 time-evolution lanes;
- FP32 throughout;
- a 30 MHz system clock, supplied from outside the design.

## Hierarchy

```
fpga_top                FPGA_TOP: pins, reset, host bus, CIM core
  rst_gen               internal reset from I_RESET and PLL Locked
  axi_slv_if            AXI_SLV_IF: AXI4-Lite slave -> internal bus
  int_axi_if            INT_AXI_IF: decodes regions (registers, code, memories)
  cim_top               CIM_TOP
    reg_top             REG_TOP: settings, FP32 parameters P0..P7, status, interrupt
    ctl_top             CTL_TOP: step sequencer, code memory, address generators
    cim_mem             MEM: JMEM, HMEM, HEMEM, CMEM, SMEM, RMEM, ADMEM, PMEM
      jmem              folded upper triangle of J, 64x64 banks
      vec_mem (x6)      64-lane vector memories
    j_mux               J_MUX: rebuilds a 64x32 block of symmetric J
    cal_h               CAL_H: Heaviside unit and 64 MACs
      cal_h_mac (x64)   one 32-input FP32 MAC (block floating point)
    rnd_gen             RND_GEN: one N(0,1) sample per lane
    cal_csr (x64)       CAL_CSR: one time-evolution lane
packages: fp32_pkg (FADD/FMUL/FSQRT), cim_pkg (instruction, map, JMEM fold)
```

Some parts are vendor IP or have no logic, so they are not modelled; their
signals are the top's ports instead:

- the clock PLL;
- the PCIe endpoint;
- the AXI interconnect;
- the tie-offs of the unused DDR pins.

## How a step runs

**Local field (MM phase).**

- For each row tile `rb` (N/64 of them) and each 32-column block `cb`
  (N/32 of them), the controller reads one word from all 4096 JMEM banks.
- J_MUX turns those banks into the 64x32 block `J[64rb+m][32cb+k]`.
- The Heaviside unit forms `v = c` in Ising mode, or `v = r H(c)` in QUBO
  mode, where `H(c) = 1` only for `c > 0`.
- Each MAC multiplies 32 terms and sums them together with a 33rd input. On
  the first block of a row that input is `g` from HEMEM; on the other blocks
  it is the MAC's own running sum, as in Fig. 3(C) with HEXT_SEL.
- The finished fields go to HMEM.
- The pipeline runs one block per cycle with no bubbles.

**Time-evolution (TE) phase.**

- For each group of 64 spins, CE instructions run, one per cycle, from the
  code memory starting at PCBASE.
- Each instruction sets every selector of the 64 lanes:
  - the operands of FADD0/1, FMUL0/1 and FSQRT;
  - writes to FF0..FF5;
  - writes to CMEM, SMEM and RMEM;
  - whether the random samples advance.
- Operand selects see the unit results registered in the previous cycle.
  Write-back selects see this cycle's results.
- With this convention the four-operation SOR update fits in C_e = 4.

**Cycle count.** One step takes `N/64 * (N/32 + CE) + 4` cycles, and each run
adds 1 cycle:

- The paper's estimate is `N/P_r (N/P_c + C_e)`.
- The extra 4 cycles are 3 to drain the MAC pipeline and 1 to fetch the
  first TE group.
- For N = 1024, 2048 and 4096 with C_e = 32 this gives 1028, 3076 and
  10244 cycles. The paper measured 1030, 3075 and 10245.
- With C_e = 4 it gives 580, 2180 and 8452 cycles. The paper measured 580,
  2180 and 8453.

## Storage of J ("Rotate & Fit")

Only the upper triangle is stored:

- `J[a][b]` with `a < b` is kept at position `(a, b)` when `a < N/2`, and at
  `(N-1-a, N-1-b)` otherwise.
- The folded triangle fills an N/2 x N rectangle.
- Position `(row, col)` lives in bank `(row % 64, col % 64)` at word
  `(row/64)(N/64) + col/64`, so any 64x64 tile is a single word of every
  bank.

When J_MUX builds a block:

- below the diagonal it reads the transposed element;
- in folded tiles it mirrors the bank index;
- on the diagonal it gives zero, because the sums in Eq. (2) skip `j = i`.

A clear command zeroes JMEM at one word of every bank per cycle, which
takes 2048 cycles at N = 4096.

## Host interface

The host uses word addresses. The AXI byte address is divided by 4, and
bits 27:24 of the word address select a region:

| region | contents |
|---|---|
| 0 | registers |
| 1 | TE code, 4 words per 128-bit instruction |
| 2 | PMEM (pump rate per step) |
| 3 | HEMEM (g) |
| 4 | CMEM (c) |
| 5 | SMEM (s or e) |
| 6 | RMEM (r) |
| 7 | ADMEM (d) |
| 8 | HMEM (h) |
| 9 | JMEM: `J[a][b]` at offset `a*4096 + b`, written for `a < b` |

The registers are:

| offset | register | meaning |
|---|---|---|
| 0 | CTRL (write) | bit 0 start, bit 1 clear JMEM, bit 2 load seed |
| 1 | MODE | bit 0 QUBO, bit 1 F_chi = \|h\| |
| 2 | NSIZE | N, a multiple of 128 |
| 3 | NSTEP | steps per run |
| 4 | CE | instructions per group |
| 5 | PCBASE | first instruction of the program |
| 6 | SEED | random seed |
| 7 | STATUS | {irq, clearing, done, busy} |
| 8 | STEP | steps completed |
| 9 | CYCLES | cycles of the last run |
| 10 | IRQ | write 1 to clear the interrupt |
| 16..23 | P0..P7 | FP32 parameters: dt, K, eta, g_s, beta, tau, ... as the program uses them |

When a run finishes it raises O_INT. Either I_ACK or a write to IRQ clears
it. O_LED shows {irq, done, busy}.

The host should access the memories only while the machine is idle.

## Arithmetic

**FADD, FMUL and FSQRT** (`fp32_pkg`):

- Rounding is to nearest, ties to even.
- Subnormal inputs and results are flushed to zero.
- Invalid operations give the quiet NaN `7FC00000`.

**The MAC** (Fig. 3(C)):

- It forms 32 FP32 products.
- It converts them and the 33rd input to two's complement, aligned to the
  largest exponent with 3 guard bits.
- It adds them with a carry-save tree and a final adder, then normalises
  and packs the sum.
- It truncates rather than rounds, as the paper says the MAC does not
  follow IEEE rounding.

**F_chi(h)** is either `h` or `|h|`.

**Random samples.** Each lane has a xorshift128 generator. A sample is the
centred and scaled sum of twelve 10-bit uniforms, which has mean 0 and
variance 1.

## Workloads from the paper and whether they fit

Every benchmark in the paper fits. N sets the JMEM and vector memory depth,
and PMEM bounds the number of steps:

| benchmark | paper's size | what it needs here |
|---|---|---|
| CDMA multi-user detector | N = 1024, 2048, 4096 | open- and closed-loop CIM; up to 501 steps, which fits in PMEM (1024) |
| L0-regularised compressed sensing, random signals | N = 1024, 2048, 4096 | CIM runs alternated with SOR runs (C_e = 4, up to 1001 steps); the host runs the outer loop (N_outer = 51) |
| MRI reconstruction | 64x64 pixels, N = 4096 | SOR steps take 8452 cycles here; the paper measured 8453 |

## Verification

Each block has a self-checking testbench. The references are computed
independently in the testbench, mostly with double-precision arithmetic
rounded once to FP32.

| testbench | what it checks |
|---|---|
| `tb_fp32_pkg` | FADD, FMUL and FSQRT bit for bit against rounded double results (12010 cases) |
| `tb_vec_mem` | masked row writes and reads |
| `tb_rst_gen` | reset assertion and the exact release time |
| `tb_j_mux` | every 64x32 block at N = 512 against the logical J (262144 checks) |
| `tb_jmem` | clear, random symmetric J, and every block read through J_MUX |
| `tb_cal_h_mac` | exact integer rows and random rows within the truncation bound |
| `tb_cal_h` | 64 rows of fields in Ising and QUBO mode, including `c = 0` |
| `tb_cal_csr` | random instruction streams against a lane model, and the SOR update |
| `tb_reg_top` | reset values, read-back of every setting, command pulses, status, interrupt set and both clears, LEDs |
| `tb_ctl_top` | cycle-by-cycle sequencing: block order, JMEM words, HEXT_SEL, HMEM write timing, instruction addresses, TE rows, pump index, cycle totals, JMEM clear sweep |
| `tb_rnd_gen` | every sample bit for bit against a reference generator, plus mean and variance |
| `tb_cim_top` | end to end at NMAX = 256: open-loop-style and SOR programs, Ising and QUBO, F_chi both ways, N = 256 and 128, multi-step runs, cycle counts, interrupt; counts folded, diagonal and lower tiles, HEXT_SEL, clears and random advances |
| `tb_fpga_top` | the whole chip through the AXI pins at NMAX = 256 |
| `tb_fpga_top_full` | the same at the default size, NMAX = 4096: JMEM clear, a sparse random J across all four quadrants, one step at N = 4096 and one at N = 1024, all 4096 fields and amplitudes checked |

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`, and
each has a watchdog. To run one with plain Verilator, compile the two
design packages, the testbench helper package, every other file in `rtl/`
and the testbench, then run the binary:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fp32_pkg.sv rtl/cim_pkg.sv tb/tb_fp_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) tb/tb_cim_top.sv --top-module tb_cim_top
obj_dir/Vtb_cim_top
```

The full-size run (`tb_fpga_top_full`) needs a few minutes to compile,
mostly for the 4096-bank JMEM, and about 15 seconds to simulate. The
other testbenches compile in one to three minutes.

## Choices made where the paper is silent

- Instruction format and bus source codes: 128 bits with 5-bit selects. The
  paper shows only a partial format in Fig. 3(B).
- One cycle of latency for every TE unit. Operand and write-back views of
  the unit results differ as described above.
- The lanes get `d = 1/J_ii` from ADMEM. Fig. 3(B) also shows `J_ii` on the
  bus, but the design does not route it there.
- The JMEM bank mapping, the clear command, and N as a run-time register
  (a multiple of 128, up to 4096).
- The register and address map, AXI4-Lite with one transaction at a time,
  and the LED meaning.
- The random number method.
- `H(0) = 0`.
- The sign of the `a_i` term is set by the program, not the hardware.
  Eq. (1) has `-a_i` while the Algorithm 1 listing has `+a_i`; the hardware
  supports either sign.

## Not implemented

- The vendor blocks (PLL, PCIe, AXI interconnect) and the DDR pin tie-offs.
- Host software: the pump-rate schedules, the η sweep, the programs for
  closed-loop CIM, and the outer alternation loop. The hardware supports
  them; only test programs are included here.
