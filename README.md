# eGPU streaming multiprocessor with virtual banking and a complex multiplier

A soft GPGPU on an FPGA loses much of its FFT throughput in two places: the
shared memory, which accepts four reads but only one write per cycle, and the
complex multiply, which takes six scalar instructions. This RTL models one
streaming multiprocessor (SM) of the eGPU soft GPGPU with two changes aimed at
those losses:

* **Virtual banking.** A second store instruction, `save_bank`, writes four
  threads per cycle. It works when each word is next read by an SP with the
  same index mod 4. The 4-read/1-write memory then behaves as a 4-read/4-write
  memory, at the cost of a few write multiplexers and no extra RAM.
* **Complex FP unit.** Each scalar processor (SP) gets a small coefficient
  cache and a dot-product unit (`A*B + C*D`). Multiplying a complex value by
  a twiddle factor then takes three instructions: `lod_coeff`, `mul_real`,
  `mul_imag`.

With both changes, the radix-4 FFT testbench reproduces the load, save and
save_bank cycle counts of the virtually banked design exactly. Its total
runtime is within 3 % of the published figures (see
[FFT results](#fft-results)).

## The SM at a glance

```
           imem_*          start/wave_rows/regs_log2
             |                   |
        +----v-------------------v----+
        |  sequencer (imem, row/sub   |  issue_t (one per cycle, same for all SPs)
        |  counters, drain, done)     |-----------------------------+
        +-----------------------------+                             |
                                                                    v
   +-------------+ +-------------+        +-------------+   16 x sp_core
   | sp_core 0   | | sp_core 1   |  ...   | sp_core 15  |   (regfile, coeff cache,
   +--+-------^--+ +--+-------^--+        +--+-------^--+    complex FU, int ALU)
      |addr/  |ld     |       |              |       |
      |wdata  |data   |       |              |       |
   +--v-------+-------v-------+--------------v-------+--+
   | read_addr_mux (16:4)   write_port_mux x2 (data, address) |
   +-----------------------------+----------------------------+
                                 |
                   shared_memory: 4 banks x 16384 x 32
                   global_* host port, data_out[4]
```

| Parameter | Value | Where it is set |
|---|---|---|
| SPs per SM | 16 | `NUM_SP` |
| Shared memory | 4 banks x 16384 words x 32 bit; each bank is a full copy for standard saves | `NUM_BANKS`, `SHMEM_DEPTH` |
| Register file per SP | 2048 x 32, two read ports, one write port | `RF_DEPTH` |
| Registers per thread | 8 to 64, chosen at start by `regs_log2` (3..6) | port |
| Threads | 16 x `wave_rows`, up to 4096 (`ROWS` = 256) | port |
| Coefficient cache per SP | 256 complex entries, one per thread of that SP | `coeff_cache.DEPTH` |
| Pipeline | 8 cycles, no interlock | `PIPE_DEPTH` |
| Instruction memory | 1024 words | `IMEM_DEPTH` |
| Number format | IEEE-754 single; round to nearest even; subnormals flushed to zero | `fp32_pkg` |

All sizes live in `rtl/egpu_pkg.sv`. The top module `egpu_sm` has no parameter
list of its own.

## Threads, rows and the issue stream

Thread `t` runs on SP `t mod 16`. Its registers sit in *row* `t / 16` of that
SP's register file. An instruction is issued for every row of the wavefront
(`wave_rows` rows) before the next instruction starts, so the same
instruction flows through all 16 SPs row after row.

Instructions are not issued at one per row in every case:

| Instruction | Cycles per row | Which SPs act in sub-cycle `s` |
|---|---|---|
| everything else | 1 | all 16 |
| `lod` | 4 | SPs `4s .. 4s+3` (one group of four) |
| `save` | 16 | SP `s` only |
| `save_bank` | 4 | SPs `4s .. 4s+3` |
| `coeff_en`, `coeff_dis` | 1 in total (not per row) | all |
| `stop` | – | ends issue; `done` pulses after the pipeline drains |

The sequencer sends one `issue_t` per cycle: valid, instruction, row and
sub-cycle. Each SP decides from `sub` and its own index whether the cycle is
work or a bubble for it.

There is no hazard detection, as in the original architecture. A result is
written eight cycles after issue, and a later instruction can read it if it
issues at least 7 cycles after the producer. A wavefront of 8 or more rows
gives this for free; shorter wavefronts need `nop`s. Loads and stores take
4 or 16 cycles per row, which also counts toward the distance.

## Virtual banking: the hard part

Each of the four banks has one read port and one write port.

**Reads.** Bank `j` always serves SPs `j, j+4, j+8, j+12`. In sub-cycle `g`
of a `lod`, the read address mux gives bank `j` the address of SP `4g+j`. The
word comes back on `data_out[j]`, which is wired to all four SPs of that
column. The SP whose group is active captures it. A load therefore takes 4
cycles per row. Any SP can read any address because, after a standard save,
all banks hold the same data.

**Standard save.** In `save`, one SP writes per cycle, and its word and
address go to **all four** banks. The banks stay identical copies, so the
memory stays a true 4R-1W memory at 16 cycles per row.

**save_bank.** In `save_bank`, sub-cycle `g` writes SPs `4g .. 4g+3` at once,
SP `4g+j` into bank `j` only. The banks now differ: bank `j` holds only what
SPs `j mod 4` wrote. That is correct exactly when the next `lod` of each word
comes from an SP with the same index mod 4, because that SP reads bank `j`.
The program is responsible for that condition.

In a radix-4 FFT pass with stride `s`, thread `t` touches the points
`base + m*s`. When `s >= 16`, the SP that reads a point in the next pass has
the same index mod 4 as the SP that wrote it, so every pass except the last
two can use `save_bank`.

**Write muxes.** Each bank needs a data mux and an address mux with the same
shape, so `write_port_mux` is instantiated twice (widths 32 and 14).

- Level 1 is four 4:1 muxes. Mux `j` picks SP `4*sel[3:2] + j`.
- Level 2 picks one of the four level-1 outputs with `sel[1:0]`.
- Bank 0 always takes level 2.
- Banks 1–3 take their own level-1 output in bank mode, and level 2 otherwise.

In bank mode, `sel = {g, 00}`, so bank 0's level 2 also lands on SP `4g`.
The write path thus costs one 2:1 mux per bank on top of the 16:1 tree that a
single-write memory needs anyway.

**Host port.** The host port `global_*` writes all four banks at once and has
priority over SM writes. Reads go to `global_rd_addr` on all four banks
whenever the SM is not loading, and `data_out[b]` shows bank `b`. So after a
`save_bank` the host can read each bank separately. Host and SM accesses are
not arbitrated: drive the host port only while `busy` is low.

## Coefficient cache and complex FP unit

Each SP has a `coeff_cache` with one complex entry (real and imaginary, 32
bits each) per thread of that SP. It has no address port: the write address is
the row number delayed two cycles, and the read address is the row number of
the instruction now in the pipe. `lod_coeff ra, rb` stores `(ra, rb)` for the
thread, and every later `mul_real` or `mul_imag` of that thread reads the
entry back.

The cache clock enable is a register. `coeff_en` sets it and `coeff_dis`
clears it, so the cache holds its contents while the enable is off. Reset
clears the enable.

`complex_fu` computes `A*B + C*D`. Each product is rounded to FP32, then the
sum is rounded. The operand multiplexers set the operation:

| Op | A | B | C | D | Result |
|---|---|---|---|---|---|
| `fmul` | ra | rb | 0 | 0 | ra·rb |
| `fadd` | ra | 1 | 1 | rb | ra+rb |
| `fsub` | ra | 1 | 1 | −rb | ra−rb |
| `mul_real` | ra | tw_re | tw_im | −rb | ra·tw_re − rb·tw_im |
| `mul_imag` | ra | tw_im | tw_re | rb | ra·tw_im + rb·tw_re |

Negation flips the sign bit only. The unit has three register stages: inputs,
products, and sum.

## Pipeline of one SP

Cycles are counted from the issue cycle `t`:

| Cycle | What happens |
|---|---|
| t | register-file read addresses, coefficient-cache read address |
| t+2 | operands out of the register file; `lod_coeff` writes the cache; memory address `ra + imm` formed |
| t+3 | address and store data at the memory muxes; the memory control is registered to this cycle |
| t+4 | operands and twiddle into `complex_fu` and `int_alu` |
| t+5 | load data arrives from the bank (registered address and registered output) |
| t+7 | register-file write, at the clock edge ending the cycle |

The register file and the memory banks both return new data when a read
meets a write to the same address in the same cycle.

## Instruction format

The encoding is this design's own, because the eGPU instruction set was not
published with the architecture. The word is 39 bits:
`{op[4:0], rd[5:0], ra[5:0], rb[5:0], imm[15:0]}`.

| Code | Mnemonic | Meaning |
|---|---|---|
| 0 | `nop` | |
| 1–3 | `fadd`, `fsub`, `fmul` | `rd = ra op rb` (FP32) |
| 4 | `mul_real` | `rd = ra·tw_re − rb·tw_im` |
| 5 | `mul_imag` | `rd = ra·tw_im + rb·tw_re` |
| 6 | `lod_coeff` | `cache[thread] = (ra, rb)` |
| 7, 8 | `coeff_en`, `coeff_dis` | cache clock enable on / off |
| 9–16 | `iadd isub iand ior ixor ishl ishr imul` | `rd = ra op rb` (32-bit integer; shifts by `rb[4:0]`, `ishr` logical) |
| 17 | `movi` | `rd = sign-extended imm` |
| 18 | `movhi` | `rd = imm << 16` |
| 19 | `tid` | `rd = row*16 + SP index` (global thread number) |
| 20 | `lod` | `rd = mem[ra + imm]` |
| 21 | `save` | `mem[ra + imm] = rb`, all banks |
| 22 | `save_bank` | `mem[ra + imm] = rb`, bank `SP mod 4` only |
| 31 | `stop` | end of program |

Addresses are taken modulo 16384 words. There are no branches: programs are
straight-line code that starts at address 0.

## Host interface and timing (`egpu_sm`)

1. With `busy` low, write the program through `imem_we/imem_addr/imem_wdata`
   and the data through `global_wr_en/global_wr_addr/global_data_in`.
2. Set `wave_rows` (threads / 16, 1..256) and `regs_log2`, with
   `wave_rows * 2^regs_log2 <= 2048`. Pulse `start` for one cycle. Hold both
   inputs until `done`.
3. `busy` rises. The sequencer issues the program. At `stop` it waits 8
   cycles for the pipeline to drain, then pulses `done` and drops `busy`.
4. Read results with `global_rd_addr`. `data_out[b]` holds bank `b`'s word two
   clock edges later.

Registers are not cleared by reset; a program must write a register before it
reads it. The SM control, the coefficient-cache enable and the sequencer are
reset asynchronously by `rst_n` (active low).

## FFT results

`tb/tb_fft_radix4.sv` generates radix-4 decimation-in-frequency programs. For
each size it runs the program on the default-size SM and checks the spectrum
against a double-precision DFT (error below 1e-5 of the RMS value). It also
checks the cycles spent on memory instructions:

| Points | Threads x regs | Instructions | load / save / save_bank cycles | Total cycles | Published total (virtual banks + complex unit) |
|---|---|---|---|---|---|
| 256 | 64 x 64 | 251 | 800 / 1024 / 256 | 2756 | 2840 |
| 1024 | 256 x 64 | 281 | 4096 / 4096 / 1536 | 12524 | 12856 |
| 4096 | 1024 x 32 | 340 | 19968 / 16384 / 8192 | 58060 | 59361 |

The memory cycles match the published profile exactly. The remaining compute
cycles are fewer because these programs use a slightly different
instruction sequence; the published code is not available.

The 4096-point case fills the machine: 32768 registers, and 8192 data words
plus an 8192-word twiddle table in the 16384-word memory.

The design can also hold radix-8 FFTs (512 and 4096 points with 64 registers
per thread) and radix-16 FFTs (256, 1024 and 4096 points). No programs for
those radices are included.

## Where this RTL departs from the original architecture

* **Memory depth.** Each bank is 16384 x 32 (64 KB in total, as the
  architecture's text gives). The block diagram's "2040x32 / 11-bit address"
  label is not followed.
* **Branches.** There are no branches, predicates or thread divergence, and
  the instruction set is reduced to what the FFT needs. The encoding is new.
* **Dependency distance.** Results may be read 7 cycles after issue. The
  original only states an 8-cycle pipeline.
* **Rounding.** Rounding and subnormal handling are not specified by the
  architecture. This RTL uses round to nearest even and flushes subnormals to
  zero. NaN results become the canonical quiet NaN `7FC00000`.
* **Registers per thread.** This is set at run time (8–64) rather than at
  build time. 1024 registers per thread, the generator's maximum, would need
  wider register fields.
* **Instruction memory.** 1024 words is this design's choice.
* **Quad-port variant.** The quad-port-RAM variant (4 reads, 2 writes) is not
  built. It is a memory-primitive choice, not a different SM.
* **FPGA primitives.** The RAMs and the FP unit are behavioural. Nothing maps
  them onto FPGA DSP blocks or M20K memories, and there is no floorplan, so
  clock rate and resource counts are not reproduced.

## Files and simulation

`rtl/` holds one module or package per file:

- `egpu_pkg.sv`, `fp32_pkg.sv`
- `shmem_bank`, `shared_memory`, `read_addr_mux`, `write_port_mux`
- `sp_regfile`, `coeff_cache`, `complex_fu`, `int_alu`, `sp_core`
- `sequencer`, `egpu_sm` (top)

`tb/` holds one self-checking testbench per module. `fp_ref_pkg.sv` is an
independent FP32 reference built on `real`. Each testbench prints
`TB_RESULT checks=N failures=M`.

- `tb_egpu_sm` runs the whole SM at its default sizes. It runs a butterfly
  with a twiddle multiply, a standard save, a `save_bank` and a reload. It
  checks values, bank contents and cycle counts, and counts every mechanism
  it uses.
- `tb_fft_radix4` runs the three FFTs above.

Example with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/egpu_pkg.sv rtl/fp32_pkg.sv tb/fp_ref_pkg.sv \
  rtl/shmem_bank.sv rtl/shared_memory.sv rtl/read_addr_mux.sv \
  rtl/write_port_mux.sv rtl/sp_regfile.sv rtl/coeff_cache.sv \
  rtl/complex_fu.sv rtl/int_alu.sv rtl/sp_core.sv rtl/sequencer.sv \
  rtl/egpu_sm.sv tb/tb_egpu_sm.sv --top-module tb_egpu_sm
./obj_dir/Vtb_egpu_sm
```

For a single block, list the packages, the block and its testbench, for
example `rtl/egpu_pkg.sv rtl/fp32_pkg.sv tb/fp_ref_pkg.sv
rtl/complex_fu.sv tb/tb_complex_fu.sv`.
