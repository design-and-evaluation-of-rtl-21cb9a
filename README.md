# IMAX dot-product accelerator (CGLA) in SystemVerilog

This is a coarse-grained linear array (CGLA) accelerator for the dot products that
dominate Whisper speech recognition. It computes FP16 vectors and GGML Q8_0
quantised vectors. The design consists of independent **lanes**. Each lane is a
one-dimensional chain of 64 processing elements (PEs). Every PE has its own
double-buffered local memory module (LMM) of 32 KB (4096 x 64-bit words per bank).
Each lane has one DMA channel. The top module `imax_top` holds two lanes by default;
`NLANES` can be raised to eight.

## How it works

- **Chain.** PE *i* passes a token (valid, thread, first, last) and a copy of the
  register file to PE *i+1* each cycle. The register file has two groups of 16 64-bit
  registers. A loop body mapped onto *k* consecutive PEs becomes a feed-forward pipeline.
  It accepts one token per cycle, and each PE adds 5 cycles of latency.
- **PE.** Each PE has a fixed configuration (`pe_cfg_t`). Data flows ALU1 → ALU2 → ALU3.
  - ALU1 does 64-bit integer add/sub/MAC, 2-way SIMD FP32 FMA/add/mul on two
    pipelined FMA units (4 cycles), `SML8` (2-way signed 8-bit multiply-add into 32-bit
    lanes) and `AD32` (2-way 32-bit add).
  - ALU2 does bitwise operations, bit-field extraction, FP16→FP32 conversion of two halves
    per 32-bit lane, and int32→FP32 conversion.
  - ALU3 shifts and rotates.
  - Two address generators form LMM addresses as `(ra & mask_a) + (rb & mask_b)`.
    AG1 loads. AG2 loads or stores.
  - Results and loaded words are written into the register copy that goes downstream.
- **Threads.** The controller issues four threads round-robin (t = 0..3) per loop
  iteration. This matches the FPU latency of 4. An accumulating PE reuses its own ALU1
  result from 4 cycles earlier, which belongs to the same thread. One physical FPU thus
  holds four independent partial sums. Registers B13/B14/B15 receive the thread number
  and the row/iteration offsets.
- **Double buffering.** The PE reads and writes one LMM bank. The DMA side uses the
  other. A `SWAP` command exchanges them, so loads for the next kernel overlap
  execution of the current one.
- **Lane commands.**
  - `CONF`: per-PE configuration. `REGV`: initial registers.
  - `RANGE`: iterations and strides.
  - `LMMW`/`LMMR`: LMM access from the DMA side, accepted during EXEC.
  - `SWAP`, and `EXEC`. EXEC lasts `niter*4 + 64*5 + 2` cycles.
- **DMA channel.** It takes descriptors:
  - `LOAD`: memory → one PE's LMM.
  - `DRAIN`: LMM → memory.
  - `CMD`: forward a lane command.

  Its memory side is a simple in-order request/response word interface. It stands in for
  the AXI DMA ports of the FPGA platform.
- **Mixed execution.** A vector of length L is split into floor(L/16)·16 elements for the
  accelerator and L mod 16 for the host. The host adds the residual to the drained result.

Kernels (PE programs in `tb/tb_kernels_pkg.sv`):
- **FP16**: 11 PEs. Per word it loads 4+4 halves, converts them, runs two SIMD FMAs,
  then reduces the four thread sums.
- **Q8_0**: 31 PEs. Per 32-element block it loads the scales and four 8-byte quant words,
  runs SML8 and AD32 trees, converts int→FP32, scales by d0·d1 and accumulates.

## Files

- `rtl/imax_pkg.sv`: types, opcodes, constants, FP16/int conversion functions.
- `rtl/fpu_fma32.sv`, `alu1.sv`, `alu2.sv`, `alu3.sv`, `addr_gen.sv`, `lmm.sv`,
  `imax_pe.sv`, `lane_ctrl.sv`, `imax_lane.sv`, `dma_channel.sv`, `imax_top.sv`.
- `tb/tb_<block>.sv`: one self-checking testbench per block. `tb_imax_top` runs end to
  end at the default sizes: 2 lanes, 64 PEs, 32 KB banks.
- Each block's testbench was also run against a deliberately broken copy of the
  module, and it failed there.

## Verification

Every testbench compares against models written independently of the RTL:
- real-number FP references with their own rounding;
- integer models of SML8/AD32;
- kernel references in the kernel's order of operations.

`tb_imax_top` runs both kernels on both lanes at the same time, with random memory
latency. Lane 0 uses L = 1541 and 12 Q8 blocks; lane 1 uses L = 521 and 16 blocks. It
checks all 16 results bit-exactly and the FP16 results with the host residual added. It
also checks that each mechanism happened: loads during EXEC, bank swaps, four EXEC runs,
drains, residual elements and both channels busy at once. The lane testbench also checks
the EXEC cycle count.

## Departures from the source design and known limits

- **Kernel size.** The kernels here use 11 (FP16) and 31 (Q8_0) PEs. The published
  mappings use 22 and 46, and their exact PE programs are not available.
- **Burst length.** Only burst length 16 is programmed.
- **Encodings.** Instruction encodings, the configuration format, the command set and
  the DMA descriptor format are this design's own. So are the register-file-forwarding
  scheme and the FP details: fused FMA, round-to-nearest-even, flush-to-zero.
- **Int conversion.** An int32→FP32 conversion replaces the published 16-bit one,
  because the Q8 block sums exceed 16 bits.
- **Not built.** The host Cortex-A72, LPDDR4, the network-on-chip, the PCIe and
  multi-FPGA setup, the host split of main and residual segments, padding removal and
  operand packing, and the IMAX compiler. The testbench plays the host.
- **Synthesis time.** Yosys synthesis of a whole lane is slow: the `share` pass grows
  faster than linearly with the PE count. At the default 64 PEs per lane it did not
  finish within a 10-minute limit. Verilator and slang accept all files.
