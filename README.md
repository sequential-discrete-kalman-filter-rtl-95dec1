# Sequential Discrete Kalman Filter state estimator

This is a hardware real-time state estimator for three-phase power distribution grids. It
runs the Sequential Discrete Kalman Filter (SDKF): the state vector x (real and imaginary
parts of the nodal voltages) and its error covariance P are kept on chip. Every time step
predicts with the persistence model, then folds in the D measurements of the step one at a
time. Because each update has a scalar innovation, the filter needs one scalar division per
measurement and no matrix inversion. All arithmetic is IEEE-754 single precision.

## Algorithm

For a time step k, with the measurement matrix H (D x S), a diagonal measurement covariance
R and a diagonal process covariance Q:

```
prediction:     x stays,  P := P + Q
for i = 1..D:   C    = h_i P              (h_i is row i of H)
                zhat = h_i x
                W    = r_i + C h_i^T ;  Winv = 1 / W
                g    = Winv (z_i - zhat)
                K    = Winv C^T
                x    := x + g C^T
                P    := P - K C
```

After the last measurement, x is the estimate x_k^+ and is sent to the host.

## Architecture

```
 host ──► rx FIFO ──► sdkf_core ──► tx FIFO ──► host
                       │  control FSM, issue/write-back muxes
                       │  memories: P (P_PAR² banks), H, x, C, K, Q (P_PAR banks), z, R
                       │  units: matvec_unit, dot_product, vector_unit ×2, matrix_unit,
                       │         scalar fp_addsub / fp_div / fp_mul
                 exec_timer (cycles from step start to last output word)
```

The design is split into communication, control, computation and memory, as in the
reference architecture.

**Parallelism.** P_PAR = 4 by default. Matrices are cut into P_PAR x P_PAR blocks, and
element (r, c) of a block lives in its own RAM bank, giving 16 banks for P. Vectors are cut
into blocks of 4 held in 4 banks. Every unit therefore reads or writes a whole block per
cycle. S must be a multiple of P_PAR; SB = S / P_PAR.

**Arithmetic units.** All units use binary32 with round-to-nearest-even, flush-to-zero for
subnormals, and inf/NaN propagation.

| unit          | function                                  | throughput | latency |
|---------------|-------------------------------------------|------------|---------|
| `fp_addsub`   | a ± b                                     | 1 / cycle  | 5       |
| `fp_mul`      | a · b                                     | 1 / cycle  | 2       |
| `fp_accum`    | running sum with first/last marks         | 1 / cycle  | 20      |
| `fp_div`      | a / b                                     | 1 / cycle  | 20      |
| `dot_product` | 4 multipliers, 2-level adder tree, accum. | 1 block    | 32      |
| `matvec_unit` | 4 inner products, one per block row       | 1 block    | 32      |
| `vector_unit` | a + s·b or s·b, 4 lanes                   | 1 block    | 7       |
| `matrix_unit` | M ∓ u vᵀ, or add on the diagonal only     | 1 block    | 7       |

The unit latencies (5, 2, 20, 20) are the configuration the reference design reports. The
inner product follows its structure: a multiplier array, then an adder tree, then one
accumulator. The matrix-vector product is made of P_PAR inner products.

**Passes per measurement.** The core streams one block per cycle. It waits for a pass's
pipeline to drain before starting the next pass, since that pass reads what was just
written.

| pass | unit                     | work                   | cycles     |
|------|--------------------------|------------------------|------------|
| A    | matvec_unit, dot_product | C = P h^T, zhat = h·x  | SB² + 36   |
| B    | dot_product              | W - r = C·h            | SB + 36    |
| SC   | scalar add, div, mul     | dz, W, Winv, g         | 36         |
| C    | vector_unit ×2           | K = Winv C, x += g C   | SB + 11    |
| D    | matrix_unit              | P -= K C               | SB² + 11   |

One measurement therefore takes exactly 2·SB² + 2·SB + 130 cycles. The testbench checks this.
Because P is symmetric, h P is formed as P h^T.

**Memory layout.**
- P: 16 banks of SB_MAX² words; block (br, bc) sits at address br·SB_MAX + bc.
- H: 4 banks of D_MAX·SB_MAX words, stored dense, row by row.
- x, C, K and Q: 4 banks of SB_MAX words each.
- z and R: one bank of D_MAX words each.

At the defaults (S_MAX = D_MAX = 252) this is 16 × 3969 + 4 × 15876 + 4 × 4 × 63 + 2 × 252
words, about 128.5 k words or 4.1 Mbit. S_MAX = 252 is the largest multiple of 4 below the
reference limit S < 256 (for D = S).

## Host interface

Both directions are 32-bit ready/valid word streams through FIFOs (`sync_fifo`, 512 words
deep by default). A DMA engine on the host side would drive them. A command word carries
the opcode in bits [31:24], followed by its payload words:

| opcode | name      | argument / payload                                    | reply             |
|--------|-----------|-------------------------------------------------------|-------------------|
| 00     | NOP       | —                                                     | —                 |
| 01     | SIZE      | bits [11:0] = S, [23:12] = D                          | err if invalid    |
| 02     | LOAD_H    | D·S words, row-major                                  | —                 |
| 03     | LOAD_R    | D variances                                           | —                 |
| 04     | LOAD_Q    | S variances                                           | —                 |
| 05     | LOAD_X    | S initial states                                      | —                 |
| 06     | INIT_P    | — (P := diag(Q))                                      | —                 |
| 07     | STEP      | D measurements z_k                                    | S words of x_k^+  |
| 08     | READ_P    | —                                                     | S·S words of P    |

The handshake signals work as follows:
- `irq` rises once a step's estimate has been written to the send FIFO, and stays high
  until `irq_ack`.
- `err` is set by a rejected size or an unknown opcode, and cleared by the next valid SIZE.
- `busy` is high while a command is being executed.
- `exec_cycles` holds the clock cycles of the latest step, from reading its STEP word to
  writing the last word of x. The counter runs on the master clock, so the execution time
  is exec_cycles / f_clk.

## Performance and workloads

The end-to-end testbench simulates the IEEE 34-node feeder case at the default parameters.
After removing the 10 tie nodes, 24 buses remain, giving S = 144. The 17 PMUs each measure
voltage and current in three phases, giving D = 204. One step takes 570 406 cycles. That is
5.7 ms at 100 MHz, well inside the 20 ms frame period at 50 frames/s.

The largest size, S = D = 252, takes 252 · (2·63² + 2·63 + 130) = 2 064 888 cycles, which
is 20.6 ms at 100 MHz. The reference reports 35 ms for its largest problem at an unstated
clock frequency.

## Design choices not fixed by the reference

- **Degree of parallelism.** P_PAR = 4; the reference does not give the value.
- **Covariance matrices.** Q and R are diagonal, and H, R and Q are loaded once and kept
  across steps.
- **Host protocol.** The command set above is this design's own. The reference only
  describes FIFOs, DMA and an interrupt handshake.
- **Timing.** One clock domain. Passes do not overlap across measurements.
- **Unit internals.** Each arithmetic unit is a combinational binary32 operator followed by
  a register pipeline of the stated latency. On an FPGA the vendor's floating-point cores
  would replace them.
- **Fused operations.** The outer product and the matrix subtraction are one array pass.
  Vector scaling and addition are likewise one pass. Both contractions match the
  reference's remark that some operations are contracted in hardware.

## Verification

Every block has a self-checking testbench in `tb/`.

**Arithmetic units.** The floating-point units are checked bit-exactly. The reference
result is computed in binary64 and rounded once to binary32, which gives the correctly
rounded result for +, −, × and ÷. Latency is checked on every result.

**Core and top.** `tb_sdkf_core` and `tb_sdkf_top` (S_MAX = 16, D_MAX = 24) run three
problem sizes with random backpressure and a full receive FIFO. They compare every estimate
and the final P against a binary64 model of the filter. The maximum state error seen is
about 2e-7. They also check the error flag, the interrupt handshake, the execution counter
and the per-measurement cycle count. Each mechanism is counted, and one that never occurs
is reported as a failure.

**Full size.** `tb_sdkf_full` runs the 34-node-sized case on the default-size design.

**Not implemented.** The host CPU software and the DMA engine are not part of this design.

Known departures from the reference, besides the choices listed above: the PMU placement
of the 34-node case names two nodes (806, 836) that the network reduction removes as tie
nodes. The full-size test keeps the count of 17 PMUs and uses a synthetic measurement
matrix of the same shape (one row per state, the rest mixing 2-3 states), not the feeder's
admittance data. The floating-point cores are behavioural RTL, so resource figures (flip-
flops, LUTs, DSP slices, block RAMs) cannot be compared with an FPGA vendor build.

## Simulating

Every testbench builds with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/sdkf_pkg.sv tb/fp_ref_pkg.sv tb/sdkf_ref_pkg.sv tb/tb_sdkf_top.sv \
  --top-module tb_sdkf_top
./obj_dir/Vtb_sdkf_top
```

Each prints one line `TB_RESULT checks=N failures=M`. The full-size run (`tb_sdkf_full`)
takes about ten seconds.
