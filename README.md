# A dynamic fixed-point GEMM accelerator for FCN iris segmentation

An iris recognition pipeline that segments the eye image with a fully
convolutional network (FCN) spends nearly all of its time in that network. The
later stages stay cheap: contour fitting, rubber-sheet normalization and
log-Gabor encoding. Inside the network, almost all the work is one operation. After
*im2col* rearranges a layer's input, every convolution is a matrix product
`C = A x B`:

* `A` is the `M x K` weight matrix: M output maps, K = kernel area x input maps.
* `B` is the `K x N` feature matrix: N output pixels.
* `C` is the `M x N` output.

This RTL implements an accelerator for that product, for an embedded SoC in
which an ARM host runs im2col, the activation function and the rest of the
pipeline in software. Weights and activations are 8-bit **dynamic fixed point
(DFP)**. The host gives the accelerator three addresses, the sizes
`(M, K, N)` and one shift count, and starts it. The accelerator then does the
following without further help:

* It reads A and B from shared memory through a cache-coherent AXI port.
* It multiplies them in tiles on nine parallel 8-bit multipliers.
* It moves each result's radix point and saturates the result to 8 bits.
* It writes C back to memory.

The architecture follows the DFP accelerator published with the FCN-based iris
recognition flow of Tann, Zhao and Reda. That work published the block diagram,
the buffer sizes, the element widths and the loop nest. The registers, bus
protocol details, pipeline timing and rounding are this implementation's own.
The section "What is published and what is chosen here" lists every such
choice.

## Dynamic fixed point, and what the datapath computes

In DFP every layer has its own binary-point position but a fixed width of
8 bits. A layer is described by three fractional lengths:

* `w_fl` for its weights,
* `a_in` for its input activations,
* `a_out` for its output activations.

A product of a weight and an input therefore carries `w_fl + a_in` fractional
bits. To express it with `a_out` fractional bits, the result has to be shifted
by

    shift = w_fl + a_in - a_out          (positive: shift right)

and then clipped to the 8-bit range. The host computes `shift` once per layer
and writes it to a register. Negative values (left shifts) are allowed.

The arithmetic, exactly as the RTL performs it for one output element
`C[i][j]`:

1. Split the reduction index k into tiles of nine: `k0 = 0, 9, 18, ...`.
2. For each tile, form the exact dot product
   `t = sum over k in [k0, k0+9) and k < K of A[i][k] * B[k][j]`.
   Nine signed 8x8 products fit in 19 bits, so no precision is lost here.
3. Accumulate into a signed 16-bit value: `acc = clip16(t)` for the first tile,
   `acc = clip16(acc + t)` for every later tile. Clipping happens at every
   tile, not just at the end. This matters only when a partial sum leaves
   the 16-bit range.
4. Shift: `v = acc >>> shift` (arithmetic shift, so the result is rounded
   towards minus infinity) if `shift >= 0`. Otherwise `v = acc << -shift`.
5. Output `clip8(v)`, in the range -128 to 127, as a signed byte.

When `K = 0` the result is zero everywhere. Bias is not added in hardware.
Batch normalisation is folded into the weights and bias, and bias and ReLU are
applied by the host, as in the published system.

## Tiling: how one job runs

The on-chip buffers hold one tile of each matrix. These are the published
sizes, chosen as a common divisor of the layer shapes of all candidate
networks:

| buffer | tile  | element | organisation |
|--------|-------|---------|--------------|
| A (weights)  | 8 x 9   | 8 bit  | 9 banks (one per k) x 8 rows |
| B (features) | 9 x 224 | 8 bit  | 9 banks (one per k) x 224 columns |
| C (results)  | 8 x 224 | 16 bit | 1792 words, one read and one write port |

Because A and B are banked by k, a single read address returns the nine
operands of one dot product. `gemm_controller` runs the loop nest:

```
for i0 in 0, 8, 16, ... < M                 # row tile of C
  for j0 in 0, 224, 448, ... < N            # column tile of C
    for k0 in 0, 9, 18, ... < K             # k tile
      read rows i0..i0+7  of A, columns k0..k0+8     -> Buffer A (one DMA run per row)
      read rows k0..k0+8  of B, columns j0..j0+223   -> Buffer B (one DMA run per row)
      for r in rows, j in columns:          # one issue per clock
        C_buf[r][j] = (k0 == 0) ? dot9 : C_buf[r][j] + dot9
    for r in rows:                          # drain
      write shift_saturate(C_buf[r][0..cols-1]) to row i0+r of C
```

Edge tiles are handled as follows:

* Only the valid rows and columns of an edge tile are computed.
* In a k tile with fewer than nine valid lanes, the weights of the missing
  lanes are forced to zero in front of the engine.
* Stale buffer contents therefore never reach a result.

All matrices are row-major with no padding: leading dimensions K for A, and N
for B and C. There are no alignment restrictions on addresses.

The phases run one after another: load A, load B, compute, and after the last
k tile, drain. There is no double buffering. While the compute phase runs it
issues one output element per clock. That is nine multiply-accumulates per
clock, with no bubbles between elements or rows. The number of compute cycles
in a job is therefore exactly

    M * N * max(1, ceil(K / 9))

and both end-to-end testbenches check this count.

### The processing engine

`processing_engine` has the following parts:

* nine signed multipliers;
* a balanced adder tree of eight two-input adders;
* one accumulate adder that adds the partial sum read from Buffer C;
* a multiplexer that selects the bare tree sum on the first k tile and the
  accumulated sum otherwise;
* the output register.

It has two pipeline stages. The tree sum is registered first, then the
clipped, selected sum. Its result is written back to Buffer C two clocks after
the operands arrive. The operands come from the three buffers, each of which
has a one-clock read latency. A partial sum is read again only in the next k
tile, after a whole reload of A and B, so there is no read-after-write hazard
on Buffer C. After the last issue of a k tile the controller waits three
clocks before it reloads or drains.

### Draining through shift-and-saturate

Draining reads Buffer C in order. Each 16-bit word passes through the
combinational `shift_saturate` unit and a 4-entry FIFO to the write DMA. The
controller counts the FIFO level plus reads in flight. This lets the AXI write
channel stall at any time without losing data.

## Memory and control interfaces

**AXI4 master (`m_axi_*`, 64-bit data, 32-bit address).** This port is meant
for the processor's Accelerator Coherency Port, so the host does not need to
flush its caches. `AxCACHE` is driven as `1111`. It has two engines:

* `acp_read_dma` owns the AR and R channels.
* `acp_write_dma` owns the AW, W and B channels.

Each engine moves one run of bytes: one row of an A, B or C tile. It does so
as INCR bursts of one-byte beats (`AxSIZE = 0`). A burst is at most 256 beats
long and is split at every 4 KB boundary. Each byte travels on the lane given
by its address, and writes set only that lane's strobe. One burst is
outstanding at a time. This works for any alignment, but it moves only one
byte per beat. A wider-beat DMA is the obvious first optimisation (see
Performance). Any non-OKAY response sets the job's error flag. The job still
runs to completion.

**AXI4-Lite slave (`s_axil_*`, 32-bit).** This is the register file:

| offset | name    | access | meaning |
|--------|---------|--------|---------|
| 0x00   | CTRL    | W  | bit 0 = 1 starts a job (ignored while busy) |
| 0x04   | STATUS  | R  | bit 0 busy, bit 1 done, bit 2 bus error during the last job |
| 0x08   | A_ADDR  | RW | byte address of A |
| 0x0C   | B_ADDR  | RW | byte address of B |
| 0x10   | C_ADDR  | RW | byte address of C |
| 0x14   | M       | RW | rows of A and C |
| 0x18   | K       | RW | columns of A, rows of B |
| 0x1C   | N       | RW | columns of B and C |
| 0x20   | SHIFT   | RW | bits 5:0, signed: >0 right shift, <0 left shift |

Writes honour byte strobes. A write completes when AW and W have both been
presented, and they may arrive in different cycles. The registers are copied
when the job starts, so the host may prepare the next layer while one runs.
The done bit and the error bit are cleared by the next start. There is no
interrupt. A STATUS read in the cycle a job ends already shows it as done.

Programming one layer:

```
write A_ADDR, B_ADDR, C_ADDR, M, K, N, SHIFT
write CTRL = 1
poll STATUS until bit 0 == 0   (bit 1 is then 1; bit 2 flags a bus error)
```

`gemm_accel` has three more outputs, which only report events: `pe_fire` (one
engine issue), `sat_event` (an output byte was saturated) and `acc_clip` (a
16-bit partial sum was clipped). They can drive performance or overflow
counters and can be left open.

Reset is asynchronous and active low (`rst_n`). The buffers are not reset.
No value is read from them before it has been written, and invalid lanes are
masked.

## Performance

The full-size layer simulation (`tb_fcn_layers`) runs two layer shapes of a
segmentation network on a 320 x 240 input. Its memory model returns one beat
every two clocks and never stalls otherwise.

| layer | (M, K, N) | MACs | compute clocks (bound) | total clocks |
|-------|-----------|------|------------------------|--------------|
| 1 | (16, 9, 76800)   | 11.1 M | 1.23 M | 6.67 M |
| 2 | (32, 144, 19200) | 88.5 M | 9.83 M | 34.6 M |

Most of the time goes to moving bytes, not to computing:

* B is re-read for every row tile of A.
* Every byte costs one bus beat.

Widening the DMA beats to the full 64-bit bus would cut load time by up to
eight times. Double buffering A and B would overlap loading with compute.
Either change can be made without touching the engine or the tile sizes.
Neither is part of the published description.

## Source files

| file | contents |
|------|----------|
| `rtl/gemm_pkg.sv` | widths, tile sizes, register offsets, `gemm_cfg_t` |
| `rtl/gemm_accel.sv` | top level: wiring of everything below |
| `rtl/axil_ctrl_regs.sv` | AXI4-Lite register file |
| `rtl/gemm_controller.sv` | tile sequencer (loop nest, DMA commands, engine issue, drain) |
| `rtl/acp_read_dma.sv`, `rtl/acp_write_dma.sv` | AXI4 master engines |
| `rtl/banked_buffer.sv` | Buffers A and B |
| `rtl/acc_buffer.sv` | Buffer C |
| `rtl/processing_engine.sv`, `rtl/adder_tree.sv` | nine-lane multiply / tree / accumulate |
| `rtl/shift_saturate.sv` | DFP re-scaling to 8 bits |
| `rtl/stream_fifo.sv` | 4-entry FIFO of the drain path |
| `tb/axi_mem_model.sv` | behavioural AXI4 memory with random back-pressure and error injection |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the end-to-end ones |

The tile sizes are parameters (`TM`, `TK`, `TN`) of `gemm_accel` and
`gemm_controller`. The bus width is also a parameter (`AXI_DW`). Changing
`TK` also changes the number of multipliers and banks.

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>`. Each also has a
watchdog that ends the run as a failure if it hangs. All stimulus is
generated in the testbench, and no data files are needed. The testbenches are:

* `tb_shift_saturate`: every shift against an integer reference, at corner
  values and at random.
* `tb_processing_engine`: random operands and full-scale operands, the first
  flag, 16-bit clipping, the two-clock latency and the tag.
* `tb_banked_buffer` and `tb_acc_buffer`: fill and read back, read latency,
  and a read and write to the same word in one clock.
* `tb_acp_read_dma` and `tb_acp_write_dma`:
  * random runs at any alignment, including runs across 4 KB boundaries and
    runs longer than 256 bytes;
  * random AXI stalls;
  * SLVERR reporting;
  * byte-exact comparison of memory.
* `tb_axil_ctrl_regs`: register read-back, byte strobes, AW and W arriving
  apart, start refused while busy, and done and error capture.
* `tb_gemm_controller`: the exact order of DMA commands, buffer write
  addresses, one issue per clock with the right tag, first flag and lane
  count, and FIFO flow control. The DMAs and the FIFO are emulated.
* `tb_gemm_accel`: end to end at the default size, through the AXI-Lite host
  model and the AXI memory model.
  * It runs eight jobs. Together they cover several row, column and k tiles,
    edge tiles, `K = 0`, left and right shifts, 16-bit clipping, 8-bit
    saturation, bursts split at 4 KB, AXI stalls, and a bus error followed by
    a clean job.
  * It counts each of these mechanisms and fails if one never occurs.
  * It checks every output against a reference model.
* `tb_fcn_layers`: the two full layer shapes above, with every output
  checked. It takes about 30 s of simulation.

To run one with plain Verilator from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_gemm_accel \
    -y rtl -y tb +libext+.sv rtl/gemm_pkg.sv tb/tb_gemm_accel.sv
./obj_dir/Vtb_gemm_accel
```

Replace `tb_gemm_accel` with the testbench you want. The concurrent assertions
in the AXI engines and the FIFO check the handshake rules: address and data
stay stable while waiting, no burst crosses 4 KB, and the FIFO never
overflows. These assertions are active under `--assert`.

## What is published and what is chosen here

The following come from the published design:

* The split of work: GEMM in hardware; im2col, activation and control in
  software on the host.
* 8-bit DFP weights and activations, and the five-parameter DFP format with
  fractional lengths that can change per layer.
* Tile buffers A, B and C of 8 x 9, 9 x 224 and 8 x 224.
* 8-bit A and B, and 16-bit C.
* Nine parallel multipliers on separate memory banks.
* The engine: an adder tree, an accumulate adder, a select multiplexer and an
  output register.
* Partial sums kept in Buffer C until complete.
* A shift-then-saturate stage on the way out.
* A DMA on an AXI4 coherency port.
* Control through AXI-Lite with addresses and a start signal.

The following are this implementation's own:

* The register map, and polling instead of an interrupt.
* The 64-bit AXI width, byte-wide bursts and one burst in flight.
* The two-stage engine pipeline.
* Clipping the 16-bit accumulation at every k tile.
* Right shifts that round towards minus infinity.
* The signed 6-bit shift field.
* The loop order, serial phases and zero-masking at the edges.
* The drain FIFO.

The published text says the adder tree has nine adders. Nine operands need
only eight two-input adders. Here the ninth adder is the accumulate adder of
the engine.

The published engine diagram draws the accumulator's feedback from its own
output register. Consecutive issues here belong to different output elements,
so the feedback value is the partial sum of the same element read from
Buffer C instead.

The published block diagram also shows a DMA block inside the processor
system. Here the DMA belongs to the accelerator, as the text describes.

Not included:

* the processor system and its coherency port, interconnect and DDR memory
  (a behavioural AXI memory stands in for them in simulation);
* the software stages of the pipeline;
* the floating-point version of the accelerator, which was built only for
  comparison.

This RTL has been linted and simulated. It has not been synthesised for an
FPGA or measured on a board.
