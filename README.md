# A monitored Sobel/Roberts edge-detection coprocessor

This is the RTL of a small memory-mapped coprocessor for image edge detection
that also counts its own activity. The counters are meant to be read the way
a CPU's performance counters are read. The design follows the processor–
coprocessor system of *Run-time Performance Monitoring of Heterogenous Hw/Sw
Platforms Using PAPI* (Fanni et al.). In that system, a dataflow tool merges
several dataflow graphs into one coarse-grain reconfigurable accelerator. Here
the two graphs are the Sobel and the Roberts edge detectors. The tool then
wraps the accelerator in a bus IP and surrounds it with counters. The counters
sit behind the IP's configuration registers, so a software PAPI component
needs only a base address and a list of register indices to report hardware
events next to the CPU's.

The two ideas that matter:

* **One datapath, two algorithms.** Sobel (3x3 kernels) and Roberts (2x2
  kernels) share a line buffer, two delays, the `abs sum` actor and the
  `thr` actor. Switching boxes (SBoxes) route the tokens, and a configuration
  ID chooses the algorithm for each run.
* **Counters outside the datapath, and one inside.** Around the accelerator,
  four counters record each execution: clock cycles, input tokens, output
  tokens and total FIFO-full cycles. Inside it, a FIFO monitor records how
  often each edge FIFO is full. All of them can be read over the bus.

## Block diagram

```
              AXI4-Lite (registers)            AXI4-Lite (local memory)
                     |                                   |
              axi_lite_regs                        axi_mem_bridge
   reg_slv0 = ID  |  reg_slv1 = start/status   port A | of each bank
   sizes, monitors|                         +---------+---------+
                  |                         |         |         |
                  |                   bank 0      bank 1     bank 2     (local_memory)
                  |                   in_size     in_data    out_data
                  |                   port B|     port B|     ^ port B
                  |                  front_end  front_end   back_end
                  |                         |         |         ^
                  |                  +------v---------v---------+------+
                  +----- ID -------->|        mdc_cgr_accel            |
                  |                  |  (merged Sobel/Roberts CG-VRC)  |
                  |                  +---------------------------------+
                  |                      fifo_full | handshakes
                  +<---------------------- pmc_monitors
```

## The merged datapath (`mdc_cgr_accel`)

All actors consume and produce one token per firing. Each image pixel
therefore yields exactly one output pixel.

```
 in pel ─┬───────────────────────────────────────────────► w[2][2]
         ├─ delay ──────┬────────────────────────────────► w[2][1]
         │              └─ delay (Sobel only) ───────────► w[2][0]
         └─ line buffer ┬────────────────────────────────► w[1][2]
                        ├─ delay ─┬──────────────────────► w[1][1]
                        │         └─ delay (Sobel only) ─► w[1][0]
                        └─ line buffer (Sobel only) ┬────► w[0][2]
                                                    └ delay ─► w[0][1]
                                                        └ delay ─► w[0][0]
        window register ─► SBox 1x2 ─┬─► sobel x ‖ sobel y ─────┐
                                     └─► roberts x ‖ roberts y ─┤
                                                   SBox 2x1 ◄───┘
                   ─► FIFO0 ─► abs sum ─► FIFO1 ─► thr ─► FIFO2 ─► out pel
```

* **Window.** The `delay` actors (`delay_actor`) store the previous pixel, and
  the `line buffer` actors (`line_buffer`) store the previous row. Together
  they build a 3x3 window, `w[r][c]`. Its newest pixel is `w[2][2]`; the row
  index steps back through line buffers and the column index through delays.
  The actors shared by both algorithms fire for every pixel. The Sobel-only
  actors fire only in the Sobel configuration. Roberts uses the lower-right
  2x2 part of the window, `w[1..2][1..2]`.
* **Firing.** The window actors fire in lock step, once per accepted pixel,
  and feed one window register. The paper models every edge as a FIFO. Here
  the three edges after the convolution actors are FIFOs (`edge_fifo`, depth
  4). Every actor after the window is a one-stage pipeline register with a
  valid/ready handshake. The actors that fire as a pair (sobel x/y, roberts
  x/y) fork and join in lock step.
* **Initial tokens and borders.** After a start, delays return 0 on their
  first firing, and line buffers return 0 for their first row. So output pixel
  `i` of a block with rows of `w` pixels sees
  `w[r][c] = pixel[i − (2−r)·w − (2−c)]`, and 0 where that index is negative.
  Delays know nothing of rows. The left columns of a window therefore wrap to
  the end of the previous row, as a plain dataflow delay would. The paper
  says only that the gradients are computed once the line buffers and
  delays are filled; starting from zero tokens is this design's reading. It
  keeps the output the same size as the input.
* **Kernels.** The coefficients are listed in `mdc_pkg` exactly as the
  source's schematic prints them:

  | actor | kernel (rows top to bottom) |
  |---|---|
  | sobel x | `[1 0 -1; 2 0 -2; 1 0 -1]` |
  | sobel y | `[-1 2 1; -0 0 0; -1 -2 -1]` |
  | roberts x | `[-1 0; -0 -1]` |
  | roberts y | `[-0 1; -1 0]` |

  Several rows print with a leading minus. The textbook sobel y is
  `[1 2 1; 0 0 0; -1 -2 -1]`, and the textbook roberts x is `[1 0; 0 -1]`.
  So the leading minus is probably a drawing artefact, but this RTL keeps
  the printed values. To use the textbook operators, change the four
  constants in `mdc_pkg.sv` and the reference tables in
  `tb/edge_ref_pkg.sv`.
* **abs sum and thr.** `abs_sum_actor` computes `(|gx| + |gy|) >> n`.
  `thr_actor` outputs 255 when the result is above 80 and 0 otherwise. The
  threshold of 80 is given in the paper. The scaling factor `n` is not, so
  this design uses 2 for Sobel and 1 for Roberts, set in the configuration
  LUT.
* **Configuration.** `cfg_lut` turns the ID into the SBox selects, the
  Sobel-only enable and `n`. ID 0 is Sobel and ID 1 is Roberts; other IDs
  are invalid, and the accelerator then accepts no pixel. The accelerator
  latches the ID at start.
* **Ports.** The accelerator has the three ports named by the paper's
  driver interface: `in_size`, `in_data` and `out_data`. The paper does not
  say what `in_size` carries. Here it is one token giving the row length
  (1..`MAX_LINE`). No pixel is accepted before that token arrives.

Timing: one pixel per cycle. A pixel accepted at clock edge *t* leaves at
edge *t+7*. A 32x32 block takes 1034 cycles from start to done.

## Programming model

The register slave (`s_axil_*`) exposes 32-bit registers at byte offset
4·index:

| idx | name | access | meaning |
|---|---|---|---|
| 0 | reg_slv0 | R/W | configuration ID (0 Sobel, 1 Roberts) |
| 1 | reg_slv1 | W: bit0=1 starts; R: bit0 done, bit1 busy | control / status |
| 2 | size_in_size | R/W | tokens for port in_size (1) |
| 3 | size_in_data | R/W | tokens for port in_data (pixels) |
| 4 | size_out_data | R/W | tokens expected on out_data |
| 5 | # clock cycles | R | cycles of the last execution |
| 6 | # input tokens | R | tokens accepted on in_size + in_data |
| 7 | # output tokens | R | tokens produced on out_data |
| 8 | total FIFO full | R | sum over edge FIFOs of their full cycles |
| 9..11 | FIFO monitor | R | full cycles of edge FIFO 0, 1, 2 |

The memory slave (`s_axim_*`) maps bank *b*, word *k* at byte address
`b·4096 + 4k`. Bank 0 holds the row length, bank 1 the pixels (bits 7:0 of
each word) and bank 2 the results.

A run goes like this:

1. Write the pixels to bank 1 and the row length to bank 0.
2. Write the ID and the three sizes.
3. Write 1 to reg_slv1.
4. Poll reg_slv1 until bit 0 (done) is set.
5. Read bank 2, and the counters if wanted.

The four accelerator-level counters reset at start and count from the next
cycle. They stop at done, which is the cycle after the back-end writes the
last expected token, and hold until the next start. They can be read while a
run is going on. That allows the check the paper suggests for a run-time
manager. Suppose a run is still not done after three times its expected
cycle count, and has produced fewer output tokens than expected. The manager
can then decide it is stuck and start it again. `tb_mdc_ip_top` does exactly
this.

Within this IP the back-end accepts a token every cycle, so the edge FIFOs
fill only when the output is back-pressured. The FIFO-full counters stay at
0 in normal runs. They become non-zero when the accelerator is used with a
slower consumer, which `tb_mdc_cgr_accel` exercises.

## Files

`rtl/`: `mdc_pkg` (types, kernels, register map); the actors `delay_actor`,
`line_buffer`, `conv_actor`, `abs_sum_actor` and `thr_actor`; `edge_fifo`,
`sbox_1x2`, `sbox_2x1`, `cfg_lut` and `fifo_monitor`; the accelerator
`mdc_cgr_accel`; the IP parts `local_memory`, `front_end`, `back_end`,
`pmc_monitors`, `axi_lite_regs` and `axi_mem_bridge`; and the top,
`mdc_ip_top`.

`tb/`: one self-checking testbench per module (`tb_<module>`). Each ends by
printing `TB_RESULT checks=N failures=M`. The shared parts are:

* `edge_ref_pkg`: an independent reference model of the detectors, plus a
  test-image generator.
* `axil_bus`: an AXI4-Lite master with write/read tasks.

Two testbenches run the whole IP:

* `tb_mdc_ip_top` runs single blocks at default parameters. It covers both
  configurations, switching between them, an invalid ID, and a stalled run
  followed by recovery.
* `tb_frame_workload` runs a full 352x288 frame as 99 blocks of 32x32, in
  both configurations.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mdc_pkg.sv tb/edge_ref_pkg.sv tb/tb_frame_workload.sv \
    --top-module tb_frame_workload -o sim && ./obj_dir/sim
```

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `MAX_LINE` | 32 | line buffers, accelerator, top | block width 32 from the paper |
| `MEM_DEPTH` | 1024 | words per bank, top | one 32x32 block, own choice |
| `FIFO_DEPTH` | 4 | edge FIFOs | own choice |
| `THRESHOLD` | 80 | thr | from the paper |
| `SHIFT_SOBEL` / `SHIFT_ROBERTS` | 2 / 1 | `mdc_pkg` | own choice |

## How far it follows the paper, and where it departs

Taken from the paper:

* the IP's partitioning: AXI-lite register bank, AXI memory slave, dual-ported
  local memory banks, front-end, back-end, accelerator, monitors;
* reg_slv0 carrying the accelerator ID and reg_slv1 driving the front- and
  back-end;
* the four monitor names;
* the detector graphs, with their actors, kernels and threshold;
* sharing actors through switching boxes under a configuration table;
* the 32x32 block size.

This design's own choices: every bus detail (AXI4-Lite, no bursts, register
offsets, three banks instead of a power of two), one front-end per input
port (the paper draws a single front-end block), the valid/ready token
protocol, the lock-step window stage, FIFO placement and depth, the meaning
of `in_size`, the abs-sum shifts, the border behaviour, the monitors' exact
start and stop points, and what the FIFO monitor counts. The paper generates
such IPs with a tool, and its real token protocol and wrappers are not
published there. Their timing will differ from this one.

The host processor, the AXI interconnect, DMA and the PAPI software are not
part of this RTL.
