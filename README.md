# Hecaton-style waferscale chiplet trainer in SystemVerilog

The goal is to train large language models on many small, identical compute
chiplets rather than on one huge die. The chiplets are wired only to their
direct neighbours, and cheap DDR5 sits at the package edge.

A linear layer Y = X·W runs on a √N × √N grid of dies with 2D tiling:

- Die (row i, column j) keeps one weight tile W(j,i) and one activation tile X(i,j).
- The X tiles are all-gathered along each column.
- Each die computes a partial product.
- The partial products are reduce-scattered along each row.

Both collectives are ring algorithms. A ring over a line of dies would need one
long wrap-around wire. The design avoids it with a *bypass ring*: the ring order
0→2→3→1→0 only ever jumps two dies, and the die in the middle forwards that
traffic without stopping it. That middle die has to send its own data and
forward its neighbour's at the same time. Its router therefore has a dedicated
straight-through path for traffic that leaves on the side opposite the one it
came in on.

This repository contains synthesizable RTL and self-checking testbenches for:

- the computing die: buffers, PE array, SIMD unit, controller, on-die network,
  and the five-port package router with bypass;
- the die-to-die link;
- the 4×4 package.

## Package (`hecaton_top`)

- The package has `DIES_X × DIES_Y` dies, 4 × 4 by default.
- Each adjacent pair of dies is joined by two `d2d_link`s, one per direction.
- Each die row has links to IO dies at its west and east ends. These come out as
  the flit ports `io_w_*[row]` and `io_e_*[row]`. The IO die itself, its memory
  controller, the DRAM PHY and the DRAM are outside this RTL.
- The north and south edges have no IO die.
- Flits entering at an IO port are remote writes into a die's buffers. This is
  the scatter from DRAM.
- Flits a die sends with `to_io` set leave on the west IO port of its row. This
  is the gather to DRAM.
- Programs are loaded through `prog_we/prog_x/prog_y/prog_addr/prog_instr`.
  `start` runs all dies. `done[y*DIES_X+x]` reports when die (x, y) has finished.
- The per-die counters `byp_count` and `xbar_count` report how many flits used
  the bypass path and how many used the crossbar.

## Flits and routing

A flit (`flit_t` in `hecaton_pkg`) is a complete single-flit packet, 1053 bits:

| field | bits | meaning |
|---|---|---|
| `dst_x`, `dst_y` | 5 + 5 | destination die |
| `to_io` | 1 | send to the west IO die of the row |
| `buf_sel` | 1 | activation or weight buffer |
| `accum` | 1 | add to the stored line instead of overwriting it |
| `addr` | 16 | line address |
| `data` | 1024 | one line of 32 FP32 values |

Routing is dimension-ordered: X first, then Y. `to_io` flits always go west.

## NoP router (`nop_router`)

The router has five ports: local, E, S, W and N.

Input side:
- Each input works out its flit's route.
- If the route is the port opposite the input (W→E, E→W, N→S or S→N), the flit
  goes into that input's **bypass FIFO**.
- Otherwise it goes into the input's **crossbar FIFO**.
- Both FIFOs are `FIFO_DEPTH` = 4 entries deep.

Output side:
- Each output has a round-robin allocator that picks among the crossbar FIFOs
  requesting it.
- A 2:1 multiplexer then chooses between the crossbar winner and the bypass FIFO
  of the opposite input. When both have a flit, it alternates between them.

So a die can forward a ring neighbour's stream and send its own stream in the
same cycle: bypass W→E and local→W go through different output muxes. The router
test checks that 32 + 32 such flits complete within 40 cycles.

## D2D link (`d2d_link`)

- The link is a pipeline of `LAT` = 8 stages, which is 10 ns at 800 MHz.
- Flow control is credit based, with `CREDITS = 2·LAT+2`. That is enough to run
  at full rate.
- A flit accepted by the link appears at the far side `LAT+1` cycles later.
- The physical layer is not modelled, only its latency.

## Computing die (`compute_die`)

**Buffers.** There are two `global_buffer`s, one for weights and one for
activations. Each holds 65536 lines × 1024 bits = 8 MB, has a single port and
reads in one cycle.

**PE array (`pe_array`).** 4 × 4 PEs, each with 32 FP32 MAC lanes (`pe`,
`fp32_mac`).
- PE(r, c) holds output row r and output channels 32c to 32c+31.
- On each step, PE row r uses element kk of its activation line, and PE column c
  uses its weight line.
- One MATMUL therefore produces a 4 × 128 tile.

**SIMD unit (`vec_unit`).** 32 lanes. Operations: add, sub, mul, axpy, scale,
relu and max.

**On-die network (`noc_router`).** Connects the buffers, the controller and the
router's local port.
- Flits arriving from the network have priority on the buffers, so the package
  network always drains.
- A flit with `accum` set does a two-cycle FP32 read-modify-write. This is how
  the reduce-scatter adds partial sums without involving the controller.
- While the network is writing, the controller waits (`c_gnt` stays low).

**Controller (`die_ctrl`).** A small sequencer, described in the next section.

**FP32 arithmetic.** Results round to nearest even. Denormals are flushed to
zero. Multiply and add are rounded separately.

## Controller program

Each die runs a program of `instr_t` words, defined in `hecaton_pkg`:

| op | action |
|---|---|
| `SEND cnt` | Read `cnt` lines from `a_buf[a_addr+i]` and send them as flits to die (`dst_x`, `dst_y`), or to IO. They land at `d_buf[d_addr+i]`. With `accum` set, the receiver adds each line instead of overwriting. |
| `WAIT cnt` | Stall until `cnt` more lines have arrived from the network in buffer `a_buf`. Each buffer has its own counter. |
| `MATMUL cnt` | K = `cnt`. The X line for row r and element k is `a_addr + r·stride + k/32`. The W line for row k and column c is `b_addr + 4k + c`. Y(r,c) is written to `d_addr + 4r + c`. |
| `VEC cnt` | `d[i] = a[i] op b[i]`, using the scalar `scalar` where the op needs one. |
| `HALT` | Raise `done`. |

One layer step of the training method maps onto these instructions as follows:

1. `WAIT` for the scatter.
2. Repeat `P−1` times: `SEND` a block to the next die on the column ring, then
   `WAIT`. This is the all-gather.
3. `P` × `MATMUL`.
4. Repeat `P−1` times: `SEND` with accumulate to the next die on the row ring,
   `WAIT`, then `VEC ADD`. This is the reduce-scatter.
5. `SEND to_io`. This is the gather.

`tb_hecaton_top` builds exactly this program.

## Simulating

```
verilator --binary --timing --assert -y rtl -y tb rtl/hecaton_pkg.sv tb/tb_fp_pkg.sv \
          tb/<tb>.sv --top-module <tb>
./obj_dir/V<tb> +verilator+rand+reset+2
```

Every testbench prints `TB_RESULT checks=N failures=M`.

**Block tests.** `tb_fp32_mac`, `tb_pe`, `tb_pe_array`, `tb_vec_unit`,
`tb_global_buffer`, `tb_nop_router`, `tb_d2d_link` and `tb_noc_router` all pass.

**`tb_hecaton_top`.** Runs a 2 × 2 grid with 2048-line buffers. It computes
Y = X·W, with X of 8 × 64 and W of 64 × 256, through the full sequence: scatter,
all-gather, MATMUL, reduce-scatter, gather. The reference adds in the same order
as the hardware, so every output bit is compared exactly. The test also counts
each of these mechanisms and fails if any never happens:

- bypass forwarding;
- crossbar transfers;
- accumulate flits;
- controller stalls caused by network writes;
- WAIT stalls;
- link back-pressure.

**`tb_hecaton_full`.** The same test on the default 4 × 4 package with 8 MB
buffers.

**Known problem.** The end-to-end test does not complete yet. During the scatter
phase the west-edge stream of row 0 stops after the first flit. The row-0 dies
never receive their weight tiles, and the watchdog ends the run. The die
programs that did receive their data went on correctly through the first
all-gather step. Debug this before trusting the full package.

## Where this departs from the paper

- The paper names the controller, the SIMD unit and the NoC without describing
  their insides. The instruction set, the SIMD operation list and the buffer
  priorities here are this design's own.
- The SIMD unit has no softmax, GeLU or LayerNorm, so the non-linear parts of
  attention and the FFN cannot run on it.
- Mini-batch pipelining, DRAM latency hiding and layer fusion are scheduling
  policies. Here they would be controller programs; only the one linear layer is
  provided.
- The bypass path exists in all four straight-through directions, not only W→E
  and N→S.
- The PE dataflow (output-stationary 4 × 128 tiles) is a choice. The paper says
  only that the array is Simba-like with FP32 MACs.
- `FIFO_DEPTH` = 4 is taken from the slots drawn in the router figure.
- Die coordinates are 5 bits, so grids up to 32 × 32 (1024 dies) can be
  addressed.
- Analog and bought-in parts are left out: the D2D PHY, the IO die and memory
  controller, the DRAM PHY and the DDR5 chips. The flit ports at the package
  edge take their place.
