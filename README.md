# Streaming 3D FFT node for an FPGA cluster

A three-dimensional FFT of an N x N x N complex field is three passes of
one-dimensional FFTs: along x, then y, then z. On a cluster, the field is cut
into *pencils*, lines of N points along one axis. Each node owns a bundle of
pencils. Between passes the data must be transposed across the cluster, so
that every node again holds complete lines along the next axis.

This design is the FPGA logic of one such node. Its main idea is to do
**the transform and the transposition in one pass over the data, with no
processor in the loop**:

- Words stream out of a pipelined double-precision FFT engine. Each word is
  tagged with its grid coordinates.
- The word is then either written to local memory or sent to the node that
  needs it next.
- The next FFT engine starts reading as soon as a complete plane of its input
  has arrived, while the previous pass is still running.

The nodes form a PU x PV grid with a 2D (pencil) decomposition. The x-to-y
transposition only exchanges data inside a grid row. The y-to-z transposition
only exchanges data inside a grid column. Each node therefore needs only two
network ports: one to its row and one to its column.

The default parameters describe the largest configuration analysed in the
work this design is based on (Ammendola, *A Multi-FPGA High Performance
Computing System for 3D FFT-based Numerical Simulations*):

- N = 4096 points per axis
- 32 x 32 = 1024 nodes
- FFT engines with R = 4 rows, that is 8 complex doubles per clock
- adders and multipliers with a latency of 3 clocks

## Data distribution

Node (u, v) has NU = N/PU points along u and NV = N/PV points along v. The
three passes see the field like this:

| pass | pencils along | node (u,v) owns | pencil index p (0 .. NU*NV-1) | exchanged with |
|------|---------------|-----------------|-------------------------------|----------------|
| X | x | y in u*NU+[0,NU), z in v*NV+[0,NV) | y = u*NU + p mod NU, z = v*NV + p div NU | row (same v): destination u' = kx div NU |
| Y | y | kx in u*NU+[0,NU), z in v*NV+[0,NV) | kx = u*NU + p mod NU, z = v*NV + p div NU | column (same u): destination v' = ky div NV |
| Z | z | kx in u*NU+[0,NU), ky in v*NV+[0,NV) | kx = u*NU + p mod NU, ky = v*NV + p div NU | - (results go to the host) |

Every pass therefore handles the same number of pencils per node, NU*NV. The
host streams a node's X pencils in index order. As a result, the NU pencils
with the same z leave the X engine together. Once the X pencils of one z
arrive from all PU nodes of the row, they form a complete *z-plane* of the Y
buffer: all x of the node and all y. The Y pass can start on that plane at
once.

The Z pass needs complete pencils along z. These arrive from all PV nodes of
the column and from every Y pencil, so it must wait until the whole Z buffer
is written.

## The 1D FFT engine (`fft_engine`)

### Rows and lanes

The engine is a radix-2 decimation-in-frequency pipeline of S = log2 N
butterfly stages. It is replicated in R *rows*, so it takes 2R complex
words per clock.

A transform is a *frame* of F = N/(2R) consecutive valid clocks. At step t:

- lane 2r carries x[r*F + t];
- lane 2r+1 carries x[r*F + t + N/2].

Each stage has R butterflies. Between stages the data is reordered in one of
two ways:

- **Stages 1 .. log2 R: fixed wiring.** In stage s, a butterfly's two inputs
  lie N/2^s apart. Up to stage log2 R this distance is a multiple of F, so
  both inputs arrive in the same clock on different rows. A register followed
  by a perfect shuffle of the rows inside groups of G = R / 2^(s-1) regroups
  them. In the first half of a group, the upper outputs of rows j and j+G/2
  feed row j. The lower outputs feed the second half in the same way.
- **Stages log2 R + 1 .. S-1: data shuffler in each row.** The pair distance
  is now shorter than a frame. Each row reorders its own two streams with a
  delay-commutator of length L = N/2^(s+1) (see below). The rows stay
  independent from here on.
- **Stage S** is followed only by a register.

### Twiddle factors

Stage s multiplies by W_N^(k*2^(s-1)). The table index k is the pair's
position inside its sub-transform:

- in row-local stages, k is the position in the frame modulo N/2^s;
- in the fixed stages, k is (row mod G)*F plus the position.

Each butterfly reads its own constant table (`twiddle_rom`). The table holds
just the N/2^s factors it needs and is computed at elaboration with
cos/sin.

### Output and latency

The output leaves in bit-reversed order. Instead of reordering it, the
engine tags every output lane with its frequency bin:

- lane 2r at step t is bin bitrev(r*N/R + 2t);
- lane 2r+1 is bin bitrev(r*N/R + 2t + 1).

The network controller uses the bin directly as an address, so no reorder
buffer is needed.

The latency from the first input step to the first output step is

    latency = S * (l_but + 1) + N/(2R),   l_but = 2*LAT_ADD + LAT_MUL + 4

This reproduces the published cycle counts of the engine exactly. Examples:

| N | R | operator latency | cycles |
|---|---|------------------|--------|
| 512 | 1 | 3 | 382 |
| 512 | 2 | 3 | 254 |
| 512 | 4 | 3 | 190 |
| 512 | 1 | 6 | 463 |
| 512 | 2 | adders 14, multipliers 12 | 533 |
| 4096 | 2 | 3 | 1192 |
| 4096 | 4 | 3 | 680 |

The formula is the published closed-form latency plus one clock, which here
is the engine's input register.

### The data shuffler (`data_shuffler`)

The shuffler has two multiplexers, two delay lines of L words and a counter
over 0 .. 2L-1. Its select is the counter's most significant bit:

- upper output = delay_L( sel ? delayed lower input : upper input );
- lower output = sel ? upper input : delayed lower input.

With an output register, the latency is L+1. A frame of 2L pairs (a_t, b_t)
leaves as (a_k, a_k+L) for k < L, followed by (b_k, b_k+L).

The counter restarts on the first valid pair after an idle clock. Valid flags
travel through the same delay lines, so frames may be separated by gaps.

### The butterfly (`butterfly`)

The butterfly computes Xi = xi + xj and Xj = (xi - xj) W with six adders and
four multipliers, in three stages with a register after each:

| stage | operation |
|-------|-----------|
| A | A1 = Re xi + Re xj, A2 = Re xi - Re xj, A3 = Im xi + Im xj, A4 = Im xi - Im xj |
| B | B1 = A2 Re W, B2 = A4 Im W, B3 = A2 Im W, B4 = A4 Re W |
| C | Re Xj = B1 - B2, Im Xj = B3 + B4 |

A1 and A3 travel to the output on register chains. The twiddle factor follows
on its own chain.

Note on stage C: the description this design follows prints the stage-C
operands as "B1 - B4" and "B2 + B3". With the products named as above, that
gives a wrong result, so the equations of the butterfly were followed
instead. The testbench's fault copy of the butterfly contains exactly that
variant, and it fails.

### Floating point (`fp64_add`, `fp64_mul`)

Both operators are IEEE-754 binary64 with round-to-nearest-even. Each is a
combinational operator followed by LAT pipeline registers, so it accepts a
new operation every clock. The registers are meant to be retimed by
synthesis.

The operators depart from full IEEE-754 in a few places:

- Subnormal inputs and results are flushed to zero.
- Invalid operations return a quiet NaN.
- Exceptions are not flagged.

For normal operands the results are bit-identical to a simulator's `real`
arithmetic, and the testbenches check exactly that. On the target FPGA these
two modules would be replaced by the vendor's floating-point cores. Those
cores offer adder latencies of 0-14 and multiplier latencies of 0-12, which
the LAT parameters mirror.

## Network controllers (`net_ctrl`)

Three instances tag the outputs of the X, Y and Z engines. They have
`AXIS` = 0, 1 and 2 respectively.

Each instance counts frames to know which pencil p it is emitting. It then
builds a `net_word_t` for each lane:

- the destination node, dst_u and dst_v;
- the 16-bit x, y and z of the point;
- the complex value.

In the X and Y passes, a word whose destination is this node is raised on
`loc_valid`. The other words go to `tx_valid`, the row network (X pass) or
the column network (Y pass). In the Z pass all words are local and go to the
host. The controller has a register stage: outputs follow inputs by one
clock.

Because every word carries its own coordinates, a receiver never needs to
know where a word came from or in what order words arrive. A switched network
may reorder traffic freely.

## Local memory and the transpositions

### Write controllers (`local_dma_wr`)

The write controller takes 4R words per clock: 2R local and 2R from the
network. For each word it computes the word's address in the receiving
buffer and issues one write per lane. It also counts completed words:

- **MODE 0, the Y buffer**: address = ((z_l * NU + x_l) * N + y). One counter
  per z-plane; `plane_ready[z_l]` rises when N*NU words of that plane are in.
- **MODE 1, the Z buffer**: address = ((y_l * NU + x_l) * N + z). One counter
  for the whole buffer.

The writes reach the memory port one clock after the words arrive. The ready
flag is set in the clock after the last word is counted. The memory must
return a write to a read issued in the clock after that write. The test
memory model applies writes before reads of the same clock.

### Read controllers (`local_dma_rd`)

The read controller walks the pencils in order. For each pencil it issues
F reads of 2R words with stride 1: lane 2r reads p*N + r*F + t, and lane
2r+1 reads the same address plus N/2.

It issues reads only while the pencil's plane is ready. While waiting it
raises `stall`.

Read data, which may have any fixed latency, enters a FIFO of 2F entries.
Reads are limited by credits, so the FIFO never overflows. A frame is
released to the FFT engine only when all F of its steps are in the FIFO. The
engine therefore always sees uninterrupted frames, which its shufflers
require. `busy` stays high until the last frame has left.

## The node (`fft3d_node`)

The node chains the blocks in this order:

    host -> X engine -> net_ctrl(0) --local--> local_dma_wr(0) -> Y buffer -> local_dma_rd -> Y engine
                               \--row net--/                     
    Y engine -> net_ctrl(1) --local--> local_dma_wr(1) -> Z buffer -> local_dma_rd -> Z engine -> net_ctrl(2) -> host
                        \--column net--/

The outside world connects through ports:

- host input and output streams;
- the transmit and receive lanes of the row and column networks;
- the write lanes and read port of each of the two buffers.

Status outputs show the Y and Z reader stalls. `busy` is high while work
remains. `done` rises when all N^3/(PU*PV) results of the node have been
delivered. One run of a transform follows each reset.

The design has no back-pressure. The network and memories must accept 2R
words per clock and lane, which is the throughput the original system's
bandwidth analysis assumes: the HBM and links are sized for the engines'
output rate.

## Where this design departs from the work it follows

The original system:

- uses four engines per node, two of them on the X pass;
- exploits the real-to-complex symmetry to halve the data after the X pass;
- streams the three components of a vector field back to back;
- keeps only two z-planes of the Y buffer in a round-robin.

This design:

- uses three engines;
- treats all data as complex;
- transforms one scalar field per run;
- keeps full Y and Z buffers (2 x 16 B x N^3/P per node).

The bursting FIFOs and clock-domain crossing in front of the HBM AXI ports
are not built: each lane writes single words.

The engine figures label an extra shuffler of length 1 after the last stage.
The closed-form latency and the published cycle counts have no such
shuffler, so it is left out. The 2-row figure also draws row crossings in
later stages. Here rows are independent after the fixed stages. This gives
the same results and the published latencies.

The host DMA, the HBM controller, the Ethernet/UDP cores and the switches are
outside this RTL.

Reset is synchronous and active high. It clears all control state; data
registers are never read before they are written.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp64_add`, `tb_fp64_mul` | bit-exact results against simulator doubles: random operands, ties, specials, back-to-back at the set latency |
| `tb_butterfly` | bit-exact butterfly at latencies 3/3 and 14/12; out_valid exactly l_but clocks after in_valid |
| `tb_data_shuffler` | pairing and the L+1 latency for L = 1, 2, 4, 64, with gaps between frames |
| `tb_twiddle_rom` | every entry of three tables against cos/sin |
| `tb_fft_engine` | seven engines against a direct DFT, with latency equal to the published cycle counts (382, 254, 190, 463, 533) and 680 for the default N = 4096, R = 4 engine |
| `tb_net_ctrl`, `tb_local_dma_wr`, `tb_local_dma_rd` | coordinates, destinations, local/remote split, addresses, plane-ready timing, stalls, contiguous frames |
| `tb_fft3d_node` | end-to-end run on a 2 x 4 grid with N = 32 and R = 2 (details below) |

The end-to-end testbench, `tb_fft3d_node`, is built like this:

- Each node gets two behavioural memories (`local_mem_model`).
- A row switch and a column switch deliver words after 12 clocks.
- Every node's host streams a random complex field with random gaps.

It checks the following:

- All 32768 results leave exactly once, from the right node.
- Each result matches a 3D DFT computed in the testbench.
- No unwritten buffer word is ever read.
- The X engine's latency is as computed.
- Each mechanism happened: local and remote words in both exchanges, Y and Z
  reader stalls, and the Y engine working while the same node's X input is
  still streaming.

At the default size, one node alone holds 2 GiB of buffers and needs the
other 1023 nodes to run. The whole node was therefore simulated at most at
N = 32 on 8 nodes (and at N = 16 on 4 nodes). The default-size FFT engine was
simulated on its own.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/fft_pkg.sv tb/tb_fft3d_node.sv \
        -y rtl -y tb --top-module tb_fft3d_node
    ./obj_dir/Vtb_fft3d_node
