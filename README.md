# A memoryless butterfly corner turner

## The problem

A radio interferometer with N antennas first treats every antenna on its own:
each antenna's signal is digitised and split into M frequency channels by a
device of its own (the *f stage*). The next stage, correlation or a spatial FFT,
works per frequency channel and needs every antenna's sample for that channel.
Arrange the data as an N x M matrix. Every source device holds one row, and every
sink device needs one column. Moving the data from rows to columns is the
*corner turn*. It is a matrix transpose too large for any single device, and it
moves the whole data stream of the instrument across a network.

The usual answers are a large shared memory, a non-blocking packet switch, or
direct wiring of every pair. All three become very expensive as N grows. The
design here uses neither memory nor a general switch. It is a fixed network
that steps through N known permutations.

## The idea: step through N permutations

Take M = N = 2^n. A matrix that is not square, or whose size is not a power of
two, can be padded with dummy sources or sinks. A switch with a control input
c in 0..N-1 connects source i to sink p(c,i). The switch must satisfy two
rules:

* for fixed c, p(c,.) is a permutation, so no two sources reach the same sink;
* for fixed i, p(.,i) takes every value once, so over N steps source i meets
  every sink.

In step c, source i sends matrix entry (i, p(c,i)). After N steps, sink j holds
its whole column j, though in a different order for each sink. Each link
carries exactly one entry per step, so no link ever contends for bandwidth.

This design uses **p(c,i) = c xor i**. Flipping bit b of the address is one row
of 2x2 *controlled swappers*: each swapper pairs two links whose addresses
differ only in bit b, and all swappers in the row share one control bit. A
swapper passes its pair straight through on 0 and exchanges it on 1. Stacking
n such rows, with row b driven by bit b of c, gives exactly c xor i. This is a
butterfly (Banyan) network. Unlike a general Banyan switch, all swappers of a
row share one control bit, so the whole network needs only n control wires.

## Making every layer identical: the perfect shuffle

In a plain butterfly, every row of swappers pairs a different bit, so the
wiring between rows changes from layer to layer. The design uses identical
layers instead. The swappers always pair neighbouring links (bit 0). After each
row, a *perfect shuffle* (the Faro shuffle) moves wire j to

    2j          if j < N/2
    2j - N + 1  otherwise

This rotates the n-bit address one place left. After n shuffles, every address
bit has passed through position 0 once, and the addresses are back where they
started.

## Building it from cables and boards

For large N the shuffle layers are the costly part: N links run between layers,
n times over. The design builds each shuffle from two kinds of standard part.
The part numbers for the default size are given at the end of this section.

1. **Cable shuffle** (`cable_shuffle`). The links travel in cables of 2^K
   links; cable q carries links q*2^K to (q+1)*2^K-1. Laying out the cables
   themselves as a perfect shuffle rotates the upper n-K address bits one
   place left. The position of a link inside its cable does not change.
2. **Two-cable shuffle board** (`two_cable_shuffler`). Each board takes two
   adjacent cables and perfect-shuffles their 2^(K+1) links, which rotates
   the lower K+1 address bits.

The two rotations share address bit K. Applied in this order, they make one
full rotation of the n-bit address, which is one perfect shuffle
(`perfect_shuffle_layer`). Take n = 5 and K = 2:

    b4 b3 b2 b1 b0  --cables-->  b3 b2 b4 b1 b0  --boards-->  b3 b2 b1 b0 b4

The swappers are grouped the same way. An **L-bit xor toggler**
(`xor_toggler`) sets out[j] = in[j xor ctl] for an L-bit control word. It
changes only the low L address bits, so it never mixes links between groups
of 2^L. A row of 2^L-link togglers therefore acts as a toggler for the whole
network. Inside, each toggler is L rows of controlled swappers in butterfly
form: row s pairs links that differ in bit s and is driven by ctl[s]. One
toggler layer, followed by L perfect shuffles, does the work of L swapper
rows, and it does so with L times fewer toggler parts.

### Control fan-out: which counter bit drives which toggler input

This is the least obvious part of the design. Before toggler layer m, the data
has been shuffled m*L times. The bit in address position p is therefore
original address bit (p - m*L) mod n. The `control_sequencer` wires toggler
input p of layer m to bit (p - m*L) mod n of the counter c. It does this only
the first time that a layer reaches that bit. The remaining inputs are tied
to 0.

n need not be a multiple of L. In that case the last layer reaches some bits
that an earlier layer has already toggled, and those inputs sit idle.

* **Default size:** n = 20 and L = 8.
  * Layer 0 toggles bits 0-7.
  * Layer 1 toggles bits 12-19.
  * Layer 2 toggles bits 8-11 on inputs 4-7. Its inputs 0-3 would reach bits
    4-7 again, so they stay at 0.
* **Shuffle count:** L shuffles follow every layer except the last. The last
  layer is followed by n - (NL-1)*L shuffles: 8 + 8 + 4 = 20 in total. The
  address therefore makes a whole number of rotations, and each sink j is fed
  by source c xor j with no extra output reordering.

This fan-out makes the network compute exactly c xor i. A different wiring
would only rename the values of c. For example, the plain one-bit network
needs c with its bits reversed. Such a renaming would still be a valid
corner turner.

The default parameters give 2^20 links, 64-link cables and 8-bit togglers.
In parts, that comes to:

| item | count |
|---|---|
| toggler layers | 3 |
| 256-link toggler boards per layer | 4096 (12,288 in total) |
| perfect-shuffle layers | 20 |
| 64-link cables per shuffle layer | 16,384 (327,680 in total) |
| two-cable shuffle boards per shuffle layer | 8192 (163,840 in total) |

## Module hierarchy

    corner_turner                  top; parameters LOG_N=20, K=6, L=8, W=8
      control_sequencer            permutation counter c, fan-out to togglers
      g_layer[m], m = 0..NL-1
        xor_toggler                row of 2^L-link L-bit togglers
        g_shuffle[s]
          perfect_shuffle_layer
            cable_shuffle          perfect shuffle of 2^(LOG_N-K) cables
            two_cable_shuffler     row of 2^(LOG_N-K-1) boards
    ct_pkg                         default sizes, rotl_bits, layer counting,
                                   control fan-out function ctl_source

A single controlled swapper is `xor_toggler` with LOG_N = L = 1.
`corner_turner` with L = 1 is the plain network: n swapper rows, each
followed by one perfect shuffle.

Setting `OMIT_LAST_SHUFFLE = 1` on `corner_turner` leaves out the final
perfect-shuffle layer, which saves one layer of cables and boards. The network
still performs a corner turn, but its outputs come out permuted. Output wire q
carries column rotl(q), the LOG_N-bit address q rotated one place left, and
that column's entry comes from source rotl(q) xor c. The default keeps all
LOG_N shuffles, which is what the 2^20-link part count assumes.

## Interface and timing of `corner_turner`

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | clock |
| rst_n | in | 1 | synchronous, active low; sets c = 0 |
| step | in | 1 | advance to the next permutation at the next clock edge |
| src_data | in | W x 2^LOG_N | entry sent by each source in this step |
| snk_data | out | W x 2^LOG_N | entry arriving at each sink |
| c | out | LOG_N | current permutation; sink j is fed by source c xor j |
| turn_done | out | 1 | high during the step that completes a corner turn (c = N-1 and step) |

The data path contains no storage. It is combinational from src_data to
snk_data, through NL toggler layers and LOG_N shuffle layers. The only state
is the LOG_N-bit counter. With `step` held high, the network moves one
permutation per clock, and one complete corner turn takes N clock cycles.
Dropping `step` stalls the sequence and c holds its value. To follow the
schedule, source i must present entry (i, i xor c) while the counter reads c.
Sink j then receives entry (c xor j, j).

The shuffles are pure wiring. Each toggler layer costs L levels of 2:1
multiplexers. At the default size the path from input to output is 24 mux
levels deep: 3 layers of 8. A fast implementation would add pipeline
registers between layers. The design does not add them.

## What is taken from the described design and what is chosen here

Taken from the design description:

* the schedule p(c,i) = c xor i and the controlled swapper;
* the perfect shuffle and its cable-plus-board construction;
* the L-bit toggler layers, with L shuffles between them and the partial last
  layer;
* the default sizes: 2^20 links, K = 6, L = 8;
* the memoryless data path;
* one permutation per clock;
* the option of leaving out the final shuffle layer (`OMIT_LAST_SHUFFLE`).

Chosen here:

* **Entry width W = 8 bits.** The design only says that a link carries one
  matrix entry per step. A wider entry, or a bundle of links, is a change of
  W.
* **Control fan-out.** The network computes c xor i exactly, rather than with
  c's bits reversed.
* **The control interface.** This covers the `step` strobe, the synchronous
  reset to c = 0 and the `turn_done` output.
* **Toggler internals.** Each toggler is L swapper rows. The design gives only
  the toggler's function.
* **Modules as loops, not instance arrays.** Each toggler layer and each board
  row is one module whose body is a loop over all links. The netlist is the
  same as with thousands of instances. At 2^20 links, instance arrays would
  need 12,288 toggler instances and 163,840 board instances, which is far
  more than simulators and lint tools can elaborate in reasonable time.

Not included:

* **The physical layer.** This means the serial transceivers, modulators,
  copper or optical cables and analog switches that would carry each link
  between boards.
* **Other schedules and layouts.** These include the cyclic schedule
  p(c,i) = c + i mod N (the rotating-wheel picture of the problem), the plain
  butterfly with different wiring in every layer, shuffle boards that rotate
  more than one bit at a time, and routing through managed Ethernet switches.
  They are alternatives to this design, not parts of it.
* **Rounding N up to a power of two.** Padding to a power of two, and to a
  square matrix, happens outside the network, through dummy sources and
  sinks.
* **The source and sink devices.** These are the f stage and the correlator.
  The testbenches model them.

## Sizing against the intended instruments

* **2^20-antenna array** (the large example, with K = 6 and L = 8): this is
  the default configuration exactly.
* **64 x 64 dual-polarisation array** (8192 links, about 13 TB/s at 400 MHz
  sampling): 8192 links fit in the default 2^20 links, padded with dummy
  sources and sinks. Alternatively, set LOG_N = 13. 13 TB/s over 8192 links
  is about 1.6 GB/s per link. That is one 8-bit entry per link per cycle at
  1.6 GHz, or W = 32 at 400 MHz.
* **The 8-link and 16-link networks** used to explain the scheme are
  LOG_N = 3 (K = 1, L = 1) and LOG_N = 4 (K = 2). The testbenches use both.

## Verification

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| tb_controlled_swapper | 2-link 1-bit toggler: straight on 0, swap on 1 |
| tb_xor_toggler | 1024 links with 8-bit togglers, and 32 links with 3-bit togglers: out[j] = in[j xor ctl], with no crossing between groups |
| tb_cable_shuffle | cable-level Faro shuffle, for the drawn 16-link example and for 1024 links with 64-link cables |
| tb_two_cable_shuffler | Faro shuffle inside each board; links stay on their board |
| tb_perfect_shuffle_layer | cables plus boards give j -> 2j / 2j-N+1, for N = 8, 16 and 1024; LOG_N shuffles give the identity |
| tb_control_sequencer | reset, hold and one step per clock; turn_done on the N-th step; the net xor mask of the fan-out equals c (32 links with L = 2, and the 2^20 default); idle inputs stay 0 |
| tb_corner_turner | full corner turns at 8, 32 and 1024 links, and at 16 links with the final shuffle omitted. Every sink must receive its whole column, each entry exactly once, in exactly N cycles. It also exercises stalls, wrap into a second turn and the partial layer, and counts each of them |
| tb_corner_turner_default | the default 2^20-link network for its first 272 steps, every sink checked in each step |

A complete corner turn at the default size takes 2^20 steps of 2^20 entries.
That is about 10^12 entry moves, far beyond what a simulation can run. The
largest complete corner turn simulated is 1024 links. The default size runs
for 272 steps (c = 0 to 271), which covers all three toggler layers but not
the high counter bits 12-19.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl rtl/ct_pkg.sv \
        tb/tb_corner_turner.sv --top-module tb_corner_turner
    ./obj_dir/Vtb_corner_turner

The package file comes first on the command line. `-y rtl` finds the
modules. Lint with `-Wall` warns that `ct_pkg` has parameters that a given
module does not use. This warning is harmless.
