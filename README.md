# Line successive-cancellation decoder for polar codes

A polar code of length n = 2^m is decoded by successive cancellation (SC):
the decoder estimates the input bits u_0, u_1, ..., u_{n-1} one after another.
Each estimate is the sign of a log-likelihood ratio (LLR). That LLR is computed
from the n channel LLRs through m stages of two-input node operations, and it
depends on every bit decided before it. Drawn as a graph, the computation has
n nodes in each of m stages. A direct implementation has n log2 n node
processors, and each of them works only once every 2n-2 cycles.

This RTL implements the *line* architecture for SC decoding. It rests on two
observations:

* With right-to-left scheduling, exactly one stage is active in any clock
  cycle. Stage l then updates only 2^l nodes. So the largest stage needs at
  most n/2 processing elements (PEs), and all the other stages can borrow
  PEs from it.
* Every intermediate LLR is read exactly twice: once by an f operation and
  once by a g operation of the next stage. After that its register can be
  reused. So one register per tree node is enough: n-1 registers R_{l,j}
  arranged as a binary tree, plus n registers for the channel LLRs.

The decoder therefore has n/2 PEs placed in a line, a tree of n-1 LLR
registers, one partial-sum flip-flop per register, and 3(n/2-1) two-input
multiplexers that let the line of PEs act as the tree. It decodes a codeword
in 2n-2 cycles. That is the same throughput as the full n log2 n-processor
graph, about one bit every two cycles.

The PEs work in the LLR domain and use the min-sum approximation. No
multipliers, dividers or transcendental functions are needed.

## The SC tree and its schedule

The stages are numbered as in the tree drawing. Stage m-1 sits next to the
channel registers. Stage 0 sits next to the decision unit. Node N_{l,j}
(0 <= j < 2^l) of stage l combines two LLRs a and b:

* Stage m-1 takes a and b from the channel LLRs lambda_{2j} and
  lambda_{2j+1}.
* Lower stages take a and b from registers R_{l+1,2j} and R_{l+1,2j+1}.

A node applies one of two rules:

    f(a, b) = sign(a) sign(b) min(|a|, |b|)
    g(a, b) = b + a    if u_s = 0
            = b - a    if u_s = 1

Here u_s is the *partial sum* of the node: an XOR of some of the bits decided
so far.

The order of operations follows from the recursion of SC decoding:

* Bit u_0 needs f at stages m-1, m-2, ..., 0.
* Every later bit u_i needs g at stage k, where k is the number of trailing
  zeros of i. It then needs f at stages k-1 down to 0.
* A bit is decided in every stage-0 cycle.

This gives 2n-2 operations per codeword. For n = 8:

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| stage 2 | f | | | | | | | g | | | | | | |
| stage 1 | | f | | | g | | | | f | | | g | | |
| stage 0 | | | f | g | | f | g | | | f | g | | f | g |
| bit decided | | | u0 | u1 | | u2 | u3 | | | u4 | u5 | | u6 | u7 |

`sc_ctrl` generates this sequence with three registers: a bit counter i, the
active stage, and the function bit (f or g). After a stage-0 cycle, the next
operation is g at stage ctz(i+1). After any other cycle, it is f one stage
lower.

## PE line and register tree

When stage m-1 is active, all n/2 PEs work: PE q computes N_{m-1,q}. Stages
0..m-2 contain n/2-1 nodes in all. Each of them is permanently assigned to a
PE that otherwise serves only stage m-1. That PE then has:

* a 2-input multiplexer on each operand, choosing between channel LLRs and
  the two tree registers below the node;
* a result that goes to one of two registers. Here each register simply has
  its own write enable (the active stage), which does the work of the output
  multiplexer.

One PE is never assigned a lower-stage node and needs no multiplexer.

The assignment rule is

    pe_of(l, j) = (2j + 1) * 2^(m-2-l) - 1          (l <= m-2)

It is a one-to-one map onto every PE except n/2-1. For n = 8 it gives:

| register | R_{2,0} | R_{2,1} | R_{2,2} | R_{2,3} | R_{1,0} | R_{1,1} | R_{0,0} |
|---|---|---|---|---|---|---|---|
| PE | 0 | 1 | 2 | 3 | 0 | 2 | 1 |

So PEs 0, 1 and 2 have multiplexers and PE 3 does not. The published n = 8
drawing makes the same pairings for R_{1,0} and R_{1,1}, but it puts R_{0,0}
on the PE of R_{2,3}. The two choices are mirror images and cost the same.

The registers are stored flat at index 2^l - 1 + j, so R_{0,0} is entry 0.
The functions `node_idx`, `pe_of` and its inverse live in `sc_pkg`.

## Partial sums

The partial sum is the part of the design that takes the most care.

Each register R_{l,j} has a one-bit partial-sum block (`sc_psum`) next to it.
The block XORs in the bit decided in the current cycle when its control bit
b_{l,j} is 1, and holds its value otherwise. The PE computing N_{l,j} reads it
when the node applies g.

Which bits belong in the sum? Stage l handles the bits in groups of 2^(l+1):

* The f operation of the group produces the LLRs for its first half,
  2^l bits.
* The g operation produces the LLRs for its second half. It needs the
  polar encoding of the first-half bits, and entry j of that encoding is
  the u_s of node N_{l,j}.

Entry j of the length-2^l encoding of bits v_0..v_{2^l-1} is the XOR of
every v_t with

    (t & bitrev_l(j)) == bitrev_l(j)

where bitrev_l reverses the l low bits. `sc_ctrl` therefore produces three
kinds of control signal in each stage-0 cycle, for bit i with t = i mod 2^l:

* `psum_upd[l]` = bit i lies in the first half of its group, i.e. bit l of
  i is 0;
* `psum_clr[l]` = t == 0, so the sum restarts at each new group;
* `psum_sel` (b_{l,j}) = (t & bitrev_l(j)) == bitrev_l(j).

For n = 8 this gives the following sums. They match the partial sums of the
full decoder graph.

| node | sum |
|---|---|
| N_{2,0} | u0^u1^u2^u3 |
| N_{2,1} | u2^u3 |
| N_{2,2} | u1^u3 |
| N_{2,3} | u3 |
| N_{1,0} | u0^u1, then u4^u5 |
| N_{1,1} | u1, then u5 |
| N_{0,0} | u0, u2, u4, u6 |

The sum is updated on the same clock edge that stores the stage-0 LLR. A g
operation in the very next cycle (for example u_1 straight after u_0) therefore
already sees the new value.

## Arithmetic

* LLRs are W-bit two's complement (W = 8 by default). Larger values favour
  bit 0.
* f uses W+1-bit magnitudes, so that -2^(W-1) is handled. g is computed in
  W+2 bits.
* Both results saturate to the symmetric range +-(2^(W-1)-1). Magnitudes
  stay representable in every later stage.
* The sign of 0 counts as positive in f.
* The decision is u = 1 when the LLR is <= 0 and the bit is not frozen. A
  tie therefore decides 1. Frozen bits are 0.

Min-sum replaces the exact rule f = 2 atanh(tanh(a/2) tanh(b/2)). The
workload testbench prints error counts for both on the same noisy frames.
At N = 256 and N = 1024, rate 1/2, the two are within a few frames of each
other.

## Interface and timing (`sc_line_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| in_valid / in_ready | in / out | 1 | load handshake for one codeword |
| in_llr | in | N x W | channel LLRs lambda_0..lambda_{N-1} |
| in_frozen | in | N | bit i = 1: u_i is frozen (decided as 0) |
| u_valid | out | 1 | a decided bit is on u_bit |
| u_bit, u_idx | out | 1, m | estimated bit u_i and its index i |
| u_last | out | 1 | i = N-1 |
| u_llr | out | W | the LLR u_i was decided on (register R_{0,0}) |
| busy | out | 1 | an operation is executed this cycle |

**Loading.** A codeword and its frozen mask are taken in one transfer.

**Latency from idle.** Say the transfer happens in cycle k. The controller
accepts the codeword in cycle k+1 and runs stage m-1 in cycle k+2. u_0 is
decided in cycle k+m+1 and appears on the registered outputs in cycle k+m+2.

**Streaming.** The channel registers are released during the g operation of
stage m-1, the last one that reads them. in_ready rises again in the next
cycle, halfway through the codeword. If the next codeword is loaded before
the current one's last bit, decoding continues without a gap. The codeword
period is then exactly 2N-2 cycles, and N bits come out in each period.

The frozen mask is copied when a codeword starts. Loading the next codeword
early therefore does not disturb the current one.

**Bit order.** Bits come out in decoding order u_0..u_{N-1}. The matching
encoder is the recursion

    enc(v) = interleave(enc(v_first_half) XOR enc(v_second_half),
                        enc(v_second_half))

so that codeword bits c_{2k} and c_{2k+1} are the ones paired by stage m-1.
Drawn as a butterfly, this puts u_i on input row bitrev_m(i).

## Files

Under `rtl/`, in bottom-up order:

| file | content |
|---|---|
| `sc_pkg.sv` | f/g enum, node numbering, the PE assignment, bit reversal |
| `sc_pe.sv` | processing element: min-sum f, add/subtract g, saturation |
| `sc_psum.sv` | partial-sum flip-flop of one tree node |
| `sc_dec.sv` | decision unit |
| `sc_chan_regs.sv` | channel LLR registers, load handshake, frozen mask |
| `sc_ctrl.sv` | schedule generator and partial-sum control bits |
| `sc_line_array.sv` | PE line, input multiplexers, register tree, partial sums |
| `sc_line_decoder.sv` | top level |

Under `tb/`:

* `sc_ref_pkg.sv` is a software SC decoder and encoder, written
  independently of the RTL (direct recursion per bit).
* There is one `tb_<module>.sv` per module. `sc_ctrl_checker.sv` and
  `sc_line_array_checker.sv` let one testbench cover two sizes.
* `tb_sc_awgn.sv` with `sc_awgn_runner.sv` runs the workload test.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sc_pkg.sv tb/sc_ref_pkg.sv tb/tb_sc_line_decoder.sv \
        --top-module tb_sc_line_decoder
    ./obj_dir/Vtb_sc_line_decoder

Replace the testbench name to run another one.

| testbench | what it checks |
|---|---|
| `tb_sc_pe` | all 2^16 operand pairs under f, g(u_s=0) and g(u_s=1) |
| `tb_sc_dec` | all LLR values, frozen or not |
| `tb_sc_psum` | 2000 random cycles against a model |
| `tb_sc_chan_regs` | handshake, back-pressure, release, mask copy |
| `tb_sc_ctrl` | see below |
| `tb_sc_line_array` | see below |
| `tb_sc_line_decoder` | see below |
| `tb_sc_awgn` | see below |

* **`tb_sc_ctrl`** runs at N = 8 and N = 64. It checks the sequence of
  operations against the recursive schedule, and at N = 8 against the table
  above. It also checks:
  * 2N-2 cycles per codeword, with no idle cycle inside a stream;
  * take/release timing;
  * every b_{l,j}, against the encoding of a unit vector.
* **`tb_sc_line_array`** runs at N = 8 and N = 32 and is driven by the
  testbench alone. It checks the LLR of every bit against the reference,
  including saturating inputs.
* **`tb_sc_line_decoder`** runs at the default size (N = 8) with 400
  codewords. It checks that noiseless codewords return their information
  bits. With random LLRs it checks every bit and LLR against the reference.
  It also checks:
  * the m+2 first-bit latency from idle;
  * the exact 2N-2 period of a stream.

  It counts starts from idle, early loads, back-pressure, back-to-back
  codewords, forced frozen bits and saturated LLRs. A mechanism that never
  occurs fails the test.
* **`tb_sc_awgn`** sends rate-1/2 codes of length 256 and 1024 over BPSK and
  AWGN at 1.0, 2.5 and 4.0 dB Eb/N0. The information set comes from
  Bhattacharyya parameters at a 2 dB design point. The test checks every
  bit against the reference and prints the error counts. It takes about two
  minutes, most of it Verilator compile time.

To change the size, override the top's parameters N (a power of two, at
least 4) and W. Everything else is derived from them.

## How far it follows the published design, and what is this design's own

Taken from the published architecture:

* the line organisation: n/2 PEs, n-1 tree registers each with a partial-sum
  block, and 2-input multiplexers between them;
* the right-to-left schedule of 2n-2 cycles;
* the reuse of registers between f and g results;
* the f/g rules in the LLR domain with the min-sum approximation;
* the partial-sum block as an XOR flip-flop gated by b_{l,j};
* the decision rule and the frozen bits.

Chosen here, where the description is silent:

* the fixed-point format and saturation;
* the interface: parallel load, handshake, early release of the channel
  registers, frozen mask per codeword, serial bit output;
* the reset behaviour;
* the controller's implementation;
* the general PE assignment rule;
* the clear input of the partial-sum block, which restarts the sum for each
  group of bits.

Two points differ from, or settle a conflict in, the published material:

* **Decision unit placement.** In the drawings the decision unit sits behind
  register R_{0,0}. The schedule, however, decides u_i in the same cycle as
  its stage-0 operation, and uses u_i for a g in the very next cycle. Here
  the decision is taken from the stage-0 PE output directly, which keeps the
  schedule. R_{0,0} still captures the LLR and drives `u_llr`.
* **The n = 8 schedule table.** The published table lists the second stage-1
  operation (g) in cycle 4, alongside the stage-0 g, and leaves cycle 5
  empty. The accompanying text places it in cycle 5, which is also the only
  placement consistent with one stage per cycle. This design follows the
  text.

Not included:

* the pipelined tree architecture, which has n-1 PEs, one per tree node.
  The line architecture is derived from it with fewer PEs and the same
  throughput;
* the vector-overlapping architecture, which decodes P codewords at once
  with duplicated lower stages and P register sets;
* the semi-parallel variant with n/4 PEs. It was only suggested, at a cost
  of 2 extra cycles per codeword.

The default size is N = 8, the size of the published examples. The largest
size simulated is N = 1024.
