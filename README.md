# A network-on-chip for parallel turbo decoders, with bandwidth reduction and compressed double-binary extrinsics

A parallel turbo decoder splits each frame of N trellis steps among P soft-in
soft-out (SISO) processors. Each SISO handles a slice of W = N/P steps. Every
value a SISO produces (the *extrinsic information* of one bit or symbol) must
be stored in the memory of whichever SISO will process that bit in the next
half iteration. The interleaver decides which SISO that is. The interleaver
scatters the values almost uniformly, so every SISO talks to every other one,
all the time. This RTL builds the interconnect for that traffic as a small
packet network (one node per SISO, wired as a generalized Kautz graph) and
adds the two refinements proposed by Martina and Masera in "Improving
Network-on-Chip-based turbo decoder architectures":

* **Adaptive bandwidth reduction (ABR).** Values that have stopped changing
  are not sent. The receiving memory keeps what it had, the network carries
  fewer packets and a half iteration ends sooner.
* **Bit-level, pseudo-floating-point (PFP) payloads for double-binary codes.**
  WiMAX-style codes have three 8-bit symbol LLRs per symbol (24 bits). The
  node converts them to two bit LLRs and then compresses that pair to
  2 × 4-bit significands plus one 3-bit shared exponent. The payload shrinks
  to 11 bits, and with it every FIFO, crossbar and link in the network.

The RTL covers everything between the SISOs: the network, the network
interfaces and the per-node memories. It does not include the SISOs
themselves or the interleaver address generators. Their signals are ports of
the top module `noc_turbo_decoder`.

## Overall structure

```
            SISO i (outside)                       SISO i reads a-priori values
   ext, ext_apr, d(i,j), t(i,j)                          ^
              |                                          |
  +-----------v------------------------------------------+-------------+
  | noc_node i                                                         |
  |   abr_unit ---- drop? ----+                           bl2sl         |
  |   sl2bl -> pfp_enc --> packet {d, t, payload}           ^           |
  |                           |                     apriori_mem (2 banks)|
  |                           v                             ^           |
  |        +------------- routing_element -------------+    |           |
  |  D links in -->  M input FIFOs -> crossbar -> M output regs --> D links out
  |        |  (port D = local)   RA: RR / FL   routing_table |  port D --+-> pfp_dec
  |        +--------------------------------------------+               |
  |   intrinsic_mem (channel LLRs, loaded from outside)                 |
  +---------------------------------------------------------------------+
```

`noc_turbo_decoder` instantiates P `noc_node`s and wires their links. Output
link k (k = 0..D-1) of node i goes to node

    j = (-(D*i + k + 1)) mod P

This is the Imase-Itoh generalized Kautz graph. Every node has exactly D
links in and D links out, and for P = 64, D = 4 the diameter is 3 hops. A
few links are self-loops: for P = 64, D = 4, four nodes have a link to
themselves. A self-loop is wired and works like any other link. The links
arriving at a node are numbered in order of increasing source index
`i*D + k`. The package `turbo_noc_pkg` holds the functions that compute the
wiring (`kautz_succ`, `kautz_pred`, `kautz_in_port`) and the routing tables
(`kautz_route_row`). They are evaluated at elaboration.

## Number formats and the packet

| quantity | bits | notes |
|---|---|---|
| extrinsic / a-priori LLR, n_λ | 8 | two's complement |
| intrinsic LLR | 6 | six per word in `intrinsic_mem` |
| destination node d(i,j) | 6 | up to 64 nodes |
| location t(i,j) | 10 | up to 1024 steps per slice (LTE on 8 nodes needs 768) |
| payload | 11 | binary: the 8-bit LLR in bits [7:0]; double-binary: {σ[2:0], ξ̃A[3:0], ξ̃B[3:0]} |
| flit | 27 | `flit_t` = {dest, loc, payload} |

A node is *fully adaptive* (FA): the packet carries its own destination and
memory location. The network therefore needs no routing or location memories
loaded per interleaver. The price is the header bits.

Symbol LLRs of a double-binary symbol u = AB are relative to the reference
symbol 00: `l01` = λ[ĀB], `l10` = λ[AB̄], `l11` = λ[AB] (struct `sl_llr_t`).
In binary mode only `l01` is used, and it is the bit's LLR.

## ABR: deciding what not to send

`abr_unit` is combinational and sits between the SISO and the injection port.
It gets the new extrinsic value and the a-priori value the SISO used for the
same step, plus the run-time threshold K (`k_thr`). K = 0 disables ABR.

* Binary (`db_mode` = 0): drop when |λext − λapr| < K.
* Double-binary (`db_mode` = 1): for each of the two vectors take the
  largest and second-largest of {0, l01, l10, l11}; Δ = largest − second.
  Drop when Φ = |Δext − Δapr| < K. Δ measures how clearly the SISO prefers
  one symbol; a value whose decision margin has not moved is not sent.

A dropped value is acknowledged to the SISO like a sent one (`abr_skip`
pulses), and no packet enters the network. The receiving memory slot then
keeps its previous content. Because the a-priori memory has two banks that
alternate every half iteration (see below), that previous content is the
value sent for the same slot one full iteration earlier. This is what the
scheme needs.

In this design the double-binary criterion uses the four symbol metrics,
counting the reference symbol with metric 0. The source describes the three
stored elements, so this is an interpretation. The source's threshold
experiments use K = 4 … 28 in units of the LLR's LSB. For the binary codes it
uses three fractional bits, so there K = 8 is an LLR difference of 1.0.

## Double-binary compression: symbol level → bit level → PFP → back

Transmit side (`sl2bl`, then `pfp_enc`):

1. Bit LLRs (Max-Log-MAP):
   λA = max(l10, l11) − max(0, l01),   λB = max(l01, l11) − max(0, l10).
   The 9-bit results are saturated to 8 bits.
2. For each of λA and λB count its redundant sign bits: the leading bits
   equal to the sign bit, minus one, capped at n_λ − n_ξ = 4. The pair shares
   σ = min(σA, σB).
3. ξ̃ = λ >>> (4 − σ) (arithmetic shift), kept on 4 bits. It always fits,
   because both values have at least σ redundant sign bits.

Example: λA = 22 (0001_0110) has two redundant sign bits, so σA = 2.
λB = −3 (1111_1101) has five, capped to σB = 4. The pair's σ = 2 and the
shift is 2: ξ̃A = 5, ξ̃B = −1. The receiver rebuilds 5·4 = 20 and −1·4 = −4.
The error is below one step of the shared exponent, always rounding down.

Receive side (`pfp_dec`): sign-extend ξ̃ to 8 bits and shift left by
4 − σ. The memory stores the bit-level pair (16 bits per entry). On the way
to the SISO, `bl2sl` rebuilds three symbol LLRs with μ = max(λA, λB) and the
four sign cases:

| λA | λB | l10 (AB̄) | l01 (ĀB) | l11 (AB) |
|---|---|---|---|---|
| ≥0 | ≥0 | μ − λB | μ − λA | μ |
| ≥0 | <0 | λA | 0 | λA + λB |
| <0 | ≥0 | 0 | λB | λA + λB |
| <0 | <0 | λA | λB | λA + λB − μ |

All results fit in 8 bits: λA + λB only occurs with opposite signs, and
λA + λB − μ = min(λA, λB). The conversions lose information, which costs
about 0.2 dB of decoding performance according to the source's simulations.
The PFP step adds almost nothing on top of that.

## The routing element

`routing_element` has M = D + 1 ports. Ports 0..D-1 are the links and port D
is the local SISO: injection on the input side, delivery to memory on the
output side.

* **Input FIFOs** (`re_fifo`, depth `FIFO_DEPTH` = 8). A neighbour's output
  register hands a flit over in any cycle where this FIFO is not full.
* **Routing table** (`routing_table`, one lookup per FIFO head). It is a ROM
  of P entries holding the output port of one shortest path to each
  destination. The ROM contents come from a breadth-first search at
  elaboration that tries links in index order. Every node stores a shortest
  path, so each hop brings a packet one hop closer, and the longest route is
  the diameter (3 hops for P = 64, D = 4).
* **Routing algorithm** (`re_arbiter`). Each cycle it visits the non-empty
  FIFOs in priority order, and each takes its requested output if that output
  register can be loaded and no earlier input took it. The result drives the
  FIFO read enables, the crossbar selects and the output register loads. The
  priority order is the policy:
  * `RA_FL` (FIFO length, the default): the fullest FIFO first, ties to the
    lower port.
  * `RA_RR` (round robin): start from a pointer. After a cycle with grants
    the pointer moves past the first input served.

  The allocation is combinational, so one routing decision takes one cycle.
* **Output registers.** A register keeps its flit while the downstream FIFO
  is full, and can be reloaded in the cycle it empties. The local output
  (port D) is never blocked, because the memory accepts one write per cycle.

A flit takes at least two cycles per hop: the cycle after it is written into
a FIFO it can be routed into an output register, and from there it enters
the next FIFO. Flow control is back-pressure only; nothing is dropped.
`busy` is high while a FIFO or output register holds a flit. The top's
`net_idle` is the NOR of all nodes' `busy`.

**Deadlock and FIFO depth.** Back-pressure travels hop by hop, and the
Kautz links form cycles. So a ring of full FIFOs whose head flits each wait
for the next FIFO in the ring stops for good. The RE has no escape
channels, and nothing in it rules this out. Whether the network locks
depends on how deep the FIFOs are compared with the traffic. In simulation:

* D = 4, depth 8 (the default): never locked, in any test traffic. That
  includes R = 1 frames with constant back-pressure.
* D = 3, depth 8: the HSDPA-size test traffic locked.
* D = 3, depth 32: never locked.
* D = 2, depth 8 or 32: the same HSDPA-size traffic locked within a few
  hundred cycles, even at R = 0.5. A degree-2 network carries each flit
  over roughly twice as many hops.
* D = 2, depth 64: never locked.

Size `FIFO_DEPTH` by simulating the interleaver and degree that will be
used, as for any other parameter.

## A-priori memory and the half-iteration protocol

Each node's `apriori_mem` has two banks of `MEM_DEPTH` (96) entries with
16 bits per entry, and one valid bit per entry. While `half` = h, the SISO
reads bank h and the network writes bank ¬h. That is why a value that
arrives early can never overwrite one that is still to be read. `apr_clear`,
a one-cycle pulse, invalidates both banks, so every slot reads as 0 (the
a-priori value of the first iteration). Reads are registered: `apr_rdata`
belongs to the `apr_raddr` of the previous cycle.

Running a frame:

1. Load the channel LLRs into each node's `intrinsic_mem` (`intr_we`,
   `intr_waddr`, `intr_wdata`). Pulse `apr_clear` and set `db_mode`, `half`
   and `k_thr`.
2. In each half iteration every SISO presents, for each of its steps, an
   extrinsic value on `ext` with the a-priori value it used on `ext_apr`,
   `ext_dest` = d(i,j) and `ext_loc` = t(i,j), and raises `ext_valid`. A
   value is taken in a cycle where `ext_valid && ext_ready`. `ext_ready` is
   low while the node's injection FIFO is full; the SISO then stalls.
3. The half iteration is over when every SISO has delivered its last value
   and `net_idle` is high. Then toggle `half` and start the next one.

For the source's AP/PP comparison: d(i,j) = ⌊Θ(k)·P/N⌋ and
t(i,j) = Θ(k) mod (N/P), where k = i·N/P + j and Θ is the interleaver or
its inverse. Producing them is the job of the address generators outside.

## Top-level interface (`noc_turbo_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `db_mode` | in | 1 | 0 binary, 1 double-binary; hold constant during a frame |
| `k_thr` | in | 8 | ABR threshold K, 0 = off |
| `half` | in | 1 | half-iteration parity, selects the memory banks |
| `apr_clear` | in | 1 | zero all a-priori memories |
| `ext_valid`, `ext_ready` | in/out | P | SISO → network handshake |
| `ext`, `ext_apr` | in | P × `sl_llr_t` | extrinsic value and the a-priori value used |
| `ext_dest`, `ext_loc` | in | P × 6, P × 10 | d(i,j), t(i,j) |
| `apr_raddr`, `apr_rdata` | in/out | P × 10, P × `sl_llr_t` | SISO read port, 1-cycle latency |
| `intr_we`, `intr_waddr`, `intr_wdata` | in | P, P × 10, P × 36 | intrinsic memory load |
| `intr_raddr`, `intr_rdata` | in/out | P × 10, P × 36 | intrinsic read, 1-cycle latency |
| `abr_skip` | out | P | value taken this cycle and dropped by ABR |
| `rx_valid` | out | P | a packet is written into the node's memory this cycle |
| `net_idle` | out | 1 | no packet in the network |

Parameters: `P` = 64, `D` = 4, `FIFO_DEPTH` = 8, `RA` = `RA_FL`,
`MEM_DEPTH` = 96, `INTR_W` = 36. P = 64 with D = 4 is the largest
configuration the source evaluates. For it, the source quotes an area saving
of up to 40 % from the compressed double-binary payload at R = 1. P ≤ 64 and D ≤ 4 can be
set freely: the packet format is sized for them. For fewer nodes raise
`MEM_DEPTH` to ⌈N/P⌉ (up to 1024).

## Where this RTL follows the source and where it chooses

Taken from the source:
* The FA node: a packet carries d(i,j), t(i,j) and the extrinsic value.
* The RE: M FIFOs, an M × M crossbar configured by the routing algorithm,
  and M output registers, with M = D + 1.
* Round-robin and FIFO-length policies; single-shortest-path routing tables.
* The generalized Kautz topology, P = 64, D ∈ {2, 3, 4}.
* The binary ABR criterion and the double-binary symbol-level criterion.
* The SL↔BL formulas.
* The PFP encoding with n_λ = 8, n_ξ = 4, n_σ = 3 and the shared
  σ = min(σA, σB).
* The 8-bit extrinsic and 6-bit intrinsic formats.

Choices made here, where the source is silent:
* The Kautz construction and port numbering. The source only cites the
  topology.
* Breadth-first path selection for the routing tables, held in ROM.
* The greedy single-pass allocation of the crossbar, the FL tie rule and the
  RR pointer update.
* The FIFO depth (8), the hand-over protocol and the two-cycle hop.
* Counting σ as redundant sign bits. This is the reading under which the
  source's shift formula always yields a 4-bit significand and σ ≤ 4.
* The PFP decoder, which is the exact inverse of the shift.
* Saturation of the SL→BL differences.
* Including the reference symbol in the double-binary maxima.
* Storing bit-level pairs and converting to symbol level on read.
* Two memory banks with valid bits and a clear input.
* The intrinsic memory word (six 6-bit LLRs).
* The SISO handshake.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv` that
ends with a `TB_RESULT checks=… failures=…` line. The reference results are
computed independently in the testbench. `tb/tb_ref_pkg.sv` holds the integer
reference arithmetic shared by the node and system tests. Highlights:

* `tb_bl2sl`: every pair (λA, λB). `tb_pfp_enc`: every λA combined with a
  sampled sweep of λB. `tb_pfp_dec`: every σ and significand pair.
* `tb_routing_table`: all tables of a 64-node/D = 4 and a 16-node/D = 2
  network, checked against an all-pairs hop-count matrix.
* `tb_re_arbiter`: both policies against a model of the priority order and
  the allocation, cycle by cycle.
* `tb_routing_element`: node 3 of an 8-node, degree-2 network. Random
  tagged flits on every input, with random back-pressure on every output.
  Every flit leaves exactly once, on a shortest-path port. A lone flit
  crosses in 2 cycles.
* `tb_noc_turbo_decoder`: the full default design (64 nodes, D = 4). It runs
  binary frames of HSDPA size (N = 5114) and LTE size (N = 6144), and a
  double-binary frame of WiMAX size (N = 1920 symbols). ABR is tested off and
  with K = 4, 6, 10, at R = 1 and R = 0.5. Every memory word of every node is
  checked after every half iteration. The test also requires each mechanism
  to occur at least once: ABR drops in both modes, SISO stalls, link
  back-pressure, mode switches, bank swaps and clears. It checks that every
  packet sent is delivered.
* `tb_noc_turbo_decoder_d2_rr`: the same frames on a 64-node, degree-2
  network with round-robin routing and 64-deep FIFOs. One HSDPA half
  iteration runs at R = 0.33. The cycle budget is taken from the source's
  SSP-RR, D = 2, P = 64 throughputs (159, 264 and 140 Mb/s). Measured:
  356 cycles for HSDPA (180 Mb/s), 140 for WiMAX (343 Mb/s) and 444 for
  LTE (173 Mb/s).
* `tb_noc_turbo_decoder_d3`: the same frames on a degree-3 network with
  FIFO-length routing and 32-deep FIFOs. The cycle budget is taken from the
  source's SSP-FL, D = 3 figures (291, 448 and 240 Mb/s). Measured: 173
  cycles for HSDPA (370 Mb/s), 74 for WiMAX (649 Mb/s) and 205 for LTE
  (375 Mb/s).

Cycle counts of one half iteration at R = 1 without ABR, in the system test.
The test uses an affine permutation Θ(k) = (a·k + b) mod N in place of the
standard interleavers:

| frame | cycles / half iteration | equivalent throughput (200 MHz, 8 iterations) | source, SSP-FL, D = 4, P = 64 |
|---|---|---|---|
| HSDPA, N = 5114 | 114 | 561 Mb/s | 372 Mb/s |
| WiMAX, N = 1920 | 56 | 857 Mb/s | 533 Mb/s |
| LTE, N = 6144 | 146 | 526 Mb/s | 312 Mb/s |

The test only requires the count to stay within twice the source's figure.
An affine permutation spreads traffic more evenly than the real interleavers
do, and this RE's timing and FIFO depth differ from the source's simulator,
so the absolute numbers are not comparable. With ABR the same half
iterations drop to 90 cycles (HSDPA, K = 10) and 43 cycles (WiMAX, K = 6).
Those two figures come from synthetic extrinsic values, so they show the
mechanism, not the decoding-time gain.

Running a test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/turbo_noc_pkg.sv tb/tb_ref_pkg.sv tb/tb_noc_turbo_decoder.sv \
    --top-module tb_noc_turbo_decoder
./obj_dir/Vtb_noc_turbo_decoder
```

The system test takes a few minutes to compile at full size and well under
a second to run. The unit tests need only `rtl/turbo_noc_pkg.sv`, the
module, and for the node test `tb/tb_ref_pkg.sv`.

Not verified here: decoding performance (BER), which needs the SISOs and the
real interleavers; and freedom from deadlock. As explained in the routing
element section, deadlock freedom depends on the FIFO depth chosen for the
traffic, and it has only been checked by simulation.
