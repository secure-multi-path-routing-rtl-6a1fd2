# AONT multi-path routing for a mesh network-on-chip — SystemVerilog model

A compromised router in a network-on-chip can copy every packet that crosses it. This design protects message
confidentiality without encrypting anything. Each message is first passed through an **all-or-nothing transform**
(AONT). The transformed blocks are then split into two packets. The two packets travel to the destination over two
routes that share no router except the two end routers. A single eavesdropping router therefore sees at most one
half of a transformed message. Without every block, none of the original message can be recovered.

The RTL implements the scheme of *"Secure Multi-Path Routing with All-or-Nothing Transform for Network-on-Chip
Architectures"* (Weerasena, Randall, Mishra). It covers an 8 × 8 mesh of routers, and each tile has a sending
and a receiving network interface that apply the transform. The paper evaluated the scheme in a network
simulator and gave no RTL, so this code fills in many details of its own. They are listed below, together with
the places where this code departs from the paper's text.

## 1. The transform

### Symbols and arithmetic

Fix n = 2^w with p = n + 1 prime (a Fermat prime: n = 2, 4, 16, 256). A message is cut into **s blocks**
B_1..B_s. Each block holds **n symbols**, and each symbol is w bits. A symbol stands for one of the integers
1..n; the bit pattern 0 stands for n. All arithmetic is modulo p on these non-zero residues:

* `gf_mul` multiplies with the Fermat shortcut: for x = hi·2^w + lo, x mod p = lo − hi (+p if negative). Results
  are never 0, and the residue n is returned as the pattern 0.
* `gf_inv` raises a symbol to the power p − 2 = 2^w − 1, which takes w squarings.

The default is **n = 4** (p = 5, 2-bit symbols), the paper's worked example. The paper never states the n used in
hardware. The default **s = 64** makes one message a 64-byte cache line (64 blocks × 4 symbols × 2 bits = 512 bits).
n = 16 and n = 256 work by changing parameters; the testbenches run n = 16.

### Quasigroup from a random key (`quasigroup_gen`, `perm_gen`)

For every message the sender draws a random permutation K' = (k_1..k_n) of the symbols. The quasigroup is the
Latin square whose first row is K' and whose row i is i·K' mod p:

    a • b = a · k_b  (mod p)          dual:  a ∘ c = the b with a • b = c

`quasigroup_gen` builds both n × n tables in parallel and registers them in one clock. `perm_gen` keeps a
permutation register that starts as the identity. On every clock it swaps two entries, the second picked by a
32-bit LFSR. The register therefore always holds a valid permutation, and a message takes whatever the register
holds when it starts. The LFSR is a placeholder: a real chip would take its randomness from a true random
number generator.

### Forward transform (`aont_enc`)

    leader     l_1 = k_1,  l_j = k_j • l_(j-1),  l = l_n
    I(i)       the n base-n digits of block number i, most significant first (digit 0 is symbol n)
    mask       r_in = l • i_in,  r_i(j-1) = r_ij • i_i(j-1)
    pseudo     h'_ij = r_ij • h_ij                                 → B'_1 .. B'_s
    key block  C = B'_1 * B'_2 * ... * B'_s  (element-wise product mod p),  B'_(s+1) = C * K'

All s blocks are transformed in parallel. The latency is 2 clocks after `start`: one clock for the tables and one
for the blocks.

### Inverse transform (`aont_dec`)

The receiver multiplies B'_1..B'_s together to get C, recovers K' = B'_(s+1) · C^(-1), and rebuilds the
quasigroup and its dual. It then recomputes the leader and the masks and undoes every symbol with
h_ij = r_ij ∘ h'_ij. The latency is 3 clocks: key, tables, message. If any one block is missing or altered, the
recovered K' is wrong. Every mask then changes, and the whole message comes out wrong. The testbench checks this
by altering the key block.

**Where the text of the paper conflicts with itself.** The forward listing builds C from the *original* blocks
B_i. The inverse listing builds it from the pseudo-blocks B'_i. The receiver cannot know B_i before it has K', so
this design uses B'_i on both sides. The paper also writes the key recovery as C_s / B'_(s+1). With
B'_(s+1) = C_s · K', the correct form is B'_(s+1) / C_s, and that is what `aont_dec` computes. Each of these two
literal readings is used as the deliberate fault for its module's testbench, and both break the round trip.

## 2. Packets

The s + 1 pseudo-blocks are split in the middle:

| packet | payload | route | routing mode | virtual channel |
|---|---|---|---|---|
| Pkt1 (seq 0) | B'_1 .. B'_(s/2) (top block of the payload field is zero) | via the **blue** pivot | YX | VC 1 |
| Pkt2 (seq 1) | B'_(s/2+1) .. B'_(s+1) | via the **red** pivot | XY | VC 0 |

Each packet is a single wide flit. It carries a header (`aont_pkg::hdr_t`) and a payload of (s/2 + 1)·n·w bits,
which is 264 bits by default. The header fields are:

* the current target (first the pivot, then the final destination);
* the final destination `fin_id`;
* the source;
* `phase2`, which is 0 on the way to the pivot and 1 after it;
* the routing mode;
* `flip_route`;
* the sequence number;
* a 4-bit message tag that increments for each message a source sends.

The paper asks only for the pivot, `fin_id` and a sequence number. The other fields, and the decision to send
each packet as one flit, belong to this design.

## 3. Two disjoint routes (`path_gen`, `noc_router`)

Coordinates: x grows to the right, y grows downwards, and row 0 is at the top. Tile k = y·X + x.

**Diagonal case (S and D differ in row and column).** The blue region contains every router that is strictly
on D's side of S's row *and* strictly on S's side of D's column. For example, if D is below and to the right of
S, the blue region is "below S and left of D". The remaining routers form the red region. One pivot is drawn at
random from each region. The blue packet routes YX to its pivot and YX again to D. Its route therefore stays in
the blue region except at S and D. The red packet routes XY both times. Its route runs along S's row, the pivot's
column and row, and D's column, and none of these enter the blue region. The red region is not a rectangle, so
it is sampled as one of two rectangles chosen by a random bit:

* S's row and every row away from D;
* D's column and beyond, on D's side of S's row.

**Same row.** Blue takes the rows on the larger side beyond S. Red takes the other side together with S's row.
The blue packet carries `flip_route`, so at its pivot it switches from YX to XY. It leaves S vertically, runs
along the pivot's row, and comes back vertically down D's column. Without the flip it would come back along the
shared row, where the red packet travels.

**Same column: differs from the paper.** The paper applies the flip here as well. With a flip, the blue packet
would go back along S's column and meet the red packet there. In this design, blue takes the columns on one side
of S, and its pivot is drawn on S's own row. The blue packet routes YX without a flip: along S's row to the
pivot, down or up the pivot's column, then along D's row to D. Red takes the other side together with S's
column.

**S = D.** Both pivots are S, and both packets go straight back out of the local port.

The random pick inside a range is lo + ((r · span) >> 8) for an 8-bit random r. The pick is close to uniform over
each rectangle, but not over the routers of the whole region.

**Router.** The router has five ports (N, E, S, W, local) and two virtual channels per input. As the paper
requires, the channels are split evenly between XY and YX traffic: VC 0 carries XY packets and VC 1 carries YX
packets. Each VC has a FIFO of `DEPTH` packets (4 by default). Route computation looks at the head of every FIFO:

* If the packet is still heading for its pivot and the pivot is this router, the target becomes `fin_id` and
  `phase2` is set. If `flip_route` is set, the mode also changes to XY.
* XY mode corrects x first, YX mode corrects y first. The outgoing VC is the packet's mode after the update.

Each output has a round-robin arbiter over the ten input VCs. An input VC takes part only if it wants that output
and the downstream VC has room. The winner is popped and driven onto the link in the same clock, so an
unblocked packet moves **one hop per clock**. Links use valid/ready per VC. A ready signal is only "FIFO not
full", so ready never depends combinationally on valid.

**Deadlock.** A packet keeps its VC class across the pivot unless it flips. Two routing phases in one class can
form a turn cycle, so this design does not claim freedom from deadlock under saturating load. The paper says
only that the VC split is there "to avoid deadlocks". None of the tests has deadlocked.

## 4. Network interfaces

**`ni_src` (sender).** It accepts a message (`msg_valid`/`msg_ready`, with the destination coordinates),
starts `aont_enc` with the current key, and latches the pivots and `flip_route` chosen by `path_gen`. Pkt1 is
offered on VC 1 three clocks after the message is accepted, and Pkt2 follows on VC 0. The interface handles one
message at a time, so an unblocked message occupies it for 5 clocks.

**`ni_dst` (receiver).** A packet from the router's local port first enters a one-entry register. From there:

* If a half with the same source and tag is already waiting in one of `SLOTS` reassembly slots (8 by default),
  the two halves are joined in sequence order and go to `aont_dec`.
* Otherwise the packet takes a free slot and waits for its partner.

The recovered message is offered to the core with its source coordinates. It appears 4 clocks after the
completing packet is taken, and it is held until `out_ready`. The paper says only that the halves are
reassembled "based on their packet sequence numbers"; the slot table is this design's own.

**Known limit.** If more than `SLOTS` messages are in flight to one tile, the slots can fill with halves whose
partners wait behind an unmatched half in the input register. That tile then blocks. Size `SLOTS` for the
largest number of outstanding messages per destination.

## 5. Top level (`secure_noc_top`)

The top is an X × Y mesh (default 8 × 8, as in the paper's evaluation) with a router, an `ni_src` and an `ni_dst`
in every tile. Edge ports are tied off. The cores, the shared L2 and the memory controllers are not part of this
design. Each tile instead brings out its send port (`msg_in*`) and its receive port (`msg_out*`), as arrays
indexed by tile. Two observation outputs report events: `pivot_swap` (per router) and `ooo_arrival` (per tile,
set when Pkt2 arrives before Pkt1).

| parameter | default | source |
|---|---|---|
| X, Y | 8, 8 | paper (8 × 8 mesh, 64 nodes) |
| N (n) | 4 | paper's worked example; the hardware value is not given |
| S (s) | 64 | chosen: one 64-byte line per message |
| DEPTH | 4 | chosen |
| SLOTS | 8 | chosen |
| COORD_W, TAG_W (package) | 4, 4 | chosen; meshes up to 16 × 16 |

## 6. Verification

Every module has a self-checking testbench in `tb/` that prints `TB_RESULT checks=… failures=…`.
`aont_ref_pkg` is an independent reference model. It evaluates a • b directly with `%`, finds ∘ and inverses by
search, and traces XY/YX paths.

| testbench | what it establishes |
|---|---|
| `tb_aont_pkg` | `gf_mul`/`gf_inv` against `%` for every pair, for n = 2, 4, 16, 256 |
| `tb_perm_gen` | the key is always a permutation; identity after reset; n = 4 reaches all 24 permutations |
| `tb_quasigroup_gen` | tables match a • b = a·k_b; rows and columns are permutations; a ∘ (a • b) = b; 1-clock latency |
| `tb_aont_enc` | n = 4/s = 64 and n = 16/s = 8 against the reference, latency 2; reference inverse round trip |
| `tb_aont_dec` | recovers reference-encoded messages, latency 3; an altered key block spoils the message |
| `tb_path_gen` | every S/D pair of a 4 × 4 and an 8 × 8 mesh, 16 random draws each: the two routes share no router but S and D; blue pivot inside the blue region; flip only for the same row |
| `tb_noc_router` | output port, VC, swapped header and payload for 200 random packets at one hop per clock; backpressure; round-robin |
| `tb_ni_src` | headers, payload split (the reference inverse recovers the message), timing, backpressure |
| `tb_ni_dst` | in-order, reversed and interleaved halves; latency 4; core backpressure |
| `tb_secure_noc_top` | 4 × 4 mesh, s = 8: 96 messages end to end (see below) |
| `tb_secure_noc_top_full` | the same test with every parameter at its default (8 × 8, s = 64, 192 messages) |

The two end-to-end tests record every packet that every router forwards. They check that **no router other than
a message's source and destination routers ever forwards both of its packets**. This is the property behind the
paper's "0 % eavesdropping probability with one malicious router", checked here on the actual RTL traffic. The
tests also require each mechanism to occur at least once:

* pivot swaps;
* same-row messages (flip);
* same-column messages;
* all four diagonal directions;
* a message to the sender's own tile;
* Pkt2 arriving before Pkt1;
* a busy sender;
* core backpressure.

To run one test with plain Verilator:

    verilator --binary --timing --assert rtl/aont_pkg.sv tb/aont_ref_pkg.sv -y rtl -y tb \
              tb/tb_secure_noc_top.sv --top-module tb_secure_noc_top -Mdir obj
    ./obj/Vtb_secure_noc_top

The full-size end-to-end test simulates in well under a second. Building it with Verilator takes several
minutes, because the fully parallel transforms of 64 tiles are a lot of logic.

## 7. What the paper evaluates, and what this RTL covers

* **Latency tables.** The benchmark traces (SPLASH-2/PARSEC from full-system simulation on an 8 × 8 mesh) are not
  reproduced here. The mesh size matches, and a 64-byte data packet fits one message. The paper's cycle counts
  come from a simulator model whose latencies differ from this RTL, which takes 5 clocks in the sender, 1 clock
  per hop, and 4 clocks in the receiver after the second half arrives.
* **Eavesdropping probabilities.** For one malicious router on 4 × 4 and 8 × 8 meshes, the 0 % result is what
  `tb_path_gen` verifies for every source/destination pair. The two-router figures depend on the pivot
  distribution and are not reproduced.
* **Area against AES-128.** This is a synthesis result on a commercial 28 nm library. It is not reproduced here.
