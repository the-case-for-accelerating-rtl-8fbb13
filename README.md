# Signing accelerator for authenticated ordered multicast

Byzantine fault-tolerant replication is slow mostly because replicas must
agree on an order for client requests, and each agreement step costs a round
of messages and signatures. Authenticated ordered multicast (AOM) moves
ordering into the network instead. One programmable switch acts as the
*sequencer* of a multicast group: it stamps every packet for the group with
the next number of a gap-free per-group sequence and an epoch number. It then
attaches an authenticator, so that a faulty host cannot forge an order and
receivers can check the stamp. Receivers deliver packets in sequence order and
see a missing number as a drop.

A switch ASIC cannot compute public-key signatures: it has no loops, wide
multipliers or inverses. In this design the switch sends every AOM packet,
after sequencing, through a crypto co-processor (an FPGA on a 100 Gb/s port)
and gets it back before multicasting it. This repository holds synthesizable
SystemVerilog for that path:

* the switch's sequencing stage;
* the co-processor datapath: packet parser, SHA-256 hash chain, packet
  updater, signing ratio controller, secp256k1 ECDSA pre-computer and signer,
  and stream merger.

Signing is far slower than hashing, so not every packet is signed. Every
packet instead carries the hash of its predecessor in a per-group hash chain.
A signature on one packet therefore vouches for all earlier packets of the
group. A receiver holding unsigned packets waits for the next signed one and
checks the chain backwards.

## Data path

```
            +------------------------------ aom_pk_top -------------------------------+
 rx ------> | aom_sequencer --> aom_accel:                                            |
 (512-bit)  |  (per-group      packet_parser --> packet_updater --> sign_ratio_ctrl --> stream_merger --> tx
            |   counters)          |   seq/epoch sideband ^      |       ^      |          ^
            |                      +--> hash_chain -------+      |  stock level  +-> ecdsa_signer
            |                                                    |       |              ^   (256-bit hash)
            |                                                    +-- ecdsa_precompute --+   (r, k^-1) pairs
            +--------------------------------------------------------------------------+
```

All blocks pass packets as 512-bit beats (`beat_t`: data, byte keep, last)
with a valid/ready handshake. Each block has one output register and holds a
beat stable while `valid && !ready`; assertions in the blocks check this. The
hash and signature links are valid/ready as well. The 100G Ethernet MAC is
not included: `rx`/`tx` are its user-side streams.

| Block | Job |
|---|---|
| `aom_sequencer` | Keeps one sequence counter per group (64 groups). On beat 0 it increments the group's counter and writes the new value and the current epoch into the header. A control-plane write of a new epoch clears all counters, so each epoch starts at 1. Packets of a group number it does not serve are dropped and counted. |
| `packet_parser` | Takes group, sequence number, epoch (beat 0) and the sender's 32-byte message digest (beat 1). It sends them to the hash chain and passes the packet on, with sequence and epoch as sideband signals. |
| `hash_chain` | Computes `H_n = SHA-256(digest ‖ seq ‖ H_(n-1))` per group and returns `H_n` together with `H_(n-1)`. |
| `packet_updater` | Writes `H_(n-1)` into beat 1 and passes `H_n` on beside the packet. It checks that the chain result belongs to the packet (sequence and epoch match the sideband). |
| `sign_ratio_ctrl` | Decides per packet whether to sign. It marks signed packets in the flags byte and gives their `H_n` to the signer. |
| `ecdsa_precompute` | Generates nonces and keeps a stock of up to 16 `(r, k⁻¹)` pairs. The stock level is visible to the ratio controller. |
| `ecdsa_signer` | Finishes a signature from one pair and one hash with two modular multiplications. |
| `stream_merger` | Writes `(r, s)` into beat 2 of signed packets and returns the stream in order. |
| `modmul`, `sha256_core` | The arithmetic units underneath. |

## Header layout

The header fields are group ID, sequence number, epoch number and
authenticator, placed after the UDP header. Their byte positions are chosen
here. All fields are big-endian, and byte *i* of a beat is
`data[8*i +: 8]` (`aom_pkg`).

| Beat | Bytes | Field | Written by |
|---|---|---|---|
| 0 | 0–41 | Ethernet/IPv4/UDP, not interpreted | sender |
| 0 | 42–45 | group ID | sender |
| 0 | 46–49 | sequence number | sequencer |
| 0 | 50–53 | epoch number | sequencer |
| 0 | 54 | flags, bit 0 = carries a signature | ratio controller |
| 1 | 0–31 | message digest | sender |
| 1 | 32–63 | chain hash `H_(n-1)` of the preceding packet | packet updater |
| 2 | 0–31 / 32–63 | ECDSA signature `r` / `s` | stream merger |

Every packet must have at least two beats, and a signed packet at least
three. The sender reserves beat 2, and the merger overwrites it only when the
packet is signed. The blocks do not strip or add beats.

## The hash chain

Each group has one chain. The chain value is stored in a 64 × 256-bit memory
in `hash_chain`, with the epoch it belongs to and a "started" bit. For packet
*n* the 68-byte message `digest(32) ‖ seq(4) ‖ H_(n-1)(32)` is padded into two
SHA-256 blocks:

* block 1: `{digest, seq, H_(n-1)[255:32]}`;
* block 2: `{H_(n-1)[31:0], 0x80, zeros, length = 544 bits}`.

They are compressed by one `sha256_core`, which does one round per cycle.
`H_0` is zero. When a packet arrives with an epoch different from the stored
one, the chain restarts from zero. Sequence numbers restart with the epoch
too, so `(epoch, seq)` together name a chain position.

Packet *n* carries `H_(n-1)`. If packet *n* is signed, the signature covers
`H_n`. A receiver that holds packets *m..n*, with only *n* signed, checks
this as follows:

1. It verifies the signature on `H_n`.
2. It recomputes `H_n` from packet *n*'s digest, sequence number and stamped
   `H_(n-1)`.
3. It then walks back, comparing each recomputed hash with the value stamped
   in the next packet.

The chain is kept per group. This is a choice made here, and it is needed
because sequence numbers are per group: one global chain would tie groups
together and make a receiver of one group unable to check it. For the same
reason the sequencer drops packets of unknown groups rather than letting them
share a chain.

## Deciding which packets to sign

The pre-computer is the bottleneck, and its stock of pairs shows how far
signing keeps up with traffic. At beat 0 of each packet, `sign_ratio_ctrl`
decides from the current stock level:

| Stock | Decision |
|---|---|
| ≥ `HIGH_WATER` (4) | sign every packet |
| 1 … `HIGH_WATER`−1 | sign one packet in `RATIO` (8); unsigned packets since the last signed one are counted |
| 0 | sign nothing; the hash chain alone carries these packets until stock is back |

A signed packet waits at beat 1 until the signer takes its hash. It waits
again at beat 2 in the merger until the signature is ready, so packets never
overtake each other. No signature is forced when traffic stops, so the
packets of a burst's tail stay unverified until the group's next signed
packet. The thresholds, the policy and this behaviour are this design's own.

## ECDSA with precomputation

A secp256k1 signature on hash `z` with private key `d` is
`r = (kG).x mod n` and `s = k⁻¹ (z + r·d) mod n` for a fresh random nonce
`k`. Everything except the last formula is independent of the message.

* **`ecdsa_signer`** waits until a hash and a pair are both present. It
  reduces `z` mod n by one conditional subtraction, forms `t = r·d + z`, then
  `s = k⁻¹·t`. This takes one `modmul` and 11 cycles.
* **`ecdsa_precompute`** is a micro-sequenced unit. One `modmul` plus a
  modular adder and subtracter work on a 16 × 256-bit register file holding
  X, Y and Z, temporaries, G, k and an accumulator. A small table of
  micro-operations (kind, modulus p or n, destination, two sources) encodes
  two point formulas, both in Jacobian coordinates:
  * the a = 0 doubling `dbl-2009-l`: 21 micro-operations, 7 of them
    multiplications;
  * the mixed addition with affine G `madd-2007-bl`: 25 micro-operations, 11
    multiplications.

  The sequencer steps through the following:
  1. Draw `k` from a xoshiro256** generator, four 64-bit words, most
     significant first. Redraw if `k = 0` or `k ≥ n`.
  2. Compute `kG`, scanning the bits of k from the top: double, then add G
     where the bit is 1.
  3. Compute `Z⁻¹ = Z^(p−2)` by square-and-multiply, then
     `x = X·Z⁻²`, and `r = x mod n` by one conditional subtraction.
  4. Compute `k⁻¹ = k^(n−2) mod n`.
  5. Push `(r, k⁻¹)` into the stock FIFO, or redraw if `r = 0`.

* **`modmul`** relies on both secp256k1 moduli being just below a power
  of two: `m = 2^256 − c` with `c = 2^32 + 977` for p and a 129-bit `c` for
  n. Because `2^256 ≡ c (mod m)`, a value `H·2^256 + L` can be replaced by
  `H·c + L`. The unit works in four stages, one per cycle:
  1. Form the full 512-bit product.
  2. Fold the high half down by multiplying it by `c`.
  3. Fold again: the high part is now at most 131 bits.
  4. Fold a third time, where at most 6 high bits remain, then do one
     conditional subtraction of `m`.

  `c` is computed from `m`. An assertion requires `c < 2^130`, so the unit
  does not work for an arbitrary modulus. The result is ready three cycles
  after start. Each stage is one wide multiplication in a single register
  stage. An FPGA build at 230 MHz would spread these over pipelined DSP
  cascades, which adds latency but changes nothing else.

Limits to know before trusting the output cryptographically:

* The generator is a deterministic PRNG seeded over `cfg_seed`; a real
  deployment needs a true random source.
* Additions that hit `Q = ±G` (only for two special nonce prefixes) and
  `s = 0` (probability about 2⁻²⁵⁶) are not handled.
* The private key enters on a port in plain form.

## Timing

Measured in simulation at the default parameters. Cycle counts are converted
at a 230 MHz clock.

| Quantity | This RTL | Reference figure |
|---|---|---|
| packet latency, unsigned (sequencer → tx) | 142 cycles, 617 ns | 835 ns |
| packet rate, back to back | 1 per 138 cycles, 1.67 Mpps | 1.20 Mpps |
| signer latency | 11 cycles, 48 ns | 745 ns |
| signed packet latency | 149 cycles, 648 ns | 2.36 µs including Ethernet |
| burst signing rate | 1 per ~11 cycles, ~21 M/s | 57 M/s |
| sustained signing rate (pre-computer) | ~34 900 cycles per pair, ~6.6 K/s | 81.78 K/s |

The packet rate is set by the hash chain, which handles one packet at a time
(two 64-round compressions plus control). Hashing is the only per-packet
computation.

## Departures and open points

The packet path meets the reference latency and rate. Signing meets the
latency but not the throughput:

* **Sustained signing rate is ~12× too low.** The pre-computer makes each
  pair with about 4 100 dependent 256-bit multiplications on one multiplier:
  about 4 cycles each plus 1–3 control cycles per micro-operation. Reaching
  about 2 800 cycles per pair needs several multipliers working in parallel
  (for instance a fixed-base comb for kG) or several pre-computers. The original design's insides are not
  known, and this part is left for that work. Functionally this only means
  more packets go out unsigned and rely on the chain.
* **Burst signing rate** is one signature per ~11 cycles. The reference
  burst rate implies several signatures in flight. Since one packet needs
  138 cycles, the packet path never asks for more than this anyway.
* The header layout, the per-group chain, the epoch restart, the 32-bit
  widths of sequence and epoch, the 64-group table, the signing policy and
  the nonce generator are all choices made here.
* In the reference system the sequencer is P4 code on the switch ASIC. Here
  it is RTL placed in front of the accelerator, so the path can be simulated
  end to end.
* The switch ASIC, its multicast engine, the 100G MAC/transceiver and the
  HMAC-vector alternative are not part of this RTL. The HMAC-vector variant
  computes one HalfSipHash MAC per receiver inside the switch pipeline.
* Known lint warnings: unused `busy` outputs of the arithmetic units,
  package constants not used by every module, and `rst_n` appearing both as
  the asynchronous reset and in the assertions' `disable iff`. There are no latches,
  combinational loops or multiply-driven nets.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NUM_GROUPS` | 64 | sequencer, hash chain | groups served; chain memory is `NUM_GROUPS` × 256 bits |
| `STOCK_DEPTH` | 16 | pre-computer | FIFO of precomputed pairs |
| `HIGH_WATER` | 4 | ratio controller | stock level at and above which every packet is signed |
| `RATIO` | 8 | ratio controller | one in `RATIO` packets signed below the high-water mark |
| `CW` | 130 | modmul | bound on `c = 2^256 − m`; both curve moduli fit |

Stream widths (512-bit packets, 256-bit hashes), field offsets and the curve
constants are in `rtl/aom_pkg.sv`.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=N failures=M`. The testbenches compare against models
written independently of the RTL, in `tb/tb_ref_pkg.sv`:

* a second SHA-256;
* ECDSA arithmetic using the simulator's 512-bit `*` and `%`;
* eight `(r, k⁻¹)` pairs for the fixed test seed, computed offline with an
  ordinary big-integer secp256k1 implementation.

Each testbench has a watchdog and checks the latencies listed above. Build
and run one with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_aom_pk_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/aom_pkg.sv tb/tb_ref_pkg.sv tb/tb_aom_pk_top.sv
./obj_dir/Vtb_aom_pk_top +verilator+rand+reset+2
```

* **`tb_aom_pk_top`** runs the whole path at the default parameters in a few
  seconds. It lets the stock fill to the high-water mark, then sends traffic for
  several groups that uses the stock up. It also covers an epoch change, an unknown group and output back-pressure. It
  counts each mechanism and fails if one never occurred: sign-all, ratio
  signing, ratio skipping, empty stock, signature wait, tx stall, chain
  restart and unknown-group drop.
* **`tb_aom_accel`** does the same for the accelerator alone at a small stock
  size.
* **`tb_ecdsa_precompute`** checks the first pairs bit for bit against offline values and
  reports about 35 000 cycles per pair.

To change the signing policy, edit the `decide` logic in
`rtl/sign_ratio_ctrl.sv`. To make the pre-computer faster, the
micro-operation tables in `rtl/ecdsa_precompute.sv` are independent of the
multiplier. Several `modmul` units, or a pipelined one with the same
start/done interface, can be dropped in.
