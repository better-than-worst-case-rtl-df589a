# Better-than-worst-case surface-code decoding: RTL

Most syndrome rounds of a surface-code quantum computer are easy to decode.
Either nothing happened, or one physical qubit flipped and lit up a small,
unmistakable pattern of neighbouring checks. Only a small fraction of rounds
carry a pattern that needs a full matching decoder. This design splits the work
along that line.

- A tiny **Clique decoder**, one per logical qubit, sits next to the qubits. It
  corrects the easy rounds itself and flags the rest as *complex*.
- Complex rounds share a narrow **off-chip link** to an accurate decoder. The
  link is sized for a high percentile of the demand, not for the worst case.
- In the rare cycle where more decodes wait than the link can carry, the
  machine **stalls**. It issues one layer of identity gates to every qubit,
  which gives the link a cycle to catch up.

The RTL covers these digital parts for N_LQ logical qubits of a distance-D
rotated surface code. The defaults are 1000 logical qubits, distance 9, a
two-round measurement filter and at most 72 off-chip decodes per QEC cycle. It
is technology-independent SystemVerilog. The source design targets
superconducting (ERSFQ) logic, but the logic here is plain gates and
flip-flops.

```
 raw ancilla  ┌──────────────────────────┐ corr_x/corr_z (on-chip corrections)
 outcomes ───►│ clique_decoder  x N_LQ   │──────────────────────────────►
 syn_raw      │  meas_filter → cliques   │ cplx, evt   ┌──────────┐ pkt_* ─► off-chip
              └──────────────────────────┘────────────►│ bw_alloc │        decoder
                                                       └────┬─────┘
 program layers (in_layer) ──►┌───────────────┐   stall    │
                              │ idle_inserter │◄───────────┘
                              └──────┬────────┘
                                     └──► out_layer → waveform generator
```

## The lattice and its numbering (`btwc_pkg`)

A distance-d rotated surface code has d×d data qubits and d²−1 check (ancilla)
qubits.

- **Plaquettes.** The checks sit on the plaquettes of a (d+1)×(d+1) grid, where
  plaquette (i,j) touches data qubits (i−1..i, j−1..j).
  - A plaquette is X type when i+j is even, and Z type otherwise.
  - Every interior plaquette exists.
  - On the top and bottom rows only the X plaquettes exist, as weight-2 checks.
  - On the left and right columns only the Z plaquettes exist.
  - There are no corner plaquettes.
- **Numbering.** Ancillas are numbered in raster order over the plaquettes that
  exist, and data qubits as r·d+c.
- **Closed-form functions.** `btwc_pkg` computes the whole geometry in closed
  form, so elaboration stays fast at d=21 and at 1000 qubits:
  - `anc_exists`, `anc_index` and `anc_is_x`;
  - the diagonal neighbour offsets;
  - the masks of present neighbours and boundary data qubits.

X checks detect Z errors, so X-type cliques drive `corr_z`. Z checks detect X
errors and drive `corr_x`.

## Measurement filter (`meas_filter`)

Ancilla readout is itself noisy. The decoder therefore reports an *event* only
when a check's value flips and then stays flipped.

- The module keeps the last ROUNDS+1 raw outcomes b (oldest first).
- With two rounds, the event is `(b0 ^ b1) & ~(b1 ^ b2)`.
- Each extra round adds one more "and did not flip back" term.

A single wrong readout flips twice in a row, so it is suppressed. A real data
error shows up one round later than it happened. The inputs are raw outcomes,
and the filter does its own differencing.

## Clique decisions (`clique_logic`) — the core of the design

Every existing ancilla *a* is the centre of a clique. Its neighbours are the
four diagonally adjacent checks of the same type:

- p=(i−1,j−1) and q=(i−1,j+1);
- r=(i+1,j−1) and s=(i+1,j+1).

a shares exactly one data qubit with each of them:

- w=(i−1,j−1) with p;
- x=(i−1,j) with q;
- y=(i,j−1) with r;
- z=(i,j) with s.

A clique is *active* when a has an event.

- **Interior rule.** Count the set neighbours through the parity
  `~((p^q)^(r^s))`.
  - **Odd** (1 or 3 set): the error is local. Correct the shared data qubit
    towards every set neighbour: `w = a&p`, `x = a&q`, `y = a&r`, `z = a&s`.
  - **Even** (0, 2 or 4 set): raise COMPLEX. No single flip explains the
    pattern.
- **Edges and corners.** Here a clique lacks some neighbours, and some of its
  data qubits are *boundary* qubits that only this check of its type sees. This
  design uses one general rule for such cliques: they are complex only when the
  number of set neighbours is even **and non-zero**.
  - With no neighbour set, the error is a single flip of a boundary data qubit.
  - The first boundary qubit in w,x,y,z order is corrected. Any of them gives
    the same logical result, because they differ by a stabiliser.
  - This reproduces the two cases the source describes:
    - a clique with one neighbour is always trivial;
    - a clique with two neighbours is trivial when neither is set.
  - This rule is the design's own generalisation to every other edge shape.
- **Elaboration-time parameters.** The presence and boundary masks are fixed
  when the design elaborates (`NB_PRESENT`, `BND_DATA`). After optimisation,
  each clique is a handful of XOR, AND and NOT gates.

## One logical qubit (`clique_decoder`)

- **Cliques.** The decoder instantiates one filter over all d²−1 ancillas and
  one `clique_logic` per ancilla.
- **Corrections.** A data qubit sits between two diagonal pairs of same-type
  checks. It is flipped when either pair requests it.
- **Complex rounds.** If *any* active clique of either type is complex, the
  round is complex. All corrections are then suppressed, and the filtered event
  vector (`evt`) is the signature that goes off-chip.
- **Latency.** `dec_valid` follows `round_valid` by one clock. The only
  registers are the filter history.

The three signature classes are:

- *All-0s*: no event.
- *Local-1s*: events, decoded on-chip.
- *Complex*: the `is_complex` flag.

The top counts each class, which gives the on-chip coverage directly.

## Off-chip bandwidth allocation and overflow stalling (`bw_alloc`)

Each round, the allocator updates three things:

- **Waiting set.** It adds the new complex qubits to the qubits still waiting
  from earlier rounds (carry-overs).
- **Signatures.** A waiting qubit's new events are XOR-merged into its pending
  signature. One off-chip decode then covers everything that happened to that
  qubit, and its on-chip corrections are withheld meanwhile (`queued`).
- **Stall decision.** If the waiting set is larger than the provisioned
  `bw_limit`, the next QEC cycle is a stall cycle. `stall` is registered and
  holds until the next round.

Between rounds, the allocator sends the waiting qubits off-chip:

- It sends up to `bw_limit` packets, one per clock on a valid/ready link.
- Each packet holds a qubit id and a signature.
- Carry-overs go first, then new decodes, lowest index first within each group.

`bw_limit` is a run-time input so that the provisioning can be set from
measured statistics. At the defaults, 1000 logical qubits need about 55 off-chip
decodes per cycle at the median. A 30 % margin gives a high percentile of about
72, which is the `LANES` default and the largest value `bw_limit` may take.

## Idle-gate insertion (`idle_inserter`)

This block sits in front of the waveform generator and issues one gate layer per
`layer_tick`. The opcode per qubit is I, X, Y, Z, H, T, CX control, CX target or
measure.

- **Stall cycle.** It issues an all-identity layer flagged `out_stalled`, and
  holds the program: `in_ready` stays low.
- **No program layer ready.** It issues an identity bubble, counted separately.
- **Otherwise.** It issues the next program layer unchanged.

An assertion checks that every stalled layer is all identity.

## System timing (`btwc_top`)

One clock domain is used, and a QEC cycle spans many clocks.

1. `round_valid` latches all raw syndromes.
2. One clock later, `corr_valid` pulses with the on-chip corrections. At the
   same time, the round is handed to the allocator.
3. `stall` is valid on the clock after that. `layer_tick` must therefore come
   at least 2 clocks after `round_valid`.
4. The QEC cycle must last at least `bw_limit`+2 clocks so that the whole
   provisioned budget can leave.

The statistics outputs are:

- rounds, overflows, packets sent;
- stall, bubble and issued layers;
- All-0s, Local-1s and complex qubit-rounds.

The qubits, the accurate off-chip decoder, the cryogenic link, the pulse
generators and the superconducting cell library are not part of this RTL. They
connect through the ports named above.

## Where this RTL makes its own choices

These parts follow the source design:

- the two-round persistence filter;
- the clique parity gates and correction ANDs;
- the two edge-clique special cases;
- the complex/trivial split;
- stalling the cycle after an overflow, with identity gates on all qubits;
- carry-overs handled in the stall cycle;
- the sizes 1000 / 9 / 2 / 55×1.3.

These are choices of this implementation, and the places to look first if
behaviour differs from a reference:

- the general edge rule and which boundary qubit is corrected;
- one COMPLEX flag shared by the X and Z halves of a logical qubit;
- XOR-merging a waiting qubit's events and withholding its on-chip corrections;
- the packet link: one packet per clock, valid/ready, carry-over-first,
  lowest-index order;
- the gate opcode encoding;
- synchronous active-low reset everywhere;
- the one-clock decode latency.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_meas_filter` | 600 random rounds against the filter formula. Covers ROUNDS=2 and 3, and holding between rounds. |
| `tb_clique_logic` | Exhaustive over all inputs for interior, one-, two-neighbour and edge clique shapes. |
| `tb_clique_decoder` | d=7, 1500 episodes: single errors, chains, measurement glitches and random clusters. Checked against an independent lattice model (`sc_ref_pkg`). On-chip corrections must clear the syndrome, and single errors must never be complex. |
| `tb_bw_alloc` | 16 qubits, bursts of complex rounds, random provisioning and back-pressure. Checked against a transaction model: waiting set, stall, packet order and signatures, and the per-round budget. |
| `tb_idle_inserter` | A random 300-layer program under random stalls and gaps. The program must come out complete and in order. |
| `tb_btwc_top` | End to end with 8 qubits, d=5, 2 lanes, 600 QEC cycles. Every mechanism must occur: All-0s, on-chip decode, complex, overflow, stall layer, carry-over, withheld correction, glitch, back-pressure. |
| `tb_btwc_full` | The top at its defaults (1000 qubits, d=9, 72 lanes). 300 single errors and 80 chains in one cycle cause one overflow: 72 decodes go off-chip, 8 carry over into the stall cycle. Every qubit's corrections and every packet are checked. |

To simulate with plain Verilator (two-state, so every register is reset):

```
verilator --binary --timing --assert -y rtl -y tb rtl/btwc_pkg.sv tb/sc_ref_pkg.sv \
          tb/tb_btwc_top.sv --top-module tb_btwc_top -Mdir obj && obj/Vtb_btwc_top
```

Drop `tb/sc_ref_pkg.sv` for the leaf testbenches that do not use the model.

The full-size build has 1000 decoders of 80 cliques each. Verilator needs about
15 minutes to compile it, while the simulation itself runs in under a second. It
passes: the overflow cycle sends 72 packets, and the stall cycle sends the 8
carry-overs.

To change the size, override `N_LQ`, `D`, `ROUNDS` and `LANES` on `btwc_top`.
D must be odd and at least 3. Any distance elaborates. The clique masks are
computed, not tabulated.
