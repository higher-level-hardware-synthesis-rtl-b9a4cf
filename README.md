# KASUMI with one reused round: a stream-based block cipher in SystemVerilog

KASUMI is the 64-bit block cipher with a 128-bit key that underlies the 3GPP
confidentiality and integrity functions (f8, f9). This RTL builds it the way
I. W. Damaj's "Higher-Level Hardware Synthesis of the KASUMI Algorithm"
(J. Comput. Sci. & Technol., 2007) derives it from a functional
specification. The result is a `foldl`: the cipher is one round function
folded over a list of four subkey "packs". The design here is the
resource-saving form of that fold. A key schedule produces the packs, they are
sent as a stream closed by an end-of-transmission (EOT) message, and a single
round unit is applied once per pack. The paper calls this
`KASUMI = KEYSCHEDULE || SVFOLDL(SINGLEROUND)`, and its best result, a
stream-based design with the F-functions written as plain operators, has this
shape.

The RTL is synthesizable SystemVerilog-2017. Its ciphertexts agree with an
independent software model of KASUMI on every test vector used, including the
3GPP test set 1 vector (key `2BD6459F82C5B300952C49104881FF48`, plaintext
`EA024714AD5C4D84`, ciphertext `DF1F9B251C0BF45F`).

## The cipher as four rounds of two subrounds

KASUMI is an eight-step Feistel network on two 32-bit halves. The paper groups
the steps in pairs, giving four identical *rounds* of two *subrounds*:

```
 first subround  (odd step):   l1 = r0 ^ FO(FL(r1))      out = l1 ++ r1
 second subround (even step):  l2 = r1 ^ FL(FO(r2))      out = l2 ++ r2
```

Each subround splits its 64-bit input into a left half (bits 63..32) and a
right half (bits 31..0). It passes the left half through the two keyed
functions and XORs the result into the right half. The result becomes the new
left half, and the old left half becomes the new right half. The odd
subround applies FL first; the even one applies FO first. This is the only
difference between them (`first_subround.sv`, `second_subround.sv`;
`single_round.sv` chains them).

The keyed functions, from the outside in:

| function | width | key | structure | module |
|---|---|---|---|---|
| FL | 32 | KL_i1, KL_i2 | `R' = R ^ ROL1(L & KL1)`, `L' = L ^ ROL1(R' \| KL2)` | `kasumi_fl` |
| FO | 32 | KO_i1..3, KI_i1..3 | 3-step Feistel ladder: `R_j = FI(L_{j-1} ^ KO_ij, KI_ij) ^ R_{j-1}`, `L_j = R_{j-1}` | `kasumi_fo` |
| FI | 16 | KI_ij | 4-step unbalanced Feistel on a 9-bit and a 7-bit half, through S9, S7, S9, S7 | `kasumi_fi` |
| S7, S9 | 7, 9 | none | fixed bijective look-up tables | `kasumi_s7`, `kasumi_s9` |

The paper describes FO as a three-step ladder of FI and FI as a four-step
structure on S7 and S9, and it names FL as the linear layer. It gives no
equations for them and no table contents. The equations and both tables
follow the KASUMI specification, 3GPP TS 35.202. Inside FI, a 7-bit value is
zero-extended to meet a 9-bit one, and a 9-bit value is truncated to its low 7
bits to meet a 7-bit one. The key enters in the second step: its low 9 bits go
to the 9-bit half and its high 7 bits to the 7-bit half.

Each S-box is a constant array held inside its module, 16 decimal entries per
line in index order, so synthesis sees the contents. One round uses 12 S9 and
12 S7 lookups. All F-functions are combinational. This is the paper's
"modified F-block" refinement, where each F-block is written with plain
operators rather than as communicating processes.

## Subkeys, packs and the key schedule

The key schedule (`key_schedule.sv`) is the hardest part to follow. It is
also where the paper gives the most detail, as a network of list operations
(its Fig. 4). The RTL copies that network stage for stage:

1. **SEGS.** Cut the 128-bit key into eight 16-bit words `K1..K8`, with `K1`
   the most significant.
2. **Left path.** Make four copies of the list `[K1..K8]` and rotate them
   *as lists* by 0, 1, 5 and 6 places: element `i` of a copy rotated by `s`
   is `K(i+s mod 8)`. Then rotate each 16-bit word left by 1, 5, 8 and 13 bits
   respectively. The four lists are `KL_i1`, `KO_i1`, `KO_i2` and `KO_i3` for
   `i = 1..8`.
3. **Right path.** XOR the words with the constants 291, 17767, 35243, 52719,
   65244, 47768, 30292 and 12816 (`0x0123 ... 0x3210`) to get `K'1..K'8`.
   Make four copies rotated as lists by 2, 4, 3 and 7 places. These are
   `KL_i2`, `KI_i1`, `KI_i2` and `KI_i3`, with no bit rotation.
4. **TRANSPOSE and GROUP.** Gather the eight subkeys of step `i` into the
   groups `[KL] [KO] [KI]` (type `round_keys_t`).
5. **MERGE.** Put steps `2p+1` and `2p+2` into pack `p+1` (type `pack_t`):
   the odd-subround groups first, then the even ones. The result is four packs
   of 16 subkeys, 1024 bits in all.

The same list operations in closed form:

```
KL_i1 = K_i <<< 1        KL_i2 = K'_{i+2}
KO_i1 = K_{i+1} <<< 5    KI_i1 = K'_{i+4}
KO_i2 = K_{i+5} <<< 8    KI_i2 = K'_{i+3}
KO_i3 = K_{i+6} <<< 13   KI_i3 = K'_{i+7}        (indices mod 8, 1-based)
```

The paper states the left path three times, and the statements disagree. Its
functional specification and its figure give list rotations `[0, 1, 5, 6]`
and word rotations `[1, 5, 8, 13]`. Its process-network equation writes
`[1, 1, 5, 6]` and an identity for the first word rotation. The RTL follows
the specification and the figure, which also agree with the 3GPP standard.
The alternative gives wrong ciphertexts.

The key schedule is combinational. Its packs are valid in the same cycle as
the key register that feeds them.

## Folding one round over a stream of packs

The cipher is `foldl singleRound plaintext packs`. The stream-based design
turns that fold into three small units, joined by a stream channel
(`stream_if.sv`):

- **`stream_if`** is a valid/ready channel of a parameter type. A transfer
  takes place on a rising edge where `valid && ready`. An extra bit `eot`
  marks the message that closes the stream, and that message's data is
  ignored. The paper's streams carry EOT on a separate channel; here it is a
  flagged message on the same handshake. An assertion in the interface checks
  that `valid`, `data` and `eot` hold still until the transfer.
- **`vector_to_stream`** turns the vector of four packs into a stream. A
  `load` pulse starts it. It then offers `vec[0]` to `vec[N-1]`, one per
  transfer, followed by the EOT message. `busy` is high until the EOT
  transfer. It indexes the vector instead of copying it, so the vector must
  stay stable while `busy` is high. In the top level this holds, because the
  vector is the key schedule's output of a registered key.
- **`svfoldl`** holds the fold value in a 64-bit accumulator and has one
  `single_round`. In `IDLE` it accepts the seed, the plaintext. In `FOLD` it
  accepts one pack per cycle and writes `single_round(acc, pack)` back into
  the accumulator. The EOT message moves it to `DONE`, where the accumulator
  is offered as the result until it is accepted.

`kasumi.sv` is the top level. It takes a plaintext and its key together,
registers the key, starts the pack stream and seeds the fold in the same
cycle:

```
cycle      0         1       2       3       4       5      6
in         accept
packs                pack1   pack2   pack3   pack4   EOT
acc        <-pt      R1      R2      R3      R4
out_valid                                                   1 (held until out_ready)
```

With `out_ready` held high, `out_valid` rises 6 cycles after the cycle in
which the block was accepted. `in_ready` returns one cycle after the output
transfer, so a new block can start every 7 cycles. Different blocks may use
different keys at no extra cost, because the key schedule works from the key
register with no setup time.

### Ports of `kasumi`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid` / `in_ready` | in / out | 1 | handshake for a new block |
| `in_data` | in | 64 | plaintext; bit 63 is the first bit of the block |
| `in_key` | in | 128 | key; bits 127..112 are K1 |
| `out_valid` / `out_ready` | out / in | 1 | handshake for the ciphertext |
| `out_data` | out | 64 | ciphertext, stable while `out_valid` |

A reset in the middle of a block drops that block, and the unit is ready
again in the next cycle.

## How far it follows the paper

**Taken from the paper:**

- the division into four rounds of an odd and an even subround;
- the subround equations and the order of FL and FO in each subround;
- the forwarding of even-subround keys from the first subround to the second;
- the key schedule's constants, rotations and pack layout;
- the stream-based fold of a single round (`SVFOLDL`) fed by a stream of packs;
- F-blocks written as plain operators.

**Taken from the KASUMI standard, because the paper leaves it out:** the S7
and S9 contents and the equations inside FL, FO and FI.

**This design's own choices:**

- One round per clock, with fully combinational F-blocks. The paper's
  Handel-C version of this architecture took 519 clock cycles per block at
  72.71 MHz (32 Mbit/s measured). That count comes from its Handel-C
  channel communication between processes, which this RTL replaces with
  wires and one register per round. At the same clock
  rate, 64 bits every 7 cycles would be about 660 Mbit/s. The critical path
  here, one full round of two FL and two FO (six FI, 24 S-box lookups in
  series), is much longer than the paper's, so that clock rate should not be
  assumed.
- valid/ready handshakes in place of blocking CSP channels, and EOT as a
  flagged message.
- The bit order, taking the head of a bit list as the most significant bit.
- Asynchronous active-low reset.

**Other configurations:** the paper also proposes fully pipelined variants,
with four `SINGLEROUND` copies in a chain fed by the whole vector of packs
(its first and third designs). It offers them as alternatives, and the first
did not fit its FPGA. This RTL is the stream-based form only. A pipelined
form can be assembled from the same `single_round` and `key_schedule`.

## Sizes

One `single_round` holds 2 FL, 2 FO, 6 FI and 12 lookups each of S9 and
S7. The registers are the 128-bit key, the 64-bit accumulator, the fold state
and the stream counter, about 200 flip-flops. Besides the read-only S-box
tables there is no memory. The key schedule is only wiring, XORs with
constants and fixed rotations.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
Expected values come from an independent software model of KASUMI and are
written into the testbenches as constant tables. The S-box testbenches also
check that each table is a bijection over all inputs. `tb_kasumi` runs the
complete cipher at its only configuration on 24 blocks, including the 3GPP
vector. It makes every mechanism happen and counts each one:

- the pack stream and its EOT;
- output back-pressure;
- input waiting;
- key change and key reuse between blocks;
- a reset in the middle of a block.

It also checks the 6-cycle latency and the 7-cycle spacing of back-to-back
blocks. With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_kasumi \
    -y rtl -y tb +libext+.sv rtl/kasumi_pkg.sv tb/tb_kasumi.sv
./obj_dir/Vtb_kasumi
```

Replace `tb_kasumi` with any other testbench name to test one unit, for
example `tb_key_schedule`, `tb_svfoldl` or `tb_kasumi_fi`.

## Files

| file | contents |
|---|---|
| `rtl/kasumi_pkg.sv` | subkey and pack types, key constants, `rol16` |
| `rtl/kasumi_s7.sv`, `rtl/kasumi_s9.sv` | S-boxes |
| `rtl/kasumi_fi.sv`, `rtl/kasumi_fo.sv`, `rtl/kasumi_fl.sv` | F-functions |
| `rtl/first_subround.sv`, `rtl/second_subround.sv`, `rtl/single_round.sv` | one round |
| `rtl/key_schedule.sv` | four packs of subkeys from the key |
| `rtl/stream_if.sv` | stream channel with EOT |
| `rtl/vector_to_stream.sv` | vector of packs to a stream |
| `rtl/svfoldl.sv` | the fold of one round over the pack stream |
| `rtl/kasumi.sv` | top level |
| `tb/tb_*.sv` | one testbench per module; `tb_kasumi` is end to end |
