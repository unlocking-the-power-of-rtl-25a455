# FPISA: floating-point accumulation in a match-action switch pipeline

A programmable switch pipeline (PISA: a parser, a chain of match-action units
or MAUs, a traffic manager, a second chain of MAUs and a deparser) only does
integer work. Each MAU has simple integer ALUs, table lookups and register
arrays that a packet may touch once, at one stage only. A floating-point add
does not map onto that directly. It has to extract, align, add, renormalize
and assemble, and its renormalize step feeds the exponent back from the
mantissa result. That loop cannot run in a pipeline that a packet walks
through exactly once.

This design gets around the loop with three ideas:

1. **Exponent and mantissa live apart.** Each accumulator is an 8-bit
   exponent in one MAU's register array and a 32-bit two's-complement
   mantissa in a later MAU's array. Each stage touches only its own field.
2. **The stored value is never renormalized.** The accumulator may hold a
   mantissa that has grown past its leading-one position, such as `10.0 x 2^1`.
   That value is correct, just not canonical. Renormalization is done only on
   the copy that leaves with the packet, in the egress pipeline. So nothing
   has to flow back into the stored exponent.
3. **The mantissa register is wider than the mantissa.** An FP32 significand
   with its implied 1 has 24 bits. In a 32-bit signed register that leaves 7
   bits of headroom for carries: 128 additions of the largest mantissa at one
   exponent fit without overflow.

The result is an in-network floating-point accumulator at line rate, one
packet per clock. It serves gradient aggregation for distributed training
(the workers' gradient vectors are summed element-wise in the switch) and
SUM/group-by aggregation for distributed database queries. Either way the
hosts no longer convert values to fixed point or swap their byte order.

The RTL builds the full proposal, including two ALU extensions that current
switch silicon lacks:

- a shift whose distance comes from a metadata field rather than an
  immediate;
- a stateful unit that reads, shifts, adds and writes a register in one
  stage.

It also builds a byte-order conversion done by the parser and deparser.

## The stored number

For FP32 at the default parameters (`EXP_W=8`, `FRAC_W=23`, `MREG_W=32`):

```
exponent array (MAU2)   [7:0]   biased exponent, the larger of all inputs seen
mantissa array (MAU4)   [31:0]  signed significand, right-aligned:
                                  bits 31..24  sign and headroom
                                  bit  23      implied 1 of a normal input
                                  bits 22..0   fraction
value = mantissa * 2^(exponent - 127 - 23)
```

- The exponent field of a packet value becomes the effective exponent.
- A zero field (zero or subnormal input) is read as effective exponent 1
  with no implied 1, so subnormals add exactly.
- Signs are folded into the mantissa. Addition and subtraction are then the
  same integer add, and a sum that crosses zero needs no special case.

Every accumulator slot is one entry of each array, selected by the packet's
slot index. `SLOTS=256` by default.

`LANES` copies of the whole datapath run side by side, one per payload
element. Element `i` goes to lane `i`, and all lanes use the packet's slot.
The default is one lane: one floating-point add per packet, which is what one
pipeline of current hardware holds. More lanes correspond to several modules
deployed in parallel in the same stages.

## Packet operations

Each packet carries an operation code (`fp_op_e` in `fpisa_pkg`), a slot
index, a byte-order flag and `LANES` floating-point elements.

| op | effect on slot | what the packet carries out |
|----|----------------|-----------------------------|
| `FP_ADD`   | accumulator += element | new sum, normalized |
| `FP_SUB`   | accumulator -= element | new sum, normalized |
| `FP_WRITE` | accumulator = element (exponent and signed mantissa loaded) | the element, renormalized |
| `FP_READ`  | unchanged | current sum, normalized |

Every packet leaves with the slot's current value. An aggregation round is:

1. WRITE the first contribution, or 0.0, to clear the slot.
2. ADD the remaining contributions.
3. READ, or use the output of the last ADD.

## Ingress: extract, align, add (MAU0 to MAU4)

| stage | module | work |
|-------|--------|------|
| parser | `fpisa_parser` | capture the fields, swap each element's bytes if `in_convert` |
| MAU0 | `fpisa_extract` (first half) | split each element into sign, exponent field and fraction field |
| MAU1 | `fpisa_extract` (second half) | OR in the implied 1; map exponent field 0 to 1 |
| MAU2 | `fpisa_exp_align` | exponent register array: compare, keep the larger, compute both shift distances |
| MAU3 | `fpisa_meta_shift` | shift the packet's mantissa right by its distance |
| MAU4 | `fpisa_rsaw` | mantissa register array: read, shift the stored value, add or subtract, write |

### Alignment is split across three stages

This is the subtle part of the ingress. It is why MAU4 needs a new kind of
stateful unit.

MAU2 compares the packet's exponent `e_p` with the stored exponent `e_s` of
the slot and handles two cases.

- **`e_p >= e_s`:**
  - the array takes `e_p`;
  - the stored mantissa must move right by `e_p - e_s` (`mem_shift`);
  - the packet mantissa stays put (`meta_shift = 0`).
- **`e_p < e_s`:**
  - the array keeps `e_s`;
  - the packet mantissa moves right by `e_s - e_p` (`meta_shift`);
  - the stored one stays (`mem_shift = 0`).

Both distances travel on in metadata. No stage can look back, so MAU2 decides
and later stages act:

- **MAU3** shifts the *packet* mantissa. Its shift distance comes from a
  metadata field. That needs the two-operand shift
  (`shr meta.distance, meta.value`) of `fpisa_alu`; a stock switch ALU only
  shifts by an immediate. A small exact-match on the op code picks the ALU
  instruction:
  - logical right shift for ADD/SUB;
  - pass for WRITE;
  - zero for READ, so nothing is added.
- **MAU4** shifts the *stored* mantissa. A register array can be updated from
  one stage only, so the shift and the add must happen in one atomic
  read-modify-write. `fpisa_rsaw` (read-shift-add-write) does this:
  1. read `man_mem[slot]`;
  2. shift it arithmetically right by `mem_shift`;
  3. add the packet mantissa, or subtract it when the packet's sign XOR
     (op is SUB) is 1;
  4. write the sum back.

  The new signed sum and the slot's exponent then leave ingress as metadata.

Shift distances of the register width or more saturate: to 0 for a logical
shift, to the sign for an arithmetic one. A value whose exponent is 32 or more
below the other operand therefore does not wrap around. A positive value
vanishes. A negative stored value becomes -1 unit, as rounding toward minus
infinity requires.

### Overflow

Headroom protects sums of many values at one exponent, not unbounded ones.
When the signed add in MAU4 overflows:

- the wrapped sum is stored;
- the packet's `ovf` bit is set and carried out on `out_ovf`.

Handling it is left to the application.

## Egress: delayed renormalization (MAU5 to MAU8)

The egress stages see only the metadata copy of the new accumulator: signed
mantissa `m` and exponent `e`. They turn it into a normal FP32 word and never
write state.

| stage | module | work |
|-------|--------|------|
| MAU5 | `fpisa_to_unsigned` | sign = `m[31]`, magnitude = `|m|` |
| MAU6 | `fpisa_lzc_shift` with `lpm_tcam` | find the leading 1; shift it to bit 23 |
| MAU7 | `fpisa_exp_adjust` | exponent += right-shift distance, or -= left-shift distance |
| MAU8 | `fpisa_merge` | `{sign, exponent[7:0], magnitude[22:0]}` |
| deparser | `fpisa_deparser` | swap the bytes back if the packet's tag bit is set |

### Counting leading zeros with a routing table

Renormalization needs the position of the magnitude's leading 1. Switch ALUs
have no count-leading-zeros operation, but every switch has a TCAM
longest-prefix-match (LPM) table, the structure used for IP route lookup.

Treat the 32-bit magnitude as an IPv4 address. Entry `i` of the table has
value "only bit `i` set" and prefix length `32 - i`. That prefix is all the
zeros above bit `i`, followed by the 1 at bit `i`. Several entries can match a
key, one for every 1 bit of it. The longest matching prefix, though, is the
entry whose 1 is the key's *leading* 1. Bits below it are outside that
entry's mask.

The matched entry's action data is the shift that moves the leading 1 to bit
23:

| entry (CIDR)    | leading 1 at bit | action        |
|-----------------|------------------|---------------|
| 64.0.0.0/2      | 30               | right shift 7 |
| ...             | ...              | ...           |
| 1.0.0.0/8       | 24               | right shift 1 |
| 0.128.0.0/9     | 23               | no shift      |
| 0.64.0.0/10     | 22               | left shift 1  |
| ...             | ...              | ...           |
| 0.0.0.1/32      | 0                | left shift 23 |

How the table is filled and used:

- Bit 31 has no entry. A non-negative sum never sets it.
- A magnitude of 0 matches nothing. The miss (`zero = 1`) gives a signed zero
  at the merge.
- The entries are loaded at reset from a formula (`init_entry` in
  `lpm_tcam.sv`).
- A control plane can rewrite any entry through `tcam_wr_*`. The top drives
  every lane's table from that one port.
- The lookup is a priority search over prefix lengths, done combinationally.

MAU6 uses the matched action for two things:

- it drives the same two-operand shift ALU, `shr`/`shl` by the table's
  distance;
- it passes the direction and distance on to MAU7, which adds or subtracts
  the distance from the exponent.

The exponent in MAU7 is kept two bits wider and signed. That lets MAU8
detect results outside the normal range:

- exponent <= 0 becomes a signed zero (flush to zero);
- exponent >= 255 becomes a signed infinity.

### Worked example: 3.0 + 1.0

1. Slot 0 is loaded by WRITE 3.0: exponent 128, mantissa `0x00C0_0000`
   (`1.1b`).
2. ADD 1.0 arrives: exponent 127, mantissa `0x0080_0000`.
3. MAU2 keeps 128 and sets `meta_shift = 1`.
4. MAU3 gives `0x0040_0000`.
5. MAU4 stores `0x00C0_0000 + 0x0040_0000 = 0x0100_0000`. That is
   `10.0b x 2^1`: correct but not normalized.
6. In egress, the magnitude `0x0100_0000` is the address 1.0.0.0. It matches
   1.0.0.0/8, so the action is right shift 1.
7. MAU7 makes the exponent 129.
8. The merge gives `0x4080_0000` = 4.0.

The slot itself still holds exponent 128, mantissa `0x0100_0000`.

## Byte order in the parser

Hosts are little-endian and the network is big-endian. Converting every
payload element on the host costs CPU time, and a 100 Gb/s FP16 stream needs
about a dozen cores for it. Here the conversion is done in hardware:

- The parser reverses the bytes of each element when the packet's
  `in_convert` flag is set. It records the flag as a tag bit.
- The tag bit travels with the packet through both pipelines (`ig_tag`,
  `eg_tag`).
- The deparser reverses the bytes of the outgoing elements when the tag is
  set.

A packet thus leaves in the byte order it came in with. The conversion is
pure wiring plus a 2:1 multiplexer per element.

## Interface and timing (`fpisa_switch`)

All stages are one clock each. Throughput is one packet per clock, with no
backpressure.

```
in_*  --(parser + MAU0..MAU4: 6 clocks)-->  ig_*  ==traffic manager==>  eg_*
eg_*  --(MAU5..MAU8 + deparser: 5 clocks)-->  out_*
```

- `in_valid, in_op, in_slot, in_convert, in_payload[LANES*32]`: packet in.
- `ig_valid, ig_tag, ig_exp[L], ig_mant[L], ig_ovf[L]`: metadata handed to
  the traffic manager.
- `eg_*`: the same bundle as it comes back from the traffic manager, in
  order.
- `out_valid, out_payload, out_ovf[L]`: packet out.
- `tcam_wr_en, _idx, _valid, _value, _plen, _dir, _amt`: write one entry of
  the renormalization table in every lane. The write takes effect on the next
  clock.
- Reset (`rst_n`, asynchronous, active low) clears both register arrays, so
  every slot starts as +0.0. It also reloads the LPM table.

The traffic manager (queues, buffers, scheduling) is outside this design. It
is connected through the `ig_*`/`eg_*` ports. The testbenches use
`tb/fpisa_tm_model.sv`, a fixed in-order delay line; a packet's total latency
is then 11 clocks plus that delay.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `LANES`  | 1   | elements (parallel adders) per packet |
| `EXP_W`  | 8   | exponent width of the format |
| `FRAC_W` | 23  | fraction width of the format |
| `MREG_W` | 32  | width of the signed mantissa register; headroom = `MREG_W - FRAC_W - 2` bits |
| `SLOTS`  | 256 | accumulator slots per lane |

Other formats come from these parameters. For example, FP16 is `EXP_W=5`,
`FRAC_W=10` and `MREG_W=16`, which leaves 4 headroom bits, that is 16
worst-case additions. The LPM table derives its entries from `MREG_W` and
`FRAC_W`.

## Numerical behaviour

- **Rounding.** There are no guard bits. Every right shift in alignment and
  renormalization drops bits. On two's-complement values that rounds toward
  minus infinity. Results are deterministic, so the same packets in the same
  order give the same bits, but they are not IEEE 754 round-to-nearest. Error
  grows by about one unit in the last place per addition that shifts.
- **Order dependence.** The stored exponent only grows. Small values added
  after a large one lose their low bits at alignment. A sum that later
  cancels keeps the precision of the larger exponent: the egress
  renormalizes the copy, not the stored value.
- **Range.** NaN and infinity inputs are treated as ordinary exponent-255
  values, not as IEEE specials. Results below the normal range flush to zero.
  Results at or above exponent 255 become infinity.
- **Most negative sum.** A stored mantissa of exactly `-2^31`, which only
  overflow can produce, has no representable magnitude. It comes out as zero.

## Where this departs from the published design

- **Renormalization table.** The prose describes the example's leading 1 as
  matching 0.128.0.0/9 with a right shift of 1. The table figure maps
  0.128.0.0/9 to "no shift" and 1.0.0.0/8 to "right shift 1". The figure is
  also what the worked example's numbers need, so the table here follows the
  figure. Also, the prose calls the canonical leading-one position "bit 24";
  counted from 1 that is bit 23 counted from 0, which is what the RTL uses.
- **Packet format.** The op code, slot index, convert flag and READ/WRITE
  operations are this design's. The published design describes only the add
  path inside an aggregation protocol.
- **Not built:**
  - guard bits for rounding;
  - block floating point (one exponent shared by many values);
  - comparison (needed for Top-N and max/min queries);
  - multiplication (with an integer multiplier or table-lookup mantissa
    product);
  - table-based logarithm and square root;
  - the variant for existing switches, which overwrites or left-shifts
    instead of using the combined read-shift-add-write unit, because current
    hardware lacks it.
- **Outside the design:** the traffic manager, and the parse graph beyond
  the fixed fields above. Area and timing of the ALU extensions were judged
  in the original work on a standard-cell flow. This RTL makes no such claim.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` at the end and has a watchdog.
Expected values come from an integer reference model (`tb/fpisa_ref_pkg.sv`)
that is written independently of the RTL stages. It uses plain integer
arithmetic on exponent and 64-bit mantissa. For integer-valued sums, the
results are also compared with real arithmetic.

| testbench | what it runs |
|-----------|--------------|
| `tb_fpisa_switch` | 2 lanes, 8 slots, random ADD/SUB/READ/WRITE with and without byte swapping, forced overflow, a table rewrite. It counts alignment in both directions, renormalization right/left/none, zero results, overflow, conversions and table writes. A mechanism that never happened fails the test. Latency is checked on every packet. |
| `tb_fpisa_switch_full` | Default parameters. The 3.0 + 1.0 example, then an 8-worker x 256-element FP32 gradient aggregation and a read-back. It checks every packet bit-exactly, the 11 + delay latency, one packet per clock, and the error against double-precision sums. |
| `tb_fpisa_fp16_aggregation` | FP16 widths with 4 lanes: 8 workers aggregating a 64-element vector. |
| `tb_fpisa_groupby_sum` | Default parameters: a 3000-row, 64-group SUM group-by on FP32 prices hashed into slots. |

To simulate with Verilator 5 from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fpisa_pkg.sv tb/fpisa_ref_pkg.sv tb/tb_fpisa_switch_full.sv \
  -y rtl -y tb +libext+.sv --top-module tb_fpisa_switch_full
./obj_dir/Vtb_fpisa_switch_full
```

Replace the testbench name to run another one. The testbenches need
`--timing` for their clock and watchdog delays.

## Files

`rtl/` holds the following:

- `fpisa_pkg.sv`: op codes, ALU instructions, shift directions.
- `fpisa_alu.sv`: the switch ALU with register-distance shifts.
- `fpisa_parser.sv` and `fpisa_deparser.sv`.
- The stage modules listed above.
- `lpm_tcam.sv`.
- `fpisa_switch.sv`: the top.

`tb/` holds the testbenches, the reference model and the traffic-manager
delay model.
