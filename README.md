# Stochastic rounding and saturation accelerator

Fixed-point code on a small integer/float processor often multiplies two 32-bit
numbers into a 64-bit product. It then has to bring the product back to a 32-bit
format: cut it at some bit position, round it, and clamp it if it overflows.
Done in software, this takes a handful of shift, mask, add and compare
instructions across two registers. Stochastic rounding (SR) makes it worse,
because each operation also needs a pseudorandom number. This accelerator does
the whole round-and-saturate step as a memory-mapped peripheral. The processor
writes the unrounded value to an address and reads the rounded, saturated value
back three or four bus cycles later.

The design follows the accelerator described by M. Mikaitis in "Stochastic
Rounding: Algorithms and Hardware Accelerator", which was built for the Arm
Cortex-M4F processing elements of SpiNNaker2. That description gives the
datapath as a block diagram and states the operations and the latency. It does
not give the address map, the bus-side control, the meaning of the overflow
flags or the bfloat16 details. This RTL fills those in with its own choices,
which are listed in "Where this RTL departs from the source".

## What one operation computes

An operation takes an operand *X* and a rounding amount *n* (1 to 32 bits). It
drops the low *n* bits of *X* and returns the rest, rounded and clamped to the
output format. The low *n* bits are the *residual*; read as a fraction, they are
a number in [0, 1). The two round modes are:

* **Round to nearest, ties up (RN):** round up when the residual is at least one
  half, that is `(X + 2^(n-1)) >> n`.
* **Stochastic rounding (SR):** round up with probability equal to the residual.
  This is done by addition: add an *n*-bit random number *P* to *X* and shift,
  `(X + P) >> n`. The carry out of the residual bits is 1 with exactly the wanted
  probability.

`>>` is an arithmetic shift, so negative two's-complement values round towards
minus infinity before the round-up is added, as the definition of SR requires.
The result is then saturated. A value above the format's maximum returns the
maximum, and a value below the minimum returns the minimum.

| format (address field) | operand | result | bus writes |
|---|---|---|---|
| 0: 64 -> 32 | 64-bit, signed or unsigned | 32-bit | 2 (low word, then high word) |
| 1: 32 -> 32 | 32-bit | 32-bit | 1 |
| 2: 32 -> 16 | 32-bit | 16-bit, sign- or zero-extended in the read word | 1 |
| 3: 16 -> 16 | bits 15:0 of the written word | 16-bit, extended as above | 1 |
| 4: binary32 -> bfloat16 | IEEE single | bfloat16 in bits 15:0 | 1 |

The configuration register holds the rounding position *c* (5 bits): *n* = *c* + 1.
For example, a 64-bit s32.31 product of an s16.15 and a u0.16 number has 31
fractional bits. Bringing it back to s16.15 drops 16 bits (*c* = 15, format 0).
Rounding a u0.32 fraction to s16.15 drops 17 bits (*c* = 16, format 1).

## The datapath: one wide window and three slices

The diagram this RTL follows computes everything from one 127-bit vector
(`sr_field_select`):

```
 126            95                            31            0
 +--------------+-----------------------------+-------------+
 | 32 ext bits  |   64-bit data field         |  31 zeros   |
 +--------------+-----------------------------+-------------+
```

Data bit 0 sits at vector bit 31. The 32 extension bits and the unused upper part
of the data field hold copies of the operand's sign bit (bit 63, 31 or 15) for
signed operations and zeros otherwise. With position *c*, three 32-bit slices are
taken with a variable base:

| slice | vector bits | holds |
|---|---|---|
| `residual` | `[c+31 : c]` | the *c*+1 dropped bits, left aligned, zeros below |
| `unrounded` | `[c+63 : c+32]` | the truncated result (data bits *c*+32 .. *c*+1) |
| `above` | `[c+95 : c+64]` | the 32 bits above the result, for overflow checks |

The 31 zero bits exist so that the residual slice never runs off the bottom, even
when only one bit is rounded. The 32 extension bits exist so that the `above`
slice never runs off the top. The largest index used is 31 + 95 = 126.

The residual is left aligned. So the top bit of the `residual` slice is always
the half-unit bit, whatever *c* is. Round to nearest uses that bit (`bit_31`) as
the round-up bit. Stochastic rounding adds a random word to the residual slice.
Only the carry out (`c_out`) is kept (`sr_round_decision`). A 2-input
multiplexer picks `bit_31` (round mode 1) or `c_out` (round mode 0). A 32-bit
adder then adds the chosen bit to `unrounded` (`sr_round_core`).

Because the residual is left aligned, a 32-bit random word *R* against a
residual of *n* bits carries exactly when `residual + (R >> (32-n)) >= 2^n`. In
other words, the hardware performs `(X + P) >> n` with *P* taken as the top *n*
bits of the random word. Any *n* bits of a uniform word are uniform, so the
rounding probabilities are exact for every *n* up to 32.

**Narrow random adders (`SR_BITS`).** The source evaluates versions with an 8-,
16- and 32-bit adder for the random addition, to save area and leakage. With
`SR_BITS` = *k* < 32, only the top *k* bits of the residual are added to the low
*k* bits of the random word. Residual bits below those *k* are ignored. Rounding
probabilities are then quantised to multiples of 2^-*k*. This matters when more
than *k* bits are dropped: in the harmonic-series example, addends whose residual
lies entirely below the top *k* bits can no longer round up. `SR_BITS` defaults
to 32, the version shown in the diagram.

## Overflow and saturation

`sr_overflow_detect` turns `above` and `unrounded` into four flags
(`sr_pkg::ovf_t`). They say whether the *unrounded* value lies above the
maximum or below the minimum of a 32-bit and of a 16-bit result. For a signed
32-bit result the value is in range when all 32 `above` bits equal the result's
top bit. For an unsigned result they must all be zero. The 16-bit flags apply
the same test to the 48 bits above bit 15.

Rounding up can itself overflow, when the unrounded value equals the maximum.
The flags cannot see that, so `sr_saturate` also looks at the adder:

* signed: the value was in range and non-negative (unrounded top bit clear), but
  the sum's top bit is set;
* unsigned: the adder carried out of bit 31 (or out of bit 15 for 16-bit results).

Rounding up can never push a value below the minimum.

Saturation is not done in the round cycle. The round cycle registers the sum
(33 bits), the two unrounded sign bits and the four flags (`sr_pkg::rounded_t`).
`sr_saturate` clamps them combinationally while the read data phase is on the
bus. It uses the format and signedness of the **read** address, as the source
describes. Software is expected to read back from the same address it wrote.
Reading from a different format's address applies that format's clamp to the
stored result.

## bfloat16

bfloat16 is the top 16 bits of a binary32 number. `sr_round_core` rounds it by
feeding the 31-bit magnitude through the fixed-point datapath as an unsigned
32-bit operand, with 16 bits to round. The configuration register is ignored.
The sign is then put back. A carry out of the 7-bit mantissa moves into the
exponent, which gives the right result across binade boundaries. It also lets a
value in the top binade round to infinity, the IEEE behaviour for overflow; there
is no clamp to the largest finite value. SR therefore follows the usual
floating-point definition: the magnitude is rounded away from or towards zero
with probability proportional to the dropped magnitude. Infinity passes
unchanged, because its residual is zero. A NaN is returned as a quiet NaN that
keeps its sign and top six payload bits. Rounding it like a number could turn
it into infinity.

## Bus interface and timing

`sr_accel` is an AHB-Lite slave (ports `HSEL`, `HADDR`, `HTRANS`, `HWRITE`,
`HSIZE`, `HWDATA`, `HREADY` in; `HRDATA`, `HREADYOUT`, `HRESP` out). It expects
32-bit word accesses, and an assertion checks `HSIZE`. `HRESP` is always OKAY.
Address map, as byte offsets in a 4 KB window (`ADDR_W` = 12):

| offset | register |
|---|---|
| `0x000` | configuration, bits 4:0 = rounding position *c* (read/write) |
| `0x100`-`0x1FC` | operation addresses: `HADDR[7:2]` = {format[2:0], signed, round mode, high word} |

Round mode 1 is nearest and 0 is stochastic. For format 0, the low word goes to
the address with high-word bit 0, and the high word to the same address + 4.
Rounding starts after the high word. Any other format starts on its one write.
Reads of an operation address return the last result. Other offsets read as 0
and ignore writes.

Cycle by cycle (data phases), for a 32-bit operand:

```
cycle      1              2                    3
bus        write operand  (read addr phase)    read data phase: saturated result
inside     opnd_q loaded  round: core -> res_q  sr_saturate on res_q
```

That is 3 cycles for 32-bit operands and 4 for 64-bit ones, counted from the
first write data phase to the read data phase. Software normally issues the read
right after the write. The read's data phase then falls in the round cycle, and
the slave inserts exactly one wait state (`HREADYOUT` low). If an idle cycle or
another transfer separates them, there is no wait. Operations pipeline: while one
operand is being rounded, the next can already be written. The result register
holds one result, so each result must be read before the next operation's round
cycle.

**Random numbers.** The generator is outside this block. `rng_i` is the
generator's current 32-bit word. The accelerator uses it in the round cycle of a
stochastic operation. In that cycle it raises `rng_next_o` for one cycle to ask
for the next word. Round-to-nearest operations consume nothing. The testbenches
connect a model of the JKISS32 generator (`tb/jkiss32_model.sv`). The source
chip uses a KISS-family generator in which one internal variable is widened to
64 bits. That change is not described, so it is not modelled.

**Reset.** `HRESETn` is asynchronous and active low. It clears the configuration
(position 0, one bit), the operand and result registers and the pending flag.

## Files

| file | contents |
|---|---|
| `rtl/sr_pkg.sv` | formats, round-mode encoding, `op_t`, `ovf_t`, `rounded_t`, address constants |
| `rtl/sr_field_select.sv` | 127-bit extension and the three slices |
| `rtl/sr_round_decision.sv` | random adder (`SR_BITS` wide), carry, round-mode mux |
| `rtl/sr_overflow_detect.sv` | four range flags |
| `rtl/sr_round_core.sv` | the combinational round cycle: the three blocks above, rounding adder, bfloat16 |
| `rtl/sr_saturate.sv` | read-cycle clamp |
| `rtl/sr_accel.sv` | top: AHB-Lite slave, registers, wait state, PRNG port |
| `tb/sr_ref_pkg.sv` | arithmetic reference model (wide integers and shifts, no slicing) |
| `tb/jkiss32_model.sv` | behavioural JKISS32 generator |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_harmonic` |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if it hangs.

* `tb_sr_field_select`, `tb_sr_round_decision`, `tb_sr_overflow_detect`,
  `tb_sr_saturate`, `tb_sr_round_core`: 20,000-30,000 random vectors each. The
  random operands are biased towards range edges. The expected values are worked
  out with 128-bit arithmetic. `tb_sr_round_decision` also measures the round-up
  rate of a 0.3 residual. The datapath tests also run 16- and 8-bit `SR_BITS`
  instances.
* `tb_sr_accel`: about 3,000 random operations of every format and mode through
  the bus, at default parameters, compared with the reference model. It checks
  the latency (3 or 4 cycles), the single wait state, one random word per SR
  operation, configuration read-back and pipelined back-to-back operations. It
  counts each mechanism (saturation high/low, overflow caused by rounding up,
  bfloat16 NaN and overflow to infinity, waits, no-wait reads) and fails if one
  never happened.
* `tb_harmonic`: the harmonic-series experiment the accelerator was motivated
  by. It sums 1 + 1/2 + 1/3 + ... in s16.15 and s8.7 fixed point, rounding each
  u0.32 or u0.16 addend on the accelerator. Results at default parameters, about
  21 million cycles:

| sum format, mode | iterations | result | published |
|---|---|---|---|
| s16.15 RN | until stagnation | 11.938, no change after i = 65536 | 11.938, converges at 65537 |
| s8.7 RN | until stagnation | 6.414, no change after i = 256 | 6.414, converges at 257 |
| s8.7 SR | until addends are zero (i > 65536) | 11.125 | mean 11.205, std. dev. 0.242 |
| s16.15 SR | 5,000,000 | 15.998 | mean 16.002, std. dev. 0.012; binary64 16.002 |

Not verified: timing, area and leakage (the source reports a 22 nm
implementation of about 1000 um^2), and the real generator.

## Where this RTL departs from the source

Taken from the source: the 127-bit layout, the three slices, the residual adder
with carry, the mux encoding (1 = `bit_31`/nearest, 0 = `c_out`/stochastic), the
32-bit rounding adder, a 4-bit overflow output, saturation in the read cycle, the
5-bit configuration (0 = round one bit ... 31 = round 32 bits), the operation set,
address-selected signedness and round mode, 3/4-cycle latency and the
8/16/32-bit adder variants.

Chosen here: the address map and the order of the 64-bit writes; the meaning of
the four overflow flags and the extra adder-based check for overflow by rounding
up; the 16-bit operand placement and the extension of 16-bit results; which
random bits a narrow adder uses; the wait state; the PRNG handshake; reset
values; all bfloat16 details (magnitude rounding, overflow to infinity, quiet
NaN). The generator itself is external and only modelled.

## Simulating and changing

With Verilator 5 (for example the top-level test):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/sr_pkg.sv tb/sr_ref_pkg.sv tb/tb_sr_accel.sv --top-module tb_sr_accel -o sim
./obj_dir/sim
```

Substitute any other `tb_*` module; `tb_harmonic` takes about 15 s. To try a
narrow random adder, set `SR_BITS` on `sr_accel` (1 to 32). The testbenches pass
the same value to the reference model (`SRB` in `tb_sr_accel`, the last argument
of `ref_op`). The address map lives in `sr_pkg` (`CFG_OFFSET`, `OP_BASE`) and in
the decode block of `sr_accel`.
