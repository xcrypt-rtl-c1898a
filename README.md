# XCRYPT X-SB: polynomial multiplication for SABER on memristor crossbars

SABER is a lattice-based key-encapsulation scheme. Almost all of its arithmetic
is multiplication of polynomials of degree 256 in the ring Z[x]/(x^256 + 1),
with power-of-two moduli: q = 2^13 for encryption, p = 2^10 for decryption.
One of the two factors is always a *secret* whose coefficients are small signed
numbers, between -4 and 4, so each fits in 4 bits. The secret is the same for
many multiplications. The idea behind this design is to store the secret once in
analog memristor crossbars. Each multiplication then becomes a sequence of
analog dot products: bit-planes of the other polynomial are driven onto the
wordlines, and the bitline currents are converted with small ADCs. Because the
modulus is a power of two, only the low bits of each partial sum matter, and
this is used in two ways:

* each ADC sample is converted only to the precision that can still reach the
  result;
* the read order of two crossbars that share ADCs is staggered, so that at most
  one of them needs full precision at a time.

This RTL models the "X-SB" organisation: schoolbook multiplication, 128x128
crossbars of 1-bit cells, 1-bit DACs, and 6-bit ADCs each shared by 8 bitlines.
It adds the staggered ADC sharing. The chip has two identical tiles behind a
host bus. One tile serves encryption and the other decryption.

## 1. Multiplication as a matrix product

In Z[x]/(x^N + 1), x^N = -1. The product c = a*s can therefore be written as the
vector-matrix product c = a * M, where

    M[i][j] = s[j-i]        for j >= i
    M[i][j] = -s[j-i+N]     for j <  i

Each row of M is the row above rotated right by one coefficient. The coefficient
that wraps around is negated. Row i multiplies input coefficient a[i].

Each matrix entry is a 4-bit two's complement number. It is stored in 4
adjacent 1-bit cells of a crossbar row, with the LSB in the lowest column. A
full matrix row is therefore 256 x 4 = 1024 cells, and the matrix is 256 rows.
With 128x128 crossbars, one polynomial multiplier (PM) uses:

| | count |
|---|---|
| row halves | 2: input coefficients 0..127 and 128..255 |
| column groups | 8, each holding 32 output coefficients x 4 bit-columns |
| crossbars per PM | 16 |
| PMs per tile | 3: one per polynomial of a rank-3 inner product |
| crossbars per tile | 48 |

## 2. Bit-serial input, bitline sums and ADCs

The input coefficients have up to 13 bits. They are applied one bit-plane per
crossbar read. On read t, every wordline r carries bit t of a[r]. Every bitline
then returns the number of rows where both the input bit and the stored cell
are 1, which is a value between 0 and 128. The bitline for output coefficient j
and bit-column b, in row half h, contributes

    level(h, t, j, b) * 2^(t+b)

to c[j]. Column b = 3 holds the sign bit and is weighted -8 rather than +8. The
digital shift-and-add unit does this with a subtraction.

The levels are sampled and held, and one ADC serves 8 neighbouring bitlines,
one per clock. A crossbar read therefore occupies 8 clocks; at 1 GHz that is an
8 ns read cycle. A pass with e input bit-planes takes about 8·e clocks: 80 ns
for a 10-bit decryption product.

Only c mod 2^e is wanted. A sample of weight 2^k therefore only needs its low
e-k bits, capped at the 6-bit ADC resolution:

    prec(k) = min(6, e - k),   and the sample is skipped when k >= e.

The ADC model resolves exactly those low bits.

The full 6 bits carry the whole level only while the level stays below 64. A
level of 64 or more (more than half of the 128 rows active) would lose its top
bits. With random secrets and inputs, the mean level is about 32 and its
spread is small, so this essentially never happens. The flip encoding
that removes the limit in other crossbar designs is not modelled.

## 3. Staggered ADC sharing (ADCShare)

The two row halves of a column group add into the same output coefficients.
They are therefore read in step and share one *pair* of ADCs per 8 bitlines:
one 6-bit converter and one 5-bit converter.

* Half 0 reads bit-planes 0, 1, ..., e-1.
* Half 1 starts at plane ceil(e/2) and wraps around. For e = 10 that is
  5, 6, 7, 8, 9, 0, 1, 2, 3, 4.

In any clock, the sample from the lower bit-plane goes to the 6-bit converter
and the other sample goes to the 5-bit one. For e = 10, the two planes read
together differ by 5. So when one sample needs 6 bits (k <= 4), the other has
k >= 5 and needs at most 5 bits. An assertion in `polymult` checks this on
every conversion.

For e = 13 the argument fails: planes 0 and 7, for example, can both need 6
bits. The encryption tile, which runs 13-bit passes, is therefore built with two
6-bit converters per pair, and only the decryption tile uses the 6/5 pair.

The end-to-end test counts:

* conversions done at reduced precision;
* conversions skipped altogether;
* clocks in which the two halves were swapped between the converters.

## 4. The tile

```
          +----------------------------+
 host --->| IR: 3 x 256 x 13-bit coeffs |--bit-plane (per PM, per half)--+
          +----------------------------+                                 |
                  | secret (low 4 bits)                                  v
                  v                                   +---------------------------------+
          programming row generators ---------------->| PM0 | PM1 | PM2   (16 xbars each,|
                                                      |  2 x 8 x 16 ADC pairs)          |
                                                      +---------------------------------+
                                                               | codes + (plane, slot) tags
                                                               v
                                                   S+A: 256 accumulators mod 2^e
                                                               |
                                                               v
                                                   OR: 4 result slots  ---> host
```

A tile takes two commands.

**PROGRAM** writes the secret vector into the crossbars of all three PMs. The
secret is first loaded through the input register (IR); the low 4 bits of each
coefficient are used. Each PM loads one shift register per row half, preset to
matrix row 0 or row 128. The tile then writes one matrix row into all 16
crossbars at once, rotates the registers negacyclically, and repeats. A row
write takes 25 clocks, the 25 ns memristor write latency, plus 2 clocks of
issue and turnaround. Programming all 128 rows therefore takes 3456 clocks.

**COMPUTE(e, slot)** streams e bit-planes of the three IR polynomials through
the three PMs at once, in lock step. The shift-and-add unit (S+A) accumulates
all samples of all three PMs. At the end, the tile has the inner product
Σ_p a_p * s_p mod 2^e, and it copies it into output-register (OR) slot `slot`
in one clock. A COMPUTE keeps the tile busy for 8·e + 5 clocks: 85 for
e = 10 and 109 for e = 13.

A SABER operation uses these commands as follows:

* **Decryption**: program s once, then one COMPUTE(10) per ciphertext, for
  b'^T s.
* **Encryption**: program s' once. Then three COMPUTE(13) passes, one per row
  of A, give A s'. One COMPUTE(10) gives b^T s'. This totals
  3456 + 3·109 + 85 ≈ 3.9 µs, and programming is about 89 % of it.

Rounding, message encoding, SHAKE-128 sampling and packing are left to the
host.

## 5. Host interface

The host interface is a single request/response bus. Address bits
`[15:0] = {tile, region[1:0], offset[12:0]}`:

| region | access | offset | data |
|---|---|---|---|
| 0 IR   | write | poly·256 + index | coefficient (13 bits) |
| 1 OR   | read  | slot·256 + index | result coefficient |
| 2 CTRL | write | –                | command, bits [7:0] = {op[1:0], e[3:0], slot[1:0]}; op: 0 NOP, 1 PROGRAM, 2 COMPUTE |
| 2 CTRL | read  | –                | {busy, 15'b0, finished-command count[15:0]} |

Tile 0 is the encryption tile and tile 1 the decryption tile.

* A request is taken when `req_valid && req_ready`.
* `req_ready` drops only for a command written to a tile that is still busy.
* Read data returns with `rsp_valid` exactly one clock after the request is
  taken.
* `tile_busy[1:0]` shows each tile's state directly.

## 6. Files

| file | contents |
|---|---|
| `rtl/xcrypt_pkg.sv` | sizes, command and region types, the precision function |
| `rtl/xbar.sv` | behavioural crossbar: 1-bit cells, 1-bit DACs, sample-and-hold, 25-clock row writes |
| `rtl/adc.sv` | behavioural variable-precision ADC |
| `rtl/polymult.sv` | one PM: 16 crossbars, programming row generator, read/convert sequencer, shared ADC pairs |
| `rtl/shift_add.sv` | S+A accumulators with signed sign column and mod 2^e |
| `rtl/input_reg.sv`, `rtl/output_reg.sv` | IR and OR |
| `rtl/xcrypt_tile.sv` | one tile and its command sequencer |
| `rtl/xcrypt_io.sv` | host bus decoder |
| `rtl/xcrypt_chip.sv` | top: I/O interface plus encryption and decryption tile |

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each compares
against a reference computed in the testbench: a plain negacyclic
schoolbook product, popcounts, and so on. Where a latency is defined, the
testbench also checks clock counts. Each prints
`TB_RESULT checks=N failures=M`.

`tb_xcrypt_chip` runs the full-size chip with default parameters, through the
host bus only. It:

* programs the decryption tile and runs two 10-bit products;
* programs the encryption tile and runs the three 13-bit passes and the 10-bit
  pass of an encryption;
* checks every coefficient;
* checks the busy time of each command;
* counts command stalls, reduced-precision and skipped conversions, and ADC
  swaps.

It builds in about half a minute and simulates in under a second.

With plain Verilator, for example:

```
verilator --binary -Irtl -y rtl --top-module tb_xcrypt_chip rtl/xcrypt_pkg.sv tb/tb_xcrypt_chip.sv
./obj_dir/Vtb_xcrypt_chip
```

The block testbenches run the same way. The smaller ones override sizes, for
example 64-coefficient polynomials on 32x32 crossbars, to keep the checks
exhaustive.

## 7. Departures and open points

* **Signed secrets.** The textbook shift-and-add adds all four cell columns
  with positive weight. That is correct only for non-negative secrets. SABER's
  secrets are signed, so here the top cell column is the two's complement sign
  and is subtracted.
* **Crossbar count.** A PM here uses 16 crossbars, and a tile 48, which is what
  the arithmetic of Section 1 gives. A figure of 72 crossbars is also quoted
  for storing the secret with its shifted versions. That figure is not
  reproduced.
* **Algorithm variants.** The refined designs split each multiplication with
  Karatsuba (decryption) or Toom-Cook-4 plus Karatsuba (encryption) into smaller
  products. They also add analog shift-and-add crossbars (SAC) with
  transimpedance amplifiers, which accumulate in analog before one
  higher-precision conversion. None of this is built. The schoolbook tile
  computes the same products.
* **Further ADC splitting.** Splitting the 5-bit converter's work further into
  a 5-bit and a 4-bit converter, shared across 10 crossbars, is not built.
  Neither is the 7-bit converter listed per array in the area budget, whose
  role is not stated.
* **Analog parts.** The crossbar and ADC are ideal behavioural models: no
  noise, no device variation and no flip encoding. The DACs and sample-and-hold
  are folded into the crossbar model.
* **Own choices.** The host bus, address map, command set, status word, four OR
  slots, loading the secret through the IR, and the exact clock-level timeline
  all belong to this implementation.
* **Size.** At default size, each tile holds 48 × 16384 cells in flip-flop
  arrays, plus wide popcount logic. This is a simulation model of the analog
  array, not something to synthesise as is.
