# SSCMSD: single-symbol-correcting, multi-symbol-detecting ECC for x4 DDRx memory

A chipkill code such as SSC Reed-Solomon corrects any error confined to one
symbol of a codeword, so a whole failed x4 DRAM device is survivable. When
two or more symbols are wrong, though, the decoder frequently "repairs" the
codeword into a different valid codeword and hands corrupted data to the
processor as if it were good. This is silent data corruption. Faults that
hit more than one device or bus lane at once produce exactly these
multi-symbol errors.

SSCMSD (Single Symbol Correct, Multiple Symbol Detect) keeps full
single-symbol correction and adds a second line of defence. A 32-bit hash
of the cache line, and of its address, is stored inside the ECC codewords.
After decoding, the read path recomputes the hash from the returned data
and compares it with the stored one. A mis-correction, or an undetected
multi-symbol error, almost always breaks this equality. The line is then
reported as uncorrectable instead of being delivered wrong. The cost is one
extra device per rank (19 x4 devices, 76 DQ lines) and some hash logic in
the memory controller.

This repository holds synthesizable SystemVerilog for the
memory-controller side of that scheme: encoder, decoder, hash, read
decision logic, and a top level with a cache-line interface on one side
and a DQ-beat interface on the other. Self-checking testbenches are
included, plus a behavioural DRAM rank with fault injection.

## Codeword and line layout

The code is RS(19,17) over GF(2^8). One 64-byte cache line is split into
four 16-byte blocks. Block k, plus one byte Hk of the 32-bit hash, forms a
17-symbol dataword. The dataword is encoded with two check symbols C0, C1
into a 19-symbol codeword:

```
symbol index   0    1    2 ........... 17    18
content        C0   C1   D0 .......... D15   Hk        (codeword k, k = 0..3)
chip           0    1    2 ........... 17    18
```

- **Field and generator.** The field polynomial is x^8+x^4+x^3+x^2+1
  (0x11D) with alpha = 0x02. The generator polynomial is
  G(x) = (x - alpha)(x - alpha^2). The code is systematic: data and hash
  symbols are stored unchanged, and only C0 and C1 are computed.
- **Symbol numbering.** Symbol i is the coefficient of x^i.
- **Byte placement.** Line byte j goes to data symbol D(j mod 16) of block
  j/16.
- **Hash.** The hash is CRC-32C (Castagnoli) in its usual reflected form,
  with initial value and final XOR 0xFFFFFFFF. It runs over 72 bytes: the
  64 line bytes, byte 0 first, then the 8 address bytes, least significant
  first. Hash bits 8k+7..8k are H_k. The parameter `CRC_POLY_REFL` (on
  the top and on both paths) selects another CRC-32 polynomial in
  reflected form. `sscmsd_pkg` defines the two Koopman polynomials
  {1,3,28} and {1,1,30}, which like Castagnoli have Hamming distance 6 at
  this key length, and IEEE 802.3 (distance 5). Write and read sides must
  use the same polynomial.
- **Bus mapping.** Each codeword occupies two DQ beats. Symbol i is on
  device i, DQ lines 4i..4i+3. Bit 2p+b of the symbol is on pin p in beat
  b. A device therefore contributes exactly one symbol to each codeword,
  and a failed device, pin or lane corrupts at most one symbol per
  codeword.
- **Line transfer.** A line is eight beats: codeword 0 in beats 0-1, ...,
  codeword 3 in beats 6-7. The interfaces move one beat pair per
  controller clock.

Because the hash is inside the codeword (hash first, then encode), the RS
decoder protects the hash exactly as it protects the data. A single-symbol
error in a hash symbol is corrected like any other. So the hash never
turns an error that plain chipkill would correct into a reported failure.

## Write path (`sscmsd_write_path`)

The path accepts a line and its address with a valid/ready handshake.

- **Accepting clock.** CRC-32C of {address, line} is computed
  combinationally, split into H0..H3, and fed with the four blocks to four
  parallel RS encoders (`rs_encoder`, an unrolled division by G(x)). The
  four codewords are registered.
- **Following four clocks.** One codeword per clock leaves on `dq_beats`,
  flagged with `dq_first` and `dq_last`.
- **Back-to-back writes.** `wr_ready` is high again in the `dq_last`
  clock, so back-to-back writes keep the bus busy every clock.

## Read path (`sscmsd_read_path`): timing and the decision table

This is the core of the design. The goal is that an error-free line costs
no more latency than ordinary SSC-RS decoding. The expensive work, which is
correction and hash re-verification, runs only when a syndrome is
non-zero. Two properties make this possible:

- **Syndromes.** The code is systematic, so syndromes and the hash of the
  *received* data can be computed side by side without decoding first.
- **Incremental CRC.** CRC is linear, so the hash can be built up
  codeword by codeword as the line streams in.

Pipeline (codeword k arrives in clock k, k = 0..3):

| clock | work |
|---|---|
| k     | capture codeword k (two beats) |
| k+1   | syndromes S1 = c(alpha), S2 = c(alpha^2) of codeword k (one shared `rs_syndrome`); CRC folded over the 16 data bytes of block k; with block 3 the 8 address bytes are folded in too |
| 4     | last syndrome and H1 = CRC(D', address) complete; **decision** |
| 5     | response for scenarios 1 and 3 (resp_valid, 5 clocks after codeword 0) |
| 6     | CORRECT done: response if any codeword is uncorrectable |
| 7     | VERIFY done: response after the hash re-check |

The decision compares H1 with the received hash H' = {H3', H2', H1', H0'}
and looks at which codewords have a non-zero syndrome:

| scenario | hash | syndromes | action | status |
|---|---|---|---|---|
| 1 | H1 = H'  | all zero     | deliver at once | `RD_NO_ERROR` |
| 2 | H1 = H'  | some non-zero | correct, then re-check | see below |
| 3 | H1 != H' | all zero     | deliver flagged | `RD_UNCORRECTABLE` |
| 4 | H1 != H' | some non-zero | correct, then re-check | see below |

For scenarios 2 and 4 the slow path runs in two steps:

- **CORRECT.** Each codeword with a non-zero syndrome goes through
  `rs_ssc_corrector`. A single error e at position i gives S1 = e*alpha^i
  and S2 = e*alpha^2i. So the error sits at the position i where
  S1*alpha^i = S2, and its value is S1*alpha^-i. The corrector evaluates
  this test for all 19 positions in parallel. If no position matches, or
  S1 = 0 with S2 != 0, the codeword is uncorrectable. One uncorrectable
  codeword makes the whole line `RD_UNCORRECTABLE`.
- **VERIFY.** H2 = CRC(D'', address) is computed over the corrected data
  D'' and compared with the corrected hash symbols H''. Equality gives
  `RD_CORRECTED`. Otherwise the RS decoder mis-corrected a multi-symbol
  error, and the line is `RD_UNCORRECTABLE`.

The slow path works on its own copy of the four codewords. A new line can
therefore stream in directly behind the previous one, so reads sustain one
line per four clocks. The next decision comes four clocks later, by which
time the slow path is idle again (an assertion checks this). Responses stay
in request order.

Every response carries:

- the line and its address;
- the status and the scenario;
- the per-codeword non-zero-syndrome flags (`resp_synd_nz`);
- the per-codeword "a symbol was corrected" flags (`resp_ce`).

These flags are meant for error logging.

## Address protection and the read-address queue (`sscmsd_ecc_top`, `tag_fifo`)

Because the address is part of the hash, a read whose address was
corrupted on the way to the DRAM is caught. In that case the device
returns a self-consistent codeword from the wrong location, so all
syndromes are zero. But that codeword's hash was made with the other
address, and the controller hashes with the address it *meant*, so the
result is scenario 3.

The top level holds the issued address of every outstanding read in a
FIFO (`tag_fifo`, depth `RD_TAG_DEPTH` = 8). The head entry is handed to
the read path with the first codeword of the returned line.
`rd_req_ready` drops while the FIFO is full. Write-side address errors are
not covered: data written to the wrong place carries a hash of the wrong
address and reads back as clean. Command/address parity or a write CRC is
needed for those.

## Hash-off mode

`hash_en = 0` turns both hash comparisons off. The engine then behaves
like a plain SSC-RS chipkill decoder:

- no scenario 3;
- every correctable codeword is delivered as corrected;
- no re-check.

The hash symbols are still written, so the mode can be changed at any
time. It lets software choose the stronger detection per application
(selective error protection).

## Module list

| module | role |
|---|---|
| `sscmsd_pkg` | sizes, types, GF(2^8) multiply, alpha-power table (built at elaboration), CRC-32C byte step, codeword/beat mapping |
| `crc32c_update` | combinational reflected CRC-32 over `NBYTES` bytes (72 by default; 16 and 8 in the read path), polynomial `POLY_REFL` (Castagnoli by default) |
| `rs_encoder` | 17 symbols in, 19-symbol codeword out (combinational) |
| `rs_syndrome` | S1, S2 and a non-zero flag (combinational, Horner form) |
| `rs_ssc_corrector` | single-symbol correction / uncorrectable flag (combinational) |
| `sscmsd_write_path` | hash + 4 encoders + beat sequencing |
| `sscmsd_read_path` | capture, syndromes, incremental hash, decision, CORRECT/VERIFY |
| `tag_fifo` | outstanding-read address queue |
| `sscmsd_ecc_top` | top level: write path, read path, read-address queue |

All resets are asynchronous, active low. The package parameters default to
the sizes above. The RS code, the bus mapping and the four-codeword line
are tied together, so only `RD_TAG_DEPTH` and `CRC_POLY_REFL` are meant
to be changed freely.
Synthesised with a generic cell library, the top is about 5,500 cells and
3,300 flip-flop bits.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. They compare against
`sscmsd_ref_pkg`, a reference model that computes the same functions by
different methods:

- **Field multiply:** carry-less product, then reduction.
- **Check symbols:** solved from the parity equations with a field
  inverse.
- **Syndromes:** direct sums.
- **CRC:** the MSB-first non-reflected form, self-checked against the
  standard value CRC-32C("123456789") = 0xE3069283.

A mistake shared by the RTL and the model is therefore unlikely.
`tb_sscmsd_pkg` checks the package itself: the field multiply for all
operand pairs, that alpha generates all 255 non-zero elements, the CRC byte
step for every byte value and polynomial, and the bus mapping. The unit
testbenches also build the hash unit, the write path and the read path with
the non-default CRC polynomials and check them against the model.

`tb_sscmsd_ecc_top` runs the whole engine against `dram_rank_model` (64
lines, fault injection on the returned beats and on the read address) with
all parameters at their defaults. It covers:

- back-to-back write and read streams, with up to 9 reads in flight;
- directed cases for every branch:
  - a fault on a check chip gives scenario 2;
  - a fault on a data chip gives scenario 4, corrected;
  - an address error gives scenario 3;
  - a double error with S1 = 0 gives a corrector DUE;
  - a double error that the RS code mis-corrects is caught by the hash
    re-check;
  - hash-off mode is exercised;
- 1000 random lines for each fault mode:
  - 1 bit, 1 pin, 1 chip, 1 bus lane, which must all be corrected;
  - correlated two-lane bus fault;
  - bit + bus, bit + chip, bit + pin, pin + pin, chip + chip;
  - three faulty chips;
  - a column fault (one bit stuck at 0 or 1) and one pin stuck at 0 or 1,
    which must also be corrected;
- 1000 reads with random address errors.

A delivered line with wrong data is counted as a silent corruption. There
must be none. Typical result:

```
fault mode 1 bit            runs 1000  CF 1000  (DUE 0)  SDC 0
fault mode 1 chip           runs 1000  CF 1000  (DUE 0)  SDC 0
fault mode correlated bus   runs 1000  CF 1000  (DUE 1000)  SDC 0
fault mode 1 bit + 1 pin    runs 1000  CF 1000  (DUE 214)  SDC 0
fault mode chip + chip      runs 1000  CF 1000  (DUE 1000)  SDC 0
fault mode 1 pin stuck      runs 1000  CF 1000  (DUE 0)  SDC 0
address errors during reads: 1000 of 1000 detected
scenarios 1..4: 573 637 1002 11828; corrector DUE 4974; hash re-check failures 137; ...
TB_RESULT checks=14078 failures=0
```

The 137 hash re-check failures are multi-symbol errors that the RS decoder
alone would have delivered as silently corrupted data.

The fault models are:

- **Bit fault:** one random bit flipped.
- **Pin fault:** on one random DQ pin, the two bits that pin carries for
  one symbol (two consecutive beats) are flipped.
- **Column fault:** one bit of the line stuck at a random 0 or 1. **Stuck
  pin:** one DQ pin stuck at a random 0 or 1 in all eight beats.
- **Chip fault:** all 32 bits of one device are replaced by a random
  pattern, all 0s or all 1s.
- **Bus-lane fault:** on one 4-line lane, a random non-empty set of the
  eight beats gets random non-zero errors. The correlated version hits two
  adjacent lanes.

The address-error reads flip random bits among the address bits that
select one of the model's 64 lines, so every corrupted read really returns
another stored line. The model does not store a full 64-bit address space.

The evaluation that motivated the scheme ran billions of lines in
software. Here each mode runs 1000 lines in simulation, so rare events (a
32-bit hash collision has probability about 2^-32) are not exercised
statistically.

### Running with Verilator

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/sscmsd_pkg.sv tb/sscmsd_ref_pkg.sv rtl/*.sv tb/dram_rank_model.sv \
  tb/tb_sscmsd_ecc_top.sv --top-module tb_sscmsd_ecc_top
./obj_dir/Vtb_sscmsd_ecc_top
```

The unit testbenches build the same way: use the package files, the module
under test and its `tb_<module>.sv`, with `--top-module tb_<module>`.
`RUNS` at the top of `tb_sscmsd_ecc_top.sv` sets the campaign length. The
whole end-to-end run takes a few seconds.

## Where this design departs from, or goes beyond, the description of the scheme

- **Correction algorithm.** Single-symbol correction is solved directly
  from S2/S1 (a parallel position match). A general Berlekamp-Massey or
  Euclid decoder is not used: with two check symbols the result is the
  same and the logic is much smaller.
- **Field polynomial.** 0x11D, the byte order of the hash key and the
  CRC-32C convention (reflected, all-ones init and final XOR) are choices
  made here. Castagnoli is the default among the HD=6 CRC-32 polynomials
  recommended for a 72-byte key. The Koopman polynomials and IEEE 802.3
  can be selected by parameter, but the non-CRC hashes that were also
  evaluated (SpookyHash, Lookup3) are not provided.
- **Address always hashed.** Address hashing is always enabled, with all
  64 address bits. It is not an option.
- **Slow-path latency.** The five-clock fast path follows the described
  read timing. The split of the slow path into one CORRECT clock and one
  VERIFY clock (responses at 6 and 7 clocks) is this design's choice, as
  is the single shared syndrome unit.
- **Verified status.** A line that is corrected and passes the hash
  re-check is reported as `RD_CORRECTED` rather than as "no error", so
  error logging can see it. The data delivered is the same.
- **Hash-off mode.** In this mode a scenario-2/4 line is corrected but not
  re-checked, as in plain SSC-RS.
- **Clock rate not checked.** The five-clock schedule assumes that one
  syndrome and one 16-byte CRC step fit in a memory clock (the target
  behind the scheme was DDR4 at 1200 MHz). No timing analysis against a
  real cell library was done here.
- **Out of scope.** The DDR PHY, command scheduling, refresh and the DRAM
  devices themselves are outside this RTL. `dram_rank_model` stands in for
  them in simulation only.
- **Comparison schemes not built.** The baseline RS(18,16) code, the
  extended baseline with three check symbols, and Bamboo-ECC are not part
  of this design.
