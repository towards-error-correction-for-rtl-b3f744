# CIRM-ECC: error correction for compute-in-memory in racetrack memory

Racetrack memory (RTM) can compute bulk bitwise functions in place. A
*transverse read* (TR) senses several adjacent domains of a nanowire at once
and reports how many of them hold a '1'. From that one count the periphery
derives AND, OR and XOR (and their complements) of up to TRD stacked rows, for
every nanowire of a row in parallel. The sensing margins are narrow, so the
sensed count is sometimes off by one. Ordinary ECC cannot protect an AND or an
OR, because the check bits of `a & b` are not a function of the check bits of
`a` and `b`.

CIRM-ECC, proposed by Brazzle, Morris, McKinney, Zhou, Hu, Khan and Jones in
"Towards Error Correction for Computing in Racetrack Memory", rests on two
observations:

* Linear codes (Hamming, BCH) are closed under XOR. The XOR of the stored
  codewords is therefore a valid codeword for the XOR of the data. The XOR
  that one TR produces can be checked by an ordinary decoder.
* A single-level sensing fault always changes the parity of the count, so it
  always flips XOR. The decoder, run on the XOR result, therefore finds *every*
  nanowire whose count was mis-sensed. This holds even when the requested
  operation was AND or OR.

Once the faulty nanowire is known, the sensed count there tells whether the
AND/OR result is certainly wrong (flip it), certainly right (keep it) or cannot
be known (repeat the TR). This repository gives synthesizable SystemVerilog
for that scheme, built around a model of an RTM subarray. The paper describes
the mechanism and evaluates it in a simulator. The code construction, the
controller, the interfaces and all timing here are this implementation's own
choices. The section "Where this RTL goes beyond or departs from the paper"
lists them.

## Storage: DBCs, shifting and the transverse-read window

A subarray holds `NUM_DBC` = 16 domain-wall block clusters (DBCs). Each DBC is
N nanowires of `DOMAINS` = 32 domains, shifted in lock step. A *row* is the set
of N bits at the same domain index, one per nanowire, so a 64-bit word is
spread bit by bit over 64 nanowires. In the default configuration a row is 512
data bits. It is stored as eight 72-bit Hamming codewords, so N = 576 and the
subarray holds 16 x 32 = 512 rows of 576 bits.

`rtm_dbc` models shifting as the position of the access port, `pos`. Each
shift pulse moves it by one domain, one per clock. Only the row under the port
can be written or read. A TR covers the domains `pos .. pos+TRD-1` of every
nanowire; domains past the end of the nanowire read as 0. Each DBC keeps its
own port position, so moving between DBCs costs nothing, while moving within a
DBC costs one cycle per domain. Memory contents are not reset (the memory is
nonvolatile); port positions reset to 0.

## One sense, six results

`tr_senseamp` is a behavioural stand-in for the analog sense amplifiers. It
counts the '1's under the window and compares the count against TRD fixed
thresholds, which gives a thermometer code (`level > 0`, `level > 1`, ...). Its
fault inputs move the sensed level up or down by one, clamped to `0..TRD`.
`cim_logic` turns the thermometer code into:

| output   | from the thermometer code        |
|----------|----------------------------------|
| OR / NOR | `level > 0` / its complement      |
| AND / NAND | `level > TRD-1` / its complement |
| XOR / XNOR | XOR of all thermometer bits (parity of the count) / complement |

Example with TRD = 3 (this is also a test vector):

| column | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|--------|---|---|---|---|---|---|---|---|
| A      | 0 | 0 | 0 | 0 | 1 | 1 | 1 | 1 |
| B      | 0 | 0 | 1 | 1 | 0 | 0 | 1 | 1 |
| C      | 0 | 1 | 0 | 1 | 0 | 1 | 0 | 1 |
| count  | 0 | 1 | 1 | 2 | 1 | 2 | 2 | 3 |
| XOR    | 0 | 1 | 1 | 0 | 1 | 0 | 0 | 1 |
| AND    | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 1 |
| OR     | 0 | 1 | 1 | 1 | 1 | 1 | 1 | 1 |

The sensed thermometer codes are registered in the cycle the TR fires. The
logic, the ECC decode and the classification all work on that register.

## Finding faults through XOR

All TRD operand rows were written through the encoder, so the XOR of their
576-bit images is the codeword of the XOR of their data. The check bits need
no extra work: the TR of the check-bit nanowires produces the XOR of the
stored check bits as a side effect. Each 72-bit slice of the XOR result goes
through `hamming_dec`. Instead of corrected data, the decoder returns an error
*mask*: which nanowire of the word was mis-sensed. With SEC-DED it also flags
a word with two faults as uncorrectable. With the (78,64) BCH code
(`ECC_T = 2`), `bch_dec2` locates up to two faulty nanowires per word. With
the (85,64) BCH code (`ECC_T = 3`), `bch_dec3` locates up to three.

The scheme relies on one assumption: a fault changes the count by exactly one.
A two-level fault (count off by two) leaves XOR unchanged and goes unseen.
The design does not address such faults; they are far rarer than single-level
faults.

## What a located fault means for AND and OR

This is the core of the scheme, and it lives in `fault_classifier`. Take n =
TRD operands and a flagged nanowire whose sensed count is `c`. The true count
is `c-1` or `c+1`, whichever lies in `0..n`.

| operation | sensed `c` | true count | class | action |
|-----------|-----------|------------|-------|--------|
| AND, NAND | n         | n-1        | deterministic error | flip the result bit |
| AND, NAND | n-1       | n-2 or n   | ambiguous | repeat the TR |
| AND, NAND | < n-1     | < n-1 either way | deterministic non-error | keep |
| OR, NOR   | 0         | 1          | deterministic error | flip |
| OR, NOR   | 1         | 0 or 2     | ambiguous | repeat the TR |
| OR, NOR   | > 1       | >= 1 either way | deterministic non-error | keep |
| XOR, XNOR | any       |            | deterministic error | flip (plain ECC correction) |

Take AND at `c = n-1` as an example. A true count of n (all ones) makes AND = 1,
but a true count of n-2 makes AND = 0. Nothing in this one TR tells them
apart, so the operation must be sensed again. Faults on check-bit nanowires are
located like any other, but they change no data bit and are not classified.

Per command, the outcome is decided as follows:

1. If any word has more faults than the code can correct, the command
   completes. The word is flagged in `status.uncorrectable` and the TR is
   *not* repeated. The other words are still corrected normally.
2. Otherwise, if any flagged data bit is ambiguous, the TR is fired again. The
   whole row is re-sensed and re-checked from scratch, at most `MAX_REISSUE`
   times. If ambiguity remains after the last reissue, the words are flagged in
   `status.ambiguous`.
3. Otherwise, deterministic errors are flipped and the result is final.
   `status.corrected` counts the flipped bits.

## Command flow and timing (`cirm_ctrl`)

The subarray takes one command at a time on a valid/ready port.

| command | does |
|---------|------|
| `CMD_WRITE` | encodes `cmd_wdata_i` (eight words) and writes it into row `cmd_row_i` |
| `CMD_READ`  | reads row `cmd_row_i`, decodes and corrects it (SEC-DED, or up to two or three bits per word with BCH) |
| `CMD_CIM`   | TR over rows `cmd_row_i .. cmd_row_i+TRD-1` of one DBC, returns `cmd_op_i` of them |

`cmd_row_i` = `{DBC index, domain index}`. The controller's states are IDLE,
ALIGN, ACCESS, CHECK and RESP. ALIGN shifts until the addressed domain is under
the port. ACCESS writes, captures the read row, or fires the TR (`tr_fire_o`).
CHECK registers the ECC/classifier verdict and either finishes or goes back to
ACCESS for a reissue. RESP raises `resp_valid_o` for one cycle, with
`resp_data_o` and `resp_status_o` valid.

Latency, counted in rising edges from the edge that accepts the command to the
edge that samples `resp_valid_o` high, with `d` the number of domains to shift:

* WRITE, READ: `d + 3`
* CIM: `d + 4 + 2 x reissues`
* CIM whose operands would run past the end of the DBC (domain + TRD > 32):
  rejected after 2 cycles with `status.cmd_error`; nothing is sensed.

## The codes

**(72,64) SEC-DED Hamming (`ECC_T = 1`, default).** Bits `[63:0]` are data,
`[70:64]` the check bits and `[71]` the overall parity. Data bit j sits at
Hamming position `ham_data_pos(j)`, the j-th position from 3 upward that is
not a power of two. Check bit i is the parity of the data bits whose position
has bit i set. Decoding works like this:

* zero syndrome with odd parity means the overall-parity bit is in error;
* a nonzero syndrome with odd parity is a single error at that position;
* a nonzero syndrome with even parity is a double error and is uncorrectable;
* so is a syndrome pointing past bit 71.

**(78,64) BCH, t = 2 (`ECC_T = 2`).** This is the (127,113) binary BCH code
over GF(2^7), with field polynomial x^7 + x^3 + 1, shortened to 78 bits. The
generator is g(x) = m1(x)·m3(x), the product of (x + α^i) over the cyclotomic
cosets of α and α^3. It has degree 14. Bit k of the codeword is the
coefficient of x^(k+14) for data bits (k < 64) and of x^(k-64) for the 14
check bits, so `[63:0]` is again the data. The check bits are x^14·d(x) mod
g(x). Each check bit is an XOR over a constant set of data bits, and the
package computes those sets at elaboration time.

The decoder works like this:

* It computes S1 = r(α) and S3 = r(α^3).
* It forms s2 = (S3 + S1^3)/S1.
* It tests all 78 positions in parallel for roots of X^2 + S1·X + s2 = 0, with
  X = α^position.
* One error gives s2 = 0 and the single root X = S1. Two errors give two roots.
* Any other root count, or S1 = 0 with S3 ≠ 0, is uncorrectable.

Three or more errors can be miscorrected. Any code of distance 5 can do this.

**(85,64) BCH, t = 3 (`ECC_T = 3`).** The same field and bit order, with the
(127,106) code shortened to 85 bits: g(x) = m1·m3·m5 has degree 21, and data
bit k is the coefficient of x^(k+21). The decoder computes S1, S3 and S5 and
uses Peterson's closed form with D = S1^3 + S3:

* D ≠ 0 (two or three errors): the locator is X^3 + S1·X^2 + s2·X + s3 with
  s2 = (S1^2·S3 + S5)/D and s3 = D + S1·s2. Three errors give three roots;
  two errors give s3 = 0 and two nonzero roots.
* D = 0 with S1 ≠ 0 and S5 = S1^5: one error at X = S1.
* Anything else, or a root count below the locator degree: uncorrectable.

Four or more errors can be miscorrected (distance 7).

The word layout differs between the codes, so N is 576 for Hamming, 624 for
the t = 2 BCH code and 680 for the t = 3 code. The fault ports change width
to match.

## Top-level interface (`cirm_ecc_top`)

| port | width | meaning |
|------|-------|---------|
| `clk`, `rst_n` | 1 | clock; asynchronous active-low reset |
| `cmd_valid_i`, `cmd_ready_o` | 1 | command handshake (transfer when both high) |
| `cmd_i` | `cmd_e` | WRITE / READ / CIM |
| `cmd_row_i` | 9 | {DBC, domain} |
| `cmd_op_i` | `cim_op_e` | AND, NAND, OR, NOR, XOR, XNOR |
| `cmd_wdata_i` | 512 | data for WRITE, sampled at the handshake |
| `fault_up_i`, `fault_dn_i` | N | sensing-fault injection, one bit per nanowire; applied to every TR fired while set |
| `tr_fire_o` | 1 | the sense amplifiers are sampled at this clock edge |
| `resp_valid_o` | 1 | one-cycle response strobe |
| `resp_data_o` | 512 | READ data or CIM result |
| `resp_status_o` | `status_t` | `uncorrectable[8]`, `ambiguous[8]`, `reissues[4]`, `corrected[10]`, `cmd_error` |

In silicon the fault inputs would be tied low. They are ports because the
faults come from the analog sensing, which the behavioural sense-amplifier
model exposes so that tests can choose where faults happen.

Parameters, with their defaults:

* `DOMAINS` = 32, `NUM_DBC` = 16 and `TRD` = 3 come from the paper.
* `MAX_REISSUE` = 15 is this design's choice.
* `ECC_T` = 1 selects the code: 1 Hamming, 2 or 3 BCH.

The geometry constants (64-bit words, eight words per row) are in `cirm_pkg`.

## Where this RTL goes beyond or departs from the paper

The following follow the paper:

* the RTM organisation (16 DBCs of 32-domain nanowires);
* TRD = 3 sensing with threshold comparators;
* deriving all operations from one TR;
* protecting AND/OR through ECC on XOR;
* the classification rules;
* the policy "uncorrectable → record, do not reissue; ambiguous → reissue;
  otherwise correct";
* 512-bit operands as eight 64-bit words with a (72,64) Hamming code, and BCH
  codes for 2-ECC and 3-ECC.

This design's own choices, where the paper gives nothing:

* **Code details.** SEC-DED construction and bit order; BCH field polynomial,
  shortening and decoders. The paper names no code at all for 3-ECC.
* **Shift model.** One domain per cycle, tracked as a port pointer, with a
  zero-filled window past the end of the nanowire.
* **Controller.** Command set, valid/ready handshake, states and latencies; a
  reissue limit of 15 (the paper sets none); rejection of operand windows that
  leave a DBC.
* **Operand count.** The number of operands always equals TRD. Operations on
  fewer rows would need padding rows, which is not implemented.
* **Results and reads.** Results go to the response port; there is no
  write-back into the array. Ordinary reads go through the same decoders (the
  decoders are shared between READ and CIM).
* **Sensing and faults.** Sensing is a counting model with injected faults, not
  a circuit. Two-level faults are not modelled.

Not built:

* the bank/rank hierarchy and global row buffer;
* the device-level access-port circuitry.

The n-modular-redundancy baselines are comparisons, not part of the design.
The paper's application benchmarks (counters, AES, matrix multiplication) give
no sizes or mappings and are not reproduced. The synthetic AND/OR workload
(512-bit operands, eight 64-bit words) matches the default geometry directly.
`tb_synthetic_trace` runs a short version of it (300 operations per fault
rate) on all three codes. Faults are drawn independently per sense amplifier
for every TR. A typical run:

| code | fault rate | extra TRs from reissues | reads with a word over capacity | binomial estimate |
|------|-----------|-------------------------|---------------------------------|-------------------|
| 1-ECC | 1e-2 | 31 % | 258 | 264.9 |
| 2-ECC | 1e-2 | 130 % | 143 | 155.5 |
| 3-ECC | 1e-2 | 209 % | 48 | 49.0 |
| 1-ECC | 1e-3 | 20 % | 1 | 5.4 |
| 2-ECC | 1e-3 | 13 % | 0 | 0.1 |
| 3-ECC | 1e-3 | 16 % | 0 | 0.0 |

A stronger code corrects more of the faults. But it also locates more of the
ambiguous ones, and each ambiguous fault costs a reissue. At 1e-2, the
stronger codes therefore pay for their lower uncorrectable rate in repeated
TRs.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<m>`. The package must come first on the
command line, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/cirm_pkg.sv rtl/*.sv \
    tb/tb_cirm_ecc_top.sv --top-module tb_cirm_ecc_top -Mdir obj_top
./obj_top/Vtb_cirm_ecc_top
```

| testbench | covers |
|-----------|--------|
| `tb_cirm_ecc_top` | the whole subarray at default size (Hamming). It checks every fault class of every operation, check-bit faults, double faults, the reissue limit, READ correction, rejected commands and latency on every command. It counts how often each mechanism occurred and fails if one never did. |
| `tb_cirm_ecc_top_bch` | the same subarray with `ECC_T = 2`. It checks double-fault correction, double faults with a reissue, faults in two words, detected triple faults and READ double correction. |
| `tb_cirm_ctrl` | sequencing, latencies, reissue limit, no reissue on uncorrectable, rejection |
| `tb_fault_classifier` | exhaustive classification for n = 3, random for n = 4 |
| `tb_hamming_enc`, `tb_hamming_dec` | against a textbook reference; linearity; every single-error position; double errors |
| `tb_bch_dec2` | encoder and decoder against an independent GF(2^7) evaluation; 1, 2 and 3 errors; linearity |
| `tb_bch_dec3` | the same for the t = 3 code; 1, 2, 3 and 4 errors |
| `tb_synthetic_trace` | random AND/OR trace with random faults on full-size 1-, 2- and 3-ECC subarrays (uses the helper `trace_runner`); every result word checked against the faults it really suffered |
| `tb_cim_logic`, `tb_tr_senseamp`, `tb_rtm_dbc`, `tb_rtm_subarray` | the leaf blocks |

Building the full-size top takes one to two minutes with verilator. Each
simulation itself finishes in well under a second.
