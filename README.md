# Five-module redundancy with repair by partial reconfiguration

A circuit on an FPGA in orbit can be corrupted by radiation: a hit on the
configuration memory changes what a block of logic computes. Triple modular
redundancy (three copies and a two-of-three vote) survives one bad copy, but
not two copies hit at once. This design keeps **five** identical copies of a
module and votes **three of five**, so any two copies may be wrong together
and the output is still right. It also repairs: a detector names every copy
whose output disagrees with the vote, and the system's processor reloads that
copy's partial bitstream through the FPGA's internal configuration port while
the other copies keep the output correct. Repair keeps the number of bad
copies from growing over time, which a vote alone cannot do.

The RTL here is the fault-tolerant IP block itself: the five copies, the
voter, the error detector and the AXI4-Lite register slave through which the
processor reaches it. The processor, the configuration port and the flash card
that holds the bitstreams are vendor parts; the testbench models them so the
whole detect-and-repair loop can be simulated.

```
            data_in (4 b)          code_err (test mask)
                 |                        |
     +-----------+-----+-----+-----+------+
     v           v     v     v     v
 +--------+ +--------+ ...  ...  +--------+      each copy in its own
 |module 1| |module 2|           |module 5|      reconfigurable partition;
 +--------+ +--------+           +--------+      blank partition -> zeros
     |  12 b     |                   |
     +-----+-----+------ ... --------+
           v                         v
     +-----------+          +------------------+
     |   voter   |--- F --->|  error detector  |--- error_detector[4:0]
     | 3 of 5    |          | bit i = (Mi != F)|
     +-----------+          +------------------+
           | F = {code[7:0], data[3:0]}  |
           v                             v
     +-----------------------------------------+
     |  AXI4-Lite registers (DATA_IN, ERRDET,  |<==> processor: polls ERRDET or
     |  DECODED, ENCODED, CODE_ERR), irq       |     takes irq, reloads module i
     +-----------------------------------------+     through the config port
```

## The redundant module

Each copy (`fmr_module`) is a small but complete computation: it encodes its
4-bit input with an extended Hamming (8,4) code and decodes the code word
again. It has two outputs, the decoded data ("first output") and the code word
("second output"); both are voted, so a copy counts as correct only when all
12 bits agree with the vote.

The code word is ordered, most significant bit first,

```
code[7:0] = { p0, p1, p2, d1, p3, d2, d3, d4 }      d1 = data[0] ... d4 = data[3]
p1 = d1^d2^d4   p2 = d1^d3^d4   p3 = d2^d3^d4   p0 = XOR of code[6:0]  (even parity)
```

that is, code bit `7-k` holds classic Hamming position `k`, with position 0
the overall parity bit. The decoder (`hamming_dec`) forms the syndrome over
positions 1..7; odd overall parity means one flipped bit, which it flips back
(syndrome 0 then points at the parity bit itself); even parity with a
non-zero syndrome means two flipped bits, which it cannot correct and reports
on an `uncorrectable` output that the module does not bring out.

Worked example, the one the source design reports from hardware: data `1010`
encodes to `10100101`. With its first bit flipped the word reads `00100101`
and still decodes to `1010`. `fmr_module` has a `code_err` input, an XOR mask
laid on the code word between encoder and decoder (and on the second output),
so this test can be repeated: with `CODE_ERR = 0x80` the IP reads back
`00100101` / `1010`. In normal use the mask is zero.

## The vote and what "two modules" means

`fmr_voter` computes, for every one of the 12 bits,

```
F = M1M2M3 | M1M2M4 | M1M2M5 | M1M3M4 | M1M3M5 | M1M4M5 | M2M3M4 | M2M3M5 | M2M4M5 | M3M4M5
```

the OR of the ten three-input ANDs, one for each choice of three copies from
five. A bit of `F` is 1 exactly when at least three copies say 1. As long as
three copies are right, every bit of `F` is right, whatever the other two
produce, even if those two agree with each other.

With three copies wrong the vote can be wrong, and then the detector points
at the wrong copies: in the testbench three blank copies make `F = 0`, and
the two good copies are the ones flagged. Repair only works while the fault
count stays within two; the processor must reload faster than faults arrive.

## The error detector

`fmr_error_detector` compares each copy's full 12-bit output with `F`:
`err[i] = 1` when copy `i+1` differs. Bit 0 (the LSB) is copy 1. The word is
read by the processor at offset 0 of the IP and also drives `irq`
(`irq = err != 0`, registered).

The source design states this polarity twice and inconsistently: once as
"1 when equal", once (in the hardware listing) as "0 when equal, 1
otherwise". This RTL follows the second, because the firmware treats a set
bit as the request to reconfigure that copy and any non-zero word as "an
error was found".

A copy is only seen as faulty when its output differs for the data being
processed. A blank partition drives zeros, and data `0000` encodes to the
all-zero word, so a blank copy is invisible while the data is 0. The
testbench shows this case; a system that must find blank copies quickly
should keep non-zero data flowing or send a test word.

## Faults, blank partitions and repair

Each copy sits in its own reconfigurable partition of the FPGA. Whether the
partition currently holds the copy's configuration is not logic of this IP:
it is state of the device's configuration memory, written through the
configuration port. It therefore enters `fmr_top` as `pr_configured[4:0]`. A
partition that is blank, or being rewritten, drives zeros on all 12 outputs.
Faults are injected the way the source design did in hardware: by loading a
blank partial image into a partition.

Repair is a processor loop, not hardware of this IP:

1. Wait for `irq` or poll `ERRDET` (offset 0) at any chosen interval.
2. For every set bit `i` (LSB = copy 1) read that copy's partial bitstream
   (`module<i+1>.bit`) from the flash card.
3. Write it word by word to the configuration port. The other copies keep the
   vote right meanwhile; the testbench checks the voted output in every clock
   of every reload.
4. `ERRDET` returns to 0 once all reloaded copies again match the vote.

The source design measured 141.59 ms to 261.57 ms per repair for bitstreams of
81 to 142 KB on a 100 MHz processor, a time that includes reading the file
from the flash card in software as well as writing the configuration port. Moving the same words through a 32-bit port at one word per
clock would take 0.21 to 0.36 ms; the testbench reports these figures for its
port model. The flash card, its controller and the processor are not modelled
in time.

## Register map (`fmr_axil_regs`)

| Offset | Name     | Access | Bits  | Meaning |
|--------|----------|--------|-------|---------|
| 0x00   | ERRDET   | RO     | [4:0] | error detector word, bit 0 = copy 1 |
| 0x04   | DATA_IN  | RW     | [3:0] | data given to all five copies |
| 0x08   | DECODED  | RO     | [3:0] | voted decoded data |
| 0x0C   | ENCODED  | RO     | [7:0] | voted code word |
| 0x10   | CODE_ERR | RW     | [7:0] | test mask XORed onto every copy's code word |

Other offsets answer SLVERR (reads return 0); writes to read-only registers
are accepted and ignored. Unused bits read 0, which is why synthesis reports
many constant output bits on the read-data bus. Only the placement of
ERRDET at the base address comes from the source design; the other offsets
are this implementation's.

## Timing

The copies, the voter and the detector are combinational, so `fmr_out` and
`error_detector` follow `DATA_IN` or a partition change in the same clock.
The slave samples the vote and the detector word into registers every clock;
`irq` and the ERRDET/DECODED/ENCODED registers lag by one clock. After the
write response for DATA_IN, the new result is readable two clocks later. The
slave accepts a write when address and data are valid together, answers a
read one clock after the address handshake, and holds a response until it is
taken (checked by assertions). Reset (`rst_n`) is synchronous, active low,
and clears DATA_IN, CODE_ERR and the sampled registers.

## What follows the source design and what was filled in

Taken from the design: five identical copies fed the same input; the voter
equation; the comparison of every copy with the vote; the LSB-first error
word at the IP's base address; an interrupt and polling both as ways to reach
the processor; the encoder-then-decoder module with its two outputs; the
extended Hamming code; data and code widths from the reported example;
repair by reloading the flagged copy's partial bitstream; fault injection
with blank images; bitstream sizes 128/120/81/128/142 KB.

Filled in here: the code's bit order (chosen so the reported example holds),
decoding of double errors, whole-word (12-bit) voting, the `code_err` test
mask, the register map beyond offset 0, the AXI handshake and reset, the
sampling registers, and the zero output of a blank partition. The source
design had one MicroBlaze per copy in its power estimate; here a copy is the
Hamming computation only.

## Files

| File | Contents |
|------|----------|
| `rtl/fmr_pkg.sv` | sizes (`N_MOD=5`, `DATA_W=4`, `CODE_W=8`), output struct, register offsets |
| `rtl/hamming_enc.sv`, `rtl/hamming_dec.sv` | extended Hamming (8,4) encoder and decoder |
| `rtl/fmr_module.sv` | one redundant copy |
| `rtl/fmr_voter.sv` | three-of-five voter |
| `rtl/fmr_error_detector.sv` | error detector |
| `rtl/fmr_axil_regs.sv` | AXI4-Lite slave and interrupt |
| `rtl/fmr_top.sv` | the IP: five copies in partitions, voter, detector, slave |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fmr_endurance` |
| `tb/icap_model.sv` | behavioural configuration port and partition configuration memory |
| `tb/dpr_tb_pkg.sv` | partial bitstream format and content used by the models |

The partial bitstream in the models is a simplified frame stream carrying what
the repair depends on: a sync word, the partition's location, the length, the
configuration words and an XOR checksum. The good image of partition `r` has
word `k` equal to `golden_word(r, k)` in `dpr_tb_pkg`, a fixed hash of `r`
and `k`; a blank image is all zeros. The configuration-port model marks the
partition unconfigured from the location word on, and configured again only
when the checksum is right and every word matches the good image. Real
device bitstreams and the real port (which, for instance, swaps bits within
bytes) differ; nothing in the IP depends on that.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself (each
has a watchdog). With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fmr_pkg.sv tb/dpr_tb_pkg.sv tb/tb_fmr_top.sv --top-module tb_fmr_top
./obj_dir/Vtb_fmr_top
```

and likewise for `tb_fmr_endurance`, `tb_hamming_enc`, `tb_hamming_dec`, `tb_fmr_module`,
`tb_fmr_voter`, `tb_fmr_error_detector` and `tb_fmr_axil_regs`.

`tb_fmr_top` runs the IP at its only size with full-size bitstreams (about
0.7 million clocks, a second or two). It replays the reported hardware test
(blank copies 4, 5, 5, 3 one after another, data `1010` with the first code
bit flipped), then two copies blank at once, the one-clock detection timing,
a blank copy hidden by data 0, three blank copies, and ten random rounds of
one or two blank copies with random data and random single-bit code
errors. It counts each of these mechanisms and fails if one never happened.
Set `SCALE_DIV` in the testbench to shorten every bitstream for faster runs.
`tb_fmr_endurance` repeats the fault-and-repair loop until 3600 copies have
been reloaded (2700 rounds, every third one with two blank copies), with
bitstreams shortened 64 times; it takes a few seconds.
The block testbenches check against independent reference models: the
Hamming testbenches rebuild the code from the position rule and test every
single and double bit error; the voter is compared with a count of ones; the
detector with a direct comparison.
