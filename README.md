# Orthogonal-code link with table-search error detection and correction

A k-bit data word is sent as an n = 2^(k-1) chip bi-orthogonal code. The
receiver does not check parity. It compares the received word with every
valid code and keeps the closest one. A received word that is not itself a
valid code is flagged as corrupted. With 8-chip codes that catches 240 of the
256 possible words, or 93.75 %; a parity check would catch only half of them.
Any word within n/4-1 chips of a valid code is corrected to that code. If the
word is equally close to two or more codes, the receiver does not guess. It
raises a retransmission request, `req`, instead.

This RTL implements both ends of such a link: an encoder with a serialiser,
and a deserialiser followed by a search, a correction stage and a decoder. It
is written in synthesizable SystemVerilog. The width is set by one parameter,
`K`, which defaults to the main configuration: 4-bit data and 8-chip codes.

## The code

With `K` data bits there are 2^K codes of N = 2^(K-1) chips:

* The low K-1 data bits `r` select a Walsh (Sylvester-Hadamard) row. Chip
  `j` of that row is the parity of `r AND j`.
* The top data bit selects the antipodal copy, which is the row inverted.

For K = 4:

| data | code     | data | code     |
|------|----------|------|----------|
| 0000 | 00000000 | 1000 | 11111111 |
| 0001 | 01010101 | 1001 | 10101010 |
| 0010 | 00110011 | 1010 | 11001100 |
| 0011 | 01100110 | 1011 | 10011001 |
| 0100 | 00001111 | 1100 | 11110000 |
| 0101 | 01011010 | 1101 | 10100101 |
| 0110 | 00111100 | 1110 | 11000011 |
| 0111 | 01101001 | 1111 | 10010110 |

Throughout the RTL a code is an N-bit vector. Chip 0, the leftmost chip
above, is held in the MSB and is sent first. Any two codes differ in N/2
chips, except a code and its own inverse, which differ in all N. So a word
with at most N/4-1 wrong chips is strictly closer to the sent code than to
any other. With exactly N/4 wrong chips it can be equally close to two codes.
That is the case that raises `req`.

The table is never stored as a data file. `ortho_pkg::ortho_row` computes
each row from the formula above, and `ortho_lut` builds a constant array from
it at elaboration. The table therefore scales with `K` with no other change,
up to K = 7 (64 chips).

## Transmitter (`ortho_tx`)

`ortho_encoder` reads the table at `data` (combinational). `tx_p2s` is a
shift register that loads the code and shifts it out MSB first, one chip per
rising edge, with `txvalid` high.

While `en` is high, a new word is taken on every edge at which the shift
register is empty or showing its last chip; `accept` marks those edges. Holding
`en` high therefore sends codes back to back without gaps. To send a single
code, drop `en` after `accept`.

## Receiver (`ortho_rx`)

The received chips pass through four stages in a fixed sequence.

1. **`rx_s2p`** shifts in chips while `en` is high. After N chips it copies
   the whole word to `rxcode` and pulses `code_valid`. A cycle with `en` low
   restarts the chip count, so `en` frames the codes.
2. **`err_detect`** is the core of the receiver. It steps through the table
   one entry per clock. For each entry it XORs the received word with the
   code and counts the ones in the result (the Hamming distance). It keeps:
   * the smallest count so far;
   * the first index that reached that count;
   * a `tie` flag, which is set when a later entry reaches the same count
     and cleared when a smaller count appears.

   Entry 0 is compared in the start cycle itself, so the 2^K = 2N entries
   take exactly 2N cycles. A nonzero minimum means the received word is not
   a valid code: an error has been detected.
3. **`err_correct`** reads the table at the winning index. That code is the
   corrected code. If `tie` is set, `req` goes high. In that case the
   corrected code and the count are *not* updated and keep their previous
   values. This matches the reference behaviour, in which `count`, `ortho`
   and `data` stay at their old values while `req` is high.
4. **`ortho_decoder`** turns the corrected code back into data without a
   second search:
   * data bit K-1 is chip 0 (every Walsh row starts with 0, so chip 0 is
     the antipodal flag);
   * data bit m is chip 2^m XOR chip 0.

An output register updates `count`, `err`, `ortho`, `data` and `req` together
and pulses `valid` for one cycle.

### Timing

| event | cycle |
|---|---|
| `rxcode` holds a new complete word (`code_valid`) | c |
| search compares entries 0 … 2N-1 | c … c+2N-1 |
| detector `done`, results ready | c+2N |
| corrected code registered | c+2N+1 |
| `valid`, all outputs updated | c+2N+2 |

A received code is therefore processed in **2N+2 cycles** (18 for 8-chip
codes). The search keeps its own copy of the word, so the next frame can
arrive during a search. A new frame may complete no sooner than 2N cycles
after the previous one. If it completes earlier, the search still running is
not disturbed: the new frame is dropped, and `overrun` pulses. Codes sent back
to back (one every N cycles) are too fast, so a sender must leave at least N
idle cycles between 8-chip frames.

Through the whole link (`ortho_codec_top`), the result arrives 3N+3 cycles
after the cycle in which `tx_accept` is high:

* 1 cycle to load the shift register;
* N cycles to send the chips;
* 2N+2 cycles of processing.

## What the receiver guarantees

| code | data bits | chips corrected (n/4-1) | received words | undetected (valid codes) | detection rate |
|---|---|---|---|---|---|
| 8  | 4 | 1  | 256    | 16 | 93.75 % |
| 16 | 5 | 3  | 65 536 | 32 | 99.95 % |
| 32 | 6 | 7  | 2^32   | 64 | ≈100 % |
| 64 | 7 | 15 | 2^64   | 128 | ≈100 % |

"Undetected" means a word that is itself a valid code. Such a word is
accepted as sent, because no receiver can tell it from a real transmission.
A word with more than n/4-1 wrong chips may still be decoded to the wrong
code if it happens to lie nearest that code. When this happens, `err` is high
and `req` is low. The testbenches count this case ("wrong").

## Top level (`ortho_codec_top`)

The top level holds the transmitter and the receiver, with a shared clock and
an asynchronous active-low reset. The channel between them is not part of
the hardware. To close the link, connect `tx_code`/`tx_valid` to
`rx_bit`/`rx_en` through whatever channel you want, or directly for a
loop-back. All ports are plain signals. `rx_count` is `$clog2(N+1)` bits wide.

## Where this RTL makes its own choices

The published description fixes the code table, the block sequence, the
XOR-and-count search for the minimum, `req` on a shared minimum, the n/4-1
correction limit and the 2n+2 cycle processing time. The following are
choices of this implementation:

* the chip order (MSB, leftmost chip, first);
* reset behaviour (asynchronous, active low, everything cleared);
* framing of received chips by `en`;
* the `accept`, `txvalid`, `valid`, `err` and `overrun` signals;
* how the 2n+2 cycles are split: 2n cycles of search, one for correction,
  one for the output register;
* a one-cycle combinational ones-counter rather than a sequential one;
* the table built from a formula rather than loaded from a memory image, and
  one table copy per reader;
* the decoder reading bits directly rather than searching a table;
* outputs holding their values while `req` is high;
* the first index winning a tie, which matters only for the reported
  `count`.

Two figures in the original description are inconsistent with themselves,
and the RTL follows the arithmetic. The 8-chip detection rate is printed
there as 93.57 %; the formula (2^8-2^4)/2^8 gives 93.75 %. The number of
16-chip words is printed as 65 535; it is 2^16 = 65 536.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>`, and a run passes when `m` is 0.
`tb_ortho_ref_pkg` is the reference model used by all of them. It builds the
codes by Hadamard recursion, holds the 8-chip table above as literal
constants, and does the nearest-code search by brute force.

| testbench | what it covers |
|---|---|
| `tb_ortho_lut`, `tb_ortho_encoder`, `tb_ortho_decoder` | every table entry and decode, 8 and 16 chips |
| `tb_tx_p2s`, `tb_ortho_tx` | serial order, valid/ready, gap-free back-to-back sending |
| `tb_rx_s2p` | framing, aborted frames, `rxcode` stability |
| `tb_err_detect` | all 256 8-bit words and random 16-bit words; `done` exactly 2N cycles after start; ignored restarts |
| `tb_err_correct` | corrected code, holding on a tie, `req`/`err` |
| `tb_ortho_rx` | the three reference cases (intact 00111100, one error 00110100, tie 00110000), random errors, 18-cycle latency, overrun |
| `tb_ortho_codec_top` | end to end at default size through a noisy channel; counts intact, corrected, request, wrong-decode and overrun events and fails if any never occurs |
| `tb_workloads` (with helper `tb_rx_sweep`) | all 256 8-chip and all 65 536 16-chip received words (exactly 16 and 32 undetected); 32- and 64-chip codes with 7 and 15 flipped chips |

To run one with plain Verilator from the project root:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/ortho_pkg.sv tb/tb_ortho_ref_pkg.sv tb/tb_ortho_codec_top.sv \
        --top-module tb_ortho_codec_top -Mdir obj
    ./obj/Vtb_ortho_codec_top

For `tb_workloads`, also add `tb/tb_rx_sweep.sv`. It runs about 3.4 million
cycles and takes roughly 15 seconds.

To change the code length, override `K` on `ortho_codec_top` (or on any
block): K = 5 gives 16-chip codes and 34-cycle processing. All widths follow
from `K`.
