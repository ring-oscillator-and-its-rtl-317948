# Ring-oscillator PUF password manager

A password database normally stores each user's password, or a hash of it,
and a stolen table can then be attacked offline. This design stores neither.
The password hash is used only as a *question* to a physical unclonable
function (PUF): a bank of eight ring oscillators whose frequencies depend on
the manufacturing spread of their parts. The answer, a 16-bit word that
only this particular piece of hardware produces for that password, is what
goes into the table. At sign-in the same question is asked again and the new
answer is compared with the stored one.

The RTL here implements the design of the report "Ring Oscillator and its
application as Physical Unclonable Function (PUF) for Password Management"
(A. Shamsoshoara, 2019). That work built the rings on a breadboard, measured
them with a Raspberry Pi and kept the table in MATLAB on a PC. Here the
measurement, the challenge generation and the table are hardware, the rings
are a behavioural model, and the hash function stays outside.

## 1. One ring line

Each of the eight lines is a two-input NAND gate followed by three inverters.
The first NAND input is the line's enable; the second is fed back from the
output of the *second* inverter. The loop therefore has three inverting
stages (NAND, inverter 1, inverter 2) and oscillates while the enable is high;
the third inverter only buffers the output. Every stage is loaded by an RC
pair (10 kOhm and 1 uF in the original schematic), so one stage delay is
tau = 0.69 R C and the line runs at

    f = 1 / (2 * n * tau),  n = 3 loop stages.

With the enable low the NAND output is forced high, the ring stops, and the
buffered output rests low.

`ro_line` models this with delays, not gates: after the enable rises the
output first rises four stage delays later (three loop stages and the
buffer), then toggles every three stage delays; when the enable falls the
ring finishes its current half period and stops low. It is a simulation
model only; on silicon the same loop would be built from real cells and its
frequency would come from their delays.

In the original measurements the eight lines ran at 136, 46, 26, 14, 204, 66,
394 and 56 Hz (different capacitors per line). The top-level parameter
`LINE_FREQ_HZ` holds these numbers and gives line g the stage delay
1/(6 f_g). Changing them is how one "manufactures" a different chip in
simulation.

## 2. Selecting and measuring a pair

Only two lines run at a time. A 3-bit line number for the *first* element of
a pair and one for the *second* drive two `line_demux` blocks (one enable in,
eight out) and two `line_mux` blocks (eight ring outputs in, one out). A line
named by both selectors is enabled once (the two demux outputs are ORed), so a
pair such as 1-1 is legal and simply compares a line with itself.

The two selected outputs go to two `freq_counter` blocks. Each synchronises
its asynchronous input with two flip-flops, detects rising edges, and counts
them during a gate window of `GATE_CYCLES` clock cycles. The original counted
rising edges for 0.5 s; with the assumed 1 MHz clock the default is 500000
cycles, and counts come out at f/2 (68, 23, 13, 7, 102, 33, 197, 28). Like
the original's interrupts, which had a 1 ms bounce time, a counter ignores
edges for `HOLDOFF_CYCLES` (1000) cycles after each counted edge; this
suppresses glitches and caps the countable rate at about 1 kHz, well above
the fastest line. The count is 16 bits wide and saturates. The ring must run slower than half the
clock rate.

## 3. From password hash to PUF word

This is the heart of the design and lives in `puf_sequencer`.

The host hashes the password and hands over the first 32 hexadecimal
characters. Characters 2i and 2i+1 form pair i (i = 0..15), and each
character selects a line by its **low three bits** (that is, the character
value modulo 8). For pair i the sequencer

1. sets both line selectors while all rings are stopped,
2. raises the common ring enable and starts both counters in the same cycle,
3. waits for both counts,
4. sets bit i of the word to 1 if the first line counted **more** edges than
   the second, and to 0 otherwise (ties give 0),
5. stops the rings.

The sixteen bits form the word. Both the character-to-line rule and the
comparison rule are recovered from the original screenshots, and the design
reproduces them exactly: the hash of "12345" begins `04df31e3 361e111f ...`,
which gives pairs 0-4, 5-7, 3-1, 6-3, 3-6, 1-6, 1-1, 1-7 and, with the
frequencies above, challenge bits 0 1 0 1 0 0 0 0; the hash of the wrong
password "123456" begins `6d69327f a3d39a49 ...`, giving pairs 6-5, 6-1, 3-2,
7-7, 2-3, 5-3, 1-2, 4-1 and bits 1 1 0 0 1 1 1 1. Bit i of the word holds
pair i.

Note what makes this a PUF rather than a hash: the word depends on the
ordering of the eight line frequencies, which is set by the physical parts,
not by anything stored.

## 4. The table and the two operations

`password_table` has 16 x 16 cells. A cell is addressed by K = ID key XOR
password key: the upper nibble of K is the row, the lower nibble the column.
The original screenshots use the codes of the first ID and password
characters ('a' = 0x61, '1' = 0x31, giving row 5, column 0 here and row 6,
column 1 in its one-based display), while its text speaks of
XOR(hash(ID), hash(password)). The keys are inputs, so the host can supply
either.

`pwm_controller` runs one operation at a time:

* **Register**: run the PUF on the password hash and append the word, the
  *challenge*, to the addressed cell. Different users whose keys XOR to the
  same value share a cell; each append adds one entry. The original table
  was a growable software structure; here a cell holds `SLOTS` entries
  (default 4) and a registration into a full cell is refused with
  `ST_TABLE_FULL`.
* **Authenticate**: run the PUF again and compare the word, now the
  *response*, with the cell's entries. `ST_APPROVED` if any entry equals it,
  `ST_FAILED` otherwise.

A combinational read port (`disp_row`, `disp_col`, `disp_slot`) shows any
entry, which is the original "display the table" mode.

## 5. Interface and timing of the top (`ro_puf_pwm_top`)

The top is eight `ro_line` models around `ro_puf_pwm_core`, which holds all
the logic (selectors, counters, sequencer, controller, table) and is the
synthesizable part. The core has the same ports as the top plus
`line_en[7:0]` (out, one enable per ring) and `line_out[7:0]` (in, the
asynchronous ring outputs), so real rings, or rings built from standard
cells, can replace the models.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock (1 MHz assumed), asynchronous active-low reset |
| `op_valid`, `op_ready` | in/out | request handshake; `op_ready` is high when idle |
| `op` | in | `OP_REGISTER` or `OP_AUTHENTICATE` |
| `id_key`, `pw_key` | in | 8-bit keys; their XOR is the cell address |
| `pw_hash[127:0]` | in | 32 hash characters, the first in bits 127:124 |
| `res_valid`, `res_status`, `res_word`, `res_row`, `res_col` | out | one-cycle result |
| `meas_valid`, `meas_line_*`, `meas_count_*` | out | the two counts of each measured pair |
| `disp_row`, `disp_col`, `disp_slot` → `disp_valid`, `disp_word` | in → out | table read |

`pw_hash`, `op`, and the keys only need to be valid in the accepting cycle.
One pair takes `GATE_CYCLES + 4` cycles, one word `16 * (GATE_CYCLES + 4)`,
and `res_valid` comes `16 * (GATE_CYCLES + 4) + 3` clock edges after the
edge that accepted the request: 8 000 067 cycles, about 8 s, at the
defaults.

Parameters of the top: `GATE_CYCLES` (500000), `HOLDOFF_CYCLES` (1000),
`SLOTS` (4), `LINE_FREQ_HZ`
(the eight frequencies). Shared constants and types (`pwm_op_t`,
`pwm_status_t`, line numbers, table size) are in `ro_puf_pkg`.

## 6. Where this departs from the original, and how far to trust it

Taken from the original: eight lines of a NAND and three inverters with the
feedback from the second inverter, the RC frequency formula, two input and
two output selectors with 3-bit line numbers, rising-edge counting over 0.5 s
with a 1 ms hold-off,
16 pairs from 32 hash characters, the modulo-8 rule, the comparison rule, the
16 x 16 table addressed by an XOR, append on collision, and the
register / authenticate / display modes.

Choices made here, where the original is silent:

* the 1 MHz clock, the synchroniser and the 16-bit saturating counters;
* measuring both lines of a pair at once, stopping the rings between pairs
  (the breadboard version instead ran all eight lines at once and counted
  them in parallel, for lack of selector chips; the selector version is the
  one built);
* bit order of the word (pair 0 in bit 0);
* a bounded cell of 4 entries, refusal when full, and "match any entry" on
  sign-in;
* zero-based rows and columns, upper nibble as row;
* all handshakes and the status encoding.

Small conflicts in the source: one screenshot shows 392 Hz for line 6 where
the text says 394 Hz (394 is used; no comparison changes), and a code
comment says the counting window is 1 s where the text says 0.5 s (0.5 s is
used).

Not built: the hash function (the original never names it; its 40-character
outputs look like SHA-1, but that is not stated), the PC-to-Raspberry-Pi
TCP/IP link and the MATLAB user interface. The top takes the hash
characters and keys as inputs instead.

The ring model is idealised: no noise, no temperature drift, no jitter. A
real ring-oscillator PUF needs error handling for pairs whose frequencies are
close (the original notes that error correction is required); this design,
like the original demo, has none, so the 66 Hz / 56 Hz and 46 Hz / 56 Hz pairs
would be the first to flip on real hardware.

## 7. Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
      --top-module tb_ro_puf_pwm_top rtl/ro_puf_pkg.sv tb/tb_ro_puf_pwm_top.sv
    ./obj_dir/Vtb_ro_puf_pwm_top

* `tb_ro_line`, `tb_line_demux`, `tb_line_mux`, `tb_freq_counter`,
  `tb_puf_sequencer`, `tb_password_table`, `tb_pwm_controller`: unit tests.
  The sequencer and controller tests replace their neighbours with models,
  so they run in microseconds.
* `tb_ro_puf_pwm_top`: the whole design with a 5 ms gate, a 10 us hold-off
  and frequencies 100 times higher, so every count equals the full-size one. It replays the
  original demo (register "admin"/"12345", sign in right and wrong), then
  fills one cell with colliding users until it is full, and reads the table.
  It counts each mechanism (registration, approval, rejection, collision,
  full cell, line compared with itself, first or second line faster, display
  read) and fails if one never happens. About 2 s of wall time.
* `tb_ro_puf_pwm_top_full`: the top at its default parameters, one
  registration and one sign-in, 16 million clock cycles, under a minute.

To model another chip, change `LINE_FREQ_HZ`; to shorten simulations, scale
the frequencies up and `GATE_CYCLES` and `HOLDOFF_CYCLES` down by the same
factor.

## Files

`rtl/`: `ro_puf_pkg` (constants, types), `ro_line` (behavioural ring model),
`line_demux`, `line_mux`, `freq_counter`, `puf_sequencer`, `password_table`,
`pwm_controller`, `ro_puf_pwm_core` (all logic), `ro_puf_pwm_top` (core
plus ring models). `tb/`: one testbench per block plus the
full-size one.
