# Bit-level channel adaptation controller for approximate serial links

Many sensor applications can live with a received value that is slightly off,
as long as large errors stay rare enough. On a serial bus such as I2C that
tolerance can be traded for power: the SDA line is pulled up through a
resistor, and every 0 bit burns current through it. A larger pull-up saves
that current but charges the line more slowly, so a 1 bit can still be below
threshold when it is sampled and be read as 0.

The trade-off becomes useful once it is made per bit rather than per word. A
flipped least-significant bit changes an 8-bit value by 1, a flipped
most-significant bit by 128. So the weak, cheap pull-up goes on the low-order
bit positions and the strong one on the high-order positions. The error in
the received integer then stays inside a tolerated distribution, while most
of the saving is kept. The pull-up is a digitally controlled potentiometer
(DCP), and its setting has to change at every bit boundary of the serial
word. That is too fast and too regular a job for the host processor.

This repository holds the RTL of the small controller that does that job. It
is the design described in *Probabilistic Value-Deviation-Bounded
Source-Dependent Bit-Level Channel Adaptation for Approximate Communication*
(B. A. Bilgin and P. Stanley-Marbell). It also holds testbenches, including an
end-to-end one with a simple electrical model of the bus.

## How it works

```
              processor: configuration writes, s_start, word_len
                 |                                   |
  scl ---> modulo_l_counter --- bit_idx ---> control_module ---> s_select[N-1:0] ---> DCP (SDA pull-up)
           (2-state FSM,                      (R[0..L] table,
            falling scl edges)                  s_select = R[bit_idx])
```

`channel_adaptation_module` (the top) contains two blocks:

* **`modulo_l_counter`** follows the serial clock and knows which bit of the
  word is on the line. It is a two-state machine. In `S0_IDLE` the position
  is 0. If `s_start` is high at a falling edge of SCL, the position becomes 1
  and the machine moves to `S1_COUNT`. In `S1_COUNT` every falling edge moves
  the position on by one. The falling edge after the last bit sets it back to
  0 and returns the machine to `S0_IDLE`.
* **`control_module`** holds the adaptation table, `L+1` registers of `N`
  bits each. `R[0]` is the default setting. `R[1]`..`R[L]` are the settings
  for the 1st..L-th transmitted bit. The output is always `s_select = R[bit_idx]`.

When several sensors share the bus and each has its own value statistics,
each can have its own table. With parameter `S` > 1 the control module holds
`S` tables, `src_sel` picks the live one, and `word_len` gives that sensor's
word length. The default `S` = 1 is the single-sensor controller.

The controller never looks at SDA. The processor is the bus master, so it
knows when an adaptable data word is coming and raises `s_start`. The table
is written once. After that the processor's only job is that one
synchronisation signal.

## Alignment with the I2C frame

This timing is the least obvious part of the design. On I2C a
transmitter changes SDA while SCL is low, and the receiver samples it at the
end of the clock cycle. So the falling edge of SCL is the start of a bit.
That is why every register here is clocked on the falling edge. The DCP
setting for bit *j* is in place for the whole of bit *j*, from the edge where
the sensor starts to drive it to the edge where the master samples it.

Sensor data follows an acknowledge clock, in which SDA is low. A read of a
burst of bytes looks like this (one column per SCL clock, starting at a
falling edge):

```
clock        ... A7..A1 R/W | ACK | D7 D6 D5 D4 D3 D2 D1 D0 | ACK | D7 ... D0 | NACK | STOP
s_start seen     0          |  1  |  -  -  -  -  -  -  -  - |  1  |  -  ...  |  0   |
bit_idx          0          |  0  |  1  2  3  4  5  6  7  8 |  0  |  1  ...8 |  0   |
s_select        R0          | R0  | R1 R2 R3 R4 R5 R6 R7 R8 | R0  | R1 ...R8 |  R0  |
```

"s_start seen" means the value at the falling edge that ends that clock. The
processor raises `s_start` during the acknowledge clock that comes before the
first data byte. The counter then starts at bit 1 on the same edge on which
the sensor starts driving D7. I2C sends the most significant bit first, so
`R[1]` is the setting for the MSB and `R[8]` is the setting for the LSB.
After bit 8 the counter drops back to 0. The ninth clock, the acknowledge,
therefore runs on the default `R[0]`, and so do the address byte, START and
STOP. If `s_start` stays high, the next byte is adapted at once. A burst read
of any length is handled with one signal, which is lowered during the last
acknowledge clock.

`word_len` shortens the word at run time, for example for a protocol other
than I2C or for narrower samples. A value of 0, or any value above `L`, means `L`.

## Choosing the table

The table is computed offline, when the system is designed. The inputs are
the distribution of values the sensor produces and a bound on the tail
probability `Pr(|sent - received| > m)` for every `m`. For a candidate
setting per bit position, the bus physics give the probability that each
bit position fails. Note that it depends on the word: a 1 after a 0 starts
from ground, while a 1 after a 1 starts partly charged. From those
probabilities the exact distribution of the integer error follows, by
summing the error-vector probabilities over all error vectors with a given
integer value. A search over settings then picks the table that saves the
most power while keeping the tail under the bound. The RTL is independent of
that search: any `N`-bit codes can be written.

Typical codes for a 256-step, 100 kOhm DCP used as a rheostat
(R = code x 100 kOhm / 255): 10 is about 3.92 kOhm, the usual I2C pull-up,
and 160 is about 62.7 kOhm. At reset every register holds `RESET_SEL` = 10,
so an unconfigured controller leaves the bus on a conventional, reliable
pull-up.

## Interface

| port | dir | width | meaning |
|---|---|---|---|
| `scl` | in | 1 | serial clock; all state changes on its falling edge |
| `rst_n` | in | 1 | asynchronous active-low reset: idle, all registers = `RESET_SEL` |
| `s_start` | in | 1 | start/continue adapted words, sampled at falling edges while idle |
| `word_len` | in | clog2(L+1) | run-time word length (0 or > L means L) |
| `cfg_we`, `cfg_src`, `cfg_addr`, `cfg_data` | in | 1, max(1,clog2(S)), clog2(L+1), N | write `cfg_data` into register `cfg_addr` of table `cfg_src` at the falling edge; addresses above L or tables above S-1 are ignored |
| `src_sel` | in | max(1,clog2(S)) | table in use; tie to 0 when `S` = 1 |
| `s_select` | out | N | setting for the channel modulating device (DCP wiper code) |
| `bit_idx` | out | clog2(L+1) | current bit position, 0 = outside a word |
| `busy` | out | 1 | an adapted word is in flight |

Configuration writes use the SCL clock as well. The processor owns SCL, so it
can issue them at any time before adaptation starts. `s_select` is a
combinational read of the register file, so it settles a mux delay after the
falling edge. The path is short (a 4-bit compare and increment, and a 9-to-1
multiplexer), so it should fit easily in the 200 ns bit time of 5 MHz I2C
ultra-fast mode. The actual margin depends on the target technology and has
not been measured here.

Parameters: `L` (word length, default 8), `N` (selection width, default 8,
i.e. 256 DCP steps), `S` (number of tables, default 1), and `RESET_SEL`
(default 10). They are set on the top and passed down. Shared constants and
the state type `sync_state_e` are in `chad_pkg`.

## Size

At the defaults the logic is 9 x 8 configuration flip-flops (S x (L+1) x N
in general), a 4-bit counter with one state bit, and a 9-to-1 8-bit
multiplexer. For comparison, the published FPGA implementation
(iCE40) reported 72/104/136 enabled flip-flops for L = 8/12/16, which is
exactly (L+1) x 8. It also reported 34 further flip-flops and 61 carry cells
that do not change with L, and 224/248/291 4-input LUTs. The constant part
points to a 32-bit integer bit counter. Here the counter is only
clog2(L+1) bits wide, so this version is somewhat smaller.

## Departures and choices

The states, the transitions, the falling-edge clocking, the `L+1`-register
table and `s_select = R[i]` follow the published design. The following are
this implementation's own:

* The configuration write port (`cfg_we`, `cfg_src`, `cfg_addr`, `cfg_data`). The original
  design only says the processor loads the table once. The registers are
  clocked by SCL. That choice is inferred from the published flip-flop counts
  (falling-edge flip-flops with enable, (L+1) x 8 of them) rather than stated.
* The multi-sensor interface. The original design asks for one table per
  sensor but synthesizes the single-sensor case. Here `S` sets the number of
  tables, and `src_sel` and `cfg_src` are this implementation's interface to
  them.
* The reset, its value, and the run-time `word_len` clamp. The original state
  machine lists the word length as an input. Here it is both the `L`
  parameter, which sizes the table, and the `word_len` input, which can
  shorten the word.
* If `word_len` drops below the current position in the middle of a word,
  the word ends at the next edge.
* The `bit_idx` and `busy` outputs, and two assertions in the counter: the
  position never exceeds `L`, and it is 0 exactly when idle. In simulation
  the assertions use `rst_n` as a synchronous disable while the flip-flops
  use it asynchronously, so Verilator reports `SYNCASYNCNET`. The warning is
  expected and harmless.

The DCP itself, the processor and the sensors are outside the RTL. The DCP
is an analog part that is used, not designed. The induced error rate is very
sensitive to the noise on the bus. A practical system would therefore
monitor that noise and adjust the table. No such monitor is specified, and
none is included: the table stays whatever the processor last wrote. `s_select` is the port to drive
it, for example the wiper register of a DCP integrated on the same die.

## Testbenches

All testbenches are self-checking and print `TB_RESULT checks=N failures=M`.

* `tb_modulo_l_counter` checks:
  * every word length 1..8 and the exact number of edges per word;
  * back-to-back words with `s_start` held high;
  * clamping of `word_len`;
  * asynchronous reset in the middle of a word;
  * a long random run against a reference model.
* `tb_control_module` runs a two-table build and checks:
  * reset values;
  * that a write takes effect at the falling edge and not before;
  * ignored out-of-range and disabled writes;
  * random traffic against a copy of both tables.
* `tb_channel_adaptation_module` runs the top at its default size. It plays
  the processor and the sensor, and `dcp_model` turns the selection into a
  resistance. An RC model of SDA decides what is read: 100 pF bus, 2.5 V
  supply, threshold at half supply, 200 kHz clock, no noise. It sends 64
  random bytes twice:
  * once with the strong pull-up everywhere, which must arrive intact;
  * once with the four low-order positions on the weakest setting. The read
    value must never exceed the sent one, must differ by less than 16, and
    must keep its upper nibble.

  The pull-up energy of the adapted run must be lower. In this model it is
  about 0.57 of the nominal energy. The testbench also covers 4-bit words and
  a reset in the middle of a word, and it fails if any of these never
  happened: configuration writes, adapted words, back-to-back words, default
  clocks, induced bit errors, short words, mid-word reset.
* `tb_word_lengths` runs the other published sizes, L = 12 and L = 16, side
  by side with an 8-bit, two-sensor build (helper `word_length_check`). It
  checks every per-bit selection of a six-word burst. In the two-sensor
  build the table is switched between words.

The electrical model is only a means to exercise the controller. It is not a
calibrated I2C model. Real bit-error probabilities depend on noise, on the
bus capacitance, and on the internal pull-ups and leakage of the devices on
the bus.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/chad_pkg.sv tb/tb_channel_adaptation_module.sv \
    --top-module tb_channel_adaptation_module -o sim
./obj_dir/sim
```

Replace the testbench file and top module name to run any of the others.
Lint the RTL with
`verilator --lint-only -Wall -y rtl rtl/chad_pkg.sv rtl/channel_adaptation_module.sv`.
