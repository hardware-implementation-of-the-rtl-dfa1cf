# GPS authentication: the prover's response unit in hardware

In the GPS (Girault–Poupard–Stern) identification scheme, a prover shows
that it knows a secret `s` without revealing it. It first sends a
commitment built from a random number `r_i`. The verifier answers with a
random challenge `n_V`, and the prover must reply with

    y = r_i + s * n_V

Everything expensive in the scheme can be done ahead of time, off the
device: the commitment and `r_i` are precomputed "coupons". The only
arithmetic the prover does on line is this one multiply-add. Because `s` is
a constant of the device, the multiplication is a multiplication **by a
constant**. Without a modular reduction, it is cheap enough for very small
chips such as RFID tags.

This RTL gives three datapaths for that multiply-add. Each trades area
against cycles:

| unit          | multiplier                  | state (flip-flop bits) | cycles start → y |
|---------------|-----------------------------|------------------------|------------------|
| `gps_serial`  | none: 16-bit adder, shift-and-add | 237 (192 accumulator buffer) | 399 |
| `gps_hybrid`  | `KCM_{4,4}(s)`, one 4-bit digit   | 197 (160 accumulator)   | 10  |
| `gps_parallel`| `KCM_{32,4}(s)`, whole challenge  | 161 (product register)  | 1 (pipelined) |

The sizes are:

| quantity | bits |
|----------|------|
| challenge `n_V` | 32 |
| secret `s` | 128 |
| `s * n_V` | 160 |
| `r_i` and `y` | 240 |

All of them live in `rtl/gps_pkg.sv`. `y` is computed modulo 2^240.

## Files

| file | content |
|------|---------|
| `rtl/gps_pkg.sv` | widths, the default secret, `arch_e`, `wr_mode_e` |
| `rtl/gps_kcm.sv` | constant-coefficient multiplier `KCM_{IN_W,4}(S)` |
| `rtl/gps_shift_buffer.sv` | 16 × 12 shift-register accumulator of the serial unit |
| `rtl/gps_serial_ctrl.sv`, `rtl/gps_serial.sv` | serial unit |
| `rtl/gps_hybrid_ctrl.sv`, `rtl/gps_hybrid.sv` | hybrid unit |
| `rtl/gps_parallel.sv` | parallel unit |
| `rtl/gps_auth.sv` | top: the three units behind one request interface |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## The serial unit

This unit is the hardest of the three to read from its schematic. It uses
no multiplier at all.

### Datapath

The unit has four parts:

* **Adder.** One 16-bit adder, with a carry flip-flop that links the words
  of one multi-word addition.
* **Accumulator buffer.** `gps_shift_buffer` is 16 parallel shift registers,
  each 12 flip-flops long. Together they hold a 12-word (192-bit) number. The
  number circulates past the adder least significant word first: one word
  per cycle, a full turn every 12 cycles. The buffer output is one adder
  input.
* **Two operand multiplexers.** The first chooses between word `k` of `s`
  and zero. The second chooses between that and word `k` of `r_i`.
* **Shift on the write-back.** The low 15 bits of the sum go straight back
  into the buffer, one position up. The top bit of the sum waits one cycle
  in a 1-bit register and becomes bit 0 of the next word. So a full turn
  writes back `2 * (acc + operand)`: the loop doubles the number as it
  stores it.

### Schedule

`gps_serial_ctrl` runs Horner's rule over the challenge bits, most
significant bit first:

    acc = 0
    for j = 31 downto 0:   acc = 2*acc + n_V[j] * s     (one 12-cycle pass)
    y = acc + r_i                                      (one 15-cycle pass)

In the pass for bit `j`, the adder sees word `k` of `s` if `n_V[j] = 1` and
`k < 8`; otherwise it sees zero. The pass writes the sum back doubled.
Because every pass doubles, the buffer holds `2 * acc` between passes.
That is the value the next pass needs, since it adds `n_V[j-1] * s` to
`2 * acc`.

### The two extra write-back modes

The plain loop above has two problems. This RTL adds one write-back mode for
each.

* **`WR_PLAIN`.** The last multiply pass (bit 0) must not double. Otherwise
  the buffer would end with `2 * s * n_V`. So the controller switches the
  write-back to store the sum unshifted in that pass.
* **`WR_ZERO`.** `r_i` and `y` are 15 words long, but the buffer holds only 12.
  In cycles 12 to 14 of the `r_i` pass, the buffer output is what this pass
  wrote in cycles 0 to 2. So the `r_i` pass writes zeros back. Those zeros
  are the accumulator's top words, which are zero anyway. The same writes
  leave the buffer cleared for the next challenge.

At pass start (`first_word`), the carry flip-flop and the 1-bit shift
register are ignored. Whatever they hold from the previous pass's last word
is zero for any value that fits, but ignoring them is safer.

### Timing

The unit takes a challenge only when it is idle. Counting the start cycle
as cycle 0:

* Cycles 1 to 384 are the 32 multiply passes, 12 cycles each.
* Cycles 385 to 399 are the `r_i` pass. In cycle `385 + k`, the unit asks
  for word `k` of `r_i` on `r_idx` and reads it combinationally from
  `r_word`. In the same cycle it puts word `k` of `y` on `y_word`, with
  `y_valid` high. `done` is high together with word 14.

## The hybrid unit

`gps_hybrid` runs Horner's rule in radix 16, one 4-bit challenge digit per
cycle, most significant digit first:

    acc = 16*acc + s * d_i        (i = 7 .. 0)
    y   = acc + r_i

The datapath has three parts:

* **`KCM_{4,4}(s)`.** This is one 16-entry table of `s * d`. Its 132-bit
  output is registered.
* **Adder.** The 240-bit adder adds the registered product to the feedback
  `{acc, 4'b0000}`, which is the 160-bit accumulator shifted left by one
  digit (164 bits).
* **Final step.** A multiplexer gives the adder `r_i` instead of the product.
  In that step the feedback is taken unshifted, so `y = acc + r_i`. Like
  `WR_PLAIN` in the serial unit, this unshifted feedback is an addition of
  this RTL. A feedback that is always shifted would give `16 * s * n_V + r_i`.

`gps_hybrid_ctrl` steps through the following schedule. Step 0 is the first
cycle after start.

| step | KCM input | product register | accumulator | output |
|------|-----------|------------------|-------------|--------|
| 0    | digit 7   | ← `s*d7`         | ← 0         |        |
| 1–7  | digit 7−step | ← `s*d(7−step)` | ← 16·acc + product |  |
| 8    | –         | –                | ← 16·acc + `s*d0`  |        |
| 9    | –         | –                | –           | `y = acc + r_i`, `y_valid`, `done` |

`y` is the adder output. It is valid only in step 9, and `r_i` must be
present in that cycle.

## The parallel unit

`gps_parallel` multiplies the whole 32-bit challenge in one cycle with
`KCM_{32,4}(s)` and registers the 160-bit product. In the next cycle, one
240-bit adder adds `r_i`. A new challenge can be given every cycle. `r_i` of
a challenge must be on the input in the cycle after the challenge, when
`y_valid` is high.

## The constant multiplier (KCM)

`gps_kcm` splits its input into 4-bit digits. Each digit indexes a 16-entry
table holding `S * d`, 132 bits per entry, and the shifted table outputs are
summed. The table is computed at elaboration from the parameter `S`, so the
secret is wired into the logic and is never stored in a readable register.

* The 32-bit version has 8 tables, about 17 kbit of constant data, and a
  sum of 8 terms.
* The 4-bit version is a single table.

The adder tree is left to synthesis: the RTL writes a plain sum.

## Top level: `gps_auth`

`gps_auth` puts the three units side by side. They share the secret
(parameter `SECRET`), and a request picks one of them with `arch`
(`ARCH_SERIAL`, `ARCH_PARALLEL` or `ARCH_HYBRID`).

A device would normally contain only one of the three. The top holds all of
them so that each can be built, compared and verified in one place.
Removing two of them means deleting their instances and their cases in the
two `case` statements.

**Inputs:**

* `start` is taken while `busy` is low. Starts while busy are ignored.
* `n_v` and `arch` are sampled with `start`.
* `r_i` must hold from `start` until `done`. For the serial unit, the top
  selects the requested 16-bit word of `r_i` itself.

**Outputs:**

* `y` is a register. The serial unit's words are written into it one by
  one.
* `done` pulses for one cycle when `y` is complete. `y` then holds until the
  next response.

**Latency from start to done:** 400 cycles (serial), 2 (parallel), 11
(hybrid).

An assertion in the top checks that the serial and hybrid units are never
busy at the same time.

## What follows the source design and what does not

**From the source design:**

* The three datapaths, as block diagrams.
* Every width named above.
* The word-serial loop with its 1-bit shift register.
* The 12-word buffer.
* The 160-bit accumulator with its 4-bit-shifted feedback.
* The use of constant-coefficient multipliers with 4-bit digits.

**Choices of this RTL**, because the diagrams leave them open:

* The control schedules, and the digit and bit order. MSB first is forced
  by the left-shifting feedback.
* The two serial write-back modes `WR_PLAIN` and `WR_ZERO`, and the hybrid
  unit's unshifted feedback in its last step. Without them, the loops as
  drawn do not produce `r_i + s * n_V`.
* The carry flip-flop of the serial adder.
* The table-per-digit structure inside the KCM.
* All handshakes: `start`/`busy`/`done`/`y_valid`, and the word index
  `r_idx`.
* Asynchronous active-low reset.
* The accumulator clear.
* The top level as a whole: the three units behind one interface, and the
  `y` register.
* The value of the secret. `S_DEFAULT` in `gps_pkg` is only an example; set
  `SECRET` per device.

**Not here:** the storage of the coupons (`r_i` and the commitments), the
random-number source, and the protocol layer that exchanges messages with a
verifier. The source design does not describe them. `r_i` therefore enters
as a port.

No cycle counts, clock rates or area figures are given by the source design
to compare with. The latencies above follow from the schedules.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares
against values computed independently in the testbench, using wide integer
arithmetic for `(r_i + s * n_V) mod 2^240`:

* **`tb_gps_kcm`:** all 16 digits of the single-digit multiplier; corner and
  200 random challenges for the 32-bit one.
* **`tb_gps_shift_buffer`:** 1000 random writes with a random shift enable,
  against a queue model.
* **`tb_gps_serial_ctrl`:** every control output in every one of the 399
  cycles, against the schedule written out from the cycle number. Also
  checks that a start while busy is ignored.
* **`tb_gps_serial`:** zero, all-ones and single-bit challenges, an `r_i`
  that makes `y` wrap, and random cases. Checks the 399-cycle latency and
  the word order of `y`.
* **`tb_gps_hybrid_ctrl`:** the step table above.
* **`tb_gps_hybrid`:** corner and 200 random cases back to back, and the
  10-cycle latency.
* **`tb_gps_parallel`:** one challenge per cycle with random gaps, and the
  one-cycle latency.
* **`tb_gps_auth`:** the full top at its default parameters. It runs 63
  requests with random switches between the three architectures, checking
  every `y`, every latency, that `y` holds after `done`, and that starts
  while busy are ignored. It also counts each of these events and fails if
  one never happens: each architecture, an architecture switch, an ignored
  start, and a wrapping `y`.

The two controllers also carry assertions. The serial controller checks
that `r_i` and `s` are never selected together and that `done` comes only
with a `y` word. The hybrid controller checks that the accumulator is never
cleared and loaded in one cycle, or loaded while `r_i` is on the adder.
`--assert` turns them on in simulation.

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog. Each was also run against a copy of its module with one
deliberate bug, and each reported failures.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/gps_pkg.sv tb/tb_gps_auth.sv --top-module tb_gps_auth
    ./obj_dir/Vtb_gps_auth

Replace `tb_gps_auth` with any other testbench name to test one module. The
package must come first on the command line. Every testbench finishes in
well under a second.

To change the secret, override `SECRET` on `gps_auth`, `gps_serial`,
`gps_hybrid` or `gps_parallel`. The testbenches compute their expected
values from `gps_pkg::S_DEFAULT`, so for them change that constant instead.
The word, digit and buffer sizes are package parameters. The serial buffer
depth must hold the product plus one bit: 12 × 16 = 192 ≥ 161.
