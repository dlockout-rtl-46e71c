# DLockout: limiting key guesses on a key-obfuscated RTL design

Key-based obfuscation (logic locking) hides the function of an IP block
behind a secret key: key-controlled multiplexers are inserted on operand
paths, and only the right key bits route the right operands. On its own this
lets an attacker who holds a working chip try keys for as long as they like.
DLockout adds a lockout to such a design, much like a software licence that
allows a few wrong passwords. Every obfuscation multiplexer gets a comparator
that tells whether it passed the right operand. A checker counts the runs in
which any comparator fired, in storage that survives power-down. When the
count reaches a preset number of allowed attempts, the controller goes into a
*blackhole* state it never leaves. Earlier wrong attempts only abort the run
(*partial lockout*). The key itself is never stored on chip: the secret is in
the wiring of the multiplexers.

This RTL implements the lockout circuitry, the modified controller, the
masked obfuscation point, and the error detection unit (EDU) against fault
attacks. The scheme is meant to be inserted into datapaths produced by
high-level synthesis. Those host datapaths are not reproduced here. Instead
the blocks are wired into a small example host with two ALUs and four
registers, so that the whole mechanism can be simulated end to end.

## Structure

```
                 start, reset                      pi[0..3], key, mask
                     |                                     |
              +------v-------+    ctrl (load, check,  +----v------------------------------+
   finish <---|  controller  |----------------------->|  obf_datapath                     |
 locked_out <-|  S0 S1 S2..Sn|    step_en, step_idx)  |   R0..R3, 2 x alu                 |
              |  + blackhole |<-----------------------|   KEY_W x obf_point (MUX + XOR)   |
              +--------------+        dp_comp         |   checker_fsm -> nv_counter       |
                                                      |   edu                             |
                                                      +---> dout[0..3], attempts, edu_fault
```

`dlockout_top` holds one `controller` and one `obf_datapath`. All of the
lockout logic sits in the datapath, beside the operand paths. The controller
learns the outcome of the key check only through the 3-bit `dp_comp`.

## The obfuscation point and its comparator (`obf_point`)

Each key bit `K_n` drives one 2:1 multiplexer. Its inputs are the operand the
original design uses (*correct*) and a *decoy*. Its select is `K_n ^ Mask_n`.
The point passes the correct operand when the select equals the point's
secret bit `SECRET`. The secret bit is a parameter, because it is fixed by
the way the multiplexer is wired. Beside the multiplexer, an XOR compares the
multiplexer output with the correct operand. The operands are `DATA_W` bits
wide, so the bitwise XOR is OR-reduced to one flag, `xor_o`:

| K_n | Mask_n | MUX_n (SECRET = 0) | XOR_n |
|-----|--------|--------------------|-------|
| 0   | 0      | correct            | 0     |
| 0   | 1      | decoy              | 1     |
| 1   | 0      | decoy              | 1     |
| 1   | 1      | correct            | 0     |

With the mask at zero, this is a plain key multiplexer. With a mask, the key
is applied as two shares whose XOR must equal the secret. The multiplexer
output then does not depend on either share alone, which is the point of
masking against power analysis. The published masking table is the
`SECRET = 0` row set above. A nonzero `SECRET` is the same circuit with the
multiplexer inputs swapped.

**Limit inherited from the scheme:** the comparator sees a wrong key bit only
when the decoy and correct operands differ at the time of the check. If they
are equal, a wrong bit passes unnoticed (and does no harm in that cycle). The
testbenches use distinct input values.

## Counting attempts (`checker_fsm`, `nv_counter`)

The checker works during the key-check step S1 (`check_en`). If any
comparator is 1, the attempt is wrong, and the count is incremented at the
clock edge that ends S1. The count is 3 bits wide, and `ALLOWED_ATTEMPTS`
defaults to 5. `dp_comp` is combinational, so the controller acts on it in
the same S1 cycle:

| condition                                   | dp_comp | meaning          |
|---------------------------------------------|---------|------------------|
| stored count >= ALLOWED_ATTEMPTS            | `001`   | design lockout   |
| a comparator fired, count + 1 >= ALLOWED    | `001`   | design lockout   |
| a comparator fired, count + 1 <  ALLOWED    | `100`   | partial lockout  |
| no comparator fired                         | `000`   | key correct      |

With the defaults, wrong attempts 1 to 4 give partial lockout, and the 5th
locks the design. The count saturates at the threshold. A correct key does
not lower it.

The count must survive resets and power cycles. Otherwise an attacker would
simply reboot between guesses. `nv_counter` is a behavioural stand-in for
that non-volatile storage. It is a register with a write enable that no
functional reset touches. In silicon it is replaced by an NVM macro with the
same ports. Its `prog_clear` input, brought out to the top as `nv_init`,
stands for the one-time provisioning at manufacture. It is needed because a
2-state simulator starts the register at a random value. It must not be
reachable in a fielded part. The scheme provides no way for a genuine user
to recover a locked part.

## The controller (`controller`)

| state      | next state                                                  |
|------------|-------------------------------------------------------------|
| S0         | S1 when `start` (inputs latched into R0..R3)                |
| S1         | S0 on `100`; blackhole on `001`; S2 otherwise              |
| S2 .. Sn   | next compute step; after the last, S0 with `finish` pulse   |
| blackhole  | blackhole                                                   |

S2..Sn are one encoded phase plus a step counter, so their number is a
parameter (`N_STEPS = KEY_W/4` in the top). Reset returns any state to S0,
including the blackhole. The lockout still holds because the count is
non-volatile, so the next S1 leads straight back into the blackhole. This is
what makes the lockout non-destructive but permanent. An assertion checks
that the blackhole is left only through reset.

## Timing of one run

Hold `pi`, `key` and `mask` from `start` until `finish`. The key is never
latched.

| cycle (edges after the one that samples `start`) | state   | action                      |
|-------------------------------------------------|---------|-----------------------------|
| 0                                               | S0      | load R0..R3 from `pi`       |
| 1                                               | S1      | key check, count update     |
| 2 .. KEY_W/4 + 1                                | S2..Sn  | one step per cycle          |
| KEY_W/4 + 2                                     | S0      | `finish` high for one cycle |

At the default `KEY_W = 32`, `finish` comes 10 cycles after `start`. A wrong
key leaves the controller in S0 after cycle 1 (partial lockout), or in the
blackhole (`locked_out`).

## The error detection unit (`edu`)

A fault attack could hold a comparator at 0, so that wrong keys are never
counted. For each point, the EDU recomputes the comparator with an
independent comparator of its own, and outputs observed XOR ^ expected XOR:

| fault on XOR | MUX output | expected XOR | EDU |
|--------------|------------|--------------|-----|
| stuck-at-0   | correct    | 0            | 0 (fault has no effect) |
| stuck-at-0   | decoy      | 1            | 1 (detected)            |
| stuck-at-1   | correct    | 0            | 1 (detected)            |
| stuck-at-1   | decoy      | 1            | 0 (fault has no effect) |

The OR over all points leaves the design as `edu_fault`. What a detected
fault should trigger is left open by the scheme. Here it is only a status
output and does not touch the lockout.

## The example host datapath (`obf_datapath`, `alu`)

This part is this design's own. It gives the lockout something realistic to
guard: four 32-bit registers, two ALUs, and one obfuscation point per key
bit on the ALU operand inputs.

- Point `j`: the correct operand is `R[j mod 4]`. The decoy is
  `R[(j mod 4 + 1 + (j div 4) mod 3) mod 4]`, which is never the correct
  register. The secret bit is `KEY_SECRET[j]`.
- Step `s` (0 .. KEY_W/4 - 1) uses points `4s..4s+3`:
  - even `s`: `R0 <= p0 + p1`, `R1 <= p2 - p3`
  - odd `s`: `R2 <= p0 ^ p1`, `R3 <= p2 + p3`

The key check at S1 runs all `KEY_W` comparators at once, on the registers
just loaded. The same multiplexers then carry the computation. So a design
that was forced past the check with a wrong key would still compute garbage.
The datapath testbench shows this by driving the steps itself.

## Parameters

| parameter          | default        | origin |
|--------------------|----------------|--------|
| `DATA_W`           | 32             | published MUX input width q = 32 |
| `KEY_W`            | 32             | published key sizes 32/64/128; one point per key bit; multiple of 4 here |
| `CNT_W`            | 3              | published 3-bit counter |
| `ALLOWED_ATTEMPTS` | 5              | published allowed-attempt count; must fit in `CNT_W` bits |
| `KEY_SECRET`       | `32'hA5C3_96E1`| arbitrary; wider keys are zero-extended unless set |

## Where this RTL fills gaps or departs from the published scheme

- The published state diagram draws a separate "partial lockout" bubble and
  an edge from the blackhole back toward S1. This RTL follows the published
  next-state code and text instead: partial lockout is the direct edge
  S1 -> S0, and the blackhole has no exit except reset.
- The published next-state code moves S0 -> S1 unconditionally. Here S0
  waits for `start`.
- Own choices:
  - `dp_comp = 000` for a correct key;
  - one count per check step, not one per comparator;
  - the count saturates and is never cleared by a correct key;
  - `finish` is a registered one-cycle pulse.
- Multi-bit comparators are OR-reduced to one flag per point.
- The EDU's output does not feed the lockout.
- The host datapaths of the published evaluation (Elliptic, FFT, FIR,
  Lattice, Camellia) are not included. Nor is anything about area, power or
  delay at the 10 ns clock used there.
- The non-volatile counter is a behavioural register model.

## Files

- `rtl/dlockout_pkg.sv`: `dp_comp` codes, ALU operations, controller
  states, control struct.
- `rtl/obf_point.sv`, `rtl/edu.sv`, `rtl/nv_counter.sv`,
  `rtl/checker_fsm.sv`, `rtl/alu.sv`, `rtl/obf_datapath.sv`,
  `rtl/controller.sv`, `rtl/dlockout_top.sv`.
- `tb/<block>_tb.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M` and has a watchdog.
- `tb/dlockout_model_pkg.sv`: reference model of the example datapath,
  shared by the datapath and top tests.
- `tb/dlockout_top_tb.sv`: end-to-end test at the default parameters. It
  covers:
  - correct plain and masked runs, with latency and result checks;
  - partial lockouts;
  - the count kept over reset;
  - lockout on the 5th wrong key;
  - a locked part refusing the correct key after reset;
  - the EDU catching a forced stuck-at-1 comparator;
  - the stuck-at-0 fault attack: with all comparators forced to 0, a wrong
    key runs to `finish` without being counted, and the EDU flags it.

  It reports how often each of these happened and fails if any never did.
- `tb/dlockout_keylen_tb.sv` with `tb/keylen_harness.sv`: the same session
  at 32-, 64- and 128-bit keys.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module dlockout_top_tb -y rtl -y tb +libext+.sv \
  rtl/dlockout_pkg.sv tb/dlockout_model_pkg.sv tb/dlockout_top_tb.sv
./obj_dir/Vdlockout_top_tb
```

Replace the top module for any other testbench. Add
`+verilator+rand+reset+2` to start undriven state at random values. The
testbenches initialise everything they read.

The EDU checks in `obf_datapath_tb` and `dlockout_top_tb` use `force` on the
internal comparator vector (`xor_flag`). They depend on that signal name.

To change the key length, set `KEY_W` and a matching `KEY_SECRET` on
`dlockout_top`. `KEY_W` must be a multiple of 4. To change the number of
allowed attempts, set `ALLOWED_ATTEMPTS`, widening `CNT_W` if it exceeds 7.
