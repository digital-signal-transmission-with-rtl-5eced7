# Lorenz-map stream cipher link

This is a byte-serial link that encrypts its traffic with a key stream from a
discrete Lorenz system. The system is computed entirely in 17-bit natural
numbers. Transmitter and receiver each hold an identical copy of the generator.
They start from the same initial conditions and step once per byte. Each byte
of plain text is xor-ed with the low byte of the generator's X variable. Because the
arithmetic is exact integer arithmetic, two generators with the same
configuration stay bit-identical forever. Two generators that differ in one
LSB of one initial condition or constant diverge quickly. After that the receiver recovers noise, with a bit error ratio of 0.5.

The design follows the FPGA realisation published by González, Larrondo,
Gayoso, Arnone and Boemo ("Digital Signal Transmission with Chaotic
Encryption: Design and Evaluation of a FPGA Realization"). That paper gives
the map, the key and perturbation structure, and the clock ratios. Its timing
diagram gives test vectors. The serial framing and the way the receiver aligns
itself to the data stream are not described there. They are this design's own
choices and are marked as such below.

## The integer Lorenz map

The continuous Lorenz system (δ = 8, Γ = 24, b = 2) is discretised with a
forward Euler step of k = 1/64. Every variable is shifted by B = 40 and scaled
by S = 512 so that it stays positive and fits 17 bits. Every coefficient then
becomes a sum of powers of two:

```
X' = X + Y/8 - X/8
Y' = Y - Y/64 + X + Z/2 + Z/8 - (X/256)(Z/128) - 20160
Z' = Z - Z/32 - (X+Y)/2 - (X+Y)/8 + (X/256)(Y/128) + 13440
```

All divisions truncate. In hardware they are wire selections. The only real
arithmetic is adders and two small multipliers: X[16:8] × Z[16:7] and
X[16:8] × Y[16:7], each 9 × 10 bits. `lorenz_eq` computes this combinationally
in 19-bit sums and keeps the low 17 bits. From the reference start point the
unwrapped values stay between about 5,500 and 50,400, so the modulo never acts
on the attractor.

**Departure from the printed equations.** The paper prints the Z update as
`Z - Z/32 + X - (X+Y)/2 + (X+Y)/8 + ...`. That does not agree with its own
unscaled form, whose term is −kB(x+y) = −(5/8)(X+Y). The form above,
`-(X+Y)/2 - (X+Y)/8` with no separate X term, is the one implemented. It
reproduces all 23 X values of the paper's timing diagram exactly: 18505, 18856,
19167, 19454, … 23714. The printed form diverges at the fourth value.

The constants 20160 and 13440 are the parameters `CY` and `CZ`, passed down
from `chaos_tx`/`chaos_rx`. This makes it possible to build a receiver with a
mismatched constant. The paper's parameter p = kB²S + kbBS is `CZ`.

## Key and perturbation (`lorenz_system`)

Three registers hold Xn, Yn and Zn. Reset loads them from `xin`/`yin`/`zin`.
On each `step` the registers take the map's output. The key is `Xn[7:0]`: the
nine high bits of X carry the slow, visible structure of the attractor, so they
never leave the chip.

Without intervention the finite-precision map falls into a cycle of only
78,782 steps. To lengthen it, a modulo-N counter (`mod_n_counter`) marks every
N-th step. On that step the low byte fed back into the map is replaced by
`Xn[7:0] ^ Yn[7:0]`, while bits 16:8 pass unchanged. The key output itself is
always the unperturbed `Xn[7:0]`. With N = 10000 the cycle grows to exactly
6,500,000 steps. Both periods match the figures given in the paper, and
`tb_lorenz_period` measures both on the RTL.

N is a 14-bit input. N = 0 turns the perturbation off (this design's
convention). The output `perturb` is high while the map is being fed the
perturbed X, i.e. from the previous step up to the perturbed one.

## Transmitter (`chaos_tx`)

`clk_div` divides `clk_tx` by 11 and produces a one-cycle enable. On that
cycle three things happen:

- `plain_text` is taken (`pt_load` marks it);
- `cipher_text = plain_text ^ key` is loaded into the serial converter;
- the generator steps.

So byte n is always encrypted with key n. At 6.25 MHz the transmitter sends
568.2 kbyte/s.

`serial_tx` sends the byte as a frame of 11 bits, one bit per `clk_tx`:

- a start bit (0);
- eight data bits, LSB first;
- two stop bits (1).

The frame therefore fills exactly the 11 cycles between loads, and the line
carries frames back to back with no idle time. The framing is this design's
choice. The paper fixes only the one-byte-per-11-clocks rate.

## Receiver and its alignment (`chaos_rx`)

This is the least obvious part of the design, because the paper draws the
receiver's generator as clocked by a free-running `clk_rx / 44` and does not
say how that clock is phased to the incoming bytes.

- `serial_rx` takes 4 samples per bit. `clk_rx` must be four times `clk_tx`
  (25 MHz against 6.25 MHz), so a frame lasts 44 `clk_rx` cycles.
- The line first passes through two synchronising flip-flops. In the idle
  state the first low sample starts a frame and pulses `start`.
- Bit i is sampled at count 4i+2 after `start`. A start bit that is high again
  at its middle is dropped as a glitch.
- The first stop bit is sampled at count 38. If it is high, `data` and `valid`
  follow at count 39. If it is low, `frame_err` pulses instead.
- `rec_text = data ^ key` is registered at count 40 and flagged by `rec_valid`.
- The receive divider (`clk_div`, DIV = 44) is disabled until the first
  `start`, so the generator waits for data to arrive. From then on it is
  restarted by every `start`. Its tick, which steps the generator, falls at
  count 43: after the byte has been decrypted and before the next frame can
  begin (count 44). The key therefore never changes in the middle of a byte.
- Restarting on every start bit absorbs a drift of up to one sample per frame
  (tested with frames of 43, 44 and 45 cycles).
  A larger clock mismatch makes the receiver lose steps, and from then on it
  decrypts garbage; nothing resynchronises it except a reset of both ends.
- A frame with a bad stop bit still steps the generator, because its start bit
  restarted the divider. Key and stream therefore stay aligned.

Both ends must be reset with identical `lorenz_cfg_t` values (`xin`, `yin`,
`zin`, `n`). The receiver must be out of reset before the transmitter sends
its first frame.

## Full-duplex top (`chaos_duplex`)

The paper's full-duplex system is built from four units. The top holds two
transmitters and two receivers, one pair per direction (A→B and B→A).

- Each of the four units has its own configuration input, so a mismatched
  receiver can be set up on purpose.
- The serial lines are ports. The channel is outside the chip and is assumed
  ideal: `out_tx_a` goes to `in_rx_b` and `out_tx_b` to `in_rx_a`.
- All transmitters share `clk_tx`/`rst_tx`, and all receivers share
  `clk_rx`/`rst_rx`. Both resets are synchronous and active high.

| File | Contents |
|---|---|
| `rtl/chaos_pkg.sv` | widths, map constants, frame constants, `lorenz_cfg_t` |
| `rtl/lorenz_eq.sv` | combinational map |
| `rtl/mod_n_counter.sv` | the %N perturbation counter |
| `rtl/lorenz_system.sv` | registers, perturbation mux, key |
| `rtl/clk_div.sv` | ÷11 / ÷44 step enables |
| `rtl/serial_tx.sv`, `rtl/serial_rx.sv` | serial and parallel converters |
| `rtl/chaos_tx.sv`, `rtl/chaos_rx.sv` | transmitter and receiver |
| `rtl/chaos_duplex.sv` | top level |

Generic synthesis of one transmitter gives 78 flip-flop bits. One receiver
gives 108 flip-flop bits, and the whole duplex top 372. The paper reports 676
logic cells on an Altera FLEX10K for the generator alone. The two figures are
not comparable.

## Verification

Each testbench checks its unit against values worked out independently:

- the published timing-diagram values;
- an integer reference model of the map in `tb/tb_ref_pkg.sv`;
- bit-level frame models written inside the testbenches.

Every testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it shows |
|---|---|
| `tb_lorenz_eq` | the 22 published X transitions; 3000 random states against the reference |
| `tb_lorenz_system` | state and key for every step, with N = 0, 1, 7, 13 and 10000; hold without `step`; `perturb` timing |
| `tb_clk_div` | tick period, enable, restart, cycle by cycle |
| `tb_serial_tx` / `tb_serial_rx` | every line bit, back to back and with gaps; framing error; glitch; start-to-valid latency of 39 cycles |
| `tb_chaos_tx` | the published key and cipher bytes for the plain text 0,0,0,0,0,0,1,2,…; 11 clocks per byte; perturbed run against the reference |
| `tb_chaos_rx` | recovered text and the published `data` bytes; 44 clocks per byte; no step before the first frame; frames of 43–45 cycles; BER ≈ 0.5 when X0 is off by one LSB |
| `tb_chaos_duplex` | end to end at full size with 6.25/25 MHz clocks (details below) |
| `tb_lorenz_period` | the periods: 78,782 steps with N = 0, 6,500,000 with N = 10000 |
| `tb_param_mismatch` | BER 0 when matched, 0.50 with `CZ` + 1, 0.49 with `CZ` + 1 % |
| `tb_key_stats` | frequency, serial, poker and autocorrelation tests on five 400,000-bit key samples |

`tb_chaos_duplex` runs in two phases:

- It sends 10,100 bytes each way. A→B uses N = 10000, so the full-size
  perturbation happens in both the transmitter and the receiver. B→A uses
  N = 7.
- It then resets with receiver B's X0 off by one LSB and measures a BER of 0.506.

The default-size end-to-end run takes well under a second. The period
measurement takes about ten seconds.

To run any of them with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/chaos_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_chaos_duplex.sv --top-module tb_chaos_duplex -Mdir obj -o sim
./obj/sim
```

### Statistics of the key

`tb_key_stats` starts from X0 = 18503, Y0 = 21315, Z0 = 32032 with N = 10000.
Every one of the five samples passes the poker test. At the 5 % level, some
samples fail the other tests:

| Test | Samples that fail |
|---|---|
| frequency | 1 (statistic 7.5 against a limit of 3.842) |
| serial | 1 |
| autocorrelation | 1 |

The paper reports all five of its samples passing all five tests. It does not
say where in the sequence those samples were taken, so this difference may
come from the choice of samples. The runs test, the FFT and the
autocovariance plots are not reproduced.

## Limits and departures, in short

- Z update sign: implemented as −(X+Y)/2 − (X+Y)/8, which matches the
  published trajectory; the printed equation differs.
- The generator clock is a clock enable on the link clock, not a derived clock.
- Reset loads the initial conditions. N = 0 disables the perturbation, and the
  N-th, 2N-th, … steps are the perturbed ones.
- The serial frame format, the 4× oversampling receiver, the framing-error
  handling and the receive-divider alignment are this design's own choices.
  The receiver needs `clk_rx` equal to 4 × `clk_tx` to within about one sample
  per 44.
- The paper's comparison variants are not built. These are the 17-bit key
  (all of Xn xor-ed into the text) and the analysis tools behind its FFT and
  autocovariance figures.
