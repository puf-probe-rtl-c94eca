# IED PUF probe — digital core in SystemVerilog

A protection relay or other intelligent electronic device (IED) in a
substation can be counterfeited or tampered with, and a serial number stored
in flash is easy to copy. The IED PUF probe identifies an IED by physical
quirks of its parts instead:

* the forward voltages of the protection diodes across twelve output relays,
  which differ by fractions of a millivolt from part to part;
* the exact output of its three internal regulators (3.3 V, 5 V, 15 V);
* the exact period of its internal 20 ns oscillator.

The probe clips onto the IED and measures these values. It turns them into a
bit string, a *physical unclonable function* (PUF) signature, and answers
challenges from a central computer system (CCS) that holds a reference copy.
The probe must also prove to the CCS that it is itself genuine. It does this
with the noise statistics of its own microcontroller's ADC, and it must check
that the request really comes from the CCS, which it does with an MD5
nonce-hash exchange.

In the published design a microcontroller runs all of this as firmware. This
repository implements the probe's digital side as synthesizable RTL:
sequencing the analogue front end, forming the signatures, the two-phase
authentication protocol, the hash, the probe's own ADC statistics and the
serial link. The analogue front end, the converters and the IED's own serial
interface stay outside the core and are reached through ports.

## 1. The diode signature

The front end forward-biases one diode at a time with a constant current
(about 1 mA). Two 16:1 analogue multiplexers share one 4-bit selector. MUX1
steers the current to diode *i*. MUX2 picks up the same diode's voltage at
the diode, so the drop across MUX1's on-resistance is left out. A follower, a
15 Hz second-order low-pass filter and a 16-bit delta-sigma ADC then
digitise the voltage. `diode_scan` drives this sweep. For channel 0..11 it
sets `mux_sel`, waits `SETTLE_CYCLES` for the filter, and requests one
conversion. It stores the twelve signed codes.

`diode_sig_gen` then compares every diode with every other one:

```
for i in 0..11:                 # diode under test
  for j in 0..11, j != i:       # ascending
     bit = (V[i] > V[j])        # ties give 0
```

That is 12 x 11 = 132 bits. The first bit (D0 vs D1) is the most significant
bit, so the string falls into twelve 11-bit *rows*, one per diode. Only the
order of the voltages matters, not their values. That makes the signature
immune to common offsets and gain errors in the front end. The
generator uses one comparator once per clock, so it takes 133 clocks.

Example: with the twelve voltages of the published measurement
(500.8, 516.8, 513.4, 514.2, 511.5, 514.1, 514.3, 502.0, 516.1, 517.6, 515.1,
514.4 mV), D0 is the lowest, so its row is all zeros. D9 is the highest, so its row is
all ones.

## 2. The regulator / clock signature (22 bits)

The IED reports its regulator voltages and oscillator period over its own
serial port. The probe takes them as numbers: voltages in units of 10 mV,
period in femtoseconds. `reg_sig_encoder` turns each value into its
deviation from nominal, **delta = nominal − measured**. It then writes the
deviation in sign-magnitude form, with the sign bit first and 1 meaning
negative:

| bits    | field  | width | unit  |
|---------|--------|-------|-------|
| 21..17  | V_RG1 (3.3 V) | 1 + 4 | 10 mV |
| 16..12  | V_RG2 (5 V)   | 1 + 4 | 10 mV |
| 11..7   | V_RG3 (15 V)  | 1 + 4 | 10 mV |
| 6..0    | T_P (20 ns)   | 1 + 6 | fs    |

Worked example, with the published readings of two IEDs:

| IED | readings | deviations | signature |
|-----|----------|------------|-----------|
| 1 | 3.26 V, 4.95 V, 14.85 V, 19.999945 ns | +4, +5, +15 (x10 mV), +55 fs | `00100 00101 01111 0110111` |
| 2 | 3.29 V, 4.99 V, 14.86 V, 20.000063 ns | +1, +1, +14 (x10 mV), −63 fs | `00001 00001 01110 1111111` |

These are exactly the published 22-bit strings. The field widths and the
sign convention are not stated in words; they were read off these two
examples. Note that "positive" here means *below* nominal. A deviation too
large for its field saturates to all ones. Together with the 132 diode bits
this gives the 154-bit full signature.

## 3. The authentication exchange

```
 CCS                                   probe
  | PING ------------------------------> |
  | <------------------------------ PONG |
  |                                      |          Phase I
  | AUTH_REQ ---------------------------> |  draw N_k; measure mu, sigma;
  | <------------ mu, sigma, N_k          |  H_k' = MD5(N_k)
  | (CCS checks mu, sigma against its     |
  |  reference, computes H_k = MD5(N_k))  |
  | HASH H_k ---------------------------> |  H_k == H_k' ?
  | <-------------------------- ACK / NAK |
  |                                      |          Phase II
  | CHALLENGE K, p1..pK ----------------> |  sweep diodes, 132-bit signature,
  | <------------- RESPONSE nbits, R_k    |  R_k = rows(p1..pK) ++ 22-bit sig
  | (CCS compares R_k with R_k' from      |
  |  its stored reference)                |
  | VERDICT ok --------------------------> |  latched for the display
  | <---------------------------------ACK |
```

**Phase I (the probe and the CCS authenticate each other).** The probe's
identity is the mean and standard deviation of its MCU's on-chip 12-bit ADC,
read 10,000 times in differential mode with its inputs shorted. Typical
values are a mean of about −1.9 LSB and a deviation of about 14 LSB.
`adc_puf_stats` accumulates the sum S and the sum of squares Q. It returns

    mu    = S / N
    sigma = sqrt(N*Q - S^2) / N

in Q.8 fixed point (value x 256, truncated), using a serial divider and a
bit-serial square root. `nonce_rng` supplies N_k. `md5_core` hashes the
four bytes of N_k, most significant byte first, as a standard MD5 message.
The CCS must send back the same digest, or the challenge that follows is
refused.

**Phase II (the IED is authenticated).** A challenge lists K = 1..12 port
numbers. Port *n* means diode D_(n−1), and ports may repeat. Only after a
successful Phase I does the probe sweep the diodes. `response_builder` then
concatenates the 11-bit rows of the challenged diodes in challenge order and
appends the 22-bit regulator/clock signature, giving 11·K + 22 bits. Because
the CCS chooses which rows it wants and in what order, a replayed response
does not answer a new challenge. The challenge 1,2,…,12 returns the full
154-bit signature. Each Phase I admits one challenge.

### Byte protocol on the CCS link (8N1, 115200 baud)

| host → probe | bytes | probe → host |
|---|---|---|
| `0x50` ping | 1 | `0x70` |
| `0xA1` authentication request | 1 | `0xA1`, mu (3 bytes, signed Q.8), sigma (3 bytes, Q.8), N_k (4 bytes), all MSB first |
| `0xA2` hash | 1 + 16 (digest, first byte first) | `0x06` ACK (CCS authenticated) or `0x15` NAK |
| `0xB1` challenge | 1 + 1 (K) + K (ports 1..12) | `0xB1`, bit count 11K+22, 20 bytes of R_k MSB first, zero filled; or NAK if not authenticated or malformed |
| `0xC1` verdict | 1 + 1 (1 = authentic) | ACK |
| anything else | | NAK |

The order of the messages follows the published protocol. The byte codes
and layouts are this implementation's own.

## 4. Blocks

| module | role | timing |
|---|---|---|
| `ied_puf_probe` | top, wiring only (plus handshake assertions) | — |
| `probe_ctrl` | protocol sequencer, reply buffer | one command at a time |
| `uart_rx`, `uart_tx` | 8N1 serial link to the CCS | `CLKS_PER_BIT` clocks per bit |
| `adc_puf_stats` (+ `udiv_seq`) | mu and sigma of the MCU ADC | N samples, then ~130 clocks |
| `nonce_rng` | 32-bit Galois LFSR, sampled on request, ADC bits folded in | every clock |
| `md5_core` | MD5, one of 64 steps per clock | `done` 65 clocks after `start` |
| `diode_scan` | selector sweep, settle wait, ADC handshake | 12 x (settle + conversion) |
| `diode_sig_gen` | 132 pairwise comparisons | `done` 133 clocks after `start` |
| `reg_sig_encoder` | 22-bit sign-magnitude encoding | registered, 1 clock |
| `response_builder` | R_k from challenge, rows and 22 bits | `done` K+1 clocks after `start` |
| `probe_pkg` | sizes and command codes | — |

At the defaults (50 MHz clock, 100 ms settling per channel) a challenge takes
about 1.2 s, almost all of it filter settling. A Phase I takes as long as the
MCU ADC needs to deliver 10,000 samples.

### Ports of the top that lead outside the core

* `mux_sel[3:0]`, `mux_en`: the shared selector S3..S0 of both analogue
  multiplexers, and their enable.
* `adc_start`, `adc_done`, `adc_data[15:0]`: one conversion of the diode ADC.
  The real part (an ADS1115) sits on I2C. An I2C master that turns this
  handshake into bus transactions is not included.
* `mcu_adc_valid`, `mcu_adc_sample[11:0]`: signed differential readings of
  the MCU's ADC.
* `ied_vrg1_10mv`, `ied_vrg2_10mv`, `ied_vrg3_10mv`, `ied_tp_fs`: values
  already read from the IED's serial interface and decoded. The IED's command
  set is device-specific and not part of this core.
* `ccs_authenticated`, `ied_verdict_valid`, `ied_authentic`, `ccs_frame_err`:
  status for a display.

## 5. Where this RTL follows the description and where it chooses

Taken from the published description:

* twelve diodes on a shared 4-bit selector;
* the comparison rule and bit order of the 132-bit signature;
* the 22-bit encoding, with field widths and sign inferred from the two
  printed examples;
* MD5 of N_k;
* mu and sigma over 10,000 samples of a 12-bit ADC;
* the message order of both phases;
* a challenge of 1..12 port numbers.

Chosen here, because the description does not say:

* the 50 MHz clock, 115200 baud and 100 ms settle time;
* the byte protocol;
* reading "a bit stream specific to the challenged ports" as the
  concatenation of the challenged diodes' rows;
* the MD5 message layout of N_k;
* the LFSR nonce, which is **not** cryptographically strong;
* the population formula and Q.8 format for mu and sigma;
* one conversion per diode per sweep, with no averaging;
* saturation of oversized deviations;
* one challenge per Phase I;
* a fresh mu/sigma measurement on every request.

What is not here:

* the analogue front end (current source, multiplexers, follower, filter);
* the ADC chips and the I2C master for the diode ADC;
* the IED's serial command exchange;
* the display;
* the CCS side (reference database, expected-response generation,
  tolerance on mu/sigma), which is host software.

The published example strings for the diode signature are 144 bits long.
Each is the full 12 x 12 comparison matrix, written row by row, and it
includes the twelve self-comparisons, which are always 0. The text counts
12 x 11 = 132 bits, and the 154-bit total agrees with that count, so this
design leaves the diagonal out. Its 132 bits equal the printed strings with
the diagonal removed.

The first printed string matches the published diode voltages in every bit
except the six that compare D10 with D1, D8 and D9. Those six bits imply that
D10 is the highest of the twelve, above 517.6 mV, while the voltage table
gives 515.1 mV. The tests therefore check that string exactly with D10 taken
as 518.1 mV. They check the second string exactly with a voltage set ordered
as that string implies, because no voltages are published for the second
IED.

Trust level: every block is checked against an independent model. Each
test has also been shown to fail when its block is deliberately broken. The
MD5 core matches the RFC 1321 test digests. Nothing here has been
run on hardware or against a real IED.

## 6. Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. The sources compile without warnings under Verilator 5. List
packages before the modules that import them. From the repository root:

```
RTL="rtl/probe_pkg.sv rtl/nonce_rng.sv rtl/uart_rx.sv rtl/uart_tx.sv \
     rtl/md5_core.sv rtl/udiv_seq.sv rtl/adc_puf_stats.sv rtl/diode_scan.sv \
     rtl/diode_sig_gen.sv rtl/reg_sig_encoder.sv rtl/response_builder.sv \
     rtl/probe_ctrl.sv rtl/ied_puf_probe.sv"
verilator --binary --timing --assert -Itb $RTL \
  tb/tb_ref_pkg.sv tb/probe_frontend_model.sv tb/tb_ied_puf_probe.sv \
  --top-module tb_ied_puf_probe
./obj_dir/Vtb_ied_puf_probe
```

To build another bench, replace the last file and the top module. The
end-to-end benches include `tb/tb_probe_body.svh`, which is why `-Itb` is
given.

| testbench | what it does |
|---|---|
| `tb_md5_core` | RFC 1321 digests, 40 random nonces against a procedural MD5 model, latency |
| `tb_diode_sig_gen` | published diode voltages, both published signature strings, random sets with ties, latency |
| `tb_reg_sig_encoder` | both published 22-bit signatures, random values, saturation |
| `tb_response_builder` | random challenges, full 154-bit case, bad counts and ports, latency |
| `tb_adc_puf_stats` | 10,000 noisy samples and a constant input against exact integer arithmetic |
| `tb_nonce_rng` | 5,000 steps against a bit-level LFSR model |
| `tb_uart_tx`, `tb_uart_rx` | 60 random frames each, framing error, glitch |
| `tb_diode_scan` | three sweeps on the front-end model: codes, channel order, settle time, sweep time |
| `tb_ied_puf_probe` | the whole exchange at reduced sizes, with the testbench as the CCS, front end, MCU ADC and IED |
| `tb_ied_puf_probe_full` | the same scenario with every parameter at its default (about 250 million clocks, a few minutes) |

The end-to-end scenario covers all of these, and counts each one:

* ping;
* a challenge refused before authentication;
* Phase I denied on a wrong hash;
* Phase I accepted;
* a random challenge;
* the verdict;
* the full 1..12 challenge;
* a second IED;
* a malformed challenge;
* an unknown command.

It also checks that no conversion starts before the filter has settled.
`tb/probe_frontend_model.sv` is a simulation-only model of the analogue front
end and diode ADC, and `tb/tb_ref_pkg.sv` holds the reference models.

## 7. Changing it

* Clock or baud rate: set `CLKS_PER_BIT` = f_clk / baud on the top.
* Filter: set `SETTLE_CYCLES` to about five filter time constants.
* Another IED model: change the nominal values on the top
  (`VRG*_NOM_10MV`, `TP_NOM_FS`). The field widths are parameters of
  `reg_sig_encoder`.
* Number of diodes: the signature and response sizes derive from
  `N_DIODES` in `probe_pkg`. The selector is 4 bits, so at most 16 channels.
  The byte protocol's 4-bit port numbers assume no more than 15.
* Phase I sample count: set `N_STAT_SAMPLES`. The accumulators are sized for
  up to 65,535 samples.
