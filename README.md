# A digital logic core for multi-gigabit testers built from an FPGA and PECL

A CMOS FPGA can drive hundreds of pins, but each pin runs at only a few hundred
Mbps. Positive-emitter-coupled-logic (PECL) multiplexers, flip-flops and delay
lines can handle several Gbps, but they cannot be programmed. This design pairs
the two. The FPGA logic, the *digital logic core* (DLC), builds test patterns as
wide, slow parallel words. PECL serializers merge those words into 2.5 Gbps and
5 Gbps streams. Programmable analog delay lines place each edge to within 10 ps.
A PC talks to the core over USB through a small microcontroller. It loads
patterns, sets delays, starts measurements and reads back results.

The RTL here covers the digital part of two test set-ups built around the same
core:

* **Optical test bed transmitter.** It emulates a 4-bit slice of a
  processor-to-memory bus sending packets into an optical packet switch (the
  "Data Vortex"). Each packet has a frame bit, four header (routing address)
  bits, a source-synchronous clock and four 32-bit payload lanes at 2.5 Gbps.
  For eye-diagram tests the same lanes can carry a PRBS instead. A receiver
  recovers returned packets with their own clock and counts bit errors.
* **Miniature wafer-probe tester.** It sends a 5 Gbps stream, either a PRBS or
  a pattern written by the host. The stream is made by XORing two 2.5 Gbps
  serializer outputs half a bit apart. The tester also samples a returned
  signal while sweeping the sampling delay in 10 ps steps. This is
  equivalent-time sampling: it traces a repetitive waveform or eye with a plain
  flip-flop.

Both set-ups sit in one top level, `dlc_tester`, so they can be simulated
together. On the real boards each set-up loads its own FPGA program.

## Time base: one clock, a 16-UI word

The clock input of the miniature tester is 1.25 GHz. Its 8:1 serializers use
both clock edges to reach 2.5 Gbps. The word rate below is that clock divided
by four.

Everything runs on a single clock, `clk`. One cycle is one unit interval (UI)
of the 5 Gbps output, which is 200 ps. A 4-bit `phase` counter in the top level
splits time into 16-UI word cycles. A word cycle lasts 3.2 ns, so the word rate
is 312.5 MHz. That is the rate at which the FPGA proper would run, and it is
within the 300-400 Mbps the FPGA pins are used at. The FPGA logic only acts on
enables derived from `phase`:

| end of phase | what happens |
|---|---|
| 13 | data sources step: `packet_gen`, `pattern_source`, both PRBS generators |
| 14 | `xor_precoder` registers the split words `a_word`, `b_word` |
| 15 | serializer A and the five optical-lane serializers load; frame and header update |
| 0  | serializer B loads (one UI after A) |
| odd phases (1..13) | serializer A and the optical lanes shift: one bit per 2 UI = 2.5 Gbps |
| even phases (2..14) | serializer B shifts |

On the boards these are three clocks: the RF clock, the PECL bit clocks and the
FPGA word clock. Here they are one clock plus enables. Every delay a host can
program (a 10-bit code, 10 ps per LSB, 10 ns range) leaves the core as a port.
The analog delay lines themselves are not modelled, so sub-UI timing does not
appear in simulation.

## Packet slot of the optical test bed (`packet_gen`)

A slot is 64 bit periods of 400 ps (25.6 ns). With `b` the bit index within the
slot:

| signal | bit periods | value |
|---|---|---|
| frame, header[3:0] | 0-55 (guard 5 + window 46 + guard 5) | frame = 1, header = address |
| frame, header[3:0] | 56-63 (dead time 8) | 0 |
| clock lane | 5-50 (the 46-bit window) | toggles every bit, starting at 1 |
| data lanes 0-3 | 12-43 | payload bit `b-12` of that lane |
| data lanes 0-3 | elsewhere | 0 |

The clocks in the window before the data (7 bit periods) are the *pre-clocks*.
A receiver uses them to start up. The ones after the data (also 7) are the
*post-clocks*, which flush the receiver's pipeline. The slot, guard, window,
dead-time and payload lengths come from the original timing diagram. The 7/7
split of the spare clocks, the clock phase and the header levels are this
design's choices, and all are parameters. Because 56 and 64 are multiples of 8,
frame and header only change at word boundaries. They therefore leave the FPGA
directly at word rate and need no serializer. The four data lanes and the clock
lane each go through an 8:1 `serializer`, bit 0 first.

`CTRL.otb_en` starts slots back to back. A slot that has started always
finishes. `REG_PKT_CNT` counts finished slots. With `CTRL.otb_prbs` set, the
four data lanes all carry the same PRBS7 stream (`prbs_gen`, 8 bits per word),
the clock lane toggles, and frame and header stay low.

## Receiving packets (`otb_receiver`)

The receiver looks at the returned frame, clock, header and data lanes once
per UI. A rising frame starts a packet: the receiver takes the header and
clears its count of clock edges. While the frame is high, every change of the
clock lane is one bit period. The clock changes at every bit, so the receiver
uses both edges. Edges 0-6 are the pre-clocks. Edges 7-38 sample the 32
payload bits of all four lanes. The post-clocks after that are ignored. When
the frame falls, the receiver does four things:

* it counts the packet;
* it latches the words (`REG_RX_WORD0-3`, `REG_RX_HDR`);
* it adds every header or payload bit that differs from what the transmitter
  was given to `REG_RX_ERR`;
* it counts a packet with fewer than 39 edges in `REG_RX_SHORT`.

The receiver samples in the UI in which the clock lane changes. On hardware,
the clock lane's delay code would be set so that this edge sits in the middle
of the data eye. Only the existence of the receive channels and the purpose of
the pre- and post-clocks are known. The receiver's logic and error counting
are this design's own.

## 5 Gbps from two 2.5 Gbps serializers (`xor_precoder`, `pecl_tx_pair`)

This is the least obvious part of the design. The PECL output stage is an XOR
gate fed by two 8:1 serializers, A and B. Each shifts once per 2 UI. B is
clocked one UI later than A. During UI `2k` of a word, A shows its bit `k` and
B still shows its bit `k-1`. During UI `2k+1`, both show bit `k`. The output is
therefore

    out[2k]   = a[k] ^ b[k-1]        (b[-1] = last b bit of the previous word)
    out[2k+1] = a[k] ^ b[k]

The output changes every UI, so it runs at twice each serializer's rate. It
only carries the wanted bits `d[0..15]` if the FPGA precodes them:

    a[k] = d[2k]   ^ b[k-1]
    b[k] = d[2k+1] ^ a[k]

`xor_precoder` computes this chain of 16 XORs once per word. It keeps `b[7]` in
a register for the next word. This only works if serializer B holds the same
last bit as the register. Both reset to 0 and both take every word, so they
stay in step. In hardware the one-UI offset between A and B comes from the two
programmable clock delays (`tx_delay_a`, `tx_delay_b`). They must be set half a
2.5 Gbps bit apart. In the RTL the offset is a fixed phase of the enables.

The data come from `pattern_source`. It gives either PRBS7 (16 bits per word)
or a host pattern of 1 to 64 words of 16 bits, repeated (`REG_PAT_*`,
`CTRL.mt_pattern`).

## Sampling a returned signal (`data_capture`, `capture_ctrl`)

A 4:1 select multiplexer and a capture flip-flop (`data_capture`) sample one
returned signal per strobe. The strobe stands for the edge of the delayed
capture clock. `capture_ctrl` runs a sweep over steps `s = 0 .. nsteps-1`. A
step is 10 ps, and 1000 steps cover 10 ns. Each step runs as follows:

1. Set the delay to `s`. Of this, `fine = s mod 20` (in 10 ps units) goes to
   the external clock delay through `rx_delay`. `coarse = (s div 20) mod period`
   (in whole UIs) positions the strobe.
2. Wait `SETTLE` (16) cycles for the delay line.
3. Take `nsamp` samples. There is one sample per repetition of the pattern
   (`period` UI), at offset `coarse` within it.
4. Store the number of ones in `result[s]`.

For a repetitive pattern, `result[s] / nsamp` plotted against `s` is the
waveform. For a PRBS it is the eye, with edge jitter showing up as fractional
counts. In simulation the fine delay has no effect, so all 20 steps inside one
UI read the same.

## Register map (`dlc_pkg::reg_addr_e`)

The bus is a simple synchronous one: `host_addr`, `host_wdata` and `host_we`
are sampled on `clk`, and `host_rdata` is combinational. The USB
microcontroller would drive this bus. Its own protocol is not modelled.

| addr | name | use |
|---|---|---|
| 00 | CTRL | [0] optical enable, [1] optical PRBS mode, [2] 5 Gbps enable, [3] pattern (1) / PRBS (0), [4] RF clock select |
| 01 | OTB_ADDR | 4-bit header / routing address |
| 02-05 | PAYLOAD0-3 | 32-bit payload of lanes 0-3 |
| 06 | PAT_LEN | pattern length in words |
| 07 | PAT_WADDR | pattern write pointer |
| 08 | PAT_WDATA | write [15:0] at the pointer, pointer +1 |
| 10, 11 | TX_DLY_A/B | delay codes of the two transmit serializer clocks |
| 20-29 | OTB_DLY0-9 | edge delays of data0-3, clock, frame, header0-3 |
| 30 | CAP_CTRL | write [0]=1 to start a sweep, [2:1] input select |
| 31-33 | CAP_PER, CAP_STEPS, CAP_NSAMP | pattern period (UI), steps, samples per step |
| 34 | CAP_STAT | read [0] busy, [1] done |
| 35, 36 | CAP_RADDR, CAP_RDATA | result address; the result is readable one cycle after RADDR is written |
| 3F | PKT_CNT | packets sent |
| 40, 41, 42 | RX_PKTS, RX_ERR, RX_SHORT | packets received, bit errors, short packets |
| 43, 44-47 | RX_HDR, RX_WORD0-3 | header and payload of the last received packet |

## What is outside the RTL

These parts have no digital function, or are bought-in parts. They are
represented only by the ports that control or feed them:

* the RF clock source, its socket/SMA select multiplexer (`clock_select`) and
  its clock fanout;
* the programmable clock delays (`tx_delay_a`, `tx_delay_b`, `rx_delay`,
  `otb_delay`);
* the data fanout, the SiGe output buffers with adjustable levels, and the
  input buffers (`mt_out`, `mt_in`);
* the USB microcontroller and its crystal, the configuration FLASH and its
  boundary-scan programming, the power interface, and the optional pattern SRAM
  (unused in both set-ups);
* the optical converters and the switch under test.

## Choices made where the original description is silent

* The single clock and enable scheme, the word pipeline, the register map and
  the bus are this design's own.
* The original block diagram shows an XOR as the second stage, while the text
  calls it a multiplexer. The RTL follows the diagram and adds the precoder,
  without which an XOR stage cannot carry arbitrary data.
* The LFSR is PRBS7 (x^7 + x^6 + 1, seed all ones). Only "an LFSR" is known.
* The optical lanes use an 8:1 ratio like the miniature tester. No ratio is
  given for the optical test bed.
* Pre-clocks: 7 (not given). Clock phase: high first. Header: the address while
  the frame is high.
* Pattern memory depth: 64 words. Result memory: 1024 words for the
  1000 steps of 10 ns / 10 ps. Count width: 16 bits. Settle time: 16 cycles.
* The sweep algorithm, including the split into coarse UI and fine 10 ps
  steps, is this design's interpretation of "picosecond sampling".

## Files

| file | content |
|---|---|
| `rtl/dlc_pkg.sv` | constants, register map, control and word types |
| `rtl/dlc_tester.sv` | top level, phase counter, wiring |
| `rtl/host_regs.sv` | register file |
| `rtl/packet_gen.sv` | optical test bed packet formatter |
| `rtl/otb_receiver.sv` | optical test bed receiver and error counters |
| `rtl/prbs_gen.sv` | parallel LFSR, W bits per step |
| `rtl/serializer.sv` | 8:1 parallel-to-serial model |
| `rtl/pattern_source.sv` | PRBS or pattern-memory source for 5 Gbps |
| `rtl/xor_precoder.sv` | precoding for the XOR stage |
| `rtl/pecl_tx_pair.sv` | two offset serializers and the XOR |
| `rtl/data_capture.sv` | input select and capture flip-flop |
| `rtl/capture_ctrl.sv` | delay sweep and result memory |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog turns a hang into a failure. To run, for example, the end-to-end test
with default sizes:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_dlc_tester \
        rtl/dlc_pkg.sv tb/tb_dlc_tester.sv -o sim
    ./obj_dir/sim

Replace `dlc_tester` with any other module name to run its unit test. Every
testbench finishes in a few seconds.

`tb_dlc_tester` acts as the PC. It runs two packet slots, which it checks UI by
UI against the slot table above. It loops the optical lanes back through an
11-UI delay into the receiver, which must report the payload with no errors.
It then inverts one lane for a while, and the receiver must count errors. It
then runs the optical PRBS mode, the 5 Gbps
PRBS and a 48-bit host pattern through the XOR stage, where the output must be
one correct bit per UI. Next comes a full 1000-step capture sweep of the 5 Gbps
output looped back into input 2: the result at step `s` must equal
`nsamp × pattern bit (s div 20 + offset) mod 16`, including after the coarse
position wraps. Finally it checks the delay and clock-select ports. It counts
each of these mechanisms and fails if one never happened. The unit testbenches
compare each module against models written independently in the testbench: a
serial LFSR, the XOR-stage equations, and the slot table. For each module, a
copy with one deliberate bug was shown to fail its testbench.

## How far to trust it

The logic is checked cycle by cycle against these models, but only in a
one-clock abstraction. It has not been checked against real PECL timing or
real multi-clock FPGA constraints. A hardware build would need clock-domain
crossings between the USB side, the 312.5 MHz word logic and the PECL clock.
Those are not here.
