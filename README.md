# A PTP timing system over a TTC serial link, in SystemVerilog

A backend board holds the global time of an experiment. Up to 48 frontend
boards, each at the end of its own twisted-pair cable of up to about 100 m,
must keep a local copy of that time that agrees with it to a few
nanoseconds. There is no Ethernet and no processor in the path. Every board
has an FPGA, and the backend and each frontend share a full-duplex serial
link. This RTL puts the whole protocol into logic:

- **The serial link** is a TTC-style link: BiPhase Mark line code, two
  time-multiplexed channels, and short broadcast or long addressed frames
  protected by a Hamming code. It carries the clock, commands and time
  stamps.
- **Serial link synchronization** handles the backend receiving 48 streams
  in 48 unknown phases on one clock. The backend sweeps a programmable
  delay in each frontend's transmitter while it counts frame errors. This
  draws the eye of each link, and the delay is then parked in the middle of
  the eye.
- **IEEE 1588 delay request-response**, done in hardware, measures and
  removes the offset of each frontend's local time counter. The four time
  stamps are taken at fixed points in the transmitter and receiver logic,
  so the fixed latencies of the two directions cancel.

All logic runs at 250 MHz. One count of a time counter is 4 ns.

## System structure

```
                backend (bec_top)                                  frontend i (gcu_top)
 global_time_counter ─► ptp_master ─┐                          ┌─► ptp_slave ─► local_time_counter
                  link_sync_master ─┼─► ttc_encoder ═ downlink ═► ttc_decoder ─► link_sync_slave
                                    │   (one line fanned out)   │                   │
 ttc_decoder x48 (coarse delay 6) ◄═══════ uplink i ════════ fine_delay ◄─ ttc_encoder
 pulse_gen                                                        pulse_gen
```

The top level, `timing_system_top`, contains one `bec_top` and `N_GCU`
instances of `gcu_top`. Its ports are what lies between the boards and is
not logic:

- the downlink line `bec_tx_line`;
- each frontend's recovered clock `gcu_clk[i]` and retimed data
  `gcu_cdr_data[i]`, which come from a clock and data recovery chip;
- each frontend's uplink line `gcu_tx_line[i]`, after its fine delay;
- `bec_rx_sample[i]`, the uplink stream as the backend's input flip-flop
  captured it on the global clock.

The testbenches close these loops with a behavioural cable and capture
model, `tb/tb_link_channel.sv`.

Bring-up goes like this:

1. The backend sends idle commands periodically.
2. Each frontend identifies the channels and raises `gcu_aligned`.
3. A pulse on `calib_start` runs the link synchronization. It ends with
   `calib_done` and `link_ok[i]` set for every link that was placed and
   confirmed.
4. `ptp_enable` and `gcu_ptp_enable[i]` then start periodic round-robin
   offset correction of the links that are ok.
5. `pulse_gen` on every board emits a pulse when its time counter reaches a
   programmed value. Comparing these pulses on a scope shows how well the
   clocks agree.

## The link: BMC, channels A and B, frames

The line carries one BMC symbol per 250 MHz clock:

- The level flips at every bit boundary.
- The level flips again in the middle of a `1`.

Data bits alternate between channel A and channel B. One channel-B bit
therefore spans four clock cycles, and the symbol eye is 4 ns wide.
Channel A is reserved and always sent as 0. Channel B idles at 1 and
carries frames, MSB first:

```
broadcast, 16 bit:  0 0 CMD[7:0]                               CHK[4:0] 1
addressed, 42 bit:  0 1 ADDR[13:0] E 1 SUBADDR[7:0] DATA[7:0]  CHK[6:0] 1
```

The check bits form a SEC-DED Hamming code, defined in `rtl/ttc_pkg.sv`:

- The protected bits take positions 3, 5, 6, 7, 9, … of a Hamming word.
- Check bit `p(2^j)` is the XOR of the positions that have bit `j` set.
- The last check bit is the overall parity.
- The masks `HAM_MASK` follow from the position table `HAM_POS`.

A broadcast frame carries p1, p2, p4, p8 and the overall bit.

**The transmitter** is `ttc_encoder`:

- Its slot counter `ph` runs 0..3. A new frame is loaded only at `ph == 1`
  when the shift register is empty.
- Its `accept` pulse therefore has a fixed distance to the frame's start
  bit on the line.
- Back-to-back frames are 168 cycles apart (42 bits) or 64 cycles apart
  (16 bits).
- Clients reach it through a round-robin request/grant arbiter that holds
  a grant while the owner keeps requesting. The backend's clients are the
  link synchronization master and the PTP master. A frontend's clients are
  the tap-command acknowledger and the PTP slave.
- An idle command goes out every `IDLE_PERIOD` cycles when no client
  frame is due.

**The receiver** is `ttc_decoder`. The stream first passes a programmable
coarse delay of 0 to 31 cycles:

- The backend uses 6 (binary 00110). This matches the latency of the
  frontend's clock recovery chip, so the two directions have equal fixed
  delays.
- A frontend uses 0.

The receiver must then find which of four symbol phases starts a
channel-B bit. It tests each hypothesis `align` for `SEARCH_TIMEOUT`
cycles. With `k = ph - align`:

- A channel-B bit is decoded at `k == 3` from the two symbols of the bit.
- The bit boundaries at `k == 0` and `k == 2` must show a transition.
- The first error-free idle command aligns the receiver.
- `LOSS_LIMIT` errors with no good frame in between drop the alignment.
  This happens after a half-bit slip, for example when the link's delay
  moves the stream across the sampling edge.

The error counter counts:

- corrected single errors;
- uncorrectable errors;
- framing errors;
- one error per channel-B bit while the receiver is not aligned.

The last item is deliberate. A link that cannot even align then reads as
very bad in the eye scan, not as clean. Good frames come out with
`rx_valid`. Addressed frames for this receiver, with `E = 1`, are also
written into a 32-byte register file and flagged with `wr_valid`.

## Serial link synchronization (eye scan)

The downlink needs no care, because each frontend's clock is recovered
from the stream itself. The 48 uplinks arrive at the backend in arbitrary
phases and are sampled on the global clock. Each frontend therefore
drives its uplink through a chain of four programmable delay elements
(`fine_delay`). Each element has 32 settings of 78 ps. The chain spans
124 taps, or 9.67 ns, which is more than two 4 ns eyes.

`link_sync_master` runs one calibration:

1. Broadcast an error reset, then a tap reset.
2. For tap = 0..124:
   - wait `SETTLE` cycles, so that a receiver that slipped can realign;
   - clear the backend error counters and wait `DWELL` cycles;
   - read all 48 counters at once and broadcast a tap increment.

   One tracker per link records the widest error-free run of taps that is
   closed by errors on both sides (a whole eye), and the widest run of any
   kind as a fallback.
3. For each link in turn:
   - take the centre of that run (start + width/2);
   - move the link there with addressed commands: tap decrements from 124
     when that is shorter, otherwise a tap reset and increments;
   - wait for the link's acknowledgement, which carries its tap count.

   A matching count sets `link_ok`. The last steps of the move can make
   the backend receiver slip and realign, which loses the
   acknowledgement. If no acknowledgement comes within `ACK_TIMEOUT`
   cycles, the master asks again with a no-op command, up to three times.

On the frontend, `link_sync_slave` executes the commands on the chain:

- An increment steps the first element below 31.
- A decrement steps the last element above 0.
- A reset loads 0 into all four elements.

The chain therefore never wraps, and its delay is always the sum of the
four settings.

With the testbench cable model (a 0.6 ns capture window), the scan finds
eyes of 43 to 44 taps (3.4 ns) out of the 51 taps of one symbol.

## PTP delay request-response

Take t1 as the master's send time of *synch* and t2 as the slave's
receive time. Take t3 as the slave's send time of *delay_req* and t4 as
the master's receive time. The slave then computes

    offset = ((t1_g - t2_l) + (t4_g - t3_l)) >>> 1

and adds it to its local counter. The shift is arithmetic, so an odd sum
rounds down. For example, 23.5 becomes 23.

- **Backend, `ptp_master`.** Every `SYNC_PERIOD` cycles it picks the next
  link with `link_ok` in round-robin order. It sends *synch* as six
  addressed frames carrying t1_g, LSB first. t1_g is the global time in
  the `accept` cycle of the first frame, and that frame's data byte is
  the same counter value. The master then waits for the node's
  *delay_req*. t4_g is the global time at the start-of-frame pulse of the
  backend receiver. It returns t4_g in six *delay_resp* frames.
- **Frontend, `ptp_slave`.**
  - t2_l is the local time at the start-of-frame pulse of the first
    *synch* frame.
  - It sends *delay_req* after the last *synch* byte. t3_l is the local
    time at that frame's `accept`.
  - It computes and applies the offset after the last *delay_resp* byte.
- **Watchdogs.** The link has no handshake. If a message is lost, a
  watchdog of `WATCHDOG` cycles on each side returns the state machine to
  idle and counts a timeout.

Time is stamped at `accept` on the sending side and at the receiver's `sof`
pulse on the receiving side. The remaining fixed latencies are:

- encoder to line;
- the receiver's pipeline;
- the coarse delay against the clock recovery chip.

These are equal in both directions, so they cancel. What is left
uncorrected is the asymmetry of the medium: the pairs of the cable, and
the uplink fine delay of at most 9.7 ns, which is half of that in offset.
This design does not measure that asymmetry.

## Parameters (defaults)

| block | parameter | default | origin |
|---|---|---|---|
| all | clock | 250 MHz, 4 ns per count | from the paper |
| top, backend | `N_GCU` | 48 | from the paper |
| all | `TIME_W` | 48 bits | own choice |
| fine delay | elements × settings × tap | 4 × 32 × 78 ps, 124 taps max | from the paper |
| backend / frontend decoder | coarse delay | 6 / 0 cycles | from the paper |
| encoder | `IDLE_PERIOD` | 1024 on the backend, 128 on a frontend | own choice |
| decoder | `SEARCH_TIMEOUT` | 2400 on a frontend, 400 on the backend; `LOSS_LIMIT` 8 | own choice |
| link sync | `SETTLE`, `DWELL`, `ACK_TIMEOUT` | 2048, 1024, 4096 cycles | own choice |
| PTP | `SYNC_PERIOD`, `WATCHDOG` | 4096, 8192 cycles | own choice |
| pulse | `WIDTH` | 25 cycles | own choice |

Command codes, sub-addresses and the tap-command encoding are in
`rtl/ttc_pkg.sv`, and they are this design's own. The paper specifies
only the frame lengths and fields. It does not give the Hamming equations,
and it does not give any search, scan or placement timing.

## Where this design departs from, or goes beyond, the description

- The bit layout of the frames and the Hamming equations are not given.
  The layout used is that of the CERN TTC system, on which the link is
  based.
- An eye is 4 ns wide. This fits one BMC symbol per 250 MHz clock. The
  rate is quoted as 250 Mb/s, and each channel here carries 62.5 Mb/s of
  data.
- Several parts of the link synchronization are this design's own:
  - scanning all links in parallel with broadcast commands;
  - the closed-run rule;
  - the tap reset command;
  - the acknowledgement and its retries.
- The real delay elements wrap around at 31. The chain here is stepped so
  that it never wraps.
- The encoding of PTP messages over the link (six frames for each 48-bit
  time) is this design's own.
- Cable asymmetry is not compensated. The paper measures 10 ns on an 80 m
  cable and leaves compensation to future work. An uncompensated
  asymmetry of A shifts the local time by A/2.
- The clock recovery chip, the clock tiles, the LVDS buffers, the cable
  and the White Rabbit core that would feed the global time are not logic
  and are not included. `global_time_counter` has a load port for a future
  external time.

## Files

Each file starts with a description of its module.

- `rtl/ttc_pkg.sv`: frame type, command codes, Hamming functions.
- `rtl/ttc_encoder.sv`, with the helpers `ttc_arbiter.sv` and
  `bmc_encoder.sv`: the transmitter.
- `rtl/ttc_decoder.sv`, with the helper `coarse_delay.sv`: the receiver.
- `rtl/fine_delay.sv` and `rtl/idelaye2_model.sv`: the uplink delay chain.
  The delay element is a behavioural model with the ports of the FPGA
  primitive. It is not synthesizable as a delay: a synthesis tool reduces
  it to a wire, and an FPGA build must substitute the vendor primitive.
- `rtl/link_sync_master.sv`, `rtl/link_sync_slave.sv`: eye scan and tap
  control.
- `rtl/ptp_master.sv`, `rtl/ptp_slave.sv`: delay request-response.
- `rtl/global_time_counter.sv`, `rtl/local_time_counter.sv`,
  `rtl/pulse_gen.sv`.
- `rtl/bec_top.sv`, `rtl/gcu_top.sv`, `rtl/timing_system_top.sv`: the
  boards and the system.
- `tb/`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=… failures=…`. The shared models are `tb_ref_pkg.sv`,
  an independent frame and Hamming reference, and `tb_link_channel.sv`,
  the cables, clock recovery and input capture.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ttc_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_timing_system_top.sv --top-module tb_timing_system_top
./obj_dir/Vtb_timing_system_top
```

Replace the testbench name to run another one.

`tb_timing_system_top` is the end-to-end test. It uses one backend and
three frontends on 3 m, 50 m and 80 m of cable:

- The frontends leave reset at random times.
- Every link must calibrate.
- Every frontend must complete exchanges and agree with the global time
  within 2 counts.
- Pulses scheduled for the same time must agree within 8 ns.
- Unplugging one uplink must trigger the watchdogs and a realignment,
  and PTP must resume afterwards.
- It counts every mechanism. Any mechanism that never happens fails the
  test.

In a typical run the frontends end 0 to 1 count from the global time, and
their pulses come 2 to 4 ns from the backend's. The cables are
symmetric, so this residual comes from the 4 ns counting resolution and
the fine delay.

`tb_timing_system_full` runs the full-size system with no parameter
overrides: 48 frontends on 3 m to 78 m cables. It covers channel
alignment, calibration of all 48 links and the first PTP exchanges. It
passes all 107 checks in about 7 minutes of Verilator run time:

- calibration of the 48 links ends at global time 831,395 counts (3.3 ms);
- every link ends ok;
- the first eight frontends then agree with the global time within 2
  counts.

The other testbenches each test one block. They run in seconds.
