# A chaos-synchronized logistic-map link for UAV secure communication

Two stations share a secret without exchanging it. One is a ground base
station (GBS) and the other an aerial base station (ABS). Each holds a copy
of the logistic map in its chaotic regime,

    s_{n+1} = mu * s_n * (1 - s_n / k),      mu = 3.7.

The sender lets its map run freely and broadcasts the states. The receiver
runs the same map plus a feedback term. That term is built so that the
difference between the two states halves on every sample, whatever the
starting points were. After a dozen samples both stations hold the same
noise-like sequence. They can then use it in two ways:

* **Scrambling.** An information word is XOR-ed into the sender's state.
  The receiver XORs its own state back out and averages the result
  (the correlator). This is the *bitstream* scheme.
* **Perturbing.** Alternatively a bit is *added* to the sender's state as a
  small amplitude, and the receiver is driven by that perturbed value. The
  controller can then no longer null the error, and the size of the error
  betrays the bit (the threshold detector). This is the *amplitude* scheme.
* **Channel hopping.** On a common trigger each station turns its own state
  into one of 100 RF channel numbers. Once synchronized, both pick the same
  channel without any message about which one.

This RTL follows the FPGA prototype described in Nwachioma, Ezuma and
Medaiyese, "FPGA prototyping of synchronized chaotic map for UAV secure
communication" (IEEE, 2021). That design has 16-bit states, a scale factor
k = 2^10, mu built in as a constant, 4-bit information words spread over
the 16 state bits, and a 100-channel table from 60 to 200 MHz. The paper
does not give the fixed-point encoding, bit groupings or control signals.
The sections below say where this implementation chose its own.

## 1. Why the receiver locks on

The sender state is x_n and the receiver state is y_n. The error is
e_n = y_n - x_n. The receiver computes

    y_{n+1} = mu * y_n * (1 - y_n / k) + u_n
    u_n     = [ mu * (e_n + 2 x_n - k) + rho * k ] * e_n / k .

Expand y_{n+1} - x_{n+1} and the quadratic terms of the two maps cancel
against u_n. What is left is a linear error recursion:

    e_{n+1} = rho * e_n .

With |rho| < 1 the error decays geometrically from any starting point. The
receiver may even start outside the map's natural range (0, k). This design
uses rho = 1/2. Once e = 0 the feedback term is zero and both maps compute
the same thing.

**The fixed-point version keeps this property exactly.** Every sample
involves three products:

* the sender's map term, MU_Q * x * (k - x);
* the receiver's map term, MU_Q * y * (k - y);
* the control term, (MU_Q * (e + 2x - k) + RHO_Q * k) * e.

Each product is formed exactly in a 64-bit accumulator. MU_Q and RHO_Q are
mu and rho with 12 fraction bits. The accumulator's unit is 2^-22 of a state
unit (12 fraction bits plus log2 k = 10). The receiver adds its map term and
the control term *before* rounding. It then shifts right by 22 bits, which is
the only rounding anywhere in the sample. The algebra above then holds
integer-exactly inside the accumulator:

    map(y) + u = map(x) + RHO_Q * k * e

so that, with a = map(x) / 2^22,

    x_{n+1} = floor(a),   y_{n+1} = floor(a + e_n / 2),
    e_{n+1} = floor(a + e_n / 2) - floor(a).

The error therefore roughly halves each sample, lands on exactly 0, and
stays there. Dividing u by k before the addition would make it round
separately. The error could then stall at +-1 instead of reaching zero.

From the prototype's starting points (GBS 122, ABS -1024) the error runs
-1146, -573, -287, -144, -72, -36, -18, -9, -4, -2, -1, 0. From sample 11 on
the two stations agree bit for bit.

The sender's free orbit stays inside (0, k) by itself: the largest value the
map can reach is 3.7 * k / 4 = 947. The receiver's state can be anywhere in
16 bits. The next-state value is clamped to the 16-bit signed range, which
gives the error a bounded dynamic range in hardware. With rho = 1/2 a
receiver never reaches the clamp. A *sender* started outside (0, k) does
diverge and sticks at -32768. The initial condition of whichever station
transmits must therefore lie in 1..k-1.

## 2. Number format

| quantity              | encoding                                               |
|-----------------------|--------------------------------------------------------|
| map state             | 16-bit two's complement; transmitter range 1..1023     |
| scale factor k        | 2^10 = 1024                                            |
| mu                    | 15155 / 4096 = 3.69995 (12 fraction bits)              |
| rho                   | 2048 / 4096 = 0.5                                      |
| control term `u_acc`  | 64-bit, u scaled by 2^22                               |
| error `e`             | 17-bit two's complement                                |
| switch word (x0, y0)  | 16-bit sign-magnitude, bit 15 = sign                   |
| amplitude a           | 51 state units (0.05 k)                                |
| detector threshold    | 26 state units, on |y - z|                             |
| frequencies           | kHz, 18 bits                                           |

The initial conditions are sign-magnitude because that is how the prototype
example encodes them: `1000010000000000` stands for -1024. A station converts
its switch word to two's complement when it loads it. All constants live in
`chaos_pkg`. mu's encoding is this design's choice, and it decides which
chaotic orbit the hardware follows. A different encoding gives a different
(equally valid) sequence.

## 3. Scrambling and the correlator

The m = 16 state bits are cut into n = 4 groups of r = 4 bits. Group p is
bits 4p..4p+3, counted from the LSB. It carries information bit p:

    z = x ^ { {4{i[3]}}, {4{i[2]}}, {4{i[1]}}, {4{i[0]}} }     (scrambler)

With the source off (`info_on` = 0) the data word equals the state.

The receiver computes R_s = z ^ y. It then counts the ones in each group:

    s_p = (ones in group p of R_s) / r .

When y = x every group is all-ones or all-zeros, so s_p is exactly the
information bit. Before synchronization the groups are mixed, and s_p takes
fractional values: the "fringes" at the start of a transfer. The
`correlator` outputs r * s_p as a 3-bit count (`s_cnt`), a flag `exact`
for s_p in {0, 1}, and the decided bit `bits` (s_p = 1). It also outputs
the descrambled word `rs`. All four groups are summed in parallel for one
word per clock, and the outputs are registered.

XOR as the invertible function, and the LSB-first grouping, are this
design's choices. The paper asks only for an invertible function, and uses
addition/subtraction in its floating-point study.

## 4. The amplitude scheme and its detector

In this mode (`comp_mode` = `COMP_ADD`) the sender broadcasts one word,

    z_n = x_n + a * i_n,      a = 51 (0.05 k),  i_n = info[0],

and the receiver's controller takes z_n, not x_n, as its drive. With
i_n = 0 this is the synchronizing loop of section 1. With i_n = 1 the
controller keeps trying to pull y onto z, which the map cannot follow.
The error eps = y - z grows to a few hundred units while the bit is one,
and halves per sample back to zero after it returns to zero. The
`threshold_detector` forms i* = |eps| and decides r = (i* >= 26), the
midpoint between the two levels 0 and a.

This scheme is inherently approximate. Every falling edge of the data is
followed by two or three samples whose decision is still one, while the
error decays. In the 50-sample experiment of `tb_additive_workload` (bits
held for 8 samples) 34 of 40 decisions after the start-up match the sent
bit. Over long random runs the rate is about 90 %. The threshold value, and
acting on |eps| rather than eps, are this design's choices.

## 5. Channel selection

`channel_select` turns a state into a channel index on `trigger`:

    j = floor( clamp(s, 0, k-1) * 100 / k ) + 1          (1..100)

Channel j covers 60.0 + 1.4(j-1) MHz to 60.0 + 1.4j MHz, with its centre
0.7 MHz above the lower edge. That gives 60.0-61.4 MHz (centre 60.7) for
j = 1 and 198.6-200.0 MHz (centre 199.3) for j = 100. The band start is
held in a 100-entry ROM array that a function fills at elaboration; the
centre and upper edge are computed from it. Before synchronization the two
stations generally pick different channels. Afterwards they always pick the
same one, and the top's `chan_err_khz` (GBS centre minus ABS centre) is 0.
The scaling rule is this design's choice. The paper says only that the
index comes from the map state. Reset selects channel 1.

## 6. Stations, roles and the link

    uas_link_top
    +-- u_gbs : comm_station          +-- u_abs : comm_station
    |   logistic_map                  |   logistic_map
    |   sync_controller               |   sync_controller
    |   scrambler                     |   scrambler
    |   correlator                    |   correlator
    |   threshold_detector            |   threshold_detector
    |   channel_select                |   channel_select

Both stations are identical, so either can send. The role input decides:

* **Transmit.** The controller's output is forced to 0, so the map runs
  freely. The station broadcasts two 16-bit words per sample:
  * `bcast_state`, its state, which drives the partner's controller in the
    bitstream scheme;
  * `bcast_z`, the data word (scrambled, or perturbed in the amplitude
    scheme).
* **Receive.** In the bitstream scheme the controller uses the partner's
  broadcast state as x_n. The correlator descrambles the partner's data word
  with the station's own state. In the amplitude scheme the controller uses
  the partner's data word, and the threshold detector reads the error.

In `uas_link_top`, `dir` = 0 makes the GBS send and the ABS receive, and
`dir` = 1 the reverse. By the time the roles swap, the receiver already
follows the sender's orbit. A swap therefore costs no resynchronization: the
new receiver's error is already 0.

The channel is ideal: no delay, noise or loss. Its two words are visible as
`link_state` and `link_z`. `x_n` and `y_n` are the GBS and ABS states. The
receiver's error, correlator results and both stations' channel choices are
all top-level outputs.

## 7. Timing

* One map iteration per clock edge with `step` high. The prototype clock is
  40 MHz, giving 40 M samples/s. The datapath is three 64-bit products and
  an adder, all combinational, between two 16-bit registers. It has not been
  timed on a device.
* Controller, scrambler and descrambler all see the states of the same
  sample n, so both registers move to sample n+1 on the same edge.
* The correlator's result for sample n appears one clock later, with
  `rx_valid`. The same holds for the detector's result, with `det_valid`.
* `chan_idx` changes on the clock where `chan_trigger` is high. The
  frequencies follow it combinationally.
* Reset (`rst_n`, active low) is synchronous throughout. It loads the switch
  words into the state registers, clears the correlator and selects channel
  1. `load` reloads the switch words at any time.
* An assertion in the top checks that synchronization, once reached, is
  kept across samples and role swaps. The exceptions are a load, and an
  amplitude-mode one being sent.

## 8. Where this departs from, or goes beyond, the source

* **Two words on the link in the bitstream scheme.** In the bitstream scheme
  the receiver's controller is driven by the sender's plain state, and the
  scrambled word travels alongside it. The source describes its FPGA
  bitstream design this way: the receiver builds its control signal from the
  states it receives. Its general block diagram instead drives the
  controller with the composed signal itself; that is what the amplitude
  scheme does. With XOR scrambling, driving the controller with the data word
  would push the receiver off the sender's orbit whenever data flows.
  Meanwhile the source's bitstream results show clean recovery after
  synchronization. A consequence should be stated plainly: an eavesdropper
  who hears both words can XOR them and read the data. The secrecy of the
  bitstream link therefore depends on the state word not being observable,
  for example on it being sent only while the information source is off. The
  RTL does not enforce that.
* **Upper state bits are constant.** The sender's state lies in 1..1023, so
  bits 10..15 are always 0. Information bit 3 (state bits 12..15) therefore
  appears in the data word unmasked, and bit 2 is half masked. This follows
  from spreading 4 bits over all 16 state bits as the source does, and is
  kept.
* **The quantized map is periodic.** At k = 2^10 with floor rounding the map
  has at most 1024 states in (0,k), so every orbit ends in a short cycle.
  Over all starts 1..1023 the transient is at most 45 samples. The cycle
  reached is the 2-cycle through 400 for 963 starts, an 8-cycle for 38, a
  6-cycle for 20 and the fixed point 747 for 2. From 122 the orbit enters the
  2-cycle at sample 36. Synchronization does not depend on this: the error
  law holds on any orbit. But the scrambling mask, and with it the channel
  sequence, repeats after that point, so the unpredictability argued for the
  real-valued map does not carry over to this word length. A larger k (more
  fraction bits, a wider state) lengthens the transients and cycles; the
  source's k and 16-bit switch words are kept here.
* **Both schemes in one datapath.** The source presents the amplitude
  scheme in its floating-point study and the bitstream scheme in its digital
  design. Here both share the map and controller, and a mode input selects
  between them at run time.
* **Constants.** The gain rho = 0.5 is the value of the source's simulations;
  the prototype's gain is not stated. mu's 12-bit encoding is this design's
  choice. The logic-analyser snapshot in the source (both states at 697) is
  therefore not reproduced: 697 does not occur on this design's orbit from
  122. Synchronization itself is reproduced.
* **Outside the RTL.** The information source, the radio, the 40 MHz clock
  generation, the slide switches and the logic-analyser core are not part of
  the RTL. They appear as ports.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. Expected values are computed in the
testbench with 64-bit integer arithmetic, independently of the RTL.

| testbench             | what it covers                                                     |
|-----------------------|--------------------------------------------------------------------|
| `tb_logistic_map`     | 200 free iterates from 122, range (0,k), hold, load, control input, clamps |
| `tb_sync_controller`  | 2000 random (x, y): formula, the exact error law, enable            |
| `tb_scrambler`        | bit grouping, source off, XOR invertibility                        |
| `tb_correlator`       | counts, flags, recovered words, one-clock latency, hold             |
| `tb_threshold_detector` | magnitude and decision around and far from the threshold, latency, hold |
| `tb_channel_select`   | table rows for channels 1, 2, 99, 100, random states, clamp, hold   |
| `tb_comm_station`     | receive from -1024 against a modelled sender (sync by sample 11, fringes, recovery), transmit role, channel pick, amplitude mode |
| `tb_uas_link_top`     | full link at default size: sync, fringes, recovery, channel disagreement before and agreement after sync, role swap, reload and resync, amplitude mode with at least 80 % correct decisions |
| `tb_sync_workload`    | information source off, starts 0.1 k and -1.0 k, 50 samples, error halving to 0 |
| `tb_prototype_workload` | switch words 122 and -1024, 64-sample capture printed, then 1,000,000 samples against a reference map with the receiver held in sync |
| `tb_additive_workload` | amplitude scheme from the same starts, 50 samples, prints the i* / r trace |

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_uas_link_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/chaos_pkg.sv tb/tb_uas_link_top.sv
    ./obj_dir/Vtb_uas_link_top

Every testbench finishes within a few seconds.

## 10. Changing it

* The map constants (mu, rho, k, state width) are in `chaos_pkg`. Every
  module takes them as parameters, with the package values as defaults.
* The 64-bit accumulator must hold the largest product. For 16-bit states
  with 12 fraction bits that product is about 2^49.
* Any rho with |rho| < 1 makes the error contract. In fixed point, the last
  step from +-1 to 0 happens when the rounding of the sender's map term
  allows it, which the chaotic orbit provides within a few samples. Only
  rho = 1/2 has been simulated.
* The information width N must divide the state width. The correlator
  count width follows as clog2(W/N + 1).
