# One clock, two clock domains: the timing datapath of a wired/wireless TSN domain translator

A domain translator joins an Ethernet TSN network to a wireless network: 802.11g or w-SHARP.
The wireless network is a deterministic 20 MHz industrial radio. The translator is a boundary
clock. Its Ethernet port is an 802.1AS/PTP slave of the wired grandmaster, and its radio port is
the PTP master of the wireless stations. The way the time crosses from one side to the other is
the main idea of the design. There is no software translation between two clocks. Instead, both
interfaces timestamp against **one shared PTP hardware clock (PHC)**. Once the Ethernet-side
servo has locked that clock to the grandmaster, the radio-side stamps are already in grandmaster
time.

The one complication is that the two interfaces live in different clock domains:

| domain          | clock        | period  | contents                                                         |
|-----------------|--------------|---------|------------------------------------------------------------------|
| Ethernet (MTSN) | `clk_mtsn`   | 8 ns    | the PHC, Ethernet rx/tx timestamp units, PPS output               |
| wireless        | `clk_wireless` | 6.25 ns | read-only copy of the PHC, radio tx stamps (6.25 ns), radio rx stamps (50 ns grid) |

The PHC counts in the Ethernet domain. The radio modem needs to read it every cycle of a clock
that is unrelated to it. Two clocks may share a 40 MHz reference but still have an unknown phase
relation, so the design treats them as asynchronous. This RTL holds everything that makes the
shared clock work:

- the PHC;
- the clock-domain crossing (CDC) that gives the modem its copy of the PHC;
- the timestamp units on both sides;
- a top level, `domain_translator`, that wires them together.

The TSN switch, the two radio modems and the processor software are not part of this RTL. They
connect to it through plain event, timestamp and command ports.

## Error budget the design is built to

Each stage adds a bounded, zero-mean error. The design is arranged so that each of these errors
really is zero-mean:

| source                              | bound          | where it comes from                        |
|-------------------------------------|----------------|--------------------------------------------|
| Ethernet timestamp resolution       | ±4 ns          | one 8 ns cycle, ingress and egress         |
| PHC translation across the CDC      | ±16 ns         | the copy is refreshed every 32 ns          |
| radio receive timestamp resolution  | ±25 ns         | 20 MHz sample grid (50 ns)                 |
| radio transmit timestamp            | one 6.25 ns cycle | stamped at the modem clock              |
| multipath (wrong replica detected)  | δm/2 two-way, δm one-way | channel dependent, up to about 1 µs indoors |

Take an end-to-end path of Ethernet → translator → 802.11 → translator → Ethernet. It has four
Ethernet stamp errors, two translations and one radio receive stamp, so its worst case is
4·4 + 2·16 + 25 = 73 ns. The path through a multipath wireless hop adds
25 + δm/2 (two-way) on top of the 48 ns wired and translation part. With IWLAN A (δm = 140 ns)
that gives 143 ns, and with WLAN C (1050 ns) it gives 598 ns.

## The PTP hardware clock (`phc`)

The time is a `ptp_time_t` struct: 48-bit seconds and 32-bit nanoseconds, with the nanoseconds
kept below 10^9. Behind the nanoseconds sits a 32-bit fraction. Each `clk_mtsn` cycle adds an
8.32 fixed-point increment, in ns per cycle, to {ns, fraction}, and the sum carries into the
seconds at 10^9 ns. The nominal increment is exactly 8.0 (`INC_8NS`). The servo trims the clock
frequency by rewriting the increment. One LSB is 2^-32 ns per cycle, about 0.03 ppb at 125 MHz.

The servo drives the clock through a one-cycle command (`phc_cmd_valid` + `phc_cmd`):

| `op`           | effect on the clock edge that takes it                               |
|----------------|----------------------------------------------------------------------|
| `PHC_SET_TIME` | time := `set_time`, fraction cleared                                  |
| `PHC_STEP`     | time := (time + increment) + `step_ns` (signed); the tick of that cycle is not lost |
| `PHC_SET_INC`  | increment := `inc` from the next cycle on                             |

These are the three operations a PTP daemon uses on a hardware clock: set, adjust-time and
adjust-frequency. `pps_out` is high during the first `PPS_WIDTH_NS` (100 ms) of every second.
An assertion checks that the nanoseconds stay below 10^9.

## Carrying the time across the clock boundary (`phc_cdc`)

This is the least obvious part of the design. An 80-bit value cannot be passed through
ordinary two-flop synchronisers, because its bits would resolve independently, and a copy taken
while it changes would be garbage. The crossing instead holds a sample still, and tells the
other side when it is safe to take it:

```
clk_src (125 MHz)                           clk_dst (160 MHz)
 phc ──►[ /4 register ]── held ──────────────────────────►[D EN Q]──► phc_dst
          ▲ every 4th cycle                                  ▲
          └─[toggle]──► s1 ─► s2 ─► s3                        │
                              └──── s2 ≠ s3 ─────────────────┴──► (flop) ► data_valid
```

1. **Downsampling.** Every fourth source cycle, the divide-by-4 register captures the PHC and a
   toggle flop inverts. The captured value then stays still for T_Src = 32 ns (31.25 MHz).
2. **Synchronising the toggle.** On the destination side, two flops synchronise the toggle and a
   third delays it by one cycle.
3. **Taking the value.** When the second and third flops differ, the toggle has changed, so the
   held value has been stable for at least one destination cycle. That difference enables the
   destination register for exactly one cycle. `data_valid` is the same enable, registered, so it
   rises together with the new `phc_dst`.

This only works if the held value outlives the synchroniser latency. The toggle can take up to
about three destination cycles (≈19 ns) to be seen, so T_Src must be several destination periods
long. The rule used is T_Src ≥ 4·T_Dst. Here that is 32 ns ≥ 25 ns, which is why the source is
downsampled by 4 rather than crossed at 125 MHz.

**Calibration.** Seen from the modem, the copy is a staircase that steps by 32 ns and always lags
the true time. Two constants, added on the source side before the /4 register, turn that lag
into a zero-mean error:

- `CAL_NS = 16` (T_Src/2) removes the sawtooth of the 32 ns steps. Between updates the copy ages
  from 0 to 32 ns, and the constant centres that age.
- `SYNC_COMP_NS = 24` removes the pipeline delay of the circuit:
  - the /4 register stores the value the PHC had on the previous source edge (8 ns);
  - the toggle reaches the enable on average 2.5 destination cycles later (15.6 ns).

  The usual model of this quantisation ignores that delay. Without it, the simulated mean error
  is about −20 ns instead of 0.

With both constants, the simulated translation error stays within about [−12, +19] ns. Its mean
is +3 ns at destination edges, and about 0 averaged over time. The ±16 ns model is widened only
by the one-destination-cycle jitter of the synchroniser. The copy is only as good as those two
constants, and both depend on the clock ratio. If `CDC_DIV` or either clock changes, recompute
both: T_Src/2 for the first, and one source period plus 2.5 destination periods for the second.

Timing seen by the modem: `phc_wireless` changes once every 32 ns, and `phc_wireless_valid`
pulses on the cycle it changes. A modem that needs a continuous nanosecond count in between can
extrapolate by 6.25 ns per cycle from the last update. That extrapolation is not part of this RTL.

## Timestamp units (`ts_unit`)

Each interface has a unit that latches the PHC on a one-cycle frame event:

- Ethernet: start-of-frame delimiter, rx and tx.
- Radio: preamble detection (rx) and start of transmission (tx).

A unit has a resolution of `RES_CYCLES` clock periods. A free-running counter marks every
`RES_CYCLES`-th cycle as a sample instant, and an event is stamped with the clock value of the
first sample instant at or after it. `ts_valid_o` pulses one cycle later, and `ts_o` holds until
the next stamp.

| unit             | clock   | `RES_CYCLES` | resolution | `CAL_NS` |
|------------------|---------|--------------|------------|----------|
| Ethernet rx, tx  | 125 MHz | 1            | 8 ns       | 0        |
| radio tx         | 160 MHz | 1            | 6.25 ns    | 0        |
| radio rx         | 160 MHz | 8            | 50 ns      | −25      |

On a radio, the rx stamp is limited by the 20 MHz baseband sampling, and the tx stamp is not. So
only the receive unit sits on the 50 ns grid, and its sample strobe is brought out as
`wl_sample_strobe` for the modem. Stamping at the next sample is on average half a period late.
`CAL_NS = −25` centres it, so the error is uniform in [−25, +25) ns. If a second event arrives
while one is still waiting for its sample instant, the two are merged into one stamp and
`overrun_o` pulses. With `RES_CYCLES = 1` that cannot happen: the strobe is then constant high
and the overrun constant low, and synthesis reports both as constant outputs.

## Top level (`domain_translator`)

The top instantiates one `phc`, two Ethernet `ts_unit`s, the `phc_cdc` and two radio `ts_unit`s.
It has no other logic. Ports, grouped by clock:

- `clk_mtsn`, `rst_mtsn_n`:
  - `phc_cmd_valid`, `phc_cmd`: servo commands;
  - `phc_time`, `phc_inc`, `pps_out`;
  - `eth_rx_event`, `eth_tx_event` → `eth_{rx,tx}_ts_valid`, `eth_{rx,tx}_ts`, `eth_ts_overrun`.
- `clk_wireless`, `rst_wireless_n`:
  - `phc_wireless`, `phc_wireless_valid`;
  - `wl_sample_strobe`;
  - `wl_rx_event`, `wl_tx_event` → `wl_{rx,tx}_ts_valid`, `wl_{rx,tx}_ts`, `wl_ts_overrun`.

Resets are asynchronous, one per domain. The PHC comes out of reset at time 0 with the nominal
increment, and the wireless copy reads 0 until the first update.

The same top serves both variants of the translator, 802.11 and w-SHARP. Both use one shared
clock and the same crossing circuit; only the modem and the message exchange on top differ. The
AP and the wireless station use the same blocks: a station is a `phc` clocked at 160 MHz
(increment 6.25 ns) with its own timestamp units.

## What simulation shows

Every block has a self-checking testbench (`tb/tb_<block>.sv`) with an independent reference
model:

- `tb_phc`: exact time model, steps, frequency words and PPS;
- `tb_phc_cdc`: staleness, step size, update rate (625 updates in 20 µs) and mean/range of the
  error;
- `tb_ts_unit`: the stamp value and the cycle of every stamp, at resolution 1 and 8;
- `tb_domain_translator`: the whole top at default parameters, against a model of a host and
  both interfaces. It includes a second rollover, steps in both directions, a +100 ppm
  frequency word, merged radio events, and a check that an Ethernet and a radio stamp of the
  same instant agree to within the budget above.

`tb_e2e_chain` runs the whole laboratory chain: an ideal grandmaster, Ethernet, translator A,
a cabled radio link, translator B, Ethernet, and an ideal measuring slave. Both translators run
at their defaults, and the oscillators are off by −5 and +10 ppm. The servos are PI with
Kp 0.7 / Ki 0.3, and wired and radio exchanges keep an 8:1 rate ratio. After lock, the
measuring slave sees the following error, across seeds:

- mean 2–4 ns;
- standard deviation 13–15 ns;
- largest 36–44 ns, against the 73 ns worst case.

B's true error has a mean about 6 ns higher. This offset comes from the "stamp at the next
clock edge" latency of the Ethernet receive units. The two-way exchange cannot see it, and it
stays well inside the ±4 ns-per-stamp budget.

`tb_sync_hop` closes the loop over one wireless hop. The translator is the master. The station
is built from the same blocks, with a +10 ppm oscillator error. The channel adds 1135 ns, plus,
on a quarter of frames, a late-replica delay of up to the channel's δm. A PI servo in the
testbench disciplines the station:

- two-way 802.1AS exchange, Kp 0.7 / Ki 0.3;
- one-way beacons with a pre-calibrated delay, Kp 0.1 / Ki 0.01.

Exchanges are time-compressed to 40 µs and 100 µs, against 1/8 s and 500 µs on real equipment.
Results of one run, error of the station against the AP in ns (mean / standard deviation /
largest):

| channel (δm)     | two-way (802.11)     | one-way (w-SHARP)    |
|------------------|----------------------|----------------------|
| AWGN (0)         | 4.0 / 10.6 / 27.2    | 2.8 / 4.0 / 11.5     |
| IWLAN A (140)    | 3.2 / 28.0 / 60.0    | −13.1 / 8.2 / 29.8   |
| WLAN A (390)     | −0.4 / 70.7 / 167.5  | −32.8 / 16.7 / 70.3  |
| IWLAN B (600)    | 4.4 / 82.9 / 214.8   | −58.2 / 44.6 / 148.5 |
| WLAN C (1050)    | −4.6 / 191.3 / 412.3 | −98.0 / 48.4 / 197   |

Over the air, with no multipath, the distance alone matters. The one-way exchange is calibrated
for the cable delay, so going from 0.5 m to 10 m (1.7 → 33 ns of propagation) moved its mean
error from +4.2 to −28.6 ns. The two-way exchange measures the path, and its mean moved by
4 ns, which is noise.

The trends are the ones expected from the error model:

- Spread grows with δm.
- The two-way exchange keeps the mean near zero.
- One-way messaging turns multipath into a bias, because the late replica is never compensated.

The multipath model is deliberately crude: a per-frame coin toss with no Doppler or time
correlation. The absolute numbers are therefore not a channel prediction, only a check that the
datapath stays inside its bounds. The testbench checks every maximum against
16 + 25 + δm/2 (two-way) or δm (one-way), plus 40 ns for synchroniser jitter and servo residual.

## Where this RTL departs from, or adds to, the architecture

- **Lag compensation in the crossing.** `SYNC_COMP_NS = 24` is added on top of the T_Src/2
  calibration. It is needed to make the crossing error zero-mean in a real synchroniser. The
  error model of the architecture counts only the T_Src/2 term.
- **Centring of radio receive stamps.** `CAL_NS = −25` centres the stamps. The error model
  treats resolution error as zero-mean, and a raw "next sample" stamp is not.
- **Toggle rate.** The toggle inverts once per downsampled value (31.25 MHz), on the same enable
  as the /4 register. The synchroniser drawing does not show where the toggle's enable comes from.
- **Timestamp units outside the IPs.** In the real system the timestamp units live inside the
  switch and modem IP cores, and their internals are not published. Here they are generic units
  next to the clock.
- **Command port instead of a driver.** Set/step/frequency reach the clock through a simple
  command port. The register map of the real device is not published.
- **Not included:**
  - the TSN switch, the 802.11g and w-SHARP modems, the TSN/w-SHARP bridge and the RF front end;
  - the PTP daemons and servo, which run in software. The servo exists only in the testbench.
  - the system-clock and peripheral synchronisation that software derives from the PHC.

## Simulating

Verilator 5 with timing support is enough. The package must come first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_domain_translator \
    rtl/tsn_time_pkg.sv rtl/phc.sv rtl/phc_cdc.sv rtl/ts_unit.sv \
    rtl/domain_translator.sv tb/tb_domain_translator.sv
./obj_dir/Vtb_domain_translator
```

Use the same command with `tb_phc`, `tb_phc_cdc` or `tb_ts_unit` and only the files they need,
or with `tb_sync_hop` or `tb_e2e_chain` and all of `rtl/`. Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog that fails the run if it hangs.

Run times: `tb_sync_hop` simulates about 110 ms of two devices and takes about a minute.
`tb_e2e_chain` simulates 5 ms and takes a few seconds, like the block testbenches.

Parameters worth changing are all on `domain_translator`:

- `PHC_NOMINAL_INC`: another Ethernet clock.
- `CDC_DIV`, `CDC_CAL_NS`, `CDC_SYNC_COMP_NS`: another clock ratio. Keep T_Src ≥ 4·T_Dst and
  recompute both constants as described above.
- `WL_RX_RES_CYCLES`, `WL_RX_CAL_NS`: a wider radio. At 160 MHz of bandwidth, resolution 1 and
  calibration 0 give 6.25 ns receive stamps.
