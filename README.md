# Real-time range compression for a pulse radar: FPGA baseband in SystemVerilog

A pulse radar can measure sub-millimetre displacement and vibration of a target
without touching it. The trick is in the phase: when the echo of a chirp is
range-compressed, the complex value in the range bin that holds the target has a
phase of -4*pi*f0*R/c, so a change dphi from one pulse to the next is a change in
range of

    dR = c / (4*pi*f0) * dphi          (f0 = 5.755 GHz gives 4.1 mm per radian)

Watching one bin over many pulses therefore samples the target's motion; an FFT
over a pack of pulses gives its vibration spectrum. For this to be real time,
every pulse must be range-compressed before the next one. This RTL is the FPGA
part of such a radar: it sends a 448-sample linear chirp, records the
transmitted pulse (as a reference) and the echo window, cross-correlates them in
the time domain with 448 complex multipliers working in parallel, and hands the
magnitude and phase of every range bin to the host, once per pulse repetition
interval (PRI, 10 ms). It follows the architecture of a published USRP-based
radar (Tudose, Anghel, Cacoveanu, Datcu, "Pulse radar with FPGA range compression
for real time displacement and vibration monitoring"); the choices this
implementation had to make on its own are listed at the end.

## The two clock domains

```
 sampling clock, 120 MHz                              system clock, 30 MHz
 ------------------------                              --------------------
 pri_trigger_gen --Start trigger 1--> samp_addr_counter
                                         | address 0..3135
                        +----------------+--------------+
                        v                v              v
                     tx_rom          rx_memory RX1   rx_memory RX2
                   (448 words)      (448 words)     (3136 words)
                        |            write | read    write | read
                        v                  |  ^            |  ^
                     DAC (I,Q)   ADC RX1 --+  |  ADC RX2 --+  |
                                              |               |
 Start trigger 2 --pulse_sync-----------> xcorr_block --------+
                                           |  rx1_down_counter -> mean_remover -> Buffer 1 (conj)
                                           |  rx2_up_counter   -> mean_remover -> Buffer 2
                                           |  complex_mac_array (448 complex products + sum)
                                           |  magnitude_block, phase_block
                                           +-> two output_fifo (64-bit words) -> host
```

The sampling side runs in lock-step with the converters. A counter set by the
host emits Start trigger 1 every PRI (1,200,000 clocks = 10 ms). The address
counter then steps 0..3135 once per clock. The same address reads the chirp out
of the TX ROM (first 448 addresses), writes ADC 1 into the RX1 memory (first 448
addresses) and writes ADC 2 into the RX2 memory (all 3136). ADC 1 is fed from a
power splitter on the transmitter output, so RX1 holds the pulse as it actually
left the radio, group delay included. ADC 2 is the antenna.

Once the window is over, Start trigger 2 crosses to the system clock. From then
on everything happens at 30 MHz, the clock at which the 448-wide multiply-add
fits the FPGA. The RX memories are true dual-clock RAMs: written at 120 MHz and
read at 30 MHz. Start trigger 2 and the memory contents are the only things that
cross between the domains.

With `tx_enable` low the DAC stays silent. Both inputs can then be fed from an
outside transmitter, RX1 with its direct signal and RX2 with the scene, which
gives a bistatic radar.

## One PRI, clock by clock

| phase | clocks | domain | what happens |
|---|---|---|---|
| transmit and receive | 3136 (26.13 us) | 120 MHz | chirp out in the first 448; RX1 stored for 448, RX2 for 3136 |
| Start trigger 2 crossing | 3 to 4 | 30 MHz | toggle synchroniser |
| Buffer 1 fill | 448 | 30 MHz | RX1 read from address 447 down to 0 |
| Buffer 2 sweep | 3136 | 30 MHz | RX2 read 0..3135; from the 448th sample on, one range bin per clock |
| pipeline drain | 4 + 45 | 30 MHz | read, mean, buffer, multiply-add, then squares, sum, 43-stage square root |
| host transfer and host work | rest of the 10 ms | host | 2 x 2689 words of 64 bits (344 kbit) |

From the clock that samples Start trigger 2 to the write of the last magnitude
word takes 448 + 3136 + 4 + 45 = 3633 system clocks (121.1 us). Counting the
synchroniser, the end of the receive window is 3636 clocks from that write. The
reference design quotes 3649 clocks (121.63 us). The phase words come out 14
clocks before the magnitude words, because the CORDIC is shorter than the
square root.

## How the two buffers line up

This is the part that is easiest to get wrong. The correlator computes, for
every lag n,

    xc(n) = sum_{k=0}^{447} conj(rx1[k]) * rx2[n+k],     n = 0 .. 2688

A lag of n samples is a range of n * c / (2 * 120 MHz) = 1.25 m beyond the
reference path. All 448 products are formed in the same clock, so each signal
sits in a 448-stage shift register of flip-flops whose stages are all visible
at once.

* **Buffer 1** receives RX1 read backwards, address 447 first, 0 last. It
  shifts right (new data enters stage 0). After 448 shifts, stage k holds
  sample k. Its Q part is negated on entry, so the stage holds conj(rx1[k]).
  After that its shift enable stays low and it holds the reference for the
  rest of the PRI.
* **Buffer 2** receives RX2 read forwards. It shifts left (new data enters
  stage 447). Once address m has entered, stage k holds rx2[m-447+k]. At
  m = 447 the two buffers overlap completely for the first time, and
  `data_valid` marks lag 0. Each further RX2 sample moves to the next lag, up
  to m = 3135, lag 2688.

`complex_mac_array` multiplies stage k of one buffer by stage k of the other
and sums all 448 products. The 16 x 16-bit complex products need 33 bits. The
sum of 448 of them needs 9 more, so the result is exact in 42 bits per
component.

The published description writes the operation as a convolution of
conj(rx1[k]) with rx2[n-k] and speaks of a "flipped" Buffer 2. Read literally,
that pairs sample k of the reference with the echo running backwards. For the
symmetric chirp used here (same frequency sweep forwards and backwards about
its centre), that gives the same compressed peak. For a general reference it
would not. This implementation follows the cross-correlation stated in the
design's equations and shifts Buffer 2 the other way. It is the one place
where a reader of the original text might expect different wiring.

## DC offset removal

The analog front ends add a DC offset to each I and Q channel. Between memory
and buffer every sample passes through `mean_remover`. It subtracts the mean of
the same channel's samples from the **previous** PRI (zero after reset) and
saturates the difference to 16 bits. Meanwhile it sums the raw samples of the
current PRI. On the last sample it divides the sum by N (448 or 3136, rounding
toward zero) and stores the quotient for the next PRI. This relies on the
offset changing little from one pulse to the next. The first PRI after reset is
therefore uncorrected.

## Magnitude, phase and the words the host reads

* Magnitude: re^2 and im^2 (84 bits each), their sum (85 bits), then an exact
  integer square root (43 bits), computed one bit per pipeline stage with
  shift-and-subtract steps and no multipliers.
* Phase: a 30-stage pipelined CORDIC in vectoring mode. A vector in the left
  half-plane is first negated, with the angle starting at pi. The result is a
  32-bit two's-complement binary angle: 2^32 is one turn, so 1 LSB is
  1.46e-9 rad. The error is a few LSB for large vectors. For small vectors it
  grows to about 8/|z| rad, because the 42-bit datapath carries only two guard
  bits.
* Each result goes into its own FIFO as a 64-bit word: the magnitude
  zero-extended, the phase sign-extended. A FIFO holds 4096 words, so a whole
  profile (2689 words) fits and the host may read it after the computation or
  during it. Read with `*_rd_en`; the word appears on `*_dout` one clock later,
  marked by `*_dout_valid`. A write into a full FIFO is dropped and sets the
  sticky `fifo_overflow` flag.

For the displacement measurement the host picks the bin of the target and
tracks the phase word of that bin from pulse to pulse.

## Top-level ports (`pulse_radar_top`)

| port | dir | width | clock | meaning |
|---|---|---|---|---|
| clk_samp, clk_sys | in | 1 | | 120 MHz sampling and 30 MHz system clocks |
| rst_n | in | 1 | | asynchronous active-low reset for both domains; release it synchronously to each clock |
| enable | in | 1 | samp | run the PRI trigger |
| tx_enable | in | 1 | samp | 0 = silent DAC (bistatic use) |
| pri_period | in | 32 | samp | PRI in sampling clocks (1,200,000 = 10 ms) |
| adc_rx1, adc_rx2 | in | 2 x 16 | samp | `radar_pkg::cplx_t` {I, Q}; stored at the address held while `tx_active` |
| dac_tx | out | 2 x 16 | samp | chirp sample, one clock after its address |
| tx_active | out | 1 | samp | receive window open |
| mag_rd_en, mag_dout, mag_dout_valid, mag_empty, mag_count | | 1/64/1/1/13 | sys | magnitude FIFO, host side |
| ph_rd_en, ph_dout, ph_dout_valid, ph_empty, ph_count | | 1/64/1/1/13 | sys | phase FIFO, host side |
| fifo_overflow | out | 1 | sys | a result was dropped |
| xcorr_busy | out | 1 | sys | correlator is reading the memories |

The next receive window must not begin while `xcorr_busy` is high, because it
would overwrite memory still being read. With a 10 ms PRI the correlator needs
about 1.2 % of the interval. The PRI must be longer than about 26.1 + 121.2 us
plus the host's reading time.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| K | 448 | `radar_pkg`, top | chirp length, RX1 depth, buffer length, number of complex multipliers |
| RX2_DEPTH | 3136 | `radar_pkg`, top | receive window in samples (26.13 us, up to about 3.9 km of round trip) |
| FIFO_DEPTH | 4096 | top | words per output FIFO |
| SAMPLE_W / ACC_W / HOST_W | 16 / 42 / 64 | `radar_pkg` | sample, correlation and host word widths |
| ITER, PHASE_W | 30, 32 | `phase_block` | CORDIC stages, angle width |

K = 448 comes from the DSP budget of the original FPGA. It has 1540 DSP
slices, and a complex product takes 3, so 448 products leave a few slices
spare. K and RX2_DEPTH can be made smaller for experiments. The chirp file
holds 448 words, so a different K also needs a new ROM image.

## Files

| file | contents |
|---|---|
| `rtl/radar_pkg.sv` | sizes, `cplx_t`, 16-bit saturation |
| `rtl/pulse_radar_top.sv` | the whole baseband, both domains |
| `rtl/pri_trigger_gen.sv`, `rtl/samp_addr_counter.sv`, `rtl/tx_rom.sv`, `rtl/tx_chirp.hex` | sampling-clock side; the ROM image is s[n] = 30000 * exp(j*pi*(B/tau)*t^2), t = (n - 223.5)/120 MHz, B = 40 MHz, tau = 448/120 MHz, rounded, {I,Q} in hex |
| `rtl/rx_memory.sv` | dual-clock RX1/RX2 memory |
| `rtl/pulse_sync.sv` | Start trigger 2 synchroniser |
| `rtl/xcorr_block.sv` | system-clock side: counters, mean removal, buffers, multiply-add, magnitude, phase, FIFOs |
| `rtl/rx1_down_counter.sv`, `rtl/rx2_up_counter.sv` | the 448 down counter and the 3136 up counter |
| `rtl/mean_remover.sv`, `rtl/shift_buffer.sv`, `rtl/complex_mac_array.sv` | the correlator |
| `rtl/magnitude_block.sv`, `rtl/phase_block.sv`, `rtl/output_fifo.sv` | results and host transfer |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_displacement_workload.sv` | displacement and vibration measurement through the whole design |

## Simulating

Run from the directory that holds `rtl/` and `tb/`, because the ROM image is
read as `rtl/tx_chirp.hex`. The end-to-end test at full size:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/radar_pkg.sv rtl/*.sv tb/tb_pulse_radar_top.sv \
      --top-module tb_pulse_radar_top -o sim
    obj_dir/sim

It takes about 10 s. It runs three 10 ms PRIs with every parameter at its
default, against an RF model written in the testbench: a loopback with DC
offset on RX1, and a rotated, attenuated, noisy echo 157 bins later on RX2.
The second PRI runs with the first one's means removed. The third runs in
bistatic mode with the chirp supplied from outside. Every one of the 2689
magnitude words of each PRI must equal a model computed in the testbench. Every
phase word must agree with atan2 within the CORDIC tolerance. The peak must lie
in bin 157. The time from the end of the window to the last result must stay
within the reference 3649 clocks. Each mechanism (PRI trigger, domain crossing,
Buffer 1 freeze, zero and non-zero mean, data-valid lags, silent DAC, host
reads) is counted and must occur. The other testbenches build the same way with
their module's files; each prints `TB_RESULT checks=N failures=M`.
`tb_xcorr_block` exercises the system-clock side alone at K = 16 with a
64-sample window.

`tb_displacement_workload` runs the measurement itself through the full-size
top. A target sits at 30 m (bin 24). It stays still for two pulses, moves in
ten 5 mm steps, then vibrates at 12 Hz with 1 mm amplitude for 32 pulses at a
100 Hz pulse rate. The testbench turns each position into an echo phase of
-4*pi*f0*R/c with f0 = 5.755 GHz. The host side reads every profile and keeps
the phase word of bin 24. From the change in that word between pulses it gets
back the displacement, dR = -c/(4*pi*f0) * dphi. Each step must agree with the
true motion within 0.02 mm; the worst error seen is about 0.0014 mm. The
first profile is left out of the comparison, because with no earlier pulse
its DC offset is still in it. To keep the run short the PRI register is set to
40,000 clocks, and the pulse index stands in for the 10 ms pulse time.

## How far to trust it, and where it departs from the original

Verified: every module against an independent model in simulation, at full
size for the counters, ROM, memories, buffers, multiply-add array and whole
top. Not verified: timing closure and resource use on an FPGA. As written, the
448-term complex sum is one combinational stage between two registers. That is
what the original describes ("computed in a single system clock period"), but
a real 30 MHz implementation relies on DSP-slice cascades or an adder tree
with pipeline registers. Adding them changes only the latency constant
(4 + 45) that the testbenches check.

Choices made here where the original is silent or differs:

* Buffer 2 shifts in the direction that gives a true cross-correlation (see
  above). Literal convolution wiring would differ for non-symmetric
  references.
* All 2689 complete-overlap lags are output. The original's pseudo-code loops
  over 2688 while its text sweeps the whole memory.
* `data_valid` comes from the up counter. The original text attributes it to
  "the down counter", but only the up counter is running at that time.
* The magnitude is the exact 43-bit root, placed in a 64-bit word. The
  original says the result is "truncated to 64" bits, without saying which
  bits.
* The mean is sum/N with signed division (rounding toward zero) and a
  saturating subtraction. The original used a vendor averaging block.
* The phase comes from a CORDIC with a 32-bit binary angle. The original used
  a vendor rectangular-to-polar block of unstated format.
* The chirp's amplitude (30000), centring and word format are this design's.
  Its length (448 samples, 3.73 us) and bandwidth (40 MHz) are the original's.
* Synchroniser, reset scheme, busy rule, FIFO depth and handshake, the
  registered RAM read and the pipeline registers are all this design's.

Not part of this RTL: the RF chains, ADCs and DACs, clock generation, the PCIe
DMA link, and the host software (bin selection, displacement, FFT spectra,
waterfall display). Their signals are the top-level ports above.
