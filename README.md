# Time-of-flight time stamping for a white-neutron beam line

A spallation source makes a short burst of neutrons every time a proton
pulse hits the target (25 times a second). A neutron's energy follows from
its time of flight: the time from that burst to the moment a detector sees
it. The accelerator supplies a timing pulse, **T0**, that marks the burst.
The readout is a PXIe crate. One *trigger and clock module* (TCM) receives
T0. Several *field digitizer modules* (FDMs) digitize the detector signals
with 12-bit, 1 GSPS ADCs. All modules run on 125 MHz clocks from one source,
but T0 is asynchronous to those clocks, and the FDM clock phases differ from
the TCM's at every power-up.

This RTL does not send T0 through a single counter. It splits the flight
time into four pieces that can each be measured exactly, and sends them all
to the host with a common pulse number, the **T0 ID**:

```
T0 at TCM ──t1──► TCM clock edge ──t2──► synchronized T0 on DSTARB
          ──t3──► FDM clock edge ──t4──► FDM clock edge that registers the
                                         first ADC word of the signal

TOF = t1 + t2 + t3 + t4 + d
```

| piece | what it is | how it is measured | resolution |
|---|---|---|---|
| t1 | T0 to the next TCM clock edge | carry-chain TDC in the TCM, 127 bins | ~63 ps |
| t2 | TCM capture edge to the synchronized T0 output | fixed: `T2_CYCLES` = 4 clocks | exact |
| t3 | synchronized T0 to the next FDM clock edge | carry-chain TDC in the FDM, 174 bins | ~46 ps |
| t4 | FDM capture edge to the first ADC word of the signal | clock counter, 32 bits | 8 ns, exact |
| d  | cable, backplane and fixed logic delays | calibrated once | — |

The position of the signal inside the first 8 ns word (eight samples) is
found later, offline, with constant-fraction timing on the stored samples.
That step is not part of this RTL.

## The carry-chain TDC (`tdc`)

t1 and t3 are measured by the same circuit. It has four parts, connected as
below:

```
            '1'
 T0 ──buf──►D  Q├──T0_in──►[d0]─►[d1]─► ... ─►[dN-1]    carry chain
          >clk   │          │     │              │
           CLR◄──┼──set     ▼     ▼              ▼
                 │        ┌──────────────────────────┐
 clock ──────────┴───────►│ sampling flip-flops      │──► thermometer
                          └──────────────────────────┘        │
                                      set = sample[0]         ▼
                                                      code = ones count
```

1. **`t0_capture`**: T0 clocks a flip-flop whose D input is tied to 1. Its
   output, T0_in, rises at the T0 edge whatever the clock phase.
2. **`carry_chain`**: T0_in runs along the FPGA carry chain, one bin per
   element.
3. **`tdc_encoder`**: every clock edge samples all taps. At the first edge
   after T0, the taps the step has already passed read 1. The flip-flop on
   the first tap is the **set** signal. Set marks the capture edge and also
   clears `t0_capture`, so the chain is empty one clock later and ready for
   the next T0.
4. The converter counts the ones in the sample taken when set rose. That
   count is the number of bins from T0 to the capture edge.

Timing, with k the capture edge:

* `set` is high for the one clock after edge k.
* `code` and the one-clock strobe `code_valid` appear after edge k+1.

What the code means: code c says that the interval lies in [c·τ, (c+1)·τ),
where τ is the bin width. So (c + ½)·τ estimates it to within half a bin.

**Saturation.** Suppose T0 arrives less than one bin before an edge. At that
edge the step has not yet reached the first tap, so set stays low and the
capture moves to the next edge. The interval is then just over one period,
and the code reads the full chain (127 on the TCM). This is why a chain is
slightly longer than one period: 127 × 63 ps = 8001 ps, and
174 × 46 ps = 8004 ps.

**The chain is a behavioural model.** The delay of a carry element is a
property of the silicon, so `carry_chain` describes the chain as a string of
continuous assignments, each delayed by `TAP_PS`. It simulates correctly,
but synthesis turns it into wires. To build it on an FPGA, replace
`carry_chain.sv` with the vendor's carry primitives (for example a chain of
CARRY4/CARRY8 cells). Keep the same ports. Placement constraints must then
keep the chain and the sampling flip-flops together.

**Real chains have uneven bins.** A bin is wider where the chain crosses
from one logic block to the next. The bins are measured with a code-density
test and corrected offline, bin by bin. The model's bins are all equal. The
ones counter does tolerate bubbles in the thermometer code.

Lint reports `set` (sample bit 0) as flopped both synchronously and
asynchronously. That is the feedback from set to the clear of `t0_capture`,
and it is intended.

## TCM: capture, UTC and fan-out (`tcm`)

* **`tdc`** (127 taps of 63 ps) measures t1 and gives the set pulse.
* **`tcm_recorder`** acts on the rising edge of set. It latches the UTC time
  from the White Rabbit timing interface (a 64-bit input here) and gives the
  pulse the next T0 ID, counting from 0 after reset. When the code arrives,
  it emits one record, `tcm_rec_t {t0_id[31:0], utc[63:0], t1_code[7:0]}`,
  after edge k+2.
* **`t0_sync_fanout`** counts `T2_CYCLES` clocks from edge k. It then drives
  a `PULSE_CYCLES`-wide pulse on every enabled line of the 17-line
  differential star bus (DSTARB), one line per peripheral slot. A new set
  before the pulse ends restarts the sequence.

## FDM: t3, t4 and event packing (`fdm`)

* **`tdc`** (174 taps of 46 ps) measures t3 on the DSTARB line. Its set
  marks the FDM capture edge.
* **`t4_counter`** counts clocks from that edge. Every run of valid ADC
  words gets its own stamp: if the run's first word is registered at edge m,
  then t4 = m − k. A channel can therefore time several signals against the
  same T0. For example, the flash of prompt gammas and a later neutron
  signal each get a stamp, so a gamma-referenced time can be formed as
  TOF′ = TOF₂ − TOF₁. The counter ignores runs that begin before the first
  T0 or are already running when set rises. It saturates at all ones.
* **`fdm_packer`** numbers T0 pulses the same way as the TCM. For each
  stamped run it emits a header word, then the run's sample words, one word
  per clock:

| word | `is_hdr` | `payload[95:0]` |
|---|---|---|
| header | 1 | `{24'b0, t0_id[31:0], t3_code[7:0], t4[31:0]}` (`fdm_hdr_t`) |
| data | 0 | eight 12-bit samples of one 8 ns clock |

The sample words are delayed by two clocks, so the header always comes
first. The first valid word is registered at edge m, the header follows
edge m+1, and the words follow from edge m+2. The stream has no
backpressure: the DMA engine behind it must take one word per clock.

Which ADC words are valid is decided by a trigger outside this RTL
(`adc_valid`).

## Rebuilding the flight time

The host matches the TCM records and FDM headers by T0 ID, then computes:

```
t1 = (t1_code + 0.5) * 63 ps      t3 = (t3_code + 0.5) * 46 ps
t2 = T2_CYCLES * 8 ns             t4 = t4 * 8 ns
TOF = t1 + t2 + t3 + t4 + d
```

In a real system, replace the average bin width by the calibrated bin
table: the calibrated time of code c is the sum of the widths of bins
0..c−1, plus half of bin c. `d` comes from a calibration with a known
signal. UTC in the TCM record places each T0 on absolute time.

## Top level (`backn_tof`)

One TCM drives `N_FDM` FDMs (default 17). FDM i listens on DSTARB line i.
Each FDM has its own clock input. The ports are plain signals and packed
arrays:

| port | dir | width | meaning |
|---|---|---|---|
| `tcm_clk`, `fdm_clk[N_FDM]` | in | 1 each | 125 MHz clocks, same source, any phase |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `t0` | in | 1 | accelerator T0, asynchronous |
| `utc` | in | 64 | UTC time from the timing system |
| `adc_data[N_FDM]`, `adc_valid[N_FDM]` | in | 96, 1 | ADC words and trigger decision |
| `dstarb` | out | N_FDM | synchronized T0, as on the backplane |
| `tcm_rec`, `tcm_rec_valid` | out | `tcm_rec_t`, 1 | TCM records |
| `fdm_out[N_FDM]`, `fdm_out_valid` | out | `fdm_word_t`, 1 | FDM streams |

Parameters and their origin:

| parameter | default | origin |
|---|---|---|
| TCM `TAPS` / `TAP_PS` | 127 / 63 | measured TCM bins |
| FDM `TAPS` / `TAP_PS` | 174 / 46 | measured FDM bins |
| clock | 125 MHz (8000 ps) | system clock |
| `N_DSTAR`, `N_FDM` | 17 | DSTARB lines of the crate |
| `ADC_BITS`, `SAMPLES_PER_CLK` | 12, 8 | 12-bit ADC at 1 GSPS |
| `T2_CYCLES`, `PULSE_CYCLES` | 4, 2 | choice ("a few clock periods") |
| `ID_W`, `T4_W`, `UTC_W`, `CODE_W` | 32, 32, 64, 8 | choice |

Shared types and constants are in `rtl/tof_pkg.sv`.

## Where this RTL makes its own choices

These follow from the system description, but the details are not given
there:

* T0 ID: a count of T0 pulses since reset, kept the same way on the TCM and
  every FDM. They must be reset together.
* Record and header layouts, and all field widths.
* The width of the synchronized T0 pulse, the value of t2, and the
  per-line DSTARB enable.
* The converter counts ones, rather than searching for the 1-to-0 edge.
* The rule for which ADC words form one signal (a run of consecutive valid
  words) and what happens to words before T0.
* Reset style: asynchronous, active low, with one combined asynchronous
  clear on the capture flip-flop.

Not included:

* The ADC, the analog conditioning, the PCIe DMA engine, the White Rabbit
  interface, the host and the trigger that decides `adc_valid`. Their
  signals are ports.
* The offline parts: constant-fraction timing within the first word, and
  bin-by-bin calibration.
* Metastability. It is not modelled. In hardware the sampling flip-flops can
  go metastable. The ones count limits the damage to about one bin.

## Simulating

Every file holds one module or package. Compile a testbench with the
package first, and add `rtl/` and `tb/` as library directories:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/tof_pkg.sv tb/backn_tof_tb.sv --top-module backn_tof_tb -o sim
./obj_dir/sim
```

The simulator starts with random register values. The capture flip-flop's
clear acts on an edge, so the testbenches pulse `rst_n` low twice at start:
the first pulse clears `set`, the second gives the capture flip-flop a
clean clear edge. An FPGA powers this flip-flop up cleared.

Every testbench checks itself and ends with
`TB_RESULT checks=N failures=M`. All files use `timescale 1ps/1ps`, so
delays are in picoseconds.

| testbench | what it checks |
|---|---|
| `t0_capture_tb` | set on the T0 edge, clear and reset, clear wins |
| `carry_chain_tb` | every tap's rise and fall time |
| `tdc_encoder_tb` | set, ones count (with bubbles), single strobe |
| `tdc_tb` | random T0 phases: capture edge, code, saturation |
| `t0_sync_fanout_tb` | DSTARB timing, enables, restart |
| `tcm_recorder_tb` | T0 ID, UTC latched at set, record timing |
| `t4_counter_tb` | t4 = m − k, several signals per T0, early data |
| `fdm_packer_tb` | header then run, order, dropped words |
| `tcm_tb`, `fdm_tb` | each module at its default size against a model |
| `backn_tof_tb` | whole system, 17 channels with random clock phases, 6 T0s: rebuilt TOF within half a bin of each TDC, TOF′ of paired signals, every mechanism exercised (about 6 s) |
| `tof_accuracy_tb` | the same check at a 10 ms interval on all 17 channels (about 3 min) |
| `tdc_code_density_tb` | code-density test of both chains: all bins hit, average width 63 ps / 46 ps (about 2 min) |

`tof_system_check.sv` and `tdc_density_run.sv` are shared helpers for the
last three.

In the end-to-end tests the rebuilt flight time matches the true interval
to within 55 ps (half a TCM bin plus half an FDM bin) for every signal. In
the 10 ms test it reads, for example, 10 000 008.013 ns against a true
10 000 008.061 ns. A bench measurement of a real system also includes clock
jitter, uneven bins and the offline CFD step, and so shows a larger spread
(hundreds of picoseconds RMS). This model cannot reproduce that spread.
