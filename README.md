# Massive-MIMO base-station baseband in SystemVerilog

This is the digital baseband of a time-division-duplex massive-MIMO base station. It serves
M = 100 antennas and K = 12 single-antenna users on a 20 MHz, LTE-like OFDM carrier. The carrier
has a 2048-point FFT, a 144-sample cyclic prefix and 1200 used subcarriers.

The main idea is to split the work along two different axes:

- **Per antenna.** Each radio does its own OFDM (FFT/IFFT, cyclic prefix) and reciprocity
  calibration.
- **Per sub-band.** All MIMO processing is split by frequency. Each of n_co = 4 co-processors owns
  300 neighbouring subcarriers for all 100 antennas and 12 users. On those subcarriers it does:
  - channel estimation;
  - weight computation;
  - uplink detection;
  - downlink precoding;
  - QAM mapping and demapping.

Between the two axes sits a data shuffle. Radios are grouped into subsystems of 8 radios × 2
antennas (16 antenna streams). Each subsystem has one point-to-point link to every co-processor,
and it sends sub-band j of all its 16 antennas over link j. The downlink uses the same links in
the other direction. Because of this split, a co-processor never needs data from another
sub-band. Uplink channel estimates are reused for the downlink (channel reciprocity), so the same
weight matrices serve detection and precoding.

## Structure

```
lumami_bs (top)
├── frame_scheduler             frame timing, symbol-type table, trigger start
├── subsystem × 7               (6 of 8 SDRs, the last of 2 SDRs for M = 100)
│   ├── sdr_chain × 16          per antenna: ofdm_rx, ofdm_tx, recip_comp
│   │     ofdm_rx / ofdm_tx     2 × fft_core each (ping-pong)
│   ├── antenna_combiner        16 antenna streams -> n_co links (sub-band split)
│   └── antenna_splitter        n_co links -> 16 antenna streams
└── coprocessor × 4             one sub-band of 300 subcarriers each
    ├── router_a                round robin over the 7 subsystem links -> M-vector, absent antennas zeroed
    ├── channel_estimator       LS estimate from orthogonal-subcarrier pilots, held over 12 subcarriers
    ├── weight_calc             Gram matrix + Neumann-series inverse (MRC / ZF / RZF)
    ├── mimo_detector           z = X G^H y
    ├── symbol_demapper × K
    ├── symbol_mapper × K
    ├── mimo_precoder           x = conj(G) X^T u
    └── router_b                M-vector -> 7 subsystem links
```

All modules share the types in `lumami_pkg`:

- `cplx_t` is a complex value with 12-bit I and 12-bit Q, 3 bytes per value.
- `beat_t` is one link beat: a value, its subcarrier index and its symbol type.
- There are enums for symbol types, detector modes and modulations.

Streams use valid/ready handshakes throughout. The one exception is the ADC side: the
analog-to-digital converter cannot wait, so overruns there are counted, not stalled.

## Frame and timing

A frame is 10 ms long and holds 140 OFDM symbols of 2192 samples. These are 20 slots of 7
symbols. `frame_scheduler` holds a 140-entry symbol-type table. The table can be rewritten while
the radios are stopped, and the frame repeats without change. The default table is:

- subframe 0 (symbols 0–13): control/synchronisation;
- every other slot: UL pilot, UL data, UL data, guard, DL, DL data, guard;
- the first DL symbol of the two slots of subframe 1 is a DL pilot; everywhere else it is DL data.

The scheduler starts on the rising edge of `trigger`. It then counts the common ADC strobe. Every
sample is tagged with its symbol type and a first-sample flag, and each DL symbol start sends a
request to all co-processors.

The paper's real-time rate is 30.72 MS/s per antenna, which is one sample every 6.5 clocks at
200 MHz. This RTL does not reach that rate at full size, for two reasons:

- `fft_core` does one radix-2 butterfly per clock. That is 11264 clocks per 2048-point transform,
  about 56 µs at 200 MHz, where the paper quotes about 35 µs.
- `antenna_combiner` sends the 16 antennas of one subcarrier over one link at a time. That is
  16 × 1200 clocks per symbol.

With two FFT cores per direction, a UL symbol therefore needs about 30 k clocks. At full size the
ADC strobe should come no more often than every ~14 clocks. If it comes faster, `ofdm_rx` drops
whole UL symbols and counts them, and `rx_overflow` reports it. A wider link path or a
radix-4/pipelined FFT would remove this limit.

## Uplink: pilots, estimates and detection

**Pilots.** In the UL pilot symbol, user k transmits on subcarriers sc with sc mod K = k. A group
of K neighbouring subcarriers therefore carries exactly one pilot per user, and the estimate of
that group is used for all K of its subcarriers (a zeroth-order hold). The pilots are BPSK. Their
sign is the parity of `sc & 0x2A5`, which is this design's choice.

**Estimates.** The estimator stores G[g][k][m] = y[m]·p(sc). This is the pilot amplitude times the
channel. The amplitude cancels in the weights, so no division is needed. When a group's first
pilot arrives, `grp_stale` invalidates its weights. When its last pilot arrives, `grp_done`
queues it for `weight_calc`.

**Weights.** `weight_calc` is the part that needs the most care. For each group it does five
steps:

1. It accumulates A = GᴴG, K lanes wide and 4 antennas per clock. In RZF mode it adds β to the
   diagonal.
2. It computes D⁻¹ with one serial divider, as 2^40 / A_jj, saturated to 31 bits.
3. It forms R = D⁻¹E, where E is A with its diagonal removed, using 24 fraction bits.
4. It iterates X ← D⁻¹ − R·X, starting from X = D⁻¹.
5. After L steps, X = Σ_{n<L} (−D⁻¹E)ⁿ D⁻¹ · 2^40. This is the L-term Neumann approximation of
   A⁻¹.

This works because with many more antennas than users, A is strongly diagonal, so three terms
(`NTERMS`) are already close to A⁻¹. The mode is a run-time input:

- MRC uses one term, a per-user normalised matched filter;
- ZF uses `NTERMS` terms;
- RZF uses `NTERMS` terms of (A + βI)⁻¹.

Each group's X is stored as 32-bit complex values, and a per-group valid bit marks finished
groups.

**Detection.** `mimo_detector` computes q = Gᴴy (4 antennas per clock), then z = X q (one
column per clock). It scales the result so that a symbol with the pilot's amplitude comes out as
256. It waits (`stall_cycles`) while its group's weights are not valid; that back-pressure goes
up the links to the radios. `symbol_demapper` slices each component on odd levels 512 apart.
The constellations are Gray-coded QPSK, 16-QAM and 64-QAM; I carries the upper bits.

## Downlink: precoding and reciprocity

At each DL request, the co-processor produces one symbol for its 300 subcarriers:

- For a DL pilot, u = 256 for every user.
- For DL data, u comes from the K user bit-vectors supplied on `dl_bits`, mapped to QAM.

`mimo_precoder` computes v = Xᵀu / 2^16 and then x = conj(G) v / 2^12. For a reciprocal channel
the users then receive Gᵀx ∝ A X u ≈ u: each user sees only its own symbol.

`router_b` and `antenna_splitter` bring the per-antenna values back to their radios. There
`ofdm_tx` performs the IFFT and adds the cyclic prefix, and `recip_comp` multiplies the sample
stream by the antenna's calibration coefficient (Q1.10). The coefficient corrects the mismatch
between the transmit and receive analog chains; it is computed by the host and written through
`cal_we`/`cal_coef`.

The design uses one flat coefficient per antenna, applied in the time domain after OFDM, as in
the paper's block diagram. The paper's equation instead allows a per-subcarrier coefficient. That
finer form is not built.

## Routers and deployable antennas

- **`router_a`** collects the 7 subsystem links round robin into one M-antenna vector per
  subcarrier. It checks that all links deliver the same subcarrier. Antennas at or above the
  run-time `m_active` are forced to zero, so 4 to 100 antennas can be evaluated without changing
  the hardware.
- **`router_b`** does the reverse. It waits until every link has taken its antennas before it
  accepts the next vector.
- **`antenna_combiner`** sends each subcarrier to the link of its sub-band.
- **`antenna_splitter`** takes each subcarrier from the link that owns it.

## Top-level ports

| Group | Signals |
|---|---|
| Radio samples | `adc_valid`, `adc_data[M]`; `dac_valid/ready/first/type/data[M]` |
| Configuration | `mode`, `modulation`, `beta`, `m_active`, `cal_we[M]`/`cal_coef`, `tbl_we/addr/type`, `trigger` |
| User data | per co-processor `ul_bits_valid`, `ul_bits_sc`, `ul_bits[K]`; `dl_bits_valid/ready`, `dl_bits[K]` |
| Status | `running`, `frame_cnt`, `sym_idx`, `rx_overflow[M]`, `det_stalls`, `pre_stalls`, `dl_req_dropped`, `wc_busy` |

The following parts of the system are not digital logic, or their insides are not given, so they
are outside the RTL:

- RF front ends and ADC/DAC;
- PCIe switches;
- the host PC;
- clock and trigger distribution;
- CSI DRAM;
- the user terminals;
- the antenna array;
- the QR-decomposition detector, an alternative that was compared but not used.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench:

- uses reduced sizes;
- compares against values computed in the testbench itself (DFTs in floating point, exact
  integer matrix products, Neumann sums in floating point, nearest-point QAM search);
- has a watchdog;
- prints `TB_RESULT checks=N failures=F`.

`tb_lumami_bs` runs the whole base station at the following size:

| Parameter | Value |
|---|---|
| Antennas | 8 |
| Users | 2 |
| Co-processors | 2 |
| FFT size | 64 |
| Cyclic prefix | 16 samples |
| Used subcarriers | 48 |
| Neumann terms | 8, so the weight unit is slow enough to stall the detector |
| Frame | the full 140-symbol frame |

It models a flat radio channel and sends real OFDM pilots and QPSK data from both users. For the
uplink it checks every detected bit. For the downlink it passes the DAC output of all antennas
back through the channel and checks every received DL pilot and data symbol at each user. It runs
three frames, with ZF, then MRC on an orthogonal channel, then RZF. It then overloads the ADC. It
fails if any of these never happened:

- a correct UL symbol;
- a correct DL symbol;
- a stall;
- a mode switch;
- an RZF frame;
- an FFT overflow.

The largest configuration simulated is this reduced one. No full-size (M = 100, 2048-point)
simulation was run. A full-size frame would take on the order of millions of clocks for 200 FFT
cores.

The modules `sdr_chain`, `subsystem` and `coprocessor` are checked only through the end-to-end
test.

Running a test with plain verilator:

```
verilator --binary --timing -Irtl rtl/lumami_pkg.sv rtl/*.sv tb/tb_lumami_bs.sv \
          --top-module tb_lumami_bs -j 8
./obj_dir/Vtb_lumami_bs
```

## Known departures and limits

- **Throughput.** It is below real time at full size; see *Frame and timing*.
- **FFT latency.** About 56 µs instead of about 35 µs.
- **Neumann series.** Three terms by default. Accuracy depends on a diagonally dominant Gram
  matrix, as the method assumes.
- **Reciprocity calibration.** One flat coefficient per antenna.
- **Estimates.** No interpolation between the estimated subcarriers; the estimate is held over
  12 subcarriers.
- **Synthesis at full size.** Coarse synthesis of the full-size top in yosys takes longer than
  10 minutes. Per-co-processor storage is large: 25 × 12 × 100 complex estimates, plus 25 × 12 × 12
  32-bit complex weights with whole-matrix read ports. A real implementation would put these in
  block RAM with narrower ports.
- **DL requests.** They are queued 4 deep; `dl_req_dropped` counts overruns.
