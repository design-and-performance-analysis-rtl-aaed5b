# 5G NR cell-search physical layer (SS block transmitter and receiver)

This repository holds synthesizable SystemVerilog for the two halves of 5G NR cell search in band n78:

* a gNB side that builds synchronisation-signal (SS) blocks and places them in a stream of OFDM symbols;
* a UE side that finds those blocks blindly. It recovers the physical cell identity (PCI), the raster position (GSCN), the SS block index and the symbol/slot/subframe/frame timing.

The numerology is fixed:

| Quantity | Value |
|---|---|
| Subcarrier spacing | 30 kHz |
| FFT size | 4096 |
| Sample rate | 122.88 MS/s |
| Active subcarriers | 3276 |
| Symbols per slot | 14 |
| Cyclic prefix | 352 samples on the first symbol of a slot, 288 otherwise |
| SS bursts | case C symbols {4, 8, 16, 20, 32, 36, 44, 48}, every even frame (20 ms) |

## Top level

`cs_top` puts `cs_tx_phy` and `cs_rx_phy` side by side on one clock. The OFDM modem itself is not part of the RTL, so its streams are top-level ports:

* the transmitter hands out 4096-bin frequency-domain symbols (valid/ready, `last` on bin 4095, slot and symbol numbers) for an IFFT and CP inserter;
* the receiver takes time-domain samples (`rx_*`);
* the receiver hands the four SS symbols, already stripped of their CPs, to an FFT (`fft_in_*`) and takes the bins back (`fft_out_*`).

Configuration comes over AXI4-Lite:

| Address | Register |
|---|---|
| 0x0 | bit 0 enable |
| 0x4 | PCI |
| 0x8 | GSCN, 7711 + raster position |

The results come out as ports: `pss_found`, `gscn`, `pci`, `pci1`, `pci2`, `ssi`, the metrics and the four ticks.

## Transmitter

* `frame_scheduler` is a chain of counters: subcarrier mod 4096, symbol mod 14, slot mod 2, subframe mod 10 and frame mod 1024. It advances once per bin handed out, so back-pressure from the IFFT stops time. From the symbol and frame numbers it derives "SS active", the SS index and the symbol inside the block.
* `pss_gen` is a constant 127-bit m-sequence rotated by 43·N_ID2. `sss_gen` multiplies two rotated m-sequences (m0 = 15·⌊N_ID1/112⌋ + 5·N_ID2, m1 = N_ID1 mod 112). Both are combinational.
* `dmrs_gen` seeds the length-31 Gold generator from c_init = 2^11(i+1)(⌊PCI/4⌋+1) + 2^6(i+1) + PCI mod 4. The 1600-step skip of the first register is a constant, because that register's seed is fixed. The second register advances 32 steps per clock. It produces 144 QPSK symbols 60 clocks after `start`.
* `pbch_gen` fills the PBCH resource elements with LFSR-driven QPSK. There is no MIB coding.
* `ss_block_writer` builds the next SS block in `ss_ram`, which holds 960 words of 16-bit I/Q. The RAM is split into four 240-word symbol regions. A region is rewritten as soon as the mapper has read it, so one RAM serves SS blocks that are only four symbols apart.
* `resource_mapper` streams each symbol in natural FFT bin order. Bins outside the SS block are zero. Raster position r puts the block on active subcarriers 48r..48r+239. The raster step of 48 subcarriers is 1.44 MHz, so one carrier holds 64 positions.

## Receiver

### PSS search (`pss_search`, `ddc`, `pss_corr`)

How a window is searched:

1. The search keeps an 8192-sample window (two OFDM symbols).
2. For each candidate raster position, `ddc` mixes the window down with a 12-bit NCO and a 4096-entry cos/sin table. A D-sample boxcar filter then low-pass filters and decimates by D_PSS = 10.
3. Three `pss_corr` instances each hold the decimated time-domain PSS for one N_ID2 (409 words, computed at elaboration). They correlate it at all 411 lags of the decimated window, one multiply-accumulate per clock.
4. The metric is |corr >> (WL−2+log2 D)|². The best lag and N_ID2 are kept.
5. A peak above `pss_threshold` is accepted unless it sits on the last lag. A peak there may be a PSS that only partly overlaps the window; the next window, moved on by 4096 samples, sees it whole.

If no raster position succeeds, the window slides and the scan restarts. While the correlators run, the input is not stored, so samples are lost between windows. A PSS is seen at the latest in its next period.

The result is the PSS position (window start + 10·lag), N_ID2 and the GSCN.

Fixed-point scaling is set by the reference ROM, which is normalised to 2^(WL−2)/(127·D). With the IDFT scaling used in the testbenches, a clean PSS gives a metric near 2^48. The default threshold is 2^46.

### SS symbol extraction (`ss_symbol_extractor`, `ss_block_extract`)

When the PSS is detected, its symbol has already gone by. The extractor therefore waits one SS period (20 ms). It then takes the four SS symbols, each without its 288-sample CP.

The decimated search places the PSS only to within about ±5 samples. So every window starts ADV = 2 samples before the estimated start of the symbol body. That keeps the window inside the cyclic prefix, which only adds a small linear phase ramp across the subcarriers. Both detectors tolerate this ramp.

`ss_block_extract` keeps the 240 bins of the detected raster position. It passes the 127 SSS resource elements of symbol 2 to the SSS search, and the 144 DMRS elements (subcarrier offset v = PCI mod 4, which only becomes known after the SSS search) to the DMRS search.

### SSS, DMRS and boundary search

* `sss_search` steps through the 336 N_ID1 candidates with `LANES` parallel `sss_gen` plus correlator lanes (default 1). It keeps the largest |corr|².
* `dmrs_search` stores the 144 received DMRS samples. For each SS index 0..7 it runs `dmrs_gen` and a correlator, and keeps the largest |corr|².
* `boundary_search` turns the PSS position and SS index into ticks:
  1. A look-up table gives the PSS symbol number inside the 280-symbol 20 ms period.
  2. A symbol counter starts from that number. A sample counter walks the CP lengths.
  3. The samples that passed while the searches ran are caught up at one symbol per clock.
  4. After that, `symbol_tick` fires on each symbol's first sample. `slot_tick` fires when the symbol count is a multiple of 14, `subframe_tick` on multiples of 28, and `frame_tick` on multiples of 140.

## Departures from the published architecture

* **PCI naming.** The text calls the SSS result both PCI_1 and PCI_2. This design uses PCI = 3·pci1 + pci2, with pci1 from the SSS search and pci2 from the PSS search.
* **SSS correlation length.** The SSS correlation uses the 127 SSS subcarriers, not 240 samples.
* **SS index range.** SS indices are 0..7.
* **SSS generator "+1".** The "+1" printed in the SSS generator figure is not used; the equation is followed.
* **Raster positions.** The published search covers 340 GSCN values. This design covers the 64 raster positions that fit inside one 4096-point carrier (`NUM_GSCN`).
* **CP detector.** The blind CP detector is left out, because its architecture is not given. Every sample goes to the PSS search.
* **Boundary-search counter.** The boundary-search counter is loaded with the slot-edge symbol number, not reset to zero. Its comparisons are taken modulo the slot and subframe lengths, so ticks repeat every slot and subframe rather than once per 280 symbols.
* **Own choices.** These are not specified in the source:
  * the low-pass filter type (boxcar);
  * the window length, sliding step and threshold of the PSS search;
  * the one-period wait before extraction;
  * ADV;
  * the SS RAM region scheme;
  * the register map;
  * the PBCH filler.

## Not implemented in RTL

The following are outside the RTL, and the top brings their data out as ports:

* IFFT, CP insertion and transmit windowing;
* FFT;
* the blind CP detector;
* the RFNoC shell and the GNU Radio host.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds bit-exact reference models: the PSS/SSS/DMRS sequences, the resource-element layout, and an IDFT/DFT with the scaling used by the end-to-end benches.

The end-to-end benches:

1. take the transmitter's bins;
2. apply an IDFT (×4, Q2.14 in, 24-bit out), insert CPs and drop a chosen number of leading samples;
3. feed the result to the receiver at one sample per clock;
4. model the FFT (DFT ×1/64);
5. check PSS, SSS, DMRS and every tick against the transmitter's own frame counters.

Any mechanism that never occurs counts as a failure.

The end-to-end benches are:

* `tb_cs_top`: small raster scan, PCI 517;
* `tb_cs_rx_phy`: PCI 1006, SS index 1;
* `tb_cs_top_full`: the top at default parameters.

To simulate with Verilator 5, run from the repository root:

```
verilator --binary --timing --assert -Wno-fatal rtl/cs_pkg.sv $(ls rtl/*.sv | grep -v cs_pkg) \
    tb/tb_ref_pkg.sv tb/tb_cs_top_full.sv --top-module tb_cs_top_full
./obj_dir/Vtb_cs_top_full
```

The PSS reference ROMs and the NCO tables are computed by constant functions at elaboration. Elaboration therefore takes a few seconds per correlator instance.
