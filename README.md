# Fixed-latency TDS-to-Router link receiver

A TDS front-end ASIC of the ATLAS New Small Wheel sTGC trigger sends 30-bit
packets at 160 MHz over a 4.8 Gb/s copper link to the Router FPGA. There, a
Xilinx GTP transceiver deserialises the link into 20-bit words on a recovered
240 MHz clock, RX UsrClk. Each time the transceiver locks, its word boundary
(and so the phase of RX UsrClk) lands at one of 20 positions in the bit stream.
The packet boundary can then sit at any of 30 bit positions in the received
words. A plain receiver would therefore deliver packets with a latency that
changes after every power cycle or reset. The trigger needs the same latency
every time.

This RTL implements the receiver described in "FPGA Implementation of a Fixed
Latency Scheme in a Signal Packet Router for the Upgrade of ATLAS Forward Muon
Trigger Electronics" (Wang et al.). It needs no transceiver alignment feature
and no clock manager. Only general FPGA resources are used:

* three IDELAYE2 input delays shift the phase of the local 160 MHz clock;
* a CARRY4 carry chain serves as a time-to-digital sampler that tells when the
  shifted clock's rising edge meets a rising edge of RX UsrClk.

The receiver first lines up the shifted clock, Clk160_c, with RX UsrClk. It then
delays Clk160_c further by exactly the time by which the packet header sits
late in the received window. The packets therefore leave a fixed time after
they arrive, whatever boundary the transceiver locked to.

## Packet format

| bits  | content |
|-------|---------|
| 29:26 | header, sent unscrambled: `1010` signal packet, `1100` NULL packet |
| 25:0  | payload, scrambled with the self-synchronising 1 + x^39 + x^58 scrambler (IEEE 802.3 clause 49) |

Assumed wire order: the header goes first, bit 29 first, and the transceiver
puts the earliest bit of each word in bit 0.

## Block structure (`tds_router_rx`)

```
 rx_data[19:0] ─► rx_word_buffer ─► window[99:0] ─► sync_packet_builder ─► pair[59:0], pair_tag ─► packet_mux ─► descrambler ─► frame
 rx_usrclk ───┬──────────────────────────────────────────▲ sample      │ head_pos, locked             ▲ Clk160_c        ▲ Clk160_c
              │                                          │             ▼
              ├─► carry_chain_tdc (11 x carry4_model) ─► D[21:0] ─► edge_detect_ctrl ─┬─ Edge Aligned, hold, rst ─► idelay_ctrl_logic
              │                 ▲ Clk160_c                                             │                             │ En, load, ctrl_r0, ACK
 clk160 ─► idelaye2_model #0 ─► #1 ─► #2 ─► Clk160_c ◄──────── ctrl_r[14:0] ◄─ idelay_reg_calc ◄── head_pos ────────┘
```

### Step 1: rising-edge alignment

* RX UsrClk runs down 11 CARRY4 cells of about 70 ps each. The first and last
  carry outputs of every cell give 22 taps at about 36 ps spacing, covering
  about 800 ps. These taps are registered on Clk160_c as D[0]..D[21]. D[0] is
  nearest the chain input, so it shows the newest state of RX UsrClk.
* `idelay_ctrl_logic` adds one 78 ps tap to Clk160_c every 16 cycles. It fills
  IDELAYE2 #0 first and then #1, which is 62 taps or 4.8 ns: more than one RX
  UsrClk period (4.17 ns).
* `edge_detect_ctrl` looks at D in the last cycle of each 16-cycle period. It
  first waits for D to be all zero, which means Clk160_c samples while RX
  UsrClk is low. The first non-zero D after that means an RX UsrClk rising
  edge has just entered the chain, a few tens of ps before the Clk160_c edge.
  The detector then raises Edge Aligned and hold, and the stepping stops. The
  step count is kept as `ctrl_r0 = {taps #1, taps #0}`.

### Sample strobe

Once aligned, a rising edge of RX UsrClk meets one of Clk160_c every three RX
UsrClk cycles (12.5 ns). That is two 160 MHz cycles, or 60 bits. While hold is
high, `edge_detect_ctrl` finds those coinciding edges:

* It samples Clk160_c divided by two on RX UsrClk. Two equal successive samples
  happen only at a coinciding edge.
* These hits set the phase of a modulo-3 counter. After four consistent hits
  the counter runs free and hold drops.
* `sample` is then high in the cycle before each coinciding edge. The 100-bit
  window (four stored words plus the live word) is therefore registered
  exactly at the alignment points.

### Header synchronisation and packet building

* On each load, `sync_packet_builder` tests every position p = 0..29: a valid
  header must start at window bit p and at bit p+30.
* The lowest passing position becomes the candidate. It is confirmed after 8
  consecutive loads without error.
* Once locked, 4 consecutive bad loads drop the lock and the search starts
  again. This is the link-failure case.
* The builder outputs the two packets that start at `head_pos`, the earlier one
  in `pair[59:30]`.

### Step 2: phase compensation

`idelay_reg_calc` computes the extra delay for the header position:

* `tap_header = round(head_pos × 208.33 ps / 78 ps)`, which ranges from 0 to 77.
* It adds the step-1 taps. If the sum is longer than one 6.25 ns period, it
  subtracts 80 taps.
* It spreads the total over the three delays, #0 first, giving
  `ctrl_r = {#2, #1, #0}`.

The control logic loads these values into the three IDELAYE2s with one `load`
pulse and raises done. Clk160_c now trails the window-load edge by about
`head_pos × UI`. The pair was loaded `(100 − head_pos) × UI` after the first
bit of its first packet arrived. The sum of the two is therefore the same for
every header position.

### Crossing into Clk160_c

* The pair stays stable for 12.5 ns after each load. After compensation,
  exactly two Clk160_c edges fall inside that window.
* `packet_mux` registers `pair_tag`, which the builder toggles on every load.
  On the first edge after a load the tag differs from its registered copy, so
  SEL = 0 and the first packet goes through. On the second edge SEL = 1 and the
  second packet goes through.
* `descrambler` registers the result, taking one 160 MHz cycle. It flags
  signal packets with `frame_is_signal` for the later NULL suppression.

## Timing and measured behaviour (simulation)

`tb_tds_router_rx` runs the receiver at its default parameters against
behavioural models of the TDS, the cable and the GTP. It makes 46 resets and
reaches all 30 header positions. The transceiver word phase (0..19) and the
Clk160 phase vary at random across the resets.

* Time from a packet's first bit at the receiver input to the Clk160_c edge
  that registers the descrambled frame: 30.65 to 30.77 ns in every run, a
  spread of 112 ps. The paper reports under 300 ps measured on hardware.
* In this model the whole 20-bit word reaches the fabric 21 UI + 1.5 ns after
  its last bit.
* With the step-2 compensation switched off, the same test spreads by 6.0 ns.
* Lock takes 100 to 920 Clk160 cycles after reset, most of it the step-1
  search (16 cycles per tap).
* A shift of the packet boundary without a reset is also tested. The receiver
  loses the header, locks again, reloads the delays and keeps the same latency.

## Where this RTL departs from, or adds to, the paper

* **Primitives.** IDELAYE2 and CARRY4 are behavioural models with the
  primitives' ports (`idelaye2_model`, `carry4_model`), timed at 78 ps per tap
  and 18 ps per carry cell. Real carry cells are uneven and vary from chip to
  chip; the paper blames its board-to-board spread on that, and the models do
  not reproduce it. For a Xilinx build, replace the two models with the vendor
  primitives.
* **GTP transceiver.** It is not included; `rx_usrclk` and `rx_data` are ports.
* **Sample generation, SEL generation, the `rst` handshake and the fill order of
  the delays.** The paper only names these functions; the circuits above are
  this design's own.
* **Counts the paper does not give.** The confirm count (8), the loss count (4)
  and the Sample configuration count (4) are this design's own choices.
* **Reset.** All registers use an asynchronous active-high reset, `rst`.
* **Not included.** The Router's later packet switching and the CRC check of
  the test set-up are not part of this receiver.
* **Timing closure.** The design relies on the clock relationships described
  above: `pair_tag` and `pair` are read across clock domains on purpose. A real
  build needs matching timing constraints, and the RX-UsrClk-to-Clk160_c
  sampling of the divided clock is a single flop.

## Files

`rtl/`

| file | content |
|------|---------|
| `router_pkg.sv` | widths, header codes, `tds_packet_t` |
| `tds_router_rx.sv` | top: one link |
| `idelaye2_model.sv`, `carry4_model.sv` | behavioural primitive models |
| `carry_chain_tdc.sv` | 11-CARRY4 chain and the 22 D registers |
| `edge_detect_ctrl.sv`, `idelay_ctrl_logic.sv`, `idelay_reg_calc.sv` | alignment and compensation control |
| `rx_word_buffer.sv`, `sync_packet_builder.sv`, `packet_mux.sv`, `descrambler.sv` | data path |

`tb/` has one self-checking testbench per module (`tb_<module>.sv`). Each one
prints `TB_RESULT checks=N failures=M`.

## Simulating

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/router_pkg.sv tb/tb_tds_router_rx.sv \
  --top-module tb_tds_router_rx -o sim && ./obj_dir/sim
```

The end-to-end run takes about 3 s. Change the top-module name to run any other
testbench.

Parameters and their defaults:

| parameter | default | module | meaning |
|-----------|---------|--------|---------|
| `TAP_PS` | 78 | IDELAYE2 model | ps per tap |
| `CELL_PS` | 18 | CARRY4 model, `carry_chain_tdc` | ps per carry cell |
| `N_CARRY4` | 11 | `carry_chain_tdc` | number of CARRY4 cells |
| `CHECK_PERIOD` | 16 | `edge_detect_ctrl`, `idelay_ctrl_logic` | cycles per tap step |
| `SYNC_CHECKS` | 8 | `sync_packet_builder` | loads needed to confirm a header position |
| `LOSS_CHECKS` | 4 | `sync_packet_builder` | bad loads that drop the lock |
| `UI_PS_NUM`, `UI_PS_DEN` | 625, 3 | `idelay_reg_calc` | unit interval 625/3 ps |
| `WRAP_TAPS` | 80 | `idelay_reg_calc` | taps subtracted when the total exceeds 6.25 ns |

For another line rate, change the UI and the wrap constants in
`idelay_reg_calc`.
