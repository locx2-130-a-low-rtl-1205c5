# LOCx2-130 transmitter: SystemVerilog model

LOCx2-130 is a two-channel, radiation-tolerant transmitter for calorimeter front-end readout. Each channel takes eight ADC channels sampled at 40 MHz and packs one sample of each into a 120-bit frame every 25 ns. It then sends the frame serially at 4.8 Gbps. A frame is built from 30-bit words at 160 MHz and serialised 30:1. The whole path, from the ADC bit to the serial bit, takes about 40 ns.

This RTL covers the digital encoding unit in full: ADC interface, FIFO, scrambler, CRC, trailer, frame builder and TMR voting. The I2C configuration target is RTL too. The analog parts are behavioural models: the PLL, the 30:1 serializer and the SCK delay cells. The differential input receivers and the output line drivers are not modelled. At the top level, their logic-level signals are plain ports.

## Frame format

Bits are numbered in the order they are sent. Bit b0 is sent first, and it is bit 0 of the first 30-bit word.

| bits | data mode (CRC) | calibration mode |
|---|---|---|
| b0-b95 | 12 rows x 8 channels, scrambled | 14 rows x 8 channels, scrambled |
| b96-b111 | CRC-16, MSB first | (rows 12, 13 of the payload) |
| b112-b115 | 1 0 1 0 | 1 0 1 0 |
| b116-b117 | 2 bits of PRBS 2^5-1 | same |
| b118-b119 | 2 bits of PRBS 2^7-1 | same |

The payload is ordered by bit significance, not by channel. Bits b0-b7 hold the most significant kept bit of channels 0-7. Bits b8-b15 hold the next bit, and so on. Channels 0-3 come from ADC A and channels 4-7 from ADC B.

Data mode keeps 12 bits per sample and adds a CRC. It is used with Nevis ADCs when their two calibration bits are dropped, and with the ADS5272. Calibration mode keeps 14 bits and has no CRC. It is used with Nevis ADCs when the calibration bits are kept, and with the ADS5294.

- **Scrambler:** x^58 + x^39 + 1, in the self-synchronising form: s[n] = d[n] ^ s[n-39] ^ s[n-58]. It runs over payload bits only and continues from frame to frame. The receiver descrambles without any alignment.
- **CRC:** 0x5B93 (x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1). It is computed over the 96 unscrambled payload bits, starts from 0 and has no final inversion.
- **Trailer:** `1010` marks the frame boundary. Both PRBS generators step two bits per frame and restart from all-ones on a BCID reset. Four consecutive frames give 8 bits of each sequence, which is enough to recover the bunch-crossing number. The periods are 31 and 127 frames, which combine to 3937.

## ADC interface (`uniadc`, `sck_delay`)

Three ADC types are supported. A Nevis ADC sends 16 bits per sample on each of its 4 lanes, DDR on a 320 MHz SCK. The first bit is D15, and D15-D14 are dummy bits. A single ADS5272 sends 12 bits on 8 lanes with a 240 MHz SCK. A single ADS5294 sends 14 bits on 8 lanes with a 280 MHz SCK.

In every case, FCK rises with the first bit of a sample. `uniadc` makes all three cases look the same to the FIFO in two ways:

- With a single COTS ADC, it copies the A-side SCK and FCK to the B side. Lanes 4-7 of that ADC arrive on the B data pins.
- It delays FCK so that it rises with the first bit to be kept: by 2 SCK periods for Nevis in data mode (onto D11), by 1 period for Nevis in calibration mode (onto D13), and not at all for the ADS parts.

`sck_delay` shifts each SCK by `tap` x 50 ps so that the sampling edges fall in the middle of the data bits.

## FIFO: crossing from the ADC clocks to 160 MHz

This is the least obvious part of the design. There are no pointers or flags. Each ADC has a memory of 14 x 4 flip-flops. Cell k holds bit k, counted from the aligned FCK, of all four lanes.

**Write side.** `fifo_wr_ctrl` captures each lane on both SCK edges: rising edges into `data_even`, falling edges into `data_odd`. The write enables then walk through the cells:
- `we[2i]` covers the SCK period after the rising edge that caught bit 2i.
- `we[2i+1]` covers the period half a cycle later.
- Bits past 12 (data mode) or 14 (calibration mode) are never enabled, which is how the dummy bits are dropped.

**Read side.**
1. The two aligned FCKs are ORed.
2. The OR is registered on ADC A's SCK, which delays it by one SCK period.
3. It is synchronised into the 160 MHz domain by two flip-flops.
4. On its rising edge, the read address restarts at word 0.

The read address otherwise counts 0..3 without stopping, because one frame is exactly four 160 MHz cycles. Read word w is simply frame bits 30w..30w+29, taken straight from the cells.

**Why this works.** Each cell holds its value for exactly one frame period, but each cell's window starts at a different time. For all three ADC types, the intersection of the windows of the cells a word uses is more than 12 ns wide. This stays true with up to one SCK period of skew between ADC A and ADC B. The read start lands in that intersection with `READ_DELAY = 0` and any phase between the ADC clocks and the 160 MHz clock. The end-to-end test covers ADC B both ahead of and behind ADC A by up to 3 ns, and the FIFO test goes to the full 3.125 ns in both directions.

If the clock relationships change, `READ_DELAY` (in `fifo_rd_ctrl`, `fifo` and `locic130`) moves every read by whole 160 MHz cycles.

## Core encoder and radiation hardening

The encoding unit is triplicated.
- There are three ADC-interface copies and three FIFO copies.
- Each FIFO copy feeds its own CRC generator, trailer generator and frame builder. These copies have no voters. The CRC restarts every frame and the builder holds no state, so an upset there is gone by the next frame. An upset in a trailer PRBS register stays in that copy until the next BCID reset; the output vote masks it as long as the other two copies are intact.
- The scrambler has feedback and no reset. It holds three copies of its 58-bit history, and every history flip-flop loads the 2-of-3 vote of the three next values.
- A final 2-of-3 voter and latch (`majority_voter`) merges the three frame-builder outputs into the 30-bit word sent to the serializer. The latch is intentional; synthesis reports it as 30 latch bits (32 with the voted word index).

The scrambler needs only the 58-bit history to produce a whole word, because its nearest tap is 39 bits back, more than a word. The CRC result for word 3 is combinational and already includes word 3's six payload bits, so neither block adds latency. The builder adds one register. The voter's output latch is open while the clock is low, so it adds half a cycle: a word the builders take at one rising edge is registered by the serializer at the next. That is one 160 MHz cycle (6.25 ns) from FIFO word to serializer input register.

## Serializer and PLL (behavioural models)

The PLL model gives four 160 MHz periods and forty 1.6 GHz periods per 40 MHz reference edge. The 1.6 GHz clock comes as three phases `q0`, `q1`, `q2`. Each phase is high for one third of the period, and exactly one is high at any time.

`serializer30` works as follows:
- It registers the 30-bit word at 160 MHz.
- It loads every third bit into each of three 10-bit shift registers: SR0 gets bits 0, 3, ...; SR1 gets bits 1, 4, ...; SR2 gets bits 2, 5, ....
- Each shift register is clocked by its own phase.
- The output passes SR0 while `q1` is high, SR1 while `q2` is high and SR2 while `q0` is high. This gives 4.8 Gbps with b0 first.

The top is therefore a simulation model. For synthesis, use `locic130` and `i2c_slave`.

## Configuration (`i2c_slave`)

The I2C device address is 0x50. Writes set a register pointer followed by data bytes; reads use a repeated start. The pointer increments after every byte.

| reg | bits | meaning |
|---|---|---|
| 0 | [1:0] | channel 0 ADC type/mode: 0 Nevis data, 1 Nevis calibration, 2 ADS5272, 3 ADS5294 |
| 1 | [1:0] | channel 1, same encoding |
| 2 | [3:0] / [7:4] | SCK delay taps, ADC A / ADC B |
| 3 | [3:0] / [7:4] | SCK delay taps, ADC C / ADC D |

All registers reset to 0.

## Latency and rate

In simulation, the time from an ADC's raw FCK edge to the first serial bit of its frame is constant for a given setup:
- 37.8 ns for Nevis ADCs. This includes the 6.25 ns the dropped leading bits take to arrive.
- 31.6 ns for the ADS parts.

The chip's published figure is 34.4-40.7 ns, depending on clock phase. The Nevis figure falls inside that range. The model's FIFO read start and serializer load timing are its own, so its split between the stages need not match the chip's. Frames leave back to back, 120 bits per 25 ns.

## Where this model departs from or adds to the published design

These points are this design's own choices:
- the CRC start value and bit order
- the PRBS polynomials, seed and the exact reset timing
- how the FCK delay is built
- the read-start synchroniser and `READ_DELAY`
- the clock phase of the output latch after the voter
- the whole I2C register map
- the delay-cell step
- the serializer load phase
- the power-on reset `rst_n`

Where the published text and figures disagree, these were followed:
- The ADS5294 FCK is taken as aligned with D13, not D14.
- The CRC is 16 bits wide, although one diagram labels its bus with 8.
- In the trailer, the PRBS 2^5-1 bits come before the PRBS 2^7-1 bits, as in the frame drawing.

## Files and simulation

`rtl/` holds one module or package per file. `locx_pkg.sv` holds the shared constants and the `adc_cfg_e` type, and `locx2_130.sv` is the top. The file header of each module states its interface and timing.

`tb/` holds one self-checking testbench per module, `tb_<module>`, plus two helpers:
- `tb_locx2_130`: the end-to-end test at default sizes. It runs all four ADC configurations on both channels, ADC skew, BCID reset, CRC checking, I2C write and read-back, and latency/rate checks, with bit flips injected into single copies of the triplicated logic. It counts each of these mechanisms and fails if one never happened.
- `tb_locic130`: one channel from ADC pins to voted words, with bit flips injected into one FIFO copy per frame.
- `tb_core_encoder`: the triplicated encoder with one corrupted input copy per frame; payload, CRC, trailer, BCID restart and latency.
- `tb_fifo`: ADC models, uniADC and FIFO in all configurations, with ADC skew and different read-clock phases.
- `tb_fifo_wr_ctrl`, `tb_fifo_mem`, `tb_fifo_rd_ctrl`, `tb_uniadc`, `tb_sck_delay`: the FIFO parts and the ADC interface.
- `tb_scrambler_tmr`, `tb_crc16_gen`, `tb_frame_trailer`, `tb_frame_builder`, `tb_majority_voter`: the encoder parts, against bit-serial reference models.
- `tb_serializer30`, `tb_pll`, `tb_i2c_slave`: the serializer and PLL models and the configuration target.
- `tb_adc`: the ADC model.
- `tb_ref_pkg`: bit-serial reference models (CRC, scrambler, PRBS, ADC sample pattern).

Every testbench prints `TB_RESULT checks=N failures=M` at the end and stops itself with a watchdog if it hangs. To run one:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/locx_pkg.sv tb/tb_ref_pkg.sv tb/tb_locx2_130.sv --top-module tb_locx2_130
./obj_dir/Vtb_locx2_130        # prints TB_RESULT checks=N failures=0 (about 5 s)
```

Replace `tb_locx2_130` by any other testbench name to run that one.

Run `tb_locx2_130` with `+dbg` to print per-frame payload mismatch counts.
