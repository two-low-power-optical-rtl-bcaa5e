# LOCx2-130 / LOCld-130 front-end optical transmitter: SystemVerilog model

This repository holds the digital part of two radiation-tolerant transmitter
chips for the ATLAS Liquid Argon calorimeter front end:

* **LOCx2-130**: a two-channel serializer. Each channel takes the serial
  outputs of two 4-channel ADCs (8 channels), packs one sample per channel
  into a 120-bit LOCic-130 frame every 25 ns, and sends the frame at
  4.8 Gb/s.
* **LOCld-130**: a two-channel VCSEL driver. Its only logic is a triplicated
  I2C slave, clocked by a ring oscillator that runs only while the bus is
  busy. The slave holds the modulation- and bias-current DAC codes.

The analog parts are not modelled: the PLL, the line drivers, the limiting
amplifiers and the VCSEL drivers. Their clocks and settings are ports of
the top module `loc_tx_system`.

## Frame format (120 bits per 25 ns)

| bits      | data mode                   | calibration mode              |
|-----------|-----------------------------|-------------------------------|
| b0..b3    | `1010`                      | `1010`                        |
| b4..b5    | 2 bits of PRBS 2^5-1        | same                          |
| b6..b7    | 2 bits of PRBS 2^7-1        | same                          |
| b8..b103  | 96-bit payload, scrambled   | 112-bit payload, scrambled    |
| b104..b119| CRC-16 of the payload       | (b8..b119 are payload)        |

* **Payload order.** Payload bit `j` is bit `j % 8` of ADC word `j / 8`.
  Word bit `c` is ADC channel `c`. Words come out of the ADC interface MSB
  first: data mode carries 12 words (12-bit samples) and calibration mode
  carries 14.
* **CRC.** The polynomial is x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1
  (0x5B93). It is computed over the unscrambled payload in transmission
  order, starts from 0 in each frame, and is sent MSB first (crc[15] in
  b104).
* **Scrambler.** The payload passes through a self-synchronising
  x^58+x^39+1 scrambler, `out = in ^ out[-39] ^ out[-58]`. The header and
  the CRC are not scrambled. The scrambler has no reset: a receiver locks
  after 58 bits.
* **BCID field.** This is the 4-bit field b4..b7. PRBS5 (x^5+x^3+1) and
  PRBS7 (x^7+x^6+1) both start from all ones and each advances two bits per
  frame, so the pair repeats every lcm(31,127) = 3937 frames. That is more
  than the 3564 bunch crossings of an LHC orbit. A BCID reset makes the next
  frame carry the seed bits, which is BCID 0. A receiver then identifies the
  bunch crossing from the field history.
* **Bit order.** Bit `b0` is sent first. The 30-bit word `k` holds bits
  `b(30k)`..`b(30k+29)`, with word bit 0 sent first.

## Encoder pipeline (`locic130_encoder`)

```
ADC SCK/FCK/D[7:0] -> locic_adc_if -> locic_fifo -> locic_crc16 ----\
                                         |                        locic_frame_builder -> tmr_voter -> 30-bit word
                                         +---> locic_scrambler_tmr -/       ^
                                     locic_frame_header (PRBS BCID) --------/
```

* **ADC interface** (`locic_adc_if`, SCK domain). It samples the 8 data
  lines on each rising SCK edge (single data rate, so the bit rate equals
  SCK). A rising edge of the frame clock marks the MSB. It writes one 8-bit
  word per sample bit and tags the first word of a frame as frame start.
  Data mode writes 12 words and calibration mode writes 14. Longer ADC
  frames, such as 16 bits at 640 MHz, lose their extra bits.
* **FIFO** (`locic_fifo`, 64 words).
  * Structure: the FIFO is dual-clock. Pointers are Gray-coded with 2-flop
    synchronisers. On the read side it works on the 160 MHz word clock,
    which has four phases per frame.
  * Starting a frame: at phase 0 a frame starts if at least 4 words are
    present and the word at the read pointer is a frame start. The rest of
    the frame arrives while earlier words are being sent, because the ADC
    word rate is at least 480 MHz. This keeps the latency low.
  * Otherwise the frame is sent with an empty payload and `underflow` is
    flagged. A misaligned pointer jumps to the next frame start, for
    example after a mode change. A reader a whole frame behind drops one
    frame.
  * Release: the read pointer is released by 12 or 14 words at the end of
    the frame.
* **CRC, header, frame builder.** The payload is taken 30 bits per 160 MHz
  cycle, following the per-phase payload mask of the frame format.
* **Triple modular redundancy.** The following are triplicated, with a final
  registered 2-of-3 voter:
  * the ADC interface, FIFO, CRC, header and frame builder;
  * the frame-phase counter, whose copies load the voted next state.

  The scrambler cannot be periodically reset, so it is triplicated
  internally: every flip-flop loads the vote of the three next states.
  `seu_seen` reports any disagreement at the voter.

## Serializer (`tds_serializer`)

The serializer samples the word clock with the bit clock, loads the 30-bit
word on its rising edge, and shifts out LSB first. The real chip uses a
full-custom 2.4 GHz DDR circuit. This model is a single-edge shift register
on a 4.8 GHz bit clock.

## Configuration (I2C)

`i2c_slave_core` is a generic slave.
* SCL and SDA are oversampled through synchronisers.
* The 7-bit address is `ADDR_BASE` with its low bits from the address pins.
* A write sends a pointer byte, then data bytes with auto-increment. A read
  starts at the pointer.

| chip      | address    | registers |
|-----------|------------|-----------|
| LOCx2-130 | 0x50 + pins | reg0 bit c: channel c calibration mode; reg1: PLL settings; reg2/reg3: line-driver settings of channel 0/1 |
| LOCld-130 | 0x60 + pins | reg0/1: ch0 modulation/bias code; reg2/3: ch1 modulation/bias code |

LOCld-130 specifics:
* The LOCld-130 slave is three cores with voted outputs.
* Its clock (`locld_clkgen`) is a behavioural model of the ring oscillator.
  It runs at 20 MHz, is started by an asynchronous START-condition latch,
  and stops when the cores are idle. Because it is behavioural, `locld_130`
  and the top simulate but do not synthesize as a whole.
* The power-up defaults are 8 mA modulation and 3 mA bias. Under the assumed
  DAC scales these are code 47 (2 mA + code x 8/63 mA) and code 15 (0.2 mA
  per step).
* When the cores restart after their clock has stopped, the SCL/SDA
  synchronisers are loaded with the START levels. Without this, their stale
  contents would create a false clock edge.

## Clocks and timing

The top takes a bit clock (4.8 GHz), a word clock (160 MHz, bit/30) and a
reference clock (40 MHz, bit/120) as the PLL would supply them. The BCID
reset arrives on the reference clock and is synchronised into the word
clock. Each ADC brings its own SCK and FCK.

In simulation the bit clock period is rounded to 208 ps, so a frame lasts
24.96 ns. The latency from the ADC frame-clock edge to the first serial bit
of that frame is 37.6 to 42.6 ns, depending on the ADC phase, and stays
constant while running. The encoder alone takes 42.05 ns in its own test.
The paper's requirement is below 75 ns, and it measured 34.4 to 40.7 ns.

## Where this model departs from the paper or fills gaps

The paper does not give the following, and this design chooses them:
* FIFO depth and read policy;
* the CRC initial value and bit order;
* the PRBS polynomials and seeds;
* the word-to-bit order;
* the I2C register map and addresses;
* the DAC code scales;
* the oscillator frequency;
* the exact ADC serial formats.

Where Section 3 calls the BCID field "4 bits" and Fig. 6 shows two PRBS
pairs, both are followed: the 4-bit field is the two pairs. The serializer
and all analog blocks are simplified as described above.

## Files

* `rtl/`: one module or package per file.
  * `locx2_pkg` holds the frame constants and helper functions.
  * `locx2_130` and `locld_130` are the chips. `loc_tx_system` is the top.
* `tb/`: one self-checking testbench per module, and shared helpers:
  * `locic_ref_pkg`: a bit-level reference model and frame decoder;
  * `adc_emu`: an ADC emulator;
  * `locic_serial_rx`: a serial receiver that counts matched frames and
    CRC, header, BCID and latency errors;
  * an I2C master.

  Every testbench prints `TB_RESULT checks=N failures=M`.
* `tb_loc_tx_system` runs the whole design with default parameters. It
  configures both chips over I2C and streams about 6000 frames per channel,
  with BCID resets, start-up underflow and a mode switch to
  calibration/16-bit ADC frames.

Simulating one testbench with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
  rtl/locx2_pkg.sv tb/locic_ref_pkg.sv tb/tb_loc_tx_system.sv --top-module tb_loc_tx_system
./obj_dir/Vtb_loc_tx_system
```
