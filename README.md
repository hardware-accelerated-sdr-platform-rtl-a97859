# A re-composable SDR data plane for an FPGA SoC

The idea behind this design is that a radio's physical layer need not be one
fixed pipeline. Instead it is a set of **processing units (PUs)**: coder,
mapper, OFDM modem, pulse-shaping filter, RF interface. Each unit is
parametrised through control registers, and the units are joined by
streaming links. Some of the links are fixed wires. Others pass through a
**packet switch**, so software can re-route which unit feeds which. An
air interface changes in three ways:

* **In place.** A register write changes the code rate, the modulation, the
  FFT length, the cyclic prefix or the filter taps. The next packet uses the
  new setting.
* **By re-composition.** Changing a route register sends the packets of one
  chain to another unit. A single OFDM engine can then serve the transmit
  chain for one packet and a receive chain for the next.
* **By replacing a unit.** Partial reconfiguration swaps the logic itself.
  That is an FPGA tool flow and is not modelled here.

The processor side of the SoC (an ARM processing system running the MAC and
the packet-forwarding software) sees the data plane as two things:

* a register bank on an AXI4-Lite slave;
* a DMA engine that fetches packets from, and stores packets to, processor
  memory over an AXI4 master port.

The DMA engine signals completion with two interrupts.

Everything here is synthesizable SystemVerilog, with one exception: the
analog RF board and the processor are outside the chip boundary. Their
signals are ports of the top module `sdr_top`.

## Data flow at a glance

```
        AXI4 (HP)                                        AXI4-Lite (GP)
           |                                                  |
      +----+-----+                                      +-----+-----+
      | axis_dma |--MM2S--> pu_coder -> pu_mapper --+   | axil_regs |--> every cfg_* input
      +----+-----+                                  |   +-----------+
           ^ S2MM                                   v
           |                            +-- chdr_noc_shell (port 0, host) --+
           +----------------------------+                                   |
                                                       rfnoc_xbar (4 x 4 packet switch)
      chdr_noc_shell (port 1) <-> pu_ofdm              |        |
      chdr_noc_shell (port 2) <-> pu_pulse_shaping -> rf_interface -> DAC
                                 rf_interface <- ADC   |
      port 3 = ext_in / ext_out (to another chip)  ----+
```

In the default routing (the reset values of the registers) the transmit
chain runs like this:

1. The DMA engine reads the packet bytes from memory.
2. The coder turns them into a bit stream, one coded bit per beat.
3. The mapper turns the bits into I/Q symbols.
4. The host wrapper cuts the symbols into CHDR packets.
5. The switch delivers the packets to the OFDM unit's wrapper, which feeds
   the IFFT and adds the cyclic prefix.
6. The OFDM wrapper re-packs the result and addresses it to the RF port.
7. The RF wrapper strips the headers. The samples pass through the FIR filter
   and a clock-domain-crossing FIFO to the DAC.

In the other direction, ADC samples are cut into packets by the RF interface.
They go to whichever port `ROUTE_RX` names: the OFDM unit for a receive FFT,
or the host, whose wrapper hands them to the DMA's S2MM side.

The chain order coder → mapper → OFDM → pulse shaping → RF follows the block
diagram of the original platform. So do the names of the units and the
AXI HP / AXI-Lite split. The rest is this design's own choice, and the
sections below say where:

* the code and the constellations;
* the FFT architecture;
* the header layout;
* the switch size;
* the register map.

## The switch and its packets (hardest part)

### Packet format

Every packet on the switch carries a 64-bit CHDR-style header. The layout is
the public RFNoC "compressed header" layout:

| bits  | field     | use here                                     |
|-------|-----------|----------------------------------------------|
| 63:62 | pkt_type  | 0 (data)                                     |
| 61    | has_time  | 0                                            |
| 60    | eob       | end of burst: the PU's own TLAST             |
| 59:48 | seqnum    | increments per packet, per wrapper           |
| 47:32 | length    | bytes, including the 8 header bytes          |
| 31:16 | src_sid   | SID of the sending wrapper                   |
| 15:0  | dst_sid   | destination; the switch routes on it         |

The datapath is 32 bits wide. A header therefore takes two beats, low word
first, so the destination SID sits in bits [15:0] of the first beat. That
makes routing a decision on the very first beat, with no buffering in the
switch.

### `rfnoc_xbar`: the switch

`rfnoc_xbar` is an N × N packet crossbar (N = 4).

* **Routing.** For every output that is free, a round-robin arbiter looks at
  the inputs offering a first beat whose `dst_sid mod N` selects that output.
  The winner is locked to that output until its TLAST beat leaves.
* **Data path.** Data, valid and ready are pure multiplexers, so a locked
  connection costs no cycle per beat. Only the grant costs one cycle per
  packet.
* **Parallel traffic.** An input can hold only one output, but different
  outputs run in parallel.
* **Counter.** A per-output packet counter is exported as status.

An assertion checks the stream rule that a valid beat is held until it is
accepted.

### `chdr_noc_shell`: the PU wrapper

A PU connects to the switch through `chdr_noc_shell`. A unit that needs no
switch access is not wrapped: coder and mapper are chained directly.

* **Egress (PU → switch).** This side is store-and-forward. The wrapper
  collects up to SPP = 64 words from the PU, or fewer if the PU ends its
  burst with TLAST. Only then does it send the two header beats and the
  payload. The wait is needed because the header carries the byte length.
  * A PU burst longer than SPP is split into several packets. Only the last
    one has EOB set.
  * `cfg_dst_sid` comes from a route register. Re-composing a chain is
    therefore one register write, effective from the next packet.
* **Ingress (switch → PU).** The wrapper drops the two header beats and
  passes the payload straight through.
  * It asserts the PU's TLAST only on the last beat of a packet whose header
    had EOB. A split burst therefore reaches the PU as one burst again.
  * A gap in the sequence numbers increments `seq_errors`.

The store-and-forward egress is also the main cost in latency and
throughput (see *Timing and throughput*).

### SIDs and ports in the top

| SID | port | connected to                                        |
|-----|------|-----------------------------------------------------|
| 0   | 0    | host chain (coder/mapper in, DMA S2MM out)          |
| 1   | 1    | shared OFDM unit                                    |
| 2   | 2    | RF: ingress → FIR → DAC; ADC packets → egress       |
| 3   | 3    | `ext_in`/`ext_out`, raw CHDR to a neighbouring chip |

## Processing units

### `pu_coder`: convolutional encoder

* **Code.** A rate-1/2, constraint-length-7 code with generators 133 and 171
  (octal). This is the IEEE 802.11 code.
* **Puncturing.** The code is punctured to 2/3 or 3/4 using the 802.11
  patterns.
* **Input.** 32-bit words with `tkeep`. Bits are taken LSB first from each
  byte.
* **Tail.** Six zero tail bits are appended per packet, so each packet ends
  in state 0.
* **Output.** One coded bit per beat, TLAST on the last one.
* **Rate changes.** The rate is sampled at the first beat of a packet, so a
  register write in the middle of a packet takes effect on the next one.

### `pu_mapper`: QAM mapper

* **Modulations.** BPSK, QPSK, 16-QAM and 64-QAM with the 802.11 Gray
  mapping.
* **Scaling.** Levels are scaled to unit average power in Q2.13. The scales
  are 8192, 5793, 2591 and 1264, listed in `sdr_pkg`.
* **Partial symbols.** A TLAST in the middle of a symbol closes that symbol
  with zero bits.
* **Mode changes.** The modulation is sampled at the start of each packet.

### `pu_ofdm`: run-time-length FFT/IFFT with cyclic prefix

The OFDM unit is the most involved PU. It is a single-buffer radix-2
decimation-in-time engine with four phases:

1. **LOAD.** N samples are written in bit-reversed order.
2. **CALC.** log2(N) stages, one butterfly per clock. Each stage scales by
   1/2, so the output is the (I)DFT divided by N, with no overflow.
3. **OUT.** The last CP samples are sent first, then all N in natural order.
4. The unit returns to LOAD.

The settings are read at the start of each symbol:

* `cfg_log2n` sets N from 8 to 64 points;
* `cfg_fwd` selects forward or inverse;
* `cfg_cp` sets the prefix length.

Twiddles for the largest size are built at elaboration from `$cos`/`$sin`
into a constant table. A smaller N uses every 2^k-th entry.

**Latency.** At N = 64 with CP = 16 the unit takes 335 cycles from the first
input sample to the last output sample. The testbench checks this number.
The cost splits into 64 load cycles, 6 × 32 butterflies and 80 output
cycles, and the phases do not overlap.

### `pu_pulse_shaping`: FIR filter

* **Structure.** A direct-form FIR with 16 taps on I and Q, one sample per
  clock.
* **Coefficients.** Q1.14, held in registers `FIR0`…`FIR0+15`. The reset
  value is a single unit tap, so the filter starts as a pass-through.
* **Output.** Scaled back from Q1.14 and saturated to 16 bits.
* **Packet boundaries.** The delay line clears on TLAST, so one burst does
  not leak into the next.

### `rf_interface`: DAC/ADC bridge

The DAC and ADC run on the RF board's clocks. Samples cross in both
directions through `axis_async_fifo`, a FIFO with Gray-coded pointers and
two-flop synchronisers.

* **Transmit.** Samples go to the DAC when `RF_CTRL[0]` is set. If the FIFO
  is empty after a burst has started but before its TLAST, that DAC cycle is
  counted as an underflow.
* **Receive.** When `RF_CTRL[1]` is set, ADC samples are cut into packets of
  `RF_RXLEN` samples. A sample that finds the FIFO full is dropped and
  counted as an overflow.
* **Counters.** Both counters reach the processing clock through Gray code.
* **RF control.** LO frequency and gain words are registered outputs to the
  RF board.

## Control plane

`axil_regs` is an AXI4-Lite slave with the following behaviour:

* 32 read/write words and 8 read-only status words, at byte address
  4 × index.
* A write needs AW and W together and honours `wstrb`.
* An address outside the map answers SLVERR.
* Each register has a one-cycle write pulse. Writing a DMA length register
  uses this pulse to start the transfer.

| idx | name            | meaning                                             |
|-----|-----------------|-----------------------------------------------------|
| 0/1 | MM2S_ADDR/LEN   | send_packet(addr, bytes); writing LEN starts it     |
| 2/3 | S2MM_ADDR/LEN   | receive_packet(addr, max bytes); writing LEN starts |
| 4   | CODER           | rate: 0 = 1/2, 1 = 2/3, 2 = 3/4                     |
| 5   | MAPPER          | 0 BPSK, 1 QPSK (reset), 2 16-QAM, 3 64-QAM          |
| 6   | OFDM            | [2:0] log2 N (reset 6), [4] 1 = forward FFT         |
| 7   | OFDM_CP         | cyclic prefix length (reset 16)                     |
| 8   | ROUTE_TX        | dst SID of the host chain's packets (reset 1)       |
| 9   | ROUTE_OFDM      | dst SID of the OFDM unit's packets (reset 2)        |
| 10  | RF_CTRL         | [0] tx enable, [1] rx enable                        |
| 11  | RF_LO           | LO frequency word                                   |
| 12  | RF_GAIN         | gain word                                           |
| 13  | RF_RXLEN        | samples per received packet (reset 64)              |
| 14  | ROUTE_RX        | dst SID of ADC packets (reset 0)                    |
| 16+ | FIR0..FIR15     | filter taps, Q1.14                                  |
| 32  | STATUS0         | {ofdm_busy, s2mm_trunc, s2mm_busy, mm2s_busy}       |
| 33  | STATUS1         | bytes stored by the last receive                    |
| 34  | STATUS2         | DAC underflows                                      |
| 35  | STATUS3         | ADC overflows                                       |
| 36  | STATUS4         | sequence errors, summed over the wrappers           |
| 37-39 | STATUS5-7     | packets delivered to switch ports 0, 1, 2           |

## DMA engine (`axis_dma`)

`axis_dma` implements the two driver calls of the platform,
`send_packet(addr, size)` and `receive_packet(addr, size)`.

**Send (MM2S).**

* Issues INCR bursts of up to 16 beats. A burst never crosses a 4 KiB
  boundary.
* Streams the read data straight out as it arrives.
* Sets `tkeep` on the last word for a byte count that is not a multiple of 4.
* Pulses `sent_irq` once the last beat has been accepted.

**Receive (S2MM).**

* Gathers up to one burst in a 16-word buffer, then writes it with an AW/W/B
  burst.
* Stops at the stream's TLAST and pulses `received_irq`.
* If the packet is longer than the buffer the software gave, the DMA stores
  what fits and drains the rest. It sets `s2mm_trunc` and then pulses the
  interrupt.

AXI error responses are not acted on.

## Timing and throughput

All PUs and the switch run on one processing clock. The RF board's DAC and
ADC clocks are separate.

* **FIR, coder, mapper.** Each accepts one item per clock when not stalled.
* **OFDM unit.** About 336 cycles per 80-sample symbol (N = 64, CP = 16),
  because its phases do not overlap.
* **Whole chain.** The two store-and-forward wrappers around the OFDM unit
  add about 85 cycles, about 420 cycles per symbol in total.
* **At 300 MHz** (the clock rate the original platform quotes), that gives
  about 57 Msps of output. This is enough for a 20 MHz 802.11a/g-style
  channel. It is not enough for two 80 Msps streams at once.

**DAC underflow at the default sizes.** With the default 16-entry DAC FIFO,
the gap between two OFDM symbols (roughly 320 processing cycles) is longer
than the FIFO can bridge at a 20 MHz DAC clock. A long transmit burst
therefore shows underflows between symbols, and they are counted in
STATUS2. Two fixes exist:

* a deeper `FIFO_DEPTH` of at least one symbol plus prefix (80 or more);
* a ping-pong OFDM buffer.

Neither is the default. The paper gives no buffer sizes, and the counter
makes the effect visible.

## Where this departs from, or goes beyond, the original platform

* **Own choices.** The original describes the platform at block level and
  gives no internal design for the PUs. These are choices of this design:
  * the coder's code;
  * the constellations and their scaling;
  * the FFT architecture and maximum size (64);
  * the filter length;
  * all widths;
  * the register map;
  * the header packing into 32-bit beats;
  * the switch size (4 ports).
* **Single RFNoC domain.** The original places each PU in its own clock
  domain. Here only the RF side crosses clocks. The FIFO that would do it
  for a PU is provided (`axis_async_fifo`) but not instantiated per PU.
* **Missing units.** A CRC unit with programmable polynomial, and the
  receive-side decoder and demapper, are mentioned in the original. They are
  not built. The receive path ends after the FFT.
* **Outside the chip.** These have no RTL here:
  * encapsulation of switch packets into VITA-49 over 10 GbE for
    multi-chip systems (port 3 is the raw attachment point);
  * the processing system;
  * the configuration port;
  * the RF board.
* **One HP port.** The DMA uses one 32-bit HP port. This is far from the
  total PS-PL bandwidth of the device, but sufficient for the sample rates
  above.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/sdr_pkg.sv tb/tb_sdr_top.sv --top tb_sdr_top
./obj_dir/Vtb_sdr_top
```

Replace `tb_sdr_top` with any other testbench name to run it.

`tb_sdr_top` runs the top module at its default parameters and plays the
processor and the RF board. It covers five scenarios:

* **Transmit and compare.** Sends a packet through coder, mapper, the shared
  IFFT and the FIR to the DAC. It compares every DAC sample with a floating
  point reference chain.
* **Mode switch.** Switches mode (rate 3/4, 16-QAM, 32 points, CP 8, FIR
  gain 1/2) by register writes alone and compares again.
* **External port.** Delivers a packet from the external port into memory.
* **Receive re-composition.** Routes the ADC through the same OFDM unit
  (now forward) to memory, and checks that a tone appears in exactly one FFT
  bin. It then provokes an ADC overflow.
* **External transmit.** Routes the transmit chain to the external port.

It counts each mechanism and fails if one never happened:

* both interrupts;
* back-pressure stalls;
* packet splits by the wrapper;
* a mode switch;
* shared use of the OFDM unit;
* under- or overflow;
* external traffic.
