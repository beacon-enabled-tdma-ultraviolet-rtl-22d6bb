# Beacon-synchronised TDMA node for an ultraviolet scattering network

Non-line-of-sight ultraviolet links have no shared carrier and no common clock.
For several such nodes to share a single optical channel without collisions,
they have to agree on time. This RTL is the digital part of one node of such
a network. Every node runs the same design.

- Node 1, the **master**, starts every period T = 1 s by flashing a known
  256-symbol binary m-sequence, the **beacon**, on its UV LED.
- Every other node is a **slave**. It counts photons at its photomultipliers,
  recognises the beacon by correlation, and sets its own time counter to a
  fixed **compensation value**. The value is chosen so that the slave's
  counter is slightly *ahead* of the master's, never behind.
- From then on every node walks through the same list of time slots. In slot
  `U_ij`, node i sends frames to node j. In the guard slot `G_ij` that
  follows it, nobody sends.

Host data comes in over a UART and is buffered in a FIFO. It is sent as
on-off keyed (OOK) frames in the node's own slots. Frames from other nodes
are found by a second correlator, detected symbol by symbol and checked with
a CRC. The node counts frames received and frames received correctly.

The design targets an FPGA clocked at 100 MHz. Symbols are sent at
2 Msymbol/s, one symbol every 50 clocks. The receiver cuts each symbol into
M = 10 chips of 5 clocks.

## The period and its slots

The slot list for N nodes is

```
BT | BI | U_12 G_12 | U_13 G_13 | ... | U_1N G_1N | U_21 G_21 | ... | U_N(N-1) G_N(N-1)
```

It has N(N-1) information/guard pairs, ordered by sender and then by receiver,
and a node never sends to itself. The lengths at the default parameters,
with N = 4, are:

| slot | symbols | clocks | time |
|---|---|---|---|
| BT, beacon transmission | 256 | 12 800 | 128 us |
| BI, beacon interval | 256 | 12 800 | 128 us |
| U_ij, information | 137 500 | 6 875 000 | 68.75 ms |
| G_ij, guard | 29 124 | 1 456 200 | 14.56 ms |
| whole period, 2·256 + 12·(137 500 + 29 124) | 2 000 000 | 100 000 000 | 1 s |

`slot_ctrl` holds the time counter C, which runs from 0 to C_MAX-1 = 99 999 999.
It also keeps the current slot and the counter value at which that slot ends.
When C reaches that boundary, it steps to the next slot and adds the new
slot's length to the boundary. That is the same as comparing C with every
slot edge, but it needs only one comparator. The i and j of an
information/guard pair are advanced with a carry that skips j = i.

### Master and slave behaviour

- **Master.** After reset, both roles sit at the last clock of the last
  guard slot, G_N(N-1). The master therefore starts BT one clock after reset
  and wraps to BT each time C wraps. `beacon_gen` sends the beacon during BT.
- **Slave.** A slave stays in G_N(N-1) until it receives a beacon, and it
  does not transmit before then. Its counter keeps wrapping while it waits.
- **Taking the sync pulse.** A slave accepts the beacon's sync pulse only
  while it is in G_N(N-1). It then jumps to C = C_INIT, inside BI.
- **Later pulses.** Sync pulses that arrive later in the period are ignored.
- **After compensation.** Each period a slave runs to the end of its own
  G_N(N-1). Because its counter is ahead, it waits there for the next
  beacon.

So a slave's time error is corrected once per period. The guard slots only
have to absorb the error that builds up within one period.

### Why C_INIT = 13 300 (133 us)

The beacon is 256 symbols long (128 us), and the slave can only recognise it
once all of it has arrived. At that point the master's counter reads:

- 12 800 (the whole BT),
- plus the propagation delay, at most about 0.5 us over 140 m,
- plus the slave's processing delay.

C_INIT adds 5 us on top of the beacon's 128 us. That margin covers the
propagation delay and the processing delay and puts the slave a little ahead
of the master. A slave that is ahead starts each of its slots early. Since
every sending slot is followed by a guard slot many milliseconds long, the
receiver still sees the whole frame.

C_INIT is meant to be set from a measured delay, rounded up. With this RTL,
the processing delay from the last beacon chip to the sync pulse is about
0.9 us, which includes the unknown phase of the chip grid.
Over 100 simulated beacons, the start-pulse-to-sync-pulse delay was
128.77–128.87 us, so a C_INIT of about 12 900 would fit this RTL as
closely as 13 300 fits hardware with a slower receiver. At 13 300, the
end-to-end simulations show slaves 4.0–4.2 us ahead of the master. Slaves at different distances differ by their propagation delays.

C_INIT has to lie inside BI (`12 800 <= C_INIT < 25 600`), and an assertion
checks this.

## Photon counting

The photomultipliers give one short analog pulse per detected photon.
`photon_counter` receives one ADC sample stream per PMT, with K = 3 by
default.

- It counts one photon for each upward crossing of `adc_thresh_i`, so a
  long pulse counts once.
- The counts of all K tubes are added over one chip of `CLKS_PER_CHIP`
  clocks and saturate at the width of the count.
- Each chip's total is presented with a one-clock `chip_valid` strobe.

The chip grid is free-running. It is not aligned with any transmitter, so
correlation works at chip resolution (1/10 of a symbol).

## Finding a known sequence: correlator and peak detector

Both the beacon receiver and the frame receiver look for a known binary
sequence in the chip counts. They share two helper modules.

### `seq_correlator`

It keeps the last SEQ_LEN·M chip counts and the photon sum `s[k]` of each
of the SEQ_LEN symbol windows of M chips. Every chip, each window sum is
updated by adding the chip that enters the window and subtracting the chip
that leaves it, so no window is ever summed from scratch. The correlation
against the sequence, mapped to +1/-1, is

```
corr = Σ_{seq=1} s[k] - Σ_{seq=0} s[k] = 2·sum1 - sum_all
```

The symbol sent first is compared with the oldest window. The correlator also
outputs `sum1`, `sum_all` and the newest window `s0`. Its outputs are
registered and follow `chip_valid` by two clocks.

A correlation is computed at every chip, so the peak is found to the
nearest chip whatever the phase of the grid.

### `peak_detect`

It keeps a running maximum of the correlation while the value is above a
threshold. The peak is declared once WIN = M-1 chips have passed without a
larger value. It then pulses `found_o` exactly WIN chips after the peak chip.
It also returns a tag, such as the channel estimate, captured at the peak.

Because the delay is fixed, the receiver knows the peak's exact position on
the chip grid.

### Beacon receiver

`beacon_rx` correlates with the 256-symbol beacon. It turns a declared peak
into `sync_o`. The sync pulse comes 3 clocks after the strobe of chip
peak+WIN, and it is the slave's only timing reference.

After a detection it ignores further peaks for L·M chips, so the sidelobes
of the same beacon cannot cause a second pulse. It is enabled only on slaves.

The beacon uses the 255-symbol m-sequence of x^8+x^6+x^5+x^4+1 (seed 0x01),
followed by one 0 symbol to make 256. With 10 chips per symbol and an
ideal channel, the peak value is 255·M·(count per chip). The threshold
`beacon_thresh_i` is an input, to be set for the link.

## Frames

`info_tx` builds each frame from the FIFO. All fields except the preamble are
sent MSB first, one OOK symbol per bit:

| field | symbols | content |
|---|---|---|
| preamble | 63 | m-sequence of x^6+x^5+1, seed 1 |
| header | 16 | source id (4 bits), destination id (4 bits), sequence number (8 bits) |
| payload | 8·PAYLOAD_BYTES = 256 | host bytes |
| CRC | 16 | CRC-16-CCITT (0x1021, initial value 0xFFFF) over header and payload |

A node starts a frame in its slot U_ij (sending to j) when all of these
hold:

- it has been synchronised;
- a whole payload is waiting in the FIFO;
- the rest of the slot is longer than one frame.

Frames follow each other with no gap. A byte is popped from the FIFO as its
first bit starts.

`info_rx` finds frames with the preamble correlator, then:

- **Channel estimation.** At the peak, the correlator windows hold the
  preamble. The photon counts of its n1 = 32 one-symbols and n0 = 31
  zero-symbols estimate the mean count of a 1 and of a 0.
- **Symbol detection.** Every following symbol, read from the correlator's
  newest window exactly M chips later each time, is decided against the
  midpoint of the two means. This is done without division:
  `2·n1·n0·S >= n0·sum1 + n1·sum0`.
- **Checking.** When the frame ends, the node compares the CRC.
  - If the frame is addressed to this node, `frame_rx_num_o` counts it.
  - If its CRC also matches, `frame_ok_num_o` counts it too.

  Both counters are 25 bits wide. Payload bytes are output for every frame,
  with `rx_byte_mine_o` marking frames addressed to this node.

The receiver is half duplex. `uv_node` enables the frame search only in
U/G slots, not in the last guard slot, and not while its own LED is on. BT
and BI carry only the beacon, and searching during them could mistake
beacon stretches for a preamble.

## Host interface

`uart_rx` is a plain 8N1 receiver with the LSB first, at 25 clocks per bit
(4 Mbaud at 100 MHz).

- A two-flop synchroniser conditions the line.
- Each bit is sampled in its middle.
- After a bad stop bit, the receiver waits for the line to go idle before
  looking for a start bit.

`tx_fifo` is a first-word-fall-through FIFO of 32 768 bytes. Writes to a full
FIFO are dropped and counted.

## Parameters of `uv_node`

The defaults are the design's main configuration.

| parameter | default | meaning |
|---|---|---|
| N | 4 | number of nodes (node ids 1..N, 1 = master) |
| K | 3 | PMTs per node |
| ADC_W | 12 | ADC sample width |
| L | 256 | beacon length in symbols |
| M | 10 | chips per symbol |
| CLKS_PER_CHIP | 5 | clocks per chip; a symbol is M·CLKS_PER_CHIP clocks |
| CNT_W | 4 | width of a chip's photon count (saturating) |
| BI_SYMS, U_SYMS, G_SYMS | 256, 137 500, 29 124 | slot lengths in symbols; BT = L |
| C_INIT | 13 300 | compensation value, in clocks |
| PAYLOAD_BYTES | 32 | payload per frame |
| FIFO_DEPTH | 32 768 | host buffer, bytes |
| CLKS_PER_BIT | 25 | UART bit time |

The main ports are listed in the opening comment of `rtl/uv_node.sv`.

- `led_o` is the OOK drive of the LED.
- `adc_i` carries the K sample streams.
- `sync_pulse_o` marks the beacon start at the master and the beacon
  detection at a slave, for measuring the synchronisation error.
- `period_pulse_o` marks C = 0 on every node.

## Capacity

- A frame is 351 symbols, so one U slot holds 391 frames.
- Twelve U slots therefore carry 12 × 391 × 256 bit ≈ 1.2 Mbit/s of payload
  per second, or 300 kbit/s for each node.
- The UART can deliver 3.2 Mbit/s.
- The FIFO covers the 0.75 s between one node's groups of sending slots at
  200 kbit/s, which needs 18.75 kB.

## How this differs from the original description

- **Where the beacon peak lies.** The original text says the correlation
  peak marks the *start* of the beacon. Its timing diagram and its
  compensation formula, however, count the whole beacon duration before the
  slave reacts, which places the peak at the beacon's *end*. A correlator
  can only peak once the whole sequence has arrived, so this design follows
  the diagram and the formula.
- **Name of the last guard slot in the state diagrams.** The state diagrams
  label the guard slot after U_N1 as "G_N2". The text defines G_ij as the
  guard after U_ij, so G_N1 is used here.
- **Choices made here.** The following are not specified in the original
  and were chosen here:
  - the clock frequency;
  - the beacon and preamble polynomials;
  - the frame layout and CRC;
  - the channel-estimation rule;
  - the peak-declaration delay;
  - the UART rate, the FIFO depth and the ADC width;
  - the half-duplex gating of the receiver.
- **Single design for all nodes.** The original builds separate master and
  slave FPGA designs. Here a single design serves both roles.
- **Thresholds.** Detection thresholds are ports, not constants.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Build any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/uv_pkg.sv tb/tb_slot_ctrl.sv --top-module tb_slot_ctrl
./obj_dir/Vtb_slot_ctrl
```

| testbench | what it checks |
|---|---|
| `tb_uart_rx` | 200 random bytes, then frames with a bad stop bit |
| `tb_tx_fifo` | random pushes and pops against a queue model, full and empty, overflow count |
| `tb_beacon_gen` | every symbol against the m-sequence recurrence, the padding symbol, symbol and beacon length, period and balance, restart |
| `tb_photon_counter` | pulse (not sample) counting, summing over PMTs, chip timing, saturation |
| `tb_beacon_rx` | one sync pulse per beacon at the exact clock after the beacon end, the peak value, no pulse from background counts alone |
| `tb_slot_ctrl` | master and slave slots, i/j and counter against an equation model with small slot lengths; compensation; ignored mid-period syncs |
| `tb_info_tx` | frame bits against a reference frame builder; slot gating; FIFO pops |
| `tb_info_rx` | fixed and random frames with random photon arrivals: every payload byte, frames for other nodes, single flipped bits in header, payload or CRC, the two frame counters |
| `tb_uv_node` | four nodes on a modelled channel, with shortened U/G slots over three periods: beacons, syncs, slot alignment, every frame of every node received |
| `tb_uv_sync_error` | one master and two slaves over 100 beacon periods: the delay from the master's start pulse to each slave's sync pulse (mean, variance, maximum), always between t_trans + t_pro and C_INIT; the compensated counters |
| `tb_uv_network_full` | four nodes at the default parameters, from reset through the beacon, the slaves' synchronisation and the whole first slot U_12: 40 frames from node 1 to node 2 |

The network testbenches use `tb/uv_channel_model.sv`, a random model of
the optical channel and the PMTs:

- The four nodes sit at the corners of a 110 m × 90 m rectangle, and light
  takes 30–47 clocks to travel between them.
- While another node's LED is on, a photon arrives with probability 0.3 per
  clock. The rest of the time, background photons arrive with probability
  0.005 per clock.
- Each photon appears as a short pulse on the ADC samples.

`tb/uv_frame_ref.sv` is an independent model of the frame format.

The full-size run covers about 6.9 million clocks and takes a few minutes.
A whole 1 s period at the defaults (10^8 clocks for four nodes) was not
simulated. The three-period test uses shortened slots instead.

## Limits

- The network testbenches model neither clock drift between nodes nor real
  PMT pulse shapes.
- All thresholds in the testbenches were set for the modelled channel.
- The LED driver, the PMTs with their filters and ADCs, and the host PC are
  outside this RTL.
