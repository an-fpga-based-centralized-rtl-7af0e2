# Centralized VLC beacon transmitter

Visible-light positioning places LED "beacons" in the ceiling. Each beacon
keeps sending a short ID message by switching its light on and off faster
than the eye can see. A phone or photodiode receiver decodes the IDs it sees
and works out where it is. Every message has to be forward-error-corrected
and line coded before it goes on the light. With hundreds of lamps, this work
is the bottleneck if one small microcontroller does it for all of them in
turn. It is also costly if every lamp gets a microcontroller of its own.

This design does all of it in one FPGA. A host processor on the same chip
writes a new 128-bit ID message for any beacon into an on-chip message memory.
A hardware pipeline encodes only the messages that changed. It Polar-encodes
each one into a 256-bit code word, then line codes it with Manchester or
4B6B. It hands the frame to that beacon's own shift register. The 100 shift
registers each send their frame over and over as on-off keying at the
front-end bit rate (100 kHz). They run without any further work from the rest
of the chip. One message is encoded every 14 cycles of the 50 MHz system
clock, so all 100 beacons get new IDs in 28 µs.

The RTL is SystemVerilog (IEEE 1800-2017), in `rtl/`. The testbenches are in
`tb/`.

## Data path of one update

```
 host bus ──► req_write/addr/data ──┬──► msg_mem  port A (write)
                                    └──► req_fifo (address only)
                                              │
                           addr_pointer ◄─────┘   pops when controller idle
                                │  read/addr
                                ▼
                           msg_mem port B ──► 128-bit message
                                │
                controller ──► vlc_transmitter (polar_encoder → Manchester | 4B6B)
                    │                    │ frame (512 or 384 bits)
                    └──► fe_demux ──► fe_reg[i]  (sys_clk, 50 MHz)
                                         │ toggle handshake
                                     piso_sr[i]  (sr_clk, 100 kHz) ──► tx_fe[i]
```

| module | role |
|---|---|
| `vlc_central_tx_top` | Wires everything together, including the 100 front-end channels. |
| `system_pll` | Behavioural model of the FPGA PLL. It makes sys_clk (50 MHz) and sr_clk (100 kHz) from iClock. |
| `reset_sync` | Reset synchroniser, one per clock domain. |
| `msg_mem` | Two-port message memory, 100 × 128 bits. Port A is for the host; port B is read-only for the Address Pointer. |
| `req_fifo` | Requests FIFO, 32 entries, each holding a front-end address. |
| `addr_pointer` | Takes one request when the pipeline is idle and fetches its message. |
| `controller` | Starts the encoder, waits for it, then writes the frame through the DE-MUX. It stalls if the target register is still occupied. |
| `vlc_transmitter` | Polar encoder followed by the selected RLL line code. |
| `polar_encoder`, `manchester_encoder`, `rll4b6b_encoder` | The encoders. |
| `fe_demux` | Decodes the address into one write enable per front-end. |
| `fe_reg` | Front-end buffer register, on the sys_clk side. |
| `piso_sr` | Loop shift register of one front-end, on the sr_clk side. |
| `vlc_pkg` | Sizes, the RLL mode enum, the frozen-set generator and the 4B6B code book. |

### Bus interface

A write request is `req_write` with a 7-bit `req_addr` (front-end number) and
128-bit `req_data`, 136 bits in all. The request is accepted on a rising
sys_clk edge where `req_ready` is high. If `req_ready` is low, the host must
hold the request. `req_ready` goes low while the FIFO is full, which is the
back-pressure mechanism. An accepted write stores the message in the memory
and, in the same cycle, queues its address. `req_read` reads the message word
at `req_addr` back; `bus_rdata` is valid one cycle later.

If a beacon is written twice before its first request is served, both
requests read the newest message. The beacon then sends that message twice in
a row, which is harmless.

## Timing of a request (sys_clk cycles)

| cycle | what happens |
|---|---|
| 0 | `addr_pointer` pops the FIFO. This is allowed only when the FIFO is not empty and `controller` is idle. |
| 1 | Read strobe and address are on memory port B. |
| 2 | The memory returns the message, and `addr_pointer` registers it. |
| 3 | `msg_valid`. `controller` pulses `tx_start`, and the message enters the Polar encoder. |
| 4–11 | The eight butterfly stages of the Polar transform, one per cycle. |
| 12 | The code word is final. The line-coded frame is registered. |
| 13 | `tx_done`. If the target buffer register is free, `demux_we` writes the frame into it. |
| 14 | The frame is in `fe_reg[i]`, and the controller is idle again. The next request can be popped in this cycle. |

Latency is therefore 14 cycles and throughput one message per 14 cycles. That
is 128 bits × 50 MHz / 14 = 457 Mbit/s of message data at 50 MHz, or about
696 Mbit/s at 76 MHz. For other code lengths the latency is 6 + log2(CL)
cycles.

The pipeline deliberately does not overlap requests. The Address Pointer
waits until the whole chain is idle. This matches the published latency and
throughput figures, which are related exactly this way. If the target
front-end's register is still waiting for its shift register to take the
previous frame, the controller holds the write in a STALL state. This happens
only when the same beacon is updated twice within about one frame time.

## Encoding

**Polar code (K = 128, N = 256).**

- *Frozen-bit insertion.* The message bits go, in order, onto the 128
  information positions of a 256-bit vector u. The other 128 positions are
  zero.
- *Transform.* Eight stages follow. Stage s works on blocks of b = 256/2^s
  positions. For the first half of each block it does `u[p] ^= u[p + b/2]`.
  The result is the natural-order code word x = u · F^⊗8 with F = [1 0; 1 1],
  without bit reversal.
- *Frozen set.* The published design does not list its frozen set, so this
  one uses a simple rule. The information positions are the indices with the
  largest Hamming weight, with ties going to the larger index. For N = 256
  that means all 93 indices of weight ≥ 5, plus the 35 largest indices of
  weight 4.
- *Changing the frozen set.* Edit `vlc_pkg::polar_info_mask`. A decoder must
  of course use the same set.

**Manchester.** Code bit i becomes line bits 2i and 2i+1: "10" for a 1, "01"
for a 0. A frame is 512 bits, and the overall rate is 128/512 = 1/4.

**4B6B.** Nibble {c[4j+3..4j]} becomes line bits [6j+5..6j], using the IEEE
802.15.7 PHY I code book (`vlc_pkg::enc4b6b`). Every code word has three ones.
A frame is 384 bits, and the overall rate is 1/3.

Line bit 0 is sent first. The variant is chosen with the top-level parameter
`RLL` (`RLL_MANCHESTER`, the default, or `RLL_4B6B`). Only the chosen encoder
is built. No dimming support (puncturing, compensation symbols) is included.

## Two clock domains: handing a frame to a beacon

This is the subtle part of the design. The frame is produced in the 50 MHz
domain but sent in the 100 kHz domain, 500 times slower. The shift register
must never send a half-old, half-new frame. Each front-end channel works like
this:

1. *Write.* `fe_reg` (sys_clk) stores the frame and flips `req_tgl`.
2. *Detect.* `piso_sr` (sr_clk) synchronises `req_tgl` through two
   flip-flops. A difference from its own `ack_tgl` means a new frame is
   pending.
3. *Load.* The pending frame is loaded when the current frame has finished,
   after bit W−1, so a frame on the line is never cut. If nothing has been
   loaded since reset, it is loaded at once. On loading, `ack_tgl` takes the
   new toggle value.
4. *Repeat.* Without a pending frame the register rotates, so bit 0 follows
   bit W−1 and the frame repeats forever.
5. *Acknowledge.* `fe_reg` synchronises `ack_tgl` back with two flip-flops.
   Its `busy` flag (`req_tgl != ack`) stays high from the write until the
   frame has been taken. The controller never writes a busy register, so the
   frame is stable while the slow domain samples it.

Before its first frame a beacon outputs 0 (LED off). Reset is asynchronous
and active low. When it is released and the PLL is locked, the sr_clk domain
leaves reset first, and then the sys_clk domain. That way both ends of every
handshake start from the reset state.

## Parameters

| parameter (top) | default | meaning |
|---|---|---|
| `NUM_FE` | 100 | Number of front-ends (address width is log2 of it). |
| `MSG_LEN` | 128 | Message length ML. |
| `CW_LEN` | 256 | Polar code length CL (a power of two, and a multiple of 4 for 4B6B). |
| `RLL` | `RLL_MANCHESTER` | Line code. |
| `FIFO_DEPTH` | 32 | Requests FIFO entries. |
| `SR_DIV` | 500 | sys_clk / sr_clk ratio in the PLL model. |

## What follows the published design and what does not

These follow the published design:

- The block structure and the clock domains.
- The 100 front-ends, 128-bit messages, length-256 Polar code, and the rates
  1/4 and 1/3.
- The Manchester mapping and the encoding order.
- The 50 MHz and 100 kHz clocks.
- The 136-bit request.
- The 14-cycle latency.
- The repeating loop shift registers.

These are this design's own choices:

- **Frozen set and 4B6B table** are not published; see above.
- **Polar encoder architecture.** The original reuses an earlier encoder that
  is not described. This one is iterative, one stage per cycle.
- **FIFO content.** The text says the FIFO stores requests. Because the
  message is fetched from memory afterwards, only the 7-bit address is
  stored. 32 × 7 = 224 bits matches the memory reported for the original
  FIFO.
- **Split of the 14 cycles.** The Address Pointer registers the message it
  reads, which is what makes the total 14. The register counts reported for
  the original Address Pointer (11) suggest it does not.
- **Clock-domain crossing, controller stall, load at frame boundary, idle
  level and reset sequence.** None of these are described in the original.
- **Register count.** Synthesis gives about 105,000 flip-flops at the
  defaults. That is two 512-bit frames per beacon (buffer + shift register)
  plus the encoder. The original reports 91,004 for the Manchester variant
  and 78,274 for 4B6B. The 4B6B figure is exactly 100 × 2 × 384 plus the
  encoder; the Manchester one is smaller than two full frames per beacon,
  for a reason that is not given.
- **4B6B table storage.** The original keeps its 4B6B table in block RAM;
  here it is logic.
- **System PLL.** This is a simulation model (reference passed through,
  sr_clk by division). On an FPGA, replace it with the vendor PLL.
- **Processor system.** The soft processor, its bus fabric, JTAG, SDRAM and
  its controller, timer and system ID are not included. The top's
  `req_*`/`bus_rdata` ports are where the processor's bus writes arrive. The
  LED driver front-ends are analog and sit outside, on `tx_fe`.
- **Processing time.** Encoding k messages takes k × 14 cycles (28 µs for
  100 at 50 MHz). The end-to-end processing times reported for the original
  system are about 0.5 ms for 100 beacons. That presumably includes the
  processor's firmware writing the messages, which is not modelled here.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
by printing `TB_RESULT checks=N failures=M`. The reference models in
`tb/tb_vlc_ref_pkg.sv` are written independently of the RTL:

- the Polar transform as the plain triple loop;
- the frozen set by repeated best-index selection;
- the line codes by their own tables.

| testbench | what it covers |
|---|---|
| `tb_polar_encoder`, `tb_vlc_transmitter` | Full-size random messages, both variants, latency (9 and 10 cycles). |
| `tb_piso_sr` | Bit-exact serial streams: first load, repetition, and replacement only at a frame boundary. |
| `tb_fe_reg`, `tb_controller`, `tb_addr_pointer`, `tb_req_fifo`, `tb_msg_mem`, `tb_fe_demux`, `tb_system_pll` | The handshakes, stall, ordering and timing of each block. |
| `tb_vlc_central_tx_top` | End to end at reduced size (8 beacons, ML 8, CL 16, 4-entry FIFO), for both line codes. It cuts every beacon's output into frames and checks each frame against the messages written to that beacon. It also checks latency and spacing, and requires that FIFO back-pressure, controller stall, frame repetition and frame replacement each happen. |
| `tb_vlc_full` | All defaults: 100 beacons are written, every request takes exactly 14 cycles, and all 100 outputs send their correct 512-bit frame twice. This takes about 11 ms of simulated time and a few seconds to run. |
| `tb_vlc_workloads` | The processing-time sweep: 1 to 100 beacons at ML = 16, 32, 64 and 128, checking k × (6 + log2 CL) cycles and every frame. |

To run one with Verilator:

```
verilator --binary --timing --assert --top-module tb_vlc_full \
  -y rtl -y tb +libext+.sv rtl/vlc_pkg.sv tb/tb_vlc_ref_pkg.sv tb/tb_vlc_full.sv
./obj_dir/Vtb_vlc_full
```

The simulator should give uninitialised variables random values (for example
`+verilator+rand+reset+2`). The design resets everything it reads.
Assertions check three rules: the FIFO is never pushed while full nor popped
while empty, and the controller never writes a busy buffer register.
