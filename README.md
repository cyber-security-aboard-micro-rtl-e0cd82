# Secure LED signalling for a nano-drone mission computer

A palm-sized drone cannot carry more than a microcontroller-class chip, and
such chips have no root of trust. The SoC this RTL belongs to pairs a
Linux-capable 64-bit RISC-V host, an 8-core RISC-V accelerator cluster and an
OpenTitan-based secure subsystem on one 22 nm die (about 9 mm², 250 mW). Its
distinguishing feature is what happens after an attack. Suppose the secure
subsystem can no longer authenticate radio traffic, or its anomaly checks flag
the host. It then treats the radio and the rest of the chip as compromised. It
falls back to a channel that only it controls: the drone's four LEDs, wired to
GPIOs that only the secure subsystem can drive. It blinks a short SOS message.
A second drone films the blinking. A small CNN on its accelerator classifies
each frame as "LEDs on" or "LEDs off", and a simple state machine turns that
stream of guesses back into the message.

This repository gives synthesizable SystemVerilog for the parts of that SoC
that the published description defines well enough to build:

| block | file | what it is |
|---|---|---|
| LED packet sender | `rtl/secure_gpio.sv` | secure-only GPIO for the LEDs; frames and blinks a packet |
| message decoder | `rtl/uvc_decoder.sv` | recovers the bit clock and payload from per-frame CNN scores |
| SCMI mailbox | `rtl/scmi_mailbox.sv` | shared memory + doorbell/completion interrupts, host ↔ secure core |
| L2 scratchpad | `rtl/l2spm.sv` | 512 KiB host-domain SRAM, 64-bit |
| cluster L1 | `rtl/l1_tcdm.sv` | 16 × 8 KiB banks shared by 8 cores + DMA, with the bank interconnect |
| host-bus arbiter | `rtl/host_arb.sv` | lets the secure subsystem read and write host memory next to the host core |
| top | `rtl/mav_soc.sv` | wires the above together; bus decode for host and secure sides |
| shared types | `rtl/uvc_pkg.sv` | packet constants, register-bus structs |

The processors (CVA6 host, RI5CY cluster cores, Ibex secure core), the AXI
and TL-UL interconnects, the OpenTitan crypto, memory and security IPs, the
peripherals, the HyperRAM controller and the last-level cache are existing
open-source IP. They are not reproduced here. Their bus connections are ports
of `mav_soc`.

## The LED link

### Packet

A message is one byte. On the LEDs it becomes a 12-bit packet:

```
 bit:   0   1 | 2   3   4   5   6   7   8   9 | 10  11
        1   0 | p7  p6  p5  p4  p3  p2  p1  p0|  1   0
        start |        payload, MSB first     |  stop
```

`1` means all four LEDs on. Each bit is held for one bit time of 0.4 s
(2.5 bit/s), so a packet takes 4.8 s. Between packets the LEDs are off. The
observer's camera runs at 30 frames/s, which gives 12 frames per bit. The
2 + 8 + 2 split, the bit rate and the frame rate come from the source design.
The flag values, the bit order and the polarity are this implementation's own
choices, and they are kept in `uvc_pkg` as `START_FLAG`, `STOP_FLAG` and
`frame_packet()`. Choosing an *on-off* start flag matters for the decoder. The
idle line is off, so the only dark-to-light transition that can begin a packet
is the first start bit. The stop flag ends dark, so a packet can follow right
after another one.

### Sender (`secure_gpio`)

The sender has four registers on the secure bus (byte offsets):

| offset | name | fields |
|---|---|---|
| 0x0 | CTRL | bit 0 `uvc_mode` (0 = LEDs follow LED register, 1 = packet sender), bit 1 `irq_en` |
| 0x4 | LED | LED value in direct mode, one bit per LED |
| 0x8 | TX | write: payload in bits 7:0, starts a packet if idle (ignored while busy); read: shift register |
| 0xC | STATUS | bit 0 `busy`, bit 1 `done` (write 1 to clear) |

The packet goes into a 12-bit shift register. Its top bit drives every LED.
A counter shifts the register every `BIT_CYCLES` clocks. The first bit is on
the pins in the cycle after the TX write. Each bit lasts exactly `BIT_CYCLES`
cycles. `done` (and `done_irq_o` if enabled) rises 12·`BIT_CYCLES` cycles after
the write. The default `BIT_CYCLES = 140,000,000` is 0.4 s at 350 MHz, the
secure subsystem's maximum clock. Change it if the secure clock is slower. In
the source design the secure core's software toggles the GPIOs. Direct mode
keeps that possible. The hardware sender is an addition that frees the core
and makes the timing exact.

### Decoder (`uvc_decoder`)

The input is one score per frame (`score_valid_i`, `score_i`). The score is the
CNN's 8-bit quantised estimate that the LEDs are on, with 255 standing for 1.0.
Decoding works like this:

1. **Bit clock.** In state HUNT the decoder waits for a frame that scores at
   least `THRESHOLD` (128, i.e. 0.5) right after a frame below it. That frame
   counts as frame 0 of start bit 0. From there every `FRAMES_PER_BIT` (12)
   frames make one bit. Because the camera's frame rate is exactly 12× the bit
   rate, the phase found at the first edge holds for the 144 frames of a packet.
   The source design only says the bit clock is "determined from the
   sequence". This edge rule is the simplest method that works with the chosen
   start flag.
2. **Bit value.** The decoder adds the 12 scores of a bit and compares the sum
   with 12 · 128. This is the same as comparing the mean score with 0.5, with
   no divider. A few misclassified frames per bit are absorbed. For example,
   with on-frames scoring 160 or more, one frame scoring 30 still leaves the
   sum at 1790 ≥ 1536.
3. **Framing.** After 12 bits the decoder checks the start and stop flags. A
   match raises `msg_valid_o` for one cycle with the payload on `msg_o`. A
   mismatch raises `frame_err_o`. In both cases the decoder goes back to HUNT.
   The edge detector then continues from the averaged value of the last bit
   rather than from the last raw frame. Without that, one misclassified final
   frame of a stop flag would hide the start edge of a packet that follows
   immediately, and that packet would be lost.

Both pulses come one clock after the clock that delivers the packet's last
frame. `msg_o` holds until the next good packet. The decoder needs only one
clock per frame, so it never limits throughput. A noise spike in an idle
period can start a false packet. That packet fails the flag check and shows up
as a framing error. There is no re-synchronisation inside a packet. If the
camera and the sender clocks drifted by more than a few frames over 4.8 s, the
phase would have to be re-aligned at each data edge. That is not built.

In the source design this state machine is software that runs next to the
CNN. Here it is a hardware block. A system can use it, or treat it as a
reference model.

## The SCMI mailbox (`scmi_mailbox`)

The host must not see the secure subsystem's address map, yet it needs the
secure subsystem's crypto services. The two sides therefore communicate only
through this mailbox. Both sides see the same map:

| offset | content | host | secure core |
|---|---|---|---|
| 0x00 … 4·`SHMEM_WORDS`−4 | shared memory, 32-bit words | read/write | read/write |
| 4·`SHMEM_WORDS` (0x80) | DOORBELL bit 0 → `irq_sec_o` | write 1 sets | write 1 clears |
| 4·`SHMEM_WORDS`+4 (0x84) | COMPLETION bit 0 → `irq_host_o` | write 1 clears | write 1 sets |

An exchange runs in this order:

1. The host writes an SCMI message into the shared memory and sets DOORBELL.
2. The secure core is interrupted, reads the message and executes it.
3. The secure core writes the reply, clears DOORBELL and sets COMPLETION.
4. The host is interrupted, reads the reply and clears COMPLETION.

Each side can only raise the flag that interrupts the *other* side and only
clear the flag that interrupts itself. Reads are combinational and writes take
effect at the clock edge. If both sides write the same word in the same cycle,
the secure side's data is kept. The message format inside the shared memory
follows the SCMI specification and is left to software. The shared memory is
32 words (128 bytes) by default. The source design does not give a size, and
128 bytes is the usual SCMI shared-memory size. The mailbox runs on one clock.
In the SoC it sits behind an AXI clock-domain crossing, which is not included.

## Memories

**L2 scratchpad (`l2spm`).** It holds 512 KiB as 65,536 words of 64 bits, the
width of the host AXI interconnect, with one write enable per byte. It is
single-ported. A read returns data one cycle after the request and holds it.
The array is not reset.

**Cluster L1 (`l1_tcdm`).** Eight cores and the cluster DMA (port 8) share 16
banks of 8 KiB, 128 KiB in all. Consecutive 32-bit words go to consecutive
banks. Address bits [5:2] select the bank and bits [16:6] the row, so
streaming accesses spread across all banks. Each bank is a single-port SRAM
that serves one master per cycle. When masters collide on a bank, a per-bank
round-robin pointer picks the winner. The pointer moves to the port after the
last winner, so a waiting master is served within 8 cycles. The losers see
`gnt_o` low and must hold their request; this is the cluster's stall
mechanism. `rvalid_o` follows a grant by one cycle, and so does `rdata_o` for
reads. The bank count and size come from the source design. The interleaving,
the arbitration policy, the 32-bit bank width and the single-cycle latency are
this implementation's choices, modelled on the usual PULP cluster
organisation.

## Secure access to host memory (`host_arb`)

The isolation is one-way. The host cannot see inside the secure subsystem,
but the secure subsystem is a master on the host bus through a TL-UL-to-AXI
bridge. Its core can therefore wake up on a timer and inspect host and
cluster memory for signs of an attack. Here that path is a two-master
request/grant arbiter in front of the host memory targets:

- master 0 is the host crossbar;
- master 1 is the secure bridge.

When both masters request in the same cycle, the one not served last wins.
The loser holds its request, and an assertion checks that it does. Read data
return one cycle after the grant. This replaces only the part of the AXI
crossbar that these two masters share. The crossbar itself is not
reproduced.

## Top level (`mav_soc`)

| port group | meaning |
|---|---|
| `host_*` | 64-bit bus from the host crossbar. L2SPM at `0x1C00_0000` (512 KiB), mailbox at `0x1040_0000`. Hold `host_req_i` until `host_gnt_o`; `host_rvalid_o`/`host_rdata_o` one cycle after a granted read. Mailbox words use the lane given by address bit 2 (even words in bits 31:0, odd in 63:32), one word per access. Unmapped reads return 0. |
| `s2h_*` | the same bus protocol and map, from the secure subsystem's bridge; arbitrated against `host_*` by `host_arb` |
| `sec_req_i` / `sec_rsp_o` | 32-bit bus from the secure interconnect (`uvc_pkg::reg_req_t`). Mailbox at `0x0000_0000`, LED GPIO at `0x0000_1000`. Combinational read data. |
| `irq_sec_o` | to the secure core: mailbox doorbell OR packet done |
| `irq_host_o` | to the host: mailbox completion |
| `led_o` | the four secure LEDs; `uvc_tx_busy_o` shows a packet in flight |
| `tcdm_*` | the nine cluster ports of `l1_tcdm` |
| `score_*`, `msg_*`, `frame_err_o`, `uvc_rx_state_o` | CNN score stream in, decoded messages out |

The address maps are this implementation's choice. The source design gives no
addresses.

## Parameters

| parameter | default | origin |
|---|---|---|
| `BIT_CYCLES` | 140,000,000 | 2.5 bit/s at 350 MHz (both from the source design) |
| `NUM_LEDS` | 4 | source design |
| `FRAMES_PER_BIT` | 12 | source design (30 frame/s ÷ 2.5 bit/s) |
| `THRESHOLD`, `SCORE_W` | 128, 8 | 0.5 threshold and 8-bit quantisation of the source design |
| `MBOX_WORDS` | 32 | own choice |
| `L2_BYTES` | 524,288 | source design |
| `TCDM_BANKS`, `TCDM_BANK_BYTES` | 16, 8192 | source design |
| `TCDM_PORTS` | 9 | 8 cores (source design) + DMA |

## How far to trust it

- The tests check every block against values computed independently:
  waveform cycle counts, a reference memory, and expected payloads. Each
  test was also run against a deliberately broken copy of its block, and each
  one caught the fault.
- The decoder has been exercised on all 256 payloads with synthetic noise:
  scores of 160–255 when on and 0–90 when off, with up to one misclassified
  frame per bit. It has not seen real CNN output.
- No timing, area or power figure of the original chip applies to these
  blocks. They have not been through physical design.
- The biggest departures from the source design:
  - The packet sender and the decoder are hardware here. In the original they
    are software.
  - The flag values and the bit order were chosen here.
  - The bit clock recovery uses a single edge.
  - The mailbox register layout and the address maps were chosen here.
  - A simple request/grant bus stands in for AXI4 and TL-UL.

## Simulating

Every test prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/uvc_pkg.sv rtl/uvc_decoder.sv \
          tb/tb_uvc_decoder.sv --top-module tb_uvc_decoder
./obj_dir/Vtb_uvc_decoder
```

Other modules can be found with `-y rtl`. The testbenches are:

| test | covers |
|---|---|
| `tb_secure_gpio` | register map, direct mode, packet waveform cycle by cycle (bit time 5), busy/done/interrupt |
| `tb_uvc_decoder` | 256 payloads 0x00–0xFF plus 25 damaged packets, noise, gaps, result latency |
| `tb_scmi_mailbox` | four full request/response exchanges, flag permissions, write collision |
| `tb_l2spm` | full 512 KiB: random byte-enabled traffic against a model, both address ends |
| `tb_l1_tcdm` | full size: 9 masters random traffic, one-grant-per-bank, fairness bound, stalls |
| `tb_host_arb` | random traffic from both masters: grant rule, forwarding to the target, read return, contention |
| `tb_mav_soc` | whole top, bit time 48 cycles: mailbox → secure core → LED packet → camera model → decoder, a hand-blinked bad packet, a secure-side scan of L2 competing with host traffic, TCDM traffic; counts each mechanism |
| `tb_uvc_link_256` | the 256-message experiment through the top: payloads 0x00–0xFF sent back to back by the LED sender, sampled by a camera model at random phase with misclassified frames, all decoded in order (bit time 96 cycles) |
| `tb_mav_soc_sos` | one SOS exchange with all sizes at default except `BIT_CYCLES` = 1.4 M (1/100 of real), about 1.7·10⁷ cycles |
| `tb_mav_soc_full` | every parameter at its default: L2 and TCDM at both ends, one SOS mailbox exchange, the first start bit of the LED packet at the real bit time (exactly 1.4·10⁸ cycles) with the decoder locked on it; about 1.6·10⁸ cycles, roughly 6 minutes |

With every parameter at its default, a whole packet takes 12 bit times, about
1.7·10⁹ clock cycles, because 4.8 s of LED time passes at 350 MHz. That is more
than an hour of simulation, so `tb_mav_soc_full` stops after the first bit and
whole packets through the top are simulated at shorter bit times
(`tb_mav_soc_sos`, 1/100 of the real bit time, is the largest).
