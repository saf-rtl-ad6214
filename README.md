# SAF shell in SystemVerilog: an FPGA that a remote host drives over raw Ethernet

SAF (Scalable Acceleration Framework; Quraishi, Riera, Ren, Arora and
Shrivastava) removes the local host CPU from an FPGA accelerator card. Normally
a card sits in a PCIe slot, and the host CPU of that server loads its
bitstream, copies its input data and starts its kernels. In SAF the card is
plugged only into an Ethernet switch. A modified FPGA shell does three things:

- it parses raw Ethernet frames from a remote host;
- it routes their payload to the partial-reconfiguration (PR) controller, the
  kernel control registers or DDR memory;
- it sends short status packets back.

A board announces itself when it is plugged in, so boards can be added while
an application runs. One broadcast stream can reprogram any number of boards
at once.

This repository holds synthesizable RTL for that shell. It also has RTL for
the role's two control kernels and for a transpose kernel that stands in for
the PTRANS benchmark the publication runs. Every block has a self-checking
testbench, and one testbench walks a whole host session end to end. The
publication describes the shell at block level. The frame formats, register
map, widths and arbitration below are this implementation's own choices,
except where marked as taken from the publication. The section "Departures and
assumptions" lists these choices.

## The protocol

Every SAF message is one Ethernet frame with no IP header. Its type sits in the
EtherType field:

| Type   | Direction     | Meaning                                   | Payload here |
|--------|---------------|-------------------------------------------|--------------|
| 0x80EF | board -> host | auto-discovery: "I am here"               | 3 words, layout below |
| 0x80AA | host -> board | partial bitstream                         | bitstream, 64-bit words |
| 0x80AB | board -> host | reconfiguration finished                  | 1 word `{16'h0, 16'h80AB, seq[31:0]}` |
| 0x80DD | host -> board | kernel input data for DDR                 | header word, then data words |
| 0x80DB | board -> host | input data stored                         | 1 word `{16'h0, 16'h80DB, seq[31:0]}` |
| 0x80CC | host -> board | kernel command                            | words `{addr[31:0], data[31:0]}` |
| 0x80CB | board -> host | kernel output                             | up to 180 result words per frame |

The type codes and their meanings come from the publication. A session
follows its execution flow:

1. The board is plugged in and sends a discovery packet.
2. The host registers the board by its MAC address.
3. The host sends PR packets, and the board confirms when reconfiguration is
   done.
4. The host sends the kernel input data, and the board acknowledges it.
5. The host sends the kernel-execution commands.
6. The application kernel runs, and the result kernel returns its output.

The host knows nothing else about the board.

**Framing.** Payload words are 64 bits. They start at frame byte 14, right
after the destination MAC, source MAC and EtherType, and go most significant
byte first. Payload length must be a multiple of 8 bytes. The MAC adds
minimum-size padding and the FCS. A board accepts frames sent to its MAC
address 0 or to broadcast. It drops all other frames. It replies to the source
MAC of the frames it received.

**Discovery payload.** The publication prints this payload as six 32-bit rows.
Here the rows are sent two per 64-bit word, earlier row first:

| Row | Content                         |
|-----|---------------------------------|
| 0   | `{16'h0000, 16'h80EF}`          |
| 1   | `MAC0[47:16]`                   |
| 2   | `{MAC1[47:32], MAC0[15:0]}`     |
| 3   | `MAC1[31:0]`                    |
| 4   | `{VID 16'h1172, PID 16'h2494}`  |
| 5   | `{SVID 16'h198A, SPID 16'h3852}`|

The row contents and ID values are the publication's. It shows which MAC
fields share a row but not which half is high, so the split above is a
choice.

**Kernel input header.** The first word of each 0x80DD packet is
`{arg_index[31:0], line_offset[31:0]}`. The data words that follow go to DDR
line address `(arg_index << 22) + line_offset`, then to the next lines in
order. A line is 512 bits: word *i* of a line occupies bits `64*i+63 : 64*i`.
Each argument therefore owns a region of 2^22 lines (256 MiB). A large buffer
may be sent as several packets with increasing offsets, and each packet is
acknowledged separately.

**Kernel commands.** One 0x80CC packet may carry several commands, and they are
executed in order. The kernel interface decodes them as follows:

| Address bits | Meaning |
|--------------|---------|
| `[11:8]`     | kernel: 0 = discovery, 1 = result, 2 = application |
| `[2:0]`      | register |
| `[31:12]`    | must be zero |

Writing register 0 with bit 0 set starts the kernel. Registers 1 to 7 hold
arguments. The PTRANS kernel takes N in register 1 and the source line address
in register 2. For example, to transpose a 24x24 matrix stored at line 0, send
`{0x201, 24}`, `{0x202, 0}`, `{0x200, 1}`.

## Structure and clock domains

```
                 rx_clk                     clk                     pr_clk / kernel_clk
 MAC RX ──► packet_analyzer ──► PR FIFO ──► pr_logic ──► bridge ──► pr_ip_interface ──► PR IP
  (Avalon-ST 64b)   │       ├─► CMD FIFO ─► kernel_ctrl_logic ─► bridge ─► kernel_interface ─► kernels
                    │       └─► MEM FIFO ─► ddr_logic ─► bridge ─► ddr_interface ─► DDR port
                    │                          ▲                     ▲      │
                    └─ pkt_toggle ─► auto_discovery_fsm              │      ▼
                                                         ptrans_kernel (reads DDR)
 MAC TX ◄── tx_framer ◄── confirm_gen (0x80AB, 0x80DB)                    │
                      ◄── async FIFO ◄── discovery_kernel (0x80EF)        ▼
                      ◄── async FIFO ◄── result_kernel (0x80CB) ◄── transposed data
```

The top module `saf_shell` uses four clocks:

| Clock        | What runs on it |
|--------------|-----------------|
| `rx_clk`     | the MAC receive stream and the packet analyzer |
| `clk`        | the shell logic (PR, kernel-control and DDR logic, auto-discovery, confirmations) and the transmit stream |
| `pr_clk`     | the PR controller and its PCIe/Ethernet multiplexer |
| `kernel_clk` | the kernel interface, the kernels and the DDR port |

Data crosses between clocks in three ways:

- The three receive FIFOs are dual-clock FIFOs.
- The PR, kernel and DDR paths each go through a write-only Avalon-MM
  clock-crossing bridge.
- The kernels reach the transmitter through small dual-clock FIFOs.

The FIFOs and bridges appear in the publication. Which block sits on which
clock is this implementation's choice. All domains share one asynchronous
active-low reset, `rst_n`. Release it while every clock is running.

`async_fifo` (Gray-coded pointers, two-flop synchronisers) is the only
clock-crossing primitive. The bridges and transmit queues are built on it. The
analyzer's packet-seen signal and the PR controller's done signal each cross
as a toggle through two flip-flops. The learned host MAC crosses from `rx_clk`
to `clk` with no synchroniser. This is safe because it is written when a frame
arrives and read only when a reply is framed, many cycles later.

## Receive path

`packet_analyzer` sees the frame as 64-bit Avalon-ST beats, first byte in bits
63:56:

- Beat 0 carries the destination MAC.
- Beat 1 carries the rest of the source MAC and the EtherType.
- The 14-byte header leaves the payload two bytes off the beat grid. So each
  later beat yields one payload word: the last two bytes of the previous beat
  followed by the first six of this beat.

Each stored word is a `fifo_word_t`: 64 data bits plus start-of-packet and
end-of-packet flags. The later blocks use these flags to find packet
boundaries. Types 0x80AA, 0x80CC and 0x80DD go to the PR, CMD and MEM FIFO.
Other types are seen but not stored. Every accepted frame, whatever its type,
flips `pkt_toggle`.

Raw Ethernet has no flow control, so `rx_ready` is always high. A word whose
FIFO is full is dropped and counted in `rx_drop_cnt`. The host must pace its
frames, as the publication's host does. Each FIFO holds 512 words
(`FIFO_DEPTH_LOG2 = 9`), which is more than two maximum-size frames.

## Auto-discovery

`auto_discovery_fsm` has four states: IDLE (link down), WAIT_PKT, LAUNCH and
DONE. After `link_up` rises, the first accepted frame of any type moves it to
LAUNCH. In LAUNCH it presents one kernel write, "start kernel 0", until that
write is accepted. The write shares the kernel port with `kernel_ctrl_logic`
and takes priority.

Kernel 0 is `discovery_kernel`, which then emits the three-word 0x80EF payload.
The FSM stays in DONE until the link drops. Plugging the board into another
switch port therefore announces it again. Waiting for a received frame, rather
than sending at once, means the board knows a host MAC to reply to.

## Reconfiguration path

`pr_logic` turns each 64-bit bitstream word into two 32-bit writes, upper half
first. The writes pass through the bridge to `pr_ip_interface`.
`pr_ip_interface` is the wrapper around the PR controller that the publication
describes:

- PCIe is selected by default.
- Ethernet is selected only when it has data and `pcie_busy` is low.
- Ethernet keeps the selection until the controller raises `pr_done`, and the
  multiplexer then returns to PCIe.
- The side that is not selected sees waitrequest, so neither side loses a
  word.

The end of the bitstream is whatever the PR controller decides. The shell does
not count words. The done event crosses back to `clk`, and `confirm_gen` sends
0x80AB.

## Kernel command path

`kernel_ctrl_logic` pops CMD FIFO words and turns each into one Avalon-MM write
of `{addr, data}`. A write that waitrequest stalls keeps its source (FIFO or
discovery FSM) until it is accepted. `kernel_interface` decodes the writes as
described under "The protocol" and produces one-cycle `start` pulses and
argument registers.

## DDR path

`ddr_logic` reads the header word of each 0x80DD packet, then packs the data
words eight to a line. It writes a line when the line is full or when the
packet ends. A partial last line is written with byte enables for its valid
words only. When the packet's last line has been handed to the DDR bridge, it
pulses `kin_done`, and `confirm_gen` sends 0x80DB.

The bridge delivers writes in order, and the kernel reads through the same
port. A kernel started after the acknowledgement therefore sees the data.
`ddr_interface` shares the single 512-bit memory port between these writes
and the kernel's reads. When both want the port they take turns
(round-robin), and a stalled command keeps its grant until accepted.

## Role kernels

- **`discovery_kernel`** is started through the kernel interface. It sends the
  discovery payload once per start. A start that arrives during a send is
  remembered.
- **`result_kernel`** is free-running. It tags application output words as
  0x80CB and closes a frame after 180 words (1440 bytes, inside a 1500-byte
  MTU) or at the application's last word.
- **`ptrans_kernel`** transposes an N x N matrix of 32-bit elements stored
  row-major from `src_line`, sixteen elements per line. It emits the transpose
  row by row, two elements per word, the earlier element in the upper half.
  It issues one line read per element, which is slow but simple: about
  N² x (read latency + 2) kernel cycles. N*N must be even.

## Transmit path

`tx_framer` serves three sources round-robin, one whole packet at a time: the
confirmations, the discovery queue and the result queue. It builds the header
from the learned host MAC, the board's MAC 0 and the packet type, then realigns
the payload by two bytes:

| Beat | Content | Flags |
|------|---------|-------|
| 0 | `{host_mac, my_mac[47:32]}` | sop |
| 1 | `{my_mac[31:0], type, word0[63:48]}` | |
| k+2 | `{word k[47:0], word k+1[63:48]}` | |
| last | `{last word[47:0], 16'h0}` | eop, empty = 2 |

The frame stalls, with valid low, while its source has no word ready.

## Parameters

| Parameter | Default | Origin |
|-----------|---------|--------|
| Payload word / Ethernet stream width | 64 bits | publication |
| DDR line width | 512 bits | publication |
| Packet-type codes | table above | publication |
| Vendor, product, subsystem IDs | 0x1172, 0x2494, 0x198A, 0x3852 | publication |
| `FIFO_DEPTH_LOG2` (receive FIFOs) | 9 (512 words) | own choice |
| `DDR_AW` (line address) | 26 (4 GiB, one DDR bank) | own choice |
| `ARG_REGION_LOG2` | 22 lines per kernel argument | own choice |
| `WORDS_PER_PKT` (result frames) | 180 | own choice |
| PR data port | 32 bits | own choice |
| Kernel command address/data | 32/32 bits | own choice |
| Bridge and transmit-queue depths | 16 | own choice |

## External interfaces

The top module's ports connect to parts that are not in this RTL:

- **Ethernet MAC/PHY:** Avalon-ST, 64 bits, with sop, eop and empty.
- **PR controller:** a write-only Avalon-MM data port and a `pr_done` input.
- **PCIe bitstream channel:** a write port and `pcie_busy`.
- **DDR memory controller:** 512-bit Avalon-MM with `readdatavalid`.

The board's two MAC addresses and `link_up` are inputs. The testbenches contain
behavioural models of the PR controller, the PCIe channel, the memory and the
remote host.

## Departures and assumptions

- **Where the packet type sits.** The type is carried in the EtherType. The
  publication's discovery figure numbers the payload from byte 22. This
  implementation reads that as counting the 8-byte preamble, so the first
  payload row follows the EtherType directly.
- **Who sends 0x80DB.** The publication has the kernel interface send the
  input-data acknowledgement "after reading the input data". Here the shell
  sends it once the packet's data has been handed to the in-order DDR path.
- **Vendor IP.** The publication instantiates vendor FIFOs and vendor Avalon
  clock-crossing bridges. These are replaced by `async_fifo` and a write-only
  bridge (`mm_cc_bridge`), because the shell only writes across the crossings.
- **Kernels in RTL.** The control and application kernels are OpenCL kernels
  in the publication. Here they are RTL. The HPCC PTRANS kernel itself (a
  blocked, pipelined transpose-and-add) is not reproduced: `ptrans_kernel` only
  transposes, as the publication describes the benchmark.
- **Application kernels.** The shell diagram shows two application-kernel
  slots. One is built.
- **Number of logic blocks.** The publication says four logic blocks are added
  to the Ethernet interface but names five: packet analyzer, auto-discovery
  FSM, PR logic, kernel control logic and DDR logic. All five are built.
- **Own choices.** Destination-MAC filtering, learning the host MAC, the
  header and command word formats, the kernel register map, the TX framing and
  arbitration, and the confirmation payloads are all this implementation's
  choices.
- **No reliable delivery.** There is no retransmission and no bitstream
  encryption. Lost frames are the host's problem, as in the publication.

## Against the evaluated workloads

- **Bitstream size.** A 97.4 MB partial bitstream is streamed through the
  512-word PR FIFO and never stored. The publication's 17.76 s programming time
  is about 44 Mb/s, well within the PR path.
- **Broadcast programming.** Reconfiguring 20 boards at once needs only that
  each accepts broadcast frames. `tb_saf_cluster` runs this with three boards
  that take one stream.
- **PTRANS, read as 32,768 elements.** 32,768 32-bit elements are 2,048 DDR
  lines, far inside one argument region. The square kernel needs N x N
  elements, so it runs e.g. 128x128 or 181x181.
- **PTRANS, read as a 32,768 x 32,768 matrix.** This would need 4 GiB, the
  whole address space of the one DDR port built, so it does not fit a single
  board in this configuration.
- **Multi-board PTRANS.** The kernel has no block offsets for splitting a
  matrix across boards, so the host divides the matrix. Board (p,q) receives
  block A[q][p] and returns block (p,q) of the transpose. `tb_saf_cluster`
  transposes a 48x48 matrix this way on four boards. One broadcast command
  packet starts all four kernels together.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and stops itself with a watchdog if the design hangs. To build and run one
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_saf_shell rtl/saf_pkg.sv tb/tb_saf_shell.sv
./obj_dir/Vtb_saf_shell
```

Replace `tb_saf_shell` with any other `tb_<block>` to test one block.

The blocks that drive a bus carry SVA assertions for its handshake rule:

- a write or read held off by Avalon-MM waitrequest keeps its command
  unchanged;
- a stream word that is not taken stays on the bus unchanged;
- the Gray-coded FIFO pointers change by at most one bit per clock.

`--assert` turns them on.
`tb_saf_shell` runs the top at its default parameters in a few seconds. It
plays the host through discovery, a broadcast PR while PCIe first holds the
channel, a frame for another board, two matrix packets plus a partial-line
packet, the kernel commands, a 24x24 transpose returned in two result frames,
and finally a receive-FIFO overflow. It checks the data at every step and
counts each of these events.

The block testbenches cover the corner cases:

- FIFO full and empty across clocks;
- realignment, filtering and drops in the analyzer;
- the multiplexer's PCIe priority;
- stalled-write stability;
- partial DDR lines;
- round-robin order on transmit;
- the transpose under random memory stalls.

`tb_saf_cluster` puts four full-size shells behind a model switch that floods
each host frame to every plugged-in board. It then runs these steps:

- discovery of three boards by one broadcast frame;
- their simultaneous reconfiguration by one broadcast bitstream;
- hot-plug of a fourth board, which is discovered alone and programmed by
  unicast;
- the four-board block transpose described above.

It takes a few seconds.

The shared check, finish and watchdog code is in `tb/tb_common.svh`.
