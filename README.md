# Coherent programmed I/O: the device side in SystemVerilog

A CPU usually talks to a fast device in one of two ways. It can write
descriptors and let the device fetch data by DMA, which costs setup time and
round trips. Or it can use uncached loads and stores (programmed I/O), which
costs one slow bus transaction per word. A cache-coherent interconnect offers
a third way. Suppose the device is the *home* of some cache lines and takes
part in the coherence protocol for them. Then an ordinary store by the CPU
leaves data in the CPU's own cache, and an ordinary load of a device-homed
line becomes a request the device can act on. The device may also hold back
its answer until it has something to say. Data moves a whole 128-byte line at
a time. The CPU never spins on a status register: it simply stalls on a load,
the way it would on a cache miss.

This RTL implements the device end of that scheme. It does not sit on a
coherent link itself. It sits behind a directory controller that turns link
traffic into per-line messages, and it speaks those messages on four
valid/ready channels:

| channel | direction | messages |
|---|---|---|
| `req`  | CPU → device | **Load Shared**, **Load Exclusive** (line address) |
| `fwd`  | device → CPU | **Inv** (invalidate), **SInv** (downgrade to Shared) |
| `data` | CPU → device | **Data**: the CPU's copy of a line, in reply to Inv/SInv |
| `rsp`  | device → CPU | **ACK** or **ACK+Data**, granting Shared or Exclusive |

The device keeps no cache. It records only which lines the CPU may hold, and
it serves payload straight from, or into, its function units and packet
buffers. Three uses share the device through a router keyed on address bits
19:16:

* **region 0, invocation** (`pio_invoke`): call a function on the device
  with up to 64 KiB of arguments and get up to 64 KiB of results. The
  function is either a Block-RAM write-then-read (`accel_bram`) or a Bloom
  filter hash unit (`bloom_accel` around `bloom_hash`).
* **region 1, NIC receive** (`nic_rx_pio`): frames from an Ethernet MAC
  reach the CPU as cache lines.
* **region 2, NIC transmit** (`nic_tx_pio`): the CPU writes a frame into
  cache lines, and the device takes it to the MAC.

## The basic trick: two lines that swap roles

The simplest exchange uses two lines, A and B. Think of one as "to device"
and the other as "from device". At the start, the CPU holds B in Exclusive
and A is invalid in its cache.

1. Software stores its arguments into B. This happens silently in the CPU
   cache, and B becomes Modified.
2. Software loads A. The cache sends **Load Shared A**. The device reads this
   as "B now holds fresh arguments".
3. The device does not answer A yet. It sends **Inv B** and gets B's contents
   back as **Data**.
4. The device computes and answers the pending load of A with **ACK+Data**.
5. The load completes and software has the result in a register.

If A comes back in Shared, both sides end with A Shared. The software must
upgrade A (Load Exclusive, answered by a plain ACK) before storing into it.
The optimised form grants A in **Exclusive** instead. Then the pair is back
in its starting state with the roles swapped, and the next call uses A for
arguments and B for results. `cfg_grant_excl` selects between the two forms.

Two other variants reuse the pieces:

* **write only**: Load Exclusive, SInv, Data, ACK. The CPU keeps a Shared
  copy.
* **read only**: Load Shared, Inv, Data, ACK+Data.

The NIC uses these.

What makes this different from ordinary coherence is the coupling. A request
for one line is taken as a statement about another, and the device may delay
a response for as long as it likes. Neither is visible to the CPU.

## Invocation with many lines (`pio_invoke`)

One line per call is too small. The endpoint therefore keeps **two groups of
n lines** (n ≤ `MAX_LINES` = 512, i.e. 64 KiB). Line *i* of group *g* sits
at region offset `{g, i}`. A round goes like this:

* The software writes arguments into the group it owns (the *payload group*,
  `p`). It then issues loads, in practice prefetches, of all n lines of the
  other group.
* The first Load Shared into group `!p` starts the round. The endpoint sends
  Inv for all n payload lines back to back, without waiting between them.
  As each Data returns, it hands that line to the function unit as argument
  `idx`.
* When all n arguments are in, it pulses `fu_start`. Once `fu_done` is high,
  it answers every pending result request with ACK+Data from `res_data[idx]`.
  Requests that arrive later get their answer at once.
* After n results, `fu_ack` is pulsed and the groups swap.

The CPU may issue its prefetches in any order, and the directory may return
Data replies in any order. Neither is assumed. The endpoint keeps per-line
bits ("argument arrived", "request pending", "answered") and counts them, so
a round ends by counting, not by sequence. Requests that come before their
result is ready wait in a FIFO of line indices.

A Load Exclusive into the payload group is an upgrade of a line the CPU holds
Shared. So is a first-time acquisition by software. It is answered at once
with an ACK that grants E. Any other combination sets the sticky `proto_err`.

### "Not ready yet"

A core whose load is blocked for too long takes a machine check. The
`nack_timer` measures how long the oldest request of a round has waited. At
`cfg_timeout` cycles, the endpoint answers every pending request with a line
whose first 64-bit word is `"NOTREADY"` (0x5944414552544F4E). It also swaps
the groups as if the round had ended. The software's response is to request
the lines of the other group, as it would for the next call. That request
starts a *retry* round: the endpoint invalidates the payload lines again but
discards their data, because it already holds the arguments. It then returns
the result of the first call as soon as it is ready. The call can thus take
any length of time without the core spinning and without a bus timeout.

## NIC lines: control plus overflow

Frames are one-directional, so each NIC direction uses one *pair of control
lines* (offsets 0 and 1) and `OVF_LINES` = 75 *overflow lines* (offsets
0x100 + j). The layout of a control line is this design's choice:

```
byte 0..7    header: bit 16 = valid, bits 15:0 = frame length in bytes
byte 8..127  first 120 bytes of the frame
overflow j   frame bytes 120 + 128*j ..
```

A 9600-byte jumbo frame therefore takes one control line plus 75 overflow
lines. Each packet-SRAM slot holds the same image: 76 lines, header
included.

**Receive (`nic_rx_pio`).** The CPU loads control line `c`. The device then
does four things in turn:

* It invalidates the other control line, and every overflow line the CPU
  might still hold, all at once.
* Once those Data replies are in, nothing of the previous frame is left in
  the CPU cache, so it frees that frame's slot.
* It waits for a frame descriptor from `axis_rx_dma`.
* It answers with the control line, read from the packet SRAM.

The CPU then loads only the overflow lines it needs, and each is answered
with ACK+Data from the slot. If no frame arrives within `cfg_rx_timeout`
cycles, the control load is answered with `valid` = 0. This is the receive
form of "not ready yet", and the CPU simply loads the other control line
next.

**Transmit (`nic_tx_pio`).** The CPU works through three steps:

1. It owns one control line in Exclusive (the *payload line*) and writes the
   header and first bytes into it.
2. It acquires and writes the overflow lines it needs.
3. It issues **Load Exclusive** of the other control line. This is the
   *doorbell*.

The device then waits for a free slot and fetches every line the CPU may
have written, by SInv. The CPU keeps Shared copies, so the device never has
to send unchanged data back. The device writes the lines into the slot,
queues the frame for `axis_tx_dma`, and acknowledges the doorbell. The
doorbell line is granted E, and it becomes the next payload line.

Overflow lines the CPU already holds Shared are upgraded with a data-less
ACK; lines it has never seen come with data. While every slot is waiting for
the MAC, the doorbell is simply not answered (`tx_slot_stall`). The CPU
stalls on the load, which is how back-pressure reaches software.

## Packet SRAM and the stream movers

`pkt_sram` holds `SLOTS` × `SLOT_LINES` = 4 × 76 lines per direction. It has
two 512-bit banks with half-line write enables, and its registered read holds
until the next read.

The MAC side uses a 512-bit AXI-Stream. The 8-byte header means each 64-byte
beat straddles a half-line boundary.

* `axis_rx_dma` writes the low 56 bytes of a beat with the 8 bytes carried
  from the previous beat. It writes the header into half 0 of the first line
  last, once the length is known.
* `axis_tx_dma` does the reverse shift. It sends one beat per cycle and
  frees the slot on the last beat.
* When all RX slots are full, `rx_tready` drops.

## Bloom filter offload (`bloom_hash`, `bloom_accel`)

Each element is 128 bytes, one cache line. The unit computes **k = 8**
64-bit hashes of it and returns them as the 8 words of a result line. Each
hash function j starts from its own seed,

    h0_j = (0x9E3779B97F4A7C15 · (j+1)) XOR 0xC2B2AE3D27D4EB4F

and takes one byte at a time:

    h ← h XOR ((h << 5) + (h >> 2) + byte)

Only the shape of these functions (shift, add, XOR, byte at a time) comes
from the source description. The seeds and shift amounts are this design's.

The pipeline takes **two bytes per stage (unroll 2)**, so the 128 bytes need
**64 stages**, and the latency is 64 cycles. A line arrives as two 512-bit
beats. Each stage register holds a whole element, its tag and 8 partial
hashes. A new element can therefore enter every **2 cycles**, which matches a
512-bit bus carrying one 128-byte line per two cycles. `bloom_accel` feeds
argument lines as beat pairs and collects the tagged results into a result
memory. It signals done when all n are back.

## Top level (`eci_pio_top`)

```
            up_req/up_fwd/up_data/up_rsp
                         |
                    coh_router  (addr[19:16])
          +--------------+-----------------+
     pio_invoke      nic_rx_pio        nic_tx_pio
      |      |          |  ^               |
 accel_bram bloom_accel pkt_sram      pkt_sram
             |          ^                   |
         bloom_hash  axis_rx_dma       axis_tx_dma
                        ^                   |
                     rx_t* (MAC)        tx_t* (MAC)
```

The router sends CPU messages to an endpoint by region. It merges the
endpoints' `fwd` and `rsp` outputs round-robin, and holds a choice while the
channel is stalled. A message to an unmapped region is dropped and flagged on
`unmapped`.

The top's ports fall into four groups:

* the message channels, where the directory controller connects;
* the two MAC streams;
* the run-time configuration: `cfg_n_lines`, `cfg_grant_excl`,
  `cfg_func_sel`, and the two timeouts;
* status pulses and flags.

Everything runs on one clock. The paper's FPGA ran at about 300 MHz and its
NIC logic at 250 MHz. Here there is no clock crossing, and the MAC is
assumed to share the clock.

## How far this follows the source design

The following come from the description:

* the message sequences of the three protocol variants;
* the grouping into two sets of n lines;
* the not-ready state machine;
* control and overflow lines, invalidated in parallel;
* the sizes: 128-byte lines, 64 KiB calls, 9600-byte frames, k = 8, unroll
  2, 64-cycle latency, II = 2, and a 512-bit bus.

The following are this design's own choices:

* the address map and the header format;
* the "NOTREADY" word and the retry rule;
* slot count and layout;
* the hash functions' constants;
* the function-unit interface;
* the channel split;
* the single clock.

The following are not here:

* the directory controller and link layer;
* the CPU;
* the Ethernet MAC, its PCS and the optics;
* the synthetic dataflow filter operators that used the invocation path (the
  filter predicate is not known);
* the PCIe-based baselines the design was compared with. These are not part
  of it.

The separate FPGA images of the original (NIC, accelerator) are combined here
behind one router. The NIC transmit side has no timeout. Its only wait is for
a free slot, which ends when the MAC drains.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. The coherence-side tests
use `coh_cpu_bfm`, a model of the CPU cache. It returns Data replies in random
order and with random delays, stalls every channel at random, tracks which
lines it holds, and counts any downgrade of a line it never held.

| testbench | what it checks |
|---|---|
| `tb_nack_timer` | fire exactly in the limit-th running cycle; pause holds; clear |
| `tb_accel_bram` | write-then-read of 512 lines in random order |
| `tb_bloom_hash` | hashes against a byte-serial reference; 64-cycle latency; one element per 2 cycles sustained |
| `tb_pkt_sram` | half and whole line writes, read hold |
| `tb_axis_rx_dma`, `tb_axis_tx_dma` | 1 to 9600-byte frames, byte for byte; beat timing; back-pressure |
| `tb_pio_invoke` | rounds of 1 to 64 lines; E and S return with upgrades; Inv count per round; timeout and retry |
| `tb_nic_rx_pio`, `tb_nic_tx_pio` | frames to 9600 bytes through control and overflow lines; RX timeout; TX slot stall |
| `tb_eci_pio_top` | all of the above end to end at the default sizes |

`tb_eci_pio_top` runs the full design with no parameter overrides:

* Block-RAM calls of every power of two from 1 to 512 lines (64 KiB), with
  Exclusive return, and a 3-line call with Shared return and upgrades;
* exactly one Inv per payload line in every round;
* Bloom calls of 1 to 64 elements (128 B to 8 KiB batches), and one that
  times out and is completed by a retry;
* 64, 1536 and 9600-byte frames in each direction;
* an RX timeout;
* RX back-pressure from five queued frames;
* a TX doorbell stall while the MAC holds `tready` low.

It counts each of these mechanisms and fails if any never occurred. It takes
a few seconds in verilator.

To simulate one testbench:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/eci_pio_pkg.sv tb/tb_eci_pio_top.sv --top-module tb_eci_pio_top \
    -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

Every module parameter has a default equal to the size above. The leaf
testbenches override sizes only where a smaller memory keeps them short
(`tb_pio_invoke` uses 64 lines).

Verilator warns that `rst_n` is used both synchronously and in the `disable
iff` of the handshake assertions. That use is intended: the assertions are
off during reset. A few signals are also reported as partly unused, such as
the unused high bits of a length. Neither is a circuit problem.
