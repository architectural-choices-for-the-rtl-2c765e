# NGA: the node chip of a 16,384-node lattice QCD machine

The Columbia 0.8 Teraflops machine was built for lattice QCD. It joins 16,384 small nodes
into a 16 x 16 x 16 x 4 four-dimensional mesh of bit-serial wires. A node is three parts:
a TMS320C30 DSP, which does one floating-point multiply-accumulate per 25 MHz cycle; a bank
of DRAM; and one custom gate array, the **Node Gate Array (NGA)**. The NGA holds everything
that turns a processor and some memory into a node of a parallel machine:

* the controller for the serial network, which can add, take the maximum of, or broadcast
  a word *while it passes through the node*, one bit at a time;
* a 32-word prefetch buffer that lets the DSP read DRAM data with no wait states;
* the DRAM interface, with error correction and write-back of corrected words;
* the address decoding of the DSP bus and the arbitration of the single DRAM port.

This RTL is a SystemVerilog implementation of the NGA. The published description of the
chip gives its block diagram, what each block does and a few numbers. It does not give
the insides of any block, nor its protocols or register layouts. Those are this
implementation's own; the list in "Where this RTL departs from or adds to the original"
says exactly what was chosen.

## Block structure

```
                  DSP bus (strb, rw, addr[23:0], wdata/rdata[31:0], rdy)
                                   |
                        +----------+-----------+
                        |   dsp_io (decoder)   |
                        +--+-------+--------+--+
               registers   |       | DRAM   | entries + registers
                     +-----+--+    |        +---------+
     sin[7:0] ------>|  scu   |    |        | circ_buf|
     sout[7:0] <-----| 8 links|    |        | 32 words|
                     +----+---+    |        +----+----+
                     DMA  |        |             | prefetch
                        +-+--------+-------------+-+
                        | mem_arbiter (round robin)|   requesters: 0 DSP, 1 buffer, 2 SCU
                        +------------+-------------+
                                     |
                        +------------+-------------+
                        | dram_ctrl  (+ edc_encode,|
                        |             edc_decode)  |
                        +------------+-------------+
                                     |
                 DRAM: a[9:0], RAS, CAS, WE, OE, dq[38:0] (32 data + 7 EDC)
```

The five connections between the four large blocks are those of the original block
diagram: decoder-SCU, decoder-buffer, decoder-DRAM, SCU-DRAM and buffer-DRAM. The
arbiter is where the three paths into DRAM meet. The whole chip runs on one clock (the
DSP's 25 MHz cycle) with an active-low asynchronous reset.

| file | module | role |
|---|---|---|
| `rtl/nga_pkg.sv` | package | widths, request/response structs, register offsets, EDC encoder function |
| `rtl/nga.sv` | `nga` | top level: the chip |
| `rtl/dsp_io.sv` | `dsp_io` | DSP bus decoder and status registers |
| `rtl/scu.sv` | `scu` | serial communication unit: links with error recovery, global operations, DMA, registers |
| `rtl/scu_tx.sv`, `rtl/scu_rx.sv` | | one link's transmitter and receiver |
| `rtl/scu_combine.sv` | | bit-serial add / max / broadcast |
| `rtl/circ_buf.sv` | `circ_buf` | 32-word circular prefetch buffer |
| `rtl/mem_arbiter.sv` | `mem_arbiter` | round-robin DRAM arbiter |
| `rtl/dram_ctrl.sv` | `dram_ctrl` | DRAM cycles, EDC, scrubbing, refresh |
| `rtl/edc_encode.sv`, `rtl/edc_decode.sv` | | (39,32) SEC-DED code |

## Global operations on the serial network

This is the most important part of the chip. It is also the part whose behaviour is
least obvious from the code.

### Why the operations are done in the network

A conjugate gradient solver needs global dot products. Every node forms a partial sum,
and the partial sums of all 16,384 nodes have to be added and the total returned to
every node. The usual way sends a word to a neighbour, waits until all of it has
arrived, adds, and sends the result on. Each hop then costs a full word time. With 32-bit
words on a serial wire, the original designers estimated that global sums alone would
take up to 70% of the run time. Their remedy was to let the serial unit add (or take the
maximum, or just copy) *as the bits go by*. The partial sum then crosses a node with a
delay of one bit instead of one word.

### Links and frames

Each node has eight links: link `d` is dimension `d/2`, + sense for even `d` and - sense
for odd `d`. Every link has one transmit wire (`sout[d]`) and one receive wire (`sin[d]`).
A node's `sout[d]` is wired to the neighbour's `sin[d ^ 1]`, and the neighbour's
`sout[d ^ 1]` comes back on `sin[d]`, so every link is a pair of wires. Frames go at one
bit per clock, and the line idles at 0. There are three kinds:

```
  data     1 | 0 seq   | d0 d1 ... d31 | parity     36 bits, acknowledged
  global   1 | 1 0     | d0 d1 ... d31 | parity     36 bits, not acknowledged
  ack      1 | 1 1     | seq ok        | parity      6 bits
```

Data bits go least significant first by default. When the SCU's configuration bit is set
they go most significant first, which is the order the maximum needs. Parity is even
over the header and payload bits. Frames can follow each other with no idle bit in
between.

### Recovering from errors on the wires

Ordinary words (link registers and DMA) travel in data frames. Each link allows one
unacknowledged word at a time (stop and wait), with a one-bit sequence number.

* The receiver answers every data frame with an acknowledge on the return wire of the
  same link.
  * It answers **ok** when it takes the word. It also answers ok when the frame repeats a
    word it already took (same sequence bit); the repeat is then dropped.
  * It answers **not ok** when the parity is wrong (the parity error bit is set) or when
    its receive buffer is still full (the refused bit is set).
* The sender keeps the word until an ok acknowledge with the right sequence bit arrives.
  It sends the word again on a not-ok acknowledge. It also sends it again after 128
  cycles with no valid acknowledge, which covers a corrupted acknowledge. A counter
  records every resend.

A flipped bit on a wire therefore costs one resend, and a full receive buffer slows the
sender down instead of losing words. The price is throughput: with one word in flight,
a link carries one word per frame, acknowledge and turn-round, about 45 clocks, where an
unacknowledged stream would carry one per 36.

Words of global operations travel in global frames, which are not acknowledged. They are
combined and passed on while they arrive, so they cannot be held back for a retry. A
parity error in one sets the parity error bit; software must repeat the operation.
Recovery is also not guaranteed when a start or header bit is hit (a framing error).

### How a word is combined on the fly

`scu_rx` offers each data bit combinationally in the cycle it is on the wire (`bv`,
`bval`, `bidx`). When `scu_combine` is armed, it takes the bit, combines it with the same
bit of the local word and returns the result bit in that same cycle. The transmitters
selected by an output mask register that bit, so it is on the outgoing wire one clock
later:

| operation | bit order | state kept between bits | output bit |
|---|---|---|---|
| `OP_ADD` | LSB first | carry | `a ^ b ^ c` |
| `OP_MAX` | MSB first | equal / local larger / incoming larger | follow the larger word once they differ; at the sign bit a 0 wins |
| `OP_BCAST` | either | none | incoming bit |

The operands are 32-bit two's complement integers; the carry out of bit 31 is dropped.

### Example: a global sum round a ring of L nodes

1. Nodes 1 to L-1 write their partial sum to `CMB_LOC` and arm `OP_ADD` with input link
   1 (- sense) and output mask `0x01` (+ sense).
2. Node 0 writes its partial sum to `CMB_LOC`, then writes `0x01` to `CMB_SND`. This
   sends the word on link 0 as a global frame.
3. Each node adds its word into the passing frame. Node 0 reads the total from link 1
   after one frame time plus one clock per node: 36 + L cycles, against about 37·L for
   store-and-forward.
4. Node 0 sends the total out again the same way. Nodes 1 to L-1, armed with `OP_BCAST`, pass it on
   and each reads it from `CMB_RES`. The last node uses mask 0, so it does not send.

In four dimensions the same thing is done once per dimension. The software chooses the
order and the root node; the hardware only provides the per-node operation.

### Other SCU functions

* **Plain transfers.** Writing link register `d` sends a word. The write waits while the
  link still holds an unacknowledged word. Reading link register `d` takes the received
  word and waits until one has arrived. Each link has a one-word receive buffer. A data
  frame that arrives while the buffer is full is refused and resent later. A global
  frame that arrives then replaces the old word, and the overrun bit is set.
* **DMA.** One channel moves a block of `count` words between DRAM and a link: either
  from DRAM onto the link, or from the link into DRAM. While it runs, that link is closed
  to the DSP in that direction. DMA words travel in data frames, so they are protected
  by the same recovery.
* **Global operations and plain transfers.** While a global operation is armed, the SCU
  starts no frame on the links of its output mask, because the combined stream may begin
  in any cycle. Acknowledges held back this way make the other side resend after its
  timeout, so nothing is lost. A frame that is already leaving such a link when the
  operation is armed must end before the stream starts. Software ensures this by
  finishing plain transfers on those links before it arms a global operation.

SCU registers (word offsets inside the SCU window):

| offset | write | read |
|---|---|---|
| 0x00-0x07 | send on link d | receive from link d |
| 0x10 | clear error bits | {refused/overrun[31:24], parity error[23:16], tx busy[15:8], rx full[7:0]} |
| 0x11 | local word | local word |
| 0x12 | {mask[15:8], in link[6:4], op[1:0]}: arm (waits while armed) | settings |
| 0x13 | - | result (waits until complete) |
| 0x14 | DMA DRAM address | address |
| 0x15 | {count[31:16], send[8], link[2:0]}: start DMA | {busy[31], remaining[15:0]} |
| 0x16 | {mask[7:0]}: send `CMB_LOC` as a global frame on the links of the mask | links still to send |
| 0x17 | bit 0: MSB first | setting |
| 0x18 | - | number of resends since reset |

## The circular buffer

DRAM is slow next to the DSP. A read costs 5 cycles from idle and 7 back to back. The
32-word buffer is a pipeline stage between the two:

* Write `CB_ADDR` with a DRAM address. Then write `CB_CMD` with `{COUNT[13:8],
  START[4:0]}`. The buffer fetches COUNT words into entries START, START+1, ... The
  entries wrap from 31 back to 0, hence "circular". After the command, `CB_ADDR`
  advances by COUNT, so consecutive commands stream through memory.
* The DSP reads entry `i` at window address `0x8000_00 + i`. Each entry has a valid bit.
  A command clears the valid bits of the entries it will fill. Each bit is set again
  when its word arrives.
* With **protection on** (the reset state), a read of an invalid entry is held in wait
  states until the word arrives, and ends in the cycle after it does. With protection
  off (`CB_PROT` = 0), the read returns at once, whatever the entry holds.
* A command written while a prefetch is still running waits until that prefetch
  finishes.

An SU(3) colour matrix is 18 real numbers, so it fits with room to spare. A typical loop
is: prefetch the next matrix while computing with the current one, then read the next
one with no wait states.

## DRAM interface and error correction

The DRAM bus is 39 bits wide: 32 data bits and 7 check bits. The code is a Hamming code
over codeword positions 1-38, with check bits at positions 1, 2, 4, 8, 16 and 32 and data
bits in the remaining positions in order. An overall parity bit is added as bit 38. Bit
`p-1` of the bus holds position `p`. The decoder computes the syndrome (the XOR of the
positions of all set bits) and the overall parity:

* parity good and syndrome 0: no error;
* parity bad: single error at position `syndrome` (or in the parity bit itself),
  corrected;
* parity good and syndrome not 0: double error, flagged.

A corrected read is counted, and its address is kept. The corrected word is written back
before the next request is served, so a soft error is removed before a second one can
join it. A double error is counted and reported with the data (`rsp.uncorr`). The DSP
sees it as a sticky flag in the status registers.

DRAM timing uses the parameters `T_RCD`, `T_CAS` and `T_RP`, all 2 cycles by default:

```
cycle   0      1..T_RCD     T_RCD+1 .. T_RCD+T_CAS    then T_RP cycles
        accept RAS low,     CAS low, column address;   RAS, CAS high
               row address  WE low for a write        (done pulses in the
                            (early write); read data   first of these)
                            sampled in the last cycle
```

A CAS-before-RAS refresh runs every `REF_INT` = 390 cycles (15.6 us at 25 MHz). It goes
ahead of any waiting request.

The node takes either 256k x 16 or 512k x 8 parts. The 19-bit word address is split
into a 10-bit row (`addr[18:9]`) and a 9-bit column (`addr[8:0]`) on ten address pins.
512k x 8 parts have 1024 rows and use all of it. 256k x 16 parts have 512 rows and leave
the top pin unconnected, so the upper 256k addresses alias the lower ones and software
uses only 256k words. Refresh needs no address, so it is the same for both.

## DSP bus and address map

The bus is a simplified TMS320C30 external bus. The DSP raises `strb` with `rw` (1 =
read), `addr` and `wdata`, and holds them until a cycle with `rdy` high. `rdy` may be high
in the first cycle (zero wait states).

| DSP address | target |
|---|---|
| 0x000000-0x7FFFFF | DRAM, word address `addr[18:0]` (higher bits ignored) |
| 0x8000xx | circular buffer entry xx |
| 0x8001xx | circular buffer registers (0 address, 1 command/status, 2 protection) |
| 0x8002xx | SCU registers |
| 0x8003xx | status: 0 corrected errors, 1 double errors, 2 last error address, 3 flags {uncorrectable read[1], unmapped access[0]} (write 3 to clear) |
| other | completes at once, reads 0, sets the unmapped flag |

## Where this RTL departs from or adds to the original

These come from the original description: the block structure and its connections; the
eight serial links; on-the-fly add, max and broadcast; the 32-word buffer with prefetch,
zero-wait reads and switchable protection; the 39-bit bus with 7 EDC bits; 256k x 16 or
512k x 8 DRAM parts; DRAM error recovery; memory arbitration.

Everything else is this implementation's choice:

* **Serial protocol:** frame format, parity, one bit per clock and the bit-order switch.
* **Recovery from serial errors:** the original says the NGA recovers from errors on the
  serial wires, but gives no mechanism. The stop-and-wait protocol with acknowledges,
  timeout and resend is this implementation's. It does not cover global-operation frames
  or framing errors (see above).
* **Floating point:** global operations work on 32-bit integers. The original does not
  say how floating-point values are summed. The DSP's own format is floating point.
* **DRAM:** the EDC code, write-back scrubbing, strobe timing, refresh and the row and
  column split of the address.
* **Arbitration:** the arbiter policy (round robin).
* **Programming model:** the address map, all register layouts, the DMA channel, and
  buffer addressing by entry index.
* **Buffer direction:** the buffer only prefetches from DRAM to the DSP. No write path
  through it is described, so none is built.

## Simulation

The testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M` and ends.
`tb/dram_model.sv` is a behavioural DRAM (RAS/CAS, refresh counting, bit-flip
injection). `tb/mem_fake.sv` is a simple memory behind the internal request port. To run
one testbench with Verilator:

```
verilator --binary --timing --assert --top-module tb_nga -y rtl -y tb +libext+.sv \
          -Irtl -Itb rtl/nga_pkg.sv tb/tb_nga.sv
./obj_dir/Vtb_nga
```

| testbench | what it shows |
|---|---|
| `tb_nga` | four chips with their DRAMs in a ring, all parameters at their defaults. A global dot product: vectors written through EDC, prefetched through the buffer, summed on the fly round the ring and broadcast back. Also an 18-word matrix read with zero wait states, global max, DMA between two nodes' DRAMs, single and double DRAM errors, unprotected reads, DRAM contention, refresh, a word above the first 256k, a word refused by a full neighbour and resent, and a wire error repaired by a resend. Each mechanism is counted and must occur. |
| `tb_cg_step` | the communication and reduction of one conjugate gradient update on four chips: a 64-site periodic lattice, boundary exchange in both directions at once (DMA one way, register transfers the other, so data and acknowledges share every wire), A p through the circular buffer, two global sums with broadcast, and the x and r updates, all against a reference. Prints the cycles of each phase (about 750 for the exchange of 16 + 1 words per node, 190 for the two sums). |
| `tb_scu` | four SCUs in a ring: neighbour transfer timing, sum latency (at most 36 + nodes + 3 cycles), broadcast, max, DMA, refusal and resend when the receiver is full, a wire error in a data frame (resent, delivered intact), a corrupted acknowledge (resent after the timeout, duplicate dropped), resend counter |
| `tb_scu_tx`, `tb_scu_rx` | data, global and acknowledge frames bit by bit in both orders; back-to-back frames; stream forwarding delay; parity |
| `tb_scu_combine` | every output bit of add, max (sign and tie cases) and broadcast against reference values |
| `tb_circ_buf` | prefetch contents, wrap-around, protected wait time, zero-wait reads, address advance, command wait, protection off |
| `tb_dram_ctrl` | stored codewords against a reference encoder; latency 5 from idle and cycle 7 back to back; correction, write-back and count of every single-bit position; double errors; refresh rate |
| `tb_edc_decode` | clean, every single-bit and random double-bit errors on random words |
| `tb_mem_arbiter` | routing of responses, grant held until done, strict rotation under full load |
| `tb_dsp_io` | every address region, wait-state pass-through, status and sticky flags |

The whole-machine configuration (16,384 nodes) and the DSP itself are not simulated; the
testbenches play the DSP by driving its bus.
