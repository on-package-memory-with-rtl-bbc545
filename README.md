# UCIe-Memory: CXL.Mem over a symmetric UCIe link, in SystemVerilog

A processor die (SoC) and a memory stack sit side by side in one package. Instead of a
DRAM interface (LPDDR or HBM) between them, the memory stack's base ("logic") die holds the
memory controller, and the two dies talk over a UCIe die-to-die link. The SoC sends read
and write requests; the logic die answers with read data and write completions. The link
carries these as CXL.Mem messages packed into 256-byte flits. A flit layout tuned for
memory traffic lets more data through per flit than plain CXL.Mem does.

This RTL implements the digital part of that link for both dies. It covers the memory
protocol layer (flit packing and unpacking, credits), the die-to-die adapter (flit header,
CRC, link-level retry), the logical PHY (lane mapping, scrambling) and the per-lane
serializer and deserializer with their clock-crossing FIFOs. Defaults are the x64 "advanced
package" module: 64 data lanes per direction at 32 GT/s, and a 2 GHz logic clock. Each
logic clock moves one 128-byte beat, so a 256-byte flit takes two clocks.

```
 SoC die                                                  memory logic die
 requests ──► pack ─► d2d_tx ─► logphy_tx ─► lane_tx x64 ══► lane_rx x64 ─► logphy_rx ─► d2d_rx ─► unpack ──► memory controller
 responses ◄─ unpack ◄─ d2d_rx ◄─ logphy_rx ◄─ lane_rx x64 ◄══ lane_tx x64 ◄─ logphy_tx ◄─ d2d_tx ◄─ pack ◄── memory controller
             (credits and acks ride back in the flits going the other way)
```

## The flit

Every flit is 256 bytes. Byte `i` of a flit is bits `[8i+7:8i]` of the 2048-bit vector.

| bytes    | field   | use                                                              |
|----------|---------|------------------------------------------------------------------|
| 0..239   | G-slots 0..14, 16 bytes each | headers or 16-byte chunks of a 64-byte line |
| 240..249 | HS-slot, 10 bytes | headers only                                            |
| 250..251 | HDR     | protocol id of the *next* flit, sequence number, ack/nak          |
| 252..253 | Credit  | number of receive-queue entries the sender has freed             |
| 254..255 | CRC     | CRC-16 over bytes 0..253                                          |

**Headers** (`ucie_mem_pkg`). A request is 62 bits: command 3, meta 4, tag 8, address 46
and poison 1. A response is 16 bits: command 3, meta 4, tag 8 and poison 1. The field
widths come from the optimized CXL.Mem command layout. The field order and the encodings
are this design's own: MemRd = 1 and MemWr = 2 for requests; MemData = 1 and Cmp = 2 for
responses. A slot holds one request or four responses. A 10-byte HS-slot therefore also
holds one request (62 + 1 valid bit) or four responses (4 x 16 + 4 valid bits).

**Header slots.** Bits `[HPS-1:0]` of a header slot are valid bits. HPS is 1 for
requests and 4 for responses. Header `k` sits at bit `HPS + k*HDR_W`. A slot with no valid
bit set is empty.

**Data slots.** Only MemWr and MemData headers carry a line. Once such a header is in a
flit, its line's four 16-byte chunks take the next G-slots, chunk 0 first. When several
headers owe data, their lines follow in header order. The slots are walked in a fixed
order: G0 to G14, then the HS-slot. The HS-slot never carries data. While any header
still owes data, the next G-slot is a data slot. Otherwise the next G-slot is a header
slot. A line can continue into the next flit. The receiver does the same walk, so no slot
needs a type field. The packer (`cxlmem_flit_pack`) and the unpacker
(`cxlmem_flit_unpack`) each do this walk in one clock.

Example (requests): three MemWr and one MemRd are queued, and the flit starts empty.
- G0 holds the first write's header and G1..G4 hold its line.
- G5..G9 and G10..G14 do the same for the second and third writes.
- The read's header goes into the HS-slot.

**Credits.** A transaction (a header plus its line, if any) uses one credit. Each packer
starts with 16 credits, which is the size of the far unpacker's queue. It sends no header
without a credit. When the unpacker hands a transaction on, the entry is freed. The local
packer then reports it in the Credit field of its next flit. If the packer has no
transaction to send, it sends a flit holding only the credit. A header waiting for a
credit holds back the headers behind it. Data already owed is still sent.

## The die-to-die adapter

**Flit header.** `{prot_next[1:0], seq[5:0], ack_valid, nak, ack_seq[5:0]}`. The receiver
does not get each flit's protocol from the flit itself. After reset it assumes NOP (it is
"parked" at NOP). It then applies the `prot_next` field of each intact flit to the flit
that follows. This is the mechanism that frees the HDR bytes from the first slot.
It has consequences the transmitter (`d2d_tx`) must respect:

- The type of a flit is fixed while the previous flit's last beat leaves. If a replay or a
  new flit is ready then, the next flit is announced as CXL.Mem. Otherwise it is
  announced as NOP.
- If NOP was announced and work then arrives, one NOP flit that announces CXL.Mem goes
  first. This NOP flit costs two clocks. It is also the first flit after reset.
- A flit announced as CXL.Mem is always sent (an assertion checks this).
- NOP flits carry acks when there is nothing else to send. They take no sequence number.
  Their sequence field repeats the last number used, so a receiver that wrongly took one
  for data would drop it as a duplicate.
- When there is nothing to send at all, the lanes idle and the valid lane stays low.

**CRC.** The CRC uses the polynomial x^16+x^15+x^14+x^13+x^12+x^6+x^4+x+1 (0x1F053),
preset to all ones. It covers bytes 0..253, byte 0 first and MSB first. `flit_crc16`
folds in one 128-byte beat per clock, so the transmitter and receiver each need one
instance.

**Retry.** Every CXL.Mem flit sent stays in `retry_buffer` under its 6-bit sequence
number until it is acknowledged.
- Each flit header reports the last sequence number received in order (a cumulative
  ack).
- A CRC error makes the receiver (`d2d_rx`) drop the flit, raise a nak and enter recovery.
  In recovery it drops every flit until the expected sequence number arrives intact.
- The nak tells the far transmitter to resend everything after the last good flit
  (go-back-N). Replays take priority over new flits.
- After a CRC error the receiver also parks its protocol id at NOP, because the damaged
  header's `prot_next` cannot be trusted. The next intact flit then re-establishes it.
- At most 16 flits can be unacknowledged (RB_DEPTH).

The policy is this design's own: go-back-N, cumulative acks, acks in every header, and
the depth of 16.

## Logical PHY and lanes

Each 128-byte beat is split over the 64 lanes. Lane `l` carries beat byte `l` in unit
intervals 0..7 and byte `64+l` in unit intervals 8..15, LSB first. Each lane word is
XORed with 16 bits of a per-lane LFSR (x^23+x^21+x^16+x^8+x^5+x^2+1). The seed of lane `l`
is `(0x1DBFBC ^ l*0x2F1A3) | 1`. The key for the next clock is computed in the clock
before, so the data path has only one XOR. Both ends advance their LFSRs only on beats
actually sent, so they stay in step without any training pattern.

`lane_tx` writes each word into a small asynchronous FIFO (8 words). A 16:1 multiplexer
running on the bit clock shifts it out, and the valid lane is high during every unit
interval of a word. `lane_rx` samples the lane on the forwarded clock and frames words
with the valid lane. It writes each word into its own asynchronous FIFO, which crosses
back into the receiver's logic clock. `logphy_rx` takes a beat only when all 64 lane
FIFOs hold a word. This absorbs lane-to-lane skew.

The bit clock is modelled with one edge per unit interval. A real 32 GT/s link clocks
both edges of a 16 GHz forwarded clock. The analog drivers, PLLs, tracking lane,
sideband, link training, lane repair, lane reversal and width degrade are not part of
this RTL. The link is taken to be up after reset.

## Timing

- Packing: a transaction accepted at clock edge *t* is in the flit register after *t*.
  The first beat of that flit leaves `d2d_tx` in the next clock. Unpacking also takes one
  clock.
- Adapter: a flit is two beats. `logphy_tx` registers each beat once. `d2d_rx` delivers
  a flit in the clock after its last beat, once the CRC has passed.
- Lanes: each direction crosses clock domains twice, through a two-flop-synchronized gray
  FIFO on each side. This makes up most of the latency.
- Measured: a read round trip takes 41 SoC clocks. This is from the request entering the
  SoC packer to the response leaving the SoC unpacker. It includes a memory-controller
  model that answers after 2 to 21 clocks. The published design quotes 2 ns
  (4 clocks) FDI-to-bump round trip plus 3 ns for packing and unpacking. This
  implementation is slower than that because of the synchronizer FIFOs.
- Throughput limits: two things keep this implementation below what the flit format
  allows. First, the packer accepts one transaction per clock, so at most two
  transactions enter each flit, while a flit can carry up to 3.75 lines (15 G-slots).
  Second, and tighter, is the credit loop. A request credit comes back only after the
  header has crossed the link, been unpacked and handed on, and its Credit field has
  crossed back. That loop is about 29 clocks, and there are 16 credits.
- Measured (`tb_ucie_mem_workloads`): 192 back-to-back transactions take 346 clocks for
  every mix tried (1R0W, 2R1W, 1R1W, 0R1W). That is about 0.55 transactions per clock.
  As a share of the format's limit for each mix this is 30%, 20%, 21% and 35%. The
  flit format itself is unchanged. The queue depth is a parameter (`QDEPTH`, which is
  also the credit count). With `QDEPTH=32` the same test takes 224 clocks, close to
  the one-per-clock input limit, at twice the queue storage. Widening the input to two transactions per
  clock would then remove that limit too.

## Files

| file | content |
|------|---------|
| `rtl/ucie_mem_pkg.sv` | flit geometry, header structs, command and protocol-id encodings, CRC step function |
| `rtl/cxlmem_flit_pack.sv`, `rtl/cxlmem_flit_unpack.sv` | memory protocol layer: slot walk, line reassembly, credits |
| `rtl/d2d_tx.sv`, `rtl/d2d_rx.sv`, `rtl/retry_buffer.sv`, `rtl/flit_crc16.sv` | die-to-die adapter |
| `rtl/logphy_tx.sv`, `rtl/logphy_rx.sv`, `rtl/lane_scrambler.sv` | logical PHY |
| `rtl/lane_tx.sv`, `rtl/lane_rx.sv`, `rtl/async_fifo.sv` | per-lane serializer/deserializer and clock-crossing FIFO |
| `rtl/ucie_mem_stack.sv` | one die's complete interface (both directions) |
| `rtl/ucie_mem_top.sv` | both dies; the serial lanes, the SoC and memory-controller ports and the clocks are ports |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_ucie_mem_top.sv` | end-to-end test at default size |
| `tb/tb_ucie_mem_workloads.sv` | sustained throughput per read/write mix at default size |

`ucie_mem_stack` is parameterized by what it sends and receives. On the SoC die it sends
requests and receives responses. On the memory die the roles are reversed.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. It also has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/ucie_mem_pkg.sv rtl/*.sv tb/tb_ucie_mem_top.sv \
          --top-module tb_ucie_mem_top -o sim && ./obj_dir/sim
```

Use `-Wno-MULTITOP` or list only the files a testbench needs, and put the package first.

The end-to-end test (`tb_ucie_mem_top`) runs the top with no parameter overrides: 64
lanes, 16 unit intervals per clock. A behavioural memory controller sits behind the logic
die, and a channel model between the dies can flip single bits. The test runs these
phases:
1. one read of unwritten memory;
2. 48 writes with bit errors injected in both directions;
3. 48 reads back, again with errors;
4. a mixed two-reads-per-write phase with random back-pressure, repeated until headers
   have used the HS-slot and a line has been split across flits;
5. bursts of 16 reads and 16 writes with no back-pressure and a bit error at the start of
   each. The replay holds the packer, so transactions queue up and then fill whole flits.

Every response is matched to its request by tag. The test also counts each mechanism and
fails if one never happened:
- CRC errors and replays in both directions;
- NOP flits;
- credit stalls;
- headers in the HS-slot;
- lines split across flits;
- idle gaps on the lanes.

It also reports how many HS-slots carried more than two responses. It does not
require any, because the credit-throttled response stream seldom backs up that far. The
packer's own test checks that case directly. The whole test simulates in well under a
second.

`tb_ucie_mem_workloads` measures sustained throughput for four read/write mixes, with no
back-pressure and no errors (see the timing notes above).

## Where this departs from the source design

- The flit layout, slot capacities (one request or four responses per slot) and the
  parked protocol-id rule are the published design. The bit positions inside slots and
  headers, the command encodings, the CRC polynomial, the scrambler polynomial and seeds,
  and the retry policy are choices made here.
- The published design protects the flit with one CRC over the whole flit. It mentions
  no FEC for this configuration, and none is built.
- Reads are forwarded to the memory controller only after the whole flit's CRC has
  passed. The published design suggests starting DRAM access as soon as the command
  arrives.
- The two-transaction-per-flit input limit and the slower lane clock crossing are
  described under Timing.
- Not built:
  - the asymmetric LPDDR6/HBM mappings, CHI and unoptimized CXL.Mem, which the source
    compares against;
  - link training and management, sideband, lane repair and reversal;
  - the analog front end and clocking;
  - the memory controller and DRAM themselves.
