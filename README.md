# A two-lane SSL/TLS security processor with a preferential cipher-suite selector

This design sits between a host computer and a network and encrypts
everything the host sends and decrypts everything the network returns. Its
main idea is that the crypto cores are not all present in the chip at once.
Seven encryption, three hash and three key-exchange algorithms exist only as
partial bitstreams in flash. A small selection unit ranks the 63 possible
cipher suites against a user budget of power, throughput and resource, and
only the chosen algorithms are loaded into a reconfigurable region of an FPGA.

Traffic is handled by two symmetric lanes that never share a bus:

```
           lane 1 (PE1): encrypt + hash                lane 2 (PE2): decrypt + check
 PCI in -> write DMA -> memory -> read DMA -> streamer -> engine 1 -> streamer -> write DMA -> memory -> read DMA -> Ethernet out
 Ethernet in -> write DMA -> memory -> read DMA -> streamer -> engine 2 -> streamer -> write DMA -> memory -> read DMA -> PCI out
```

Each lane is controlled by its own processor through a process synchronizer
(a flag register block) and two DMAs, so that up to three packets are in
flight in a lane at once. Both lanes keep their buffers in one
dual-port on-chip memory, one port each. The RTL here covers everything
between the processors, the interfaces and the crypto engines. The processors
(two ARM cores), the PCI and Ethernet interfaces, the crypto and key-exchange
cores, the configuration port (ICAP) and the flash are outside it and appear
as ports.

## The preferential algorithm (`esi_selector`)

This is the part that needs the most explanation, and the part whose inner
working follows a published algorithm step by step.

### The index

Each algorithm has a measured power P (mW), throughput T (Gbit/s) and
resource R (slices) on a Zynq 7z020:

| encryption | slices | power mW | Gbit/s |   | hash    | slices | power mW | Gbit/s |   | key exchange | slices | power mW | Gbit/s |
|-----------|-------:|------:|------:|---|---------|------:|----:|------:|---|---------|------:|-----:|------:|
| AES       | 11385 | 1183 | 1.067 |   | SHA-256 | 1385 | 176 | 0.735 |   | RSA     | 13910 | 1589 | 0.298 |
| RC4       | 5383  | 994  | 0.931 |   | SHA-512 | 2647 | 278 | 1.471 |   | DH_anon | 14012 | 1767 | 0.149 |
| Grain     | 237   | 99.7 | 0.116 |   | MD5     | 992  | 112 | 0.916 |   | DH_RSA  | 14789 | 1918 | 0.099 |
| Salsa     | 2839  | 107  | 3.725 |
| DES       | 456   | 103  | 7.45  |
| 3DES      | 1478  | 117  | 2.48  |
| IDEA      | 320   | 95   | 0.079 |

A suite's P, T and R are the sums of its three algorithms' values. Its
Efficient System Index is

    ESI = Wp (1 - P/Pmax) + Wt (T/Tmax) + Wr (1 - R/Rmax)

Pmax, Tmax and Rmax are the largest suite totals. Wp, Wt and Wr are the
user's weights; they normally sum to 1. The cut-off ESI_t is the same formula
with P, T and R replaced by their averages over all suites. A suite is
*eligible* when ESI_t <= ESI. There are four modes:

| mode | name                | weights                     |
|------|---------------------|-----------------------------|
| 0    | power priority      | Wp=1, Wt=0, Wr=0            |
| 1    | throughput priority | Wp=0, Wt=1, Wr=0            |
| 2    | resource priority   | Wp=0, Wt=0, Wr=1            |
| 3    | priority mode       | Wp, Wt, Wr from the inputs  |

### How the hardware computes it

The unit does this in two passes over the suites, in the order
encryption, hash, key exchange, one suite per clock:

1. **Pass 1** (63 cycles) adds up the three table rows of each suite and
   keeps the running sums and maxima of P, T and R.
2. **Scale** (1 cycle) forms the products Tmax·Rmax, Pmax·Rmax, Pmax·Tmax and
   the threshold.
3. **Pass 2** (63 cycles) forms each suite's score, compares it with the
   threshold and tracks the best and worst suite.

Both sides of the comparison are multiplied by N·Pmax·Tmax·Rmax·1000, with
N = 63 suites. This removes every division and makes the test exact in 64-bit
integers:

    score(c) = N·( Wp·(Pmax−P)·Tmax·Rmax + Wt·T·Pmax·Rmax + Wr·(Rmax−R)·Pmax·Tmax )
    thresh   =     Wp·(N·Pmax−ΣP)·Tmax·Rmax + Wt·ΣT·Pmax·Rmax + Wr·(N·Rmax−ΣR)·Pmax·Tmax
    eligible(c) = score(c) >= thresh

Weights are integers in thousandths (0.333 is 333). The tables live in
`nsp_pkg` as integers: power in units of 0.1 mW (so 99.7 mW is exact),
throughput in Mbit/s, resource in slices. The units cancel in the normalised
index. The widest intermediate value is about 62 bits.

Results: a 63-bit eligible mask (bit `enc*9 + hash*3 + kex`), the count, the
best and worst suite (the first one wins a tie), and `none_eligible`. A run
takes 128 cycles from `start` to `done`, about 1 µs at 125 MHz, and the outputs
hold until the next start.

Since ESI is linear in P, T and R, the mean suite scores exactly ESI_t. So at
least one suite is always eligible and `none_eligible` (the "change the
weights" outcome) never fires with this formula. It is kept for the interface.

### Agreement with the published results

Applied to the tables above, the formula gives exactly the published cut-off
and eligible share for power priority (0.3098, 45 of 63 = 71.4 %) and
resource priority (0.3384, 42 of 63 = 66.6 %). It also gives the published
best suites: IDEA+MD5+RSA, DES+SHA512+RSA and Grain+MD5+RSA. Two published
values do not follow from the formula:

- For equal weights the published figures are 0.3398 and 46 %; the formula
  gives 0.3418 and 52.4 %.
- For throughput priority the published cut-off is 0.3713; the formula gives
  0.3782.

The RTL implements the formula. The testbench compares the hardware with a
floating-point model of the formula for all 46 published weight settings.

In the original system the selection runs as software on the first
processor. Here it is a hardware unit that this processor starts and reads
out; its result drives the top-level `esi_best` port, from which the
configuration controller would load the bitstreams.

## The lane

A lane (`nsp_lane`) has one process synchronizer, two DMAs, a memory arbiter
and one AXI Streamer. Each DMA has a read channel (memory to stream, "RDMA")
and a write channel (stream to memory, "WDMA"), and each of the four channels
is wired to one place only:

| DMA            | channel | connected to          | stage of a packet |
|----------------|---------|-----------------------|-------------------|
| interface DMA  | write   | incoming interface    | ingress: interface → memory |
| crypto DMA     | read    | streamer input        | crypto: memory → engine |
| crypto DMA     | write   | streamer output       | crypto: engine → memory |
| interface DMA  | read    | outgoing interface    | egress: memory → interface |

Because no channel is shared between stages, the processor can run the three
stages of three different packets at the same time. In one *slot* it starts
ingress of packet k+1 into one input buffer, encryption of packet k from the
other input buffer into one output buffer, and egress of packet k−1 from the
other output buffer. It then waits until all of them are done and swaps the
buffers. This is how the packets overlap in time.

```
slot        t         t+1        t+2        t+3
ingress   pkt k+1   pkt k+2    pkt k+3     ...
crypto    pkt k     pkt k+1    pkt k+2     ...
egress    pkt k-1   pkt k      pkt k+1     ...
```

A slot is sequenced like this (`tb/pe_model.sv` shows it):

1. The processor programs the interface DMA (write: buffer address and
   maximum length; read: address and length) and starts both channels.
2. It programs the crypto DMA (read: the packet, write: the result buffer)
   and starts both of its channels.
3. It writes the crypto start bit of the synchronizer, which starts the
   streamer and the engine.
4. It polls the synchronizer until the done flags of every part it started
   are set, clears them, and reads the stored-word counts from the DMAs.

A stage that has nothing to do in a slot (the first and last slots of a
burst) is simply not started. Lane 1 encrypts (PCI to Ethernet) and lane 2
decrypts (Ethernet to PCI). The two lanes run fully in parallel: they have
separate interfaces, processors, DMAs and memory ports.

### Memory arbiter (`mem_arbiter`)

The two DMAs of a lane share the lane's one memory port. A round-robin
arbiter grants one request per cycle and alternates when both ask, so each
DMA gets at least every other cycle. A DMA keeps its request up until it is
granted. Inside each DMA the read and write channels take turns again in the
same way. With all four streams of a lane active, each therefore gets at
least a quarter of the port's bandwidth.

### Process synchronizer (`process_sync`)

A register block on AXI4-Lite (8-bit address, 32-bit data). The processor
starts the crypto stage through it and reads the done flags from it. The two
DMAs and the streamer set the five done flags with one-cycle pulses. The
flags are sticky; writing 1 clears one, and a done pulse that arrives with a
clear wins. The block also counts completed transfers for monitoring.

| addr | name    | content |
|------|---------|---------|
| 0x00 | CTRL    | bit0 crypto start (pulse, reads 0) |
| 0x04 | STATUS  | done flags, write 1 to clear: bit0 ingress (interface DMA write), bit1 egress (interface DMA read), bit2 crypto job, bit3 fetch (crypto DMA read), bit4 write-back (crypto DMA write); read-only: bit5 streamer busy, bit6 engine busy |
| 0x08 | NCRYPTO | crypto jobs completed |
| 0x0C | NIN     | ingress transfers completed |
| 0x10 | NOUT    | egress transfers completed |

### DMA (`axi_dma`)

One module serves as both the interface DMA and the crypto DMA. Its read and
write channels share the memory request port. When both want it in the same
cycle they take turns. A request is only carried out when the lane arbiter
grants it (`mem_gnt`). The read channel issues a read only when its 4-entry
FIFO has room for it, counting reads still in flight, so its stream can stall
at any time without losing data. A write transfer ends on `tlast` or after
LEN words, whichever comes first.

| addr | name       | content |
|------|------------|---------|
| 0x00 | CTRL       | bit0 start read channel, bit1 start write channel |
| 0x04 | STATUS     | bit0 read busy, bit1 write busy |
| 0x08 | MM2S_ADDR  | read start, word address |
| 0x0C | MM2S_LEN   | read length, words |
| 0x10 | S2MM_ADDR  | write start, word address |
| 0x14 | S2MM_LEN   | write maximum length, words |
| 0x18 | S2MM_COUNT | words stored by the last write transfer |

This DMA stands in for the vendor AXI DMA of the original system. It does
register-programmed block transfers only; there is no scatter-gather.

### AXI Streamer (`axi_streamer`)

The streamer sits between the DMA and the crypto engine. A `crypto_start`
pulse from the synchronizer starts a job. The streamer passes the pulse on
to the engine and then moves words both ways through two 4-entry FIFOs. The
job ends when the word the engine marked `tlast` has been handed to the DMA;
the streamer then pulses `crypto_done`. Outside a job both directions are
closed. Because the engine marks its own last word, it may return more or
fewer words than it received. Engine 1 appends a digest; engine 2 removes it.

### Crypto engine port

The boundary of the reconfigurable region, per engine:

- `ceN_start`: a one-cycle pulse at the start of a job.
- `ceN_din` / `ceN_din_ready`: the data the engine receives.
- `ceN_dout` / `ceN_dout_ready`: the data the engine returns, last word marked
  `tlast`.
- `ceN_busy`: the engine's status bit.

Each data bundle is an `axis_t`: 32-bit data, `tlast` and `tvalid`.

### On-chip memory (`onchip_mem`)

A true dual-port RAM of 4096 32-bit words. Port A belongs to lane 1 and port
B to lane 2. Read data is registered (one cycle) and a write returns the old
word. When both ports write the same word in the same cycle, port B's data is
kept. The memory is not partitioned in hardware: the processors choose the
buffer addresses.

## Where this RTL departs from, or adds to, the original description

- **Sizes and encodings not given in the original.** The design chooses:
  - the memory size (4096 words);
  - the FIFO depths (4);
  - both register maps;
  - how the DMAs share the memory port;
  - the engine port handshake;
  - the AXI4-Lite address width (8 bits).

  The 32-bit data path and the two-lane structure follow the original.
- **Memory.** One block diagram shows a DDR memory controller, while the text
  and the system diagram use on-chip memory. This design uses on-chip
  memory.
- **DMAs.** The original says "2 DMAs" (one per processor) in one place, and
  "WDMA array" and "RDMA array" in its pipeline description, where packets
  overlap in time. Here each lane has an array of two DMAs (four channels),
  which is what lets three packets overlap; the original does not say how
  its overlap is obtained.
- **Packet overlap.** The original's timing diagram for its pipeline shows the
  crypto phases of up to five packets overlapping, and its pipeline diagram
  says "crypto engines" for each direction. Elsewhere it gives one engine per
  direction (two in all), and that is what is built here. So in this design
  only the ingress, crypto and egress stages of *different* packets overlap;
  two packets are never encrypted in the same lane at once. The same diagram
  puts the preferential algorithm and the loading of the algorithms before
  any traffic, and the end-to-end test follows that order.
- **Preferential algorithm in hardware**, as described above, instead of
  software on the processor.
- **Not included:** the ARM processors, the PCI and Ethernet interfaces, the
  thirteen crypto and key-exchange cores, ICAP and the flash. The original
  gives only their names and measured costs, or takes them from the FPGA
  vendor.
- **Throughput.** At the original's 125 MHz clock a lane's memory port
  carries 4 Gbit/s. The crypto stage reads and writes through it, so the
  engine sustains at most 2 Gbit/s, and 1 Gbit/s when ingress and egress run
  at the same time. DES (7.45 Gbit/s), Salsa (3.7) and 3DES (2.5) are faster
  than that and would be limited by the lane.

## Files

| file | content |
|------|---------|
| `rtl/nsp_pkg.sv` | data word, AXI4-Stream and AXI4-Lite bundles, algorithm enums, cost tables |
| `rtl/nsp_top.sv` | top level: two lanes, shared memory, selector |
| `rtl/nsp_lane.sv` | one lane: synchronizer, interface DMA, crypto DMA, arbiter, streamer |
| `rtl/mem_arbiter.sv` | round-robin sharing of a lane's memory port by its two DMAs |
| `rtl/esi_selector.sv` | preferential algorithm |
| `rtl/process_sync.sv` | process synchronizer |
| `rtl/axi_dma.sv` | DMA with one read and one write channel |
| `rtl/axi_streamer.sv` | DMA-to-engine interface controller |
| `rtl/onchip_mem.sv` | dual-port buffer memory |
| `rtl/axil_slave.sv` | AXI4-Lite register front end used by the synchronizer and the DMA |
| `rtl/stream_fifo.sv` | small stream FIFO |
| `tb/tb_*.sv` | one self-checking testbench per block, one end-to-end (`tb_nsp_top`) and one lane throughput measurement (`tb_nsp_throughput`) |
| `tb/ce_model.sv` | behavioural crypto engine (XOR keystream + additive digest), not a real cipher |
| `tb/pe_model.sv` | behavioural processor: one pipeline slot of ingress, crypto and egress |
| `tb/axil_bfm.sv` | AXI4-Lite master tasks |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/nsp_pkg.sv tb/tb_nsp_top.sv --top tb_nsp_top
./obj_dir/Vtb_nsp_top
```

The same pattern works for `tb_esi_selector`, `tb_process_sync`,
`tb_axi_dma`, `tb_axi_streamer` and `tb_onchip_mem`. The package must come
first on the command line.

`tb_nsp_top` runs the whole design at its default size:

- It runs the selector in all four modes.
- It passes five packets of 7 to 64 words from PCI through encryption to
  Ethernet. At the same time it passes five cipher-text packets, made by the
  bench's own model of the engine, from Ethernet through decryption to PCI.
- Both lanes run the three-stage slot schedule above.
- It checks every word, every digest and the job and transfer counters.
- It counts each mechanism and fails if one never happens:
  - engine back-pressure;
  - interface back-pressure;
  - read/write contention inside a DMA;
  - both DMAs of a lane asking for the memory port at once;
  - both memory ports used at once;
  - both engines busy at once;
  - ingress, crypto and egress running at once in a lane;
  - each selector mode.

`tb_nsp_throughput` measures a lane at the default size with a 256-word
packet, an engine that never stalls and interfaces that are always ready.
The results at 125 MHz:

| stage                                | cycles | rate |
|--------------------------------------|-------:|-----:|
| ingress alone                        | 256  | 4.0 Gbit/s |
| crypto alone (read + write-back)     | 514  | 2.0 Gbit/s |
| egress alone                         | 257  | 4.0 Gbit/s |
| ingress + crypto + egress in one slot | 1053 | 1.0 Gbit/s per stream |

The bench checks each count against the bound set by the memory port.

`tb_esi_selector` checks all 46 published weight settings and the
128-cycle latency.

To try another cipher suite cost table, edit `ENC_TABLE`, `HASH_TABLE` and
`KEX_TABLE` in `nsp_pkg`. The selector takes its sizes from `N_ENC`,
`N_HASH` and `N_KEX`. Index widths are sized for at most 8 encryption and 4
hash and key-exchange algorithms.
