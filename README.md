# IPv4 address-pair extraction on the receive path of a 100G FPGA NIC

Building anonymized traffic matrices starts with one simple but relentless
job: for every packet seen on a link, take the IPv4 source and destination
address. At 100 Gb/s that is up to ~150 million packets per second, far more
than a host can parse in software. This design does the extraction inside the
NIC. It sits on the receive path of an FPGA NIC shell, parses every packet,
collects the address pairs in on-chip memory and, once `N_P` pairs (150 by
default) have been collected, sends them to the host in one *summary packet*
that takes the place of the next IPv4 packet. The host therefore receives the
normal traffic, minus one packet in every `N_P + 1` IPv4 packets, plus a
steady stream of compact summaries from which it builds the traffic matrix.

The RTL here is a SystemVerilog rendering of the header-extraction plugin
described in *"Extracting TCPIP Headers at High Speed for the Anonymized
Network Traffic Graph Challenge"*. The original was generated from P4 (parser
and deparser) and C++ high-level synthesis (the stateful memory pool); this is
hand-written RTL with the same structure and behaviour, not the authors' code.
Where the description is silent, the choices made are listed in
[Choices beyond the original description](#choices-beyond-the-original-description).

## Where it sits

The plugin fills the 250 MHz user-logic slot of an open-source 100G NIC shell
(AMD OpenNIC style) between the Ethernet MAC subsystem and the PCIe queue-DMA
subsystem:

```
  100GbE --> MAC (RX) --s_axis--> [ he_plugin ] --m_axis--> DMA (card-to-host) --> host
```

Both sides are AXI4-Stream, 512 bits wide at 250 MHz (128 Gb/s raw, enough
for 100 GbE). Byte 0 of a packet is in `tdata[7:0]`, `tkeep` is contiguous
from lane 0, `tlast` marks the last beat. The MAC, DMA, shell registers and
transceivers are not part of this RTL; only the receive direction is built.

## Data flow

```
 s_axis --> p4_parser --beats------------> packet buffer (sync_fifo, 32) ---------+
               |                                                                  v
               +--header record--> p4_control --record--> record queue (16) --> p4_deparser --> m_axis
                                     |  (header_mem_pool inside)                  ^
                                     +------ 8*N_P-byte summary bus --------------+
```

1. **`p4_parser`** copies the stream into the packet buffer untouched and,
   from the first three beats of each packet, builds one header record.
2. **`p4_control`** is the processing stage between parser and deparser. For
   each record it calls the memory pool (**`header_mem_pool`**): store the
   pair, or, if the pool is full, mark the packet for replacement and hand the
   whole pool to the deparser.
3. **`p4_deparser`** pairs each record with its packet's beats (both queues
   are in packet order) and either forwards the packet or drops it and sends
   the summary packet instead.

## The parse graph and the header record

The parser follows this graph exactly:

```
start -> parse_eth --(ether_type 0x0800)--> parse_ipv4 --(protocol 6)--> parse_tcp -> accept
             |                                 |  + options,               + options,
             +--(other)--> accept              |    (hdr_len-5)*4 bytes      (dataOffset-5)*4 bytes
                                               +--(protocol 17)--> parse_udp -> accept
                                               +--(other)--> accept
```

The longest header stack it must see is 14 + 60 + 60 = 134 bytes, so the
parser keeps a byte window of the first three 64-byte beats. On the beat that
completes the window (or on the last beat of a shorter packet) an
`always_comb` loop walks the states above over the window, one transition per
pass, and the resulting `headers_t` record (valid bits, Ethernet/IPv4/TCP/UDP
fields, option lengths, reject flag) is registered. A header is marked valid
only when all its bytes, options included, are inside the packet; otherwise
parsing stops there and `parser_error` is set. An IPv4 `hdr_len` or TCP
`dataOffset` below 5 is treated the same way. Such packets are still
forwarded.

Option bytes are not copied into the record, only their lengths: nothing
downstream needs them, and the packet itself carries them on unchanged.

## The address pool and the replacement rule

This is the part of the design whose behaviour is easiest to get wrong, so
here it is precisely.

* Only packets whose record has a valid IPv4 header take part. Everything else
  (non-IPv4 frames, frames cut short before the IPv4 header ends) is forwarded
  and leaves the pool alone.
* The pool holds up to `N_P` 64-bit entries `{source IPv4, destination IPv4}`.
  While it is not full, an IPv4 packet's pair is appended and the packet is
  forwarded.
* When an IPv4 packet arrives and the pool already holds `N_P` pairs, that
  packet is **replaced**: the pool's contents are copied, in one cycle, over a
  `64*N_P`-bit bus into the deparser's summary buffer, the pool is emptied,
  and the packet is dropped. Its own pair is **not** recorded.
* Hence the cycle is `N_P` forwarded IPv4 packets followed by one replaced
  packet: a drop rate of exactly `1/(N_P+1)` of IPv4 packets, and every pair
  that reaches the host belongs to a packet that also reached the host.

Because all `N_P` entries leave the pool at once, the pool is built as
registers (9600 bits at `N_P = 150`), not as a block RAM. The wide bus is the
price of sending the whole batch in one transfer; the original design notes
the same trade-off (a larger `N_P` lowers the drop rate but widens this bus).

The deparser owns a single summary buffer. `p4_control` may load it only when
`sum_free` is high. If a new replacement comes up while the previous summary
is still queued or being sent (possible only with a small `N_P` and a
back-pressured output), the control stage holds that record; the parser, and
then the input, back up behind it. This is the *summary stall*.

## The summary packet

Built by `p4_deparser`, `15 + 8*N_P` bytes (1215 bytes, 19 beats, at
`N_P = 150`):

| bytes | content |
|---|---|
| 0-5 | destination MAC `66:77:88:99:aa:bb` |
| 6-11 | source MAC `00:11:22:33:44:55` |
| 12-13 | ether type `0x1234` (private protocol) |
| 14 | `N_P`, number of pairs (`0x96` for 150) |
| 15 + 8i .. 18 + 8i | source IPv4 of pair i, network byte order |
| 19 + 8i .. 22 + 8i | destination IPv4 of pair i |

Pairs appear in arrival order. No padding or FCS is added; the DMA path
carries the packet as is. The MAC addresses and the ether type are constants
in `he_pkg` and easy to change.

A host recognises summaries by ether type `0x1234` and reads the count byte
before the pairs.

## Timing and throughput

* **Rate:** one 512-bit beat per clock in and out. Back-to-back one-beat
  packets pass at one packet per clock (250 Mpps), which the end-to-end test
  checks.
* **Latency:** a packet's record exists once its third beat (or its last,
  if the packet is shorter) has been accepted; with nothing waiting, its first
  beat leaves two clocks after that (one clock for the registered record, one
  for the record queue). A one-beat packet therefore takes two clocks, a long
  one four. The buffers let the following beats flow on without a gap.
* **Cost of a summary:** a replaced packet is drained while its 19-beat
  summary is sent; the slot lasts as long as the longer of the two. For small
  packets each summary costs up to 18 extra output beats; a replaced packet
  longer than 19 beats (over 1216 bytes) leaves the output idle while its
  tail is dropped. Per 151 IPv4 packets of 64 bytes that is 169 beats instead of
  151, still ~223 Mpps, above 100 GbE line rate for 64-byte frames
  (~149 Mpps).
* **Back-pressure:** `m_axis_tready` low stops the deparser; the two queues
  fill, and then `s_axis_tready` falls. The shell's MAC side cannot be
  back-pressured, so in a real system the shell's own receive FIFO absorbs
  this.

Sustained rates of this RTL at the default parameters, from
`tb_table1_rates` (400 back-to-back frames per size, 250 MHz, two or three
summaries included), next to the rates reported for the original hardware:

| frame size | this RTL | original hardware | 100 GbE line rate |
|---|---|---|---|
| 64 B | 228.3 Mpps (116.9 Gb/s) | 41.2 Mpps | 148.8 Mpps |
| 128 B | 117.1 Mpps (119.9 Gb/s) | 39.8 Mpps | 84.5 Mpps |
| 256 B | 61.2 Mpps (125.3 Gb/s) | 35.1 Mpps | 45.3 Mpps |
| 512 B | 30.9 Mpps (126.5 Gb/s) | 22.4 Mpps | 23.5 Mpps |
| 1024 B | 15.6 Mpps (127.7 Gb/s) | 11.4 Mpps | 12.0 Mpps |
| 1518 B | 10.4 Mpps (126.4 Gb/s) | 7.7 Mpps | 8.1 Mpps |

Line rate counts 20 bytes of preamble and inter-frame gap per frame. The
plugin alone is not the bottleneck at any size.

The hardware rates were measured on the whole system (shell, DMA, host
software), so they do not isolate the plugin; the table shows that this RTL
by itself can carry each of them.

## Choices beyond the original description

The original describes the blocks, the parse graph, `N_P = 150`, the
replace-one-packet scheme and the summary layout. These points are this RTL's
own:

* 512-bit stream width (the usual width of the shell's 250 MHz interface).
* The replaced packet's own pair is discarded and the drop rate is
  `1/(N_P+1)`. The original also speaks loosely of replacing "one out of every
  150 packets"; the exact `1/(N_P+1)` statement was followed.
* Only valid IPv4 packets count towards `N_P` and can be replaced.
* Inside a pair, source address first.
* The pool is registers (wide read) although the original says the pairs are
  kept in block RAM; it also says the full batch crosses a wide bus, which a
  block RAM cannot deliver in one cycle.
* The summary length is `15 + 8*N_P` bytes (Ethernet header and count byte in
  front of the pairs). One sentence of the original calls it an `8*N_P`-byte
  packet, while its packet capture and payload size show the extra 15 bytes.
* Forwarded packets are passed on byte for byte; the original's deparser
  re-emits the parsed headers, which gives the same bytes because no header is
  modified.
* Parser reject handling, the buffers and their depths, the handshakes, the
  reset (asynchronous, active low, on control state only).
* The shell's per-packet `tuser` sideband (size, source, destination) is not
  modelled.

## Files

| file | content |
|---|---|
| `rtl/he_pkg.sv` | header structs, parser states, constants, record types |
| `rtl/p4_parser.sv` | parse graph, header window, record register |
| `rtl/header_mem_pool.sv` | address-pair pool with wide read-out |
| `rtl/p4_control.sv` | extern call, forward/replace decision, summary handshake |
| `rtl/p4_deparser.sv` | forwarding, summary buffer and summary packet |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO (packet buffer, record queue) |
| `rtl/he_plugin.sv` | top level |
| `tb/he_tb_common.svh` | random frame builder and summary reference, included by the tests |
| `tb/tb_*.sv` | one self-checking test per block, plus `tb_he_plugin_full` |

## Simulating

Every test prints `TB_RESULT checks=N failures=M` and ends with `$finish`;
each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/he_pkg.sv tb/tb_he_plugin.sv --top-module tb_he_plugin -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_he_plugin` by any other test name. The tests:

* `tb_p4_parser`: all frame kinds (TCP with IPv4/TCP options, UDP, other
  protocol, non-IPv4, frames cut in the IPv4 or TCP header, `hdr_len` = 4);
  every record field against the frame builder; pass-through beats; a beat per
  clock and the record one clock after its completing beat.
* `tb_header_mem_pool`: three fill/flush rounds at `N_P = 150`, count, full
  flag and every pair position on the wide bus.
* `tb_p4_control` (`N_P = 3`): replace decisions and summary contents against
  a reference model, with the summary buffer kept busy at random so that
  summary stalls occur.
* `tb_p4_deparser` (`N_P = 150`): forwarded packets and 19-beat summaries
  byte for byte under random back-pressure, full-rate forwarding.
* `tb_he_plugin` (`N_P = 2`): 640 random frames end to end against a
  reference model; checks rate and latency, and counts that replacements,
  IPv4 and TCP options, UDP, non-IPv4, rejected frames, output back-pressure,
  input stalls and summary stalls all occurred.
* `tb_table1_rates`: the frame sizes of the original evaluation at the
  default parameters, headers padded with zeros to size; every packet checked,
  exact clock counts, and the rates against the table above.
* `tb_he_plugin_full`: the same as `tb_he_plugin` at the default parameters (`N_P = 150`,
  1040 frames, several 1215-byte summaries). Summary stalls cannot occur at
  this `N_P` with these queue depths and are not required there.

Each test finishes in well under a second.

## Changing it

* `N_P` (top parameter): pairs per summary. The count byte limits it to 255.
  The pool and summary buffer grow as 64 bits per pair.
* `PKT_DEPTH`, `META_DEPTH`: queue depths. `PKT_DEPTH` must be at least the
  header window (3 beats at 512 bits): the parser has to push a long packet's
  first three beats before its record exists, and the deparser cannot take
  them before that.
* Summary MAC addresses and ether type: `he_pkg`.
* `DATA_W` is a parameter of the stream modules; the header window adapts
  (`ceil(134 / (DATA_W/8))` beats) but only 512 has been simulated.
