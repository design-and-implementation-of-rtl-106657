# SMARTHO data plane for NetFPGA-SUME

SMARTHO is a network-initiated handover scheme for a split 5G radio access
network, where one central unit (CU) serves several distributed units (DUs). A
UE that moves along a known path, such as a train or a bus on a fixed route,
hands over from DU to DU in a predictable order. So the network can carry out
the preparation phase of each later handover before the UE asks for it. The
UE's measurement report is then answered at once with the RRC reconfiguration
that starts the execution phase, and the preparation round trips between DU and
CU are left out of the critical path.

In the hardware testbed, four PCs stand for the radio head (RRH), the source
DU, the target DU and the CU. They are linked in a chain through NetFPGA-SUME
boards. Each handover message is a small Ethernet frame carrying a message
number and a forwarding tag. The programmable switch on each board does three
things to every such frame:

1. It sends the frame out of the port named by the frame's forwarding tag.
2. It replaces the message number with the next message of the handover
   sequence.
3. It replaces the forwarding tag with the port that the *next* switch must
   use. That port is looked up from the message number and the port the frame
   came in on.

So each frame carries its own route one hop ahead, and the sequence of
handover messages is driven by the switches' tables.

This repository gives that per-board switch as synthesizable SystemVerilog.
The original was a P4 program compiled with the Xilinx SDNet toolchain. Here it
is a hand-written AXI4-Stream pipeline with the same three operations.

## The control frame

| bytes  | field          | contents                                            |
|--------|----------------|-----------------------------------------------------|
| 0-5    | destination MAC | passed through                                      |
| 6-11   | source MAC     | passed through                                      |
| 12-13  | EtherType      | `0x1212` marks a SMARTHO frame                      |
| 14-17  | `ctrl_info`    | handover message number, 32-bit big-endian          |
| 18-21  | `frwd_tag_prt` | egress port for the receiving switch, 32-bit big-endian |
| 22-    | payload        | passed through                                      |

The message numbers follow the intra-CU handover sequence:

- 1 is the measurement report.
- 3 is the UE context request sent to the target DU.
- 6 is the RRC connection reconfiguration. This is the message SMARTHO sends
  straight back after a measurement report once the first handover has been
  done.
- 12 ends the handover.

The EtherType `0x1212` is the value the testbed used. A different part of the
design discussion suggests a value from the experimental range
`0x0101`-`0x01FF`. To change it, edit `SMARTHO_ETHERTYPE` in `smartho_pkg`.

## Ports and the SUME stream

The block sits where the SDNet-generated P4 pipeline sits in the NetFPGA-SUME
reference design. It sits between the input arbiter and the output queues:

- `tdata` is 256 bits wide, with byte 0 of the frame in bits [7:0].
- `tkeep` has one bit per byte.
- `tuser` is 128 bits. The ingress port is in `tuser[23:16]` and the egress
  port in `tuser[31:24]`.

Ports are one-hot:

| code | meaning                           |
|------|-----------------------------------|
| 0x01 | physical interface nf0 (bit 0)    |
| 0x04 | nf1 (bit 2)                       |
| 0x10 | nf2 (bit 4)                       |
| 0x40 | nf3 (bit 6)                       |
| bit 2K+1 | copy to host interface K      |

An egress field of 0 means the output queues drop the frame. The testbed
wires its boards through nf1 and nf2 only, so the egress codes in practice are
4 and 16. Because `frwd_tag_prt[7:0]` is copied into the egress field
unchanged, a tag with an odd bit set also works: it sends the frame up to the
host.

## Pipeline

```
 s_axis ──► smartho_parser ──► smartho_match_action ──► smartho_deparser ──► output reg ──► m_axis
                                   │        ▲
                            {ctrl_info,     │ hit, {next_ctrl_info,
                             src_port}      │       next_frwd_tag_prt}
                                   ▼        │
                               smartho_lookup_table ◄── cfg_we / cfg_idx / cfg_entry
```

- **`smartho_parser`** keeps a one-bit start-of-packet flag. It sets the flag
  after each `tlast`, so it knows which beat is a packet's first. From that
  beat it pulls out the Ethernet fields, `ctrl_info` and `frwd_tag_prt`. It
  flags the frame as SMARTHO only if the EtherType matches and all 22 header
  bytes are present in the beat. A 21-byte runt counts as not SMARTHO.
- **`smartho_match_action`** builds the table key `{ctrl_info, src_port}`. It
  then picks one of three outcomes:

  | case | egress port | header | counter |
  |------|-------------|--------|---------|
  | not a SMARTHO frame | 0 (dropped) | — | drop |
  | SMARTHO, table hit | `frwd_tag_prt[7:0]` | both fields replaced by the table's action data | hit |
  | SMARTHO, table miss | `frwd_tag_prt[7:0]` | unchanged | miss |

- **`smartho_lookup_table`** is an exact-match CAM of `DEPTH` entries. Each
  entry holds a valid bit, the 40-bit key and 64 bits of action data. All
  entries are compared in parallel, and the lowest-numbered matching entry
  wins.
- **`smartho_deparser`** changes only the first beat of a SMARTHO frame. It
  writes the new egress code into `tuser[31:24]` and the two fields back into
  bytes 14-21, big-endian. Every other beat, and every other byte, passes
  through unchanged.
- **`smartho_sume_switch`** is the top. It wires the four blocks together,
  adds one output register and counts hits, misses, drops and stall cycles.

`smartho_pkg` holds the widths, offsets, port codes and the struct types
shared by all of the above.

### Timing and backpressure

- **Latency:** a beat accepted at clock edge *t* appears on `m_axis` after edge
  *t*.
- **Throughput:** one beat per cycle, so the pipeline runs at line rate.
- **Backpressure:** `s_axis_tready = !m_axis_tvalid || m_axis_tready`. While
  the sink holds `m_axis_tready` low, the output beat stays put and the input
  stalls. An assertion in the top checks that a presented beat stays stable
  until it is taken.
- **Parse and table lookup:** both are combinational within that one cycle.
- **Line rate:** at the usual 200 MHz SUME data-path clock, a 256-bit beat per
  cycle is 51.2 Gb/s. That is above the 40 Gb/s of the four 10G ports. No
  clock constraint is checked here.

### Loading the table

The original switch had its table fixed when the P4 program was compiled.
Here the table is cleared by reset and written one entry per cycle through
`cfg_we`/`cfg_idx`/`cfg_entry`. A written entry is visible to the next
packet's lookup. Clearing an entry's valid bit removes it.

`DEPTH` (`LUT_DEPTH` on the top) defaults to 32. The twelve-message sequence
arriving on either of a board's two used ports needs at most 24 keys.

An entry for the traditional handover looks like this:

```
key    = {ctrl_info: k, src_port: 8'h04}
action = {next_ctrl_info: k+1, next_frwd_tag_prt: 32'h10}
```

The SMARTHO mode differs in a single entry, message 1 → 6. Rewriting that
entry at runtime switches the board from the traditional sequence to the
SMARTHO sequence.

## Where this departs from the original

- The table is written at runtime rather than compiled in. Its contents are
  not published, so the testbenches load the sequence described above.
- In the original description the change of message number is not tied to a
  table. Here the next message number is action data in the same table entry
  as the next forwarding port, so one lookup gives both.
- A frame that misses in the table is still forwarded on its tag, with its
  header unchanged. A frame that is not SMARTHO is dropped. The original does
  not say what its program did in either case.
- The SDNet pipeline, which has its own internal latency, is replaced by a
  single register stage.
- Not included:
  - the controller-driven parts of SMARTHO, covered in the next section;
  - the SUME reference-design infrastructure around the block: MACs, input
    arbiter, output queues and DMA;
  - the 2 ms delay the hosts add to emulate target-DU preparation. That delay
    is host software.

## What is not here

The full SMARTHO design also has two P4 programs, one for the CU switch and one
for the DU switch. They tag user and control packets for fixed-path UEs.
Controllers beside the switches keep three tables:

- a mobility table and a controller cache at the CU;
- an RRC table at the DU, which holds a prepared RRC reconfiguration ready to
  be replayed.

Those programs ran only on the software P4 switch in an emulated network. The
controllers, and the exact layout of their tables, are described only at the
level of their fields and duties, so they are not given as RTL. The handover
times measured on the testbed, about 50 ms per handover, are dominated by host
software and links. The switch adds a few clock cycles. So those times are not
reproduced here.

## Testbenches

| testbench | what it covers |
|-----------|----------------|
| `tb_smartho_parser` | random headers; other EtherTypes; 21- versus 22-byte first beats; start of packet tracked across multi-beat packets |
| `tb_smartho_lookup_table` | checked against a software copy of the table; keys differing in one bit; duplicate keys (lowest index wins); invalidation; reset; write-to-lookup timing. Runs at `DEPTH=16` |
| `tb_smartho_match_action` | random headers and table results against an independent model of the three cases |
| `tb_smartho_deparser` | byte-by-byte comparison of every output beat |
| `tb_smartho_sume_switch` | end-to-end at default parameters |
| `tb_smartho_tandem_handover` | handovers in tandem, traditional and SMARTHO |

`tb_smartho_sume_switch` works in two phases:

1. It loads the handover table, sends messages 1-12 one at a time and checks
   every output field and the exact one-cycle latency.
2. It sends 400 random packets: handover frames, IPv4 frames, multi-beat
   packets and keys that miss. Meanwhile the sink's ready signal toggles at
   random. The test checks the output stream against a model queue, checks the
   four counters, and requires at least one hit, miss, drop and stall.

`tb_smartho_tandem_handover` plays the hosts. It feeds each emitted frame back
in on the far port, until message 12 comes out. It runs five traditional
handovers, each 11 table passes and 22 cycles. Then it runs five SMARTHO
handovers: the first is full, then the table is switched to 1 → 6, and each
later handover takes 7 passes and 14 cycles. The testbed's 1,000 to 5,000
handovers only repeat these same packets, because the switch keeps no state
between frames.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with Verilator:

```
verilator --binary --timing --assert -y rtl +libext+.sv \
    rtl/smartho_pkg.sv tb/tb_smartho_sume_switch.sv \
    --top-module tb_smartho_sume_switch
./obj_dir/Vtb_smartho_sume_switch
```

Use the same command for the other testbenches, with their names in place of
`tb_smartho_sume_switch`.
