# A collective-communication offload engine for FPGAs

Distributed FPGA applications need collectives such as broadcast and reduce, as MPI
offers them to CPU programs. This RTL implements such a collective engine, the CCLO
(collective communication offload). It sits between an FPGA's memory system and a network
protocol offload engine. The host or an FPGA kernel gives it one command, for example
"reduce 4 KiB from every rank into rank 0". The engine then carries out the whole exchange with
its peers on the other FPGAs: it moves data to and from memory or kernel streams, frames and
unframes messages, buffers early arrivals, and combines operands as they stream through.

The design follows the architecture of the ACCL+ engine, as its authors describe it. It does
not reproduce their code. Where that description stops, the choices are this design's own.
Each file's opening comment marks which parts follow the published architecture and which
were chosen here.

## The engine at a glance

The engine has two halves.

The **control plane** decides what moves where:

- `cmd_arbiter` merges the host's and the kernels' command queues.
- `uc_ctrl`, the controller, expands each collective into a sequence of point-to-point steps.
- `dmp`, the data movement processor, executes each step as one three-slot instruction.
- `rbm`, the rx-buffer manager, owns the buffers that hold eager messages received before anyone asked for them.
- `cfg_mem` holds the communicator and the buffer pool; the host writes it through MMIO.

The **data plane** moves 512-bit beats, one per cycle:

- `noc` is a stream crossbar. It forwards each packet by the `dest` field that travels with the data.
- `tx_system` frames outgoing messages.
- `rx_system` parses incoming ones.
- `reduce_plugin` combines two operand streams element by element.

The command paths are numbered as in the original block diagram:

| Path | From → to | Carries |
|------|-----------|---------|
| 1 | arbiter → controller | collective commands |
| 2 | controller → Tx system | rendezvous handshake messages |
| 3 | Rx system → controller | rendezvous notifications |
| 4 | controller → DMP | microcode instructions |
| 5 | Rx system → RBM | eager packet notifications |
| 6 | DMP ↔ RBM | "has message (src, tag, seq) arrived?" |

Every path is a FIFO of depth `QDEPTH` = 4. The controller can therefore queue work ahead
of the units that execute it.

`cclo_engine` wires all of this together. It does not depend on the network protocol. Its
network side is four streams:

- transmit commands (SEND or WRITE, session, length, remote address);
- transmit data;
- received packet meta (session, length);
- received data.

`cclo_top` adds `rdma_adapter` for an RDMA offload engine. The adapter passes commands out
unchanged. On receive, it splits traffic:

- two-sided SEND packets go to the engine;
- one-sided WRITE packets bypass the engine and go straight into memory on a third memory channel.

### Memory channels

| Channel | Read | Write |
|---------|------|-------|
| m0 | operand 0 | eager rx buffers |
| m1 | operand 1, or an rx buffer | results |
| m2 (top only) | none | RDMA WRITE bypass |

Each channel takes a command (64-bit address, 32-bit byte length) and streams beats. A write
channel returns a one-cycle status pulse when the whole command has been written.

## Messages on the wire

Every message begins with a one-beat **signature** (`accl_pkg::sig_t`). It holds:

- the message type;
- the source and destination rank;
- the payload length;
- the tag;
- a sequence number;
- for a rendezvous request, the receiver's buffer address.

The payload follows the signature. The network may cut a message into packets, and packets
from different peers may interleave. For this reason the Rx system keeps, for each session, the
number of payload bytes still due. When nothing is due, the next packet starts with a signature;
otherwise, the packet continues a message.

There are four message types:

- **EAGER_MSG**: signature and payload in one SEND. The receiver stores it in an rx buffer
  until a matching receive asks for it.
- **RNDZ_INIT**: a signature only. The receiver sends it to announce its result buffer's address.
- **RNDZ_MSG**: the payload alone, carried by an RDMA WRITE to that address. The receiving
  engine never sees it.
- **RNDZ_DONE**: a signature only. The sender sends it after the WRITE, so the receiver knows
  the data has landed.

### The eager path, step by step

Sender:

1. The sender's controller issues one instruction: operand 0 from memory, result to the
   network.
2. The DMP points memory channel 0's read stream at the Tx port of the NoC. It then issues the
   read and a Tx command.
3. The Tx system sends the SEND meta and the signature, then passes the payload through.

Receiver:

1. The Rx system reads the signature. For each packet it tells the RBM the session, whether the
   packet is the first of its message (and if so, the signature), and the payload bytes. It
   forwards the payload beats into the NoC, towards the rx-buffer write port.
2. On a first packet, the RBM takes a free buffer. Each later packet of that session continues
   at a running offset. The RBM issues one memory write per packet.
3. The buffer becomes *ready* when the memory acknowledges the write of the message's last
   packet.
4. The receive command makes the DMP ask the RBM for (source, tag, sequence). On a miss, the
   DMP asks again every `RETRY` = 16 cycles.
5. On a hit, it copies the buffer (memory channel 1) to the result and then releases the
   buffer.

The receive command may arrive before or after the message: both orders work. If no buffer is
free, the RBM stops accepting first packets until the DMP releases one. That pressure flows back
to the network.

### The rendezvous path

1. The receiver's controller sends RNDZ_INIT with its result address, then waits.
2. The sender's controller waits for that notification. Notifications that arrive while the
   controller waits for something else are held in a four-entry stash.
3. The sender then issues an instruction whose result slot says "RNDZ_MSG to this address".
4. The Tx system sends a WRITE command and the payload, followed by a RNDZ_DONE SEND.
5. The DMP completes when the Tx system reports the RNDZ_DONE beat sent.
6. The receiver completes on the RNDZ_DONE notification.

No rx buffer is used, and the receiving engine moves no data.

## Microcode

An instruction (`dmp_instr_t`) has two operand slots and one result slot.

Operands come from:

- memory;
- the kernel input stream;
- an rx buffer, matched by (source, tag, sequence).

Only operand 1 may name an rx buffer.

Results go to:

- memory;
- the kernel output stream;
- the network, as eager or as rendezvous, with rank, session, tag and sequence.

With one operand, its stream is routed straight to the result port. With two, both streams go
to the reduction plugin, and the plugin's output goes to the result port. The reduction function
(int32 or int64 sum or max) travels in `dest[3:0]` of the operand beats, so the plugin needs no
separate control.

The DMP runs one instruction at a time. It sets the routes, issues every command of the
instruction, and waits for the result's acknowledgement: a memory write status, Tx done, or the
last beat taken by the kernel. Only then does it report completion and accept the next
instruction. Routes therefore never change under data in flight.

## Collectives the controller knows

The controller is a fixed state machine. In the original architecture this job belongs to a
small processor running firmware. Each command becomes a list of point-to-point steps:

| Command | Eager | Rendezvous |
|---------|-------|------------|
| send / recv | one instruction each side | INIT / WRITE / DONE handshake |
| broadcast | root sends to every rank in turn (one-to-all) | same, each with a handshake |
| reduce | ring: rank root+1 sends; each next rank combines its own operand with what it received and forwards; the root combines into its result | not built |

Sequence numbers are counted per peer, separately for sending and receiving. A receiver can
therefore tell successive messages with the same tag apart. One collective runs at a time;
its status is returned after its last step.

## Configuration (MMIO, 32-bit words)

| Word address | Contents |
|--------------|----------|
| 0x000 | local rank |
| 0x001 | communicator size |
| 0x100 + r | session (queue pair) used to reach rank r |
| 0x200 + 4i | rx buffer i: address bits 31:0 |
| 0x201 + 4i | rx buffer i: address bits 63:32 |
| 0x202 + 4i | rx buffer i: size in bytes |

Reads return one cycle after `mmio_re`. The receive side of the network identifies a peer by
the session its packets arrive on. In the test network, node i reaches node j on session j, and
node j sees those packets on session i.

## Parameters

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `MAX_RANKS` | 16 | largest communicator |
| `NRXBUF` | 16 | eager rx buffers |
| `MAX_SESS` | 16 | sessions tracked by the Rx system and the RBM |
| `RETRY` | 16 | cycles between two rx-buffer lookups |
| `QDEPTH` | 4 | depth of each command-path queue |

The data width (512 bits) and the other field widths are in `accl_pkg`. The widths are:

- rank: 8 bits;
- tag and sequence: 16 bits each;
- length: 32 bits;
- address: 64 bits.

## Limits and departures

- Only part of the original algorithm table is implemented. Recursive-doubling broadcast,
  all-to-one and tree reduce, gather, all-to-all, and choosing an algorithm at run time are
  absent.
- The controller is fixed logic, not a processor. Changing or adding an algorithm means
  changing `uc_ctrl`.
- Message lengths must be multiples of 64 bytes.
- Reductions support integers only; there is no floating point.
- The unary (compression) plug-in is not built. Its NoC input and output are ports of the
  top (`cmp_*`), so one can be attached.
- Only the RDMA configuration is built. TCP and UDP offload engines would need their own
  adapter in place of `rdma_adapter`.
- A received RDMA WRITE always lands in memory. The compile-time option of streaming it into
  the kernel instead is not provided.
- The reduction plug-in is always present. There is no build option to leave it out on nodes
  that never reduce.
- Per-packet RDMA WRITE metadata is assumed to carry the packet's target address.
- The configuration memory is a register file, not a block RAM, so every unit can read it in
  parallel.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a `TB_RESULT` line.

`tb_cclo_top` is the end-to-end test:

- Setup: three complete nodes at default parameters, each with a memory model
  (`tb/mem_model.sv`), joined by a packetizing RDMA network model (`tb/rdma_net_model.sv`) with
  a 256-byte MTU.
- Flows: it runs eager and rendezvous send/recv; receives posted before and after the data;
  two senders to one receiver with interleaved packets; both kinds of broadcast; sum and max
  ring reduce; and kernel-stream send and receive.
- Data check: every result word is compared with a value computed by the testbench.
- Mechanism counts: it counts eager sends, rendezvous handshakes, bypassed WRITE packets,
  rx-buffer misses, packet interleaves and reduced beats. A mechanism that never happens
  counts as a failure.
- Throughput: a 16 KiB eager send must stream at least 0.74 beats per cycle, which is 95 Gb/s
  at 250 MHz. It measures one beat per cycle.

To run a testbench with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_cclo_top \
  rtl/accl_pkg.sv $(ls rtl/*.sv | grep -v accl_pkg) tb/mem_model.sv tb/rdma_net_model.sv tb/tb_cclo_top.sv
./obj_dir/Vtb_cclo_top
```

Unit testbenches need only `accl_pkg.sv`, the block and its helpers, such as `sync_fifo.sv`.
