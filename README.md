# ExaNet network interface in SystemVerilog

The ExaNeSt prototype is a rack of Xilinx Zynq UltraScale+ MPSoCs. Each has four ARM cores plus
programmable logic. Four MPSoCs sit on one board (a QFDB). Each FPGA carries its own network
interface (NI) in the logic. This NI lets user processes talk to other nodes without the kernel on
the data path:

* small messages go from a **packetizer** on the sender to a **mailbox** on the receiver;
* bulk data moves by **RDMA write** (and RDMA read, built from writes);
* an **Allreduce accelerator** runs the MPI_Allreduce collective in hardware.

Virtualisation is the main idea. Many processes share one NI, so every resource is handed out per
process. Each process owns mailbox and packetizer interfaces and RDMA channel pages, and carries a
protection domain id (PDID). Each of these blocks checks the PDID. All memory accesses go through
the ARM SMMU under the PDID and rank of the process, so the NI works on user virtual addresses.

This code is the NI of one FPGA at the paper's main sizes. It has 64 mailbox and packetizer
interfaces, 4 packetizer channels, and 16 RDMA pages of 32 write plus 32 read channels. Links get
4 KB buffers. There are 8 outstanding memory bursts, a 256-entry receive context table, and up to
1024 Allreduce ranks.

## Cells and addresses (`exanet_pkg`)

Everything on the network is a *cell*. A cell is a header word, then 0–16 payload words of
128 bits (at most 256 bytes), then a footer word. Each word carries `sop`/`eop` flags (`flit_t`).
The fields follow the paper where it gives them:

* The global virtual address `gva_t` has 80 bits: PDID 16, node 22, rank 3, virtual address 39.
* The node-local virtual address has 42 bits. The SMMU context is the PDID plus the rank (19 bits).

The packing of the header and footer is this design's own:

* **Header:** destination GVA, source node, cell type, length, tag.
* **Footer:** checksum (the XOR of all 32-bit lanes), RDMA channel, block length and offset, a
  last-cell flag, a notify flag with its address, and a 7-bit reason field for NACKs.

`route_port()` holds the routing rule:

* A cell for this node goes to an endpoint chosen by cell type.
* A cell for another FPGA of the same QFDB takes the direct link (links 0–2, by the difference of
  the two low node bits).
* A cell for another QFDB goes to the board's "Network" FPGA (index 0), which sends it out on
  link 3.

## Switch and links

`ni_switch` is the small input-queued cut-through switch found in every FPGA. It has nine ports:
mailbox, packetizer, RDMA send, RDMA receive, Allreduce, and four links.

* Each input has a 4-word queue.
* The route is computed from the header at the head of the queue.
* An output is locked to one input from header to footer, so cells never interleave.
* Arbitration is round-robin.
* A word reaches the output register two cycles after it is offered. This is the paper's 2-cycle
  switch latency.

`link_port` is one end of a link. The paper gives 4 KB of buffering per link and says flow control
keeps cells from being dropped. Here that is done with credits:

* The sender holds one credit per free word of the far buffer, 256 at reset.
* The receiver returns one credit each time a word leaves its FIFO.

The serial transceivers are not modelled: a link carries one word and one credit bit per cycle.

## Small messages: packetizer → mailbox

A process writes up to four payload words into a packetizer channel. It then writes the command
word: bits 79:0 hold the destination GVA and bits 88:80 the size in bytes.

* The packetizer overwrites the PDID with its interface's PDID, so a process cannot claim another
  domain.
* It queues the channel, sends the cell, and moves the channel to *ongoing*.
* The returning ACK or NACK sets the channel to *acked* or *nacked*.
* A channel that waits too long becomes *timed out*. The default is 15 000 cycles, 100 µs at
  150 MHz.
* A scanner checks one channel per cycle for timeouts.

The mailbox picks its interface from destination VA bits 17:12. It receives the whole cell, then
checks three things:

* the PDID matches the interface's;
* the checksum, length and payload-size rules hold;
* the queue has space (tail − head < slots).

If all three pass, the message is written as one 64-byte slot into the queue in host memory. The
queue's tail pointer is kept here and the runtime moves its head. The first 8 bytes of the slot
are a descriptor {sequence, source node, length}; the payload follows. An ACK goes back. Any
failed check produces a NACK with the reason (PDID, error or full).

The paper contradicts itself on message size. The API text says messages of up to 64 bytes, while
the MPI discussion says at most 56 bytes reach a mailbox. This design accepts 64 bytes in the
packetizer. The mailbox stores 56 bytes next to its 8-byte descriptor and NACKs anything larger.

## RDMA

The paper splits RDMA between hardware and firmware on the NI's R5 co-processor. The firmware is
not part of this RTL; its ports are brought out on the top.

* **`rdma_channels`** holds the user-visible channels.
  * A process writes a 4-word (64-byte) descriptor into a free write channel of its page.
    Word 0 is the source VA and rank, word 1 the destination GVA, word 2 the length, word 3 the
    notification address with a notify bit.
  * The write of word 3 is the doorbell. The channel becomes busy and is queued for the firmware.
  * The firmware pops the queue and later posts *done* or *error*.
  * For an RDMA read, the firmware asks for a free read channel of the target page and fills it
    with the descriptor of the answering write.
* **`rdma_tx`** is the hardware send engine. It takes one block (≤16 KB, the unit the firmware
  cuts transfers into) and splits it into cells of ≤256 bytes.
  * Each cell is fetched with one read burst of up to 16 beats. Up to 8 bursts are in flight.
  * A cell is sent only once all its data has arrived (store-and-forward), so a slow memory never
    stalls the network.
  * Every cell's footer carries the block length, the cell's offset, and the notify details.
  * Block ACK/NACK cells from the receiver come back to the firmware as events.
* **`rdma_rx`** is the receive engine. Payload words go straight to memory as they arrive
  (cut-through), at the destination VA under the destination's context. A block is tracked in one
  of 256 contexts, looked up on {source node, channel}.
  * Write responses are matched in order with the writes.
  * The block completes when responses for all its bytes are back.
  * A write error (an SMMU page fault), a bad checksum, or no free context makes the block fail.
  * When asked, a 16-byte notification is written to the receiver's notification address, and
    then one RDMA_ACK or RDMA_NACK is returned.
  * The sender's firmware resends a NACKed block, so receive pages need not be pinned.

## Allreduce accelerator

`allreduce_engine` is both the client and the server module of the paper. The rank whose
`rank % 4 == 0` acts as the server, which stands for the board's Network FPGA. Software programs
the operation (sum, min, max), the datatype (int32, float, double), the vector length (≤256 B),
the rank, log2 of the rank count (≥2), the vector address, and the address of a table that maps
ranks to nodes (16 bytes per rank). Then it pulses `start`.

1. Every module reads its vector.
2. Clients look up their server and send it the vector.
3. The server waits for clients 1, 2 and 3 in that order and reduces each into its own vector.
   The fixed order makes float results independent of arrival order.
4. For each exchange level `l`, the server swaps its partial vector with the server at
   `rank ^ (4 << (l-1))` and reduces.
5. The server sends the result to its three clients. Everyone writes it over the input vector and
   raises `done`.

The paper's text and figure disagree on level numbering. The text puts exchange on levels
1…log2(N)−1 and the broadcast on level log2(N). The 16-rank figure shows two exchange levels and
the broadcast on level 3. Exchanging among N/4 servers needs log2(N)−2 levels, and that is what is
built.

Partners can run ahead, so a cell may arrive before its level is reached. Every level therefore
has its own 256-byte receive buffer, which makes deadlock impossible. The vector travels in one
cell; the cell's tag carries its level and the sender's position on the board.

`allreduce_alu` reduces one 128-bit word per cycle: 4 × int32, 4 × float or 2 × double. Float sums
are computed in double and rounded once to float. This gives the correctly rounded result because
53 ≥ 2·24+2. Rounding is to nearest-even. Subnormal inputs and results are flushed to zero, which
the paper does not discuss.

## Memory path

All host-memory traffic goes through `axi_mux` onto one master with separate 128-bit read and write
channels. The paper says the NI has such a master towards the processing system. Here it is
simplified: one request beat per read burst, and the write address on the first data beat. The
SMMU context travels with every request.

* Writers are the mailbox (id 0), RDMA receive (1) and Allreduce (2).
* Readers are RDMA send (0) and Allreduce (1).
* A write burst keeps the channel until its last beat.
* Responses return to the requester by id, in order, and are always accepted.

## Top level (`exanet_ni_top`)

The top wires the nine switch ports to the endpoints and links, and brings out:

* the register ports the cores use (`pk_*`, `mb_*`, `rc_*`, `ar_*`);
* the firmware side of RDMA (`fw_*`, `blk_*`, events);
* the AXI master (`axi_*`);
* per-link word and credit signals (`link_*`).

Not built, and reached only through these ports:

* the ARM cores and SMMU;
* the R5 firmware;
* the inter-board APEnet router;
* transceivers, DRAM, storage and board management.

The matrix-multiplication accelerator the paper shows as a separate use of the FPGA is also not
built.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/exanet_pkg.sv rtl/fp_pkg.sv \
    tb/tb_exanet_ni_top.sv -y rtl -y tb --top-module tb_exanet_ni_top -o sim && obj_dir/sim
```

The testbenches:

* **`tb_link_port`** checks ordering, running out of credits, no overflow, and the one-cycle
  send timing.
* **`tb_ni_switch`** pushes 300 random cells through all ports under random back-pressure. It
  checks that cells are whole and correctly routed, and that the idle latency is 2 cycles.
* **`tb_allreduce_alu`** compares 3000 random cases against the simulator's own arithmetic.
* **`tb_exanet_ni_top`** builds one QFDB from four NIs at the default sizes. The links form a full
  mesh and each node has a memory model (`tb_axi_mem`). The testbench plays the cores and the R5
  firmware. It must see each of these at least once:
  * a mailbox ACK with the slot contents checked;
  * a PDID NACK and a mailbox-full NACK;
  * a packetizer timeout (the destination board's link is left unconnected);
  * a 16 KB RDMA block while the receiver's memory stalls, which makes the link run out of credits;
    the data and the notification are checked;
  * an RDMA page-fault NACK;
  * a 4-rank integer Allreduce.

  It runs in under a second.

Blocks without a testbench of their own (packetizer, mailbox, RDMA blocks, AXI mux, Allreduce
engine) are covered only through this end-to-end test. Not simulated: float and double Allreduce
through the whole engine, exchange levels (these need eight or more ranks), RDMA reads, and
retransmission.

## Where this departs from the paper

* The paper describes timers in hardware but gives no timeout value; 15 000 cycles is a choice.
* The credit scheme, the cell format, the descriptor layout, the doorbell, and the endpoint and id
  numbering are not given by the paper.
* The Allreduce level count follows the figure, not the text (see above). The paper's HLS version
  may differ inside.
* Checksums stand in for the link-level error detection of the real links.
* Only one Allreduce runs at a time per NI. Larger vectors are several operations of 256 bytes, as
  in the paper.
