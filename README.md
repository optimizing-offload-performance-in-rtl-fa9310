# Offload subsystem with multicast dispatch and a hardware credit counter

A heterogeneous multi-processor SoC pairs one fast host core with a fabric of
many small accelerator clusters. To hand a job to the fabric the host has to
(a) tell every participating cluster which function to run and with which
arguments, and (b) find out when all of them are done. Done in software,
both costs grow with the number of clusters: the host stores the job words
into each cluster in turn, and completion is usually found by polling or by
a software barrier. For small jobs these costs can eat most of what the
extra clusters gain, so that past a handful of clusters the job gets slower
again.

This RTL implements the two hardware changes that remove those costs:

1. **Multicast dispatch.** A host store carries a destination mask with one
   bit per cluster, and the interconnect writes it into all selected
   clusters in the same cycle. Dispatching a job then costs the same for 1 or
   32 clusters.
2. **A credit counter for completion.** Before an offload the host writes
   the number of clusters it uses into a threshold register. Each cluster,
   when done, performs one store to an *increment* register; the store itself
   adds a credit. When the credits reach the threshold, the unit raises an
   interrupt to the host. No cluster does a read-modify-write, and the host
   does not poll.

The design targets a system of 32 clusters of 9 cores each (288 cores); the
host is a 64-bit RISC-V core. The host core, its load-store unit, and the
clusters are not part of this RTL: they connect to the ports of
`offload_top`.

## One offload, step by step

```
 host                    offload_top                              clusters 0..31
  |  store THRESHOLD=M  ->  mcast_xbar -> sync_arbiter -> credit_counter
  |  store job word 3, mask ----> mcast_xbar ==== fork ====> clusters in mask
  |  store job word 2, mask ---->     "                        "
  |  store job word 1, mask ---->     "                        "
  |  store job word 0, mask ---->     "           (word 0 = handler: start)
  |                                                  ... clusters compute ...
  |                         credit_counter <- sync_arbiter <- store INCREMENT (each cluster)
  |  <------------------ irq_o (count reached M)
  |  load COUNT / STATUS (optional)
  |  store THRESHOLD (next offload; clears count and irq)
```

With the mask left at zero, the same interconnect behaves as a plain unicast
fabric, so the baseline (store every job word once per cluster) can be run on
the same hardware for comparison. The job-word layout above (4 words, word 0
last as the start signal) is only the convention of the testbenches; the
hardware does not interpret the words.

## Multicast interconnect (`mcast_xbar`)

Every host request is decoded in the cycle it is presented:

| Address                         | Mask     | Goes to                                      |
|---------------------------------|----------|----------------------------------------------|
| cluster region, write           | non-zero | every cluster whose mask bit is set          |
| cluster region, write           | zero     | the cluster selected by the address          |
| synchronization-unit region     | ignored  | the synchronization unit (read or write)     |
| anything else, cluster index >= `NUM_CLUSTERS`, or a read of the cluster region | - | dropped; `host_err_o` pulses |

For a multicast, the cluster-index field of the address is ignored and the
same in-cluster offset is written in every destination; each cluster sees
the address rebased to its own window.

The hard part is back-pressure. A multicast is a *fork*: the request is
offered to all destinations at once, but each may accept it in a different
cycle. The register `sent_q` remembers which destinations have already taken
the current request, so they are not offered it again; the host's ready
rises in the cycle in which the last outstanding destination accepts, and
`sent_q` is then cleared. The host must keep the request and mask stable
while it waits (an assertion checks this). If every destination is ready,
the store completes in one cycle regardless of how many clusters it reaches.

There is no register stage anywhere: valid, ready and data pass
combinationally from host to cluster.

## Synchronization unit (`credit_counter`) and its arbiter (`sync_arbiter`)

Registers (64-bit, offsets from the unit's base):

| Offset | Name      | Access | Function                                                         |
|--------|-----------|--------|------------------------------------------------------------------|
| 0x00   | THRESHOLD | RW     | clusters to wait for; a write also clears the count and the interrupt; 0 disables the interrupt |
| 0x08   | INCREMENT | W      | any write adds one credit (data ignored)                         |
| 0x10   | COUNT     | R      | current credit count                                             |
| 0x18   | STATUS    | R      | bit 0: interrupt pending                                         |

Timing: a write takes effect at the clock edge that accepts it. `irq_o` is a
registered level. It rises in the cycle after the credit that makes
COUNT >= THRESHOLD and stays high until THRESHOLD is written again. Reads
return data one cycle after acceptance. The count saturates at
2^`CntWidth` - 1 (63 for 32 clusters) and does not wrap.

The increment must be atomic even when many clusters finish in the same
cycle (which is what multicast dispatch makes likely: the clusters all
start together). The counter itself has a single register port. In front
of it, `sync_arbiter` grants one requester per cycle, the host on port 0
and cluster *i* on port *i*+1, in round-robin order: the requester after
the one granted last has priority. Simultaneous increments are therefore
applied one per cycle and none is lost; M clusters that finish together
are all counted within M cycles. The arbiter remembers which port issued
a read so that the response goes back to it.

## Top level (`offload_top`)

| Port group | Direction | Meaning |
|---|---|---|
| `host_req_valid_i`, `host_req_ready_o`, `host_req_i` | in/out/in | host memory requests (`mem_req_t`: `we`, `addr`[47:0], `wdata`[63:0], `strb`[7:0]) |
| `host_mcast_mask_i[NUM_CLUSTERS-1:0]` | in | multicast mask, as produced by the host's load-store unit |
| `host_rsp_valid_o`, `host_rsp_rdata_o` | out | read data from the synchronization unit |
| `host_err_o` | out | decode-error pulse |
| `cl_req_valid_o`, `cl_req_ready_i`, `cl_req_o[]` | out/in/out | job-dispatch writes into each cluster |
| `cl_sync_valid_i`, `cl_sync_ready_o`, `cl_sync_req_i[]` | in/out/in | each cluster's accesses to the synchronization unit |
| `irq_o` | out | job-completion interrupt to the host |

All handshakes are valid/ready: a transfer happens on a rising edge where
both are high. Reset `rst_ni` is asynchronous and active low.

Address map (`offload_pkg`): cluster *i* at `0x1000_0000 + i * 0x4_0000`
(256 KiB each, room for 256 clusters), synchronization unit at
`0x0200_0000` (4 KiB).

Parameter: `NUM_CLUSTERS` (default 32). Widths and the address map are
package constants in `offload_pkg`.

## What is given and what is chosen here

Taken from the source architecture: the two mechanisms and their
behaviour, namely a multicast store reaching all selected clusters in
parallel, and a centralized counter with a host-set threshold, incremented
as a side effect of a cluster's store and raising an interrupt at the
threshold. Also taken: the system size (32 clusters of 9 cores).

Chosen here, because the source gives no details of the implementation:
the data and address widths, the address map, the register map, the
request bundle and its handshake, the mask-per-request encoding of the
multicast set, the flat single-stage interconnect, write-only cluster
ports, the decode-error behaviour, the reset of the counter by a
THRESHOLD write, the level interrupt, saturation, and the round-robin
arbiter that makes increments atomic.

Not included: the host core and the change to its load-store unit that
supplies the mask, the clusters (cores, scratchpad memories, DMA), and the
rest of the SoC (main memory path, cluster-to-memory network, interrupt
controller). In the real system the interconnect is hierarchical and
pipelined. Here it is one combinational stage, so the cycle counts below
cover only this subsystem's own cost.

## Verification

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=<n> failures=<n>`:

| Testbench | What it checks |
|---|---|
| `tb_credit_counter` | interrupt exactly one cycle after the M-th credit for M = 1..32, threshold 0, clear on rewrite, read-back latency, saturation |
| `tb_sync_arbiter` | (5 ports) grant matches a round-robin reference every cycle under random back-pressure, in-order delivery, read-response routing, one grant per cycle when all request |
| `tb_mcast_xbar` | (8 clusters) random multicast/unicast/peripheral/illegal requests under random back-pressure; exact valid set each cycle, ready when the last destination accepts, rebased addresses, no duplicate or missing delivery, one-cycle multicast to any number of clusters |
| `tb_offload_top` | full 32-cluster subsystem with `cluster_model` clusters: complete offloads for M = 1, 2, 4, 8, 16, 32, unicast and multicast, with and without stalls; dispatch takes 4 cycles (multicast) or 4·M (unicast); interrupt follows a credit model every cycle; every mechanism is exercised at least once |
| `tb_daxpy_offload` | DAXPY sweep N = 128..2048 by M = 1..32; multicast always faster for M >= 2, and the gain falls as N grows |

`tb/cluster_model.sv` is a behavioural stand-in for a cluster, used only in
simulation. It runs the compute time ceil(2.6·N / (8·M)) cycles, the
per-cluster compute term of the source's runtime model
t = 367 + N/4 + 2.6·N/(8·M) cycles.

Measured offload time of this subsystem for N = 1024, from the THRESHOLD
store to the interrupt, in cycles:

| M         | 1   | 2   | 4   | 8  | 16 | 32  |
|-----------|-----|-----|-----|----|----|-----|
| unicast   | 341 | 179 | 104 | 78 | 89 | 143 |
| multicast | 341 | 176 | 95  | 57 | 44 | 50  |

The shape matches the published system's. The unicast baseline has a minimum
at a few clusters and then grows linearly, while multicast keeps improving
up to 32 clusters. The absolute gap is smaller (93 cycles at 32 clusters,
against more than 300 in the published system) because here a unicast store
costs one cycle, with none of the host's software and pipeline overhead per
store. The slight rise of the multicast time from 16 to 32 clusters is the
serialised arrival of the credits, one per cycle.

To simulate, for example, the whole subsystem:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/offload_pkg.sv tb/tb_offload_top.sv --top-module tb_offload_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The block testbenches set
the block's size parameter to keep the runs short. `tb_offload_top` and
`tb_daxpy_offload` use the default `NUM_CLUSTERS = 32`. Each run takes
well under a second.
