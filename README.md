# Four-party secret-shared arithmetic on a SmartNIC lookaside accelerator

In secret-sharing multi-party computation (MPC), several organisations compute on data
that none of them may see. Each secret is split into random *shares*. Additions are
local, but every multiplication needs a round of communication between all parties. So
the rate of an MPC computation is set by the network more than by the arithmetic.

This RTL puts the arithmetic of a four-party MPC protocol next to the network, on the
FPGA of a SmartNIC. It is built as a *lookaside accelerator*: the host queues a
command, and the accelerator then does the following without further host involvement:

- reads operand shares from host memory by DMA;
- computes;
- writes the results back;
- pushes the data the other parties need straight into the network.

A multiplication is split into two pipelined stages:

- **Stage 1, local computation.** Products of the local shares are computed and masked
  with pseudo-random words. The masked data goes to the network and the intermediate
  shares go to host memory.
- **Stage 2, accumulation.** Once the other parties' data has arrived, it is combined
  with the intermediate shares into the final shares.

The design follows the architecture of the COPA (Configurable Network Protocol
Accelerator) lookaside accelerator evaluated by Patel et al., *Distributed Hardware
Accelerated Secure Joint Computation on the COPA Framework*. That paper gives:

- the block structure;
- the two-stage split;
- the 128-bit ring and the four-party 3-out-of-4 sharing;
- the rule that a multiply produces three 128-bit words for the network;
- in words only, commands that fetch operands from a remote node, send results to a
  remote node, or are themselves sent from a remote node.

That paper does **not** give the multiplication protocol's arithmetic, the PRNG, memory
sizes, interfaces or command formats. Everything of that kind below is this design's
own and is marked as such.

## 1. Shares and the multiplication scheme

This is the part to understand first. Everything else moves data in and out of it.

### Sharing

All values live in the ring Z/2^128 (128-bit words, wrap-around arithmetic). A secret
`x` is split into four additive shares, `x = x0 + x1 + x2 + x3`. Party `p`
(p = 0..3) holds the three shares `x_j` with `j != p`. Any two parties together hold all
four shares; one party alone learns nothing.

In memory and on every datapath, a party keeps its three shares as a **triple**
(3 × 128 = 384 bits). Lane `l` of the triple holds share index `l` if `l < p` and
`l+1` otherwise (`share_of_lane` in `mpc_pkg`):

| party | lane 0 | lane 1 | lane 2 |
|-------|--------|--------|--------|
| 0     | x1     | x2     | x3     |
| 1     | x0     | x2     | x3     |
| 2     | x0     | x1     | x3     |
| 3     | x0     | x1     | x2     |

**Addition** is local: `z_j = x_j + y_j` lane by lane (`OP_ADD`).

### Multiplication, stage 1 (`OP_MUL1`, `mpc_stage1`)

`x*y` is the sum of the 16 products `x_j*y_k`. A party can compute `x_j*y_k` when it
holds both shares, that is when `p` is neither `j` nor `k`. Each product is given to
exactly one party (`term_owner`):

- a diagonal term `x_j*y_j` goes to party `j+1 mod 4`;
- a cross term `(j,k)` goes to the lower-numbered of the two parties outside `{j,k}`
  if `j<k`, and to the higher-numbered one if `j>k`.

Each party then owns four products:

| party | products summed into a_p |
|-------|---------------------------|
| 0 | x3y3, x1y2, x1y3, x2y3 |
| 1 | x0y0, x0y2, x0y3, x3y2 |
| 2 | x1y1, x0y1, x3y0, x3y1 |
| 3 | x2y2, x1y0, x2y0, x2y1 |

The sum `a_p` of a party's four products is an additive share of `x*y`:
`a0+a1+a2+a3 = x*y`. These four 128×128 multipliers are the main arithmetic of the
design.

Next, `a_p` must be turned back into the 3-out-of-4 form without revealing it. The
scheme uses four PRNG keys. `K¬i` is known to every party except party `i`, so party `p`
holds the three keys `K¬i` with `i != p`, in the same lane order as its shares. From
key `K¬i` the generator draws three words per element, one per party `q != i`:
`g(i,q) = PRNG(K¬i, stream q, counter)`. Per element, party `p` computes:

```
intermediate share, lane of i  :  t_i = sum over q != i of g(i,q)          (to host memory)
network word                   :  s_p = a_p - sum over i != p of g(i,p)    (to all three others)
```

The network word is sent as three 128-bit PUTs, one to each other party. This matches
the paper's "three 128-bit integers for communication" per multiply.

### Multiplication, stage 2 (`OP_MUL2`, `mpc_stage2`)

Party `q` receives `s_i` from each of the three parties `i != q` and stores `s_i` in the
lane where it keeps share index `i`. Stage 2 adds lane by lane:

```
z_i = t_i + s_i      for the three i != q
```

**Correctness.** `sum_i z_i = sum_i a_i + sum_i sum_{q!=i} g(i,q) - sum_p sum_{i!=p} g(i,p)`.
The two double sums run over the same set of pairs and cancel, leaving `x*y`. Every
holder of `z_i` computes the same `t_i`, since all of them know `K¬i`, and receives the
same `s_i`. The end-to-end testbench checks both facts on 2,500 random products.

**What a receiver sees.** Party `q` receives `s_p`. The mask on `s_p` includes
`g(q,p)`, drawn from `K¬q`, the one key party `q` does not have. So a single party
cannot unmask another party's product share.

This is a plain semi-honest scheme, built to meet the paper's constraints: four
parties, 3-of-4 shares, one round, three 128-bit words per party, and PRNG keys that no
party holds in full. **It is not claimed to be the protocol the paper cites**, and it has
not been reviewed as cryptography. The PRNG (`prng`) is a counter-based mixer built from
the SplitMix64 finaliser. It is deterministic and cheap, but it is **not** a
cryptographic PRF. Replace it before any real use.

The PRNG counter of element `e` of a command is `{nonce, e}`, with the 32-bit nonce
taken from the command. So all four parties draw identical words, whichever of their
accelerators runs the command. The hosts must give matching MUL1 commands the same
nonce, and must never reuse a nonce under the same keys.

## 2. Block structure

```
           host memory port (stands for PCIe to host DDR)
                 ^ |
  host cmd --+
             +-> [Cmd Queue] --> [CTRL] --cmd--> [Accelerator 0..3] <--> [DMA] <--> host
  net cmd ---+                      ^                  |
                       completions -+                  +--> [round-robin] --> network PUT port
                                                       +--> [round-robin] <-> network GET port
```

| Module | Role |
|--------|------|
| `copa_lookaside` | top: one party's lookaside block |
| `sync_fifo` | command queue (16 entries); also used for internal queues |
| `la_ctrl` | global control unit: in-order dispatch to the accelerator named in the command; round-robin completion return |
| `la_dma` | shares one host port among the accelerators; steers in-order read responses back by remembering who issued each read |
| `mpc_accel` | one accelerator: input demultiplexer, Data A / Data B, stage 1, stage 2, output multiplexer, output queue, drain to host and network |
| `data_buffer` | Data A / Data B: 2048 × 384-bit simple dual-port RAM |
| `mpc_stage1`, `prng`, `mpc_stage2` | the arithmetic of section 1 |
| `rr_arbiter` | round-robin arbiter: queue input (host or network), DMA, completions, PUT port, GET port |
| `mpc_pkg` | types, command format, lane/term functions |

The COPA network is not part of this RTL. Its TX/RX data paths, its own DMA and its
remote writes into the receiving host's memory all belong to it. The top presents a PUT
port and a GET port in its place.

## 3. Commands and a complete multiplication

A command (`cmd_t`, 210 bits) carries the following fields:

- `op`: the operation, one of `KEYLOAD`, `ADD`, `MUL1`, `MUL2`;
- `src_remote`, `src_node`: the sources live at another node and are fetched first;
- `dst_remote`, `dst_node`: the results go to another node instead of local memory;
- `acc`: the target accelerator;
- `tag`: an 8-bit tag, returned with the completion;
- `nonce`;
- `src_a`, `src_b`, `dst` and `net_dst`: addresses, in 384-bit beats;
- `len`: the number of elements.

The source, destination, length and operation fields follow the paper's description of
a lookaside command. The other fields are this design's own.

For one multiplication batch, each of the four hosts does the following:

1. `KEYLOAD` once per accelerator. `src_a` points at one triple holding the party's
   three keys.
2. `MUL1`:
   - `src_a` holds the x triples and `src_b` the y triples;
   - `dst` receives the intermediate triples;
   - `net_dst` is the receive buffer address at the peers.

   Each element produces one host write and three PUTs, to `net_dst + e` in the
   sender's lane at each receiver.
3. Wait until all parties' MUL1 commands have completed. The data then sits in every
   receive buffer, because a completion is raised only after the command's last PUT
   has been accepted. Synchronising the hosts is outside this RTL (see section 7).
4. `MUL2`: `src_a` holds the intermediates, `src_b` the receive buffer, and `dst`
   receives the final shares.

`ADD` takes x from `src_a` and y from `src_b` and writes the sums to `dst`, with no
network traffic.

**Remote invocation.** A command can also arrive over the network from another node,
on the `rcmd` port. It enters the same queue as host commands; when both are offered
in the same cycle they take turns. Its completion comes out of the same completion
port with `cpl_remote` set, so the network side can return it to the node that sent
it.

**Remote operands.** If `src_remote` is set, the accelerator first issues two GETs on
the network port. They copy `len` beats from `src_a` and from `src_b` at node
`src_node` into the same addresses in local host memory. The accelerator waits for
both completions, then loads the data by DMA as usual. If `dst_remote` is set, each
result triple goes out as three PUTs, one per lane, to `dst + e` at node `dst_node`,
and nothing is written to local host memory. The completion is raised only after the
last PUT has been accepted. Both flags work with every operation except `KEYLOAD`.

## 4. Inside an accelerator (`mpc_accel`)

A command runs in chunks of at most `DEPTH` elements. Each chunk has three phases:

- **Load.** `2n` read requests go out: n for `src_a`, then n for `src_b`. Because the
  host port returns reads in order, the first n responses go to Data A and the next n
  to Data B. This is the input demultiplexer of the two-stage structure.
- **Compute.** One element per cycle is read from A and B and sent into stage 1
  (latency 3) or stage 2 (latency 1). Outputs go through the output multiplexer into a
  16-entry queue. An element enters only when the in-flight count plus the queue
  occupancy leaves room for it. So the stages never stall, and back-pressure only
  pauses the issue of new elements.
- **Drain**, overlapped with compute. The head of the queue is written to `dst + e`,
  and for `MUL1` its word is sent three times. The entry is removed when all of these
  are accepted.

**Throughput.** Without contention:

- ADD and MUL2 drain one element per cycle.
- MUL1 is limited by its 128-bit network port to one element per three cycles.
- Loading costs two host-port cycles per element.

A `MUL1` chunk of n elements therefore takes about `2n + 3n = 5n` cycles and sends
3 × 128 bits per element. That is about 77 bits per cycle, or about 21 Gb/s of network
data at 275 MHz. The paper reports about 17.5 Gb/s for one accelerator.

The four accelerators share one host port and one 128-bit network port. At 275 MHz
that port carries 35 Gb/s, so it cannot fill a 100 Gb/s link. The paper's claim that
several accelerators can do so assumes a wider path into the network, whose interface
it does not describe.

Measured in simulation (`tb_mul_batch`), with a host read latency of 40 cycles, no
host stalls and an always-ready network:

| MUL1 batch (elements) | 1 | 10 | 100 | 1000 | 2048 | 4096 |
|---|---|---|---|---|---|---|
| cycles | 55 | 100 | 550 | 5050 | 10290 | 20576 |
| network data, Gb/s at 275 MHz | 1.9 | 10.6 | 19.2 | 20.9 | 21.0 | 21.0 |

Small batches are dominated by the read latency; from about 100 elements on, the rate
sits near its limit. Four accelerators running staggered streams together reach
31.3 Gb/s, close to the 35 Gb/s of the shared port. If all four start equal commands
at the same moment, they load together and then send together, and gain nothing over
one accelerator. The commands must be staggered for their load and send phases to
overlap.

## 5. Interfaces of the top (`copa_lookaside`)

| Port group | Meaning |
|------------|---------|
| `party` | party number 0..3, static |
| `cmd_valid/ready, cmd` | command submission into the queue |
| `rcmd_valid/ready, rcmd` | command arriving over the network from another node (remote invocation) |
| `cpl_valid/ready, cpl_tag, cpl_acc, cpl_remote` | one completion per finished command; `cpl_remote` marks a command that came in on `rcmd` |
| `acc_busy` | which accelerators hold a command |
| `mem_req_valid/ready, mem_req{we,addr,data}` | host memory requests, one 384-bit beat each; writes are posted |
| `mem_rsp_valid, mem_rsp_data` | read data, in request order, always accepted |
| `net_valid/ready, net{dest,addr,lane,data}` | write 128-bit `data` into `lane` of beat `addr` in the host memory of party `dest` |
| `get_valid/ready, get{node,raddr,laddr,len}, get_acc` | copy `len` beats from `raddr` at node `node` into local host memory at `laddr`; `get_acc` names the accelerator that asked |
| `get_done_valid, get_done_acc` | one pulse per finished GET, with the `get_acc` it was issued with; GETs of one accelerator finish in order |
| `cmdq_count` | number of commands waiting in the queue |

All handshakes are valid/ready: a transfer happens on a clock edge where both are
high. Reset is asynchronous and active low. Assertions check the following:

- responses arrive only for issued reads;
- a GET completion arrives only while the accelerator waits for one;
- the output queue never overflows;
- no PUT targets the sending party;
- no command is dispatched to a busy accelerator.

## 6. Parameters

| Parameter | Default | Origin |
|-----------|---------|--------|
| share width | 128 | paper |
| parties / shares held | 4 / 3 | paper |
| `NUM_ACC` | 4 | paper's architecture figure (the paper's measurements use one) |
| `DEPTH` (Data A/B entries) | 2048 | this design; covers the paper's largest batch (about 10^3) in one chunk |
| `CMDQ_DEPTH`, `OUTQ_DEPTH` | 16, 16 | this design |
| `MAX_RD` (outstanding reads) | 64 | this design |
| stage latencies | 3 (stage 1), 1 (stage 2), 1 (PRNG) | this design |

## 7. Departures from the paper and what is missing

- **Multiplication arithmetic and PRNG**: this design's own (section 1), not the cited
  protocol, and not cryptographically reviewed.
- **Multiply with abort** (malicious security) is not built. The paper says only that
  a collision-resistant hash of the exchanged data is sent and compared. It names
  neither the hash nor what is hashed.
- **Remote operands and results** follow the paper's description: fetch before the
  DMA, and send the results over the network. The GET and PUT formats are this design's
  own, since the paper does not give the COPA network's command format.
- **Host, PCIe, host DDR and the COPA network** are outside the RTL. They are
  represented by the memory, PUT and GET ports, and modelled in the testbenches.
- **Waiting for the peers' data.** The paper suggests that hosts can queue work and
  forget it. Here stage 2 cannot tell when the three peers' words have landed in the
  receive buffer, so each host must see all four parties' MUL1 completions before it
  queues MUL2. The paper names no mechanism by which the accelerator would learn of
  the arrivals.
- **Command routing by an explicit accelerator number.** The paper says only that the
  control unit assigns commands to "appropriate" accelerators.
- The resource and frequency figures the paper reports for its FPGA build do not apply
  to this RTL.

## 8. Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. Build and run with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_copa_lookaside \
    -Irtl -y rtl -y tb rtl/mpc_pkg.sv tb/tb_copa_lookaside.sv
./obj_dir/Vtb_copa_lookaside
```

Substitute another testbench name for the others. `tb_ref_pkg.sv` has to be found
through `-y tb`, as above.

| Testbench | What it checks |
|-----------|----------------|
| `tb_copa_lookaside` | four full-size parties (default parameters) with host memory and network models. It runs 2,500 multiplies (one command of 2,100 spans two chunks, and 200 send their results to another node) and 300 adds, plus 300 more adds whose operands are fetched from another node, then rebuilds every result from the shares: `sum z_i == x*y` and all holders agree. Two of the commands arrive on the network command port, and their completions must be marked as remote. It also counts 16 mechanisms: the four command types, remote fetch, remote destination, remote invocation, host and network commands offered together, chunking, DMA and network contention, back-pressure, head-of-queue waiting, credit stalls and parallel accelerators. |
| `tb_mul_batch` | one full-size party: network rate of MUL1 against batch size (table in section 4), every PUT word checked against the reference model, rate rising with batch size, cycle bound `5n` plus start-up, at least 17.5 Gb/s for large batches, four accelerators faster than one |
| `tb_mpc_accel` | one accelerator with `DEPTH=8`: ADD, zero length, MUL1 (intermediates, PUT destinations/lanes/data), MUL2, one element per cycle, ADD with remote sources (GETs) and MUL2 with a remote destination |
| `tb_mpc_stage1` | four stage-1 instances against an independent model, latency 3, one element per cycle, reconstruction |
| `tb_mpc_stage2`, `tb_prng`, `tb_data_buffer`, `tb_sync_fifo`, `tb_la_dma`, `tb_la_ctrl` | the smaller blocks, with models, random back-pressure and corner cases |

`tb/host_mem_model.sv` models host memory. It is sparse, returns reads in order with a
fixed latency and drops ready at random. `tb/tb_ref_pkg.sv` holds the reference PRNG,
written from the formulas above. It is checked against SplitMix64's published first
output.
