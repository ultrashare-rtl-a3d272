# UltraShare: a hardware controller for sharing streaming FPGA accelerators

Many host applications want the same few FPGA accelerators. Frameworks that
bind each request to one named accelerator leave accelerators idle while
others queue up. This controller takes that decision away from software.
An application sends one command that names an accelerator *type* and two
scatter-gather lists: where its input is and where its output goes. After
that the hardware does the rest without talking to the host again:

- it picks a free accelerator of that type;
- it fetches the lists;
- it streams the input from host memory into the accelerator and the output
  back to host memory, in page-sized pieces;
- it reports completion.

Three ideas carry the design:

1. **Groups of accelerators, one command queue per group.** Accelerators that
   do the same job form a group. A command waits in its group's queue until
   any member is idle. A group whose members are all busy never holds up
   commands for another group. The grouping is a table the host can rewrite
   at run time.
2. **Small buffers, element-wise data movement.** Each accelerator gets RX
   (input) and TX (output) buffers of a few host pages, not buffers that hold
   a whole request. Data moves one scatter-gather element (at most one page)
   at a time, and only when it fits (RX) or is ready (TX).
3. **Weighted sharing of the DMA.** A weighted round-robin scheduler decides
   which accelerator's element goes next. The weights come from a priority
   table the host can rewrite. Separate schedulers serve RX and TX.

The RTL is SystemVerilog-2017 in `rtl/`, one module or package per file. The
testbenches in `tb/` are self-checking. The default size is nine
accelerators in three groups, with a 128-bit data path.

## How one request travels

```
 host commands ──► command_detector ──► command_queues (one FIFO per group)
                        │ config                   │ heads
                        ▼                          ▼
        acc_group_table / data_priority_table   acc_allocator ◄── acc_status
                                                   │ (command, accelerator)
                                                   ▼
                         command_requester ──► DMA: fetch RX list, TX list
                          │ request info FIFO           │ list words
                          ▼                             ▼
                        sg_decoder ◄────────────────────┘
                          │ (addr, len, RX/TX, accelerator)
                          ▼
                        sg_distributor ──► acc_controller[i]: RX SG queue, TX SG queue
                                                 │ rx_req / tx_req (one element each)
                                                 ▼
                 rx_tx_data_manager: RX scheduler ─► rx_sg_requester ─► DMA read
                                     DMA read data ─► data_distributor ─► RX buffer[i]
                                     TX scheduler ─► tx_sg_requester ─► DMA write
                                     TX buffer[i] ─► data_submitter ─► DMA write data
                                                 │
                 acc_controller[i] ◄─► accelerator i (AXI4-Stream in and out)
                                                 │ completion record
                                                 ▼
                                     cpl_arbiter ─► host
```

1. **Command detector.** A request command goes to the queue of the group
   its type maps to. Configuration commands write the tables instead.
2. **Allocator.** It walks the queues round-robin, one queue per clock. For
   queue Q it forms `idle = acc_status & acc_map[Q]`. If the queue holds a
   command and `idle` is non-zero, it keeps the rightmost 1
   (`idle & -idle`). That is the lowest-numbered idle member. That
   accelerator is now claimed: its status bit goes to busy.
3. **Command requester.** It writes a request information entry to a FIFO:
   accelerator, element counts, command id and core id. Then it asks the DMA
   for the RX list, then the TX list, and tells the allocator it may go on.
4. **Decoder and distributor.** The lists come back as 64-bit words. The
   decoder expands them into elements and tags each one with the information
   entry at the head of the FIFO. The distributor pushes each element into
   the RX or TX SG queue of that entry's accelerator. The first RX element
   also starts the command in that accelerator's controller.
5. **Data movement.** Each accelerator controller raises `rx_req` for its
   next RX element once the element fits in its RX buffer. It raises
   `tx_req` for its next TX element once the TX buffer holds that element's
   data. The schedulers choose among the requests. The requesters issue DMA
   reads and writes. Returning read data is steered to the right RX buffer,
   and write data is drained from the right TX buffer.
6. **Completion.** Once every TX element has been requested and its data
   has left the TX buffer, the controller offers a completion record
   {command id, core id}. The arbiter merges the nine controllers' records
   into one stream, tagged with the accelerator number. When the record is
   taken, the accelerator is idle again.

## The command beat

Every command is one 256-bit beat (`cmd_valid`/`cmd_data`/`cmd_ready`). The
field layout, from `us_pkg`, is this design's choice; the published design lists the
fields but not their encoding.

| bits | request (opcode 1) | bits | configuration (opcodes 2, 3, 4) |
|---|---|---|---|
| 255:252 | opcode | 255:252 | opcode |
| 251:236 | command id | 251:236 | index |
| 235:228 | CPU core id | 235:172 | value |
| 227:224 | accelerator type | 171:0 | unused |
| 223:160 | RX list host address | | |
| 159:144 | RX element count n | | |
| 143:80 | TX list host address | | |
| 79:64 | TX element count n | | |
| 63:0 | unused | | |

Configuration commands:

- **Opcode 2:** sets the member mask of group *index*. It replaces the whole
  row.
- **Opcode 3:** maps type *index* to group *value*.
- **Opcode 4:** sets the data weight of accelerator *index* to *value*[7:0].

Writes with an out-of-range index or group are ignored, and so are unknown
opcodes; the beat is still consumed. A request command stalls `cmd_ready` only while its own
group's queue is full. Table writes take effect on the next allocation. They
do not move a command that is already running: an accelerator removed from
a group finishes its current command first.

At reset:

- accelerator *i* belongs to group *i* mod 3;
- type *t* maps to group *t* mod 3;
- all weights are 1.

## Compacted scatter-gather lists

A host buffer is a list of (address, length) elements, one per page. Only
the first element can start mid-page, and only the last can end mid-page.
So the list leaves out the middle lengths. It is one 64-bit word per beat:

```
n = 1 :  Len[1]  Addr[1]
n >= 2:  Len[1]  Addr[1]  Addr[2] ... Addr[n]  Len[n]      (n + 2 words)
```

Every middle element is `PAGE_BYTES` (4096) long. The command requester
derives the fetch length from n: `sgl_words(n) * 8` bytes. The decoder takes
n from the request information entry. It toggles between RX and TX after each
list, and pops the entry after the last word of the TX list. The DMA must
return the two lists of each command, and the lists of successive commands,
in the order they were requested.

Lengths are bytes and must be whole 16-byte beats. An element must not
exceed `BUF_DEPTH` beats; one page is 256 beats, well inside the default 1024.

## The accelerator controller, and why small buffers work

This is the part that needs the most care. `acc_controller` owns:

- an RX SG queue and a TX SG queue, 512 elements each (a 2 MiB buffer of
  4 KiB pages);
- an RX data buffer and a TX data buffer, 1024 beats (16 KiB) each.

It follows two rules.

- **RX rule.** Request the next RX element only when
  `beats <= BUF_DEPTH - rx_count - rx_reserved`.
  - `rx_reserved` counts beats that have been granted but not yet arrived.
  - Without it, two back-to-back grants could both see room that only one
    of them will get.
  - `rx_reserved` grows by the element's beats on the grant and shrinks by
    one per arriving beat.
  - The RX buffer can therefore never overflow, whatever the DMA latency.
- **TX rule.** Request the next TX element only when
  `beats <= tx_count - tx_committed`.
  - `tx_committed` is output already promised to earlier TX requests that
    the submitter has not yet read.
  - A DMA write is thus only issued for data that is already in the buffer,
    so the submitter never waits on the accelerator in the middle of a
    write.

The two rules are independent, so a slow accelerator and a fast one can
share the DMA. A slow one just keeps fewer elements in flight. The
accelerator sees one AXI4-Stream packet per command. The controller raises
`tlast` on the final beat of the command's last RX element. It counts whole
elements to find that beat, because the distributor marks the last beat of
each element. The accelerator's own output `tlast` is ignored: the TX list
alone says how much output there is. The controller supports only
accelerators that produce exactly the bytes the TX list describes.

Status is busy from the allocator's claim until the completion record is
taken. A command's lists can therefore arrive after the claim without the
accelerator being handed out twice.

## Sharing the DMA: schedulers and requesters

`data_req_scheduler` is used twice, once for RX and once for TX.

- A pointer names the accelerator whose turn it is.
- While that accelerator requests and the requester downstream can accept,
  it is granted up to `weight` times in a row. Then the pointer jumps to the
  next requesting accelerator in round-robin order.
- An accelerator that stops requesting ends its turn at once, so its unused
  share goes to the others (work conserving).
- Weight 0 is treated as 1.
- Moving the pointer costs one idle cycle.
- While several accelerators keep requesting, each gets grants in proportion
  to its weight. The unit test checks exactly `10 × weight` grants out of the
  first 390 for weights (1,1,1,4,4,4,8,8,8).

On an RX grant, `rx_sg_requester` issues the DMA read. It also records
{accelerator, beats} in the *data request information* FIFO. The
`data_distributor` uses the head of that FIFO to steer the returning beats
to the right RX buffer, so **the DMA must return read data in request
order**.

On a TX grant, `tx_sg_requester` issues the DMA write. Only when the DMA
*accepts* the request does it queue {accelerator, beats} for the
`data_submitter`. The submitter then streams exactly those beats out of that
TX buffer, with `tx_data_last` on the last one. So write data never precedes
its request, and the DMA receives the data of its write requests in order.

RX and TX have separate schedulers, requesters and FIFOs. A read and a write
move in the same cycle whenever the DMA allows it.

## Interfaces of `ultrashare_top`

All streams use valid/ready handshakes. Reset is asynchronous and active low
(`rst_n`). There is one clock.

| group | ports | direction | meaning |
|---|---|---|---|
| commands | `cmd_valid`, `cmd_data[255:0]`, `cmd_ready` | in | command beats from the host |
| list fetch | `sgl_req_valid`, `sgl_req {addr[63:0], len[31:0]}`, `sgl_req_ready` | out | read `len` bytes of list at `addr` |
| list data | `sgl_valid`, `sgl_data[63:0]`, `sgl_ready` | in | list words, in request order |
| RX read | `rx_req_valid`, `rx_req {addr, len}`, `rx_req_ready` | out | read one element |
| RX data | `rx_data_valid`, `rx_data[127:0]`, `rx_data_ready` | in | read data, in request order |
| TX write | `tx_req_valid`, `tx_req {addr, len}`, `tx_req_ready` | out | write one element |
| TX data | `tx_data_valid`, `tx_data[127:0]`, `tx_data_last`, `tx_data_ready` | out | write data, in request order |
| completion | `cpl_valid`, `cpl {cmd_id[15:0], core_id[7:0]}`, `cpl_acc[7:0]`, `cpl_ready` | out | one record per finished command |
| accelerator i input | `acc_in_tdata[i]`, `acc_in_tvalid[i]`, `acc_in_tlast[i]`, `acc_in_tready[i]` | out | AXI4-Stream to accelerator i |
| accelerator i output | `acc_out_tdata[i]`, `acc_out_tvalid[i]`, `acc_out_tlast[i]`, `acc_out_tready[i]` | in | AXI4-Stream from accelerator i |
| status | `acc_status[8:0]` | out | 1 = accelerator idle |

The DMA engine, PCIe link and host memory are not part of this RTL. Neither
are the accelerators. A DMA that meets the ordering rules above, and any
one-input one-output AXI4-Stream core, can be attached to these ports.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `NUM_ACC` | 9 | accelerators (≤ 256) | paper's evaluation: nine accelerators |
| `NUM_GROUPS` | 3 | groups / command queues | paper's evaluation: three types |
| `NUM_TYPES` | 16 | accelerator types in the type map (4-bit field) | own choice |
| `DATA_W` | 128 | data beat width, bits | own choice |
| `CMDQ_DEPTH` | 64 | commands per group queue | own choice |
| `INFO_DEPTH` | 16 | request information / data request information entries | own choice |
| `BUF_DEPTH` | 1024 | RX and TX buffer beats (4 pages) | own choice ("a few pages") |
| `SGQ_DEPTH` | 512 | elements per RX/TX SG queue | own choice |

At the defaults, coarse synthesis gives about 3,100 flip-flop bits and
3.3 Mbit of memory. Almost all of the memory is the nine controllers'
buffers and SG queues, 361 kbit each.

## Files

| file | role |
|---|---|
| `us_pkg.sv` | widths, command/element/record structs, `sgl_words()` |
| `sync_fifo.sv` | first-word-fall-through FIFO used for every queue and buffer |
| `acc_group_table.sv` | group member masks and the type-to-group map |
| `data_priority_table.sv` | one 8-bit weight per accelerator |
| `command_detector.sv` | command decode, queue selection, table writes |
| `command_queues.sv` | one command FIFO per group |
| `acc_allocator.sv` | round-robin, rightmost-idle allocation |
| `command_requester.sv` | list fetches and request information |
| `sg_decoder.sv` | compacted list to elements |
| `sg_distributor.sv` | elements to per-accelerator SG queues, command start |
| `acc_controller.sv` | per-accelerator queues, buffers, request rules, status, AXI4-Stream |
| `data_req_scheduler.sv` | weighted round-robin |
| `rx_sg_requester.sv`, `data_distributor.sv` | RX path |
| `tx_sg_requester.sv`, `data_submitter.sv` | TX path |
| `rx_tx_data_manager.sv` | both paths with their FIFOs |
| `cpl_arbiter.sv` | round-robin merge of completion records |
| `ultrashare_top.sv` | the whole controller |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it if something hangs. With Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/us_pkg.sv \
    $(ls rtl/*.sv | grep -v us_pkg) tb/stream_acc_model.sv \
    tb/tb_ultrashare_top.sv --top-module tb_ultrashare_top
./obj_dir/Vtb_ultrashare_top
```

For a unit testbench, use `tb/tb_<module>.sv` and its top-module name instead.
`tb/stream_acc_model.sv` is only needed by the two system-level benches.

**`tb_ultrashare_top`** runs the controller at its default parameters. A
host/DMA model answers every port with random gaps and back-pressure. Nine
accelerator models run at 4, 2 and 1 cycles per beat; each XORs the low half
of a beat with its own key. The bench has three phases:

1. commands of three types, from one beat to 24 KiB;
2. a run-time change of the group table, the type map and the weights,
   followed by commands of four types;
3. a burst of 100 tiny commands that fills a command queue.

It checks, end to end:

- every DMA request is the next element of its command;
- RX data in flight never exceeds the buffer;
- TX is only requested for output that already exists;
- every input and output beat is correct and in order;
- `tlast` and `tx_data_last` are placed correctly;
- every completion names the command, its core and an accelerator of the
  right group.

It also counts, and requires, each mechanism at least once:

- table writes and their effect;
- several members of one group busy at once, and all nine busy;
- a command of another group finishing while a full group still has queued
  work;
- RX stalled by a full buffer, and TX waiting for output;
- weighted runs of grants;
- one-element, two-element and multi-page lists;
- command-queue back-pressure.

**`tb_ultrashare_workloads`** uses the same checks with real frame sizes.
Frames are taken as 3 bytes per pixel:

- nine accelerators of three types, processing 240×180 and 480×320 frames,
  first with uniform weights and then with (1,1,1,4,4,4,8,8,8). In the first
  40,000 cycles, the weight-1 accelerators' RX share drops by half;
- twelve requests to a three-member group, which complete in batches of
  three;
- three instances shared by applications sending 240×180, 480×360 and
  960×640 frames. The 960×640 frame is one 451-element list.

The run takes about 1.1 million cycles, a few seconds.

**`tb_ultrashare_scaled`** runs the largest size of the scalability sweep:
16 accelerators and 16 groups (`NUM_ACC = NUM_GROUPS = 16`). It has two
phases:

1. each type runs on its own accelerator;
2. after one group is given all 16 accelerators, 48 commands spread over
   all of them.

The unit benches drive each module on its own against a reference model.
They include the weighted-share check, list decoding at one word per cycle,
and buffer stalls in the accelerator controller.

## Where this design departs from, or adds to, its source

The structure follows the published UltraShare controller:

- grouping table, per-group queues and the allocation algorithm;
- the command requester and the request information queue;
- the compacted list decoder and distributor;
- per-accelerator controllers with page-sized buffers and their request
  rules;
- the data priority table and weighted data request scheduler;
- separate RX/TX paths with data request information, distributor and
  submitter.

The following are this design's own choices:

- **Encodings and widths:** the command beat, the configuration opcodes,
  all widths and depths, 4 KiB pages, 128-bit beats.
- **Allocation pace:** one queue examined per clock. The allocator waits for
  the requester to submit both list fetches before it scans again, as the
  source describes. The allocation test in the source reads both as "more
  than one idle" and as "not zero"; the RTL uses "not zero".
- **Reading of the scheduler loop:** *weight* grants per turn, weight 0
  counting as 1, and accelerators without requests skipped.
- **List word order:** read row by row from the source's list picture. A
  one-element list is two words.
- **DMA ordering:** lists and read data come back in request order. Write
  data is supplied in request order, after the request is accepted.
- **Completion path:** the completion record, its arbiter and the
  `cpl_acc` tag are additions. The source only says applications wait for
  completion.
- **Release point:** status returns to idle when the completion record is
  taken.
- **Bus protocol:** only AXI4-Stream is built. The source mentions a
  configurable bus adapter between controller and accelerator but describes
  only AXI4-Stream.
- **Accelerator contract:** one input and one output stream per
  accelerator, with output exactly as long as its TX list. The source
  allows an accelerator several inputs and outputs, each with its own list
  and buffer. That would need one list pair per port in the command and a
  buffer and SG queue per port; it is not built.
- **Elements:** whole 16-byte beats, and no longer than the buffer.

Not covered by this RTL:

- the DMA engine and PCIe;
- host software and its APIs;
- the on-board DDR;
- the accelerators themselves (an RGB to YCbCr converter and an AES-128
  core in the source's evaluation);
- the single-queue baseline and the other frameworks it is compared
  against.

The throughput and FPGA resource figures of the evaluation depend on those
parts and on a Virtex-7 build, so they are not reproduced. The scalability
sweep up to 16 accelerators and 16 groups is a change of `NUM_ACC` and
`NUM_GROUPS`. Its 16/16 end point is simulated functionally, but its
resource use is not measured.

## Known limits

- **The decoder is shared.** If one accelerator's SG queue is full (a list
  longer than 512 elements), list decoding for later commands waits until
  that queue drains. It drains as the data moves, so this costs time but
  cannot deadlock.
- **Some errors are not reported.** A type-map write that names a group
  beyond `NUM_GROUPS` is ignored. A command whose type maps to a group with
  no members waits in that group's queue until the host adds a member. An
  element larger than the buffer is never requested, so its command never
  finishes. None of these cases produces an error report.
- **Element counts must be at least 1.** A count of 0 is decoded as 1.
