# AIA: ranged indirect memory access inside the HBM stacks of a GPU

Sparse matrix products spend much of their time on two-level indirect loads.
To compute one row of C = A x B in CSR form, a GPU thread first reads the row
pointers of A to find the row's non-zeros, then, for every non-zero, uses its
column index to read the row pointers of B. Each of these loads depends on the
previous one. Over the memory bus, that is one round trip for the index and one
for the data, repeated for every element, and the loaded words are scattered
over memory.

AIA (Acceleration of Indirect memory Access) moves this pattern into the HBM
stack. The GPU sends one command, and an engine in the stack's base die does
the dependent reads next to the DRAM:

```
AIA_range(dst, N, R, a, b):
    for i in 0 .. N-1:
        idx = b[i]
        for r in 0 .. R-1:
            return  a[idx + r]   as word  dst + R*i + r
```

All N*R results come back as one response stream. N dependent round trips over
the GPU's memory path become one request and one stream, and the L1/L2 caches
then see a dense, sequential block of words.

This RTL covers the AIA logic of a whole H200-class memory system: 6 HBM
stacks, each with 16 channels of 2 pseudo channels. Each pseudo channel has one
AIA engine, so there are 32 engines per stack and 192 in all. A switching
network inside each stack lets any engine read from any pseudo channel of its
stack. The DRAM dies, the HBM controller/PHY and the GPU itself are outside the
design. Their signals are ports of the top level.

## How SpGEMM uses it (R = 2)

The SpGEMM kernel uses only R = 2, which reads a `[start, end)` pair of CSR
row pointers per index:

| command | b (indices) | a (table) | N | result |
|---|---|---|---|---|
| AIA_1 | `&map[i]` (balanced row -> original row) | `rpt_A` | 1 | `rpt_A[row], rpt_A[row+1]`: where row's non-zeros lie |
| AIA_2 | `&col_A[start]` | `rpt_B` | nnz of the row | `rpt_B[c], rpt_B[c+1]` for each column c of the row |

With these ranges the GPU thread walks `col_B`/`val_B` row by row. It inserts
the columns into its hash table (allocation phase: count distinct columns) or
adds `val_A * val_B` (accumulation phase). Hashing, row grouping and sorting
stay in GPU software; AIA only delivers the pointers.

A worked example, used by `tb_aia_engine` and `tb_aia_stack`, uses two 4x4
matrices:

```
A = | A 0 B C |     B = | a 0 0 b |     rpt_A = 0 3 4 5 7      rpt_B = 0 2 3 5 8
    | 0 0 0 D |         | 0 0 c 0 |     col_A = 0 2 3 3 1 1 2  col_B = 0 3 2 0 2 0 1 3
    | 0 E 0 0 |         | d 0 e 0 |     map   = 1 2 3 0  (balanced row -> original row)
    | 0 F G 0 |         | f g 0 h |
```

Balanced row 3 is original row 0. AIA_1 on `map+3` returns `0 3`. AIA_2 on
`col_A[0..2] = 0 2 3` returns `0 2 | 3 5 | 5 8`: the extents of B rows 0, 2
and 3.

## Block structure

```
            GPU side (per pseudo channel)                          HBM side
   cmd/out streams          ordinary reads/writes
        |                          |
  +-----v------+                   |
  | aia_engine | x32               |
  +-----+------+                   |
        | index lane + range lane  |
  +-----v-----------------------+  |
  | aia_switch  64 x 32 crossbar|  |
  +-----+-----------------------+  |
        | per pseudo channel       |
  +-----v------------------------v-+
  | pc_port_mux  (AIA vs. GPU)     | x32  ----> p_req / p_rsp ----> HBM controller + DRAM
  +--------------------------------+
             aia_stack  x6  =  aia_hbm_top
```

| file | role |
|---|---|
| `rtl/aia_pkg.sv` | sizes (6 stacks, 16 channels, 2 pseudo channels), widths, request/response structs |
| `rtl/aia_engine.sv` | executes one `AIA_range` command at a time |
| `rtl/aia_switch.sv` | crossbar from the engines of a stack to its pseudo channels |
| `rtl/pc_port_mux.sv` | shares a pseudo-channel port between AIA and ordinary GPU traffic |
| `rtl/rr_arbiter.sv` | round-robin arbiter used by the two above |
| `rtl/aia_stack.sv` | one stack: 32 engines, the switch, 32 port muxes |
| `rtl/aia_hbm_top.sv` | six independent stacks (top level) |

## The engine

`aia_engine` accepts a command (`aia_cmd_t`: `dst`, `n`, `r`, `a`, `b`) only
while it is idle. It works it off with two lanes and two FIFOs:

```
 cmd --> [ index lane ] --ireq/irsp--> switch       reads b[0], b[1], ... ahead of use
              |
         index FIFO (IDXQ = 4 entries)
              |
         [ range lane ] --rreq/rrsp--> switch       reads a[idx + r], r = 0 .. R-1
              |
         output FIFO (OUTQ = 2 entries, word + last flag)
              |
         out stream: addr = dst, dst+1, ...; last on word N*R-1
```

- **Index lane.** Prefetches indices while the FIFO has room. The range lane
  pops an index when it issues that index's last range read.
- **Range lane.** Issues a read only when the output FIFO has a free slot for
  its result. Each lane has at most one read in flight, on its own switch port,
  so its response always has room. Responses need no reordering, and no port
  ever gets two responses in one cycle.
- **Addresses.** The returned index, zero-extended, is added to `a`. Each
  output beat carries its destination `dst + R*i + r`.
- **Completion.** The engine is busy until the beat flagged `last` leaves.
  A command with N = 0 or R = 0 completes with no beat.

Timing: suppose a read presented in cycle c returns in cycle c + L, and the
stream is not back-pressured. Then a command accepted in cycle 0 shows its
last beat in cycle L + 2 + N*R*(L+1). That is one word every L + 1 cycles,
with the index fetches hidden behind the range reads. `tb_aia_engine` checks
this exactly.

The lane/FIFO structure is this design's choice. The published description
gives the engine's function and mentions its prefetching, but not its
pipeline. A faster engine would keep several range reads in flight. That
needs a reorder buffer, and response buffering in the switch, because several
pseudo channels could then answer the same lane in one cycle.

## The switching network

An engine's tables can be anywhere in its stack, so every engine must reach
every pseudo channel. `aia_switch` is a full NM x NS crossbar. In a stack it
has 64 request ports (two lanes for each of the 32 engines) onto 32 pseudo
channels:

- **Address map.** Words are interleaved over the pseudo channels: channel =
  `addr[4:0]`, for 32 channels. Consecutive words of a table therefore sit on
  consecutive channels.
- **Arbitration.** Each channel port has a round-robin arbiter over the
  request ports that address it. A request passes through combinationally, so
  the switch adds no latency. A losing lane sees `m_req_ready` low and holds
  its request.
- **Tags.** The forwarded request's tag is replaced by the request port's
  number. The memory echoes the tag, and the switch uses it to steer the read
  data back.
  Selection in both directions is one-hot AND-OR.
- **Rule.** Because each request port has one read in flight, at most one
  channel answers a given port in any cycle. An assertion checks this.

Stacks are independent: an engine reads only its own stack. The GPU must
therefore place the tables of a command in the stack whose engine runs it.

## Sharing a pseudo channel

Each pseudo channel also carries the GPU's ordinary traffic. `pc_port_mux`
arbitrates round-robin between the host side (`h_*`) and the AIA side (`a_*`).
It marks the source in the top tag bit (0 = host, 1 = AIA) and steers each read
response back by that bit. As a result:

- Host tags must keep their top bit at 0. An assertion checks this.
- The memory must return reads in order with their tag. Writes produce no
  response.

## Interfaces and timing conventions

- Every request path is valid/ready. A request, once raised, stays stable
  until it is accepted (asserted in the engine).
- Read responses (`*_rsp_valid`) have no ready: the memory does not wait.
- Reset is synchronous and active low (`rst_n`).
- Widths (`aia_pkg`):
  - 32-bit data words (CSR pointers and indices).
  - 33-bit word addresses per stack (141 GB over 6 stacks needs 33 bits of
    4-byte words).
  - 32-bit N and 8-bit R fields, 8-bit tags.
- Top-level port arrays are `[stack][pseudo channel]`, with channel c /
  pseudo channel p at index 2c + p.

## What follows the published design and what does not

Taken from the published design:
- the `AIA_range(dst, N, R, a, b)` command and its semantics;
- R = 2 and the AIA_1/AIA_2 use in the SpGEMM kernel;
- the output order `dst + R*i + r`;
- one engine per pseudo channel, 16 channels x 2 pseudo channels, 6 stacks;
- a switching network inside the stack;
- gathering within each stack;
- a single response stream per command.

This design's own choices:
- all widths and encodings;
- the two-lane engine, with one read in flight per lane;
- the crossbar structure and round-robin arbitration;
- the word-interleaved address map;
- the port mux and its tag bit;
- returning results as a stream tagged with destination addresses, rather
  than writing them to memory at `dst`.

Two points of the source material were resolved:
- The sequence diagram writes the result as `a[b[1..N]], a[b[1..N]+1], ...`,
  which could be read as offset-major. The kernel's formula
  (`aia_1[2i]`, `aia_1[2i+1]`) is index-major, and that order is built.
- The example's printed column-index array of A has a 4 where the matrix has
  column 3. The testbenches use the matrix.

Where this RTL departs from, or stops short of, the published design:
- The published design places the engines inside the HBM controller in the
  base die. Here the engines sit in front of the controller: each pseudo
  channel's controller port (`p_*`) is a top-level port, and the controller
  with its DRAM timing is not modelled.
- The published text says the gathered data arrives at the caches as
  coalesced, sequential streams. This RTL delivers each command's words in
  order with consecutive destination addresses. It does not merge or coalesce
  the reads of different commands or engines.
- No cross-stack gathering: a command can only use tables in its own stack.
- How commands reach an engine from the GPU, and how a stream is written
  into the caches or memory, is not described. Both are plain valid/ready
  ports here.
- The published performance numbers (runtimes, speed-ups, cache hit rates)
  come from the whole GPU and cannot be checked against this RTL.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_aia_engine` | the worked example (AIA_1, AIA_2), N = 0, 60 random commands with output back-pressure against a reference model, exact cycle counts |
| `tb_aia_switch` | 4 x 4 crossbar: routing, data and tag return under random traffic, zero added latency, equal share under contention |
| `tb_pc_port_mux` | mixed host/AIA reads and writes with a scoreboard, strict alternation under contention, pass-through |
| `tb_aia_stack` | a 4-channel stack computing the example SpGEMM: AIA_1/AIA_2 on four engines at once, then uniqueCount and every value of C against a dense product |
| `tb_aia_hbm_top` | full size (6 x 32 engines): all engines run at once, with GPU traffic, random memory stalls and stream back-pressure; every beat and every ordinary read checked; counts switch stalls, port conflicts, memory and stream back-pressure, parallel engines and an empty command, and fails if any never happened |
| `tb_spgemm_workload` | one full-size stack running the allocation-phase pointer gathering of A x A for three synthetic matrices shaped like a road network (~3 nnz/row), an economics matrix (~6) and a protein matrix (~40); checks uniqueCount per row and reports AIA words per cycle |

The memory is modelled by `tb/hbm_pc_model.sv`, a fixed-latency, in-order
pseudo channel with optional random stalls. It is not a DRAM timing model.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/aia_pkg.sv rtl/rr_arbiter.sv rtl/aia_engine.sv rtl/aia_switch.sv \
  rtl/pc_port_mux.sv rtl/aia_stack.sv rtl/aia_hbm_top.sv tb/hbm_pc_model.sv \
  tb/tb_aia_hbm_top.sv --top-module tb_aia_hbm_top -Mdir obj -o sim
./obj/sim
```

The full-size top test builds in a few minutes and runs in well under a
second. To change the organisation, edit `NUM_STACKS`, `NUM_CH` and
`PC_PER_CH` in `aia_pkg`. The number of pseudo channels per stack must be a
power of two, for the address map, and at most 64, because the 128 tags
of the switch are shared by two lanes per engine.

## Capacity against the evaluated workloads

The engines hold no data, so what matters is whether an evaluated input fits
the address space and the command fields:

- The largest evaluated matrix needs about 0.8 GB of CSR (99 M non-zeros). The
  largest graph needs about 1 GB (126 M edges, 2.4 M nodes). Both fit easily
  in one stack of about 23.5 GB, and the 33-bit word address covers 34 GB.
- The longest row (4700 non-zeros) is far below the 32-bit N field.
- Every pointer and index fits a 32-bit word.

Performance numbers of the GPU system (runtimes, cache hit rates) cannot be
reproduced from this RTL. The workload testbench reports the engines'
throughput in this model's cycles only.
