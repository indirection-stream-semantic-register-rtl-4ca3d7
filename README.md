# Indirection stream registers: gathering sparse-dense operands in hardware

A sparse-dense product such as `y[i] += A_vals[j] * x[A_idcs[j]]` spends most of its
instructions on bookkeeping. For every useful multiply-add, a simple in-order core
loads an index, shifts it, adds a base address, loads the dense operand, loads the
sparse value and updates two pointers and a loop counter. On a single-issue core
the floating-point unit then does useful work about one cycle in nine.

A *stream semantic register* (SSR) removes most of that bookkeeping for dense data.
A floating-point register is turned into a window onto a memory stream. Reading the
register pops the next element of an affine address sequence. Writing it pushes an
element to such a sequence. Address generation and memory traffic run in hardware
beside the FPU, and a hardware loop repeats the one compute instruction.

The *indirection* stream register (ISSR) in this repository extends the SSR so that
the stream can also be `x[idx[0]], x[idx[1]], ...`. The register streams the index
array itself, turns each index into an address and fetches the dense element. With
one SSR streaming `A_vals` and one ISSR gathering `x[A_idcs[j]]`, the sparse dot
product becomes a single repeated `fmadd` instruction. The FPU is then limited only
by how fast the memory port can deliver operands.

The RTL implements the *streamer*: one SSR and one ISSR, the switch that maps them
onto the FPU's register ports, and their memory ports. It is written in
synthesizable SystemVerilog-2017 and has testbenches for every block. The core, the
FPU, the hardware loop and the surrounding multi-core cluster are existing
components. They are not part of this RTL; the testbenches model the core, the FPU
and the memory in a few lines each.

## Where the streamer sits

```
              cfg (A)                         FPU register ports (B)
                 |                        3 read ports, 1 write port
        +--------v---------------------------------------------+
        |  issr_streamer                 ssr_switch (D)        |
        |   +-------------------------+  ft0 <-> lane 0        |
        |   | lane 0: ssr_lane (SSR)  |  ft1 <-> lane 1        |
        |   |  issr_addr_gen (affine) |  while redirection on  |
        |   |  data FIFO + rpt_cnt    |------------------------+--> mem[0]
        |   +-------------------------+                        |
        |   +-------------------------+                        |
        |   | lane 1: ssr_lane (ISSR) |                        |
        |   |  issr_addr_gen (indir.) |   issr_mem_mux (F)     |
        |   |  data FIFO (E)+rpt_cnt  |---- index + data ------+--> mem[1]
        |   +-------------------------+                        |
        +------------------------------------------------------+
```

* **Configuration (A).** The core writes memory-mapped registers, one small
  register file per lane. `cfg_word_i[9:5]` selects the lane and `cfg_word_i[4:0]`
  the register.
* **Register interface (B) and switch (D).** `redir_i` comes from the core's
  redirection control bit. A kernel sets it after configuring the lanes and clears it
  after its last streamed instruction. While `redir_i` is high, FPU operand register
  `ft0` reads lane 0 and `ft1` reads lane 1. A write to `ft0` or `ft1` goes
  to that lane. Every other register number goes to the FPU's own register file.
* **Memory ports (C).** Each lane has its own 64-bit port. The ISSR's index fetches
  and data accesses share port 1 through a round-robin multiplexer (F).

## Lane configuration registers

Each lane has the same register map. The word index is given in the table below.
The map and the field layout are this implementation's own choice.

| word  | name          | meaning |
|-------|---------------|---------|
| 0     | status (ro)   | bit 0 done: no job running or pending, FIFO empty; bit 1: a job waits in the shadow registers |
| 1     | repeat        | each read datum is returned `repeat+1` times |
| 2..5  | bound[0..3]   | iterations of loop d minus one |
| 6..9  | stride[0..3]  | byte increment applied when loop d is the outermost loop that advances |
| 10    | idx_cfg       | [1:0] index size in 16-bit units (1: 16-bit, 2: 32-bit); [12:8] extra shift; [16] indirection on (ISSR only) |
| 11    | data_base     | byte address that indices are added to |
| 24+d  | read pointer  | start address; writing it launches a **read** job with d+1 loops |
| 28+d  | write pointer | start address; writing it launches a **write** job with d+1 loops |

All writes go to a **shadow** copy. A job starts when its pointer is written. If a job
is still running, the new one waits in the shadow copy and starts as soon as the old
one has issued its last address. The core can therefore set up job *k+1* while job *k*
streams. Shadow values stay valid after a launch, so the next job of the same shape
needs only one register write, its pointer. The status bit 1 tells the core when the
shadow copy is free again.

Strides are relative. When loop d advances, all loops inside it restart, and
`stride[d]` is added to the pointer. Software therefore writes
`stride[d] = A[d] - sum_{j<d} bound[j]*A[j]` for absolute per-loop steps `A[d]`
(`tb_ssr_affine_iter` checks exactly this relation).

A job whose direction or repeat count differs from the running one also waits until
the lane's data FIFO has drained. This keeps data of the old job from being consumed
under the new job's rules.

## The indirection address generator (the core of the design)

`issr_addr_gen` is the part that is new compared with a plain SSR. In affine mode the
four-loop iterator's pointer is the data address. In indirection mode the same
iterator instead walks the **index array**:

1. **Index fetch.** The iterator is forced to one loop with an 8-byte stride. It
   starts at the 64-bit word that holds the first index. `bound[0]` gives the number
   of indices minus one, and the hardware works out how many 64-bit words those
   indices span. This counts in 16-bit units from the array's offset inside its
   first word:
   `words = (offset + n*size - 1)/4 + 1`.
2. **Outstanding-request counter.** Index reads go out on their own request port.
   A counter tracks requests in flight plus words already buffered, and it stops
   new requests when that number reaches the depth of the index FIFO (2 words by
   default). Every response is therefore guaranteed a slot. The memory port never
   has to be back-pressured, and the FIFO cannot overflow.
3. **Serializer with short-offset counter.** A two-bit counter `soffs` points at the
   current 16-bit slot of the 64-bit word at the FIFO head. It starts at the
   array's byte offset `ptr[2:1]`, so index arrays only need natural alignment,
   not 8-byte alignment. It advances by 1 (16-bit indices) or 2 (32-bit indices)
   per emitted address. The word is popped when the counter wraps or when the
   job's last index is emitted.
4. **Address formation.** `addr = data_base + (index << (3 + shift))`. The fixed
   3 makes indices count 64-bit elements. The programmable extra shift lets an
   index select a row of a power-of-two-wide row-major matrix. This is how a
   CSR-times-dense-matrix product walks one column of the dense matrix per pass,
   using `data_base = B + 8*column` and `shift = log2(columns)`.

The same address stream serves writes. An ISSR write job is a **scatter**: values the
FPU writes to `ft1` land at `data_base + index<<(3+shift)`.

### Why the peak is 4/5 or 2/3 of the port

The index words and the gathered data share one 64-bit port. A 64-bit index word
carries four 16-bit or two 32-bit indices. Streaming k data words therefore costs
k + k/4 or k + k/2 port cycles. The data rate, and with it the FPU utilization of a
one-`fmadd`-per-element kernel, is at most **4/5 with 16-bit** and **2/3 with 32-bit**
indices. The round-robin arbiter alone would split the port 1:1. The outstanding-request
counter is what keeps index fetches down to one per four (or two) data accesses: the
index FIFO fills, and index requests stop until a word is consumed.

The testbenches measure this. With an ideal single-cycle memory and an FPU that never
stalls, a 512-element dot product runs at a utilization of **0.796** with 16-bit and
**0.664** with 32-bit indices. `tb_issr_streamer` and `tb_ssr_lane` fail if the cycle
count leaves a narrow window around these limits.

## Data lane

`ssr_lane` wraps one address generator with a 5-entry, 64-bit data FIFO, which is
used in both directions:

* **Read job.** A memory read goes out for every address while the FIFO has room for
  all reads in flight (credit counting). Responses are pushed into the FIFO, and the
  FPU reads the head. The repetition counter keeps the head in place for `repeat+1`
  reads, so one streamed value can feed several instructions.
* **Write job.** FPU writes fill the FIFO. Each address is sent to memory together
  with the FIFO head.

Memory port protocol, used throughout: a request (`mem_req_t`: 32-bit byte address,
write flag, 64-bit data, byte strobes) is handed over on a cycle with
`qvalid && qready`. Read data returns in request order, one or more cycles later, with
`pvalid`, and cannot be refused. Writes return nothing.

## Register switch

`ssr_switch` is purely combinational. For each of the three FPU read ports it flags
whether the operand comes from the streamer (`fpu_ris_ssr_o`). It then presents the
lane's FIFO head and its valid (`fpu_rready_o`). When the FPU issues an instruction, it
raises `fpu_rdone_i` on the ports it read, and each lane involved advances **once**,
even if two operands name the same stream register. The write port is routed the same
way, with a valid/ready handshake.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `AddrWidth`  | 18 | published configuration: covers a 256 KiB data memory; 16 to 32 allowed |
| `IndexWidth` | 18 | published configuration; 16 to 32 allowed |
| `DataDepth`  | 5  | published configuration: five data FIFO stages |
| 4 affine loops, 1 SSR + 1 ISSR | fixed | published configuration |
| `BoundWidth` | 18 | own choice |
| `RepWidth`   | 16 | own choice |
| `IdxFifoDepth` | 2 | own choice; enough for the 4/5 peak with single-cycle memory |
| `MaxOutstanding` | 8 | own choice; depth of the response-routing FIFO in the port multiplexer |

At the defaults the streamer synthesizes (generic cells) to about 1,050 flip-flops
plus 776 bits of FIFO storage.

## How far to trust it, and where it departs

What follows the published architecture: the split into address generator and data
mover, and the shadowed configuration. Also the unchanged four-loop affine iterator,
the one-loop, 8-byte index fetch in indirection mode, the outstanding-request counter
with its decoupling FIFO, and the two-bit short-offset serializer for 16- and 32-bit
indices with unaligned arrays. So do the `<<(3+shift)` scaling and base add, the
shared FIFO for both directions with its repetition counter, the round-robin sharing
of the ISSR's single port, and the widths and depths listed above.

What is this implementation's own: the register map and field encodings, the
memory-port protocol, credit-based read issue, and computing the index word count in
hardware. The drain rule between jobs of different kind, the switch's handshake names
and pop-once rule, and the depths of the index and routing FIFOs are also its own.
Exception handling of the original SSR is not modelled. Only register redirection
and data streaming are.

The published description is not consistent about which peak rate goes with which
index size. The architecture overview and the conclusions pair 16-bit indices with 2/3
and 32-bit indices with 4/5. The measurements pair them the other way round. Counting
index words per data word, as above, agrees with the measurements: 4/5 for 16-bit and
2/3 for 32-bit indices. This RTL reaches those rates.

Not included, because they are existing components the streamer plugs into: the
integer core, the FPU and its hardware-loop sequencer, the FP register file, the
core complex's port multiplexing, the 32-bank data memory, its interconnect, the DMA
engine, the instruction caches and the cluster crossbar. Area, timing and energy
figures cannot be reproduced from RTL alone.

Verification is by simulation only, with two-state Verilator. The testbenches compare
against values computed independently in the testbench, never against the RTL's own
intermediate signals. They are randomized, and the unit and end-to-end tests pass for
seeds 1 to 9 (`+verilator+seed+N`):

| testbench | what it shows |
|-----------|---------------|
| `tb_ssr_affine_iter` | 60 random 1-4 loop jobs against absolute address arithmetic; one address per cycle |
| `tb_issr_idx_serializer` | 200 random index arrays, both sizes, all alignments, shifts; word consumption and one address per cycle |
| `tb_issr_addr_gen` | register read-back, affine and gather jobs against a memory model with random stalls, shadow queuing, status |
| `tb_issr_mem_mux` | per-requester in-order responses, strict alternation under contention, writes untracked |
| `tb_ssr_lane` | ISSR and SSR lanes: gathers, scatter, repetition, 2-D reads, writes; 4/5 and 2/3 rate windows |
| `tb_ssr_switch` | random mapping and pop checks against a reference |
| `tb_issr_streamer` | whole streamer at default parameters: sparse dot products (rates checked), CSR matrix-vector, CSR matrix-matrix over 4 dense columns with shadow-queued jobs, repeated operands, scatter, affine write, memory stalls, FPU stalls; results compared bit for bit; every mechanism must occur |
| `tb_spvv_sweep` | dot-product utilization over 2 to 5000 nonzeros for both index sizes: 0.33 at 2 nonzeros, 0.800 (16-bit) and 0.666 (32-bit) at 5000 |
| `tb_csrmv_sweep` | CSR matrix-vector products, 3200 columns, 1 to 48 nonzeros per row on average, up to about 12,000 nonzeros; CSR times 2- and 4-column dense matrices through the extra index shift; both index sizes; every row bit-exact, cycle count at the port limit |

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/issr_pkg.sv tb/tb_issr_streamer.sv --top-module tb_issr_streamer
./obj_dir/Vtb_issr_streamer
```

Replace the testbench name to run any other. `-y rtl -y tb` lets Verilator find each
module in the file of the same name. The package must be listed first. All
testbenches run in well under a second. The behavioural memory `tb/tb_tcdm_model.sv`
has a `stall_i` input that refuses requests at random, to imitate bank conflicts.

To lint the design:
`verilator --lint-only -Wall -Wno-fatal rtl/issr_pkg.sv rtl/issr_streamer.sv -y rtl --top-module issr_streamer`.
The warnings left are style warnings only. They flag parameters and bits that a
particular configuration does not use, FIFO fill-level outputs left open, and the reset
that both resets the flops and disables the assertions.

## Files

* `rtl/issr_pkg.sv`: widths, memory request type, register map
* `rtl/issr_streamer.sv`: top: configuration demux, two lanes, switch
* `rtl/ssr_lane.sv`: one SSR or ISSR: address generator, data FIFO, repetition counter, port mux
* `rtl/issr_addr_gen.sv`: shadow/runtime configuration, index fetch, output mux
* `rtl/ssr_affine_iter.sv`: four nested loop counters and the shared pointer
* `rtl/issr_idx_serializer.sv`: short-offset counter, index extraction, shift and base add
* `rtl/issr_mem_mux.sv`: round-robin merge of index and data requests
* `rtl/ssr_switch.sv`: register-to-lane mapping
* `rtl/stream_fifo.sv`: generic valid/ready FIFO
* `tb/`: one testbench per module, two workload sweeps (dot products; CSR matrix-vector and matrix-matrix products) and the memory model
