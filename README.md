# Tensor Memory Engine — on-the-fly tensor layout in the memory path

Programs that work on multi-dimensional data often want that data in a different order from the one it is stored in. A matrix may be stored row-major but read by columns. An image may be stored with its colour channels interleaved but processed one channel at a time. A convolution may want its input flattened into patches. The usual fix is to copy the data into the new layout first. That costs memory, bandwidth and time, and the copy thrashes the caches.

The Tensor Memory Engine (TME) removes the copy. It is a block of programmable logic attached to the *coherent* port of a processor's interconnect. Software registers a **reorganized object**: an address range that no memory backs. Each range comes with a rule that says where each of its elements lives in the original tensor. When the CPU misses in its caches on a line of that range, the interconnect snoops the engine. The engine claims the line and builds it on the spot. It works out which raw elements belong in the 64 bytes. It reads each one from DRAM with non-cached reads issued on the read channels of that same port, puts every element at its place in the line, and returns the finished line as snoop data. The CPU sees a perfectly laid-out, sequentially readable array. The original tensor is never rewritten.

This repository holds synthesizable SystemVerilog-2017 for the engine's data path and its configuration registers, with a self-checking testbench per block and one for the whole engine.

## 1. Describing a layout

A reorganized object is described by:

| Field | Meaning |
|---|---|
| `a` (`reorg_base`) | Base address of the reorganized (virtual) range |
| `reorg_size` | Its size in bytes; snoops in `[a, a+reorg_size)` are claimed |
| `b` (`target_base`) | Base address of the raw tensor in memory |
| `s'` (`width`) | Element size: 1, 2, 4 or 8 bytes |
| per dimension *i* | start `ω_i`, stride `σ_i` (in elements), length `w_i` |

Dimension 0 varies fastest. Element number `o` of the reorganized object is found as follows:

```
c_i  = ω_i + ( o / (w_0 · w_1 · … · w_{i-1}) ) mod w_i        (coordinate per dimension)
addr = b + s' · Σ_i c_i · σ_i                                   (raw byte address)
```

In other words, the reorganized object is the raw tensor read through an N-deep nested loop. Loop *i* runs `w_i` times, starting at `ω_i` and stepping by `σ_i`. Unused dimensions are programmed as (ω=0, σ=0, w=1). Up to `N_MAX` = 8 dimensions are supported.

Take a row-major matrix of 4 rows and 5 columns whose elements are numbered 0…19 in storage order. Some layouts it can be given:

| Layout | Dimensions, fastest first (ω, σ, w) | Elements of the new object |
|---|---|---|
| identity | (0,1,20) | 0, 1, 2, … 19 |
| transpose | (0,5,4), (0,1,4) | 0, 5, 10, 15, 1, 6, 11, 16, … |
| 2×3 sub-block at row 1, col 1 | (0,1,3), (0,5,2), (1,1,1), (1,5,1) | 6, 7, 8, 11, 12, 13 |
| same block, transposed | (0,5,2), (0,1,3), (1,1,1), (1,5,1) | 6, 11, 7, 12, 8, 13 |

The testbench for the whole engine checks the first four elements of each of these sequences, which are the ones the original description lists. In the transpose row, the fast dimension walks down a column (stride 5, one row, 4 rows) and the slow one moves to the next column (stride 1). A complete transpose would need w=5 in the slow dimension, because there are 5 columns. The original description prints w=4 there, so its transposed object covers only the first four columns. The testbench follows the printed numbers.

A 64-byte request line holds `n = 64/s'` elements: 64 bytes, 32 halfwords, 16 words or 8 doublewords. Each element needs its own DRAM read. The engine is therefore a *request multiplier*. For 1-byte elements it issues 64 DRAM reads for each line the CPU asks for. This is the main performance limit of the approach and is a property of the design, not a bug.

## 2. Life of a reorganized line

```
                 ┌───────────────── configuration port (AXI4-Lite) ─────────────────┐
                 │ validity array  +  descriptor array  (D entries × N_MAX dims)    │
                 └───────┬───────────────────────────────────────────┬──────────────┘
                         │ ranges                                    │ operands
 ACE AC ──► trapper ──► monitor ──► preparator ──► RDG ──► fetch unit ──► AXI AR
 ACE CR ◄──    ▲        (ROB)       c_i per dim    one      ID table
 ACE CD ◄──────┘          ▲                        descr./   isolate+align ◄── AXI R
        finished lines,   └──────────── partial data responses ─────────┘
        in snoop order
```

1. **Trapper**: a snoop address (AC) is compared with every valid range. On a miss the trapper answers `CRRESP = 0` at once. On a hit it passes {line address, config_ID, WRAP, fragment count} to the monitor. It answers `CRRESP.DataTransfer`, and later streams the line on CD.
2. **Monitor**: allocates a re-order buffer (ROB) entry. The ROB index becomes the `request_ID`. The monitor then sends {address, config_ID, request_ID} to the preparator.
3. **Preparator**: computes the first element's coordinates `c_i`, one dimension per pipeline stage.
4. **Request Descriptors Generator (RDG)**: emits one read descriptor per clock for each element of the line. Each descriptor holds a raw byte address and a byte offset in the new line.
5. **Fetch unit**: turns each descriptor into a single-beat AXI read, tagged with a free ID from its ID allocation table. When the read data returns, in any order, it cuts out the element and shifts it to its place in the line.
6. **Monitor**: merges each fragment into the ROB entry's line buffer and counts it. A line that is complete *and* oldest is handed back to the trapper.
7. **Trapper**: sends the line as 4 CD beats, starting at the snooped beat (WRAP).

All blocks talk through valid/ready handshakes. Any stage can stall the ones before it. The engine uses one clock, `clk`, with the asynchronous active-low reset `rst_n`. The original engine ran at 300 MHz in an FPGA.

## 3. Configuration port (`tme_config_port`)

This block holds `D` = 8 specifications. For each entry it keeps a validity bit (the *validity array*) and the fields of §1 (the *descriptor array*). Software fills an entry before it touches the reorganized range, sets the valid bit, and clears the bit when it is done with the object. Entries are read by the trapper (ranges) and by the preparator (operands), combinationally.

It is an AXI4-Lite subordinate with 32-bit registers. It handles one write and one read at a time, honours WSTRB and always answers OKAY. Register map for entry `e`, at byte offset `e·0x100`:

| Offset | Register |
|---|---|
| 0x00 | CTRL, bit 0 = valid |
| 0x04 | REORG_BASE `a` |
| 0x08 | REORG_SIZE (bytes) |
| 0x0C | TARGET_BASE `b` |
| 0x10 | WIDTH `s'` (1/2/4/8) |
| 0x20 + 0x10·i | START `ω_i` |
| 0x24 + 0x10·i | STRIDE `σ_i` |
| 0x28 + 0x10·i | LENGTH `w_i` |

After reset every entry is invalid and every length is 1. A snoop to an entry that is being rewritten while valid sees a mix of old and new fields, so clear the valid bit first.

## 4. Trapper (`tme_trapper`)

The hit test for entry *e* is `valid[e] && addr ≥ a_e && addr − a_e < size_e`. If several ranges overlap, the lowest-numbered entry wins. ACSNOOP and ACPROT are accepted but not decoded: any snoop into a registered range is served.

- **Snoop response**: CR is a registered response stage. Hits set only the DataTransfer bit of CRRESP. The trapper does not accept a new snoop while its CR response is pending. It also stalls a hit while the monitor's ROB is full, so AC back-pressure is the only flow control towards the interconnect.
- **Request to the monitor**: the request carries the line-aligned address and the entry index (config_ID). It also carries `WRAP = addr[5:4]`, the beat the CPU asked for first, and the fragment count `64/s'`.
- **Snoop data**: a finished line is copied into a one-line buffer. It is sent as four 128-bit beats, starting at the WRAP beat and wrapping around; `cd_last` marks the fourth beat. Lines leave in the order their snoops arrived, because the ROB releases them that way.

## 5. Monitor and re-order buffer (`tme_monitor`)

Fragments of many lines arrive interleaved and out of order, but the interconnect needs the snoop data in snoop order. The monitor reconciles the two. It holds `M_MAX` = 8 lines in flight. Each ROB entry has these fields:

| Field | Meaning |
|---|---|
| busy | Entry allocated |
| issued | Command already sent to the preparator |
| reorg_addr, config_ID | The request |
| WRAP | Passed back with the line |
| need / Cnt | Fragments required (64/s') / received so far |
| Data | 64-byte line buffer |

There are three pointers: *tail* (allocate), *issue* (next command to the preparator) and *head* (release). Allocation and issue are separate, so a snoop is accepted at once even while the preparator is stalled. The `request_ID` sent down the pipeline is simply the entry index. A fragment therefore finds its line without a search: the monitor writes the fragment's 64-bit `aligned_data` into word `word` of that entry under its byte enables `byte_en`, and increments Cnt. The head line is released when `Cnt == need`. Its entry is freed on the same handshake, so an index is never reused while fragments for it may still arrive.

`req_ready` is low exactly when the tail entry is still busy, meaning M_MAX lines are outstanding. Assertions check that no fragment arrives for a free or already complete entry.

## 6. Preparator (`tme_preparator`)

The preparator turns a line address into the coordinates of its first element. It works in N_MAX + 1 = 9 pipeline stages and accepts one command per cycle:

- stage 0 computes `o = (reorg_addr − a) >> log2 s'`;
- stage *k* + 1 computes `c_k = ω_k + q mod w_k` and `q ← q / w_k`, where q starts as o.

Each stage looks up its own operands (`ω_k`, `w_k`) in the descriptor array, using the config_ID carried along the pipeline. Different objects can therefore be in the pipe at the same time. The last stage adds the remaining fields for the RDG. For each dimension these are the stride (the field is called `lengths`), the start (`starts`), the wrap limit `ω + w` (`limits`) and `c` (`coords`). It also adds request_ID, width and `b`. The pipeline advances only when its output is free. Each stage holds a full 32-bit divider and modulo unit, which is the largest logic in the design. A multi-cycle divider per stage would cut area at the cost of throughput.

## 7. Request Descriptors Generator (`tme_rdg`)

The RDG holds one line's operands and walks its coordinates like an odometer. Each cycle it emits one descriptor:

```
read_addr    = b + s' · Σ_i coords_i · lengths_i
write_offset = k · s'                       (k = 0 … 64/s' − 1)
```

It then steps `coords_0`. Each coordinate that reaches its limit goes back to its start and carries into the next dimension. After the last descriptor of a line, the next line is loaded on the same clock edge, so descriptors flow with no gap, one per cycle, as long as the fetch unit accepts them. The testbench checks this rate.

## 8. Fetch unit and aligner (`tme_fetch_unit`)

The target memory may answer reads out of order. The fetch unit therefore gives every descriptor its own AXI ID: the index of a free entry in an `L_MAX` = 16-deep *ID allocation table* that stores the descriptor. The input stalls while the table is full. Reads go out on the AR/R channels of the engine's ACE port as ReadNoSnoop single beats: ARLEN 0, ARSIZE log2 s', INCR, ARCACHE 0010 (non-cacheable), ARSNOOP 0000, ARDOMAIN 11 (system), ARBAR 00. The AR channel is registered.

On an R beat, the table entry for RID gives back the descriptor. The unit then does two things:

- **Isolate**: shift the 128-bit beat right by `read_addr[3:0]` bytes and keep `s'` bytes.
- **Align**: shift left by `write_offset[2:0]` bytes into a 64-bit word. It emits that word as `aligned_data` with `word = write_offset[5:3]` and the matching `byte_en`, plus the request_ID, and frees the entry.

RREADY is always high. RRESP is not examined: a DRAM error returns whatever data came with it.

## 9. Parameters and interfaces of `tme_top`

| Parameter | Default | Meaning |
|---|---|---|
| `D` | 8 | Specifications held at once |
| `M_MAX` | 8 | Lines in flight (ROB depth) |
| `L_MAX` | 16 | Element reads in flight (ID table depth) |
| `CFG_AW` | 16 | Configuration address bits |
| `N_MAX` (package) | 8 | Dimensions per specification |
| `LINE_BYTES` (package) | 64 | Cache line |
| `BUS_BYTES` (package) | 16 | ACE CD and AXI R data width |

The original design names D, N_MAX, M_MAX and L_MAX but gives no values. All the defaults above except the 64-byte line are choices of this implementation. Addresses are 32 bits and IDs are 8 bits.

Ports:
- `cfg_*`: AXI4-Lite configuration port.
- `ac_*`, `cr_*`, `cd_*`: ACE snoop address, response and data channels.
- `m_ar*`, `m_r*`: the read-address and read-data channels of the same ACE port, used for the element reads. The ACE write channels are not brought out, because the engine never writes memory.

The struct types passed between blocks are in `tme_pkg`. Their field names follow the original block diagram.

## 10. How this implementation departs from the original description

- **Not included**: the performance-monitoring unit. It is named in the original design, but what it counts is not described. The host CPUs, interconnect and DRAM controller are outside the engine. The testbenches drive the ACE snoop channels directly, and a behavioural AXI memory (`tb/tme_mem_model.sv`) answers reads after random delays, out of order.
- **Own choices**:
  - the register map;
  - the parameter values;
  - the 128-bit data width;
  - the `word` and `byte_en` fields of the partial response (the original prints only `aligned_data` and `request_ID`);
  - carrying the fragment count with each request;
  - lowest-entry priority for overlapping ranges;
  - the critical-beat-first CD ordering;
  - the use of only the DataTransfer bit of CRRESP.
- **Field meanings**: the original diagram's RDG input fields are called `lengths`, `starts`, `limits` and `coords`. Here `lengths` carries the strides σ and `limits` carries ω + w. The diagram sizes these arrays by `D`, but elsewhere D is the number of specifications. They are sized by N_MAX here.
- **Units**: the original equations leave the unit of the offset `o`, and of `Σ c_i σ_i`, open. Here both count elements: `o` is the byte offset divided by `s'`, and the sum is scaled by `s'` to give a byte address. With this choice the small examples of §1 hold for every element size.
- **Read port**: the original text has the element reads travel over the coherent interface, while its block diagram draws them on a separate uncached ACE/AXI port. Here they are a separate AR/R channel bundle carrying ACE read attributes, which can be wired either way.
- **Coherence corner cases**: the engine never caches or writes reorganized lines. It does not handle other snoop types in any special way, such as invalidations caused by CPU writes to a reorganized range. Software must treat reorganized ranges as read-only.

## 11. Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block against an independent reference model, prints `TB_RESULT checks=… failures=…` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_tme_config_port` | Register writes (with partial byte strobes) and readback; reset contents; arrays seen by the data path; one-cycle B and R timing |
| `tb_tme_trapper` | Hit/miss against overlapping random ranges; CRRESP; request fields; wrapped CD beat order under back-pressure |
| `tb_tme_monitor` | Out-of-order, interleaved fragments; in-order release; byte-exact merge; ROB-full stall |
| `tb_tme_preparator` | Coordinates against plain division; 9-cycle latency at one command per cycle; back-pressure |
| `tb_tme_rdg` | Every descriptor against a mixed-radix reference; one descriptor per cycle with no gap between lines |
| `tb_tme_fetch_unit` | AR fields, unique IDs in flight, isolation and alignment for all element sizes, out-of-order responses, table-full stall |
| `tb_tme_top` | Whole engine at default parameters (below) |
| `tb_tme_bandwidth` | Whole engine at defaults streaming 32 consecutive lines through 2-, 3- and 4-dimensional axis-reversal views for each element size; data, exactly 64/s' reads per line, cycles per line |

`tb_tme_top` programs the engine over AXI4-Lite and snoops lines through ACE. It checks every returned beat against a reference that applies the formulas of §1 to a memory whose byte at address A is a hash of A. It covers:

- the four small layouts of §1, with their element sequences;
- three rounds of random specifications (1–8 dimensions, all element sizes);
- a burst that fills the ROB;
- the reorganizations used in the original evaluation, at full size:
  - 2048×2048 matrix transpose;
  - Im2col and Conv2D flattening of a 1024×1024 image with a 2×2 filter;
  - (8,512,512,3)→(8,3,512,512) permutation;
  - mode-3 unfolding of 8×64×64×128;
  - Batch2Space of (8,64,64,3) into 128×256;
  - slicing of 64×64×64×512 with strides (2,4,2,64).

  For each one it spot-checks element addresses and reads 12 lines.

It counts each mechanism and fails if any never happened: snoop hit, snoop miss, ROB full, fetch table full, out-of-order memory response, non-zero WRAP, RDG carry, CD back-pressure, entry invalidation, and each element size. The whole run takes well under a second.

`tb_tme_bandwidth` shows the cost of request multiplication. With the behavioural memory (1–24 cycles of random latency) and 16 reads in flight, a line takes about 87 cycles for 1-byte elements, 44 for 2-byte, 22 for 4-byte and 12 for 8-byte elements, whatever the number of dimensions. The bound is the number of element reads per line, not the address arithmetic: dimensionality costs nothing once the preparator pipeline is full. These figures come from the model and are not DRAM measurements.

To run a testbench with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-WIDTH -Irtl -Itb --top-module tb_tme_top \
  rtl/tme_pkg.sv tb/tme_tb_pkg.sv \
  rtl/tme_config_port.sv rtl/tme_trapper.sv rtl/tme_monitor.sv rtl/tme_preparator.sv \
  rtl/tme_rdg.sv rtl/tme_fetch_unit.sv rtl/tme_top.sv \
  tb/tme_mem_model.sv tb/tb_tme_top.sv -Mdir obj_top
./obj_top/Vtb_tme_top
```

`tb_tme_bandwidth` builds from the same file list, with its own testbench file in place of `tb/tb_tme_top.sv`. For a single block, list `rtl/tme_pkg.sv`, `tb/tme_tb_pkg.sv`, the block's RTL file and `tb/tb_tme_<block>.sv`. The fetch unit's testbench also needs `tb/tme_mem_model.sv`. The RTL builds with no warnings at Verilator's default settings. `-Wno-WIDTH` is needed only for the testbenches' reference arithmetic, which relies on implicit widening. `+verilator+rand+reset+2` randomises all uninitialised state and should not change any result.

## 12. What to watch when changing it

- Every ID is 8 bits wide, so `M_MAX` and `L_MAX` must not exceed 256. `D` sets the config_ID width.
- Changing `BUS_BYTES` changes the WRAP width and the isolation shift. Changing `LINE_BYTES` changes the fragment count and the RDG's descriptor count. Both are package constants used throughout.
- The preparator's per-stage dividers set the clock rate. The RDG's address sum (N_MAX 32-bit multiplies) comes next.
