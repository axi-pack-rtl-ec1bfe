# AXI-Pack: a banked memory controller that packs irregular streams onto the bus

Vector processors often stream data with a stride (a matrix column) or through an
index array (a sparse matrix row). On a plain AXI4 bus each such element costs a
narrow beat: a 32-bit element on a 256-bit bus uses an eighth of the data lines.
AXI-Pack extends the AR and AW requests with a few user bits that describe the whole
irregular stream in one burst. The memory endpoint gathers the scattered elements
and packs them tightly onto R, or unpacks W, so every beat carries a full bus of useful
data. Indexed accesses are resolved inside the memory: the processor sends the address
of the index array, never the indices themselves.

This repository holds synthesizable SystemVerilog for:

* the memory side of such a system: an AXI-Pack controller in front of a
  multi-banked SRAM;
* the address generator of a vector load-store unit that emits AXI-Pack bursts;
* self-checking testbenches for every block.

The default configuration is:

* 256-bit data bus;
* 32-bit words, so n = 8 word ports;
* 17 word-interleaved banks.

## 1. The protocol extension

The AR/AW user signal is 31 bits wide:

| bits  | strided burst (`pack=1, indir=0`) | indirect burst (`pack=1, indir=1`) |
|-------|-----------------------------------|------------------------------------|
| 0     | `pack`                            | `pack`                             |
| 1     | `indir`                           | `indir`                            |
| 5:2   | stride (low bits)                 | index size, log2 of bytes (0, 1, 2) |
| 30:6  | stride (high bits)                | element base address               |

With `pack = 0` the burst is ordinary AXI4. For packed bursts three fields change
meaning:

* `size` is the element size, not the beat size.
* `len` counts bus beats. A beat holds E = 32 / 2^size elements. The last beat may be
  partly filled, and its unused lanes carry zeros or are ignored.
* The data is bus-aligned. Element 0 is always in byte lane 0 of beat 0, whatever the
  start address.

For a strided burst, element k is at `addr + k * stride * 2^size`. The stride is
counted in elements.

For an indirect burst, `addr` points to an array of indices. Element k is at
`base + (index[k] << size)`.

Two choices here are this implementation's own, because the layout figure gives only
the field positions:

* the index size is encoded as log2 of bytes;
* the base offset is used as a byte address.

The helpers are in `axi_pack_pkg`:

* `make_strided_user` and `make_indir_user` build a user field;
* `user_pack`, `user_indir`, `user_stride`, `user_idx_size` and `user_idx_base`
  take one apart.

## 2. Controller structure

```
 AR/AW/W ─► axi_pack_demux ─┬─ base_converter ──────────┐
 R/B    ◄──                 ├─ strided_read_converter ──┤
                            ├─ strided_write_converter ─┤ word_port_mux (5:1 per lane)
                            ├─ indirect_read_converter ─┤        │ n word ports
                            └─ indirect_write_converter ┘        ▼
                                                     bank_xbar (n x m) ─► m x sram_bank
```

`axi_pack_controller` holds `axi_pack_adapter` (the demux, the five converters and the
port mux), then `bank_xbar` and the `sram_bank` instances. `axi_pack_system` adds
`vlsu_pack_addrgen` in front of it. The system is the top level.

### Word ports

Every converter talks to memory through n = 8 word ports, one per 32-bit lane of the
bus. A word request is `{addr, we, wdata, strb}`. It is taken on `valid && ready`.
Its response (read data, or just an acknowledgement for writes) arrives exactly one
cycle later. Nothing in the response says which request it belongs to.

Each multiplexer level keeps the fixed latency by registering the winner of a grant.
It then routes the response back to that winner in the next cycle. The crossbar and
the 5:1 port mux both work this way.

### Bank crossbar

Word address w maps to bank `w mod 17` and row `w div 17`.

* A prime bank count spreads nearly every stride over all banks.
* A power-of-two count would turn the divider into a bit select. The paper's area
  sweep compares the two.

Each bank grants one port per cycle by round robin. A port that loses keeps its
request and retries. `conflict_o` flags banks with more than one requester.

## 3. The strided read converter (the core mechanism)

The converter has five parts:

* a **request generator** (`req_gen`);
* an **info queue**;
* a **request regulator** (`req_regulator`);
* n **word queues**;
* a **beat packer** (`beat_packer`).

Let k be the number of words per element. Then E = n/k elements fit in one beat.
Lane i always carries word `i mod k` of element `i div k` of the current beat.

Every lane therefore has its own address pointer:

* start: `addr + (i div k) * stride * 2^size + 4 * (i mod k)`;
* advance per beat: `stride << (size + log2 E)`.

Lanes issue independently. A lane blocked by a bank conflict does not hold up the
others. Each lane's responses go into its own queue, in order.

The info queue gets one `{id, last}` entry per beat. The packer pops one word from
every queue plus one info entry to form an R beat. That makes R-beat assembly
independent of when each lane's words arrive.

The regulator gives each lane as many credits as its word queue has slots. A lane
issues only with a credit and gets the credit back when the packer pops its word. An
R channel that stalls therefore never overflows a queue.

Without stalls the converter delivers one beat per cycle. The testbench checks 64 beats
in at most 68 cycles.

**Linear mode.** A plain INCR or FIXED burst uses the same datapath. The pointers then
walk whole bus lines, and the strobes and lane positions follow the address. The base
converter and the index stage of the indirect converters both use this mode.

A new AR is accepted only after the previous burst has issued all its requests, so
the requests of two bursts never interleave.

## 4. Indirect converters

An indirect burst runs in two stages. They share the n word ports through a per-lane
round-robin `word_port_mux`.

1. **Index stage.** This is a strided read converter in linear mode. It fetches the
   index array as whole 256-bit lines into a two-line buffer. The start position is
   rounded down to a multiple of E. The first index then lines up with lane 0.
2. **Element stage.** `elem_req_gen` takes each index from the buffer and computes
   `base + (index << size) + 4 * (i mod k)`. It issues the element words. A beat
   packer then builds the R beats exactly as in the strided case.

Every r data beats need one index line, where r = element size / index size. The
ideal bus utilisation is therefore r / (r+1). With 32-bit elements and 32-bit indices
that is 50 %. The testbench sees a 32-beat burst take 66 cycles.

The write converter mirrors the read converter. A beat unpacker (`beat_unpacker`)
splits each W beat into per-lane words and strobes. Lanes with an all-zero strobe,
such as the padding of the last beat, are skipped. B is sent once every write word
has been acknowledged by the banks.

## 5. Ordering in the demux

`axi_pack_demux` steers each AR and AW by `pack` and `indir`. The controller does not
track IDs. To keep each direction's responses in order, a burst bound for a different
converter waits until all outstanding bursts of that direction have completed. Bursts
to the same converter can follow one another freely.

W beats follow AW order. A W beat is forwarded only after its AW has been accepted.

This is simpler than the paper's fully concurrent converters. Reads and writes still
run concurrently.

## 6. Vector address generator

`vlsu_pack_addrgen` takes one decoded vector memory operation:

* store or load;
* mode: unit-stride, strided, or in-memory indexed;
* `rs1`, `rs2`;
* element width and index width;
* `vl`;
* AXI ID.

It emits one AR or AW per cycle:

* **Unit-stride:** full-width INCR bursts, split at 4 KiB pages.
* **Strided:** one packed strided burst. The element stride is `rs2 >> eew`.
* **Indexed (vlimxei / vsimxei):** one packed indirect burst. `addr` is the index
  array (`rs2`). The user field carries the index width and the element base (`rs1`).

Packed bursts longer than 256 beats are split.

The instruction encoding of the new indexed instructions is not published. The block
therefore takes decoded fields, not instruction words.

## 7. Limits and departures

* Elements must be 32 bits or wider, because the word is the smallest unit a lane
  moves. The address generator issues narrower strided or indexed elements with a
  32-bit size.
* Index sizes of 8, 16 and 32 bits are supported; 64-bit indices are not.
* The indices of one beat are taken from a single buffered line. An index array must
  therefore start on a multiple of E indices: a 32-byte line for 32-bit elements and
  32-bit indices. Software that gathers through slices of a larger index array, such as
  the rows of a CSR matrix, must pad each slice to that boundary.
* WRAP bursts are served as INCR.
* Converters of one direction do not overlap in time (section 5).
* All responses are OKAY. There are no error responses.
* The SRAM is a generic synchronous array, not a technology macro. The 1024 rows per
  bank (68 KiB in total) and the queue depth of 4 are this design's defaults. The
  publication gives neither.
* Only the load/store address side of the vector processor exists here. The host
  core, the vector lanes and the system interconnect are not part of this RTL. At the
  top level, R and W data and the operation stream are ports.
* Bus width is a package constant (256 bits). Narrower buses need `DataWidth`,
  `NumPorts` and the shift constants changed together.

Some workloads do not fit the default 68 KiB:

* a 256 x 256 FP32 matrix needs 256 KiB;
* the largest square FP32 matrix that fits is 128 x 128.

## 8. Parameters

| parameter  | default | where                      | meaning                        |
|------------|---------|----------------------------|--------------------------------|
| DataWidth  | 256     | axi_pack_pkg               | AXI data bus width             |
| WordWidth  | 32      | axi_pack_pkg               | bank / word width              |
| NumPorts   | 8       | axi_pack_pkg               | n = DataWidth / WordWidth      |
| IdWidth    | 4       | axi_pack_pkg               | AXI ID width                   |
| NumBanks   | 17      | controller, system, xbar   | m, any value 1..32             |
| BankRows   | 1024    | controller, system, xbar   | words per bank                 |
| QueueDepth | 4       | converters                 | word/info queue depth, credits |

## 9. Verification

Each block has a bench in `tb/` named `tb_<module>`. Each bench compares against a
reference written independently of the RTL. It prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| bench                        | what it exercises |
|------------------------------|-------------------|
| `tb_sram_bank`               | latency, byte strobes |
| `tb_bank_xbar`               | 17 real banks against a flat reference, conflicts, starvation bound |
| `tb_word_port_mux`           | routing of one-cycle responses, round-robin bound |
| `tb_axi_pack_demux`          | class routing and order across converter switches |
| `tb_strided_read_converter`  | strides 0 to large, all element sizes, random R stalls, rate, regulator stalls |
| `tb_strided_write_converter` | strided stores with strobes |
| `tb_indirect_read_converter` | index sizes 8/16/32, element sizes, utilisation |
| `tb_indirect_write_converter`| indexed stores |
| `tb_base_converter`          | INCR / FIXED / WRAP, narrow and unaligned bursts |
| `tb_axi_pack_adapter`        | all five converters together against a memory model |
| `tb_axi_pack_controller`     | the same end to end through crossbar and banks, full size |
| `tb_vlsu_pack_addrgen`       | burst sequences, 4 KiB and 256-beat splits |
| `tb_axi_pack_system`         | vector operations end to end at default parameters |
| `tb_axi_pack_workloads`      | a 32 x 32 in-situ transpose (strided loads and stores) and a 48-row CSR sparse matrix-vector product (in-memory indexed loads), integer data, full system |

`tb_axi_pack_system` runs the top with all default parameters. It executes:

* unit-stride, strided and indexed vector loads and stores;
* with bank conflicts, regulator stalls and converter switches.

It counts each of these mechanisms and fails if one never occurs. `tb_word_mem` is a
behavioural n-port word memory with random stalls, used by the converter benches.
`tb_axi_tasks.svh` holds the shared AXI master tasks and the reference model.

To simulate with Verilator (5.x), list the package first:

```
verilator --binary --timing --assert -Irtl -Itb rtl/axi_pack_pkg.sv \
  $(ls rtl/*.sv | grep -v axi_pack_pkg) tb/tb_word_mem.sv tb/tb_axi_pack_system.sv \
  --top-module tb_axi_pack_system
./obj_dir/Vtb_axi_pack_system
```

Verilator prints a few lint notes that are deliberate:

* unconnected FIFO status outputs;
* unused upper bits of shared structs;
* `rst_ni` used both as the asynchronous reset and in `disable iff` of the handshake
  assertions.
