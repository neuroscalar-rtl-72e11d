# NeuroScalar hardware: trace collector and Neutrino inference accelerator

This is the RTL of the NeuroScalar system's two hardware parts:

- **Trace collector.** It sits beside a processor's reorder buffer (ROB). It records the retired instructions of one chosen process into an on-chip FIFO and drains them to system memory.
- **Neutrino accelerator.** It runs a 2-layer LSTM performance model over each 100,000-instruction epoch of features. For every instruction it writes a predicted retirement latency, log(1+cycles), and a short/long class.

Both are plain synthesizable SystemVerilog, and the top module `neuroscalar_top` joins them. The host core, the memory system and the driver software stay outside the design; their signals are ports of the top.

## 1. Block overview

```
 host core retire port ──► trace_collector ──(256-bit writes)──► system memory
   (5 records/cycle)        └ trace_fifo 512 x 5 records
                                                    driver converts the trace to features
 system memory ◄──► mem_ctrl ──► global_input_buffer  (1.25 MiB, 13-byte words)
                      │     └──► global_weight_buffer (1.25 MiB, 256-byte rows)
                      │                     │ row broadcast
                      │        tile_control ─┼─ static program, weight stager
                      │                     ▼
                      │   neutrino_tile x NT: tile_weight_buffer (128 KiB, 2 halves)
                      │                       tile_input_buffer  (16 KiB)
                      │                       vector_mac 16 x 16 INT8
                      │                       accumulation_buffer 256 x INT32
                      │                       post_proc_unit (bias, ReLU, sigmoid,
                      │                          tanh, LSTM cell, heads)
                      └◄── predictions (32-bit word per instruction)
```

| Module | Role |
|---|---|
| `ns_pkg` | Types, memory formats, fixed-point constants, activation tables, weight-row map |
| `trace_fifo` | 512-entry FIFO of 1000-bit entries (5 records of 200 bits); first-word fall-through |
| `trace_collector` | Process-id gating, epoch counting, retire back-pressure, drain to memory |
| `global_input_buffer` | 100,824 words of 13 INT8 features |
| `global_weight_buffer` | 5,120 rows of 256 INT8 weights |
| `tile_input_buffer` | 64 rows of 256 INT8 (features, projected input, h0, h1, gates, classifier layer) |
| `tile_weight_buffer` | 2 halves of 256 rows; one half is staged while the other is used |
| `vector_mac` | 256 INT8×INT8 products per cycle: one broadcast activation times one weight row |
| `accumulation_buffer` | 256 INT32 running sums |
| `post_proc_unit` | Bias and activation, 16 elements per cycle; LSTM cell update; output heads |
| `tile_control` | Walks the fixed inference program; stages weights ahead of the MAC |
| `neutrino_tile` | One tile built from the blocks above |
| `mem_ctrl` | LOAD_W, LOAD_X and result write-back on a 256-bit memory bus |
| `neutrino` | Accelerator: global buffers, controller, memory controller, NT tiles |
| `neuroscalar_top` | Trace collector plus accelerator |

## 2. Trace collector

**Input.** The collector accepts up to `RET_W = 5` retired instructions per cycle. Each record is 200 bits (25 bytes):

- 64-bit PC;
- 64-bit memory address;
- 8-bit opcode class;
- three register ids, each a 4-bit class and an 8-bit number;
- 28 zero padding bits.

**Tracing.** Recording happens only while the collector is armed and the running process id equals the target id. Records from any other process are dropped, so tracing pauses across context switches without any action from the driver.

**FIFO.** Records are packed five to an entry. The FIFO holds 512 entries.

**Back-pressure.** `ret_ready` drops only while tracing with a full FIFO. This is the only way the core is stalled.

**Drain.** Each entry leaves as four 256-bit writes into a 128-byte slot, starting at a configured base address.

**Epoch end.** After `tc_epoch_len` traced instructions the collector flushes the last partial entry, padding it with zero records. It then reports done.

## 3. Accelerator

### Model computed

Each instruction step computes:

1. **Input projection.** 13 features → 256, with a bias and no activation.
2. **Two stacked unidirectional LSTM layers, H = 256.** Each gate i, f, g, o is computed as W_ih·x + W_hh·h + b. Then:
   - c' = f·c + i·g
   - h = o·tanh(c')
3. **Classifier** (central instructions only). FC 256→64 with ReLU, then FC 64→2.
4. **Regressors** (central instructions only). Two regressors, 256→1 each, one for short and one for long latencies. The class selects which regressor's value is output.

### Windows

An epoch of `n_instr` instructions is cut into windows of `SEQ_N` instructions, with stride `SEQ_R`. Each window starts with zero h and c state and predicts only its central `SEQ_R` instructions. These start at offset s = (SEQ_N − SEQ_R)/2.

With `NT` tiles, tile k runs windows k, k+NT, and so on. All tiles run in lockstep on the same weight row, which the global weight buffer broadcasts.

### Schedule

The schedule is static:

- `tile_control` holds two walkers over the same program: the compute walker and the stager.
- A matrix product with K input rows holds the MAC for exactly K cycles. This is 256 cycles for a 256-input product, with one activation element and one weight row per cycle.
- The product is followed by 3 pipeline cycles and then post-processing (16 elements per cycle).
- Meanwhile the stager copies the next matrix into the free half of the tile weight buffer, at one row per cycle.

Memory latency never stalls the computation, because features and weights are on chip before `start`. The only data-dependent delay is result write-back back-pressure.

### Fixed point

| Quantity | Format |
|---|---|
| Activations, features | INT8, 5 fraction bits |
| Weights, biases | INT8, 6 fraction bits |
| Products and sums | INT32 |
| Cell state | INT16, 5 fraction bits |
| Output value | INT16, 5 fraction bits |

Post-processing rules:

- After a product: v = sat8((acc + (bias << 6)) >>> 6).
- Sigmoid and tanh use 256-entry tables holding round(32·f(v/32)).
- Cell state: c' = sat16((f·c + i·g) >>> 5).
- Hidden state: h = sat8((o·tanh(sat8(c'))) >>> 5).
- Class is long when logit1 > logit0.
- Output value = sat16(selected regressor sum >>> 6).

### Global weight buffer layout

There is one 256-byte row per input element, and column j is output j. Gates are stored in the order i, f, g, o.

| Rows | Content |
|---|---|
| 0–12, 13 | Projection weights, bias |
| 14 + l·2052 + g·512 + 0..255 | Layer l, gate g, W_ih |
| 14 + l·2052 + g·512 + 256..511 | Layer l, gate g, W_hh |
| 14 + l·2052 + 2048 + g | Layer l, gate g bias |
| 4118–4373, 4374 | FC1 (outputs 0..63), bias |
| 4375–4438 | FC2 (outputs 0, 1) |
| 4439–4694 | Regressors (outputs 2 = short, 3 = long) |
| 4695 | Bias of outputs 0..3 |

The 4,696 used rows take 1,202,176 bytes of the 1,310,720-byte buffer.

### Memory formats and commands

**Commands:**

- `LOAD_W`: `cmd_len` rows of 256 bytes.
- `LOAD_X`: `cmd_len` instructions.
- `start`: runs inference over `n_instr` instructions.

**Features in memory.** Each instruction takes a 16-byte slot: 13 feature bytes, then 3 ignored bytes.

**Results.** One 32-bit word per instruction, `{15'b0, class, value[15:0]}`, at `res_base + 4·index`. Only predicted instructions are written.

## 4. Parameters

| Parameter | Default | Origin |
|---|---|---|
| FIFO depth × records per entry | 512 × 5 | Paper |
| Record size | 25 B | Derived from the paper's 2.5 MB per 100,000 instructions |
| Global input / weight buffer | 1.25 MiB each | Paper |
| Tile weight / input buffer | 128 KiB / 16 KiB | Paper |
| Vector engine | 16 × 16 INT8 lanes | Paper |
| Hidden size H | 256 | Paper (accelerator section) |
| Tiles NT | 1 (8 is the larger option) | Paper |
| Window SEQ_N | 576 = 3 × ROB 192 | Design choice |
| Predicted segment SEQ_R | 64 | Design choice |
| Retire width | 5 | Design choice |

## 5. Where this design departs from the paper, or fills gaps

- **Unidirectional LSTM.** The model description calls the encoder a stacked bidirectional LSTM. The accelerator description, and the appendix weight shapes, size everything for one 256-wide direction. The hardware follows the accelerator description.
- **Hidden size.** The model section uses H = 128 by default; the accelerator uses 256. This design uses 256.
- **FIFO size.** The paper gives "512 entries × 5 instructions = 12 KB". It also gives 2.5 MB per 100,000 instructions, which is 25 bytes per instruction. These disagree. This design keeps the 512 × 5 geometry and the 25-byte record, so the FIFO stores 62.5 KiB. The paper does not give a record format.
- **Cycles per layer.** The paper reports 8,264 cycles per LSTM layer at 99 % MAC utilisation. Here one layer per instruction takes about 8 × (256 + 3 + 17) + 21 ≈ 2.2 k cycles. The full-size test measures 4,661 cycles per instruction step for the whole step: 17 products (4,352 MAC cycles), post-processing and weight waits. MAC utilisation is therefore about 93 %. The waits come from the two-half staging scheme: after a short product (the 13-row projection, or the 64-row FC2) or a cell update, the next matrix is not yet staged.
- **Throughput.** One tile needs about 576 × 4,661 / 64 ≈ 42 k cycles per predicted instruction. At an assumed 1 GHz this is about 0.024 MIPS, against the paper's 0.02 MIPS for one tile. The paper gives no clock frequency.
- **Not specified in the paper.** The following are this design's choices:
  - window stride = SEQ_R, with no window running past the end of the epoch;
  - the fixed-point formats and the activation tables;
  - the memory formats and the command interface;
  - the 256-bit bus;
  - the placement of the cell update in the post-processing unit.
- **Host-side conversion.** Turning trace records into the 13 normalised INT8 features is host software, and is not built in hardware. The paper splits each address into 22/22/20-bit parts but gives no scaling. The end-to-end test uses a simple fold of its own.
- **Not modelled.** Area, power and the 7 nm physical design.

## 6. Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Every testbench:

- compares the module with an independent model (`tb/tb_ref_pkg.sv` for the arithmetic);
- checks cycle counts;
- uses `$urandom` stimulus;
- has a watchdog;
- ends with `TB_RESULT checks=N failures=M`.

`tb/tb_sysmem.sv` is a behavioural memory with random write back-pressure.

**Full-size test.** `tb_neuroscalar_top` uses the default parameters and runs a complete flow:

1. It traces an epoch of 3,003 instructions, including foreign-process cycles and a long memory stall that fills the FIFO.
2. It converts the trace to features and loads all 4,696 weight rows.
3. It infers 640 instructions (two 576-instruction windows) and compares every result word with the reference model.

The test counts each mechanism and fails if any never occurred:

- pause;
- FIFO-full stall;
- flush;
- write back-pressure;
- weight waits;
- result stalls.

It takes about 40 s in Verilator.

**Running a test** (Verilator 5):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/ns_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_neuroscalar_top.sv --top-module tb_neuroscalar_top
./obj_dir/Vtb_neuroscalar_top
```

Replace the testbench name to run another one.
