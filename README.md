# LW-GCN accelerator in SystemVerilog

A graph convolutional network layer computes `X' = ReLU(A · X · W)`. Here `A` is the graph's adjacency matrix, `X` holds the node features and `W` holds the layer's weights. Real graphs are very sparse, and so are first-layer features. A dense matrix engine would spend almost all its work on zeros. A sparse engine built the usual way (CSR/CSC) sends an irregular stream of work to each processing element and needs index arithmetic that a small FPGA cannot afford.

This design runs both products of a layer on one array of 32 processing elements (PEs) with 16 multiply-accumulators each:

- **Combination** `X·W`. It is a sparse-dense product (SDMM) for the first layer and a dense product (DMM) after that.
- **Aggregation** `A·(XW)`. It is always an SDMM with a binary `A`.

Three things make this cheap:

1. **Packed COO (PCOO).** Each non-zero becomes a 16-bit packet: start-of-row, end-of-row, valid, column in tile (9 bits) and value (SINT4). The row number is never stored. Each PE counts its rows itself, moving on at every end-of-row. A row with no non-zeros in a tile becomes one packet with SOR=EOR=1 and VLD=0, which writes back the old partial sum unchanged.
2. **Outer-product tiling with a replicated, row-grouped dense memory.** The left matrix is cut into tiles of 512 columns and the right matrix into tiles of 512 rows. A right-matrix tile (512 rows × 16 SINT16) sits in the dense data memory (DDM). The DDM is split into 32 banks of 16 rows each; row `j` lives in bank `j mod 32` at depth `j div 32`. The DDM is copied four times, one copy per group of 8 PEs.
3. **Collision-free streams.** A software pre-processor spreads the left-matrix rows over the PEs round robin (row `i` goes to PE `i mod 32`). It then orders the packets so that in any cycle the PEs of one group never ask one bank for two different depths. Where it cannot avoid that, it inserts an empty (all-zero) packet, which stalls that PE for one cycle. Two PEs asking for the same row get the same bank output. So every PE takes one packet every cycle, with no arbitration stalls in hardware.

Partial sums stay in SINT32 in each PE's output buffer across tiles. When a product is complete, results are quantized to SINT16 and moved on for the next step.

## Dataflow of one layer

```
           ext. memory (512-bit words)
         |             |             ^
   LOAD_DDM/HDR/BIAS  COMPUTE      STORE
         v             v stream      |
       DDM  <----+    EWM  <----+   OMMB
 (4 copies x 32  |     |        |    ^  |
  banks x 16     |     v        |    |  |
  rows)  ------> PE array (32 PEs x 16 MAC)
                 |     output buffers (SINT32)
                 |         |
                 |     data mover: >>> shift, ReLU, saturate to SINT16
                 +-- COPY_DDM --+-- MOVE (to OMMB, and to EWM if asked)
```

| step | left operand (EWM stream) | right operand (DDM) | after the step |
|---|---|---|---|
| layer-1 combination `X·W1` | PCOO packets of `X`, SINT4 values | `W1` tiles loaded from memory | MOVE to the OMMB |
| aggregation `A·(XW)` | PCOO packets of `A`, binary | `XW` tiles copied from the OMMB (COPY_DDM) | MOVE with ReLU to the OMMB and, transposed, to the EWM |
| later combination `H·W2` | dense `H`, one SINT16 per PE per word, with a shared header | `W2` loaded from memory | MOVE to the OMMB |

**DMM with a shared header.** In a DMM step the left matrix `H` is dense, so each row has the same column pattern. Word `j` of the stream holds element `H[r_k, j mod C]` for every PE `k`, where `r_k` is the current row of PE k. A small header table gives the shared PCOO control for column `j mod C`: SOR, EOR, VLD and the DDM row. The header index wraps every `C` words. The data mover writes `H` into the EWM in exactly this layout when an aggregation finishes. The next combination then needs no trip to external memory.

**Bias.** The bias is a LANES × SINT32 register. A COMPUTE with `bias_flag=1` (used on the first tile) starts each row's accumulation from the bias instead of the output buffer. The bias of a layer is therefore added in its last product, the aggregation, before the ReLU.

## Processing element

The PE has two pipeline stages and takes one element per cycle.

1. **Decode.** The PCOO packet is decoded. Its column goes out as the DDM address, and the DDM row comes back in the same cycle; the DDM is LUT RAM with asynchronous reads.
   - The scalar operand is the PCOO value in SDMM, the edge weight from the EWM in DMM, or 1 in binary mode. It is forced to 0 when VLD=0.
   - The output buffer is read at the PE's current local row.
2. **MAC.** All 16 accumulators add `scalar × dense[l]` to a start value. The start value is:
   - the accumulator itself when SOR=0,
   - the previous tile's partial sum from the output buffer when SOR=1,
   - the bias when SOR=1 and `bias_flag` is set.

   On EOR the 16 sums are written back and the row counter moves on.

Consecutive elements of one row need no forwarding, because the accumulator is the feedback path. A row's read-modify-write of the buffer cannot collide with its neighbour's either, because every row has its own buffer address.

## Instructions

The host writes an instruction list into external memory and starts the run through the register bus. The top control loads the list into a 256-entry IRAM and then runs each instruction to completion, one after another. Instructions are 64 bits, packed 8 per memory word:

| bits | 63:60 | 59 | 58 | 57 | 56 | 55:32 | 31:16 | 15:0 |
|---|---|---|---|---|---|---|---|---|
| field | op | sparse | bias | binary | flag | ext. address | count | aux |

| op | action |
|---|---|
| `LOAD_DDM` | `count` words (2 rows each) into DDM rows 0.., written to all 4 copies |
| `LOAD_HDR` | DMM header table (32 entries per word) |
| `LOAD_BIAS` | one word of 16 SINT32 bias values |
| `COMPUTE` | feeds `count` EWM words to the PE array. If `flag` is set, they are first streamed from external memory. `aux` is the DMM column count. |
| `MOVE` | quantizes `count` rows: `aux[4:0]` is the right-shift and `aux[5]` enables ReLU. Writes the OMMB, and the EWM too if `flag` is set. |
| `COPY_DDM` | copies OMMB rows `aux..aux+count-1` into DDM rows 0.. |
| `STORE` | writes `count` OMMB rows out, 2 per word |
| `END` | raises done and the interrupt |

Register map (32-bit): 0 CTRL (bit 0 starts a run); 1 instruction-list word address; 2 instruction-list length in words; 3 STATUS `{overflow, collision, done, busy}`; 4 busy cycles of the last run.

The external port has separate read and write channels, each 512 bits wide. Read requests are accepted on `gnt`, and data comes back in order with any latency. While a COMPUTE streams, the DMA only issues reads that the EWM has room for, counting reads still in flight. The array drains the EWM while it fills, and it waits (without losing a cycle's work) whenever the EWM is empty.

## Sizes

| parameter | value | origin |
|---|---|---|
| PEs | 32 | from the paper (512 DSPs = 32 × 16) |
| MACs per PE | 16 | from the paper (hidden size 16) |
| tile T | 512 | from the paper |
| row groups g / DDM banks | 32, 16 rows each | from the paper |
| DDM copies r / PE groups | 4 | from the paper |
| sparse value / dense data / partial sums | SINT4 / SINT16 / SINT32 | from the paper |
| output-buffer rows per PE | 640 (20480 nodes) | chosen to fit PubMed (19717 nodes) |
| EWM | 10240 words of 512 bits | chosen: holds a 20480 × 16 dense matrix |
| header table / IRAM | 64 / 256 entries | chosen |

All three citation graphs the accelerator is meant for fit at these sizes. Cora (2708 nodes, 1433 features), CiteSeer (3327, 3703) and PubMed (19717, 500) need at most 617 rows per PE and 9872 EWM words. One limit was not simulated: a PubMed first-layer stream of about 31k words per tile plus stalls must stay under the 16-bit `count` field.

## Measured speed

At the default size, a two-layer GCN on a random graph with Cora's dimensions takes 29,886 cycles from start to done, about 0.15 ms at 200 MHz. The graph has 2708 nodes with about 18 binary features each, out of 1433, and on average 3.9 neighbours per node plus a self loop. The published design reports 0.041 ms on the real Cora graph. Three parts of this RTL cost noticeably more than needed:

- **MOVE.** Each step moves one row per cycle into the OMMB, about 2,800 cycles per step with four steps per run.
- **COPY_DDM.** Each aggregation tile first copies its 512 rows, one per cycle.
- **Instruction overhead.** Instructions do not overlap, so the DMA latency of each one adds up.

A double-buffered DDM, a wider OMMB port or overlapping the data move with the next compute would close most of the gap. The compute steps themselves run at one stream word per cycle whenever the EWM has data. Stall packets and empty-row packets make up a large share of the stream: 6,943 and 14,834 packets respectively on this graph.

## Where this RTL departs from, or adds to, the published design

- The published text uses SINT4 for the dense tile but SINT16 for layer outputs, and the layer outputs become the dense tile of the next step. Here the DDM holds SINT16, so both fit.
- The text says the previous-tile partial sum comes from the output memory backup. The block diagram shows it coming from the PE's own output buffer, which is what is built. The OMMB holds only quantized, finished results.
- The instruction set, register map, external-memory protocol, quantizer (arithmetic shift plus saturation) and buffer depths are this design's own. The source only says that instructions are generated by software and decoded by a top control unit.
- The block diagram shows a direct path from the PE array to external memory. Here results always go through the OMMB and a STORE.
- Timing has not been closed. The LUT-RAM read, 8-input bank selection and 16 multiplies sit in one path through the decode stage. The published design reaches 200 MHz on a Kintex-7 with its own pipelining, which is not described in enough detail to copy.
- The DDM is loaded two rows per cycle. The published description does not say how many write ports it has.
- Mismatches between the stream and the hardware are detected but not recovered: a bank collision or an output-buffer overflow sets a sticky status bit.

## Files and simulation

`rtl/lwgcn_pkg.sv` holds the shared constants and types (PCOO packet, instruction, opcodes). The other files in `rtl/` each hold one module:

- PE datapath: `pcoo_decoder`, `pe_addr_gen`, `mac_array`, `pe_output_buffer`, `pe`
- memory system: `ddm`, `mem_selector`, `pe_array`, `ewm`, `ommb`, `iram`
- control and data movement: `data_mover`, `ext_mem_if`, `periph_if`, `top_control`
- the whole accelerator: `lwgcn_top`

Every module has a self-checking testbench `tb/tb_<module>.sv`, and each prints `TB_RESULT checks=… failures=…`. `tb/lwgcn_tb_pkg.sv` holds the host software model: PCOO packing, round-robin assignment, collision stalling and the integer reference arithmetic.

`tb_lwgcn_top` runs a two-layer GCN at the default size. The graph has 600 nodes and 700 sparse features, with hidden size 16 and 7 classes. The run has 25 instructions and 871 stream words. It checks every output value against the reference and counts each mechanism: SDMM, DMM, binary mode, bias start, cross-tile accumulation, empty rows, stall packets, shared reads, EWM underflow, OMMB-to-DDM copies, ReLU and the EWM write-back. It also checks that the array consumes one word per cycle.
`tb_gcn_cora` runs the same flow at Cora's size (2708 nodes, 1433 features, 7 classes), with 43,343 checks.

To run one testbench:

```
verilator --binary --timing -Wno-fatal rtl/lwgcn_pkg.sv tb/lwgcn_tb_pkg.sv \
  $(ls rtl/*.sv | grep -v pkg) tb/tb_lwgcn_top.sv --top-module tb_lwgcn_top
./obj_dir/Vtb_lwgcn_top
```

Block testbenches need only the files of the block and its submodules. Some testbenches override parameters for speed (for example, `tb_pe_array` uses 8 PEs and 2 groups); the top-level test does not.
