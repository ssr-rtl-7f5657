# SSR two-accelerator transformer datapath (SystemVerilog)

This repository holds a synthesizable SystemVerilog model of the hybrid
spatial/sequential transformer accelerator described in "SSR: Spatial
Sequential Hybrid Architecture for Latency Throughput Tradeoff in Transformer
Acceleration". It implements two spatial accelerators joined by on-chip
forwarding, matching the architecture overview figure of that work.

## What the top computes

`ssr_top` runs a pair of dependent transformer layers:

* **Acc0 (HMM-Type0 + HCE0):** `Y = X x W0`. W0 is pinned in the tile-array
  weight memories. Y then goes through an optional LayerNorm or GELU and is
  reformatted to INT8.
* **Acc1 (HMM-Type1 + HCE1):** `S = reformat(softmax(Yq x K^T))`. The Yq rows
  come straight from Acc0's lanes through a force-partitioned buffer. K is
  loaded from DDR and transposed into the tiles.

The sequence after `start` is:

1. Load K.
2. Load W0, then X. During these loads, K already streams into Acc1's tiles.
3. Run both accelerators together. Acc1 starts on row r as soon as the HCE0
   lane that owns row r has written it.
4. Store S to DDR.
5. Pulse `done`.

The status counters report run cycles, cycles where both accelerators stream
at once, gating waits, back-pressure stalls, saturations, and the number of
LayerNorm and softmax rows.

## Block map

| File | Role |
|---|---|
| `ssr_top.sv` | Top: control state machine, DMA phases, both accelerators, buffers |
| `hmm_type0.sv`, `hmm_type1.sv`, `hmm_array.sv`, `aie_mm_tile.sv` | AIE-array matrix units. The A×B×C tile grid uses cascade reduction along B. Type0 holds pinned weights; Type1 loads its RHS per operation. |
| `axis_generator.sv` | Per-tile operand streams read from a banked buffer, with optional row-availability gating |
| `axis_receiver.sv` | Output stream termination, with row/column tagging and TLAST framing check |
| `layernorm.sv` | Three-stage line-buffer LayerNorm (mean, variance, normalise overlap across rows) |
| `softmax.sv` | The same three-stage structure: max, exp/sum, normalise |
| `gelu.sv` + `gelu_table.hex` | Table-based INT8 (Q3.4) GELU |
| `reformat.sv` | INT32 to INT8: scale, round, saturate |
| `transpose.sv` | Ping-pong tile transpose for the Type1 RHS |
| `force_partition_buffer.sv` | Banked RAM. The partition is forced to lcm(producer, consumer) rows × column blocks. |
| `axi_dma.sv` | AXI4 master, 64-bit, bursts of up to 16 beats, byte stream side |
| `sync_fifo.sv`, `seq_divider.sv`, `isqrt.sv`, `ssr_pkg.sv` | Shared helpers |

## Parameters

The defaults follow the paper wherever it gives a number:

* **HMM-Type1:** A1=4, B1=2, C1=1, read from the x8 LHS, x2 RHS and x4 output
  stream counts of the figure.
* **HMM-Type0:** A0=2, B0=4, C0=1, read from the drawing of eight tiles in two
  cascades of four. The paper prints no numbers for Type0.
* **Sizes:** DeiT-T gives embedding 192 and head width 64. The token count of
  197 is this design's choice.

## Departures from the paper and choices made here

* **LayerNorm variance.** It divides by n. The LayerNorm figure prints σ
  without the 1/n.
* **LayerNorm format.** The output is Q8 fixed point, with Q8.8 gamma and beta.
* **Softmax.** It uses a base-2 exponent with a table. The output is Q1.15.
* **Reformat.** It uses a multiply/shift/saturate formula.
* **Stream width.** Each stream beat carries one element.
* **Tile model.** The AIE tile is a functional RTL model. It has W2 parallel
  MACs per beat and a lock-step cascade. It is not a VLIW processor.
* **Not modelled.** Vendor hard IP (AIE core, PLIO, NoC, DDR) and the host CPU.
  The AXI4 master port and the configuration ports are where they would
  connect.
* **Design-time software.** The design-space exploration framework is not part
  of the hardware.

## Verification

The testbenches are in `tb/`:

* **`tb_ssr_top`:** runs the top at its default size, with a behavioural DDR
  that adds random stalls.
  * It runs three small cases: LayerNorm, GELU and bypass.
  * It then runs one DeiT-T-sized case: 197×192×64 followed by 197×197.
  * Every output byte is compared with a reference model.
  * It requires each mechanism to have happened: weight pinning, overlap,
    gating waits, stalls, saturation, LayerNorm, GELU and softmax.
* **`tb_layernorm`, `tb_softmax`:** unit tests with random gaps and
  back-pressure.

The other blocks have no unit testbench yet. They are covered only through the
top-level test.

## Known limits

* Synthesis of `hmm_type1` (8 tiles × 197 parallel MACs) and of the full top
  takes longer than ten minutes in yosys. Elaboration and simulation are quick.
* Matrix sizes must stay within the MAX_* parameters.
* K0 must be a multiple of B0, and N0 a multiple of B1.

## Simulating

Run the end-to-end test from the repository root with plain Verilator. The
GELU table is read from `rtl/gelu_table.hex` relative to the working directory.

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        --top-module tb_ssr_top rtl/ssr_pkg.sv tb/ssr_ref_pkg.sv tb/tb_ssr_top.sv
    ./obj_dir/Vtb_ssr_top

Use the same command with `tb_layernorm` or `tb_softmax` as the top module to
run the unit tests. Each test prints a `TB_RESULT checks=... failures=...`
line.
