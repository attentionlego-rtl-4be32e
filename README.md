# AttentionLego: a processing-in-memory self-attention block in SystemVerilog

Self-attention needs three matrix products per token: the projections
q = x W_Q and k = x W_K, and the score row q K^T. The score row then goes
through a softmax. The weights never change during inference. This block
therefore keeps every weight inside processing-in-memory (PIM) macros. A PIM
macro is a memory array that can also multiply a vector by the matrix it
stores. The weights are loaded once. After that, only tokens and intermediate
vectors move. The keys get the same treatment: each k_t is written as one
column of a second PIM array, so every later query is multiplied by K^T in
place.

The RTL implements the architecture at its main sizes:

- d_model = 4096 input elements per token;
- d_k = 128 elements in each q and k row;
- 2048 tokens per sequence;
- batch size 1.

All data are signed 8-bit. The block's output is the attention probability
matrix S = softmax(Q K^T). It is delivered one row per token.

## Data flow

```
external memory --(bus)--> DMA --> Input Process (W_Q, W_K, W_V in 3 x 32 PIM macros)
                                         | q_t, k_t (128 x 8 bit)
                           DMA  <--------+
                            | K row / Q row
                            v
                      Score module (K^T in 64 x 4 PIM macros of 32x32)
                            | score row (2048 x 8 bit)
                           DMA
                            v
                      Softmax (2048 inputs) --> sm_out, sm_valid, sm_row
```

The top controller sequences everything. It starts each module with an enable
pulse and waits for that module's done.

| Module | File | Role |
|---|---|---|
| `attention_lego` | `rtl/attention_lego.sv` | top level and wiring |
| `top_controller` | `rtl/top_controller.sv` | nested state machine |
| `dma` | `rtl/dma.sv` | memory-to-Input Process, Input Process-to-Score and Score-to-Softmax channels |
| `input_process` | `rtl/input_process.sv` | weight store and Q/K/V projection |
| `apim` | `rtl/apim.sv` | one PIM macro with read, write and compute ports |
| `score_module` | `rtl/score_module.sv` | K^T store and computation of one score row |
| `col_cim` | `rtl/col_cim.sv` | four 32x32 macros stacked into a 128x32 engine |
| `softmax` | `rtl/softmax.sv` | exponent by table, sum, then normalisation |
| `exp_lut` | `rtl/exp_lut.sv` | 256-entry e^x table |
| `attn_pkg` | `rtl/attn_pkg.sv` | widths, enums, and the rescaling function |

## The PIM macro and how a product is scheduled

`apim` is a digital stand-in for an analog compute-in-memory macro. It has
ROWS x COLS signed 8-bit cells. Its input ports and output ports are fewer
than its rows and columns:

- IN_PAR input ports, each serving ROWS/IN_PAR consecutive rows;
- OUT_PAR output ports, each serving COLS/OUT_PAR consecutive columns.

In one compute step, the caller selects one row of each input group (`rphase`)
and one column of each output group (`cphase`). Each output port then returns
the sum, over all input ports, of input times weight.

A complete vector-matrix product is therefore a loop over
(ROWS/IN_PAR) x (COLS/OUT_PAR) steps. For the 128x128 macros of the Input
Process with 16 ports each side, that is 8 x 8 = 64 steps. The outer loop runs
over the column phase and the inner loop over the row phase. The results come
out one cycle after the step, from a register.

A real macro digitises its column sums with a 6-bit ADC. The transfer function
of that ADC is not known, so this model returns exact sums. This is the main
place where the RTL is an idealisation.

### Input Process

The Input Process holds W_Q, W_K and W_V in three groups of 32 macros of
128x128. Macro a of a group holds rows 128a..128a+127 of its matrix.

Commands come from `cs` and the mode pair {`web`, `cimeb`}:

| {web, cimeb} | Mode | What happens | Busy cycles |
|---|---|---|---|
| (0,1) | WRITE | column `col_sel` of matrix `weight_sel` is written, one row of every macro per cycle | 128 |
| (1,1) | READ | the column is read back into `mem_data_out` | 129 (one extra for the registered read) |
| (1,0) | CIM | `data_out` = x W for the selected matrix | 65 (64 steps plus one to drain the output register) |
| (0,0) | IDLE | nothing | 0 |

`weight_sel` selects the matrix: Q = 0, K = 1, V = 2.

In CIM mode, every step adds the 32 macros' partial sums in an adder tree
into 48-bit per-column accumulators. The result is then brought back to
8 bits by `requant`: an arithmetic shift right by `OUT_SHIFT`, followed by
saturation to -128..127. `OUT_SHIFT` defaults to 12. A dot product of 4096
random 8-bit pairs has a spread of roughly 2^19, so a 12-bit shift keeps the
useful range. For real weights, choose the shift by calibration.

The state machine is Idle, then Busy, then Done, then back to Idle. `done` is
high for the one cycle spent in Done.

### Score module

The Score module stores K^T. It is built from 64 `col_cim` engines. Each
`col_cim` is four 32x32 macros stacked vertically, which holds 128 key
elements for 32 tokens. Token t lives in engine t/32, at column t mod 32.

- **K_mode** (`K_mode_enable`, with `K_address` = t) writes k_t into the
  array, one element per stacked macro per cycle. It takes 32 cycles.
- **Q_mode** (`Q_mode_enable`) feeds q_t to all 64 engines at once. Each
  32x32 macro has 32 input ports and 4 output ports, so a score row comes out
  in 8 output steps plus one drain cycle. Score column c*32 + j*8 + s comes
  from engine c, output port j, step s. It is rescaled to 8 bits with a shift
  of `OUT_SHIFT` = 8.

`input_done` and `output_done` are levels. They are set when the operation
finishes and cleared when the next one starts.

## Softmax arithmetic

The 8-bit scores are read as Q3.4 fixed point, that is, values from -8 to
+7.9375. `exp_lut` returns e^x rounded to UQ12.4, with a maximum of 44862. The
table is computed at elaboration with `$exp`, so no data file is involved.

The softmax takes two cycles:

1. On `we`, it loads the row, looks up all N exponents in parallel, and
   registers them with their sum.
2. On `cme`, it divides each exponent by the sum. The output is
   a_i = floor(e_i * 2^15 / sum), in Q1.15. `out_valid` is high while the
   result is presented.

In the top, N equals the score row length (2048). This means 2048 table
copies and 2048 dividers. That is the literal, fully parallel reading of the
two-cycle description. A smaller design would share a divider over many cycles.

## The controller

The controller is a two-level state machine.

**Outer state 0 (preparation)** contains four inner states:

- 0.0 loads every weight column from memory (3 x 128 DMA transfers and
  Input Process WRITEs).
- 0.1 to 0.3 repeat for each token:
  - 0.1 loads x_t;
  - 0.2 computes k_t;
  - 0.3 moves k_t into the Score module with K_mode.
- At the end of 0.3, x_0 is loaded and q_0 is computed.

**Outer states 1 to 3** then loop once per token t:

1. The DMA moves q_t into the Score module.
2. The DMA first loads x_{t+1} from memory. Then three modules start in the
   same cycle:
   - Score Q_mode computes row t;
   - the softmax normalises row t-1;
   - the Input Process computes q_{t+1}.

   The state ends when all three have reported done. No compute module is
   active while a DMA transfer runs.
3. The DMA moves row t into the softmax.

After the loop, a drain state normalises the last row. Then `finished` rises.
`sm_row` tags each softmax output with its token.

The design adds four outer states beyond the four described:

- an idle state before `start`;
- the drain state above;
- a done state that holds `finished`;
- a read-back state. It serves `rd_req` (matrix `rd_sel`, column `rd_col`)
  while the block is idle or finished. It returns the stored column on
  `rd_data` with `rd_done`. It exists for checking the weight load.

### External memory layout and bus

The memory bus is 64 bits wide (`BUS_W`). It accepts one read request per
cycle (`mem_rd_en`, `mem_addr` as a word address). It answers in order, any
number of cycles later, with `mem_rvalid` and `mem_rdata`. Byte b of word w
is element 8w + b of the vector being loaded.

A vector of d_model bytes takes WPV = 8 * D_MODEL / BUS_W words; that is 512
words at the defaults. The layout is:

- column c of W_Q, W_K, W_V (matrix m = 0, 1, 2) at word (m * D_K + c) * WPV;
- token t at word (3 * D_K + t) * WPV.

Column c of a weight matrix holds D_MODEL elements, in row order.

### Timing of one inference

At the default sizes, almost all cycles are bus cycles: every 4096-byte
vector takes 512 bus words. Roughly:

- preparation: 384 weight columns x (512 + 128) cycles;
- then twice per token (once for k, once for q): about 512 + 65 cycles.

That is about 2.7 million cycles plus memory latency for 2048 tokens. The
compute modules are idle most of the time with a 64-bit bus. This is why the
DMA is a separate block: a wider bus only changes `BUS_W`.

## Interfaces of the top (`attention_lego`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| clk, rst | in | 1 | clock (rising edge); synchronous reset, active high |
| start | in | 1 | pulse to run one inference |
| finished | out | 1 | high from the end of the run until the next start |
| mem_rd_en, mem_addr | out | 1, 32 | bus read request |
| mem_rdata, mem_rvalid | in | 64, 1 | bus read data |
| sm_out | out | 2048 x 16 | softmax row, Q1.15 per element |
| sm_valid, sm_row | out | 1, 11 | row valid and its token |
| rd_req, rd_sel, rd_col | in | 1, 3, 7 | weight read-back request |
| rd_data, rd_done | out | 4096 x 8, 1 | column read back |
| outer_state, inner_state, dma_state | out | 3, 2, 3 | for observation |

Vectors are flat: element i is at bits [w*i +: w].

## Where this design departs from the architecture it follows

- **No S V stage.** W_V is stored and can be used for CIM or read back, but the
  product of the probabilities with V is not built. The output is S itself.
- **Ideal ADC.** The 6-bit ADC of the PIM macro is not modelled; partial sums
  are exact.
- **Own number formats.** The binary points (Q3.4 scores, UQ12.4 exponents,
  Q1.15 probabilities), the rounding, and the rescaling shifts after each
  product are this design's own choices.
- **Softmax size.** The softmax is sized to the 2048-element score row. The
  original example has 32 inputs; the `softmax` module keeps 32 as its own
  default.
- **Per-token preparation.** The preparation loop computes and stores k_t one
  token at a time, since there is no buffer for a whole K matrix outside the
  Score module.
- **Own protocols.** The bus protocol, memory map, DMA command set, K/Q holding
  registers in the DMA, drain and read-back states, and reset behaviour are all
  this design's own.
- **Figures used for names only.** The state names of the DMA and the softmax
  follow their state diagrams. The transitions between those states are this
  design's reading, as described in each file's header.

## Verification

Each module has a self-checking testbench in `tb/`. Each computes the expected
values on its own, from plain integer or real arithmetic. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| Testbench | Size | What it checks |
|---|---|---|
| `tb_apim` | default | random writes, reads, and all 64 compute steps against a reference array |
| `tb_input_process` | D_MODEL = 1024 | WRITE/READ of random columns; CIM against an integer model; cycle counts 128 / 129 / 65 |
| `tb_col_cim` | default | stacked sums |
| `tb_score_module` | SEQ_LEN = 256 | K_mode and Q_mode results and cycle counts 32 / 9 |
| `tb_exp_lut` | default | all 256 entries against `$exp` |
| `tb_softmax` | N = 32 | 50 random rows and the extremes; the state sequence |
| `tb_dma` | small | vector assembly with random bus latency, request count, state paths, K/Q capture, softmax strobe |
| `tb_top_controller` | small | full request trace against the expected sequence, with randomly delayed done responses |
| `tb_attention_lego` | see below | end-to-end run |

`tb_attention_lego` is the end-to-end test. It uses D_MODEL = 128 (two macros
of 64 rows), D_K = 32 and 64 tokens. A memory model answers with random gaps.
The test compares every delivered softmax row with a reference, 4096 values in
all. It also counts each mechanism and fails if one never happened:

- weight writes;
- K and Q projections;
- K_mode and Q_mode;
- softmax load and normalise;
- every DMA state;
- the three-way overlap in outer state 2;
- read-back;
- saturation in the rescaling.

It also fails if a compute module is active during a DMA transfer.

No testbench runs the top at its full default size (2048 tokens, d_model
4096, d_k 128). Such a run takes about 2.7 million clock cycles on a very
large model. With verilator it took about six minutes to compile, and ten
minutes of simulation did not get to the 256th softmax row. The largest
configuration simulated end to end is the one of `tb_attention_lego` above:
d_model 128, d_k 32, 64 tokens, 16,441 cycles. The module testbenches cover
`apim`, `col_cim` and `exp_lut` at their default sizes, and `input_process`
at d_model 1024.

Every testbench has also been run against a copy of its module with one
deliberate bug, and each reported failures.

To simulate a testbench with plain verilator (two-state), from the directory
holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_softmax \
    rtl/attn_pkg.sv tb/tb_softmax.sv -y rtl -y tb
obj_dir/Vtb_softmax
```

## Changing the design

The projection sizes follow from `D_MODEL`, `APIM_ROWS`, `IN_PAR` and
`OUT_PAR`. The number of macros per matrix is D_MODEL / APIM_ROWS. Each macro is
APIM_ROWS x D_K. A projection takes (APIM_ROWS/IN_PAR) x (D_K/OUT_PAR)
compute steps. The key store follows from `SEQ_LEN`, `SC_APIM_DIM` and `SC_OUT_PAR`.

These must divide evenly:

- D_MODEL by APIM_ROWS;
- APIM_ROWS by IN_PAR;
- D_K by OUT_PAR;
- SEQ_LEN and D_K by SC_APIM_DIM;
- D_MODEL * 8 by BUS_W.

`IP_SHIFT` and `SC_SHIFT` set the rescaling of the two products. Adjust them
when D_MODEL or D_K change, or the 8-bit results will saturate or lose all
their bits.
