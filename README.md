# Neural-PIM in SystemVerilog

Neural-PIM is a processing-in-memory accelerator for 8-bit neural networks. The matrix-vector products run inside RRAM crossbars, and the expensive mixed-signal periphery around them is made cheap. In a conventional RRAM accelerator every input bit-slice of every crossbar column is digitised, and the partial sums are shifted and added in digital logic. Neural-PIM keeps the partial sums analog instead: a small trained analog circuit (the *NNS+A*, a neural-network shift-and-add) folds each new input slice into the running sum held on a sample-and-hold. Only the final value of each dot product is converted, once, by a shared 8-bit neural-network ADC (*NNADC*). This cuts the conversion count by the number of input slices times the number of weight bits.

This RTL describes that accelerator, from a single crossbar up to a chip of tiles on a concentrated-mesh network. The digital parts are synthesizable: control, buffers, adders, post-processing and network. The analog parts are behavioural models that compute the ideal functions the trained circuits approximate: crossbar, sample-and-hold, NNS+A and NNADC.

## How a signed 8-bit weight sits in a crossbar

A crossbar has 128 rows (word lines) and 128 columns (bit lines), with one bit per cell. An 8-bit signed weight is split as W = W^P − W^N, with both parts non-negative. The weight takes 16 adjacent bit lines: bit lines 0–7 hold bits 0–7 of W^P, and bit lines 8–15 hold bits 0–7 of W^N. A crossbar row therefore holds 8 weights ("weight groups"), and one column of 8 weights per row gives 8 dot products of length 128 per crossbar.

Inputs are unsigned bytes, streamed least-significant slice first through 4-bit DACs. Two *input cycles* carry one byte: bits 3:0, then bits 7:4. The model takes the 4-bit DAC code of every word line directly (`wl_code`). Each bit line settles to

    V_bl = 0.5 V · Σ_rows code · cell / (128 · 15)

which is an ideal, normalised current sum within the 0–0.5 V signal range.

## Analog accumulation: the NNS+A recurrence

For one weight group in input cycle i, the NNS+A takes eight differential inputs, V_in,j = V_bl(W^P bit j) − V_bl(W^N bit j), one per weight bit. It also takes its own previous output V_o,i−1 from a feedback sample-and-hold, and it produces

    V_o,i = ( 2^-D · V_o,i-1  +  Σ_j 2^j · V_in,j ) / α,     α = 2^-D + 255,  D = 4

For the first slice, V_o,i−1 is taken as 0. This is the ideal function that the analog circuit is trained to reproduce. The model uses it exactly as written: the fed-back term is multiplied by 2^-D and then also divided by α. As a result, earlier (less significant) slices are weighted less, relative to an exact integer dot product, than a pure "shift right by D" would weight them. Because inputs go LSB first, the error lands on the least significant part. The testbenches compare against this recurrence, not against an integer dot product.

In a processing element (PE), each crossbar has one NNS+A, shared by its 8 weight groups. At 80 MHz the NNS+A serves one group per clock, so one input cycle is 8 clocks. Each group has two feedback S/H cells holding VCM ± V/2 (VCM = 0.25 V). The 128 bit-line S/H cells hold the crossbar outputs of the current input cycle while the NNS+A walks the groups.

## The NNADC

Each final NNS+A output is converted once to 8 bits:

    code = clamp( round(255 · V / Vmax), 0, 255 )

Vmax is one of 0.5, 0.25 or 0.125 × VDD (VDD = 1.2 V). These correspond to three pre-trained converter models and are selected per window by the control vector (`adc_range`). A negative differential input gives code 0. A PE has 4 NNADCs running at 1.2 GS/s. Against the 80 MHz clock this is modelled as 15 conversions per clock per NNADC (`LANES`), so a PE converts 60 results per clock.

## Inside a processing element

A PE holds 64 crossbars together with the following parts:

- **Input register (IR):** one byte per word line of every crossbar (8 KiB), written over the tile bus one 64-bit word per clock.
- **Bit-line S/H bank, 64 NNS+As and 4 NNADCs.**
- **Output register (OR):** one byte per weight group per crossbar.
- **Adder:** walks the OR one crossbar per clock. It sums `kernel_xbars` consecutive crossbars per output beat, for kernels that span several crossbars, and emits 8 sums of 16 bits per beat.

One window has three phases.

1. **Stage 1 (analog)** takes 17 clocks from `start`: 2 input cycles × 8 groups, plus one clock to settle the last NNS+A output. The bit-line S/H samples at the start of each input cycle, and the NNS+A output of each group is clocked at 80 MHz. `tb_pe` checks the 17-clock latency.
2. **Conversion:** the 8 × `xbars` NNS+A results are converted, 60 per clock, into the OR. If the adder is still reading the OR for the previous window, conversion waits (`or_stall`).
3. **Addition:** the adder produces `xbars / kernel_xbars` beats. It holds each beat until the tile accepts it, so back-pressure from the tile reaches the PE.

A PE can start its next window as soon as stage 1 and the conversion of the previous one are done. The adder may still be busy at that point.

## A tile and its two-stage pipeline

A tile has the following parts:

- 4 PEs.
- An eDRAM buffer, modelled as a 64 KiB 1R1W memory of 64-bit words.
- A 64-bit bus.
- Row and column decoders for weight programming.
- A post-processing unit.
- A controller driven by **control vectors**, one per sliding window.

A control vector (`ctrl_vec_t`) names the following:

- Which PEs take part.
- Where each PE's inputs are in the buffer, and how many words they take.
- How many crossbars are used, and how many make up one kernel.
- The NNADC range.
- The post-processing operation and its zero point.
- Whether the kernel sums of all PEs are added together.
- The pooling-group flags.
- The destination tile and buffer address of the results.

The controller runs each window in two stages. This matches the accelerator's coarse pipeline.

- **Stage 1:** copy the window's inputs from the buffer into each enabled PE's IR, one word per clock. Then wait until the PEs can start, pulse `start`, and wait for their analog phase to end. All buffer reads happen here.
- **Stage 2:** the conversions and additions of the PEs, post-processing, and storing the results. All buffer writes happen here, so reads and writes never compete for the buffer.

A two-entry queue between the stages lets stage 1 of window n+1 overlap stage 2 of window n. When the queue is full, the controller waits (`ev_start_stall`).

On the bus, PE result beats are taken in strict rotation over the enabled PEs. With `pe_sum` set, the post-processing unit adds the beats of the same index from all enabled PEs before applying the activation. This is tile-level accumulation, for kernels that span PEs. Without `pe_sum`, every beat is its own output word.

### Post-processing formats

The sums reaching post-processing are unsigned sums of NNADC codes. The unit subtracts `zero_point` to obtain a signed value s and then applies one of these operations:

| `act` | result byte |
|---|---|
| NONE | s saturated to int8 |
| RELU | s saturated to 0..255 |
| SIGMOID | 128 + 4s saturated to 0..255 (hard sigmoid, s read as Q.4) |
| TANH | 8s saturated to int8 (hard tanh) |
| LSTM | lanes 4u..4u+3 are the i, f, o, g pre-activations of unit u; c = (f·c_prev + i·tanh(g)) / 256 kept as 16 bits per unit, h = o·sat8(c) / 256 |

Max pooling works across windows. `pool_first` starts a group, each later window keeps the element-wise maximum (signed for NONE/TANH, unsigned otherwise), and only the window with `pool_last` writes results. In LSTM mode, `pool_first` clears the cell state instead.

Results go to the tile's own buffer or, as single-word flits, to another tile or off chip.

## The chip and its network

Tiles are connected by a concentrated mesh. Each router serves 4 adjacent tiles (local ports 0–3) and has east, west, north and south links. Tile t sits on local port t mod 4 of router t / 4, and router r is at (r mod MESH_X, r / MESH_X). Routing is XY, with 2-deep input FIFOs and round-robin output arbitration. A flit carries a destination tile, a buffer word address and one 64-bit word.

The west port of router (0,0) is the chip's external link:

- Flits arriving there are delivered to any tile's buffer. This is how inputs are loaded.
- Flits addressed to a tile number ≥ NTILES leave the chip there.

The host programs crossbar rows through `prog_*`, selecting the tile, PE, crossbar and row. A whole row or one 16-column weight group is written at a time. The host queues control vectors through `cv_*`.

## Sizes: paper versus defaults

| parameter | default | paper |
|---|---|---|
| crossbar | 128 × 128, 1-bit cells | same |
| DAC resolution `D` | 4 | 4 |
| crossbars per PE `XBARS` | 64 | 64 |
| NNS+As per PE | 64 (one per crossbar) | 64 |
| NNADCs per PE `NNADCS` | 4 at 15 conversions/clock | 4 at 1.2 GS/s |
| PEs per tile `NPE` | 4 | 4 |
| tiles `NTILES` | **8** (2 × 1 mesh) | **280** |
| eDRAM per tile `WORDS` | 8192 × 64 bit | not given |

The tile count is the one scaled-down size. Linting the chip takes 1.7 GB for 8 full-size tiles, and at 64 tiles it already ran out of memory on a 16 GB machine. Setting `NTILES = 280, MESH_X = 10, MESH_Y = 7` gives the evaluated chip where memory allows.

At 8 tiles the chip holds 2.1 M weights; at 280 tiles it holds 73.4 M. AlexNet, ResNet-50/101, GoogLeNet and MobileNet therefore fit the full chip but not the default one, and VGG-16/19 (over 130 M weights) need two full chips.

## Where the RTL departs from, or goes beyond, the paper

- **Analog parts are ideal.** The crossbar, S/H, NNS+A and NNADC models compute the target functions exactly. They include no noise, device variation, charge-injection or nonlinearity.
- **DACs and the off-chip link are not built as blocks.** The DAC is folded into the crossbar model's 4-bit word-line code. The off-chip link appears as a flit port.
- **Input cycles per window.** The pipeline figure shows 8 input cycles per window, which fits 1-bit DACs. The chosen configuration uses 4-bit DACs, so a window takes 2 input cycles.
- **This design's own choices:** the control-vector format, queue depths, bus width, buffer size, post-processing number formats, hard sigmoid/tanh, zero point, and mesh shape. The paper names these functions without fixing them.
- **Strided layers.** The unbalanced pipeline that strides larger than one cause between layers is not modelled. Each tile simply waits for its inputs, as ordered by the host.

## Simulating

Every testbench is self-checking. It ends by printing `TB_RESULT checks=N failures=M`, and its watchdog counts a failure if the run hangs. Build and run one with Verilator:

    verilator --binary --timing -Irtl -Itb rtl/npim_pkg.sv tb/tb_npim_model.sv tb/tb_pe.sv --top-module tb_pe
    ./obj_dir/Vtb_pe

`tb/tb_npim_model.sv` restates the analog target functions and the post-processing arithmetic independently of the RTL. The testbenches compute their expected values from it.

| testbench | what it covers |
|---|---|
| `tb_rram_crossbar`, `tb_sample_hold`, `tb_nnsa`, `tb_nnadc` | analog models against the formulas above |
| `tb_row_decoder`, `tb_column_decoder`, `tb_input_register`, `tb_output_register`, `tb_global_buffer` | storage and decoding |
| `tb_pe_adder`, `tb_post_processing`, `tb_tile_bus`, `tb_noc_router` | digital datapath, handshakes, routing |
| `tb_pe` | one PE with 4 crossbars: 17-clock stage 1, OR stall, sums |
| `tb_tile` | a tile with 2 crossbars per PE: programming, four pipelined windows, PE sum, remote results, pooling, NoC back-pressure, start stalls |
| `tb_neural_pim_chip` | an 8-tile chip end to end: two layers across the mesh, off-chip results, LSTM, range and mode switches, with every stall and back-pressure mechanism counted |

The largest configuration simulated end to end is 8 tiles with 2 crossbars per PE (full-size crossbars). A single PE was simulated with 4 full-size crossbars. That end-to-end run uses the default tile count and mesh, but 2 crossbars per PE instead of 64. No testbench runs the chip with every parameter at its default: 8 tiles × 256 full crossbars is beyond a practical simulation build.
