// npim_pkg: constants and types shared by the Neural-PIM accelerator RTL.
//
// The accelerator computes 8-bit DNN layers on 1-bit RRAM crossbars. Inputs
// are streamed LSB-first in D-bit slices through word-line DACs, every 8-bit
// signed weight occupies 16 adjacent bitlines (8 for the positive part W^P,
// 8 for the negative part W^N), and the partial sums of all input cycles are
// accumulated in the analog domain by a neural-approximated shift-and-add
// (NNS+A) before a single 8-bit conversion by a shared neural ADC (NNADC).
//
// Numbers taken from the paper: 8-bit inputs/weights/outputs, 128x128
// crossbars of 1-bit cells, 4-bit DACs, 64 crossbars, 64 NNS+As and 4 NNADCs
// per PE, 4 PEs per tile, 280 tiles, 100 ns input cycle, NNS+A at 80 MHz,
// NNADC at 1.2 GS/s, 1.2 V supply, [0, 0.5] V signal range, NNADC ranges of
// 0.5, 0.25 and 0.125 VDD. Everything else here (bus width, buffer sizes,
// fixed-point formats of the digital post-processing) is this design's choice.
package npim_pkg;

  // ---- precisions (paper: 8-bit quantized DNN models) ----
  localparam int unsigned P_IN  = 8;   // input/activation bits
  localparam int unsigned P_W   = 8;   // weight bits
  localparam int unsigned P_OUT = 8;   // NNADC resolution

  // ---- analog levels (paper Table 1) ----
  localparam real VDD  = 1.2;          // supply
  localparam real V_FS = 0.5;          // full-scale of bitline / NNS+A signals

  // one signed weight = 8 W^P columns followed by 8 W^N columns
  localparam int unsigned COLS_PER_WEIGHT = 2 * P_W;

  // ---- tile-level digital formats (design choice) ----
  localparam int unsigned BUS_BYTES = 8;                // bus / eDRAM word
  localparam int unsigned BUS_W     = 8 * BUS_BYTES;
  localparam int unsigned SUM_W     = 16;               // PE adder sum width

  // NNADC input range, one of three pre-trained NNADC models (Sec. 4.2)
  typedef enum logic [1:0] {
    RANGE_HALF    = 2'd0,   // Vmax = 0.5   * VDD
    RANGE_QUARTER = 2'd1,   // Vmax = 0.25  * VDD
    RANGE_EIGHTH  = 2'd2    // Vmax = 0.125 * VDD
  } adc_range_e;

  function automatic real range_vmax(adc_range_e r);
    case (r)
      RANGE_QUARTER: return 0.25 * VDD;
      RANGE_EIGHTH:  return 0.125 * VDD;
      default:       return 0.5 * VDD;
    endcase
  endfunction

  // post-processing operation (Sec. 5.2.3: activations, pooling, LSTM EM)
  typedef enum logic [2:0] {
    ACT_NONE    = 3'd0,
    ACT_RELU    = 3'd1,
    ACT_SIGMOID = 3'd2,
    ACT_TANH    = 3'd3,
    ACT_LSTM    = 3'd4
  } act_e;

  // Control vector for one sliding window of one tile (Sec. 5.1: "control
  // vectors are loaded into each tile to drive the finite state machines").
  // Field set and widths are this design's choice.
  typedef struct packed {
    logic [3:0]  pe_en;          // PEs taking part
    logic [15:0] in_base0;       // eDRAM word address of PE0's input block
    logic [15:0] in_base1;
    logic [15:0] in_base2;
    logic [15:0] in_base3;
    logic [10:0] in_words;       // words copied into each PE's IR
    logic [6:0]  xbars;          // crossbars used per PE (1..64)
    logic [6:0]  kernel_xbars;   // crossbars summed per kernel (divides xbars)
    adc_range_e  adc_range;
    act_e        act;
    logic [15:0] zero_point;     // subtracted from the sums before activation
    logic        pe_sum;         // add the kernel sums of all enabled PEs
    logic        pool_last;      // last window of a pooling group (emit)
    logic        pool_first;     // first window of a pooling group
    logic [15:0] out_base;       // eDRAM word address of the results
    logic [9:0]  out_tile;       // destination tile of the results
  } ctrl_vec_t;

  // NoC flit: one eDRAM word for a tile (single-flit packets)
  typedef struct packed {
    logic [9:0]       dst_tile;
    logic [15:0]      addr;
    logic [BUS_W-1:0] data;
  } flit_t;

endpackage
