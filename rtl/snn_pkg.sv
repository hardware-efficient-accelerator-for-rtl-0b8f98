// Shared sizes, types and helper functions of the spiking-transformer accelerator.
//
// The array geometry follows the paper: 12 PE blocks, each of four PE arrays
// (one per time step), each array 8 rows x 9 columns of PEs, 8-bit weights and
// 9-bit partial sums on the PE-block and accumulator outputs. The spike word
// of the spike SRAMs is 9x8x12x4 = 3456 bits. Its layout (108 segments, one per
// PE block and column j, each segment holding [time step][row]) is this
// design's choice. The layer configuration record and the pipeline tag are also
// this design's own.
package snn_pkg;

  localparam int unsigned T      = 4;   // time steps processed in parallel
  localparam int unsigned N_BLK  = 12;  // PE blocks (input channels in 3x3 mode)
  localparam int unsigned ROWS   = 8;   // PE rows = output elements per cycle
  localparam int unsigned COLS   = 9;   // PE columns = weights per array
  localparam int unsigned W_W    = 8;   // weight precision
  localparam int unsigned PSUM_W = 9;   // PE-block / accumulator output width
  localparam int unsigned NSEG   = N_BLK * COLS;       // 108 segments per spike word
  localparam int unsigned SEG_W  = T * ROWS;           // 32 bits per segment
  localparam int unsigned SPK_W  = NSEG * SEG_W;       // 3456
  localparam int unsigned WWORD  = N_BLK * COLS * W_W; // 864

  localparam int unsigned SPK_DEPTH  = 16;   // 6.75 KB / 3456 b
  localparam int unsigned W_DEPTH    = 512;  // 54 KB / 864 b
  localparam int unsigned BIAS_DEPTH = 256;  // 0.25 KB / 8 b
  localparam int unsigned TMP_DEPTH  = 128;  // about 1 KB of 8 x 9 b words

  typedef logic [T-1:0][ROWS-1:0] seg_t;          // one 8x4 spike column
  typedef seg_t [NSEG-1:0]        spk_word_t;     // one spike SRAM word
  typedef logic signed [W_W-1:0]  weight_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef psum_t [ROWS-1:0]       psum_col_t;     // one output column

  // Data-flow modes: 3x3 convolution, or 1x1 convolution (also used for
  // the matrix multiplications of self-attention).
  typedef enum logic { MODE_CONV3 = 1'b0, MODE_CONV1 = 1'b1 } mode_e;

  // LIF selector values printed in the paper, left to right.
  localparam logic [2:0] TSEL_T4 = 3'b111;
  localparam logic [2:0] TSEL_T2 = 3'b101;
  localparam logic [2:0] TSEL_T1 = 3'b000;

  // One layer run.
  typedef struct packed {
    mode_e       mode;       // data flow of the layer
    mode_e       out_layout; // layout the outputs are stored in (next layer's mode)
    logic [2:0]  tsel;       // LIF selectors
    logic        iand;       // apply x AND NOT s against the stored residual
    logic        bitplane;   // encoding layer: group g weighs 2^(g mod 8)
    logic        src_temp;   // read inputs from the spike temp SRAM's other bank
    logic        in_bank;    // spike SRAM bank used by the core
    logic        w_bank;     // weight SRAM bank used by the core
    logic        out_bank;   // spike temp SRAM bank written by the core
    logic [5:0]  n_groups;   // input groups (1..63)
    logic [7:0]  n_out;      // output channels (1..255)
    logic [3:0]  spk_base;   // first spike word of the layer
    logic [8:0]  w_base;     // first weight word
    logic [3:0]  out_base;   // first spike temp word written
    psum_t       vth;        // firing threshold
  } layer_cfg_t;

  // Control that travels with the data through the pipeline.
  typedef struct packed {
    logic        valid;    // a column enters the PE arrays
    logic        first;    // first column of an input group
    logic        flush;    // zero column that empties the 3x3 combiner
    logic [2:0]  col;      // input column
    logic        first_g;  // first input group of the output channel
    logic        last_g;   // last input group
    logic [2:0]  shift;    // bitplane weight
    logic [7:0]  oc;       // output channel
  } pipe_tag_t;

  function automatic psum_t sat_psum(input logic signed [31:0] v);
    localparam logic signed [31:0] MAXV = (32'sd1 <<< (PSUM_W - 1)) - 1;
    localparam logic signed [31:0] MINV = -(32'sd1 <<< (PSUM_W - 1));
    if (v > MAXV) return psum_t'(MAXV);
    else if (v < MINV) return psum_t'(MINV);
    else return psum_t'(v);
  endfunction

endpackage
