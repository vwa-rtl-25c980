// vwa_pkg -- types and constants shared by the vectorwise CNN accelerator.
//
// Sizes follow the accelerator's main configuration: eight PE blocks of
// 7 rows x 3 columns of 16-bit fixed-point MACs, a 9-element partial-sum
// vector per block, 7-element output vectors. The fraction width FRAC,
// the mode encodings and the control-bundle layout are this design's own
// choices.
package vwa_pkg;
  localparam int DW    = 16;   // data width (16-bit fixed point)
  localparam int FRAC  = 8;    // fraction bits of weights / BN scale (own choice)
  localparam int ROWS  = 7;    // MAC rows per PE block
  localparam int COLS  = 3;    // MAC columns per PE block
  localparam int NOUT  = ROWS + COLS - 1;  // 9 PE outputs o0..o8
  localparam int NB    = 8;    // PE blocks
  localparam int NBANK = 3 * NB;  // input SRAM banks

  typedef logic signed [DW-1:0] data_t;

  // How a PE block selects inputs and sums its products.
  typedef enum logic [1:0] {
    PE_DIAG_BANK0  = 2'd0,  // 3x3/4x4/5x5 unit stride: bank 0, diagonal sum
    PE_DIAG_ILV    = 2'd1,  // 3x3 stride 2: interleaved banks 0/1, diagonal sum
    PE_HORIZ_ELEM  = 2'd2   // 1x1: bank = column, horizontal sum
  } pe_mode_e;

  // Layer types the controller sequences.
  typedef enum logic [1:0] {
    LAYER_CONV3 = 2'd0,  // 3x3 unit stride, channels summed
    LAYER_DW3   = 2'd1,  // 3x3 depthwise, stage-1 output is the result
    LAYER_CONV1 = 2'd2   // 1x1, elementwise input, stage 3 skipped
  } layer_e;

  // Layer configuration ("configuration context").
  typedef struct packed {
    layer_e      layer;
    logic [8:0]  w_in;      // input columns of the tile
    logic [6:0]  groups;    // channel groups (8 ch for 3x3, 24 ch for 1x1)
    logic [6:0]  filters;   // output channels
    logic        first_tile;// no previous tile: skip boundary add
    logic        wset;      // weight ping-pong set to read
    logic        relu_en;
    logic        pool_en;
  } vwa_cfg_t;

  // Control bundle travelling with the data of one SRAM read.
  typedef struct packed {
    logic        valid;
    pe_mode_e    pe_mode;
    logic [1:0]  bsel;       // 3x3: bank of the block's three holding this column
    logic [2:0]  s1_slot;
    logic        s1_first;
    logic        s1_last;
    logic [1:0]  s3_slot;
    logic        s3_first;
    logic        s3_last;
    logic        s3_bypass;  // 1x1: stage 3 skipped
    logic        dw;         // depthwise: stage-1 result goes out
    logic        use_bnd;    // add boundary partial sums from the previous tile
    logic [13:0] bnd_addr;
    logic [6:0]  ch;         // output channel (BN parameters)
    logic [8:0]  col;        // output column
  } vwa_ctl_t;
endpackage
