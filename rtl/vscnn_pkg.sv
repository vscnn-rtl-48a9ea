// vscnn_pkg: shared sizes, types and helpers of the vector-sparse CNN accelerator.
//
// The accelerator computes 3x3, stride-1, padding-1 convolutions on 16-bit
// fixed-point data with an array of 8 PE blocks of 7 rows x 3 columns. Work is
// cut into "vectors": an input vector is 7 vertically adjacent activations of
// one input column (one row tile) of one channel, a weight vector is one
// column of a 3x3 kernel (3 taps). Zero vectors are simply not stored, and the
// index carried by each stored vector tells the accumulator where its products
// belong.
//
// The array shape (8 blocks, 7 rows, 3 columns) and the 16-bit buses follow the
// paper's main [8, 7, 3] configuration. Buffer depths, the Q8.8 number format,
// the vector tag layout and the register map are this design's own choices.
package vscnn_pkg;

  // ---- array shape (paper: [8, 7, 3], 16-bit buses) ----
  parameter int unsigned DATA_W  = 16;
  parameter int unsigned N_BLK   = 8;
  parameter int unsigned PE_ROWS = 7;
  parameter int unsigned PE_COLS = 3;
  parameter int unsigned N_OUT   = PE_ROWS + PE_COLS - 1;  // 9 partial outputs per block

  // ---- number format (assumed Q8.8) ----
  parameter int unsigned FRAC = 8;

  // ---- buffer sizes (assumed) ----
  parameter int unsigned MAX_W     = 56;                   // image columns
  parameter int unsigned MAX_H     = 56;                   // image rows
  parameter int unsigned MAX_TY    = (MAX_H + PE_ROWS - 1) / PE_ROWS;  // row tiles
  parameter int unsigned MAX_Y     = MAX_TY * PE_ROWS;
  parameter int unsigned IN_DEPTH  = 16384;                // input vectors
  parameter int unsigned WT_DEPTH  = 16384;                // weight vectors
  parameter int unsigned OUT_DEPTH = 16384;                // output vectors
  parameter int unsigned MAX_K     = 512;                  // filters (and channels)

  // ---- field widths ----
  parameter int unsigned CH_W  = $clog2(MAX_K);            // channel / filter index
  parameter int unsigned X_W   = $clog2(MAX_W);            // column index
  parameter int unsigned TY_W  = $clog2(MAX_TY);           // row tile index
  parameter int unsigned XO_W  = X_W + 2;                  // signed output column
  parameter int unsigned IA_W  = $clog2(IN_DEPTH);
  parameter int unsigned WA_W  = $clog2(WT_DEPTH);
  parameter int unsigned OA_W  = $clog2(OUT_DEPTH);

  typedef logic signed [DATA_W-1:0] data_t;

  // Stored input (and output) vector: index tag plus 7 activations.
  // last = this is the last stored vector of its channel.
  typedef struct packed {
    logic                last;
    logic [CH_W-1:0]     ch;
    logic [X_W-1:0]      x;
    logic [TY_W-1:0]     ty;
    data_t [PE_ROWS-1:0] d;
  } in_entry_t;

  // Stored weight vector: column dx of the kernel of one (filter, channel).
  // last = last stored weight vector of this (filter, channel).
  typedef struct packed {
    logic                last;
    logic [CH_W-1:0]     ch;
    logic [1:0]          dx;
    data_t [PE_COLS-1:0] d;
  } wt_entry_t;

  // One issued vector pair with its output index.
  typedef struct packed {
    logic                  vld;
    logic signed [XO_W-1:0] xo;   // output column = x - dx + 1
    logic [TY_W-1:0]       ty;    // row tile of the input vector
    data_t [PE_ROWS-1:0]   in;
    data_t [PE_COLS-1:0]   wt;
  } lane_op_t;

  // One PE block result: 9 partial outputs for rows ty*7-1 .. ty*7+7.
  typedef struct packed {
    logic                   vld;
    logic signed [XO_W-1:0] xo;
    logic [TY_W-1:0]        ty;
    data_t [N_OUT-1:0]      ps;
  } blk_res_t;

  // Layer setting held by the configuration context.
  typedef struct packed {
    logic [X_W:0]   w;        // image width  (1..MAX_W)
    logic [6:0]     h;        // image height (1..MAX_H)
    logic [CH_W:0]  k;        // number of filters (1..MAX_K)
    logic [IA_W:0]  n_in;     // number of stored input vectors
    data_t          scale;    // post-processing multiplier (Q8.8)
    logic [4:0]     shift;    // post-processing right shift
    logic           relu_en;
    logic           sparse;   // 1: drop all-zero output vectors
  } cfg_t;

  // Register map of the configuration context (16-bit writes).
  typedef enum logic [2:0] {
    REG_W     = 3'd0,
    REG_H     = 3'd1,
    REG_K     = 3'd2,
    REG_NIN   = 3'd3,
    REG_SCALE = 3'd4,
    REG_SHIFT = 3'd5,
    REG_FLAGS = 3'd6     // bit0 relu_en, bit1 sparse
  } cfg_reg_e;

  // Saturate a wide signed value to DATA_W bits.
  function automatic data_t sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return data_t'(16'sh7fff);
    else if (v < -48'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(v[DATA_W-1:0]);
  endfunction

endpackage
