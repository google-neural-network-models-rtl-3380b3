// mensa_pkg: types and constants shared by the Mensa-G accelerators.
//
// The three accelerators (Pascal, Pavlov, Jacquard) all operate on 8-bit
// quantized operands, as the evaluated models are fully 8-bit quantized.
// Operands are taken as signed two's-complement int8 and products are
// accumulated in 32-bit signed accumulators; both of these are this design's
// own choices. The layer-descriptor structs below are what a driver writes
// to start one layer on one accelerator.
package mensa_pkg;

  localparam int unsigned DATA_W = 8;   // operand width (8-bit quantized models)
  localparam int unsigned ACC_W  = 32;  // accumulator / output width (design choice)
  localparam int unsigned CNT_W  = 16;  // width of loop-count fields in descriptors
  localparam int unsigned ADDR_W = 20;  // width of buffer base-address fields

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Which accelerator a layer is dispatched to (chosen by the runtime scheduler).
  typedef enum logic [1:0] {
    ACC_PASCAL   = 2'd0,  // compute-centric, layer families 1 and 2
    ACC_PAVLOV   = 2'd1,  // LSTM-centric, layer family 3
    ACC_JACQUARD = 2'd2   // data-centric, layer families 4 and 5
  } accel_e;

  // Pascal: pointwise (or im2col-flattened) convolution over n_tiles spatial
  // tiles of ROWS x COLS output pixels, k_len input channels, n_filt filters.
  typedef struct packed {
    logic [CNT_W-1:0]  k_len;     // reduction length K (channels), >= 1
    logic [CNT_W-1:0]  n_filt;    // filters held in the PE register file, 1..RF_DEPTH
    logic [CNT_W-1:0]  n_tiles;   // spatial tiles, >= 1
    logic [ADDR_W-1:0] act_base;  // activation-buffer word of tile 0, channel 0
    logic [ADDR_W-1:0] par_base;  // parameter-buffer byte of filter 0, channel 0
  } pascal_cfg_t;

  // Pavlov: MVM O[t][j] = sum_i I[t][i] * W[i][j] for one tile of NPE columns j,
  // n_rows rows i and n_samples samples t.
  typedef struct packed {
    logic [CNT_W-1:0]  n_rows;     // rows of W (input-vector length), 1..WREG_DEPTH
    logic [CNT_W-1:0]  n_samples;  // samples t, 1..PSUM_DEPTH
    logic [ADDR_W-1:0] act_base;   // activation-buffer byte of I[0][0]
  } pavlov_cfg_t;

  // Jacquard: O[t][f] = sum_p I[t][p] * W[f][p] over the NPE PEs p, for
  // n_vec input vectors t and n_filt stationary weight vectors f.
  typedef struct packed {
    logic [CNT_W-1:0]  n_filt;    // weight vectors held in the PEs, 1..JW_DEPTH
    logic [CNT_W-1:0]  n_vec;     // input vectors, >= 1
    logic [ADDR_W-1:0] act_base;  // activation-buffer word of vector 0
    logic [ADDR_W-1:0] par_base;  // parameter-buffer word of weight vector 0
  } jacquard_cfg_t;

endpackage
