// sqdm_pkg: types and size constants shared by the SQ-DM accelerator.
//
// The accelerator runs a chain of valid (unpadded) convolution layers whose
// activation channels are classified, per layer, as dense or sparse. Dense
// channels are processed by dense PEs, sparse channels by sparse PEs, and the
// partial sums of both are added before post-processing.
//
// Storage format (channel-last, one row per global-buffer word):
//   activation word = {bitmap[W_MAX], data[W_MAX] x 8 bit}
//     dense row : data[i] is the value at column i, bitmap marks nonzeros
//     sparse row: data[0..nnz-1] are the nonzero values packed in column
//                 order, bitmap marks their columns (1 = nonzero)
//   weight word     = one R_MAX x S_MAX kernel of 8-bit containers,
//                     element (r,s) at bits [(r*S_MAX+s)*8 +: 8]
// 4-bit layers store UINT4 activations / INT4 weights in the low nibble of
// each container; 8-bit layers store INT8 in the whole container.
// The sizes below follow the paper where it gives one (128 multipliers per PE,
// 30 % sparsity threshold, one update per time step); the rest are this
// design's choices and are documented in the README.
package sqdm_pkg;

  // Largest feature-map row and column count (64x64 covers AFHQv2/FFHQ/EDM2 latents).
  localparam int unsigned W_MAX   = 64;
  localparam int unsigned H_MAX   = 64;
  // Largest kernel (EDM uses 3x3 and 1x1 convolutions).
  localparam int unsigned R_MAX   = 3;
  localparam int unsigned S_MAX   = 3;
  // Largest channel count of a layer.
  localparam int unsigned C_MAX   = 1024;
  // Multipliers per PE (paper: 128) and activations handled per cycle.
  localparam int unsigned MULTS   = 128;
  localparam int unsigned EPC     = MULTS / S_MAX;
  // Layer descriptor slots in the controller.
  localparam int unsigned L_MAX   = 64;
  // Global-buffer depths (words).
  localparam int unsigned ACT_DEPTH = 32768;
  localparam int unsigned WT_DEPTH  = 65536;

  localparam int unsigned ACC_W   = 32;           // partial-sum width
  localparam int unsigned ACT_WORD_W = W_MAX * 9; // bitmap + data
  localparam int unsigned WT_WORD_W  = R_MAX * S_MAX * 8;

  localparam int unsigned CW  = $clog2(C_MAX + 1);
  localparam int unsigned HW  = $clog2(H_MAX + 1);
  localparam int unsigned WW  = $clog2(W_MAX + 1);
  localparam int unsigned AAW = $clog2(ACT_DEPTH);
  localparam int unsigned WAW = $clog2(WT_DEPTH);
  localparam int unsigned LW  = $clog2(L_MAX + 1);

  // Sparsity threshold in percent: a channel whose zero fraction exceeds it is sparse.
  localparam int unsigned SPARSITY_THRESHOLD_PCT = 30;

  typedef enum logic {CH_DENSE = 1'b0, CH_SPARSE = 1'b1} ch_type_e;
  typedef enum logic {PREC_4 = 1'b0, PREC_8 = 1'b1} prec_e;

  // One activation row as stored in the global buffer.
  typedef struct packed {
    logic [W_MAX-1:0]      bitmap;
    logic [W_MAX-1:0][7:0] data;
  } act_word_t;

  // Layer descriptor written by the host.
  typedef struct packed {
    logic [CW-1:0]  c_in;       // input channels
    logic [CW-1:0]  k_out;      // output channels
    logic [HW-1:0]  h_in;       // input rows
    logic [WW-1:0]  w_in;       // input columns
    logic [1:0]     r;          // kernel rows (1..R_MAX)
    logic [1:0]     s;          // kernel columns (1..S_MAX)
    logic [AAW-1:0] act_in_base;
    logic [AAW-1:0] act_out_base;
    logic [WAW-1:0] wt_base;
    prec_e          prec;       // precision of this layer's inputs and weights
    prec_e          out_prec;   // precision of its outputs (= next layer's prec)
    logic           relu_en;
    logic [7:0]     scale_fp8;  // E4M3 requantisation scale
    logic           out_dense;  // force dense output format (last layer)
    logic           pad;        // zero padding of (R-1)/2 rows, (S-1)/2 columns
  } layer_desc_t;

  // Padding actually applied, in rows and columns.
  function automatic logic [1:0] pad_rows(layer_desc_t d);
    return d.pad ? 2'((d.r - 2'd1) >> 1) : 2'd0;
  endfunction
  function automatic logic [1:0] pad_cols(layer_desc_t d);
    return d.pad ? 2'((d.s - 2'd1) >> 1) : 2'd0;
  endfunction
  // Output rows P and columns Q of a layer.
  function automatic logic [HW-1:0] out_rows(layer_desc_t d);
    return HW'(d.h_in - HW'(d.r) + 1'b1 + 2 * HW'(pad_rows(d)));
  endfunction
  function automatic logic [WW-1:0] out_cols(layer_desc_t d);
    return WW'(d.w_in - WW'(d.s) + 1'b1 + 2 * WW'(pad_cols(d)));
  endfunction

endpackage
