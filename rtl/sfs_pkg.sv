// sfs_pkg: constants and types shared by the stacked-filters-stationary (SFS)
// accelerator. The kernel size K = 3 follows the 3x3 example that the filter
// memory layout and the processor diagram are drawn for; the batch size m,
// the data widths and the relative-index width are this design's choices
// (the relative-index width is chosen per layer between 1 and 5 bits in the
// original storage study; 3 bits is the common value for conv layers).
// The layer configuration struct holds the run-time layer shape.
package sfs_pkg;
  localparam int unsigned K_DEF       = 3;   // kernel size
  localparam int unsigned M_BATCH_DEF = 16;  // filters per batch (m)
  localparam int unsigned FW_DEF      = 8;   // feature width, signed
  localparam int unsigned WW_DEF      = 8;   // weight width, signed
  localparam int unsigned IDXW_DEF    = 3;   // relative index width
  localparam int unsigned ACCW_DEF    = 32;  // accumulator width
  localparam int unsigned W_MAX_DEF   = 32;  // widest input row
  localparam int unsigned H_MAX_DEF   = 32;  // tallest input map
  localparam int unsigned C_MAX_DEF   = 256; // most input channels
  localparam int unsigned NB_MAX_DEF  = 24;  // most filter batches (M' = M/m), M <= 384
  // CSF entries the global filter buffer holds: 2^19, room for a 3x3 layer
  // of 256 x 384 filters kept at up to about 59 % density (padding included)
  localparam int unsigned FILT_DEPTH_DEF = 1 << 19;
  // address widths derived from the sizes above
  localparam int unsigned FEAT_AW_DEF = $clog2(C_MAX_DEF * H_MAX_DEF * W_MAX_DEF);
  localparam int unsigned FILT_AW_DEF = $clog2(FILT_DEPTH_DEF + 1);
  localparam int unsigned TBL_AW_DEF  = $clog2(NB_MAX_DEF * C_MAX_DEF + 1);
  localparam int unsigned OUT_AW_DEF  = $clog2(H_MAX_DEF * W_MAX_DEF);

  // Run-time description of one layer. Output width W' = (W-K)/S+1 and
  // height H' = (H-K)/S+1 are derived by the controller.
  typedef struct packed {
    logic [9:0]  c;         // input channels C (1..C_MAX)
    logic [7:0]  h;         // input height H
    logic [7:0]  w;         // input width W
    logic [3:0]  s;         // stride S (>= 1)
    logic [5:0]  nb;        // number of filter batches M' (1..NB_MAX)
    logic        relu_en;   // 1: NL stage applies ReLU
    logic        pool_en;   // 1: 2x2 max pooling, stride 2
    logic [5:0]  out_shift; // right shift applied by the output formatter
  } layer_cfg_t;
endpackage
