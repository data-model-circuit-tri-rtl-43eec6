// tri_pkg -- shared widths, types and defaults of the pruning-aware tile
// accelerator.
//
// The convolution kernels are 3x3 (K = 3), as in the paper's pattern-pruning
// discussion. The 60x60 tile follows the paper's chosen drop-patch size, so
// one saliency patch is one accelerator tile. The frame size 1280x720 is the
// HD resolution of the BDD100K video the paper evaluates on. The number
// formats (8-bit signed activations and weights, 32-bit accumulators) are
// this design's own choice: the paper gives no precision.
package tri_pkg;
  localparam int unsigned K        = 3;     // kernel height and width
  localparam int unsigned TILE     = 60;    // tile = drop patch, 60x60
  localparam int unsigned FRAME_W  = 1280;  // HD frame width
  localparam int unsigned FRAME_H  = 720;   // HD frame height
  localparam int unsigned DATA_W   = 8;     // activation width (signed)
  localparam int unsigned WGT_W    = 8;     // weight width (signed)
  localparam int unsigned ACC_W    = 32;    // accumulator width
  localparam int unsigned PIX_W    = 8;     // luma sample width (unsigned)
  localparam int unsigned DROP_PCT = 20;    // spatial patch drop ratio, %

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Engine / scheduler state machines.
  typedef enum logic [1:0] {ENG_IDLE, ENG_RUN, ENG_DRAIN} eng_state_e;
  typedef enum logic [2:0] {
    TOP_IDLE, TOP_SAL, TOP_TILE, TOP_WAIT, TOP_NEXT
  } top_state_e;
endpackage
