// finn_pkg: constants and types shared by the Siamese-branch dataflow accelerator.
//
// The network is one branch of a SiamFC-style tracker: six 3x3 convolutions with
// stride 1 and no padding, 2x2 max pooling after the first three, 4-bit unsigned
// activations, 8-bit weights in the first and last layer and 4-bit weights
// elsewhere. The default folding (PE output channels and SIMD input channels
// processed per cycle in each layer) is the "V5" configuration, the one used for
// the complete tracker. Everything in this package that is not such a number
// (accumulator width, configuration-bus layout) is a choice of this design.
package finn_pkg;

  // ---- network shape (one branch) ----
  localparam int unsigned NUM_LAYERS = 6;
  localparam int unsigned KDIM       = 3;     // 3x3 kernels in every layer
  localparam int unsigned ROI_DIM    = 238;   // ROI input is 238x238x3
  localparam int unsigned IMG_CH     = 3;
  localparam int unsigned EXEMPLAR_DIM = 110; // exemplar input (initialisation)

  // ---- precisions ----
  localparam int unsigned PIX_W  = 8;   // input image: 8-bit unsigned per colour channel
  localparam int unsigned ACT_W  = 4;   // activations: 4-bit unsigned
  localparam int unsigned WB_W   = 8;   // weights of first and last layer
  localparam int unsigned WM_W   = 4;   // weights of the middle layers
  localparam int unsigned ACC_W  = 24;  // accumulator / threshold width (design choice)
  localparam int unsigned NUM_THR = (1 << ACT_W) - 1;  // 15 thresholds per channel

  // ---- configuration bus (loading weights and thresholds) ----
  localparam int unsigned CFG_DATA_W = 256;  // wide enough for SIMD=32 x 8-bit weights
  localparam int unsigned CFG_ADDR_W = 16;
  localparam int unsigned CFG_PE_W   = 6;

  typedef enum logic [0:0] {
    CFG_WEIGHT = 1'b0,   // data = SIMD weights of one PE at one memory word
    CFG_THRESH = 1'b1    // data[ACC_W-1:0] = one threshold; addr = {channel, t[3:0]}
  } cfg_kind_e;

  typedef struct packed {
    logic                  we;
    logic [2:0]            layer;   // 0..5
    cfg_kind_e             kind;
    logic [CFG_PE_W-1:0]   pe;      // PE index (weights only)
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;
  } cfg_wr_t;

  // Cycles one layer needs per output pixel: synapse folds x neuron folds.
  function automatic int unsigned layer_cycles_per_pixel(int unsigned cin, int unsigned cout,
                                                         int unsigned simd, int unsigned pe);
    return (KDIM * KDIM * cin / simd) * (cout / pe);
  endfunction

endpackage
