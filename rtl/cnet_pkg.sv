// cnet_pkg: shared constants and types of the Condensation-Net accelerator.
//
// The accelerator convolves one spatial block of the input feature maps at a
// time with 1-bit filter weights, quantizes the results (activation), and
// condenses alpha consecutive "virtual" output channels into one stored channel
// by cross-channel pooling before anything is written back. Only two
// consecutive layers' feature maps ever live in the feature map memory.
//
// Numbers taken from the paper: 320 MACs per cycle (M = 320 convolution cores),
// a 4,096 KB feature map memory, a 1,935 KB weight memory, 1-bit weights,
// 2-bit activations, filters up to 7 x 7, alpha in {1, 2, 4}, input images up
// to 512 x 512 x 8 bits, and max / average (and min) cross-channel pooling.
// Everything else here (block shape 16 x 20, one byte per stored pixel, the
// layer descriptor fields and widths, the weight bit order) is this design's
// own choice.
package cnet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PIX_W      = 8;         // stored pixel width (8-bit input image)
  localparam int unsigned ACC_W      = 26;        // signed accumulator width
  localparam int unsigned KMAX       = 7;         // largest filter side (Table 4)
  localparam int unsigned ALPHA_MAX  = 4;         // largest condensation factor
  localparam int unsigned BLK_W      = 16;        // block width in output pixels
  localparam int unsigned BLK_H      = 20;        // block height in output pixels (16*20 = 320 cores)
  localparam int unsigned FM_AW      = 22;        // feature map address width (4 Mi pixels)
  localparam int unsigned FM_DEPTH   = 4_194_304; // 4,096 KB, one byte per pixel
  localparam int unsigned FM_BANKS   = 32;        // pixels per feature map read (>= BLK_W+KMAX-1)
  localparam int unsigned WM_WORD    = 32;        // weight memory word width (32 one-bit weights)
  localparam int unsigned WM_DEPTH   = 495_483;   // 15,855,456 bits / 32: "1,935 KB" (1,935.5 KB)
  localparam int unsigned WM_AW      = 19;        // word address width
  localparam int unsigned WB_AW      = WM_AW + 5; // weight bit address width
  localparam int unsigned LP_DEPTH   = 16;        // layer descriptors
  localparam int unsigned LP_AW      = 4;
  localparam int unsigned DIM_W      = 10;        // width / height field (max 512)
  localparam int unsigned CH_W       = 11;        // channel count field (max 1024)

  // ------------------------------------------------ cross-channel pooling
  typedef enum logic [1:0] {
    CCP_MAX = 2'd0,   // maximum of the alpha virtual pixels
    CCP_AVG = 2'd1,   // average (sum >> log2 alpha)
    CCP_MIN = 2'd2    // minimum
  } ccp_mode_e;

  // ------------------------------------------------ layer descriptor
  // One entry of the layer parameter memory. Channel counts are the stored
  // (condensed) counts: n_out is N_ch,i+1 as written to memory.
  typedef struct packed {
    logic [FM_AW-1:0] in_base;     // first pixel of input channel 0
    logic [FM_AW-1:0] out_base;    // first pixel of output channel 0
    logic [WB_AW-1:0] w_base;      // first weight bit of the layer
    logic [DIM_W-1:0] width;       // input (= convolution output) width
    logic [DIM_W-1:0] height;      // input (= convolution output) height
    logic [CH_W-1:0]  n_in;        // N_ch,i
    logic [CH_W-1:0]  n_out;       // stored output channels
    logic [2:0]       ksize;       // filter (or pooling window) side, 1..7; odd for convolution
    logic [1:0]       alpha_log2;  // alpha = 1 << alpha_log2
    logic             ccp_en;      // cross-channel pooling enabled
    ccp_mode_e        ccp_mode;
    logic             sp_pool;     // 2x2, stride 2 spatial max pooling after CCP
    logic [4:0]       act_shift;   // activation: right shift of the ReLU output
    logic [3:0]       act_bits;    // activation: output bits (2 for HWGQ)
    logic             pool_only;   // window max pooling layer: output channel c is the
                                   // max over each ksize x ksize window of input channel c
    logic             last;        // last layer of the network
  } layer_param_t;


endpackage
