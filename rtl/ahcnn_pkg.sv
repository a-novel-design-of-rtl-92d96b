// ahcnn_pkg -- constants and small types shared by the AH-CNN accelerator.
//
// The network is a quantised ResNet-style CNN for 32x32 RGB images, split into
// three convolution parts that share one reconfigurable region and a fourth,
// static part (global pooling + fully connected classifier). Activations are
// 5-bit unsigned, weights of the quantised layers are 1 bit (+1/-1); these two
// widths and the channel counts 16/32/64 follow the paper. The 8-bit image
// pixels, the 8-bit first-layer weights, the logit and confidence fixed-point
// formats and the configuration address map are this design's choices.
package ahcnn_pkg;

  // ---- data widths --------------------------------------------------------
  localparam int unsigned ACT_W    = 5;        // activation bits (paper)
  localparam int unsigned PIX_W    = 8;        // image pixel bits (assumed)
  localparam int unsigned IMG_CH   = 3;        // RGB
  localparam int unsigned IMG_DIM  = 32;       // CIFAR / SVHN image side
  localparam int unsigned MAX_CH   = 64;       // widest part (Part 3)
  localparam int unsigned FM_W     = MAX_CH * ACT_W; // one pixel, all channels
  localparam int unsigned POOL_W   = 8;        // pooled activation, Q5.3
  localparam int unsigned Z_W      = 16;       // logit, signed Q.3
  localparam int unsigned Z_FRAC   = 3;
  localparam int unsigned BETA_W   = 16;       // confidence, unsigned Q0.16
  localparam int unsigned MAX_CLASSES = 100;   // CIFAR-100
  localparam int unsigned NUM_BRANCH  = 3;     // Parts 1..3
  localparam int unsigned LAMBDA_LEVELS = 4;   // desired-accuracy settings

  // ---- configuration bus ----------------------------------------------------
  localparam int unsigned CFG_AW = 24;
  localparam int unsigned CFG_DW = 32;

  // cfg_addr[23:20] selects the target of a configuration write
  typedef enum logic [3:0] {
    CFG_PART1 = 4'd0,   // weights/shifts of Part 1 (content of its bitstream)
    CFG_PART2 = 4'd1,
    CFG_PART3 = 4'd2,
    CFG_FC    = 4'd4,   // Part 4 classifier weights
    CFG_GATE  = 4'd5    // decision layer registers
  } cfg_target_e;

  // inside a conv part: cfg_addr[19:18]
  typedef enum logic [1:0] {
    PCFG_SHIFT = 2'd0,  // requantisation shift of layer cfg_addr[3:0]
    PCFG_WQ    = 2'd1,  // binary weights: word cfg_addr[17:8], chunk cfg_addr[7:0]
    PCFG_W1    = 2'd2   // first-layer 8-bit weights, same layout
  } part_cfg_e;

  // one classified image
  typedef struct packed {
    logic [1:0]        branch;   // 0 = Part 1 (shallow) .. 2 = Part 3
    logic [6:0]        label;
    logic [BETA_W-1:0] beta;
    logic              hp_hit;   // high-priority class in top-n
    logic              deep;     // deeper part requested
  } result_t;

endpackage
