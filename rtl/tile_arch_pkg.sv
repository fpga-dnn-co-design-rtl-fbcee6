// tile_arch_pkg: constants and types shared by the Tile-Arch accelerator.
//
// The accelerator computes one Bundle of a DNN (depth-wise 3x3 convolution,
// point-wise 1x1 convolution, activation and an optional 2x2 down-sampling)
// over a feature map that is cut into tiles of TILE_H x TILE_W pixels. PF
// channels are handled side by side, so one memory word carries PF channel
// values of one pixel. The defaults follow the design point the co-design
// flow selected (8-bit feature maps, at most 512 channels, PF = 16, 8x8 tiles);
// the widths of the weights and of the accumulators, the fixed-point format and
// the configuration record are this design's own choices.
package tile_arch_pkg;

  // Parallel factor: channel lanes per memory word and per IP instance.
  localparam int unsigned PF       = 16;
  // Tile size in pixels.
  localparam int unsigned TILE_H   = 8;
  localparam int unsigned TILE_W   = 8;
  // Feature-map word width (unsigned, FM_W-4 fractional bits) and weight width.
  localparam int unsigned FM_W     = 8;
  localparam int unsigned W_W      = 8;
  localparam int unsigned ACC_W    = 32;
  // Largest channel count of any layer.
  localparam int unsigned MAX_CH   = 512;
  // DRAM word address width.
  localparam int unsigned ADDR_W   = 32;

  // Activation applied after each convolution IP.
  typedef enum logic [1:0] {
    ACT_RELU  = 2'd0,   // clamp below at 0, saturate at the largest code
    ACT_RELU4 = 2'd1,   // clamp to [0, 4.0]
    ACT_RELU8 = 2'd2    // clamp to [0, 8.0]
  } act_mode_e;

  // Which pipeline stage a signal belongs to.
  typedef enum logic [2:0] {
    ST_LOAD = 3'd0,
    ST_DW   = 3'd1,
    ST_PW   = 3'd2,
    ST_POOL = 3'd3,
    ST_WB   = 3'd4
  } stage_e;
  localparam int unsigned N_STAGES = 5;

  // Run-time description of one Bundle pass over one feature map.
  // h and w are multiples of the tile size; cin and cout are multiples of PF.
  typedef struct packed {
    logic [15:0]       h;          // input feature-map height, pixels
    logic [15:0]       w;          // input feature-map width, pixels
    logic [10:0]       cin;        // input channels (depth-wise stage keeps them)
    logic [10:0]       cout;       // output channels of the 1x1 convolution
    logic              pool_en;    // 2x2 max-pool down-sampling after the Bundle
    act_mode_e         act;        // activation of both convolutions
    logic [4:0]        shift_dw;   // requantization shift after the depth-wise conv
    logic [4:0]        shift_pw;   // requantization shift after the 1x1 conv
    logic [ADDR_W-1:0] in_base;    // DRAM word address of the input feature map
    logic [ADDR_W-1:0] w_base;     // DRAM word address of the Bundle's weights
    logic [ADDR_W-1:0] out_base;   // DRAM word address of the output feature map
  } bundle_cfg_t;

endpackage
