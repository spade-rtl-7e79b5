// spade_pkg: types and constants shared by the SPADE sparse-pillar convolution
// accelerator. Pillar and output indices share one width (IDX_W); coordinates use
// COORD_W bits. A rule is one (input index, output index) pair stored in the rule
// bank of the kernel weight that connects them. The five sparse convolution types
// are the paper's; their encoding, the index widths and the layer configuration
// record are this design's own choices.
package spade_pkg;

  parameter int unsigned IDX_W   = 17;   // pillar / output index and count width
  parameter int unsigned COORD_W = 10;   // grid coordinate width (up to 1024)
  parameter int unsigned KERNEL  = 9;    // 3x3 kernel -> nine rule banks
  parameter int unsigned ADDR_W  = 32;   // DRAM word address width

  typedef enum logic [2:0] {
    SPCONV   = 3'd0,   // standard sparse conv, output dilates
    SPCONV_S = 3'd1,   // submanifold: outputs only at active inputs
    SPCONV_P = 3'd2,   // SpConv rules, outputs pruned by magnitude
    SPSTCONV = 3'd3,   // strided (stride 2) sparse conv
    SPDECONV = 3'd4    // 2x2, stride 2 sparse deconvolution
  } conv_mode_e;

  typedef struct packed {
    logic [IDX_W-1:0] i;   // input pillar index
    logic [IDX_W-1:0] o;   // output pillar index
  } rule_t;

  typedef struct packed {
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  // One active tile: its input and output index windows and, per weight bank,
  // where its rules start and how many there are (T^a_{t,w}).
  typedef struct packed {
    logic [IDX_W-1:0]               i_s;
    logic [IDX_W-1:0]               i_e;
    logic [IDX_W-1:0]               o_s;
    logic [IDX_W-1:0]               o_e;
    logic [KERNEL-1:0][IDX_W-1:0]   ws;
    logic [KERNEL-1:0][IDX_W-1:0]   wc;
  } tile_t;

  // One layer: where its data lives in DRAM and how it is computed.
  typedef struct packed {
    conv_mode_e          mode;
    logic [COORD_W-1:0]  grid_h;      // input grid rows
    logic [COORD_W-1:0]  grid_w;      // input grid columns
    logic [IDX_W-1:0]    n_in;        // active input pillars
    logic [7:0]          ct;          // input-channel tiles (C / PE_ROWS)
    logic [7:0]          mt;          // output-channel tiles (M / PE_COLS)
    logic [ADDR_W-1:0]   coord_in;    // base of input coordinates
    logic [ADDR_W-1:0]   feat_in;     // base of input features
    logic [ADDR_W-1:0]   wgt;         // base of weights
    logic [ADDR_W-1:0]   feat_out;    // base of output features
    logic [ADDR_W-1:0]   coord_out;   // base of output coordinates
    logic [4:0]          shift;       // requantisation right shift
    logic [39:0]         threshold;   // pruning threshold on sum |x|
  } layer_cfg_t;

  // Weight bank of kernel offset (dy,dx), dy,dx in {-1,0,+1}.
  function automatic int unsigned wbank(int dy, int dx);
    return unsigned'(3 * (dy + 1) + (dx + 1));
  endfunction

endpackage
