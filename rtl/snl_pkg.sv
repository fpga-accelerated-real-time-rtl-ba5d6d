// snl_pkg: types and constants shared by the BES inference pipeline.
//
// The pipeline is: pre-processor (160 digitizer channels -> 16 BES channels,
// 48-slice windows, 8 features per clock) -> three dense layers
// (768 -> 50 -> 50 -> 4, ReLU) -> post-processor (4 outputs x 18 events).
// The layer sizes, channel counts, window length, batch of 18 events and the
// 8-feature input width follow the paper. The number formats, the
// configuration bus and its address map are this design's own choices: the
// paper does not give them.
//
// Number format: all features, weights and biases are signed 16-bit fixed
// point with FRAC_W = 10 fraction bits. Products are summed at full precision
// in ACC_W bits; a layer output is the sum shifted right by FRAC_W,
// (optionally) clipped at zero by ReLU and saturated to 16 bits.
//
// Configuration bus: one write per clock, {we, addr, data}. addr[19:16]
// selects a region, addr[15:0] is the word offset inside it.
package snl_pkg;

  // ---- network shape (paper, Sec. 4.2 / Fig. 3) ----
  localparam int unsigned N_DIG_CH    = 160; // digitizer channels
  localparam int unsigned N_BES_CH    = 64;  // BES channels among them (Fig. 2)
  localparam int unsigned N_SEL_CH    = 16;  // BES channels fed to the network
  localparam int unsigned N_SLICES    = 48;  // time slices per window
  localparam int unsigned N_FEAT      = N_SEL_CH * N_SLICES; // 768
  localparam int unsigned N_HID       = 50;  // neurons per hidden layer
  localparam int unsigned N_OUT_MAX   = 4;   // output neurons (1..4 used)
  localparam int unsigned N_EVENTS    = 18;  // frames per inference block
  localparam int unsigned FEAT_LANES  = 8;   // features per clock into the MLP

  // ---- number formats (design choice) ----
  localparam int unsigned SAMPLE_W    = 18;  // digitizer sample width (paper)
  localparam int unsigned DATA_W      = 16;
  localparam int unsigned FRAC_W      = 10;
  localparam int unsigned ACC_W       = 48;

  typedef logic signed [DATA_W-1:0]   data_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // ---- configuration bus ----
  localparam int unsigned CFG_ADDR_W = 20;
  typedef struct packed {
    logic                  we;
    logic [CFG_ADDR_W-1:0] addr;
    logic [31:0]           data;
  } cfg_wr_t;

  typedef enum logic [3:0] {
    REG_L1_W   = 4'h0,  // layer 1 weights, offset = o*768 + i
    REG_L1_B   = 4'h1,  // layer 1 biases,  offset = o
    REG_L2_W   = 4'h2,
    REG_L2_B   = 4'h3,
    REG_L3_W   = 4'h4,
    REG_L3_B   = 4'h5,
    REG_PRE    = 4'h6,  // pre-processor: 0..15 channel map, 16 input mask
    REG_POST   = 4'h7   // post-processor: 0 number of active outputs
  } cfg_region_e;

  localparam int unsigned PRE_MASK_OFS = 16;

  // Saturate a wide signed value to DATA_W bits.
  function automatic data_t sat16(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = (ACC_W'(1) <<< (DATA_W-1)) - 1;
    localparam logic signed [ACC_W-1:0] MINV = -(ACC_W'(1) <<< (DATA_W-1));
    if (v > MAXV)      return data_t'(MAXV);
    else if (v < MINV) return data_t'(MINV);
    else               return data_t'(v);
  endfunction

endpackage
