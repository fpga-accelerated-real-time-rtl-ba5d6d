// snl_bes_top: FPGA data flow of the BES inference system.
//
// What it does: turns the raw digitizer stream (all 160 channels, one 1 us
// time slice after another) into per-event classification results. The
// pre-processor keeps 16 BES channels and cuts the stream into 48-slice
// frames of 768 features, 18 frames per block; the MLP (768-50-50-4, ReLU)
// classifies each frame; the post-processor gathers the 18 results and sends
// them to the host as one block. The host link itself (PCIe and DMA) is not
// part of this RTL: its three channels appear as ports.
//
// Interface (all ports plain signals, one clock, synchronous active-low reset):
//   cfg_*  host writes of weights, biases, channel map, input mask and the
//          number of active outputs; address map in snl_pkg (cfg_region_e).
//   dig_*  digitizer samples, 8 channels per beat, 20 beats per time slice,
//          dig_last on the last beat of a slice.
//   res_*  results, one beat per event with 4 16-bit lanes, res_keep marks
//          the active lanes, res_last the 18th event of a block.
//   pre_block_end  pulses when the last beat of a block enters the network.
//
// Timing: with the stream and the host never stalling, a frame's result
// leaves the network 196 clocks after the frame's first feature enters it;
// a block's first result beat follows its last frame's result by one clock.
// The network accepts a frame every 96 clocks, so the digitizer side
// (20 beats per 16 features) is the slower one by a wide margin.
// The block structure follows the paper's data-flow figure; the stream
// formats and the configuration bus are this design's choices.
module snl_bes_top
  import snl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // configuration writes from the host
  input  logic             cfg_we,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [31:0]      cfg_data,
  // digitizer samples from the host
  input  logic             dig_valid,
  output logic             dig_ready,
  input  sample_t          dig_data [8],
  input  logic             dig_last,
  // result blocks to the host
  output logic             res_valid,
  input  logic             res_ready,
  output data_t            res_data [N_OUT_MAX],
  output logic [N_OUT_MAX-1:0] res_keep,
  output logic             res_last,
  output logic [$clog2(N_EVENTS)-1:0] res_evt,
  output logic             pre_block_end
);

  cfg_wr_t cfg;
  assign cfg = '{we: cfg_we, addr: cfg_addr, data: cfg_data};

  logic  f_valid, f_ready, f_last, f_blk_last;
  data_t f_data [FEAT_LANES];
  logic  y_valid, y_ready, y_last;
  data_t y_data [N_OUT_MAX];

  bes_preproc u_pre (
    .clk, .rst_n, .cfg,
    .s_valid(dig_valid), .s_ready(dig_ready), .s_data(dig_data), .s_last(dig_last),
    .m_valid(f_valid), .m_ready(f_ready), .m_data(f_data), .m_last(f_last),
    .m_blk_last(f_blk_last)
  );

  snl_mlp u_mlp (
    .clk, .rst_n, .cfg,
    .s_valid(f_valid), .s_ready(f_ready), .s_data(f_data), .s_last(f_last),
    .m_valid(y_valid), .m_ready(y_ready), .m_data(y_data), .m_last(y_last)
  );

  post_proc u_post (
    .clk, .rst_n, .cfg,
    .s_valid(y_valid), .s_ready(y_ready), .s_data(y_data),
    .m_valid(res_valid), .m_ready(res_ready), .m_data(res_data), .m_keep(res_keep),
    .m_last(res_last), .m_evt(res_evt)
  );

  assign pre_block_end = f_valid && f_ready && f_blk_last;

  // the output layer sends each result vector as a single beat
  a_one_beat: assert property (@(posedge clk) disable iff (!rst_n) y_valid |-> y_last);

endmodule
