// snl_mlp: the inference network, a three-layer fully connected MLP
// (768 -> 50 -> 50 -> 4) with ReLU on every layer.
//
// How it works: three dense_layer stages joined by valid/ready streams form a
// pipeline. Layer 1 takes the frame IN_LANES (8) features per clock and
// multiplies each beat against all 50 neurons at once; layers 2 and 3 take
// their 50 inputs one per clock; layer 3 offers its N_O results as a single
// beat. Each layer frees its accumulators as soon as its output buffer is
// loaded, so up to three frames are in flight and the pipeline takes a new
// frame every max(N_IN/IN_LANES, N_H1, N_H2) = 96 clocks.
//
// The layer sizes and ReLU activations are the paper's (the output layer's
// ReLU as printed in its network diagram). All weights and biases are
// written at run time over the configuration bus, regions REG_L1_W ..
// REG_L3_B. The output layer always has N_O = 4 neurons; for the binary task
// the host loads the weights of one neuron and tells the post-processor to
// report one output. The lane widths between the layers are this design's
// choice.
//
// Timing, per frame with no stalls: the result is valid
// N_IN/IN_LANES + N_H1 + N_H2 clocks after the frame's first beat is
// accepted (196 clocks at the default sizes, 1.18 us at a 6 ns clock).
module snl_mlp
  import snl_pkg::*;
#(
  parameter int unsigned N_IN     = N_FEAT,
  parameter int unsigned N_H1     = N_HID,
  parameter int unsigned N_H2     = N_HID,
  parameter int unsigned N_O      = N_OUT_MAX,
  parameter int unsigned IN_LANES = FEAT_LANES,
  parameter bit          RELU_OUT = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    s_valid,
  output logic    s_ready,
  input  data_t   s_data [IN_LANES],
  input  logic    s_last,
  output logic    m_valid,
  input  logic    m_ready,
  output data_t   m_data [N_O],
  output logic    m_last
);

  logic  h1_valid, h1_ready, h1_last;
  logic  h2_valid, h2_ready, h2_last;
  data_t h1_data [1];
  data_t h2_data [1];

  dense_layer #(
    .N_IN(N_IN), .N_OUT(N_H1), .IN_LANES(IN_LANES), .OUT_LANES(1),
    .RELU(1'b1), .W_REGION(REG_L1_W), .B_REGION(REG_L1_B)
  ) u_l1 (
    .clk, .rst_n, .cfg,
    .s_valid, .s_ready, .s_data, .s_last,
    .m_valid(h1_valid), .m_ready(h1_ready), .m_data(h1_data), .m_last(h1_last)
  );

  dense_layer #(
    .N_IN(N_H1), .N_OUT(N_H2), .IN_LANES(1), .OUT_LANES(1),
    .RELU(1'b1), .W_REGION(REG_L2_W), .B_REGION(REG_L2_B)
  ) u_l2 (
    .clk, .rst_n, .cfg,
    .s_valid(h1_valid), .s_ready(h1_ready), .s_data(h1_data), .s_last(h1_last),
    .m_valid(h2_valid), .m_ready(h2_ready), .m_data(h2_data), .m_last(h2_last)
  );

  dense_layer #(
    .N_IN(N_H2), .N_OUT(N_O), .IN_LANES(1), .OUT_LANES(N_O),
    .RELU(RELU_OUT), .W_REGION(REG_L3_W), .B_REGION(REG_L3_B)
  ) u_l3 (
    .clk, .rst_n, .cfg,
    .s_valid(h2_valid), .s_ready(h2_ready), .s_data(h2_data), .s_last(h2_last),
    .m_valid, .m_ready, .m_data, .m_last
  );

endmodule
