// dense_layer: one fully connected layer of the inference network, with
// optional ReLU and weight/bias memories that the host can rewrite at run time.
//
// How it works: an input vector of N_IN features arrives as N_IN/IN_LANES
// beats of IN_LANES features on a valid/ready stream. Every accepted beat is
// multiplied against the matching IN_LANES weights of all N_OUT neurons at
// once and added into N_OUT full-precision accumulators, so the layer
// consumes one beat per clock and the input is never stored. With the last
// beat the sums get the bias, are shifted back to the feature format, passed
// through ReLU (if RELU) and saturated to 16 bits into an output buffer; the
// accumulators are cleared in the same clock, so the next vector can start
// at once while the buffer drains as N_OUT/OUT_LANES beats. The layer stalls
// (s_ready low on a last beat) only when the buffer of the previous vector
// has not yet been taken.
//
// Weights and biases are written from the configuration bus
// (snl_pkg::cfg_wr_t). In region W_REGION the weight from input i to neuron
// o sits at offset {o, i}, with i in the low clog2(N_IN) bits (layer 1:
// o*1024 + i); in region B_REGION bias o sits at offset o. Each neuron has
// its own bank of N_IN/IN_LANES words of IN_LANES weights, so every bank
// delivers one word per clock. Reloading these memories is what switches one
// synthesized network between tasks, as the paper describes; the address
// map, the banking and the fixed-point format (16-bit, FRAC_W fraction
// bits, floor rounding, saturation) are this design's own choices. Writes
// take effect at the next clock edge and are not blocked during a
// computation: the host reloads between blocks.
//
// Timing: the output buffer is valid right after the clock edge that takes
// the last input beat, i.e. N_IN/IN_LANES edges after the one that takes the
// first beat when the input has no gaps.
module dense_layer
  import snl_pkg::*;
#(
  parameter int unsigned N_IN      = 768,
  parameter int unsigned N_OUT     = 50,
  parameter int unsigned IN_LANES  = 8,
  parameter int unsigned OUT_LANES = 1,
  parameter bit          RELU      = 1'b1,
  parameter logic [3:0]  W_REGION  = REG_L1_W,
  parameter logic [3:0]  B_REGION  = REG_L1_B
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  // input vector stream
  input  logic    s_valid,
  output logic    s_ready,
  input  data_t   s_data [IN_LANES],
  input  logic    s_last,
  // output vector stream
  output logic    m_valid,
  input  logic    m_ready,
  output data_t   m_data [OUT_LANES],
  output logic    m_last
);

  localparam int unsigned IN_BEATS  = N_IN / IN_LANES;
  localparam int unsigned OUT_BEATS = N_OUT / OUT_LANES;
  localparam int unsigned IB_W = (IN_BEATS  > 1) ? $clog2(IN_BEATS)  : 1;
  localparam int unsigned OB_W = (OUT_BEATS > 1) ? $clog2(OUT_BEATS) : 1;
  localparam int unsigned IA_W = (N_IN > 1) ? $clog2(N_IN) : 1;  // input field of the address
  localparam int unsigned OA_W = 16 - IA_W;                         // neuron field

  // ---- parameter memories ----
  wire [3:0]  cfg_region = cfg.addr[CFG_ADDR_W-1 -: 4];
  wire [15:0] cfg_ofs    = cfg.addr[15:0];
  wire [OA_W-1:0] cfg_o  = cfg_ofs[15 -: OA_W];
  wire [IA_W-1:0] cfg_i  = cfg_ofs[IA_W-1:0];
  wire [IB_W-1:0] cfg_beat = IB_W'(32'(cfg_i) / IN_LANES);
  wire [31:0]     cfg_lane = 32'(cfg_i) % IN_LANES;

  logic [IB_W-1:0] in_beat;
  data_t           w_beat [N_OUT][IN_LANES];  // weights meeting the current beat
  data_t           b_mem  [N_OUT];

  // One bank per neuron, one word per input beat holding the IN_LANES
  // weights that multiply that beat: each bank has one write port (a lane
  // of a word) and one read port (a whole word per clock).
  for (genvar o = 0; o < N_OUT; o++) begin : g_bank
    logic [IN_LANES*DATA_W-1:0] bank [IN_BEATS];
    wire we = cfg.we && cfg_region == W_REGION && 32'(cfg_o) == o && 32'(cfg_i) < N_IN;

    always_ff @(posedge clk)
      if (we) bank[cfg_beat][cfg_lane*DATA_W +: DATA_W] <= cfg.data[DATA_W-1:0];

    wire [IN_LANES*DATA_W-1:0] word = bank[in_beat];
    for (genvar j = 0; j < IN_LANES; j++) begin : g_lane
      assign w_beat[o][j] = data_t'(word[j*DATA_W +: DATA_W]);
    end
  end

  always_ff @(posedge clk)
    for (int o = 0; o < N_OUT; o++)
      if (cfg.we && cfg_region == B_REGION && 32'(cfg_ofs) == o)
        b_mem[o] <= data_t'(cfg.data[DATA_W-1:0]);

  // ---- accumulate ----
  logic signed [ACC_W-1:0] acc      [N_OUT];
  logic signed [ACC_W-1:0] acc_next [N_OUT];
  logic                    in_is_last;
  logic                    s_fire;

  data_t      out_buf [N_OUT];
  logic       out_full;
  logic [OB_W-1:0] out_beat;
  logic       out_done;   // last output beat leaves this clock

  assign in_is_last = (32'(in_beat) == IN_BEATS - 1);
  assign out_done   = out_full && m_ready && (32'(out_beat) == OUT_BEATS - 1);
  assign s_ready    = !in_is_last || !out_full || out_done;
  assign s_fire     = s_valid && s_ready;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc_next[o] = acc[o];
      for (int j = 0; j < IN_LANES; j++)
        acc_next[o] += ACC_W'(w_beat[o][j] * s_data[j]);
    end
  end

  // value of neuron o once the last beat is in: bias, rescale, ReLU, saturate
  function automatic data_t activate(input logic signed [ACC_W-1:0] sum,
                                     input data_t bias);
    logic signed [ACC_W-1:0] v;
    v = (sum + (ACC_W'(bias) <<< FRAC_W)) >>> FRAC_W;
    if (RELU && v < 0) v = '0;
    return sat16(v);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_beat <= '0;
      for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
    end else if (s_fire) begin
      if (in_is_last) begin
        in_beat <= '0;
        for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
      end else begin
        in_beat <= in_beat + 1'b1;
        for (int o = 0; o < N_OUT; o++) acc[o] <= acc_next[o];
      end
    end
  end

  // ---- output buffer ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_full <= 1'b0;
      out_beat <= '0;
    end else begin
      if (m_valid && m_ready) begin
        if (out_done) begin
          out_beat <= '0;
          out_full <= 1'b0;
        end else begin
          out_beat <= out_beat + 1'b1;
        end
      end
      if (s_fire && in_is_last) out_full <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s_fire && in_is_last)
      for (int o = 0; o < N_OUT; o++) out_buf[o] <= activate(acc_next[o], b_mem[o]);
  end

  assign m_valid = out_full;
  assign m_last  = (32'(out_beat) == OUT_BEATS - 1);
  always_comb
    for (int k = 0; k < OUT_LANES; k++)
      m_data[k] = out_buf[int'(out_beat)*OUT_LANES + k];

  // ---- stream rules ----
  initial begin
    assert (N_IN % IN_LANES == 0)   else $error("N_IN must be a multiple of IN_LANES");
    assert (N_OUT % OUT_LANES == 0) else $error("N_OUT must be a multiple of OUT_LANES");
  end

  // the producer's end-of-vector marker must agree with the beat count
  a_in_last: assert property (@(posedge clk) disable iff (!rst_n)
                              s_fire |-> (s_last == in_is_last));
  // an offered output beat stays put until it is taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               m_valid && !m_ready |=> m_valid && $stable(out_beat));

endmodule
