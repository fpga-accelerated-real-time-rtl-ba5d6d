// bes_preproc: pre-processor between the digitizer stream and the network.
//
// What it does: the host forwards every 1 us time slice of all N_DIG_CH
// digitizer channels (18-bit samples). Of these, N_BES_CH are BES channels
// starting at channel BES_BASE; the pre-processor picks N_SEL of them,
// zeroes any that the input mask switches off, and forwards them to the
// network OUT_LANES features per clock. N_SLICES consecutive slices form one
// network input frame (N_SEL*N_SLICES = 768 features); N_EVENTS frames form
// one inference block. All other channels are dropped.
//
// How it works: input beats carry IN_LANES consecutive channels, so a slice is
// N_DIG_CH/IN_LANES beats (s_last marks its last beat). Each of the N_SEL
// slots knows which channel it takes (the channel map) and copies it when
// the beat holding that channel passes. At the end of the slice the slots
// move to an output buffer that drains as N_SEL/OUT_LANES beats while the
// next slice is captured. Features are ordered time-major: feature
// slice*N_SEL + slot. m_last marks the last beat of a frame and m_blk_last
// the last beat of a block.
//
// Conversion: feature = sample >>> (SAMPLE_W-DATA_W), i.e. the 16 most
// significant bits of the sample. The channel map (region REG_PRE, offsets
// 0..N_SEL-1, a BES channel number) and the input mask (offset PRE_MASK_OFS,
// bit k = slot k used) are written over the configuration bus; after reset
// the map takes every 4th BES channel and all slots are used.
// Follows the paper: 160 channels, 64 BES, 16 selected, 48-slice windows,
// 18 frames, 8 features per clock, masking of unused inputs. This design's
// own choices: BES_BASE, the channel map, the conversion, the feature order
// and the stream format.
//
// Timing: the first output beat of a slice is valid right after the clock
// edge that takes the slice's last input beat. The input stalls only if the output
// buffer still holds the previous slice at that point.
module bes_preproc
  import snl_pkg::*;
#(
  parameter int unsigned N_DIG    = N_DIG_CH,
  parameter int unsigned N_BES    = N_BES_CH,
  parameter int unsigned BES_BASE = 96,
  parameter int unsigned N_SEL    = N_SEL_CH,
  parameter int unsigned N_SLICE  = N_SLICES,
  parameter int unsigned N_EVT    = N_EVENTS,
  parameter int unsigned IN_LANES = 8,
  parameter int unsigned OUT_LANES = FEAT_LANES
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  // digitizer samples, one time slice = N_DIG/IN_LANES beats
  input  logic    s_valid,
  output logic    s_ready,
  input  sample_t s_data [IN_LANES],
  input  logic    s_last,
  // features to the network
  output logic    m_valid,
  input  logic    m_ready,
  output data_t   m_data [OUT_LANES],
  output logic    m_last,
  output logic    m_blk_last
);

  localparam int unsigned IN_BEATS  = N_DIG / IN_LANES;
  localparam int unsigned OUT_BEATS = N_SEL / OUT_LANES;
  localparam int unsigned IB_W  = $clog2(IN_BEATS);
  localparam int unsigned OB_W  = (OUT_BEATS > 1) ? $clog2(OUT_BEATS) : 1;
  localparam int unsigned MAP_W = $clog2(N_BES);
  localparam int unsigned SL_W  = $clog2(N_SLICE);
  localparam int unsigned EV_W  = $clog2(N_EVT);
  localparam int unsigned SHIFT = SAMPLE_W - DATA_W;

  // ---- configuration: channel map and input mask ----
  logic [MAP_W-1:0] chan_map [N_SEL];
  logic [N_SEL-1:0] in_mask;

  wire [3:0]  cfg_region = cfg.addr[CFG_ADDR_W-1 -: 4];
  wire [15:0] cfg_ofs    = cfg.addr[15:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_SEL; k++) chan_map[k] <= MAP_W'(k * (N_BES / N_SEL));
      in_mask <= '1;
    end else if (cfg.we && cfg_region == REG_PRE) begin
      for (int k = 0; k < N_SEL; k++)
        if (32'(cfg_ofs) == k) chan_map[k] <= cfg.data[MAP_W-1:0];
      if (32'(cfg_ofs) == PRE_MASK_OFS) in_mask <= cfg.data[N_SEL-1:0];
    end
  end

  // ---- capture the selected channels of one slice ----
  logic [IB_W-1:0] in_beat;
  logic            in_is_last, s_fire;
  data_t           slot      [N_SEL];
  data_t           slot_next [N_SEL];
  data_t           out_buf   [N_SEL];
  logic            out_full, out_done;
  logic [OB_W-1:0] out_beat;
  logic [SL_W-1:0] slice_cnt;
  logic [EV_W-1:0] evt_cnt;

  assign in_is_last = (32'(in_beat) == IN_BEATS - 1);
  assign out_done   = out_full && m_ready && (32'(out_beat) == OUT_BEATS - 1);
  assign s_ready    = !in_is_last || !out_full || out_done;
  assign s_fire     = s_valid && s_ready;

  always_comb begin
    for (int k = 0; k < N_SEL; k++) begin
      int unsigned ch;
      ch = BES_BASE + 32'(chan_map[k]);
      slot_next[k] = slot[k];
      if (ch / IN_LANES == 32'(in_beat))
        slot_next[k] = in_mask[k] ? data_t'(s_data[ch % IN_LANES] >>> SHIFT) : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_beat <= '0;
    end else if (s_fire) begin
      in_beat <= in_is_last ? '0 : in_beat + 1'b1;
    end
    if (s_fire) slot <= slot_next;
    if (s_fire && in_is_last) out_buf <= slot_next;
  end

  // ---- output buffer, slice and frame counters ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_full  <= 1'b0;
      out_beat  <= '0;
      slice_cnt <= '0;
      evt_cnt   <= '0;
    end else begin
      if (m_valid && m_ready) begin
        if (out_done) begin
          out_beat <= '0;
          out_full <= 1'b0;
          if (32'(slice_cnt) == N_SLICE - 1) begin
            slice_cnt <= '0;
            evt_cnt   <= (32'(evt_cnt) == N_EVT - 1) ? '0 : evt_cnt + 1'b1;
          end else begin
            slice_cnt <= slice_cnt + 1'b1;
          end
        end else begin
          out_beat <= out_beat + 1'b1;
        end
      end
      if (s_fire && in_is_last) out_full <= 1'b1;
    end
  end

  assign m_valid    = out_full;
  assign m_last     = (32'(out_beat) == OUT_BEATS - 1) && (32'(slice_cnt) == N_SLICE - 1);
  assign m_blk_last = m_last && (32'(evt_cnt) == N_EVT - 1);
  always_comb
    for (int j = 0; j < OUT_LANES; j++)
      m_data[j] = out_buf[int'(out_beat)*OUT_LANES + j];

  // ---- stream rules ----
  initial begin
    assert (N_DIG % IN_LANES == 0)     else $error("N_DIG must be a multiple of IN_LANES");
    assert (N_SEL % OUT_LANES == 0)    else $error("N_SEL must be a multiple of OUT_LANES");
    assert (BES_BASE + N_BES <= N_DIG) else $error("BES channels exceed the digitizer");
  end

  a_slice_last: assert property (@(posedge clk) disable iff (!rst_n)
                                 s_fire |-> (s_last == in_is_last));
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               m_valid && !m_ready |=> m_valid && $stable(out_beat));

endmodule
