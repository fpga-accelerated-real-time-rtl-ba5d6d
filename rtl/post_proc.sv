// post_proc: post-processor between the network and the host link.
//
// What it does: collects the network's result vector for each of the N_EVT
// events of an inference block and, once all are in, hands the block to the
// host as N_EVT consecutive beats (m_last on the last one), so the host sees
// one transfer per block rather than one per event.
//
// How it works: a result vector arrives as one beat of N_OUT lanes (the
// output layer's neurons). The post-processor is either collecting (s_ready
// high, vectors written to the block buffer) or sending (s_ready low, beats
// read from the buffer in event order). Only the first n_active lanes carry
// results: n_active is 1 for the binary ELM task and 4 for the 4-class
// confinement task and is written over the configuration bus (region
// REG_POST, offset 0, values 1..N_OUT; reset value N_OUT). The other lanes
// are sent as zero and cleared in m_keep, which is how the output masking
// lets one synthesized network serve both tasks.
//
// Follows the paper: 4 outputs x 18 events collected and moved as a block,
// 1- or 4-output operation. This design's own choices: the beat format
// (one 16-bit lane per output, one beat per event), m_keep, and a single
// buffer, so the network is held off while a block is being sent.
//
// Timing: the first beat of a block is offered right after the clock edge
// that takes the N_EVT-th vector; the block then takes N_EVT clocks if the host is ready.
module post_proc
  import snl_pkg::*;
#(
  parameter int unsigned N_OUT = N_OUT_MAX,
  parameter int unsigned N_EVT = N_EVENTS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  // one result vector per event
  input  logic             s_valid,
  output logic             s_ready,
  input  data_t            s_data [N_OUT],
  // block to the host
  output logic             m_valid,
  input  logic             m_ready,
  output data_t            m_data [N_OUT],
  output logic [N_OUT-1:0] m_keep,
  output logic             m_last,
  output logic [$clog2(N_EVT)-1:0] m_evt
);

  localparam int unsigned EV_W = $clog2(N_EVT);
  localparam int unsigned NA_W = $clog2(N_OUT + 1);

  typedef enum logic {COLLECT, SEND} state_e;

  logic [NA_W-1:0] n_active;
  state_e          state;
  logic [EV_W-1:0] wr_evt, rd_evt;
  data_t           blk [N_EVT][N_OUT];

  wire [3:0]  cfg_region = cfg.addr[CFG_ADDR_W-1 -: 4];
  wire [15:0] cfg_ofs    = cfg.addr[15:0];
  wire [31:0] cfg_n      = cfg.data;

  always_ff @(posedge clk) begin
    if (!rst_n)
      n_active <= NA_W'(N_OUT);
    else if (cfg.we && cfg_region == REG_POST && cfg_ofs == 16'd0 &&
             cfg_n >= 1 && cfg_n <= N_OUT)
      n_active <= NA_W'(cfg_n);
  end

  assign s_ready = (state == COLLECT);
  assign m_valid = (state == SEND);
  assign m_last  = (32'(rd_evt) == N_EVT - 1);
  assign m_evt   = rd_evt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= COLLECT;
      wr_evt <= '0;
      rd_evt <= '0;
    end else begin
      case (state)
        COLLECT:
          if (s_valid) begin
            if (32'(wr_evt) == N_EVT - 1) begin
              wr_evt <= '0;
              state  <= SEND;
            end else begin
              wr_evt <= wr_evt + 1'b1;
            end
          end
        SEND:
          if (m_ready) begin
            if (m_last) begin
              rd_evt <= '0;
              state  <= COLLECT;
            end else begin
              rd_evt <= rd_evt + 1'b1;
            end
          end
        default: state <= COLLECT;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (state == COLLECT && s_valid)
      blk[wr_evt] <= s_data;

  always_comb begin
    for (int k = 0; k < N_OUT; k++) begin
      m_keep[k] = (k < int'(n_active));
      m_data[k] = m_keep[k] ? blk[rd_evt][k] : '0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               m_valid && !m_ready |=> m_valid && $stable(rd_evt));

endmodule
