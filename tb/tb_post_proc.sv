// tb_post_proc: self-checking test of the post-processor.
//
// Default sizes (4 outputs, 18 events per block). Four blocks of random
// result vectors are sent with random gaps; the host side applies random
// back-pressure. Before blocks 2, 3 and 4 the number of active outputs is
// set to 1, 2 and 4 over the configuration bus, and an out-of-range write
// (0 and 5) must leave it unchanged. Each result beat is checked for its
// data (inactive lanes zero), keep mask, event index and end-of-block
// marker; the test also checks that no vector is taken while a block is
// being sent and that a block's first beat is offered right after the edge
// that takes its 18th vector.
`timescale 1ns/1ps
module tb_post_proc;
  import snl_pkg::*;

  localparam int NO = 4, NE = 18, NBLK = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic    sv, sr, mv, mr, ml;
  data_t   sd [NO];
  data_t   md [NO];
  logic [NO-1:0] mk;
  logic [4:0]    mev;

  post_proc dut (.clk, .rst_n, .cfg, .s_valid(sv), .s_ready(sr), .s_data(sd),
                 .m_valid(mv), .m_ready(mr), .m_data(md), .m_keep(mk), .m_last(ml),
                 .m_evt(mev));

  int checks = 0, failures = 0;
  int res [NBLK][NE][NO];
  int nact [NBLK] = '{4, 1, 2, 4};
  int unsigned cyc = 0, last_in_cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic cfg_write(int val);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {REG_POST, 16'd0}; cfg.data = 32'(val);
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic send_block(int b);
    for (int e = 0; e < NE; e++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) begin sv = 0; @(negedge clk); end
      sv = 1;
      for (int k = 0; k < NO; k++) sd[k] = data_t'(res[b][e][k]);
      #1;
      while (!sr) begin @(negedge clk); #1; end
      if (e == NE-1) last_in_cyc = cyc;
    end
    @(negedge clk); sv = 0;
  endtask

  task automatic recv_block(int b);
    bit seen = 0;
    for (int e = 0; e < NE; e++) begin
      do begin
        @(negedge clk); mr = ($urandom_range(2) != 0); #1;
        if (e == 0 && mv && !seen) begin
          seen = 1;
          // the first beat appears one edge after the 18th vector is taken
          checks++;
          if (cyc - last_in_cyc != 1) begin
            failures++;
            $display("block %0d: first beat %0d clocks after last vector", b, cyc - last_in_cyc);
          end
        end
        checks++;
        if (mv && sr) begin failures++; $display("vector accepted while sending"); end
      end while (!(mv && mr));
      for (int k = 0; k < NO; k++) begin
        int exp_v;
        exp_v = (k < nact[b]) ? res[b][e][k] : 0;
        checks++;
        if (int'(md[k]) != exp_v || mk[k] != (k < nact[b])) begin
          failures++;
          $display("block %0d event %0d lane %0d: got %0d keep %0b, expected %0d", b, e, k, md[k], mk[k], exp_v);
        end
      end
      checks++;
      if (int'(mev) != e || ml != (e == NE-1)) begin
        failures++;
        $display("block %0d event %0d: evt %0d last %0b", b, e, mev, ml);
      end
    end
  endtask

  initial begin
    cfg = '0; sv = 0; mr = 0;
    for (int k = 0; k < NO; k++) sd[k] = '0;
    for (int b = 0; b < NBLK; b++)
      for (int e = 0; e < NE; e++)
        for (int k = 0; k < NO; k++) res[b][e][k] = int'($urandom_range(65535)) - 32768;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      if (b > 0) begin
        cfg_write(nact[b]);
        cfg_write(0);        // out of range: ignored
        cfg_write(5);        // out of range: ignored
      end
      fork send_block(b); recv_block(b); join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
