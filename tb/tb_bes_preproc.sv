// tb_bes_preproc: self-checking test of the BES pre-processor.
//
// Full channel counts (160 digitizer channels, 64 BES from channel 96, 16
// selected, 8 samples per input beat) with short frames (4 slices) and
// blocks (3 frames). Phase 1 uses the reset channel map (every 4th BES
// channel) and no stalls; it also checks that the first feature beat of a
// slice is offered right after the edge that takes the slice's last sample
// beat. Phase 2 writes a random channel map and an input mask over the
// configuration bus and runs with random input gaps and output
// back-pressure. Every feature is compared with sample >>> 2 of the mapped
// channel (zero if masked), and frame and block end markers with the slice
// count.
`timescale 1ns/1ps
module tb_bes_preproc;
  import snl_pkg::*;

  localparam int NSL = 4, NEV = 3, BASE = 96;
  localparam int IN_BEATS = 160 / 8;
  localparam int NSLICES = NSL * NEV * 2;   // two blocks per phase

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic    sv, sr, sl, mv, mr, ml, mbl;
  sample_t sd [8];
  data_t   md [8];

  bes_preproc #(.N_SLICE(NSL), .N_EVT(NEV)) dut (
    .clk, .rst_n, .cfg, .s_valid(sv), .s_ready(sr), .s_data(sd), .s_last(sl),
    .m_valid(mv), .m_ready(mr), .m_data(md), .m_last(ml), .m_blk_last(mbl));

  int checks = 0, failures = 0;
  int samp [NSLICES][160];
  int map [16];
  logic [15:0] mask;
  logic stall = 0;

  task automatic cfg_write(int ofs, int val);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {REG_PRE, 16'(ofs)}; cfg.data = 32'(val);
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic drive();
    for (int s = 0; s < NSLICES; s++)
      for (int b = 0; b < IN_BEATS; b++) begin
        @(negedge clk);
        while (stall && $urandom_range(4) == 0) begin sv = 0; @(negedge clk); end
        sv = 1; sl = (b == IN_BEATS-1);
        for (int j = 0; j < 8; j++) sd[j] = sample_t'(samp[s][b*8+j]);
        #1;
        while (!sr) begin @(negedge clk); #1; end
      end
    @(negedge clk); sv = 0;
  endtask

  task automatic check();
    for (int s = 0; s < NSLICES; s++)
      for (int h = 0; h < 2; h++) begin
        do begin
          @(negedge clk); mr = stall ? ($urandom_range(2) != 0) : 1'b1; #1;
        end while (!(mv && mr));
        for (int j = 0; j < 8; j++) begin
          int k, e;
          k = h*8 + j;
          e = mask[k] ? (samp[s][BASE + map[k]] >>> 2) : 0;
          checks++;
          if (int'(md[j]) != e) begin
            failures++;
            $display("slice %0d slot %0d: got %0d expected %0d", s, k, md[j], e);
          end
        end
        checks++;
        if (ml  != (h == 1 && s % NSL == NSL-1) ||
            mbl != (h == 1 && s % (NSL*NEV) == NSL*NEV-1)) begin
          failures++;
          $display("slice %0d beat %0d: last %0b blk_last %0b", s, h, ml, mbl);
        end
      end
  endtask

  task automatic new_samples();
    for (int s = 0; s < NSLICES; s++)
      for (int c = 0; c < 160; c++)
        samp[s][c] = int'($urandom_range(262143)) - 131072;  // full 18-bit range
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cfg = '0; sv = 0; sl = 0; mr = 1;
    for (int j = 0; j < 8; j++) sd[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // phase 1: reset map, everything used, no stalls
    for (int k = 0; k < 16; k++) map[k] = 4*k;
    mask = '1;
    new_samples();
    fork drive(); check(); join

    // first feature beat right after the edge that takes the last sample beat
    begin
      int unsigned c0, c1;
      @(negedge clk); c0 = cyc;
      for (int b = 0; b < IN_BEATS; b++) begin
        sv = 1; sl = (b == IN_BEATS-1);
        for (int j = 0; j < 8; j++) sd[j] = sample_t'(samp[0][b*8+j]);
        @(negedge clk);
      end
      sv = 0;
      while (!mv) @(negedge clk);
      c1 = cyc;
      checks++;
      if (c1 - c0 != IN_BEATS) begin
        failures++;
        $display("latency %0d, expected %0d", c1 - c0, IN_BEATS);
      end
      repeat (3) @(negedge clk);
    end
    // flush the counters: the slice above was one of a new frame, so reset
    rst_n = 0; @(negedge clk); rst_n = 1;

    // phase 2: random map, a mask, stalls
    for (int k = 0; k < 16; k++) begin map[k] = $urandom_range(63); cfg_write(k, map[k]); end
    mask = 16'($urandom) | 16'h0101;
    mask[3] = 1'b0; mask[12] = 1'b0;
    cfg_write(PRE_MASK_OFS, int'(mask));
    new_samples();
    stall = 1;
    fork drive(); check(); join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
