// tb_snl_bes_top: end-to-end test of the BES inference data flow at the
// full, default sizes (160 channels, 16 selected, 48-slice frames,
// 18 frames per block, 768-50-50-4 network).
//
// The test plays the host: it writes a channel map, an input mask and the
// weights of a 4-class task, streams whole blocks of random 18-bit
// digitizer samples, and checks every result beat against a model built
// here (channel selection and masking, then mlp_ref_pkg for the network).
// Block 1 runs without stalls and checks the end-to-end latency: the first
// result beat is offered right after the 103rd clock edge counting the one
// that takes the block's last digitizer beat (2 feature beats + 50 + 50 +
// 1 into the post-processor). The host then switches to a binary task by
// reloading the output layer and setting one active output, and streams
// two more blocks back to back while holding off the results at random,
// so that the pipeline fills up and the digitizer stream is stalled.
// Each mechanism is counted and must happen at least once: input stall,
// result back-pressure, masked slot, ReLU clip, task switch, block
// completion.
`timescale 1ns/1ps
module tb_snl_bes_top;
  import snl_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NDIG = 160, BASE = 96, NSEL = 16, NSL = 48, NEV = 18;
  localparam int NI = 768, NH = 50, NO = 4;
  localparam int BEATS = NDIG / 8;
  localparam int NSLB = NSL * NEV;      // slices per block

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            cfg_we;
  logic [19:0]     cfg_addr;
  logic [31:0]     cfg_data;
  logic            dig_valid, dig_ready, dig_last;
  sample_t         dig_data [8];
  logic            res_valid, res_ready, res_last;
  data_t           res_data [NO];
  logic [NO-1:0]   res_keep;
  logic [4:0]      res_evt;
  logic            pre_block_end;

  snl_bes_top dut (.*);

  int checks = 0, failures = 0;
  int w1[], b1[], w2[], b2[], w3[], b3[];
  int map [NSEL];
  logic [NSEL-1:0] mask;
  int n_active = 4;
  int samp [2][NSLB][NDIG];   // two blocks can be in flight
  logic bp = 0;

  // mechanism counters
  int c_in_stall = 0, c_bp = 0, c_masked = 0, c_relu = 0, c_switch = 0, c_blocks = 0;
  int c_blk_end = 0;

  int unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dig_valid && !dig_ready) c_in_stall <= c_in_stall + 1;
    if (res_valid && !res_ready) c_bp <= c_bp + 1;
    if (pre_block_end) c_blk_end <= c_blk_end + 1;
  end

  function automatic int rnd(int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction

  task automatic cfg_write(logic [3:0] region, int ofs, int val);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {region, 16'(ofs)}; cfg_data = 32'(val);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load(logic [3:0] wr, logic [3:0] br, int n_in, int n_out,
                      int wmag, int bmag, ref int w[], ref int b[]);
    w = new[n_in*n_out];
    b = new[n_out];
    foreach (w[i]) begin
      w[i] = rnd(wmag);
      cfg_write(wr, (i / n_in) * (1 << $clog2(n_in)) + i % n_in, w[i]);  // offset {o, i}
    end
    foreach (b[i]) begin b[i] = rnd(bmag); cfg_write(br, i, b[i]); end
  endtask

  task automatic new_block(int q);
    foreach (samp[q][s, c]) samp[q][s][c] = rnd(12000);
  endtask

  int unsigned last_in_cyc;

  task automatic drive_block(int q);
    for (int s = 0; s < NSLB; s++)
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        dig_valid = 1; dig_last = (b == BEATS-1);
        for (int j = 0; j < 8; j++) dig_data[j] = sample_t'(samp[q][s][b*8+j]);
        #1;
        while (!dig_ready) begin @(negedge clk); #1; end
        last_in_cyc = cyc;
      end
    @(negedge clk); dig_valid = 0;
  endtask

  // network input of event e, built from the raw samples
  function automatic void frame_of(int q, int e, output int x[]);
    x = new[NI];
    for (int t = 0; t < NSL; t++)
      for (int k = 0; k < NSEL; k++)
        x[t*NSEL + k] = mask[k] ? (samp[q][e*NSL + t][BASE + map[k]] >>> 2) : 0;
  endfunction

  task automatic check_block(int q, bit check_latency);
    int exp_y [NEV][NO];
    for (int e = 0; e < NEV; e++) begin
      int x[], h1[], h2[], y[];
      frame_of(q, e, x);
      dense_ref(x,  w1, b1, NH, 1'b1, h1);
      dense_ref(h1, w2, b2, NH, 1'b1, h2);
      dense_ref(h2, w3, b3, NO, 1'b1, y);
      for (int k = 0; k < NO; k++) exp_y[e][k] = y[k];
    end
    for (int e = 0; e < NEV; e++) begin
      bit first = 1;
      do begin
        @(negedge clk); res_ready = bp ? ($urandom_range(300) == 0) : 1'b1; #1;
        if (check_latency && e == 0 && res_valid && first) begin
          first = 0;
          checks++;
          // last_in_cyc was taken one edge before the edge that took the beat
          if (cyc - last_in_cyc - 1 != 103) begin
            failures++;
            $display("end-to-end latency %0d clocks, expected 103", cyc - last_in_cyc - 1);
          end
          $display("end-to-end latency %0d clocks after the last sample beat", cyc - last_in_cyc - 1);
        end
      end while (!(res_valid && res_ready));
      for (int k = 0; k < NO; k++) begin
        int ev;
        ev = (k < n_active) ? exp_y[e][k] : 0;
        if (k < n_active && ev == 0) c_relu++;
        checks++;
        if (int'(res_data[k]) != ev || res_keep[k] != (k < n_active)) begin
          failures++;
          $display("block %0d event %0d out %0d: got %0d keep %0b, expected %0d",
                   c_blocks, e, k, res_data[k], res_keep[k], ev);
        end
      end
      checks++;
      if (int'(res_evt) != e || res_last != (e == NEV-1)) begin
        failures++;
        $display("event %0d: evt %0d last %0b", e, res_evt, res_last);
      end
    end
    c_blocks++;
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    $display("%-22s %0d", what, n);
    if (n == 0) begin failures++; $display("  never happened: %s", what); end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0; dig_valid = 0; dig_last = 0; res_ready = 1;
    for (int j = 0; j < 8; j++) dig_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // channel map and mask
    for (int k = 0; k < NSEL; k++) begin map[k] = $urandom_range(63); cfg_write(REG_PRE, k, map[k]); end
    mask = '1; mask[5] = 0; mask[10] = 0;
    cfg_write(REG_PRE, PRE_MASK_OFS, int'(mask));
    for (int k = 0; k < NSEL; k++) if (!mask[k]) c_masked++;

    // 4-class task
    load(REG_L1_W, REG_L1_B, NI, NH, 60, 400, w1, b1);
    load(REG_L2_W, REG_L2_B, NH, NH, 300, 400, w2, b2);
    load(REG_L3_W, REG_L3_B, NH, NO, 300, 400, w3, b3);
    n_active = 4;
    cfg_write(REG_POST, 0, n_active);

    // block 1: no stalls, latency
    new_block(0);
    res_ready = 0;
    fork drive_block(0); check_block(0, 1'b1); join

    // switch to the binary task: output layer and active outputs only
    load(REG_L3_W, REG_L3_B, NH, NO, 300, 400, w3, b3);
    n_active = 1;
    cfg_write(REG_POST, 0, n_active);
    c_switch++;

    // blocks 2 and 3 back to back with the host holding off results
    bp = 1;
    new_block(0);
    new_block(1);
    fork
      begin drive_block(0); drive_block(1); end
      begin check_block(0, 1'b0); check_block(1, 1'b0); end
    join

    expect_seen("input stalls", c_in_stall);
    expect_seen("result back-pressure", c_bp);
    expect_seen("masked slots", c_masked);
    expect_seen("ReLU-clipped results", c_relu);
    expect_seen("task switches", c_switch);
    expect_seen("blocks completed", c_blocks);
    checks++;
    if (c_blk_end != c_blocks) begin
      failures++;
      $display("block-end pulses %0d, blocks %0d", c_blk_end, c_blocks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
