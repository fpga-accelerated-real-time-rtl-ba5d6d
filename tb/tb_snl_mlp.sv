// tb_snl_mlp: self-checking test of the inference network at full size
// (768 -> 50 -> 50 -> 4, 8 features per clock).
//
// Loads random weights and biases for all three layers over the
// configuration bus, streams frames of random features and compares every
// result with the reference model in mlp_ref_pkg. Pass 1 runs one frame
// with no stalls and checks the latency: the result is valid right after the
// 196th clock edge, counting the one that takes the frame's first beat
// (96 input beats + 50 + 50). Pass 2 streams 8 frames back to back with
// random back-pressure on the result, so that the layers stall. Pass 3
// reloads only the output layer with a one-neuron (binary) task and runs
// again, as the host does when it switches tasks.
`timescale 1ns/1ps
module tb_snl_mlp;
  import snl_pkg::*;
  import mlp_ref_pkg::*;

  localparam int NI = 768, NH = 50, NO = 4, NL = 8, NF = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic    sv, sr, sl, mv, mr, ml;
  data_t   sd [NL];
  data_t   md [NO];

  snl_mlp dut (.clk, .rst_n, .cfg, .s_valid(sv), .s_ready(sr), .s_data(sd), .s_last(sl),
               .m_valid(mv), .m_ready(mr), .m_data(md), .m_last(ml));

  int checks = 0, failures = 0, stalls = 0;
  int w1[], b1[], w2[], b2[], w3[], b3[];
  int x [NF][];
  logic bp = 0;   // back-pressure on the result

  int unsigned cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sv && !sr) stalls <= stalls + 1;
  end

  task automatic cfg_write(logic [3:0] region, int ofs, int val);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {region, 16'(ofs)}; cfg.data = 32'(val);
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic int rnd(int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction

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

  task automatic drive(int nf);
    for (int f = 0; f < nf; f++)
      for (int b = 0; b < NI/NL; b++) begin
        @(negedge clk);
        sv = 1; sl = (b == NI/NL-1);
        for (int j = 0; j < NL; j++) sd[j] = data_t'(x[f][b*NL+j]);
        #1;
        while (!sr) begin @(negedge clk); #1; end
      end
    @(negedge clk); sv = 0;
  endtask

  task automatic check(int nf, int n_used);
    for (int f = 0; f < nf; f++) begin
      int h1[], h2[], y[];
      dense_ref(x[f], w1, b1, NH, 1'b1, h1);
      dense_ref(h1,   w2, b2, NH, 1'b1, h2);
      dense_ref(h2,   w3, b3, NO, 1'b1, y);
      do begin
        @(negedge clk); mr = bp ? ($urandom_range(150) == 0) : 1'b1; #1;
      end while (!(mv && mr));
      for (int k = 0; k < n_used; k++) begin
        if (y[k] > 0 && y[k] < 32767) nonzero++;
        checks++;
        if (int'(md[k]) != y[k]) begin
          failures++;
          $display("frame %0d out %0d: got %0d expected %0d", f, k, md[k], y[k]);
        end
      end
    end
  endtask

  int nonzero = 0;

  initial begin
    cfg = '0; sv = 0; sl = 0; mr = 1;
    for (int j = 0; j < NL; j++) sd[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(REG_L1_W, REG_L1_B, NI, NH, 60, 400, w1, b1);
    load(REG_L2_W, REG_L2_B, NH, NH, 300, 400, w2, b2);
    load(REG_L3_W, REG_L3_B, NH, NO, 300, 400, w3, b3);
    for (int f = 0; f < NF; f++) begin
      x[f] = new[NI];
      foreach (x[f][i]) x[f][i] = rnd(3000);
    end

    // pass 1: one frame, latency
    begin
      int unsigned c0, c1;
      mr = 0;     // hold the result until check() takes it
      @(negedge clk); c0 = cyc;
      for (int b = 0; b < NI/NL; b++) begin
        sv = 1; sl = (b == NI/NL-1);
        for (int j = 0; j < NL; j++) sd[j] = data_t'(x[0][b*NL+j]);
        @(negedge clk);
      end
      sv = 0;
      while (!mv) @(negedge clk);
      c1 = cyc;
      checks++;
      if (c1 - c0 != NI/NL + 2*NH) begin
        failures++;
        $display("latency %0d clocks, expected %0d", c1 - c0, NI/NL + 2*NH);
      end
      $display("frame latency %0d clocks", c1 - c0);
      check(1, NO);
    end

    // pass 2: frames back to back, random back-pressure
    bp = 1;
    fork drive(NF); check(NF, NO); join
    checks++;
    if (stalls == 0) begin failures++; $display("no stall happened"); end

    // pass 3: binary task, only the output layer is reloaded
    load(REG_L3_W, REG_L3_B, NH, NO, 300, 400, w3, b3);
    for (int i = NH; i < NO*NH; i++) begin w3[i] = 0; cfg_write(REG_L3_W, (i / NH) * 64 + i % NH, 0); end
    for (int o = 1; o < NO; o++) begin b3[o] = 0; cfg_write(REG_L3_B, o, 0); end
    bp = 0;
    fork drive(NF); check(NF, NO); join

    $display("stalled input beats %0d, results inside (0, 32767) %0d", stalls, nonzero);
    checks++;
    if (nonzero < NF) begin failures++; $display("too few informative results"); end
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
