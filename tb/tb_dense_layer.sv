// tb_dense_layer: self-checking test of dense_layer.
//
// Two small layers share one configuration bus: A (12 in, 6 out, 4 input
// lanes, 1 output lane, ReLU) and B (6 in, 4 out, 1 input lane, 4 output
// lanes, no ReLU, region of layer 3). The test writes random weights and
// biases, streams random vectors with random gaps on the input and random
// back-pressure on the output, and compares every output with a reference
// computed here in plain integer arithmetic: floor((sum w*x + b*2^10)/2^10),
// ReLU for A, saturation to 16 bits. Values are large enough that both
// saturation limits and the ReLU clip are hit. It also reloads the weights
// between two passes and checks the latency of an unstalled vector:
// output valid N_IN/IN_LANES clocks after its first beat is accepted.
`timescale 1ns/1ps
module tb_dense_layer;
  import snl_pkg::*;

  localparam int A_IN = 12, A_OUT = 6, A_IL = 4, A_OL = 1;
  localparam int B_IN = 6,  B_OUT = 4, B_IL = 1, B_OL = 4;
  localparam int NVEC = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0;

  // ---- DUT A ----
  logic  a_sv, a_sr, a_sl, a_mv, a_mr, a_ml;
  data_t a_sd [A_IL];
  data_t a_md [A_OL];
  dense_layer #(.N_IN(A_IN), .N_OUT(A_OUT), .IN_LANES(A_IL), .OUT_LANES(A_OL),
                .RELU(1'b1), .W_REGION(REG_L1_W), .B_REGION(REG_L1_B)) dut_a (
    .clk, .rst_n, .cfg, .s_valid(a_sv), .s_ready(a_sr), .s_data(a_sd), .s_last(a_sl),
    .m_valid(a_mv), .m_ready(a_mr), .m_data(a_md), .m_last(a_ml));

  // ---- DUT B ----
  logic  b_sv, b_sr, b_sl, b_mv, b_mr, b_ml;
  data_t b_sd [B_IL];
  data_t b_md [B_OL];
  dense_layer #(.N_IN(B_IN), .N_OUT(B_OUT), .IN_LANES(B_IL), .OUT_LANES(B_OL),
                .RELU(1'b0), .W_REGION(REG_L3_W), .B_REGION(REG_L3_B)) dut_b (
    .clk, .rst_n, .cfg, .s_valid(b_sv), .s_ready(b_sr), .s_data(b_sd), .s_last(b_sl),
    .m_valid(b_mv), .m_ready(b_mr), .m_data(b_md), .m_last(b_ml));

  // reference parameters and stimulus
  int wa [A_OUT][A_IN]; int ba [A_OUT];
  int wb [B_OUT][B_IN]; int bb [B_OUT];
  int xa [NVEC][A_IN];  int xb [NVEC][B_IN];
  logic stall_out = 0;   // random back-pressure on
  logic gaps_in   = 0;   // random input gaps on

  function automatic int rnd(int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction

  function automatic int ref_neuron(int sum_wx, int bias, bit relu);
    longint v;
    v = (longint'(sum_wx) + longint'(bias) * 1024);
    v = v >>> 10;                       // floor division by 2^10
    if (relu && v < 0) v = 0;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  task automatic cfg_write(logic [3:0] region, int ofs, int val);
    @(negedge clk);
    cfg.we   = 1'b1;
    cfg.addr = {region, 16'(ofs)};
    cfg.data = 32'(val);
    @(negedge clk);
    cfg.we   = 1'b0;
  endtask

  // weight offset is {o, i}: i takes 4 bits in A (12 inputs), 3 bits in B (6)
  task automatic load_params();
    for (int o = 0; o < A_OUT; o++) begin
      for (int i = 0; i < A_IN; i++) begin wa[o][i] = rnd(3000); cfg_write(REG_L1_W, o*16+i, wa[o][i]); end
      ba[o] = rnd(2000); cfg_write(REG_L1_B, o, ba[o]);
    end
    for (int o = 0; o < B_OUT; o++) begin
      for (int i = 0; i < B_IN; i++) begin wb[o][i] = rnd(3000); cfg_write(REG_L3_W, o*8+i, wb[o][i]); end
      bb[o] = rnd(2000); cfg_write(REG_L3_B, o, bb[o]);
    end
  endtask

  task automatic make_vectors();
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < A_IN; i++) xa[v][i] = rnd((v % 3 == 0) ? 30000 : 2000);
      for (int i = 0; i < B_IN; i++) xb[v][i] = rnd((v % 3 == 0) ? 30000 : 2000);
    end
  endtask

  // Inputs change only at the falling edge; a beat is taken at the next
  // rising edge if ready is high once the inputs have settled.
  task automatic drive_a();
    for (int v = 0; v < NVEC; v++)
      for (int b = 0; b < A_IN/A_IL; b++) begin
        @(negedge clk);
        while (gaps_in && $urandom_range(3) == 0) begin a_sv = 0; @(negedge clk); end
        a_sv = 1; a_sl = (b == A_IN/A_IL-1);
        for (int j = 0; j < A_IL; j++) a_sd[j] = data_t'(xa[v][b*A_IL+j]);
        #1;
        while (!a_sr) begin @(negedge clk); #1; end
      end
    @(negedge clk); a_sv = 0;
  endtask

  task automatic drive_b();
    for (int v = 0; v < NVEC; v++)
      for (int b = 0; b < B_IN/B_IL; b++) begin
        @(negedge clk);
        while (gaps_in && $urandom_range(3) == 0) begin b_sv = 0; @(negedge clk); end
        b_sv = 1; b_sl = (b == B_IN/B_IL-1);
        for (int j = 0; j < B_IL; j++) b_sd[j] = data_t'(xb[v][b*B_IL+j]);
        #1;
        while (!b_sr) begin @(negedge clk); #1; end
      end
    @(negedge clk); b_sv = 0;
  endtask

  // Ready is drawn at the falling edge; a beat offered with ready high is
  // taken at the next rising edge and checked here.
  task automatic check_a();
    for (int v = 0; v < NVEC; v++)
      for (int o = 0; o < A_OUT; o++) begin
        int s, e;
        do begin
          @(negedge clk); a_mr = stall_out ? ($urandom_range(2) != 0) : 1'b1; #1;
        end while (!(a_mv && a_mr));
        s = 0;
        for (int i = 0; i < A_IN; i++) s += wa[o][i] * xa[v][i];
        e = ref_neuron(s, ba[o], 1'b1);
        if (e == 0) n_relu++;
        if (e == 32767 || e == -32768) n_sat++;
        checks++;
        if (int'(a_md[0]) != e || a_ml != (o == A_OUT-1)) begin
          failures++;
          $display("A vec %0d out %0d: got %0d last %0b, expected %0d", v, o, a_md[0], a_ml, e);
        end
      end
  endtask

  task automatic check_b();
    for (int v = 0; v < NVEC; v++) begin
      do begin
        @(negedge clk); b_mr = stall_out ? ($urandom_range(2) != 0) : 1'b1; #1;
      end while (!(b_mv && b_mr));
      for (int o = 0; o < B_OUT; o++) begin
        int s, e;
        s = 0;
        for (int i = 0; i < B_IN; i++) s += wb[o][i] * xb[v][i];
        e = ref_neuron(s, bb[o], 1'b0);
        if (e == 32767 || e == -32768) n_sat++;
        checks++;
        if (int'(b_md[o]) != e || !b_ml) begin
          failures++;
          $display("B vec %0d out %0d: got %0d, expected %0d", v, o, b_md[o], e);
        end
      end
    end
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cfg = '0; a_sv = 0; a_mr = 1; b_mr = 1; b_sv = 0; a_sl = 0; b_sl = 0;
    for (int j = 0; j < A_IL; j++) a_sd[j] = '0;
    for (int j = 0; j < B_IL; j++) b_sd[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      load_params();
      make_vectors();
      stall_out = (pass != 0);
      gaps_in   = (pass != 0);
      fork
        drive_a(); drive_b(); check_a(); check_b();
      join
      repeat (5) @(posedge clk);
    end

    // latency of one unstalled vector through A: the output is valid right
    // after the edge that takes the last beat, i.e. after the (A_IN/A_IL)-th
    // edge counting the one that takes the first beat.
    begin
      int unsigned c0, c1;
      stall_out = 0;
      for (int i = 0; i < A_IN; i++) xa[0][i] = rnd(1000);
      @(negedge clk);
      c0 = cyc;
      for (int b = 0; b < A_IN/A_IL; b++) begin
        a_sv = 1; a_sl = (b == A_IN/A_IL-1);
        for (int j = 0; j < A_IL; j++) a_sd[j] = data_t'(xa[0][b*A_IL+j]);
        @(negedge clk);
      end
      a_sv = 0;
      while (!a_mv) @(negedge clk);
      c1 = cyc;
      checks++;
      if (c1 - c0 != A_IN/A_IL) begin
        failures++;
        $display("latency %0d clocks, expected %0d", c1 - c0, A_IN/A_IL);
      end
      a_mr = 1;
      repeat (A_OUT + 2) @(negedge clk);
    end

    checks++;
    if (n_relu == 0 || n_sat == 0) begin
      failures++;
      $display("coverage: relu clips %0d, saturations %0d", n_relu, n_sat);
    end
    $display("relu clips %0d, saturations %0d", n_relu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
