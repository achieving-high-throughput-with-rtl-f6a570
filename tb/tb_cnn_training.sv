// tb_cnn_training -- one training instance against the reference training
// step: for three sequences with random samples and targets, the equalized
// outputs (converted to the 16-bit output format) and the complete gradient
// set delivered at g_valid must match the reference exactly. Random input
// gaps and output back-pressure; g_valid must pulse once per finished
// sequence, 2 cycles after the last output of the sequence is taken.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_cnn_training;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ_POS = 16, NSEQ = 3;
  localparam int NOUT = NSEQ * SEQ_POS / 2;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready, g_valid;
  sample_t [SPB-1:0] s_x;
  sample_t [SYB-1:0] s_t;
  z_t      [C2-1:0]  m_z;
  grads_t            g;
  tweights_t         w;
  int checks = 0, failures = 0;
  int xin[NSEQ+1][];
  int tin[NSEQ+1][];
  longint zexp[NSEQ][];
  grads_t gexp[NSEQ];
  int nout, ng, stalls, gaps, last_take_t;

  always #5 clk = ~clk;

  cnn_training #(.SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_x, .s_t, .w,
    .m_valid, .m_ready, .m_z, .g_valid, .g);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    if (nout < NOUT) begin
      int sq, m;
      sq = nout / (SEQ_POS/2); m = nout % (SEQ_POS/2);
      for (int o = 0; o < C2; o++) begin
        longint e;
        e = sat(zexp[sq][m*C2 + o] >>> (TA_F - Z_F), Z_W);
        checks++;
        if (longint'(m_z[o]) != e) begin
          failures++;
          if (failures < 10) $display("seq %0d out %0d ch %0d: got %0d exp %0d", sq, m, o, m_z[o], e);
        end
      end
      if (m == SEQ_POS/2 - 1) last_take_t = int'($time / 10);
    end
    nout++;
  end

  always @(posedge clk) if (rst_n && g_valid) begin
    checks++;
    if (ng >= NSEQ) begin failures++; $display("extra g_valid"); end
    else begin
      if (g !== gexp[ng]) begin
        failures++;
        $display("gradient of sequence %0d differs", ng);
        for (int o = 0; o < C2; o++) $display("  gb1[%0d] got %0d exp %0d", o, g.b1[o], gexp[ng].b1[o]);
        for (int c = 0; c < C1; c++) $display("  gb0[%0d] got %0d exp %0d", c, g.b0[c], gexp[ng].b0[c]);
      end
      checks++;
      if (int'($time / 10) != last_take_t + 2) begin failures++; $display("g_valid timing"); end
    end
    ng++;
  end

  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
  end

  initial begin
    s_valid = 0; s_x = '0; s_t = '0; stalls = 0; gaps = 0; nout = 0; ng = 0; m_ready = 1;
    w = rand_tw();
    for (int s = 0; s <= NSEQ; s++) begin
      xin[s] = new[SEQ_POS*SPB];
      tin[s] = new[SEQ_POS*SYB];
      foreach (xin[s][i]) xin[s][i] = rand_x();
      foreach (tin[s][i]) tin[s][i] = rand_t();
    end
    for (int s = 0; s < NSEQ; s++) ref_train(xin[s], tin[s], w, zexp[s], gexp[s]);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
        s_valid <= 1;
        for (int j = 0; j < SPB; j++) s_x[j] <= sample_t'(xin[s][p*SPB + j]);
        for (int j = 0; j < SYB; j++) s_t[j] <= sample_t'(tin[s][p*SYB + j]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    s_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NOUT + SEQ_POS/2 - 2) begin failures++; $display("output count %0d", nout); end
    checks++;
    if (ng != NSEQ) begin failures++; $display("gradient count %0d", ng); end
    if (stalls == 0 || gaps == 0) begin failures++; $display("back-pressure or gaps not exercised"); end
    $display("stalls=%0d gaps=%0d", stalls, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
