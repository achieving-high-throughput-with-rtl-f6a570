// tb_cnn_inference -- inference module end to end (both layers) against the
// sequence-level reference. Four lanes, random samples, random input gaps and
// output back-pressure, then a free-running pass that must accept one beat
// per cycle (4 symbols per lane per cycle) and deliver one output per two
// beats, with the first output one cycle after the beat carrying samples
// 32..39 of the sequence.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_cnn_inference;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int PI = 4, SEQ_POS = 16, NSEQ = 3;
  localparam int NOUT = NSEQ * SEQ_POS / 2;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready;
  sample_t [PI-1:0][SPB-1:0] s_x;
  z_t      [PI-1:0][C2-1:0]  m_z;
  qweights_t q;
  int checks = 0, failures = 0;
  int xin[PI][NSEQ+1][];
  int zexp[PI][NSEQ][];
  int nout, stalls, gaps, in_stall, cyc, first_out_cyc, beat5_cyc;
  bit free_run;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cnn_inference #(.PI(PI), .SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_x, .qw(q), .m_valid, .m_ready, .m_z);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    if (nout == 0) first_out_cyc = int'($time / 10);
    if (nout < NOUT) begin
      int sq, m;
      sq = nout / (SEQ_POS/2); m = nout % (SEQ_POS/2);
      for (int n = 0; n < PI; n++)
        for (int o = 0; o < C2; o++) begin
          checks++;
          if (int'(m_z[n][o]) != zexp[n][sq][m*C2 + o]) begin
            failures++;
            if (failures < 10) $display("lane %0d seq %0d out %0d ch %0d: got %0d exp %0d", n, sq, m, o, m_z[n][o], zexp[n][sq][m*C2+o]);
          end
        end
    end
    nout++;
  end

  always @(posedge clk) if (rst_n) begin
    if (!free_run) m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
    if (free_run && s_valid && !s_ready) in_stall++;
  end

  task automatic run(input bit fr);
    free_run = fr; m_ready = 1; nout = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < PI; n++) begin
      for (int s = 0; s <= NSEQ; s++) begin
        xin[n][s] = new[SEQ_POS*SPB];
        foreach (xin[n][s][i]) xin[n][s][i] = rand_x();
      end
      for (int s = 0; s < NSEQ; s++) ref_infer(xin[n][s], q, zexp[n][s]);
    end
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        if (!fr) while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
        s_valid <= 1;
        for (int n = 0; n < PI; n++)
          for (int j = 0; j < SPB; j++) s_x[n][j] <= sample_t'(xin[n][s][p*SPB + j]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        if (s == 0 && p == 4) beat5_cyc = int'($time / 10);
      end
    s_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != NOUT + SEQ_POS/2 - 2) begin failures++; $display("output count %0d", nout); end
    if (fr) begin
      // beat 4 (samples 32..39) is accepted at beat5_cyc; it leaves layer 0
      // one cycle later and completes output 0 in layer 1 one cycle after that
      checks++;
      if (first_out_cyc != beat5_cyc + 2) begin failures++; $display("latency: first output at %0d, beat 4 at %0d", first_out_cyc, beat5_cyc); end
    end
  endtask

  initial begin
    s_valid = 0; s_x = '0; stalls = 0; gaps = 0; in_stall = 0; cyc = 0;
    q = ref_quant(rand_tw());
    run(0);
    run(1);
    checks++;
    if (in_stall != 0) begin failures++; $display("input stalled %0d cycles in free run", in_stall); end
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
