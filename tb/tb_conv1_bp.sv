// tb_conv1_bp -- batch-parallel second layer (two products per DSP) against
// the reference model. Three lanes (one pair on shared multipliers plus one
// odd lane on a plain multiplier), random activations with many zeros, random
// input gaps and output back-pressure. The weights on the input change in
// the middle of sequence 1: sequence 1 must still use the old set, sequence 2
// the new one. A free-running pass checks one output per two inputs with no
// input stall.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_conv1_bp;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int B = 3, SEQ_POS = 12, NSEQ = 3;
  localparam int NOUT = NSEQ * SEQ_POS / 2;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready;
  act_t [B-1:0][C1-1:0] s_a;
  z_t   [B-1:0][C2-1:0] m_z;
  qweights_t qa, qb, q;
  int checks = 0, failures = 0;
  int ain[B][NSEQ+1][];
  int zexp[B][NSEQ][];
  int nout, stalls, gaps, in_stall;
  bit free_run, switched;

  always #5 clk = ~clk;

  conv1_bp #(.B(B), .SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_a, .w1(q.w1), .b1(q.b1),
    .m_valid, .m_ready, .m_z);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    if (nout < NOUT) begin
      int sq, m;
      sq = nout / (SEQ_POS/2); m = nout % (SEQ_POS/2);
      for (int n = 0; n < B; n++)
        for (int o = 0; o < C2; o++) begin
          checks++;
          if (int'(m_z[n][o]) != zexp[n][sq][m*C2 + o]) begin
            failures++;
            if (failures < 10) $display("lane %0d seq %0d out %0d ch %0d: got %0d exp %0d", n, sq, m, o, m_z[n][o], zexp[n][sq][m*C2+o]);
          end
        end
    end
    nout++;
    // change the weights after the first output of sequence 1 has been seen
    if (nout == SEQ_POS/2 + 1 && !switched) begin q <= qb; switched = 1; end
  end

  always @(posedge clk) if (rst_n) begin
    if (!free_run) m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
    if (free_run && s_valid && !s_ready) in_stall++;
  end

  task automatic run(input bit fr);
    free_run = fr; switched = 0; m_ready = 1; nout = 0; q = qa;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < B; n++) begin
      for (int s = 0; s <= NSEQ; s++) begin
        ain[n][s] = new[SEQ_POS*C1];
        foreach (ain[n][s][i]) ain[n][s][i] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(0, 1023);
      end
      for (int s = 0; s < NSEQ; s++) ref_inf_l1(ain[n][s], (s < 2) ? qa : qb, zexp[n][s]);
    end
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        if (!fr) while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
        s_valid <= 1;
        for (int n = 0; n < B; n++)
          for (int i = 0; i < C1; i++) s_a[n][i] <= act_t'(ain[n][s][p*C1 + i]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    s_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout < NOUT) begin failures++; $display("only %0d outputs", nout); end
    // the flush sequence completes all but its last two outputs
    checks++;
    if (nout != NOUT + SEQ_POS/2 - 2) begin failures++; $display("output count %0d", nout); end
  endtask

  initial begin
    s_valid = 0; s_a = '0; stalls = 0; gaps = 0; in_stall = 0;
    qa = ref_quant(rand_tw());
    qb = ref_quant(rand_tw());
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
