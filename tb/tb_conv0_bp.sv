// tb_conv0_bp -- batch-parallel first layer against the reference model.
// Three lanes, short sequences, random input gaps and output back-pressure;
// every output activation is compared with the sequence-level reference.
// A second run with a continuously valid input and ready output checks the
// rate of one position per cycle and the one-cycle latency.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_conv0_bp;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int B = 3, SEQ_POS = 12, NSEQ = 3;
  localparam int NBEAT = SEQ_POS * NSEQ;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready;
  sample_t [B-1:0][SPB-1:0] s_x;
  act_t    [B-1:0][C1-1:0]  m_a;
  qweights_t q;
  int checks = 0, failures = 0;
  int xin[B][NSEQ][];
  int aexp[B][NSEQ][];
  int nout, stalls, gaps;
  bit free_run;

  always #5 clk = ~clk;

  conv0_bp #(.B(B), .SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_x, .w0(q.w0), .b0(q.b0),
    .m_valid, .m_ready, .m_a);

  // output checker
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    int sq, p;
    sq = nout / SEQ_POS; p = nout % SEQ_POS;
    for (int n = 0; n < B; n++)
      for (int c = 0; c < C1; c++) begin
        checks++;
        if (int'(m_a[n][c]) != aexp[n][sq][p*C1 + c]) begin
          failures++;
          if (failures < 10) $display("lane %0d seq %0d pos %0d ch %0d: got %0d exp %0d", n, sq, p, c, m_a[n][c], aexp[n][sq][p*C1+c]);
        end
      end
    nout++;
  end

  always @(posedge clk) if (rst_n) begin
    if (!free_run) m_ready <= ($urandom_range(0, 4) != 0);
    if (m_valid && !m_ready) stalls++;
  end

  task automatic run(input bit fr);
    int cyc0, cyc1;
    free_run = fr;
    m_ready  = 1;
    nout = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < B; n++)
      for (int s = 0; s < NSEQ; s++) begin
        xin[n][s] = new[SEQ_POS*SPB];
        foreach (xin[n][s][i]) xin[n][s][i] = rand_x();
        ref_inf_l0(xin[n][s], q, aexp[n][s]);
      end
    cyc0 = -1;
    for (int b = 0; b < NBEAT; b++) begin
      int sq, p;
      sq = b / SEQ_POS; p = b % SEQ_POS;
      if (!fr) while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
      s_valid <= 1;
      for (int n = 0; n < B; n++)
        for (int j = 0; j < SPB; j++) s_x[n][j] <= sample_t'(xin[n][sq][p*SPB + j]);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      if (b == 0) cyc0 = $time;
    end
    s_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NBEAT) begin failures++; $display("got %0d outputs, expected %0d", nout, NBEAT); end
    cyc1 = $time;
    if (fr) begin
      // NBEAT beats in NBEAT cycles: last input accepted NBEAT-1 cycles after the first
      checks++;
      if ((cyc1 - cyc0) / 10 != NBEAT - 1 + 20) begin failures++; $display("rate: %0d cycles", (cyc1-cyc0)/10); end
    end
  endtask

  initial begin
    s_valid = 0; s_x = '0; stalls = 0; gaps = 0;
    q = ref_quant(rand_tw());
    run(0);
    run(1);
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
