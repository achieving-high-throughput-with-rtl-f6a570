// tb_train_conv0 -- training first layer against the reference model. Short
// sequences, random samples, targets and 24-bit weights, random input gaps
// and output back-pressure. Every position record is checked: the four
// activations, their ReLU masks, the nine-sample input window (zero outside
// the sequence) and the four targets passed along with the position.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_train_conv0;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ_POS = 12, NSEQ = 3, NBEAT = SEQ_POS * NSEQ;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready;
  sample_t [SPB-1:0] s_x;
  sample_t [SYB-1:0] s_t;
  pos_rec_t m_pos;
  tweights_t w;
  int checks = 0, failures = 0;
  int xin[NSEQ][], tin[NSEQ][];
  longint aexp[NSEQ][];
  bit actexp[NSEQ][];
  int nout, stalls, gaps, n_relu0;

  always #5 clk = ~clk;

  train_conv0 #(.SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_x, .s_t, .w0(w.w0), .b0(w.b0),
    .m_valid, .m_ready, .m_pos);

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("output %0d %s: got %0d exp %0d", nout, what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    int sq, p;
    sq = nout / SEQ_POS; p = nout % SEQ_POS;
    for (int c = 0; c < C1; c++) begin
      chk(longint'($signed(m_pos.a[c])), aexp[sq][p*C1 + c], "a");
      chk(longint'(m_pos.act[c]), longint'(actexp[sq][p*C1 + c]), "act");
      if (!actexp[sq][p*C1 + c]) n_relu0++;
    end
    for (int k = 0; k < K; k++) chk(longint'($signed(m_pos.x[k])), xs(xin[sq], SPB*p + k - PAD), "x");
    for (int j = 0; j < SYB; j++) chk(longint'($signed(m_pos.t[j])), longint'(tin[sq][p*SYB + j]), "t");
    nout++;
  end

  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
  end

  initial begin
    s_valid = 0; s_x = '0; s_t = '0; m_ready = 1; nout = 0; stalls = 0; gaps = 0; n_relu0 = 0;
    w = rand_tw();
    for (int s = 0; s < NSEQ; s++) begin
      xin[s] = new[SEQ_POS*SPB];
      tin[s] = new[SEQ_POS*SYB];
      foreach (xin[s][i]) xin[s][i] = rand_x();
      foreach (tin[s][i]) tin[s][i] = rand_t();
      ref_tr_l0(xin[s], w, aexp[s], actexp[s]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBEAT; b++) begin
      int sq, p;
      sq = b / SEQ_POS; p = b % SEQ_POS;
      while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
      s_valid <= 1;
      for (int j = 0; j < SPB; j++) s_x[j] <= sample_t'(xin[sq][p*SPB + j]);
      for (int j = 0; j < SYB; j++) s_t[j] <= sample_t'(tin[sq][p*SYB + j]);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    s_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NBEAT) begin failures++; $display("got %0d outputs", nout); end
    if (stalls == 0 || gaps == 0 || n_relu0 == 0) begin failures++; $display("back-pressure, gaps or ReLU cut not exercised"); end
    $display("stalls=%0d gaps=%0d relu_zero=%0d", stalls, gaps, n_relu0);
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
