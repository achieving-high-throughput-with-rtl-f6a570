// tb_train_conv1 -- training second layer against the reference model.
// Position records with random activations (ReLU-masked), samples and targets
// stream in with random gaps and back-pressure; each output is checked for
// the eight 24-bit results, the eight targets of its symbols, the window
// handed to the gradient stage (records outside the sequence zeroed), the
// latched weights, and the first/last-of-sequence flags.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_train_conv1;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ_POS = 12, NSEQ = 3;
  localparam int NOUT = NSEQ * SEQ_POS / 2;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready, m_first, m_last;
  pos_rec_t s_pos;
  tw_t [C2-1:0] m_z;
  sample_t [C2-1:0] m_t;
  pos_rec_t [K-1:0] m_win;
  tw_t [C1-1:0][C2-1:0][K-1:0] m_w1;
  tweights_t w;
  pos_rec_t rec[NSEQ+1][SEQ_POS];
  longint zexp[NSEQ][];
  int checks = 0, failures = 0, nout, stalls, gaps;

  always #5 clk = ~clk;

  train_conv1 #(.SEQ_POS(SEQ_POS)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_pos, .w1(w.w1), .b1(w.b1),
    .m_valid, .m_ready, .m_z, .m_t, .m_win, .m_w1, .m_first, .m_last);

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("output %0d %s: got %0d exp %0d", nout, what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    if (nout < NOUT) begin
      int sq, m;
      sq = nout / (SEQ_POS/2); m = nout % (SEQ_POS/2);
      for (int o = 0; o < C2; o++) begin
        chk(longint'($signed(m_z[o])), zexp[sq][m*C2 + o], "z");
        chk(longint'($signed(m_t[o])), longint'($signed(rec[sq][2*m + o/SYB].t[o%SYB])), "t");
      end
      for (int k = 0; k < K; k++) begin
        int p;
        pos_rec_t r;
        p = 2*m + k - PAD;
        r = (p >= 0 && p < SEQ_POS) ? rec[sq][p] : '0;
        checks++;
        if (m_win[k] !== r) begin failures++; if (failures < 10) $display("output %0d window slot %0d", nout, k); end
      end
      checks++;
      if (m_w1 !== w.w1) begin failures++; $display("output %0d: weights", nout); end
      chk(longint'(m_first), longint'(m == 0), "first");
      chk(longint'(m_last), longint'(m == SEQ_POS/2 - 1), "last");
    end
    nout++;
  end

  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
  end

  initial begin
    s_valid = 0; s_pos = '0; m_ready = 1; nout = 0; stalls = 0; gaps = 0;
    w = rand_tw();
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        for (int c = 0; c < C1; c++) begin
          rec[s][p].act[c] = $urandom_range(0, 1);
          rec[s][p].a[c]   = rec[s][p].act[c] ? tw_t'($urandom_range(1, 1 << 18)) : '0;
        end
        for (int k = 0; k < K; k++)   rec[s][p].x[k] = sample_t'(rand_x());
        for (int j = 0; j < SYB; j++) rec[s][p].t[j] = sample_t'(rand_t());
      end
    for (int s = 0; s < NSEQ; s++) begin
      longint a[];
      a = new[SEQ_POS*C1];
      for (int p = 0; p < SEQ_POS; p++)
        for (int c = 0; c < C1; c++) a[p*C1 + c] = longint'($signed(rec[s][p].a[c]));
      ref_tr_l1(a, w, zexp[s]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        while ($urandom_range(0, 3) == 0) begin s_valid <= 0; gaps++; @(posedge clk); end
        s_valid <= 1;
        s_pos   <= rec[s][p];
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    s_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NOUT + SEQ_POS/2 - 2) begin failures++; $display("output count %0d", nout); end
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
