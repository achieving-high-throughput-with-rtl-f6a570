// tb_eq_top -- end-to-end and full-size test of the equalizer at its default
// configuration (32 inference lanes, 2 training lanes, 64-beat sequences of
// 256 symbols). No parameter is overridden.
//
// Stimulus: random initial weights loaded through the configuration port,
// then five sequences of random samples and PAM-4 targets on all 34 lanes
// plus one flush sequence, with random input gaps and output back-pressure.
// train_en is high for sequences 0..2, low for 3..4 and high again for the
// flush sequence.
//
// Reference: the weights seen by sequence s are W_init for s = 0 and the
// master copy after the updates from sequences 0..s-2 otherwise; the update
// from sequence s is applied while sequence s+1 streams, gated by the
// train_en value at that time. Every output of every lane is compared with
// the reference (training lanes: full-precision network converted to the
// output format; inference lanes: network with the 6-bit quantized weights),
// and the final update count is checked.
//
// Mechanism counters (a failure is counted for any that never happened):
// weight updates, update skipped with train_en low, output back-pressure,
// input stall (s_ready low while s_valid), input gaps, sequence boundaries,
// outputs of training lanes that changed because of an update, and inference
// lanes whose quantized weights changed because of an update.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_eq_top;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int PI = 32, PT = 2, SEQ_POS = 64, NSEQ = 5;
  localparam int NL = PT + PI;
  localparam int NOUT = NSEQ * SEQ_POS / 2;
  localparam bit TEN[NSEQ+1] = '{1, 1, 1, 0, 0, 1};

  logic clk = 0, rst_n = 0;
  logic train_en, cfg_we, s_valid, s_ready, m_valid, m_ready;
  logic [8:0] cfg_addr;
  tw_t cfg_data;
  sample_t [NL-1:0][SPB-1:0] s_x;
  sample_t [PT-1:0][SYB-1:0] s_t;
  z_t      [NL-1:0][C2-1:0]  m_z;
  logic [31:0] upd_count;

  int checks = 0, failures = 0;
  int xin[NL][NSEQ+1][];
  int tin[PT][NSEQ+1][];
  int zexp[NL][NSEQ][];
  int zinit[PT][NSEQ][];      // training-lane outputs had the weights never changed
  tweights_t wuse[NSEQ], master[NSEQ+1];
  int nout, exp_upd;
  int n_stall, n_in_stall, n_gap, n_bound, n_changed, n_q_changed, n_upd, n_skip;
  logic [31:0] upd_prev;

  always #5 clk = ~clk;

  eq_top dut (
    .clk, .rst_n, .train_en, .cfg_we, .cfg_addr, .cfg_data,
    .s_valid, .s_ready, .s_x, .s_t, .m_valid, .m_ready, .m_z, .upd_count);

  // output checker
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    if (nout < NOUT) begin
      int sq, m;
      sq = nout / (SEQ_POS/2); m = nout % (SEQ_POS/2);
      for (int n = 0; n < NL; n++)
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

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(0, 4) != 0);
    if (m_valid && !m_ready) n_stall++;
    if (s_valid && !s_ready) n_in_stall++;
    if (s_valid && s_ready && dut.publish) n_bound++;
    if (dut.u_wmem.all_done) begin
      if (train_en) n_upd++;
      else          n_skip++;
    end
  end

  function automatic void set_param(input tweights_t w, input int a, output tw_t v);
    if (a >= A_B1)      v = w.b1[a - A_B1];
    else if (a >= A_W1) v = w.w1[(a - A_W1) / (C2*K)][((a - A_W1) / K) % C2][(a - A_W1) % K];
    else if (a >= A_B0) v = w.b0[a - A_B0];
    else                v = w.w0[a / K][a % K];
  endfunction

  initial begin
    grads_t gs[NSEQ][PT];
    longint zt[];
    s_valid = 0; s_x = '0; s_t = '0; cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    train_en = 0; m_ready = 1; nout = 0;
    n_stall = 0; n_in_stall = 0; n_gap = 0; n_bound = 0; n_changed = 0; n_q_changed = 0;
    n_upd = 0; n_skip = 0;

    // stimulus and reference
    master[0] = rand_tw();
    for (int n = 0; n < NL; n++)
      for (int s = 0; s <= NSEQ; s++) begin
        xin[n][s] = new[SEQ_POS*SPB];
        foreach (xin[n][s][i]) xin[n][s][i] = rand_x();
      end
    for (int j = 0; j < PT; j++)
      for (int s = 0; s <= NSEQ; s++) begin
        tin[j][s] = new[SEQ_POS*SYB];
        foreach (tin[j][s][i]) tin[j][s][i] = rand_t();
      end
    exp_upd = 0;
    for (int s = 0; s < NSEQ; s++) begin
      grads_t gl[];
      wuse[s] = (s == 0) ? master[0] : master[s-1];
      for (int j = 0; j < PT; j++) begin
        grads_t gdummy;
        ref_train(xin[j][s], tin[j][s], wuse[s], zt, gs[s][j]);
        zexp[j][s] = new[zt.size()];
        foreach (zt[i]) zexp[j][s][i] = int'(sat(zt[i] >>> (TA_F - Z_F), Z_W));
        ref_train(xin[j][s], tin[j][s], master[0], zt, gdummy);
        zinit[j][s] = new[zt.size()];
        foreach (zt[i]) zinit[j][s][i] = int'(sat(zt[i] >>> (TA_F - Z_F), Z_W));
        foreach (zt[i]) if (zinit[j][s][i] != zexp[j][s][i]) n_changed++;
      end
      for (int n = PT; n < NL; n++) ref_infer(xin[n][s], ref_quant(wuse[s]), zexp[n][s]);
      if (ref_quant(wuse[s]) != ref_quant(master[0])) n_q_changed++;
      gl = new[PT];
      foreach (gl[j]) gl[j] = gs[s][j];
      if (TEN[s+1]) begin
        master[s+1] = ref_update(master[s], gl, 10);
        exp_upd++;
      end else master[s+1] = master[s];
    end

    repeat (2) @(posedge clk);
    rst_n = 1;
    // load the initial weights
    for (int a = 0; a < N_PARAM; a++) begin
      tw_t v;
      set_param(master[0], a, v);
      cfg_we <= 1; cfg_addr <= 9'(a); cfg_data <= v;
      @(posedge clk);
    end
    cfg_we <= 0;
    @(posedge clk);

    // stream
    for (int s = 0; s <= NSEQ; s++)
      for (int p = 0; p < SEQ_POS; p++) begin
        while ($urandom_range(0, 5) == 0) begin s_valid <= 0; n_gap++; @(posedge clk); end
        s_valid  <= 1;
        train_en <= TEN[s];
        for (int n = 0; n < NL; n++)
          for (int k = 0; k < SPB; k++) s_x[n][k] <= sample_t'(xin[n][s][p*SPB + k]);
        for (int j = 0; j < PT; j++)
          for (int k = 0; k < SYB; k++) s_t[j][k] <= sample_t'(tin[j][s][p*SYB + k]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    s_valid <= 0;
    repeat (40) @(posedge clk);

    checks++;
    if (nout != NOUT + SEQ_POS/2 - 2) begin failures++; $display("output count %0d", nout); end
    checks++;
    if (int'(upd_count) != exp_upd) begin failures++; $display("upd_count %0d expected %0d", upd_count, exp_upd); end

    $display("updates=%0d skipped=%0d out_stalls=%0d in_stalls=%0d gaps=%0d boundaries=%0d",
             n_upd, n_skip, n_stall, n_in_stall, n_gap, n_bound);
    $display("training outputs changed by updates=%0d, sequences with changed quantized weights=%0d",
             n_changed, n_q_changed);
    if (n_upd == 0)      begin failures++; $display("no weight update"); end
    if (n_skip == 0)     begin failures++; $display("no skipped update (train_en low)"); end
    if (n_stall == 0)    begin failures++; $display("no output back-pressure"); end
    if (n_in_stall == 0) begin failures++; $display("no input stall"); end
    if (n_gap == 0)      begin failures++; $display("no input gap"); end
    if (n_bound != NSEQ + 1) begin failures++; $display("sequence boundaries %0d", n_bound); end
    if (n_changed == 0)  begin failures++; $display("updates never changed an output"); end
    if (n_q_changed == 0) begin failures++; $display("updates never changed the inference weights"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
