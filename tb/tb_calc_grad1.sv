// tb_calc_grad1 -- second-layer gradient step against a behavioural model:
// random errors, windows (activations with random ReLU masks) and weights;
// checks the back-propagated delta of every window position each step and
// the accumulated weight and bias gradients after every clock, with random
// enable and clear (clear loads the current term instead of adding it).
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_calc_grad1;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  logic clk = 0, rst_n = 0, en, clr;
  tw_t  [C2-1:0]                e;
  pos_rec_t [K-1:0]             win;
  tw_t  [C1-1:0][C2-1:0][K-1:0] w1;
  tw_t  [K-1:0][C1-1:0]         delta;
  g_t   [C1-1:0][C2-1:0][K-1:0] gw1;
  g_t   [C2-1:0]                gb1;
  longint mw[C1][C2][K], mb[C2];
  int checks = 0, failures = 0, n_clr = 0, n_hold = 0;

  always #5 clk = ~clk;

  calc_grad1 dut (.clk, .rst_n, .en, .clr, .e, .win, .w1, .delta, .gw1, .gb1);

  function automatic longint wrap48(input longint v);
    return longint'($signed(g_t'(v)));
  endfunction

  initial begin
    en = 0; clr = 0; e = '0; win = '0; w1 = '0;
    mw = '{default: 0}; mb = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      // drive new stimulus after the edge
      @(negedge clk);
      en  = ($urandom_range(0, 4) != 0);
      clr = ($urandom_range(0, 7) == 0);
      for (int o = 0; o < C2; o++) e[o] = tw_t'(int'($urandom_range(0, 1 << 19)) - (1 << 18));
      for (int k = 0; k < K; k++)
        for (int i = 0; i < C1; i++) begin
          win[k].act[i] = $urandom_range(0, 1);
          win[k].a[i]   = win[k].act[i] ? tw_t'($urandom_range(0, 1 << 18)) : '0;
        end
      for (int i = 0; i < C1; i++)
        for (int o = 0; o < C2; o++)
          for (int k = 0; k < K; k++) w1[i][o][k] = tw_t'(int'($urandom_range(0, 1 << 21)) - (1 << 20));
      #1;
      // combinational delta
      for (int k = 0; k < K; k++)
        for (int i = 0; i < C1; i++) begin
          longint s, x;
          s = 0;
          for (int o = 0; o < C2; o++) s += longint'($signed(e[o])) * longint'($signed(w1[i][o][k]));
          x = win[k].act[i] ? sat(s >>> 20, T_W) : 0;
          checks++;
          if (longint'($signed(delta[k][i])) != x) begin
            failures++;
            if (failures < 10) $display("delta[%0d][%0d] got %0d exp %0d", k, i, delta[k][i], x);
          end
        end
      // model of the accumulators
      if (en) begin
        if (clr) n_clr++;
        for (int o = 0; o < C2; o++) begin
          longint tb;
          tb = longint'($signed(e[o])) * 256;
          mb[o] = wrap48(clr ? tb : mb[o] + tb);
          for (int i = 0; i < C1; i++)
            for (int k = 0; k < K; k++) begin
              longint tw;
              tw = (longint'($signed(e[o])) * longint'($signed(win[k].a[i]))) >>> 8;
              mw[i][o][k] = wrap48(clr ? tw : mw[i][o][k] + tw);
            end
        end
      end else n_hold++;
      @(posedge clk);
      #1;
      for (int o = 0; o < C2; o++) begin
        checks++;
        if (longint'($signed(gb1[o])) != mb[o]) begin failures++; if (failures < 10) $display("gb1[%0d] got %0d exp %0d", o, gb1[o], mb[o]); end
        for (int i = 0; i < C1; i++)
          for (int k = 0; k < K; k++) begin
            checks++;
            if (longint'($signed(gw1[i][o][k])) != mw[i][o][k]) begin
              failures++;
              if (failures < 10) $display("gw1[%0d][%0d][%0d] got %0d exp %0d", i, o, k, gw1[i][o][k], mw[i][o][k]);
            end
          end
      end
    end
    if (n_clr == 0 || n_hold == 0) begin failures++; $display("clear or hold never exercised"); end
    $display("clears=%0d holds=%0d", n_clr, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
