// tb_calc_grad0 -- first-layer gradient step against a behavioural model:
// random deltas for the nine window positions and random sample windows;
// checks the accumulated weight and bias gradients after every clock, with
// random enable and clear (clear loads the current term).
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_calc_grad0;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  logic clk = 0, rst_n = 0, en, clr;
  tw_t  [K-1:0][C1-1:0] delta;
  pos_rec_t [K-1:0]     win;
  g_t   [C1-1:0][K-1:0] gw0;
  g_t   [C1-1:0]        gb0;
  longint mw[C1][K], mb[C1];
  int checks = 0, failures = 0, n_clr = 0, n_hold = 0;

  always #5 clk = ~clk;

  calc_grad0 dut (.clk, .rst_n, .en, .clr, .delta, .win, .gw0, .gb0);

  function automatic longint wrap48(input longint v);
    return longint'($signed(g_t'(v)));
  endfunction

  initial begin
    en = 0; clr = 0; delta = '0; win = '0;
    mw = '{default: 0}; mb = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 4) != 0);
      clr = ($urandom_range(0, 7) == 0);
      for (int p = 0; p < K; p++) begin
        for (int c = 0; c < C1; c++)
          delta[p][c] = ($urandom_range(0, 2) == 0) ? '0 : tw_t'(int'($urandom_range(0, 1 << 18)) - (1 << 17));
        for (int k = 0; k < K; k++) win[p].x[k] = sample_t'(rand_x());
      end
      if (en) begin
        if (clr) n_clr++;
        for (int c = 0; c < C1; c++) begin
          longint sb, tb;
          sb = 0;
          for (int p = 0; p < K; p++) sb += longint'($signed(delta[p][c]));
          tb = sb * 256;
          mb[c] = wrap48(clr ? tb : mb[c] + tb);
          for (int k = 0; k < K; k++) begin
            longint s;
            s = 0;
            for (int p = 0; p < K; p++) s += longint'($signed(delta[p][c])) * longint'($signed(win[p].x[k]));
            mw[c][k] = wrap48(clr ? s * 4 : mw[c][k] + s * 4);
          end
        end
      end else n_hold++;
      @(posedge clk);
      #1;
      for (int c = 0; c < C1; c++) begin
        checks++;
        if (longint'($signed(gb0[c])) != mb[c]) begin failures++; if (failures < 10) $display("gb0[%0d] got %0d exp %0d", c, gb0[c], mb[c]); end
        for (int k = 0; k < K; k++) begin
          checks++;
          if (longint'($signed(gw0[c][k])) != mw[c][k]) begin
            failures++;
            if (failures < 10) $display("gw0[%0d][%0d] got %0d exp %0d", c, k, gw0[c][k], mw[c][k]);
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
