// tb_loss_mse -- error of the MSE loss: e = z - t (target converted from 6
// to 16 fraction bits), saturated to 24 bits. Random outputs and targets over
// the full ranges plus the saturation corners; checks every channel.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_loss_mse;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  tw_t     [C2-1:0] z, e;
  sample_t [C2-1:0] t;
  int checks = 0, failures = 0, n_sat = 0;

  loss_mse dut (.z, .t, .e);

  task automatic check();
    #1;
    for (int o = 0; o < C2; o++) begin
      longint d, x;
      d = longint'($signed(z[o])) - longint'($signed(t[o])) * 1024;
      x = sat(d, T_W);
      if (x != d) n_sat++;
      checks++;
      if (longint'($signed(e[o])) != x) begin
        failures++;
        if (failures < 10) $display("ch %0d z=%0d t=%0d: got %0d exp %0d", o, z[o], t[o], e[o], x);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      for (int o = 0; o < C2; o++) begin
        z[o] = tw_t'($urandom);
        t[o] = sample_t'($urandom);
      end
      check();
    end
    // corners: most negative output with the largest target, and the reverse
    for (int o = 0; o < C2; o++) begin z[o] = {1'b1, 23'b0}; t[o] = 10'sd511; end
    check();
    for (int o = 0; o < C2; o++) begin z[o] = {1'b0, {23{1'b1}}}; t[o] = -10'sd512; end
    check();
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated cases: %0d", n_sat);
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
