// tb_dsp_dual_mult -- checks the packed two-product multiplier against plain
// signed multiplication: random operands plus the corner cases d1 = 0 with a
// negative weight (no borrow), extreme operand values, and counts how often
// the +1 correction of the upper product was needed.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_dsp_dual_mult;
  localparam int DW = 10, WW = 6;
  logic        [DW-1:0]    d1, d2;
  logic signed [WW-1:0]    w;
  logic signed [DW+WW-1:0] r1, r2;
  int checks = 0, failures = 0, corrected = 0;

  dsp_dual_mult #(.DW(DW), .WW(WW)) dut (.d1, .d2, .w, .r1, .r2);

  task automatic check_one(input int a, input int b, input int c);
    int e1, e2;
    d1 = DW'(a); d2 = DW'(b); w = WW'(c);
    #1;
    e1 = a * c;
    e2 = b * c;
    if (a * c < 0) corrected++;
    checks += 2;
    if (int'(r1) != e1) begin failures++; $display("r1 mismatch d1=%0d w=%0d got %0d exp %0d", a, c, r1, e1); end
    if (int'(r2) != e2) begin failures++; $display("r2 mismatch d2=%0d w=%0d got %0d exp %0d", b, c, r2, e2); end
  endtask

  initial begin
    // corners
    for (int c = -32; c < 32; c++) begin
      check_one(0, 1023, c);
      check_one(1023, 0, c);
      check_one(1023, 1023, c);
      check_one(0, 0, c);
      check_one(1, 1, c);
    end
    for (int n = 0; n < 20000; n++)
      check_one($urandom_range(0, 1023), $urandom_range(0, 1023), int'($urandom_range(0, 63)) - 32);
    if (corrected == 0) begin failures++; $display("correction path never used"); end
    $display("corrections applied: %0d", corrected);
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
