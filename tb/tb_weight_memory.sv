// tb_weight_memory -- weight store and update of two training instances.
// Loads random initial weights through the configuration port (checked on
// both outputs, including the 6-bit quantization for inference), then runs
// rounds in which the two instances deliver random gradients either in the
// same cycle or several cycles apart (gradients held after their g_valid, as
// the training instances do). A cycle-level model tracks the master copy and
// the published copy: an update when the second gradient of a round arrives
// with train_en high, none with it low, and master -> published only on the
// random publish strobe. Both outputs and upd_count are compared every cycle.
//
// Timing: one 10 ns clock; a watchdog ends the run with a failure if it
// hangs. Expected values come from eq_ref_pkg, a bit-exact model of this
// design's fixed-point arithmetic; the layer equations and the network shape
// follow the architecture, the formats and the test sizes are this bench's
// choice.
module tb_weight_memory;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int PT = 2, LR_SHIFT = 10, ROUNDS = 40;

  logic clk = 0, rst_n = 0;
  logic cfg_we, train_en, publish;
  logic [8:0] cfg_addr;
  tw_t cfg_data;
  logic [PT-1:0] g_valid;
  grads_t [PT-1:0] g;
  tweights_t w_pub, master, pub_m;
  qweights_t q_pub;
  logic [31:0] upd_count;
  int checks = 0, failures = 0, exp_upd = 0, n_pub = 0, n_skip = 0, n_same = 0, n_split = 0;

  always #5 clk = ~clk;

  weight_memory #(.PT(PT), .LR_SHIFT(LR_SHIFT)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .train_en, .g_valid, .g,
    .publish, .w_pub, .q_pub, .upd_count);

  function automatic grads_t rand_g();
    grads_t r;
    for (int c = 0; c < C1; c++) begin
      r.b0[c] = g_t'(longint'($urandom_range(0, 1 << 30)) - (1 << 29));
      for (int k = 0; k < K; k++) r.w0[c][k] = g_t'(longint'($urandom_range(0, 1 << 30)) - (1 << 29));
    end
    for (int i = 0; i < C1; i++)
      for (int o = 0; o < C2; o++)
        for (int k = 0; k < K; k++) r.w1[i][o][k] = g_t'(longint'($urandom_range(0, 1 << 30)) - (1 << 29));
    for (int o = 0; o < C2; o++) r.b1[o] = g_t'(longint'($urandom_range(0, 1 << 30)) - (1 << 29));
    return r;
  endfunction

  function automatic tw_t get_param(input tweights_t w, input int a);
    if (a >= A_B1) return w.b1[a - A_B1];
    if (a >= A_W1) return w.w1[(a - A_W1) / (C2*K)][((a - A_W1) / K) % C2][(a - A_W1) % K];
    if (a >= A_B0) return w.b0[a - A_B0];
    return w.w0[a / K][a % K];
  endfunction

  // one clock: apply the model for the inputs currently driven, then compare
  task automatic step(input bit all_done);
    grads_t gl[];
    publish = ($urandom_range(0, 3) == 0);
    #1;
    if (publish) begin pub_m = master; n_pub++; end
    if (all_done) begin
      if (train_en) begin
        gl = new[PT];
        foreach (gl[j]) gl[j] = g[j];
        master = ref_update(master, gl, LR_SHIFT);
        exp_upd++;
      end else n_skip++;
    end
    @(posedge clk);
    #1;
    checks += 3;
    if (w_pub !== pub_m) begin failures++; if (failures < 10) $display("published weights differ at %0t", $time); end
    if (q_pub !== ref_quant(pub_m)) begin failures++; if (failures < 10) $display("quantized weights differ at %0t", $time); end
    if (int'(upd_count) != exp_upd) begin failures++; if (failures < 10) $display("upd_count %0d exp %0d", upd_count, exp_upd); end
    g_valid = '0;
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0; train_en = 0; publish = 0; g_valid = '0; g = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    master = rand_tw();
    for (int a = 0; a < N_PARAM; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 9'(a); cfg_data = get_param(master, a);
    end
    @(negedge clk);
    cfg_we = 0;
    pub_m = master;
    @(posedge clk); #1;
    checks += 2;
    if (w_pub !== master) begin failures++; $display("configured weights not published"); end
    if (q_pub !== ref_quant(master)) begin failures++; $display("quantized configured weights differ"); end

    for (int r = 0; r < ROUNDS; r++) begin
      @(negedge clk);
      train_en = (r % 8) < 6;
      g[0] = rand_g(); g[1] = rand_g();
      if ($urandom_range(0, 2) == 0) begin
        n_same++;
        g_valid = '1;
        step(1);
      end else begin
        int first, gap;
        n_split++;
        first = $urandom_range(0, 1);
        gap = $urandom_range(0, 4);
        g_valid = 2'b01 << first;
        step(0);
        repeat (gap) begin @(negedge clk); step(0); end
        @(negedge clk);
        g_valid = 2'b10 >> first;
        step(1);
      end
      repeat ($urandom_range(0, 3)) begin @(negedge clk); step(0); end
    end
    // publish the final state
    @(negedge clk);
    step(0);
    if (n_pub == 0 || n_skip == 0 || n_same == 0 || n_split == 0 || exp_upd == 0) begin
      failures++; $display("a mechanism was not exercised");
    end
    $display("updates=%0d skipped=%0d publishes=%0d same-cycle rounds=%0d split rounds=%0d",
             exp_upd, n_skip, n_pub, n_same, n_split);
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
