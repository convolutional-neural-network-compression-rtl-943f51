// tb_conv1d_configs: the convolution core in the other corners of the FPGA
// resource experiment, plus a window-3 layer.
//
// The paper measured the 64 x 35 -> 63 x 16, kernel-2 layer with and without
// pruning (threshold 0 and 0.035) and at two precisions. This testbench runs
// that layer with pruning off at 5 bits, and at 16-bit weights with and
// without pruning (the 32-bit floating-point corner has no integer
// counterpart; 16 bits is the widest precision the paper reports as
// lossless), a small kernel-3 layer like the model's second convolution
// branch, and two of the mixed per-place precisions found by the precision
// search (2-bit weights with 7-bit activations; 1-bit weights, 4-bit inputs,
// 2-bit activations). Each is checked output by output against the reference convolution;
// the test also checks that pruning removes multiply-accumulates when on and
// none when off.
module tb_conv1d_configs;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 6;
  int  c [N], f [N], k [N];
  bit  d [N];
  int  checks = 0, failures = 0;

  // 5-bit weights, no pruning
  conv1d_run #(.IN_LEN(64), .IN_FM(35), .KERNEL(2), .OUT_FM(16), .WBITS(5), .PRUNE(0), .SHIFT(5),
               .FRAMES(2))
    r0 (.clk, .checks(c[0]), .failures(f[0]), .kept(k[0]), .done(d[0]));
  // 16-bit weights, no pruning
  conv1d_run #(.IN_LEN(64), .IN_FM(35), .KERNEL(2), .OUT_FM(16), .WBITS(16), .PRUNE(0), .SHIFT(16),
               .FRAMES(2))
    r1 (.clk, .checks(c[1]), .failures(f[1]), .kept(k[1]), .done(d[1]));
  // 16-bit weights, pruning 0.035
  conv1d_run #(.IN_LEN(64), .IN_FM(35), .KERNEL(2), .OUT_FM(16), .WBITS(16), .PRUNE(35), .SHIFT(15),
               .FRAMES(2))
    r2 (.clk, .checks(c[2]), .failures(f[2]), .kept(k[2]), .done(d[2]));
  // kernel 3, small layer
  conv1d_run #(.IN_LEN(20), .IN_FM(12), .KERNEL(3), .OUT_FM(6), .WBITS(5), .PRUNE(20), .SHIFT(4),
               .FRAMES(3))
    r3 (.clk, .checks(c[3]), .failures(f[3]), .kept(k[3]), .done(d[3]));

  // Per-place precisions chosen by the precision search for the first
  // convolution: 2-bit weights with 7-bit activations (MPQA), and 1-bit
  // weights with 2-bit activations on 4-bit embeddings, unpruned (Subj).
  conv1d_run #(.IN_LEN(64), .IN_FM(35), .KERNEL(2), .OUT_FM(16), .WBITS(2), .ABITS(7), .PRUNE(35),
               .SHIFT(1), .FRAMES(2))
    r4 (.clk, .checks(c[4]), .failures(f[4]), .kept(k[4]), .done(d[4]));
  conv1d_run #(.IN_LEN(64), .IN_FM(35), .KERNEL(2), .OUT_FM(16), .DBITS(4), .WBITS(1), .ABITS(2),
               .PRUNE(0), .SHIFT(4), .FRAMES(2))
    r5 (.clk, .checks(c[5]), .failures(f[5]), .kept(k[5]), .done(d[5]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    for (int i = 0; i < N; i++) begin
      $display("config %0d: %0d checks, %0d failures, %0d kept multiply-accumulates", i, c[i], f[i], k[i]);
      checks += c[i];
      failures += f[i];
    end
    check(k[0] == 35 * 16 * 2, "no pruning at threshold 0 (5 bits)");
    check(k[1] == 35 * 16 * 2, "no pruning at threshold 0 (16 bits)");
    check(k[2] < k[1], "pruning at 0.035 removes weights (16 bits)");
    check(k[2] == int'(cnn_pkg::kept_macs(35, 16, 2, 16, 35, cnn_pkg::SEED_DEF)),
          "kept count at 16 bits");
    check(k[3] > 0 && k[3] < 12 * 6 * 3, "kernel-3 layer partly pruned");
    check(k[4] == int'(cnn_pkg::kept_macs(35, 16, 2, 2, 35, cnn_pkg::SEED_DEF)), "kept count at 2 bits");
    check(k[5] == 35 * 16 * 2, "1-bit weights, no pruning: all kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
