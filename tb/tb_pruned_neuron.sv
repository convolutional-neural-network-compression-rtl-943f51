// tb_pruned_neuron: self-checking test of one hard-coded, pruned output map.
//
// Drives random input windows (full signed range) into pruned_neuron for
// output map 3 of the default 35-map, kernel-2 layer, and compares each
// registered result, one cycle later, with the reference sum over the kept
// weights computed from cnn_ref_pkg. Also checks that pruning actually removed
// weights at the 0.035 threshold, that valid follows in_valid by one cycle and
// that the result holds while in_valid is low.
module tb_pruned_neuron;
  import cnn_ref_pkg::*;

  localparam int unsigned IN_FM = 35, OUT_FM = 16, KERNEL = 2, DBITS = 5, WBITS = 5;
  localparam int unsigned PRUNE = 35, SEED = cnn_pkg::SEED_DEF, IDX = 3;
  localparam int unsigned ACC_W = cnn_pkg::acc_width(WBITS, DBITS, IN_FM, KERNEL);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DBITS-1:0] win [KERNEL][IN_FM];
  logic out_valid;
  logic signed [ACC_W-1:0] acc;

  int checks = 0, failures = 0;
  int wref [KERNEL][IN_FM];
  int kept = 0;

  pruned_neuron #(.IN_FM(IN_FM), .OUT_FM(OUT_FM), .KERNEL(KERNEL), .DBITS(DBITS), .WBITS(WBITS),
                  .PRUNE_MILLI(PRUNE), .SEED(SEED), .OUT_IDX(IDX))
    dut (.clk, .rst_n, .in_valid, .win, .out_valid, .acc);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint expected();
    longint s;
    s = cnn_pkg::bias_acc(IDX, SEED);
    for (int k = 0; k < int'(KERNEL); k++)
      for (int i = 0; i < int'(IN_FM); i++)
        s += longint'(win[k][i]) * wref[k][i];
    return s;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m;
    longint exp_v;
    m = ref_absmax(IN_FM, OUT_FM, KERNEL, SEED);
    for (int k = 0; k < int'(KERNEL); k++)
      for (int i = 0; i < int'(IN_FM); i++) begin
        wref[k][i] = ref_weight(i, IDX, k, IN_FM, KERNEL, WBITS, PRUNE, m, SEED);
        if (wref[k][i] != 0) kept++;
      end
    $display("kept %0d of %0d weights", kept, IN_FM * KERNEL);
    check(kept > 0 && kept < int'(IN_FM * KERNEL), "pruning removes some but not all weights");

    foreach (win[k, i]) win[k][i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      int mode;
      mode = n % 3;
      foreach (win[k, i])
        win[k][i] = (mode == 0) ? DBITS'($urandom) : (mode == 1 ? DBITS'(-16 + $urandom_range(0, 1)) : DBITS'(15));
      exp_v = expected();
      in_valid = 1;
      @(posedge clk);
      #1;
      check(out_valid == 1'b1, "out_valid one cycle after in_valid");
      check(longint'(acc) == exp_v, $sformatf("acc %0d expected %0d", acc, exp_v));
      in_valid = 0;
      if (n % 7 == 0) begin
        foreach (win[k, i]) win[k][i] = DBITS'($urandom);
        @(posedge clk);
        #1;
        check(out_valid == 1'b0, "out_valid low after a gap");
        check(longint'(acc) == exp_v, "acc holds while idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
