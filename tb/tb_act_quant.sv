// tb_act_quant: self-checking test of the ReLU + activation quantizer.
//
// Sweeps negative, in-range and saturating accumulator values through act_quant
// and checks the registered bucket code, the clip flag and the one-cycle
// latency against an independent integer reference.
module tb_act_quant;
  import cnn_ref_pkg::*;

  localparam int unsigned ACC_W = 20, ABITS = 5, SHIFT = 5;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [ACC_W-1:0] acc = '0;
  logic out_valid, clipped;
  logic [ABITS-1:0] code;
  int checks = 0, failures = 0;
  int n_neg = 0, n_clip = 0, n_mid = 0;

  act_quant #(.ACC_W(ACC_W), .ABITS(ABITS), .ACT_SHIFT(SHIFT))
    dut (.clk, .rst_n, .in_valid, .acc, .out_valid, .code, .clipped);

  always #5 clk = ~clk;

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
    longint v;
    int e;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      case (n % 4)
        0: v = -longint'($urandom_range(0, 1 << (ACC_W - 1)));
        1: v = longint'($urandom_range(0, (1 << (ABITS + SHIFT)) - 1));
        2: v = longint'($urandom_range(1 << (ABITS + SHIFT), (1 << (ACC_W - 1)) - 1));
        default: v = longint'(n - 1000);
      endcase
      acc = ACC_W'(v);
      in_valid = 1;
      e = ref_code(v, ABITS, SHIFT);
      @(posedge clk);
      #1;
      check(out_valid, "out_valid after one cycle");
      check(int'(code) == e, $sformatf("acc %0d: code %0d expected %0d", v, code, e));
      check(clipped == (v >= (longint'(1) << (ABITS + SHIFT))), $sformatf("clip flag for %0d", v));
      if (v < 0) n_neg++;
      else if (clipped) n_clip++;
      else n_mid++;
      in_valid = 0;
    end
    check(n_neg > 0 && n_clip > 0 && n_mid > 0, "all three regions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
