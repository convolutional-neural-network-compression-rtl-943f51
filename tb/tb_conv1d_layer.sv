// tb_conv1d_layer: end-to-end test of the convolution core at its default
// sizes (input 64 x 35, kernel 2, output 63 x 16, 5-bit weights, inputs and
// activations, pruning threshold 0.035). No parameter of the core is changed.
//
// Four frames are streamed in:
//   frame 0  random inputs, no gaps          (full rate: 63 outputs in 63 cycles)
//   frame 1  random inputs with random gaps  (follows frame 0 back to back)
//   frame 2  large inputs of one sign        (drives activations into clipping)
//   frame 3  all inputs at the most negative (a second back-to-back frame)
// The reference follows the pruned convolution loop literally: for each output
// position, each output map, each input map and each tap, add
// input(pos + tap, map) * weight if the weight survived pruning, then the bias,
// then ReLU and the bucket quantizer; weights are pruned and quantized by
// cnn_ref_pkg with real arithmetic. Every output is checked for its value,
// clip flag, position, frame-last flag and arrival exactly 2 clock edges
// after the edge that accepted the column completing its window. The test
// also counts the mechanisms of the design and fails if one never occurred:
// pruned weights, ReLU cutting a negative sum, activation clipping, gaps in
// the input, frames back to back.
module tb_conv1d_layer;
  import cnn_ref_pkg::*;

  localparam int unsigned IN_LEN = cnn_pkg::IN_LEN_DEF, IN_FM = cnn_pkg::IN_FM_DEF;
  localparam int unsigned KERNEL = cnn_pkg::KERNEL_DEF, OUT_FM = cnn_pkg::OUT_FM_DEF;
  localparam int unsigned DBITS = cnn_pkg::DBITS_DEF, WBITS = cnn_pkg::WBITS_DEF;
  localparam int unsigned ABITS = cnn_pkg::ABITS_DEF, PRUNE = cnn_pkg::PRUNE_MILLI_DEF;
  localparam int unsigned SHIFT = cnn_pkg::ACT_SHIFT_DEF, SEED = cnn_pkg::SEED_DEF;
  localparam int unsigned PW = $clog2(IN_LEN);
  localparam int unsigned LATENCY = 2;
  localparam int unsigned FRAMES = 4;

  typedef struct {
    int unsigned pos;
    bit          last;
    int          code [OUT_FM];
    bit          clip [OUT_FM];
    longint      due;
  } expect_t;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DBITS-1:0] in_col [IN_FM];
  logic out_valid, out_last;
  logic [PW-1:0] out_pos;
  logic [ABITS-1:0] out_act [OUT_FM];
  logic out_clip [OUT_FM];

  conv1d_layer dut (.clk, .rst_n, .in_valid, .in_col, .out_valid, .out_pos, .out_last,
                    .out_act, .out_clip);

  int checks = 0, failures = 0;
  longint cyc = 0;
  expect_t q[$];
  int wref [IN_FM][OUT_FM][KERNEL];
  int x [IN_LEN][IN_FM];
  int n_kept = 0, n_pruned = 0, n_relu = 0, n_clip = 0, n_gap = 0, n_b2b = 0, n_out = 0;
  longint first_out_cyc, last_out_cyc;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Reference for one output position, in the loop order of the algorithm.
  function automatic expect_t ref_position(input int unsigned pos);
    expect_t e;
    e.pos = pos;
    e.last = (pos == IN_LEN - KERNEL);
    for (int o = 0; o < int'(OUT_FM); o++) begin
      longint s;
      s = 0;
      for (int i = 0; i < int'(IN_FM); i++)
        for (int k = 0; k < int'(KERNEL); k++)
          if (wref[i][o][k] != 0) s += longint'(x[pos + k][i]) * wref[i][o][k];
      s += longint'(cnn_pkg::bias_acc(o, SEED));
      e.code[o] = ref_code(s, ABITS, SHIFT);
      e.clip[o] = (s >= (longint'(1) << (ABITS + SHIFT)));
      if (s < 0) n_relu++;
      if (e.clip[o]) n_clip++;
    end
    return e;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor: every cycle, an output is due or none may appear.
  initial begin
    forever begin
      @(posedge clk);
      #1;
      if (q.size() > 0 && q[0].due == cyc) begin
        expect_t e;
        e = q.pop_front();
        check(out_valid, $sformatf("output for position %0d missing at cycle %0d", e.pos, cyc));
        check(int'(out_pos) == int'(e.pos), $sformatf("out_pos %0d expected %0d", out_pos, e.pos));
        check(out_last == e.last, $sformatf("out_last at position %0d", e.pos));
        for (int o = 0; o < int'(OUT_FM); o++) begin
          check(int'(out_act[o]) == e.code[o],
                $sformatf("pos %0d map %0d: act %0d expected %0d", e.pos, o, out_act[o], e.code[o]));
          check(out_clip[o] == e.clip[o], $sformatf("pos %0d map %0d: clip flag", e.pos, o));
        end
        if (n_out == 0) first_out_cyc = cyc;
        if (n_out == int'(IN_LEN - KERNEL)) last_out_cyc = cyc;
        n_out++;
      end else begin
        check(!out_valid, $sformatf("unexpected output at cycle %0d", cyc));
      end
    end
  end

  initial begin
    int m;
    m = ref_absmax(IN_FM, OUT_FM, KERNEL, SEED);
    foreach (wref[i, o, k]) begin
      wref[i][o][k] = ref_weight(i, o, k, IN_FM, KERNEL, WBITS, PRUNE, m, SEED);
      if (wref[i][o][k] != 0) n_kept++;
      else n_pruned++;
    end
    $display("weights kept %0d of %0d (calculations ratio %0.3f)", n_kept, n_kept + n_pruned,
             real'(n_kept) / real'(n_kept + n_pruned));
    check(n_kept == int'(cnn_pkg::kept_macs(IN_FM, OUT_FM, KERNEL, WBITS, PRUNE, SEED)),
          "kept multiply-accumulate count");

    foreach (in_col[i]) in_col[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;
    for (int f = 0; f < int'(FRAMES); f++) begin
      for (int s = 0; s < int'(IN_LEN); s++) begin
        if (f == 1 && s > 0 && $urandom_range(0, 3) == 0) begin
          int g;
          g = $urandom_range(1, 3);
          in_valid = 0;
          foreach (in_col[i]) in_col[i] = DBITS'($urandom);
          repeat (g) @(posedge clk);
          #1;
          n_gap++;
        end
        if (s == 0 && f > 0 && in_valid) n_b2b++;
        foreach (in_col[i]) begin
          case (f)
            2: x[s][i] = ((i + s) % 5 == 0) ? 0 : 15 - $urandom_range(0, 2);
            3: x[s][i] = -16;
            default: x[s][i] = int'($urandom_range(0, 31)) - 16;
          endcase
          in_col[i] = DBITS'(x[s][i]);
        end
        in_valid = 1;
        @(posedge clk);
        #1;
        if (s >= int'(KERNEL) - 1) begin
          expect_t e;
          e = ref_position(s - (KERNEL - 1));
          e.due = cyc + longint'(LATENCY);
          q.push_back(e);
        end
      end
    end
    in_valid = 0;
    repeat (LATENCY + 2) @(posedge clk);
    #1;
    check(q.size() == 0, "all outputs delivered");
    check(n_out == int'(FRAMES * (IN_LEN - KERNEL + 1)), $sformatf("output count %0d", n_out));
    check(last_out_cyc - first_out_cyc == longint'(IN_LEN - KERNEL),
          "gap-free frame: one output position per cycle");
    $display("mechanisms: pruned weights %0d, ReLU cuts %0d, clipped %0d, input gaps %0d, back-to-back frames %0d",
             n_pruned, n_relu, n_clip, n_gap, n_b2b);
    check(n_pruned > 0, "pruning occurred");
    check(n_relu > 0, "ReLU cut a negative sum");
    check(n_clip > 0, "activation clipping occurred");
    check(n_gap > 0, "input gaps occurred");
    check(n_b2b > 0, "back-to-back frames occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
