// conv1d_run: reusable checker that drives one conv1d_layer configuration.
//
// It instantiates the core with the given parameters, streams FRAMES random
// frames (the second one with gaps) and compares every output column with the
// reference convolution from cnn_ref_pkg, including its arrival 2 clock edges
// after the column that completed its window. Results are exposed as
// checks/failures/done for the testbench that instantiates it; kept_macs
// reports how many multiply-accumulates survived pruning.
module conv1d_run #(
  parameter int unsigned IN_LEN = 16, IN_FM = 8, KERNEL = 2, OUT_FM = 4,
  parameter int unsigned DBITS = 5, WBITS = 5, ABITS = 5,
  parameter int unsigned PRUNE = 35, SHIFT = 5, SEED = cnn_pkg::SEED_DEF,
  parameter int unsigned FRAMES = 3
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   kept,
  output bit   done
);
  import cnn_ref_pkg::*;

  localparam int unsigned PW = (IN_LEN > 1) ? $clog2(IN_LEN) : 1;
  localparam int unsigned LATENCY = 2;

  typedef struct {
    int unsigned pos;
    bit          last;
    int          code [OUT_FM];
    longint      due;
  } expect_t;

  logic rst_n = 0, in_valid = 0;
  logic signed [DBITS-1:0] in_col [IN_FM];
  logic out_valid, out_last;
  logic [PW-1:0] out_pos;
  logic [ABITS-1:0] out_act [OUT_FM];
  logic out_clip [OUT_FM];

  conv1d_layer #(.IN_LEN(IN_LEN), .IN_FM(IN_FM), .KERNEL(KERNEL), .OUT_FM(OUT_FM), .DBITS(DBITS),
                 .WBITS(WBITS), .ABITS(ABITS), .PRUNE_MILLI(PRUNE), .ACT_SHIFT(SHIFT), .SEED(SEED))
    dut (.clk, .rst_n, .in_valid, .in_col, .out_valid, .out_pos, .out_last, .out_act, .out_clip);

  longint cyc = 0;
  expect_t q[$];
  int wref [IN_FM][OUT_FM][KERNEL];
  int x [IN_LEN][IN_FM];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL (W%0d P%0d K%0d): %s", WBITS, PRUNE, KERNEL, what);
    end
  endtask

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
    end
    return e;
  endfunction

  initial begin
    checks = 0;
    failures = 0;
    kept = 0;
    done = 0;
    forever begin
      @(posedge clk);
      #1;
      if (q.size() > 0 && q[0].due == cyc) begin
        expect_t e;
        e = q.pop_front();
        check(out_valid, $sformatf("output for position %0d missing", e.pos));
        check(int'(out_pos) == int'(e.pos), $sformatf("out_pos %0d expected %0d", out_pos, e.pos));
        check(out_last == e.last, "out_last");
        for (int o = 0; o < int'(OUT_FM); o++)
          check(int'(out_act[o]) == e.code[o],
                $sformatf("pos %0d map %0d: act %0d expected %0d", e.pos, o, out_act[o], e.code[o]));
      end else begin
        check(!out_valid, "unexpected output");
      end
    end
  end

  initial begin
    int m;
    m = ref_absmax(IN_FM, OUT_FM, KERNEL, SEED);
    foreach (wref[i, o, k]) begin
      wref[i][o][k] = ref_weight(i, o, k, IN_FM, KERNEL, WBITS, PRUNE, m, SEED);
      if (wref[i][o][k] != 0) kept++;
    end
    foreach (in_col[i]) in_col[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;
    for (int f = 0; f < int'(FRAMES); f++) begin
      for (int s = 0; s < int'(IN_LEN); s++) begin
        if (f == 1 && $urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(posedge clk);
          #1;
        end
        foreach (in_col[i]) begin
          x[s][i] = int'($urandom_range(0, (1 << DBITS) - 1)) - (1 << (DBITS - 1));
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
    done = 1;
  end
endmodule
