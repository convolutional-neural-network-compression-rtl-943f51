// tb_conv_window: self-checking test of the sliding input window.
//
// Streams three back-to-back frames of random columns, with random gaps in
// in_valid, into a window of 3 taps over frames of 9 positions, and checks
// after every accepted column: that a window is flagged exactly when the frame
// has delivered at least KERNEL columns, its position, the frame-last flag and
// every element win[k][i] = input(pos + k, i) against a copy of the frame kept
// by the testbench.
module tb_conv_window;
  localparam int unsigned IN_LEN = 9, IN_FM = 4, KERNEL = 3, DBITS = 5;
  localparam int unsigned PW = $clog2(IN_LEN);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DBITS-1:0] in_col [IN_FM];
  logic win_valid, win_last;
  logic [PW-1:0] win_pos;
  logic signed [DBITS-1:0] win [KERNEL][IN_FM];
  logic signed [DBITS-1:0] frame [IN_LEN][IN_FM];
  int checks = 0, failures = 0, windows = 0, gaps = 0;

  conv_window #(.IN_LEN(IN_LEN), .IN_FM(IN_FM), .KERNEL(KERNEL), .DBITS(DBITS))
    dut (.clk, .rst_n, .in_valid, .in_col, .win_valid, .win_pos, .win_last, .win);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (in_col[i]) in_col[i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < 3; f++) begin
      for (int s = 0; s < int'(IN_LEN); s++) begin
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 0;
          foreach (in_col[i]) in_col[i] = DBITS'($urandom);
          @(posedge clk);
          #1;
          check(!win_valid, "no window during a gap");
          gaps++;
        end
        foreach (in_col[i]) begin
          in_col[i] = DBITS'($urandom);
          frame[s][i] = in_col[i];
        end
        in_valid = 1;
        @(posedge clk);
        #1;
        in_valid = 0;
        check(win_valid == (s >= int'(KERNEL) - 1), $sformatf("win_valid at column %0d", s));
        check(win_last == (s == int'(IN_LEN) - 1), $sformatf("win_last at column %0d", s));
        if (s >= int'(KERNEL) - 1) begin
          int p;
          p = s - (int'(KERNEL) - 1);
          windows++;
          check(int'(win_pos) == p, $sformatf("win_pos %0d expected %0d", win_pos, p));
          for (int k = 0; k < int'(KERNEL); k++)
            for (int i = 0; i < int'(IN_FM); i++)
              check(win[k][i] == frame[p + k][i], $sformatf("win[%0d][%0d] at pos %0d", k, i, p));
        end
      end
    end
    check(windows == 3 * (IN_LEN - KERNEL + 1), "window count");
    check(gaps > 0, "gaps exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
