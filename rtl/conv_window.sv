// conv_window: sliding input window of the 1D convolution.
//
// The layer computes output(outS, outFM) from the input columns
// input(outS + kerS, *), kerS = 0 .. KERNEL-1. This block receives the input
// sequence one column per cycle (all IN_FM feature maps of one word position
// side by side) and keeps the last KERNEL columns in a shift register. Once a
// frame has delivered at least KERNEL columns, every new column completes the
// window of one output position, which is flagged on win_valid together with
// its position outS (0 .. IN_LEN-KERNEL). A frame is IN_LEN columns; the column
// counter wraps after the last one, so frames may follow back to back.
//
// Timing: a column presented with in_valid at clock edge t is in the window
// right after that edge; win_valid, win_pos and win_last are registered with it. Gaps in
// in_valid are allowed and simply pause the window. rst_n is a synchronous,
// active-low reset of the counter and flags.
//
// The paper gives only the access pattern (Algorithm 1); streaming the input
// as columns with a valid strobe and a shift-register window is this design's
// choice, one column per cycle matching one output position per cycle.
module conv_window #(
  parameter int unsigned IN_LEN = cnn_pkg::IN_LEN_DEF,
  parameter int unsigned IN_FM  = cnn_pkg::IN_FM_DEF,
  parameter int unsigned KERNEL = cnn_pkg::KERNEL_DEF,
  parameter int unsigned DBITS  = cnn_pkg::DBITS_DEF,
  localparam int unsigned PW    = (IN_LEN > 1) ? $clog2(IN_LEN) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DBITS-1:0] in_col [IN_FM],
  output logic                    win_valid,
  output logic [PW-1:0]           win_pos,
  output logic                    win_last,
  // win[k][i] = input(outS + k, i)
  output logic signed [DBITS-1:0] win [KERNEL][IN_FM]
);

  logic [PW-1:0] cnt;  // index of the next column within the frame

  initial begin
    assert (KERNEL >= 1 && KERNEL <= IN_LEN)
      else $error("conv_window: KERNEL must be in 1..IN_LEN");
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < int'(KERNEL) - 1; k++) win[k] <= win[k+1];
      win[KERNEL-1] <= in_col;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      win_valid <= 1'b0;
      win_pos   <= '0;
      win_last  <= 1'b0;
    end else begin
      win_valid <= in_valid && (int'(cnt) >= int'(KERNEL) - 1);
      win_pos   <= PW'(int'(cnt) - (int'(KERNEL) - 1));
      win_last  <= in_valid && (int'(cnt) == int'(IN_LEN) - 1);
      if (in_valid) cnt <= (int'(cnt) == int'(IN_LEN) - 1) ? '0 : cnt + 1'b1;
    end
  end

endmodule
