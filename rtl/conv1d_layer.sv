// conv1d_layer: pruned, quantized 1D convolution layer with hard-coded weights.
//
// This is the convolution core of a sentence-classification CNN. An input
// frame is IN_LEN word positions of IN_FM feature maps (DBITS-bit signed
// values); the layer slides a KERNEL-wide window along the positions and, for
// every output position outS = 0 .. IN_LEN-KERNEL, produces OUT_FM activations:
//   y[outS][o] = code( ReLU( bias[o] + sum_{i,k kept} x[outS+k][i] * w[i][o][k] ) )
// The loop over output positions runs in time, one position per cycle; the
// loops over output maps, input maps and kernel taps are fully unrolled in
// space (OUT_FM pruned_neuron instances of IN_FM*KERNEL terms each). Weights
// are constants in the logic; pruned weights generate no hardware at all.
//
// Structure: conv_window (shift-register window, output position counter)
// -> OUT_FM x pruned_neuron (constant multiply-accumulate, bias)
// -> OUT_FM x act_quant (ReLU, bucket quantization with clipping).
//
// Interface: one input column per cycle on in_valid/in_col, no back-pressure;
// columns are numbered within the frame by the core, so frames follow each
// other back to back. Output: out_valid with out_pos (the output position),
// out_last on the final position of a frame, out_act[o] the ABITS-bit
// activation codes and out_clip[o] set when a code saturated.
// Timing: three register stages (window, accumulate, activation). The column
// that completes the window of position outS, accepted at clock edge t, gives
// that position's outputs right after edge t+2. Throughput: one output
// position per cycle.
//
// Default sizes are those of the layer the paper measured on the FPGA
// (64 x 35 in, kernel 2, 63 x 16 out, 5-bit precision, pruning 0.035). The
// streaming interface, the latency, the weight values and the activation
// scaling are this design's own choices.
module conv1d_layer #(
  parameter int unsigned IN_LEN      = cnn_pkg::IN_LEN_DEF,
  parameter int unsigned IN_FM       = cnn_pkg::IN_FM_DEF,
  parameter int unsigned KERNEL      = cnn_pkg::KERNEL_DEF,
  parameter int unsigned OUT_FM      = cnn_pkg::OUT_FM_DEF,
  parameter int unsigned DBITS       = cnn_pkg::DBITS_DEF,
  parameter int unsigned WBITS       = cnn_pkg::WBITS_DEF,
  parameter int unsigned ABITS       = cnn_pkg::ABITS_DEF,
  parameter int unsigned PRUNE_MILLI = cnn_pkg::PRUNE_MILLI_DEF,
  parameter int unsigned ACT_SHIFT   = cnn_pkg::ACT_SHIFT_DEF,
  parameter int unsigned SEED        = cnn_pkg::SEED_DEF,
  localparam int unsigned PW         = (IN_LEN > 1) ? $clog2(IN_LEN) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DBITS-1:0] in_col  [IN_FM],
  output logic                    out_valid,
  output logic [PW-1:0]           out_pos,
  output logic                    out_last,
  output logic [ABITS-1:0]        out_act [OUT_FM],
  output logic                    out_clip [OUT_FM]
);

  localparam int unsigned ACC_W = cnn_pkg::acc_width(WBITS, DBITS, IN_FM, KERNEL);

  logic                    win_valid, win_last;
  logic [PW-1:0]           win_pos;
  logic signed [DBITS-1:0] win [KERNEL][IN_FM];

  logic                    acc_valid [OUT_FM];
  logic signed [ACC_W-1:0] acc       [OUT_FM];
  logic                    act_valid [OUT_FM];

  // Position and frame-end tags travel beside the two arithmetic stages.
  logic [PW-1:0] pos_d1, pos_d2;
  logic          last_d1, last_d2;

  conv_window #(
    .IN_LEN(IN_LEN), .IN_FM(IN_FM), .KERNEL(KERNEL), .DBITS(DBITS)
  ) u_window (
    .clk, .rst_n, .in_valid, .in_col,
    .win_valid, .win_pos, .win_last, .win
  );

  for (genvar o = 0; o < int'(OUT_FM); o++) begin : g_out
    pruned_neuron #(
      .IN_FM(IN_FM), .OUT_FM(OUT_FM), .KERNEL(KERNEL), .DBITS(DBITS), .WBITS(WBITS),
      .PRUNE_MILLI(PRUNE_MILLI), .SEED(SEED), .OUT_IDX(o)
    ) u_neuron (
      .clk, .rst_n, .in_valid(win_valid), .win,
      .out_valid(acc_valid[o]), .acc(acc[o])
    );

    act_quant #(
      .ACC_W(ACC_W), .ABITS(ABITS), .ACT_SHIFT(ACT_SHIFT)
    ) u_act (
      .clk, .rst_n, .in_valid(acc_valid[o]), .acc(acc[o]),
      .out_valid(act_valid[o]), .code(out_act[o]), .clipped(out_clip[o])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos_d1  <= '0;
      pos_d2  <= '0;
      last_d1 <= 1'b0;
      last_d2 <= 1'b0;
    end else begin
      pos_d1  <= win_pos;
      pos_d2  <= pos_d1;
      last_d1 <= win_last;
      last_d2 <= last_d1;
    end
  end

  assign out_valid = act_valid[0];
  assign out_pos   = pos_d2;
  assign out_last  = last_d2 && act_valid[0];

  // All output maps advance in lock step.
  for (genvar o = 1; o < int'(OUT_FM); o++) begin : g_chk
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) act_valid[o] == act_valid[0]);
  end

endmodule
