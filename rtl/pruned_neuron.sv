// pruned_neuron: one output feature map of the convolution, with its weights
// hard-coded into logic and the pruned ones left out.
//
// For output feature map OUT_IDX it computes, in one cycle,
//   acc = bias[OUT_IDX] + sum_{kerS, inFM : |w| >= threshold} win[kerS][inFM] * wq[inFM][OUT_IDX][kerS]
// i.e. the two inner loops of the pruned convolution fully unrolled. Each
// weight is a compile-time constant: it is generated by cnn_pkg (standing in
// for the exported weight header), quantized to its bucket code (odd integer,
// WBITS+1 bits) and kept only if the quantized value reaches the pruning
// threshold. A pruned weight produces no multiplier and no adder input:
// its term is the constant 0 and disappears in synthesis, so the pruning
// decision costs nothing at run time. Multiplications by constants are left to
// synthesis to turn into shift-and-add logic.
//
// Timing: combinational sum, registered; in_valid sampled at edge t gives
// out_valid and acc right after edge t. The window and the result are two's complement.
//
// From the paper: hard-coded weights, pruning by |w| >= threshold in front of
// the multiply-accumulate, bucket-midpoint quantization, unrolled inner loops.
// This design's choices: the weight values themselves, bias pre-scaled to
// accumulator units, a single register stage.
module pruned_neuron #(
  parameter int unsigned IN_FM       = cnn_pkg::IN_FM_DEF,
  parameter int unsigned OUT_FM      = cnn_pkg::OUT_FM_DEF,
  parameter int unsigned KERNEL      = cnn_pkg::KERNEL_DEF,
  parameter int unsigned DBITS       = cnn_pkg::DBITS_DEF,
  parameter int unsigned WBITS       = cnn_pkg::WBITS_DEF,
  parameter int unsigned PRUNE_MILLI = cnn_pkg::PRUNE_MILLI_DEF,
  parameter int unsigned SEED        = cnn_pkg::SEED_DEF,
  parameter int unsigned OUT_IDX     = 0,
  localparam int unsigned ACC_W      = cnn_pkg::acc_width(WBITS, DBITS, IN_FM, KERNEL)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DBITS-1:0] win [KERNEL][IN_FM],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] acc
);

  localparam int M    = cnn_pkg::weight_absmax(IN_FM, OUT_FM, KERNEL, SEED);
  localparam int BIAS = cnn_pkg::bias_acc(OUT_IDX, SEED);

  logic signed [ACC_W-1:0] term [KERNEL][IN_FM];
  logic signed [ACC_W-1:0] sum;

  for (genvar k = 0; k < int'(KERNEL); k++) begin : g_tap
    for (genvar i = 0; i < int'(IN_FM); i++) begin : g_in
      localparam int W = cnn_pkg::weight_milli(i, OUT_IDX, k, IN_FM, KERNEL, SEED);
      localparam int C = cnn_pkg::weight_code(W, M, WBITS);
      if (cnn_pkg::weight_kept(C, M, WBITS, PRUNE_MILLI)) begin : g_kept
        localparam logic signed [WBITS:0] WQ = (WBITS + 1)'(C);
        assign term[k][i] = ACC_W'(win[k][i]) * ACC_W'(WQ);
      end else begin : g_pruned
        assign term[k][i] = '0;
      end
    end
  end

  always_comb begin
    sum = ACC_W'(BIAS);
    for (int k = 0; k < int'(KERNEL); k++)
      for (int i = 0; i < int'(IN_FM); i++)
        sum += term[k][i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) acc <= sum;
    end
  end

endmodule
