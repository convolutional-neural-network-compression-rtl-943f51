// act_quant: ReLU and activation quantization of one output feature map.
//
// The convolution output passes through a rectified linear unit and is then
// reduced to ABITS bits: the range [0, 2^(ACT_SHIFT+ABITS)) is cut into 2^ABITS
// equal buckets of width 2^ACT_SHIFT and the output is the bucket index,
// code = min(max(acc, 0) >> ACT_SHIFT, 2^ABITS - 1). Values beyond the range
// are clipped to the top bucket, as the activation quantizer must do when an
// input exceeds the maximum seen in training.
//
// Timing: registered; in_valid sampled at edge t gives out_valid and code
// right after edge t.
// clipped marks a result that saturated.
//
// From the paper: ReLU activation, uniform buckets between a minimum and a
// maximum, clipping outside them. This design's choice: the maximum is a power
// of two so the division is a shift (ACT_SHIFT is assumed, not from the paper).
module act_quant #(
  parameter int unsigned ACC_W     = 20,
  parameter int unsigned ABITS     = cnn_pkg::ABITS_DEF,
  parameter int unsigned ACT_SHIFT = cnn_pkg::ACT_SHIFT_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] acc,
  output logic                    out_valid,
  output logic [ABITS-1:0]        code,
  output logic                    clipped
);

  localparam logic [ACC_W-1:0] TOP = ACC_W'((64'd1 << ABITS) - 1);

  logic [ACC_W-1:0] shifted;
  logic             sat;

  always_comb begin
    shifted = acc[ACC_W-1] ? '0 : ACC_W'(acc >>> ACT_SHIFT);
    sat     = shifted > TOP;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      code      <= '0;
      clipped   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        code    <= sat ? TOP[ABITS-1:0] : shifted[ABITS-1:0];
        clipped <= sat;
      end
    end
  end

endmodule
