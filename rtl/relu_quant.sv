// relu_quant: requantiser and optional ReLU at the output of a dense layer.
//
// The input d is a wide accumulator with IN_FRAC fractional bits. It is shifted
// right arithmetically by IN_FRAC-OUT_FRAC bits (truncation towards minus
// infinity), then clamped to the OUT_W-bit two's complement range (saturation).
// With RELU set, negative inputs give zero. Purely combinational.
// The ReLU and the 10-bit / 5-fractional-bit format follow the published model;
// truncation and saturation are this design's choices, as the rounding and
// overflow modes of the quantised model are not stated.
module relu_quant #(
  parameter int unsigned IN_W     = 30,
  parameter int unsigned IN_FRAC  = 10,
  parameter int unsigned OUT_W    = 10,
  parameter int unsigned OUT_FRAC = 5,
  parameter bit          RELU     = 1'b1
) (
  input  logic signed [IN_W-1:0]  d,
  output logic signed [OUT_W-1:0] q
);

  localparam int unsigned SHIFT = IN_FRAC - OUT_FRAC;
  localparam logic signed [IN_W-1:0] MAX_V =
    $signed({{(IN_W - OUT_W + 1){1'b0}}, {(OUT_W - 1){1'b1}}});
  localparam logic signed [IN_W-1:0] MIN_V =
    $signed({{(IN_W - OUT_W + 1){1'b1}}, {(OUT_W - 1){1'b0}}});

  logic signed [IN_W-1:0] s;

  always_comb begin
    s = d >>> SHIFT;
    if (RELU && d < 0)  q = '0;
    else if (s > MAX_V) q = MAX_V[OUT_W-1:0];
    else if (s < MIN_V) q = MIN_V[OUT_W-1:0];
    else                q = s[OUT_W-1:0];
  end

  initial begin
    assert (IN_FRAC >= OUT_FRAC && IN_W > OUT_W)
      else $error("relu_quant: needs IN_FRAC >= OUT_FRAC and IN_W > OUT_W");
  end

endmodule
