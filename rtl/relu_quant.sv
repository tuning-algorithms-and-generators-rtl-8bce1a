// relu_quant: bias add, ReLU and requantization of one adder-tree result.
//
// out = min(2^A_W - 1, max(0, sum + bias) >> shift)
// The sum of the adder tree is exact (17 bits for 400 INT4 products); the
// quantizer maps it back to an unsigned A_W-bit activation for the next layer.
// Quantization happens only here, at the end of the tree, as in the published
// design. The rounding (truncating right shift), the saturation and the
// programmable shift are this design's choices: the text names a "quantizer"
// without giving its rule. Combinational.
module relu_quant #(
  parameter int unsigned IN_W   = apu_pkg::PROD_W + $clog2(apu_pkg::BLOCK),
  parameter int unsigned BIAS_W = apu_pkg::BIAS_W,
  parameter int unsigned A_W    = apu_pkg::A_W,
  parameter int unsigned SH_W   = 5
) (
  input  logic signed [IN_W-1:0]   sum,
  input  logic signed [BIAS_W-1:0] bias,
  input  logic        [SH_W-1:0]   shift,
  output logic        [A_W-1:0]    act,
  output logic                     clipped_neg,  // ReLU zeroed a negative value
  output logic                     saturated     // value exceeded the output range
);
  localparam int unsigned SW = ((IN_W > BIAS_W) ? IN_W : BIAS_W) + 1;
  logic signed [SW-1:0] biased;
  logic        [SW-1:0] shifted;

  always_comb begin
    biased      = SW'(sum) + SW'(bias);
    shifted     = SW'(biased) >> shift;
    clipped_neg = biased[SW-1];
    saturated   = 1'b0;
    if (biased[SW-1]) begin
      act = '0;
    end else if (shifted > SW'((1 << A_W) - 1)) begin
      act       = '1;
      saturated = 1'b1;
    end else begin
      act = shifted[A_W-1:0];
    end
  end
endmodule
