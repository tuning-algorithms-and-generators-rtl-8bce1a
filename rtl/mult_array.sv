// mult_array: the row of parallel multipliers of a processing element.
//
// Multiplies each of the N latched input activations with the matching weight
// of one weight-SRAM row, all in the same cycle (spatial processing: one
// output activation per cycle). Weights are signed INT4, activations are
// unsigned INT4 because they come out of a ReLU; each product is a signed
// 8-bit value (-8*15 = -120 .. 7*15 = 105). Purely combinational.
// The count of 400 multipliers and the 4-bit precision follow the published
// design; the signed/unsigned split is this design's choice.
module mult_array #(
  parameter int unsigned N   = apu_pkg::BLOCK,
  parameter int unsigned W_W = apu_pkg::W_W,
  parameter int unsigned A_W = apu_pkg::A_W
) (
  input  logic [N-1:0][W_W-1:0]            weights,  // one SRAM row, signed
  input  logic [N-1:0][A_W-1:0]            acts,     // latched activations, unsigned
  output logic signed [N-1:0][W_W+A_W-1:0] prods
);
  for (genvar i = 0; i < N; i++) begin : g_mul
    // evaluated at the 8-bit width of the result, which always holds it
    assign prods[i] = $signed(weights[i]) * $signed({1'b0, acts[i]});
  end
endmodule
