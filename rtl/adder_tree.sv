// adder_tree: combinational reduction tree that sums N signed inputs.
//
// Stage s adds neighbouring pairs of stage s-1 (an odd last element passes
// through), and each stage is one bit wider than the one before it
// ("increasing precision"). For N = 400 the stages hold 200, 100, 50, 25, 13,
// 7, 4, 2 and 1 values: 9 adder stages, and 8-bit products give a 17-bit sum.
// The result is exact: no bit is dropped at any stage. Output is valid in the
// same cycle as the inputs.
// The 9-stage, widening structure follows the published design. The published
// text also says the last stage is 16 bits wide; with signed 8-bit products an
// exact 400-term sum needs 17 bits, so this design keeps the exact width.
module adder_tree #(
  parameter int unsigned N = apu_pkg::BLOCK,
  parameter int unsigned W = apu_pkg::PROD_W,
  localparam int unsigned STAGES = (N > 1) ? $clog2(N) : 0,
  localparam int unsigned OUT_W  = W + STAGES
) (
  input  logic signed [N-1:0][W-1:0] in,
  output logic signed [OUT_W-1:0]    sum
);
  // number of values held after stage s
  function automatic int unsigned count_at(int unsigned s);
    int unsigned c = N;
    for (int unsigned k = 0; k < s; k++) c = (c + 1) / 2;
    return c;
  endfunction

  for (genvar s = 0; s <= STAGES; s++) begin : g_st
    localparam int unsigned C  = count_at(s);
    localparam int unsigned SW = W + s;
    logic signed [SW-1:0] v [C];
    if (s == 0) begin : g_in
      for (genvar i = 0; i < C; i++) begin : g_i
        assign v[i] = $signed(in[i]);
      end
    end else begin : g_add
      localparam int unsigned PC = count_at(s - 1);
      for (genvar i = 0; i < C; i++) begin : g_i
        if (2 * i + 1 < PC) begin : g_pair
          assign v[i] = SW'(g_st[s-1].v[2*i]) + SW'(g_st[s-1].v[2*i+1]);
        end else begin : g_pass
          assign v[i] = SW'(g_st[s-1].v[2*i]);
        end
      end
    end
  end

  assign sum = g_st[STAGES].v[0];
endmodule
