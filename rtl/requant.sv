// requant: converts 8 accumulator sums back to INT8.
//
// Each lane is shifted right arithmetically by `shift` (the fixed-point
// scale of the layer) and saturated to [-128, 127]. Combinational. The paper
// states only that weights and activations are INT8; the power-of-two
// scaling with saturation is this design's choice.
module requant
  import vit_pkg::*;
#(
  parameter int unsigned LANES = N_ROWS
) (
  input  logic signed [ACC_W-1:0] acc [LANES],
  input  logic [4:0]              shift,
  output act_t                    q   [LANES]
);
  logic signed [ACC_W-1:0] s;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      s = acc[i] >>> shift;
      if (s > 127)       q[i] = 8'sd127;
      else if (s < -128) q[i] = -8'sd128;
      else               q[i] = act_t'(s);
    end
  end
endmodule
