// residual_unit: residual (skip-connection) addition on 8 INT8 lanes.
//
// Adds the INT8 value of the block input (or of an earlier partial result)
// to each lane and saturates to [-128, 127]; when `en` is low the lanes pass
// unchanged. The paper names the Residual block; the saturating INT8 add
// with a shared scale is this design's choice. Combinational.
module residual_unit
  import vit_pkg::*;
#(
  parameter int unsigned LANES = N_ROWS
) (
  input  logic en,
  input  act_t a [LANES],
  input  act_t b [LANES],
  output act_t q [LANES]
);
  logic signed [DATA_W:0] s;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      s = {a[i][DATA_W-1], a[i]} + {b[i][DATA_W-1], b[i]};
      if (!en)           q[i] = a[i];
      else if (s > 127)  q[i] = 8'sd127;
      else if (s < -128) q[i] = -8'sd128;
      else               q[i] = act_t'(s);
    end
  end
endmodule
