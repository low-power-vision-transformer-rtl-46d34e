// pe_array: one PE array of a PE group, a row of N_MACS INT8 multiply-accumulate units.
//
// Each MAC multiplies its own input element x[j] (a different reduction
// index of the same token row) by the weight w[j] that is broadcast down
// column j of the PE group, and the products are added along the row into
// a single partial sum, as drawn in the PE-group diagram of the paper
// (multiplier feeding an adder chain towards the output buffer).
// Purely combinational; the enclosing pe_group registers the result.
// Widths: signed INT8 in, PSUM_W-bit signed sum out (8 x 16-bit products).
module pe_array
  import vit_pkg::*;
#(
  parameter int unsigned MACS = N_MACS
) (
  input  act_t                     x [MACS],
  input  act_t                     w [MACS],
  output logic signed [PSUM_W-1:0] psum
);
  always_comb begin
    psum = '0;
    for (int j = 0; j < MACS; j++) begin
      psum = psum + PSUM_W'(x[j] * w[j]);
    end
  end
endmodule
