// relu_unit: ReLU on 8 INT8 lanes, optional per call.
//
// The accelerator replaces GELU by ReLU in the FFN, so the activation unit
// is only a sign test: negative lanes become zero when `en` is high, every
// lane passes unchanged when `en` is low (layers without activation share
// the same output path). Combinational.
module relu_unit
  import vit_pkg::*;
#(
  parameter int unsigned LANES = N_ROWS
) (
  input  logic en,
  input  act_t d [LANES],
  output act_t q [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) q[i] = (en && d[i] < 0) ? '0 : d[i];
  end
endmodule
