// pe_group: one PE group, N_ROWS PE arrays sharing N_MACS broadcast weights.
//
// PE array r receives the 8 input elements of token row r, all arrays share
// the same 8 weights (column-wise weight broadcasting). In the fully
// connected mapping PE group g handles reduction indices g*8 .. g*8+7 of a
// 64-element chunk, so each cycle it produces, for each of the 8 token rows,
// the partial dot product over its 8 indices. The 8 partial sums are
// registered (one cycle of latency) together with a valid bit; en gates the
// register so the array holds its value when idle.
module pe_group
  import vit_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned MACS = N_MACS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  act_t                     x [ROWS][MACS],
  input  act_t                     w [MACS],
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] psum [ROWS]
);
  logic signed [PSUM_W-1:0] psum_c [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_array
    pe_array #(.MACS(MACS)) u_array (
      .x   (x[r]),
      .w   (w),
      .psum(psum_c[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < ROWS; r++) psum[r] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) psum <= psum_c;
    end
  end
endmodule
