// accumulator: row-wise accumulation of the PE-group partial sums.
//
// Each cycle the 8 PE groups each deliver one partial sum per token row
// (8 rows). The accumulator adds the 8 group results of a row (all groups
// work on the same output element, each over its own 8 reduction indices)
// and adds that to the running sum of the row. A beat flagged `first`
// restarts the sum, a beat flagged `last` makes the 8 finished sums appear
// on `acc_out` with `out_valid` high for one cycle, in the cycle after the
// last beat. With K = 384 (6 chunks of 64) one output beat of 8 elements
// leaves every 6 cycles, as in the paper's example. The tag input (output
// coordinates) is carried alongside so later stages know where the 8 values
// belong. The paper describes the buffer and the row-wise combination; the
// first/last framing is this design's choice.
module accumulator
  import vit_pkg::*;
#(
  parameter int unsigned GROUPS = N_GROUPS,
  parameter int unsigned ROWS   = N_ROWS,
  parameter int unsigned TAG_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [TAG_W-1:0]         tag_in,
  input  logic signed [PSUM_W-1:0] psum [GROUPS][ROWS],
  output logic                     out_valid,
  output logic [TAG_W-1:0]         tag_out,
  output logic signed [ACC_W-1:0]  acc_out [ROWS]
);
  logic signed [ACC_W-1:0] acc_q [ROWS];
  logic signed [ACC_W-1:0] acc_d [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      acc_d[r] = first ? '0 : acc_q[r];
      for (int g = 0; g < GROUPS; g++) acc_d[r] = acc_d[r] + ACC_W'(psum[g][r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      tag_out   <= '0;
      for (int r = 0; r < ROWS; r++) begin
        acc_q[r]   <= '0;
        acc_out[r] <= '0;
      end
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc_q <= acc_d;
        if (last) begin
          acc_out <= acc_d;
          tag_out <= tag_in;
        end
      end
    end
  end
endmodule
