// tb_accumulator: feeds runs of 1..24 beats of random partial sums from
// the 8 groups (as for K = 64 .. 1536) and checks that exactly one output
// beat appears, one cycle after the last input beat, carrying the full
// sums over groups and beats and the tag of the last beat.
module tb_accumulator;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  logic [31:0] tag_in = 0, tag_out;
  logic signed [PSUM_W-1:0] psum [N_GROUPS][N_ROWS];
  logic signed [ACC_W-1:0]  acc_out [N_ROWS];
  longint expv [N_ROWS];
  int checks = 0, failures = 0;

  accumulator dut (.clk, .rst_n, .in_valid, .first, .last, .tag_in, .psum,
                   .out_valid, .tag_out, .acc_out);
  always #5 clk = ~clk;

  initial begin
    for (int g = 0; g < N_GROUPS; g++) for (int r = 0; r < N_ROWS; r++) psum[g][r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int beats = 1 + ($urandom % 24);
      for (int r = 0; r < N_ROWS; r++) expv[r] = 0;
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        if (b > 0) begin
          checks++;
          if (out_valid) begin failures++; $display("early output"); end
        end
        in_valid = 1; first = (b == 0); last = (b == beats - 1);
        tag_in = $urandom;
        for (int g = 0; g < N_GROUPS; g++)
          for (int r = 0; r < N_ROWS; r++) begin
            psum[g][r] = PSUM_W'($signed(($urandom % 260000)) - 130000);
            expv[r] += longint'(psum[g][r]);
          end
      end
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no output after last beat"); end
      checks++;
      if (tag_out != tag_in) begin failures++; $display("tag mismatch"); end
      for (int r = 0; r < N_ROWS; r++) begin
        checks++;
        if (longint'(acc_out[r]) != expv[r]) begin
          failures++;
          $display("row %0d got %0d expected %0d", r, acc_out[r], expv[r]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("output longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
