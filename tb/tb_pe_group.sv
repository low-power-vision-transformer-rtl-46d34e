// tb_pe_group: drives random 8x8 inputs and 8 broadcast weights and checks,
// one clock later, that row r holds sum_j x[r][j]*w[j] and that valid
// follows in_valid with one cycle of latency.
module tb_pe_group;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t x [N_ROWS][N_MACS];
  act_t w [N_MACS];
  logic signed [PSUM_W-1:0] psum [N_ROWS];
  int checks = 0, failures = 0;
  int expv [N_ROWS];

  pe_group dut (.clk, .rst_n, .in_valid, .x, .w, .out_valid, .psum);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int r = 0; r < N_ROWS; r++)
        for (int j = 0; j < N_MACS; j++) x[r][j] = act_t'($urandom);
      for (int j = 0; j < N_MACS; j++) w[j] = act_t'($urandom);
      in_valid = 1;
      for (int r = 0; r < N_ROWS; r++) begin
        expv[r] = 0;
        for (int j = 0; j < N_MACS; j++) expv[r] += int'(x[r][j]) * int'(w[j]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("valid missing"); end
      for (int r = 0; r < N_ROWS; r++) begin
        checks++;
        if (int'(psum[r]) != expv[r]) begin
          failures++;
          $display("row %0d got %0d expected %0d", r, psum[r], expv[r]);
        end
      end
      x[0][0] = act_t'($urandom);
      w[0]    = act_t'($urandom | 1);
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("valid stuck"); end
      // psum is held while no new operands arrive
      for (int r = 0; r < N_ROWS; r++) begin
        checks++;
        if (int'(psum[r]) != expv[r]) begin failures++; $display("row %0d not held", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
