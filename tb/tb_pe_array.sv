// tb_pe_array: random vectors through one PE array; the expected value is
// the plain integer dot product of the 8 inputs and 8 weights, including
// the extreme case of all -128.
module tb_pe_array;
  import vit_pkg::*;
  act_t x [N_MACS];
  act_t w [N_MACS];
  logic signed [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  pe_array dut (.x, .w, .psum);

  task automatic check();
    int exp_v = 0;
    for (int j = 0; j < N_MACS; j++) exp_v += int'(x[j]) * int'(w[j]);
    #1;
    checks++;
    if (int'(psum) != exp_v) begin
      failures++;
      $display("mismatch: got %0d expected %0d", psum, exp_v);
    end
  endtask

  initial begin
    for (int j = 0; j < N_MACS; j++) begin x[j] = -8'sd128; w[j] = -8'sd128; end
    check();
    for (int t = 0; t < 500; t++) begin
      for (int j = 0; j < N_MACS; j++) begin x[j] = act_t'($urandom); w[j] = act_t'($urandom); end
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
