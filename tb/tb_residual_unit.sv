// tb_residual_unit: all pairs of INT8 values (lanes offset from each other)
// with the unit enabled (sum saturated to [-128,127]) and disabled (first
// operand passes).
module tb_residual_unit;
  import vit_pkg::*;
  logic en;
  act_t a [N_ROWS], b [N_ROWS], q [N_ROWS];
  int checks = 0, failures = 0;

  residual_unit dut (.en, .a, .b, .q);

  initial begin
    for (int e = 0; e < 2; e++) begin
      en = e[0];
      for (int x = -128; x < 128; x++) begin
        for (int y = -128; y < 128; y += 3) begin
          for (int l = 0; l < N_ROWS; l++) begin a[l] = act_t'(x); b[l] = act_t'(y + l); end
          #1;
          for (int l = 0; l < N_ROWS; l++) begin
            int s, ev;
            s = int'(a[l]) + int'(b[l]);
            ev = !en ? int'(a[l]) : (s > 127 ? 127 : (s < -128 ? -128 : s));
            checks++;
            if (int'(q[l]) != ev) begin
              failures++;
              if (failures < 10) $display("en=%0d %0d+%0d got %0d expected %0d", en, a[l], b[l], q[l], ev);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
