// tb_relu_unit: every INT8 value on every lane, with the unit enabled
// (negative values must become 0) and disabled (values pass unchanged).
module tb_relu_unit;
  import vit_pkg::*;
  logic en;
  act_t d [N_ROWS], q [N_ROWS];
  int checks = 0, failures = 0;

  relu_unit dut (.en, .d, .q);

  initial begin
    for (int e = 0; e < 2; e++) begin
      en = e[0];
      for (int v = -128; v < 128; v++) begin
        for (int l = 0; l < N_ROWS; l++) d[l] = act_t'(v + l * 31);
        #1;
        for (int l = 0; l < N_ROWS; l++) begin
          int iv, ev;
          iv = int'(d[l]);
          ev = (en && iv < 0) ? 0 : iv;
          checks++;
          if (int'(q[l]) != ev) begin
            failures++;
            $display("en=%0d in=%0d got %0d expected %0d", en, iv, q[l], ev);
          end
        end
      end
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
