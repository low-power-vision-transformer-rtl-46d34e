// tb_token_pruning: the class attention row of H heads is streamed in as
// 8-value beats (random values 0..127), the buffer sums the heads, and
// selection is started with N tokens and keep ratio rho. The expected
// result is worked out in the testbench by sorting the per-token head sums
// (ties to the lower index) and taking the first K = ceil((N-1)*rho) of
// tokens 1..N-1. Checks the index order, K, the one-index-per-cycle
// timing (done K+2 cycles after start) and that `clear` empties the buffer.
module tb_token_pruning;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear = 0, acc_valid = 0, start = 0;
  logic [5:0] acc_tile = 0;
  act_t acc_val [N_ROWS];
  logic [8:0] n_tokens;
  logic [7:0] rho_q8;
  logic busy, done, idx_valid;
  logic [8:0] k_out;
  logic [TOK_IDX_W-1:0] idx_out, rd_addr = 0, rd_idx;
  int checks = 0, failures = 0;
  int sums [MAX_TOKENS];
  int order [$];

  token_pruning dut (.clk, .rst_n, .clear, .acc_valid, .acc_tile, .acc_val, .start,
                     .n_tokens, .rho_q8, .busy, .done, .k_out, .idx_valid, .idx_out,
                     .rd_addr, .rd_idx);
  always #5 clk = ~clk;

  task automatic run(input int n, input int rho, input int heads);
    int k, cyc, best;
    logic [MAX_TOKENS-1:0] used;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int i = 0; i < MAX_TOKENS; i++) sums[i] = 0;
    for (int h = 0; h < heads; h++) begin
      for (int t = 0; t < (n + 7) / 8; t++) begin
        @(negedge clk);
        acc_valid = 1; acc_tile = 6'(t);
        for (int r = 0; r < 8; r++) begin
          acc_val[r] = act_t'($urandom % 128);
          sums[t*8+r] += int'(acc_val[r]);
        end
      end
    end
    @(negedge clk);
    acc_valid = 0;
    k = ((n - 1) * rho + 255) / 256;
    // reference selection
    order.delete();
    used = '0;
    for (int s = 0; s < k; s++) begin
      best = -1;
      for (int i = 1; i < n; i++)
        if (!used[i] && (best < 0 || sums[i] > sums[best])) best = i;
      used[best] = 1'b1;
      order.push_back(best);
    end
    n_tokens = 9'(n); rho_q8 = 8'(rho);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != k + 2) begin failures++; $display("done after %0d cycles, expected %0d", cyc, k + 2); end
    checks++;
    if (int'(k_out) != k) begin failures++; $display("K %0d expected %0d", k_out, k); end
    for (int s = 0; s < k; s++) begin
      rd_addr = TOK_IDX_W'(s);
      #1;
      checks++;
      if (int'(rd_idx) != order[s]) begin
        failures++;
        if (failures < 10) $display("rank %0d: got %0d expected %0d", s, rd_idx, order[s]);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < 8; r++) acc_val[r] = '0;
    n_tokens = 0; rho_q8 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(197, 128, 6);   // DeiT-S: N = 197, rho = 0.5 -> K = 98
    run(197, 128, 1);
    run(65, 102, 6);    // rho ~ 0.4
    run(17, 255, 3);
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
