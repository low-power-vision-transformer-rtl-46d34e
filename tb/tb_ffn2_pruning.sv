// tb_ffn2_pruning: streams the post-ReLU FFN1 output of D hidden dimensions,
// B beats of 8 values per dimension, with random idle cycles in between.
// The testbench sums each dimension itself, keeps those whose sum exceeds
// the threshold, and expects them in groups of 8 on output_ready (the last
// partial group after flush), plus one dim_done / dim_keep pulse per
// dimension one cycle after its last beat.
module tb_ffn2_pruning;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en = 0, flush = 0;
  act_t post_act [N_ROWS];
  logic [10:0] dim_index = 0;
  logic [5:0] beats_per_dim;
  logic [15:0] threshold;
  logic dim_done, dim_keep, output_ready;
  logic [3:0] needed_cnt;
  logic [10:0] needed_idx [8];
  int checks = 0, failures = 0;
  int expected [$], got [$];
  int n_done = 0, n_keep = 0, exp_keep = 0;

  ffn2_pruning dut (.clk, .rst_n, .en, .post_act, .dim_index, .beats_per_dim, .threshold,
                    .flush, .dim_done, .dim_keep, .output_ready, .needed_cnt, .needed_idx);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dim_done) n_done++;
    if (dim_keep) n_keep++;
    if (output_ready) begin
      if (needed_cnt != 8 && !flush) begin
        // partial groups only come from flush, which is checked below
      end
      for (int i = 0; i < int'(needed_cnt); i++) got.push_back(int'(needed_idx[i]));
    end
  end

  task automatic run(input int dims, input int beats, input int thr, input int sparsity);
    beats_per_dim = 6'(beats);
    threshold = 16'(thr);
    for (int d = 0; d < dims; d++) begin
      int s = 0;
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        en = 1; dim_index = 11'(d);
        for (int r = 0; r < 8; r++) begin
          post_act[r] = (($urandom % 100) < sparsity) ? '0 : act_t'($urandom % 20);
          s += int'(post_act[r]);
        end
        if ($urandom % 4 == 0) begin
          @(negedge clk);
          en = 0;
        end
      end
      if (s > thr) begin expected.push_back(d); exp_keep++; end
      if ($urandom % 2 == 0) begin
        @(negedge clk);
        en = 0;
      end
    end
    @(negedge clk);
    en = 0;
    repeat (3) @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    for (int r = 0; r < 8; r++) post_act[r] = '0;
    beats_per_dim = 1; threshold = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(96, 25, 400, 70);   // 197 tokens -> 25 beats per dimension
    run(64, 48, 700, 60);   // the paper's example of 48 beats
    run(40, 1, 15, 50);
    checks++;
    if (n_done != 96 + 64 + 40) begin failures++; $display("dim_done count %0d", n_done); end
    checks++;
    if (n_keep != exp_keep) begin failures++; $display("dim_keep count %0d expected %0d", n_keep, exp_keep); end
    checks++;
    if (got.size() != expected.size()) begin
      failures++;
      $display("indices %0d expected %0d", got.size(), expected.size());
    end
    for (int i = 0; i < expected.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != expected[i]) begin
        failures++;
        if (failures < 10) $display("index %0d: got %0d expected %0d", i, got[i], expected[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
