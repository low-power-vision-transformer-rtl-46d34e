// tb_system_controller: runs commands in both output orders and checks the
// exact sequence of issued chunks (mt, n, kt), the three read addresses
// derived from them, the number of issue cycles (M/8 * N * K/64), the
// pauses of softmax commands until row_done and of pruning commands between
// columns, and the `done` pulse after the drain.
module tb_system_controller;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sm_row_done = 0;
  cmd_t cmd_in, cmd;
  logic busy, done, issue, issue_first, issue_last;
  logic [5:0] issue_mt;
  logic [10:0] issue_n;
  logic [4:0] issue_kt;
  logic [9:0] x_addr, w_addr, wt_addr;
  int checks = 0, failures = 0;
  int seq_mt [$], seq_n [$], seq_kt [$];
  int n_issue, rows_pending;

  system_controller dut (.clk, .rst_n, .start, .cmd_in, .sm_row_done, .cmd, .busy, .done,
                         .issue, .issue_first, .issue_last, .issue_mt, .issue_n, .issue_kt,
                         .x_addr, .w_addr, .wt_addr);
  always #5 clk = ~clk;

  task automatic run(input int mts, input int ks, input int ns, input bit col, input bit sm,
                     input bit pr, input int xb, input int wb);
    int idx = 0, cyc = 0, gaps = 0;
    bit prev_issue = 0;
    int last_n = -1;
    seq_mt.delete(); seq_n.delete(); seq_kt.delete();
    if (!col) begin
      for (int m = 0; m < mts; m++) for (int n = 0; n < ns; n++) for (int k = 0; k < ks; k++) begin
        seq_mt.push_back(m); seq_n.push_back(n); seq_kt.push_back(k);
      end
    end else begin
      for (int n = 0; n < ns; n++) for (int m = 0; m < mts; m++) for (int k = 0; k < ks; k++) begin
        seq_mt.push_back(m); seq_n.push_back(n); seq_kt.push_back(k);
      end
    end
    cmd_in = '0;
    cmd_in.m_tiles = 6'(mts); cmd_in.k_chunks = 5'(ks); cmd_in.n_cols = 11'(ns);
    cmd_in.col_order = col; cmd_in.softmax = sm; cmd_in.prune = pr;
    cmd_in.x_base = 10'(xb); cmd_in.w_base = 10'(wb);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    n_issue = 0;
    while (!done && cyc < 5000) begin
      if (issue) begin
        checks++;
        if (idx >= seq_mt.size() || issue_mt != 6'(seq_mt[idx]) || issue_n != 11'(seq_n[idx]) ||
            issue_kt != 5'(seq_kt[idx]) || issue_first != (seq_kt[idx] == 0) ||
            issue_last != (seq_kt[idx] == ks - 1) ||
            x_addr != 10'(xb + seq_mt[idx] * ks + seq_kt[idx]) ||
            w_addr != 10'(wb + seq_n[idx] * ks + seq_kt[idx]) ||
            wt_addr != 10'(wb + (seq_n[idx] / 8) * ks + seq_kt[idx])) begin
          failures++;
          if (failures < 10) $display("issue %0d wrong: mt %0d n %0d kt %0d", idx, issue_mt, issue_n, issue_kt);
        end
        if (last_n >= 0 && int'(issue_n) != last_n && col && pr) begin
          checks++;
          if (gaps < 3) begin failures++; $display("no gap between pruned columns"); end
        end
        last_n = int'(issue_n);
        gaps = 0;
        idx++;
      end else gaps++;
      // softmax: answer each finished row after a delay
      if (sm && !issue && prev_issue) begin
        fork begin repeat (20) @(negedge clk); sm_row_done = 1; @(negedge clk); sm_row_done = 0; end join_none
      end
      prev_issue = issue;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (idx != mts * ns * ks) begin failures++; $display("issued %0d expected %0d", idx, mts * ns * ks); end
    checks++;
    if (!done) begin failures++; $display("no done"); end
    if (!sm && !pr) begin
      checks++;
      // issue cycles + drain (6) + 1
      if (cyc != mts * ns * ks + 7) begin failures++; $display("run took %0d cycles expected %0d", cyc, mts * ns * ks + 7); end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    cmd_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 6, 5, 0, 0, 0, 4, 10);    // row-wise output, K = 384
    run(2, 1, 7, 1, 0, 0, 0, 0);     // column-wise output
    run(4, 2, 3, 1, 0, 1, 1, 3);     // FFN1 with pruning gaps
    run(3, 1, 4, 1, 1, 0, 0, 2);     // Q x K^T with softmax waits
    run(1, 1, 1, 0, 0, 0, 0, 0);
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
