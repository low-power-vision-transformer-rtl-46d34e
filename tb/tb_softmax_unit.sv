// tb_softmax_unit: rows of random scores of several lengths (including a
// partly masked last tile) are fed 8 per beat. Each probability is compared
// with 128 * 2^(x_i/8) / sum_j 2^(x_j/8) computed in floating point
// (tolerance 2 LSB, saturation at 127), masked keys and padding tiles must
// be 0, and the timing must be: first output T+3 cycles after the last
// input beat, then ceil(T/8)*8 consecutive beats for a row of T tiles.
module tb_softmax_unit;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [8:0] m_valid;
  logic in_valid = 0, in_last = 0;
  logic [5:0] in_tile = 0;
  act_t in_q [N_ROWS];
  logic ready, out_valid, out_last, row_done;
  logic [5:0] out_tile;
  act_t out_q [N_ROWS];
  int checks = 0, failures = 0;
  int scores [MAX_TOKENS];

  softmax_unit dut (.clk, .rst_n, .m_valid, .in_valid, .in_tile, .in_last, .in_q,
                    .ready, .out_valid, .out_tile, .out_last, .out_q, .row_done);
  always #5 clk = ~clk;

  task automatic run_row(input int tiles, input int valid, input int spread);
    real sum = 0.0;
    int  wait_c, beats;
    for (int i = 0; i < tiles * 8; i++) begin
      scores[i] = int'($urandom % spread) - spread / 2;
      if (scores[i] > 127) scores[i] = 127;
      if (scores[i] < -128) scores[i] = -128;
      if (i < valid) sum += 2.0 ** (real'(scores[i]) / 8.0);
    end
    m_valid = 9'(valid);
    for (int t = 0; t < tiles; t++) begin
      @(negedge clk);
      in_valid = 1; in_tile = 6'(t); in_last = (t == tiles - 1);
      for (int r = 0; r < 8; r++) in_q[r] = act_t'(scores[t*8+r]);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    wait_c = 1;
    while (!out_valid && wait_c < 1000) begin @(negedge clk); wait_c++; end
    checks++;
    if (wait_c != tiles + 3) begin
      failures++;
      $display("latency %0d expected %0d", wait_c, tiles + 3);
    end
    beats = 0;
    while (out_valid) begin
      checks++;
      if (int'(out_tile) != beats) begin failures++; $display("tile order"); end
      for (int r = 0; r < 8; r++) begin
        int k = beats * 8 + r;
        real p;
        int  ei;
        if (k < valid) begin
          p = 128.0 * (2.0 ** (real'(scores[k]) / 8.0)) / sum;
          ei = (p > 127.0) ? 127 : int'($floor(p));
        end else ei = 0;
        checks++;
        if (int'(out_q[r]) < ei - 2 || int'(out_q[r]) > ei + 2 || (k >= valid && out_q[r] != 0)) begin
          failures++;
          $display("key %0d got %0d expected about %0d", k, out_q[r], ei);
        end
      end
      beats++;
      @(negedge clk);
    end
    checks++;
    if (beats != ((tiles + 7) / 8) * 8) begin
      failures++;
      $display("beats %0d expected %0d", beats, ((tiles + 7) / 8) * 8);
    end
  endtask

  initial begin
    for (int r = 0; r < 8; r++) in_q[r] = '0;
    m_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_row(1, 8, 40);
    run_row(2, 13, 60);
    run_row(25, 197, 80);
    run_row(25, 197, 255);
    run_row(32, 256, 30);
    run_row(9, 70, 20);
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
