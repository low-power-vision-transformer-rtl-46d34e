// tb_deit_s: DeiT-Small sized workload on the top level, default sizes.
//
// One head of one DeiT-S encoder layer at the model's real dimensions:
// N = 197 tokens (25 token tiles, the last one partly filled), embedding
// 384 (6 reduction chunks), head dimension 64. Steps:
//   Q = X Wq (row-wise) and K = X Wk (column-wise), 197 x 384 x 64 each;
//   scores of the first 8 queries against all 197 keys with row softmax and
//   class attention capture (keys 197..255 masked);
//   Top-K token selection with N = 197 and rho = 0.5, so K = 98;
//   one block of 64 FFN hidden dimensions: H = ReLU(X W1) with FFN2 pruning
//   (beats per dimension = 25 token tiles), then FFN2 on the kept
//   dimensions only for 64 output columns, with the residual X added;
//   the complete FFN of the 99 kept tokens (class token + 98) with the
//   full hidden size 1536 in the interleaved order: 24 blocks of FFN1 for
//   64 hidden dimensions with pruning, each followed by FFN2 on the kept
//   rows of that block, whose partial result is added to the running
//   output Y (residual taken from Y itself, starting from Y = O).
// Every stored result is read back over the data bus and compared with an
// integer model kept here; softmax outputs are compared with a floating-
// point softmax (2 LSB). The number of issue cycles of every command must
// be m_tiles * n_cols * k_chunks (one 8x64 step per cycle) and the number
// of accumulator output beats m_tiles * n_cols (8 outputs per beat). Token
// selection must take K+2 cycles.
module tb_deit_s;
  import vit_pkg::*;

  localparam int T  = 197;  // tokens
  localparam int TT = 25;   // token tiles
  localparam int D  = 384;  // embedding
  localparam int HD = 64;   // head dimension
  localparam int FB = 64;   // FFN hidden dimensions in this block
  localparam int NQ = 8;    // queries whose softmax rows are computed
  localparam int F  = 1536; // FFN hidden dimension
  localparam int TK = 99;   // tokens after pruning

  logic clk = 0, rst_n = 0;
  logic bus_we = 0, bus_re = 0;
  logic [2:0] bus_target = 0;
  logic [5:0] bus_bank = 0;
  logic [9:0] bus_addr = 0;
  logic [63:0] bus_wdata = 0, bus_rdata;
  logic bus_rvalid;
  logic cmd_start = 0;
  cmd_t cmd_in;
  logic busy, done;
  logic tp_clear = 0, tp_start = 0, tp_busy, tp_done;
  logic [8:0] tp_n_tokens = 0, tp_k;
  logic [7:0] tp_rho_q8 = 0, tp_rd_addr = 0, tp_rd_idx;
  logic ffn2_flush = 0, ffn2_ready;
  logic [3:0] ffn2_cnt;
  logic [10:0] ffn2_idx [8];
  logic [10:0] ffn2_kept;

  vit_accel dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // issue cycles and accumulator beats of the running command
  int n_issue = 0, n_acc = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue) n_issue++;
    if (dut.acc_valid) n_acc++;
  end

  int X [T][D], Wq [D][HD], Wk [D][HD], W1 [D][FB], W2 [FB][HD];
  int Q [T][HD], K [T][HD], S [NQ][T], P [NQ][256], H [T][FB], Y [T][HD];
  int kept_list [$];
  int W1f [D][F], W2f [F][D], O [TK][D], Hf [TK][F], Yf [TK][D];
  int blk;
  int got_idx [$];

  always @(posedge clk) if (rst_n && ffn2_ready) for (int i = 0; i < int'(ffn2_cnt); i++) got_idx.push_back(int'(ffn2_idx[i]));

  function automatic int rq(input longint s, input int sh);
    longint v = s >>> sh;
    return v > 127 ? 127 : (v < -128 ? -128 : int'(v));
  endfunction

  function automatic int sat8(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  task automatic expect_eq(input string what, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  // ---------------- bus helpers ----------------
  task automatic bus_write(input bus_target_e tg, input int bank, input int addr, input logic [63:0] d);
    @(negedge clk);
    bus_we = 1; bus_target = tg; bus_bank = 6'(bank); bus_addr = 10'(addr); bus_wdata = d;
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic bus_read(input bus_target_e tg, input int bank, input int addr, output logic [63:0] d);
    @(negedge clk);
    bus_re = 1; bus_target = tg; bus_bank = 6'(bank); bus_addr = 10'(addr);
    @(negedge clk);
    bus_re = 0;
    d = bus_rdata;
  endtask

  task automatic read_elem(input bus_target_e tg, input int base, input int stride, input int t,
                           input int c, output int v);
    logic [63:0] w;
    bus_read(tg, (t % 8) * 8 + (c % 64) / 8, base + (t / 8) * stride + c / 64, w);
    v = int'($signed(w[(c % 8) * 8 +: 8]));
  endtask

  // W[k][n] -> bank (k%64)/8, addr base + n*kch + k/64, byte k%8; sel: 0 Wq 1 Wk 2 W1 3 W2 kept rows
  task automatic load_w(input bus_target_e tg, input int base, input int kdim, input int ndim,
                        input int sel);
    int kch = (kdim + 63) / 64;
    for (int n = 0; n < ndim; n++)
      for (int kc = 0; kc < kch; kc++)
        for (int g = 0; g < 8; g++) begin
          logic [63:0] w = '0;
          for (int j = 0; j < 8; j++) begin
            int k = kc * 64 + g * 8 + j;
            int v = 0;
            if (k < kdim) begin
              case (sel)
                0: v = Wq[k][n];
                1: v = Wk[k][n];
                2: v = W1[k][n];
                3: v = (k < kept_list.size()) ? W2[kept_list[k]][n] : 0;
                4: v = W1f[k][blk * 64 + n];
                default: v = (k < kept_list.size()) ? W2f[blk * 64 + kept_list[k]][n] : 0;
              endcase
            end
            w[j*8 +: 8] = 8'(v);
          end
          bus_write(tg, g, base + n * kch + kc, w);
        end
  endtask

  function automatic cmd_t base_cmd(input int mt, input int kch, input int n);
    cmd_t c = '0;
    c.m_tiles = 6'(mt); c.m_valid = 9'(T); c.k_chunks = 5'(kch); c.k_len = 11'(kch * 64);
    c.n_cols = 11'(n);
    return c;
  endfunction

  task automatic run_cmd(input string what, input cmd_t c);
    int t0;
    @(negedge clk);
    n_issue = 0; n_acc = 0;
    cmd_in = c;
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    t0 = cycle;
    while (!done && cycle - t0 < 200000) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("%s did not finish", what); end
    expect_eq({what, " issue cycles"}, n_issue, int'(c.m_tiles) * int'(c.n_cols) * int'(c.k_chunks));
    expect_eq({what, " output beats"}, n_acc, int'(c.m_tiles) * int'(c.n_cols));
    $display("%s: %0d cycles", what, cycle - t0);
  endtask

  task automatic run_all();
    cmd_t c;
    int v, t0, thr, kexp;
    int sums [FB];
    int srt [$];
    int cand [$];
    logic [63:0] w;

    cmd_in = '0;
    for (int t = 0; t < T; t++) for (int d = 0; d < D; d++) X[t][d] = int'($urandom % 61) - 30;
    for (int i = 0; i < D; i++) for (int j = 0; j < HD; j++) begin
      Wq[i][j] = int'($urandom % 41) - 20;
      Wk[i][j] = int'($urandom % 41) - 20;
    end
    for (int i = 0; i < D; i++) for (int j = 0; j < FB; j++) W1[i][j] = int'($urandom % 41) - 20;
    for (int i = 0; i < FB; i++) for (int j = 0; j < HD; j++) W2[i][j] = int'($urandom % 41) - 20;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // X: token SRAM base 0, stride 6 (25 tiles x 6 chunks = 150 words per bank)
    for (int t8 = 0; t8 < TT; t8++)
      for (int c64 = 0; c64 < D / 64; c64++)
        for (int b = 0; b < 64; b++) begin
          w = '0;
          for (int j = 0; j < 8; j++) begin
            int t = t8 * 8 + b / 8, cc = c64 * 64 + (b % 8) * 8 + j;
            if (t < T) w[j*8 +: 8] = 8'(X[t][cc]);
          end
          bus_write(BUS_TOKEN, b, t8 * 6 + c64, w);
        end
    load_w(BUS_WSET0, 0, D, HD, 0);
    load_w(BUS_WSET1, 0, D, HD, 1);

    // ---- Q = X Wq, row-wise -> temp2 base 0
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * Wq[k][n];
      Q[t][n] = rq(s, 7);
    end
    c = base_cmd(TT, 6, HD);
    c.x_src = MEM_TOKEN; c.w_src = WSRC_SET0;
    c.dst = MEM_TEMP2; c.dst_stride = 1; c.shift = 7;
    run_cmd("Q", c);
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      read_elem(BUS_TEMP2, 0, 1, t, n, v); expect_eq("Q", v, Q[t][n]);
    end

    // ---- K = X Wk, column-wise -> temp1 base 0
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * Wk[k][n];
      K[t][n] = rq(s, 7);
    end
    c = base_cmd(TT, 6, HD);
    c.col_order = 1; c.x_src = MEM_TOKEN; c.w_src = WSRC_SET1;
    c.dst = MEM_TEMP1; c.dst_stride = 1; c.shift = 7;
    run_cmd("K", c);
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      read_elem(BUS_TEMP1, 0, 1, t, n, v); expect_eq("K", v, K[t][n]);
    end

    // ---- scores of queries 0..7 against 197 keys, softmax -> token base 150 (rows of 4 chunks)
    for (int q = 0; q < NQ; q++) for (int t = 0; t < T; t++) begin
      longint s = 0;
      for (int k = 0; k < HD; k++) s += K[t][k] * Q[q][k];
      S[q][t] = rq(s, 9);
    end
    @(negedge clk); tp_clear = 1; @(negedge clk); tp_clear = 0;
    c = base_cmd(TT, 1, NQ);
    c.col_order = 1; c.x_src = MEM_TEMP1; c.w_src = WSRC_TEMP2;
    c.dst = MEM_TOKEN; c.dst_base = 150; c.dst_stride = 4; c.shift = 9;
    c.softmax = 1; c.cls_capture = 1;
    run_cmd("softmax", c);
    for (int q = 0; q < NQ; q++) begin
      real sum = 0.0;
      for (int t = 0; t < T; t++) sum += 2.0 ** (real'(S[q][t]) / 8.0);
      for (int t = 0; t < 256; t++) begin
        real p;
        read_elem(BUS_TOKEN, 150, 4, q, t, v);
        P[q][t] = v;
        checks++;
        if (t >= T) begin
          if (v != 0) begin failures++; $display("masked key %0d of query %0d = %0d", t, q, v); end
        end else begin
          p = 128.0 * 2.0 ** (real'(S[q][t]) / 8.0) / sum;
          if (p > 127.0) p = 127.0;
          if (real'(v) > p + 2.0 || real'(v) < p - 2.0) begin
            failures++;
            if (failures < 20) $display("P[%0d][%0d] = %0d, expected %f", q, t, v, p);
          end
        end
      end
    end

    // ---- Top-K over the class attention row: N = 197, rho = 0.5 -> K = 98
    kexp = (((T - 1) * 128) + 255) / 256;
    expect_eq("K formula", kexp, 98);
    for (int t = 1; t < T; t++) cand.push_back(t);
    // order: larger P[0][t] first, ties to the lower index
    for (int i = 0; i < kexp; i++) begin
      int best = 0;
      for (int j = 1; j < cand.size(); j++)
        if (P[0][cand[j]] > P[0][cand[best]]) best = j;
      srt.push_back(cand[best]);
      cand.delete(best);
    end
    @(negedge clk);
    tp_n_tokens = 9'(T); tp_rho_q8 = 8'd128; tp_start = 1;
    t0 = cycle;
    @(negedge clk); tp_start = 0;
    while (!tp_done && cycle - t0 < 1000) @(negedge clk);
    expect_eq("token selection cycles", cycle - t0, kexp + 2);
    expect_eq("tp_k", int'(tp_k), kexp);
    for (int i = 0; i < kexp; i++) begin
      @(negedge clk); tp_rd_addr = 8'(i); #1;
      expect_eq("kept token", int'(tp_rd_idx), srt[i]);
    end

    // ---- FFN1 block: H = ReLU(X W1) with pruning -> temp2 base 32, compacted
    for (int t = 0; t < T; t++) for (int n = 0; n < FB; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * W1[k][n];
      H[t][n] = rq(s, 7);
      if (H[t][n] < 0) H[t][n] = 0;
    end
    for (int n = 0; n < FB; n++) begin
      sums[n] = 0;
      for (int t = 0; t < T; t++) sums[n] += H[t][n];
    end
    begin
      int tmp [$];
      for (int n = 0; n < FB; n++) tmp.push_back(sums[n]);
      tmp.sort();
      thr = tmp[FB / 2];
    end
    for (int n = 0; n < FB; n++) if (sums[n] > thr) kept_list.push_back(n);
    load_w(BUS_WSET0, 0, D, FB, 2);
    c = base_cmd(TT, 6, FB);
    c.col_order = 1; c.x_src = MEM_TOKEN; c.w_src = WSRC_SET0;
    c.dst = MEM_TEMP2; c.dst_base = 32; c.dst_stride = 1; c.shift = 7; c.relu = 1;
    c.prune = 1; c.threshold = 16'(thr);
    run_cmd("FFN1", c);
    @(negedge clk); ffn2_flush = 1; @(negedge clk); ffn2_flush = 0;
    repeat (2) @(negedge clk);
    expect_eq("kept dimensions", int'(ffn2_kept), kept_list.size());
    expect_eq("index count", got_idx.size(), kept_list.size());
    for (int i = 0; i < kept_list.size() && i < got_idx.size(); i++)
      expect_eq("FFN2 weight row index", got_idx[i], kept_list[i]);
    for (int t = 0; t < T; t++) for (int i = 0; i < kept_list.size(); i++) begin
      read_elem(BUS_TEMP2, 32, 1, t, i, v); expect_eq("H kept", v, H[t][kept_list[i]]);
    end

    // ---- FFN2 on the kept dimensions, 64 output columns, + X -> temp1 base 32
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      longint s = 0;
      for (int i = 0; i < kept_list.size(); i++) s += H[t][kept_list[i]] * W2[kept_list[i]][n];
      Y[t][n] = sat8(rq(s, 7) + X[t][n]);
    end
    load_w(BUS_WSET1, 0, kept_list.size(), HD, 3);
    c = base_cmd(TT, 1, HD);
    c.k_len = 11'(kept_list.size());
    c.x_src = MEM_TEMP2; c.x_base = 32; c.w_src = WSRC_SET1;
    c.dst = MEM_TEMP1; c.dst_base = 32; c.dst_stride = 1; c.shift = 7;
    c.residual = 1; c.res_src = MEM_TOKEN; c.res_base = 0; c.res_stride = 6;
    run_cmd("FFN2", c);
    for (int t = 0; t < T; t++) for (int n = 0; n < HD; n++) begin
      read_elem(BUS_TEMP1, 32, 1, t, n, v); expect_eq("Y", v, Y[t][n]);
    end

    $display("kept FFN dimensions %0d of %0d, kept tokens %0d of %0d", kept_list.size(), FB, kexp, T - 1);

    // ---- interleaved FFN of the 99 kept tokens, hidden size 1536
    for (int i = 0; i < D; i++) for (int j = 0; j < F; j++) W1f[i][j] = int'($urandom % 41) - 20;
    for (int i = 0; i < F; i++) for (int j = 0; j < D; j++) W2f[i][j] = int'($urandom % 41) - 20;
    for (int d = 0; d < D; d++) O[0][d] = X[0][d];
    for (int i = 0; i < kexp; i++) for (int d = 0; d < D; d++) O[i + 1][d] = X[srt[i]][d];
    for (int t = 0; t < TK; t++) for (int n = 0; n < F; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += O[t][k] * W1f[k][n];
      Hf[t][n] = rq(s, 7);
      if (Hf[t][n] < 0) Hf[t][n] = 0;
    end
    begin
      int tmp [$];
      for (int n = 0; n < F; n++) begin
        int sm = 0;
        for (int t = 0; t < TK; t++) sm += Hf[t][n];
        tmp.push_back(sm);
      end
      tmp.sort();
      thr = tmp[F / 2];   // one threshold for the whole layer
    end
    // O -> temp1 base 0 (13 tiles x 6 = 78 words), Y = O -> token base 0
    for (int t8 = 0; t8 < (TK + 7) / 8; t8++)
      for (int c64 = 0; c64 < D / 64; c64++)
        for (int b = 0; b < 64; b++) begin
          w = '0;
          for (int j = 0; j < 8; j++) begin
            int t = t8 * 8 + b / 8, cc = c64 * 64 + (b % 8) * 8 + j;
            if (t < TK) w[j*8 +: 8] = 8'(O[t][cc]);
          end
          bus_write(BUS_TEMP1, b, t8 * 6 + c64, w);
          bus_write(BUS_TOKEN, b, t8 * 6 + c64, w);
        end
    for (int t = 0; t < TK; t++) for (int d = 0; d < D; d++) Yf[t][d] = O[t][d];
    begin
      int kept_total = 0;
      for (blk = 0; blk < F / 64; blk++) begin
        kept_list.delete();
        got_idx.delete();
        for (int n = 0; n < 64; n++) begin
          int sm = 0;
          for (int t = 0; t < TK; t++) sm += Hf[t][blk * 64 + n];
          if (sm > thr) kept_list.push_back(n);
        end
        load_w(BUS_WSET0, 0, D, 64, 4);
        c = base_cmd((TK + 7) / 8, 6, 64);
        c.m_valid = 9'(TK);
        c.col_order = 1; c.x_src = MEM_TEMP1; c.w_src = WSRC_SET0;
        c.dst = MEM_TEMP2; c.dst_stride = 1; c.shift = 7; c.relu = 1;
        c.prune = 1; c.threshold = 16'(thr);
        run_cmd("FFN1 block", c);
        @(negedge clk); ffn2_flush = 1; @(negedge clk); ffn2_flush = 0;
        repeat (2) @(negedge clk);
        expect_eq("block kept dimensions", int'(ffn2_kept), kept_list.size());
        expect_eq("block index count", got_idx.size(), kept_list.size());
        for (int i = 0; i < kept_list.size() && i < got_idx.size(); i++)
          expect_eq("block FFN2 weight row index", got_idx[i], kept_list[i]);
        kept_total += kept_list.size();
        if (kept_list.size() == 0) continue;
        for (int t = 0; t < TK; t++) for (int n = 0; n < D; n++) begin
          longint s = 0;
          foreach (kept_list[i]) s += Hf[t][blk * 64 + kept_list[i]] * W2f[blk * 64 + kept_list[i]][n];
          Yf[t][n] = sat8(rq(s, 8) + Yf[t][n]);
        end
        load_w(BUS_WSET1, 0, kept_list.size(), D, 5);
        c = base_cmd((TK + 7) / 8, 1, D);
        c.k_len = 11'(kept_list.size());
        c.x_src = MEM_TEMP2; c.w_src = WSRC_SET1;
        c.dst = MEM_TOKEN; c.dst_stride = 6; c.shift = 8;
        c.residual = 1; c.res_src = MEM_TOKEN; c.res_stride = 6;
        run_cmd("FFN2 block", c);
      end
      for (int t = 0; t < TK; t++) for (int n = 0; n < D; n++) begin
        read_elem(BUS_TOKEN, 0, 6, t, n, v); expect_eq("FFN output", v, Yf[t][n]);
      end
      $display("interleaved FFN: %0d of %0d FFN2 weight rows fetched", kept_total, F);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_all();

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
