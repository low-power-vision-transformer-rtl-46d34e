// tb_vit_accel: one encoder block, single head, end to end on the top level
// with its default sizes.
//
// 16 tokens x 64 features go through: Q, K and V generation (row-wise,
// column-wise and transposed stores), Q x K^T with row softmax and capture
// of the class attention, attention x V with V^T as broadcast operand,
// projection with residual, token pruning (rho = 0.5), FFN1 with ReLU and
// FFN2 pruning (kept dimensions compacted), and FFN2 on the kept dimensions
// only, with residual. The testbench keeps its own copy of every matrix and
// computes every expected result with plain integer arithmetic; results are
// read back through the data bus and compared element by element. The
// softmax output is checked against a floating-point softmax (2 LSB), and
// the following steps use the probabilities actually stored. It also
// counts the mechanisms the design has (column-wise and row-wise orders,
// transposed store, softmax row stalls, class capture, residual, ReLU
// zeroing, requantisation saturation, kept and pruned FFN dimensions,
// token selection, weight-set refill during a command) and counts a
// failure for any that never happened.
module tb_vit_accel;
  import vit_pkg::*;

  localparam int T = 16;    // tokens
  localparam int D = 64;    // embedding = head dimension (one head)
  localparam int F = 128;   // FFN hidden dimension

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

  // mechanisms
  int m_roword = 0, m_colord = 0, m_transpose = 0, m_sm_stall = 0, m_cls = 0, m_residual = 0,
      m_relu_zero = 0, m_sat = 0, m_kept = 0, m_pruned = 0, m_tp_select = 0, m_refill = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.state == 3'd2) m_sm_stall++;                   // waiting for softmax
    if (dut.u_token_pruning.acc_valid) m_cls++;
    if (dut.u_ffn2_pruning.dim_done && !dut.u_ffn2_pruning.dim_keep) m_pruned++;
    if (dut.u_ffn2_pruning.dim_keep) m_kept++;
    if (busy && bus_we && (bus_target == BUS_WSET1 || bus_target == BUS_WSET0)) m_refill++;
  end

  // reference matrices
  int X [T][D], Wq [D][D], Wk [D][D], Wv [D][D], Wo [D][D], W1 [D][F], W2 [F][D];
  int Q [T][D], K [T][D], V [T][D], P [T][64], A [T][D], O [T][D], H [T][F], Y [T][D];
  int kept_list [$];

  function automatic int rq(input longint s, input int sh);
    longint v = s >>> sh;
    if (v > 127 || v < -128) m_sat++;
    return v > 127 ? 127 : (v < -128 ? -128 : int'(v));
  endfunction

  function automatic int sat8(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

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

  // activation layout: A[t][c] -> bank (t%8)*8+(c%64)/8, addr base+(t/8)*stride+c/64, byte c%8
  task automatic load_act(input bus_target_e tg, input int base, input int stride, input int rows,
                          input int cols, ref int M [T][D]);
    for (int t8 = 0; t8 < (rows + 7) / 8; t8++)
      for (int c64 = 0; c64 < (cols + 63) / 64; c64++)
        for (int b = 0; b < 64; b++) begin
          logic [63:0] w = '0;
          for (int j = 0; j < 8; j++) begin
            int t = t8 * 8 + b / 8, c = c64 * 64 + (b % 8) * 8 + j;
            if (t < rows && c < cols) w[j*8 +: 8] = 8'(M[t][c]);
          end
          bus_write(tg, b, base + t8 * stride + c64, w);
        end
  endtask

  function automatic int get_byte(input logic [63:0] w, input int j);
    return int'($signed(w[j*8 +: 8]));
  endfunction

  task automatic read_elem(input bus_target_e tg, input int base, input int stride, input int t,
                           input int c, output int v);
    logic [63:0] w;
    bus_read(tg, (t % 8) * 8 + (c % 64) / 8, base + (t / 8) * stride + c / 64, w);
    v = get_byte(w, c % 8);
  endtask

  // weight layout: W[k][n] -> bank (k%64)/8, addr base+n*kch+k/64, byte k%8
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
                2: v = Wv[k][n];
                3: v = Wo[k][n];
                4: v = W1[k][n];
                default: v = (k < kept_list.size()) ? W2[kept_list[k]][n] : 0;
              endcase
            end
            w[j*8 +: 8] = 8'(v);
          end
          bus_write(tg, g, base + n * kch + kc, w);
        end
  endtask

  task automatic run_cmd(input cmd_t c);
    int t0;
    @(negedge clk);
    cmd_in = c;
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    t0 = cycle;
    while (!done && cycle - t0 < 100000) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("command did not finish"); end
    if (c.col_order) m_colord++; else m_roword++;
    if (c.dst_transpose || c.softmax) m_transpose++;
    if (c.residual) m_residual++;
  endtask

  function automatic cmd_t base_cmd(input int mt, input int kch, input int n);
    cmd_t c = '0;
    c.m_tiles = 6'(mt); c.m_valid = 9'(mt * 8); c.k_chunks = 5'(kch); c.k_len = 11'(kch * 64);
    c.n_cols = 11'(n);
    return c;
  endfunction

  // compare helper
  task automatic expect_eq(input string what, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  int v, thr;
  int sums [F];
  int sorted_sums [$];
  cmd_t c;
  int got_idx [$];
  logic [63:0] wd;

  always @(posedge clk) if (rst_n && ffn2_ready) for (int i = 0; i < int'(ffn2_cnt); i++) got_idx.push_back(int'(ffn2_idx[i]));

  task automatic run_all();
    cmd_in = '0;
    // data
    for (int t = 0; t < T; t++) for (int d = 0; d < D; d++) X[t][d] = int'($urandom % 61) - 30;
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      Wq[i][j] = int'($urandom % 41) - 20; Wk[i][j] = int'($urandom % 41) - 20;
      Wv[i][j] = int'($urandom % 41) - 20; Wo[i][j] = int'($urandom % 41) - 20;
    end
    for (int i = 0; i < D; i++) for (int j = 0; j < F; j++) W1[i][j] = int'($urandom % 41) - 20;
    for (int i = 0; i < F; i++) for (int j = 0; j < D; j++) W2[i][j] = int'($urandom % 41) - 20;

    repeat (3) @(posedge clk);
    rst_n = 1;

    load_act(BUS_TOKEN, 0, 1, T, D, X);
    load_w(BUS_WSET0, 0,   D, D, 0);
    load_w(BUS_WSET0, 64,  D, D, 1);
    load_w(BUS_WSET0, 128, D, D, 2);

    // ---- Q = X Wq: row-wise output, temp2 base 0
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * Wq[k][n];
      Q[t][n] = rq(s, 8);
    end
    c = base_cmd(2, 1, D);
    c.x_src = MEM_TOKEN; c.w_src = WSRC_SET0; c.w_base = 0;
    c.dst = MEM_TEMP2; c.dst_base = 0; c.dst_stride = 1; c.shift = 8;
    // refill weight set 1 (Wo) while this command uses set 0
    fork
      run_cmd(c);
      begin repeat (3) @(negedge clk); load_w(BUS_WSET1, 0, D, D, 3); end
    join
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n += 5) begin
      read_elem(BUS_TEMP2, 0, 1, t, n, v); expect_eq("Q", v, Q[t][n]);
    end

    // ---- K = X Wk: column-wise output, temp1 base 0
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * Wk[k][n];
      K[t][n] = rq(s, 8);
    end
    c = base_cmd(2, 1, D);
    c.col_order = 1; c.x_src = MEM_TOKEN; c.w_src = WSRC_SET0; c.w_base = 64;
    c.dst = MEM_TEMP1; c.dst_base = 0; c.dst_stride = 1; c.shift = 8;
    run_cmd(c);
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n += 7) begin
      read_elem(BUS_TEMP1, 0, 1, t, n, v); expect_eq("K", v, K[t][n]);
    end

    // ---- V = X Wv stored transposed (V^T) in temp1 base 8
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += X[t][k] * Wv[k][n];
      V[t][n] = rq(s, 5);
    end
    c = base_cmd(2, 1, D);
    c.col_order = 1; c.x_src = MEM_TOKEN; c.w_src = WSRC_SET0; c.w_base = 128;
    c.dst = MEM_TEMP1; c.dst_base = 8; c.dst_stride = 1; c.dst_transpose = 1; c.shift = 5;
    run_cmd(c);
    for (int d = 0; d < D; d += 3) for (int t = 0; t < T; t++) begin
      read_elem(BUS_TEMP1, 8, 1, d, t, v); expect_eq("V^T", v, V[t][d]);
    end

    // ---- S = K Q^T, softmax per query row -> P (rows = queries) in token base 16
    @(negedge clk);
    tp_clear = 1;
    @(negedge clk);
    tp_clear = 0;
    c = base_cmd(2, 1, T);
    c.m_valid = 9'(T);
    c.col_order = 1; c.x_src = MEM_TEMP1; c.x_base = 0; c.w_src = WSRC_TEMP2; c.w_base = 0;
    c.dst = MEM_TOKEN; c.dst_base = 16; c.dst_stride = 1; c.shift = 9;
    c.softmax = 1; c.cls_capture = 1;
    run_cmd(c);
    for (int q = 0; q < T; q++) begin
      real sm = 0.0;
      int  sc [T];
      int  psum = 0;
      for (int k = 0; k < T; k++) begin
        longint s = 0;
        for (int d = 0; d < D; d++) s += K[k][d] * Q[q][d];
        sc[k] = rq(s, 9);
        sm += 2.0 ** (real'(sc[k]) / 8.0);
      end
      for (int k = 0; k < 64; k++) begin
        read_elem(BUS_TOKEN, 16, 1, q, k, v);
        P[q][k] = v;
        if (k < T) begin
          real p = 128.0 * (2.0 ** (real'(sc[k]) / 8.0)) / sm;
          int  e = p > 127.0 ? 127 : int'($floor(p));
          checks++;
          if (v < e - 2 || v > e + 2) begin
            failures++;
            if (failures < 20) $display("P[%0d][%0d] got %0d expected about %0d", q, k, v, e);
          end
        end else expect_eq("P padding", v, 0);
      end
    end

    // ---- A = P V: X = P (token base 16), broadcast operand V^T (temp1 base 8) -> temp2 base 8
    for (int q = 0; q < T; q++) for (int d = 0; d < D; d++) begin
      longint s = 0;
      for (int k = 0; k < T; k++) s += P[q][k] * V[k][d];
      A[q][d] = rq(s, 7);
    end
    c = base_cmd(2, 1, D);
    c.x_src = MEM_TOKEN; c.x_base = 16; c.w_src = WSRC_TEMP1; c.w_base = 8;
    c.dst = MEM_TEMP2; c.dst_base = 8; c.dst_stride = 1; c.shift = 7;
    run_cmd(c);
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n += 3) begin
      read_elem(BUS_TEMP2, 8, 1, t, n, v); expect_eq("A", v, A[t][n]);
    end

    // ---- O = A Wo + X (residual from token SRAM) -> temp1 base 16
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      longint s = 0;
      for (int k = 0; k < D; k++) s += A[t][k] * Wo[k][n];
      O[t][n] = sat8(rq(s, 8) + X[t][n]);
    end
    c = base_cmd(2, 1, D);
    c.x_src = MEM_TEMP2; c.x_base = 8; c.w_src = WSRC_SET1; c.w_base = 0;
    c.dst = MEM_TEMP1; c.dst_base = 16; c.dst_stride = 1; c.shift = 8;
    c.residual = 1; c.res_src = MEM_TOKEN; c.res_base = 0; c.res_stride = 1;
    run_cmd(c);
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n += 2) begin
      read_elem(BUS_TEMP1, 16, 1, t, n, v); expect_eq("O", v, O[t][n]);
    end

    // ---- token pruning on the class attention row (one head): K = ceil(15 * 0.5) = 8
    @(negedge clk);
    tp_n_tokens = 9'(T); tp_rho_q8 = 8'd128; tp_start = 1;
    @(negedge clk);
    tp_start = 0;
    while (!tp_done) @(negedge clk);
    expect_eq("token K", int'(tp_k), 8);
    begin
      logic [T-1:0] used = '0;
      for (int s = 0; s < 8; s++) begin
        int best = -1;
        for (int i = 1; i < T; i++) if (!used[i] && (best < 0 || P[0][i] > P[0][best])) best = i;
        used[best] = 1'b1;
        tp_rd_addr = 8'(s);
        #1;
        expect_eq("kept token", int'(tp_rd_idx), best);
        m_tp_select++;
      end
    end

    // ---- FFN1 + ReLU + FFN2 pruning: H = relu(O W1), kept columns compacted in temp2 base 16
    load_w(BUS_WSET1, 64, D, F, 4);
    for (int f = 0; f < F; f++) begin
      sums[f] = 0;
      for (int t = 0; t < T; t++) begin
        longint s = 0;
        for (int k = 0; k < D; k++) s += O[t][k] * W1[k][f];
        H[t][f] = rq(s, 9);
        if (H[t][f] < 0) begin H[t][f] = 0; m_relu_zero++; end
        sums[f] += H[t][f];
      end
      sorted_sums.push_back(sums[f]);
    end
    sorted_sums.sort();
    thr = sorted_sums[F / 2];           // keep about half of the dimensions
    kept_list.delete();
    for (int f = 0; f < F; f++) if (sums[f] > thr) kept_list.push_back(f);
    c = base_cmd(2, 1, F);
    c.col_order = 1; c.x_src = MEM_TEMP1; c.x_base = 16; c.w_src = WSRC_SET1; c.w_base = 64;
    c.dst = MEM_TEMP2; c.dst_base = 16; c.dst_stride = 2; c.shift = 9; c.relu = 1;
    c.prune = 1; c.threshold = 16'(thr);
    got_idx.delete();
    run_cmd(c);
    @(negedge clk);
    ffn2_flush = 1;
    @(negedge clk);
    ffn2_flush = 0;
    @(negedge clk);
    expect_eq("kept count", int'(ffn2_kept), kept_list.size());
    expect_eq("index count", got_idx.size(), kept_list.size());
    for (int i = 0; i < kept_list.size() && i < got_idx.size(); i++) expect_eq("needed index", got_idx[i], kept_list[i]);
    for (int t = 0; t < T; t++) for (int i = 0; i < kept_list.size(); i += 3) begin
      read_elem(BUS_TEMP2, 16, 2, t, i, v); expect_eq("H kept", v, H[t][kept_list[i]]);
    end

    // ---- FFN2 on the kept rows of W2 only: Y = Hc W2c + O -> token base 32
    load_w(BUS_WSET0, 192, 128, D, 5);
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      longint s = 0;
      foreach (kept_list[i]) s += H[t][kept_list[i]] * W2[kept_list[i]][n];
      Y[t][n] = sat8(rq(s, 8) + O[t][n]);
    end
    c = base_cmd(2, 2, D);
    c.k_len = 11'(kept_list.size());
    c.x_src = MEM_TEMP2; c.x_base = 16; c.w_src = WSRC_SET0; c.w_base = 192;
    c.dst = MEM_TOKEN; c.dst_base = 32; c.dst_stride = 1; c.shift = 8;
    c.residual = 1; c.res_src = MEM_TEMP1; c.res_base = 16; c.res_stride = 1;
    run_cmd(c);
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      read_elem(BUS_TOKEN, 32, 1, t, n, v); expect_eq("Y", v, Y[t][n]);
    end

    // ---- mechanisms
    $display("mechanisms: row-wise %0d col-wise %0d transposed %0d softmax-stall %0d class-capture %0d residual %0d relu-zero %0d saturate %0d kept %0d pruned %0d token-select %0d refill %0d",
             m_roword, m_colord, m_transpose, m_sm_stall, m_cls, m_residual, m_relu_zero, m_sat,
             m_kept, m_pruned, m_tp_select, m_refill);
    begin
      int mech [12] = '{m_roword, m_colord, m_transpose, m_sm_stall, m_cls, m_residual,
                        m_relu_zero, m_sat, m_kept, m_pruned, m_tp_select, m_refill};
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_all();

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
