// vit_accel: top level of the low-power ViT encoder accelerator.
//
// Blocks and connections follow the paper's architecture overview: a data
// bus fed by the external memory controller (8 x 8-bit words) loads the
// Token SRAM (64 banks x 1.25KB) and two Weight SRAM sets (8 banks x 4.5KB
// each, one can be refilled while the other is used); the Token SRAM
// delivers 64 words (8 token rows x 64 elements) and a weight set 8 words
// (64 weights) per cycle to eight 8x8 PE groups (512 MACs); the accumulator
// combines the groups row-wise and emits 8 outputs; SoftMax, ReLU and
// Residual post-process them; Token Pruning listens to the class-token
// softmax row and FFN2 Pruning to the post-ReLU FFN1 outputs; results go to
// Temp SRAM1/2 (64 banks x 0.625KB each), which can also feed the PE groups
// as inputs or broadcast operands and are read back through the data bus.
// Total buffer: 80 + 72 + 40 + 40 = 232KB.
//
// Operation: the host (through the memory controller) writes data with the
// bus_* port, then starts commands (vit_pkg::cmd_t), one matrix product each,
// and waits for `done`. The host also runs token pruning (tp_*) once the
// class attention of all heads has been gathered and reads the new token
// order, and collects the FFN2 weight-row indices (ffn2_*) that tell it
// which FFN2 weight rows to fetch.
//
// Pipeline (cycles after the controller issues a chunk):
//   0 SRAM read, 1 operand build / PE multiply, 2 PE register ->
//   accumulator, 3 accumulator result: requantise, start residual read,
//   feed softmax, 4 residual + ReLU, write to the destination SRAM and feed
//   FFN2 pruning. Softmax results are written when the softmax unit emits
//   them, stored transposed (one query row of probabilities per word line).
// Rules the host must keep (checked by assertions): X, a temp-SRAM
// broadcast operand and the residual source are different memories, the
// destination differs from X and from the broadcast operand, and the bus is
// not used on a memory while a command uses it.
// What follows the paper: block set, sizes, 8x8x8 PE organisation, the
// 64-element step, the output orders, ReLU, the two pruning units. This
// design's own: the command format, data layout, requantisation, softmax
// arithmetic, bus protocol.
module vit_accel
  import vit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // data bus (from/to the memory controller), 8 x 8-bit per transfer
  input  logic        bus_we,
  input  logic        bus_re,
  input  logic [2:0]  bus_target,   // vit_pkg::bus_target_e
  input  logic [5:0]  bus_bank,
  input  logic [9:0]  bus_addr,
  input  logic [63:0] bus_wdata,
  output logic        bus_rvalid,
  output logic [63:0] bus_rdata,
  // command interface (system controller)
  input  logic        cmd_start,
  input  cmd_t        cmd_in,
  output logic        busy,
  output logic        done,
  // token pruning
  input  logic        tp_clear,
  input  logic        tp_start,
  input  logic [8:0]  tp_n_tokens,
  input  logic [7:0]  tp_rho_q8,
  output logic        tp_busy,
  output logic        tp_done,
  output logic [8:0]  tp_k,
  input  logic [7:0]  tp_rd_addr,
  output logic [7:0]  tp_rd_idx,
  // FFN2 pruning
  input  logic        ffn2_flush,
  output logic        ffn2_ready,
  output logic [3:0]  ffn2_cnt,
  output logic [10:0] ffn2_idx [8],
  output logic [10:0] ffn2_kept     // dimensions kept by the current command
);
  localparam int unsigned NB = TOK_BANKS;  // 64 banks for token and temp

  // ------------------------------------------------------------------
  // controller
  // ------------------------------------------------------------------
  cmd_t        cmd;
  logic        issue, issue_first, issue_last;
  logic [5:0]  issue_mt;
  logic [10:0] issue_n;
  logic [4:0]  issue_kt;
  logic [9:0]  x_addr, w_addr, wt_addr;
  logic        sm_row_done;

  system_controller u_ctrl (
    .clk, .rst_n,
    .start      (cmd_start),
    .cmd_in     (cmd_in),
    .sm_row_done(sm_row_done),
    .cmd        (cmd),
    .busy       (busy),
    .done       (done),
    .issue      (issue),
    .issue_first(issue_first),
    .issue_last (issue_last),
    .issue_mt   (issue_mt),
    .issue_n    (issue_n),
    .issue_kt   (issue_kt),
    .x_addr     (x_addr),
    .w_addr     (w_addr),
    .wt_addr    (wt_addr)
  );

  // ------------------------------------------------------------------
  // memories: index 0 token, 1 temp1, 2 temp2 (amem_e); weight sets 0/1
  // ------------------------------------------------------------------
  logic [NB-1:0] a_re [3];
  logic [9:0]    a_raddr [3][NB];
  word_t         a_rdata [3][NB];
  logic [NB-1:0] a_we [3];
  logic [9:0]    a_waddr [3][NB];
  logic [7:0]    a_wbe [3][NB];
  word_t         a_wdata [3][NB];

  logic [WGT_BANKS-1:0] w_re [2];
  logic [9:0]           w_raddr [2][WGT_BANKS];
  word_t                w_rdata [2][WGT_BANKS];
  logic [WGT_BANKS-1:0] w_we [2];
  logic [9:0]           w_waddr [2][WGT_BANKS];
  logic [7:0]           w_wbe [2][WGT_BANKS];
  word_t                w_wdata [2][WGT_BANKS];

  banked_sram #(.BANKS(NB), .DEPTH(TOK_DEPTH)) u_token_sram (
    .clk, .re(a_re[0]), .raddr(a_raddr[0]), .rdata(a_rdata[0]),
    .we(a_we[0]), .waddr(a_waddr[0]), .wbe(a_wbe[0]), .wdata(a_wdata[0]));
  banked_sram #(.BANKS(NB), .DEPTH(TMP_DEPTH)) u_temp_sram1 (
    .clk, .re(a_re[1]), .raddr(a_raddr[1]), .rdata(a_rdata[1]),
    .we(a_we[1]), .waddr(a_waddr[1]), .wbe(a_wbe[1]), .wdata(a_wdata[1]));
  banked_sram #(.BANKS(NB), .DEPTH(TMP_DEPTH)) u_temp_sram2 (
    .clk, .re(a_re[2]), .raddr(a_raddr[2]), .rdata(a_rdata[2]),
    .we(a_we[2]), .waddr(a_waddr[2]), .wbe(a_wbe[2]), .wdata(a_wdata[2]));
  for (genvar s = 0; s < 2; s++) begin : g_wsram
    banked_sram #(.BANKS(WGT_BANKS), .DEPTH(WGT_DEPTH)) u_weight_sram (
      .clk, .re(w_re[s]), .raddr(w_raddr[s]), .rdata(w_rdata[s]),
      .we(w_we[s]), .waddr(w_waddr[s]), .wbe(w_wbe[s]), .wdata(w_wdata[s]));
  end

  // ------------------------------------------------------------------
  // stage 1: operand build and PE groups
  // ------------------------------------------------------------------
  logic        s1_valid, s1_first, s1_last;
  logic [5:0]  s1_mt;
  logic [10:0] s1_n;
  logic [4:0]  s1_kt;
  amem_e       s1_xsrc;
  wsrc_e       s1_wsrc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0;
      s1_mt <= '0; s1_n <= '0; s1_kt <= '0;
      s1_xsrc <= MEM_TOKEN; s1_wsrc <= WSRC_SET0;
    end else begin
      s1_valid <= issue;
      s1_first <= issue_first;
      s1_last  <= issue_last;
      s1_mt    <= issue_mt;
      s1_n     <= issue_n;
      s1_kt    <= issue_kt;
      s1_xsrc  <= cmd.x_src;
      s1_wsrc  <= cmd.w_src;
    end
  end

  act_t  pe_x [N_GROUPS][N_ROWS][N_MACS];
  act_t  pe_w [N_GROUPS][N_MACS];
  word_t xw;
  word_t ww;

  always_comb begin
    for (int g = 0; g < N_GROUPS; g++) begin
      for (int r = 0; r < N_ROWS; r++) begin
        xw = a_rdata[int'(s1_xsrc)][r*8 + g];
        for (int j = 0; j < N_MACS; j++) pe_x[g][r][j] = act_t'(xw[j*8 +: 8]);
      end
      case (s1_wsrc)
        WSRC_SET0:  ww = w_rdata[0][g];
        WSRC_SET1:  ww = w_rdata[1][g];
        WSRC_TEMP1: ww = a_rdata[1][int'(s1_n[2:0])*8 + g];
        default:    ww = a_rdata[2][int'(s1_n[2:0])*8 + g];
      endcase
      for (int j = 0; j < N_MACS; j++) begin
        // reduction indices at or beyond K carry no data
        if (int'(s1_kt) * K_TILE + g * N_MACS + j < int'(cmd.k_len)) pe_w[g][j] = act_t'(ww[j*8 +: 8]);
        else pe_w[g][j] = '0;
      end
    end
  end

  logic signed [PSUM_W-1:0] grp_psum [N_GROUPS][N_ROWS];
  logic [N_GROUPS-1:0]      grp_valid;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_pe
    pe_group u_pe_group (
      .clk, .rst_n,
      .in_valid (s1_valid),
      .x        (pe_x[g]),
      .w        (pe_w[g]),
      .out_valid(grp_valid[g]),
      .psum     (grp_psum[g])
    );
  end

  // stage 2: accumulator
  logic        s2_first, s2_last;
  logic [16:0] s2_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_first <= 1'b0; s2_last <= 1'b0; s2_tag <= '0;
    end else begin
      s2_first <= s1_first;
      s2_last  <= s1_last;
      s2_tag   <= {s1_mt, s1_n};
    end
  end

  logic                    acc_valid;
  logic [16:0]             acc_tag;
  logic signed [ACC_W-1:0] acc_out [N_ROWS];

  accumulator #(.TAG_W(17)) u_acc (
    .clk, .rst_n,
    .in_valid (grp_valid[0]),
    .first    (s2_first),
    .last     (s2_last),
    .tag_in   (s2_tag),
    .psum     (grp_psum),
    .out_valid(acc_valid),
    .tag_out  (acc_tag),
    .acc_out  (acc_out)
  );

  // ------------------------------------------------------------------
  // stage 3: requantise, residual read, softmax
  // ------------------------------------------------------------------
  act_t       rq [N_ROWS];
  wire [5:0]  acc_mt = acc_tag[16:11];
  wire [10:0] acc_n  = acc_tag[10:0];

  requant u_requant (.acc(acc_out), .shift(cmd.shift), .q(rq));

  wire        res_rd = acc_valid && cmd.residual && !cmd.softmax;
  wire [9:0]  res_addr = 10'(cmd.res_base + 10'(acc_mt) * cmd.res_stride + 10'(acc_n >> 6));

  logic       s4_valid;
  logic [5:0] s4_mt;
  logic [10:0] s4_n;
  act_t       s4_q [N_ROWS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s4_valid <= 1'b0; s4_mt <= '0; s4_n <= '0;
      for (int r = 0; r < N_ROWS; r++) s4_q[r] <= '0;
    end else begin
      s4_valid <= acc_valid && !cmd.softmax;
      s4_mt    <= acc_mt;
      s4_n     <= acc_n;
      s4_q     <= rq;
    end
  end

  // softmax
  logic        sm_ready, sm_valid, sm_last;
  logic [5:0]  sm_tile;
  act_t        sm_q [N_ROWS];
  logic [10:0] sm_query;

  softmax_unit u_softmax (
    .clk, .rst_n,
    .m_valid  (cmd.m_valid),
    .in_valid (acc_valid && cmd.softmax),
    .in_tile  (acc_mt),
    .in_last  (acc_mt == cmd.m_tiles - 6'd1),
    .in_q     (rq),
    .ready    (sm_ready),
    .out_valid(sm_valid),
    .out_tile (sm_tile),
    .out_last (sm_last),
    .out_q    (sm_q),
    .row_done (sm_row_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sm_query <= '0;
    else if (acc_valid && cmd.softmax) sm_query <= acc_n;
  end

  // ------------------------------------------------------------------
  // stage 4: residual, ReLU, FFN2 pruning, write-back
  // ------------------------------------------------------------------
  act_t  res_val [N_ROWS];
  act_t  res_sum [N_ROWS];
  act_t  act_q   [N_ROWS];
  word_t rw;

  always_comb begin
    for (int r = 0; r < N_ROWS; r++) begin
      rw = a_rdata[int'(cmd.res_src)][r*8 + int'(s4_n[5:3])];
      res_val[r] = act_t'(rw[int'(s4_n[2:0])*8 +: 8]);
    end
  end

  residual_unit u_residual (.en(cmd.residual), .a(s4_q), .b(res_val), .q(res_sum));
  relu_unit     u_relu     (.en(cmd.relu),     .d(res_sum), .q(act_q));

  logic        dim_done, dim_keep;
  logic [10:0] kept_cnt;

  ffn2_pruning u_ffn2_pruning (
    .clk, .rst_n,
    .en           (s4_valid && cmd.prune),
    .post_act     (act_q),
    .dim_index    (s4_n),
    .beats_per_dim(cmd.m_tiles),
    .threshold    (cmd.threshold),
    .flush        (ffn2_flush),
    .dim_done     (dim_done),
    .dim_keep     (dim_keep),
    .output_ready (ffn2_ready),
    .needed_cnt   (ffn2_cnt),
    .needed_idx   (ffn2_idx)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) kept_cnt <= '0;
    else if (cmd_start && !busy) kept_cnt <= '0;
    else if (dim_keep) kept_cnt <= kept_cnt + 11'd1;
  end
  assign ffn2_kept = kept_cnt;

  // token pruning: class-token softmax row
  token_pruning u_token_pruning (
    .clk, .rst_n,
    .clear    (tp_clear),
    .acc_valid(sm_valid && cmd.cls_capture && sm_query == 0),
    .acc_tile (sm_tile),
    .acc_val  (sm_q),
    .start    (tp_start),
    .n_tokens (tp_n_tokens),
    .rho_q8   (tp_rho_q8),
    .busy     (tp_busy),
    .done     (tp_done),
    .k_out    (tp_k),
    .idx_valid(),
    .idx_out  (),
    .rd_addr  (tp_rd_addr),
    .rd_idx   (tp_rd_idx)
  );

  // write-back beat: either a post-processed output or a softmax row tile
  logic        wb_valid, wb_transpose;
  logic [5:0]  wb_mt;
  logic [10:0] wb_col;
  act_t        wb_q [N_ROWS];

  always_comb begin
    if (sm_valid) begin
      wb_valid     = 1'b1;
      wb_transpose = 1'b1;
      wb_mt        = sm_tile;
      wb_col       = sm_query;
      wb_q         = sm_q;
    end else begin
      wb_valid     = s4_valid;
      wb_transpose = cmd.dst_transpose;
      wb_mt        = s4_mt;
      wb_col       = cmd.prune ? kept_cnt : s4_n;
      wb_q         = act_q;
    end
  end

  // ------------------------------------------------------------------
  // memory port steering
  // ------------------------------------------------------------------
  bus_target_e btgt;
  assign btgt = bus_target_e'(bus_target);

  always_comb begin
    for (int m = 0; m < 3; m++) begin
      a_re[m] = '0;
      a_we[m] = '0;
      for (int b = 0; b < NB; b++) begin
        a_raddr[m][b] = '0;
        a_waddr[m][b] = '0;
        a_wbe[m][b]   = '0;
        a_wdata[m][b] = '0;
      end
    end
    for (int s = 0; s < 2; s++) begin
      w_re[s] = '0;
      w_we[s] = '0;
      for (int b = 0; b < WGT_BANKS; b++) begin
        w_raddr[s][b] = '0;
        w_waddr[s][b] = '0;
        w_wbe[s][b]   = '0;
        w_wdata[s][b] = '0;
      end
    end

    // host bus
    if (bus_re) begin
      case (btgt)
        BUS_TOKEN: begin a_re[0][bus_bank] = 1'b1; a_raddr[0][bus_bank] = bus_addr; end
        BUS_TEMP1: begin a_re[1][bus_bank] = 1'b1; a_raddr[1][bus_bank] = bus_addr; end
        BUS_TEMP2: begin a_re[2][bus_bank] = 1'b1; a_raddr[2][bus_bank] = bus_addr; end
        BUS_WSET0: begin w_re[0][bus_bank[2:0]] = 1'b1; w_raddr[0][bus_bank[2:0]] = bus_addr; end
        default:   begin w_re[1][bus_bank[2:0]] = 1'b1; w_raddr[1][bus_bank[2:0]] = bus_addr; end
      endcase
    end
    if (bus_we) begin
      case (btgt)
        BUS_TOKEN: begin a_we[0][bus_bank] = 1'b1; a_waddr[0][bus_bank] = bus_addr; a_wbe[0][bus_bank] = 8'hFF; a_wdata[0][bus_bank] = bus_wdata; end
        BUS_TEMP1: begin a_we[1][bus_bank] = 1'b1; a_waddr[1][bus_bank] = bus_addr; a_wbe[1][bus_bank] = 8'hFF; a_wdata[1][bus_bank] = bus_wdata; end
        BUS_TEMP2: begin a_we[2][bus_bank] = 1'b1; a_waddr[2][bus_bank] = bus_addr; a_wbe[2][bus_bank] = 8'hFF; a_wdata[2][bus_bank] = bus_wdata; end
        BUS_WSET0: begin w_we[0][bus_bank[2:0]] = 1'b1; w_waddr[0][bus_bank[2:0]] = bus_addr; w_wbe[0][bus_bank[2:0]] = 8'hFF; w_wdata[0][bus_bank[2:0]] = bus_wdata; end
        default:   begin w_we[1][bus_bank[2:0]] = 1'b1; w_waddr[1][bus_bank[2:0]] = bus_addr; w_wbe[1][bus_bank[2:0]] = 8'hFF; w_wdata[1][bus_bank[2:0]] = bus_wdata; end
      endcase
    end

    // X operand: one address on all 64 banks
    if (issue) begin
      a_re[int'(cmd.x_src)] = '1;
      for (int b = 0; b < NB; b++) a_raddr[int'(cmd.x_src)][b] = x_addr;
      case (cmd.w_src)
        WSRC_SET0, WSRC_SET1: begin
          w_re[cmd.w_src[0]] = '1;
          for (int b = 0; b < WGT_BANKS; b++) w_raddr[cmd.w_src[0]][b] = w_addr;
        end
        default: begin
          // row n of a stored activation: banks (n%8)*8 + g
          for (int g = 0; g < N_GROUPS; g++) begin
            a_re[int'(cmd.w_src) - 1][int'(issue_n[2:0])*8 + g] = 1'b1;
            a_raddr[int'(cmd.w_src) - 1][int'(issue_n[2:0])*8 + g] = wt_addr;
          end
        end
      endcase
    end

    // residual operand: 8 banks holding column n of the 8 rows
    if (res_rd) begin
      for (int r = 0; r < N_ROWS; r++) begin
        a_re[int'(cmd.res_src)][r*8 + int'(acc_n[5:3])] = 1'b1;
        a_raddr[int'(cmd.res_src)][r*8 + int'(acc_n[5:3])] = res_addr;
      end
    end

    // result write-back
    if (wb_valid) begin
      if (!wb_transpose) begin
        // row t = mt*8+r, column c: bank r*8+(c%64)/8, byte c%8
        for (int r = 0; r < N_ROWS; r++) begin
          a_we[int'(cmd.dst)][r*8 + int'(wb_col[5:3])]    = 1'b1;
          a_waddr[int'(cmd.dst)][r*8 + int'(wb_col[5:3])] =
              10'(cmd.dst_base + 10'(wb_mt) * cmd.dst_stride + 10'(wb_col >> 6));
          a_wbe[int'(cmd.dst)][r*8 + int'(wb_col[5:3])]   = 8'(1 << wb_col[2:0]);
          a_wdata[int'(cmd.dst)][r*8 + int'(wb_col[5:3])] = {8{wb_q[r]}};
        end
      end else begin
        // stored as row c, columns mt*8..mt*8+7: one whole word
        a_we[int'(cmd.dst)][int'(wb_col[2:0])*8 + int'(wb_mt[2:0])]    = 1'b1;
        a_waddr[int'(cmd.dst)][int'(wb_col[2:0])*8 + int'(wb_mt[2:0])] =
            10'(cmd.dst_base + 10'(wb_col >> 3) * cmd.dst_stride + 10'(wb_mt >> 3));
        a_wbe[int'(cmd.dst)][int'(wb_col[2:0])*8 + int'(wb_mt[2:0])]   = 8'hFF;
        for (int r = 0; r < N_ROWS; r++)
          a_wdata[int'(cmd.dst)][int'(wb_col[2:0])*8 + int'(wb_mt[2:0])][r*8 +: 8] = wb_q[r];
      end
    end
  end

  // bus read data: one cycle after bus_re
  logic        bre_q;
  bus_target_e btgt_q;
  logic [5:0]  bbank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bre_q <= 1'b0; btgt_q <= BUS_TOKEN; bbank_q <= '0;
    end else begin
      bre_q <= bus_re; btgt_q <= btgt; bbank_q <= bus_bank;
    end
  end
  always_comb begin
    case (btgt_q)
      BUS_TOKEN: bus_rdata = a_rdata[0][bbank_q];
      BUS_TEMP1: bus_rdata = a_rdata[1][bbank_q];
      BUS_TEMP2: bus_rdata = a_rdata[2][bbank_q];
      BUS_WSET0: bus_rdata = w_rdata[0][bbank_q[2:0]];
      default:   bus_rdata = w_rdata[1][bbank_q[2:0]];
    endcase
  end
  assign bus_rvalid = bre_q;

  // ------------------------------------------------------------------
  // host rules
  // ------------------------------------------------------------------
  a_x_ne_dst: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> cmd.x_src != cmd.dst) else $error("X source and destination are the same memory");
  a_wt_ne_x: assert property (@(posedge clk) disable iff (!rst_n)
      (busy && cmd.w_src[1]) |-> (int'(cmd.w_src) - 1 != int'(cmd.x_src) && int'(cmd.w_src) - 1 != int'(cmd.dst)))
      else $error("broadcast operand shares a memory with X or the destination");
  a_res_ne_x: assert property (@(posedge clk) disable iff (!rst_n)
      (busy && cmd.residual) |-> (cmd.res_src != cmd.x_src &&
        !(cmd.w_src[1] && int'(cmd.w_src) - 1 == int'(cmd.res_src))))
      else $error("residual source shares a memory with an operand");
  a_bus_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (bus_we || bus_re) |-> !busy || btgt == BUS_WSET0 || btgt == BUS_WSET1)
      else $error("bus access to an activation memory during a command");
endmodule
