// token_pruning: top-K selection of tokens by class attention.
//
// Follows the paper's token pruning module. The Class Attention Value
// Buffer collects the class token's attention row (the softmax output of
// query 0), 8 values per beat; beats of further heads are added in, so the
// buffer holds the head sum, which ranks tokens exactly like the head
// average of the paper. `start` (the buffer's "Full") launches selection:
//   SHUFFLE  regroups the buffer into bit planes: plane[b] holds bit b of
//            every candidate value (the "shuffle" that groups corresponding
//            bits together). Candidates are tokens 1..N-1; the class token
//            is never a candidate because it is always kept.
//   SORT     every cycle finds the maximum without comparators: starting
//            from the set of live candidates, for each plane from the MSB
//            down the set is narrowed to those with a 1 in that plane if any
//            has one. The lowest-indexed survivor is the maximum index; it is
//            written to the New Token Index Buffer and removed. The Index
//            Counter counts outputs and raises Done when it reaches
//            K = ceil((N-1) * rho), with rho given as an 8-bit fraction
//            (rho_q8/256), so rho = 0.5 is 128.
// Latency: start is taken, 1 cycle shuffle, K cycles sorting (one index per
// cycle); `done` is seen K+2 cycles after the cycle in which start is high.
// Ties are broken toward the lower token index (this design's choice).
// The index buffer is read through rd_addr/rd_idx (combinational); entry j
// is the j-th most important kept token, so the next layer's token order is
// the class token followed by entries 0..K-1.
module token_pruning
  import vit_pkg::*;
#(
  parameter int unsigned MAX_TOK = MAX_TOKENS,
  parameter int unsigned LANES   = N_ROWS,
  parameter int unsigned VAL_W   = 12,
  parameter int unsigned IDX_W   = TOK_IDX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,       // empty the class attention buffer
  input  logic             acc_valid,   // class attention beat
  input  logic [5:0]       acc_tile,
  input  act_t             acc_val [LANES],
  input  logic             start,
  input  logic [8:0]       n_tokens,    // N, including the class token
  input  logic [7:0]       rho_q8,      // keep ratio x 256
  output logic             busy,
  output logic             done,        // level: selection finished
  output logic [8:0]       k_out,       // number of indices in the buffer
  output logic             idx_valid,   // one index per cycle while sorting
  output logic [IDX_W-1:0] idx_out,
  input  logic [IDX_W-1:0] rd_addr,
  output logic [IDX_W-1:0] rd_idx
);
  typedef enum logic [1:0] {T_IDLE, T_SHUFFLE, T_SORT} state_e;
  state_e state;

  logic [VAL_W-1:0] cls_buf [MAX_TOK];
  logic [MAX_TOK-1:0] plane [VAL_W];
  logic [MAX_TOK-1:0] alive;
  logic [IDX_W-1:0]   new_idx [MAX_TOK];
  logic [8:0]         index_cnt;
  logic [8:0]         k_target;

  // K = ceil((N-1) * rho)
  logic [16:0] k_prod;
  assign k_prod = 17'(n_tokens - 9'd1) * 17'(rho_q8);

  // comparison-free maximum over the bit planes
  logic [MAX_TOK-1:0] surv;
  logic [IDX_W-1:0]   max_idx;
  always_comb begin
    logic [MAX_TOK-1:0] t;
    surv = alive;
    for (int b = VAL_W - 1; b >= 0; b--) begin
      t = surv & plane[b];
      if (|t) surv = t;
    end
    max_idx = '0;
    for (int i = MAX_TOK - 1; i >= 0; i--) begin
      if (surv[i]) max_idx = IDX_W'(i);
    end
  end

  // New Token Index Buffer (no reset needed: read only after it is written)
  always_ff @(posedge clk) begin
    if (state == T_SORT) new_idx[index_cnt[IDX_W-1:0]] <= max_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      alive     <= '0;
      index_cnt <= '0;
      k_target  <= '0;
      done      <= 1'b0;
      idx_valid <= 1'b0;
      idx_out   <= '0;
      for (int i = 0; i < MAX_TOK; i++) cls_buf[i] <= '0;
      for (int b = 0; b < VAL_W; b++) plane[b] <= '0;
    end else begin
      idx_valid <= 1'b0;
      if (clear) begin
        for (int i = 0; i < MAX_TOK; i++) cls_buf[i] <= '0;
      end else if (acc_valid) begin
        for (int r = 0; r < LANES; r++) begin
          cls_buf[int'(acc_tile) * LANES + r] <=
              cls_buf[int'(acc_tile) * LANES + r] + VAL_W'(unsigned'(acc_val[r]));
        end
      end
      case (state)
        T_IDLE: if (start) begin
          k_target  <= 9'((k_prod + 17'd255) >> 8);
          index_cnt <= '0;
          done      <= 1'b0;
          state     <= T_SHUFFLE;
        end
        T_SHUFFLE: begin
          for (int i = 0; i < MAX_TOK; i++) begin
            alive[i] <= (i != 0) && (i < int'(n_tokens));
            for (int b = 0; b < VAL_W; b++) plane[b][i] <= cls_buf[i][b];
          end
          if (k_target == 0) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end else begin
            state <= T_SORT;
          end
        end
        T_SORT: begin
          alive[max_idx] <= 1'b0;
          idx_valid      <= 1'b1;
          idx_out        <= max_idx;
          index_cnt      <= index_cnt + 9'd1;
          if (index_cnt + 9'd1 == k_target) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy   = (state != T_IDLE);
  assign k_out  = index_cnt;
  assign rd_idx = new_idx[rd_addr];
endmodule
