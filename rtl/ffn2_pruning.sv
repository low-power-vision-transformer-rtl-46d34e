// ffn2_pruning: dynamic FFN2 weight pruning by per-dimension activation sums.
//
// Follows the paper's FFN2 pruning module. FFN1 is computed with
// column-wise output, so one beat carries 8 post-ReLU values of the same
// hidden dimension (8 tokens). An adder tree sums the 8 lanes and the sum
// is accumulated in Reg over the beats of the dimension; the Local Counter
// counts the beats and local_full is raised when it reaches beats_per_dim
// (the paper's example is 48; here it is an input so that it follows the
// token count after token pruning). In the cycle after the dimension's last
// beat the accumulated value is compared with the predefined threshold:
// is_to_save = local_full AND (sum > threshold). A saved dimension index
// is written to the Index Buffer and counted by the Global Counter; when 8
// indices have been collected, output_ready pulses and the 8 needed indices
// are presented at once (they select the 8 FFN2 weight rows to fetch).
// `flush` emits a partly filled group (count in needed_cnt) at the end of
// the hidden dimension. dim_done/dim_keep pulse with every decision so the
// controller can compact the stored activations.
// Interface: en/post_act/dim_index per beat; results one cycle after the
// last beat of a dimension. The paper's figure draws the Global Counter fed
// from the local_full node; the text says it counts retained indices, which
// is what is implemented.
module ffn2_pruning
  import vit_pkg::*;
#(
  parameter int unsigned LANES = N_ROWS,
  parameter int unsigned SUM_W = 18,
  parameter int unsigned DIM_W = 11,
  parameter int unsigned GROUP = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  act_t             post_act [LANES],
  input  logic [DIM_W-1:0] dim_index,
  input  logic [5:0]       beats_per_dim,
  input  logic [15:0]      threshold,
  input  logic             flush,
  output logic             dim_done,
  output logic             dim_keep,
  output logic             output_ready,
  output logic [3:0]       needed_cnt,
  output logic [DIM_W-1:0] needed_idx [GROUP]
);
  logic [SUM_W-1:0] tree;
  logic [SUM_W-1:0] sum_q;
  logic [5:0]       local_cnt;
  logic [DIM_W-1:0] dim_q;
  logic [3:0]       global_cnt;
  logic [DIM_W-1:0] idx_buf [GROUP];
  logic             local_full;
  logic             is_to_save;

  always_comb begin
    tree = '0;
    for (int i = 0; i < LANES; i++) begin
      // post-activation values are non-negative; negative lanes count as 0
      if (!post_act[i][DATA_W-1]) tree = tree + SUM_W'(post_act[i]);
    end
  end

  assign local_full = (local_cnt == beats_per_dim) && (beats_per_dim != 0);
  assign is_to_save = local_full && (sum_q > SUM_W'(threshold));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q        <= '0;
      local_cnt    <= '0;
      dim_q        <= '0;
      global_cnt   <= '0;
      dim_done     <= 1'b0;
      dim_keep     <= 1'b0;
      output_ready <= 1'b0;
      needed_cnt   <= '0;
      for (int i = 0; i < GROUP; i++) begin
        idx_buf[i]    <= '0;
        needed_idx[i] <= '0;
      end
    end else begin
      dim_done     <= local_full;
      dim_keep     <= is_to_save;
      output_ready <= 1'b0;

      // Reg / Local Counter
      if (en) begin
        if (local_cnt == 0 || local_full) begin
          sum_q     <= tree;
          local_cnt <= 6'd1;
        end else begin
          sum_q     <= sum_q + tree;
          local_cnt <= local_cnt + 6'd1;
        end
        dim_q <= dim_index;
      end else if (local_full) begin
        local_cnt <= '0;
      end

      // Index Buffer / Global Counter
      if (is_to_save) begin
        idx_buf[global_cnt[2:0]] <= dim_q;
        if (global_cnt == 4'(GROUP - 1)) begin
          output_ready <= 1'b1;
          needed_cnt   <= 4'(GROUP);
          for (int i = 0; i < GROUP - 1; i++) needed_idx[i] <= idx_buf[i];
          needed_idx[GROUP-1] <= dim_q;
          global_cnt   <= '0;
        end else begin
          global_cnt <= global_cnt + 4'd1;
        end
      end else if (flush && global_cnt != 0) begin
        output_ready <= 1'b1;
        needed_cnt   <= global_cnt;
        needed_idx   <= idx_buf;
        global_cnt   <= '0;
      end
    end
  end
endmodule
