// system_controller: sequencer of one matrix multiplication on the PE groups.
//
// The accelerator reuses one dataflow for every matrix product of the
// encoder (QKV generation, Q x K^T, attention x V, projection, FFN1, FFN2)
// and only reconfigures the order in which inputs are visited, so that each
// result leaves in the order the next layer wants to read it. A command
// (vit_pkg::cmd_t) describes OUT[M][N] = X[M][K] * W[K][N]; the controller
// walks three loops and issues one 8-row x 64-element chunk per cycle:
//   col_order = 0 (row-wise output):    for mt, for n, for kt
//   col_order = 1 (column-wise output): for n, for mt, for kt
// with kt innermost, so the accumulator emits the 8 rows of output column n
// every k_chunks cycles (6 cycles for K = 384, as in the paper).
// Addresses follow the activation layout of vit_pkg:
//   X tile        x_addr  = x_base + mt*k_chunks + kt   (all 64 banks)
//   W column n    w_addr  = w_base + n*k_chunks + kt    (8 weight banks)
//   W from a stored activation (row n of Q or of V^T, used as the broadcast
//   operand for Q x K^T and attention x V):
//                 wt_addr = w_base + (n/8)*k_chunks + kt in banks (n%8)*8+g.
// Softmax commands stop after every output column (one query row) until
// the softmax unit reports row_done; FFN2-pruning commands leave GAP idle
// cycles between columns so that the keep decision of a dimension is known
// before the next dimension is written. After the last issue the controller
// waits DRAIN cycles for the pipeline to empty and pulses `done`.
// The loop orders and the single-cycle 64-element step follow the paper;
// the command format, the stalls and all addressing are this design's own.
module system_controller
  import vit_pkg::*;
#(
  parameter int unsigned GAP   = 3,
  parameter int unsigned DRAIN = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cmd_t        cmd_in,
  input  logic        sm_row_done,
  output cmd_t        cmd,          // command being executed
  output logic        busy,
  output logic        done,
  output logic        issue,        // one chunk read this cycle
  output logic        issue_first,  // kt == 0
  output logic        issue_last,   // kt == k_chunks-1
  output logic [5:0]  issue_mt,
  output logic [10:0] issue_n,
  output logic [4:0]  issue_kt,
  output logic [9:0]  x_addr,
  output logic [9:0]  w_addr,
  output logic [9:0]  wt_addr
);
  typedef enum logic [2:0] {C_IDLE, C_RUN, C_WAIT_SM, C_GAP, C_DRAIN} state_e;
  state_e state;

  logic [5:0]  mt;
  logic [10:0] n;
  logic [4:0]  kt;
  logic [3:0]  wait_cnt;
  logic        more;       // another column follows the current one

  wire kt_end = (kt == cmd.k_chunks - 5'd1);
  wire mt_end = (mt == cmd.m_tiles - 6'd1);
  wire n_end  = (n  == cmd.n_cols - 11'd1);

  assign issue       = (state == C_RUN);
  assign issue_first = (kt == 0);
  assign issue_last  = kt_end;
  assign issue_mt    = mt;
  assign issue_n     = n;
  assign issue_kt    = kt;
  assign x_addr      = 10'(cmd.x_base + 10'(mt) * 10'(cmd.k_chunks) + 10'(kt));
  assign w_addr      = 10'(cmd.w_base + 10'(n) * 10'(cmd.k_chunks) + 10'(kt));
  assign wt_addr     = 10'(cmd.w_base + 10'(n >> 3) * 10'(cmd.k_chunks) + 10'(kt));
  assign busy        = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      cmd      <= '0;
      mt       <= '0;
      n        <= '0;
      kt       <= '0;
      wait_cnt <= '0;
      more     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          cmd   <= cmd_in;
          mt    <= '0;
          n     <= '0;
          kt    <= '0;
          state <= C_RUN;
        end
        C_RUN: begin
          if (!kt_end) begin
            kt <= kt + 5'd1;
          end else begin
            kt <= '0;
            if (!cmd.col_order) begin
              // row-wise output: n inner, mt outer
              if (!n_end) n <= n + 11'd1;
              else begin
                n <= '0;
                if (!mt_end) mt <= mt + 6'd1;
                else begin
                  wait_cnt <= 4'(DRAIN);
                  state    <= C_DRAIN;
                end
              end
            end else begin
              // column-wise output: mt inner, n outer
              if (!mt_end) mt <= mt + 6'd1;
              else begin
                mt   <= '0;
                more <= !n_end;
                if (!n_end) n <= n + 11'd1;
                if (cmd.softmax) begin
                  state <= C_WAIT_SM;
                end else if (cmd.prune && !n_end) begin
                  wait_cnt <= 4'(GAP);
                  state    <= C_GAP;
                end else if (n_end) begin
                  wait_cnt <= 4'(DRAIN);
                  state    <= C_DRAIN;
                end
              end
            end
          end
        end
        C_WAIT_SM: if (sm_row_done) begin
          if (more) state <= C_RUN;
          else begin
            wait_cnt <= 4'(DRAIN);
            state    <= C_DRAIN;
          end
        end
        C_GAP: begin
          if (wait_cnt == 0) state <= C_RUN;
          else wait_cnt <= wait_cnt - 4'd1;
        end
        C_DRAIN: begin
          if (wait_cnt == 0) begin
            done  <= 1'b1;
            state <= C_IDLE;
          end else begin
            wait_cnt <= wait_cnt - 4'd1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // command rules the datapath relies on
  property p_sm_order;
    @(posedge clk) disable iff (!rst_n) (start && state == C_IDLE && (cmd_in.softmax || cmd_in.prune)) |-> cmd_in.col_order;
  endproperty
  a_sm_order: assert property (p_sm_order) else $error("softmax/prune commands need column-wise order");

  property p_nonzero;
    @(posedge clk) disable iff (!rst_n) (start && state == C_IDLE) |-> (cmd_in.m_tiles != 0 && cmd_in.k_chunks != 0 && cmd_in.n_cols != 0);
  endproperty
  a_nonzero: assert property (p_nonzero) else $error("empty command");
endmodule
