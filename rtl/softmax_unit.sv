// softmax_unit: row-wise softmax of attention scores, 8 scores per beat.
//
// The paper places a SoftMax block after the PE array and arranges the
// Q x K^T dataflow so that the scores of one query row leave the
// accumulator consecutively, 8 keys per beat; it gives no insides. This is
// the simplest row-buffered implementation:
//   COLLECT  stores the beats of one row (up to MAX_TOKENS keys) and tracks
//            the maximum over the valid keys (key index < m_valid);
//   EXP      one tile per cycle: e = 2^(-(max-x)/8), from an 8-entry table
//            of 2^(-f/8) in Q15 and a right shift, summed into `sum`;
//   RECIP    one division, recip = 2^31 / sum;
//   OUT      one tile per cycle: p = (e * recip) >> 24, i.e. the probability
//            times 128, saturated to 127 so it stays a positive INT8.
// The input score is therefore read as a base-2 exponent with 3 fraction
// bits (the layer's requantisation shift sets that scale, folding in
// 1/sqrt(d) and log2(e) approximately). Masked keys (index >= m_valid) get
// probability 0. The row is emitted padded with zero tiles up to a multiple
// of 8 tiles (64 keys) so that it can be used directly as the 64-aligned
// reduction operand of the following attention x V product.
// Interface: in_valid/in_tile/in_last/in_q carry score beats; `ready` is
// high in COLLECT; out_valid/out_tile/out_q carry probability beats;
// row_done pulses with the last output beat. Timing per row of T tiles:
// T cycles in, T cycles EXP, 1 cycle RECIP, then ceil(T/8)*8 output beats;
// the first output beat is presented T+3 cycles after the last input beat.
module softmax_unit
  import vit_pkg::*;
#(
  parameter int unsigned LANES    = N_ROWS,
  parameter int unsigned MAX_TOK  = MAX_TOKENS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [8:0]  m_valid,
  input  logic        in_valid,
  input  logic [5:0]  in_tile,
  input  logic        in_last,
  input  act_t        in_q [LANES],
  output logic        ready,
  output logic        out_valid,
  output logic [5:0]  out_tile,
  output logic        out_last,
  output act_t        out_q [LANES],
  output logic        row_done
);
  localparam int unsigned TILES = MAX_TOK / LANES;

  typedef enum logic [1:0] {S_COLLECT, S_EXP, S_RECIP, S_OUT} state_e;
  state_e state;

  act_t        xbuf [TILES][LANES];
  logic [15:0] ebuf [TILES][LANES];
  act_t        xmax;
  logic        any_valid;
  logic [5:0]  n_tiles;     // tiles received
  logic [5:0]  out_tiles;   // tiles to emit (multiple of 8)
  logic [5:0]  tile;
  logic [31:0] sum;
  logic [16:0] recip;

  // 2^(-f/8) in Q15, f = 0..7
  function automatic logic [15:0] exp2_frac(input logic [2:0] f);
    case (f)
      3'd0: return 16'd32768;
      3'd1: return 16'd30048;
      3'd2: return 16'd27554;
      3'd3: return 16'd25268;
      3'd4: return 16'd23170;
      3'd5: return 16'd21247;
      3'd6: return 16'd19484;
      default: return 16'd17867;
    endcase
  endfunction

  function automatic logic key_ok(input logic [5:0] t, input int unsigned r,
                                  input logic [8:0] mv);
    return ({3'b0, t} * 9'(LANES) + 9'(r)) < mv;
  endfunction

  // EXP stage, combinational on the current tile
  logic [15:0] e_c   [LANES];
  logic [31:0] esum_c;
  always_comb begin
    esum_c = '0;
    for (int r = 0; r < LANES; r++) begin
      logic [8:0] d;
      d = 9'($signed({xmax[DATA_W-1], xmax}) - $signed({xbuf[tile[4:0]][r][DATA_W-1], xbuf[tile[4:0]][r]}));
      if (!key_ok(tile, r, m_valid) || d[8:3] >= 6'd16) e_c[r] = '0;
      else e_c[r] = exp2_frac(d[2:0]) >> d[6:3];
      esum_c = esum_c + 32'(e_c[r]);
    end
  end

  // running maximum of a beat
  act_t beat_max;
  logic beat_any;
  always_comb begin
    beat_max = any_valid ? xmax : -8'sd128;
    beat_any = any_valid;
    for (int r = 0; r < LANES; r++) begin
      if (key_ok(in_tile, r, m_valid) && in_q[r] > beat_max) beat_max = in_q[r];
      if (key_ok(in_tile, r, m_valid)) beat_any = 1'b1;
    end
  end

  // OUT stage, combinational on the current tile
  act_t out_c [LANES];
  always_comb begin
    for (int r = 0; r < LANES; r++) begin
      logic [33:0] prod;
      prod = 34'(ebuf[tile[4:0]][r]) * 34'(recip);
      if (tile >= n_tiles)          out_c[r] = '0;
      else if (prod[33:24] > 127)   out_c[r] = 8'sd127;
      else                          out_c[r] = act_t'(prod[31:24]);
    end
  end

  // row buffers (no reset needed: written before they are read)
  always_ff @(posedge clk) begin
    if (state == S_COLLECT && in_valid) xbuf[in_tile[4:0]] <= in_q;
    if (state == S_EXP)                 ebuf[tile[4:0]]    <= e_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      xmax      <= '0;
      any_valid <= 1'b0;
      n_tiles   <= '0;
      out_tiles <= '0;
      tile      <= '0;
      sum       <= '0;
      recip     <= '0;
      out_valid <= 1'b0;
      out_tile  <= '0;
      out_last  <= 1'b0;
      row_done  <= 1'b0;
      for (int r = 0; r < LANES; r++) out_q[r] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      row_done  <= 1'b0;
      case (state)
        S_COLLECT: if (in_valid) begin
          xmax          <= beat_max;
          any_valid     <= beat_any;
          if (in_last) begin
            n_tiles   <= in_tile + 6'd1;
            out_tiles <= 6'(((int'(in_tile) + 8) / 8) * 8);
            tile      <= '0;
            sum       <= '0;
            state     <= S_EXP;
          end
        end
        S_EXP: begin
          sum        <= sum + esum_c;
          if (tile == n_tiles - 6'd1) state <= S_RECIP;
          else                        tile  <= tile + 6'd1;
        end
        S_RECIP: begin
          recip <= (sum == 0) ? '0 : 17'(32'h8000_0000 / sum);
          tile  <= '0;
          state <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_tile  <= tile;
          out_q     <= out_c;
          if (tile == out_tiles - 6'd1) begin
            out_last  <= 1'b1;
            row_done  <= 1'b1;
            any_valid <= 1'b0;
            state     <= S_COLLECT;
          end else begin
            tile <= tile + 6'd1;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  assign ready = (state == S_COLLECT);
endmodule
