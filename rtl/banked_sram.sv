// banked_sram: a set of independent SRAM banks of 64-bit words.
//
// Models the on-chip buffers of the accelerator: the Token SRAM (64 banks x
// 160 words = 64 x 1.25KB), each Weight SRAM set (8 banks x 576 words =
// 8 x 4.5KB) and each Temp SRAM (64 banks x 80 words = 64 x 0.625KB). Bank
// counts and sizes are the paper's; the port structure is this design's
// choice. Every bank has one read port and one write port, each with its
// own address, so the whole array can deliver a tile with one address while
// results are written elsewhere. Writes have per-byte enables (an output
// beat writes one INT8 value per bank). Reads are synchronous: data appear
// the cycle after re. Written as arrays so a memory compiler macro can be
// substituted. Addresses at or beyond DEPTH are outside the bank.
module banked_sram
  import vit_pkg::*;
#(
  parameter int unsigned BANKS = TOK_BANKS,
  parameter int unsigned DEPTH = TOK_DEPTH,
  parameter int unsigned AW    = ADDR_W
) (
  input  logic          clk,
  input  logic [BANKS-1:0] re,
  input  logic [AW-1:0] raddr [BANKS],
  output word_t         rdata [BANKS],
  input  logic [BANKS-1:0] we,
  input  logic [AW-1:0] waddr [BANKS],
  input  logic [7:0]    wbe   [BANKS],
  input  word_t         wdata [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    word_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (re[b]) rdata[b] <= mem[raddr[b]];
      if (we[b]) begin
        for (int i = 0; i < 8; i++) begin
          if (wbe[b][i]) mem[waddr[b]][i*8 +: 8] <= wdata[b][i*8 +: 8];
        end
      end
    end
  end
endmodule
