// tb_banked_sram: random byte-enabled writes to all banks of a small
// banked SRAM, mirrored in a shadow array, then reads of random words in
// every bank compared with the shadow one cycle after the read request.
// Also checks that a read and a write in the same bank and cycle see the
// old contents (read-before-write).
module tb_banked_sram;
  import vit_pkg::*;
  localparam int unsigned BANKS = 8, DEPTH = 24;
  logic clk = 0;
  logic [BANKS-1:0] re = '0, we = '0;
  logic [ADDR_W-1:0] raddr [BANKS], waddr [BANKS];
  logic [7:0] wbe [BANKS];
  word_t wdata [BANKS], rdata [BANKS];
  word_t shadow [BANKS][DEPTH];
  logic [ADDR_W-1:0] ra_q [BANKS];
  int checks = 0, failures = 0;

  banked_sram #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wbe, .wdata);
  always #5 clk = ~clk;

  initial begin
    for (int b = 0; b < BANKS; b++) begin
      raddr[b] = '0; waddr[b] = '0; wbe[b] = '0; wdata[b] = '0;
    end
    // full writes first so every word is known
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = '1;
      for (int b = 0; b < BANKS; b++) begin
        waddr[b] = ADDR_W'(a); wbe[b] = 8'hFF; wdata[b] = {$urandom, $urandom};
        shadow[b][a] = wdata[b];
      end
    end
    // random partial writes
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int b = 0; b < BANKS; b++) begin
        we[b] = $urandom % 2;
        waddr[b] = ADDR_W'($urandom % DEPTH); wbe[b] = 8'($urandom); wdata[b] = {$urandom, $urandom};
        if (we[b])
          for (int i = 0; i < 8; i++)
            if (wbe[b][i]) shadow[b][waddr[b]][i*8 +: 8] = wdata[b][i*8 +: 8];
      end
    end
    @(negedge clk);
    we = '0;
    // reads
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      re = '1;
      for (int b = 0; b < BANKS; b++) begin raddr[b] = ADDR_W'($urandom % DEPTH); ra_q[b] = raddr[b]; end
      @(negedge clk);
      re = '0;
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (rdata[b] != shadow[b][ra_q[b]]) begin
          failures++;
          $display("bank %0d addr %0d got %h expected %h", b, ra_q[b], rdata[b], shadow[b][ra_q[b]]);
        end
      end
    end
    // read-before-write in the same cycle
    @(negedge clk);
    re = '1; we = '1;
    for (int b = 0; b < BANKS; b++) begin
      raddr[b] = 3; waddr[b] = 3; wbe[b] = 8'hFF; wdata[b] = ~shadow[b][3];
    end
    @(negedge clk);
    re = '0; we = '0;
    for (int b = 0; b < BANKS; b++) begin
      checks++;
      if (rdata[b] != shadow[b][3]) begin failures++; $display("read-before-write failed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
