// tb_buffer_a: fills both halves of a small buffer A with distinct words,
// then checks random two-window reads (one-cycle latency, wrap inside the
// half) from each half, and that a write into one half leaves the other alone.
// Interface: write port (bank, address, word) and the two-window read port;
// data are checked one cycle after the request.  A small DEPTH keeps the run
// short; the double buffering follows the paper, the window form is this
// design's.
module tb_buffer_a;
  import bp_pkg::*;
  localparam int DEPTH = 256;
  localparam int W = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic  wr_en, wr_bank, rd_en, rd_bank;
  addr_t wr_addr, base0, base1;
  word_t wr_data;
  word_t win0 [W];
  word_t win1 [W];
  buffer_a #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  function automatic word_t pat(int bank, int a);
    return word_t'((bank << 20) ^ (a * 32'h9e37) ^ 32'h5a5a0000);
  endfunction
  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_addr = '0; base0 = '0; base1 = '0; wr_data = '0;
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1; wr_bank = 1'(b); wr_addr = addr_t'(a); wr_data = pat(b, a);
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      int b0, b1, bk;
      bk = $urandom_range(0, 1);
      b0 = $urandom_range(0, DEPTH - 1);
      b1 = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_bank = 1'(bk); base0 = addr_t'(b0); base1 = addr_t'(b1);
      // a concurrent write into the other half
      wr_en = 1; wr_bank = ~1'(bk); wr_addr = addr_t'(b0); wr_data = pat(1 - bk, b0);
      @(negedge clk);
      for (int i = 0; i < W; i++) begin
        checks += 2;
        if (win0[i] != pat(bk, (b0 + i) % DEPTH)) begin failures++; $display("FAIL win0 %0d", i); end
        if (win1[i] != pat(bk, (b1 + i) % DEPTH)) begin failures++; $display("FAIL win1 %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
