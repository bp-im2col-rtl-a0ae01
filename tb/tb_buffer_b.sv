// tb_buffer_b: fills both halves of a small buffer B, then issues random
// 16-lane reads with random lane masks and checks each lane one cycle later:
// the stored word for a non-zero lane, zero for a masked lane.
// Interface: write port and the 16-lane masked read port, one cycle
// latency, with a small DEPTH.  Zero fill by the mask follows the paper; the
// per-lane read port is this design's.
module tb_buffer_b;
  import bp_pkg::*;
  localparam int DEPTH = 256;
  localparam int L = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic  wr_en, wr_bank, rd_en, rd_bank;
  addr_t wr_addr;
  word_t wr_data;
  logic  rd_nz [L];
  addr_t rd_addr [L];
  word_t rd_data [L];
  buffer_b #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  function automatic word_t pat(int bank, int a);
    return word_t'((bank << 24) | (a * 7 + 1));
  endfunction
  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_addr = '0; wr_data = '0;
    for (int j = 0; j < L; j++) begin rd_nz[j] = 0; rd_addr[j] = '0; end
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1; wr_bank = 1'(b); wr_addr = addr_t'(a); wr_data = pat(b, a);
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      int bk;
      int ad [L];
      logic nz [L];
      bk = $urandom_range(0, 1);
      rd_en = 1; rd_bank = 1'(bk);
      for (int j = 0; j < L; j++) begin
        ad[j] = $urandom_range(0, DEPTH - 1);
        nz[j] = 1'($urandom_range(0, 3) != 0);
        rd_addr[j] = addr_t'(ad[j]); rd_nz[j] = nz[j];
      end
      @(negedge clk);
      for (int j = 0; j < L; j++) begin
        checks++;
        if (rd_data[j] != (nz[j] ? pat(bk, ad[j]) : 32'd0)) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d", j);
        end
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
