// buffer_b: double-buffered on-chip buffer for matrix B (the loss of the
// output in loss mode, the input feature map in gradient mode).
//
// Two halves of DEPTH words; the compute side reads half rd_bank while the
// host writes the other.  Each cycle up to LANES lanes read one word each at
// their own address.  A lane whose rd_nz bit is low is a zero pixel found by
// NZ detection: it does not access the memory and its output is zero, which is
// how the paper fills zero positions of the stationary matrix by the mask
// before the data enters the array.  Data appear one cycle after the request.
// Sizes and the one-word-per-lane read port are this design's choices.
// The write address is a full 32-bit address; only its low log2(DEPTH) bits
// are used, so the upper bits stand unused.
module buffer_b
  import bp_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned LANES = ARRAY_DIM
) (
  input  logic  clk,
  input  logic  wr_en,
  input  logic  wr_bank,
  input  addr_t wr_addr,
  input  word_t wr_data,
  input  logic  rd_en,
  input  logic  rd_bank,
  input  logic  rd_nz   [LANES],
  input  addr_t rd_addr [LANES],
  output word_t rd_data [LANES]
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr[AW-1:0]}] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int j = 0; j < LANES; j++) begin
        rd_data[j] <= rd_nz[j] ? mem[{rd_bank, rd_addr[j][AW-1:0]}] : '0;
      end
    end
  end

endmodule
