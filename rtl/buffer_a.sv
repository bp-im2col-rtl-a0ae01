// buffer_a: double-buffered on-chip buffer for matrix A (kernel in loss
// mode, loss of the output in gradient mode).
//
// The array holds two halves of DEPTH words.  The compute side reads half
// rd_bank while the host fills the other half through the write port, which
// is the paper's double buffering.  A read request gives up to two start
// addresses; one cycle later win0[i] = mem[base0+i] and win1[i] = mem[base1+i]
// for i = 0..WIN-1 (addresses wrap inside the half).  The paper sends only the
// address of the first non-zero element of a row block and receives the
// consecutive non-zero elements that follow it; the second window is this
// design's addition for a row block that crosses from one batch image to the
// next, where the stored non-zeros stop being consecutive.  The sizes are
// this design's choice (the paper gives none).
// The address ports are full 32-bit addresses; only the low log2(DEPTH)
// bits index a half, so the upper bits are unused (an address beyond the
// half is a host error, not decoded).
module buffer_a
  import bp_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned WIN   = ARRAY_DIM
) (
  input  logic  clk,
  input  logic  wr_en,
  input  logic  wr_bank,
  input  addr_t wr_addr,
  input  word_t wr_data,
  input  logic  rd_en,
  input  logic  rd_bank,
  input  addr_t base0,
  input  addr_t base1,
  output word_t win0 [WIN],
  output word_t win1 [WIN]
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr[AW-1:0]}] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int i = 0; i < WIN; i++) begin
        win0[i] <= mem[{rd_bank, AW'(base0[AW-1:0] + AW'(i))}];
        win1[i] <= mem[{rd_bank, AW'(base1[AW-1:0] + AW'(i))}];
      end
    end
  end

endmodule
