// out_buffer: accumulation buffer for the result matrix Y = A x B.
//
// One bank per array column.  Bank j keeps column 16*t + j of Y for every
// block column t, at address t*M + m.  Results leave the array's columns in
// row order, so each column keeps a counter of the rows it has received in the
// current block; tile_start clears the counters and latches tile_base (t*M)
// and tile_first.  For the first block along K the incoming partial sum is
// written, for later ones it is added (FP32) to the stored value, which sums
// the products over all K blocks.  col_count reports the rows received by the
// last column, which finishes last, so the controller knows a block has
// drained.  The host reads bank rd_col at rd_addr combinationally.
// The paper does not describe the output side of the array; this buffer is
// this design's own, sized by DEPTH (words per bank).
// rd_addr is a full 32-bit address; only its low log2(DEPTH) bits are used.
module out_buffer
  import bp_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned DIM   = ARRAY_DIM,
  parameter int unsigned DEPTH = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tile_start,
  input  logic  tile_first,
  input  addr_t tile_base,
  input  logic  in_valid [DIM],
  input  word_t in_data  [DIM],
  output addr_t col_count,
  input  lane_t rd_col,
  input  addr_t rd_addr,
  output word_t rd_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t mem [DIM][DEPTH];
  addr_t cnt [DIM];
  addr_t base_q;
  logic  first_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      first_q <= 1'b1;
      for (int j = 0; j < DIM; j++) cnt[j] <= '0;
    end else if (tile_start) begin
      base_q  <= tile_base;
      first_q <= tile_first;
      for (int j = 0; j < DIM; j++) cnt[j] <= '0;
    end else begin
      for (int j = 0; j < DIM; j++) begin
        if (in_valid[j]) cnt[j] <= cnt[j] + 1;
      end
    end
  end

  for (genvar j = 0; j < DIM; j++) begin : g_bank
    logic [AW-1:0] wa;
    assign wa = AW'(base_q + cnt[j]);
    always_ff @(posedge clk) begin
      if (!tile_start && in_valid[j])
        mem[j][wa] <= first_q ? in_data[j] : fp32_add(mem[j][wa], in_data[j]);
    end
  end

  assign col_count = cnt[DIM-1];
  assign rd_data   = mem[rd_col][AW'(rd_addr)];

endmodule
