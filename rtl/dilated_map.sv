// dilated_map: one lane of BP-im2col in dilated-convolution mode (gradient
// calculation, the paper's Algorithm 2), as a 4-stage pipeline.
//
// addr_in is a position in the virtual matrix A, the zero-inserted loss of
// the output, with rows n and columns (b, h, w) over B x Ho'' x Wo''.  The
// lane detects zero insertions and maps non-zeros to the stored loss of the
// output (layout B x N x Ho x Wo):
//   n, col   = addr_in / (B*Ho''*Wo''), addr_in % (B*Ho''*Wo'')       stage 1
//   temp, w  = col / Wo'', col % Wo''                                  stage 2
//   b, h     = temp / Ho'', temp % Ho''                                stage 3
//   zero if h % S or w % S (area 1); else h', w' = h/S, w/S           stage 4
//   addr_out = b*N*Ho*Wo + n*Ho*Wo + h'*Wo + w'
// out_nz is low for zero pixels and for lanes that entered with in_valid low.
// Latency is 4 cycles, one result per cycle; the staging is this design's.
// The lane takes the whole layer shape and derived-size structs, but reads
// only the fields its formulas need; the other fields stand unused.
module dilated_map
  import bp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  layer_dims_t dims,
  input  logic        in_valid,
  input  addr_t       addr_in,
  output logic        out_nz,
  output addr_t       addr_out
);

  logic  v1, v2, v3;
  addr_t n1, col1, n2, tmp2, w2, n3, b3, h3, w3;
  logic  zero3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, out_nz} <= '0;
      {n1, col1, n2, tmp2, w2, n3, b3, h3, w3, addr_out} <= '0;
    end else begin
      v1   <= in_valid;
      n1   <= addr_in / dims.bhoowoo;
      col1 <= addr_in % dims.bhoowoo;
      v2   <= v1;
      n2   <= n1;
      tmp2 <= col1 / dims.woo;
      w2   <= col1 % dims.woo;
      v3   <= v2;
      n3   <= n2;
      w3   <= w2;
      b3   <= tmp2 / dims.hoo;
      h3   <= tmp2 % dims.hoo;
      out_nz   <= v3 && !zero3;
      addr_out <= zero3 ? '0
                : b3 * dims.nhowo + n3 * dims.howo
                  + (h3 / addr_t'(cfg.s)) * dims.wo + w3 / addr_t'(cfg.s);
    end
  end

  assign zero3 = (h3 % addr_t'(cfg.s) != 0) || (w3 % addr_t'(cfg.s) != 0);

endmodule
