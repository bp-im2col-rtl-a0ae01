// transposed_map: one lane of BP-im2col in transposed-convolution mode
// (loss calculation, the paper's Algorithm 1), as a 4-stage pipeline.
//
// addr_in is a position in the virtual lowered matrix B, whose rows are
// (n, kh, kw) and whose columns are (b, h, w) of the input.  The lane maps it
// into the virtual zero-inserted, zero-padded loss map, decides whether the
// pixel is a zero space, and if not maps it to the stored loss of the output
// (layout B x N x Ho x Wo):
//   row, col      = addr_in / (B*Hi*Wi), addr_in % (B*Hi*Wi)         stage 1
//   b, t1, wk, t2 = col/(Hi*Wi), row/Kw, row%Kw, col%(Hi*Wi)         stage 2
//   n, hk, h, w   = t1/Kh, t1%Kh, t2/Wi + hk, t2%Wi + wk             stage 3
//   zero if h < Kh-1-Ph or w < Kw-1-Pw                     (area 0)  stage 4
//        or (h-(Kh-1-Ph)) % S or (w-(Kw-1-Pw)) % S         (area 1)
//        or (h-(Kh-1-Ph))/S >= Ho or (w-(Kw-1-Pw))/S >= Wo
//   addr_out = b*N*Ho*Wo + n*Ho*Wo + h'*Wo + w'
// The last zero test (bottom and right padding) is not written in the paper's
// conditions; it is added here so that those pixels are not read.  out_nz is
// low for zero pixels and for lanes that entered with in_valid low.
// Latency is 4 cycles, one result per cycle.
// The lane takes the whole layer shape and derived-size structs, but reads
// only the fields its formulas need; the other fields stand unused.
module transposed_map
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
  addr_t row1, col1;
  addr_t b2, t1_2, wk2, t2_2;
  addr_t b3, n3, h3, w3;
  addr_t hh3, ww3, hp3, wp3;
  logic  zero3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, out_nz} <= '0;
      {row1, col1, b2, t1_2, wk2, t2_2, b3, n3, h3, w3, addr_out} <= '0;
    end else begin
      // stage 1
      v1   <= in_valid;
      row1 <= addr_in / dims.bhiwi;
      col1 <= addr_in % dims.bhiwi;
      // stage 2
      v2   <= v1;
      b2   <= col1 / dims.hiwi;
      t1_2 <= row1 / addr_t'(cfg.kw);
      wk2  <= row1 % addr_t'(cfg.kw);
      t2_2 <= col1 % dims.hiwi;
      // stage 3
      v3   <= v2;
      b3   <= b2;
      n3   <= t1_2 / addr_t'(cfg.kh);
      h3   <= t2_2 / addr_t'(cfg.wi) + t1_2 % addr_t'(cfg.kh);
      w3   <= t2_2 % addr_t'(cfg.wi) + wk2;
      // stage 4
      out_nz   <= v3 && !zero3;
      addr_out <= zero3 ? '0 : b3 * dims.nhowo + n3 * dims.howo + hp3 * dims.wo + wp3;
    end
  end

  always_comb begin
    hh3   = h3 - dims.offh;
    ww3   = w3 - dims.offw;
    hp3   = hh3 / addr_t'(cfg.s);
    wp3   = ww3 / addr_t'(cfg.s);
    zero3 = (h3 < dims.offh) || (w3 < dims.offw)                               // area 0
         || (hh3 % addr_t'(cfg.s) != 0) || (ww3 % addr_t'(cfg.s) != 0)        // area 1
         || (hp3 >= dims.ho) || (wp3 >= dims.wo);                              // bottom/right
  end

endmodule
