// im2col_map: one lane of the conventional implicit im2col with zero padding,
// used for the stationary matrix B in gradient mode, as a 4-stage pipeline.
//
// In gradient mode B is the padded input feature map lowered with rows
// (b, h, w) over B x Ho'' x Wo'' and columns (c, kh, kw).  The element is
// I[b][c][h+kh-Ph][w+kw-Pw], or a zero padding when that lies outside the
// Hi x Wi image; the input is stored as B x C x Hi x Wi:
//   row, col       = addr_in / (C*Kh*Kw), addr_in % (C*Kh*Kw)        stage 1
//   b, t, c, t2    = row/(Ho''Wo''), row%(Ho''Wo''), col/(KhKw), col%(KhKw)
//   h, w, kh, kw   = t/Wo'', t%Wo'', t2/Kw, t2%Kw                    stage 3
//   ih, iw         = h+kh-Ph, w+kw-Pw; zero if outside               stage 4
//   addr_out       = b*C*Hi*Wi + c*Hi*Wi + ih*Wi + iw
// The paper says the input's zero padding is handled as in inference; the
// exact mapping here is this design's own.  Latency 4 cycles.
// The lane takes the whole layer shape and derived-size structs, but reads
// only the fields its formulas need; the other fields stand unused.
module im2col_map
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
  addr_t row1, col1, b2, t2, c2, u2, b3, c3, h3, w3, kh3, kw3;
  addr_t ih3, iw3;
  logic  zero3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, out_nz} <= '0;
      {row1, col1, b2, t2, c2, u2, b3, c3, h3, w3, kh3, kw3, addr_out} <= '0;
    end else begin
      v1   <= in_valid;
      row1 <= addr_in / dims.nc_dim;
      col1 <= addr_in % dims.nc_dim;
      v2   <= v1;
      b2   <= row1 / dims.hoowoo;
      t2   <= row1 % dims.hoowoo;
      c2   <= col1 / dims.khkw;
      u2   <= col1 % dims.khkw;
      v3   <= v2;
      b3   <= b2;
      c3   <= c2;
      h3   <= t2 / dims.woo;
      w3   <= t2 % dims.woo;
      kh3  <= u2 / addr_t'(cfg.kw);
      kw3  <= u2 % addr_t'(cfg.kw);
      out_nz   <= v3 && !zero3;
      addr_out <= zero3 ? '0 : b3 * dims.chiwi + c3 * dims.hiwi + ih3 * addr_t'(cfg.wi) + iw3;
    end
  end

  always_comb begin
    ih3   = h3 + kh3 - addr_t'(cfg.ph);
    iw3   = w3 + kw3 - addr_t'(cfg.pw);
    zero3 = (h3 + kh3 < addr_t'(cfg.ph)) || (w3 + kw3 < addr_t'(cfg.pw))
         || (ih3 >= addr_t'(cfg.hi)) || (iw3 >= addr_t'(cfg.wi));
  end

endmodule
