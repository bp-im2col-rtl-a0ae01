// bp_im2col_top: TPU-like accelerator with BP-im2col address generation.
//
// A 16x16 input-stationary FP32 systolic array computes Y = A x B for one
// backpropagation product of a convolutional layer, with the zero spaces of
// transposed and dilated convolution never stored, moved or read:
//   stationary path: compute_ctrl -> stat_agu (Alg. 1 / im2col, NZ mask)
//                    -> buffer_b (only non-zero lanes read, zeros filled)
//                    -> array row load
//   dynamic path:    compute_ctrl -> dyn_agu (Alg. 2, NZ mask, compression)
//                    -> buffer_a (consecutive non-zeros) -> crossbar
//                    -> skew_fifos -> array west edge
//   results:         array south edge -> out_buffer (accumulates K blocks)
// The paper's NOC between the address generators and the buffers is direct
// wiring here.  The host fills buffer A/B halves through the write ports while
// the other halves (compute_bank) are in use, sets cfg_in and pulses start;
// done rises when the whole result is in the output buffer, which the host
// reads by column (out_rd_col = col % 16, out_rd_addr = (col / 16) * M + row).
// Buffer contents expected by each mode:
//   loss:     A = kernel as C x (N*Kh*Kw) rows, element [c][n*KhKw+kh*Kw+kw]
//                 = W[n][c][Kh-1-kh][Kw-1-kw];  B = loss of output, B x N x Ho x Wo
//             result Y[c][b*Hi*Wi + h*Wi + w] = loss of input
//   gradient: A = loss of output, B x N x Ho x Wo;  B = input, B x C x Hi x Wi
//             result Y[n][c*Kh*Kw + kh*Kw + kw] = kernel gradient
// The perf_* counters count busy cycles, words actually read from each buffer
// (the paper's buffer bandwidth), lanes skipped as zero, dynamic row blocks
// that needed a second run, and blocks processed.
module bp_im2col_top
  import bp_pkg::*;
#(
  parameter int unsigned A_DEPTH   = 16384,
  parameter int unsigned B_DEPTH   = 16384,
  parameter int unsigned OUT_DEPTH = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg_in,
  input  logic       compute_bank,
  output logic       busy,
  output logic       done,
  input  logic       a_wr_en,
  input  logic       a_wr_bank,
  input  addr_t      a_wr_addr,
  input  word_t      a_wr_data,
  input  logic       b_wr_en,
  input  logic       b_wr_bank,
  input  addr_t      b_wr_addr,
  input  word_t      b_wr_data,
  input  lane_t      out_rd_col,
  input  addr_t      out_rd_addr,
  output word_t      out_rd_data,
  output addr_t      perf_cycles,
  output addr_t      perf_a_words,
  output addr_t      perf_b_words,
  output addr_t      perf_a_zero_lanes,
  output addr_t      perf_b_zero_lanes,
  output addr_t      perf_splits,
  output addr_t      perf_tiles
);

  localparam int unsigned D = ARRAY_DIM;

  layer_cfg_t  cfg;
  layer_dims_t dims;

  logic  st_valid, dy_valid, tile_start, tile_first;
  addr_t st_row, st_col0, dy_row, dy_k0, tile_base, col_count;
  lane_t st_tag;

  compute_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .busy, .done, .cfg, .dims,
    .st_valid, .st_row, .st_col0, .st_tag,
    .dy_valid, .dy_row, .dy_k0,
    .tile_start, .tile_first, .tile_base, .col_count
  );

  // ---------------- stationary path ----------------
  logic  sa_valid;
  lane_t sa_tag;
  logic  sa_nz   [D];
  addr_t sa_addr [D];
  word_t b_data  [D];
  logic  ld_en_q;
  lane_t ld_row_q;

  stat_agu u_stat_agu (
    .clk, .rst_n, .cfg, .dims,
    .in_valid(st_valid), .row_k(st_row), .col0(st_col0), .in_tag(st_tag),
    .out_valid(sa_valid), .out_tag(sa_tag), .out_nz(sa_nz), .out_addr(sa_addr)
  );

  buffer_b #(.DEPTH(B_DEPTH)) u_buf_b (
    .clk,
    .wr_en(b_wr_en), .wr_bank(b_wr_bank), .wr_addr(b_wr_addr), .wr_data(b_wr_data),
    .rd_en(sa_valid), .rd_bank(compute_bank), .rd_nz(sa_nz), .rd_addr(sa_addr),
    .rd_data(b_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_en_q  <= 1'b0;
      ld_row_q <= '0;
    end else begin
      ld_en_q  <= sa_valid;
      ld_row_q <= sa_tag;
    end
  end

  // ---------------- dynamic path ----------------
  logic  da_valid, da_split;
  addr_t da_base0, da_base1;
  logic  da_nz   [D];
  logic  da_run  [D];
  lane_t da_rank [D];
  word_t win0 [D];
  word_t win1 [D];
  logic  xv_q;
  logic  xnz_q   [D];
  logic  xrun_q  [D];
  lane_t xrank_q [D];
  word_t a_row   [D];
  word_t a_skew  [D];
  logic  a_skew_v[D];

  dyn_agu u_dyn_agu (
    .clk, .rst_n, .cfg, .dims,
    .in_valid(dy_valid), .row_m(dy_row), .k0(dy_k0),
    .out_valid(da_valid), .out_base0(da_base0), .out_base1(da_base1),
    .out_split(da_split), .out_nz(da_nz), .out_run(da_run), .out_rank(da_rank)
  );

  buffer_a #(.DEPTH(A_DEPTH)) u_buf_a (
    .clk,
    .wr_en(a_wr_en), .wr_bank(a_wr_bank), .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .rd_en(da_valid), .rd_bank(compute_bank), .base0(da_base0), .base1(da_base1),
    .win0, .win1
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xv_q <= 1'b0;
      for (int j = 0; j < D; j++) begin
        xnz_q[j]   <= 1'b0;
        xrun_q[j]  <= 1'b0;
        xrank_q[j] <= '0;
      end
    end else begin
      xv_q <= da_valid;
      for (int j = 0; j < D; j++) begin
        xnz_q[j]   <= da_nz[j];
        xrun_q[j]  <= da_run[j];
        xrank_q[j] <= da_rank[j];
      end
    end
  end

  crossbar u_xbar (
    .win0, .win1, .nz(xnz_q), .run(xrun_q), .rank(xrank_q), .out(a_row)
  );

  skew_fifos u_skew (
    .clk, .rst_n, .in_data(a_row), .in_valid(xv_q), .out_data(a_skew), .out_valid(a_skew_v)
  );

  // ---------------- array and results ----------------
  word_t psum  [D];
  logic  psum_v[D];

  systolic_array u_array (
    .clk, .rst_n,
    .load_en(ld_en_q), .load_row(ld_row_q), .load_data(b_data),
    .a_in(a_skew), .a_valid(a_skew_v),
    .psum_out(psum), .out_valid(psum_v)
  );

  out_buffer #(.DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .tile_start, .tile_first, .tile_base,
    .in_valid(psum_v), .in_data(psum), .col_count,
    .rd_col(out_rd_col), .rd_addr(out_rd_addr), .rd_data(out_rd_data)
  );

  // ---------------- performance counters ----------------
  addr_t a_nz_cnt, b_nz_cnt, a_lanes, b_lanes;
  always_comb begin
    a_nz_cnt = '0;
    b_nz_cnt = '0;
    for (int j = 0; j < D; j++) begin
      a_nz_cnt = a_nz_cnt + addr_t'(da_nz[j]);
      b_nz_cnt = b_nz_cnt + addr_t'(sa_nz[j]);
    end
    a_lanes = addr_t'(D) - a_nz_cnt;
    b_lanes = addr_t'(D) - b_nz_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_cycles       <= '0;
      perf_a_words      <= '0;
      perf_b_words      <= '0;
      perf_a_zero_lanes <= '0;
      perf_b_zero_lanes <= '0;
      perf_splits       <= '0;
      perf_tiles        <= '0;
    end else begin
      if (start && !busy) begin
        perf_cycles       <= '0;
        perf_a_words      <= '0;
        perf_b_words      <= '0;
        perf_a_zero_lanes <= '0;
        perf_b_zero_lanes <= '0;
        perf_splits       <= '0;
        perf_tiles        <= '0;
      end else begin
        if (busy) perf_cycles <= perf_cycles + 1;
        if (da_valid) begin
          perf_a_words      <= perf_a_words + a_nz_cnt;
          perf_a_zero_lanes <= perf_a_zero_lanes + a_lanes;
          if (da_split) perf_splits <= perf_splits + 1;
        end
        if (sa_valid) begin
          perf_b_words      <= perf_b_words + b_nz_cnt;
          perf_b_zero_lanes <= perf_b_zero_lanes + b_lanes;
        end
        if (tile_start) perf_tiles <= perf_tiles + 1;
      end
    end
  end

  // Double buffering: the host may not write the half that is being computed on.
  always_ff @(posedge clk) begin
    assert (!(busy && a_wr_en && a_wr_bank == compute_bank))
      else $error("buffer A write into the half in use");
    assert (!(busy && b_wr_en && b_wr_bank == compute_bank))
      else $error("buffer B write into the half in use");
  end

endmodule
