// dyn_agu: dynamic address generator for matrix A, with NZ detection of the
// dilated mode and address compression (16 lanes).
//
// One request names row m of the virtual matrix A and the first column k0 of
// the current block.  The 16 elements of that row block have the consecutive
// virtual addresses addr, addr+1, ..., addr+15 with addr = m*K + k0.
//   loss mode:     A is the stored (rotated, transposed) kernel, so every lane
//                  inside the matrix is non-zero and the addresses are used
//                  as they are.
//   gradient mode: every lane goes through dilated_map (Alg. 2), which marks
//                  zero insertions and maps the rest to the stored loss.
// The compression stage then keeps only the start address of the first
// non-zero lane (base0) and gives each non-zero lane its rank among the
// non-zeros, since these are stored consecutively.  When the row block
// crosses into the next batch image the stored non-zeros jump; the lanes
// after the jump form a second run with start address base1 (out_split high).
// This second run is this design's addition; the paper describes one run.
// Outputs appear 6 cycles after the request: out_valid, base0, base1, and per
// lane the mask bit (nz), the run (0/1) and the rank inside the run, which
// the crossbar uses one cycle later to put buffer A's data back in place.
module dyn_agu
  import bp_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_DIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  layer_dims_t dims,
  input  logic        in_valid,
  input  addr_t       row_m,
  input  addr_t       k0,
  output logic        out_valid,
  output addr_t       out_base0,
  output addr_t       out_base1,
  output logic        out_split,
  output logic        out_nz   [LANES],
  output logic        out_run  [LANES],
  output lane_t       out_rank [LANES]
);

  localparam int unsigned LAT = 4;   // latency of one mapping lane

  logic  v0;
  logic  lane_v0 [LANES];
  addr_t lane_a0 [LANES];
  logic  vq [LAT];
  logic  ld_v [LAT][LANES];          // loss mode: delay line matching dilated_map
  addr_t ld_a [LAT][LANES];
  logic  m_nz   [LANES];
  addr_t m_addr [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0;
      for (int j = 0; j < LANES; j++) begin
        lane_v0[j] <= 1'b0;
        lane_a0[j] <= '0;
      end
      for (int i = 0; i < LAT; i++) begin
        vq[i] <= 1'b0;
        for (int j = 0; j < LANES; j++) begin
          ld_v[i][j] <= 1'b0;
          ld_a[i][j] <= '0;
        end
      end
    end else begin
      v0 <= in_valid;
      for (int j = 0; j < LANES; j++) begin
        lane_v0[j] <= in_valid && (k0 + addr_t'(j) < dims.k_dim);
        lane_a0[j] <= row_m * dims.k_dim + k0 + addr_t'(j);
      end
      vq[0] <= v0;
      for (int i = 1; i < LAT; i++) vq[i] <= vq[i-1];
      for (int j = 0; j < LANES; j++) begin
        ld_v[0][j] <= lane_v0[j];
        ld_a[0][j] <= lane_a0[j];
        for (int i = 1; i < LAT; i++) begin
          ld_v[i][j] <= ld_v[i-1][j];
          ld_a[i][j] <= ld_a[i-1][j];
        end
      end
    end
  end

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    logic  d_nz;
    addr_t d_addr;
    dilated_map u_dmap (
      .clk, .rst_n, .cfg, .dims,
      .in_valid(lane_v0[j] && cfg.mode == MODE_GRAD),
      .addr_in (lane_a0[j]),
      .out_nz  (d_nz),
      .addr_out(d_addr)
    );
    assign m_nz[j]   = (cfg.mode == MODE_GRAD) ? d_nz   : ld_v[LAT-1][j];
    assign m_addr[j] = (cfg.mode == MODE_GRAD) ? d_addr : ld_a[LAT-1][j];
  end

  // Compression: start addresses of at most two runs of consecutive addresses.
  addr_t c_base0, c_base1;
  logic  c_split, c_bad;
  logic  c_run  [LANES];
  lane_t c_rank [LANES];

  always_comb begin
    logic  seen0;
    addr_t cnt0, cnt1;
    seen0   = 1'b0;
    c_split = 1'b0;
    c_bad   = 1'b0;
    c_base0 = '0;
    c_base1 = '0;
    cnt0    = '0;
    cnt1    = '0;
    for (int j = 0; j < LANES; j++) begin
      c_run[j]  = 1'b0;
      c_rank[j] = '0;
      if (m_nz[j]) begin
        if (!seen0) begin
          seen0   = 1'b1;
          c_base0 = m_addr[j];
          cnt0    = addr_t'(1);
        end else if (!c_split && m_addr[j] == c_base0 + cnt0) begin
          c_rank[j] = lane_t'(cnt0);
          cnt0      = cnt0 + 1;
        end else if (!c_split) begin
          c_split   = 1'b1;
          c_base1   = m_addr[j];
          c_run[j]  = 1'b1;
          cnt1      = addr_t'(1);
        end else begin
          c_run[j]  = 1'b1;
          c_rank[j] = lane_t'(cnt1);
          if (m_addr[j] != c_base1 + cnt1) c_bad = 1'b1;
          cnt1      = cnt1 + 1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_base0 <= '0;
      out_base1 <= '0;
      out_split <= 1'b0;
      for (int j = 0; j < LANES; j++) begin
        out_nz[j]   <= 1'b0;
        out_run[j]  <= 1'b0;
        out_rank[j] <= '0;
      end
    end else begin
      // A row block may span at most two batch images (needs Ho''*Wo'' >= 16).
      assert (!(vq[LAT-1] && c_bad)) else $error("dyn_agu: row block spans more than two runs");
      out_valid <= vq[LAT-1];
      out_base0 <= c_base0;
      out_base1 <= c_base1;
      out_split <= c_split;
      for (int j = 0; j < LANES; j++) begin
        out_nz[j]   <= m_nz[j];
        out_run[j]  <= c_run[j];
        out_rank[j] <= c_rank[j];
      end
    end
  end

endmodule
