// stat_agu: stationary address generator for matrix B (16 lanes).
//
// For one request (row k of the virtual lowered matrix B and the first column
// col0 of the current block) it generates the virtual addresses
// k*NC + col0 + j of the 16 lanes j in parallel, one per PE of an array row,
// and sends each through a mapping lane:
//   loss mode:     transposed_map (BP-im2col, NZ detection of Alg. 1)
//   gradient mode: im2col_map (conventional implicit im2col with padding)
// A lane beyond the matrix edge (k >= K or col0+j >= NC) is reported as zero.
// Outputs, 5 cycles after the request: out_valid, the row tag given with the
// request, and per lane the NZ mask bit and the buffer B address.  Only the
// non-zero lanes are meant to be read from buffer B.  The 16 parallel lanes
// follow the paper; the pipeline depth is this design's (the paper's divider
// pipeline has a 68-cycle prologue whose structure it does not describe).
module stat_agu
  import bp_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_DIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  layer_dims_t dims,
  input  logic        in_valid,
  input  addr_t       row_k,
  input  addr_t       col0,
  input  lane_t       in_tag,
  output logic        out_valid,
  output lane_t       out_tag,
  output logic        out_nz   [LANES],
  output addr_t       out_addr [LANES]
);

  localparam int unsigned LAT = 4;   // latency of one mapping lane

  logic  v0;
  lane_t tag0;
  logic  lane_v0 [LANES];
  addr_t lane_a0 [LANES];
  logic  vq  [LAT];
  lane_t tq  [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0   <= 1'b0;
      tag0 <= '0;
      for (int j = 0; j < LANES; j++) begin
        lane_v0[j] <= 1'b0;
        lane_a0[j] <= '0;
      end
      for (int i = 0; i < LAT; i++) begin
        vq[i] <= 1'b0;
        tq[i] <= '0;
      end
    end else begin
      v0   <= in_valid;
      tag0 <= in_tag;
      for (int j = 0; j < LANES; j++) begin
        lane_v0[j] <= in_valid && (row_k < dims.k_dim) && (col0 + addr_t'(j) < dims.nc_dim);
        lane_a0[j] <= row_k * dims.nc_dim + col0 + addr_t'(j);
      end
      vq[0] <= v0;
      tq[0] <= tag0;
      for (int i = 1; i < LAT; i++) begin
        vq[i] <= vq[i-1];
        tq[i] <= tq[i-1];
      end
    end
  end

  assign out_valid = vq[LAT-1];
  assign out_tag   = tq[LAT-1];

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    logic  t_nz, g_nz;
    addr_t t_addr, g_addr;
    transposed_map u_tmap (
      .clk, .rst_n, .cfg, .dims,
      .in_valid(lane_v0[j] && cfg.mode == MODE_LOSS),
      .addr_in (lane_a0[j]),
      .out_nz  (t_nz),
      .addr_out(t_addr)
    );
    im2col_map u_imap (
      .clk, .rst_n, .cfg, .dims,
      .in_valid(lane_v0[j] && cfg.mode == MODE_GRAD),
      .addr_in (lane_a0[j]),
      .out_nz  (g_nz),
      .addr_out(g_addr)
    );
    assign out_nz[j]   = (cfg.mode == MODE_LOSS) ? t_nz   : g_nz;
    assign out_addr[j] = (cfg.mode == MODE_LOSS) ? t_addr : g_addr;
  end

endmodule
