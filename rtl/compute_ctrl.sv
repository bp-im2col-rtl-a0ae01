// compute_ctrl: the computing control of the accelerator.
//
// On start it latches the layer shape and, over two set-up cycles, derives
// every size the address generators need (Ho, Wo, Ho'', Wo'', the products,
// and the lowered matrix sizes M x K times K x NC of the selected mode):
//   loss mode:     M = C, K = N*Kh*Kw,       NC = B*Hi*Wi
//   gradient mode: M = N, K = B*Ho''*Wo'',   NC = C*Kh*Kw
// It then walks the result in 16-column blocks (outer loop) and the inner
// dimension in 16-row blocks (inner loop).  For each block it
//   LOAD:   issues the 16 rows of the stationary 16x16 block of B to stat_agu,
//   STREAM: after a short gap, issues all M rows of the A block to dyn_agu,
//           one per cycle, and pulses tile_start to the output buffer,
//   DRAIN:  waits until the last array column has returned M rows,
// so a stationary block is never replaced while A data still use it.  done
// rises when the last block has drained and stays high until the next start.
// The paper names this unit only; the loop order and the strict
// load / stream / drain sequence (no overlap) are this design's choices.
module compute_ctrl
  import bp_pkg::*;
#(
  parameter int unsigned DIM       = ARRAY_DIM,
  parameter int unsigned LOAD_WAIT = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg_in,
  output logic        busy,
  output logic        done,
  output layer_cfg_t  cfg,
  output layer_dims_t dims,
  // stationary requests
  output logic        st_valid,
  output addr_t       st_row,
  output addr_t       st_col0,
  output lane_t       st_tag,
  // dynamic requests
  output logic        dy_valid,
  output addr_t       dy_row,
  output addr_t       dy_k0,
  // output buffer
  output logic        tile_start,
  output logic        tile_first,
  output addr_t       tile_base,
  input  addr_t       col_count
);

  typedef enum logic [2:0] {
    S_IDLE, S_SETUP_A, S_SETUP_B, S_LOAD, S_GAP, S_STREAM, S_DRAIN
  } state_e;

  state_e state;
  addr_t  ho_q, wo_q;
  addr_t  kt, nt, cnt;
  layer_dims_t dn;

  // Derived sizes from the latched shape and Ho/Wo.
  always_comb begin
    addr_t hoo, woo;
    hoo        = (ho_q - 1) * addr_t'(cfg.s) + 1;
    woo        = (wo_q - 1) * addr_t'(cfg.s) + 1;
    dn.ho      = ho_q;
    dn.wo      = wo_q;
    dn.hoo     = hoo;
    dn.woo     = woo;
    dn.offh    = addr_t'(cfg.kh) - 1 - addr_t'(cfg.ph);
    dn.offw    = addr_t'(cfg.kw) - 1 - addr_t'(cfg.pw);
    dn.hiwi    = addr_t'(cfg.hi) * addr_t'(cfg.wi);
    dn.bhiwi   = addr_t'(cfg.bsz) * dn.hiwi;
    dn.chiwi   = addr_t'(cfg.c) * dn.hiwi;
    dn.howo    = ho_q * wo_q;
    dn.nhowo   = addr_t'(cfg.n) * dn.howo;
    dn.hoowoo  = hoo * woo;
    dn.bhoowoo = addr_t'(cfg.bsz) * dn.hoowoo;
    dn.khkw    = addr_t'(cfg.kh) * addr_t'(cfg.kw);
    if (cfg.mode == MODE_LOSS) begin
      dn.m_dim  = addr_t'(cfg.c);
      dn.k_dim  = addr_t'(cfg.n) * dn.khkw;
      dn.nc_dim = dn.bhiwi;
    end else begin
      dn.m_dim  = addr_t'(cfg.n);
      dn.k_dim  = dn.bhoowoo;
      dn.nc_dim = addr_t'(cfg.c) * dn.khkw;
    end
    dn.k_tiles = (dn.k_dim  + addr_t'(DIM - 1)) / addr_t'(DIM);
    dn.n_tiles = (dn.nc_dim + addr_t'(DIM - 1)) / addr_t'(DIM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg        <= '0;
      dims       <= '0;
      ho_q       <= '0;
      wo_q       <= '0;
      kt         <= '0;
      nt         <= '0;
      cnt        <= '0;
      done       <= 1'b0;
      tile_start <= 1'b0;
      tile_first <= 1'b0;
      tile_base  <= '0;
    end else begin
      tile_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg   <= cfg_in;
            done  <= 1'b0;
            state <= S_SETUP_A;
          end
        end
        S_SETUP_A: begin
          ho_q  <= (addr_t'(cfg.hi) + 2 * addr_t'(cfg.ph) - addr_t'(cfg.kh)) / addr_t'(cfg.s) + 1;
          wo_q  <= (addr_t'(cfg.wi) + 2 * addr_t'(cfg.pw) - addr_t'(cfg.kw)) / addr_t'(cfg.s) + 1;
          state <= S_SETUP_B;
        end
        S_SETUP_B: begin
          dims  <= dn;
          kt    <= '0;
          nt    <= '0;
          cnt   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          cnt <= cnt + 1;
          if (cnt == addr_t'(DIM - 1)) begin
            cnt   <= '0;
            state <= S_GAP;
          end
        end
        S_GAP: begin
          cnt <= cnt + 1;
          if (cnt == addr_t'(LOAD_WAIT - 1)) begin
            cnt        <= '0;
            tile_start <= 1'b1;
            tile_first <= (kt == '0);
            tile_base  <= nt * dims.m_dim;
            state      <= S_STREAM;
          end
        end
        S_STREAM: begin
          cnt <= cnt + 1;
          if (cnt == dims.m_dim - 1) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (!tile_start && col_count == dims.m_dim) begin
            if (kt + 1 < dims.k_tiles) begin
              kt    <= kt + 1;
              state <= S_LOAD;
            end else if (nt + 1 < dims.n_tiles) begin
              kt    <= '0;
              nt    <= nt + 1;
              state <= S_LOAD;
            end else begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign st_valid = (state == S_LOAD);
  assign st_row   = kt * addr_t'(DIM) + cnt;
  assign st_col0  = nt * addr_t'(DIM);
  assign st_tag   = lane_t'(cnt);
  assign dy_valid = (state == S_STREAM);
  assign dy_row   = cnt;
  assign dy_k0    = kt * addr_t'(DIM);

endmodule
