// tb_compute_ctrl: starts the controller on a loss-mode and a gradient-mode
// layer, with a model of the output buffer that returns each issued row 30
// cycles later.  Checks the derived sizes, that the stationary and dynamic
// requests follow the expected block order (columns outer, K inner; 16
// stationary rows then M dynamic rows per block), the tile_first/tile_base
// values, that no block starts before the previous one has drained, and the
// exact cycle count of the run.
// Interface: start and layer shape in; request streams and tile signals
// out, sampled every cycle.  The block order and schedule are this design's.
module tb_compute_ctrl;
  import bp_pkg::*;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;
  logic        start, busy, done;
  layer_cfg_t  cfg_in, cfg;
  layer_dims_t dims;
  logic  st_valid, dy_valid, tile_start, tile_first;
  addr_t st_row, st_col0, dy_row, dy_k0, tile_base, col_count;
  lane_t st_tag;
  compute_ctrl dut (.*);

  int checks = 0, failures = 0;
  localparam int RET = 30;
  logic ret_pipe [RET];
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // output-buffer model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_count <= '0;
      for (int i = 0; i < RET; i++) ret_pipe[i] <= 1'b0;
    end else begin
      ret_pipe[0] <= dy_valid;
      for (int i = 1; i < RET; i++) ret_pipe[i] <= ret_pipe[i-1];
      if (tile_start) col_count <= '0;
      else if (ret_pipe[RET-1]) col_count <= col_count + 1;
    end
  end

  task automatic run(bit grad, int bsz, int c, int n, int hi, int kk, int s, int p);
    int ho, hoo, m, k, nc, kt_n, nt_n, cycles, exp_cycles;
    ho = (hi + 2*p - kk) / s + 1;
    hoo = (ho - 1) * s + 1;
    m  = grad ? n : c;
    k  = grad ? bsz*hoo*hoo : n*kk*kk;
    nc = grad ? c*kk*kk : bsz*hi*hi;
    kt_n = (k + 15) / 16; nt_n = (nc + 15) / 16;
    @(negedge clk);
    cfg_in = '0;
    cfg_in.mode = grad ? MODE_GRAD : MODE_LOSS;
    cfg_in.bsz = dim_t'(bsz); cfg_in.c = dim_t'(c); cfg_in.n = dim_t'(n);
    cfg_in.hi = dim_t'(hi); cfg_in.wi = dim_t'(hi); cfg_in.kh = dim_t'(kk); cfg_in.kw = dim_t'(kk);
    cfg_in.s = dim_t'(s); cfg_in.ph = dim_t'(p); cfg_in.pw = dim_t'(p);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    for (int nt = 0; nt < nt_n; nt++)
      for (int kt = 0; kt < kt_n; kt++) begin
        for (int r = 0; r < 16; r++) begin
          while (!st_valid) begin
            check(!dy_valid && !done, "idle between blocks");
            @(negedge clk); cycles++;
          end
          check(st_row == addr_t'(kt*16 + r) && st_col0 == addr_t'(nt*16) && st_tag == lane_t'(r),
                $sformatf("stationary request nt=%0d kt=%0d r=%0d", nt, kt, r));
          @(negedge clk); cycles++;
        end
        for (int mm = 0; mm < m; mm++) begin
          while (!dy_valid) begin
            check(!st_valid, "no load while waiting");
            if (tile_start) check(tile_first == (kt == 0) && tile_base == addr_t'(nt*m), "tile_start values");
            @(negedge clk); cycles++;
          end
          check(dy_row == addr_t'(mm) && dy_k0 == addr_t'(kt*16), "dynamic request");
          if (mm == 0) check(tile_start && tile_first == (kt == 0) && tile_base == addr_t'(nt*m),
                             $sformatf("tile_start values nt=%0d kt=%0d", nt, kt));
          @(negedge clk); cycles++;
        end
      end
    while (!done) begin
      check(!st_valid && !dy_valid, "no requests after last block");
      @(negedge clk); cycles++;
    end
    check(dims.ho == addr_t'(ho) && dims.hoo == addr_t'(hoo), "Ho, Ho''");
    check(dims.m_dim == addr_t'(m) && dims.k_dim == addr_t'(k) && dims.nc_dim == addr_t'(nc), "matrix sizes");
    check(dims.k_tiles == addr_t'(kt_n) && dims.n_tiles == addr_t'(nt_n), "tile counts");
    // set-up 3 cycles, per block: 16 loads, 2 gap, M rows, drain RET+1
    exp_cycles = 3 + nt_n * kt_n * (16 + 2 + m + RET + 1);
    check(cycles == exp_cycles, $sformatf("cycles %0d exp %0d", cycles, exp_cycles));
  endtask

  initial begin
    rst_n = 0; start = 0; cfg_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0, 2, 3, 4, 7, 3, 2, 1);
    run(1'b1, 2, 3, 4, 7, 3, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
