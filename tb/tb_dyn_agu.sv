// tb_dyn_agu: drives every row block of matrix A for a gradient-mode layer
// (B=2, N=4, Ho=Wo=4, S=2, so Ho''=Wo''=7) and of a loss-mode layer, one
// request per cycle, and checks each response 6 cycles later.  For every lane
// the expected mask bit and stored address come from the zero-inserted loss
// map computed here; the address the response implies (base of its run plus
// its rank) must equal it, and the second run must be used exactly when a row
// block crosses into the next batch image.
// Interface: one request (row, first column) per cycle, responses checked
// 6 cycles later.  The zero-insertion rule follows the paper's Algorithm 2;
// the two-run compression is this design's.
module tb_dyn_agu;
  import bp_pkg::*;
  localparam int L = 16;
  localparam int LAT = 6;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;
  layer_cfg_t  cfg;
  layer_dims_t dims;
  logic  in_valid, out_valid, out_split;
  addr_t row_m, k0, out_base0, out_base1;
  logic  out_nz [L];
  logic  out_run [L];
  lane_t out_rank [L];
  dyn_agu dut (.*);
  int checks = 0, failures = 0, cyc = 0, splits = 0;
  int q_m [$], q_k0 [$], q_t [$];
  int bsz = 2, n = 4, ho = 4, wo = 4, s = 2, hoo = 7, woo = 7, kdim;
  bit grad;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int m, kb, t, prev_b;
      bit exp_split, seen;
      m = q_m.pop_front(); kb = q_k0.pop_front(); t = q_t.pop_front();
      check(cyc - t == LAT, $sformatf("latency %0d", cyc - t));
      exp_split = 0; seen = 0; prev_b = -1;
      for (int j = 0; j < L; j++) begin
        int k, b, h, w, e_addr;
        bit e_nz;
        k = kb + j;
        if (grad) begin
          b = k / (hoo*woo); h = (k / woo) % hoo; w = k % woo;
          e_nz = (k < kdim) && (h % s == 0) && (w % s == 0);
          e_addr = ((b*n + m)*ho + h/s)*wo + w/s;
          if (e_nz) begin
            if (seen && b != prev_b) exp_split = 1;
            seen = 1; prev_b = b;
          end
        end else begin
          e_nz = (k < kdim);
          e_addr = m*kdim + k;
        end
        check(out_nz[j] == e_nz, $sformatf("nz m=%0d k=%0d", m, k));
        if (e_nz)
          check((out_run[j] ? out_base1 : out_base0) + addr_t'(out_rank[j]) == addr_t'(e_addr),
                $sformatf("addr m=%0d k=%0d", m, k));
      end
      check(out_split == exp_split, $sformatf("split m=%0d k0=%0d", m, kb));
      if (out_split) splits++;
    end
  end

  task automatic setup(bit g);
    grad = g;
    cfg = '0;
    cfg.mode = g ? MODE_GRAD : MODE_LOSS;
    cfg.bsz = dim_t'(bsz); cfg.n = dim_t'(n); cfg.c = 3; cfg.s = dim_t'(s);
    cfg.kh = 3; cfg.kw = 3;
    dims = '0;
    dims.ho = addr_t'(ho); dims.wo = addr_t'(wo);
    dims.hoo = addr_t'(hoo); dims.woo = addr_t'(woo);
    dims.howo = addr_t'(ho*wo); dims.nhowo = addr_t'(n*ho*wo);
    dims.hoowoo = addr_t'(hoo*woo); dims.bhoowoo = addr_t'(bsz*hoo*woo);
    kdim = g ? bsz*hoo*woo : n*9;
    dims.k_dim = addr_t'(kdim);
  endtask

  task automatic sweep(int mmax);
    for (int kb = 0; kb < kdim; kb += L)
      for (int m = 0; m < mmax; m++) begin
        in_valid = 1; row_m = addr_t'(m); k0 = addr_t'(kb);
        q_m.push_back(m); q_k0.push_back(kb); q_t.push_back(cyc);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; row_m = '0; k0 = '0;
    setup(1'b1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep(n);
    check(splits > 0, "no split seen");
    setup(1'b0);
    repeat (2) @(negedge clk);
    sweep(3);
    check(q_m.size() == 0, "missing responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
