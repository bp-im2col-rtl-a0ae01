// tb_stat_agu: requests every row of every 16-column block of the stationary
// matrix B for a loss-mode layer (7x7 input, 3x3 kernel, S=2, P=1) and for the
// gradient-mode im2col of the same layer, and checks each lane's mask bit and
// buffer B address 5 cycles later against the zero-inserted, zero-padded maps
// worked out here from the convolution definitions; the row tag must come back
// with its request.
// Interface: one request (row, first column, tag) per cycle, responses
// checked 5 cycles later.  The zero rules follow the paper's Algorithm 1
// plus this design's bottom/right test.
module tb_stat_agu;
  import bp_pkg::*;
  localparam int L = 16;
  localparam int LAT = 5;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;
  layer_cfg_t  cfg;
  layer_dims_t dims;
  logic  in_valid, out_valid;
  addr_t row_k, col0;
  lane_t in_tag, out_tag;
  logic  out_nz [L];
  addr_t out_addr [L];
  stat_agu dut (.*);
  int checks = 0, failures = 0, cyc = 0, zeros = 0;
  int q_k [$], q_c [$], q_t [$];
  int bsz = 2, c = 3, n = 4, hi = 7, wi = 7, kh = 3, kw = 3, s = 2, p = 1, ho = 4, wo = 4;
  int hoo = 7, woo = 7, kdim, ncdim;
  bit grad;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int k, cb, t;
      k = q_k.pop_front(); cb = q_c.pop_front(); t = q_t.pop_front();
      check(cyc - t == LAT, "latency");
      check(out_tag == lane_t'(k % L), "tag");
      for (int j = 0; j < L; j++) begin
        int col, e_addr;
        bit e_nz;
        col = cb + j;
        e_nz = 0; e_addr = 0;
        if (k < kdim && col < ncdim) begin
          if (!grad) begin
            // row (nn, a, bb) of kernel offsets, column (b, h, w) of the input
            int nn, a, bb, b, h, w, th, tw;
            nn = k / (kh*kw); a = (k / kw) % kh; bb = k % kw;
            b = col / (hi*wi); h = (col / wi) % hi; w = col % wi;
            // rotated kernel offset (kh-1-a): dO pixel (th/s, tw/s)
            th = h + p - (kh - 1 - a); tw = w + p - (kw - 1 - bb);
            if (th >= 0 && tw >= 0 && th % s == 0 && tw % s == 0 && th/s < ho && tw/s < wo) begin
              e_nz = 1; e_addr = ((b*n + nn)*ho + th/s)*wo + tw/s;
            end
          end else begin
            int b, h, w, cc, a, bb, ih, iw;
            b = k / (hoo*woo); h = (k / woo) % hoo; w = k % woo;
            cc = col / (kh*kw); a = (col / kw) % kh; bb = col % kw;
            ih = h + a - p; iw = w + bb - p;
            if (ih >= 0 && iw >= 0 && ih < hi && iw < wi) begin
              e_nz = 1; e_addr = ((b*c + cc)*hi + ih)*wi + iw;
            end
          end
        end
        if (!e_nz) zeros++;
        check(out_nz[j] == e_nz, $sformatf("%0d nz k=%0d col=%0d", grad, k, col));
        if (e_nz) check(out_addr[j] == addr_t'(e_addr), $sformatf("%0d addr k=%0d col=%0d", grad, k, col));
      end
    end
  end

  task automatic setup(bit g);
    grad = g;
    cfg = '0;
    cfg.mode = g ? MODE_GRAD : MODE_LOSS;
    cfg.bsz = dim_t'(bsz); cfg.c = dim_t'(c); cfg.n = dim_t'(n);
    cfg.hi = dim_t'(hi); cfg.wi = dim_t'(wi); cfg.kh = dim_t'(kh); cfg.kw = dim_t'(kw);
    cfg.s = dim_t'(s); cfg.ph = dim_t'(p); cfg.pw = dim_t'(p);
    dims = '0;
    dims.ho = addr_t'(ho); dims.wo = addr_t'(wo); dims.hoo = addr_t'(hoo); dims.woo = addr_t'(woo);
    dims.offh = addr_t'(kh-1-p); dims.offw = addr_t'(kw-1-p);
    dims.hiwi = addr_t'(hi*wi); dims.bhiwi = addr_t'(bsz*hi*wi); dims.chiwi = addr_t'(c*hi*wi);
    dims.howo = addr_t'(ho*wo); dims.nhowo = addr_t'(n*ho*wo);
    dims.hoowoo = addr_t'(hoo*woo); dims.bhoowoo = addr_t'(bsz*hoo*woo);
    dims.khkw = addr_t'(kh*kw);
    kdim  = g ? bsz*hoo*woo : n*kh*kw;
    ncdim = g ? c*kh*kw : bsz*hi*wi;
    dims.k_dim = addr_t'(kdim); dims.nc_dim = addr_t'(ncdim);
  endtask

  task automatic sweep();
    for (int cb = 0; cb < ncdim; cb += L)
      for (int k = 0; k < ((kdim + L - 1) / L) * L; k++) begin
        in_valid = 1; row_k = addr_t'(k); col0 = addr_t'(cb); in_tag = lane_t'(k % L);
        q_k.push_back(k); q_c.push_back(cb); q_t.push_back(cyc);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; row_k = '0; col0 = '0; in_tag = '0;
    setup(1'b0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep();
    setup(1'b1);
    repeat (2) @(negedge clk);
    sweep();
    check(zeros > 0, "no zero lanes");
    check(q_k.size() == 0, "missing responses");
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
