// tb_table2_layers: the five stride-2 layer shapes whose runtimes are
// published for this architecture, scaled down to fit the on-chip buffers.
//
// Each shape keeps its kernel size, stride and padding (3x3/S2/P0,
// 3x3/S2/P1, 1x1/S2/P0, 3x3/S2/P1, 1x1/S2/P0) with smaller images and channel
// counts, batch 2 as in the published evaluation:
//   224/3/64   -> 15/3/16     112/64/64  -> 14/16/16    56/256/512 -> 14/32/64
//   28/244/244 -> 8/20/20     14/1024/2048 -> 7/64/128   (Hi/C/N)
// Channel counts that are not multiples of 16 (3, 20) leave partial blocks.
// For every shape it runs loss calculation on one half of buffers A/B while
// the gradient data are written into the other half, then gradient
// calculation.  The data are small integers stored as FP32, so the results
// are compared bit for bit with a direct convolution computed here.  The
// buffer words read, the two-run row blocks and the block count are checked
// against counts made from the zero-inserted matrices, and the busy cycles
// against the schedule bound of 16 loads + gap + M rows + drain per block.
// Interface: only the top's host ports are used, at its default sizes.  The
// layer shapes follow the published table; the scaling is this design's, since
// the full layers exceed the on-chip buffers and there is no off-chip memory.
module tb_table2_layers;
  import bp_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic       start;
  layer_cfg_t cfg_in;
  logic       compute_bank;
  logic       busy, done;
  logic       a_wr_en, a_wr_bank, b_wr_en, b_wr_bank;
  addr_t      a_wr_addr, b_wr_addr;
  word_t      a_wr_data, b_wr_data;
  lane_t      out_rd_col;
  addr_t      out_rd_addr;
  word_t      out_rd_data;
  addr_t      perf_cycles, perf_a_words, perf_b_words, perf_a_zero_lanes;
  addr_t      perf_b_zero_lanes, perf_splits, perf_tiles;

  bp_im2col_top dut (.*);

  int checks = 0, failures = 0;
  int cnt_area_b = 0, cnt_zero_a = 0, cnt_split = 0, cnt_accum = 0;
  int cnt_overlap = 0, cnt_loss = 0, cnt_grad = 0;

  // ---------------- helpers ----------------
  function automatic word_t i2f(int v);
    int a, p;
    logic [31:0] m;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    p = 0;
    for (int i = 0; i < 24; i++) if (a >= (1 << i)) p = i;
    m = 32'(a) << (23 - p);
    return {v < 0, 8'(127 + p), m[22:0]};
  endfunction

  function automatic bit same(word_t x, word_t y);
    if (x[30:0] == 0 && y[30:0] == 0) return 1'b1;
    return x == y;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- layer data ----------------
  typedef struct {
    int bsz, c, n, hi, wi, kh, kw, s, p, ho, wo;
  } shape_t;

  int w_t  [int];   // W[n][c][kh][kw]
  int do_t [int];   // dO[b][n][ho][wo]
  int in_t [int];   // I[b][c][h][w]

  function automatic int rnd();
    return int'($urandom_range(0, 6)) - 3;
  endfunction

  task automatic make_data(input shape_t L);
    w_t.delete(); do_t.delete(); in_t.delete();
    for (int i = 0; i < L.n*L.c*L.kh*L.kw; i++) w_t[i] = rnd();
    for (int i = 0; i < L.bsz*L.n*L.ho*L.wo; i++) do_t[i] = rnd();
    for (int i = 0; i < L.bsz*L.c*L.hi*L.wi; i++) in_t[i] = rnd();
  endtask

  // Writes into the given half, one word per cycle on the negative edge.
  task automatic fill(input shape_t L, input bit grad, input bit bank);
    int ka;
    int na = grad ? L.bsz*L.n*L.ho*L.wo : L.c*L.n*L.kh*L.kw;
    int nb = grad ? L.bsz*L.c*L.hi*L.wi : L.bsz*L.n*L.ho*L.wo;
    ka = L.n * L.kh * L.kw;
    for (int i = 0; i < ((na > nb) ? na : nb); i++) begin
      @(negedge clk);
      if (busy && (bank != compute_bank)) cnt_overlap++;
      a_wr_en   = (i < na);
      a_wr_bank = bank;
      a_wr_addr = addr_t'(i);
      if (grad) a_wr_data = i2f(do_t[i % na]);
      else begin
        // A[c][n*KhKw + kh*Kw + kw] = W[n][c][Kh-1-kh][Kw-1-kw]
        int c, r, n, kh, kw;
        c  = (i % na) / ka;
        r  = (i % na) % ka;
        n  = r / (L.kh*L.kw);
        kh = (r / L.kw) % L.kh;
        kw = r % L.kw;
        a_wr_data = i2f(w_t[((n*L.c + c)*L.kh + (L.kh-1-kh))*L.kw + (L.kw-1-kw)]);
      end
      b_wr_en   = (i < nb);
      b_wr_bank = bank;
      b_wr_addr = addr_t'(i);
      b_wr_data = grad ? i2f(in_t[i % nb]) : i2f(do_t[i % nb]);
    end
    @(negedge clk);
    a_wr_en = 1'b0;
    b_wr_en = 1'b0;
  endtask

  function automatic layer_cfg_t to_cfg(shape_t L, bit grad);
    layer_cfg_t c;
    c.mode = grad ? MODE_GRAD : MODE_LOSS;
    c.bsz = dim_t'(L.bsz); c.c = dim_t'(L.c); c.n = dim_t'(L.n);
    c.hi = dim_t'(L.hi); c.wi = dim_t'(L.wi); c.kh = dim_t'(L.kh); c.kw = dim_t'(L.kw);
    c.s = dim_t'(L.s); c.ph = dim_t'(L.p); c.pw = dim_t'(L.p);
    return c;
  endfunction

  // Runs one operation on the current half and checks it.
  task automatic run_check(input shape_t L, input bit grad, input int exp_cycles_max);
    int m_dim, nc_dim, k_dim, n_tiles, k_tiles, exp_b, exp_a, exp_split;
    int hoo, woo;
    @(negedge clk);
    cfg_in = to_cfg(L, grad);
    start  = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    wait (done);
    @(negedge clk);
    hoo = (L.ho-1)*L.s + 1;
    woo = (L.wo-1)*L.s + 1;
    m_dim  = grad ? L.n : L.c;
    k_dim  = grad ? L.bsz*hoo*woo : L.n*L.kh*L.kw;
    nc_dim = grad ? L.c*L.kh*L.kw : L.bsz*L.hi*L.wi;
    n_tiles = (nc_dim + 15) / 16;
    k_tiles = (k_dim + 15) / 16;
    check(perf_tiles == addr_t'(n_tiles*k_tiles), "tile count");
    if (k_tiles > 1) cnt_accum++;
    // Result against direct convolution.
    for (int m = 0; m < m_dim; m++) begin
      for (int col = 0; col < nc_dim; col++) begin
        int ref_v = 0;
        if (!grad) begin
          int b, h, w;
          b = col / (L.hi*L.wi); h = (col / L.wi) % L.hi; w = col % L.wi;
          for (int n = 0; n < L.n; n++)
            for (int kh = 0; kh < L.kh; kh++)
              for (int kw = 0; kw < L.kw; kw++) begin
                int th, tw;
                th = h + L.p - kh; tw = w + L.p - kw;
                if (th >= 0 && tw >= 0 && th % L.s == 0 && tw % L.s == 0
                    && th / L.s < L.ho && tw / L.s < L.wo)
                  ref_v += do_t[((b*L.n + n)*L.ho + th/L.s)*L.wo + tw/L.s]
                         * w_t[((n*L.c + m)*L.kh + kh)*L.kw + kw];
              end
        end else begin
          int c, kh, kw;
          c = col / (L.kh*L.kw); kh = (col / L.kw) % L.kh; kw = col % L.kw;
          for (int b = 0; b < L.bsz; b++)
            for (int oh = 0; oh < L.ho; oh++)
              for (int ow = 0; ow < L.wo; ow++) begin
                int ih, iw;
                ih = oh*L.s + kh - L.p; iw = ow*L.s + kw - L.p;
                if (ih >= 0 && iw >= 0 && ih < L.hi && iw < L.wi)
                  ref_v += do_t[((b*L.n + m)*L.ho + oh)*L.wo + ow]
                         * in_t[((b*L.c + c)*L.hi + ih)*L.wi + iw];
              end
        end
        out_rd_col  = lane_t'(col % 16);
        out_rd_addr = addr_t'((col / 16) * m_dim + m);
        #1;
        check(same(out_rd_data, i2f(ref_v)),
              $sformatf("%s m=%0d col=%0d got %h exp %h", grad ? "grad" : "loss",
                        m, col, out_rd_data, i2f(ref_v)));
      end
    end
    // Buffer bandwidth: count the non-zero elements of the virtual matrices.
    exp_b = 0; exp_a = 0; exp_split = 0;
    if (!grad) begin
      for (int r = 0; r < k_dim; r++)
        for (int col = 0; col < nc_dim; col++) begin
          int n, kh, kw, b, h, w, vh, vw, offh, offw;
          n = r / (L.kh*L.kw); kh = (r / L.kw) % L.kh; kw = r % L.kw;
          b = col / (L.hi*L.wi); h = (col / L.wi) % L.hi + kh; w = col % L.wi + kw;
          offh = L.kh - 1 - L.p; offw = L.kw - 1 - L.p;
          vh = h - offh; vw = w - offw;
          if (vh >= 0 && vw >= 0 && vh % L.s == 0 && vw % L.s == 0
              && vh / L.s < L.ho && vw / L.s < L.wo) exp_b++;
        end
      exp_a = n_tiles * m_dim * k_dim;
    end else begin
      for (int r = 0; r < k_dim; r++)
        for (int col = 0; col < nc_dim; col++) begin
          int b, h, w, c, kh, kw, ih, iw;
          b = r / (hoo*woo); h = (r / woo) % hoo; w = r % woo;
          c = col / (L.kh*L.kw); kh = (col / L.kw) % L.kh; kw = col % L.kw;
          ih = h + kh - L.p; iw = w + kw - L.p;
          if (ih >= 0 && iw >= 0 && ih < L.hi && iw < L.wi) exp_b++;
        end
      for (int k = 0; k < k_dim; k++)
        if (((k / woo) % hoo) % L.s == 0 && (k % woo) % L.s == 0) exp_a++;
      exp_a = exp_a * n_tiles * m_dim;
      // row blocks that cross a batch image boundary and hold non-zeros on both sides
      for (int kt = 0; kt < k_tiles; kt++) begin
        bit seen_b0, seen_b1;
        int b0;
        seen_b0 = 0; seen_b1 = 0; b0 = -1;
        for (int j = 0; j < 16; j++) begin
          int k = kt*16 + j;
          if (k < k_dim && ((k / woo) % hoo) % L.s == 0 && (k % woo) % L.s == 0) begin
            if (!seen_b0) begin seen_b0 = 1; b0 = k / (hoo*woo); end
            else if (k / (hoo*woo) != b0 && L.n > 1) seen_b1 = 1;
          end
        end
        if (seen_b1) exp_split += n_tiles * m_dim;
      end
    end
    exp_b = exp_b * ((grad ? 1 : 1));
    check(perf_b_words == addr_t'(exp_b * (k_dim > 0 ? 1 : 0)), $sformatf("buffer B words %0d exp %0d", perf_b_words, exp_b));
    check(perf_a_words == addr_t'(exp_a), $sformatf("buffer A words %0d exp %0d", perf_a_words, exp_a));
    check(perf_splits == addr_t'(exp_split), $sformatf("splits %0d exp %0d", perf_splits, exp_split));
    check(perf_cycles <= addr_t'(exp_cycles_max), $sformatf("cycles %0d > %0d", perf_cycles, exp_cycles_max));
    if (perf_b_zero_lanes > 0) cnt_area_b++;
    if (grad && perf_a_zero_lanes > 0) cnt_zero_a++;
    if (perf_splits > 0) cnt_split++;
    if (grad) cnt_grad++; else cnt_loss++;
    $display("%s: cycles=%0d tiles=%0d A words=%0d B words=%0d zero lanes A/B=%0d/%0d splits=%0d",
             grad ? "grad" : "loss", perf_cycles, perf_tiles, perf_a_words, perf_b_words,
             perf_a_zero_lanes, perf_b_zero_lanes, perf_splits);
  endtask

  // Upper bound on cycles: per block 16 loads + gap + M rows + pipeline drain.
  function automatic int bound(shape_t L, bit grad);
    int hoo = (L.ho-1)*L.s + 1, woo = (L.wo-1)*L.s + 1;
    int m = grad ? L.n : L.c;
    int k = grad ? L.bsz*hoo*woo : L.n*L.kh*L.kw;
    int nc = grad ? L.c*L.kh*L.kw : L.bsz*L.hi*L.wi;
    return 4 + ((k+15)/16) * ((nc+15)/16) * (16 + 2 + m + 48);
  endfunction

  shape_t LS [5];

  initial begin
    rst_n = 1'b0; start = 1'b0; compute_bank = 1'b0;
    a_wr_en = 0; b_wr_en = 0; a_wr_bank = 0; b_wr_bank = 0;
    a_wr_addr = '0; b_wr_addr = '0; a_wr_data = '0; b_wr_data = '0;
    out_rd_col = '0; out_rd_addr = '0; cfg_in = '0;
    LS[0] = '{bsz:2, c:3,  n:16,  hi:15, wi:15, kh:3, kw:3, s:2, p:0, ho:7, wo:7};
    LS[1] = '{bsz:2, c:16, n:16,  hi:14, wi:14, kh:3, kw:3, s:2, p:1, ho:7, wo:7};
    LS[2] = '{bsz:2, c:32, n:64,  hi:14, wi:14, kh:1, kw:1, s:2, p:0, ho:7, wo:7};
    LS[3] = '{bsz:2, c:20, n:20,  hi:8,  wi:8,  kh:3, kw:3, s:2, p:1, ho:4, wo:4};
    LS[4] = '{bsz:2, c:64, n:128, hi:7,  wi:7,  kh:1, kw:1, s:2, p:0, ho:4, wo:4};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int l = 0; l < 5; l++) begin
      $display("layer %0d: Hi=%0d C=%0d N=%0d K=%0d S=%0d P=%0d", l, LS[l].hi, LS[l].c,
               LS[l].n, LS[l].kh, LS[l].s, LS[l].p);
      make_data(LS[l]);
      fill(LS[l], 1'b0, 1'b0);
      compute_bank = 1'b0;
      fork
        run_check(LS[l], 1'b0, bound(LS[l], 1'b0));
        begin
          @(negedge clk); @(negedge clk);
          fill(LS[l], 1'b1, 1'b1);
        end
      join
      compute_bank = 1'b1;
      run_check(LS[l], 1'b1, bound(LS[l], 1'b1));
    end

    $display("mechanisms: B zero lanes %0d, A zero insertions %0d, splits %0d, K accumulation %0d, overlapped writes %0d, loss %0d, grad %0d",
             cnt_area_b, cnt_zero_a, cnt_split, cnt_accum, cnt_overlap, cnt_loss, cnt_grad);
    check(cnt_area_b > 0, "no zero lanes skipped in buffer B");
    check(cnt_zero_a > 0, "no zero insertions skipped in buffer A");
    check(cnt_split > 0, "no two-run row block");
    check(cnt_accum > 0, "no accumulation over K blocks");
    check(cnt_overlap > 0, "no write into the idle half during a run");
    check(cnt_loss > 0 && cnt_grad > 0, "both modes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
