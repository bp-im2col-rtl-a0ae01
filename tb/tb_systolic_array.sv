// tb_systolic_array: loads a random 16x16 block of small integers row by row,
// streams 24 rows of A with the diagonal skew applied here (row k delayed k
// cycles, with one bubble), and checks every south-edge result against the
// integer product, plus the cycle at which it appears: the result of the row
// that entered lane 0 at cycle t leaves column n at cycle t + n + 16.
// Interface: drives the array's load and west-edge ports on the falling edge
// and samples the south edge on the falling edge.  The 16x16 size follows
// the paper; the timing checked is this design's edge protocol.
module tb_systolic_array;
  import bp_pkg::*;

  localparam int D = 16;
  localparam int M = 24;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic  load_en;
  lane_t load_row;
  word_t load_data [D];
  word_t a_in      [D];
  logic  a_valid   [D];
  word_t psum_out  [D];
  logic  out_valid [D];

  systolic_array dut (.*);

  int checks = 0, failures = 0;
  int bm [D][D];
  int am [M][D];
  int t_in [M];        // cycle at which row m entered lane 0
  int rows_seen [D];
  int cyc = 0;

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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // Monitor south edge.
  always @(negedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < D; n++) begin
        if (out_valid[n]) begin
          int m, ref_v;
          m = rows_seen[n];
          ref_v = 0;
          for (int k = 0; k < D; k++) ref_v += am[m][k] * bm[k][n];
          check(psum_out[n] == i2f(ref_v) || (psum_out[n][30:0] == 0 && ref_v == 0),
                $sformatf("m=%0d n=%0d got %h exp %h", m, n, psum_out[n], i2f(ref_v)));
          check(cyc == t_in[m] + n + D, $sformatf("timing m=%0d n=%0d cyc=%0d t=%0d", m, n, cyc, t_in[m]));
          rows_seen[n] = rows_seen[n] + 1;
        end
      end
    end
  end

  initial begin
    rst_n = 0; load_en = 0; load_row = '0;
    for (int i = 0; i < D; i++) begin
      load_data[i] = '0; a_in[i] = '0; a_valid[i] = 0; rows_seen[i] = 0;
    end
    for (int k = 0; k < D; k++) for (int n = 0; n < D; n++) bm[k][n] = int'($urandom_range(0, 8)) - 4;
    for (int m = 0; m < M; m++) for (int k = 0; k < D; k++) am[m][k] = int'($urandom_range(0, 8)) - 4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < D; k++) begin
      load_en = 1; load_row = lane_t'(k);
      for (int n = 0; n < D; n++) load_data[n] = i2f(bm[k][n]);
      @(negedge clk);
    end
    load_en = 0;
    // Stream with skew: at step s, lane k carries row s-k (or a bubble), with
    // a one-step gap after row 9.
    begin
      int row_at [M + D + 2];
      int s_of [M];
      for (int m = 0; m < M; m++) s_of[m] = (m < 10) ? m : m + 1;
      for (int s = 0; s < M + D + 2; s++) begin
        for (int k = 0; k < D; k++) begin
          int r;
          r = -1;
          for (int m = 0; m < M; m++) if (s_of[m] + k == s) r = m;
          a_valid[k] = (r >= 0);
          a_in[k]    = (r >= 0) ? i2f(am[r][k]) : 32'h3f800000;   // garbage in bubbles
          if (k == 0 && r >= 0) t_in[r] = cyc;
        end
        @(negedge clk);
      end
    end
    for (int k = 0; k < D; k++) a_valid[k] = 0;
    repeat (2 * D + 4) @(negedge clk);
    for (int n = 0; n < D; n++) check(rows_seen[n] == M, $sformatf("column %0d rows %0d", n, rows_seen[n]));
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
