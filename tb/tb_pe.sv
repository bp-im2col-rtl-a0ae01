// tb_pe: checks one PE: row-selected loading of the stationary value, the
// registered east pass of the dynamic operand and its valid bit, and the FP32
// update psum_out = psum_in + round(a*b), compared with an exact double-precision
// product and sum, each rounded once to single precision (ties to even)
// here, on random normal operands (including signs that
// cancel), plus exact zero operands.
// Interface: drives the PE ports directly, one operation per clock, and
// samples the registered outputs one cycle later.  The checked behaviour is
// this design's PE; the paper only fixes FP32 and the input-stationary role.
module tb_pe;
  import bp_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n;
  always #5 clk = ~clk;

  logic  load_en;
  lane_t load_row;
  word_t load_data, a_in, psum_in, a_out, psum_out;
  logic  a_valid_in, a_valid_out;

  pe #(.ROW(3)) dut (.*);

  int checks = 0, failures = 0;

  function automatic word_t rnd_fp();
    return {1'($urandom_range(0, 1)), 8'($urandom_range(110, 140)), 23'($urandom)};
  endfunction

  // Independent reference: exact arithmetic in double precision, then one
  // rounding to single precision (ties to even).
  function automatic real f2r(word_t x);
    real m;
    int  e;
    if (x[30:23] == 0) return 0.0;
    m = real'({1'b1, x[22:0]});
    e = int'(x[30:23]) - 150;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return x[31] ? -m : m;
  endfunction

  function automatic word_t r2f(real x);
    real a, m, fl;
    int  e;
    longint unsigned mi;
    if (x == 0.0) return 32'd0;
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = a * 8388608.0;                  // [2^23, 2^24)
    fl = $floor(m);
    mi = $rtoi(fl);
    if (m - fl > 0.5 || (m - fl == 0.5 && mi[0])) mi++;
    if (mi == 64'd16777216) begin mi = 64'd8388608; e++; end
    return {x < 0.0, 8'(e + 127), mi[22:0]};
  endfunction

  function automatic word_t ref_mac(word_t p, word_t a, word_t b);
    word_t prod;
    prod = r2f(f2r(a) * f2r(b));
    return r2f(f2r(p) + f2r(prod));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  word_t b_val, exp_v;

  initial begin
    rst_n = 0; load_en = 0; load_row = '0; load_data = '0;
    a_in = '0; psum_in = '0; a_valid_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    b_val = rnd_fp();
    @(negedge clk);
    load_en = 1; load_row = 3; load_data = b_val;
    @(negedge clk);
    load_row = 2; load_data = rnd_fp();        // other row: must not overwrite
    @(negedge clk);
    load_en = 0;
    for (int i = 0; i < 400; i++) begin
      a_in       = rnd_fp();
      psum_in    = (i % 4 == 0) ? 32'd0 : rnd_fp();
      if (i % 5 == 0) psum_in = {~b_val[31] ^ a_in[31], 31'd0} | ref_mac(32'd0, a_in, b_val); // cancel
      a_valid_in = 1'($urandom_range(0, 1));
      exp_v      = ref_mac(psum_in, a_in, b_val);
      @(negedge clk);
      check(psum_out == exp_v || (psum_out[30:0] == 0 && exp_v[30:0] == 0),
            $sformatf("mac a=%h b=%h p=%h got %h exp %h", a_in, b_val, psum_in, psum_out, exp_v));
      check(a_out == a_in && a_valid_out == a_valid_in, "east pass");
    end
    // zero operand
    a_in = 32'd0; psum_in = 32'h40400000;       // 3.0
    @(negedge clk);
    check(psum_out == 32'h40400000, "zero operand");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
