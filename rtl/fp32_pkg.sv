// fp32_pkg: IEEE-754 single-precision multiply and add, as pure functions.
//
// Both functions round to nearest, ties to even, on normal numbers.  Denormal
// inputs are read as zero and results below the normal range are flushed to
// zero; results above it become infinity.  NaN and infinity inputs are not
// treated specially.  The paper only states that the accelerator computes in
// FP32; the flush-to-zero simplification is this design's choice.
// fp32_add keeps three extra bits (guard, round, sticky) after alignment,
// which is enough for correct rounding of both addition and subtraction.
package fp32_pkg;

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        sign;
    logic [23:0] ma, mb, m;
    logic [47:0] p;
    logic [24:0] mr;
    logic        g, st;
    int          e;
    sign = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {sign, 31'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = 48'(ma) * 48'(mb);
    e  = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = p[47:24]; g = p[23]; st = |p[22:0]; e = e + 1;
    end else begin
      m = p[46:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, m} + 25'(g && (st || m[0]));
    if (mr[24]) begin
      mr = mr >> 1; e = e + 1;
    end
    if (e <= 0)   return {sign, 31'd0};
    if (e >= 255) return {sign, 8'hff, 23'd0};
    return {sign, e[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my, myf;
    logic [27:0] sum;
    logic [24:0] mr;
    logic        sticky, up;
    int          d, e;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d   = int'(x[30:23]) - int'(y[30:23]);
    mx  = {1'b1, x[22:0], 3'b000};
    myf = {1'b1, y[22:0], 3'b000};
    if (d > 26) begin
      my = 27'd1;
    end else begin
      my     = myf >> d;
      sticky = |(myf & ((27'd1 << d) - 27'd1));
      my[0]  = my[0] | sticky;
    end
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'd0) return 32'd0;
    e = int'(x[30:23]);
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      for (int i = 0; i < 26; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e   = e - 1;
        end
      end
    end
    up = sum[2] && (sum[1] || sum[0] || sum[3]);
    mr = {1'b0, sum[26:3]} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1; e = e + 1;
    end
    if (e <= 0)   return {x[31], 31'd0};
    if (e >= 255) return {x[31], 8'hff, 23'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

endpackage
