// tb_crossbar: builds random compressed row blocks (a random lane mask, the
// non-zero lanes split into one or two runs at a random point), packs the
// lane values into two windows the way buffer A returns them, and checks that
// the crossbar puts every value back in its lane and zeros elsewhere.
// Interface: combinational; inputs are set and outputs checked in the same
// step.  Restoring the arrangement by the mask follows the paper; the
// two-window form is this design's.
module tb_crossbar;
  import bp_pkg::*;
  localparam int L = 16;
  word_t win0 [L];
  word_t win1 [L];
  logic  nz   [L];
  logic  run  [L];
  lane_t rank [L];
  word_t out  [L];
  crossbar dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 300; t++) begin
      word_t val [L];
      int split, c0, c1;
      split = $urandom_range(0, L);
      c0 = 0; c1 = 0;
      for (int i = 0; i < L; i++) begin win0[i] = $urandom; win1[i] = $urandom; end
      for (int j = 0; j < L; j++) begin
        val[j] = $urandom | 32'h1;
        nz[j]  = 1'($urandom_range(0, 2) != 0);
        run[j] = 1'b0; rank[j] = '0;
        if (nz[j]) begin
          if (j < split) begin win0[c0] = val[j]; rank[j] = lane_t'(c0); c0++; end
          else begin win1[c1] = val[j]; run[j] = 1'b1; rank[j] = lane_t'(c1); c1++; end
        end
      end
      #1;
      for (int j = 0; j < L; j++) begin
        checks++;
        if (out[j] != (nz[j] ? val[j] : 32'd0)) begin
          failures++;
          if (failures < 10) $display("FAIL t %0d lane %0d", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
