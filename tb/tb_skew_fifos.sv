// tb_skew_fifos: drives a random word and valid bit into every lane each
// cycle and checks that lane k returns exactly what it received k cycles
// earlier (lane 0 combinationally), for 200 cycles.
// Interface: data and valid in and out of all 16 lanes, one word per lane
// per cycle.  The per-lane depths follow the paper's skew FIFOs.
module tb_skew_fifos;
  import bp_pkg::*;
  localparam int D = 16;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;
  word_t in_data [D];
  logic  in_valid;
  word_t out_data [D];
  logic  out_valid [D];
  skew_fifos dut (.*);
  int checks = 0, failures = 0;
  word_t hist_d [256][D];
  logic  hist_v [256];
  initial begin
    rst_n = 0; in_valid = 0;
    for (int k = 0; k < D; k++) in_data[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < D; k++) in_data[k] = $urandom;
      in_valid = 1'($urandom_range(0, 1));
      hist_v[t] = in_valid;
      for (int k = 0; k < D; k++) hist_d[t][k] = in_data[k];
      #1;
      for (int k = 0; k < D; k++) begin
        if (t >= k) begin
          checks++;
          if (out_data[k] != hist_d[t-k][k] || out_valid[k] != hist_v[t-k]) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d t %0d", k, t);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
