// pe: one processing element of the input-stationary systolic array.
//
// The PE holds one element of the stationary matrix B.  It is written when
// load_en is high and load_row equals the PE's ROW parameter (the row of the
// array it sits in).  Every cycle the dynamic operand a_in, with its valid
// bit, passes east through a register, and the partial sum moving south is
// updated as psum_out <= psum_in + a_in * b_stat in FP32 (the product is
// rounded, then the sum).  All outputs are registered, so a value spends one
// cycle in each PE.  The stationary/dynamic split and FP32 follow the paper;
// the separate (non-fused) rounding and the row-select load are this design's
// choices.
module pe
  import bp_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned ROW = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load_en,
  input  lane_t load_row,
  input  word_t load_data,
  input  word_t a_in,
  input  logic  a_valid_in,
  input  word_t psum_in,
  output word_t a_out,
  output logic  a_valid_out,
  output word_t psum_out
);

  word_t b_stat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_stat      <= '0;
      a_out       <= '0;
      a_valid_out <= 1'b0;
      psum_out    <= '0;
    end else begin
      if (load_en && load_row == lane_t'(ROW)) b_stat <= load_data;
      a_out       <= a_in;
      a_valid_out <= a_valid_in;
      psum_out    <= fp32_add(psum_in, fp32_mul(a_in, b_stat));
    end
  end

endmodule
