// systolic_array: DIM x DIM input-stationary array of FP32 PEs (16 x 16).
//
// PE(k,n) holds B[k][n] of the current 16x16 block of the stationary matrix.
// The block is loaded one row per cycle: load_row selects the array row and
// load_data carries its DIM elements.  Row k of the dynamic matrix enters at
// the west edge (a_in[k]) and moves one PE east per cycle; partial sums start
// at zero on the north edge and move one PE south per cycle, so column n
// produces sum_k A[m][k]*B[k][n] at its south edge.  If A[m][k] enters row k
// at cycle t+k (the skew that skew_fifos adds), the result for row m leaves
// column n at cycle t+n+DIM, flagged by out_valid[n].  The array follows the
// paper's 16x16 input-stationary organisation; the edge protocol is this
// design's own.
module systolic_array
  import bp_pkg::*;
#(
  parameter int unsigned DIM = ARRAY_DIM
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load_en,
  input  lane_t load_row,
  input  word_t load_data [DIM],
  input  word_t a_in      [DIM],
  input  logic  a_valid   [DIM],
  output word_t psum_out  [DIM],
  output logic  out_valid [DIM]
);

  word_t a_h   [DIM][DIM+1];   // a_h[k][n] enters PE(k,n) from the west
  logic  v_h   [DIM][DIM+1];
  word_t p_v   [DIM+1][DIM];   // p_v[k][n] enters PE(k,n) from the north

  for (genvar k = 0; k < DIM; k++) begin : g_row
    assign a_h[k][0] = a_in[k];
    assign v_h[k][0] = a_valid[k];
    for (genvar n = 0; n < DIM; n++) begin : g_col
      pe #(.ROW(k)) u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .load_en    (load_en),
        .load_row   (load_row),
        .load_data  (load_data[n]),
        .a_in       (a_h[k][n]),
        .a_valid_in (v_h[k][n]),
        .psum_in    (p_v[k][n]),
        .a_out      (a_h[k][n+1]),
        .a_valid_out(v_h[k][n+1]),
        .psum_out   (p_v[k+1][n])
      );
    end
  end

  for (genvar n = 0; n < DIM; n++) begin : g_edge
    assign p_v[0][n]    = '0;
    assign psum_out[n]  = p_v[DIM][n];
    assign out_valid[n] = v_h[DIM-1][n+1];
  end

endmodule
