// crossbar: restores a compressed row block of matrix A to its 16 lanes.
//
// Buffer A returns the non-zero elements of a row block packed together (one
// or two windows of consecutive words).  For each output lane j the crossbar
// selects word rank[j] of window run[j] when the lane's mask bit nz[j] is set,
// and drives zero otherwise, so the zero insertions that were never stored
// reappear in front of the systolic array.  Purely combinational.  The paper
// names this crossbar and its function (recover the arrangement by the mask);
// the two-window select is this design's own, matching dyn_agu.
module crossbar
  import bp_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_DIM
) (
  input  word_t win0 [LANES],
  input  word_t win1 [LANES],
  input  logic  nz   [LANES],
  input  logic  run  [LANES],
  input  lane_t rank [LANES],
  output word_t out  [LANES]
);

  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      if (!nz[j])      out[j] = '0;
      else if (run[j]) out[j] = win1[rank[j]];
      else             out[j] = win0[rank[j]];
    end
  end

endmodule
