// skew_fifos: the DIM delay FIFOs between buffer A and the systolic array.
//
// Lane k delays its element (and valid bit) by exactly k cycles, so a row of
// matrix A that arrives in one cycle enters the array as a diagonal wavefront:
// lane 0 passes straight through, lane 15 waits 15 cycles.  Each FIFO is a
// shift register of depth k that moves every cycle; it never stalls, and a
// bubble (valid low) travels like data.  The paper specifies 16 FIFOs of
// different depths for this purpose; the shift-register form is this design's
// choice.
module skew_fifos
  import bp_pkg::*;
#(
  parameter int unsigned DIM = ARRAY_DIM
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t in_data  [DIM],
  input  logic  in_valid,
  output word_t out_data [DIM],
  output logic  out_valid[DIM]
);

  assign out_data[0]  = in_data[0];
  assign out_valid[0] = in_valid;

  for (genvar k = 1; k < DIM; k++) begin : g_lane
    word_t d_q [k];
    logic  v_q [k];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < k; i++) begin
          d_q[i] <= '0;
          v_q[i] <= 1'b0;
        end
      end else begin
        d_q[0] <= in_data[k];
        v_q[0] <= in_valid;
        for (int i = 1; i < k; i++) begin
          d_q[i] <= d_q[i-1];
          v_q[i] <= v_q[i-1];
        end
      end
    end
    assign out_data[k]  = d_q[k-1];
    assign out_valid[k] = v_q[k-1];
  end

endmodule
