// redmule_cg_ctrl: activity masks of the datapath (the paper's hierarchical
// clock gating for leftovers).
//
// For every column c the scheduler gives the step it is processing (valid,
// number of useful rows of its tile) and the W buffer says whether the W row
// it holds is inside the matrix (n < N).  A CE is active when its column
// processes a valid step, its W row is real and its row index is below the
// tile's row count.  Inactive rows/columns keep their arithmetic registers
// frozen; in the X and Z buffers the rows beyond M are not written.  The paper
// gates clocks with cells per row and per column; this design drives enables,
// which a synthesis flow maps to clock gates.  Purely combinational.
module redmule_cg_ctrl #(
  parameter int unsigned L = 12,
  parameter int unsigned H = 4
) (
  input  redmule_pkg::step_t col_step_i [H],
  input  logic [H-1:0]       w_real_i,
  output logic [L-1:0]       act_o      [H],
  output logic [H-1:0]       col_act_o
);
  always_comb begin
    for (int c = 0; c < H; c++) begin
      col_act_o[c] = col_step_i[c].valid && w_real_i[c];
      for (int r = 0; r < L; r++)
        act_o[c][r] = col_act_o[c] && (r < int'(col_step_i[c].rows));
    end
  end
endmodule
