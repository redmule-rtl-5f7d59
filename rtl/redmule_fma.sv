// redmule_fma: FP16 fused multiply-add, z = a * b + c, with P pipeline stages.
//
// The arithmetic is one combinational, correctly rounded FMA (round to nearest
// even, see redmule_pkg::fp16_fma) followed by P result registers.  The paper's
// unit is adapted from a trans-precision FPU whose pipeline can be stalled by
// memory back-pressure: here the registers advance only when `en_i` is high.
// A valid bit travels with each item and a data register loads only when a
// valid item reaches it, so an unused unit or a leftover row/column does not
// toggle (the effect of the paper's clock gates).  Latency: P enabled cycles;
// valid_o marks z_o.  Placing all registers after the logic, rather than
// spreading them through it, is this design's choice.
module redmule_fma #(
  parameter int unsigned P = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        valid_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] z_o,
  output logic        valid_o
);
  import redmule_pkg::*;

  logic [15:0] pipe_q [P];
  logic        vld_q  [P];

  // Valid bits always move with the step enable; a data register loads only
  // when a valid item reaches it, so idle stages keep their value.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < P; i++) begin
        pipe_q[i] <= '0;
        vld_q[i]  <= 1'b0;
      end
    end else if (en_i) begin
      vld_q[0] <= valid_i;
      if (valid_i) pipe_q[0] <= fp16_fma(a_i, b_i, c_i);
      for (int i = 1; i < P; i++) begin
        vld_q[i] <= vld_q[i-1];
        if (vld_q[i-1]) pipe_q[i] <= pipe_q[i-1];
      end
    end
  end

  assign z_o     = pipe_q[P-1];
  assign valid_o = vld_q[P-1];
endmodule

