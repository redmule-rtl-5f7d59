// redmule_fncomp: FP16 minimum/maximum unit of the first computing-element
// stage, z = is_max ? max(a, b) : min(a, b), with P pipeline stages.
//
// The paper gives this unit the same number of pipeline registers as the FMA so
// that both first-stage results arrive with the same latency.  Like the FMA,
// its registers advance only when `en_i` is high (memory back-pressure) and a
// data register loads only when a valid item reaches it (operand freezing of
// an unused unit or a leftover row/column).  NaN handling follows IEEE
// minNum/maxNum and -0 orders below +0: this design's choice.
// Latency: P enabled cycles; valid_o marks z_o.
module redmule_fncomp #(
  parameter int unsigned P = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        valid_i,
  input  logic        is_max_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
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
      if (valid_i) pipe_q[0] <= fp16_minmax(a_i, b_i, is_max_i);
      for (int i = 1; i < P; i++) begin
        vld_q[i] <= vld_q[i-1];
        if (vld_q[i-1]) pipe_q[i] <= pipe_q[i-1];
      end
    end
  end

  assign z_o     = pipe_q[P-1];
  assign valid_o = vld_q[P-1];
endmodule

