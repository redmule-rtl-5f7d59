// redmule_ce: one computing element (CE) of the array, computing
// z = (x circ w) star acc for the GEMM-Ops of the engine.
//
// Structure (after the paper's CE figure): the first stage holds an FMA and a
// min/max unit (FNCOMP), each with P pipeline registers; a mux picks the one
// that implements "circ".  The second stage is a combinational FNCOMP that
// applies "star" (min or max) between the first-stage result and the
// accumulator; an output mux returns the FMA result directly for a plain GEMM.
//   GEMM (star = ADD):        z = fma(x, w, acc)          (circ must be MUL)
//   circ = MUL, star = MIN/MAX: z = minmax(fma(x, w, -0), acc)
//   circ = ADD, star = MIN/MAX: z = minmax(fma(x, 1.0, w), acc)
//   circ = MIN/MAX:             z = minmax(minmax(x, w), acc)
// The unit that is not used sees no valid item, so its registers keep their
// value (the operand freezing that the paper does with a clock gate).  The
// accumulator is carried through P registers next to the first stage so that
// the second stage sees the accumulator that entered with the operands; the
// paper's figure draws this as a direct wire, the delay is this design's
// choice.  When `valid_i` is low (reduction index beyond N, or a row beyond M:
// a leftover) the CE forwards the accumulator unchanged and
// its arithmetic units stay frozen: also this design's choice.
// Timing: every register advances when en_i is high; latency P enabled cycles.
module redmule_ce #(
  parameter int unsigned P = 3
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   en_i,
  input  redmule_pkg::op1_e      op1_i,
  input  redmule_pkg::op2_e      op2_i,
  input  logic                   valid_i,
  input  logic [15:0]            x_i,
  input  logic [15:0]            w_i,
  input  logic [15:0]            acc_i,
  output logic [15:0]            z_o
);
  import redmule_pkg::*;

  logic        gemm, use_fma, fma_en, fnc_en;
  logic [15:0] fma_b, fma_c, fma_z, fnc_z, s1;
  logic [15:0] acc_q [P];
  logic        vld_q [P];

  assign gemm    = (op2_i == OP2_ADD);
  assign use_fma = gemm || (op1_i == OP1_MUL) || (op1_i == OP1_ADD);
  assign fma_en  = valid_i && use_fma;
  assign fnc_en  = valid_i && !use_fma;

  always_comb begin
    fma_b = w_i;
    fma_c = acc_i;
    if (!gemm) begin
      if (op1_i == OP1_ADD) begin
        fma_b = FP16_ONE;
        fma_c = w_i;
      end else begin
        fma_c = FP16_NZERO;
      end
    end
  end

  redmule_fma #(.P(P)) i_fma (
    .clk_i, .rst_ni, .en_i, .valid_i(fma_en), .valid_o(),
    .a_i(x_i), .b_i(fma_b), .c_i(fma_c), .z_o(fma_z)
  );

  redmule_fncomp #(.P(P)) i_fncomp (
    .clk_i, .rst_ni, .en_i, .valid_i(fnc_en), .valid_o(), .is_max_i(op1_i == OP1_MAX),
    .a_i(x_i), .b_i(w_i), .z_o(fnc_z)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < P; i++) begin
        acc_q[i] <= '0;
        vld_q[i] <= 1'b0;
      end
    end else if (en_i) begin
      acc_q[0] <= acc_i;
      vld_q[0] <= valid_i;
      for (int i = 1; i < P; i++) begin
        acc_q[i] <= acc_q[i-1];
        vld_q[i] <= vld_q[i-1];
      end
    end
  end

  // first-stage mux (circ), second-stage FNCOMP (star) and output mux
  assign s1 = use_fma ? fma_z : fnc_z;

  always_comb begin
    if (!vld_q[P-1])   z_o = acc_q[P-1];
    else if (gemm)     z_o = fma_z;
    else               z_o = fp16_minmax(s1, acc_q[P-1], op2_i == OP2_MAX);
  end
endmodule
