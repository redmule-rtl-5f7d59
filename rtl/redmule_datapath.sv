// redmule_datapath: the L x H array of computing elements.
//
// Each of the L rows is a chain of H CEs; every CE is followed by one register,
// so a CE plus its register delays a partial result by P+1 steps and a row
// holds D = H*(P+1) partial results in flight.  The output of the last CE of a
// row is fed back to the accumulator input of the first CE of the same row
// (accumulate = 1); during the first reduction group of a tile the first CE
// takes the Y element instead (accumulate = 0).  The output of the last column
// is also the row's result z_o, which the Z buffer captures when it is final.
// Column c receives one W element per step, broadcast to all L rows, and one X
// element per row; act_i[c][r] marks CE (r, c) as doing useful work, otherwise
// it forwards the accumulator (leftover rows/columns, the clock-gated CEs of
// the paper).  Follows the paper's datapath figure; using an enable-based
// freeze in place of clock-gating cells is this design's choice.
// Timing: everything advances when en_i (the global step) is high.
module redmule_datapath #(
  parameter int unsigned L = 12,
  parameter int unsigned H = 4,
  parameter int unsigned P = 3
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               en_i,
  input  redmule_pkg::op1_e  op1_i,
  input  redmule_pkg::op2_e  op2_i,
  input  logic               first_i,          // column 0 takes y_i (accumulate = 0)
  input  logic [L-1:0]       act_i [H],
  input  logic [15:0]        x_i   [L][H],
  input  logic [15:0]        w_i   [H],
  input  logic [15:0]        y_i   [L],
  output logic [15:0]        z_o   [L]
);
  logic [15:0] ce_z  [L][H];
  logic [15:0] out_q [L][H];
  logic [15:0] acc   [L][H];

  for (genvar r = 0; r < L; r++) begin : g_row
    for (genvar c = 0; c < H; c++) begin : g_col
      if (c == 0) begin : g_first
        assign acc[r][c] = first_i ? y_i[r] : out_q[r][H-1];
      end else begin : g_next
        assign acc[r][c] = out_q[r][c-1];
      end

      redmule_ce #(.P(P)) i_ce (
        .clk_i, .rst_ni, .en_i,
        .op1_i, .op2_i,
        .valid_i(act_i[c][r]),
        .x_i(x_i[r][c]), .w_i(w_i[c]), .acc_i(acc[r][c]),
        .z_o(ce_z[r][c])
      );

      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)   out_q[r][c] <= '0;
        else if (en_i) out_q[r][c] <= ce_z[r][c];
      end
    end
    assign z_o[r] = out_q[r][H-1];
  end
endmodule
