// redmule_x_buffer: the X operand buffer.
//
// It holds X chunks of L rows by D = H*(P+1) elements (one memory access per
// row).  The X element of CE (r, c) stays constant for a whole reduction group
// (D steps) and changes when the column starts its next group, as in the
// paper, where each column's X inputs change once every H*(P+1) cycles.  A
// chunk serves P+1 groups.  Two chunk banks alternate so that the next chunk
// can be loaded while the columns still read the current one: the double
// bank is this design's choice (the paper only says that X loads are
// interleaved between W loads once the buffer is empty).  Each step carries
// the bank and the chunk offset it must read (step_t.xbank/xbase); a bank is
// released when the last column has finished the last group that reads it.
// Rows beyond M in the last row tile are neither loaded nor written (their
// CEs are inactive).  ready_o is low when column 0 must start a new chunk that
// has not been loaded yet.
module redmule_x_buffer #(
  parameter int unsigned L = 12,
  parameter int unsigned H = 4,
  parameter int unsigned P = 3,
  localparam int unsigned D = H * (P + 1)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  redmule_pkg::cfg_t   cfg_i,
  input  redmule_pkg::dims_t  dims_i,
  input  logic                row_valid_i,
  input  logic [15:0]         row_i [D],
  output logic                row_pop_o,
  input  logic                en_i,
  input  redmule_pkg::step_t  col_step_i [H],
  output logic [15:0]         x_o [L][H],
  output logic                ready_o
);
  import redmule_pkg::*;

  logic [15:0] bank_q [2][L][D];
  logic [1:0]  full_q;
  logic        fill_bank_q;

  logic [15:0] bnd [4];
  logic [15:0] idx [4];
  logic        fill_done, fill_go, fill_real, fill_last_row;

  // fill walk: row tile, column tile, chunk, row of the chunk
  assign bnd[0] = dims_i.mt;
  assign bnd[1] = dims_i.kt;
  assign bnd[2] = dims_i.q;
  assign bnd[3] = 16'(L);

  redmule_loop4 i_fill (
    .clk_i, .rst_ni, .clear_i, .next_i(fill_go), .bound_i(bnd), .idx_o(idx), .done_o(fill_done)
  );

  assign fill_real     = idx[3] < tile_rows(cfg_i.m, idx[0], L);
  assign fill_last_row = (32'(idx[3]) == L - 1);
  assign fill_go       = !fill_done && !full_q[fill_bank_q] && (!fill_real || row_valid_i);
  assign row_pop_o     = fill_go && fill_real;

  always_comb begin
    for (int r = 0; r < L; r++)
      for (int c = 0; c < H; c++)
        x_o[r][c] = bank_q[col_step_i[c].xbank][r][32'(col_step_i[c].xbase) + c];
    ready_o = !(col_step_i[0].valid && col_step_i[0].k == '0 && col_step_i[0].xbase == '0)
              || full_q[col_step_i[0].xbank];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q      <= '0;
      fill_bank_q <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < L; r++)
          for (int i = 0; i < D; i++) bank_q[b][r][i] <= '0;
    end else if (clear_i) begin
      full_q      <= '0;
      fill_bank_q <= 1'b0;
    end else begin
      if (en_i && col_step_i[H-1].valid && col_step_i[H-1].xlast &&
          32'(col_step_i[H-1].k) == D - 1)
        full_q[col_step_i[H-1].xbank] <= 1'b0;
      if (fill_go) begin
        if (fill_real) bank_q[fill_bank_q][idx[3]] <= row_i;
        if (fill_last_row) begin
          full_q[fill_bank_q] <= 1'b1;
          fill_bank_q         <= !fill_bank_q;
        end
      end
    end
  end
endmodule
