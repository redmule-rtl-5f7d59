// redmule_w_buffer: the W operand buffer, one W line per datapath column.
//
// A W line holds one row of W restricted to the current output tile: D =
// H*(P+1) elements, one memory access.  Column c consumes, one element per
// step, the rows n = g*H + c of the reduction (g = group), broadcasting each
// element to the L CEs of the column.  Every column has a "current" line being
// read and a "next" line being filled; at the first step (k = 0) of a group
// the next line becomes current.  Lines are filled in row order n = 0, 1, 2
// ... of each tile, line n going to column n mod H; rows n >= N (leftover of
// the last group) are not loaded but marked unreal, which makes the column
// forward its accumulator.  The paper describes H shift registers that
// broadcast one element per cycle; reading the element by index, and the
// double line per column, are this design's choices with the same effect.
// Interface: rows arrive from the streamer's W FIFO (row_valid_i/row_pop_o);
// col_step_i tells each column's position; ready_o[c] is low when column c
// must start a group but its next line has not arrived (the step stalls).
module redmule_w_buffer #(
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
  output logic [15:0]         w_o      [H],
  output logic [H-1:0]        w_real_o,
  output logic [H-1:0]        ready_o
);
  import redmule_pkg::*;

  logic [15:0]  cur_q  [H][D];
  logic [15:0]  nxt_q  [H][D];
  logic [H-1:0] cur_real_q, nxt_real_q, nxt_full_q;
  logic [H-1:0] start;

  // fill walk: row tile, column tile, row n of W
  logic [15:0] bnd [4];
  logic [15:0] idx [4];
  logic        fill_done, fill_go, fill_real;
  int unsigned fill_col;

  assign bnd[0] = dims_i.mt;
  assign bnd[1] = dims_i.kt;
  assign bnd[2] = dims_i.gh;
  assign bnd[3] = 16'd1;

  redmule_loop4 i_fill (
    .clk_i, .rst_ni, .clear_i, .next_i(fill_go), .bound_i(bnd), .idx_o(idx), .done_o(fill_done)
  );

  assign fill_col  = 32'(idx[2]) % H;
  assign fill_real = idx[2] < cfg_i.n;
  assign fill_go   = !fill_done && !nxt_full_q[fill_col] && (!fill_real || row_valid_i);
  assign row_pop_o = fill_go && fill_real;

  always_comb begin
    for (int c = 0; c < H; c++) begin
      start[c]    = col_step_i[c].valid && (col_step_i[c].k == '0);
      ready_o[c]  = !start[c] || nxt_full_q[c];
      w_o[c]      = start[c] ? nxt_q[c][0] : cur_q[c][col_step_i[c].k];
      w_real_o[c] = start[c] ? nxt_real_q[c] : cur_real_q[c];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_real_q <= '0;
      nxt_real_q <= '0;
      nxt_full_q <= '0;
      for (int c = 0; c < H; c++)
        for (int i = 0; i < D; i++) begin
          cur_q[c][i] <= '0;
          nxt_q[c][i] <= '0;
        end
    end else if (clear_i) begin
      nxt_full_q <= '0;
    end else begin
      for (int c = 0; c < H; c++) begin
        if (en_i && start[c]) begin
          cur_q[c]      <= nxt_q[c];
          cur_real_q[c] <= nxt_real_q[c];
          nxt_full_q[c] <= 1'b0;
        end
      end
      if (fill_go) begin
        if (fill_real) nxt_q[fill_col] <= row_i;
        nxt_real_q[fill_col] <= fill_real;
        nxt_full_q[fill_col] <= 1'b1;
      end
    end
  end
endmodule
