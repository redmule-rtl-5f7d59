// redmule_z_buffer: the Y/Z buffer.
//
// Before a tile starts, L rows of Y (D = H*(P+1) elements each) are preloaded;
// during the first reduction group (accumulate = 0) the first column of CEs
// takes Y element k of its row at step k.  When the last group leaves the last
// column, the finished Z elements are captured, one output column per step,
// and then drained row by row to the streamer's store channel.  The paper uses
// one storage for both (Y preload, then Z); this design keeps a Y line set and
// a Z line set in the same buffer so that the next tile's Y can be preloaded
// while the previous tile's Z is still being stored (its own choice; the paper
// interleaves the Z stores and Y reloads between W loads).
// Rows beyond M in the last row tile are neither loaded, captured nor stored.
// ready_o is low when a tile must start but its Y is not loaded, or when Z
// must be captured but the previous Z has not been drained (the step stalls).
module redmule_z_buffer #(
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
  // Y rows from the streamer
  input  logic                y_valid_i,
  input  logic [15:0]         y_row_i [D],
  output logic                y_pop_o,
  // datapath side
  input  logic                en_i,
  input  redmule_pkg::step_t  in_step_i,     // step entering column 0
  input  redmule_pkg::step_t  out_step_i,    // step leaving column H-1
  output logic [15:0]         y_o [L],
  input  logic [15:0]         z_i [L],
  output logic                ready_o,
  // Z rows to the streamer
  output logic                st_valid_o,
  output logic [15:0]         st_row_o [D],
  input  logic                st_ready_i,
  output logic                drained_o
);
  import redmule_pkg::*;

  logic [15:0] y_q [L][D];
  logic [15:0] z_q [L][D];
  logic        y_full_q, z_full_q;

  logic [15:0] ybnd [4], yidx [4], zbnd [4], zidx [4];
  logic        y_done, y_go, y_real, z_done, z_go, z_last_row;

  // Y fill walk: row tile, column tile, (1), row
  assign ybnd[0] = dims_i.mt;
  assign ybnd[1] = dims_i.kt;
  assign ybnd[2] = 16'd1;
  assign ybnd[3] = 16'(L);
  redmule_loop4 i_yfill (
    .clk_i, .rst_ni, .clear_i, .next_i(y_go), .bound_i(ybnd), .idx_o(yidx), .done_o(y_done)
  );
  assign y_real  = yidx[3] < tile_rows(cfg_i.m, yidx[0], L);
  assign y_go    = !y_done && !y_full_q && (!y_real || y_valid_i);
  assign y_pop_o = y_go && y_real;

  // Z drain walk: row tile, column tile, (1), useful row
  assign zbnd[0] = dims_i.mt;
  assign zbnd[1] = dims_i.kt;
  assign zbnd[2] = 16'd1;
  assign zbnd[3] = tile_rows(cfg_i.m, zidx[0], L);
  redmule_loop4 i_zdrain (
    .clk_i, .rst_ni, .clear_i, .next_i(z_go), .bound_i(zbnd), .idx_o(zidx), .done_o(z_done)
  );
  assign z_last_row = (zidx[3] + 16'd1 == zbnd[3]);
  assign st_valid_o = z_full_q && !z_done;
  assign st_row_o   = z_q[zidx[3]];
  assign z_go       = st_valid_o && st_ready_i;
  assign drained_o  = z_done && !z_full_q;

  always_comb begin
    for (int r = 0; r < L; r++) y_o[r] = y_q[r][in_step_i.k];
    ready_o = (!(in_step_i.valid && in_step_i.first && in_step_i.k == '0) || y_full_q) &&
              (!(out_step_i.valid && out_step_i.last && out_step_i.k == '0) || !z_full_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      y_full_q <= 1'b0;
      z_full_q <= 1'b0;
      for (int r = 0; r < L; r++)
        for (int i = 0; i < D; i++) begin
          y_q[r][i] <= '0;
          z_q[r][i] <= '0;
        end
    end else if (clear_i) begin
      y_full_q <= 1'b0;
      z_full_q <= 1'b0;
    end else begin
      // Y preload, consumption at the end of the first group
      if (y_go) begin
        if (y_real) y_q[yidx[3]] <= y_row_i;
        if (32'(yidx[3]) == L - 1) y_full_q <= 1'b1;
      end
      if (en_i && in_step_i.valid && in_step_i.first && 32'(in_step_i.k) == D - 1)
        y_full_q <= 1'b0;
      // Z capture from the last column, one output column per step
      if (en_i && out_step_i.valid && out_step_i.last) begin
        for (int r = 0; r < L; r++)
          if (r < int'(out_step_i.rows)) z_q[r][out_step_i.k] <= z_i[r];
        if (32'(out_step_i.k) == D - 1) z_full_q <= 1'b1;
      end
      if (z_go && z_last_row) z_full_q <= 1'b0;
    end
  end
endmodule
