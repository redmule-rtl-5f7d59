// redmule_scheduler: tile sequencing, address generation and the global step.
//
// A job Z = (X circ W) star Y, X: M x N, W: N x K, Y/Z: M x K (row-major,
// dense), is cut into output tiles of L rows by D = H*(P+1) columns, walked
// row tile by row tile, column tiles inside.  For each tile the reduction runs
// in G = ceil(N/H) groups of D steps: at step k of group g, column c of the
// datapath works on output column k with reduction index n = g*H + c.
//
// The step pipeline: the scheduler generates the position (step_t) of column
// 0 for each step and shifts it through a D-deep register chain, so column c
// sees the position column 0 had c*(P+1) steps earlier and the last column's
// output belongs to the position of D steps earlier.  Because a row of CEs
// holds exactly D partial results, the partial sum of output column k leaves
// the last column just when column 0 needs it for the next group, and the
// next tile can enter column 0 right after the previous one: tiles follow each
// other without a bubble.  The global step (step_en_o) advances only when
// every buffer has what the current step needs (W lines, X chunk, Y lines, a
// free Z buffer); otherwise the whole datapath stalls (memory back-pressure).
//
// Four address generators produce, in the same order the buffers consume
// them, the byte addresses of X lines (per tile: chunk, row), W lines (per
// tile: n < N), Y lines and Z lines (per tile: useful row), with the element
// size of each tensor's format.  busy_o stays high from start_i until the last
// Z line has been written; done_o pulses then.
// The paper names the scheduler but not its insides: all of this is this
// design's implementation of the dataflow the paper describes.
module redmule_scheduler #(
  parameter int unsigned L = 12,
  parameter int unsigned H = 4,
  parameter int unsigned P = 3,
  localparam int unsigned D = H * (P + 1)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                start_i,
  input  redmule_pkg::cfg_t   cfg_i,
  input  redmule_pkg::dims_t  dims_i,
  // readiness of the buffers for the current step
  input  logic [H-1:0]        w_ready_i,
  input  logic                x_ready_i,
  input  logic                z_ready_i,
  input  logic                drained_i,
  input  logic                mem_idle_i,
  // step pipeline
  output logic                step_en_o,
  output redmule_pkg::step_t  col_step_o [H],
  output redmule_pkg::step_t  out_step_o,
  // load address streams (0 = X, 1 = W, 2 = Y)
  output logic [2:0]          ld_req_valid_o,
  output logic [31:0]         ld_req_addr_o [3],
  output redmule_pkg::fmt_e   ld_req_fmt_o  [3],
  input  logic [2:0]          ld_req_ready_i,
  // store address stream
  output logic                st_addr_valid_o,
  output logic [31:0]         st_addr_o,
  output logic [15:0]         st_count_o,
  input  logic                st_ready_i,
  output logic                busy_o,
  output logic                done_o
);
  import redmule_pkg::*;

  step_t       pipe_q [D];
  step_t       gen;
  logic        busy_q, xbank_q, gen_go, pipe_busy;

  logic [15:0] gbnd [4], gidx [4];
  logic        gen_done;

  // ---- column-0 position generator: row tile, column tile, group, k ----
  assign gbnd[0] = dims_i.mt;
  assign gbnd[1] = dims_i.kt;
  assign gbnd[2] = dims_i.g;
  assign gbnd[3] = 16'(D);
  redmule_loop4 i_gen (
    .clk_i, .rst_ni, .clear_i(start_i), .next_i(gen_go), .bound_i(gbnd), .idx_o(gidx), .done_o(gen_done)
  );

  always_comb begin
    gen.valid = busy_q && !gen_done;
    gen.first = (gidx[2] == '0);
    gen.last  = (gidx[2] + 16'd1 == dims_i.g);
    gen.xbank = xbank_q;
    gen.xlast = (32'(gidx[2]) % (P + 1) == P) || gen.last;
    gen.xbase = 8'((32'(gidx[2]) % (P + 1)) * H);
    gen.rows  = 8'(tile_rows(cfg_i.m, gidx[0], L));
    gen.k     = 8'(gidx[3]);
  end

  always_comb begin
    col_step_o[0] = gen;
    for (int c = 1; c < H; c++) col_step_o[c] = pipe_q[c * (P + 1) - 1];
    out_step_o = pipe_q[D-1];
    pipe_busy = 1'b0;
    for (int i = 0; i < D; i++) pipe_busy |= pipe_q[i].valid;
  end

  assign step_en_o = busy_q && (&w_ready_i) && x_ready_i && z_ready_i;
  assign gen_go    = step_en_o && gen.valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < D; i++) pipe_q[i] <= '0;
      xbank_q <= 1'b0;
    end else if (start_i) begin
      for (int i = 0; i < D; i++) pipe_q[i] <= '0;
      xbank_q <= 1'b0;
    end else if (step_en_o) begin
      pipe_q[0] <= gen;
      for (int i = 1; i < D; i++) pipe_q[i] <= pipe_q[i-1];
      if (gen.valid && 32'(gen.k) == D - 1 && gen.xlast) xbank_q <= !xbank_q;
    end
  end

  // ---- address generators ----
  logic [15:0] xb [4], xi [4], wb [4], wi [4], yb [4], yi [4], zb [4], zi [4];
  logic        x_done, w_done, y_done, z_done;

  assign xb[0] = dims_i.mt;  assign xb[1] = dims_i.kt;  assign xb[2] = dims_i.q;
  assign xb[3] = tile_rows(cfg_i.m, xi[0], L);
  assign wb[0] = dims_i.mt;  assign wb[1] = dims_i.kt;  assign wb[2] = 16'd1;
  assign wb[3] = cfg_i.n;
  assign yb[0] = dims_i.mt;  assign yb[1] = dims_i.kt;  assign yb[2] = 16'd1;
  assign yb[3] = tile_rows(cfg_i.m, yi[0], L);
  assign zb[0] = dims_i.mt;  assign zb[1] = dims_i.kt;  assign zb[2] = 16'd1;
  assign zb[3] = tile_rows(cfg_i.m, zi[0], L);

  redmule_loop4 i_xa (.clk_i, .rst_ni, .clear_i(start_i), .next_i(ld_req_ready_i[0]),
                      .bound_i(xb), .idx_o(xi), .done_o(x_done));
  redmule_loop4 i_wa (.clk_i, .rst_ni, .clear_i(start_i), .next_i(ld_req_ready_i[1]),
                      .bound_i(wb), .idx_o(wi), .done_o(w_done));
  redmule_loop4 i_ya (.clk_i, .rst_ni, .clear_i(start_i), .next_i(ld_req_ready_i[2]),
                      .bound_i(yb), .idx_o(yi), .done_o(y_done));
  redmule_loop4 i_za (.clk_i, .rst_ni, .clear_i(start_i), .next_i(st_ready_i),
                      .bound_i(zb), .idx_o(zi), .done_o(z_done));

  always_comb begin
    int unsigned row, col;
    // X line: row mt*L + r, columns q*D ...
    row = 32'(xi[0]) * L + 32'(xi[3]);
    col = 32'(xi[2]) * D;
    ld_req_addr_o[0] = cfg_i.x_addr + (row * 32'(cfg_i.n) + col) * fmt_bytes(cfg_i.x_fmt);
    // W line: row n, columns kt*D ...
    row = 32'(wi[3]);
    col = 32'(wi[1]) * D;
    ld_req_addr_o[1] = cfg_i.w_addr + (row * 32'(cfg_i.k) + col) * fmt_bytes(cfg_i.w_fmt);
    // Y line: row mt*L + r, columns kt*D ...
    row = 32'(yi[0]) * L + 32'(yi[3]);
    col = 32'(yi[1]) * D;
    ld_req_addr_o[2] = cfg_i.y_addr + (row * 32'(cfg_i.k) + col) * fmt_bytes(cfg_i.y_fmt);
    // Z line
    row = 32'(zi[0]) * L + 32'(zi[3]);
    col = 32'(zi[1]) * D;
    st_addr_o  = cfg_i.z_addr + (row * 32'(cfg_i.k) + col) * fmt_bytes(cfg_i.z_fmt);
    st_count_o = 16'((32'(cfg_i.k) - col < D) ? 32'(cfg_i.k) - col : D);
  end

  assign ld_req_fmt_o[0]  = cfg_i.x_fmt;
  assign ld_req_fmt_o[1]  = cfg_i.w_fmt;
  assign ld_req_fmt_o[2]  = cfg_i.y_fmt;
  assign ld_req_valid_o   = {!y_done, !w_done, !x_done} & {3{busy_q}};
  assign st_addr_valid_o  = busy_q && !z_done;

  // ---- job state ----
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) busy_q <= 1'b1;
      else if (busy_q && gen_done && !pipe_busy && drained_i && z_done && mem_idle_i) begin
        busy_q <= 1'b0;
        done_o <= 1'b1;
      end
    end
  end
  assign busy_o = busy_q;
endmodule
