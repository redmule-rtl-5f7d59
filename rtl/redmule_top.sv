// redmule_top: the complete matrix engine (GEMM and GEMM-Ops accelerator) as
// it sits in a processor cluster: a register port for the cores, an end-of-
// job event line, and one wide port into the shared L1 memory.
//
// Blocks (after the paper's architecture figure): controller with register
// file -> scheduler -> streamer (with the cast module and the X/W/Y FIFOs) ->
// X, W and Y/Z buffers -> L x H datapath of computing elements, with the
// activity (clock-gating) masks for leftovers.  One job computes
//   Z = (X circ W) star Y,  X: M x N, W: N x K, Y, Z: M x K
// with circ in {mul, add, min, max} and star in {add (GEMM), min, max}, each
// tensor stored as FP16, E4M3 or E5M2.  Parameters default to the paper's main
// instance L = 12, H = 4, P = 3: 48 CEs, D = H*(P+1) = 16 elements per line,
// a 288-bit memory port.
// Timing: after the tile pipeline fills, the array does L*H operations pairs
// (one circ and one star per CE) per clock while the memory port keeps up.
module redmule_top #(
  parameter int unsigned L          = 12,
  parameter int unsigned H          = 4,
  parameter int unsigned P          = 3,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned D         = H * (P + 1),
  localparam int unsigned MW        = D * 16 + 32
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // register port (peripheral interconnect)
  input  logic            reg_req_i,
  input  logic            reg_we_i,
  input  logic [5:0]      reg_addr_i,
  input  logic [31:0]     reg_wdata_i,
  output logic            reg_gnt_o,
  output logic [31:0]     reg_rdata_o,
  output logic            evt_o,
  output logic            busy_o,
  // memory port (interconnect shallow branch)
  output logic            mem_req_o,
  input  logic            mem_gnt_i,
  output logic [31:0]     mem_add_o,
  output logic            mem_we_o,
  output logic [MW/8-1:0] mem_be_o,
  output logic [MW-1:0]   mem_wdata_o,
  input  logic [MW-1:0]   mem_rdata_i,
  input  logic            mem_rvalid_i
);
  import redmule_pkg::*;

  cfg_t   cfg;
  dims_t  dims;
  logic   start, done;
  logic   step_en;
  step_t  col_step [H];
  step_t  out_step;

  logic [H-1:0] w_ready, w_real, col_act;
  logic         x_ready, z_ready, drained, mem_idle;

  logic [2:0]  ld_req_valid, ld_req_ready, ld_valid, ld_pop;
  logic [31:0] ld_req_addr [3];
  fmt_e        ld_req_fmt  [3];
  logic [15:0] ld_row [3][D];

  logic        st_addr_valid, st_data_valid, st_ready;
  logic [31:0] st_addr;
  logic [15:0] st_count;
  logic [15:0] st_row [D];

  logic [15:0]  x_op [L][H];
  logic [15:0]  w_op [H];
  logic [15:0]  y_op [L];
  logic [15:0]  z_res [L];
  logic [L-1:0] act [H];

  redmule_ctrl #(.L(L), .H(H), .P(P)) i_ctrl (
    .clk_i, .rst_ni,
    .reg_req_i, .reg_we_i, .reg_addr_i, .reg_wdata_i, .reg_gnt_o, .reg_rdata_o,
    .cfg_o(cfg), .dims_o(dims), .start_o(start), .busy_i(busy_o), .done_i(done), .evt_o
  );

  redmule_scheduler #(.L(L), .H(H), .P(P)) i_sched (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(cfg), .dims_i(dims),
    .w_ready_i(w_ready), .x_ready_i(x_ready), .z_ready_i(z_ready),
    .drained_i(drained), .mem_idle_i(mem_idle),
    .step_en_o(step_en), .col_step_o(col_step), .out_step_o(out_step),
    .ld_req_valid_o(ld_req_valid), .ld_req_addr_o(ld_req_addr), .ld_req_fmt_o(ld_req_fmt),
    .ld_req_ready_i(ld_req_ready),
    .st_addr_valid_o(st_addr_valid), .st_addr_o(st_addr), .st_count_o(st_count),
    .st_ready_i(st_ready), .busy_o, .done_o(done)
  );

  redmule_streamer #(.D(D), .FIFO_DEPTH(FIFO_DEPTH)) i_streamer (
    .clk_i, .rst_ni, .clear_i(start),
    .ld_req_valid_i(ld_req_valid), .ld_req_addr_i(ld_req_addr), .ld_req_fmt_i(ld_req_fmt),
    .ld_req_ready_o(ld_req_ready),
    .ld_valid_o(ld_valid), .ld_row_o(ld_row), .ld_pop_i(ld_pop),
    .st_valid_i(st_addr_valid && st_data_valid), .st_addr_i(st_addr), .st_count_i(st_count),
    .st_fmt_i(cfg.z_fmt), .st_row_i(st_row), .st_ready_o(st_ready), .idle_o(mem_idle),
    .mem_req_o, .mem_gnt_i, .mem_add_o, .mem_we_o, .mem_be_o, .mem_wdata_o,
    .mem_rdata_i, .mem_rvalid_i
  );

  redmule_x_buffer #(.L(L), .H(H), .P(P)) i_xbuf (
    .clk_i, .rst_ni, .clear_i(start), .cfg_i(cfg), .dims_i(dims),
    .row_valid_i(ld_valid[0]), .row_i(ld_row[0]), .row_pop_o(ld_pop[0]),
    .en_i(step_en), .col_step_i(col_step), .x_o(x_op), .ready_o(x_ready)
  );

  redmule_w_buffer #(.H(H), .P(P)) i_wbuf (
    .clk_i, .rst_ni, .clear_i(start), .cfg_i(cfg), .dims_i(dims),
    .row_valid_i(ld_valid[1]), .row_i(ld_row[1]), .row_pop_o(ld_pop[1]),
    .en_i(step_en), .col_step_i(col_step), .w_o(w_op), .w_real_o(w_real), .ready_o(w_ready)
  );

  redmule_z_buffer #(.L(L), .H(H), .P(P)) i_zbuf (
    .clk_i, .rst_ni, .clear_i(start), .cfg_i(cfg), .dims_i(dims),
    .y_valid_i(ld_valid[2]), .y_row_i(ld_row[2]), .y_pop_o(ld_pop[2]),
    .en_i(step_en), .in_step_i(col_step[0]), .out_step_i(out_step),
    .y_o(y_op), .z_i(z_res), .ready_o(z_ready),
    .st_valid_o(st_data_valid), .st_row_o(st_row), .st_ready_i(st_ready), .drained_o(drained)
  );

  redmule_cg_ctrl #(.L(L), .H(H)) i_cg (
    .col_step_i(col_step), .w_real_i(w_real), .act_o(act), .col_act_o(col_act)
  );

  redmule_datapath #(.L(L), .H(H), .P(P)) i_datapath (
    .clk_i, .rst_ni, .en_i(step_en), .op1_i(cfg.op1), .op2_i(cfg.op2),
    .first_i(col_step[0].valid && col_step[0].first), .act_i(act),
    .x_i(x_op), .w_i(w_op), .y_i(y_op), .z_o(z_res)
  );
endmodule
