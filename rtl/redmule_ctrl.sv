// redmule_ctrl: the controller and its register file, programmed by the
// cluster cores through the peripheral interconnect.
//
// Word registers (byte offset):
//   0x00 X_ADDR   0x04 W_ADDR   0x08 Y_ADDR   0x0C Z_ADDR   (byte addresses)
//   0x10 M_N      M in [15:0], N in [31:16]
//   0x14 K        K in [15:0]
//   0x18 OP       circ [1:0] (0 mul, 1 add, 2 min, 3 max), star [3:2]
//                 (0 add = GEMM, 1 min, 2 max), X/W/Y/Z formats in [5:4],
//                 [7:6], [9:8], [11:10] (0 FP16, 1 E4M3, 2 E5M2)
//   0x1C TRIGGER  a write starts the job (ignored while busy)
//   0x20 STATUS   bit 0 busy (read only)
//   0x24 CYCLES   clock cycles of the last job (read only)
// The controller latches the configuration, derives the tile counts once
// (redmule_pkg::calc_dims, registered), pulses start_o one cycle after the
// trigger, and raises evt_o for one cycle when the scheduler reports done
// (the end-of-job event of the cluster's event unit).  The paper only names a
// controller holding the register file: the register map and the protocol
// (req/gnt in the same cycle, read data on the next cycle) are this design's.
module redmule_ctrl #(
  parameter int unsigned L = 12,
  parameter int unsigned H = 4,
  parameter int unsigned P = 3
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // register port
  input  logic               reg_req_i,
  input  logic               reg_we_i,
  input  logic [5:0]         reg_addr_i,
  input  logic [31:0]        reg_wdata_i,
  output logic               reg_gnt_o,
  output logic [31:0]        reg_rdata_o,
  // to/from the engine
  output redmule_pkg::cfg_t  cfg_o,
  output redmule_pkg::dims_t dims_o,
  output logic               start_o,
  input  logic               busy_i,
  input  logic               done_i,
  output logic               evt_o
);
  import redmule_pkg::*;

  cfg_t        cfg_q;
  dims_t       dims_q;
  logic        trig_q, pending_q;
  logic [31:0] cycles_q;

  assign reg_gnt_o = reg_req_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q       <= '0;
      dims_q      <= '0;
      trig_q      <= 1'b0;
      pending_q   <= 1'b0;
      cycles_q    <= '0;
      reg_rdata_o <= '0;
      evt_o       <= 1'b0;
    end else begin
      trig_q <= 1'b0;
      evt_o  <= done_i;
      if (busy_i) cycles_q <= cycles_q + 32'd1;
      if (trig_q) begin
        cycles_q  <= '0;
        pending_q <= 1'b0;
      end
      if (reg_req_i && reg_we_i && !busy_i && !pending_q) begin
        case (reg_addr_i[5:2])
          4'h0: cfg_q.x_addr <= reg_wdata_i;
          4'h1: cfg_q.w_addr <= reg_wdata_i;
          4'h2: cfg_q.y_addr <= reg_wdata_i;
          4'h3: cfg_q.z_addr <= reg_wdata_i;
          4'h4: begin
            cfg_q.m <= reg_wdata_i[15:0];
            cfg_q.n <= reg_wdata_i[31:16];
          end
          4'h5: cfg_q.k <= reg_wdata_i[15:0];
          4'h6: begin
            cfg_q.op1   <= op1_e'(reg_wdata_i[1:0]);
            cfg_q.op2   <= op2_e'(reg_wdata_i[3:2]);
            cfg_q.x_fmt <= fmt_e'(reg_wdata_i[5:4]);
            cfg_q.w_fmt <= fmt_e'(reg_wdata_i[7:6]);
            cfg_q.y_fmt <= fmt_e'(reg_wdata_i[9:8]);
            cfg_q.z_fmt <= fmt_e'(reg_wdata_i[11:10]);
          end
          4'h7: begin
            // derive tile counts now, start on the next cycle
            dims_q    <= calc_dims(cfg_q, L, H, P);
            trig_q    <= 1'b1;
            pending_q <= 1'b1;
          end
          default: ;
        endcase
      end
      if (reg_req_i && !reg_we_i) begin
        case (reg_addr_i[5:2])
          4'h0: reg_rdata_o <= cfg_q.x_addr;
          4'h1: reg_rdata_o <= cfg_q.w_addr;
          4'h2: reg_rdata_o <= cfg_q.y_addr;
          4'h3: reg_rdata_o <= cfg_q.z_addr;
          4'h4: reg_rdata_o <= {cfg_q.n, cfg_q.m};
          4'h5: reg_rdata_o <= {16'h0, cfg_q.k};
          4'h6: reg_rdata_o <= {20'h0, cfg_q.z_fmt, cfg_q.y_fmt, cfg_q.w_fmt, cfg_q.x_fmt,
                                cfg_q.op2, cfg_q.op1};
          4'h8: reg_rdata_o <= {31'h0, busy_i || pending_q};
          4'h9: reg_rdata_o <= cycles_q;
          default: reg_rdata_o <= '0;
        endcase
      end
    end
  end

  assign cfg_o   = cfg_q;
  assign dims_o  = dims_q;
  assign start_o = trig_q;
endmodule
