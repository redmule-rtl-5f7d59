// redmule_streamer: the engine's single memory port and its load/store streams.
//
// The engine reaches the shared L1 memory (TCDM) through one wide port of the
// cluster interconnect's shallow branch: MW = D*16 + 32 bits, i.e. D FP16
// elements (one X/W/Y/Z line) plus one extra 32-bit word, so that a line that
// does not start on a 32-bit boundary can still be fetched in one access
// (256 + 32 = 288 bits in the paper's configuration).  Three load streams (X,
// W, Y) and one store stream (Z) share the port:
//   * requests are granted in fixed priority W > X > Y > Z (this design's
//     choice; the paper interleaves X/Y loads and Z stores between the
//     periodic W loads);
//   * a load is issued only if its stream's FIFO has room for it counting the
//     loads still in flight, so the memory side never waits on the datapath
//     (the paper's decoupling of memory valid/ready from data consumption);
//   * the stream number of each load travels in a tag FIFO; when the read data
//     returns, the dispatcher realigns it (byte offset), casts it to FP16
//     (redmule_cast) and raises the valid of that stream's FIFO only;
//   * a store takes a Z line, casts it to the output format, shifts it to its
//     byte offset and writes only the bytes of the useful elements (K
//     leftovers) through the byte enables.
// Memory protocol (this design's choice, modelled on the cluster's TCDM
// ports): req/gnt handshake in one cycle, read data with r_valid in order
// some cycles after the grant, no response for writes.  Address = byte
// address of the line; the port address is its 32-bit aligned word.
module redmule_streamer #(
  parameter int unsigned D          = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned MW        = D * 16 + 32
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  // load requests: 0 = X, 1 = W, 2 = Y
  input  logic [2:0]         ld_req_valid_i,
  input  logic [31:0]        ld_req_addr_i [3],
  input  redmule_pkg::fmt_e  ld_req_fmt_i  [3],
  output logic [2:0]         ld_req_ready_o,
  // load data towards the buffers
  output logic [2:0]         ld_valid_o,
  output logic [15:0]        ld_row_o [3][D],
  input  logic [2:0]         ld_pop_i,
  // store stream
  input  logic               st_valid_i,
  input  logic [31:0]        st_addr_i,
  input  logic [15:0]        st_count_i,     // useful elements of the line
  input  redmule_pkg::fmt_e  st_fmt_i,
  input  logic [15:0]        st_row_i [D],
  output logic               st_ready_o,
  output logic               idle_o,
  // memory port
  output logic               mem_req_o,
  input  logic               mem_gnt_i,
  output logic [31:0]        mem_add_o,
  output logic               mem_we_o,
  output logic [MW/8-1:0]    mem_be_o,
  output logic [MW-1:0]      mem_wdata_o,
  input  logic [MW-1:0]      mem_rdata_i,
  input  logic               mem_rvalid_i
);
  import redmule_pkg::*;

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  typedef struct packed {
    logic [1:0] ch;
    logic [1:0] off;
    fmt_e       fmt;
  } tag_t;

  logic [2:0]    can_issue;
  logic [CW:0]   inflight_q [3];
  logic [CW-1:0] fcount [3];
  logic [2:0]    fempty, ffull;
  logic [D*16-1:0] fdata [3];
  logic [D*16-1:0] fpush_data;
  logic [2:0]    fpush;

  logic  tag_full, tag_empty, tag_push;
  tag_t  tag_in, tag_out;
  logic  sel_ld, sel_st;
  logic [1:0] sel_ch;

  logic [MW-1:0]   rd_shift;
  logic [15:0]     cast_row [D];
  logic [D*16-1:0] st_raw;
  logic [MW-1:0]   st_shift;
  logic [MW/8-1:0] st_be;
  int unsigned     st_bytes;

  // ---- request arbitration ----
  always_comb begin
    for (int c = 0; c < 3; c++)
      can_issue[c] = ld_req_valid_i[c] && !tag_full &&
                     (32'(inflight_q[c]) + 32'(fcount[c]) < FIFO_DEPTH);
    sel_ld = 1'b0;
    sel_st = 1'b0;
    sel_ch = 2'd0;
    if (can_issue[1])      begin sel_ld = 1'b1; sel_ch = 2'd1; end
    else if (can_issue[0]) begin sel_ld = 1'b1; sel_ch = 2'd0; end
    else if (can_issue[2]) begin sel_ld = 1'b1; sel_ch = 2'd2; end
    else if (st_valid_i)   sel_st = 1'b1;
  end

  redmule_cast #(.D(D)) i_cast (
    .ld_fmt_i(tag_out.fmt), .ld_raw_i(rd_shift[D*16-1:0]), .ld_row_o(cast_row),
    .st_fmt_i(st_fmt_i),    .st_row_i(st_row_i),          .st_raw_o(st_raw)
  );

  always_comb begin
    st_bytes  = 32'(st_count_i) * fmt_bytes(st_fmt_i);
    st_shift  = MW'(st_raw) << (8 * st_addr_i[1:0]);
    for (int i = 0; i < MW/8; i++) st_be[i] = (i >= int'(st_addr_i[1:0])) &&
                                              (i < int'(st_addr_i[1:0]) + int'(st_bytes));
    mem_req_o = sel_ld || sel_st;
    mem_we_o  = sel_st;
    mem_add_o = sel_st ? {st_addr_i[31:2], 2'b00} : {ld_req_addr_i[sel_ch][31:2], 2'b00};
    mem_be_o  = sel_st ? st_be : '1;
    mem_wdata_o = sel_st ? st_shift : '0;
    ld_req_ready_o = '0;
    if (sel_ld && mem_gnt_i) ld_req_ready_o[sel_ch] = 1'b1;
    st_ready_o = sel_st && mem_gnt_i;
  end

  // ---- tags of loads in flight ----
  assign tag_push   = sel_ld && mem_gnt_i;
  assign tag_in.ch  = sel_ch;
  assign tag_in.off = ld_req_addr_i[sel_ch][1:0];
  assign tag_in.fmt = ld_req_fmt_i[sel_ch];

  redmule_fifo #(.WIDTH($bits(tag_t)), .DEPTH(4)) i_tags (
    .clk_i, .rst_ni, .clear_i,
    .push_i(tag_push), .data_i(tag_in),
    .pop_i(mem_rvalid_i), .data_o(tag_out),
    .empty_o(tag_empty), .full_o(tag_full), .count_o()
  );

  // ---- dispatcher: realign, cast, push into the selected stream only ----
  assign rd_shift = mem_rdata_i >> (8 * tag_out.off);
  always_comb begin
    for (int i = 0; i < D; i++) fpush_data[16*i +: 16] = cast_row[i];
    fpush = '0;
    if (mem_rvalid_i) fpush[tag_out.ch] = 1'b1;
  end

  for (genvar c = 0; c < 3; c++) begin : g_fifo
    redmule_fifo #(.WIDTH(D*16), .DEPTH(FIFO_DEPTH)) i_fifo (
      .clk_i, .rst_ni, .clear_i,
      .push_i(fpush[c]), .data_i(fpush_data),
      .pop_i(ld_pop_i[c]), .data_o(fdata[c]),
      .empty_o(fempty[c]), .full_o(ffull[c]), .count_o(fcount[c])
    );
    assign ld_valid_o[c] = !fempty[c];
    for (genvar i = 0; i < D; i++) begin : g_el
      assign ld_row_o[c][i] = fdata[c][16*i +: 16];
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)      inflight_q[c] <= '0;
      else if (clear_i) inflight_q[c] <= '0;
      else inflight_q[c] <= inflight_q[c] + (CW+1)'(tag_push && sel_ch == 2'(c)) - (CW+1)'(fpush[c]);
    end
  end

  assign idle_o = tag_empty;

  a_rvalid_expected: assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rvalid_i |-> !tag_empty);
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 (mem_req_o && !mem_gnt_i && mem_we_o) |=> mem_req_o);
endmodule
