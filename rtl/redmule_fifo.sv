// redmule_fifo: synchronous first-in first-out queue used by the streamer for
// its X, W, Y load channels and for the tags of outstanding memory reads.
// Push and pop may happen in the same cycle; data appears on data_o while
// empty_o is low (first-word fall-through).  Depth and width are parameters;
// pushing when full or popping when empty is a usage error (asserted).
module redmule_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             push_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] data_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned CNTW = $clog2(DEPTH + 1);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (clear_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) begin
        mem_q[wr_q] <= data_i;
        wr_q <= (32'(wr_q) == DEPTH - 1) ? '0 : wr_q + 1'b1;
      end
      if (pop_i) rd_q <= (32'(rd_q) == DEPTH - 1) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + CNTW'(push_i) - CNTW'(pop_i);
    end
  end

  assign data_o  = mem_q[rd_q];
  assign empty_o = (cnt_q == '0);
  assign full_o  = (32'(cnt_q) == DEPTH);
  assign count_o = cnt_q;

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o);
endmodule
