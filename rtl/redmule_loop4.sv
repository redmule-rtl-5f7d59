// redmule_loop4: four nested counters, idx_o[0] outermost, idx_o[3] innermost.
// The bounds may change with the outer indices (e.g. the number of useful rows
// of the last row tile).  clear_i restarts at all zeros; next_i steps to the
// following iteration; done_o rises after the last one has been stepped past.
// Used by the scheduler's address generators and by the buffers' fill logic,
// so that both walk the tiles in exactly the same order.
module redmule_loop4 (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        clear_i,
  input  logic        next_i,
  input  logic [15:0] bound_i [4],
  output logic [15:0] idx_o   [4],
  output logic        done_o
);
  logic [15:0] idx_q [4];
  logic        done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 4; i++) idx_q[i] <= '0;
      done_q <= 1'b1;
    end else if (clear_i) begin
      for (int i = 0; i < 4; i++) idx_q[i] <= '0;
      done_q <= 1'b0;
    end else if (next_i && !done_q) begin
      if (idx_q[3] + 16'd1 < bound_i[3]) idx_q[3] <= idx_q[3] + 16'd1;
      else begin
        idx_q[3] <= '0;
        if (idx_q[2] + 16'd1 < bound_i[2]) idx_q[2] <= idx_q[2] + 16'd1;
        else begin
          idx_q[2] <= '0;
          if (idx_q[1] + 16'd1 < bound_i[1]) idx_q[1] <= idx_q[1] + 16'd1;
          else begin
            idx_q[1] <= '0;
            if (idx_q[0] + 16'd1 < bound_i[0]) idx_q[0] <= idx_q[0] + 16'd1;
            else begin
              idx_q[0] <= '0;
              done_q   <= 1'b1;
            end
          end
        end
      end
    end
  end

  assign idx_o  = idx_q;
  assign done_o = done_q;
endmodule
