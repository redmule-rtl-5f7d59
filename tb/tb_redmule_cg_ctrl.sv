// tb_redmule_cg_ctrl: self-checking test of the activity (clock-gating) masks.
// Random step positions per column (valid bit, number of useful rows of the
// tile) and random "W row is real" bits are applied; a CE (row r, column c)
// must be active exactly when its column's step is valid, its W row is real
// (reduction index below N) and r is below the tile's useful rows (M
// leftover).  Combinational: inputs change every 1 ns.
module tb_redmule_cg_ctrl;
  import redmule_pkg::*;
  localparam int unsigned L = 12, H = 4;
  step_t        st [H];
  logic [H-1:0] wr = '0, cact;
  logic [L-1:0] act [H];
  int checks = 0, failures = 0;

  redmule_cg_ctrl #(.L(L), .H(H)) dut (.col_step_i(st), .w_real_i(wr), .act_o(act), .col_act_o(cact));

  initial begin
    for (int it = 0; it < 3000; it++) begin
      for (int c = 0; c < H; c++) begin
        st[c] = step_t'({$urandom, $urandom});
        st[c].rows = 8'(1 + $urandom % L);
      end
      wr = H'($urandom);
      #1;
      for (int c = 0; c < H; c++) begin
        checks++;
        if (cact[c] !== (st[c].valid && wr[c])) begin failures++; $display("FAIL col %0d", c); end
        for (int r = 0; r < L; r++) begin
          checks++;
          if (act[c][r] !== (st[c].valid && wr[c] && r < int'(st[c].rows))) begin
            failures++; $display("FAIL ce %0d,%0d", r, c);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
