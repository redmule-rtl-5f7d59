// tb_redmule_datapath: self-checking test of the L x H CE array on its own
// (reduced size L = 3, H = 2, P = 1, so D = 4).  The testbench plays the
// scheduler: step t of the tile gives column 0 the position (group g, output
// column k) = (t / D, t % D), and column c the position column 0 had c*(P+1)
// steps earlier; it feeds X[r][g*H+c], the broadcast W[g*H+c][k], Y on the
// first group, and deactivates the columns whose reduction index is >= N and
// the rows >= M (leftovers).  Steps are taken under a random enable (stalls).
// After the last group the row outputs must equal the reference
// acc = Y; acc = circ/star(X[m][n], W[n][k], acc) for n = 0..N-1 computed with
// real numbers, for GEMM and for a GEMM-Op (max-plus) tile.  Watchdog: 1 ms.
module tb_redmule_datapath;
  import redmule_pkg::*;
  localparam int unsigned L = 3, H = 2, P = 1, D = H * (P + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic en = 1'b0, first = 1'b0;
  op1_e o1 = OP1_MUL;
  op2_e o2 = OP2_ADD;
  logic [L-1:0] act [H];
  logic [15:0]  x [L][H], w [H], y [L], z [L];
  int checks = 0, failures = 0, stalls = 0;

  redmule_datapath #(.L(L), .H(H), .P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .op1_i(o1), .op2_i(o2),
    .first_i(first), .act_i(act), .x_i(x), .w_i(w), .y_i(y), .z_o(z));
  // independent reference: real-number arithmetic, rounded once to FP16
  function automatic real h2r(logic [15:0] h);
    real m;
    int e;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) m = m * (2.0 ** -24);
    else m = (1024.0 + m) * (2.0 ** (e - 25));
    return h[15] ? -m : m;
  endfunction
  function automatic logic [15:0] r2h(real v);
    real a, q, fl;
    int e;
    logic s;
    s = v < 0.0;
    a = s ? -v : v;
    if (a == 0.0) return {s, 15'h0};
    e = 15;
    while (a >= 2.0 ** (e + 1)) e++;
    while (e > -14 && a < 2.0 ** e) e--;
    q = a / (2.0 ** (e - 10));
    fl = $floor(q);
    if (q - fl > 0.5 || (q - fl == 0.5 && (longint'(fl) % 2) == 1)) fl = fl + 1.0;
    if (fl >= 2048.0) begin fl = fl / 2.0; e++; end
    if (e > 15) return {s, 15'h7C00};
    if (fl < 1024.0) return {s, 5'd0, 10'(longint'(fl))};
    return {s, 5'(e + 15), 10'(longint'(fl) - 1024)};
  endfunction
  function automatic logic [15:0] rnd16();
    return {1'($urandom), 5'(11 + $urandom % 7), 10'($urandom)};
  endfunction
  function automatic logic [15:0] rmin(logic [15:0] a, logic [15:0] b, logic mx);
    real ra = h2r(a), rb = h2r(b);
    if (ra == rb) return (mx ? ((a[15] && !b[15]) ? b : a) : ((a[15] || !b[15]) ? a : b));
    return ((ra > rb) == mx) ? a : b;
  endfunction
  logic [15:0] XM [L][16], WM [16][D], YM [L][D];

  function automatic logic [15:0] step_ref(logic [15:0] a, logic [15:0] b, logic [15:0] acc);
    if (o2 == OP2_ADD) return r2h(h2r(a) * h2r(b) + h2r(acc));
    return rmin(r2h(h2r(a) + h2r(b)), acc, 1'b1);
  endfunction

  task automatic run_tile(int n, int m);
    int g = (n + H - 1) / H, total = g * D + D;
    logic [15:0] zr [L][D];
    for (int r = 0; r < L; r++) for (int j = 0; j < 16; j++) XM[r][j] = rnd16();
    for (int j = 0; j < 16; j++) for (int k = 0; k < D; k++) WM[j][k] = rnd16();
    for (int r = 0; r < L; r++) for (int k = 0; k < D; k++) YM[r][k] = rnd16();
    for (int r = 0; r < L; r++) for (int k = 0; k < D; k++) begin
      logic [15:0] acc;
      acc = YM[r][k];
      for (int j = 0; j < n; j++) acc = step_ref(XM[r][j], WM[j][k], acc);
      zr[r][k] = acc;
    end
    for (int t = 0; t < total; ) begin
      @(negedge clk);
      en = ($urandom % 3) != 0;
      if (!en) stalls++;
      first = (t < D);
      for (int c = 0; c < H; c++) begin
        int tc = t - c * (P + 1), gc = tc / D, kc = tc % D, nn;
        logic valid;
        valid = tc >= 0 && gc < g;
        nn = valid ? gc * H + c : 0;
        for (int r = 0; r < L; r++) begin
          act[c][r] = valid && nn < n && r < m;
          x[r][c] = XM[r][nn % 16];
        end
        w[c] = WM[nn % 16][valid ? kc : 0];
      end
      for (int r = 0; r < L; r++) y[r] = YM[r][t % D];
      @(posedge clk);
      if (en) begin
        // after step t the last column holds the result of column-0 position t-D+1
        int pos = t - D + 1;
        if (pos >= (g - 1) * D && pos < g * D) begin
          #1;
          for (int r = 0; r < m; r++) begin
            checks++;
            if (!(z[r] === zr[r][pos % D] || (z[r][14:0] == 0 && zr[r][pos % D][14:0] == 0))) begin
              failures++;
              if (failures < 8) $display("FAIL n=%0d row %0d col %0d: %h exp %h", n, r, pos % D, z[r], zr[r][pos % D]);
            end
          end
        end
        t++;
      end
    end
  endtask

  initial begin
    for (int c = 0; c < H; c++) begin act[c] = '0; w[c] = '0; for (int r = 0; r < L; r++) x[r][c] = '0; end
    for (int r = 0; r < L; r++) y[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      o2 = (it % 3 == 2) ? OP2_MAX : OP2_ADD;
      o1 = (o2 == OP2_ADD) ? OP1_MUL : OP1_ADD;
      run_tile(1 + $urandom % 9, 1 + $urandom % L);
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
