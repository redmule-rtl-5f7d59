// tb_redmule_ce: self-checking test of one computing element in every mode:
// GEMM (fused multiply-add), and the GEMM-Ops circ in {mul, add, min, max}
// followed by star in {min, max} against the accumulator input.  An inactive
// item (valid low, the leftover / clock-gated case) must come out as its
// accumulator unchanged.  Random enable stalls; a shadow pipeline of P stages
// holds the expected results computed with real numbers (one rounding per
// FP operation).  The mode changes only while the pipeline is empty.
// Watchdog: 1 ms.
module tb_redmule_ce;
  import redmule_pkg::*;
  localparam int unsigned P = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic en = 1'b0, vin = 1'b0;
  op1_e o1 = OP1_MUL;
  op2_e o2 = OP2_ADD;
  logic [15:0] x = '0, w = '0, acc = '0, z;
  int checks = 0, failures = 0, cnt = 0, modes = 0;

  redmule_ce #(.P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .op1_i(o1), .op2_i(o2),
                           .valid_i(vin), .x_i(x), .w_i(w), .acc_i(acc), .z_o(z));
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
  logic [15:0] exp_q [P];
  logic        ev_q [P];
  initial for (int i = 0; i < P; i++) begin exp_q[i] = '0; ev_q[i] = 1'b0; end

  function automatic logic [15:0] ref_ce(logic v, logic [15:0] a, logic [15:0] b, logic [15:0] y);
    logic [15:0] s;
    if (!v) return y;
    if (o2 == OP2_ADD) return r2h(h2r(a) * h2r(b) + h2r(y));
    case (o1)
      OP1_MUL: s = r2h(h2r(a) * h2r(b));
      OP1_ADD: s = r2h(h2r(a) + h2r(b));
      OP1_MIN: s = rmin(a, b, 1'b0);
      default: s = rmin(a, b, 1'b1);
    endcase
    return rmin(s, y, o2 == OP2_MAX);
  endfunction

  always @(posedge clk) if (rst_n && en) begin
    exp_q[0] <= ref_ce(vin, x, w, acc);
    ev_q[0]  <= 1'b1;
    for (int i = 1; i < P; i++) begin
      exp_q[i] <= exp_q[i-1];
      ev_q[i]  <= ev_q[i-1];
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (ev_q[P-1]) begin
      checks++;
      if (!(z === exp_q[P-1] || (z[14:0] == 0 && exp_q[P-1][14:0] == 0))) begin
        failures++;
        if (failures < 10) $display("FAIL mode %0d/%0d got %h exp %h", o1, o2, z, exp_q[P-1]);
      end
    end
    cnt++;
    if (cnt % 500 == 0) begin
      // drain, then change mode
      en = 1'b1; vin = 1'b0;
      for (int i = 0; i < P; i++) ev_q[i] = 1'b0;
      o1 = op1_e'($urandom % 4);
      o2 = op2_e'($urandom % 3);
      modes++;
    end else begin
      en  = ($urandom % 4) != 0;
      vin = ($urandom % 5) != 0;
    end
    x = rnd16(); w = rnd16(); acc = rnd16();
    if ($urandom % 10 == 0) w = x;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (30000) @(posedge clk);
    checks++;
    if (modes < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
