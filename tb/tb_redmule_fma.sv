// tb_redmule_fma: self-checking test of the pipelined FP16 fused multiply-add.
// Random operands (mixed signs, exponents spanning about 2^-4 .. 2^3, so that
// cancellation and results near the subnormal range occur) go in under a
// random enable (pipeline stalls) and a random valid bit.  A shadow pipeline
// of P stages, advanced on the same enable, holds the expected results,
// computed independently with real numbers (a*b + c exact in double
// precision for these ranges, one round-to-nearest-even to FP16).  Each cycle
// the output and its valid are compared with the shadow's last stage.  NaN,
// infinity and zero operands are also checked.  Watchdog: 1 ms.
module tb_redmule_fma;
  localparam int unsigned P = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic en = 1'b0, vin = 1'b0, vout;
  logic [15:0] a = '0, b = '0, c = '0, z;
  int checks = 0, failures = 0;

  redmule_fma #(.P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .valid_i(vin),
                            .a_i(a), .b_i(b), .c_i(c), .z_o(z), .valid_o(vout));
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

  function automatic logic [15:0] ref_fma(logic [15:0] x, logic [15:0] y, logic [15:0] w);
    logic xi = x[14:0] == 15'h7C00, yi = y[14:0] == 15'h7C00, wi = w[14:0] == 15'h7C00;
    if ((x[14:10] == 5'h1F && !xi) || (y[14:10] == 5'h1F && !yi) || (w[14:10] == 5'h1F && !wi))
      return 16'h7E00;
    if ((xi && y[14:0] == 0) || (yi && x[14:0] == 0)) return 16'h7E00;
    if (xi || yi) begin
      if (wi && (w[15] != (x[15] ^ y[15]))) return 16'h7E00;
      return {x[15] ^ y[15], 15'h7C00};
    end
    if (wi) return w;
    return r2h(h2r(x) * h2r(y) + h2r(w));
  endfunction

  always @(posedge clk) if (rst_n && en) begin
    exp_q[0] <= ref_fma(a, b, c);
    ev_q[0]  <= vin;
    for (int i = 1; i < P; i++) begin
      if (ev_q[i-1]) exp_q[i] <= exp_q[i-1];
      ev_q[i] <= ev_q[i-1];
    end
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (vout !== ev_q[P-1]) begin failures++; $display("FAIL valid"); end
    else if (vout) begin
      checks++;
      if (!(z === exp_q[P-1] || (z[14:0] == 0 && exp_q[P-1][14:0] == 0) ||
            (exp_q[P-1] == 16'h7E00 && z[14:10] == 5'h1F && z[9:0] != 0))) begin
        failures++;
        if (failures < 10) $display("FAIL got %h exp %h", z, exp_q[P-1]);
      end
    end
    en  = ($urandom % 4) != 0;
    vin = ($urandom % 8) != 0;
    a = rnd16(); b = rnd16(); c = rnd16();
    case ($urandom % 16)
      0: c = {!a[15] ^ b[15], 15'h0};
      1: a = 16'h7C00;
      2: b = 16'h7E01;
      3: c = {~a[15] ^ b[15], a[14:0]};
      4: begin a = 16'h3C00; c = {!b[15], b[14:0]}; end  // exact cancellation
      default: ;
    endcase
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
