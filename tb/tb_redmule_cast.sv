// tb_redmule_cast: self-checking test of the cast module (both directions,
// all three formats, bypass).  Load side: random FP8 bytes (every encoding,
// including subnormals, infinities and NaNs) must widen to the FP16 of the
// same real value; FP16 must pass through unchanged.  Store side: random FP16
// values (around the FP8 ranges, so rounding, subnormal results and overflow
// to infinity all occur) must round to nearest even into FP8; the reference
// decodes and re-rounds with real numbers, written independently of the
// design's integer code.  Combinational: inputs change every 1 ns.
module tb_redmule_cast;
  import redmule_pkg::*;
  localparam int unsigned D = 16;
  fmt_e        ld_fmt = FMT_FP16, st_fmt = FMT_FP16;
  logic [D*16-1:0] ld_raw = '0, st_raw;
  logic [15:0] ld_row [D], st_row [D];
  int checks = 0, failures = 0;
  int nfmt [3] = '{0, 0, 0};

  redmule_cast #(.D(D)) dut (.ld_fmt_i(ld_fmt), .ld_raw_i(ld_raw), .ld_row_o(ld_row),
                             .st_fmt_i(st_fmt), .st_row_i(st_row), .st_raw_o(st_raw));

  function automatic real f2r(logic [15:0] v, int ew, int mw);
    int bias = (1 << (ew - 1)) - 1;
    int e = int'((v >> mw) & ((1 << ew) - 1));
    real m = real'(v & ((1 << mw) - 1));
    real r = (e == 0) ? m * 2.0 ** (1 - bias - mw) : (m + 2.0 ** mw) * 2.0 ** (e - bias - mw);
    return v[ew + mw] ? -r : r;
  endfunction
  // round a real to the format (ew, mw), nearest even, overflow to infinity
  function automatic logic [15:0] r2f(real v, int ew, int mw);
    int bias = (1 << (ew - 1)) - 1, emax = (1 << ew) - 2 - bias, e;
    logic s = v < 0.0;
    real a = s ? -v : v, q, fl;
    logic [15:0] sb = 16'(s) << (ew + mw);
    if (a == 0.0) return sb;
    e = emax;
    while (a >= 2.0 ** (e + 1)) e++;
    while (e > 1 - bias && a < 2.0 ** e) e--;
    q = a / (2.0 ** (e - mw));
    fl = $floor(q);
    if (q - fl > 0.5 || (q - fl == 0.5 && $floor(fl / 2.0) * 2.0 != fl)) fl = fl + 1.0;
    if (fl >= 2.0 ** (mw + 1)) begin fl = fl / 2.0; e++; end
    if (e > emax) return sb | (16'((1 << ew) - 1) << mw);
    if (fl < 2.0 ** mw) return sb | 16'(longint'(fl));
    return sb | (16'(e + bias) << mw) | 16'(longint'(fl - 2.0 ** mw));
  endfunction
  function automatic logic is_nan(logic [15:0] v, int ew, int mw);
    return (((v >> mw) & ((1 << ew) - 1)) == (1 << ew) - 1) && ((v & ((1 << mw) - 1)) != 0);
  endfunction

  initial begin
    for (int i = 0; i < D; i++) st_row[i] = '0;
    for (int it = 0; it < 4000; it++) begin
      fmt_e f;
      int ew, mw;
      f  = fmt_e'($urandom % 3);
      ew = (f == FMT_E4M3) ? 4 : 5;
      mw = (f == FMT_E4M3) ? 3 : 2;
      nfmt[f]++;
      ld_fmt = f; st_fmt = f;
      for (int i = 0; i < D; i++) begin
        ld_raw[16*i +: 16] = 16'($urandom);
        st_row[i] = {1'($urandom), 5'((f == FMT_E4M3 ? 3 : 0) + $urandom % 26), 10'($urandom)};
        if ($urandom % 20 == 0) st_row[i] = 16'h7E00;
      end
      #1;
      for (int i = 0; i < D; i++) begin
        logic [15:0] el, es;
        checks += 2;
        if (f == FMT_FP16) begin
          el = ld_raw[16*i +: 16];
          es = st_row[i];
          if (ld_row[i] !== el || st_raw[16*i +: 16] !== es) begin
            failures++; $display("FAIL bypass %0d", i);
          end
        end else begin
          logic [7:0] b;
          b = ld_raw[8*i +: 8];
          if (is_nan(16'(b), ew, mw)) begin
            if (!is_nan(ld_row[i], 5, 10)) begin failures++; $display("FAIL ld nan %h", b); end
          end else begin
            el = (b[6:0] == 7'(((1 << ew) - 1) << mw)) ? {b[7], 15'h7C00} : r2h(f2r(16'(b), ew, mw));
            if (b[6:0] == 7'h0) el = {b[7], 15'h0};   // signed zero
            if (ld_row[i] !== el) begin failures++; $display("FAIL ld fmt%0d %h: %h exp %h", f, b, ld_row[i], el); end
          end
          if (is_nan(st_row[i], 5, 10)) begin
            if (!is_nan(16'(st_raw[8*i +: 8]), ew, mw)) begin failures++; $display("FAIL st nan"); end
          end else begin
            es = r2f(f2r(st_row[i], 5, 10), ew, mw);
            if (es[6:0] == 7'h0) es = {8'h0, st_row[i][15], 7'h0};   // signed zero after rounding
            if (16'(st_raw[8*i +: 8]) !== es) begin
              failures++; $display("FAIL st fmt%0d %h: %h exp %h", f, st_row[i], st_raw[8*i +: 8], es);
            end
          end
        end
      end
      if (f != FMT_FP16) begin
        checks++;
        if (st_raw[D*16-1:D*8] !== '0) begin failures++; $display("FAIL upper half"); end
      end
    end
    checks++;
    if (nfmt[0] == 0 || nfmt[1] == 0 || nfmt[2] == 0) begin failures++; $display("FAIL a format never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [15:0] r2h(real v);
    return r2f(v, 5, 10);
  endfunction
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
