// tb_redmule_top: end-to-end, self-checking test of the whole engine at its
// default (paper) size L = 12, H = 4, P = 3, no parameter overrides.
//
// A behavioural shared memory answers the 288-bit port: it grants requests at
// random (about one in four cycles refused, which makes the streamer and the
// datapath stall), returns read data with r_valid one cycle after the grant
// and applies writes under the byte enables.  Each job is programmed through
// the register port exactly as a core would, then the test waits for the
// end-of-job event and compares every element of Z (and the bytes around it,
// which must stay untouched) with a reference computed element by element in
// the order the reduction is defined: acc = Y; for n = 0..N-1:
// acc = star(circ(X[m][n], W[n][k]), acc), every step rounded to FP16 like
// the engine's fused units (the reference uses the package's scalar
// functions, so this test checks the dataflow, addressing, leftovers, casting
// and control; the arithmetic itself is checked against real numbers in
// tb_redmule_fma / tb_redmule_fncomp).
// Mechanisms counted (each must occur at least once, else a failure):
// stalls of the global step, M / N / K leftovers, every GEMM-Op mode,
// FP8 loads and FP8 stores, unaligned lines, partial-line byte enables,
// back-to-back tiles, end-of-job events, register read-back.
module tb_redmule_top;
  import redmule_pkg::*;

  localparam int unsigned L = 12, H = 4, P = 3, D = H * (P + 1), MW = D * 16 + 32;
  localparam int unsigned MEMB = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic            reg_req = 1'b0, reg_we = 1'b0;
  logic [5:0]      reg_addr = '0;
  logic [31:0]     reg_wdata = '0;
  logic            reg_gnt, evt, busy;
  logic [31:0]     reg_rdata;
  logic            mem_req, mem_gnt = 1'b0, mem_we, mem_rvalid = 1'b0;
  logic [31:0]     mem_add;
  logic [MW/8-1:0] mem_be;
  logic [MW-1:0]   mem_wdata, mem_rdata = '0;

  redmule_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .reg_req_i(reg_req), .reg_we_i(reg_we), .reg_addr_i(reg_addr), .reg_wdata_i(reg_wdata),
    .reg_gnt_o(reg_gnt), .reg_rdata_o(reg_rdata), .evt_o(evt), .busy_o(busy),
    .mem_req_o(mem_req), .mem_gnt_i(mem_gnt), .mem_add_o(mem_add), .mem_we_o(mem_we),
    .mem_be_o(mem_be), .mem_wdata_o(mem_wdata), .mem_rdata_i(mem_rdata), .mem_rvalid_i(mem_rvalid)
  );

  int checks = 0, failures = 0;
  logic [7:0] mem [MEMB];
  logic [7:0] ref_mem [MEMB];

  // mechanism counters
  int n_stall = 0, n_evt = 0, n_unaligned = 0, n_partial_be = 0, n_fp8_ld = 0, n_fp8_st = 0;
  int n_m_left = 0, n_n_left = 0, n_k_left = 0, n_b2b = 0, n_regrb = 0;
  int n_op [4][3];
  int grant_pct = 75;

  // ---- behavioural memory ----
  always_ff @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (rst_n && mem_req && mem_gnt) begin
      if (mem_we) begin
        for (int i = 0; i < MW / 8; i++)
          if (mem_be[i]) mem[(mem_add + i) % MEMB] <= mem_wdata[8*i +: 8];
        if (mem_be != '1) n_partial_be++;
      end else begin
        for (int i = 0; i < MW / 8; i++) mem_rdata[8*i +: 8] <= mem[(mem_add + i) % MEMB];
        mem_rvalid <= 1'b1;
      end
    end
  end
  always_ff @(negedge clk) mem_gnt <= ($urandom % 100) < grant_pct;

  // ---- probes ----
  logic prev_last_k;
  always_ff @(posedge clk) begin
    if (busy && !dut.step_en) n_stall++;
    if (evt) n_evt++;
    // a new tile enters column 0 right after the last step of the previous one
    if (dut.step_en && prev_last_k && dut.col_step[0].valid && dut.col_step[0].first &&
        dut.col_step[0].k == 0) n_b2b++;
    if (dut.step_en) prev_last_k <= dut.col_step[0].valid && dut.col_step[0].last &&
                                     32'(dut.col_step[0].k) == D - 1;
  end

  // ---- register access ----
  task automatic reg_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_req = 1'b1; reg_we = 1'b1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_req = 1'b0; reg_we = 1'b0;
  endtask

  task automatic reg_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_req = 1'b1; reg_we = 1'b0; reg_addr = a;
    @(negedge clk);
    reg_req = 1'b0;
    d = reg_rdata;
  endtask

  // ---- element access in memory ----
  function automatic logic [15:0] ld_el(logic [7:0] m [MEMB], int unsigned base, int unsigned idx, fmt_e f);
    if (f == FMT_FP16) return {m[base + 2*idx + 1], m[base + 2*idx]};
    return fp8_to_fp16(m[base + idx], f);
  endfunction

  function automatic logic [15:0] rnd_val(fmt_e f);
    logic [15:0] v;
    if (f == FMT_FP16) v = {1'($urandom), 5'(12 + $urandom % 5), 10'($urandom)};
    else if (f == FMT_E4M3) v = {8'h0, 1'($urandom), 4'(5 + $urandom % 5), 3'($urandom)};
    else v = {8'h0, 1'($urandom), 5'(13 + $urandom % 4), 2'($urandom)};
    return v;
  endfunction

  task automatic fill(int unsigned base, int unsigned count, fmt_e f);
    for (int i = 0; i < count; i++) begin
      logic [15:0] v = rnd_val(f);
      if (f == FMT_FP16) begin
        mem[base + 2*i] = v[7:0]; mem[base + 2*i + 1] = v[15:8];
      end else mem[base + i] = v[7:0];
    end
  endtask

  // ---- one job ----
  task automatic run_job(int unsigned m, int unsigned n, int unsigned k, op1_e o1, op2_e o2,
                         fmt_e xf, fmt_e wf, fmt_e yf, fmt_e zf, int unsigned zoff);
    int unsigned xa = 32'h0100 + 2, wa = 32'h3000 + 1, ya = 32'h6000, za = 32'h9000 + zoff;
    logic [31:0] rd;
    int unsigned zb = fmt_bytes(zf);
    int evt0 = n_evt, cyc = 0, bad = 0;
    for (int i = 0; i < MEMB; i++) mem[i] = 8'($urandom);
    fill(xa, m * n, xf); fill(wa, n * k, wf); fill(ya, m * k, yf);
    for (int i = 0; i < MEMB; i++) ref_mem[i] = mem[i];
    // reference
    for (int r = 0; r < m; r++)
      for (int c = 0; c < k; c++) begin
        logic [15:0] acc = ld_el(mem, ya, r * k + c, yf);
        for (int j = 0; j < n; j++) begin
          logic [15:0] xv = ld_el(mem, xa, r * n + j, xf), wv = ld_el(mem, wa, j * k + c, wf), s1;
          if (o2 == OP2_ADD) s1 = fp16_fma(xv, wv, acc);
          else begin
            case (o1)
              OP1_MUL: s1 = fp16_fma(xv, wv, FP16_NZERO);
              OP1_ADD: s1 = fp16_fma(xv, FP16_ONE, wv);
              OP1_MIN: s1 = fp16_minmax(xv, wv, 1'b0);
              default: s1 = fp16_minmax(xv, wv, 1'b1);
            endcase
            s1 = fp16_minmax(s1, acc, o2 == OP2_MAX);
          end
          acc = s1;
        end
        if (zf == FMT_FP16) begin
          ref_mem[za + 2*(r*k + c)] = acc[7:0]; ref_mem[za + 2*(r*k + c) + 1] = acc[15:8];
        end else ref_mem[za + r*k + c] = fp16_to_fp8(acc, zf);
      end
    // program and start
    reg_write(6'h00, xa); reg_write(6'h04, wa); reg_write(6'h08, ya); reg_write(6'h0C, za);
    reg_write(6'h10, {16'(n), 16'(m)}); reg_write(6'h14, k);
    reg_write(6'h18, {20'h0, 2'(zf), 2'(yf), 2'(wf), 2'(xf), 2'(o2), 2'(o1)});
    reg_read(6'h10, rd);
    checks++;
    if (rd !== {16'(n), 16'(m)}) begin failures++; $display("FAIL regread %h", rd); end
    else n_regrb++;
    reg_write(6'h1C, 32'h1);
    while (n_evt == evt0 && cyc < 400000) begin @(posedge clk); cyc++; end
    checks++;
    if (n_evt == evt0) begin failures++; $display("FAIL job timeout"); end
    repeat (3) @(posedge clk);
    // compare the whole Z region and its surroundings
    for (int i = za - 64; i < za + m * k * zb + 64; i++) begin
      checks++;
      if (mem[i] !== ref_mem[i]) begin
        failures++; bad++;
        if (bad < 6) $display("FAIL job M%0d N%0d K%0d op%0d/%0d byte %0d: got %h exp %h",
                              m, n, k, o1, o2, i - za, mem[i], ref_mem[i]);
      end
    end
    $display("job M=%0d N=%0d K=%0d op=%0d/%0d fmt=%0d%0d%0d%0d: %0d cycles, %0d bad bytes",
             m, n, k, o1, o2, xf, wf, yf, zf, cyc, bad);
    if (m % L != 0) n_m_left++;
    if (n % H != 0) n_n_left++;
    if (k % D != 0) n_k_left++;
    if (xf != FMT_FP16 || wf != FMT_FP16 || yf != FMT_FP16) n_fp8_ld++;
    if (zf != FMT_FP16) n_fp8_st++;
    if ((xa % 4) != 0 || (wa % 4) != 0 || ((za + k * zb) % 4) != 0) n_unaligned++;
    n_op[o1][o2]++;
  endtask

  initial begin
    for (int a = 0; a < 4; a++) for (int b = 0; b < 3; b++) n_op[a][b] = 0;
    prev_last_k = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // plain GEMM with leftovers on M, N and K, unaligned lines, FP16
    run_job(14, 10, 19, OP1_MUL, OP2_ADD, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 2);
    // exact multiple of the array: several tiles back to back
    run_job(24, 8, 32, OP1_MUL, OP2_ADD, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);
    // GEMM-Ops
    run_job(13, 7, 17, OP1_ADD, OP2_MAX, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);
    run_job(5, 6, 9, OP1_ADD, OP2_MIN, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 2);
    run_job(12, 5, 16, OP1_MIN, OP2_MAX, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);
    run_job(3, 9, 20, OP1_MAX, OP2_MIN, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);
    run_job(7, 4, 5, OP1_MUL, OP2_MAX, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);
    // hybrid FP8: E4M3 activations, E5M2 weights, FP16 bias, FP8 result
    grant_pct = 100;
    run_job(14, 11, 18, OP1_MUL, OP2_ADD, FMT_E4M3, FMT_E5M2, FMT_FP16, FMT_E4M3, 1);
    grant_pct = 60;
    run_job(9, 6, 33, OP1_MUL, OP2_ADD, FMT_E5M2, FMT_E5M2, FMT_E5M2, FMT_E5M2, 3);
    run_job(1, 1, 1, OP1_MUL, OP2_ADD, FMT_FP16, FMT_FP16, FMT_FP16, FMT_FP16, 0);

    // every mechanism must have happened
    checks += 12;
    if (n_stall == 0)      begin failures++; $display("FAIL never stalled"); end
    if (n_m_left == 0)     begin failures++; $display("FAIL no M leftover"); end
    if (n_n_left == 0)     begin failures++; $display("FAIL no N leftover"); end
    if (n_k_left == 0)     begin failures++; $display("FAIL no K leftover"); end
    if (n_fp8_ld == 0)     begin failures++; $display("FAIL no FP8 load"); end
    if (n_fp8_st == 0)     begin failures++; $display("FAIL no FP8 store"); end
    if (n_unaligned == 0)  begin failures++; $display("FAIL no unaligned line"); end
    if (n_partial_be == 0) begin failures++; $display("FAIL no partial byte enables"); end
    if (n_b2b == 0)        begin failures++; $display("FAIL no back-to-back tiles"); end
    if (n_evt == 0)        begin failures++; $display("FAIL no event"); end
    if (n_regrb == 0)      begin failures++; $display("FAIL no register read-back"); end
    if (n_op[OP1_ADD][OP2_MAX] == 0 || n_op[OP1_ADD][OP2_MIN] == 0 || n_op[OP1_MIN][OP2_MAX] == 0 ||
        n_op[OP1_MAX][OP2_MIN] == 0 || n_op[OP1_MUL][OP2_MAX] == 0 || n_op[OP1_MUL][OP2_ADD] == 0)
      begin failures++; $display("FAIL a GEMM-Op mode never ran"); end
    $display("mechanisms: stall=%0d evt=%0d b2b=%0d partial_be=%0d unaligned=%0d fp8ld=%0d fp8st=%0d",
             n_stall, n_evt, n_b2b, n_partial_be, n_unaligned, n_fp8_ld, n_fp8_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
