// tb_redmule_ctrl: self-checking test of the controller / register file.
// Writes random values to every configuration register and reads them back
// (one-cycle read latency), checks that a trigger write pulses start_o once,
// one cycle later, with the tile counts of calc_dims recomputed here from the
// definitions (ceil(M/L), ceil(K/D), ceil(N/H), ceil(G/(P+1))), that writes
// are ignored while busy, that STATUS reports busy, that CYCLES counts the
// busy cycles and that done_i gives a one-cycle evt_o.  Watchdog: 1 ms.
module tb_redmule_ctrl;
  import redmule_pkg::*;
  localparam int unsigned L = 12, H = 4, P = 3, D = H * (P + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic        req = 1'b0, we = 1'b0, gnt, start, busy = 1'b0, done = 1'b0, evt;
  logic [5:0]  addr = '0;
  logic [31:0] wdata = '0, rdata;
  cfg_t        cfg;
  dims_t       dims;
  int checks = 0, failures = 0, starts = 0;

  redmule_ctrl #(.L(L), .H(H), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr),
    .reg_wdata_i(wdata), .reg_gnt_o(gnt), .reg_rdata_o(rdata), .cfg_o(cfg), .dims_o(dims),
    .start_o(start), .busy_i(busy), .done_i(done), .evt_o(evt));

  always @(posedge clk) if (start) starts++;

  task automatic wr(logic [5:0] a, logic [31:0] d);
    @(negedge clk); req = 1'b1; we = 1'b1; addr = a; wdata = d;
    @(negedge clk); req = 1'b0; we = 1'b0;
  endtask
  task automatic rd(logic [5:0] a, output logic [31:0] d);
    @(negedge clk); req = 1'b1; we = 1'b0; addr = a;
    @(negedge clk); req = 1'b0; d = rdata;
  endtask
  task automatic chk(logic c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    logic [31:0] v [7], r;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40; it++) begin
      int m, n, k, s0;
      m = 1 + $urandom % 300; n = 1 + $urandom % 300; k = 1 + $urandom % 300;
      for (int i = 0; i < 4; i++) v[i] = $urandom;
      v[4] = {16'(n), 16'(m)}; v[5] = 32'(k);
      v[6] = {20'h0, 2'($urandom % 3), 2'($urandom % 3), 2'($urandom % 3), 2'($urandom % 3),
              2'($urandom % 3), 2'($urandom)};
      for (int i = 0; i < 7; i++) wr(6'(4 * i), v[i]);
      for (int i = 0; i < 7; i++) begin rd(6'(4 * i), r); chk(r === v[i], "readback"); end
      chk(cfg.m == 16'(m) && cfg.n == 16'(n) && cfg.k == 16'(k), "cfg");
      s0 = starts;
      wr(6'h1C, 1);
      @(negedge clk);
      chk(starts == s0 + 1, "start pulse");
      chk(dims.mt == 16'((m + L - 1) / L) && dims.kt == 16'((k + D - 1) / D) &&
          dims.g == 16'((n + H - 1) / H) && dims.q == 16'(((n + H - 1) / H + P) / (P + 1)) &&
          dims.gh == 16'((n + H - 1) / H * H), "dims");
      busy = 1'b1;
      rd(6'h20, r); chk(r[0] === 1'b1, "status busy");
      wr(6'h14, 32'hFFFF); wr(6'h1C, 1);
      chk(cfg.k == 16'(k) && starts == s0 + 1, "writes ignored while busy");
      repeat (7) @(negedge clk);
      done = 1'b1; @(negedge clk); done = 1'b0; busy = 1'b0;
      chk(evt === 1'b1, "evt");
      @(negedge clk); chk(evt === 1'b0, "evt one cycle");
      rd(6'h24, r); chk(r > 32'd8 && r < 32'd20, "cycles");
      rd(6'h20, r); chk(r[0] === 1'b0, "status idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
