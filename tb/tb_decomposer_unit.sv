// tb_decomposer_unit: feeds random polynomials with random base (beta) and
// level count (l) and compares every emitted digit with a reference signed
// decomposition computed by division: round a to its top l*beta bits, then
// from the least significant level up, d = v mod B, v = v / B, and if
// d >= B/2 then d -= B, v += 1.  Checks that levels come out least
// significant first, one whole polynomial per level, and that a polynomial
// occupies exactly l * N/8 cycles when frames are offered back to back.
`timescale 1ns/1ps
module tb_decomposer_unit;
  import strix_pkg::*;
  localparam int unsigned N = 64, ROWS = N/LANES, LW = $clog2(LB_MAX+1);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [4:0] log_base;
  logic [LW-1:0] levels, out_level;
  logic in_valid, in_sof, in_ready, out_valid, out_sof;
  coef_t in_coef [LANES], out_digit [LANES];

  decomposer_unit #(.N(N)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  localparam int NF = 12;
  logic [31:0] poly [NF][N];
  int beta_f [NF], l_f [NF];
  int exp_d [NF][LB_MAX+1][N];
  int of = 0, orow = 0, opass = 0, last_sof = -1;

  task automatic reference(int f);
    for (int j = 0; j < int'(N); j++) begin
      longint v, Bv, d;
      int sh;
      sh = 32 - l_f[f]*beta_f[f];
      v  = (longint'(poly[f][j]) + (longint'(1) << (sh-1))) >> sh;
      v  = v & ((longint'(1) << (l_f[f]*beta_f[f])) - 1);
      Bv = longint'(1) << beta_f[f];
      for (int lv = l_f[f]; lv >= 1; lv--) begin
        d = v % Bv; v = v / Bv;
        if (d >= Bv/2) begin d -= Bv; v += 1; end
        exp_d[f][lv][j] = int'(d);
      end
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      if (orow != 0) begin failures++; $display("short frame"); end
      if (last_sof >= 0 && opass == 0 && of > 0) begin
        checks++;
        if (cyc - last_sof != l_f[of-1] * int'(ROWS)) begin
          failures++; $display("polynomial took %0d cycles", cyc - last_sof);
        end
      end
      if (opass == 0) last_sof = cyc;
    end
    checks++;
    if (int'(out_level) != l_f[of] - opass) begin
      failures++; $display("level %0d expected %0d", out_level, l_f[of] - opass);
    end
    for (int q = 0; q < int'(LANES); q++) begin
      checks++;
      if (int'(out_digit[q]) != exp_d[of][l_f[of]-opass][orow + q*ROWS]) begin
        failures++;
        if (failures < 10) $display("f%0d lv%0d j%0d got %0d exp %0d", of, l_f[of]-opass,
          orow + q*ROWS, out_digit[q], exp_d[of][l_f[of]-opass][orow + q*ROWS]);
      end
    end
    orow++;
    if (orow == int'(ROWS)) begin
      orow = 0; opass++;
      if (opass == l_f[of]) begin opass = 0; of++; end
    end
  end

  initial begin
    in_valid = 0; in_sof = 0; log_base = 5'd8; levels = LW'(2);
    for (int q = 0; q < int'(LANES); q++) in_coef[q] = '0;
    for (int f = 0; f < NF; f++) begin
      for (int j = 0; j < int'(N); j++) poly[f][j] = $urandom;
      poly[f][0] = 32'hFFFF_FFFF; poly[f][1] = 32'h7FFF_FFFF; poly[f][2] = 32'h8000_0000;
      l_f[f]    = (f < 6) ? 2 : 1 + (f % LB_MAX);
      beta_f[f] = (f < 6) ? 8 : 1 + $urandom_range(30 / l_f[f] - 1);
      reference(f);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rows are driven on the falling edge; a frame starts as soon as
    // in_ready allows, so frames follow each other back to back
    for (int f = 0; f < NF; f++) begin
      @(negedge clk);
      while (!in_ready) begin
        in_valid = 0; in_sof = 0;
        @(negedge clk);
      end
      for (int t = 0; t < int'(ROWS); t++) begin
        if (t > 0) @(negedge clk);
        in_valid = 1; in_sof = (t == 0);
        log_base = 5'(beta_f[f]); levels = LW'(l_f[f]);
        for (int q = 0; q < int'(LANES); q++) in_coef[q] = coef_t'(poly[f][t + q*ROWS]);
      end
    end
    @(negedge clk);
    in_valid = 0; in_sof = 0;
    while (of < NF) @(posedge clk);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
