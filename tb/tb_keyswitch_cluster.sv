// tb_keyswitch_cluster: N = 32, output dimension up to 9 (two tiles of 8
// columns).  Loads random A rows and B_0, answers key reads two cycles
// later from a random key (a dimension of 5 needs one tile only), and compares every output coefficient with
// out = (0..0, B_0) - sum_i sum_levels digit(a'_i) * KSK, where a' is the
// LWE mask extracted from A (a'_0 = A_0, a'_i = -A_{N-i}).  Runs several
// bases, level counts and output dimensions, back to back.
`timescale 1ns/1ps
module tb_keyswitch_cluster;
  import strix_pkg::*;
  localparam int unsigned N = 32, ROWS = N/LANES, NOUT = 9, COLS = KS_COLP;
  localparam int unsigned RW = $clog2(ROWS), LKW = $clog2(LK_MAX+1), IW = $clog2(NOUT+1);
  localparam int unsigned NT = (NOUT + 1 + COLS - 1) / COLS, TW = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned KAW = TW + $clog2(LK_MAX) + RW, KW = LANES*COLS*COEF_W;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [4:0] log_base;
  logic [LKW-1:0] levels;
  logic [IW-1:0] n_out;
  logic ld_en, ld_b0_en, start, busy, done, ksk_rd_en, out_valid;
  logic [RW-1:0] ld_row;
  coef_t ld_a [LANES], ld_b0, out_coef [COLS];
  logic [KAW-1:0] ksk_rd_addr;
  logic [KW-1:0] ksk_rd_data, kq1;
  logic [TW-1:0] out_tile;
  keyswitch_cluster #(.N(N), .NOUT(NOUT)) dut (.*);

  int checks = 0, failures = 0, n_out_frames = 0;
  logic [31:0] ksk [NT][LK_MAX][ROWS][LANES][COLS];
  logic [31:0] A [N], B0, expv [NT*COLS];
  int beta, l;
  always @(posedge clk) begin
    automatic int tl = int'(ksk_rd_addr >> ($clog2(LK_MAX) + RW));
    automatic int f  = int'((ksk_rd_addr >> RW) % LK_MAX);
    automatic int t  = int'(ksk_rd_addr % ROWS);
    for (int q = 0; q < int'(LANES); q++)
      for (int c = 0; c < int'(COLS); c++)
        kq1[(q*COLS + c)*32 +: 32] <= (tl < int'(NT)) ? ksk[tl][f][t][q][c] : 32'h0;
    ksk_rd_data <= kq1;
  end
  function automatic int digit(logic [31:0] x, int lv);
    longint v, Bv, d; int sh;
    sh = 32 - l*beta;
    v  = (longint'(x) + (longint'(1) << (sh-1))) >> sh;
    v  = v & ((longint'(1) << (l*beta)) - 1);
    Bv = longint'(1) << beta;
    for (int k = l; k >= 1; k--) begin
      d = v % Bv; v = v / Bv;
      if (d >= Bv/2) begin d -= Bv; v += 1; end
      if (k == lv) return int'(d);
    end
    return 0;
  endfunction
  always @(posedge clk) if (out_valid) begin
    n_out_frames++;
    for (int c = 0; c < int'(COLS); c++) begin
      checks++;
      if (out_coef[c] !== expv[int'(out_tile)*COLS + c]) begin
        failures++;
        if (failures < 10) $display("tile %0d col %0d got %h exp %h", out_tile, c, out_coef[c], expv[int'(out_tile)*COLS + c]);
      end
    end
  end
  task automatic run(int b, int lv, int n);
    logic [31:0] ap [N];
    beta = b; l = lv;
    for (int tl = 0; tl < int'(NT); tl++) for (int f = 0; f < int'(LK_MAX); f++)
      for (int t = 0; t < int'(ROWS); t++) for (int q = 0; q < int'(LANES); q++)
        for (int c = 0; c < int'(COLS); c++) ksk[tl][f][t][q][c] = $urandom;
    for (int j = 0; j < int'(N); j++) A[j] = $urandom;
    B0 = $urandom;
    ap[0] = A[0];
    for (int i = 1; i < int'(N); i++) ap[i] = -A[N-i];
    for (int col = 0; col < int'(NT*COLS); col++) begin
      logic [31:0] s;
      s = 0;
      for (int i = 0; i < int'(N); i++)
        for (int f = 0; f < l; f++)
          s += 32'(digit(ap[i], l - f)) * ksk[col / COLS][f][i % ROWS][i / ROWS][col % COLS];
      expv[col] = (col > n) ? 32'h0 : (col == n) ? B0 - s : -s;
    end
    @(negedge clk);
    for (int t = 0; t < int'(ROWS); t++) begin
      ld_en = 1; ld_row = RW'(t);
      for (int q = 0; q < int'(LANES); q++) ld_a[q] = A[t + q*ROWS];
      ld_b0_en = (t == 0); ld_b0 = B0;
      @(negedge clk);
    end
    ld_en = 0; ld_b0_en = 0;
    log_base = 5'(b); levels = LKW'(lv); n_out = IW'(n);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask
  initial begin
    ld_en = 0; ld_b0_en = 0; start = 0; ld_row = '0; ld_b0 = '0;
    for (int q = 0; q < int'(LANES); q++) ld_a[q] = '0;
    log_base = 0; levels = 0; n_out = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(2, 8, 9);
    run(4, 3, 9);
    run(7, 4, 5);
    run(1, 1, 9);
    checks++; if (n_out_frames != 7) begin failures++; $display("frames %0d", n_out_frames); end
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
