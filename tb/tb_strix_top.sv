// tb_strix_top: the whole accelerator end to end at reduced size: 2 cores,
// N = 32, batch capacity 2, LWE dimension 9 (two key-switch tiles).
//
// The testbench acts as host and HBM.  It loads masks and pre-rotated test
// vectors into both cores, fills the two bootstrap-key halves through the
// HBM write port (the first one late, each refill only after the cores
// release the half, with a fill delay), starts the cores, reads the
// results back and feeds each one into the key-switch cluster, answering
// its key reads two cycles later.  Every test-vector coefficient is
// compared exactly with an integer model of Algorithm 1, and every
// key-switch output with (0..0, B_0) - sum digit(a') * KSK of the model's
// result.  Three operations run: one iteration with both batch slots (the
// results are large random-looking values), nine iterations with both
// slots and three with one.  With keys this small, test vectors shrink to a
// few units after the first iteration and later iterations give zero
// digits; the longer runs therefore mainly check sequencing (key
// double buffering, stalls, write-back hazards), not arithmetic.
//
// Mechanisms counted (a failure for any that never happens): key stall
// (cores waiting for a key half), key-half release and refill, ciphertext
// issue, multicast to more than one core, key-switch tile output.
`timescale 1ns/1ps
module tb_strix_top;
  import strix_pkg::*;
  localparam int unsigned NCORE = 2, N = 32, M = N/2, ROWS = N/LANES, NB = 2, NMAX = 9;
  localparam int unsigned CW = 1, SW = 1, AW = $clog2(NB*ROWS), RW = $clog2(ROWS);
  localparam int unsigned XW = $clog2(NMAX), BAW = 1 + $clog2(LB_MAX) + RW;
  localparam int unsigned NT = (NMAX + 1 + KS_COLP - 1) / KS_COLP, TW = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned KAW = TW + $clog2(LK_MAX) + RW, KW = LANES*KS_COLP*COEF_W;
  localparam int BETA = 2, L = 2, KBETA = 3, KL = 5, FILL_DELAY = 30;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  tfhe_cfg_t cfg;
  logic start, busy, done, lwe_we, tv_we, tv_rd_en, tv_col, bsk_wr_en, ks_ld, ks_start;
  logic ks_busy, ks_done, ksk_rd_en, ks_out_valid, key_stall, issue;
  logic [CW-1:0] lwe_core, tv_core;
  logic [SW-1:0] lwe_slot;
  logic [XW-1:0] lwe_idx;
  logic [COEF_W-1:0] lwe_data;
  logic [AW-1:0] tv_addr;
  coef_t tv_wdata [LANES], tv_rdata [2][LANES], ks_out_coef [KS_COLP];
  logic [BAW-1:0] bsk_wr_addr;
  logic [BSK_BUS_W-1:0] bsk_wr_data;
  logic [1:0] bsk_fill_done, bsk_avail, bsk_release;
  logic [KAW-1:0] ksk_rd_addr;
  logic [KW-1:0] ksk_rd_data, kq1;
  logic [TW-1:0] ks_out_tile;

  strix_top #(.NCORE(NCORE), .N(N), .NB(NB), .NMAX(NMAX), .BSK_FRAC(10)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_release = 0, n_refill = 0, n_issue = 0, n_mcast = 0, n_tiles = 0;
  always @(posedge clk) begin
    if (key_stall) n_stall++;
    if (|bsk_release) n_release++;
    if (issue) n_issue++;
    if (dut.g_core[1].u_hsc.bsk_rd_en && dut.u_noc.out_valid[1]) n_mcast++;
  end

  // ------------------------------------------------ bootstrap-key model
  int g [NMAX][2][L][2][N];
  logic [BSK_BUS_W-1:0] kw [NMAX][L][ROWS];
  task automatic make_keys();
    for (int it = 0; it < int'(NMAX); it++)
      for (int r = 0; r < 2; r++) for (int f = 0; f < L; f++) for (int c = 0; c < 2; c++) begin
        for (int j = 0; j < int'(N); j++) g[it][r][f][c][j] = $urandom_range(2) - 1;
        for (int k = 0; k < int'(M); k++) begin
          real sr, si; int e, qr, qi;
          sr = 0.0; si = 0.0;
          for (int j = 0; j < int'(M); j++) begin
            real a;
            a = 3.14159265358979323846 * (real'(j) / real'(N) - 2.0 * real'(j*k % M) / real'(M));
            sr += real'(g[it][r][f][c][j]) * $cos(a) - real'(g[it][r][f][c][j+M]) * $sin(a);
            si += real'(g[it][r][f][c][j]) * $sin(a) + real'(g[it][r][f][c][j+M]) * $cos(a);
          end
          // 10 fraction bits (BSK_FRAC below) keep every product exact
          qr = $rtoi(sr * 1024.0 + (sr < 0 ? -0.5 : 0.5));
          qi = $rtoi(si * 1024.0 + (si < 0 ? -0.5 : 0.5));
          e = (c*2 + r)*CLP + k / ROWS;
          kw[it][f][k % ROWS][e*32 +: 32] = {qr[15:0], qi[15:0]};
        end
      end
  endtask

  // HBM side: fills a half in ROWS*L cycles, then pulses fill_done
  int next_fill, n_iter;
  task automatic fill(int h, int it);
    for (int f = 0; f < L; f++)
      for (int t = 0; t < int'(ROWS); t++) begin
        @(negedge clk);
        bsk_wr_en = 1; bsk_wr_addr = {h[0], 2'(f), RW'(t)}; bsk_wr_data = kw[it][f][t];
      end
    @(negedge clk);
    bsk_wr_en = 0; bsk_fill_done[h] = 1'b1;
    @(negedge clk);
    bsk_fill_done[h] = 1'b0;
  endtask
  always @(posedge clk)
    for (int h = 0; h < 2; h++) if (bsk_release[h] && next_fill < n_iter) begin
      automatic int it = next_fill;
      automatic int hh = h;
      next_fill++;
      n_refill++;
      fork begin
        repeat (FILL_DELAY) @(posedge clk);
        fill(hh, it);
      end join_none
    end

  // ------------------------------------------------ blind-rotation model
  logic [31:0] tv [NCORE][NB][2][N];
  logic [31:0] lwe [NCORE][NB][NMAX];
  function automatic int digit(logic [31:0] x, int lv, int beta, int l);
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
  task automatic ref_iter(int k0, int s, int it);
    logic [31:0] rs [2][N], nw [2][N];
    int a;
    a = int'(((lwe[k0][s][it] >> (32 - $clog2(2*N) - 1)) + 1) >> 1) % (2*N);
    for (int r = 0; r < 2; r++)
      for (int j = 0; j < int'(N); j++) begin
        int k; logic [31:0] v;
        k = (j + a) % (2*N); v = tv[k0][s][r][j];
        if (k >= int'(N)) begin k -= N; v = -v; end
        rs[r][k] = v;
      end
    for (int r = 0; r < 2; r++) for (int j = 0; j < int'(N); j++) rs[r][j] -= tv[k0][s][r][j];
    for (int c = 0; c < 2; c++) for (int k = 0; k < int'(N); k++) nw[c][k] = 0;
    for (int r = 0; r < 2; r++) for (int f = 0; f < L; f++)
      for (int j = 0; j < int'(N); j++) begin
        int d;
        d = digit(rs[r][j], L - f, BETA, L);
        if (d != 0)
          for (int c = 0; c < 2; c++) for (int i = 0; i < int'(N); i++) begin
            int k, pr;
            k = i + j; pr = d * g[it][r][f][c][i];
            if (k >= int'(N)) begin k -= N; pr = -pr; end
            nw[c][k] += pr;
          end
      end
    for (int c = 0; c < 2; c++) for (int k = 0; k < int'(N); k++) tv[k0][s][c][k] = nw[c][k];
  endtask

  // ------------------------------------------------ key-switching model
  logic [31:0] ksk [NT][LK_MAX][ROWS][LANES][KS_COLP];
  always @(posedge clk) begin
    automatic int tl = int'(ksk_rd_addr >> ($clog2(LK_MAX) + RW));
    automatic int f  = int'((ksk_rd_addr >> RW) % LK_MAX);
    automatic int t  = int'(ksk_rd_addr % ROWS);
    for (int q = 0; q < int'(LANES); q++) for (int c = 0; c < int'(KS_COLP); c++)
      kq1[(q*KS_COLP + c)*32 +: 32] <= (tl < int'(NT)) ? ksk[tl][f][t][q][c] : 32'h0;
    ksk_rd_data <= kq1;
  end
  logic [31:0] ks_exp [NT*KS_COLP];
  always @(posedge clk) if (ks_out_valid) begin
    n_tiles++;
    for (int c = 0; c < int'(KS_COLP); c++) begin
      checks++;
      if (ks_out_coef[c] !== ks_exp[int'(ks_out_tile)*KS_COLP + c]) begin
        failures++;
        if (failures < 10) $display("ks tile %0d col %0d got %h exp %h", ks_out_tile, c,
          ks_out_coef[c], ks_exp[int'(ks_out_tile)*KS_COLP + c]);
      end
    end
  end
  task automatic ref_ks(int k0, int s, int n);
    logic [31:0] ap [N];
    ap[0] = tv[k0][s][0][0];
    for (int i = 1; i < int'(N); i++) ap[i] = -tv[k0][s][0][N-i];
    for (int col = 0; col < int'(NT*KS_COLP); col++) begin
      logic [31:0] acc;
      acc = 0;
      for (int i = 0; i < int'(N); i++) for (int f = 0; f < KL; f++)
        acc += 32'(digit(ap[i], KL - f, KBETA, KL)) * ksk[col / KS_COLP][f][i % ROWS][i / ROWS][col % KS_COLP];
      ks_exp[col] = (col > n) ? 32'h0 : (col == n) ? tv[k0][s][1][0] - acc : -acc;
    end
  endtask

  // ------------------------------------------------ one complete operation
  task automatic run(int n, int b);
    @(negedge clk);
    cfg = '{log_base_pbs: 5'(BETA), lb: 3'(L), log_base_ks: 5'(KBETA), lk: 4'(KL), n: 11'(n), batch: 3'(b)};
    n_iter = n;
    for (int k0 = 0; k0 < int'(NCORE); k0++)
      for (int s = 0; s < b; s++) begin
        for (int i = 0; i < n; i++) begin
          lwe[k0][s][i] = $urandom;
          lwe_we = 1; lwe_core = CW'(k0); lwe_slot = SW'(s); lwe_idx = XW'(i); lwe_data = lwe[k0][s][i];
          @(negedge clk);
        end
        lwe_we = 0;
        for (int c = 0; c < 2; c++) for (int t = 0; t < int'(ROWS); t++) begin
          for (int q = 0; q < int'(LANES); q++) begin
            tv[k0][s][c][t + q*ROWS] = $urandom;
            tv_wdata[q] = tv[k0][s][c][t + q*ROWS];
          end
          tv_we = 1; tv_core = CW'(k0); tv_col = c[0]; tv_addr = AW'(s*ROWS + t);
          @(negedge clk);
        end
        tv_we = 0;
      end
    next_fill = 2;
    fill(1, 1);
    start = 1; @(negedge clk); start = 0;
    repeat (15) @(negedge clk);
    fill(0, 0);
    while (!done) @(negedge clk);
    for (int k0 = 0; k0 < int'(NCORE); k0++) for (int s = 0; s < b; s++)
      for (int it = 0; it < n; it++) ref_iter(k0, s, it);
    for (int k0 = 0; k0 < int'(NCORE); k0++)
      for (int s = 0; s < b; s++) begin
        for (int t = 0; t < int'(ROWS); t++) begin
          tv_rd_en = 1; ks_ld = 1; tv_core = CW'(k0); tv_addr = AW'(s*ROWS + t);
          @(negedge clk);
          tv_rd_en = 0; ks_ld = 0;
          for (int c = 0; c < 2; c++) for (int q = 0; q < int'(LANES); q++) begin
            checks++;
            if (tv_rdata[c][q] !== tv[k0][s][c][t + q*ROWS]) begin
              failures++;
              if (failures < 10) $display("core %0d slot %0d col %0d coef %0d got %0d exp %0d", k0, s, c,
                t + q*ROWS, tv_rdata[c][q], $signed(tv[k0][s][c][t + q*ROWS]));
            end
          end
        end
        @(negedge clk);
        ref_ks(k0, s, n);
        ks_start = 1; @(negedge clk); ks_start = 0;
        while (!ks_done) @(negedge clk);
        @(negedge clk);
      end
  endtask

  initial begin
    cfg = '0; start = 0; lwe_we = 0; tv_we = 0; tv_rd_en = 0; tv_col = 0; bsk_wr_en = 0;
    ks_ld = 0; ks_start = 0; lwe_core = '0; tv_core = '0; lwe_slot = '0; lwe_idx = '0;
    lwe_data = '0; tv_addr = '0; bsk_wr_addr = '0; bsk_wr_data = '0; bsk_fill_done = '0;
    for (int q = 0; q < int'(LANES); q++) tv_wdata[q] = '0;
    make_keys();
    for (int tl = 0; tl < int'(NT); tl++) for (int f = 0; f < int'(LK_MAX); f++)
      for (int t = 0; t < int'(ROWS); t++) for (int q = 0; q < int'(LANES); q++)
        for (int c = 0; c < int'(KS_COLP); c++) ksk[tl][f][t][q][c] = $urandom;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1, 2);
    run(9, 2);
    run(3, 1);
    checks++; if (n_stall == 0)   begin failures++; $display("no key stall"); end
    checks++; if (n_release == 0) begin failures++; $display("no key release"); end
    checks++; if (n_refill == 0)  begin failures++; $display("no key refill"); end
    checks++; if (n_issue != 2 + 9*2 + 3) begin failures++; $display("issues %0d", n_issue); end
    checks++; if (n_mcast == 0)   begin failures++; $display("no multicast"); end
    checks++; if (n_tiles != 4*1 + 4*2 + 2*1) begin failures++; $display("tiles %0d", n_tiles); end
    $display("mechanisms: key_stall=%0d release=%0d refill=%0d issue=%0d multicast=%0d ks_tiles=%0d",
      n_stall, n_release, n_refill, n_issue, n_mcast, n_tiles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
