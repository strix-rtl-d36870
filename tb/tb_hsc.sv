// tb_hsc: one core at N = 32 (16-point FFT), batch capacity 2, LWE dimension
// up to 4, base 2^2 with 2 levels.  The testbench plays the role of the
// global scratchpad and HBM: it keeps the key of each iteration, puts it into
// the half the core will read once that half has been released (after a
// fill delay, so the core has to wait for keys), and answers key reads two
// cycles later.  Key polynomials have entries in {-1, 0, 1}; their folded,
// twisted FFT is computed here in real arithmetic and stored with 10
// fraction bits, which keeps every product exact after rounding.
// After each run the test vectors are read back and compared exactly with a
// reference that applies Algorithm 1 of the source on integers:
// tv <- sum_r sum_levels digit(X^a * tv_r - tv_r) * bsk.
// Counted mechanisms: key stalls, issues, and runs with one and two slots.
`timescale 1ns/1ps
module tb_hsc;
  import strix_pkg::*;
  localparam int unsigned N = 32, M = N/2, ROWS = N/LANES, NB = 2, NMAX = 4;
  localparam int unsigned SW = 1, AW = $clog2(NB*ROWS), LW = $clog2(LB_MAX+1), IW = $clog2(NMAX+1);
  localparam int unsigned XW = $clog2(NMAX), BAW = 1 + $clog2(LB_MAX) + $clog2(ROWS);
  localparam int BETA = 2, L = 2, FILL_DELAY = 40;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [4:0] log_base;
  logic [LW-1:0] levels;
  logic [IW-1:0] n_lwe;
  logic [$clog2(NB+1)-1:0] batch_n;
  logic start, busy, done, lwe_we, tv_we, tv_col, tv_rd_en, bsk_rd_en, key_stall, issue;
  logic [SW-1:0] lwe_slot;
  logic [XW-1:0] lwe_idx;
  logic [COEF_W-1:0] lwe_data;
  logic [AW-1:0] tv_addr;
  coef_t tv_wdata [LANES], tv_rdata [2][LANES];
  logic [1:0] bsk_avail, bsk_release;
  logic [BAW-1:0] bsk_rd_addr;
  logic [BSK_BUS_W-1:0] bsk_rd_data;

  hsc #(.N(N), .NB(NB), .NMAX(NMAX), .BSK_FRAC(10)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_issue = 0, n_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (key_stall) n_stall++;
    if (issue) n_issue++;
    if (done) n_done++;
  end

  // ------------------------------------------------------------ key model
  int g [NMAX][2][L][2][N];                  // [iter][poly][frame][col][coef]
  logic [BSK_BUS_W-1:0] kw [NMAX][L][ROWS];  // key words per iteration
  logic [BSK_BUS_W-1:0] half_mem [2][L][ROWS];
  int half_iter [2];
  logic [BSK_BUS_W-1:0] rd_q1, rd_q2;
  always @(posedge clk) begin
    rd_q1 <= half_mem[bsk_rd_addr[BAW-1]][bsk_rd_addr[$clog2(ROWS) +: $clog2(LB_MAX)]][bsk_rd_addr[$clog2(ROWS)-1:0]];
    rd_q2 <= rd_q1;
  end
  assign bsk_rd_data = rd_q2;

  task automatic make_keys();
    for (int it = 0; it < int'(NMAX); it++)
      for (int r = 0; r < 2; r++)
        for (int f = 0; f < L; f++)
          for (int c = 0; c < 2; c++) begin
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
              qr = $rtoi(sr * 1024.0 + (sr < 0 ? -0.5 : 0.5));
              qi = $rtoi(si * 1024.0 + (si < 0 ? -0.5 : 0.5));
              e = (c*2 + r)*CLP + k / ROWS;
              kw[it][f][k % ROWS][e*32 +: 32] = {qr[15:0], qi[15:0]};
            end
          end
  endtask

  // key fill sequencer: half h holds iteration half_iter[h]
  int next_fill;
  task automatic fill(int h, int it);
    for (int f = 0; f < L; f++) for (int t = 0; t < int'(ROWS); t++) half_mem[h][f][t] = kw[it][f][t];
    half_iter[h] = it;
  endtask
  always @(posedge clk) begin
    for (int h = 0; h < 2; h++) if (bsk_release[h]) begin
      bsk_avail[h] <= 1'b0;
      if (next_fill < int'(n_lwe)) begin
        automatic int it = next_fill;
        automatic int hh = h;
        next_fill++;
        fork begin
          repeat (FILL_DELAY) @(posedge clk);
          fill(hh, it);
          bsk_avail[hh] <= 1'b1;
        end join_none
      end
    end
  end

  // ------------------------------------------------------------ reference
  logic [31:0] tv [NB][2][N];
  logic [31:0] lwe [NB][NMAX];
  function automatic int digit(logic [31:0] x, int lv);
    longint v, Bv, d; int sh;
    sh = 32 - L*BETA;
    v  = (longint'(x) + (longint'(1) << (sh-1))) >> sh;
    v  = v & ((longint'(1) << (L*BETA)) - 1);
    Bv = longint'(1) << BETA;
    for (int k = L; k >= 1; k--) begin
      d = v % Bv; v = v / Bv;
      if (d >= Bv/2) begin d -= Bv; v += 1; end
      if (k == lv) return int'(d);
    end
    return 0;
  endfunction
  task automatic ref_iter(int s, int it);
    logic [31:0] rs [2][N], nw [2][N];
    int a;
    a = int'(((lwe[s][it] >> (32 - $clog2(2*N) - 1)) + 1) >> 1) % (2*N);
    for (int r = 0; r < 2; r++)
      for (int j = 0; j < int'(N); j++) begin
        int k; logic [31:0] v;
        k = (j + a) % (2*N); v = tv[s][r][j];
        if (k >= int'(N)) begin k -= N; v = -v; end
        rs[r][k] = v;
      end
    for (int r = 0; r < 2; r++) for (int j = 0; j < int'(N); j++) rs[r][j] -= tv[s][r][j];
    for (int c = 0; c < 2; c++) for (int k = 0; k < int'(N); k++) nw[c][k] = 0;
    for (int r = 0; r < 2; r++)
      for (int f = 0; f < L; f++)
        for (int j = 0; j < int'(N); j++) begin
          int d;
          d = digit(rs[r][j], L - f);
          if (d != 0)
            for (int c = 0; c < 2; c++)
              for (int i = 0; i < int'(N); i++) begin
                int k; int pr;
                k = i + j; pr = d * g[it][r][f][c][i];
                if (k >= int'(N)) begin k -= N; pr = -pr; end
                nw[c][k] += pr;
              end
        end
    for (int c = 0; c < 2; c++) for (int k = 0; k < int'(N); k++) tv[s][c][k] = nw[c][k];
  endtask

  // ------------------------------------------------------------ one run
  task automatic run(int n, int b);
    @(negedge clk);
    n_lwe = IW'(n); batch_n = 2'(b);
    for (int s = 0; s < b; s++) begin
      for (int i = 0; i < n; i++) begin
        lwe[s][i] = $urandom;
        lwe_we = 1; lwe_slot = SW'(s); lwe_idx = XW'(i); lwe_data = lwe[s][i];
        @(negedge clk);
      end
      lwe_we = 0;
      for (int c = 0; c < 2; c++)
        for (int t = 0; t < int'(ROWS); t++) begin
          for (int q = 0; q < int'(LANES); q++) begin
            tv[s][c][t + q*ROWS] = $urandom;
            tv_wdata[q] = tv[s][c][t + q*ROWS];
          end
          tv_we = 1; tv_col = c[0]; tv_addr = AW'(s*ROWS + t);
          @(negedge clk);
        end
      tv_we = 0;
    end
    // keys of the first two iterations, the first one late
    bsk_avail = 2'b00;
    next_fill = (n < 2) ? n : 2;
    fill(0, 0);
    if (n > 1) fill(1, 1);
    start = 1; @(negedge clk); start = 0;
    repeat (10) @(negedge clk);
    bsk_avail = (n > 1) ? 2'b11 : 2'b01;
    while (!done) @(negedge clk);
    for (int it = 0; it < n; it++) for (int s = 0; s < b; s++) ref_iter(s, it);
    @(negedge clk);
    for (int s = 0; s < b; s++)
      for (int t = 0; t < int'(ROWS); t++) begin
        tv_rd_en = 1; tv_addr = AW'(s*ROWS + t);
        @(negedge clk);
        tv_rd_en = 0;
        for (int c = 0; c < 2; c++)
          for (int q = 0; q < int'(LANES); q++) begin
            checks++;
            if (tv_rdata[c][q] !== tv[s][c][t + q*ROWS]) begin
              failures++;
              if (failures < 10) $display("n%0d b%0d slot %0d col %0d coef %0d got %0d exp %0d",
                n, b, s, c, t + q*ROWS, tv_rdata[c][q], $signed(tv[s][c][t + q*ROWS]));
            end
          end
      end
  endtask

  initial begin
    log_base = 5'(BETA); levels = LW'(L); n_lwe = '0; batch_n = '0;
    start = 0; lwe_we = 0; tv_we = 0; tv_col = 0; tv_rd_en = 0; tv_addr = '0;
    lwe_slot = '0; lwe_idx = '0; lwe_data = '0; bsk_avail = '0; next_fill = 0;
    for (int q = 0; q < int'(LANES); q++) tv_wdata[q] = '0;
    make_keys();
    repeat (3) @(negedge clk); rst_n = 1;
    run(1, 2);
    run(1, 1);
    run(3, 2);
    run(4, 1);
    checks++; if (n_issue != 2 + 1 + 6 + 4) begin failures++; $display("issues %0d", n_issue); end
    checks++; if (n_done != 4) begin failures++; $display("done pulses %0d", n_done); end
    checks++; if (n_stall == 0) begin failures++; $display("no key stall seen"); end
    $display("key stall cycles %0d", n_stall);
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
