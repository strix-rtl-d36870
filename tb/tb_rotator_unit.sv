// tb_rotator_unit: checks d = X^a * tv - tv mod (X^N + 1) for random test
// vectors and rotation amounts (including a >= N and the edge values 0, N-1,
// N, 2N-1), with an eight-bank memory model of one cycle read latency.  Also
// checks one output row per cycle and the read-to-output latency.
`timescale 1ns/1ps
module tb_rotator_unit;
  import strix_pkg::*;
  localparam int unsigned N = 64, ROWS = N/LANES, AW = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start, busy, rd_en, out_valid, out_sof;
  logic [$clog2(2*N)-1:0] rot;
  logic [AW-1:0] base, rd_addr_rot, rd_addr_dir;
  coef_t rd_data_rot [LANES], rd_data_dir [LANES], out_coef [LANES];

  rotator_unit #(.N(N), .AW(AW)) dut (.*);

  coef_t bank [LANES][256];
  always_ff @(posedge clk) for (int q = 0; q < int'(LANES); q++) begin
    rd_data_rot[q] <= bank[q][rd_addr_rot];
    rd_data_dir[q] <= bank[q][rd_addr_dir];
  end

  int checks = 0, failures = 0;
  coef_t tv [N];
  int row, start_cyc, cyc = 0;
  always @(posedge clk) cyc++;

  function automatic coef_t expect_coef(int j, int a);
    coef_t s; int m;
    m = j - (a % int'(N));
    s = (m < 0) ? -tv[m + int'(N)] : tv[m];
    if (a >= int'(N)) s = -s;
    return s - tv[j];
  endfunction

  task automatic run(int a, int b);
    for (int j = 0; j < int'(N); j++) begin
      tv[j] = coef_t'($urandom);
      bank[j / ROWS][b + j % ROWS] = tv[j];
    end
    @(posedge clk);
    start <= 1; rot <= ($clog2(2*N))'(a); base <= AW'(b);
    start_cyc = cyc;
    @(posedge clk);
    start <= 0;
    row = 0;
    while (row < int'(ROWS)) begin
      @(posedge clk);
      if (out_valid) begin
        if (row == 0) begin
          checks++;
          if (!out_sof || cyc - start_cyc != 4) begin
            failures++; $display("sof/latency %0d", cyc - start_cyc);
          end
        end
        for (int q = 0; q < int'(LANES); q++) begin
          checks++;
          if (out_coef[q] !== expect_coef(row + q*int'(ROWS), a)) begin
            failures++;
            if (failures < 10) $display("a=%0d j=%0d got %h exp %h", a, row + q*ROWS, out_coef[q],
              expect_coef(row + q*int'(ROWS), a));
          end
        end
        row++;
      end else if (row > 0) begin
        failures++; $display("gap in output stream"); row++;
      end
    end
  endtask

  initial begin
    start = 0; rot = '0; base = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0); run(N-1, 8); run(N, 16); run(2*N-1, 0); run(5, 24); run(N+13, 40);
    for (int i = 0; i < 20; i++) run($urandom_range(2*N-1), 8*$urandom_range(20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
