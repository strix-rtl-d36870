// tb_local_scratchpad: writes random rows, reads them back on both ports at
// different addresses with one cycle of latency, and checks read-before-write
// behaviour when a row is read and written in the same cycle.
`timescale 1ns/1ps
module tb_local_scratchpad;
  import strix_pkg::*;
  localparam int unsigned DEPTH = 32, AW = 5;
  logic clk = 0;
  always #1 clk = ~clk;
  logic rd_en, we;
  logic [AW-1:0] raddr_a, raddr_b, waddr;
  coef_t rdata_a [LANES], rdata_b [LANES], wdata [LANES];
  local_scratchpad #(.DEPTH(DEPTH), .AW(AW)) dut (.*);
  coef_t model [DEPTH][LANES];
  int checks = 0, failures = 0;
  initial begin
    rd_en = 0; we = 0; raddr_a = '0; raddr_b = '0; waddr = '0;
    for (int r = 0; r < int'(DEPTH); r++) begin
      @(negedge clk);
      we = 1; waddr = AW'(r);
      for (int q = 0; q < int'(LANES); q++) begin wdata[q] = coef_t'($urandom); model[r][q] = wdata[q]; end
    end
    for (int i = 0; i < 200; i++) begin
      int a, b, w;
      @(negedge clk);
      a = $urandom_range(DEPTH-1); b = $urandom_range(DEPTH-1); w = (i % 3 == 0) ? a : $urandom_range(DEPTH-1);
      rd_en = 1; raddr_a = AW'(a); raddr_b = AW'(b); we = 1; waddr = AW'(w);
      for (int q = 0; q < int'(LANES); q++) wdata[q] = coef_t'($urandom);
      @(negedge clk);
      for (int q = 0; q < int'(LANES); q++) begin
        checks += 2;
        if (rdata_a[q] !== model[a][q]) failures++;
        if (rdata_b[q] !== model[b][q]) failures++;
      end
      for (int q = 0; q < int'(LANES); q++) model[w][q] = wdata[q];
      we = 0; rd_en = 0;
    end
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
