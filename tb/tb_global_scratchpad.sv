// tb_global_scratchpad: N = 32.  Writes random key words into both halves,
// reads them back in random order with one cycle of latency, and checks that
// fill_done sets and release clears each half's availability flag
// independently (fill_done wins when both arrive together).
`timescale 1ns/1ps
module tb_global_scratchpad;
  import strix_pkg::*;
  localparam int unsigned N = 32, ROWS = N/LANES;
  localparam int unsigned AW = 1 + $clog2(LB_MAX) + $clog2(ROWS), D = 2 ** AW;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [BSK_BUS_W-1:0] wr_data, rd_data;
  logic [1:0] fill_done, release_h, avail;
  global_scratchpad #(.N(N)) dut (.*);
  logic [BSK_BUS_W-1:0] model [D];
  int checks = 0, failures = 0;
  function automatic logic [BSK_BUS_W-1:0] rnd();
    logic [BSK_BUS_W-1:0] v;
    for (int i = 0; i < int'(BSK_BUS_W/32); i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0; fill_done = '0; release_h = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (avail !== 2'b00) failures++;
    for (int a = 0; a < int'(D); a++) begin
      wr_en = 1; wr_addr = AW'(a); wr_data = rnd(); model[a] = wr_data; @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      int a; a = $urandom_range(D-1);
      rd_en = 1; rd_addr = AW'(a); @(negedge clk); rd_en = 0;
      checks++; if (rd_data !== model[a]) failures++;
    end
    for (int i = 0; i < 100; i++) begin
      logic [1:0] fd, rl, exp_a;
      fd = 2'($urandom); rl = 2'($urandom);
      for (int h = 0; h < 2; h++) exp_a[h] = fd[h] ? 1'b1 : rl[h] ? 1'b0 : avail[h];
      fill_done = fd; release_h = rl; @(negedge clk);
      fill_done = '0; release_h = '0;
      checks++; if (avail !== exp_a) failures++;
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
