// tb_accumulator_unit: streams groups of `nframes` random 64-bit frames
// (l_b = 2, 3 and 4) and checks that only the last frame of a group produces
// output, equal to the sum modulo 2^32 of the group's low 32 bits, with the
// row index and start-of-frame one cycle after the input.
`timescale 1ns/1ps
module tb_accumulator_unit;
  import strix_pkg::*;
  localparam int unsigned N = 64, ROWS = N/LANES, LW = $clog2(LB_MAX+1);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [LW-1:0] nframes;
  logic in_valid, in_sof, out_valid, out_sof;
  logic signed [FFT_W-1:0] in_coef [LANES];
  logic [$clog2(ROWS)-1:0] out_row;
  coef_t out_coef [LANES];
  accumulator_unit #(.N(N)) dut (.*);

  int checks = 0, failures = 0, outs = 0, expect_outs = 0;
  logic [31:0] acc [ROWS][LANES];
  logic [31:0] expq [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    outs++;
    for (int q = 0; q < int'(LANES); q++) begin
      checks++;
      if (out_coef[q] !== expq.pop_front()) begin failures++; if (failures < 5) $display("mismatch row %0d", out_row); end
    end
  end

  initial begin
    in_valid = 0; in_sof = 0; nframes = LW'(2);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 9; g++) begin
      int nf;
      nf = 2 + (g % 3);
      @(negedge clk); nframes = LW'(nf);
      for (int f = 0; f < nf; f++) begin
        if (g == 4) repeat (3) @(negedge clk);  // gaps between frames
        for (int t = 0; t < int'(ROWS); t++) begin
          @(negedge clk);
          in_valid = 1; in_sof = (t == 0);
          for (int q = 0; q < int'(LANES); q++) begin
            in_coef[q] = $signed({$urandom, $urandom});
            acc[t][q] = (f == 0 ? 32'd0 : acc[t][q]) + in_coef[q][31:0];
            if (f == nf-1) expq.push_back(acc[t][q]);
          end
        end
        if (g == 4) begin @(negedge clk); in_valid = 0; end
      end
      expect_outs += ROWS;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (outs != expect_outs) begin failures++; $display("outputs %0d expected %0d", outs, expect_outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
