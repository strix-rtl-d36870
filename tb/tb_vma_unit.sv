// tb_vma_unit: random complex operands; checks y = (F0*G0 + F1*G1) >>> FRAC
// with rounding, computed in 128-bit integer arithmetic, and the two-cycle
// latency of valid and start-of-frame.
`timescale 1ns/1ps
module tb_vma_unit;
  import strix_pkg::*;
  localparam int unsigned FRAC = 20;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_sof, out_valid, out_sof;
  cplx_t f0 [CLP], f1 [CLP], out_data [CLP];
  bsk_t  g0 [CLP], g1 [CLP];
  vma_unit #(.FRAC(FRAC)) dut (.*);

  int checks = 0, failures = 0;
  typedef logic signed [127:0] w_t;
  w_t er [$], ei [$];
  logic v_d1, v_d2, s_d1, s_d2;

  always @(posedge clk) if (rst_n) begin
    v_d1 <= in_valid; v_d2 <= v_d1; s_d1 <= in_valid & in_sof; s_d2 <= s_d1;
    checks++;
    if (out_valid !== v_d2 || out_sof !== s_d2) begin failures++; $display("valid timing"); end
    if (out_valid) begin
      for (int p = 0; p < int'(CLP); p++) begin
        w_t r, i;
        r = er.pop_front(); i = ei.pop_front();
        checks++;
        if (out_data[p].re !== FFT_W'(r) || out_data[p].im !== FFT_W'(i)) begin
          failures++; $display("lane %0d got %0d %0d exp %0d %0d", p, out_data[p].re, out_data[p].im, r, i);
        end
      end
    end
  end

  function automatic logic signed [63:0] rnd64(int bits);
    return $signed({$urandom, $urandom}) >>> (64 - bits);
  endfunction

  initial begin
    in_valid = 0; in_sof = 0; v_d1 = 0; v_d2 = 0; s_d1 = 0; s_d2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0); in_sof = (c % 8 == 0);
      for (int p = 0; p < int'(CLP); p++) begin
        w_t sr, si;
        f0[p].re = rnd64(50); f0[p].im = rnd64(50); f1[p].re = rnd64(50); f1[p].im = rnd64(50);
        g0[p].re = BSK_W'($urandom); g0[p].im = BSK_W'($urandom);
        g1[p].re = BSK_W'($urandom); g1[p].im = BSK_W'($urandom);
        sr = w_t'(f0[p].re) * w_t'(g0[p].re) - w_t'(f0[p].im) * w_t'(g0[p].im)
           + w_t'(f1[p].re) * w_t'(g1[p].re) - w_t'(f1[p].im) * w_t'(g1[p].im);
        si = w_t'(f0[p].re) * w_t'(g0[p].im) + w_t'(f0[p].im) * w_t'(g0[p].re)
           + w_t'(f1[p].re) * w_t'(g1[p].im) + w_t'(f1[p].im) * w_t'(g1[p].re);
        if (in_valid) begin
          er.push_back((sr + (w_t'(1) <<< (FRAC-1))) >>> FRAC);
          ei.push_back((si + (w_t'(1) <<< (FRAC-1))) >>> FRAC);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
