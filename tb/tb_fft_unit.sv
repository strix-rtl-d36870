// tb_fft_unit: self-checking test of the folded, pipelined I/FFT unit.
// A forward unit and an inverse unit are chained.  Random frames (some back
// to back, some after gaps) go into the forward unit; each forward output is
// compared with a direct evaluation, in real arithmetic, of
// X[k] = sum_j c[j] psi^j exp(-2 pi i j k / NPT), and each inverse output with
// the original input.  The latency of the forward unit is checked against
// log2(NPT) + 2*NPT/4 + 1 cycles and the frame rate against one frame every
// NPT/4 cycles.
`timescale 1ns/1ps
module tb_fft_unit;
  import strix_pkg::*;
  localparam int unsigned NPT  = 64;
  localparam int unsigned ROWS = NPT/4;
  localparam int unsigned NF   = 6;
  // counted from the clock edge on which row 0 is driven (one edge before it is sampled)
  localparam int unsigned LAT  = $clog2(NPT) + 2*ROWS + 2;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic  in_valid, in_sof, f_valid, f_sof, i_valid, i_sof;
  cplx_t in_data [CLP], f_data [CLP], i_data [CLP];

  fft_unit #(.NPT(NPT), .INVERSE(1'b0)) dut_f (.clk, .rst_n, .in_valid, .in_sof,
    .in_data, .out_valid(f_valid), .out_sof(f_sof), .out_data(f_data));
  fft_unit #(.NPT(NPT), .INVERSE(1'b1)) dut_i (.clk, .rst_n, .in_valid(f_valid),
    .in_sof(f_sof), .in_data(f_data), .out_valid(i_valid), .out_sof(i_sof), .out_data(i_data));

  int checks = 0, failures = 0;
  longint xr [NF][NPT], xi [NF][NPT];
  real    er [NF][NPT], ei [NF][NPT];
  int     fo_frame = 0, fo_row = 0, io_frame = 0, io_row = 0;
  longint cyc = 0, sof_in_cyc [NF], sof_out_cyc [NF];
  int     fin_frame = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic reference(int f);
    for (int k = 0; k < int'(NPT); k++) begin
      real sr, si;
      sr = 0.0; si = 0.0;
      for (int j = 0; j < int'(NPT); j++) begin
        real a;
        a = 3.14159265358979323846 * (real'(j) / real'(2*NPT) - 2.0 * real'(j*k % NPT) / real'(NPT));
        sr += real'(xr[f][j]) * $cos(a) - real'(xi[f][j]) * $sin(a);
        si += real'(xr[f][j]) * $sin(a) + real'(xi[f][j]) * $cos(a);
      end
      er[f][k] = sr; ei[f][k] = si;
    end
  endtask

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  // forward output check
  always @(posedge clk) if (rst_n && f_valid) begin
    if (f_sof) begin
      fo_row = 0;
      sof_out_cyc[fo_frame] = cyc;
    end
    for (int p = 0; p < int'(CLP); p++) begin
      int k; real dr, di;
      k = fo_row + p*ROWS;
      dr = absr(real'(f_data[p].re) - er[fo_frame][k]);
      di = absr(real'(f_data[p].im) - ei[fo_frame][k]);
      checks++;
      if (dr > 16.0 || di > 16.0) begin
        failures++;
        if (failures < 10) $display("FFT mismatch frame %0d k %0d got %0d,%0d exp %f,%f",
          fo_frame, k, f_data[p].re, f_data[p].im, er[fo_frame][k], ei[fo_frame][k]);
      end
    end
    fo_row++;
    if (fo_row == int'(ROWS)) fo_frame++;
  end

  // inverse output check (round trip)
  always @(posedge clk) if (rst_n && i_valid) begin
    if (i_sof) io_row = 0;
    for (int p = 0; p < int'(CLP); p++) begin
      int j;
      j = io_row + p*ROWS;
      checks++;
      if (absr(real'(i_data[p].re - xr[io_frame][j])) > 2.0 ||
          absr(real'(i_data[p].im - xi[io_frame][j])) > 2.0) begin
        failures++;
        if (failures < 10) $display("IFFT mismatch frame %0d j %0d got %0d,%0d exp %0d,%0d",
          io_frame, j, i_data[p].re, i_data[p].im, xr[io_frame][j], xi[io_frame][j]);
      end
    end
    io_row++;
    if (io_row == int'(ROWS)) io_frame++;
  end

  initial begin
    for (int f = 0; f < int'(NF); f++) begin
      for (int j = 0; j < int'(NPT); j++) begin
        xr[f][j] = longint'($urandom_range(2000)) - 1000;
        xi[f][j] = longint'($urandom_range(2000)) - 1000;
      end
      reference(f);
    end
    in_valid = 0; in_sof = 0;
    for (int p = 0; p < int'(CLP); p++) in_data[p] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int f = 0; f < int'(NF); f++) begin
      // frames 0-2 back to back, then gaps of varying length
      if (f >= 3) begin
        in_valid <= 0; in_sof <= 0;
        repeat (f * 5) @(posedge clk);
      end
      for (int t = 0; t < int'(ROWS); t++) begin
        in_valid <= 1; in_sof <= (t == 0);
        for (int p = 0; p < int'(CLP); p++) begin
          in_data[p].re <= FFT_W'(xr[f][t + p*ROWS]);
          in_data[p].im <= FFT_W'(xi[f][t + p*ROWS]);
        end
        if (t == 0) sof_in_cyc[f] = cyc;
        @(posedge clk);
      end
    end
    in_valid <= 0; in_sof <= 0;
    wait (io_frame == int'(NF));
    repeat (5) @(posedge clk);
    for (int f = 0; f < int'(NF); f++) begin
      checks++;
      if (sof_out_cyc[f] - sof_in_cyc[f] != longint'(LAT)) begin
        failures++;
        $display("latency frame %0d = %0d, expected %0d", f, sof_out_cyc[f] - sof_in_cyc[f], LAT);
      end
    end
    checks++;
    if (sof_out_cyc[1] - sof_out_cyc[0] != longint'(ROWS)) begin
      failures++; $display("frame interval %0d", sof_out_cyc[1] - sof_out_cyc[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
