// vma_unit: vector multiply-add unit of the PBS cluster (Fig. 4 of the
// source: complex multipliers followed by an adder tree).  For one output
// column of the external product it multiplies, lane by lane, the PLP = 2
// transformed polynomials that leave the two FFT units in the same cycle by
// their bootstrapping-key polynomials and adds the two products:
//   y[p] = (F0[p]*G0[p] + F1[p]*G1[p]) >>> frac,  p = 0..CLP-1.
// The shift removes the fixed-point fraction (FFT_FRAC) that the core gives
// the decomposed digits before the forward FFT; its value is this design's
// choice.  Two pipeline registers: products, then sum.  Valid and
// start-of-frame travel with the data.
module vma_unit
  import strix_pkg::*;
#(
  parameter int unsigned FRAC = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  cplx_t f0 [CLP],
  input  cplx_t f1 [CLP],
  input  bsk_t  g0 [CLP],
  input  bsk_t  g1 [CLP],
  output logic  out_valid,
  output logic  out_sof,
  output cplx_t out_data [CLP]
);
  localparam int unsigned PW = FFT_W + BSK_W + 2;
  typedef struct packed { logic signed [PW-1:0] re, im; } wide_t;

  function automatic wide_t cmul(cplx_t a, bsk_t b);
    wide_t r;
    r.re = PW'(a.re * b.re) - PW'(a.im * b.im);
    r.im = PW'(a.re * b.im) + PW'(a.im * b.re);
    return r;
  endfunction

  wide_t p0 [CLP], p1 [CLP];
  logic  v1, s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; s1 <= 1'b0; out_valid <= 1'b0; out_sof <= 1'b0;
      for (int p = 0; p < int'(CLP); p++) begin p0[p] <= '0; p1[p] <= '0; out_data[p] <= '0; end
    end else begin
      v1 <= in_valid; s1 <= in_valid & in_sof;
      for (int p = 0; p < int'(CLP); p++) begin
        p0[p] <= cmul(f0[p], g0[p]);
        p1[p] <= cmul(f1[p], g1[p]);
      end
      out_valid <= v1; out_sof <= s1;
      for (int p = 0; p < int'(CLP); p++) begin
        logic signed [PW-1:0] sr, si;
        sr = p0[p].re + p1[p].re + (PW'(1) <<< (FRAC-1));
        si = p0[p].im + p1[p].im + (PW'(1) <<< (FRAC-1));
        out_data[p].re <= FFT_W'(sr >>> FRAC);
        out_data[p].im <= FFT_W'(si >>> FRAC);
      end
    end
  end
endmodule
