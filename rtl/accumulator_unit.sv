// accumulator_unit: time-domain accumulator of the PBS cluster (Fig. 4 of
// the source).  LANES = 8 input lanes, each an adder, a 0/1 multiplexer and a
// buffer of N/8 coefficients.  It adds up `nframes` consecutive polynomial
// frames (the l_b partial results of one output column that leave an IFFT
// unit), coefficient by coefficient, modulo 2^32.  On the first frame the
// multiplexer feeds zero to the adder instead of the buffer; during the last
// frame the sums leave on the output, one row per cycle, to be written back
// to the local scratchpad.  Inputs are 64-bit IFFT results; their low 32
// bits are the torus value.  One cycle of latency.
module accumulator_unit
  import strix_pkg::*;
#(
  parameter int unsigned N    = POLY_N,
  parameter int unsigned LMAX = LB_MAX
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(LMAX+1)-1:0] nframes,
  input  logic                      in_valid,
  input  logic                      in_sof,
  input  logic signed [FFT_W-1:0]   in_coef [LANES],
  output logic                      out_valid,
  output logic                      out_sof,
  output logic [$clog2(N/LANES)-1:0] out_row,
  output coef_t                     out_coef [LANES]
);
  localparam int unsigned ROWS = N / LANES;
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned LW   = $clog2(LMAX+1);

  coef_t         buffer [LANES][ROWS];
  logic [RW-1:0] row_q, row;
  logic [LW-1:0] fcnt_q, fcnt;
  logic          first, last;

  assign row   = in_sof ? '0 : row_q;
  assign fcnt  = fcnt_q;
  assign first = (fcnt == '0);
  assign last  = (fcnt == nframes - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q <= '0; fcnt_q <= '0;
    end else if (in_valid) begin
      if (row == RW'(ROWS-1)) begin
        row_q  <= '0;
        fcnt_q <= last ? '0 : fcnt + 1'b1;
      end else begin
        row_q  <= row + 1'b1;
        fcnt_q <= fcnt;
      end
    end
  end

  for (genvar q = 0; q < LANES; q++) begin : g_lane
    coef_t sum;
    assign sum = coef_t'(in_coef[q][COEF_W-1:0]) + (first ? coef_t'(0) : buffer[q][row]);
    always_ff @(posedge clk) if (in_valid) buffer[q][row] <= sum;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_coef[q] <= '0;
      else        out_coef[q] <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_sof <= 1'b0; out_row <= '0;
    end else begin
      out_valid <= in_valid && last;
      out_sof   <= in_valid && last && row == '0;
      out_row   <= row;
    end
  end
endmodule
