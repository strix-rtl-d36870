// rotator_unit: negacyclic rotation and subtraction, the first step of a
// blind-rotation iteration (Fig. 4 of the source: vector shifter, "inv"
// negators with 0/1 multiplexers, adders).  For a polynomial tv of N
// coefficients held in LANES = 8 memory banks (bank q, row r holds
// tv[r + q*N/8]) it streams out d = X^a * tv - tv mod (X^N + 1), eight
// coefficients per cycle, row t carrying d[t + q*N/8] on lane q.
// Each cycle it reads two rows, one from every bank for each of the two
// polynomials (the rotated one at row (t - a) mod N/8 and the unrotated one at
// row t).  The vector shifter rotates the eight rotated words by
// (a / (N/8) + borrow) lanes; a lane is negated when its source index wrapped
// past N, or when a >= N.  The address scheme is this design's choice; it
// keeps each bank to one read per polynomial per cycle, as the source says.
// Interface: pulse start with rot (0..2N-1) and base (first row of the
// polynomial in the banks); one frame of N/8 rows follows.  Bank reads have
// one cycle of latency.  Output rows appear 2 cycles after their read.
module rotator_unit
  import strix_pkg::*;
#(
  parameter int unsigned N  = POLY_N,
  parameter int unsigned AW = 16          // bank address width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(2*N)-1:0] rot,
  input  logic [AW-1:0]          base,
  output logic                   busy,
  // bank read ports (shared address for all banks)
  output logic                   rd_en,
  output logic [AW-1:0]          rd_addr_rot,
  output logic [AW-1:0]          rd_addr_dir,
  input  coef_t                  rd_data_rot [LANES],
  input  coef_t                  rd_data_dir [LANES],
  // output stream
  output logic                   out_valid,
  output logic                   out_sof,
  output coef_t                  out_coef [LANES]
);
  localparam int unsigned ROWS = N / LANES;
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned QW   = $clog2(LANES);

  logic [RW-1:0] t, a_lo;
  logic [QW-1:0] a_hi;
  logic          neg_all;
  logic [AW-1:0] base_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; t <= '0; a_lo <= '0; a_hi <= '0; neg_all <= 1'b0; base_q <= '0;
    end else if (start && !busy) begin
      busy    <= 1'b1;
      t       <= '0;
      neg_all <= rot[$clog2(2*N)-1];
      a_hi    <= rot[$clog2(N)-1 -: QW];
      a_lo    <= rot[RW-1:0];
      base_q  <= base;
    end else if (busy) begin
      t <= t + 1'b1;
      if (t == RW'(ROWS-1)) busy <= 1'b0;
    end
  end

  logic borrow;
  assign borrow      = (t < a_lo);
  assign rd_en       = busy;
  assign rd_addr_rot = base_q + AW'(RW'(t - a_lo));
  assign rd_addr_dir = base_q + AW'(t);

  // pipeline of the lane control to the data return cycle
  logic          v1, sof1, borrow1, neg1;
  logic [QW-1:0] hi1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; sof1 <= 1'b0; borrow1 <= 1'b0; neg1 <= 1'b0; hi1 <= '0;
    end else begin
      v1 <= busy; sof1 <= busy && t == '0; borrow1 <= borrow; neg1 <= neg_all; hi1 <= a_hi;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_sof <= 1'b0;
      for (int q = 0; q < int'(LANES); q++) out_coef[q] <= '0;
    end else begin
      out_valid <= v1;
      out_sof   <= sof1;
      for (int q = 0; q < int'(LANES); q++) begin
        logic [QW:0]   shift;
        logic [QW-1:0] src;
        logic          neg;
        coef_t         r;
        shift = {1'b0, hi1} + {{QW{1'b0}}, borrow1};
        src   = QW'(q - int'(shift));
        neg   = neg1 ^ (q < int'(shift));
        r     = neg ? -rd_data_rot[src] : rd_data_rot[src];
        out_coef[q] <= r - rd_data_dir[q];
      end
    end
  end
endmodule
