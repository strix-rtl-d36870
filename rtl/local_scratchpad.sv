// local_scratchpad: one bank group of the per-core local scratchpad, LANES =
// 8 banks of 32-bit words.  Two read ports share one row address across all
// banks (the rotator reads a rotated and an unrotated row of the same
// polynomial every cycle); one write port writes a full row (the
// accumulator's final sums, or data being loaded).  Reads have one cycle of
// latency; a read and a write of the same row in one cycle return the old
// word.  The source specifies true dual-port banks; the separate write port
// is this design's choice, so that the write-back never has to be scheduled
// around the rotator's reads.
module local_scratchpad
  import strix_pkg::*;
#(
  parameter int unsigned DEPTH = BATCH * POLY_N / LANES,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr_a,
  input  logic [AW-1:0] raddr_b,
  output coef_t         rdata_a [LANES],
  output coef_t         rdata_b [LANES],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  coef_t         wdata [LANES]
);
  for (genvar q = 0; q < LANES; q++) begin : g_bank
    coef_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (rd_en) begin
        rdata_a[q] <= mem[raddr_a];
        rdata_b[q] <= mem[raddr_b];
      end
      if (we) mem[waddr] <= wdata[q];
    end
  end
endmodule
