// global_scratchpad: the bootstrap-key part of the shared global scratchpad.
//
// What it does: holds two halves of bootstrap-key words (one iteration of
// the blind rotation each) so that the key of iteration i+1 can be fetched
// from HBM while the cores use the key of iteration i.
//
// How it works: one memory of 2 * LB_MAX * N/8 words of BSK_BUS_W bits,
// addressed {half, level frame, row}.  The HBM side writes words and pulses
// fill_done[h] when half h is complete, which sets avail[h]; the cores pulse
// release[h] when they have read half h for the last time, which clears it.
// The read port has one cycle of latency.
//
// Paper vs. this design: double buffering of the key in the global
// scratchpad follows the source; the availability flags and the single
// read port shared by all cores (they run in lockstep and the word is
// multicast) are this design's choices.  The key-switching key and the
// LWE/test-vector storage of the source's global scratchpad are held
// elsewhere in this design (keyswitch cluster, per-core loaders).
module global_scratchpad
  import strix_pkg::*;
#(
  parameter int unsigned N     = POLY_N,
  localparam int unsigned ROWS = N / LANES,
  localparam int unsigned AW   = 1 + $clog2(LB_MAX) + $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // HBM fill side
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [BSK_BUS_W-1:0] wr_data,
  input  logic [1:0]           fill_done,
  // core side
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [BSK_BUS_W-1:0] rd_data,
  input  logic [1:0]           release_h,
  output logic [1:0]           avail
);
  logic [BSK_BUS_W-1:0] mem [2 ** AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) avail <= '0;
    else for (int h = 0; h < 2; h++)
      if (fill_done[h])      avail[h] <= 1'b1;
      else if (release_h[h]) avail[h] <= 1'b0;
  end
endmodule
