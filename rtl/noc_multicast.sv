// noc_multicast: the key multicast network from the global scratchpad to
// the cores.  One registered stage copies a key word to NDST destinations;
// every destination sees the word one cycle after it enters.  The source
// uses a multicast network so each key word is read once and used by all
// cores; the single register stage is this design's choice.
module noc_multicast #(
  parameter int unsigned W    = 512,
  parameter int unsigned NDST = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid [NDST],
  output logic [W-1:0] out_data [NDST]
);
  for (genvar d = 0; d < NDST; d++) begin : g_dst
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_valid[d] <= 1'b0;
      else        out_valid[d] <= in_valid;
    end
    always_ff @(posedge clk) if (in_valid) out_data[d] <= in_data;
  end
endmodule
