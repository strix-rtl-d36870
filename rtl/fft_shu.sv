// fft_shu: shuffle unit (SHU) between two butterfly stages of the pipelined
// FFT (Fig. 5 of the source).  It has two L-delay elements and two
// multiplexers: the lower input is delayed by L, the upper output is delayed
// by L, and every L cycles the multiplexers swap, so that the second half of
// each 2L-sample block on the upper lane trades places with the first half of
// the block on the lower lane.  After the shuffle the next butterfly sees
// pairs of samples that were L apart in time.
// The selector is a free-running counter that restarts on the start-of-frame
// flag (bit SOF_BIT of the upper input word), so frames may be separated by
// gaps of any length.  Payload words are opaque W-bit vectors.
// Only the upper output carries the flag.
// Timing: a frame entering at t0 leaves at t0 + L.
module fft_shu #(
  parameter int unsigned W       = 8,
  parameter int unsigned L       = 4,
  parameter int unsigned SOF_BIT = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_up,
  input  logic [W-1:0] in_lo,
  output logic [W-1:0] out_up,
  output logic [W-1:0] out_lo
);
  localparam int unsigned CW = $clog2(2*L);
  logic [CW-1:0] cnt, phase;
  logic          sel;
  logic [W-1:0]  lo_d, mux_up, lo_nosof, up_nosof;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else        cnt <= phase + 1'b1;
  end
  assign phase = in_up[SOF_BIT] ? '0 : cnt;
  assign sel   = phase[CW-1];

  // Only the upper lane carries the start-of-frame flag out of a shuffle.
  always_comb begin
    lo_nosof = in_lo;  lo_nosof[SOF_BIT] = 1'b0;
    up_nosof = in_up;  up_nosof[SOF_BIT] = 1'b0;
  end

  delay_line #(.W(W), .L(L)) u_dlo (.clk, .rst_n, .din(lo_nosof), .dout(lo_d));
  assign mux_up = sel ? lo_d : in_up;
  delay_line #(.W(W), .L(L)) u_dup (.clk, .rst_n, .din(mux_up), .dout(out_up));
  assign out_lo = sel ? up_nosof : lo_d;
endmodule
