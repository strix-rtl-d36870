// delay_line: fixed delay of L cycles for a W-bit word, written every cycle.
// Used as the L-delay element of the FFT shuffle units (Fig. 5 of the source
// shows shift registers for small L and SRAM-based shift registers for large
// L; both are this same behaviour, here written as a circular buffer, which a
// synthesis tool maps to flops for small L and to a memory for large L).
// Until L words have been written after reset the output is zero, so random
// power-up contents can never appear as valid data downstream.
// Timing: dout(t) = din(t - L).
module delay_line #(
  parameter int unsigned W = 8,
  parameter int unsigned L = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  localparam int unsigned AW = (L > 1) ? $clog2(L) : 1;
  logic [W-1:0]  mem [L];
  logic [AW-1:0] ptr;
  logic          filled;

  always_ff @(posedge clk) begin
    mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      filled <= 1'b0;
    end else begin
      if (ptr == AW'(L-1)) begin
        ptr    <= '0;
        filled <= 1'b1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  assign dout = filled ? mem[ptr] : '0;
endmodule
