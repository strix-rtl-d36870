// decomposer_unit: multiplier-free signed gadget decomposition of a stream of
// polynomials (Fig. 6 of the source, replicated over LANES lanes).
// Each 32-bit coefficient a is first rounded to its top l*beta bits
// (rounding step: the masked upper bits plus the masked bit just below them,
// shifted left by one), then split into l signed digits in [-B/2, B/2),
// B = 2^beta, one digit per cycle, least significant level first (extraction
// step: mask and shift the level's field to the top of the word, add the
// 0/1 carry left by the previous level, arithmetic shift right).
// The buffer of Fig. 6 holds the rounded coefficient and its carry between
// levels.  Here it is a row buffer of N/LANES entries per lane, so that the
// unit emits whole polynomials, one per level, each a contiguous frame of
// N/LANES rows: a frame enters during the first pass and the following
// l - 1 passes replay it from the buffer (the multiplexer's input 1).  This
// level-major order, which the FFT units need, is this design's reading of
// the figure.  A polynomial therefore takes l * N/LANES cycles, as the source
// states, and the unit takes a new frame (in_ready) in the cycle after its last row.
// Interface: in_valid/in_sof frames of N/LANES contiguous rows; out_level is
// the level index of the emitted frame, 1 = most significant (weight
// Q/B), l = least significant.  Output rows lag input rows by one cycle.
module decomposer_unit
  import strix_pkg::*;
#(
  parameter int unsigned N     = POLY_N,
  parameter int unsigned NLANE = LANES,
  parameter int unsigned LMAX  = LB_MAX
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [4:0]              log_base,    // beta, 1..16
  input  logic [$clog2(LMAX+1)-1:0] levels,    // l, 1..LMAX, l*beta < 32
  input  logic                    in_valid,
  input  logic                    in_sof,
  input  coef_t                   in_coef [NLANE],
  output logic                    in_ready,
  output logic                    out_valid,
  output logic                    out_sof,
  output logic [$clog2(LMAX+1)-1:0] out_level,
  output coef_t                   out_digit [NLANE]
);
  localparam int unsigned ROWS = N / NLANE;
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned LW   = $clog2(LMAX+1);

  typedef struct packed {
    logic [COEF_W-1:0] rounded;
    logic              carry;
  } ent_t;

  ent_t buffer [NLANE][ROWS];

  logic          running, last, take;
  logic [LW-1:0] pass, lv_q;
  logic [RW-1:0] t;
  logic [4:0]    beta;
  logic [LW-1:0] lcnt;

  assign last     = running && (pass == lcnt - 1'b1) && (t == RW'(ROWS-1));
  assign in_ready = !running;
  assign take     = in_ready && in_valid && in_sof;

  // current row position and level
  logic [RW-1:0] row;
  logic [LW-1:0] cur_pass;
  logic [4:0]    cur_beta;
  logic [LW-1:0] cur_l;
  logic          active;
  always_comb begin
    active   = take || running;
    row      = take ? '0 : t;
    cur_pass = take ? '0 : pass;
    cur_beta = take ? log_base : beta;
    cur_l    = take ? levels : lcnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; pass <= '0; t <= '0; beta <= 5'd1; lcnt <= LW'(1);
    end else if (take) begin
      running <= 1'b1; pass <= '0; t <= RW'(1 % ROWS); beta <= log_base; lcnt <= levels;
      if (ROWS == 1) pass <= LW'(1);
      if (ROWS == 1 && levels == LW'(1)) running <= 1'b0;
    end else if (running) begin
      if (last) running <= 1'b0;
      else if (t == RW'(ROWS-1)) begin
        t <= '0; pass <= pass + 1'b1;
      end else t <= t + 1'b1;
    end
  end

  // per-lane datapath
  logic [LW-1:0] level_now;
  assign level_now = cur_l - cur_pass;         // l, l-1, ..., 1
  for (genvar q = 0; q < NLANE; q++) begin : g_lane
    logic [COEF_W-1:0] rounded, src, field, sum;
    logic [COEF_W-1:0] mask_hi, mask_bit, mask_lvl;
    logic              carry_in, carry_out;
    logic [5:0]        keep, shl, top;
    always_comb begin
      keep     = 6'(cur_l) * 6'(cur_beta);                 // l*beta kept bits
      mask_hi  = ~((COEF_W'(1) << (6'd32 - keep)) - 1'b1);
      mask_bit = COEF_W'(1) << (6'd31 - keep);
      // rounding step
      rounded  = (in_coef[q] & mask_hi) + ((in_coef[q] & mask_bit) << 1);
      src      = (cur_pass == '0) ? rounded : buffer[q][row].rounded;
      carry_in = (cur_pass == '0) ? 1'b0    : buffer[q][row].carry;
      // extraction step
      top      = 6'd32 - 6'(level_now) * 6'(cur_beta);     // LSB of the field
      mask_lvl = ((COEF_W'(1) << cur_beta) - 1'b1) << top;
      shl      = 6'(level_now - 1'b1) * 6'(cur_beta);
      field    = (src & mask_lvl) << shl;                  // field at the top
      sum      = field + ({{(COEF_W-1){1'b0}}, carry_in} << (6'd32 - 6'(cur_beta)));
      carry_out = (sum[COEF_W-1] | (carry_in & (field == mask_hi_top(cur_beta))));
    end
    always_ff @(posedge clk) begin
      if (active) begin
        buffer[q][row].rounded <= src;
        buffer[q][row].carry   <= carry_out;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_digit[q] <= '0;
      else        out_digit[q] <= coef_t'($signed(sum) >>> (6'd32 - 6'(cur_beta)));
    end
  end

  // all-ones beta-bit field at the top of the word: field + carry wraps to 0
  function automatic logic [COEF_W-1:0] mask_hi_top(logic [4:0] b);
    return ~((COEF_W'(1) << (6'd32 - 6'(b))) - 1'b1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_sof <= 1'b0; lv_q <= '0;
    end else begin
      out_valid <= active;
      out_sof   <= active && row == '0;
      lv_q      <= level_now;
    end
  end
  assign out_level = lv_q;

  assert property (@(posedge clk) disable iff (!rst_n)
    (running && !last && pass == '0) |-> in_valid);
endmodule
