// keyswitch_cluster: sample extraction and LWE key switching.
//
// What it does: takes the A polynomial and constant coefficient B_0 of a
// bootstrapped GLWE ciphertext, extracts the LWE ciphertext of dimension N
// encrypting its constant coefficient, and switches it to an LWE ciphertext
// of dimension n:  out = (0, ..., 0, b) - sum_i sum_j d_ij(a_i) * KSK_ij,
// where d_ij is digit j of the signed gadget decomposition of a_i.
//
// How it works:
//  * Sample extraction is done while loading: row t, lane q of A holds
//    coefficient j = t + q*N/8; its extracted mask element has index
//    (N - j) mod N and is negated for j > 0, so each lane writes its own
//    bank of the extract buffer at its own row.
//  * The key switch walks the n+1 output coefficients in tiles of COLS
//    columns (the source's column-level parallelism).  For each tile the
//    extract buffer is streamed through a decomposer (8 lanes, up to LK_MAX
//    levels); each digit row is multiplied with one key word of 8 lanes x
//    COLS columns and reduced by an adder tree into COLS column
//    accumulators.  After the last digit row of a tile the COLS output
//    coefficients are emitted and the accumulators cleared.
//  * Key words are addressed {tile, level frame, row} and must arrive
//    KSK_LAT cycles after the request; the digits are delayed to meet them.
//    Level frames are in the order the decomposer emits them (least
//    significant first).  Lane q, column c of a key word is at bits
//    [32*(q*COLS + c) +: 32].
//
// Interface: ld_en/ld_row/ld_a load one row of A; ld_b0_en loads B_0.
// start pulses; out_valid marks a tile result, out_tile its index; done
// pulses after the last tile.  Columns beyond n are emitted as 0.
//
// Paper vs. this design: decomposition, the 8-lane/8-column key-switch
// datapath and column tiling follow the source.  The 2048-bit key word (the
// source names a 256-bit HBM channel; the width here is what one cycle of
// the 64 multipliers consumes), extraction during load and the output
// ordering are choices of this design.
module keyswitch_cluster
  import strix_pkg::*;
#(
  parameter int unsigned N       = POLY_N,
  parameter int unsigned NOUT    = N_LWE_MAX,
  parameter int unsigned COLS    = KS_COLP,
  parameter int unsigned KSK_LAT = 2,
  localparam int unsigned ROWS = N / LANES,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned LKW  = $clog2(LK_MAX + 1),
  localparam int unsigned IW   = $clog2(NOUT + 1),
  localparam int unsigned NT   = (NOUT + 1 + COLS - 1) / COLS,
  localparam int unsigned TW   = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned KAW  = TW + $clog2(LK_MAX) + RW,
  localparam int unsigned KW   = LANES * COLS * COEF_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      log_base,
  input  logic [LKW-1:0]  levels,
  input  logic [IW-1:0]   n_out,
  // extraction load
  input  logic            ld_en,
  input  logic [RW-1:0]   ld_row,
  input  coef_t           ld_a [LANES],
  input  logic            ld_b0_en,
  input  coef_t           ld_b0,
  // control
  input  logic            start,
  output logic            busy,
  output logic            done,
  // key-switching key
  output logic            ksk_rd_en,
  output logic [KAW-1:0]  ksk_rd_addr,
  input  logic [KW-1:0]   ksk_rd_data,
  // result
  output logic            out_valid,
  output logic [TW-1:0]   out_tile,
  output coef_t           out_coef [COLS]
);
  // ---------------------------------------------------- extraction buffer
  coef_t ebuf [LANES][ROWS];
  coef_t body;
  for (genvar q = 0; q < LANES; q++) begin : g_ext
    logic [RW-1:0] wrow;
    logic [2:0]    wbank;
    logic          neg;
    always_comb begin
      if (ld_row == '0) begin
        wrow  = '0;
        wbank = 3'((LANES - q) % LANES);
        neg   = (q != 0);
      end else begin
        wrow  = RW'(ROWS) - ld_row;
        wbank = 3'(LANES - 1 - q);
        neg   = 1'b1;
      end
    end
    for (genvar b = 0; b < LANES; b++) begin : g_bank
      if (b == (q == 0 ? 0 : LANES - q) || b == LANES - 1 - q) begin : g_w
        always_ff @(posedge clk)
          if (ld_en && wbank == 3'(b)) ebuf[b][wrow] <= neg ? -ld_a[q] : ld_a[q];
      end
    end
  end
  always_ff @(posedge clk) if (ld_b0_en) body <= ld_b0;

  // --------------------------------------------------------- tile control
  logic [4:0]     cfg_lb;
  logic [LKW-1:0] cfg_l;
  logic [IW-1:0]  cfg_n;
  logic           running, feeding, fed_all, dec_ready, done_i;
  logic [TW-1:0]  tile_f, tile_m;       // tile being fed / being accumulated
  logic [TW-1:0]  ntiles_m1;
  logic [RW-1:0]  frow;
  logic           d_v, d_s;
  coef_t          d_c [LANES], f_c [LANES];

  assign ntiles_m1 = TW'((32'(cfg_n) + COLS) / COLS - 1);
  assign busy      = running;
  always_comb for (int q = 0; q < int'(LANES); q++) f_c[q] = ebuf[q][frow];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; feeding <= 1'b0; fed_all <= 1'b0; tile_f <= '0; frow <= '0;
      cfg_lb <= '0; cfg_l <= '0; cfg_n <= '0;
    end else begin
      if (start && !running) begin
        running <= 1'b1; feeding <= 1'b0; fed_all <= 1'b0; tile_f <= '0; frow <= '0;
        cfg_lb <= log_base; cfg_l <= levels; cfg_n <= n_out;
      end else if (running) begin
        if (!feeding && dec_ready && !fed_all) begin
          feeding <= 1'b1; frow <= '0;
        end else if (feeding) begin
          frow <= frow + 1'b1;
          if (frow == RW'(ROWS - 1)) begin
            feeding <= 1'b0;
            tile_f  <= tile_f + 1'b1;
            fed_all <= (tile_f == ntiles_m1);
          end
        end
        if (done_i) running <= 1'b0;
      end
    end
  end

  decomposer_unit #(.N(N), .NLANE(LANES), .LMAX(LK_MAX)) u_dec (
    .clk, .rst_n, .log_base(cfg_lb), .levels(cfg_l),
    .in_valid(feeding), .in_sof(feeding && frow == '0), .in_coef(f_c), .in_ready(dec_ready),
    .out_valid(d_v), .out_sof(d_s), .out_level(), .out_digit(d_c));

  // ---------------------------------------------- key addressing and MAC
  logic [$clog2(LK_MAX)-1:0] kf;
  logic [RW-1:0]             krow, krow_n;
  logic                      tile_end;
  assign krow_n   = d_s ? '0 : krow;
  assign tile_end = d_v && krow_n == RW'(ROWS - 1) && 32'(kf) == 32'(cfg_l) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kf <= '0; krow <= '0; tile_m <= '0;
    end else if (start && !running) begin
      kf <= '0; krow <= '0; tile_m <= '0;
    end else if (d_v) begin
      krow <= krow_n + 1'b1;
      if (krow_n == RW'(ROWS - 1)) begin
        if (tile_end) begin kf <= '0; tile_m <= tile_m + 1'b1; end
        else kf <= kf + 1'b1;
      end
    end
  end
  assign ksk_rd_en   = d_v;
  assign ksk_rd_addr = {tile_m, kf, krow_n};

  // digits and tile marks delayed to meet the key word
  localparam int unsigned DW = LANES * COEF_W + 2 + TW;
  logic [DW-1:0] dpk, ddl;
  coef_t         dd [LANES];
  logic          dv, dend;
  logic [TW-1:0] dtile;
  always_comb begin
    for (int q = 0; q < int'(LANES); q++) dpk[q*COEF_W +: COEF_W] = d_c[q];
    dpk[LANES*COEF_W +: 2 + TW] = {d_v, tile_end, tile_m};
    for (int q = 0; q < int'(LANES); q++) dd[q] = ddl[q*COEF_W +: COEF_W];
    {dv, dend, dtile} = ddl[LANES*COEF_W +: 2 + TW];
  end
  delay_line #(.W(DW), .L(KSK_LAT)) u_ddl (.clk, .rst_n, .din(dpk), .dout(ddl));

  coef_t acc [COLS];
  coef_t colsum [COLS];
  always_comb
    for (int c = 0; c < int'(COLS); c++) begin
      colsum[c] = '0;
      for (int q = 0; q < int'(LANES); q++)
        colsum[c] += dd[q] * coef_t'(ksk_rd_data[(q*COLS + c)*COEF_W +: COEF_W]);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tile <= '0; done <= 1'b0;
      for (int c = 0; c < int'(COLS); c++) begin acc[c] <= '0; out_coef[c] <= '0; end
    end else begin
      out_valid <= 1'b0; done <= 1'b0;
      if (dv) begin
        for (int c = 0; c < int'(COLS); c++) begin
          if (dend) begin
            acc[c] <= '0;
            if (32'(dtile) * COLS + c == 32'(cfg_n))     out_coef[c] <= body - (acc[c] + colsum[c]);
            else if (32'(dtile) * COLS + c < 32'(cfg_n)) out_coef[c] <= -(acc[c] + colsum[c]);
            else                                         out_coef[c] <= '0;
          end else begin
            acc[c] <= acc[c] + colsum[c];
          end
        end
        if (dend) begin
          out_valid <= 1'b1; out_tile <= dtile;
          done      <= (dtile == ntiles_m1);
        end
      end
    end
  end
  assign done_i = done;
endmodule
