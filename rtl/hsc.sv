// hsc: one homomorphic streaming core, the blind-rotation datapath of a
// single core together with its controller.
//
// What it does: for every LWE ciphertext of a batch held in the core, it runs
// the n iterations of the blind rotation of Algorithm 1 on the GLWE test
// vector of that ciphertext, which lives in the local scratchpad.
//
// How it works: the two polynomials of a GLWE (A and B) are processed side by
// side in two identical lanes (the source's PLP = 2): rotator -> decomposer ->
// forward FFT -> vector multiply-accumulate -> inverse FFT -> accumulator ->
// local scratchpad.  The controller walks the batch in the order
// "for each iteration, for each ciphertext", so that the key polynomials of
// one iteration are re-used by every ciphertext of the batch before the next
// iteration's key is needed (ciphertext batching of the source).  A new
// ciphertext is issued when the rotators and decomposers are free, its test
// vector has been written back by the previous iteration, and the bootstrap
// key of the iteration is present in the global scratchpad.
//
// Each iteration's key lives in one half of a double buffer in the global
// scratchpad.  bsk_avail[h] says half h is loaded; bsk_release[h] pulses
// when the last frame of the last ciphertext of that iteration has read its
// key, after which the half may be refilled.  The core addresses key words
// as {half, level frame, row}; data comes back BSK_LAT cycles later and the
// FFT outputs are delayed by the same amount to meet it.  A 512-bit key word
// holds, for one row of four complex FFT lanes, the key entries of both GLWE
// input polynomials for both output columns: element
// e = (col*2 + poly)*4 + lane sits at bits [32e +: 32], real part in the
// upper 16 bits.  Level frames are stored in the order the decomposer emits them
// (the least significant level first).
//
// The mask values a_i of the ciphertexts are written through the LWE load
// port and modulus-switched on the way in: a' = round(a * 2N / 2^32).  The
// initial rotation by the body (X^-b * tv) is not performed here: the test
// vector loaded into the scratchpad is expected to be already rotated.
//
// Interface timing: loads and the test-vector read port are only used while
// the core is idle (busy low); reads have one cycle of latency.  start is a
// one-cycle pulse sampling the configuration; done pulses when all
// ciphertexts have finished all iterations.
//
// Paper vs. this design: lanes, batching order, the pipeline of units and
// the double-buffered key follow the source.  The issue rule, the key-word
// layout, the write-back through a separate scratchpad write port and the
// host-side initial rotation are choices of this design.
module hsc
  import strix_pkg::*;
#(
  parameter int unsigned N        = POLY_N,
  parameter int unsigned NB       = BATCH,        // batch capacity
  parameter int unsigned NMAX     = N_LWE_MAX,    // max LWE dimension
  parameter int unsigned FFT_FRAC = 20,           // fraction bits into the FFT
  parameter int unsigned BSK_FRAC = 0,            // fraction bits of key entries
  parameter int unsigned BSK_LAT  = 2,            // key read latency
  localparam int unsigned ROWS = N / LANES,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned SW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned AW   = $clog2(NB * ROWS),
  localparam int unsigned LW   = $clog2(LB_MAX + 1),
  localparam int unsigned IW   = $clog2(NMAX + 1),
  localparam int unsigned XW   = $clog2(NMAX),
  localparam int unsigned BAW  = 1 + $clog2(LB_MAX) + RW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration, sampled on start
  input  logic [4:0]           log_base,
  input  logic [LW-1:0]        levels,
  input  logic [IW-1:0]        n_lwe,
  input  logic [$clog2(NB+1)-1:0] batch_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // LWE mask load port
  input  logic                 lwe_we,
  input  logic [SW-1:0]        lwe_slot,
  input  logic [XW-1:0]        lwe_idx,
  input  logic [COEF_W-1:0]    lwe_data,
  // test-vector load / read-back port (idle only)
  input  logic                 tv_we,
  input  logic                 tv_col,
  input  logic [AW-1:0]        tv_addr,
  input  coef_t                tv_wdata [LANES],
  input  logic                 tv_rd_en,
  output coef_t                tv_rdata [2][LANES],
  // bootstrap key interface
  input  logic [1:0]           bsk_avail,
  output logic [1:0]           bsk_release,
  output logic                 bsk_rd_en,
  output logic [BAW-1:0]       bsk_rd_addr,
  input  logic [BSK_BUS_W-1:0] bsk_rd_data,
  // event outputs for monitoring
  output logic                 key_stall,
  output logic                 issue
);
  localparam int unsigned MW  = $clog2(2 * N);
  localparam int unsigned MSS = COEF_W - MW;       // modulus-switch shift

  // ---------------------------------------------------------------- LWE store
  logic [MW-1:0] lwe_ms [NB][NMAX];
  always_ff @(posedge clk)
    if (lwe_we) lwe_ms[lwe_slot][lwe_idx] <= MW'(((lwe_data >> (MSS - 1)) + 1'b1) >> 1);

  // -------------------------------------------------------------- controller
  typedef struct packed {
    logic [SW-1:0] slot;
    logic          half;
    logic          last;     // last ciphertext of its iteration
  } ent_t;

  logic [4:0]    cfg_lb;
  logic [LW-1:0] cfg_l;
  logic [IW-1:0] cfg_n;
  logic [$clog2(NB+1)-1:0] cfg_b;
  logic          running, issuing;
  logic [IW-1:0] it;
  logic [SW-1:0] slot;
  logic [NB-1:0] tv_ready;
  ent_t          fifo [8];
  logic [2:0]    wp, fp, ap;
  logic          rot_busy, dec_ready, can_issue, wb_last;
  logic [SW-1:0] wb_slot;

  assign can_issue = running && issuing && !rot_busy && dec_ready && tv_ready[slot] && bsk_avail[it[0]];
  assign issue     = can_issue;
  assign key_stall = running && issuing && !rot_busy && dec_ready && tv_ready[slot] && !bsk_avail[it[0]];
  assign busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; issuing <= 1'b0; it <= '0; slot <= '0; wp <= '0; done <= 1'b0;
      tv_ready <= '1;
      cfg_lb <= '0; cfg_l <= '0; cfg_n <= '0; cfg_b <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; issuing <= (n_lwe != 0) && (batch_n != 0);
        it <= '0; slot <= '0;
        cfg_lb <= log_base; cfg_l <= levels; cfg_n <= n_lwe; cfg_b <= batch_n;
      end else if (running) begin
        if (can_issue) begin
          wp <= wp + 1'b1;
          if (32'(slot) == 32'(cfg_b) - 1) begin
            slot <= '0;
            it   <= it + 1'b1;
            if (it + 1'b1 == cfg_n) issuing <= 1'b0;
          end else begin
            slot <= slot + 1'b1;
          end
        end
        if (!issuing && wp == ap && &tv_ready) begin
          running <= 1'b0; done <= 1'b1;
        end
      end
      for (int s = 0; s < int'(NB); s++) begin
        if (can_issue && 32'(slot) == s) tv_ready[s] <= 1'b0;
        else if (wb_last && 32'(wb_slot) == s) tv_ready[s] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (can_issue) fifo[wp] <= '{slot: slot, half: it[0], last: (32'(slot) == 32'(cfg_b) - 1)};

  // --------------------------------------------------------- two GLWE lanes
  logic          fft_v [2], fft_s [2];
  cplx_t         fft_d [2][CLP];
  logic          acc_v [2];
  logic [RW-1:0] acc_row [2];
  coef_t         acc_d [2][LANES];
  logic          rb [2], dr [2];

  assign rot_busy  = rb[0] | rb[1];
  assign dec_ready = dr[0] & dr[1];

  for (genvar c = 0; c < 2; c++) begin : g_lane
    logic          rd_en, r_v, r_s, d_v, d_s, sp_rd, sp_we;
    logic [AW-1:0] ra_rot, ra_dir, sp_ra, sp_rb, sp_wa;
    coef_t         rd_rot [LANES], rd_dir [LANES], r_c [LANES], d_c [LANES], sp_wd [LANES];
    cplx_t         f_in [CLP];

    assign sp_rd = running ? rd_en : tv_rd_en;
    assign sp_ra = running ? ra_rot : tv_addr;
    assign sp_rb = running ? ra_dir : tv_addr;
    assign sp_we = running ? acc_v[c] : (tv_we && tv_col == c);
    assign sp_wa = running ? AW'(32'(wb_slot) * ROWS + 32'(acc_row[c])) : tv_addr;
    always_comb for (int q = 0; q < int'(LANES); q++) sp_wd[q] = running ? acc_d[c][q] : tv_wdata[q];
    assign tv_rdata[c] = rd_rot;

    local_scratchpad #(.DEPTH(NB * ROWS), .AW(AW)) u_spad (
      .clk, .rd_en(sp_rd), .raddr_a(sp_ra), .raddr_b(sp_rb),
      .rdata_a(rd_rot), .rdata_b(rd_dir), .we(sp_we), .waddr(sp_wa), .wdata(sp_wd));

    rotator_unit #(.N(N), .AW(AW)) u_rot (
      .clk, .rst_n, .start(can_issue), .rot(lwe_ms[slot][it[XW-1:0]]), .base(AW'(32'(slot) * ROWS)),
      .busy(rb[c]), .rd_en, .rd_addr_rot(ra_rot), .rd_addr_dir(ra_dir),
      .rd_data_rot(rd_rot), .rd_data_dir(rd_dir),
      .out_valid(r_v), .out_sof(r_s), .out_coef(r_c));

    decomposer_unit #(.N(N), .NLANE(LANES), .LMAX(LB_MAX)) u_dec (
      .clk, .rst_n, .log_base(cfg_lb), .levels(cfg_l),
      .in_valid(r_v), .in_sof(r_s), .in_coef(r_c), .in_ready(dr[c]),
      .out_valid(d_v), .out_sof(d_s), .out_level(), .out_digit(d_c));

    always_comb
      for (int p = 0; p < int'(CLP); p++) begin
        f_in[p].re = FFT_W'(signed'(d_c[p]))       <<< FFT_FRAC;
        f_in[p].im = FFT_W'(signed'(d_c[p + CLP])) <<< FFT_FRAC;
      end

    fft_unit #(.NPT(N / 2), .INVERSE(1'b0)) u_fft (
      .clk, .rst_n, .in_valid(d_v), .in_sof(d_s), .in_data(f_in),
      .out_valid(fft_v[c]), .out_sof(fft_s[c]), .out_data(fft_d[c]));
  end

  // ---------------------------------------------- key addressing and release
  logic [$clog2(LB_MAX)-1:0] kf;     // level frame within the ciphertext
  logic [RW-1:0]             krow;
  logic [RW-1:0]             krow_n;
  assign krow_n = fft_s[0] ? '0 : krow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kf <= '0; krow <= '0; fp <= '0; bsk_release <= '0;
    end else begin
      bsk_release <= '0;
      if (fft_v[0]) begin
        krow <= krow_n + 1'b1;
        if (krow_n == RW'(ROWS - 1)) begin
          if (32'(kf) == 32'(cfg_l) - 1) begin
            kf <= '0;
            fp <= fp + 1'b1;
            if (fifo[fp].last) bsk_release[fifo[fp].half] <= 1'b1;
          end else begin
            kf <= kf + 1'b1;
          end
        end
      end
    end
  end
  assign bsk_rd_en   = fft_v[0];
  assign bsk_rd_addr = {fifo[fp].half, kf, krow_n};

  // FFT outputs delayed to meet the key words
  localparam int unsigned FW = 2 * CLP * 2 * FFT_W;
  logic [FW-1:0] fpk, fdl;
  logic [1:0]    vdl;
  cplx_t         f0d [CLP], f1d [CLP];
  always_comb
    for (int p = 0; p < int'(CLP); p++) begin
      fpk[(2*p)   * 2 * FFT_W +: 2 * FFT_W] = fft_d[0][p];
      fpk[(2*p+1) * 2 * FFT_W +: 2 * FFT_W] = fft_d[1][p];
      f0d[p] = fdl[(2*p)   * 2 * FFT_W +: 2 * FFT_W];
      f1d[p] = fdl[(2*p+1) * 2 * FFT_W +: 2 * FFT_W];
    end
  delay_line #(.W(FW), .L(BSK_LAT)) u_fdl (.clk, .rst_n, .din(fpk), .dout(fdl));
  delay_line #(.W(2), .L(BSK_LAT)) u_vdl (.clk, .rst_n, .din({fft_v[0], fft_s[0]}), .dout(vdl));

  // ------------------------------------------ VMA, inverse FFT, accumulation
  for (genvar c = 0; c < 2; c++) begin : g_out
    bsk_t  g0 [CLP], g1 [CLP];
    logic  m_v, m_s, i_v, i_s;
    cplx_t m_d [CLP], i_d [CLP];
    logic signed [FFT_W-1:0] a_in [LANES];

    always_comb
      for (int p = 0; p < int'(CLP); p++) begin
        g0[p] = bsk_rd_data[((c*2 + 0)*CLP + p) * 32 +: 32];
        g1[p] = bsk_rd_data[((c*2 + 1)*CLP + p) * 32 +: 32];
      end

    vma_unit #(.FRAC(FFT_FRAC + BSK_FRAC)) u_vma (
      .clk, .rst_n, .in_valid(vdl[1]), .in_sof(vdl[0]), .f0(f0d), .f1(f1d),
      .g0(g0), .g1(g1), .out_valid(m_v), .out_sof(m_s), .out_data(m_d));

    fft_unit #(.NPT(N / 2), .INVERSE(1'b1)) u_ifft (
      .clk, .rst_n, .in_valid(m_v), .in_sof(m_s), .in_data(m_d),
      .out_valid(i_v), .out_sof(i_s), .out_data(i_d));

    always_comb
      for (int p = 0; p < int'(CLP); p++) begin
        a_in[p]       = i_d[p].re;
        a_in[p + CLP] = i_d[p].im;
      end

    accumulator_unit #(.N(N), .LMAX(LB_MAX)) u_acc (
      .clk, .rst_n, .nframes(cfg_l), .in_valid(i_v), .in_sof(i_s), .in_coef(a_in),
      .out_valid(acc_v[c]), .out_sof(), .out_row(acc_row[c]), .out_coef(acc_d[c]));
  end

  // ---------------------------------------------------- write-back tracking
  assign wb_slot = fifo[ap].slot;
  assign wb_last = acc_v[0] && acc_row[0] == RW'(ROWS - 1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ap <= '0;
    else if (wb_last) ap <= ap + 1'b1;
  end
endmodule
