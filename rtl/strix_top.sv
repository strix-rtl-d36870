// strix_top: the accelerator top level.
//
// What it does: TVLP homomorphic streaming cores run programmable
// bootstrapping (blind rotation) on TVLP x batch LWE ciphertexts at once;
// a key-switch cluster then performs sample extraction and key switching
// on the bootstrapped results.
//
// How it works: all cores receive the same configuration and start pulse,
// run the same data-independent schedule and therefore stay in lockstep.
// Core 0's key-read address is used for the single read port of the global
// scratchpad; the word read is multicast to every core through
// noc_multicast (key read latency 2 = scratchpad + multicast register).
// A bootstrap-key half is released when core 0 releases it.  The HBM side
// (outside this module) fills key halves through the bsk_wr port and
// supplies key-switching-key words on the ksk port with a fixed latency.
//
// Host ports, used while the cores are idle: lwe_* loads modulus-switched
// masks into a core; tv_* loads and reads test-vector rows (address =
// slot*N/8 + row, one cycle read latency).  When ks_ld is set together with
// tv_rd_en, the rows read (A in column 0, B in column 1) are also loaded into
// the key-switch cluster, which extracts the LWE; row 0 also provides B_0.
//
// Paper vs. this design: the core count, batching, multicast of keys and
// the key-switch cluster follow the source.  Lockstep cores with one key
// reader, host-driven load/unload instead of the source's ciphertext
// scratchpad, and one key-switch cluster fed through the read-back port are
// this design's choices.  HBM and the chip-to-host link are not modelled.
module strix_top
  import strix_pkg::*;
#(
  parameter int unsigned NCORE    = TVLP,
  parameter int unsigned N        = POLY_N,
  parameter int unsigned NB       = BATCH,
  parameter int unsigned NMAX     = N_LWE_MAX,
  parameter int unsigned FFT_FRAC = 20,
  parameter int unsigned BSK_FRAC = 0,
  parameter int unsigned KSK_LAT  = 2,
  localparam int unsigned ROWS = N / LANES,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned CW   = (NCORE > 1) ? $clog2(NCORE) : 1,
  localparam int unsigned SW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned AW   = $clog2(NB * ROWS),
  localparam int unsigned LW   = $clog2(LB_MAX + 1),
  localparam int unsigned LKW  = $clog2(LK_MAX + 1),
  localparam int unsigned IW   = $clog2(NMAX + 1),
  localparam int unsigned XW   = $clog2(NMAX),
  localparam int unsigned BAW  = 1 + $clog2(LB_MAX) + RW,
  localparam int unsigned NT   = (NMAX + 1 + KS_COLP - 1) / KS_COLP,
  localparam int unsigned TW   = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned KAW  = TW + $clog2(LK_MAX) + RW,
  localparam int unsigned KW   = LANES * KS_COLP * COEF_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  tfhe_cfg_t            cfg,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // host load / read-back
  input  logic                 lwe_we,
  input  logic [CW-1:0]        lwe_core,
  input  logic [SW-1:0]        lwe_slot,
  input  logic [XW-1:0]        lwe_idx,
  input  logic [COEF_W-1:0]    lwe_data,
  input  logic                 tv_we,
  input  logic                 tv_rd_en,
  input  logic [CW-1:0]        tv_core,
  input  logic                 tv_col,
  input  logic [AW-1:0]        tv_addr,
  input  coef_t                tv_wdata [LANES],
  output coef_t                tv_rdata [2][LANES],
  // bootstrap key fill from HBM
  input  logic                 bsk_wr_en,
  input  logic [BAW-1:0]       bsk_wr_addr,
  input  logic [BSK_BUS_W-1:0] bsk_wr_data,
  input  logic [1:0]           bsk_fill_done,
  output logic [1:0]           bsk_avail,
  output logic [1:0]           bsk_release,
  // key switching
  input  logic                 ks_ld,
  input  logic                 ks_start,
  output logic                 ks_busy,
  output logic                 ks_done,
  output logic                 ksk_rd_en,
  output logic [KAW-1:0]       ksk_rd_addr,
  input  logic [KW-1:0]        ksk_rd_data,
  output logic                 ks_out_valid,
  output logic [TW-1:0]        ks_out_tile,
  output coef_t                ks_out_coef [KS_COLP],
  // monitoring
  output logic                 key_stall,
  output logic                 issue
);
  logic                 c_busy [NCORE], c_done [NCORE];
  logic [1:0]           c_rel [NCORE];
  logic                 c_rd_en [NCORE];
  logic [BAW-1:0]       c_rd_addr [NCORE];
  coef_t                c_tv [NCORE][2][LANES];
  logic                 c_stall [NCORE], c_issue [NCORE];
  logic                 gs_rd_en;
  logic [BAW-1:0]       gs_rd_addr;
  logic [BSK_BUS_W-1:0] gs_rd_data;
  logic [BSK_BUS_W-1:0] mc_d [NCORE];

  assign gs_rd_en   = c_rd_en[0];
  assign gs_rd_addr = c_rd_addr[0];

  global_scratchpad #(.N(N)) u_gsp (
    .clk, .rst_n, .wr_en(bsk_wr_en), .wr_addr(bsk_wr_addr), .wr_data(bsk_wr_data),
    .fill_done(bsk_fill_done), .rd_en(gs_rd_en), .rd_addr(gs_rd_addr), .rd_data(gs_rd_data),
    .release_h(c_rel[0]), .avail(bsk_avail));

  logic gs_v;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) gs_v <= 1'b0; else gs_v <= gs_rd_en;

  noc_multicast #(.W(BSK_BUS_W), .NDST(NCORE)) u_noc (
    .clk, .rst_n, .in_valid(gs_v), .in_data(gs_rd_data), .out_valid(), .out_data(mc_d));

  for (genvar k = 0; k < NCORE; k++) begin : g_core
    hsc #(.N(N), .NB(NB), .NMAX(NMAX), .FFT_FRAC(FFT_FRAC), .BSK_FRAC(BSK_FRAC), .BSK_LAT(2)) u_hsc (
      .clk, .rst_n,
      .log_base(cfg.log_base_pbs), .levels(LW'(cfg.lb)), .n_lwe(IW'(cfg.n)),
      .batch_n($clog2(NB+1)'(cfg.batch)), .start, .busy(c_busy[k]), .done(c_done[k]),
      .lwe_we(lwe_we && lwe_core == CW'(k)), .lwe_slot, .lwe_idx, .lwe_data,
      .tv_we(tv_we && tv_core == CW'(k)), .tv_col, .tv_addr, .tv_wdata,
      .tv_rd_en(tv_rd_en && tv_core == CW'(k)), .tv_rdata(c_tv[k]),
      .bsk_avail, .bsk_release(c_rel[k]), .bsk_rd_en(c_rd_en[k]), .bsk_rd_addr(c_rd_addr[k]),
      .bsk_rd_data(mc_d[k]), .key_stall(c_stall[k]), .issue(c_issue[k]));
  end

  always_comb begin
    busy = 1'b0;
    done = 1'b1;
    for (int k = 0; k < int'(NCORE); k++) begin
      busy |= c_busy[k];
      done &= c_done[k];
    end
  end
  assign bsk_release = c_rel[0];
  assign key_stall   = c_stall[0];
  assign issue       = c_issue[0];

  // read-back mux (one cycle after the read, like the data)
  logic [CW-1:0] rd_core_q;
  logic [RW-1:0] rd_row_q;
  logic          ks_ld_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_core_q <= '0; rd_row_q <= '0; ks_ld_q <= 1'b0; end
    else begin
      rd_core_q <= tv_core;
      rd_row_q  <= tv_addr[RW-1:0];
      ks_ld_q   <= ks_ld && tv_rd_en;
    end
  end
  assign tv_rdata = c_tv[rd_core_q];

  keyswitch_cluster #(.N(N), .NOUT(NMAX), .COLS(KS_COLP), .KSK_LAT(KSK_LAT)) u_ks (
    .clk, .rst_n, .log_base(cfg.log_base_ks), .levels(LKW'(cfg.lk)), .n_out(IW'(cfg.n)),
    .ld_en(ks_ld_q), .ld_row(rd_row_q), .ld_a(tv_rdata[0]),
    .ld_b0_en(ks_ld_q && rd_row_q == '0), .ld_b0(tv_rdata[1][0]),
    .start(ks_start), .busy(ks_busy), .done(ks_done),
    .ksk_rd_en, .ksk_rd_addr, .ksk_rd_data,
    .out_valid(ks_out_valid), .out_tile(ks_out_tile), .out_coef(ks_out_coef));
endmodule
