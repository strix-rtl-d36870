// fft_unit: the I/FFT unit (I/FFTU) of a Strix core.  A CLP = 4 lane,
// radix-2, feed-forward pipelined FFT of NPT points (Fig. 5 of the source):
// log2(NPT) butterfly stages of two butterflies each; a fixed lane crossing
// between stages 1 and 2; from stage 3 on, each stage is preceded by a
// shuffle unit with delay L = NPT/8, NPT/16, ..., 1; a twiddle ROM per stage
// (the last stage needs none).  A new NPT-point transform can start every
// NPT/4 cycles, with no stall, for as long as frames keep arriving.
//
// Folding (negacyclic, Klemsa's scheme): a real polynomial a of N = 2*NPT
// coefficients enters as c[j] = a[j] + i*a[j+N/2]; the forward unit first
// multiplies c[j] by psi^j, psi = exp(i*pi/N), and the inverse unit multiplies
// its result by psi^-j, so that the pointwise product of two transforms is
// the product modulo X^N + 1.  The twist multipliers are this design's
// addition: the source names the folding scheme but not its datapath.
//
// Lane format (both directions): in a frame of NPT/4 rows, row t, lane p
// holds element j = t + p*NPT/4.  Input and output are in natural order: each
// sample carries its in-place index as a side tag through the pipeline, and
// an output reorder buffer (two banks of NPT entries) writes each result at
// the bit-reversed tag and reads rows back in natural order.  The reorder
// buffer is this design's choice; it adds NPT/4 cycles of latency.
//
// Arithmetic: 64-bit signed real/imaginary parts, 16-bit Q1.14 twiddles,
// rounding after each twiddle product, no scaling inside the forward
// transform.  The inverse (INVERSE = 1) uses conjugate twiddles and divides
// its output by NPT with rounding.
// Interface: frames are NPT/4 consecutive rows with in_valid high; in_sof
// marks row 0.  Gaps between frames may have any length.
// Latency: 1 (twist) + log2(NPT) (butterflies) + NPT/4 - 1 (shuffles)
//          + NPT/4 + 1 (reorder) + 1 (output) cycles from row 0 in to row 0 out.
module fft_unit
  import strix_pkg::*;
#(
  parameter int unsigned NPT     = 8192,
  parameter bit          INVERSE = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  cplx_t in_data [CLP],
  output logic  out_valid,
  output logic  out_sof,
  output cplx_t out_data [CLP]
);
  localparam int unsigned NS   = $clog2(NPT);
  localparam int unsigned ROWS = NPT/4;
  localparam int unsigned RW   = $clog2(ROWS);

  typedef struct packed {
    logic          valid;
    logic [NS-1:0] tag;     // in-place index of the sample
    cplx_t         d;
    logic          sof;     // bit 0: start of frame
  } pl_t;
  localparam int unsigned PW = $bits(pl_t);

  // ------------------------------------------------------- input twist
  twid_t twist_rom [NPT];
  initial begin
    for (int j = 0; j < int'(NPT); j++)
      twist_rom[j] = make_twiddle(longint'(j), longint'(2*NPT), INVERSE);
  end

  logic [RW-1:0] tin_cnt, tin;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        tin_cnt <= '0;
    else if (in_valid) tin_cnt <= tin + 1'b1;
  end
  assign tin = in_sof ? '0 : tin_cnt;

  pl_t st_in  [1:NS][4];
  pl_t st_out [1:NS][4];
  pl_t tw_q [4];

  // Stage 1 pairs elements NPT/2 apart: lanes (0,2) and (1,3).
  localparam int unsigned S1MAP [4] = '{0, 2, 1, 3};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 4; p++) tw_q[p] <= '0;
    end else begin
      for (int p = 0; p < 4; p++) begin
        logic [NS-1:0] j;
        j = NS'(tin) + NS'(p * ROWS);
        tw_q[p].valid <= in_valid;
        tw_q[p].sof   <= in_valid & in_sof;
        tw_q[p].tag   <= j;
        tw_q[p].d     <= INVERSE ? in_data[p] : cmul_tw(in_data[p], twist_rom[j]);
      end
    end
  end
  always_comb for (int p = 0; p < 4; p++) st_in[1][p] = tw_q[S1MAP[p]];

  // ------------------------------------------------------- stages
  for (genvar s = 1; s <= NS; s++) begin : g_stage
    localparam int unsigned RS = NPT >> s;          // twiddles in this stage
    localparam int unsigned RA = (RS > 1) ? $clog2(RS) : 1;
    twid_t rom [RS];
    initial begin
      for (int j = 0; j < int'(RS); j++)
        rom[j] = make_twiddle(longint'(j) << s, longint'(NPT), !INVERSE);
    end

    for (genvar b = 0; b < 2; b++) begin : g_bfu
      pl_t   a, c;
      cplx_t sum, dif, dtw;
      logic [RA-1:0] ridx;
      assign a = st_in[s][2*b];
      assign c = st_in[s][2*b+1];
      assign ridx = RA'(a.tag);
      always_comb begin
        sum.re = a.d.re + c.d.re;  sum.im = a.d.im + c.d.im;
        dif.re = a.d.re - c.d.re;  dif.im = a.d.im - c.d.im;
        dtw = (s == NS) ? dif : cmul_tw(dif, rom[ridx]);
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          st_out[s][2*b]   <= '0;
          st_out[s][2*b+1] <= '0;
        end else begin
          st_out[s][2*b].valid   <= a.valid;
          st_out[s][2*b].sof     <= a.sof | c.sof;
          st_out[s][2*b].tag     <= a.tag & ~(NS'(1) << (NS-s));
          st_out[s][2*b].d       <= sum;
          st_out[s][2*b+1].valid <= a.valid;
          st_out[s][2*b+1].sof   <= a.sof | c.sof;
          st_out[s][2*b+1].tag   <= a.tag | (NS'(1) << (NS-s));
          st_out[s][2*b+1].d     <= dtw;
        end
      end
      // The two inputs of a butterfly are the same element pair, apart by
      // NPT/2^s, whenever they carry data.
      assert property (@(posedge clk) disable iff (!rst_n)
        a.valid |-> (c.valid && ((a.tag ^ c.tag) == (NS'(1) << (NS-s)))));
    end

  end

  // Lane crossing between stages 1 and 2, shuffles from stage 3 on.
  always_comb begin
    st_in[2][0] = st_out[1][0];
    st_in[2][1] = st_out[1][2];
    st_in[2][2] = st_out[1][1];
    st_in[2][3] = st_out[1][3];
  end
  for (genvar s = 3; s <= NS; s++) begin : g_shu
    for (genvar b = 0; b < 2; b++) begin : g_pair
      logic [PW-1:0] up, lo;
      fft_shu #(.W(PW), .L(NPT >> s), .SOF_BIT(0)) u_shu (
        .clk, .rst_n,
        .in_up (st_out[s-1][2*b]), .in_lo (st_out[s-1][2*b+1]),
        .out_up(up),               .out_lo(lo));
      assign st_in[s][2*b]   = pl_t'(up);
      assign st_in[s][2*b+1] = pl_t'(lo);
    end
  end

  // ------------------------------------------------------- reorder buffer
  function automatic logic [NS-1:0] bitrev(logic [NS-1:0] x);
    for (int i = 0; i < int'(NS); i++) bitrev[i] = x[NS-1-i];
  endfunction

  cplx_t rob [2][NPT];
  logic          wbank_q, wbank;
  logic [RW:0]   wcnt_q, wcnt;
  logic          rd_active, rd_bank;
  logic [RW-1:0] rd_row;
  pl_t           fin [4];

  always_comb for (int p = 0; p < 4; p++) fin[p] = st_out[NS][p];
  assign wbank = (fin[0].valid && fin[0].sof) ? ~wbank_q : wbank_q;
  assign wcnt  = (fin[0].valid && fin[0].sof) ? '0 : wcnt_q;

  always_ff @(posedge clk) begin
    for (int p = 0; p < 4; p++)
      if (fin[p].valid) rob[wbank][bitrev(fin[p].tag)] <= fin[p].d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank_q   <= 1'b0;
      wcnt_q    <= '0;
      rd_active <= 1'b0;
      rd_bank   <= 1'b0;
      rd_row    <= '0;
    end else begin
      wbank_q <= wbank;
      if (fin[0].valid) wcnt_q <= wcnt + 1'b1;
      else              wcnt_q <= wcnt;
      if (fin[0].valid && wcnt == (RW+1)'(ROWS-1)) begin
        rd_active <= 1'b1;
        rd_bank   <= wbank;
        rd_row    <= '0;
      end else if (rd_active) begin
        rd_row <= rd_row + 1'b1;
        if (rd_row == RW'(ROWS-1)) rd_active <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------- output stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      for (int p = 0; p < 4; p++) out_data[p] <= '0;
    end else begin
      out_valid <= rd_active;
      out_sof   <= rd_active && rd_row == '0;
      for (int p = 0; p < 4; p++) begin
        cplx_t x, y;
        logic [NS-1:0] j;
        j = NS'(rd_row) + NS'(p * ROWS);
        x = rob[rd_bank][j];
        if (INVERSE) begin
          y = cmul_tw(x, twist_rom[j]);
          y.re = (y.re + (FFT_W'(1) <<< (NS-1))) >>> NS;
          y.im = (y.im + (FFT_W'(1) <<< (NS-1))) >>> NS;
        end else begin
          y = x;
        end
        out_data[p] <= y;
      end
    end
  end
endmodule
