// music_cov_evd -- first half of the MUSIC Doppler estimator: spatially
// smoothed covariance of the slow-time vector of one target, and hand-off of
// the covariance to the eigen-decomposition (EVD) engine.
//
// The slow-time vector y (N samples of one range-azimuth cell, one per
// packet) arrives on s_axis in the <24,5> MF format. y is kept in BRAM F and
// its conjugate y* in BRAM G. With S = N/2 and M = N/2+1, the FSM runs a
// Mod-M counter m (state C0) and two Mod-S counters r, c (C1, C2); each clock
// one complex multiplier forms y[m+r]*conj(y[m+c]) (C3) and the complex adder
// adds it to the running sum H[r][c] in BRAM H (C4). After M passes, H holds
// the sum of the M sub-array auto-covariances. H is then read, normalised by
// 1/M, concatenated into the EVD input stream (S*S elements, row-major) and
// sent to the external QR-factorisation/EVD engine. Its answer, S eigenvectors
// of S elements each, column by column with the largest eigenvalue first, is
// split up (extraction) and the S-1 noise-subspace vectors are written into
// BRAM I (bank = element s, address = vector j); the first, the signal
// subspace, is dropped.
//
// The counters, memories and the order of the operations follow the
// reference architecture. The arithmetic is fixed point (32-bit words with 19
// fractional bits, 48-bit sums in BRAM H) instead of single-precision float;
// this, the single CM, the reciprocal for 1/M and the EVD stream format are
// this design's choices.
//
// Interface: n_pkts (N, even, 4..N_MAX) is sampled when the first y sample
// arrives. i_free = 1 when BRAM I may be overwritten (spectrum stage idle);
// the stage waits for it before it starts the EVD. done pulses when BRAM I
// is complete.
// Timing: N load beats, then M*S*S clocks (+2) for the covariance, S*S (+2)
// for the EVD input, EVD latency, and S*S result beats.
module music_cov_evd
  import rsp_pkg::*;
#(
  parameter int N_MAX = 100,
  localparam int S_MAX = N_MAX / 2,
  localparam int NW = $clog2(N_MAX + 1),
  localparam int SW = $clog2(S_MAX + 1),
  localparam int HD = S_MAX * S_MAX,
  localparam int HW = $clog2(HD),
  localparam int IAW = $clog2(S_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [7:0]     n_pkts,
  input  logic           s_axis_tvalid,
  output logic           s_axis_tready,
  input  cplx_t          s_axis_tdata,
  input  logic           s_axis_tlast,
  output mstream_t       evd_in,
  input  mstream_t       evd_out,
  output logic           i_we,
  output logic [SW-1:0]  i_bank,
  output logic [IAW-1:0] i_addr,
  output mcplx_t         i_wdata,
  input  logic           i_free,
  output logic [SW-1:0]  s_len,
  output logic           busy,
  output logic           done
);
  localparam int RF = 24;                   // fraction bits of 1/M
  localparam logic signed [AW_ACC+RF+1:0] MAXV = (AW_ACC+RF+2)'((64'sd1 <<< (MW - 1)) - 1);
  localparam logic signed [AW_ACC+RF+1:0] MINV = -(AW_ACC+RF+2)'(64'sd1 <<< (MW - 1));

  typedef enum logic [2:0] {S_LOAD, S_COV, S_DRAIN, S_NORM, S_EVD} state_t;
  state_t state;

  logic [NW-1:0] n, la;
  logic [SW-1:0] s, mm;        // S, M (M = S + 1)
  logic [SW-1:0] m, r, c;      // Mod-M, Mod-S, Mod-S counters
  logic [RF:0]   recip;        // round(2^RF / M)
  logic [HW-1:0] e_cnt;        // element counter for NORM
  logic [SW-1:0] er, ec;       // EVD result row / column
  logic [2:0]    pv;
  logic [HW-1:0] h_wa1, h_wa2;
  logic          first1, first2, nl1, nv;

  // --------------- BRAM F (y) and BRAM G (y*) ---------------
  logic signed [MW-1:0] y_re, y_im;
  mcplx_t f_rd, g_rd;
  logic [NW-1:0] f_ra, g_ra;
  assign y_re = MW'(s_axis_tdata.re);
  assign y_im = MW'(s_axis_tdata.im);
  cram #(.WD(MW), .DEPTH(N_MAX)) u_bram_f (
    .clk, .we(state == S_LOAD && s_axis_tvalid), .waddr(la), .wdata_re(y_re), .wdata_im(y_im),
    .raddr(f_ra), .rdata_re(f_rd.re), .rdata_im(f_rd.im));
  cram #(.WD(MW), .DEPTH(N_MAX)) u_bram_g (
    .clk, .we(state == S_LOAD && s_axis_tvalid), .waddr(la), .wdata_re(y_re), .wdata_im(-y_im),
    .raddr(g_ra), .rdata_re(g_rd.re), .rdata_im(g_rd.im));
  assign f_ra = NW'(m) + NW'(r);
  assign g_ra = NW'(m) + NW'(c);

  // --------------- auto-covariance CM ---------------
  logic signed [MW-1:0] p_re, p_im;
  logic                 p_ovf;
  cmul #(.W(MW), .FRAC(MFRAC)) u_cm (
    .clk, .a_re(f_rd.re), .a_im(f_rd.im), .b_re(g_rd.re), .b_im(g_rd.im), .conj_b(1'b0),
    .p_re, .p_im, .ovf(p_ovf));

  // --------------- BRAM H (S x S accumulators) and CA ---------------
  logic                 h_we;
  logic [HW-1:0]        h_ra, h_wa;
  logic signed [AW_ACC-1:0] h_rd_re, h_rd_im, h_wd_re, h_wd_im, h_q_re, h_q_im;
  assign h_ra = (state == S_COV) ? HW'(r) * HW'(s) + HW'(c) : e_cnt;
  cram #(.WD(AW_ACC), .DEPTH(HD)) u_bram_h (
    .clk, .we(h_we), .waddr(h_wa), .wdata_re(h_wd_re), .wdata_im(h_wd_im),
    .raddr(h_ra), .rdata_re(h_rd_re), .rdata_im(h_rd_im));
  always_comb begin
    h_we    = pv[1] && (state == S_COV || state == S_DRAIN);
    h_wa    = h_wa2;
    // first pass (m = 0) writes the product, later passes accumulate
    h_wd_re = (first2 ? '0 : h_q_re) + AW_ACC'(p_re);
    h_wd_im = (first2 ? '0 : h_q_im) + AW_ACC'(p_im);
  end

  // --------------- normalisation, concat ---------------
  logic signed [AW_ACC+RF+1:0] nr_re, nr_im;
  logic signed [MW-1:0]        nq_re, nq_im;
  always_comb begin
    nr_re = ((AW_ACC+RF+2)'(h_rd_re) * $signed({1'b0, recip}) + (AW_ACC+RF+2)'(1 <<< (RF-1))) >>> RF;
    nr_im = ((AW_ACC+RF+2)'(h_rd_im) * $signed({1'b0, recip}) + (AW_ACC+RF+2)'(1 <<< (RF-1))) >>> RF;
    nq_re = (nr_re > MAXV) ? MAXV[MW-1:0] : (nr_re < MINV) ? MINV[MW-1:0] : nr_re[MW-1:0];
    nq_im = (nr_im > MAXV) ? MAXV[MW-1:0] : (nr_im < MINV) ? MINV[MW-1:0] : nr_im[MW-1:0];
  end
  always_comb begin
    evd_in.valid   = nv;
    evd_in.last    = nl1;
    evd_in.data.re = nq_re;
    evd_in.data.im = nq_im;
  end

  // --------------- extraction into BRAM I ---------------
  always_comb begin
    i_we    = (state == S_EVD) && evd_out.valid && (ec != '0);
    i_bank  = er;
    i_addr  = IAW'(ec - 1'b1);
    i_wdata = evd_out.data;
  end

  assign s_axis_tready = (state == S_LOAD);
  assign s_len = s;
  assign busy  = (state != S_LOAD) || (la != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      n <= NW'(N_MAX); la <= '0; s <= SW'(S_MAX); mm <= SW'(S_MAX + 1);
      m <= '0; r <= '0; c <= '0; recip <= '0; e_cnt <= '0; er <= '0; ec <= '0;
      pv <= '0; h_wa1 <= '0; h_wa2 <= '0; first1 <= 1'b0; first2 <= 1'b0;
      nl1 <= 1'b0; nv <= 1'b0; h_q_re <= '0; h_q_im <= '0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      pv    <= {pv[1:0], 1'b0};
      h_wa1 <= h_ra; h_wa2 <= h_wa1;
      first2 <= first1;
      nl1 <= 1'b0; nv <= 1'b0;
      h_q_re <= h_rd_re; h_q_im <= h_rd_im;
      unique case (state)
        S_LOAD: if (s_axis_tvalid) begin
          if (la == '0) begin
            // sample the configuration with the first element
            n     <= NW'(n_pkts);
            s     <= SW'(n_pkts >> 1);
            mm    <= SW'((n_pkts >> 1) + 1);
            recip <= (RF+1)'(((1 << RF) + ((n_pkts >> 1) + 1) / 2) / ((n_pkts >> 1) + 1));
          end
          if (s_axis_tlast) begin
            la <= '0;
            m <= '0; r <= '0; c <= '0;
            state <= S_COV;
          end else la <= la + 1'b1;
        end
        S_COV: begin                      // C0..C4: one element per clock
          pv[0]  <= 1'b1;
          first1 <= (m == '0);
          if (c == s - 1'b1) begin
            c <= '0;
            if (r == s - 1'b1) begin
              r <= '0;
              if (m == mm - 1'b1) state <= S_DRAIN;
              else m <= m + 1'b1;
            end else r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        S_DRAIN: if (pv == '0 && i_free) begin   // last sums in H; BRAM I free
          e_cnt <= '0;
          state <= S_NORM;
        end
        S_NORM: begin                     // read H, normalise, send to EVD
          nv <= 1'b1;
          if (e_cnt == HW'(s) * HW'(s) - 1'b1) begin
            nl1 <= 1'b1;
            e_cnt <= '0;
            er <= '0; ec <= '0;
            state <= S_EVD;
          end else e_cnt <= e_cnt + 1'b1;
        end
        S_EVD: if (evd_out.valid) begin   // extraction of the noise subspace
          if (er == s - 1'b1) begin
            er <= '0;
            if (ec == s - 1'b1) begin
              done  <= 1'b1;
              state <= S_LOAD;
            end else ec <= ec + 1'b1;
          end else er <= er + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  a_n : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD && s_axis_tvalid && la == '0) |-> (n_pkts[0] == 1'b0 && n_pkts >= 8'd4 && n_pkts <= 8'(N_MAX)));
  a_tlast : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD && s_axis_tvalid && la != '0) |-> (s_axis_tlast == (la == n - 1'b1)));
  a_evdlast : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EVD && evd_out.valid) |-> (evd_out.last == (er == s - 1'b1 && ec == s - 1'b1)));
endmodule
