// mf_beamform -- digital beamforming, frequency-domain matched filtering and
// inverse FFT: turns the Q x K fast-time spectra of one packet (BRAM B) into
// the I x K range-azimuth image (BRAM E).
//
// For each azimuth index i (Mod-I counter, state C0) and each frequency bin k
// (Mod-K counter, C1) the Q spectra B[q][k] and the Q beam weights C[q][i] are
// read in parallel (C2), multiplied in Q complex multipliers and summed in a
// Q-input complex adder (C3). The sum is multiplied by the conjugate of the
// transmitted Golay spectrum D[k] (C4), which is the matched filter in the
// frequency domain. The K products of one azimuth are streamed into the
// external K-point IFFT (C5) and its K outputs are written to row i of BRAM E
// (C6). The Mod-I counter advances by az_step, so an angular precision of
// az_step degrees costs only ceil(I/az_step) passes; az_step is sampled at
// start. After the last azimuth the computed rows of BRAM E are streamed out
// on m_axis (row 0, az_step, 2*az_step, ..., K samples each) for the
// processor's peak search.
//
// The dataflow (CMs, CA, Golay CM, IFFT, BRAMs B to E and the counter/FSM
// structure) follows the reference architecture. The sum of the Q products
// is saturated to the <24,5> word before the Golay multiplication; the
// conjugation of D, the pipeline depth and the stream formats are this
// design's choices. ovf is a sticky flag, set when any saturation happened
// since start.
//
// Timing: per azimuth, 1 (C0) + K (C1..C4, one bin per clock) + IFFT latency
// + K (C6) + 1 clocks; then the read-out, one sample per accepted beat.
module mf_beamform
  import rsp_pkg::*;
#(
  parameter int Q = 32,
  parameter int K = 1024,
  parameter int I = 181,
  localparam int QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int KW = $clog2(K),
  localparam int IW = $clog2(I),
  localparam int ED = I * K,
  localparam int EW = $clog2(ED)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [7:0]    az_step,
  output logic          busy,
  output logic          done,
  output logic          ovf,
  // BRAM B read port (all Q banks share the address)
  output logic [KW-1:0] b_raddr,
  input  cplx_t         b_rdata [Q],
  // coefficient load: sel 0 = BRAM C (bank q, address i), sel 1 = BRAM D (address k)
  input  logic          coef_we,
  input  logic          coef_sel,
  input  logic [QW-1:0] coef_bank,
  input  logic [KW-1:0] coef_addr,
  input  cplx_t         coef_data,
  // external K-point IFFT
  output cstream_t      ifft_in,
  input  cstream_t      ifft_out,
  // range-azimuth image read-out (DMA)
  output logic          m_axis_tvalid,
  input  logic          m_axis_tready,
  output cplx_t         m_axis_tdata,
  output logic          m_axis_tlast
);
  localparam int SW = W + QW;
  localparam logic signed [SW-1:0] MAXV = SW'((64'sd1 <<< (W - 1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(64'sd1 <<< (W - 1));

  typedef enum logic [2:0] {S_IDLE, S_C0, S_C1, S_C5, S_C6, S_PRIME, S_OUT} state_t;
  state_t state;

  logic [7:0]    step;
  logic [IW-1:0] i;          // Mod-I counter
  logic [KW-1:0] k;          // Mod-K counter (bins issued)
  logic [KW-1:0] ko;         // IFFT outputs written
  logic [3:0]    pv, pl;     // pipeline valid / last
  logic [IW-1:0] ri;         // read-out row
  logic [KW-1:0] rk;         // read-out column

  // ---------------- BRAM C (Q banks, I deep) and BRAM D (K deep) ----------
  cplx_t c_rd [Q];
  cplx_t d_rd, d_q1, d_q2;
  for (genvar g = 0; g < Q; g++) begin : g_c
    cram #(.WD(W), .DEPTH(I)) u_bram_c (
      .clk, .we(coef_we && !coef_sel && coef_bank == QW'(g)), .waddr(IW'(coef_addr)),
      .wdata_re(coef_data.re), .wdata_im(coef_data.im),
      .raddr(i), .rdata_re(c_rd[g].re), .rdata_im(c_rd[g].im));
  end
  cram #(.WD(W), .DEPTH(K)) u_bram_d (
    .clk, .we(coef_we && coef_sel), .waddr(coef_addr),
    .wdata_re(coef_data.re), .wdata_im(coef_data.im),
    .raddr(k), .rdata_re(d_rd.re), .rdata_im(d_rd.im));

  assign b_raddr = k;

  // ---------------- Q-input MAC: Q CMs and a Q-input CA ----------------
  logic signed [W-1:0]  cm_re [Q], cm_im [Q];
  logic                 cm_ovf [Q];
  logic signed [SW-1:0] ca_re, ca_im;
  for (genvar g = 0; g < Q; g++) begin : g_cm
    cmul #(.W(W), .FRAC(FRAC)) u_cm (
      .clk, .a_re(b_rdata[g].re), .a_im(b_rdata[g].im), .b_re(c_rd[g].re), .b_im(c_rd[g].im),
      .conj_b(1'b0), .p_re(cm_re[g]), .p_im(cm_im[g]), .ovf(cm_ovf[g]));
  end
  cadd #(.N(Q), .W(W)) u_ca (.clk, .in_re(cm_re), .in_im(cm_im), .sum_re(ca_re), .sum_im(ca_im));

  // saturate the CA output to <24,5>
  logic signed [W-1:0] bf_re, bf_im;
  logic                bf_ovf;
  always_comb begin
    bf_re  = (ca_re > MAXV) ? MAXV[W-1:0] : (ca_re < MINV) ? MINV[W-1:0] : ca_re[W-1:0];
    bf_im  = (ca_im > MAXV) ? MAXV[W-1:0] : (ca_im < MINV) ? MINV[W-1:0] : ca_im[W-1:0];
    bf_ovf = (ca_re > MAXV) || (ca_re < MINV) || (ca_im > MAXV) || (ca_im < MINV);
  end

  // ---------------- multiplication by conj(Golay spectrum) ----------------
  logic signed [W-1:0] mf_re, mf_im;
  logic                mf_ovf;
  cmul #(.W(W), .FRAC(FRAC)) u_cm_golay (
    .clk, .a_re(bf_re), .a_im(bf_im), .b_re(d_q2.re), .b_im(d_q2.im), .conj_b(1'b1),
    .p_re(mf_re), .p_im(mf_im), .ovf(mf_ovf));

  logic any_cm_ovf;
  always_comb begin
    any_cm_ovf = 1'b0;
    for (int g = 0; g < Q; g++) any_cm_ovf |= cm_ovf[g];
  end

  // concat: IFFT input
  always_comb begin
    ifft_in.valid   = pv[3];
    ifft_in.last    = pl[3];
    ifft_in.data.re = mf_re;
    ifft_in.data.im = mf_im;
  end

  // ---------------- BRAM E (I x K) ----------------
  logic          e_we;
  logic [EW-1:0] e_waddr, e_raddr;
  cplx_t         e_rd;
  assign e_we    = (state == S_C6 || state == S_C5) && ifft_out.valid;
  assign e_waddr = EW'(i) * EW'(K) + EW'(ko);
  cram #(.WD(W), .DEPTH(ED)) u_bram_e (
    .clk, .we(e_we), .waddr(e_waddr), .wdata_re(ifft_out.data.re), .wdata_im(ifft_out.data.im),
    .raddr(e_raddr), .rdata_re(e_rd.re), .rdata_im(e_rd.im));

  // read-out pointer: present (ri,rk); advance on an accepted beat
  logic          fire, last_beat;
  logic [IW-1:0] ri_n;
  logic [KW-1:0] rk_n;
  logic [IW:0]   ri_next_row;
  assign fire      = m_axis_tvalid && m_axis_tready;
  assign ri_next_row = (IW+1)'(ri) + (IW+1)'(step);
  assign last_beat = (rk == KW'(K - 1)) && (ri_next_row > (IW+1)'(I - 1));
  always_comb begin
    ri_n = ri; rk_n = rk;
    if (state == S_OUT && fire) begin
      if (rk == KW'(K - 1)) begin rk_n = '0; ri_n = ri_next_row[IW-1:0]; end
      else rk_n = rk + 1'b1;
    end
  end
  assign e_raddr = EW'(ri_n) * EW'(K) + EW'(rk_n);
  assign m_axis_tvalid = (state == S_OUT);
  assign m_axis_tdata  = e_rd;
  assign m_axis_tlast  = last_beat;

  assign busy = (state != S_IDLE);

  logic [IW:0] i_next;
  assign i_next = (IW+1)'(i) + (IW+1)'(step);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step <= 8'd1; i <= '0; k <= '0; ko <= '0; ri <= '0; rk <= '0;
      pv <= '0; pl <= '0; done <= 1'b0; ovf <= 1'b0;
      d_q1 <= '0; d_q2 <= '0;
    end else begin
      done <= 1'b0;
      // bin pipeline: read (pv0), CM (pv1), CA (pv2), Golay CM (pv3)
      pv <= {pv[2:0], 1'b0};
      pl <= {pl[2:0], 1'b0};
      d_q1 <= d_rd;
      d_q2 <= d_q1;
      if (pv[2] && bf_ovf) ovf <= 1'b1;
      if (pv[1] && any_cm_ovf) ovf <= 1'b1;
      if (pv[3] && mf_ovf) ovf <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          step  <= (az_step == 8'd0) ? 8'd1 : az_step;
          i     <= '0;
          ovf   <= 1'b0;
          state <= S_C0;
        end
        S_C0: begin                       // parameter update
          k <= '0; ko <= '0;
          state <= S_C1;
        end
        S_C1: begin                       // issue bin k
          pv[0] <= 1'b1;
          pl[0] <= (k == KW'(K - 1));
          if (k == KW'(K - 1)) state <= S_C5;
          else k <= k + 1'b1;
        end
        S_C5, S_C6: if (ifft_out.valid) begin   // IFFT, write K samples
          state <= S_C6;
          ko <= ko + 1'b1;
          if (ko == KW'(K - 1)) begin
            if (i_next > (IW+1)'(I - 1)) begin
              ri <= '0; rk <= '0;
              state <= S_PRIME;
            end else begin
              i <= i_next[IW-1:0];
              state <= S_C0;
            end
          end
        end
        S_PRIME: state <= S_OUT;          // BRAM E read latency
        S_OUT: if (fire) begin
          ri <= ri_n; rk <= rk_n;
          if (last_beat) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_ifftlast : assert property (@(posedge clk) disable iff (!rst_n)
    ((state == S_C5 || state == S_C6) && ifft_out.valid) |-> (ifft_out.last == (ko == KW'(K - 1))));
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata)));
endmodule
