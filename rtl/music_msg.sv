// music_msg -- second half of the MUSIC Doppler estimator: MUSIC spectrum
// generation (MSG), peak search and the normalised dB spectrum.
//
// BRAM J holds the Doppler steering matrix v (S x D, one column per Doppler
// bin, written through the coefficient port; bank = element s, address = bin
// d). BRAM I holds the S-1 noise eigenvectors (bank = element s, address =
// vector j). For each Doppler bin d (Mod-D counter, C0) and noise vector j
// (Mod-(S-1) counter, C1), the S elements of column d of J and of vector j of
// I are read in parallel (C2); an S-input MAC (S CMs and a CA) forms
// z = v(d)^H e_j (C3); a second MAC multiplies z by its conjugate and
// accumulates |z|^2 over the S-1 vectors (C4). The sum is the denominator of
// the MUSIC pseudo-spectrum mu(d) = 1/den(d); it is stored in BRAM K and the
// peak search keeps the bin with the smallest denominator, i.e. the largest
// mu (C5). Finally every den(d) is normalised to the peak and converted to
// decibels, 10*log10(mu(d)/mu_max) = -3.0103*(log2 den(d) - log2 den_min),
// into BRAM L (C6), and BRAM L is streamed out on m_axis for display.
//
// Following the reference architecture: the loop order, the two MAC stages,
// the memories and the peak search. This design's own choices: searching the
// minimum of the denominator instead of dividing, fixed-point arithmetic (32
// bits, 19 fractional; 48-bit sums), a piecewise-linear log2, and the dB
// output format (signed Q8.8, clipped at -128 dB).
//
// Interface: start pulses with s_len (S) valid; d_bins (D, 1..D_MAX) is
// sampled at start. doppler_idx/den_min are valid from done until the next
// start. Timing: D*(S-1) clocks (+5) for the spectrum, D (+2) for the dB
// conversion, then D read-out beats.
module music_msg
  import rsp_pkg::*;
#(
  parameter int S_MAX = 50,
  parameter int D_MAX = 200,
  localparam int SW = $clog2(S_MAX + 1),
  localparam int IAW = $clog2(S_MAX),
  localparam int DW = $clog2(D_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [SW-1:0]       s_len,
  input  logic [7:0]          d_bins,
  output logic [IAW-1:0]      i_raddr,
  input  mcplx_t              i_rdata [S_MAX],
  input  logic                coef_we,
  input  logic [SW-1:0]       coef_bank,
  input  logic [DW-1:0]       coef_addr,
  input  mcplx_t              coef_data,
  output logic [DW-1:0]       doppler_idx,
  output logic [AW_ACC-1:0]   den_min,
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  output logic signed [DBW-1:0] m_axis_tdata,
  output logic                m_axis_tlast,
  output logic                busy,
  output logic                done
);
  localparam int ZW = MW + SW;
  localparam logic signed [ZW-1:0] MAXV = ZW'((64'sd1 <<< (MW - 1)) - 1);
  localparam logic signed [ZW-1:0] MINV = -ZW'(64'sd1 <<< (MW - 1));

  typedef enum logic [2:0] {S_IDLE, S_SPEC, S_DRAIN, S_LOG, S_PRIME, S_OUT} state_t;
  state_t state;

  logic [SW-1:0]  s;
  logic [DW-1:0]  dn;            // D
  logic [DW-1:0]  d;             // Mod-D counter
  logic [IAW-1:0] j;             // Mod-(S-1) counter
  logic [3:0]     pv, pf, pl;    // valid / first vector / last vector
  logic [DW-1:0]  pd [4];        // bin index along the pipeline
  logic [AW_ACC-1:0] acc;
  logic           have_min;
  logic [DW-1:0]  ld;            // dB conversion counter
  logic           lv;
  logic [DW-1:0]  lwa;
  logic [DW-1:0]  rp;            // read-out pointer

  // ---------------- BRAM J (S banks, D deep) ----------------
  mcplx_t j_rd [S_MAX];
  for (genvar g = 0; g < S_MAX; g++) begin : g_j
    cram #(.WD(MW), .DEPTH(D_MAX)) u_bram_j (
      .clk, .we(coef_we && coef_bank == SW'(g)), .waddr(coef_addr),
      .wdata_re(coef_data.re), .wdata_im(coef_data.im),
      .raddr(d), .rdata_re(j_rd[g].re), .rdata_im(j_rd[g].im));
  end
  assign i_raddr = j;

  // ---------------- S-input MAC ----------------
  logic signed [MW-1:0] cm_re [S_MAX], cm_im [S_MAX];
  logic signed [MW-1:0] ia_re [S_MAX], ia_im [S_MAX];
  logic signed [ZW-1:0] z_re, z_im;
  for (genvar g = 0; g < S_MAX; g++) begin : g_cm
    // elements beyond the configured S contribute nothing
    assign ia_re[g] = (SW'(g) < s) ? i_rdata[g].re : '0;
    assign ia_im[g] = (SW'(g) < s) ? i_rdata[g].im : '0;
    cmul #(.W(MW), .FRAC(MFRAC)) u_cm (
      .clk, .a_re(ia_re[g]), .a_im(ia_im[g]), .b_re(j_rd[g].re), .b_im(j_rd[g].im), .conj_b(1'b1),
      .p_re(cm_re[g]), .p_im(cm_im[g]), .ovf());
  end
  cadd #(.N(S_MAX), .W(MW)) u_ca (.clk, .in_re(cm_re), .in_im(cm_im), .sum_re(z_re), .sum_im(z_im));

  // ---------------- |z|^2 MAC ----------------
  logic signed [MW-1:0] zs_re, zs_im, pw_re, pw_im_unused;
  always_comb begin
    zs_re = (z_re > MAXV) ? MAXV[MW-1:0] : (z_re < MINV) ? MINV[MW-1:0] : z_re[MW-1:0];
    zs_im = (z_im > MAXV) ? MAXV[MW-1:0] : (z_im < MINV) ? MINV[MW-1:0] : z_im[MW-1:0];
  end
  cmul #(.W(MW), .FRAC(MFRAC)) u_cm_pow (
    .clk, .a_re(zs_re), .a_im(zs_im), .b_re(zs_re), .b_im(zs_im), .conj_b(1'b1),
    .p_re(pw_re), .p_im(pw_im_unused), .ovf());

  logic [AW_ACC-1:0] pw, den;
  assign pw  = (pw_re < 0) ? '0 : AW_ACC'(pw_re);
  assign den = (pf[3] ? '0 : acc) + pw;

  // ---------------- BRAM K (denominators) ----------------
  logic              k_we;
  logic [AW_ACC-1:0] k_rd;
  assign k_we = pv[3] && pl[3];
  ram_sdp #(.WIDTH(AW_ACC), .DEPTH(D_MAX)) u_bram_k (
    .clk, .we(k_we), .waddr(pd[3]), .wdata(den), .raddr(ld), .rdata(k_rd));

  // ---------------- normalisation and log: BRAM L ----------------
  logic [15:0] lg_k, lg_min, diff;
  logic [31:0] dbm;
  logic signed [DBW-1:0] db;
  always_comb begin
    lg_k   = log2_q6_10(k_rd);
    lg_min = log2_q6_10(den_min);
    diff   = (lg_k > lg_min) ? lg_k - lg_min : '0;
    dbm    = (32'(diff) * 32'd771) >> 10;        // x 10*log10(2)*256, Q8.8
    db     = (dbm > 32'd32768) ? -DBW'(32768) : -DBW'(dbm);
  end
  logic [DW-1:0] l_ra;
  logic [DBW-1:0] l_rd;
  ram_sdp #(.WIDTH(DBW), .DEPTH(D_MAX)) u_bram_l (
    .clk, .we(lv), .waddr(lwa), .wdata(db), .raddr(l_ra), .rdata(l_rd));

  // read-out
  logic fire;
  assign fire = m_axis_tvalid && m_axis_tready;
  assign l_ra = (state == S_OUT && fire) ? rp + 1'b1 : rp;
  assign m_axis_tvalid = (state == S_OUT);
  assign m_axis_tdata  = l_rd;
  assign m_axis_tlast  = (rp == dn - 1'b1);

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      s <= SW'(S_MAX); dn <= DW'(D_MAX); d <= '0; j <= '0;
      pv <= '0; pf <= '0; pl <= '0; acc <= '0; have_min <= 1'b0;
      den_min <= '0; doppler_idx <= '0; ld <= '0; lv <= 1'b0; lwa <= '0; rp <= '0;
      done <= 1'b0;
      for (int x = 0; x < 4; x++) pd[x] <= '0;
    end else begin
      done <= 1'b0;
      lv   <= 1'b0;
      pv <= {pv[2:0], 1'b0};
      pf <= {pf[2:0], 1'b0};
      pl <= {pl[2:0], 1'b0};
      for (int x = 1; x < 4; x++) pd[x] <= pd[x-1];
      // C4/C5: accumulate, store, peak search
      if (pv[3]) begin
        acc <= den;
        if (pl[3] && (!have_min || den < den_min)) begin
          den_min     <= den;
          doppler_idx <= pd[3];
          have_min    <= 1'b1;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          s  <= s_len;
          dn <= (d_bins == 8'd0 || d_bins > 8'(D_MAX)) ? DW'(D_MAX) : DW'(d_bins);
          d  <= '0; j <= '0;
          have_min <= 1'b0;
          state <= S_SPEC;
        end
        S_SPEC: begin                       // C0..C3: one (d, j) per clock
          pv[0] <= 1'b1;
          pf[0] <= (j == '0);
          pl[0] <= (j == IAW'(s - 2'd2));
          pd[0] <= d;
          if (j == IAW'(s - 2'd2)) begin
            j <= '0;
            if (d == dn - 1'b1) state <= S_DRAIN;
            else d <= d + 1'b1;
          end else j <= j + 1'b1;
        end
        S_DRAIN: if (pv == '0) begin
          ld <= '0;
          state <= S_LOG;
        end
        S_LOG: begin                        // C6: normalise, log, BRAM L
          lv  <= 1'b1;
          lwa <= ld;
          if (ld == dn - 1'b1) begin
            rp <= '0;
            state <= S_PRIME;
          end else ld <= ld + 1'b1;
        end
        S_PRIME: state <= S_OUT;            // last BRAM L write and read latency
        S_OUT: if (fire) begin
          rp <= rp + 1'b1;
          if (rp == dn - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_slen : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (s_len >= SW'(2) && s_len <= SW'(S_MAX)));
endmodule
