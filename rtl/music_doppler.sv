// music_doppler -- MUSIC IP: Doppler estimation of one detected target from
// its slow-time vector.
//
// The N-sample slow-time vector of one range-azimuth cell (one sample per
// packet) enters on s_axis. music_cov_evd builds the spatially smoothed S x S
// covariance (S = N/2) and obtains the noise subspace from the external EVD
// engine; music_msg evaluates the MUSIC pseudo-spectrum over D Doppler bins,
// finds its peak (doppler_idx) and streams the normalised dB spectrum out on
// m_axis. BRAM I, the noise subspace, lives here because both halves use it:
// it is split into S_MAX banks (one per vector element) so that the spectrum
// MAC reads a whole eigenvector in one clock. The next vector's covariance
// overlaps the current spectrum; its EVD (which rewrites BRAM I) waits until
// the spectrum stage is idle.
//
// n_pkts (N) and d_bins (D) are the run-time reconfiguration inputs; N is
// sampled with the first input sample, D when the spectrum stage starts.
module music_doppler
  import rsp_pkg::*;
#(
  parameter int N_MAX = 100,
  parameter int D_MAX = 200,
  localparam int S_MAX = N_MAX / 2,
  localparam int SW = $clog2(S_MAX + 1),
  localparam int IAW = $clog2(S_MAX),
  localparam int DW = $clog2(D_MAX + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [7:0]            n_pkts,
  input  logic [7:0]            d_bins,
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  cplx_t                 s_axis_tdata,
  input  logic                  s_axis_tlast,
  output mstream_t              evd_in,
  input  mstream_t              evd_out,
  input  logic                  coef_we,
  input  logic [SW-1:0]         coef_bank,
  input  logic [DW-1:0]         coef_addr,
  input  mcplx_t                coef_data,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic signed [DBW-1:0] m_axis_tdata,
  output logic                  m_axis_tlast,
  output logic [DW-1:0]         doppler_idx,
  output logic [AW_ACC-1:0]     den_min,
  output logic                  busy,
  output logic                  done
);
  logic           i_we;
  logic [SW-1:0]  i_bank, s_len;
  logic [IAW-1:0] i_addr, i_raddr;
  mcplx_t         i_wdata;
  mcplx_t         i_rdata [S_MAX];
  logic           cov_busy, cov_done, msg_busy;

  for (genvar g = 0; g < S_MAX; g++) begin : g_i
    cram #(.WD(MW), .DEPTH(S_MAX - 1)) u_bram_i (
      .clk, .we(i_we && i_bank == SW'(g)), .waddr(i_addr),
      .wdata_re(i_wdata.re), .wdata_im(i_wdata.im),
      .raddr(i_raddr), .rdata_re(i_rdata[g].re), .rdata_im(i_rdata[g].im));
  end

  music_cov_evd #(.N_MAX(N_MAX)) u_cov (
    .clk, .rst_n, .n_pkts, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .evd_in, .evd_out, .i_we, .i_bank, .i_addr, .i_wdata, .i_free(!msg_busy), .s_len,
    .busy(cov_busy), .done(cov_done));

  music_msg #(.S_MAX(S_MAX), .D_MAX(D_MAX)) u_msg (
    .clk, .rst_n, .start(cov_done), .s_len, .d_bins, .i_raddr, .i_rdata,
    .coef_we, .coef_bank, .coef_addr, .coef_data, .doppler_idx, .den_min,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast,
    .busy(msg_busy), .done);

  assign busy = cov_busy || msg_busy;
endmodule
