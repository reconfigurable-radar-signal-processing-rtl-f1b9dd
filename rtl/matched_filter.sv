// matched_filter -- one matched-filter (MF) IP: range-azimuth processing of
// one received radar packet.
//
// A packet of Q antennas x K fast-time samples enters on s_axis; the image of
// ceil(I/az_step) azimuths x K range bins leaves on m_axis. Inside, the FFT
// stage (mf_fft_stage) transforms each antenna into BRAM B, and the
// beamforming stage (mf_beamform) forms the beams, applies the Golay matched
// filter, inverse transforms and buffers the image in BRAM E. BRAM B lives
// here because both stages use it: it is split into Q banks, one per antenna,
// so that the beamformer reads all Q antennas of a bin in one clock.
//
// The FFT and IFFT engines are external (fft_* and ifft_* streams). The next
// packet may be loaded into BRAM A while the beamformer works on the previous
// one; the FFT stage waits for the beamformer to finish (b_free) before it
// overwrites BRAM B. Several instances of this block can work on different
// packets in parallel.
module matched_filter
  import rsp_pkg::*;
#(
  parameter int Q = 32,
  parameter int K = 1024,
  parameter int I = 181,
  localparam int QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int KW = $clog2(K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [7:0]    az_step,
  input  logic          s_axis_tvalid,
  output logic          s_axis_tready,
  input  cplx_t         s_axis_tdata,
  input  logic          s_axis_tlast,
  output logic          m_axis_tvalid,
  input  logic          m_axis_tready,
  output cplx_t         m_axis_tdata,
  output logic          m_axis_tlast,
  output cstream_t      fft_in,
  input  cstream_t      fft_out,
  output cstream_t      ifft_in,
  input  cstream_t      ifft_out,
  input  logic          coef_we,
  input  logic          coef_sel,
  input  logic [QW-1:0] coef_bank,
  input  logic [KW-1:0] coef_addr,
  input  cplx_t         coef_data,
  output logic          busy,
  output logic          done,
  output logic          ovf
);
  logic          b_we;
  logic [QW-1:0] b_bank;
  logic [KW-1:0] b_addr, b_raddr;
  cplx_t         b_wdata;
  cplx_t         b_rdata [Q];
  logic          fft_busy, fft_done, bf_busy;

  for (genvar g = 0; g < Q; g++) begin : g_b
    cram #(.WD(W), .DEPTH(K)) u_bram_b (
      .clk, .we(b_we && b_bank == QW'(g)), .waddr(b_addr),
      .wdata_re(b_wdata.re), .wdata_im(b_wdata.im),
      .raddr(b_raddr), .rdata_re(b_rdata[g].re), .rdata_im(b_rdata[g].im));
  end

  mf_fft_stage #(.Q(Q), .K(K)) u_fft_stage (
    .clk, .rst_n, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tlast,
    .fft_in, .fft_out, .b_we, .b_bank, .b_addr, .b_wdata,
    .b_free(!bf_busy), .busy(fft_busy), .done(fft_done));

  mf_beamform #(.Q(Q), .K(K), .I(I)) u_beamform (
    .clk, .rst_n, .start(fft_done), .az_step, .busy(bf_busy), .done, .ovf,
    .b_raddr, .b_rdata, .coef_we, .coef_sel, .coef_bank, .coef_addr, .coef_data,
    .ifft_in, .ifft_out, .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast);

  assign busy = fft_busy || bf_busy;
endmodule
