// rsp_accel_top -- programmable-logic part of the radar signal processing
// (RSP) accelerator for an IEEE 802.11ad-based integrated sensing and
// communication (ISAC) base station.
//
// The accelerator estimates the range, azimuth and Doppler velocity of mobile
// users from the echoes of a train of Golay-sequence radar packets received on
// a Q-element antenna array. It holds:
//   * NUM_MF matched-filter IPs (matched_filter). Each turns one packet of
//     Q x K samples into a range-azimuth image (fast-time FFT, beamforming
//     over the array, Golay matched filter in the frequency domain, IFFT).
//     With NUM_MF > 1 several packets are processed in parallel.
//   * one MUSIC IP (music_doppler), which turns the N slow-time samples of a
//     detected target's range-azimuth cell into a Doppler pseudo-spectrum and
//     its peak.
//   * the AXI4-Lite registers (rsp_axil_regs) for run-time reconfiguration of
//     the angular step, the number of packets N and of Doppler bins D.
// The processor side, outside this module, moves packets in and images out
// through DMA streams, runs the peak search and the CLEAN target extraction
// on the images, gathers each target's slow-time vector and sends it to the
// MUSIC IP. The FFT/IFFT engines of every MF IP and the EVD engine of the
// MUSIC IP are external too; their streams are ports of this module.
//
// One coefficient port loads the fixed tables: coef_sel 0 = beam weights
// (BRAM C, bank q = antenna, address i = azimuth index), 1 = Golay spectrum
// (BRAM D, address k), 2 = Doppler steering matrix (BRAM J, bank s, address
// d). Tables C and D are written into every MF instance. The C and D words
// take the low 24 bits of coef_data (<24,5> format); J takes all 32 bits.
//
// All state is reset by a synchronous, active-low rst_n.
module rsp_accel_top
  import rsp_pkg::*;
#(
  parameter int Q      = 32,
  parameter int K      = 1024,
  parameter int I      = 181,
  parameter int NUM_MF = 1,
  parameter int N_MAX  = 100,
  parameter int D_MAX  = 200,
  localparam int KW = $clog2(K),
  localparam int S_MAX = N_MAX / 2,
  localparam int DW = $clog2(D_MAX + 1),
  localparam int CAW = (KW > DW) ? KW : DW
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite configuration
  input  logic          s_axil_awvalid,
  output logic          s_axil_awready,
  input  logic [5:0]    s_axil_awaddr,
  input  logic          s_axil_wvalid,
  output logic          s_axil_wready,
  input  logic [31:0]   s_axil_wdata,
  output logic          s_axil_bvalid,
  input  logic          s_axil_bready,
  output logic [1:0]    s_axil_bresp,
  input  logic          s_axil_arvalid,
  output logic          s_axil_arready,
  input  logic [5:0]    s_axil_araddr,
  output logic          s_axil_rvalid,
  input  logic          s_axil_rready,
  output logic [31:0]   s_axil_rdata,
  output logic [1:0]    s_axil_rresp,
  // coefficient tables
  input  logic          coef_we,
  input  logic [1:0]    coef_sel,
  input  logic [7:0]    coef_bank,
  input  logic [CAW-1:0] coef_addr,
  input  mcplx_t        coef_data,
  // matched-filter packet streams, one per MF IP
  input  logic          mf_s_tvalid [NUM_MF],
  output logic          mf_s_tready [NUM_MF],
  input  cplx_t         mf_s_tdata  [NUM_MF],
  input  logic          mf_s_tlast  [NUM_MF],
  output logic          mf_m_tvalid [NUM_MF],
  input  logic          mf_m_tready [NUM_MF],
  output cplx_t         mf_m_tdata  [NUM_MF],
  output logic          mf_m_tlast  [NUM_MF],
  output logic          mf_done     [NUM_MF],
  // external FFT / IFFT engines, one pair per MF IP
  output cstream_t      fft_in   [NUM_MF],
  input  cstream_t      fft_out  [NUM_MF],
  output cstream_t      ifft_in  [NUM_MF],
  input  cstream_t      ifft_out [NUM_MF],
  // MUSIC streams
  input  logic          mu_s_tvalid,
  output logic          mu_s_tready,
  input  cplx_t         mu_s_tdata,
  input  logic          mu_s_tlast,
  output logic          mu_m_tvalid,
  input  logic          mu_m_tready,
  output logic signed [DBW-1:0] mu_m_tdata,
  output logic          mu_m_tlast,
  output logic          mu_done,
  output logic [DW-1:0] doppler_idx,
  // external EVD (QR factorisation) engine
  output mstream_t      evd_in,
  input  mstream_t      evd_out
);
  logic [7:0] az_step, n_pkts, d_bins;
  logic       mf_busy_v [NUM_MF], mf_ovf_v [NUM_MF];
  logic       any_busy, any_ovf, mu_busy;
  logic [3:0] done_n;
  logic [AW_ACC-1:0] den_min;
  cplx_t      coef_c;

  assign coef_c.re = coef_data.re[W-1:0];
  assign coef_c.im = coef_data.im[W-1:0];

  for (genvar g = 0; g < NUM_MF; g++) begin : g_mf
    matched_filter #(.Q(Q), .K(K), .I(I)) u_mf (
      .clk, .rst_n, .az_step,
      .s_axis_tvalid(mf_s_tvalid[g]), .s_axis_tready(mf_s_tready[g]),
      .s_axis_tdata(mf_s_tdata[g]), .s_axis_tlast(mf_s_tlast[g]),
      .m_axis_tvalid(mf_m_tvalid[g]), .m_axis_tready(mf_m_tready[g]),
      .m_axis_tdata(mf_m_tdata[g]), .m_axis_tlast(mf_m_tlast[g]),
      .fft_in(fft_in[g]), .fft_out(fft_out[g]), .ifft_in(ifft_in[g]), .ifft_out(ifft_out[g]),
      .coef_we(coef_we && coef_sel[1] == 1'b0), .coef_sel(coef_sel[0]),
      .coef_bank($clog2(Q)'(coef_bank)), .coef_addr(KW'(coef_addr)), .coef_data(coef_c),
      .busy(mf_busy_v[g]), .done(mf_done[g]), .ovf(mf_ovf_v[g]));
  end

  always_comb begin
    any_busy = 1'b0; any_ovf = 1'b0; done_n = '0;
    for (int g = 0; g < NUM_MF; g++) begin
      any_busy |= mf_busy_v[g];
      any_ovf  |= mf_ovf_v[g];
      done_n   += 4'(mf_done[g]);
    end
  end

  music_doppler #(.N_MAX(N_MAX), .D_MAX(D_MAX)) u_music (
    .clk, .rst_n, .n_pkts, .d_bins,
    .s_axis_tvalid(mu_s_tvalid), .s_axis_tready(mu_s_tready),
    .s_axis_tdata(mu_s_tdata), .s_axis_tlast(mu_s_tlast),
    .evd_in, .evd_out,
    .coef_we(coef_we && coef_sel == 2'd2), .coef_bank($clog2(S_MAX + 1)'(coef_bank)),
    .coef_addr(DW'(coef_addr)), .coef_data,
    .m_axis_tvalid(mu_m_tvalid), .m_axis_tready(mu_m_tready),
    .m_axis_tdata(mu_m_tdata), .m_axis_tlast(mu_m_tlast),
    .doppler_idx, .den_min(den_min), .busy(mu_busy), .done(mu_done));

  rsp_axil_regs #(.AW(6), .N_RESET(8'(N_MAX)), .D_RESET(8'(D_MAX))) u_regs (
    .clk, .rst_n,
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready,
    .s_axil_wdata, .s_axil_bvalid, .s_axil_bready, .s_axil_bresp,
    .s_axil_arvalid, .s_axil_arready, .s_axil_araddr, .s_axil_rvalid, .s_axil_rready,
    .s_axil_rdata, .s_axil_rresp,
    .az_step, .n_pkts, .d_bins,
    .mf_busy(any_busy), .mu_busy, .mf_ovf(any_ovf), .mf_done_n(done_n), .mu_done,
    .doppler_idx(8'(doppler_idx)), .den_min);
endmodule
