// tb_rsp_full -- full-size system test: the accelerator at its default
// parameters (Q = 32 antennas, K = 1024 samples, I = 181 azimuths, one MF IP,
// N_MAX = 100 packets, D_MAX = 200 Doppler bins) with behavioural FFT/IFFT
// and EVD engines. The testbench plays the processor:
//   * loads the beam weights of a half-wavelength ULA for -90..90 degrees
//     in 1 degree steps, the spectrum of a 512-chip Golay sequence
//     zero-padded to 1024 samples (divided by 16) and the Doppler steering
//     vectors of a 200-bin grid;
//   * streams 100 packets of a point target at azimuth 14 degrees (index
//     104), delay 300 samples, Doppler 0.175 cycles per packet (bin 135 of
//     200), packet 0 with az_step = 1 (181 beams), packet 1 with 2 (91),
//     packet 2 with 4 (46) and packets 3..99 with 8 (23 beams), with
//     random back-pressure on the image stream;
//   * finds the target in the image of packet 0, gathers its slow-time
//     vector over the 100 packets and runs MUSIC with N = 100, D = 200, then
//     again with N = 20, D = 40 (grid reloaded; the target is bin 27);
//   * sends one full-scale packet that saturates the beamformer.
// Checked: image heights, the image peak at the target cell and its value
// (a Q L / (16 * 64) = 8 for amplitude a = 0.5), the MUSIC peak bins (port
// and register) with 0 dB at the peak, the done counters and the saturation
// flag. Counted and required: stalls, the az_step switch, N/D
// reconfiguration and saturation (parallel MF IPs need NUM_MF > 1, which
// the system test at reduced size covers).
module tb_rsp_full;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int Q = 32, K = 1024, I = 181, NUM_MF = 1, N = 100, D = 200, S_MAX = 50, L = 512;
  localparam int KW = 10, DW = 8, CAW = 10;
  localparam int FSH = 10, ISH = 6, TI = 104, TK = 300, D0 = 135;
  localparam real ONE = real'(1 << FRAC), AMP = 0.5;

  logic clk = 0, rst_n = 0;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [5:0] s_axil_awaddr, s_axil_araddr;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic coef_we;
  logic [1:0] coef_sel;
  logic [7:0] coef_bank;
  logic [CAW-1:0] coef_addr;
  mcplx_t coef_data;
  logic mf_s_tvalid [NUM_MF], mf_s_tready [NUM_MF], mf_s_tlast [NUM_MF];
  cplx_t mf_s_tdata [NUM_MF];
  logic mf_m_tvalid [NUM_MF], mf_m_tready [NUM_MF], mf_m_tlast [NUM_MF], mf_done [NUM_MF];
  cplx_t mf_m_tdata [NUM_MF];
  cstream_t fft_in [NUM_MF], fft_out [NUM_MF], ifft_in [NUM_MF], ifft_out [NUM_MF];
  logic mu_s_tvalid, mu_s_tready, mu_s_tlast, mu_m_tvalid, mu_m_tready, mu_m_tlast, mu_done;
  cplx_t mu_s_tdata;
  logic signed [DBW-1:0] mu_m_tdata;
  logic [DW-1:0] doppler_idx;
  mstream_t evd_in, evd_out;
  int nf, nif, nevd;
  real lmax, lmin, resid;
  int checks = 0, failures = 0;

  rsp_accel_top dut (.*);
  fft_model #(.K(K), .INVERSE(0), .SHIFT(FSH), .LAT(40)) u_fft (.clk, .din(fft_in[0]), .dout(fft_out[0]), .nframes(nf));
  fft_model #(.K(K), .INVERSE(1), .SHIFT(ISH), .LAT(40)) u_ifft (.clk, .din(ifft_in[0]), .dout(ifft_out[0]), .nframes(nif));
  evd_model #(.S_MAX(S_MAX), .LAT(100)) u_evd (.clk, .s(int'(dut.u_music.s_len)), .din(evd_in), .dout(evd_out),
    .nframes(nevd), .lambda_max(lmax), .lambda_min(lmin), .resid);
  always #5 clk = ~clk;

  int n_stall = 0, n_azswitch = 0, n_ovf = 0, n_reconf = 0;
  always @(posedge clk) if (rst_n) begin
    if ((mf_s_tvalid[0] && !mf_s_tready[0]) || (mf_m_tvalid[0] && !mf_m_tready[0])) n_stall++;
    if (mu_m_tvalid && !mu_m_tready) n_stall++;
  end
  always @(posedge clk) begin
    mf_m_tready[0] <= ($urandom_range(9) != 0);
    mu_m_tready <= ($urandom_range(3) != 0);
  end

  initial begin
    repeat (20000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite ----------------
  task automatic axil_write(logic [5:0] a, logic [31:0] d);
    @(posedge clk);
    s_axil_awvalid <= 1; s_axil_wvalid <= 1; s_axil_awaddr <= a; s_axil_wdata <= d; s_axil_bready <= 1;
    do @(negedge clk); while (!s_axil_awready);
    @(posedge clk);
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    do @(negedge clk); while (!s_axil_bvalid);
    @(posedge clk);
    s_axil_bready <= 0;
    @(posedge clk);
  endtask
  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    @(posedge clk);
    s_axil_arvalid <= 1; s_axil_araddr <= a; s_axil_rready <= 1;
    do @(negedge clk); while (!s_axil_arready);
    @(posedge clk);
    s_axil_arvalid <= 0;
    do @(negedge clk); while (!s_axil_rvalid);
    d = s_axil_rdata;
    @(posedge clk);
    s_axil_rready <= 0;
    @(posedge clk);
  endtask

  // ---------------- tables ----------------
  real g [K];
  function automatic real theta(int i);
    return (-90.0 + i) * PI / 180.0;
  endfunction
  task automatic coef(logic [1:0] sel, int bank, int addr, real re, real im, int frac);
    coef_we <= 1; coef_sel <= sel; coef_bank <= 8'(bank); coef_addr <= CAW'(addr);
    coef_data.re <= MW'(longint'(re * real'(1 << frac))); coef_data.im <= MW'(longint'(im * real'(1 << frac)));
    @(posedge clk);
  endtask
  task automatic load_mf_tables();
    real ga [L], gb [L];
    int len = 1;
    // Golay complementary pair by concatenation: (a, b) -> (a|b, a|-b)
    ga[0] = 1.0; gb[0] = 1.0;
    while (len < L) begin
      for (int k = 0; k < len; k++) begin
        ga[len + k] = gb[k];
        gb[len + k] = -gb[k];
        gb[k] = ga[k];
      end
      len *= 2;
    end
    for (int k = 0; k < K; k++) g[k] = (k < L) ? ga[k] : 0.0;
    for (int f = 0; f < K; f++) begin
      real sr = 0, si = 0;
      for (int k = 0; k < L; k++) begin
        sr += g[k] * $cos(-2.0 * PI * f * k / K);
        si += g[k] * $sin(-2.0 * PI * f * k / K);
      end
      coef(1, 0, f, sr / 16.0, si / 16.0, FRAC);
    end
    for (int q = 0; q < Q; q++) for (int i = 0; i < I; i++)
      coef(0, q, i, $cos(-PI * q * $sin(theta(i))), $sin(-PI * q * $sin(theta(i))), FRAC);
    coef_we <= 0;
  endtask
  task automatic load_j(int dn);
    for (int s = 0; s < S_MAX; s++) for (int d = 0; d < dn; d++) begin
      real f = real'(d - dn / 2) / real'(dn);
      coef(2, s, d, $cos(2.0 * PI * f * s), $sin(2.0 * PI * f * s), MFRAC);
    end
    coef_we <= 0;
  endtask

  // ---------------- packets and images ----------------
  real img0r [I][K], img0i [I][K];   // image of packet 0
  real yr [N], yi [N];               // slow-time vector at the target cell
  int  last_rows = 0;

  task automatic send_packet(int p, bit full);
    real fd = real'(D0 - D / 2) / real'(D);
    @(posedge clk);
    for (int q = 0; q < Q; q++) begin
      real ph0 = PI * q * $sin(theta(TI)) + 2.0 * PI * fd * p;
      for (int k = 0; k < K; k++) begin
        real vr, vi;
        int kk = k - TK;
        real s = (kk >= 0 && kk < K) ? AMP * g[kk] : 0.0;
        if (full) begin vr = 15.0; vi = -15.0; end
        else begin
          vr = s * $cos(ph0) + 0.001 * (real'($urandom_range(1000)) / 500.0 - 1.0);
          vi = s * $sin(ph0) + 0.001 * (real'($urandom_range(1000)) / 500.0 - 1.0);
        end
        mf_s_tvalid[0] <= 1; mf_s_tlast[0] <= (q == Q - 1 && k == K - 1);
        mf_s_tdata[0].re <= W'(longint'(vr * ONE)); mf_s_tdata[0].im <= W'(longint'(vi * ONE));
        do @(negedge clk); while (!mf_s_tready[0]);
        @(posedge clk);
      end
    end
  endtask

  task automatic receive_image(int p, int step);
    int beats = 0, rows;
    while (1) begin
      @(negedge clk);
      if (mf_m_tvalid[0] && mf_m_tready[0]) begin
        int i = (beats / K) * step, n = beats % K;
        real vr = real'(mf_m_tdata[0].re) / ONE, vi = real'(mf_m_tdata[0].im) / ONE;
        if (p == 0) begin img0r[i][n] = vr; img0i[i][n] = vi; end
        if (p < N && i == TI && n == TK) begin yr[p] = vr; yi[p] = vi; end
        beats++;
        if (mf_m_tlast[0]) break;
      end
    end
    rows = beats / K;
    checks++;
    if (beats != ((I - 1) / step + 1) * K) begin failures++; $display("packet %0d: %0d beats", p, beats); end
    if (last_rows != 0 && rows != last_rows) n_azswitch++;
    last_rows = rows;
  endtask

  // ---------------- MUSIC ----------------
  int last_n = 0, last_d = 0;
  task automatic music(int n, int dn, int d0);
    int beats = 0;
    logic [31:0] rd;
    axil_write(6'h04, 32'(n));
    axil_write(6'h08, 32'(dn));
    load_j(dn);
    @(posedge clk);
    fork
      begin
        for (int v = 0; v < n; v++) begin
          mu_s_tvalid <= 1;
          mu_s_tlast  <= (v + 1 == n);
          mu_s_tdata.re <= W'(longint'(yr[v] * ONE));
          mu_s_tdata.im <= W'(longint'(yi[v] * ONE));
          do @(negedge clk); while (!mu_s_tready);
          @(posedge clk);
        end
        mu_s_tvalid <= 0; mu_s_tlast <= 0;
      end
      while (1) begin
        @(negedge clk);
        if (mu_m_tvalid && mu_m_tready) begin
          if (beats == d0) begin
            checks++;
            if (mu_m_tdata != 0) begin failures++; $display("spectrum at the peak: %0d", mu_m_tdata); end
          end
          beats++;
          if (mu_m_tlast) break;
        end
      end
    join
    checks++;
    if (beats != dn) begin failures++; $display("spectrum of %0d bins", beats); end
    checks++;
    if (int'(doppler_idx) != d0) begin failures++; $display("N=%0d D=%0d: Doppler bin %0d, expected %0d", n, dn, doppler_idx, d0); end
    axil_read(6'h10, rd);
    checks++; if (rd != 32'(d0)) begin failures++; $display("DOPPLER register %0d", rd); end
    checks++; if (resid > 1e-6 * (absr(lmax) + 1.0)) begin failures++; $display("EVD model residual %g", resid); end
    if (last_n != 0 && (n != last_n || dn != last_d)) n_reconf++;
    last_n = n; last_d = dn;
  endtask

  initial begin
    logic [31:0] rd;
    int bi = 0, bk = 0, t0;
    real best = -1.0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_awaddr = 0; s_axil_wdata = 0; s_axil_bready = 0;
    s_axil_arvalid = 0; s_axil_araddr = 0; s_axil_rready = 0;
    coef_we = 0; coef_sel = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    mf_s_tvalid[0] = 0; mf_s_tlast[0] = 0; mf_s_tdata[0] = '0;
    mu_s_tvalid = 0; mu_s_tlast = 0; mu_s_tdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_mf_tables();
    axil_read(6'h00, rd); checks++; if (rd != 1) begin failures++; $display("AZ_STEP reset value %0d", rd); end
    t0 = $time / 10;
    // packet 0 at 1 degree, packet 1 at 2, packet 2 at 4, the rest at 8
    // degrees: the step register is changed once the beamformer has taken
    // the previous packet
    fork
      begin
        for (int p = 0; p <= N; p++) send_packet(p, p == N);
        mf_s_tvalid[0] <= 0;
      end
      begin
        receive_image(0, 1);
        receive_image(1, 2);
        receive_image(2, 4);
        for (int p = 3; p <= N; p++) receive_image(p, 8);
      end
      begin
        // each write lands while the beamformer works on the previous packet
        @(posedge clk iff dut.g_mf[0].u_mf.u_beamform.busy);
        axil_write(6'h00, 32'd2);
        @(posedge clk iff !dut.g_mf[0].u_mf.u_beamform.busy);
        @(posedge clk iff dut.g_mf[0].u_mf.u_beamform.busy);
        axil_write(6'h00, 32'd4);
        @(posedge clk iff !dut.g_mf[0].u_mf.u_beamform.busy);
        @(posedge clk iff dut.g_mf[0].u_mf.u_beamform.busy);
        axil_write(6'h00, 32'd8);
      end
    join
    $display("100 + 1 packets in %0d clocks", $time / 10 - t0);
    // peak search in the image of packet 0
    for (int i = 0; i < I; i++) for (int k = 0; k < K; k++) begin
      automatic real m = img0r[i][k] * img0r[i][k] + img0i[i][k] * img0i[i][k];
      if (m > best) begin best = m; bi = i; bk = k; end
    end
    checks++;
    if (bi != TI || bk != TK) begin failures++; $display("image peak at (%0d,%0d), target (%0d,%0d)", bi, bk, TI, TK); end
    checks++;
    if (absr($sqrt(best) - AMP * Q * L / (16.0 * 64.0)) > 0.05) begin
      failures++; $display("peak magnitude %f, expected %f", $sqrt(best), AMP * Q * L / (16.0 * 64.0));
    end
    axil_read(6'h0C, rd);
    checks++; if (!rd[2]) begin failures++; $display("saturation not flagged"); end
    if (rd[2]) n_ovf++;
    axil_read(6'h14, rd); checks++; if (rd != N + 1) begin failures++; $display("MF_DONE %0d", rd); end
    music(N, D, D0);
    music(20, 40, 27);
    axil_read(6'h18, rd); checks++; if (rd != 2) begin failures++; $display("MU_DONE %0d", rd); end
    $display("mechanisms: stall %0d, az_step switch %0d, saturation %0d, N/D reconfiguration %0d",
             n_stall, n_azswitch, n_ovf, n_reconf);
    checks++; if (n_stall == 0) begin failures++; $display("no stall happened"); end
    checks++; if (n_azswitch < 3) begin failures++; $display("fewer than three az_step switches"); end
    checks++; if (n_ovf == 0) begin failures++; $display("no saturation happened"); end
    checks++; if (n_reconf == 0) begin failures++; $display("no N/D reconfiguration happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
