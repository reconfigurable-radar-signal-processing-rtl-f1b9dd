// tb_rsp_accel_top -- system test of the accelerator at reduced size
// (Q = 4 antennas, K = 32 samples, I = 7 azimuths, two MF IPs, N_MAX = 16,
// D_MAX = 32) with behavioural FFT/IFFT and EVD engines. The testbench plays
// the processor: it loads the tables (ULA steering weights, spectrum of a
// +-1 training sequence, Doppler steering vectors), configures the
// accelerator over AXI4-Lite, streams radar packets of a moving point target
// to the two MF IPs in turn (both work at the same time), collects the
// range-azimuth images, finds the target's cell, gathers its slow-time
// vector over the packets and hands it to the MUSIC IP.
//   scene 1: az_step 1, N = 16, D = 32, target at azimuth 4, delay 5, bin 21
//   scene 2: az_step 2, N = 10, D = 20 (tables and registers reconfigured),
//            target at azimuth 2, delay 11, bin 3
//   scene 3: az_step 1, one full-scale packet that saturates the beamformer
//            sum in the broadside beam
// Checked: every image against a floating-point model (256 LSB), the image
// peak at the target cell, the MUSIC peak at the target's Doppler bin (port
// and DOPPLER register), 0 dB at the peak, the MF_DONE / MU_DONE counters,
// the sticky saturation bit and its clear. Counted, and each required to
// happen: stalls (back-pressure on any stream), az_step mode switches (image
// height change), saturation, both MF IPs transforming at once, and N/D
// reconfigurations of the MUSIC IP.
module tb_rsp_accel_top;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int Q = 4, K = 32, I = 7, NUM_MF = 2, N_MAX = 16, D_MAX = 32;
  localparam int KW = 5, DW = 6, CAW = 6, S_MAX = 8, L = 16;
  localparam int FSH = 5, ISH = 1, NPK = 27;
  localparam real ONE = real'(1 << FRAC);

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
  int nf [NUM_MF], nif [NUM_MF], nevd;
  real lmax, lmin, resid;
  int checks = 0, failures = 0;

  rsp_accel_top #(.Q(Q), .K(K), .I(I), .NUM_MF(NUM_MF), .N_MAX(N_MAX), .D_MAX(D_MAX)) dut (.*);
  for (genvar g = 0; g < NUM_MF; g++) begin : g_eng
    fft_model #(.K(K), .INVERSE(0), .SHIFT(FSH), .LAT(6 + g)) u_fft (.clk, .din(fft_in[g]), .dout(fft_out[g]), .nframes(nf[g]));
    fft_model #(.K(K), .INVERSE(1), .SHIFT(ISH), .LAT(4)) u_ifft (.clk, .din(ifft_in[g]), .dout(ifft_out[g]), .nframes(nif[g]));
  end
  evd_model #(.S_MAX(S_MAX), .LAT(15)) u_evd (.clk, .s(int'(dut.u_music.s_len)), .din(evd_in), .dout(evd_out),
    .nframes(nevd), .lambda_max(lmax), .lambda_min(lmin), .resid);
  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_parallel = 0, n_azswitch = 0, n_ovf = 0, n_reconf = 0;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NUM_MF; g++)
      if ((mf_s_tvalid[g] && !mf_s_tready[g]) || (mf_m_tvalid[g] && !mf_m_tready[g])) n_stall++;
    if (mu_m_tvalid && !mu_m_tready) n_stall++;
    if ((fft_in[0].valid || ifft_in[0].valid) && (fft_in[1].valid || ifft_in[1].valid)) n_parallel++;
  end
  always @(posedge clk) begin
    for (int g = 0; g < NUM_MF; g++) mf_m_tready[g] <= ($urandom_range(3) != 0);
    mu_m_tready <= ($urandom_range(2) != 0);
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite ----------------
  task automatic axil_write(logic [5:0] a, logic [31:0] d);
    s_axil_awvalid <= 1; s_axil_wvalid <= 1; s_axil_awaddr <= a; s_axil_wdata <= d; s_axil_bready <= 1;
    do @(negedge clk); while (!s_axil_awready);
    @(posedge clk);
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    do @(negedge clk); while (!s_axil_bvalid);
    @(posedge clk);
    s_axil_bready <= 0;
    @(posedge clk);   // keeps the next transaction's assignments in a later time step
  endtask
  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
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
  real g [K], dr [K], di [K], cr [Q][I], ci [Q][I];
  function automatic real qz(real v);
    return real'(longint'(v * ONE)) / ONE;
  endfunction
  function automatic real theta(int i);
    return (-90.0 + 30.0 * i) * PI / 180.0;
  endfunction
  task automatic coef(logic [1:0] sel, int bank, int addr, real re, real im, int frac);
    coef_we <= 1; coef_sel <= sel; coef_bank <= 8'(bank); coef_addr <= CAW'(addr);
    coef_data.re <= MW'(longint'(re * real'(1 << frac))); coef_data.im <= MW'(longint'(im * real'(1 << frac)));
    @(posedge clk);
  endtask
  task automatic load_mf_tables();
    for (int k = 0; k < K; k++) g[k] = (k < L) ? (($urandom_range(1) != 0) ? 1.0 : -1.0) : 0.0;
    for (int f = 0; f < K; f++) begin
      real sr = 0, si = 0;
      for (int k = 0; k < K; k++) begin
        sr += g[k] * $cos(-2.0 * PI * f * k / K);
        si += g[k] * $sin(-2.0 * PI * f * k / K);
      end
      dr[f] = qz(sr / 4); di[f] = qz(si / 4);
      coef(1, 0, f, dr[f], di[f], FRAC);
    end
    for (int q = 0; q < Q; q++) for (int i = 0; i < I; i++) begin
      cr[q][i] = qz($cos(-PI * q * $sin(theta(i)))); ci[q][i] = qz($sin(-PI * q * $sin(theta(i))));
      coef(0, q, i, cr[q][i], ci[q][i], FRAC);
    end
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
  real xr [NPK][Q*K], xi [NPK][Q*K];
  real imr [NPK][I][K], imi [NPK][I][K];
  int  pstep [NPK];
  int  last_rows = 0;

  task automatic make_packet(int p, int ti, int tk, real fd, real amp, bit full);
    real th = theta(ti);
    for (int q = 0; q < Q; q++) for (int k = 0; k < K; k++) begin
      int kk = k - tk;
      real s = (kk >= 0 && kk < K) ? amp * g[kk] : 0.0;
      real ph = PI * q * $sin(th) + 2.0 * PI * fd * p;
      if (full) begin
        xr[p][q*K+k] = 15.0; xi[p][q*K+k] = -15.0;
      end else begin
        xr[p][q*K+k] = qz(s * $cos(ph) + 0.002 * (real'($urandom_range(1000)) / 500.0 - 1.0));
        xi[p][q*K+k] = qz(s * $sin(ph) + 0.002 * (real'($urandom_range(1000)) / 500.0 - 1.0));
      end
    end
  endtask

  task automatic send_packet(int gi, int p);
    @(posedge clk);
    for (int n = 0; n < Q * K; n++) begin
      while ($urandom_range(7) == 0) begin mf_s_tvalid[gi] <= 0; @(posedge clk); end
      mf_s_tvalid[gi] <= 1; mf_s_tlast[gi] <= (n == Q * K - 1);
      mf_s_tdata[gi].re <= W'(longint'(xr[p][n] * ONE)); mf_s_tdata[gi].im <= W'(longint'(xi[p][n] * ONE));
      do @(negedge clk); while (!mf_s_tready[gi]);
      @(posedge clk);
    end
  endtask

  // image model; checked unless the packet saturates
  task automatic check_image(int p, bit exact);
    real br [Q][K], bi [Q][K];
    if (!exact) return;
    for (int q = 0; q < Q; q++) for (int f = 0; f < K; f++) begin
      real sr = 0, si = 0;
      for (int k = 0; k < K; k++) begin
        real a = -2.0 * PI * f * k / K;
        sr += xr[p][q*K+k] * $cos(a) - xi[p][q*K+k] * $sin(a);
        si += xr[p][q*K+k] * $sin(a) + xi[p][q*K+k] * $cos(a);
      end
      br[q][f] = sr / (1 << FSH); bi[q][f] = si / (1 << FSH);
    end
    for (int i = 0; i < I; i += pstep[p]) begin
      real yr [K], yi [K];
      for (int f = 0; f < K; f++) begin
        real sr = 0, si = 0;
        for (int q = 0; q < Q; q++) begin
          sr += br[q][f] * cr[q][i] - bi[q][f] * ci[q][i];
          si += br[q][f] * ci[q][i] + bi[q][f] * cr[q][i];
        end
        yr[f] = sr * dr[f] + si * di[f];
        yi[f] = si * dr[f] - sr * di[f];
      end
      for (int n = 0; n < K; n++) begin
        real sr = 0, si = 0, er, ei;
        for (int f = 0; f < K; f++) begin
          real a = 2.0 * PI * f * n / K;
          sr += yr[f] * $cos(a) - yi[f] * $sin(a);
          si += yr[f] * $sin(a) + yi[f] * $cos(a);
        end
        er = sr / (1 << ISH); ei = si / (1 << ISH);
        checks++;
        if (absr(imr[p][i][n] - er) * ONE > 256.0 || absr(imi[p][i][n] - ei) * ONE > 256.0) begin
          failures++;
          if (failures < 10) $display("packet %0d E[%0d][%0d] = %f %f, model %f %f", p, i, n, imr[p][i][n], imi[p][i][n], er, ei);
        end
      end
    end
  endtask

  task automatic receive_image(int gi, int p, bit exact);
    int beats = 0, rows;
    while (1) begin
      @(negedge clk);
      if (mf_m_tvalid[gi] && mf_m_tready[gi]) begin
        int i = (beats / K) * pstep[p], n = beats % K;
        imr[p][i][n] = real'(mf_m_tdata[gi].re) / ONE;
        imi[p][i][n] = real'(mf_m_tdata[gi].im) / ONE;
        beats++;
        if (mf_m_tlast[gi]) break;
      end
    end
    rows = beats / K;
    checks++;
    if (beats != ((I - 1) / pstep[p] + 1) * K) begin failures++; $display("packet %0d: %0d beats", p, beats); end
    if (last_rows != 0 && rows != last_rows) n_azswitch++;
    last_rows = rows;
    check_image(p, exact);
  endtask

  // all packets p0..p1-1; packet p goes to MF IP p % 2
  task automatic run_packets(int p0, int p1, bit exact);
    fork
      begin for (int p = p0; p < p1; p += 2) send_packet(0, p); mf_s_tvalid[0] <= 0; end
      begin for (int p = p0 + 1; p < p1; p += 2) send_packet(1, p); mf_s_tvalid[1] <= 0; end
      begin for (int p = p0; p < p1; p += 2) receive_image(0, p, exact); end
      begin for (int p = p0 + 1; p < p1; p += 2) receive_image(1, p, exact); end
    join
  endtask

  // ---------------- MUSIC ----------------
  int last_n = 0, last_d = 0;
  task automatic music(int p0, int n, int dn, int row, int col, int d0);
    int beats = 0;
    logic [31:0] rd;
    @(posedge clk);   // the handshakes below start from a clock edge
    fork
      begin
        for (int v = 0; v < n; v++) begin
          mu_s_tvalid <= 1;
          mu_s_tlast  <= (v + 1 == n);
          mu_s_tdata.re <= W'(longint'(imr[p0 + v][row][col] * ONE));
          mu_s_tdata.im <= W'(longint'(imi[p0 + v][row][col] * ONE));
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
    if (int'(doppler_idx) != d0) begin failures++; $display("Doppler bin %0d, expected %0d", doppler_idx, d0); end
    axil_read(6'h10, rd);
    checks++; if (rd != 32'(d0)) begin failures++; $display("DOPPLER register %0d", rd); end
    if (last_n != 0 && (n != last_n || dn != last_d)) n_reconf++;
    last_n = n; last_d = dn;
  endtask

  task automatic scene(int p0, int np, int step, int n, int dn, int ti, int tk, int d0);
    real fd = real'(d0 - dn / 2) / real'(dn);
    int best_i = 0, best_k = 0;
    real best = -1.0;
    logic [31:0] rd;
    axil_write(6'h00, 32'(step));
    axil_write(6'h04, 32'(n));
    axil_write(6'h08, 32'(dn));
    axil_read(6'h00, rd); checks++; if (rd != 32'(step)) begin failures++; $display("AZ_STEP register %0d", rd); end
    load_j(dn);
    for (int p = p0; p < p0 + np; p++) begin
      make_packet(p, ti, tk, fd, 0.25, 0);
      pstep[p] = step;
    end
    run_packets(p0, p0 + np, 1);
    // peak search on the first image of the scene
    for (int i = 0; i < I; i += step) for (int k = 0; k < K; k++) begin
      real m = imr[p0][i][k] * imr[p0][i][k] + imi[p0][i][k] * imi[p0][i][k];
      if (m > best) begin best = m; best_i = i; best_k = k; end
    end
    checks++;
    if (best_i != ti || best_k != tk) begin
      failures++; $display("image peak at (%0d,%0d), target (%0d,%0d)", best_i, best_k, ti, tk);
    end
    music(p0, n, dn, best_i, best_k, d0);
  endtask

  initial begin
    logic [31:0] rd;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_awaddr = 0; s_axil_wdata = 0; s_axil_bready = 0;
    s_axil_arvalid = 0; s_axil_araddr = 0; s_axil_rready = 0;
    coef_we = 0; coef_sel = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    for (int g = 0; g < NUM_MF; g++) begin mf_s_tvalid[g] = 0; mf_s_tlast[g] = 0; mf_s_tdata[g] = '0; end
    mu_s_tvalid = 0; mu_s_tlast = 0; mu_s_tdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    axil_read(6'h04, rd); checks++; if (rd != 32'(N_MAX)) begin failures++; $display("N_PKTS reset value %0d", rd); end
    load_mf_tables();
    scene(0, 16, 1, 16, 32, 4, 5, 21);
    scene(16, 10, 2, 10, 20, 2, 11, 3);
    // saturation: one full-scale packet on MF IP 0
    axil_read(6'h0C, rd); checks++; if (rd[2]) begin failures++; $display("saturation flagged too early"); end
    axil_write(6'h00, 32'd1);
    make_packet(26, 0, 0, 0.0, 0.0, 1);
    pstep[26] = 1;
    fork
      begin send_packet(0, 26); mf_s_tvalid[0] <= 0; end
      receive_image(0, 26, 0);
    join
    axil_read(6'h0C, rd);
    checks++; if (!rd[2]) begin failures++; $display("saturation not flagged"); end
    if (rd[2]) n_ovf++;
    axil_write(6'h0C, 32'h4);
    axil_read(6'h0C, rd); checks++; if (rd[2]) begin failures++; $display("saturation bit not cleared"); end
    axil_read(6'h14, rd); checks++; if (rd != 27) begin failures++; $display("MF_DONE %0d", rd); end
    axil_read(6'h18, rd); checks++; if (rd != 2) begin failures++; $display("MU_DONE %0d", rd); end
    checks++; if (nf[0] + nf[1] != 27 * Q) begin failures++; $display("%0d FFT frames", nf[0] + nf[1]); end
    checks++; if (resid > 1e-6 * (absr(lmax) + 1.0)) begin failures++; $display("EVD model residual %g", resid); end
    $display("mechanisms: stall %0d, az_step switch %0d, saturation %0d, parallel MF %0d, N/D reconfiguration %0d",
             n_stall, n_azswitch, n_ovf, n_parallel, n_reconf);
    checks++; if (n_stall == 0) begin failures++; $display("no stall happened"); end
    checks++; if (n_azswitch == 0) begin failures++; $display("no az_step switch happened"); end
    checks++; if (n_ovf == 0) begin failures++; $display("no saturation happened"); end
    checks++; if (n_parallel == 0) begin failures++; $display("the MF IPs never worked in parallel"); end
    checks++; if (n_reconf == 0) begin failures++; $display("no N/D reconfiguration happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
