// tb_matched_filter -- end-to-end test of one matched-filter IP at Q = 4
// antennas, K = 32 samples, I = 7 azimuths (-90..90 degrees in 30 degree
// steps). A random +-1 sequence of L = 16 chips, zero-padded to K, plays the
// role of the Golay training sequence; BRAM D holds its spectrum / 4 and
// BRAM C the half-wavelength ULA steering weights. Each packet contains one
// point target (azimuth index, delay) plus small noise. Three packets are
// sent back to back (the second with az_step = 2), so the next packet is
// loaded while the previous one is still being beamformed. Checked: the
// whole read-out image against a floating-point model of FFT -> beamforming
// -> matched filter -> IFFT (within 256 LSB), the argmax landing on the
// target, the number of rows, tlast, and one done pulse per packet, with
// random m_axis back-pressure.
module tb_matched_filter;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int Q = 4, K = 32, I = 7, L = 16, QW = 2, KW = 5;
  localparam int FSH = 5, ISH = 1;          // FFT scaled by 1/K, IFFT by 1/2
  localparam real ONE = real'(1 << FRAC);
  logic clk = 0, rst_n = 0;
  logic [7:0] az_step;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  cplx_t s_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  cplx_t m_axis_tdata;
  cstream_t fft_in, fft_out, ifft_in, ifft_out;
  logic coef_we, coef_sel;
  logic [QW-1:0] coef_bank;
  logic [KW-1:0] coef_addr;
  cplx_t coef_data;
  logic busy, done, ovf;
  int nf, nif;
  int checks = 0, failures = 0, ndone = 0;

  matched_filter #(.Q(Q), .K(K), .I(I)) dut (.*);
  fft_model #(.K(K), .INVERSE(0), .SHIFT(FSH), .LAT(7)) u_fft (.clk, .din(fft_in), .dout(fft_out), .nframes(nf));
  fft_model #(.K(K), .INVERSE(1), .SHIFT(ISH), .LAT(4)) u_ifft (.clk, .din(ifft_in), .dout(ifft_out), .nframes(nif));
  always #5 clk = ~clk;
  always @(posedge clk) m_axis_tready <= ($urandom_range(4) != 0);
  always @(posedge clk) if (rst_n && done) ndone++;
  assign az_step = 8'(steps[(ndone < 3) ? ndone : 2]);   // sampled when packet ndone starts

  real g [K];
  real dr [K], di [K];           // D as loaded (quantized), real units
  real cr [Q][I], ci [Q][I];     // C as loaded
  real xr [3][Q*K], xi [3][Q*K];
  int  steps [3] = '{1, 2, 1};
  int  tgt_i [3] = '{4, 2, 1};
  int  tgt_k [3] = '{5, 11, 0};

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real qz(real v);
    return real'(longint'(v * ONE)) / ONE;
  endfunction

  task automatic load_coefs();
    for (int k = 0; k < K; k++) g[k] = (k < L) ? (($urandom_range(1) != 0) ? 1.0 : -1.0) : 0.0;
    for (int f = 0; f < K; f++) begin
      real sr = 0, si = 0;
      for (int k = 0; k < K; k++) begin
        sr += g[k] * $cos(-2.0 * PI * f * k / K);
        si += g[k] * $sin(-2.0 * PI * f * k / K);
      end
      dr[f] = qz(sr / 4); di[f] = qz(si / 4);
      coef_we <= 1; coef_sel <= 1; coef_bank <= 0; coef_addr <= KW'(f);
      coef_data.re <= W'(longint'(dr[f] * ONE)); coef_data.im <= W'(longint'(di[f] * ONE));
      @(posedge clk);
    end
    for (int q = 0; q < Q; q++) for (int i = 0; i < I; i++) begin
      real th = (-90.0 + 30.0 * i) * PI / 180.0;
      cr[q][i] = qz($cos(-PI * q * $sin(th))); ci[q][i] = qz($sin(-PI * q * $sin(th)));
      coef_we <= 1; coef_sel <= 0; coef_bank <= QW'(q); coef_addr <= KW'(i);
      coef_data.re <= W'(longint'(cr[q][i] * ONE)); coef_data.im <= W'(longint'(ci[q][i] * ONE));
      @(posedge clk);
    end
    coef_we <= 0;
  endtask

  task automatic make_packet(int p);
    real th = (-90.0 + 30.0 * tgt_i[p]) * PI / 180.0;
    for (int q = 0; q < Q; q++) for (int k = 0; k < K; k++) begin
      int kk = k - tgt_k[p];
      real s = (kk >= 0 && kk < K) ? 0.25 * g[kk] : 0.0;
      real ph = PI * q * $sin(th);
      xr[p][q*K+k] = qz(s * $cos(ph) + 0.002 * (real'($urandom_range(1000)) / 500.0 - 1.0));
      xi[p][q*K+k] = qz(s * $sin(ph) + 0.002 * (real'($urandom_range(1000)) / 500.0 - 1.0));
    end
  endtask

  task automatic send(int p);
    for (int n = 0; n < Q * K; n++) begin
      while ($urandom_range(5) == 0) begin s_axis_tvalid <= 0; @(posedge clk); end
      s_axis_tvalid <= 1; s_axis_tlast <= (n == Q * K - 1);
      s_axis_tdata.re <= W'(longint'(xr[p][n] * ONE)); s_axis_tdata.im <= W'(longint'(xi[p][n] * ONE));
      do @(negedge clk); while (!s_axis_tready);   // accepted at the next edge
      @(posedge clk);
    end
    // (a packet that follows directly keeps tvalid high: two non-blocking
    // writes of the same signal in one time step are avoided)
    if (p == 2) begin s_axis_tvalid <= 0; s_axis_tlast <= 0; end
  endtask

  // floating-point reference image of packet p
  real er [I][K], ei [I][K];
  task automatic reference(int p);
    real br [Q][K], bi [Q][K];
    for (int q = 0; q < Q; q++) for (int f = 0; f < K; f++) begin
      real sr = 0, si = 0;
      for (int k = 0; k < K; k++) begin
        real a = -2.0 * PI * f * k / K;
        sr += xr[p][q*K+k] * $cos(a) - xi[p][q*K+k] * $sin(a);
        si += xr[p][q*K+k] * $sin(a) + xi[p][q*K+k] * $cos(a);
      end
      br[q][f] = sr / (1 << FSH); bi[q][f] = si / (1 << FSH);
    end
    for (int i = 0; i < I; i++) begin
      real yr [K], yi [K];
      for (int f = 0; f < K; f++) begin
        real sr = 0, si = 0;
        for (int q = 0; q < Q; q++) begin
          sr += br[q][f] * cr[q][i] - bi[q][f] * ci[q][i];
          si += br[q][f] * ci[q][i] + bi[q][f] * cr[q][i];
        end
        yr[f] = sr * dr[f] + si * di[f];      // times conj(D)
        yi[f] = si * dr[f] - sr * di[f];
      end
      for (int n = 0; n < K; n++) begin
        real sr = 0, si = 0;
        for (int f = 0; f < K; f++) begin
          real a = 2.0 * PI * f * n / K;
          sr += yr[f] * $cos(a) - yi[f] * $sin(a);
          si += yr[f] * $sin(a) + yi[f] * $cos(a);
        end
        er[i][n] = sr / (1 << ISH); ei[i][n] = si / (1 << ISH);
      end
    end
  endtask

  task automatic receive(int p);
    int beats = 0, rows = (I - 1) / steps[p] + 1, bi = 0, bn = 0;
    real best = -1.0;
    reference(p);
    while (1) begin
      @(negedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        int i = (beats / K) * steps[p], n = beats % K;
        real gr = real'(m_axis_tdata.re) / ONE, gi = real'(m_axis_tdata.im) / ONE;
        real mag = gr * gr + gi * gi;
        checks++;
        if (absr(gr - er[i][n]) * ONE > 256.0 || absr(gi - ei[i][n]) * ONE > 256.0) begin
          failures++;
          if (failures < 8) $display("pkt %0d E[%0d][%0d] = %f %f, expected %f %f", p, i, n, gr, gi, er[i][n], ei[i][n]);
        end
        if (mag > best) begin best = mag; bi = i; bn = n; end
        checks++;
        if (m_axis_tlast != (beats == rows * K - 1)) failures++;
        beats++;
        if (m_axis_tlast) break;
      end
    end
    checks++;
    if (bi != tgt_i[p] || bn != tgt_k[p]) begin
      failures++;
      $display("pkt %0d: peak at (%0d,%0d), target (%0d,%0d)", p, bi, bn, tgt_i[p], tgt_k[p]);
    end
    checks++;
    if (beats != rows * K) failures++;
  endtask

  initial begin
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0;
    coef_we = 0; coef_sel = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    for (int p = 0; p < 3; p++) make_packet(p);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_coefs();
    for (int p = 0; p < 3; p++) make_packet(p);
    fork
      begin
        for (int p = 0; p < 3; p++) send(p);
      end
      begin
        for (int p = 0; p < 3; p++) begin
          receive(p);
        end
      end
    join_any
    wait (ndone == 3);
    repeat (5) @(posedge clk);
    checks++; if (ndone != 3) failures++;
    checks++; if (ovf) begin failures++; $display("unexpected saturation"); end
    checks++; if (busy) failures++;
    checks++; if (nf != 3 * Q) failures++;
    checks++; if (nif != 7 + 4 + 7) begin failures++; $display("ifft frames %0d", nif); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
