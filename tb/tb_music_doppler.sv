// tb_music_doppler -- end-to-end test of the MUSIC Doppler IP with
// N_MAX = 16, D_MAX = 32 and the behavioural EVD engine. BRAM J holds the
// Doppler steering vectors v(d)[s] = exp(j 2 pi f_d s), f_d = (d - D/2)/D.
// Three slow-time vectors y[n] = A exp(j 2 pi f_d0 n) + noise are sent back
// (the first two back to back, so that the second vector's covariance
// overlaps the first spectrum):
// N = 16 / D = 32 / d0 = 21, N = 16 / D = 32 / d0 = 8, and, after J has
// been reloaded for a new grid, N = 10 / D = 20 / d0 = 3. Checked: doppler_idx equals d0, the dB
// spectrum is 0 dB at d0 and below -10 dB two bins or more away from it, the
// beat count and tlast under random back-pressure, and one done per vector.
module tb_music_doppler;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int N_MAX = 16, D_MAX = 32, S_MAX = 8, SW = 4, DW = 6;
  logic clk = 0, rst_n = 0;
  logic [7:0] n_pkts, d_bins;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  cplx_t s_axis_tdata;
  mstream_t evd_in, evd_out;
  logic coef_we;
  logic [SW-1:0] coef_bank;
  logic [DW-1:0] coef_addr;
  mcplx_t coef_data;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic signed [DBW-1:0] m_axis_tdata;
  logic [DW-1:0] doppler_idx;
  logic [AW_ACC-1:0] den_min;
  logic busy, done;
  int nframes, ndone = 0;
  real lmax, lmin, resid;
  int checks = 0, failures = 0;

  music_doppler #(.N_MAX(N_MAX), .D_MAX(D_MAX)) dut (.*);
  evd_model #(.S_MAX(S_MAX), .LAT(20)) u_evd (.clk, .s(int'(dut.s_len)), .din(evd_in), .dout(evd_out),
    .nframes, .lambda_max(lmax), .lambda_min(lmin), .resid);
  always #5 clk = ~clk;
  always @(posedge clk) m_axis_tready <= ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && done) ndone++;

  int nv [3] = '{16, 16, 10};
  int dv [3] = '{32, 32, 20};
  int d0 [3] = '{21, 8, 3};

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_j(int dn);
    for (int g = 0; g < S_MAX; g++) for (int d = 0; d < dn; d++) begin
      real f = real'(d - dn / 2) / real'(dn);
      coef_we <= 1; coef_bank <= SW'(g); coef_addr <= DW'(d);
      coef_data.re <= MW'(longint'($cos(2.0 * PI * f * g) * (1 << MFRAC)));
      coef_data.im <= MW'(longint'($sin(2.0 * PI * f * g) * (1 << MFRAC)));
      @(posedge clk);
    end
    coef_we <= 0;
  endtask

  task automatic send(int v);
    real f = real'(d0[v] - dv[v] / 2) / real'(dv[v]);
    for (int n = 0; n < nv[v]; n++) begin
      real nr = 0.01 * (real'($urandom_range(1000)) / 500.0 - 1.0);
      real ni = 0.01 * (real'($urandom_range(1000)) / 500.0 - 1.0);
      while ($urandom_range(3) == 0) begin s_axis_tvalid <= 0; @(posedge clk); end
      s_axis_tvalid <= 1; s_axis_tlast <= (n == nv[v] - 1);
      s_axis_tdata.re <= W'(longint'((2.0 * $cos(2.0 * PI * f * n) + nr) * (1 << FRAC)));
      s_axis_tdata.im <= W'(longint'((2.0 * $sin(2.0 * PI * f * n) + ni) * (1 << FRAC)));
      do @(negedge clk); while (!s_axis_tready);
      @(posedge clk);
    end
    if (v != 0) begin s_axis_tvalid <= 0; s_axis_tlast <= 0; end
  endtask

  task automatic receive(int v);
    int beats = 0;
    while (1) begin
      @(negedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        int gap = beats - d0[v];
        if (gap < 0) gap = -gap;
        if (beats == 0) begin
          checks++;
          if (int'(doppler_idx) != d0[v]) begin failures++; $display("vector %0d: peak at %0d, expected %0d", v, doppler_idx, d0[v]); end
        end
        checks++;
        if (gap == 0 && m_axis_tdata != 0) begin failures++; $display("vector %0d: %0d at the peak", v, m_axis_tdata); end
        if (gap >= 2 && m_axis_tdata > -10 * 256) begin failures++; $display("vector %0d: bin %0d at %f dB", v, beats, real'(m_axis_tdata) / 256.0); end
        checks++;
        if (m_axis_tlast != (beats == dv[v] - 1)) failures++;
        beats++;
        if (m_axis_tlast) break;
      end
    end
    checks++; if (beats != dv[v]) failures++;
  endtask

  initial begin
    n_pkts = 16; d_bins = 32; s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0;
    coef_we = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_j(32);
    fork
      begin
        send(0);
        send(1);     // loaded while vector 0 is still being processed
      end
      begin
        receive(0);
        receive(1);
      end
    join
    @(posedge clk iff !busy);
    // reconfiguration: new N, new Doppler grid
    load_j(20);
    d_bins <= 20; n_pkts <= 10;
    send(2);
    receive(2);
    @(posedge clk iff !busy);
    repeat (2) @(posedge clk);
    checks++; if (ndone != 3 || nframes != 3) begin failures++; $display("done %0d, EVD frames %0d", ndone, nframes); end
    checks++; if (resid > 1e-6 * (absr(lmax) + 1.0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
