// tb_music_cov_evd -- self-checking test of the MUSIC covariance / EVD
// hand-off stage with N_MAX = 16. Three slow-time vectors are processed:
// N = 8 random samples, N = 16 samples of a complex exponential plus small
// noise, and N = 12 random full-scale samples (largest products; the 32-bit
// format cannot overflow for 24-bit inputs). The EVD engine is the behavioural evd_model.
// Checked: every EVD input element bit-exactly against an integer model of
// sum_m y[m+r] conj(y[m+c]) (same rounding as the CM) times round(2^24/M);
// the stream length and last flag; that BRAM I receives exactly the
// eigenvectors 1..S-1 (bank = element, address = vector - 1); s_len; one
// done pulse per vector; no EVD input while i_free is low; and, for the exponential, a rank-one covariance
// (largest eigenvalue / smallest > 100), and the model's own eigen-residual. The input stream has random gaps.
module tb_music_cov_evd;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int N_MAX = 16, S_MAX = 8, SW = 4, IAW = 3;
  logic clk = 0, rst_n = 0;
  logic [7:0] n_pkts;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  cplx_t s_axis_tdata;
  mstream_t evd_in, evd_out;
  logic i_we;
  logic [SW-1:0] i_bank, s_len;
  logic [IAW-1:0] i_addr;
  mcplx_t i_wdata;
  logic busy, done, i_free;
  int nframes, ndone = 0;
  real lmax, lmin, resid;
  int checks = 0, failures = 0;

  music_cov_evd #(.N_MAX(N_MAX)) dut (.*);
  evd_model #(.S_MAX(S_MAX), .LAT(9)) u_evd (.clk, .s(int'(s_len)), .din(evd_in), .dout(evd_out),
    .nframes, .lambda_max(lmax), .lambda_min(lmin), .resid);
  always #5 clk = ~clk;

  longint yr [N_MAX], yi [N_MAX];
  longint er [S_MAX*S_MAX], ei [S_MAX*S_MAX];
  mcplx_t ev [S_MAX*S_MAX];          // EVD results as streamed (column-major)
  mcplx_t imem [S_MAX][S_MAX];
  int nin, nout, nwr;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && done) ndone++;
  always @(posedge clk) if (evd_in.valid) begin
    checks++;
    if (longint'(evd_in.data.re) != er[nin] || longint'(evd_in.data.im) != ei[nin]) begin
      failures++;
      if (failures < 8) $display("evd_in[%0d] = %0d %0d, expected %0d %0d", nin,
        longint'(evd_in.data.re), longint'(evd_in.data.im), er[nin], ei[nin]);
    end
    checks++;
    if (evd_in.last != (nin == int'(s_len) * int'(s_len) - 1)) failures++;
    nin++;
  end
  always @(posedge clk) if (evd_out.valid) begin ev[nout] <= evd_out.data; nout++; end
  always @(posedge clk) if (i_we) begin imem[i_bank][i_addr] <= i_wdata; nwr++; end

  function automatic longint rnd(longint x);
    return (x + (64'sd1 <<< (MFRAC - 1))) >>> MFRAC;
  endfunction
  function automatic longint sat(longint x);
    longint mx = (64'sd1 <<< (MW - 1)) - 1;
    return (x > mx) ? mx : (x < -mx - 1) ? -mx - 1 : x;
  endfunction

  task automatic model(int n);
    int s = n / 2, m = s + 1;
    longint recip = ((64'sd1 <<< 24) + m / 2) / m;
    for (int r = 0; r < s; r++) for (int c = 0; c < s; c++) begin
      longint hr = 0, hi = 0;
      for (int k = 0; k < m; k++) begin
        longint ar = yr[k+r], ai = yi[k+r], br = yr[k+c], bi = -yi[k+c];
        hr += sat(rnd(ar * br - ai * bi));
        hi += sat(rnd(ar * bi + ai * br));
      end
      er[r*s+c] = sat((hr * recip + (64'sd1 <<< 23)) >>> 24);
      ei[r*s+c] = sat((hi * recip + (64'sd1 <<< 23)) >>> 24);
    end
  endtask

  task automatic run(int n, int kind);
    int s = n / 2;
    for (int k = 0; k < n; k++) begin
      if (kind == 1) begin
        real ph = 2.0 * PI * 0.23 * k;
        yr[k] = longint'((1.5 * $cos(ph) + 0.001 * (real'($urandom_range(100)) / 50.0 - 1.0)) * (1 << FRAC));
        yi[k] = longint'((1.5 * $sin(ph) + 0.001 * (real'($urandom_range(100)) / 50.0 - 1.0)) * (1 << FRAC));
      end else begin
        int sh = (kind == 2) ? 0 : 4;
        yr[k] = longint'($signed(W'($urandom)) >>> sh);
        yi[k] = longint'($signed(W'($urandom)) >>> sh);
      end
    end
    model(n);
    nin = 0; nout = 0; nwr = 0;
    n_pkts <= 8'(n);
    for (int k = 0; k < n; k++) begin
      while ($urandom_range(3) == 0) begin s_axis_tvalid <= 0; @(posedge clk); end
      s_axis_tvalid <= 1; s_axis_tlast <= (k == n - 1);
      s_axis_tdata.re <= W'(yr[k]); s_axis_tdata.im <= W'(yi[k]);
      do @(negedge clk); while (!s_axis_tready);
      @(posedge clk);
    end
    s_axis_tvalid <= 0; s_axis_tlast <= 0;
    @(posedge clk iff done);
    @(posedge clk);
    checks++; if (int'(s_len) != s) begin failures++; $display("s_len %0d", s_len); end
    checks++; if (nin != s * s) begin failures++; $display("evd_in beats %0d", nin); end
    checks++; if (nwr != s * (s - 1)) begin failures++; $display("BRAM I writes %0d", nwr); end
    for (int j = 1; j < s; j++) for (int e = 0; e < s; e++) begin
      checks++;
      if (imem[e][j-1] != ev[j*s+e]) begin
        failures++;
        if (failures < 8) $display("BRAM I[%0d][%0d] wrong", e, j - 1);
      end
    end
    if (kind == 1) begin
      checks++;
      if (!(lmax > 100.0 * absr(lmin))) begin failures++; $display("not rank one: %f %f", lmax, lmin); end
    end
    checks++;
    if (resid > 1e-6 * (absr(lmax) + 1.0)) begin failures++; $display("EVD model residual %g", resid); end
    checks++; if (busy) failures++;
  endtask

  initial begin
    i_free = 1; n_pkts = 8; s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(8, 0);
    // the EVD must wait while BRAM I is in use
    fork
      run(16, 1);
      begin
        i_free = 0;
        repeat (1000) @(posedge clk);
        checks++; if (nin != 0) begin failures++; $display("EVD started while BRAM I busy"); end
        i_free = 1;
      end
    join
    run(12, 2);
    checks++; if (ndone != 3 || nframes != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
