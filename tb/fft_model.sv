// fft_model -- behavioural model of an external K-point streaming FFT/IFFT
// engine, for simulation only (not synthesizable: it computes in real
// arithmetic).
//
// It collects K complex input beats (fft_in), computes the radix-2 DFT
// X[f] = sum_k x[k] exp(-/+ j 2 pi f k / K) (minus for forward, plus for
// INVERSE = 1), divides by 2^SHIFT (the engine's scaling schedule), rounds to
// the <24,5> format with saturation, and after LAT clocks streams the K
// results out in natural order, one per clock, the last one flagged.
// nframes counts completed transforms. Input is ignored during the first
// two clocks, while the design is held in reset.
module fft_model
  import rsp_pkg::*;
#(
  parameter int K = 16,
  parameter bit INVERSE = 0,
  parameter int SHIFT = 4,
  parameter int LAT = 5
) (
  input  logic     clk,
  input  cstream_t din,
  output cstream_t dout,
  output int       nframes
);
  real xr [K], xi [K];
  int  cnt;

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) r = (r << 1) | ((v >> b) & 1);
    return r;
  endfunction

  function automatic logic signed [W-1:0] q(real v);
    real s = v * real'(1 << FRAC);
    longint t = longint'(s);   // rounds to nearest
    if (t > (1 <<< (W - 1)) - 1) t = (1 <<< (W - 1)) - 1;
    if (t < -(1 <<< (W - 1))) t = -(1 <<< (W - 1));
    return W'(t);
  endfunction

  task automatic transform();
    int  bits = $clog2(K);
    real ar [K], ai [K];
    real sgn = INVERSE ? 1.0 : -1.0;
    for (int k = 0; k < K; k++) begin
      ar[bitrev(k, bits)] = xr[k];
      ai[bitrev(k, bits)] = xi[k];
    end
    for (int len = 2; len <= K; len *= 2) begin
      for (int st = 0; st < K; st += len) begin
        for (int m = 0; m < len / 2; m++) begin
          real ang = sgn * 2.0 * 3.14159265358979323846 * m / len;
          real wr = $cos(ang), wi = $sin(ang);
          int  p = st + m, r = st + m + len / 2;
          real tr = ar[r] * wr - ai[r] * wi;
          real ti = ar[r] * wi + ai[r] * wr;
          ar[r] = ar[p] - tr; ai[r] = ai[p] - ti;
          ar[p] = ar[p] + tr; ai[p] = ai[p] + ti;
        end
      end
    end
    for (int k = 0; k < K; k++) begin
      xr[k] = ar[k] / real'(1 << SHIFT);
      xi[k] = ai[k] / real'(1 << SHIFT);
    end
  endtask

  initial begin
    dout = '0;
    cnt = 0;
    nframes = 0;
    // the first clocks are skipped: the design under test is still in
    // reset and its stream registers do not hold valid values yet
    repeat (2) @(posedge clk);
    forever begin
      @(posedge clk);
      if (din.valid) begin
        xr[cnt] = real'(din.data.re) / real'(1 << FRAC);
        xi[cnt] = real'(din.data.im) / real'(1 << FRAC);
        cnt++;
        if (cnt == K) begin
          cnt = 0;
          transform();
          repeat (LAT) @(posedge clk);
          for (int k = 0; k < K; k++) begin
            dout.valid   <= 1'b1;
            dout.last    <= (k == K - 1);
            dout.data.re <= q(xr[k]);
            dout.data.im <= q(xi[k]);
            @(posedge clk);
          end
          dout <= '0;
          nframes++;
        end
      end
    end
  end
endmodule
