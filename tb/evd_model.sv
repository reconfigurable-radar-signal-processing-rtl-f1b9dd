// evd_model -- behavioural model of the external eigen-decomposition engine
// used by the MUSIC covariance stage (simulation only, real arithmetic).
//
// It collects an S x S Hermitian matrix (row-major, S*S beats on din, S taken
// from the s input when the first beat arrives), diagonalises it with cyclic
// complex Jacobi rotations, sorts the eigenvalues in descending order and,
// after LAT clocks, streams the eigenvectors out column by column (largest
// eigenvalue first), S*S beats, in the 32-bit MUSIC fixed-point format.
// lambda_max / lambda_min report the extreme eigenvalues of the last matrix,
// resid the largest |A v - lambda v| (a self-check of the solver). Input
// is ignored during the first two clocks, while the design is in reset.
module evd_model
  import rsp_pkg::*;
  import tb_pkg::*;
#(
  parameter int S_MAX = 8,
  parameter int LAT = 7
) (
  input  logic     clk,
  input  int       s,
  input  mstream_t din,
  output mstream_t dout,
  output int       nframes,
  output real      lambda_max,
  output real      lambda_min,
  output real      resid
);
  real ar [S_MAX][S_MAX], ai [S_MAX][S_MAX];
  real vr [S_MAX][S_MAX], vi [S_MAX][S_MAX];
  real a0r [S_MAX][S_MAX], a0i [S_MAX][S_MAX];   // input copy
  int  ord [S_MAX];
  int  cnt, sl;

  function automatic logic signed [MW-1:0] q(real v);
    longint t = longint'(v * real'(1 << MFRAC));
    if (t > (1 <<< (MW - 1)) - 1) t = (1 <<< (MW - 1)) - 1;
    if (t < -(1 <<< (MW - 1))) t = -(1 <<< (MW - 1));
    return MW'(t);
  endfunction

  // A <- U^H A U and V <- V U for the rotation in the (p, qq) plane that
  // zeroes A[p][qq]
  task automatic rotate(int p, int qq, int n);
    real r, th, tau, t, c, sn, cr, ci;
    real u_pp_r, u_pp_i, u_pq_r, u_pq_i, u_qp_r, u_qp_i, u_qq_r, u_qq_i;
    real xr, xi, yr, yi;
    r = $sqrt(ar[p][qq] * ar[p][qq] + ai[p][qq] * ai[p][qq]);
    if (r < 1e-300) return;
    th  = $atan2(ai[p][qq], ar[p][qq]);
    tau = (ar[qq][qq] - ar[p][p]) / (2.0 * r);
    t   = ((tau >= 0.0) ? 1.0 : -1.0) / (absr(tau) + $sqrt(1.0 + tau * tau));
    c   = 1.0 / $sqrt(1.0 + t * t);
    sn  = t * c;
    cr = $cos(th); ci = $sin(th);
    // U = diag(1, e^{-j th}) * real rotation [[c, s], [-s, c]] in the (p, qq) plane
    u_pp_r = c;        u_pp_i = 0.0;
    u_pq_r = sn;       u_pq_i = 0.0;
    u_qp_r = -sn * cr; u_qp_i = sn * ci;
    u_qq_r = c * cr;   u_qq_i = -c * ci;
    // columns: A <- A U, V <- V U
    for (int x = 0; x < n; x++) begin
      xr = ar[x][p]; xi = ai[x][p]; yr = ar[x][qq]; yi = ai[x][qq];
      ar[x][p]  = xr * u_pp_r - xi * u_pp_i + yr * u_qp_r - yi * u_qp_i;
      ai[x][p]  = xr * u_pp_i + xi * u_pp_r + yr * u_qp_i + yi * u_qp_r;
      ar[x][qq] = xr * u_pq_r - xi * u_pq_i + yr * u_qq_r - yi * u_qq_i;
      ai[x][qq] = xr * u_pq_i + xi * u_pq_r + yr * u_qq_i + yi * u_qq_r;
      xr = vr[x][p]; xi = vi[x][p]; yr = vr[x][qq]; yi = vi[x][qq];
      vr[x][p]  = xr * u_pp_r - xi * u_pp_i + yr * u_qp_r - yi * u_qp_i;
      vi[x][p]  = xr * u_pp_i + xi * u_pp_r + yr * u_qp_i + yi * u_qp_r;
      vr[x][qq] = xr * u_pq_r - xi * u_pq_i + yr * u_qq_r - yi * u_qq_i;
      vi[x][qq] = xr * u_pq_i + xi * u_pq_r + yr * u_qq_i + yi * u_qq_r;
    end
    // rows: A <- U^H A
    for (int x = 0; x < n; x++) begin
      xr = ar[p][x]; xi = ai[p][x]; yr = ar[qq][x]; yi = ai[qq][x];
      ar[p][x]  = u_pp_r * xr + u_pp_i * xi + u_qp_r * yr + u_qp_i * yi;
      ai[p][x]  = u_pp_r * xi - u_pp_i * xr + u_qp_r * yi - u_qp_i * yr;
      ar[qq][x] = u_pq_r * xr + u_pq_i * xi + u_qq_r * yr + u_qq_i * yi;
      ai[qq][x] = u_pq_r * xi - u_pq_i * xr + u_qq_r * yi - u_qq_i * yr;
    end
  endtask

  task automatic jacobi(int n);
    real off;
    for (int x = 0; x < n; x++)
      for (int y = 0; y < n; y++) begin
        vr[x][y] = (x == y) ? 1.0 : 0.0;
        vi[x][y] = 0.0;
      end
    for (int sweep = 0; sweep < 30; sweep++) begin
      off = 0.0;
      for (int x = 0; x < n; x++)
        for (int y = 0; y < n; y++)
          if (x != y) off += ar[x][y] * ar[x][y] + ai[x][y] * ai[x][y];
      if (off < 1e-24) break;
      for (int p = 0; p < n - 1; p++)
        for (int qq = p + 1; qq < n; qq++) rotate(p, qq, n);
    end
    for (int x = 0; x < n; x++) ord[x] = x;
    for (int x = 0; x < n; x++)
      for (int y = x + 1; y < n; y++)
        if (ar[ord[y]][ord[y]] > ar[ord[x]][ord[x]]) begin
          int t = ord[x]; ord[x] = ord[y]; ord[y] = t;
        end
    lambda_max = ar[ord[0]][ord[0]];
    lambda_min = ar[ord[n-1]][ord[n-1]];
  endtask

  // largest |A0 v - lambda v| over all eigenpairs (self-check of the model)
  task automatic residual(int n);
    resid = 0.0;
    for (int e = 0; e < n; e++)
      for (int x = 0; x < n; x++) begin
        real sr = 0.0, si = 0.0, d;
        for (int y = 0; y < n; y++) begin
          sr += a0r[x][y] * vr[y][e] - a0i[x][y] * vi[y][e];
          si += a0r[x][y] * vi[y][e] + a0i[x][y] * vr[y][e];
        end
        sr -= ar[e][e] * vr[x][e];
        si -= ar[e][e] * vi[x][e];
        d = $sqrt(sr * sr + si * si);
        if (d > resid) resid = d;
      end
  endtask

  initial begin
    dout = '0;
    cnt = 0;
    nframes = 0;
    lambda_max = 0.0;
    lambda_min = 0.0;
    resid = 0.0;
    // the first clocks are skipped: the design under test is still in
    // reset and its stream registers do not hold valid values yet
    repeat (2) @(posedge clk);
    forever begin
      @(posedge clk);
      if (din.valid) begin
        if (cnt == 0) sl = s;
        ar[cnt / sl][cnt % sl] = real'(din.data.re) / real'(1 << MFRAC);
        ai[cnt / sl][cnt % sl] = real'(din.data.im) / real'(1 << MFRAC);
        a0r[cnt / sl][cnt % sl] = ar[cnt / sl][cnt % sl];
        a0i[cnt / sl][cnt % sl] = ai[cnt / sl][cnt % sl];
        cnt++;
        if (cnt == sl * sl) begin
          cnt = 0;
          jacobi(sl);
          residual(sl);
          repeat (LAT) @(posedge clk);
          for (int col = 0; col < sl; col++)
            for (int row = 0; row < sl; row++) begin
              dout.valid   <= 1'b1;
              dout.last    <= (col == sl - 1) && (row == sl - 1);
              dout.data.re <= q(vr[row][ord[col]]);
              dout.data.im <= q(vi[row][ord[col]]);
              @(posedge clk);
            end
          dout <= '0;
          nframes++;
        end
      end
    end
  end
endmodule
