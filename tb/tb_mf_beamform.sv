// tb_mf_beamform -- self-checking test of the beamforming / matched-filter /
// IFFT stage at Q = 4, K = 16, I = 7. BRAM B is modelled here (registered
// read); random weights (BRAM C) and Golay spectrum (BRAM D) are loaded
// through the coefficient port. Run 1 uses az_step = 2 (rows 0, 2, 4, 6),
// run 2 az_step = 1 with large values so that the sum saturates. Checked:
// every IFFT input sample bit-exactly against an integer model of the
// CM / CA / saturation / conjugate-CM chain, the read-out image against a
// direct inverse DFT of those samples (2 LSB), the row order, the number of
// IFFT frames, the sticky saturation flag, and the time per azimuth
// (C0, K issue clocks, 3 pipeline clocks, LAT, K writes: 2K + LAT + 5
// clocks, +3 for the read-out start) under random m_axis back-pressure.
module tb_mf_beamform;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int Q = 4, K = 16, I = 7, LAT = 3, SHIFT = 2, QW = 2, KW = 4;
  logic clk = 0, rst_n = 0, start, busy, done, ovf;
  logic [7:0] az_step;
  logic [KW-1:0] b_raddr;
  cplx_t b_rdata [Q];
  logic coef_we, coef_sel;
  logic [QW-1:0] coef_bank;
  logic [KW-1:0] coef_addr;
  cplx_t coef_data;
  cstream_t ifft_in, ifft_out;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  cplx_t m_axis_tdata;
  int nframes;
  localparam real FS = real'((1 << (W - 1)) - 1);
  int checks = 0, failures = 0;

  cplx_t bmem [Q][K], cmem [Q][I], dmem [K];
  longint exp_re [I][K], exp_im [I][K];
  bit exp_ovf;
  int in_cnt;

  mf_beamform #(.Q(Q), .K(K), .I(I)) dut (.*);
  fft_model #(.K(K), .INVERSE(1), .SHIFT(SHIFT), .LAT(LAT)) u_ifft (.clk, .din(ifft_in), .dout(ifft_out), .nframes);
  always #5 clk = ~clk;

  always @(posedge clk) for (int q = 0; q < Q; q++) b_rdata[q] <= bmem[q][b_raddr];

  function automatic longint rsat(longint x, inout bit o);
    longint mx = (64'sd1 <<< (W - 1)) - 1, mn = -(64'sd1 <<< (W - 1));
    longint r = (x + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
    if (r > mx) begin r = mx; o = 1; end
    if (r < mn) begin r = mn; o = 1; end
    return r;
  endfunction
  function automatic longint sat(longint r, inout bit o);
    longint mx = (64'sd1 <<< (W - 1)) - 1, mn = -(64'sd1 <<< (W - 1));
    if (r > mx) begin r = mx; o = 1; end
    if (r < mn) begin r = mn; o = 1; end
    return r;
  endfunction

  // integer model of the IFFT input for row i, bin k
  task automatic model(int step);
    exp_ovf = 0;
    for (int i = 0; i < I; i += step)
      for (int k = 0; k < K; k++) begin
        longint sr = 0, si = 0, pr, pi, dr, di;
        for (int q = 0; q < Q; q++) begin
          longint ar = bmem[q][k].re, ai = bmem[q][k].im, br = cmem[q][i].re, bi = cmem[q][i].im;
          sr += rsat(ar * br - ai * bi, exp_ovf);
          si += rsat(ar * bi + ai * br, exp_ovf);
        end
        sr = sat(sr, exp_ovf); si = sat(si, exp_ovf);
        dr = dmem[k].re; di = -longint'(dmem[k].im);
        pr = rsat(sr * dr - si * di, exp_ovf);
        pi = rsat(sr * di + si * dr, exp_ovf);
        exp_re[i][k] = pr; exp_im[i][k] = pi;
      end
  endtask

  // bit-exact check of the IFFT input stream
  int cur_row;
  always @(posedge clk) if (ifft_in.valid) begin
    automatic int i = cur_row, k = in_cnt % K;
    checks++;
    if (longint'(ifft_in.data.re) != exp_re[i][k] || longint'(ifft_in.data.im) != exp_im[i][k]) begin
      failures++;
      if (failures < 8) $display("ifft_in row %0d bin %0d: %0d %0d exp %0d %0d", i, k, int'(ifft_in.data.re), int'(ifft_in.data.im), exp_re[i][k], exp_im[i][k]);
    end
    checks++;
    if (ifft_in.last != (k == K - 1)) failures++;
    in_cnt++;
    if (k == K - 1) cur_row += az_step;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) m_axis_tready <= ($urandom_range(3) != 0);

  task automatic load(int sh);
    for (int q = 0; q < Q; q++) for (int k = 0; k < K; k++) begin
      bmem[q][k].re = W'($signed(W'($urandom)) >>> sh);
      bmem[q][k].im = W'($signed(W'($urandom)) >>> sh);
    end
    for (int q = 0; q < Q; q++) for (int i = 0; i < I; i++) begin
      cmem[q][i].re = W'($signed(W'($urandom)) >>> sh);
      cmem[q][i].im = W'($signed(W'($urandom)) >>> sh);
      coef_we <= 1; coef_sel <= 0; coef_bank <= QW'(q); coef_addr <= KW'(i); coef_data <= cmem[q][i];
      @(posedge clk);
    end
    for (int k = 0; k < K; k++) begin
      dmem[k].re = W'($signed(W'($urandom)) >>> sh);
      dmem[k].im = W'($signed(W'($urandom)) >>> sh);
      coef_we <= 1; coef_sel <= 1; coef_bank <= 0; coef_addr <= KW'(k); coef_data <= dmem[k];
      @(posedge clk);
    end
    coef_we <= 0;
  endtask

  task automatic run(int step, int sh);
    int t0, t1, beats, rows, exp_rows;
    load(sh);
    model(step);
    az_step <= 8'(step);
    cur_row = 0; in_cnt = 0;
    start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10;
    // read-out
    beats = 0;
    exp_rows = (I - 1) / step + 1;
    while (1) begin
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        int i = (beats / K) * step, n = beats % K;
        real xr = 0, xi = 0;
        if (beats == 0) t1 = $time / 10;
        for (int k = 0; k < K; k++) begin
          real a = 2.0 * PI * n * k / K;
          xr += real'(exp_re[i][k]) * $cos(a) - real'(exp_im[i][k]) * $sin(a);
          xi += real'(exp_re[i][k]) * $sin(a) + real'(exp_im[i][k]) * $cos(a);
        end
        xr /= (1 << SHIFT); xi /= (1 << SHIFT);
        if (xr > FS) xr = FS; if (xr < -FS - 1) xr = -FS - 1;
        if (xi > FS) xi = FS; if (xi < -FS - 1) xi = -FS - 1;
        checks++;
        if (absr(real'(m_axis_tdata.re) - xr) > 2.0 || absr(real'(m_axis_tdata.im) - xi) > 2.0) begin
          failures++;
          if (failures < 8) $display("E row %0d n %0d: %0d %0d exp %f %f", i, n, int'(m_axis_tdata.re), int'(m_axis_tdata.im), xr, xi);
        end
        checks++;
        if (m_axis_tlast != (beats == exp_rows * K - 1)) failures++;
        beats++;
        if (m_axis_tlast) break;
      end
    end
    @(posedge clk);
    checks++; if (beats != exp_rows * K) begin failures++; $display("beats %0d", beats); end
    checks++; if (ovf != exp_ovf) begin failures++; $display("ovf %b exp %b", ovf, exp_ovf); end
    checks++; if (busy) failures++;
    rows = exp_rows;
    checks++;
    if ((t1 - t0) < rows * (2 * K + LAT + 5) || (t1 - t0) > rows * (2 * K + LAT + 5) + 3) begin
      failures++;
      $display("image took %0d clocks, expected about %0d", t1 - t0, rows * (2 * K + LAT + 5));
    end
  endtask

  initial begin
    start = 0; az_step = 1; coef_we = 0; coef_sel = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, 4);
    checks++; if (nframes != 4) failures++;
    run(1, 0);
    checks++; if (nframes != 4 + 7) failures++;
    checks++; if (!exp_ovf) failures++;   // the second run must exercise saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
