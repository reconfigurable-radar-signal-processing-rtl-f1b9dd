// tb_music_msg -- self-checking test of the MUSIC spectrum generation, peak
// search and dB conversion stage with S_MAX = 4, D_MAX = 16. BRAM I (the
// noise subspace) is modelled here with a registered read; BRAM J is loaded
// through the coefficient port with random unit-range values. Runs:
// S = 4 / D = 16, then S = 3 / D = 10 (reconfiguration of both sizes), then
// S = 4 / D = 16 with the steering column of bin 9 made orthogonal to the
// noise vectors (a sharp peak). Checked: every denominator
// sum_j |v(d)^H e_j|^2 bit-exactly against an integer model of the CM / CA /
// |z|^2 chain (read back from BRAM K), doppler_idx and den_min, every dB
// output bit-exactly against the same log2 approximation and within 0.3 dB
// of 10 log10(den_min/den) (or clipped at -128 dB), the number of beats and
// tlast under random m_axis back-pressure, and the spectrum time
// D*(S-1) + D + small constant.
module tb_music_msg;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int S_MAX = 4, D_MAX = 16, SW = 3, IAW = 2, DW = 5;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [SW-1:0] s_len;
  logic [7:0] d_bins;
  logic [IAW-1:0] i_raddr;
  mcplx_t i_rdata [S_MAX];
  logic coef_we;
  logic [SW-1:0] coef_bank;
  logic [DW-1:0] coef_addr;
  mcplx_t coef_data;
  logic [DW-1:0] doppler_idx;
  logic [AW_ACC-1:0] den_min;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic signed [DBW-1:0] m_axis_tdata;
  int checks = 0, failures = 0;

  music_msg #(.S_MAX(S_MAX), .D_MAX(D_MAX)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) m_axis_tready <= ($urandom_range(3) != 0);

  longint ir [S_MAX][S_MAX], ii [S_MAX][S_MAX];   // [element][vector]
  longint jr [S_MAX][D_MAX], ji [S_MAX][D_MAX];   // [element][bin]
  longint den [D_MAX];
  always @(posedge clk)
    for (int g = 0; g < S_MAX; g++) begin
      i_rdata[g].re <= MW'(ir[g][i_raddr]);
      i_rdata[g].im <= MW'(ii[g][i_raddr]);
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(longint x);
    longint mx = (64'sd1 <<< (MW - 1)) - 1;
    return (x > mx) ? mx : (x < -mx - 1) ? -mx - 1 : x;
  endfunction
  function automatic longint rnd(longint x);
    return sat((x + (64'sd1 <<< (MFRAC - 1))) >>> MFRAC);
  endfunction
  function automatic longint unit();
    return longint'($urandom_range(2 << MFRAC)) - (1 << MFRAC);
  endfunction

  task automatic model(int s, int dn);
    for (int d = 0; d < dn; d++) begin
      den[d] = 0;
      for (int j = 0; j < s - 1; j++) begin
        longint zr = 0, zi = 0, p;
        for (int g = 0; g < s; g++) begin
          zr += rnd(ir[g][j] * jr[g][d] + ii[g][j] * ji[g][d]);
          zi += rnd(ii[g][j] * jr[g][d] - ir[g][j] * ji[g][d]);
        end
        zr = sat(zr); zi = sat(zi);
        p = rnd(zr * zr + zi * zi);
        den[d] += (p < 0) ? 0 : p;
      end
    end
  endtask

  task automatic run(int s, int dn, bit ortho);
    int t0, t1, beats = 0, exp_idx = 0;
    longint dmin;
    for (int g = 0; g < S_MAX; g++) for (int j = 0; j < S_MAX; j++) begin ir[g][j] = unit(); ii[g][j] = unit(); end
    for (int g = 0; g < S_MAX; g++) for (int d = 0; d < D_MAX; d++) begin
      jr[g][d] = unit(); ji[g][d] = unit();
      if (ortho && d == 9) begin
        // bin 9: v = e_0 with the noise vectors having e_j[0] = 0
        jr[g][d] = (g == 0) ? (1 << MFRAC) : 0; ji[g][d] = 0;
      end
    end
    if (ortho) for (int j = 0; j < S_MAX; j++) begin ir[0][j] = 0; ii[0][j] = 0; end
    for (int g = 0; g < S_MAX; g++) for (int d = 0; d < D_MAX; d++) begin
      coef_we <= 1; coef_bank <= SW'(g); coef_addr <= DW'(d);
      coef_data.re <= MW'(jr[g][d]); coef_data.im <= MW'(ji[g][d]);
      @(posedge clk);
    end
    coef_we <= 0;
    model(s, dn);
    dmin = den[0];
    for (int d = 1; d < dn; d++) if (den[d] < dmin) begin dmin = den[d]; exp_idx = d; end
    s_len <= SW'(s); d_bins <= 8'(dn);
    start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10;
    wait (dut.state == 3);     // S_LOG
    t1 = $time / 10;
    checks++;
    if (t1 - t0 < dn * (s - 1) || t1 - t0 > dn * (s - 1) + 8) begin
      failures++; $display("spectrum took %0d clocks", t1 - t0);
    end
    // BRAM K contents
    for (int d = 0; d < dn; d++) begin
      checks++;
      if (longint'(dut.u_bram_k.mem[d]) != den[d]) begin
        failures++;
        if (failures < 8) $display("den[%0d] = %0d expected %0d", d, dut.u_bram_k.mem[d], den[d]);
      end
    end
    checks++;
    if (int'(doppler_idx) != exp_idx || longint'(den_min) != dmin) begin
      failures++; $display("peak %0d (%0d), expected %0d (%0d)", doppler_idx, den_min, exp_idx, dmin);
    end
    if (ortho) begin checks++; if (exp_idx != 9) failures++; end
    while (1) begin
      @(negedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        logic [15:0] la = log2_q6_10(AW_ACC'(den[beats])), lb = log2_q6_10(AW_ACC'(dmin));
        int diff = (la > lb) ? int'(la) - int'(lb) : 0;
        int dbm = (diff * 771) >>> 10;
        int exp_db = (dbm > 32768) ? -32768 : -dbm;
        real tru = (den[beats] == 0) ? 0.0 : 10.0 * $log10(real'((dmin == 0) ? 1 : dmin) / real'(den[beats]));
        checks++;
        if (int'(m_axis_tdata) != exp_db) begin
          failures++; $display("dB[%0d] = %0d expected %0d", beats, m_axis_tdata, exp_db);
        end
        checks++;
        if (dmin > 0 && tru > -127.0 && absr(real'(m_axis_tdata) / 256.0 - tru) > 0.3) begin
          failures++; $display("dB[%0d] = %f, true %f", beats, real'(m_axis_tdata) / 256.0, tru);
        end
        checks++;
        if (m_axis_tlast != (beats == dn - 1)) failures++;
        beats++;
        if (m_axis_tlast) break;
      end
    end
    @(posedge clk iff !busy);
    checks++; if (beats != dn) failures++;
  endtask

  initial begin
    start = 0; s_len = 4; d_bins = 16; coef_we = 0; coef_bank = 0; coef_addr = 0; coef_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(4, 16, 0);
    run(3, 10, 0);
    run(4, 16, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
