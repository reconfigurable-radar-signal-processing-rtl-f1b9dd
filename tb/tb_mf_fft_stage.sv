// tb_mf_fft_stage -- self-checking test of the matched filter's FFT stage at
// Q = 4 antennas, K = 16 samples. Two random packets are streamed in (with
// gaps in tvalid); the FFT engine is the behavioural fft_model. Every BRAM B
// write is checked against a direct DFT computed here (within 2 LSB), each
// bank must receive exactly K writes, and the transform time must match
// Q*(2K + LAT + 3) clocks. The second packet is only transformed after b_free.
module tb_mf_fft_stage;
  import rsp_pkg::*;
  import tb_pkg::*;
  localparam int Q = 4, K = 16, LAT = 5, SHIFT = 4, QW = 2, KW = 4;
  logic clk = 0, rst_n = 0;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  cplx_t s_axis_tdata;
  cstream_t fft_in, fft_out;
  logic b_we, b_free, busy, done;
  logic [QW-1:0] b_bank;
  logic [KW-1:0] b_addr;
  cplx_t b_wdata;
  int nframes;
  int checks = 0, failures = 0;
  cplx_t pkt [Q*K];
  int nw [Q];
  cplx_t bmem [Q][K];

  mf_fft_stage #(.Q(Q), .K(K)) dut (.*);
  fft_model #(.K(K), .INVERSE(0), .SHIFT(SHIFT), .LAT(LAT)) u_fft (.clk, .din(fft_in), .dout(fft_out), .nframes);
  always #5 clk = ~clk;

  always @(posedge clk) if (b_we) begin
    bmem[b_bank][b_addr] <= b_wdata;
    nw[b_bank]++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_packet();
    for (int n = 0; n < Q * K; n++) begin
      pkt[n].re = W'($signed(W'($urandom)) >>> 3);
      pkt[n].im = W'($signed(W'($urandom)) >>> 3);
    end
    for (int n = 0; n < Q * K; n++) begin
      while ($urandom_range(3) == 0) begin
        s_axis_tvalid <= 0; @(posedge clk);
      end
      s_axis_tvalid <= 1; s_axis_tdata <= pkt[n]; s_axis_tlast <= (n == Q * K - 1);
      do @(negedge clk); while (!s_axis_tready);   // accepted at the next edge
      @(posedge clk);
    end
    s_axis_tvalid <= 0; s_axis_tlast <= 0;
  endtask

  task automatic check_packet();
    for (int q = 0; q < Q; q++) begin
      checks++;
      if (nw[q] != K) begin failures++; $display("bank %0d got %0d writes", q, nw[q]); end
      for (int f = 0; f < K; f++) begin
        real xr = 0, xi = 0, er, ei;
        for (int k = 0; k < K; k++) begin
          real a = -2.0 * 3.14159265358979 * f * k / K;
          real sr = real'(pkt[q*K+k].re), si = real'(pkt[q*K+k].im);
          xr += sr * $cos(a) - si * $sin(a);
          xi += sr * $sin(a) + si * $cos(a);
        end
        er = xr / (1 << SHIFT); ei = xi / (1 << SHIFT);
        checks++;
        if (absr(real'(bmem[q][f].re) - er) > 2.0 || absr(real'(bmem[q][f].im) - ei) > 2.0) begin
          failures++;
          if (failures < 8) $display("q=%0d f=%0d got %0d %0d exp %f %f", q, f, bmem[q][f].re, bmem[q][f].im, er, ei);
        end
      end
    end
  endtask

  initial begin
    int t0, t1;
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0; b_free = 1;
    for (int q = 0; q < Q; q++) nw[q] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // packet 1
    send_packet();
    t0 = $time / 10;
    @(posedge clk iff done);
    t1 = $time / 10;
    check_packet();
    checks++;
    if ((t1 - t0) < Q * (2 * K + LAT + 3) - 2 || (t1 - t0) > Q * (2 * K + LAT + 3) + 2) begin
      failures++;
      $display("transform took %0d clocks, expected %0d", t1 - t0, Q * (2 * K + LAT + 3));
    end
    // packet 2: B is not free, the stage must wait
    for (int q = 0; q < Q; q++) nw[q] = 0;
    b_free = 0;
    send_packet();
    repeat (100) @(posedge clk);
    checks++;
    if (nframes != Q || nw[0] != 0) begin failures++; $display("stage did not wait for b_free"); end
    b_free = 1;
    @(posedge clk iff done);
    check_packet();
    checks++; if (nframes != 2 * Q) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
