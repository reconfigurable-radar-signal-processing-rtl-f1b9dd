// tb_cmul -- self-checking test of the complex multiplier: random operands in
// the <24,5> format, both plain and conjugated products, compared with a
// 64-bit integer reference of round-half-up and saturation; large operands
// exercise the saturation flag.
module tb_cmul;
  localparam int W = 24, FRAC = 19;
  logic clk = 0;
  logic signed [W-1:0] a_re, a_im, b_re, b_im, p_re, p_im;
  logic conj_b, ovf;
  int checks = 0, failures = 0, sat_seen = 0;

  cmul #(.W(W), .FRAC(FRAC)) dut (.*);
  always #5 clk = ~clk;

  function automatic longint rs(longint x, output bit o);
    longint mx = (64'sd1 <<< (W - 1)) - 1, mn = -(64'sd1 <<< (W - 1));
    longint r = (x + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
    o = (r > mx) || (r < mn);
    if (r > mx) r = mx;
    if (r < mn) r = mn;
    return r;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      longint ar, ai, br, bi, er, ei;
      bit o1, o2;
      automatic int sh = (n < 2000) ? 6 : 0;   // second half: full-range operands, saturation
      ar = longint'($signed(W'($urandom))) >>> sh;
      ai = longint'($signed(W'($urandom))) >>> sh;
      br = longint'($signed(W'($urandom))) >>> sh;
      bi = longint'($signed(W'($urandom))) >>> sh;
      a_re = W'(ar); a_im = W'(ai); b_re = W'(br); b_im = W'(bi);
      conj_b = n[0];
      if (conj_b) bi = -bi;
      er = rs(ar * br - ai * bi, o1);
      ei = rs(ar * bi + ai * br, o2);
      @(posedge clk); #1;
      checks++;
      if (p_re !== W'(er) || p_im !== W'(ei) || ovf !== (o1 | o2)) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d: got %0d %0d %b exp %0d %0d %b", n, p_re, p_im, ovf, er, ei, o1|o2);
      end
      if (o1 | o2) sat_seen++;
    end
    // saturation must have been exercised
    checks++; if (sat_seen == 0) failures++;
    // a known value: (1.5 + 2j) * conj(0.5 - 1j) = (1.5+2j)(0.5+1j) = -1.25 + 2.5j
    a_re = W'(3 <<< (FRAC - 1)); a_im = W'(2 <<< FRAC);
    b_re = W'(1 <<< (FRAC - 1)); b_im = -W'(1 <<< FRAC); conj_b = 1;
    @(posedge clk); #1;
    checks++;
    if (p_re !== -W'(5 <<< (FRAC - 2)) || p_im !== W'(5 <<< (FRAC - 1))) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
