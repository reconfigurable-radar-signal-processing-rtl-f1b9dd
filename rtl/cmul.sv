// cmul -- complex multiplier (CM): p = a * b, or a * conj(b) when conj_b = 1.
//
// Four real multipliers form ac, bd, ad and bc of (a+ib)(c+id); one adder and
// one subtractor combine them into the real and imaginary parts, as in the CM
// unit of the reference architecture. The 2*FRAC-fraction products are rounded
// (half up) back to FRAC fractional bits and saturated to W bits; ovf is 1 for
// a product that saturated. Conjugating b is this design's way of providing
// the conjugates the algorithm needs (Golay spectrum, Doppler steering
// vectors, |z|^2).
//
// Timing: one register stage; p and ovf appear one clock after the operands.
module cmul #(
  parameter int W    = 24,
  parameter int FRAC = 19
) (
  input  logic                clk,
  input  logic signed [W-1:0] a_re,
  input  logic signed [W-1:0] a_im,
  input  logic signed [W-1:0] b_re,
  input  logic signed [W-1:0] b_im,
  input  logic                conj_b,
  output logic signed [W-1:0] p_re,
  output logic signed [W-1:0] p_im,
  output logic                ovf
);
  localparam int PW = 2 * W + 2;
  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (W - 1));
  localparam logic signed [PW-1:0] HALF = PW'(64'sd1 <<< (FRAC - 1));

  logic signed [W:0]    bim;
  logic signed [PW-1:0] ac, bd, ad, bc, re_f, im_f, re_r, im_r;
  logic                 ovf_re, ovf_im;
  logic signed [W-1:0]  re_s, im_s;

  always_comb begin
    bim  = conj_b ? -(W+1)'(b_im) : (W+1)'(b_im);
    ac   = PW'(a_re) * PW'(b_re);
    bd   = PW'(a_im) * PW'(bim);
    ad   = PW'(a_re) * PW'(bim);
    bc   = PW'(a_im) * PW'(b_re);
    re_f = ac - bd;
    im_f = ad + bc;
    re_r = (re_f + HALF) >>> FRAC;
    im_r = (im_f + HALF) >>> FRAC;
    ovf_re = (re_r > MAXV) || (re_r < MINV);
    ovf_im = (im_r > MAXV) || (im_r < MINV);
    re_s = (re_r > MAXV) ? MAXV[W-1:0] : (re_r < MINV) ? MINV[W-1:0] : re_r[W-1:0];
    im_s = (im_r > MAXV) ? MAXV[W-1:0] : (im_r < MINV) ? MINV[W-1:0] : im_r[W-1:0];
  end

  always_ff @(posedge clk) begin
    p_re <= re_s;
    p_im <= im_s;
    ovf  <= ovf_re | ovf_im;
  end
endmodule
