// cadd -- N-input complex adder (CA): sum_re = sum of in_re[n], likewise for
// the imaginary part. The result carries ceil(log2 N) extra bits so the sum
// can never overflow; narrowing it is left to the user of the block.
//
// Timing: one register stage; the sum appears one clock after the operands.
module cadd #(
  parameter int N = 32,
  parameter int W = 24,
  localparam int GW = (N > 1) ? $clog2(N) : 1,
  localparam int SW = W + GW
) (
  input  logic                clk,
  input  logic signed [W-1:0] in_re [N],
  input  logic signed [W-1:0] in_im [N],
  output logic signed [SW-1:0] sum_re,
  output logic signed [SW-1:0] sum_im
);
  logic signed [SW-1:0] acc_re, acc_im;

  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int n = 0; n < N; n++) begin
      acc_re += SW'(in_re[n]);
      acc_im += SW'(in_im[n]);
    end
  end

  always_ff @(posedge clk) begin
    sum_re <= acc_re;
    sum_im <= acc_im;
  end
endmodule
