// tb_cadd -- self-checking test of the N-input complex adder: random and
// extreme operands against an integer sum; the widened result must never
// wrap.
module tb_cadd;
  localparam int N = 32, W = 24, SW = W + 5;
  logic clk = 0;
  logic signed [W-1:0] in_re [N], in_im [N];
  logic signed [SW-1:0] sum_re, sum_im;
  int checks = 0, failures = 0;

  cadd #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      automatic longint er = 0, ei = 0;
      for (int n = 0; n < N; n++) begin
        case (t)
          0: begin in_re[n] = {1'b0, {(W-1){1'b1}}}; in_im[n] = {1'b1, {(W-1){1'b0}}}; end
          1: begin in_re[n] = {1'b1, {(W-1){1'b0}}}; in_im[n] = {1'b0, {(W-1){1'b1}}}; end
          default: begin in_re[n] = W'($urandom); in_im[n] = W'($urandom); end
        endcase
        er += longint'(in_re[n]);
        ei += longint'(in_im[n]);
      end
      @(posedge clk); #1;
      checks++;
      if (longint'(sum_re) != er || longint'(sum_im) != ei) begin
        failures++;
        if (failures < 10) $display("t=%0d got %0d %0d exp %0d %0d", t, sum_re, sum_im, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
