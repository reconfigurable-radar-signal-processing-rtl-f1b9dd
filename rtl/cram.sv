// cram -- complex memory: a pair of ram_sdp instances, one for the real and one
// for the imaginary part ("Mem. Re" / "Mem. Im"), sharing addresses. Same
// timing as ram_sdp: read data one clock after the read address.
module cram #(
  parameter int WD    = 24,
  parameter int DEPTH = 1024,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic signed [WD-1:0] wdata_re,
  input  logic signed [WD-1:0] wdata_im,
  input  logic [AW-1:0]        raddr,
  output logic signed [WD-1:0] rdata_re,
  output logic signed [WD-1:0] rdata_im
);
  ram_sdp #(.WIDTH(WD), .DEPTH(DEPTH)) u_re (
    .clk, .we, .waddr, .wdata(wdata_re), .raddr, .rdata(rdata_re));
  ram_sdp #(.WIDTH(WD), .DEPTH(DEPTH)) u_im (
    .clk, .we, .waddr, .wdata(wdata_im), .raddr, .rdata(rdata_im));
endmodule
