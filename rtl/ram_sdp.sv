// ram_sdp -- simple dual-port block RAM: one write port and one read port on
// the same clock. Every memory of the accelerator (BRAM A to L) is built from
// it; real and imaginary parts are kept in separate instances, as in the
// reference architecture.
//
// Timing: a write takes effect at the clock edge where we=1. rdata shows
// mem[raddr] one clock after raddr is presented (registered output, as a block
// RAM with its output latch). A read and a write to the same address in the
// same cycle return the old contents. The array starts at zero.
module ram_sdp #(
  parameter int WIDTH = 24,
  parameter int DEPTH = 1024,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
