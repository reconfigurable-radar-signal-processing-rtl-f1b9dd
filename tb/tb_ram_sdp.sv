// tb_ram_sdp -- self-checking test of ram_sdp: random writes, read-back with
// the one-clock read latency, and read-during-write returning old data.
module tb_ram_sdp;
  localparam int WIDTH = 24, DEPTH = 64, AW = 6;
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  ram_sdp #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = 0;
    // reads of the initial contents
    for (int i = 0; i < DEPTH; i++) begin
      raddr <= AW'(i);
      @(posedge clk); #1;
      checks++; if (rdata !== 0) failures++;
    end
    // fill with random data
    for (int i = 0; i < DEPTH; i++) begin
      we <= 1; waddr <= AW'(i); wdata <= WIDTH'($urandom);
      @(posedge clk); #1;
      ref_mem[i] = wdata;
    end
    we <= 0;
    // random reads
    for (int n = 0; n < 500; n++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      raddr <= AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("read mismatch addr %0d: %h vs %h", a, rdata, ref_mem[a]);
      end
    end
    // read and write the same address in one clock: old data is returned
    for (int n = 0; n < 50; n++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      automatic logic [WIDTH-1:0] nv = WIDTH'($urandom);
      we <= 1; waddr <= AW'(a); wdata <= nv; raddr <= AW'(a);
      @(posedge clk); #1;
      checks++; if (rdata !== ref_mem[a]) failures++;
      ref_mem[a] = nv;
      we <= 0;
      @(posedge clk); #1;
      checks++; if (rdata !== nv) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
