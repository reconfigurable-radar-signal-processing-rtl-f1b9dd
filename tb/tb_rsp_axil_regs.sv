// tb_rsp_axil_regs -- self-checking test of the AXI4-Lite register file.
// 400 random AXI-Lite transactions (writes to every register, including the
// read-only ones and unmapped addresses, and reads of every register), with
// random gaps, address/data presented together, and random BREADY/RREADY
// delays, run against a reference model of the register map. The status
// inputs (busy flags, saturation level, done pulses of up to 3 packets per clock,
// MUSIC done, Doppler index, denominator) are driven randomly and tracked by
// the model, so the counters, the sticky saturation bit (set on a rising
// edge of the saturation level) and its clear are checked too. Also checked: reset values and that responses hold until
// accepted (by the module's own assertions).
module tb_rsp_axil_regs;
  localparam int AW = 6;
  logic clk = 0, rst_n = 0;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [AW-1:0] s_axil_awaddr, s_axil_araddr;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic [7:0] az_step, n_pkts, d_bins, doppler_idx;
  logic mf_busy, mu_busy, mf_ovf, mu_done;
  logic [3:0] mf_done_n;
  logic [47:0] den_min;
  int checks = 0, failures = 0;

  rsp_axil_regs #(.AW(AW), .N_RESET(8'd100), .D_RESET(8'd200)) dut (.*);
  always #5 clk = ~clk;

  // reference model
  logic [7:0] m_az = 1, m_n = 100, m_d = 200;
  logic m_ovf = 0, m_ovf_q = 0;
  int unsigned m_mf = 0, m_mu = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random status inputs; the model follows them at every clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      if (mf_ovf && !m_ovf_q) m_ovf = 1;
      m_ovf_q = mf_ovf;
      m_mf += mf_done_n;
      m_mu += mu_done;
    end
    mf_busy   <= $urandom_range(1);
    mu_busy   <= $urandom_range(1);
    mf_ovf    <= ($urandom_range(30) == 0) ? !mf_ovf : mf_ovf;
    mf_done_n <= ($urandom_range(3) == 0) ? 4'($urandom_range(3)) : 4'd0;
    mu_done   <= ($urandom_range(5) == 0);
    doppler_idx <= 8'($urandom);
    den_min   <= {16'($urandom), 32'($urandom)};
  end

  task automatic axil_write(logic [AW-1:0] a, logic [31:0] d);
    s_axil_awvalid <= 1; s_axil_wvalid <= 1; s_axil_awaddr <= a; s_axil_wdata <= d;
    do @(negedge clk); while (!(s_axil_awready && s_axil_wready));
    // model update happens at the accepting edge
    @(posedge clk);
    case (a[AW-1:2])
      0: m_az = d[7:0];
      1: m_n = d[7:0];
      2: m_d = d[7:0];
      3: if (d[2]) m_ovf = 0;
      default: ;
    endcase
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    repeat ($urandom_range(3)) @(posedge clk);
    s_axil_bready <= 1;
    do @(negedge clk); while (!s_axil_bvalid);
    checks++; if (s_axil_bresp != 2'b00) failures++;
    @(posedge clk);
    s_axil_bready <= 0;
  endtask

  task automatic axil_read(logic [AW-1:0] a);
    logic [31:0] exp;
    logic mfb, mub, ovf;
    logic [7:0] dop;
    logic [47:0] den;
    s_axil_arvalid <= 1; s_axil_araddr <= a;
    do @(negedge clk); while (!s_axil_arready);
    // values seen by the register file at the accepting edge
    mfb = mf_busy; mub = mu_busy; dop = doppler_idx; den = den_min;
    case (a[AW-1:2])
      0: exp = {24'd0, m_az};
      1: exp = {24'd0, m_n};
      2: exp = {24'd0, m_d};
      3: exp = {29'd0, m_ovf, mub, mfb};
      4: exp = {24'd0, dop};
      5: exp = m_mf + mf_done_n;
      6: exp = m_mu + mu_done;
      7: exp = den[31:0];
      8: exp = {16'd0, den[47:32]};
      default: exp = 0;
    endcase
    if (a[AW-1:2] == 5) exp = m_mf;
    if (a[AW-1:2] == 6) exp = m_mu;
    @(posedge clk);
    s_axil_arvalid <= 0;
    repeat ($urandom_range(3)) @(posedge clk);
    s_axil_rready <= 1;
    do @(negedge clk); while (!s_axil_rvalid);
    checks++;
    if (s_axil_rdata !== exp || s_axil_rresp != 2'b00) begin
      failures++;
      $display("read 0x%02h = 0x%08h, expected 0x%08h", a, s_axil_rdata, exp);
    end
    @(posedge clk);
    s_axil_rready <= 0;
  endtask

  initial begin
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_awaddr = 0; s_axil_wdata = 0;
    s_axil_bready = 0; s_axil_arvalid = 0; s_axil_araddr = 0; s_axil_rready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // reset values
    checks++; if (az_step != 1 || n_pkts != 100 || d_bins != 200) failures++;
    for (int r = 0; r < 3; r++) axil_read(AW'(4 * r));
    for (int t = 0; t < 400; t++) begin
      automatic logic [AW-1:0] a = AW'(4 * $urandom_range(10));
      repeat ($urandom_range(2)) @(posedge clk);
      if ($urandom_range(1)) axil_write(a, (a == 12) ? 32'(4 * $urandom_range(1)) : $urandom);
      else axil_read(a);
      checks++;
      if (az_step != m_az || n_pkts != m_n || d_bins != m_d) begin
        failures++; $display("configuration outputs differ from the model");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
