// rsp_axil_regs -- AXI4-Lite register file through which the processor
// reconfigures the accelerator at run time and reads its status.
//
// Register map (32-bit registers, byte addresses):
//   0x00  AZ_STEP   rw  angular precision in degrees, step of the Mod-I
//                       counter (1 = 181 azimuths, 2 = 91, 4 = 46); reset 1
//   0x04  N_PKTS    rw  packets per coherent interval used by MUSIC (even,
//                       4..N_MAX); reset 100
//   0x08  D_BINS    rw  Doppler bins of the MUSIC spectrum; reset 200
//   0x0C  STATUS    ro  bit 0 MF busy (any instance), bit 1 MUSIC busy,
//                       bit 2 MF saturation seen (sticky, set by a rising
//                       edge of the MF saturation flag, write 1 to clear)
//   0x10  DOPPLER   ro  peak Doppler bin of the last MUSIC run
//   0x14  MF_DONE   ro  number of packets the MF IPs have finished
//   0x18  MU_DONE   ro  number of MUSIC runs finished
//   0x1C  DEN_LO    ro  bits 31:0 of the smallest MUSIC denominator (peak
//                       height 1/den) of the last run
//   0x20  DEN_HI    ro  bits 47:32 of it
// That run-time parameters are set over AXI-Lite follows the reference
// architecture; the map, the reset values and the counters are this design's.
//
// Handshake: a write is accepted when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY = 1 for that clock); BVALID follows
// one clock later and is held until BREADY. A read is accepted when ARVALID is
// high and no read data is pending; RVALID follows one clock later. Responses
// are always OKAY. WSTRB is ignored (whole-register writes).
module rsp_axil_regs #(
  parameter int AW = 6,
  parameter logic [7:0] N_RESET = 8'd100,
  parameter logic [7:0] D_RESET = 8'd200
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_axil_awvalid,
  output logic          s_axil_awready,
  input  logic [AW-1:0] s_axil_awaddr,
  input  logic          s_axil_wvalid,
  output logic          s_axil_wready,
  input  logic [31:0]   s_axil_wdata,
  output logic          s_axil_bvalid,
  input  logic          s_axil_bready,
  output logic [1:0]    s_axil_bresp,
  input  logic          s_axil_arvalid,
  output logic          s_axil_arready,
  input  logic [AW-1:0] s_axil_araddr,
  output logic          s_axil_rvalid,
  input  logic          s_axil_rready,
  output logic [31:0]   s_axil_rdata,
  output logic [1:0]    s_axil_rresp,
  // configuration out
  output logic [7:0]    az_step,
  output logic [7:0]    n_pkts,
  output logic [7:0]    d_bins,
  // status in
  input  logic          mf_busy,
  input  logic          mu_busy,
  input  logic          mf_ovf,
  input  logic [3:0]    mf_done_n,     // MF packets finished in this clock
  input  logic          mu_done,
  input  logic [7:0]    doppler_idx,
  input  logic [47:0]   den_min
);
  logic        wr_go, rd_go, ovf_seen, ovf_q;
  logic [31:0] mf_cnt, mu_cnt;

  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign rd_go          = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_go;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      az_step <= 8'd1; n_pkts <= N_RESET; d_bins <= D_RESET;
      s_axil_bvalid <= 1'b0; s_axil_rvalid <= 1'b0; s_axil_rdata <= '0;
      ovf_seen <= 1'b0; ovf_q <= 1'b0; mf_cnt <= '0; mu_cnt <= '0;
    end else begin
      // mf_ovf is a level (the packet being processed saturated); its rising
      // edge sets the sticky bit, so a clear holds until the next event
      ovf_q <= mf_ovf;
      if (mf_ovf && !ovf_q) ovf_seen <= 1'b1;
      mf_cnt <= mf_cnt + 32'(mf_done_n);
      if (mu_done) mu_cnt <= mu_cnt + 1'b1;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr[AW-1:2])
          (AW-2)'(0): az_step <= s_axil_wdata[7:0];
          (AW-2)'(1): n_pkts  <= s_axil_wdata[7:0];
          (AW-2)'(2): d_bins  <= s_axil_wdata[7:0];
          (AW-2)'(3): if (s_axil_wdata[2]) ovf_seen <= 1'b0;
          default: ;
        endcase
      end
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr[AW-1:2])
          (AW-2)'(0): s_axil_rdata <= {24'd0, az_step};
          (AW-2)'(1): s_axil_rdata <= {24'd0, n_pkts};
          (AW-2)'(2): s_axil_rdata <= {24'd0, d_bins};
          (AW-2)'(3): s_axil_rdata <= {29'd0, ovf_seen, mu_busy, mf_busy};
          (AW-2)'(4): s_axil_rdata <= {24'd0, doppler_idx};
          (AW-2)'(5): s_axil_rdata <= mf_cnt;
          (AW-2)'(6): s_axil_rdata <= mu_cnt;
          (AW-2)'(7): s_axil_rdata <= den_min[31:0];
          (AW-2)'(8): s_axil_rdata <= {16'd0, den_min[47:32]};
          default:    s_axil_rdata <= 32'd0;
        endcase
      end
    end
  end

  a_bhold : assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_rhold : assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)));
endmodule
