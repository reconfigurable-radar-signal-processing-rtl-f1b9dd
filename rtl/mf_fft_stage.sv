// mf_fft_stage -- 1D-FFT stage of the matched filter (fast-time FFT of every
// antenna channel of one received packet).
//
// A packet of Q x K complex samples arrives on the s_axis stream (antenna q
// outer, fast-time sample k inner) and is buffered in BRAM A (separate real
// and imaginary memories, depth Q*K). The FSM then walks the antennas with a
// Mod-Q counter (state C0, parameter update), reads the K samples of antenna q
// with a Mod-K counter and the address calculation q*K+k (C1), concatenates
// real and imaginary parts into the FFT input word and streams them to the
// external K-point FFT engine, waits for the K transformed samples (C2), and
// splits each result back into real/imaginary parts and writes it into bank q
// of BRAM B (C3 closes the antenna; after Q antennas the stage is done). The
// states, counters and BRAM roles follow the reference architecture; the
// stream formats, the one-sample-per-cycle rate and the handshake with the
// beamformer (b_free) are this design's choices.
//
// Interface:
//   s_axis_*   packet input with tvalid/tready; tready is 1 while BRAM A is
//              being filled. tlast must mark sample Q*K-1.
//   fft_in     K samples per antenna, one per clock, last on sample K-1.
//   fft_out    K results in natural order, no back-pressure (any latency).
//   b_*        write port of the Q-bank BRAM B (bank = antenna).
//   b_free     1 when BRAM B may be overwritten (beamformer idle).
//   done       one-clock pulse when all Q antennas are in BRAM B.
// Timing: loading takes Q*K accepted beats; the transform then takes, per
// antenna, 1 (C0) + K (C1) + FFT latency + K (C2) + 1 (C3) clocks.
module mf_fft_stage
  import rsp_pkg::*;
#(
  parameter int Q = 32,
  parameter int K = 1024,
  localparam int QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int KW = $clog2(K),
  localparam int AD = Q * K,
  localparam int AAW = $clog2(AD)
) (
  input  logic          clk,
  input  logic          rst_n,
  // packet input (DMA)
  input  logic          s_axis_tvalid,
  output logic          s_axis_tready,
  input  cplx_t         s_axis_tdata,
  input  logic          s_axis_tlast,
  // external K-point FFT
  output cstream_t      fft_in,
  input  cstream_t      fft_out,
  // BRAM B write port
  output logic          b_we,
  output logic [QW-1:0] b_bank,
  output logic [KW-1:0] b_addr,
  output cplx_t         b_wdata,
  input  logic          b_free,
  output logic          busy,
  output logic          done
);
  typedef enum logic [2:0] {S_LOAD, S_WAIT, S_C0, S_C1, S_C2, S_C3} state_t;
  state_t state;

  logic [AAW-1:0] la;          // BRAM A load address
  logic [QW-1:0]  q;           // Mod-Q counter
  logic [KW-1:0]  k;           // Mod-K counter (reads)
  logic [KW-1:0]  ko;          // Mod-K counter (writes)
  logic           rd_v, rd_last;
  logic           a_we;
  logic [AAW-1:0] a_raddr;
  logic signed [W-1:0] a_re, a_im;

  // BRAM A (real and imaginary parts in separate memories)
  assign a_we = (state == S_LOAD) && s_axis_tvalid;
  cram #(.WD(W), .DEPTH(AD)) u_bram_a (
    .clk, .we(a_we), .waddr(la), .wdata_re(s_axis_tdata.re), .wdata_im(s_axis_tdata.im),
    .raddr(a_raddr), .rdata_re(a_re), .rdata_im(a_im));

  // address calculation
  assign a_raddr = AAW'(q) * AAW'(K) + AAW'(k);
  assign s_axis_tready = (state == S_LOAD);
  assign busy = (state != S_LOAD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      la <= '0; q <= '0; k <= '0; ko <= '0;
      rd_v <= 1'b0; rd_last <= 1'b0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      rd_v    <= 1'b0;
      rd_last <= 1'b0;
      unique case (state)
        S_LOAD: if (s_axis_tvalid) begin
          if (la == AAW'(AD - 1)) begin
            la <= '0;
            state <= S_WAIT;
          end else la <= la + 1'b1;
        end
        S_WAIT: if (b_free) begin
          q <= '0;
          state <= S_C0;
        end
        S_C0: begin                      // parameter update
          k <= '0; ko <= '0;
          state <= S_C1;
        end
        S_C1: begin                      // read K samples
          rd_v <= 1'b1;
          rd_last <= (k == KW'(K - 1));
          if (k == KW'(K - 1)) state <= S_C2;
          else k <= k + 1'b1;
        end
        S_C2: if (fft_out.valid) begin   // Fourier transform, write results
          ko <= ko + 1'b1;
          if (ko == KW'(K - 1)) state <= S_C3;
        end
        S_C3: begin
          if (q == QW'(Q - 1)) begin
            done <= 1'b1;
            state <= S_LOAD;
          end else begin
            q <= q + 1'b1;
            state <= S_C0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // concat: FFT input word
  always_comb begin
    fft_in.valid   = rd_v;
    fft_in.last    = rd_last;
    fft_in.data.re = a_re;
    fft_in.data.im = a_im;
  end

  // extraction: BRAM B write
  always_comb begin
    b_we    = (state == S_C2) && fft_out.valid;
    b_bank  = q;
    b_addr  = ko;
    b_wdata = fft_out.data;
  end

  // the DMA must end a packet exactly after Q*K samples
  a_tlast : assert property (@(posedge clk) disable iff (!rst_n)
    (s_axis_tvalid && s_axis_tready) |-> (s_axis_tlast == (la == AAW'(AD - 1))));
  // the FFT must deliver exactly K samples, the last one flagged
  a_fftlast : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_C2 && fft_out.valid) |-> (fft_out.last == (ko == KW'(K - 1))));
endmodule
