// rsp_pkg -- types, constants and small functions shared by the radar signal
// processing (RSP) accelerator.
//
// The matched-filter (MF) datapath works on complex samples in the <24,5>
// fixed-point word length chosen for the MF IP: 24-bit two's complement with 5
// integer bits (sign included) and 19 fractional bits. The MUSIC datapath uses
// a wider 32-bit word with the same 19 fractional bits; this replaces the
// single-precision floating point used for MUSIC in the reference design and
// is this design's own choice.
//
// Streams (packet input, FFT/IFFT and EVD links, results) carry one complex
// sample per beat with a valid bit and a last bit marking the final beat.
package rsp_pkg;

  // MF word length <W,L> = <24,5>
  localparam int W    = 24;
  localparam int FRAC = 19;

  // MUSIC word length (fixed point in place of single precision)
  localparam int MW    = 32;
  localparam int MFRAC = 19;
  // accumulator width of the covariance memory (BRAM H) and of the spectrum
  // denominator (BRAM K)
  localparam int AW_ACC = 48;

  // spectrum output in dB, signed Q8.8
  localparam int DBW = 16;

  typedef struct packed {
    logic signed [W-1:0] im;
    logic signed [W-1:0] re;
  } cplx_t;

  typedef struct packed {
    logic signed [MW-1:0] im;
    logic signed [MW-1:0] re;
  } mcplx_t;

  // one beat of a complex stream without back-pressure (FFT, IFFT, EVD links)
  typedef struct packed {
    logic  valid;
    logic  last;
    cplx_t data;
  } cstream_t;

  typedef struct packed {
    logic   valid;
    logic   last;
    mcplx_t data;
  } mstream_t;

  // Piecewise-linear log2 of an unsigned 48-bit value, result in unsigned
  // Q6.10: integer part = position of the leading one, fraction = the 10 bits
  // below it. Worst-case error 0.086 (about 0.26 dB after the x3.01 scaling).
  function automatic logic [15:0] log2_q6_10(input logic [AW_ACC-1:0] x);
    logic [5:0]  p;
    logic [AW_ACC-1:0] sh;
    p = '0;
    for (int b = 0; b < AW_ACC; b++) if (x[b]) p = 6'(b);
    // bring the leading one to bit AW_ACC-1, take the next 10 bits
    sh = x << (6'(AW_ACC - 1) - p);
    return {p, sh[AW_ACC-2 -: 10]};
  endfunction

endpackage
