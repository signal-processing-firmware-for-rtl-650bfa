// lfaa_pkg: constants and types shared by the LFAA tile processing firmware.
// Sizes follow the paper where it gives them: 4 samples per clock, frames of
// M = 864 ADC samples, a 1024-point polyphase channelizer (512 channels of
// 781.25 kHz), 14 filter blocks, 384 beamformed channel/beam entries split in
// 16 sub-bands, and the SPEAD-64-48 header item identifiers. Widths the paper
// does not give (filter output 18 bit is given; coefficient width, twiddle
// width) are this design's choice and are marked as such.
package lfaa_pkg;
  localparam int unsigned LANES      = 4;     // samples per clock (paper)
  localparam int unsigned FRAME_M    = 864;   // ADC samples per frame (paper)
  localparam int unsigned PFB_N      = 1024;  // polyphase FFT length (paper)
  localparam int unsigned PFB_TAPS   = 14;    // WOLA blocks (paper)
  localparam int unsigned NCHAN      = 512;   // channels per signal (paper)
  localparam int unsigned ADC_W      = 8;     // ADC sample width (paper)
  localparam int unsigned CH_W       = 18;    // channelized sample width (paper)
  localparam int unsigned COEF_W     = 18;    // filter coefficient width (assumed)
  localparam int unsigned NENTRY     = 384;   // beamformed channel/beam entries (paper)
  localparam int unsigned NSUBBAND   = 16;    // sub-bands (paper)
  localparam int unsigned NBEAM      = 8;     // beams (paper)
  localparam int unsigned FRAME_NS   = 1080;  // frame length in ns (paper)
  localparam int unsigned PRELOAD_NS = 7560;  // filter preload time t1 (paper)

  // SPEAD item identifiers (paper Tables 1 and 3)
  localparam logic [15:0] ID_HEAP_CNT  = 16'h0001;
  localparam logic [15:0] ID_PKT_LEN   = 16'h0004;
  localparam logic [15:0] ID_REF_TIME  = 16'h1027;
  localparam logic [15:0] ID_TSTAMP    = 16'h1600;
  localparam logic [15:0] ID_CFREQ     = 16'h1011;
  localparam logic [15:0] ID_CSP_CHAN  = 16'h3000;
  localparam logic [15:0] ID_CSP_ANT   = 16'h3001;
  localparam logic [15:0] ID_CSP_SAMP  = 16'h3300;

  typedef struct packed {
    logic signed [15:0] re;
    logic signed [15:0] im;
  } cplx16_t;

  typedef struct packed {
    logic signed [CH_W-1:0] re;
    logic signed [CH_W-1:0] im;
  } cplx18_t;

  typedef struct packed {
    logic signed [7:0] re;
    logic signed [7:0] im;
  } cplx8_t;

  // Round-half-up arithmetic right shift followed by saturation to W bits.
  function automatic logic signed [31:0] rnd_sat(input logic signed [47:0] v,
                                                 input int unsigned sh,
                                                 input int unsigned w);
    logic signed [47:0] r;
    logic signed [47:0] mx;
    r  = (sh == 0) ? v : ((v + (48'sd1 <<< (sh - 1))) >>> sh);
    mx = (48'sd1 <<< (w - 1)) - 1;
    if (r > mx) r = mx;
    else if (r < -mx - 1) r = -mx - 1;
    return r[31:0];
  endfunction
endpackage
