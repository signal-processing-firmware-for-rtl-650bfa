// pfb_filter: time-multiplexed, oversampling Weight-Overlap-Add polyphase
// filter (paper Sec. "Polyphase filter", Fig. 3).
//
// Every frame of M = 864 new input samples produces a block of N = 1024
// filtered values y[n], 4 per clock, for each of NSIG signals:
//     y_f[n] = sum_{k=0}^{TAPS-1} h[(TAPS-1-k)*N + n] * x[T_f - k*N + n],
//     T_f = f*M + M - N,
// i.e. an FIR window of TAPS*N = 14336 taps whose start moves by M samples
// per frame. As in the paper's figure, a chain of TAPS delay blocks supplies
// the N-sample blocks: the first block (delay1) is written with the input and
// read as N contiguous samples, repeating the last N-M samples of the
// previous frame; every following block (delay2) stores the M new samples
// of its predecessor's output and replays them N samples later. Each delay
// block is one memory 4 samples wide (the 4 parallel lanes share it) holding
// 2N samples, which is this design's sizing. Block k = 0 holds the newest
// samples and uses the highest taps; the last block uses taps 0..N-1 (the
// figure's "taps 0,4,8,...").
//
// Coefficients: the filter is symmetric, h[i] = h[L-1-i], so only L/2 = 7168
// coefficients are stored, in TAPS/2 dual-read memories of N words; memory j
// serves block TAPS-1-j at address n and block j at address N-1-n (the paper's
// single dual-port memory for two symmetric sections). One coefficient memory
// is shared by all signals. The paper's coefficient values come from its own
// filter design and are not tabulated, so the memory is loaded through the
// coef_we port (address i < L/2 holds h[i]).
//
// Timing: input words (in_valid, 4 samples) may come at any rate as long as a
// frame of M/4 words takes at least N/4 clocks (the paper's processing clock
// faster than Fs*Os; here a single clock with input gaps). Output frame f
// starts when input frame f is complete and takes N/4 consecutive clocks;
// out_rot = T_f mod N is the cyclic rotation the FFT must apply (the paper's
// oversampling phase correction). The first PRELOAD output frames are
// suppressed (t1 = 7560 ns = 7 frames in the paper). Products are summed at
// full precision and rounded by OUT_SHIFT bits to 18 bit with saturation
// (OUT_SHIFT is this design's choice). The first output word of frame f
// comes 4 clocks after the last input word of frame f.
module pfb_filter import lfaa_pkg::*; #(
  parameter int unsigned NSIG      = 16,
  parameter int unsigned N         = PFB_N,
  parameter int unsigned M         = FRAME_M,
  parameter int unsigned TAPS      = PFB_TAPS,
  parameter int unsigned OUT_SHIFT = 17,
  parameter int unsigned PRELOAD   = PRELOAD_NS / FRAME_NS
) (
  input  logic clk,
  input  logic rst,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  logic [NSIG*LANES*ADC_W-1:0] in_data,
  input  logic                        coef_we,
  input  logic [$clog2(TAPS*N/2)-1:0] coef_addr,
  input  logic signed [COEF_W-1:0]    coef_data,
  output logic                        out_valid,
  output logic                        out_sof,
  output logic [$clog2(N)-1:0]        out_rot,
  output logic signed [CH_W-1:0]      out_data [NSIG][LANES],
  output logic                        overrun
);
  localparam int unsigned WD  = 2 * N / LANES;       // words per delay block
  localparam int unsigned AW  = $clog2(WD);
  localparam int unsigned NW  = N / LANES;           // output words per frame
  localparam int unsigned CW  = $clog2(NW);
  localparam int unsigned HALF = TAPS / 2;
  localparam int unsigned TW  = $clog2(2 * N);       // sample time modulo 2N
  localparam int unsigned NEWW = (N - M) / LANES;    // first new word in a block

  typedef logic [LANES*ADC_W-1:0] word_t;

  word_t                  dly1 [NSIG][WD];            // delay1
  word_t                  dly2 [TAPS-1][NSIG][WD];    // delay2 chain
  logic signed [COEF_W-1:0] cmem [HALF*N];

  // ---------------- input side: write delay1 --------------------------
  logic [TW-1:0] in_t;          // time of next input sample, modulo 2N
  logic [$clog2(M/LANES)-1:0] in_word;
  logic          frame_done;    // input frame complete
  logic          started;

  always_ff @(posedge clk) begin
    if (coef_we) cmem[coef_addr] <= coef_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_t <= '0;
      in_word <= '0;
      frame_done <= 1'b0;
      started <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid && (started || in_sof)) begin
        logic [$clog2(M/LANES)-1:0] w;
        w = in_sof ? '0 : in_word;
        started <= 1'b1;
        for (int s = 0; s < NSIG; s++)
          dly1[s][in_t[TW-1:2]] <= in_data[s*LANES*ADC_W +: LANES*ADC_W];
        in_t <= in_t + TW'(LANES);
        if (w == ($clog2(M/LANES))'(M/LANES - 1)) begin
          in_word <= '0;
          frame_done <= 1'b1;
        end else begin
          in_word <= w + 1'b1;
        end
      end
    end
  end

  // ---------------- output sequencing ----------------------------------
  logic          busy, pending;
  logic [CW-1:0] c;             // output word within frame
  logic [TW-1:0] tf;            // T_f modulo 2N
  logic [31:0]   fcount;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      pending <= 1'b0;
      c <= '0;
      tf <= TW'(M) - TW'(N);      // T_0 = M - N
      fcount <= '0;
      overrun <= 1'b0;
    end else begin
      if (frame_done && pending && busy && c != CW'(NW - 1)) overrun <= 1'b1;
      if (busy && c == CW'(NW - 1)) begin
        tf <= tf + TW'(M);
        fcount <= fcount + 1;
      end
      if (!busy || c == CW'(NW - 1)) begin
        // start the next frame back to back if one is waiting
        busy <= pending || frame_done;
        pending <= pending && frame_done;
        c <= '0;
      end else begin
        if (frame_done) pending <= 1'b1;
        c <= c + 1'b1;
      end
    end
  end

  // ---------------- stage 1: read delay blocks and coefficients -------
  word_t                    rd   [TAPS][NSIG];
  logic signed [COEF_W-1:0] cf   [TAPS][LANES];
  logic                     v1, sof1;
  logic [$clog2(N)-1:0]     rot1;
  logic [AW-1:0]            ra;
  logic                     wnew;

  always_comb begin
    ra   = AW'((tf >> 2) + TW'(c));
    wnew = (c >= CW'(NEWW));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0;
      sof1 <= 1'b0;
      rot1 <= '0;
    end else begin
      v1   <= busy && (fcount >= PRELOAD);
      sof1 <= busy && (c == 0) && (fcount >= PRELOAD);
      rot1 <= tf[$clog2(N)-1:0];
    end
    for (int k = 0; k < TAPS; k++) begin
      // block k holds time t at address (t mod 2N)/4; block k lags by k*N
      for (int s = 0; s < NSIG; s++) begin
        if (k == 0) rd[k][s] <= dly1[s][ra];
        else        rd[k][s] <= dly2[k-1][s][AW'(ra + AW'((k % 2) * (N / LANES)))];
        // delay2: store the new part of the predecessor's block
        if (k > 0 && busy && wnew)
          dly2[k-1][s][AW'(ra + AW'(((k - 1) % 2) * (N / LANES)))] <=
            (k == 1) ? dly1[s][ra] : dly2[k-2 < 0 ? 0 : k-2][s][AW'(ra + AW'(((k - 1) % 2) * (N / LANES)))];
      end
      for (int l = 0; l < LANES; l++) begin
        int n;
        n = int'(c) * LANES + l;
        if (k >= HALF) cf[k][l] <= cmem[(TAPS - 1 - k) * N + n];
        else           cf[k][l] <= cmem[k * N + (N - 1 - n)];
      end
    end
  end

  // ---------------- stage 2: multiply-accumulate -----------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
      out_rot <= '0;
    end else begin
      out_valid <= v1;
      out_sof <= sof1;
      out_rot <= rot1;
    end
    for (int s = 0; s < NSIG; s++) begin
      for (int l = 0; l < LANES; l++) begin
        logic signed [47:0] acc;
        acc = '0;
        for (int k = 0; k < TAPS; k++)
          acc += 48'($signed(rd[k][s][l*ADC_W +: ADC_W]) * cf[k][l]);
        out_data[s][l] <= CH_W'(rnd_sat(acc, OUT_SHIFT, CH_W));
      end
    end
  end
endmodule
