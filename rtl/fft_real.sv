// fft_real: 1024-point FFT of two real, 4x time-multiplexed signals (the two
// polarisations of one antenna), producing 512 channels per signal
// (paper Sec. "FFT block", Fig. 4).
//
// Method (paper): consecutive real samples are packed as real and imaginary
// parts of one complex value, z[m] = x[2m] + j x[2m+1]; a 512-point complex
// FFT Z is taken and the real spectrum is recovered as
//     X[k] = (Z[k] + Z*[512-k])/2 - j W^k (Z[k] - Z*[512-k])/2,  W = e^{-j2pi/1024}.
// The polyphase filter's cyclic frame rotation is applied while loading: the
// sample at position n of the frame is stored at (n + in_rot) mod 1024.
//
// Implementation (this design's own, simpler than the paper's): instead of
// the paper's serial radix-4 pipeline followed by a parallel radix-2 stage
// and a realignment memory, a frame is loaded into a buffer (256 clocks, 4
// samples per clock), copied into a working array, transformed by 9 radix-2
// decimation-in-frequency stages, one whole stage per clock, then copied to
// an output buffer that is read out in natural channel order, 2 channels per
// clock per signal, with the real-signal separation done on the fly. This
// keeps the paper's frame rate (one frame in 256 clocks) at the cost of far
// more multipliers than the paper's 48. Internal values grow without
// scaling (28 bit); the outputs are rounded by FFT_SHIFT+1 bits and
// saturated to 18 bit, and out_ovf flags a saturated channel, as the paper
// flags channels hit by overflow. Latency: 12 clocks from the last
// input word of a frame to its first output word. Twiddles (Q15) come from
// the shared quarter-wave sine table.
module fft_real import lfaa_pkg::*; #(
  parameter int unsigned FFT_SHIFT = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic                   in_valid,
  input  logic                   in_sof,
  input  logic [9:0]             in_rot,
  input  logic signed [CH_W-1:0] in_data [2][LANES],
  output logic                   out_valid,
  output logic                   out_sof,
  output cplx18_t                out_data [2][2],   // [signal][channel 2c, 2c+1]
  output logic                   out_ovf  [2][2]
);
  localparam int unsigned NC = 512;
  localparam int unsigned WW = 28;

  typedef struct packed {
    logic signed [WW-1:0] re;
    logic signed [WW-1:0] im;
  } cw_t;

  logic [15:0] q [0:1024];
  initial $readmemh("rtl/sin_quarter.hex", q);

  function automatic logic signed [15:0] sin_of(input logic [11:0] p);
    logic [10:0] i;
    i = p[10] ? 11'd1024 - {1'b0, p[9:0]} : {1'b0, p[9:0]};
    return p[11] ? -$signed(q[i]) : $signed(q[i]);
  endfunction

  // multiply by e^{-j 2 pi ph/4096} (Q15 twiddle), rounded
  function automatic cw_t twmul(input cw_t a, input logic [11:0] ph);
    logic signed [15:0] c, s;
    logic signed [47:0] re, im;
    cw_t r;
    c  = sin_of(ph + 12'd1024);
    s  = sin_of(ph);
    re = 48'(a.re) * c + 48'(a.im) * s;
    im = 48'(a.im) * c - 48'(a.re) * s;
    r.re = WW'((re + 48'sd16384) >>> 15);
    r.im = WW'((im + 48'sd16384) >>> 15);
    return r;
  endfunction

  function automatic logic [8:0] bitrev9(input logic [8:0] v);
    for (int i = 0; i < 9; i++) bitrev9[i] = v[8 - i];
  endfunction

  cw_t lbuf [2][NC];
  cw_t wk   [2][NC];
  cw_t obuf [2][NC];

  // ---------------- load ------------------------------------------------
  logic [7:0] lc;
  logic [9:0] rot;
  logic       lstart, ldone;

  always_ff @(posedge clk) begin
    if (rst) begin
      lc <= '0;
      rot <= '0;
      ldone <= 1'b0;
      lstart <= 1'b0;
    end else begin
      ldone <= 1'b0;
      if (in_valid && (in_sof || lstart)) begin
        logic [7:0] c;
        logic [9:0] ro;
        logic [8:0] r;
        c  = in_sof ? 8'd0 : lc;
        ro = in_sof ? in_rot : rot;
        if (in_sof) rot <= in_rot;
        lstart <= !(c == 8'd255);
        r = 9'(({c, 2'b00} + ro) >> 1);
        for (int s = 0; s < 2; s++) begin
          lbuf[s][r].re       <= WW'(in_data[s][0]);
          lbuf[s][r].im       <= WW'(in_data[s][1]);
          lbuf[s][r + 9'd1].re <= WW'(in_data[s][2]);
          lbuf[s][r + 9'd1].im <= WW'(in_data[s][3]);
        end
        lc <= c + 1'b1;
        if (c == 8'd255) ldone <= 1'b1;
      end
    end
  end

  // ---------------- transform -------------------------------------------
  logic [3:0] stage;
  logic       run, odone;

  always_ff @(posedge clk) begin
    if (rst) begin
      run <= 1'b0;
      stage <= '0;
      odone <= 1'b0;
    end else begin
      odone <= 1'b0;
      if (ldone) begin
        run <= 1'b1;
        stage <= '0;
      end else if (run) begin
        stage <= stage + 1'b1;
        if (stage == 4'd8) begin
          run <= 1'b0;
          odone <= 1'b1;
        end
      end
    end
    if (ldone) begin
      wk <= lbuf;
    end else if (run) begin
      for (int s = 0; s < 2; s++) begin
        for (int i = 0; i < NC / 2; i++) begin
          int span, j;
          logic [8:0] a, b;
          cw_t x, y, d;
          span = (NC / 2) >> stage;
          j = i % span;
          a = 9'((i / span) * 2 * span + j);
          b = a + 9'(span);
          x = wk[s][a];
          y = wk[s][b];
          wk[s][a].re <= x.re + y.re;
          wk[s][a].im <= x.im + y.im;
          d.re = x.re - y.re;
          d.im = x.im - y.im;
          wk[s][b] <= twmul(d, 12'((j << stage) * 8));
        end
      end
    end
    if (odone) obuf <= wk;
  end

  // ---------------- separation and output --------------------------------
  logic [7:0] oc;
  logic       obusy;

  always_ff @(posedge clk) begin
    if (rst) begin
      oc <= '0;
      obusy <= 1'b0;
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= obusy;
      out_sof <= obusy && (oc == 0);
      if (odone) begin
        obusy <= 1'b1;
        oc <= '0;
      end else if (obusy) begin
        oc <= oc + 1'b1;
        if (oc == 8'd255) obusy <= 1'b0;
      end
    end
    for (int s = 0; s < 2; s++) begin
      for (int h = 0; h < 2; h++) begin
        logic [8:0] k, nk;
        cw_t p, qc, d, md, t;
        logic signed [47:0] sre, sim;
        logic signed [31:0] ore, oim;
        k  = {oc, 1'(h)};
        nk = 9'd0 - k;
        p  = obuf[s][bitrev9(k)];
        qc = obuf[s][bitrev9(nk)];
        qc.im = -qc.im;
        d.re = p.re - qc.re;
        d.im = p.im - qc.im;
        md.re = d.im;                // -j * d
        md.im = -d.re;
        t = twmul(md, {1'b0, k, 2'b00});
        sre = 48'(p.re) + 48'(qc.re) + 48'(t.re);
        sim = 48'(p.im) + 48'(qc.im) + 48'(t.im);
        ore = rnd_sat(sre, FFT_SHIFT + 1, CH_W);
        oim = rnd_sat(sim, FFT_SHIFT + 1, CH_W);
        out_data[s][h].re <= CH_W'(ore);
        out_data[s][h].im <= CH_W'(oim);
        out_ovf[s][h] <= ((sre + (48'sd1 <<< FFT_SHIFT)) >>> (FFT_SHIFT + 1)) != 48'(ore) ||
                         ((sim + (48'sd1 <<< FFT_SHIFT)) >>> (FFT_SHIFT + 1)) != 48'(oim);
      end
    end
  end
endmodule
