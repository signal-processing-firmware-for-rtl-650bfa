// spectrometer: coarse spectrum of one antenna signal or cross spectrum of
// two (paper Sec. "Coarse spectrum"), at the channel resolution of the
// channelizer (512 channels of 781.25 kHz).
// For each channel k it accumulates X_a[k] * conj(X_b[k]) over int_frames
// frames (sel_a = sel_b gives the power spectrum). At the end of an
// integration the 48-bit accumulators are copied to a result bank and
// `done` pulses; the result of channel rd_chan is read on rd_re/rd_im as
// 32-bit values, the accumulator shifted right by RD_SHIFT and saturated
// (the paper mentions a 32-bit readout). Input: 2 channels per clock per
// signal as produced by fft_real. Integration starts at the first in_sof.
module spectrometer import lfaa_pkg::*; #(
  parameter int unsigned NSIG     = 16,
  parameter int unsigned RD_SHIFT = 0
) (
  input  logic clk,
  input  logic rst,
  input  logic       in_valid,
  input  logic       in_sof,
  input  cplx18_t    in_data [NSIG][2],
  input  logic [$clog2(NSIG)-1:0] sel_a,
  input  logic [$clog2(NSIG)-1:0] sel_b,
  input  logic [23:0] int_frames,
  input  logic [8:0]  rd_chan,
  output logic signed [31:0] rd_re,
  output logic signed [31:0] rd_im,
  output logic        done
);
  logic signed [47:0] acc_re [NCHAN], acc_im [NCHAN];
  logic signed [47:0] res_re [NCHAN], res_im [NCHAN];
  logic        wact;
  logic [7:0]  wc;
  logic [23:0] fcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      wact <= 1'b0;
      wc <= '0;
      fcnt <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid && (in_sof || wact)) begin
        logic [7:0] c;
        logic       first;
        c = in_sof ? 8'd0 : wc;
        first = (fcnt == 0);
        wc <= c + 1'b1;
        wact <= (c != 8'd255);
        for (int h = 0; h < 2; h++) begin
          cplx18_t a, b;
          logic signed [47:0] pr, pi;
          a = in_data[sel_a][h];
          b = in_data[sel_b][h];
          pr = 48'(a.re) * 48'(b.re) + 48'(a.im) * 48'(b.im);
          pi = 48'(a.im) * 48'(b.re) - 48'(a.re) * 48'(b.im);
          acc_re[{c, 1'(h)}] <= first ? pr : acc_re[{c, 1'(h)}] + pr;
          acc_im[{c, 1'(h)}] <= first ? pi : acc_im[{c, 1'(h)}] + pi;
          if (c == 8'd255 && fcnt == int_frames - 1) begin
            res_re[{c, 1'(h)}] <= acc_re[{c, 1'(h)}] + pr;
            res_im[{c, 1'(h)}] <= acc_im[{c, 1'(h)}] + pi;
          end
        end
        if (c == 8'd255 && fcnt == int_frames - 1) begin
          // copy every other channel: their last contribution is already in
          for (int k = 0; k < 510; k++) begin
            res_re[k] <= acc_re[k];
            res_im[k] <= acc_im[k];
          end
          done <= 1'b1;
        end
        if (c == 8'd255) fcnt <= (fcnt == int_frames - 1) ? '0 : fcnt + 1'b1;
      end
    end
  end

  always_comb begin
    rd_re = rnd_sat(res_re[rd_chan] >>> RD_SHIFT, 0, 32);
    rd_im = rnd_sat(res_im[rd_chan] >>> RD_SHIFT, 0, 32);
  end
endmodule
