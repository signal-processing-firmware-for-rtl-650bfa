// total_power: per-ADC-input total power detector (paper Sec. "ADC total
// power"). For every signal the squares of its 8-bit samples are summed over
// int_frames frames (the paper quotes integration times from about 1 ms to a
// few seconds, i.e. roughly 900 to several million 1080 ns frames). The
// integration starts at the first in_sof after reset or after the previous
// result, and at the end of the last frame the sums are copied to `power`
// and `done` pulses for one clock. Accumulators are 48 bit, enough for
// 2^24 frames of full-scale samples (this width is this design's choice).
module total_power import lfaa_pkg::*; #(
  parameter int unsigned NSIG = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  logic [NSIG*LANES*ADC_W-1:0] in_data,
  input  logic [23:0]                 int_frames,
  output logic [47:0]                 power [NSIG],
  output logic                        done
);
  logic [47:0] acc [NSIG];
  logic [23:0] fcnt;
  logic        started;

  function automatic logic [47:0] sq4(input logic [LANES*ADC_W-1:0] w);
    logic [47:0] s;
    s = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [ADC_W-1:0] x;
      x = w[l*ADC_W +: ADC_W];
      s += 48'($signed(x) * $signed(x));
    end
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      fcnt    <= '0;
      started <= 1'b0;
      done    <= 1'b0;
      for (int s = 0; s < NSIG; s++) begin
        acc[s]   <= '0;
        power[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        logic close;
        close = in_sof && started && (fcnt == int_frames);
        if (in_sof) begin
          started <= 1'b1;
          fcnt <= (close || !started) ? 24'd1 : fcnt + 1'b1;
        end
        if (close) done <= 1'b1;
        for (int s = 0; s < NSIG; s++) begin
          if (close) power[s] <= acc[s];
          if (close || (in_sof && !started))
            acc[s] <= sq4(in_data[s*LANES*ADC_W +: LANES*ADC_W]);
          else if (started || in_sof)
            acc[s] <= acc[s] + sq4(in_data[s*LANES*ADC_W +: LANES*ADC_W]);
        end
      end
    end
  end
endmodule
