// cable_delay: integer-sample delay of each antenna stream, to correct cable
// length mismatches (paper Sec. "Correction for cable mismatches").
//
// Each antenna carries two polarisations (signals 2a and 2a+1) and gets one
// signed delay setting dly[a] in [-512, +511] samples, applied to both
// polarisations as the paper requires. A negative setting cannot advance a
// stream, so every stream passes through a nominal delay of DMAX = 512
// samples and the applied delay is DMAX + dly[a] in [0, 1023] samples; the
// relative alignment between antennas is what the paper's +-512 range is for.
// Storage: per signal a circular buffer of 2*DMAX*2 samples held as 4 banks
// (one per lane), so that 4 consecutive samples starting at any offset can be
// read in one clock. The data are advanced only on in_valid words; latency is
// 1 clock plus the applied delay in samples. The bank organisation and the
// nominal offset are this design's choice.
module cable_delay import lfaa_pkg::*; #(
  parameter int unsigned NSIG = 16,
  parameter int unsigned DMAX = 512
) (
  input  logic clk,
  input  logic rst,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  logic [NSIG*LANES*ADC_W-1:0] in_data,
  input  logic signed [10:0]          dly [NSIG/2],   // samples, per antenna
  output logic                        out_valid,
  output logic                        out_sof,
  output logic [NSIG*LANES*ADC_W-1:0] out_data
);
  localparam int unsigned DEPTH = 4 * DMAX;            // samples per signal
  localparam int unsigned WORDS = DEPTH / LANES;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned SW    = $clog2(DEPTH);

  logic [ADC_W-1:0] mem [NSIG][LANES][WORDS];
  logic [AW-1:0]    wp;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp        <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_sof && in_valid;
      if (in_valid) begin
        wp <= wp + 1'b1;
        for (int s = 0; s < NSIG; s++) begin
          for (int l = 0; l < LANES; l++) begin
            logic [SW-1:0] t;
            mem[s][l][wp] <= in_data[(s*LANES+l)*ADC_W +: ADC_W];
            // sample time of the output, relative to the sample being written
            t = SW'({wp, 2'(l)}) - SW'($signed(DMAX) + dly[s/2]);
            if (t[SW-1:2] == wp)   // sample arrives in this very word
              out_data[(s*LANES+l)*ADC_W +: ADC_W] <= in_data[(s*LANES+32'(t[1:0]))*ADC_W +: ADC_W];
            else
              out_data[(s*LANES+l)*ADC_W +: ADC_W] <= mem[s][t[1:0]][t[SW-1:2]];
          end
        end
      end
    end
  end
endmodule
