// framer: PPS alignment, framing and time stamping of the ADC sample stream.
//
// The ADC stream arrives 4 samples per clock for NSIG signals. The PPS input
// is given as PPS_PH samples taken at evenly spaced phases inside one clock
// period (as an input deserializer delivers them). The phase used for edge
// detection is selectable (pps_phase_sel); the phase at which the last rising
// edge was seen is reported (pps_edge_phase) so that control software can pick
// a phase far from the transition, which removes the sampling ambiguity the
// paper describes. The paper states the goal; the multi-phase representation
// and the reporting register are this design's choice.
//
// Counters (paper, Sec. "Framing and time stamping"):
//  * sync_time  - UTC seconds, loaded by software, +1 on every PPS rising edge.
//  * start_time - copy of sync_time taken when the first frame starts.
//  * timestamp  - ns since the first frame, +NS_PER_CLK per valid clock.
//  * frame_num  - frame counter N_f, reset when framing is armed.
// After `arm`, framing starts with the first valid word at or after the next
// PPS rising edge: that word is sample 0 of frame 0. Frames are FRAME_M
// samples (FRAME_M/4 valid clocks); out_sof marks the first word of a frame.
// frame_time_ns is t1 + N_f*FRAME_NS, the time of the processed frame relative
// to start_time (t1 = channelizer preload time). Latency: 1 clock.
module framer import lfaa_pkg::*; #(
  parameter int unsigned NSIG       = 16,
  parameter int unsigned PPS_PH     = 4,
  parameter int unsigned NS_PER_CLK = 5,
  parameter int unsigned FRM_M      = FRAME_M
) (
  input  logic clk,
  input  logic rst,
  input  logic                       in_valid,
  input  logic [NSIG*LANES*ADC_W-1:0] in_data,
  input  logic [PPS_PH-1:0]          pps_samples,   // bit i = PPS at phase i
  input  logic [$clog2(PPS_PH)-1:0]  pps_phase_sel,
  input  logic                       sync_time_we,
  input  logic [31:0]                sync_time_wdata,
  input  logic                       arm,
  output logic                       out_valid,
  output logic                       out_sof,
  output logic [NSIG*LANES*ADC_W-1:0] out_data,
  output logic                       running,
  output logic [31:0]                sync_time,
  output logic [31:0]                start_time,
  output logic [47:0]                timestamp,
  output logic [31:0]                frame_num,
  output logic [47:0]                frame_time_ns,
  output logic [$clog2(PPS_PH)-1:0]  pps_edge_phase
);
  localparam int unsigned WPF = FRM_M / LANES;   // words per frame
  logic                 pps_prev;       // last phase of the previous clock
  logic                 pps_prev_sel;   // selected phase of the previous clock
  logic                 pps_rise;
  logic                 armed;
  logic [$clog2(WPF)-1:0] word;

  assign pps_rise = pps_samples[pps_phase_sel] && !pps_prev_sel;

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_prev       <= 1'b0;
      pps_prev_sel   <= 1'b0;
      sync_time      <= '0;
      start_time     <= '0;
      timestamp      <= '0;
      frame_num      <= '0;
      frame_time_ns  <= '0;
      armed          <= 1'b0;
      running        <= 1'b0;
      word           <= '0;
      out_valid      <= 1'b0;
      out_sof        <= 1'b0;
      out_data       <= '0;
      pps_edge_phase <= '0;
    end else begin
      pps_prev <= pps_samples[PPS_PH-1];
      pps_prev_sel <= pps_samples[pps_phase_sel];
      // locate the first phase that sees PPS high after a low clock
      if (!pps_prev && (pps_samples != '0)) begin
        for (int i = PPS_PH - 1; i >= 0; i--)
          if (pps_samples[i]) pps_edge_phase <= ($clog2(PPS_PH))'(i);
      end
      if (sync_time_we)  sync_time <= sync_time_wdata;
      else if (pps_rise) sync_time <= sync_time + 1;

      if (arm) begin
        armed   <= 1'b1;
        running <= 1'b0;
      end else if (armed && pps_rise) begin
        armed <= 1'b0;
        running <= 1'b1;
        word <= '0;
        frame_num <= '0;
        timestamp <= '0;
        start_time <= sync_time_we ? sync_time_wdata : sync_time + 1;
      end

      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (running && in_valid) begin
        out_valid <= 1'b1;
        out_data  <= in_data;
        out_sof   <= (word == 0);
        timestamp <= timestamp + 48'(NS_PER_CLK);
        if (word == 0) frame_time_ns <= 48'(PRELOAD_NS) + 48'(frame_num) * 48'(FRAME_NS);
        if (word == ($clog2(WPF))'(WPF - 1)) begin
          word <= '0;
          frame_num <= frame_num + 1;
        end else begin
          word <= word + 1'b1;
        end
      end
    end
  end
endmodule
