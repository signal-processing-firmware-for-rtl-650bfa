// chan_capture: channelized data capture for station calibration (paper
// Sec. "Channelized data capture"). For one selected channel it takes the
// channelized sample of every signal (NSIG = 16 per FPGA, the paper's 32
// signals per TPM) in every frame, rounds it to 8+8 bit (CAP_SHIFT, saturating)
// and, after NSAMP = 128 frames, emits a block of NSAMP x NSIG samples as
// 64-bit words of 4 samples (signal-minor, time-major; byte pair per sample =
// {re, im} with im in the low byte), with m_tuser carrying the channel number
// in bits [8:0] for the SPEAD formatter, and m_tlast on the last word.
// The block store is double buffered. The requantisation shift and packing
// order are this design's choice.
module chan_capture import lfaa_pkg::*; #(
  parameter int unsigned NSIG      = 16,
  parameter int unsigned NSAMP     = 128,
  parameter int unsigned CAP_SHIFT = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic       in_valid,
  input  logic       in_sof,
  input  cplx18_t    in_data [NSIG][2],     // [signal][channel 2c, 2c+1]
  input  logic [8:0] sel_chan,
  output logic [63:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  output logic [31:0] m_tuser
);
  localparam int unsigned NWORD = NSAMP * NSIG / 4;
  logic [15:0] buf_q [2][NSAMP * NSIG];
  logic        wbank, wact;
  logic [7:0]  wc;
  logic [$clog2(NSAMP)-1:0] wt;
  logic        full_blk;
  logic [8:0]  chan_r;

  always_ff @(posedge clk) begin
    if (rst) begin
      wbank <= 1'b0;
      wact <= 1'b0;
      wc <= '0;
      wt <= '0;
      full_blk <= 1'b0;
      chan_r <= '0;
    end else begin
      full_blk <= 1'b0;
      if (in_valid && (in_sof || wact)) begin
        logic [7:0] c;
        c = in_sof ? 8'd0 : wc;
        wc <= c + 1'b1;
        wact <= (c != 8'd255);
        if (c == sel_chan[8:1]) begin
          for (int s = 0; s < NSIG; s++)
            buf_q[wbank][int'(wt) * NSIG + s] <=
              {8'(rnd_sat(48'(in_data[s][sel_chan[0]].re), CAP_SHIFT, 8)),
               8'(rnd_sat(48'(in_data[s][sel_chan[0]].im), CAP_SHIFT, 8))};
          wt <= wt + 1'b1;
          if (wt == ($clog2(NSAMP))'(NSAMP - 1)) begin
            wbank <= ~wbank;
            full_blk <= 1'b1;
            chan_r <= sel_chan;
          end
        end
      end
    end
  end

  logic ract, rbank;
  logic [$clog2(NWORD)-1:0] rw;
  always_ff @(posedge clk) begin
    if (rst) begin
      ract <= 1'b0;
      rbank <= 1'b0;
      rw <= '0;
      m_tvalid <= 1'b0;
      m_tlast <= 1'b0;
    end else begin
      m_tvalid <= ract;
      m_tlast <= ract && rw == ($clog2(NWORD))'(NWORD - 1);
      if (full_blk) begin
        ract <= 1'b1;
        rbank <= ~wbank;
        rw <= '0;
      end else if (ract) begin
        rw <= rw + 1'b1;
        if (rw == ($clog2(NWORD))'(NWORD - 1)) ract <= 1'b0;
      end
    end
    m_tdata <= {buf_q[rbank][4 * int'(rw) + 3], buf_q[rbank][4 * int'(rw) + 2],
                buf_q[rbank][4 * int'(rw) + 1], buf_q[rbank][4 * int'(rw)]};
    m_tuser <= {23'd0, chan_r};
  end
endmodule
