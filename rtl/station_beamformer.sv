// station_beamformer: one link of the station beamforming chain (paper Sec.
// "Station beamformer", Fig. 2 adder).
//
// The TPMs of a station form a chain. Frames are SUB_T time samples x GRP
// channels x 2 polarisations of 16+16 bit complex partial beam, one sample
// (64 bit, {H.re, H.im, V.re, V.im}) per clock.
//  * mode FIRST: the local frames from the corner turner are sent on.
//  * mode MIDDLE: each incoming (travelling) frame is added, sample by
//    sample, to the corresponding local frame and sent on.
//  * mode LAST: the sum is not sent on; NSUB = 16 consecutive sums for the
//    same GRP channels (16 x 128 = 2048 time samples) are collected, and
//    GRP frames of one channel and 2048 samples are produced for the CSP,
//    requantised to 8+8 bit (round by CSP_SHIFT, saturate) and packed two
//    time samples per 64-bit word in the CSP byte order of the paper's
//    Table 4 (byte 0 = H.im[t], 1 = H.re[t], 2 = V.im[t], 3 = V.re[t],
//    bytes 4..7 the same for t+1).
// Local frames wait in a FIFO until the matching travelling frame arrives;
// both streams are assumed to carry frames in the same order (the paper
// retrieves "the corresponding frame" from memory). Saturating 16-bit sums,
// the FIFO alignment and CSP_SHIFT are this design's choices. The LAST
// store is double buffered so that collection of the next group overlaps
// the readout (one word per clock, 1024 words per CSP frame, then FRAME_GAP
// idle clocks that leave the packet formatter room for its header words).
module station_beamformer import lfaa_pkg::*; #(
  parameter int unsigned SUB_T     = 128,
  parameter int unsigned GRP       = 8,
  parameter int unsigned NSUB      = 16,
  parameter int unsigned CSP_SHIFT = 4,
  parameter int unsigned LQ_DEPTH  = 2048,
  parameter int unsigned FRAME_GAP = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic [1:0]  mode,          // 0 FIRST, 1 MIDDLE, 2 LAST
  // local frames (corner turner)
  input  logic        loc_valid,
  input  logic        loc_sof,
  input  logic [63:0] loc_data,
  // travelling frames in
  input  logic        tin_valid,
  input  logic        tin_sof,
  input  logic [63:0] tin_data,
  // travelling frames out (FIRST, MIDDLE)
  output logic        tout_valid,
  output logic        tout_sof,
  output logic        tout_last,
  output logic [63:0] tout_data,
  // CSP frames (LAST)
  output logic        csp_valid,
  output logic        csp_sof,
  output logic        csp_last,
  output logic [63:0] csp_data,
  output logic [$clog2(GRP)-1:0] csp_chan,   // channel within the group
  output logic        lq_overflow
);
  localparam logic [1:0] FIRST = 2'd0, MIDDLE = 2'd1, LAST = 2'd2;
  localparam int unsigned FS = SUB_T * GRP;          // samples per frame
  localparam int unsigned FW = $clog2(FS);
  localparam int unsigned CS = SUB_T * NSUB;         // samples per CSP frame

  // ---------------- local frame queue ---------------------------------
  logic [64:0] lq_rd;
  logic        lq_empty, lq_full;
  logic [$clog2(LQ_DEPTH):0] lq_cnt;
  logic        use_tin;

  assign use_tin = (mode != FIRST) && tin_valid && !lq_empty;

  sync_fifo #(.W(65), .DEPTH(LQ_DEPTH)) u_lq (
    .clk, .rst,
    .wr_en(loc_valid && mode != FIRST), .wr_data({loc_sof, loc_data}), .full(lq_full),
    .rd_en(use_tin), .rd_data(lq_rd), .empty(lq_empty), .count(lq_cnt)
  );

  function automatic logic [15:0] sadd(input logic [15:0] a, input logic [15:0] b);
    return 16'(rnd_sat(48'($signed(a)) + 48'($signed(b)), 0, 16));
  endfunction

  logic        s_valid, s_sof;
  logic [63:0] s_data;
  always_comb begin
    s_valid = (mode == FIRST) ? loc_valid : use_tin;
    s_sof   = (mode == FIRST) ? loc_sof   : (tin_sof && use_tin);
    s_data  = (mode == FIRST) ? loc_data :
              {sadd(lq_rd[63:48], tin_data[63:48]), sadd(lq_rd[47:32], tin_data[47:32]),
               sadd(lq_rd[31:16], tin_data[31:16]), sadd(lq_rd[15:0],  tin_data[15:0])};
  end

  logic [FW-1:0] spos;
  always_ff @(posedge clk) begin
    if (rst) begin
      tout_valid <= 1'b0;
      tout_sof <= 1'b0;
      tout_last <= 1'b0;
      spos <= '0;
      lq_overflow <= 1'b0;
    end else begin
      if (loc_valid && mode != FIRST && lq_full) lq_overflow <= 1'b1;
      tout_valid <= s_valid && mode != LAST;
      tout_sof <= s_sof && mode != LAST;
      if (s_valid) spos <= s_sof ? FW'(1) : spos + 1'b1;
      tout_last <= s_valid && mode != LAST && (s_sof ? (FS == 1) : (spos == FW'(FS - 1)));
    end
    tout_data <= s_data;
  end

  // ---------------- LAST: collect NSUB frames, emit per channel ---------
  logic [31:0] acc [2][NSUB * FS];        // 8+8 bit H and V per sample
  logic        cbank;
  logic [$clog2(NSUB*FS)-1:0] cpos;
  logic        cact, cdone;

  function automatic logic [7:0] q8(input logic [15:0] v);
    return 8'(rnd_sat(48'($signed(v)), CSP_SHIFT, 8));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      cbank <= 1'b0;
      cpos <= '0;
      cact <= 1'b0;
      cdone <= 1'b0;
    end else begin
      cdone <= 1'b0;
      if (mode == LAST && s_valid && (s_sof || cact)) begin
        logic [$clog2(NSUB*FS)-1:0] p;
        p = (s_sof && !cact) ? '0 : cpos;
        cact <= 1'b1;
        // byte order of one sample: {V.re, V.im, H.re, H.im}
        acc[cbank][p] <= {q8(s_data[31:16]), q8(s_data[15:0]), q8(s_data[63:48]), q8(s_data[47:32])};
        cpos <= p + 1'b1;
        if (p == ($clog2(NSUB*FS))'(NSUB * FS - 1)) begin
          cact <= 1'b0;
          cbank <= ~cbank;
          cdone <= 1'b1;
        end
      end
    end
  end

  // readout: for each channel, CS time samples, two per word
  logic                      ract, rbank;
  logic [$clog2(GRP)-1:0]    rch;
  logic [$clog2(CS/2)-1:0]   rw;
  logic [7:0]                gapc;
  logic                      rsend;
  assign rsend = ract && gapc == 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      ract <= 1'b0;
      rbank <= 1'b0;
      rch <= '0;
      rw <= '0;
      gapc <= '0;
      csp_valid <= 1'b0;
      csp_sof <= 1'b0;
      csp_last <= 1'b0;
    end else begin
      csp_valid <= rsend;
      csp_sof <= rsend && rw == 0;
      csp_last <= rsend && rw == ($clog2(CS/2))'(CS / 2 - 1);
      if (cdone) begin
        ract <= 1'b1;
        rbank <= ~cbank;
        rch <= '0;
        rw <= '0;
        gapc <= '0;
      end else if (ract && gapc != 0) begin
        gapc <= gapc - 1'b1;
      end else if (ract) begin
        rw <= rw + 1'b1;
        if (rw == ($clog2(CS/2))'(CS / 2 - 1)) begin
          gapc <= 8'(FRAME_GAP);
          rch <= rch + 1'b1;
          if (rch == ($clog2(GRP))'(GRP - 1)) ract <= 1'b0;
        end
      end
    end
    // time sample t of channel c sits at position t*GRP + c (time-major frames)
    csp_data <= {acc[rbank][($clog2(NSUB*FS))'((2 * rw + 1) * GRP + rch)],
                 acc[rbank][($clog2(NSUB*FS))'((2 * rw) * GRP + rch)]};
    csp_chan <= rch;
  end
endmodule
