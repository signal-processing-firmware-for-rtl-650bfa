// corner_turner: reorders the tile beam from frames of one time sample and
// all selected channels into frames of SUB_T consecutive time samples for
// GRP channels, as needed by the station beamforming chain (paper Sec.
// "Station beamformer": frames of 128 time samples, 8 channels, 2
// polarisations, 16+16 bit complex).
//
// The paper keeps up to about 0.23 s of partial beams in the external DRAM.
// Here the store is an on-chip double buffer of TBLK time samples x NENT_L
// entries (one time block is written while the previous one is read), with
// TBLK = 2048, the smallest block that lets the last TPM of the chain form
// the 2048-sample frames sent to the CSP. For each group of GRP entries, the
// whole time block is read out as TBLK/SUB_T consecutive frames ("the first
// TPM retrieves sequentially the frames for the same channels and for the
// whole time block"). Each output frame is SUB_T*GRP samples, time-major,
// one sample (both polarisations, 64 bit) per clock; out_sof marks its
// first sample and out_last its last one. out_grp, out_sub and out_blk
// identify the frame; out_chan/out_beam give the first entry of the group.
// FRAME_GAP idle clocks follow every output frame, so that the packet
// formatter downstream can insert its 9 header words without its buffer
// filling up (this design's choice). The read rate, (SUB_T*GRP + FRAME_GAP)
// clocks per frame, keeps up with the writes: at the defaults a block is
// read in 384 x 1040 clocks while it takes 2048 x 256 clocks to write.
module corner_turner import lfaa_pkg::*; #(
  parameter int unsigned NENT_L = NENTRY / 2,
  parameter int unsigned TBLK   = 2048,
  parameter int unsigned SUB_T  = 128,
  parameter int unsigned GRP    = 8,
  parameter int unsigned FRAME_GAP = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic [8:0]  in_chan,
  input  logic [2:0]  in_beam,
  input  cplx16_t     in_data [2],
  output logic        out_valid,
  output logic        out_sof,
  output logic        out_last,
  output logic [63:0] out_data,        // {H.re, H.im, V.re, V.im}
  output logic [$clog2(NENT_L/GRP)-1:0] out_grp,
  output logic [$clog2(TBLK/SUB_T)-1:0] out_sub,
  output logic [31:0] out_blk,
  output logic [8:0]  out_chan,
  output logic [2:0]  out_beam,
  output logic        overrun
);
  localparam int unsigned EW = $clog2(NENT_L);
  localparam int unsigned TW = $clog2(TBLK);
  localparam int unsigned NG = NENT_L / GRP;
  localparam int unsigned NS = TBLK / SUB_T;

  logic [63:0] mem [2][TBLK][NENT_L];
  logic [11:0] emap [2][NENT_L];        // {beam, chan} of each entry

  // ---------------- write side ----------------------------------------
  logic          wbank;
  logic [TW-1:0] wt;
  logic [EW-1:0] we_idx;
  logic          wact;
  logic          blk_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      wbank <= 1'b0;
      wt <= '0;
      we_idx <= '0;
      wact <= 1'b0;
      blk_done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      if (in_valid) begin
        logic [EW-1:0] e;
        logic [TW-1:0] t;
        e = in_sof ? '0 : we_idx;
        t = wt;
        if (in_sof && wact) t = wt + 1'b1;     // a new time sample
        if (in_sof && !wact) t = '0;
        if (in_sof && wact && wt == TW'(TBLK - 1)) begin
          t = '0;
          wbank <= ~wbank;
          blk_done <= 1'b1;
        end
        wact <= 1'b1;
        wt <= t;
        if (int'(e) < NENT_L) begin
          mem[(in_sof && wact && wt == TW'(TBLK - 1)) ? ~wbank : wbank][t][e]
            <= {in_data[0].re, in_data[0].im, in_data[1].re, in_data[1].im};
          emap[(in_sof && wact && wt == TW'(TBLK - 1)) ? ~wbank : wbank][e] <= {in_beam, in_chan};
        end
        we_idx <= e + 1'b1;
      end
    end
  end

  // ---------------- read side -----------------------------------------
  logic                  rbank, ract;
  logic [$clog2(GRP)-1:0] rc;
  logic [$clog2(SUB_T)-1:0] rt;
  logic [$clog2(NS)-1:0]  rs;
  logic [$clog2(NG)-1:0]  rg;
  logic [31:0]           rblk;          // number of the block being read
  logic [7:0]            gapc;          // idle clocks left after a frame
  logic                  rsend;
  assign rsend = ract && gapc == 0;

  always_ff @(posedge clk) begin
    if (rst) begin
      rbank <= 1'b0;
      ract <= 1'b0;
      rc <= '0; rt <= '0; rs <= '0; rg <= '0;
      gapc <= '0;
      out_valid <= 1'b0;
      out_sof <= 1'b0;
      out_last <= 1'b0;
      rblk <= '0;
      overrun <= 1'b0;
    end else begin
      out_valid <= rsend;
      out_sof <= rsend && rc == 0 && rt == 0;
      out_last <= rsend && rc == ($clog2(GRP))'(GRP - 1) && rt == ($clog2(SUB_T))'(SUB_T - 1);
      if (blk_done) begin
        if (ract) overrun <= 1'b1;
        ract <= 1'b1;
        rbank <= ~wbank;           // wbank has already toggled
        rc <= '0; rt <= '0; rs <= '0; rg <= '0;
        gapc <= '0;
      end else if (ract && gapc != 0) begin
        gapc <= gapc - 1'b1;
      end else if (ract) begin
        rc <= rc + 1'b1;
        if (rc == ($clog2(GRP))'(GRP - 1)) begin
          rt <= rt + 1'b1;
          if (rt == ($clog2(SUB_T))'(SUB_T - 1)) begin
            gapc <= 8'(FRAME_GAP);
            rs <= rs + 1'b1;
            if (rs == ($clog2(NS))'(NS - 1)) begin
              rg <= rg + 1'b1;
              if (rg == ($clog2(NG))'(NG - 1)) begin
                ract <= 1'b0;
                rblk <= rblk + 1;
              end
            end
          end
        end
      end
    end
    out_data <= mem[rbank][{rs, rt}][EW'(rg * GRP + rc)];
    out_blk  <= rblk;
    out_grp  <= rg;
    out_sub  <= rs;
    out_chan <= emap[rbank][EW'(rg * GRP)][8:0];
    out_beam <= emap[rbank][EW'(rg * GRP)][11:9];
  end
endmodule
