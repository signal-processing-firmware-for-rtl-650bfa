// tile_beamformer: channel selection, geometric delay correction, calibration
// and partial beam sum for the antennas of one FPGA, with the odd/even entry
// exchange between the two FPGAs of a tile (paper Sec. "Tile beamformer and
// calibration", Eq. 1).
//
// Channel selection: 16 sub-bands, each with a start channel (even, the
// paper's 2-channel granularity), a width in units of 8 channels and a beam
// number. The sub-bands are concatenated into a list of NENT = 384 entries;
// entry e is (physical channel, beam). A sub-band may repeat a region already
// used by another sub-band.
//
// Per entry and antenna a (paper's order of operations):
//  1. the 18-bit channelized samples are scaled by 2^exp (3-bit exponent per
//     antenna and group of 8 channels) and rounded to 12 bit
//     (x12 = round(x18 * 2^exp / 2^7), saturating: the scaling origin is this
//     design's choice);
//  2. they are rotated by exp(+j 2 pi nu tau), the phase being
//     phi = ch * d >> 11 in 4096 steps per turn, where d is the delay in
//     units of Ts/8192 = 152.6 fs (the paper's 153 fs; 20 bit covers +-80 ns)
//     and ch*781.25 kHz the channel frequency; the rotated value is rounded
//     to 12 bit;
//  3. they are multiplied by the 2x2 complex calibration matrix (16+16 bit
//     mantissas, unity = 2^14) and rounded to 8 bit (shift 18);
//  4. the 8-bit results are summed over the antennas in 16 bit.
// Delay model: d = tau0 + t*rate, realised as a 34-bit accumulator (14
// fractional bits) to which `rate` is added every 1024 frames (1105.92 us),
// giving the paper's 8.4 fs/s rate resolution with a 22-bit rate.
// New delay values and a new calibration bank are written in the background
// and take effect at a programmed frame number, so updates never stop the
// observation (paper: "changed dynamically at predefined times").
//
// Timing: a whole channelized frame (512 channels x NANT antennas x 2 pol,
// 2 channels per clock) is stored in a double buffer; the next frame's 384
// entries are then processed two per clock (192 clocks). Entry pairs
// (2p, 2p+1) are split: the entry of this FPGA's parity (FPGA_ID 0 keeps
// even entries) waits in a FIFO, the other goes to the other FPGA on xout_*.
// When the other FPGA's partial sum for an own entry arrives on xin_*, the
// two are added and presented on out_*, giving the 16-antenna tile beam for
// half of the entries (192 per frame, 150 MHz). xin_* is registered once on
// entry, so the other FPGA may answer in the same clock as it receives, or
// any number of clocks later (up to 256 entries). The exchange format and the
// FIFO alignment are this design's choice.
module tile_beamformer import lfaa_pkg::*; #(
  parameter int unsigned NANT    = 8,
  parameter int unsigned NENT    = NENTRY,
  parameter int unsigned NSB     = NSUBBAND,
  parameter int unsigned NB      = NBEAM,
  parameter int unsigned FPGA_ID = 0,
  parameter int unsigned DLY_UPD = 1024     // frames between delay updates
) (
  input  logic clk,
  input  logic rst,
  // channelized input: [antenna][pol][channel 2c, 2c+1]
  input  logic     in_valid,
  input  logic     in_sof,
  input  cplx18_t  in_data [NANT][2][2],
  // sub-band table
  input  logic       sb_we,
  input  logic [3:0] sb_idx,
  input  logic [8:0] sb_start,
  input  logic [5:0] sb_width8,
  input  logic [2:0] sb_beam,
  // exponents
  input  logic                      exp_we,
  input  logic [$clog2(NANT)-1:0]   exp_ant,
  input  logic [5:0]                exp_grp,
  input  logic [2:0]                exp_val,
  // delays (shadow registers, applied at dly_apply_frame)
  input  logic                      dly_we,
  input  logic [$clog2(NANT)-1:0]   dly_ant,
  input  logic [$clog2(NB)-1:0]     dly_beam,
  input  logic signed [19:0]        dly_tau0,
  input  logic signed [21:0]        dly_rate,
  input  logic                      dly_arm,
  input  logic [31:0]               dly_apply_frame,
  // calibration mantissas (shadow bank, swapped at cal_swap_frame)
  input  logic                      cal_we,
  input  logic [$clog2(NENT)-1:0]   cal_entry,
  input  logic [$clog2(NANT)-1:0]   cal_ant,
  input  logic [1:0]                cal_elem,     // 0 hh, 1 hv, 2 vh, 3 vv
  input  cplx16_t                   cal_data,
  input  logic                      cal_arm,
  input  logic [31:0]               cal_swap_frame,
  // exchange with the other FPGA
  output logic                      xout_valid,
  output cplx16_t                   xout_data [2],
  input  logic                      xin_valid,
  input  cplx16_t                   xin_data [2],
  // tile beam
  output logic                      out_valid,
  output logic                      out_sof,
  output logic [$clog2(NENT)-1:0]   out_entry,
  output logic [2:0]                out_beam,
  output logic [8:0]                out_chan,
  output cplx16_t                   out_data [2],
  output logic [31:0]               frame_cnt,
  output logic                      cal_bank,
  output logic [$clog2(NENT)-1:0]   n_selected
);
  localparam int unsigned EW = $clog2(NENT);
  localparam int unsigned AW = $clog2(NANT);
  localparam int unsigned BW = $clog2(NB);

  // ---------------- configuration state --------------------------------
  logic [8:0] sb_st [NSB];
  logic [5:0] sb_wd [NSB];
  logic [2:0] sb_bm [NSB];
  logic [2:0] expo [NANT][64];
  logic signed [19:0] tau0_sh [NANT][NB];
  logic signed [21:0] rate_sh [NANT][NB];
  logic signed [21:0] rate    [NANT][NB];
  logic signed [33:0] dacc    [NANT][NB];
  cplx16_t cal [2][NENT][NANT][4];
  logic dly_pending, cal_pending;
  logic [$clog2(DLY_UPD)-1:0] upd_cnt;

  always_ff @(posedge clk) begin
    if (sb_we) begin
      sb_st[sb_idx] <= {sb_start[8:1], 1'b0};
      sb_wd[sb_idx] <= sb_width8;
      sb_bm[sb_idx] <= sb_beam;
    end
    if (exp_we) expo[exp_ant][exp_grp] <= exp_val;
    if (dly_we) begin
      tau0_sh[dly_ant][dly_beam] <= dly_tau0;
      rate_sh[dly_ant][dly_beam] <= dly_rate;
    end
    if (cal_we) cal[~cal_bank][cal_entry][cal_ant][cal_elem] <= cal_data;
  end

  // ---------------- input frame buffer -----------------------------------
  cplx18_t fb [2][NCHAN][NANT][2];
  logic       wbank;
  logic [7:0] wc;
  logic       wact;
  logic       fdone;

  always_ff @(posedge clk) begin
    if (rst) begin
      wbank <= 1'b0;
      wc <= '0;
      wact <= 1'b0;
      fdone <= 1'b0;
      frame_cnt <= '0;
      dly_pending <= 1'b0;
      cal_pending <= 1'b0;
      cal_bank <= 1'b0;
      upd_cnt <= '0;
    end else begin
      fdone <= 1'b0;
      if (dly_arm) dly_pending <= 1'b1;
      if (cal_arm) cal_pending <= 1'b1;
      if (in_valid && (in_sof || wact)) begin
        logic [7:0] c;
        c = in_sof ? 8'd0 : wc;
        for (int a = 0; a < NANT; a++)
          for (int p = 0; p < 2; p++)
            for (int h = 0; h < 2; h++)
              fb[wbank][{c, 1'(h)}][a][p] <= in_data[a][p][h];
        wc <= c + 1'b1;
        wact <= (c != 8'd255);
        if (c == 8'd255) begin
          fdone <= 1'b1;
          wbank <= ~wbank;
        end
      end
      // frame-boundary events: delay update and calibration swap
      if (in_valid && in_sof) begin
        frame_cnt <= frame_cnt + 1;
        if (dly_pending && frame_cnt == dly_apply_frame) begin
          dly_pending <= 1'b0;
          upd_cnt <= '0;
          for (int a = 0; a < NANT; a++)
            for (int b = 0; b < NB; b++) begin
              dacc[a][b] <= {tau0_sh[a][b], 14'd0};
              rate[a][b] <= rate_sh[a][b];
            end
        end else begin
          upd_cnt <= upd_cnt + 1'b1;
          if (upd_cnt == ($clog2(DLY_UPD))'(DLY_UPD - 1))
            for (int a = 0; a < NANT; a++)
              for (int b = 0; b < NB; b++)
                dacc[a][b] <= dacc[a][b] + 34'(rate[a][b]);
        end
        if (cal_pending && frame_cnt == cal_swap_frame) begin
          cal_pending <= 1'b0;
          cal_bank <= ~cal_bank;
        end
      end
    end
  end

  // ---------------- sub-band map ------------------------------------------
  function automatic logic [11:0] entry_map(input logic [EW-1:0] e);
    // returns {valid, beam[2:0], chan[8:0]} -- valid only as 1 bit packed below
    logic [11:0] r;
    r = '0;
    for (int j = NSB - 1; j >= 0; j--) begin
      int b;
      b = 0;
      for (int i = 0; i < j; i++) b += 8 * int'(sb_wd[i]);
      if (int'(e) >= b && int'(e) < b + 8 * int'(sb_wd[j]))
        r = {sb_bm[j], 9'(int'(sb_st[j]) + int'(e) - b)};
    end
    return r;
  endfunction

  always_comb begin
    int tot;
    tot = 0;
    for (int j = 0; j < NSB; j++) tot += 8 * int'(sb_wd[j]);
    n_selected = (tot > int'(NENT)) ? EW'(NENT) : EW'(tot);
  end

  // ---------------- entry processing --------------------------------------
  logic       rbank;
  logic       pact;
  logic [7:0] pc;

  logic [15:0] q [0:1024];
  initial $readmemh("rtl/sin_quarter.hex", q);
  function automatic logic signed [15:0] sin_of(input logic [11:0] p);
    logic [10:0] i;
    i = p[10] ? 11'd1024 - {1'b0, p[9:0]} : {1'b0, p[9:0]};
    return p[11] ? -$signed(q[i]) : $signed(q[i]);
  endfunction

  // beam contribution of all local antennas for entry e
  function automatic void entry_sum(input logic [EW-1:0] e, input logic rb,
                                    input logic cb, output cplx16_t r [2],
                                    output logic [11:0] map);
    logic [8:0] ch;
    logic [2:0] bm;
    logic signed [15:0] acc [2][2];
    map = entry_map(e);
    ch  = map[8:0];
    bm  = map[11:9];
    acc = '{default: '0};
    for (int a = 0; a < NANT; a++) begin
      logic signed [11:0] x [2][2];        // [pol][re/im]
      logic signed [11:0] y [2][2];
      logic signed [19:0] d;
      logic signed [28:0] ph;
      logic signed [15:0] c, s;
      d  = 20'(dacc[a][BW'(bm)] >>> 14);
      ph = $signed({1'b0, ch}) * d;
      c  = sin_of(12'(ph >>> 11) + 12'd1024);
      s  = sin_of(12'(ph >>> 11));
      for (int p = 0; p < 2; p++) begin
        logic signed [11:0] xr, xi;
        xr = 12'(rnd_sat(48'(fb[rb][ch][a][p].re) <<< expo[a][ch[8:3]], 7, 12));
        xi = 12'(rnd_sat(48'(fb[rb][ch][a][p].im) <<< expo[a][ch[8:3]], 7, 12));
        y[p][0] = 12'(rnd_sat(48'(xr) * c - 48'(xi) * s, 15, 12));
        y[p][1] = 12'(rnd_sat(48'(xr) * s + 48'(xi) * c, 15, 12));
      end
      for (int o = 0; o < 2; o++) begin
        logic signed [47:0] sr, si;
        sr = '0;
        si = '0;
        for (int p = 0; p < 2; p++) begin
          cplx16_t m;
          m = cal[cb][e][a][o * 2 + p];
          sr += 48'(m.re) * y[p][0] - 48'(m.im) * y[p][1];
          si += 48'(m.re) * y[p][1] + 48'(m.im) * y[p][0];
        end
        x[o][0] = 12'(rnd_sat(sr, 18, 8));
        x[o][1] = 12'(rnd_sat(si, 18, 8));
        acc[o][0] += 16'(x[o][0]);
        acc[o][1] += 16'(x[o][1]);
      end
    end
    for (int o = 0; o < 2; o++) begin
      r[o].re = acc[o][0];
      r[o].im = acc[o][1];
    end
  endfunction

  typedef struct packed {
    logic          first;
    logic [EW-1:0] entry;
    logic [11:0]   map;
    cplx16_t       h;
    cplx16_t       v;
  } own_t;

  own_t    own_w, own_r;
  logic    own_we, own_empty, own_full;
  logic    xq_valid;
  cplx16_t xq_data [2];
  logic [$clog2(256):0] own_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      rbank <= 1'b0;
      pact <= 1'b0;
      pc <= '0;
      own_we <= 1'b0;
      xout_valid <= 1'b0;
    end else begin
      own_we <= 1'b0;
      xout_valid <= 1'b0;
      if (fdone) begin
        pact <= 1'b1;
        pc <= '0;
        rbank <= ~wbank;          // the bank just completed
      end else if (pact) begin
        cplx16_t r0 [2], r1 [2];
        logic [11:0] m0, m1;
        logic [EW-1:0] e0, e1;
        e0 = EW'({pc, 1'b0});
        e1 = EW'({pc, 1'b1});
        entry_sum(e0, rbank, cal_bank, r0, m0);
        entry_sum(e1, rbank, cal_bank, r1, m1);
        own_we <= 1'b1;
        xout_valid <= 1'b1;
        own_w.first <= (pc == 0);
        if (FPGA_ID == 0) begin
          own_w.entry <= e0;  own_w.map <= m0;  own_w.h <= r0[0];  own_w.v <= r0[1];
          xout_data <= r1;
        end else begin
          own_w.entry <= e1;  own_w.map <= m1;  own_w.h <= r1[0];  own_w.v <= r1[1];
          xout_data <= r0;
        end
        pc <= pc + 1'b1;
        if (pc == 8'(NENT / 2 - 1)) pact <= 1'b0;
      end
    end
  end

  sync_fifo #(.W($bits(own_t)), .DEPTH(256)) u_own (
    .clk, .rst,
    .wr_en(own_we), .wr_data(own_w), .full(own_full),
    .rd_en(xq_valid), .rd_data(own_r), .empty(own_empty), .count(own_cnt)
  );

  // the received partial sums are registered once, so that an own entry
  // written in the same clock is already readable from the FIFO
  always_ff @(posedge clk) begin
    if (rst) xq_valid <= 1'b0;
    else     xq_valid <= xin_valid;
    xq_data <= xin_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_sof <= 1'b0;
    end else begin
      out_valid <= xq_valid && !own_empty;
      out_sof <= xq_valid && !own_empty && own_r.first;
    end
    out_entry <= own_r.entry;
    out_beam  <= own_r.map[11:9];
    out_chan  <= own_r.map[8:0];
    out_data[0].re <= own_r.h.re + xq_data[0].re;
    out_data[0].im <= own_r.h.im + xq_data[0].im;
    out_data[1].re <= own_r.v.re + xq_data[1].re;
    out_data[1].im <= own_r.v.im + xq_data[1].im;
  end

  // the other FPGA must never send more entries than are waiting here
  property p_no_underrun;
    @(posedge clk) disable iff (rst) xq_valid |-> !own_empty;
  endproperty
  a_no_underrun: assert property (p_no_underrun);
endmodule
