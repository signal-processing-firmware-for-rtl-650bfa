// tpm_fpga: signal processing of one FPGA of a Tile Processing Module
// (paper Fig. 2): 8 dual-polarisation antennas (16 ADC signals, 4 samples per
// clock each) are framed and time-stamped, aligned for cable delays,
// channelized by the oversampling polyphase filterbank (WOLA filter + real
// FFT, 512 channels), beamformed for the selected channel/beam entries with
// delay and calibration corrections, exchanged with the other FPGA of the
// tile to form the 16-antenna tile beam for half of the entries, corner
// turned, added into the travelling station sum and sent as SPEAD packets.
// Diagnostics (per-signal total power, coarse spectrometer and channelized
// data capture) tap the stream.
//
// Interfaces that lead to parts outside the RTL are plain ports: the JESD204B
// receiver output (adc_*), the PPS sampled at 4 phases, the link to the
// other FPGA (x*_), the 40GbE receive/transmit streams (net_rx_*, net_tx_*)
// and the capture stream to the control network (cap_*). Control is a
// simple register write bus, cfg_we/cfg_addr/cfg_wdata, standing in for the
// AXI4-Lite bus of the original; the address map below is this design's:
//   addr[31:28] = 0 framer: addr[1:0] 0 sync_time<=wdata, 1 arm, 2 PPS phase
//                 1 cable delay of antenna addr[2:0] (signed 11 bit)
//                 2 total power integration length (frames)
//                 3 filter coefficient h[addr[12:0]] (18 bit)
//                 4 sub-band addr[3:0]: wdata {beam[17:15], width/8[14:9], start[8:0]}
//                 5 exponent: antenna addr[8:6], channel group addr[5:0]
//                 6 delay shadow: antenna addr[5:3], beam addr[2:0],
//                   wdata {rate[41:20], tau0[19:0]}
//                 7 apply delays at frame wdata[31:0]
//                 8 calibration shadow: {entry addr[13:5], antenna addr[4:2],
//                   element addr[1:0]}, wdata {re[31:16], im[15:0]}
//                 9 swap calibration bank at frame wdata[31:0]
//                10 station: addr[1:0] 0 mode, 1 station id, 2 sub-array, 3 antennas
//                11 diagnostics: addr[1:0] 0 capture channel, 1 spectrometer
//                   {sel_b[11:8], sel_a[3:0]}, 2 spectrometer integration frames
//                12 destination table entry addr[7:0]: addr[8]=0 stages
//                   {ip[47:16], udp port[15:0]}, addr[8]=1 writes the entry with
//                   MAC wdata[47:0] and the staged IP and port
//                13 stream identifier (tID) of the output stream, wdata[7:0]
// The destination of the output packets (net_tx_dst_*) is looked up in the
// destination table with the stream identifier and is held for the MAC.
// The packet formatter has a 256-word payload buffer: the corner turner and
// the CSP readout leave 16 idle clocks after each frame, which covers the 9
// header words per packet.
// In this design each FPGA drives its own station chain port; in the paper
// the second FPGA's corner-turned data is merged into the first FPGA's link.
module tpm_fpga import lfaa_pkg::*; #(
  parameter int unsigned NANT    = 8,
  parameter int unsigned FPGA_ID = 0,
  parameter int unsigned TAPS    = PFB_TAPS,
  parameter int unsigned NENT    = NENTRY,
  parameter int unsigned TBLK    = 2048
) (
  input  logic clk,
  input  logic rst,
  input  logic                             adc_valid,
  input  logic [2*NANT*LANES*ADC_W-1:0]    adc_data,
  input  logic [3:0]                       pps_samples,
  input  logic                             cfg_we,
  input  logic [31:0]                      cfg_addr,
  input  logic [63:0]                      cfg_wdata,
  // link to the other FPGA of the tile
  output logic                             xout_valid,
  output cplx16_t                          xout_data [2],
  input  logic                             xin_valid,
  input  cplx16_t                          xin_data [2],
  // 40GbE: incoming travelling packets, outgoing SPEAD packets
  input  logic [63:0]                      net_rx_tdata,
  input  logic                             net_rx_tvalid,
  input  logic                             net_rx_tlast,
  output logic [63:0]                      net_tx_tdata,
  output logic                             net_tx_tvalid,
  output logic                             net_tx_tlast,
  output logic [47:0]                      net_tx_dst_mac,
  output logic [31:0]                      net_tx_dst_ip,
  output logic [15:0]                      net_tx_dst_port,
  input  logic                             net_tx_tready,
  // channelized data capture towards the control network
  output logic [63:0]                      cap_tdata,
  output logic                             cap_tvalid,
  output logic                             cap_tlast,
  output logic [31:0]                      cap_tuser,
  // monitoring
  output logic [47:0]                      power [2*NANT],
  output logic                             power_done,
  input  logic [8:0]                       spec_rd_chan,
  output logic signed [31:0]               spec_rd_re,
  output logic signed [31:0]               spec_rd_im,
  output logic                             spec_done,
  output logic [31:0]                      start_time,
  output logic [31:0]                      frame_num,
  output logic [47:0]                      frame_time_ns,
  output logic [31:0]                      pkt_count,
  output logic [5:0]                       status     // overrun / error flags
);
  localparam int unsigned NSIG   = 2 * NANT;
  localparam int unsigned NENT_L = NENT / 2;
  localparam int unsigned SUB_T  = 128;
  localparam int unsigned GRP    = 8;
  localparam int unsigned NSUB   = TBLK / SUB_T;

  // ---------------- configuration registers ----------------------------
  logic [3:0]  region;
  logic        sync_we, arm;
  logic [1:0]  pps_sel;
  logic signed [10:0] cdly [NANT];
  logic [23:0] tp_frames, sp_frames;
  logic [1:0]  st_mode;
  logic [15:0] station_id, n_ant;
  logic [7:0]  sub_array;
  logic [8:0]  cap_chan;
  logic [3:0]  sp_a, sp_b;
  logic [47:0] dst_stage;
  logic [7:0]  tx_tid;

  assign region  = cfg_addr[31:28];
  assign sync_we = cfg_we && region == 4'd0 && cfg_addr[1:0] == 2'd0;
  assign arm     = cfg_we && region == 4'd0 && cfg_addr[1:0] == 2'd1;

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sel <= '0;
      for (int a = 0; a < NANT; a++) cdly[a] <= '0;
      tp_frames <= 24'd1;
      sp_frames <= 24'd1;
      st_mode <= 2'd0;
      station_id <= '0;
      n_ant <= 16'(NSIG);
      sub_array <= '0;
      cap_chan <= '0;
      sp_a <= '0;
      sp_b <= '0;
      dst_stage <= '0;
      tx_tid <= '0;
    end else if (cfg_we) begin
      unique case (region)
        4'd0: if (cfg_addr[1:0] == 2'd2) pps_sel <= cfg_wdata[1:0];
        4'd1: cdly[cfg_addr[$clog2(NANT)-1:0]] <= cfg_wdata[10:0];
        4'd2: tp_frames <= cfg_wdata[23:0];
        4'd10: unique case (cfg_addr[1:0])
                 2'd0: st_mode <= cfg_wdata[1:0];
                 2'd1: station_id <= cfg_wdata[15:0];
                 2'd2: sub_array <= cfg_wdata[7:0];
                 default: n_ant <= cfg_wdata[15:0];
               endcase
        4'd11: unique case (cfg_addr[1:0])
                 2'd0: cap_chan <= cfg_wdata[8:0];
                 2'd1: begin sp_a <= cfg_wdata[3:0]; sp_b <= cfg_wdata[11:8]; end
                 default: sp_frames <= cfg_wdata[23:0];
               endcase
        4'd12: if (!cfg_addr[8]) dst_stage <= cfg_wdata[47:0];
        4'd13: tx_tid <= cfg_wdata[7:0];
        default: ;
      endcase
    end
  end

  // ---------------- framing and cable delay ------------------------------
  logic                          fr_valid, fr_sof, fr_run;
  logic [NSIG*LANES*ADC_W-1:0]   fr_data;
  logic [31:0]                   sync_time;
  logic [47:0]                   tstamp;
  logic [1:0]                    pps_edge;

  framer #(.NSIG(NSIG)) u_framer (
    .clk, .rst, .in_valid(adc_valid), .in_data(adc_data), .pps_samples,
    .pps_phase_sel(pps_sel), .sync_time_we(sync_we), .sync_time_wdata(cfg_wdata[31:0]),
    .arm, .out_valid(fr_valid), .out_sof(fr_sof), .out_data(fr_data),
    .running(fr_run), .sync_time, .start_time, .timestamp(tstamp), .frame_num,
    .frame_time_ns, .pps_edge_phase(pps_edge));

  total_power #(.NSIG(NSIG)) u_power (
    .clk, .rst, .in_valid(fr_valid), .in_sof(fr_sof), .in_data(fr_data),
    .int_frames(tp_frames), .power, .done(power_done));

  logic                        cd_valid, cd_sof;
  logic [NSIG*LANES*ADC_W-1:0] cd_data;

  cable_delay #(.NSIG(NSIG)) u_cdly (
    .clk, .rst, .in_valid(fr_valid), .in_sof(fr_sof), .in_data(fr_data), .dly(cdly),
    .out_valid(cd_valid), .out_sof(cd_sof), .out_data(cd_data));

  // ---------------- channelizer -------------------------------------------
  logic                   pf_valid, pf_sof, pf_overrun;
  logic [9:0]             pf_rot;
  logic signed [CH_W-1:0] pf_data [NSIG][LANES];

  pfb_filter #(.NSIG(NSIG), .TAPS(TAPS)) u_pfb (
    .clk, .rst, .in_valid(cd_valid), .in_sof(cd_sof), .in_data(cd_data),
    .coef_we(cfg_we && region == 4'd3), .coef_addr(cfg_addr[$clog2(TAPS*PFB_N/2)-1:0]),
    .coef_data(cfg_wdata[COEF_W-1:0]),
    .out_valid(pf_valid), .out_sof(pf_sof), .out_rot(pf_rot), .out_data(pf_data),
    .overrun(pf_overrun));

  logic    ch_valid [NANT];
  logic    ch_sof   [NANT];
  cplx18_t ch_ant   [NANT][2][2];
  cplx18_t ch_sig   [NSIG][2];
  logic    ch_ovf   [NANT][2][2];

  for (genvar a = 0; a < NANT; a++) begin : g_fft
    fft_real u_fft (
      .clk, .rst, .in_valid(pf_valid), .in_sof(pf_sof), .in_rot(pf_rot),
      .in_data(pf_data[2*a:2*a+1]), .out_valid(ch_valid[a]), .out_sof(ch_sof[a]),
      .out_data(ch_ant[a]), .out_ovf(ch_ovf[a]));
    assign ch_sig[2*a]   = ch_ant[a][0];
    assign ch_sig[2*a+1] = ch_ant[a][1];
  end

  logic fft_ovf;
  always_comb begin
    fft_ovf = 1'b0;
    for (int a = 0; a < NANT; a++)
      for (int s = 0; s < 2; s++)
        for (int h = 0; h < 2; h++) fft_ovf |= ch_valid[a] && ch_ovf[a][s][h];
  end

  // ---------------- diagnostics ------------------------------------------
  spectrometer #(.NSIG(NSIG)) u_spec (
    .clk, .rst, .in_valid(ch_valid[0]), .in_sof(ch_sof[0]), .in_data(ch_sig),
    .sel_a(sp_a[$clog2(NSIG)-1:0]), .sel_b(sp_b[$clog2(NSIG)-1:0]), .int_frames(sp_frames),
    .rd_chan(spec_rd_chan), .rd_re(spec_rd_re), .rd_im(spec_rd_im), .done(spec_done));

  chan_capture #(.NSIG(NSIG)) u_cap (
    .clk, .rst, .in_valid(ch_valid[0]), .in_sof(ch_sof[0]), .in_data(ch_sig),
    .sel_chan(cap_chan), .m_tdata(cap_tdata), .m_tvalid(cap_tvalid), .m_tlast(cap_tlast),
    .m_tuser(cap_tuser));

  // ---------------- tile beamformer ---------------------------------------
  logic                     tb_valid, tb_sof, cal_bank;
  logic [$clog2(NENT)-1:0]  tb_entry, n_sel;
  logic [2:0]               tb_beam;
  logic [8:0]               tb_chan;
  cplx16_t                  tb_data [2];
  logic [31:0]              tb_frames;
  cplx16_t                  cal_w;

  assign cal_w.re = cfg_wdata[31:16];
  assign cal_w.im = cfg_wdata[15:0];

  tile_beamformer #(.NANT(NANT), .NENT(NENT), .FPGA_ID(FPGA_ID)) u_tbf (
    .clk, .rst, .in_valid(ch_valid[0]), .in_sof(ch_sof[0]), .in_data(ch_ant),
    .sb_we(cfg_we && region == 4'd4), .sb_idx(cfg_addr[3:0]), .sb_start(cfg_wdata[8:0]),
    .sb_width8(cfg_wdata[14:9]), .sb_beam(cfg_wdata[17:15]),
    .exp_we(cfg_we && region == 4'd5), .exp_ant(cfg_addr[6 +: $clog2(NANT)]),
    .exp_grp(cfg_addr[5:0]), .exp_val(cfg_wdata[2:0]),
    .dly_we(cfg_we && region == 4'd6), .dly_ant(cfg_addr[3 +: $clog2(NANT)]),
    .dly_beam(cfg_addr[2:0]), .dly_tau0(cfg_wdata[19:0]), .dly_rate(cfg_wdata[41:20]),
    .dly_arm(cfg_we && region == 4'd7), .dly_apply_frame(cfg_wdata[31:0]),
    .cal_we(cfg_we && region == 4'd8), .cal_entry(cfg_addr[5 +: $clog2(NENT)]),
    .cal_ant(cfg_addr[2 +: $clog2(NANT)]), .cal_elem(cfg_addr[1:0]), .cal_data(cal_w),
    .cal_arm(cfg_we && region == 4'd9), .cal_swap_frame(cfg_wdata[31:0]),
    .xout_valid, .xout_data, .xin_valid, .xin_data,
    .out_valid(tb_valid), .out_sof(tb_sof), .out_entry(tb_entry), .out_beam(tb_beam),
    .out_chan(tb_chan), .out_data(tb_data), .frame_cnt(tb_frames), .cal_bank,
    .n_selected(n_sel));

  // channel/beam of every local entry, for the packet headers
  logic [11:0] emap [NENT_L];
  always_ff @(posedge clk)
    if (tb_valid) emap[($clog2(NENT_L))'(tb_entry >> 1)] <= {tb_beam, tb_chan};

  // ---------------- corner turner and station beamformer ------------------
  logic        ct_valid, ct_sof, ct_last, ct_overrun;
  logic [63:0] ct_data;
  logic [$clog2(NENT_L/GRP)-1:0] ct_grp;
  logic [$clog2(NSUB)-1:0]       ct_sub;
  logic [31:0] ct_blk;
  logic [8:0]  ct_chan;
  logic [2:0]  ct_beam;

  corner_turner #(.NENT_L(NENT_L), .TBLK(TBLK), .SUB_T(SUB_T), .GRP(GRP)) u_ct (
    .clk, .rst, .in_valid(tb_valid), .in_sof(tb_sof), .in_chan(tb_chan), .in_beam(tb_beam),
    .in_data(tb_data), .out_valid(ct_valid), .out_sof(ct_sof), .out_last(ct_last),
    .out_data(ct_data), .out_grp(ct_grp), .out_sub(ct_sub), .out_blk(ct_blk),
    .out_chan(ct_chan), .out_beam(ct_beam), .overrun(ct_overrun));

  // travelling packets from the previous TPM
  logic [63:0] rx_data;
  logic        rx_valid, rx_last, rx_err, rx_first, rx_ready;
  logic [31:0] rx_user, rx_pcnt;
  logic [47:0] rx_len, rx_ref, rx_ts, rx_freq;
  logic [7:0]  rx_sub;
  logic [15:0] rx_stat, rx_nant;

  spead_receiver u_rx (
    .clk, .rst, .s_tdata(net_rx_tdata), .s_tvalid(net_rx_tvalid), .s_tready(rx_ready),
    .s_tlast(net_rx_tlast), .m_tdata(rx_data), .m_tvalid(rx_valid), .m_tready(1'b1),
    .m_tlast(rx_last), .m_tuser(rx_user), .pkt_counter(rx_pcnt), .pkt_length(rx_len),
    .ref_time(rx_ref), .timestamp(rx_ts), .center_freq(rx_freq), .sub_array_id(rx_sub),
    .station_id(rx_stat), .n_antennas(rx_nant), .hdr_error(rx_err));

  always_ff @(posedge clk) begin
    if (rst) rx_first <= 1'b1;
    else if (rx_valid) rx_first <= rx_last;
  end

  logic        so_valid, so_sof, so_last, cs_valid, cs_sof, cs_last, lq_ovf;
  logic [63:0] so_data, cs_data;
  logic [$clog2(GRP)-1:0] cs_chan;

  station_beamformer #(.SUB_T(SUB_T), .GRP(GRP), .NSUB(NSUB)) u_sbf (
    .clk, .rst, .mode(st_mode),
    .loc_valid(ct_valid), .loc_sof(ct_sof), .loc_data(ct_data),
    .tin_valid(rx_valid), .tin_sof(rx_valid && rx_first), .tin_data(rx_data),
    .tout_valid(so_valid), .tout_sof(so_sof), .tout_last(so_last), .tout_data(so_data),
    .csp_valid(cs_valid), .csp_sof(cs_sof), .csp_last(cs_last), .csp_data(cs_data),
    .csp_chan(cs_chan), .lq_overflow(lq_ovf));

  // frame tags for the headers: corner turner order is kept along the chain
  logic [63:0] tag_w, tag_r;
  logic        tag_empty, tag_full;
  logic [4:0]  tag_cnt;
  logic [47:0] first_frame;
  assign first_frame = 48'(ct_blk) * 48'(TBLK) + 48'(ct_sub) * 48'(SUB_T);
  assign tag_w = {ct_beam, ct_chan, 4'(ct_grp), first_frame};

  sync_fifo #(.W(64), .DEPTH(16)) u_tag (
    .clk, .rst, .wr_en(ct_valid && ct_sof && (st_mode != 2'd2 || ct_sub == 0)),
    .wr_data(tag_w), .full(tag_full),
    .rd_en((st_mode != 2'd2 && so_valid && so_sof) ||
           (st_mode == 2'd2 && cs_valid && cs_last && cs_chan == ($clog2(GRP))'(GRP - 1))),
    .rd_data(tag_r), .empty(tag_empty), .count(tag_cnt));

  // ---------------- SPEAD formatter to the 40GbE link ---------------------
  logic [63:0] f_data;
  logic        f_valid, f_last, f_ready;
  logic [31:0] f_user;
  logic [47:0] f_len, f_ts;
  logic [11:0] csp_map;
  logic        fmt_drop;

  assign csp_map = emap[($clog2(NENT_L))'(int'(tag_r[51:48]) * GRP + int'(cs_chan))];

  always_comb begin
    if (st_mode == 2'd2) begin
      f_data  = cs_data;
      f_valid = cs_valid;
      f_last  = cs_last;
      f_user  = {3'b0, 16'(tag_r[51:48]) * 16'(GRP) + 16'(cs_chan), 1'b0, csp_map[11:0]};
      f_len   = 48'(SUB_T * NSUB * 4);              // bytes: 8+8 bit, 2 pol
    end else begin
      f_data  = so_data;
      f_valid = so_valid;
      f_last  = so_last;
      f_user  = {3'b0, 16'(tag_r[51:48]), 1'b0, tag_r[63:52]};
      f_len   = 48'(SUB_T * GRP * 8);               // bytes: 16+16 bit, 2 pol
    end
    f_ts = 48'(PRELOAD_NS) + tag_r[47:0] * 48'(FRAME_NS);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pkt_count <= '0;
      fmt_drop <= 1'b0;
    end else begin
      if (f_valid && f_last) pkt_count <= pkt_count + 1;
      if (f_valid && !f_ready) fmt_drop <= 1'b1;
    end
  end

  spead_formatter #(.PAY_DEPTH(256)) u_fmt (
    .clk, .rst, .s_tdata(f_data), .s_tvalid(f_valid), .s_tready(f_ready), .s_tlast(f_last),
    .s_tuser(f_user), .pkt_counter(pkt_count), .pkt_length(f_len),
    .ref_time(48'(start_time)), .timestamp(f_ts), .sub_array_id(sub_array),
    .station_id(station_id), .n_antennas(n_ant),
    .m_tdata(net_tx_tdata), .m_tvalid(net_tx_tvalid), .m_tready(net_tx_tready),
    .m_tlast(net_tx_tlast));

  dest_lut u_dest (
    .clk, .wr_en(cfg_we && region == 4'd12 && cfg_addr[8]), .wr_tid(cfg_addr[7:0]),
    .wr_mac(cfg_wdata[47:0]), .wr_ip(dst_stage[47:16]), .wr_port(dst_stage[15:0]),
    .rd_tid(tx_tid), .rd_mac(net_tx_dst_mac), .rd_ip(net_tx_dst_ip),
    .rd_port(net_tx_dst_port));

  assign status = {rx_err, fmt_drop, lq_ovf, ct_overrun, fft_ovf, pf_overrun};
endmodule
