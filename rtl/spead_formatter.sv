// spead_formatter: wraps a payload stream into SPEAD-64-48 packets with the
// 72-byte CSP header of the paper (Sec. "SPEAD formatter", Tables 1-4).
//
// Input: an AXI4-Stream-like slave (s_tdata 64 bit, s_tvalid, s_tready,
// s_tlast, s_tuser 32 bit). On the first accepted beat of a packet the header
// fields are registered from s_tuser (logical channel = tuser[28:13], beam =
// tuser[12:9], physical channel = tuser[8:0]) and from the dedicated inputs
// (packet counter, packet length, reference time, timestamp, sub-array,
// station, number of antennas); the centre frequency is computed as
// physical channel x 781250 Hz. The registered header goes into a header
// FIFO, the payload into a payload FIFO, and a controller emits on the
// master side the 9 header words followed by the payload up to s_tlast.
// Header words (MSb = 1 marks an immediate item):
//   0: magic 0x53, version 4, item-id width 2, heap-address width 6, 8 items
//   1: 0x0001 heap counter  {logical channel 16, packet counter 32}
//   2: 0x0004 packet length (48)
//   3: 0x1027 reference time (48)
//   4: 0x1600 timestamp, ns (48)
//   5: 0x1011 centre frequency, Hz (48)
//   6: 0x3000 CSP channel info {reserved 16, beam 16, physical channel 16}
//   7: 0x3001 CSP antenna info {reserved 8, sub-array 8, station 16, antennas 16}
//   8: 0x3300 CSP sample vector, absolute, payload offset 0
// Only the CSP header type is built (the paper's LMC types 0x2000-0x2003 are
// set at compile time in the original and are not provided here). The
// original's clock-domain crossing and width conversion in the FIFOs are not
// modelled: one clock, 64-bit data throughout. m_tready backpressure is
// honoured; s_tready falls when the payload FIFO is full.
module spead_formatter import lfaa_pkg::*; #(
  parameter int unsigned PAY_DEPTH = 64,
  parameter int unsigned HDR_DEPTH = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic [63:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  input  logic [31:0] s_tuser,
  input  logic [31:0] pkt_counter,
  input  logic [47:0] pkt_length,
  input  logic [47:0] ref_time,
  input  logic [47:0] timestamp,
  input  logic [7:0]  sub_array_id,
  input  logic [15:0] station_id,
  input  logic [15:0] n_antennas,
  output logic [63:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast
);
  typedef struct packed {
    logic [15:0] lchan;
    logic [31:0] pcnt;
    logic [47:0] plen;
    logic [47:0] rtime;
    logic [47:0] tstamp;
    logic [47:0] freq;
    logic [3:0]  beam;
    logic [8:0]  pchan;
    logic [7:0]  subarr;
    logic [15:0] station;
    logic [15:0] nant;
  } hdr_t;

  logic in_pkt;          // inside a packet on the slave side
  logic acc_beat;
  hdr_t hdr_w, hdr_r;
  logic hf_full, hf_empty, hf_rd;
  logic pf_full, pf_empty, pf_rd;
  logic [64:0] pf_data;
  logic [$clog2(PAY_DEPTH):0] pf_cnt;
  logic [$clog2(HDR_DEPTH):0] hf_cnt;

  assign s_tready = !pf_full && !hf_full;
  assign acc_beat = s_tvalid && s_tready;

  always_comb begin
    hdr_w.lchan   = s_tuser[28:13];
    hdr_w.pcnt    = pkt_counter;
    hdr_w.plen    = pkt_length;
    hdr_w.rtime   = ref_time;
    hdr_w.tstamp  = timestamp;
    hdr_w.freq    = 48'(s_tuser[8:0]) * 48'd781250;
    hdr_w.beam    = s_tuser[12:9];
    hdr_w.pchan   = s_tuser[8:0];
    hdr_w.subarr  = sub_array_id;
    hdr_w.station = station_id;
    hdr_w.nant    = n_antennas;
  end

  always_ff @(posedge clk) begin
    if (rst) in_pkt <= 1'b0;
    else if (acc_beat) in_pkt <= !s_tlast;
  end

  sync_fifo #(.W($bits(hdr_t)), .DEPTH(HDR_DEPTH)) u_hdr (
    .clk, .rst, .wr_en(acc_beat && !in_pkt), .wr_data(hdr_w), .full(hf_full),
    .rd_en(hf_rd), .rd_data(hdr_r), .empty(hf_empty), .count(hf_cnt));

  sync_fifo #(.W(65), .DEPTH(PAY_DEPTH)) u_pay (
    .clk, .rst, .wr_en(acc_beat), .wr_data({s_tlast, s_tdata}), .full(pf_full),
    .rd_en(pf_rd), .rd_data(pf_data), .empty(pf_empty), .count(pf_cnt));

  // ---------------- output controller -----------------------------------
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_t;
  state_t     st;
  logic [3:0] hw;

  function automatic logic [63:0] hword(input hdr_t h, input logic [3:0] i);
    unique case (i)
      4'd0: return 64'h5304_0206_0000_0008;
      4'd1: return {1'b1, ID_HEAP_CNT[14:0], h.lchan, h.pcnt};
      4'd2: return {1'b1, ID_PKT_LEN[14:0],  h.plen};
      4'd3: return {1'b1, ID_REF_TIME[14:0], h.rtime};
      4'd4: return {1'b1, ID_TSTAMP[14:0],   h.tstamp};
      4'd5: return {1'b1, ID_CFREQ[14:0],    h.freq};
      4'd6: return {1'b1, ID_CSP_CHAN[14:0], 16'h0, 12'h0, h.beam, 7'h0, h.pchan};
      4'd7: return {1'b1, ID_CSP_ANT[14:0],  8'h0, h.subarr, h.station, h.nant};
      default: return {1'b0, ID_CSP_SAMP[14:0], 48'h0};
    endcase
  endfunction

  logic out_fire;
  assign out_fire = !m_tvalid || m_tready;   // output register may load

  assign hf_rd = out_fire && st == S_HDR && hw == 4'd8;
  assign pf_rd = out_fire && st == S_PAY && !pf_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE;
      hw <= '0;
      m_tvalid <= 1'b0;
      m_tlast <= 1'b0;
      m_tdata <= '0;
    end else if (out_fire) begin
      m_tvalid <= 1'b0;
      m_tlast <= 1'b0;
      unique case (st)
        S_IDLE: if (!hf_empty) begin
          st <= S_HDR;
          hw <= '0;
        end
        S_HDR: begin
          m_tvalid <= 1'b1;
          m_tdata <= hword(hdr_r, hw);
          hw <= hw + 1'b1;
          if (hw == 4'd8) st <= S_PAY;
        end
        default: if (!pf_empty) begin
          m_tvalid <= 1'b1;
          m_tdata <= pf_data[63:0];
          m_tlast <= pf_data[64];
          if (pf_data[64]) st <= S_IDLE;
        end
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (rst)
                             m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule
