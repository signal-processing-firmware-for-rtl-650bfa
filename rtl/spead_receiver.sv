// spead_receiver: inverse of spead_formatter (paper Sec. "SPEAD receiver").
// It reads the SPEAD header words of an incoming packet, recognises the
// items by identifier (so the item order does not matter), regenerates the
// side channel s_tuser layout of the formatter (logical channel in [28:13],
// beam in [12:9], physical channel in [8:0]) and the dedicated outputs, and
// then forwards the payload words with m_tuser until the beat with s_tlast.
// Header outputs change only at the start of a packet's payload and are held
// for the whole payload. A wrong magic number or version raises hdr_error
// for that packet, whose payload is then dropped. The number of header items
// is taken from the first header word. Single clock, 64-bit data; the
// original's FIFOs for clock and width changes are not modelled. s_tready
// follows m_tready (no buffering beyond the output register).
module spead_receiver import lfaa_pkg::*; (
  input  logic clk,
  input  logic rst,
  input  logic [63:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  output logic [63:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  output logic [31:0] m_tuser,
  output logic [31:0] pkt_counter,
  output logic [47:0] pkt_length,
  output logic [47:0] ref_time,
  output logic [47:0] timestamp,
  output logic [47:0] center_freq,
  output logic [7:0]  sub_array_id,
  output logic [15:0] station_id,
  output logic [15:0] n_antennas,
  output logic        hdr_error
);
  typedef enum logic [1:0] {R_MAGIC, R_ITEMS, R_PAY, R_DROP} rstate_t;
  rstate_t    st;
  logic [15:0] nitems, icnt;
  logic [15:0] lchan;
  logic [3:0]  beam;
  logic [8:0]  pchan;
  logic        beat;

  assign s_tready = !m_tvalid || m_tready;
  assign beat = s_tvalid && s_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= R_MAGIC;
      m_tvalid <= 1'b0;
      m_tlast <= 1'b0;
      m_tdata <= '0;
      m_tuser <= '0;
      hdr_error <= 1'b0;
      nitems <= '0;
      icnt <= '0;
      {lchan, beam, pchan} <= '0;
      {pkt_counter, pkt_length, ref_time, timestamp, center_freq} <= '0;
      {sub_array_id, station_id, n_antennas} <= '0;
    end else begin
      if (m_tvalid && m_tready) begin
        m_tvalid <= 1'b0;
        m_tlast <= 1'b0;
      end
      if (beat) begin
        unique case (st)
          R_MAGIC: begin
            hdr_error <= !(s_tdata[63:48] == 16'h5304 && s_tdata[47:32] == 16'h0206);
            nitems <= s_tdata[15:0];
            icnt <= '0;
            st <= (s_tdata[63:48] == 16'h5304 && s_tdata[47:32] == 16'h0206) ?
                  R_ITEMS : R_DROP;
            if (s_tlast) st <= R_MAGIC;
          end
          R_ITEMS: begin
            unique case (s_tdata[62:48])
              ID_HEAP_CNT[14:0]: begin lchan <= s_tdata[47:32]; pkt_counter <= s_tdata[31:0]; end
              ID_PKT_LEN[14:0]:  pkt_length <= s_tdata[47:0];
              ID_REF_TIME[14:0]: ref_time <= s_tdata[47:0];
              ID_TSTAMP[14:0]:   timestamp <= s_tdata[47:0];
              ID_CFREQ[14:0]:    center_freq <= s_tdata[47:0];
              ID_CSP_CHAN[14:0]: begin beam <= s_tdata[19:16]; pchan <= s_tdata[8:0]; end
              ID_CSP_ANT[14:0]:  begin sub_array_id <= s_tdata[39:32];
                                       station_id <= s_tdata[31:16];
                                       n_antennas <= s_tdata[15:0]; end
              default: ;
            endcase
            icnt <= icnt + 1'b1;
            if (icnt == nitems - 1'b1) st <= R_PAY;
            if (s_tlast) st <= R_MAGIC;
          end
          R_PAY: begin
            m_tvalid <= 1'b1;
            m_tdata <= s_tdata;
            m_tlast <= s_tlast;
            m_tuser <= {3'b0, lchan, beam, pchan};
            if (s_tlast) st <= R_MAGIC;
          end
          default: if (s_tlast) st <= R_MAGIC;
        endcase
      end
    end
  end
endmodule
