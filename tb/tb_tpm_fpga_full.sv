// tb_tpm_fpga_full: one FPGA at its full size (8 antennas, 14-tap filter
// blocks, 384 beam entries, 2048-frame corner-turn blocks), taken through
// one complete corner-turn cycle: configuration over the register bus (all
// 7168 filter coefficients, 16 sub-bands of 24 channels = 384 entries,
// exponents, delays, calibration), PPS start, 2058 frames of ADC data
// (the filter preload takes 8 of them), and the readout of the first block
// as travelling-beam SPEAD packets (station mode FIRST). The other FPGA of the tile is represented by a partner that
// returns zero partial sums with the same timing. Checks: no error flag,
// every packet has the SPEAD magic word, 1024 payload words and a timestamp
// on a 128-frame boundary; 384 packets (24 groups x 16 sub-blocks) are sent,
// and each mechanism on the way (framing, filterbank, FFT, tile exchange,
// corner turn, packets, total power, spectrometer, capture) happens.
module tb_tpm_fpga_full;
  import lfaa_pkg::*;
  localparam int NA = 8, NS = 16, NENT = 384, TBLK = 2048, NFR = TBLK + 10;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic adc_valid = 0;
  logic [NS*LANES*ADC_W-1:0] adc_data;
  logic [3:0] pps = '0;
  logic cfg_we = 0; logic [31:0] cfg_addr; logic [63:0] cfg_wdata;
  logic xv, pv = 0; cplx16_t xd [2], pd [2];
  logic [63:0] tx_d; logic tx_v, tx_l;
  logic [63:0] cap_d; logic cap_v, cap_l; logic [31:0] cap_u;
  logic [47:0] pw [NS]; logic pw_done, sp_done;
  logic signed [31:0] sp_re, sp_im;
  logic [31:0] st_time, fnum, pcount; logic [47:0] ftns; logic [5:0] status;

  tpm_fpga dut (
    .clk, .rst, .adc_valid, .adc_data, .pps_samples(pps), .cfg_we, .cfg_addr, .cfg_wdata,
    .xout_valid(xv), .xout_data(xd), .xin_valid(pv), .xin_data(pd),
    .net_rx_tdata(64'd0), .net_rx_tvalid(1'b0), .net_rx_tlast(1'b0),
    .net_tx_tdata(tx_d), .net_tx_tvalid(tx_v), .net_tx_tlast(tx_l), .net_tx_tready(1'b1),
    .net_tx_dst_mac(), .net_tx_dst_ip(), .net_tx_dst_port(),
    .cap_tdata(cap_d), .cap_tvalid(cap_v), .cap_tlast(cap_l), .cap_tuser(cap_u),
    .power(pw), .power_done(pw_done), .spec_rd_chan(9'd65), .spec_rd_re(sp_re),
    .spec_rd_im(sp_im), .spec_done(sp_done), .start_time(st_time), .frame_num(fnum),
    .frame_time_ns(ftns), .pkt_count(pcount), .status);

  // partner FPGA: same entry timing, zero partial sums
  always @(posedge clk) begin
    pv <= !rst && xv;
    pd[0] <= '0; pd[1] <= '0;
  end

  int checks = 0, failures = 0;
  int m_frame = 0, m_pfb = 0, m_fft = 0, m_tbf = 0, m_ct = 0, m_pkt = 0, m_power = 0, m_spec = 0, m_cap = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.fr_sof) m_frame++;
    if (dut.pf_sof) m_pfb++;
    if (dut.ch_sof[0]) m_fft++;
    if (dut.tb_valid) m_tbf++;
    if (dut.ct_sof) m_ct++;
    if (pw_done) m_power++;
    if (sp_done) m_spec++;
    if (cap_v && cap_l) m_cap++;
    if (status != 0) begin
      failures++;
      if (failures < 10) $display("FAIL status %b", status);
    end
  end

  int wi = 0;
  logic [63:0] hw [9];
  always @(posedge clk) if (!rst && tx_v) begin
    if (wi < 9) hw[wi] = tx_d;
    if (wi == 8) begin
      longint ts;
      ts = longint'(hw[4][47:0]) - longint'(PRELOAD_NS);
      checks++;
      if (hw[0] != 64'h5304_0206_0000_0008 || hw[2] != {16'h8004, 48'd8192} ||
          ts < 0 || ts % (longint'(FRAME_NS) * 128) != 0 ||
          hw[5] != {16'h9011, 48'(hw[6][8:0]) * 48'd781250}) begin
        failures++;
        if (failures < 10) $display("FAIL header %h %h %h", hw[0], hw[2], hw[4]);
      end
    end
    wi++;
    if (tx_l) begin
      checks++;
      if (wi != 9 + 1024) begin failures++; $display("FAIL packet size %0d", wi); end
      m_pkt++;
      wi = 0;
    end
  end

  initial begin
    #4000000; failures++;
    $display("watchdog: frames %0d pfb %0d fft %0d tbf %0d ct %0d pkt %0d", m_frame, m_pfb, m_fft, m_tbf, m_ct, m_pkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int region, input int a, input logic [63:0] d);
    cfg_we <= 1; cfg_addr <= {4'(region), 28'(a)}; cfg_wdata <= d;
    @(negedge clk);
    cfg_we <= 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst <= 0;
    for (int n = 0; n < PFB_TAPS * PFB_N / 2; n++)
      cfg(3, n, 64'(int'(30000.0 * $sin(3.14159265 * (real'(n) + 0.5) / real'(PFB_TAPS * PFB_N)))));
    for (int j = 0; j < 16; j++) cfg(4, j, 64'(((j % 8) << 15) | (3 << 9) | (16 + 30 * j)));
    for (int a = 0; a < NA; a++) for (int g = 0; g < 64; g++) cfg(5, a * 64 + g, 64'd2);
    for (int a = 0; a < NA; a++) for (int b = 0; b < 8; b++)
      cfg(6, a * 8 + b, {22'(int'($urandom_range(0, 2000)) - 1000), 20'(int'($urandom_range(0, 20000)) - 10000)});
    cfg(7, 0, 64'd3);
    for (int e = 0; e < NENT; e++) for (int a = 0; a < NA; a++) for (int el = 0; el < 4; el++)
      cfg(8, (e << 5) | (a << 2) | el, (el == 0 || el == 3) ? 64'h4000_0000 : 64'h0000_0400);
    cfg(9, 0, 64'd2);
    cfg(2, 0, 64'd64);
    cfg(11, 0, 64'd65);
    cfg(11, 1, 64'h100);
    cfg(11, 2, 64'd64);
    cfg(10, 0, 64'd0);                // station mode FIRST
    cfg(0, 0, 64'd1000);
    cfg(0, 1, 64'd0);
    pps <= 4'b1100; @(negedge clk); pps <= 4'b1111;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < 256; c++) begin
        adc_valid <= (c < FRAME_M / LANES);
        for (int k = 0; k < NS * LANES; k++)
          adc_data[k * 8 +: 8] <= 8'($urandom_range(0, 80)) - 8'd40;
        if (c == 10) pps <= 4'b0000;
        @(negedge clk);
      end
    adc_valid <= 0;
    while (m_pkt < 384 && !$isunknown(m_pkt)) @(negedge clk);
    repeat (2000) @(negedge clk);
    begin
      int m [9];
      string nm [9];
      m = '{m_frame, m_pfb, m_fft, m_tbf, m_ct, m_pkt, m_power, m_spec, m_cap};
      nm = '{"frames", "filterbank frames", "FFT frames", "tile beam entries", "corner-turn frames",
             "travelling packets", "power integrations", "spectra", "capture blocks"};
      for (int k = 0; k < 9; k++) begin
        $display("%-22s %0d", nm[k], m[k]);
        checks++;
        if (m[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", nm[k]); end
      end
      checks++;
      if (m_pkt != 384) begin failures++; $display("FAIL %0d packets", m_pkt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
