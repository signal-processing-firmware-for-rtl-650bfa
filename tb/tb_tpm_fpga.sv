// tb_tpm_fpga: end-to-end test of the FPGA signal chain at reduced size
// (2 antennas per FPGA, 2-tap filter blocks, 32 beam entries, 256-frame
// corner-turn blocks). Two FPGAs form a tile: their partial beams are
// exchanged, FPGA 0 runs as the FIRST link of the station chain and sends its
// travelling frames as SPEAD packets to FPGA 1, which runs as the LAST link
// and emits CSP packets while its output link stalls at random.
// Everything is configured through the register bus: filter coefficients,
// sub-bands, exponents, delays (applied at frame 3), calibration (bank swap at
// frame 2), cable delays, diagnostics, station mode; framing starts at a PPS.
// Checks: no overrun/overflow/drop/error flag; every packet starts with the
// SPEAD magic word, has the payload length of its type, a timestamp
// t1 + n*1080 ns at a frame boundary of its type, a centre frequency of
// 781.25 kHz x the physical channel, and a channel that was selected; the
// payload of every travelling packet equals FPGA 0's corner-turner output;
// each packet sent by FPGA 0 is received by FPGA 1. Each mechanism (framing,
// filterbank, FFT, tile exchange, calibration swap, delay application,
// corner turn, travelling and CSP packets, output stall, power, spectrometer,
// capture and destination lookup) is counted and must have happened.
module tb_tpm_fpga;
  import lfaa_pkg::*;
  localparam int NA = 2, NS = 2 * NA, TAPS = 2, NENT = 32, TBLK = 256, NFR = 275;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic adc_valid = 0;
  logic [NS*LANES*ADC_W-1:0] adc_data [2];
  logic [3:0] pps = '0;
  logic cfg_we [2] = '{0, 0}; logic [31:0] cfg_addr; logic [63:0] cfg_wdata;
  logic xv [2]; cplx16_t xd [2][2];
  logic [63:0] tx_d [2]; logic tx_v [2], tx_l [2], tx_r [2];
  logic [63:0] cap_d [2]; logic cap_v [2], cap_l [2]; logic [31:0] cap_u [2];
  logic [47:0] pw [2][NS]; logic pw_done [2], sp_done [2];
  logic signed [31:0] sp_re [2], sp_im [2];
  logic [47:0] dmac [2]; logic [31:0] dip [2]; logic [15:0] dport [2];
  logic [31:0] st_time [2], fnum [2], pcount [2]; logic [47:0] ftns [2]; logic [5:0] status [2];

  for (genvar i = 0; i < 2; i++) begin : g_t
    tpm_fpga #(.NANT(NA), .FPGA_ID(i), .TAPS(TAPS), .NENT(NENT), .TBLK(TBLK)) dut (
      .clk, .rst, .adc_valid, .adc_data(adc_data[i]), .pps_samples(pps),
      .cfg_we(cfg_we[i]), .cfg_addr, .cfg_wdata,
      .xout_valid(xv[i]), .xout_data(xd[i]), .xin_valid(xv[1-i]), .xin_data(xd[1-i]),
      .net_rx_tdata(tx_d[0]), .net_rx_tvalid(i == 1 ? tx_v[0] : 1'b0), .net_rx_tlast(tx_l[0]),
      .net_tx_tdata(tx_d[i]), .net_tx_tvalid(tx_v[i]), .net_tx_tlast(tx_l[i]), .net_tx_tready(tx_r[i]),
      .net_tx_dst_mac(dmac[i]), .net_tx_dst_ip(dip[i]), .net_tx_dst_port(dport[i]),
      .cap_tdata(cap_d[i]), .cap_tvalid(cap_v[i]), .cap_tlast(cap_l[i]), .cap_tuser(cap_u[i]),
      .power(pw[i]), .power_done(pw_done[i]), .spec_rd_chan(9'd65), .spec_rd_re(sp_re[i]),
      .spec_rd_im(sp_im[i]), .spec_done(sp_done[i]), .start_time(st_time[i]), .frame_num(fnum[i]),
      .frame_time_ns(ftns[i]), .pkt_count(pcount[i]), .status(status[i]));
  end
  assign tx_r[0] = 1'b1;               // FPGA 0 sends straight into FPGA 1
  always @(negedge clk) tx_r[1] <= ($urandom_range(0, 15) != 0);

  int checks = 0, failures = 0;
  // mechanism counters
  int m_frame, m_pfb, m_fft, m_xchg, m_swap, m_dly, m_ct, m_tpkt, m_rpkt, m_cpkt, m_stall,
      m_power, m_spec, m_cap, m_dest;
  initial begin
    {m_frame, m_pfb, m_fft, m_xchg, m_swap, m_dly, m_ct, m_tpkt, m_rpkt, m_cpkt, m_stall} = '0;
    {m_power, m_spec, m_cap, m_dest} = '0;
  end
  logic cb_q = 0;
  always @(posedge clk) if (!rst) begin
    if (g_t[0].dut.fr_sof) m_frame++;
    if (g_t[0].dut.pf_sof) m_pfb++;
    if (g_t[0].dut.ch_sof[0]) m_fft++;
    if (xv[0] && xv[1]) m_xchg++;
    cb_q <= g_t[1].dut.cal_bank;
    if (g_t[1].dut.cal_bank != cb_q) m_swap++;
    if (g_t[0].dut.u_tbf.in_sof && g_t[0].dut.u_tbf.frame_cnt == 32'd3) m_dly++;
    if (g_t[0].dut.ct_sof) m_ct++;
    if (g_t[1].dut.rx_valid && g_t[1].dut.rx_last) m_rpkt++;
    if (tx_v[1] && !tx_r[1]) m_stall++;
    if (pw_done[0]) m_power++;
    if (sp_done[0]) m_spec++;
    if (cap_v[0] && cap_l[0]) m_cap++;
    for (int i = 0; i < 2; i++) if (status[i] != 0) begin
      failures++;
      if (failures < 10) $display("FAIL status fpga%0d = %b", i, status[i]);
    end
  end

  // selected channels (sub-bands below)
  function automatic bit selected(input int ch);
    return (ch >= 64 && ch < 80) || (ch >= 200 && ch < 208) || (ch >= 300 && ch < 308);
  endfunction

  // FPGA 0 corner-turner output, to be found again in its travelling packets
  logic [63:0] ctq [$];
  always @(posedge clk) if (!rst && g_t[0].dut.ct_valid) ctq.push_back(g_t[0].dut.ct_data);

  // packet checker for both outputs
  int wi [2] = '{0, 0};
  logic [63:0] hw [2][9];
  for (genvar i = 0; i < 2; i++) begin : g_chk
    always @(posedge clk) if (!rst && tx_v[i] && tx_r[i]) begin
      if (wi[i] < 9) hw[i][wi[i]] = tx_d[i];
      if (wi[i] == 8) begin
        longint ts;
        int pch, len;
        pch = int'(hw[i][6][8:0]);
        ts = longint'(hw[i][4][47:0]) - longint'(PRELOAD_NS);
        len = (i == 0) ? 128 * 8 * 8 : 256 * 4;
        checks++;
        if (hw[i][0] != 64'h5304_0206_0000_0008 || hw[i][1][63:48] != 16'h8001 ||
            hw[i][2] != {16'h8004, 48'(len)} || hw[i][5] != {16'h9011, 48'(pch) * 48'd781250} ||
            hw[i][4][63:48] != 16'h9600 || hw[i][8] != {16'h3300, 48'h0} ||
            ts < 0 || ts % (longint'(FRAME_NS) * ((i == 0) ? 128 : 256)) != 0 || !selected(pch)) begin
          failures++;
          $display("FAIL header fpga%0d: %h %h %h %h %h", i, hw[i][0], hw[i][2], hw[i][4], hw[i][5], hw[i][6]);
        end
      end
      if (wi[i] >= 9 && i == 0) begin
        checks++;
        if (ctq.size() == 0 || tx_d[0] !== ctq.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL travelling payload");
        end
      end
      wi[i]++;
      if (tx_l[i]) begin
        checks++;
        if (wi[i] != 9 + ((i == 0) ? 1024 : 128)) begin failures++; $display("FAIL packet size %0d", wi[i]); end
        if (i == 0) m_tpkt++; else m_cpkt++;
        wi[i] = 0;
      end
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int which, input int region, input int a, input logic [63:0] d);
    cfg_we[0] <= (which != 1); cfg_we[1] <= (which != 0);
    cfg_addr <= {4'(region), 28'(a)}; cfg_wdata <= d;
    @(negedge clk);
    cfg_we[0] <= 0; cfg_we[1] <= 0;
  endtask

  initial begin
    int sbs [4] = '{64, 72, 200, 300}, sbb [4] = '{0, 0, 3, 5};
    repeat (3) @(negedge clk); rst <= 0;
    for (int n = 0; n < TAPS * PFB_N / 2; n++)
      cfg(2, 3, n, 64'(int'(100000.0 * $sin(3.14159265 * (real'(n) + 0.5) / real'(TAPS * PFB_N)))));
    for (int j = 0; j < 16; j++)
      cfg(2, 4, j, (j < 4) ? 64'((sbb[j] << 15) | (1 << 9) | sbs[j]) : 64'd0);
    for (int a = 0; a < NA; a++) for (int g = 0; g < 64; g++) cfg(2, 5, a * 64 + g, 64'd2);
    for (int a = 0; a < NA; a++) for (int b = 0; b < 8; b++)
      cfg(2, 6, a * 8 + b, {22'(int'($urandom_range(0, 2000)) - 1000), 20'(int'($urandom_range(0, 20000)) - 10000)});
    cfg(2, 7, 0, 64'd3);
    for (int e = 0; e < NENT; e++) for (int a = 0; a < NA; a++) for (int el = 0; el < 4; el++)
      cfg(2, 8, (e << 5) | (a << 2) | el, (el == 0 || el == 3) ? 64'h4000_0000 : 64'h0000_0400);
    cfg(2, 9, 0, 64'd2);
    cfg(2, 1, 0, 64'd5);
    cfg(2, 1, 1, 64'(-3));
    cfg(2, 2, 0, 64'd4);
    cfg(2, 11, 0, 64'd65);
    cfg(2, 11, 1, 64'h100);
    cfg(2, 11, 2, 64'd4);
    cfg(0, 10, 0, 64'd0);             // FPGA 0: FIRST
    cfg(1, 10, 0, 64'd2);             // FPGA 1: LAST
    cfg(2, 10, 1, 64'd7);
    // destination table: FPGA 0 points at FPGA 1 (tID 3), FPGA 1 at the
    // correlator (tID 9); entry 4 is written too and must not be selected
    cfg(2, 12, 3, 64'h0a00_0001_1234);
    cfg(2, 12, 256 + 3, 64'h0200_0000_0001);
    cfg(2, 12, 9, 64'h0a00_0063_4321);
    cfg(2, 12, 256 + 9, 64'h0200_0000_0099);
    cfg(2, 12, 4, 64'h0bad_0bad_0bad);
    cfg(2, 12, 256 + 4, 64'h0bad_0bad_0bad);
    cfg(0, 13, 0, 64'd3);
    cfg(1, 13, 0, 64'd9);
    @(negedge clk);
    checks++;
    if (dmac[0] != 48'h0200_0000_0001 || dip[0] != 32'h0a00_0001 || dport[0] != 16'h1234 ||
        dmac[1] != 48'h0200_0000_0099 || dip[1] != 32'h0a00_0063 || dport[1] != 16'h4321) begin
      failures++; $display("FAIL destination %h %h %h / %h %h %h", dmac[0], dip[0], dport[0],
                           dmac[1], dip[1], dport[1]);
    end else m_dest++;
    cfg(2, 0, 0, 64'd1000);           // sync time
    cfg(2, 0, 1, 64'd0);              // arm
    pps <= 4'b1100; @(negedge clk); pps <= 4'b1111;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < 256; c++) begin
        adc_valid <= (c < FRAME_M / LANES);
        for (int i = 0; i < 2; i++)
          for (int k = 0; k < NS * LANES; k++) begin
            real ph;
            ph = 2.0 * 3.14159265 * 65.3 * real'(f * FRAME_M + c * LANES + k % LANES) / 1024.0;
            adc_data[i][k * 8 +: 8] <= 8'(int'(60.0 * $cos(ph + real'(k / LANES))) + int'($urandom_range(0, 20)) - 10);
          end
        if (c == 10) pps <= 4'b0000;
        @(negedge clk);
      end
    adc_valid <= 0;
    repeat (20000) @(negedge clk);
    begin
      int m [15];
      string nm [15];
      m = '{m_frame, m_pfb, m_fft, m_xchg, m_swap, m_dly, m_ct, m_tpkt, m_rpkt, m_cpkt, m_stall,
            m_power, m_spec, m_cap, m_dest};
      nm = '{"frames", "filterbank frames", "FFT frames", "tile exchanges", "calibration swaps",
             "delay applications", "corner-turn frames", "travelling packets sent",
             "travelling packets received", "CSP packets", "output stalls", "power integrations",
             "spectra", "capture blocks", "destination lookups"};
      for (int k = 0; k < 15; k++) begin
        $display("%-28s %0d", nm[k], m[k]);
        checks++;
        if (m[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", nm[k]); end
      end
      checks++;
      if (m_tpkt != m_rpkt) begin failures++; $display("FAIL sent %0d received %0d", m_tpkt, m_rpkt); end
      // one block of 256 frames: 2 groups x 2 sub-blocks travelling frames,
      // 2 groups x 8 channels CSP frames
      checks++;
      if (m_tpkt != 4 || m_cpkt != 16) begin failures++; $display("FAIL packet counts"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
