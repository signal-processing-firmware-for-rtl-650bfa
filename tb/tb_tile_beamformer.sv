// tb_tile_beamformer: two tile beamformers (FPGA 0 and 1, 2 antennas each,
// 32 entries) exchange their partial beams as in a real tile. Random
// channelized data, exponents, calibration matrices, delays and delay rates
// are applied; every output entry of both FPGAs is compared with a reference
// computed in the testbench from Eq. 1 of the paper with the design's
// rounding rules. Also checked: entry parity per FPGA, the count of entries
// per frame, the delay-rate accumulation every DLY_UPD frames, and the swap
// of the calibration bank at two programmed frames.
module tb_tile_beamformer;
  import lfaa_pkg::*;
  localparam int NANT = 2, NENT = 32, NB = 8, U = 2, NFR = 7;
  localparam int APPLY = 1, SW1 = 1, SW2 = 4;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic iv = 0, isof = 0;
  cplx18_t idat [2][NANT][2][2];
  logic sb_we = 0; logic [3:0] sb_idx; logic [8:0] sb_start; logic [5:0] sb_w8; logic [2:0] sb_beam;
  logic exp_we = 0; logic [0:0] exp_ant; logic [5:0] exp_grp; logic [2:0] exp_val;
  logic dly_we = 0; logic [0:0] dly_ant; logic [2:0] dly_beam; logic signed [19:0] tau0; logic signed [21:0] rate;
  logic dly_arm = 0; logic cal_we = 0; logic [4:0] cal_entry; logic [0:0] cal_ant; logic [1:0] cal_elem;
  cplx16_t cal_data; logic cal_arm = 0; logic [31:0] swap_frame = 0;
  logic xv [2]; cplx16_t xd [2][2];
  logic ov [2], osof [2]; logic [4:0] oent [2]; logic [2:0] obeam [2]; logic [8:0] ochan [2];
  cplx16_t od [2][2]; logic [31:0] fcnt [2]; logic cb [2]; logic [4:0] nsel [2];

  for (genvar g = 0; g < 2; g++) begin : g_f
    tile_beamformer #(.NANT(NANT), .NENT(NENT), .FPGA_ID(g), .DLY_UPD(U)) dut (
      .clk, .rst, .in_valid(iv), .in_sof(isof), .in_data(idat[g]),
      .sb_we, .sb_idx, .sb_start, .sb_width8(sb_w8), .sb_beam,
      .exp_we, .exp_ant, .exp_grp, .exp_val,
      .dly_we, .dly_ant, .dly_beam, .dly_tau0(tau0), .dly_rate(rate), .dly_arm,
      .dly_apply_frame(32'(APPLY)),
      .cal_we, .cal_entry, .cal_ant, .cal_elem, .cal_data, .cal_arm, .cal_swap_frame(swap_frame),
      .xout_valid(xv[g]), .xout_data(xd[g]), .xin_valid(xv[1-g]), .xin_data(xd[1-g]),
      .out_valid(ov[g]), .out_sof(osof[g]), .out_entry(oent[g]), .out_beam(obeam[g]),
      .out_chan(ochan[g]), .out_data(od[g]), .frame_cnt(fcnt[g]), .cal_bank(cb[g]),
      .n_selected(nsel[g]));
  end

  int checks = 0, failures = 0;
  int x [NFR][2][NANT][2][512][2];     // frame, fpga, ant, pol, chan, re/im
  int ex [NANT][64];
  int t0 [NANT][NB], rt [NANT][NB];
  int calv [2][NENT][NANT][4][2];      // set A / B
  int e_ch [NENT], e_bm [NENT];
  int ofr [2] = '{-1, -1}, ocnt [2] = '{0, 0};

  function automatic int rs(input longint v, input int sh, input int w);
    longint r, mx;
    r = (sh == 0) ? v : ((v + (64'sd1 <<< (sh - 1))) >>> sh);
    mx = (64'sd1 <<< (w - 1)) - 1;
    if (r > mx) r = mx;
    if (r < -mx - 1) r = -mx - 1;
    return int'(r);
  endfunction

  function automatic int sinq(input int p);
    return int'($floor(32767.0 * $sin(2.0 * 3.14159265358979 * real'(p & 4095) / 4096.0) + 0.5));
  endfunction

  function automatic void ref_entry(input int f, input int e, output int r [2][2]);
    int ch, bm, set;
    int nup;
    ch = e_ch[e]; bm = e_bm[e];
    set = (f + 1 >= SW2) ? 1 : 0;
    nup = (f + 1 - APPLY) / U;
    r = '{default: 0};
    for (int g = 0; g < 2; g++)
      for (int a = 0; a < NANT; a++) begin
        int y [2][2];
        longint dacc;
        int d, ph, c, s;
        dacc = (longint'(t0[a][bm]) <<< 14) + longint'(nup) * longint'(rt[a][bm]);
        d = int'(dacc >>> 14);
        ph = int'((longint'(ch) * longint'(d)) >>> 11);
        c = sinq(ph + 1024); s = sinq(ph);
        for (int p = 0; p < 2; p++) begin
          int xr, xi;
          xr = rs(longint'(x[f][g][a][p][ch][0]) <<< ex[a][ch / 8], 7, 12);
          xi = rs(longint'(x[f][g][a][p][ch][1]) <<< ex[a][ch / 8], 7, 12);
          y[p][0] = rs(longint'(xr) * c - longint'(xi) * s, 15, 12);
          y[p][1] = rs(longint'(xr) * s + longint'(xi) * c, 15, 12);
        end
        for (int o = 0; o < 2; o++) begin
          longint sr, si;
          sr = 0; si = 0;
          for (int p = 0; p < 2; p++) begin
            int mr, mi;
            mr = calv[set][e][a][o * 2 + p][0];
            mi = calv[set][e][a][o * 2 + p][1];
            sr += longint'(mr) * y[p][0] - longint'(mi) * y[p][1];
            si += longint'(mr) * y[p][1] + longint'(mi) * y[p][0];
          end
          r[o][0] += rs(sr, 18, 8);
          r[o][1] += rs(si, 18, 8);
        end
      end
  endfunction

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_mon
    always @(posedge clk) if (!rst && ov[g]) begin
      int r [2][2];
      if (osof[g]) begin
        if (ofr[g] >= 0) begin
          checks++;
          if (ocnt[g] != NENT / 2) begin failures++; $display("FAIL count %0d", ocnt[g]); end
        end
        ofr[g]++;
        ocnt[g] = 0;
      end
      ocnt[g]++;
      checks++;
      if (int'(oent[g]) % 2 != g) begin failures++; $display("FAIL parity"); end
      if (ofr[g] >= APPLY && ofr[g] < NFR - 1) begin
        ref_entry(ofr[g], int'(oent[g]), r);
        checks++;
        if (int'(od[g][0].re) != r[0][0] || int'(od[g][0].im) != r[0][1] ||
            int'(od[g][1].re) != r[1][0] || int'(od[g][1].im) != r[1][1] ||
            int'(ochan[g]) != e_ch[oent[g]] || int'(obeam[g]) != e_bm[oent[g]]) begin
          failures++;
          if (failures < 10) $display("FAIL g%0d f%0d e%0d got %0d %0d %0d %0d exp %0d %0d %0d %0d", g, ofr[g], oent[g],
            od[g][0].re, od[g][0].im, od[g][1].re, od[g][1].im, r[0][0], r[0][1], r[1][0], r[1][1]);
        end
      end
    end
  end

  task automatic write_cal(input int set);
    for (int e = 0; e < NENT; e++)
      for (int a = 0; a < NANT; a++)
        for (int el = 0; el < 4; el++) begin
          cal_we <= 1; cal_entry <= 5'(e); cal_ant <= 1'(a); cal_elem <= 2'(el);
          cal_data.re <= 16'(calv[set][e][a][el][0]); cal_data.im <= 16'(calv[set][e][a][el][1]);
          @(negedge clk);
        end
    cal_we <= 0;
  endtask

  initial begin
    // sub-bands: 10..17 beam 1, 100..115 beam 0, 10..17 again beam 2
    int sbs [3] = '{10, 100, 10}, sbw [3] = '{1, 2, 1}, sbb [3] = '{1, 0, 2};
    int e;
    e = 0;
    for (int j = 0; j < 3; j++)
      for (int i = 0; i < 8 * sbw[j]; i++) begin e_ch[e] = sbs[j] + i; e_bm[e] = sbb[j]; e++; end
    for (int f = 0; f < NFR; f++) for (int g = 0; g < 2; g++) for (int a = 0; a < NANT; a++)
      for (int p = 0; p < 2; p++) for (int c = 0; c < 512; c++) begin
        x[f][g][a][p][c][0] = int'($urandom_range(0, 40000)) - 20000;
        x[f][g][a][p][c][1] = int'($urandom_range(0, 40000)) - 20000;
      end
    for (int a = 0; a < NANT; a++) begin
      for (int k = 0; k < 64; k++) ex[a][k] = int'($urandom_range(0, 7));
      for (int b = 0; b < NB; b++) begin
        t0[a][b] = int'($urandom_range(0, 1000000)) - 500000;
        rt[a][b] = int'($urandom_range(0, 4000000)) - 2000000;
      end
    end
    for (int s = 0; s < 2; s++) for (int k = 0; k < NENT; k++) for (int a = 0; a < NANT; a++)
      for (int el = 0; el < 4; el++) begin
        calv[s][k][a][el][0] = int'($urandom_range(0, 65535)) - 32768;
        calv[s][k][a][el][1] = int'($urandom_range(0, 65535)) - 32768;
      end
    repeat (3) @(negedge clk);
    rst <= 0;
    for (int j = 0; j < 16; j++) begin
      sb_we <= 1; sb_idx <= 4'(j);
      sb_start <= (j < 3) ? 9'(sbs[j]) : 9'd0; sb_w8 <= (j < 3) ? 6'(sbw[j]) : 6'd0;
      sb_beam <= (j < 3) ? 3'(sbb[j]) : 3'd0;
      @(negedge clk);
    end
    sb_we <= 0;
    for (int a = 0; a < NANT; a++) for (int k = 0; k < 64; k++) begin
      exp_we <= 1; exp_ant <= 1'(a); exp_grp <= 6'(k); exp_val <= 3'(ex[a][k]); @(negedge clk);
    end
    exp_we <= 0;
    for (int a = 0; a < NANT; a++) for (int b = 0; b < NB; b++) begin
      dly_we <= 1; dly_ant <= 1'(a); dly_beam <= 3'(b); tau0 <= 20'(t0[a][b]); rate <= 22'(rt[a][b]);
      @(negedge clk);
    end
    dly_we <= 0; dly_arm <= 1; @(negedge clk); dly_arm <= 0;
    write_cal(0);
    swap_frame <= 32'(SW1); cal_arm <= 1; @(negedge clk); cal_arm <= 0;
    for (int f = 0; f < NFR; f++) begin
      for (int c = 0; c < 256; c++) begin
        iv <= 1; isof <= (c == 0);
        for (int g = 0; g < 2; g++) for (int a = 0; a < NANT; a++) for (int p = 0; p < 2; p++)
          for (int h = 0; h < 2; h++) begin
            idat[g][a][p][h].re <= 18'(x[f][g][a][p][2 * c + h][0]);
            idat[g][a][p][h].im <= 18'(x[f][g][a][p][2 * c + h][1]);
          end
        @(negedge clk);
      end
      if (f == SW1) begin
        // bank swapped at the start of frame SW1: fill the new shadow bank with set B
        fork write_cal(1); join_none
      end
      if (f == SW1 + 1) begin swap_frame <= 32'(SW2); cal_arm <= 1; end
      if (f == SW1 + 2) cal_arm <= 0;
    end
    iv <= 0; isof <= 0;
    repeat (100) @(negedge clk);
    checks++;
    if (ofr[0] != NFR - 1 || ofr[1] != NFR - 1) begin failures++; $display("FAIL frames %0d", ofr[0]); end
    checks++;
    if (nsel[0] != 5'(NENT)) begin failures++; $display("FAIL n_selected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
