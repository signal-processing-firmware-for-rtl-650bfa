// tb_station_beamformer: a chain of three links, FIRST -> MIDDLE -> LAST,
// each fed with its own random local frames (4 time samples x 2 channels,
// NSUB = 4 frames per CSP frame). The travelling frames of the FIRST
// link must equal its local frames; the LAST link must emit, per channel,
// CSP frames of NSUB*SUB_T samples equal to the saturated 16-bit sum of the
// three local frames, requantised to 8+8 bit and packed two samples per word
// in the CSP byte order. Saturation must occur at least once, and the FIFO
// overflow flag must stay low.
module tb_station_beamformer;
  localparam int ST = 4, G = 2, NS = 4, SH = 4, NGRP = 3;
  localparam int FS = ST * G, CS = ST * NS;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic lv = 0, lsof = 0; logic [63:0] ld [3];
  logic tv [3], tsof [3], tlast [3]; logic [63:0] td [3];
  logic cv [3], csof [3], clast [3]; logic [63:0] cd [3]; logic [0:0] cch [3]; logic lqo [3];
  for (genvar i = 0; i < 3; i++) begin : g_l
    station_beamformer #(.SUB_T(ST), .GRP(G), .NSUB(NS), .CSP_SHIFT(SH), .LQ_DEPTH(64)) dut (
      .clk, .rst, .mode(2'(i)), .loc_valid(lv), .loc_sof(lsof), .loc_data(ld[i]),
      .tin_valid(i == 0 ? 1'b0 : tv[i == 0 ? 0 : i - 1]), .tin_sof(i == 0 ? 1'b0 : tsof[i == 0 ? 0 : i - 1]),
      .tin_data(td[i == 0 ? 0 : i - 1]),
      .tout_valid(tv[i]), .tout_sof(tsof[i]), .tout_last(tlast[i]), .tout_data(td[i]),
      .csp_valid(cv[i]), .csp_sof(csof[i]), .csp_last(clast[i]), .csp_data(cd[i]), .csp_chan(cch[i]),
      .lq_overflow(lqo[i]));
  end
  int checks = 0, failures = 0, nsat = 0;
  logic [63:0] loc [3][NGRP * NS * FS];
  logic [63:0] first_q [$];
  int n_csp = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int sat16(input int v);
    if (v > 32767) begin nsat++; return 32767; end
    if (v < -32768) begin nsat++; return -32768; end
    return v;
  endfunction
  function automatic logic [7:0] q8(input int v);
    int r;
    r = (v + (1 << (SH - 1))) >>> SH;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return 8'(r);
  endfunction
  // expected CSP byte group of one sample: {V.re, V.im, H.re, H.im}
  function automatic logic [31:0] exp_samp(input int idx);
    int f [4];
    for (int k = 0; k < 4; k++) begin
      int a, b, c;
      a = int'($signed(loc[0][idx][63 - 16 * k -: 16]));
      b = int'($signed(loc[1][idx][63 - 16 * k -: 16]));
      c = int'($signed(loc[2][idx][63 - 16 * k -: 16]));
      f[k] = sat16(sat16(a + b) + c);   // k: 0 H.re, 1 H.im, 2 V.re, 3 V.im
    end
    return {q8(f[2]), q8(f[3]), q8(f[0]), q8(f[1])};
  endfunction
  always @(posedge clk) if (!rst) begin
    if (tv[0]) begin
      checks++;
      if (first_q.size() == 0 || td[0] !== first_q.pop_front()) begin failures++; $display("FAIL first"); end
    end
    if (tv[2]) begin failures++; $display("FAIL LAST sends travelling frames"); end
    if (cv[2]) begin
      int g, ch, w;
      logic [63:0] e;
      g = n_csp / (G * CS / 2); ch = (n_csp / (CS / 2)) % G; w = n_csp % (CS / 2);
      e = {exp_samp(g * NS * FS + (2 * w + 1) * G + ch), exp_samp(g * NS * FS + (2 * w) * G + ch)};
      checks++;
      if (cd[2] !== e || int'(cch[2]) != ch || csof[2] !== (w == 0) || clast[2] !== (w == CS / 2 - 1)) begin
        failures++;
        if (failures < 10) $display("FAIL csp %0d got %h exp %h", n_csp, cd[2], e);
      end
      n_csp++;
    end
  end
  initial begin
    for (int i = 0; i < 3; i++) for (int n = 0; n < NGRP * NS * FS; n++)
      for (int k = 0; k < 4; k++) loc[i][n][16 * k +: 16] = 16'(int'($urandom_range(0, 40000)) - 20000);
    repeat (3) @(negedge clk); rst <= 0;
    for (int n = 0; n < NGRP * NS * FS; n++) begin
      lv <= 1; lsof <= (n % FS == 0);
      for (int i = 0; i < 3; i++) ld[i] <= loc[i][n];
      first_q.push_back(loc[0][n]);
      @(negedge clk);
      if (n % FS == FS - 1) begin lv <= 0; lsof <= 0; repeat (3) @(negedge clk); end
    end
    lv <= 0; lsof <= 0;
    repeat (200) @(negedge clk);
    checks++;
    if (n_csp != NGRP * G * CS / 2) begin failures++; $display("FAIL %0d CSP words", n_csp); end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation"); end
    checks++;
    if (lqo[1] || lqo[2]) begin failures++; $display("FAIL overflow"); end
    $display("saturations=%0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
