// tb_pfb_filter: loads random symmetric coefficients, streams random 8-bit
// samples at 216 valid words per 256 clocks (the input rate of one frame per
// output frame), and compares every output value of the frames whose window
// lies entirely after the first sample with a direct evaluation of
//   y_f[n] = sum_k h[(TAPS-1-k)N + n] x[f*M + M - N - kN + n]
// rounded by OUT_SHIFT bits to 18 bit. It also checks the rotation output
// T_f mod N, that the first PRELOAD frames are suppressed, that each output
// frame is 256 consecutive clocks and that the latency from the last input
// word of a frame to its first output word is constant.
module tb_pfb_filter;
  import lfaa_pkg::*;
  localparam int NSIG = 2, N = 1024, M = 864, TAPS = 14, L = TAPS * N;
  localparam int NFR = 20;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0;
  logic [NSIG*LANES*ADC_W-1:0] id = '0;
  logic cwe = 0;
  logic [$clog2(L/2)-1:0] caddr = '0;
  logic signed [COEF_W-1:0] cdata = '0;
  logic ov, osof, overrun;
  logic [9:0] orot;
  logic signed [CH_W-1:0] od [NSIG][LANES];
  int checks = 0, failures = 0;
  int h [L];
  byte x [NSIG][NFR*M];
  int ofr = -1, opos = 0, nrun = 0;
  longint last_in_cyc [NFR];
  longint cyc = 0;
  int lat = -1;

  pfb_filter #(.NSIG(NSIG)) dut (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_data(id),
    .coef_we(cwe), .coef_addr(caddr), .coef_data(cdata), .out_valid(ov), .out_sof(osof),
    .out_rot(orot), .out_data(od), .overrun);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst) begin
    if (ov) begin
      if (osof) begin
        if (ofr >= 0) begin checks++; if (opos != 256) begin failures++; $display("FAIL frame length %0d", opos); end end
        ofr = (ofr < 0) ? 7 : ofr + 1;
        opos = 0;
        checks++;
        if (int'(orot) != ((ofr * M + M - N) % N + N) % N) begin failures++; $display("FAIL rot %0d", orot); end
        if (lat < 0) lat = int'(cyc - last_in_cyc[ofr]);
        checks++;
        if (int'(cyc - last_in_cyc[ofr]) != lat) begin failures++; $display("FAIL latency f%0d %0d", ofr, cyc - last_in_cyc[ofr]); end
      end
      if (ofr >= 16 && ofr < NFR) begin
        for (int s = 0; s < NSIG; s++)
          for (int l = 0; l < LANES; l++) begin
            longint acc;
            int n, e;
            n = opos * 4 + l;
            acc = 0;
            for (int k = 0; k < TAPS; k++)
              acc += longint'(h[(TAPS - 1 - k) * N + n]) * longint'(x[s][ofr * M + M - N - k * N + n]);
            e = int'(rnd_sat(48'(acc), 17, 18));
            checks++;
            if (int'(od[s][l]) != e) begin
              failures++;
              if (failures < 8) $display("FAIL f%0d s%0d n%0d got %0d exp %0d", ofr, s, n, od[s][l], e);
            end
          end
      end
      opos++;
    end
  end

  initial begin
    for (int i = 0; i < L / 2; i++) begin
      h[i] = int'($urandom_range(0, 2 * 65535)) - 65535;
      h[L - 1 - i] = h[i];
    end
    for (int s = 0; s < NSIG; s++)
      for (int t = 0; t < NFR * M; t++) x[s][t] = byte'($urandom);
    repeat (3) @(negedge clk);
    rst <= 0;
    for (int i = 0; i < L / 2; i++) begin
      cwe <= 1; caddr <= 13'(i); cdata <= 18'(h[i]);
      @(negedge clk);
    end
    cwe <= 0;
    for (int f = 0; f < NFR; f++) begin
      for (int w = 0; w < 256; w++) begin
        if (w % 32 < 27) begin
          int wi;
          wi = (w / 32) * 27 + w % 32;
          iv <= 1; isof <= (wi == 0);
          for (int s = 0; s < NSIG; s++)
            for (int l = 0; l < LANES; l++) id[(s*LANES+l)*8 +: 8] <= x[s][f * M + wi * 4 + l];
          if (wi == 215) last_in_cyc[f] = cyc;
        end else begin
          iv <= 0; isof <= 0;
        end
        @(negedge clk);
      end
    end
    iv <= 0;
    repeat (600) @(negedge clk);
    checks++;
    if (ofr != NFR - 1) begin failures++; $display("FAIL last frame %0d", ofr); end
    checks++;
    if (overrun) begin failures++; $display("FAIL overrun"); end
    checks++; if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
