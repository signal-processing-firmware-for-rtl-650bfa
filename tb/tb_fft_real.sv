// tb_fft_real: sends three frames of random real samples for two signals,
// with different frame rotations, and compares every output channel with a
// direct DFT computed in the testbench,
//   X[k] = sum_n x[n] exp(-j 2 pi k (n + rot) / 1024) / 2^FFT_SHIFT,
// within a tolerance of 3 LSB. It also checks the channel order (2 per
// clock, natural order), 256 output words per frame, the 12-clock latency,
// and that a full-scale tone raises the overflow flag of its channel.
module tb_fft_real;
  import lfaa_pkg::*;
  localparam int N = 1024;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0;
  logic [9:0] irot = '0;
  logic signed [CH_W-1:0] id [2][LANES];
  logic ov, osof;
  cplx18_t od [2][2];
  logic oovf [2][2];
  int checks = 0, failures = 0;
  int x [4][2][N];
  int rots [4] = '{0, 864, 704, 32};
  real ere [2][N/2], eim [2][N/2];
  int ofr = -1, opos = 0, nov = 0;
  longint cyc = 0, last_in = 0;

  fft_real dut (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_rot(irot), .in_data(id),
    .out_valid(ov), .out_sof(osof), .out_data(od), .out_ovf(oovf));

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(input real v);
    return v < 0 ? -v : v;
  endfunction

  task automatic ref_dft(input int f);
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < N / 2; k++) begin
        real a, b;
        a = 0; b = 0;
        for (int n = 0; n < N; n++) begin
          real ph;
          ph = 2.0 * 3.14159265358979 * real'((k * ((n + rots[f]) % N)) % N) / real'(N);
          a += real'(x[f][s][n]) * $cos(ph);
          b -= real'(x[f][s][n]) * $sin(ph);
        end
        ere[s][k] = a / 16.0;
        eim[s][k] = b / 16.0;
      end
  endtask

  always @(posedge clk) if (ov && !rst) begin
    if (osof) begin
      if (ofr >= 0) begin checks++; if (opos != 256) begin failures++; $display("FAIL len"); end end
      ofr++;
      opos = 0;
      if (ofr == 0) begin
        checks++;
        if (cyc - last_in != 12) begin failures++; $display("FAIL latency %0d", cyc - last_in); end
      end
      if (ofr < 3) ref_dft(ofr);
    end
    if (ofr < 3) begin
      for (int s = 0; s < 2; s++)
        for (int h = 0; h < 2; h++) begin
          int k;
          k = opos * 2 + h;
          checks++;
          if (rabs(real'(od[s][h].re) - ere[s][k]) > 3.0 || rabs(real'(od[s][h].im) - eim[s][k]) > 3.0) begin
            failures++;
            if (failures < 8) $display("FAIL f%0d s%0d k%0d got %0d,%0d exp %f,%f", ofr, s, k,
              od[s][h].re, od[s][h].im, ere[s][k], eim[s][k]);
          end
        end
    end else begin
      for (int s = 0; s < 2; s++) for (int h = 0; h < 2; h++) if (oovf[s][h]) nov++;
    end
    opos++;
  end

  initial begin
    for (int f = 0; f < 4; f++)
      for (int s = 0; s < 2; s++)
        for (int n = 0; n < N; n++)
          x[f][s][n] = (f < 3) ? int'($urandom_range(0, 8000)) - 4000
                               : int'(100000.0 * $cos(2.0 * 3.14159265358979 * 100.0 * n / N));
    repeat (3) @(negedge clk);
    rst <= 0;
    for (int f = 0; f < 4; f++) begin
      for (int c = 0; c < 256; c++) begin
        iv <= 1; isof <= (c == 0); irot <= 10'(rots[f]);
        for (int s = 0; s < 2; s++)
          for (int l = 0; l < 4; l++) id[s][l] <= 18'(x[f][s][4 * c + l]);
        @(negedge clk);
        if (f == 0 && c == 255) last_in = cyc;
      end
      iv <= 0; isof <= 0;
      repeat (20) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    checks++;
    if (ofr != 3) begin failures++; $display("FAIL frames %0d", ofr); end
    checks++;
    if (nov == 0) begin failures++; $display("FAIL no overflow flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
