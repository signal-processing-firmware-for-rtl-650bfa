// tb_spectrometer: 4 signals, integrations of 3 frames. The first
// integration is the cross spectrum of signals 1 and 2, the second the power
// spectrum of signal 3. After each `done` all 512 channels are read back and
// compared with sums of X_a * conj(X_b) computed here, saturated to 32 bit.
module tb_spectrometer;
  import lfaa_pkg::*;
  localparam int NS = 4, NF = 3;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0; cplx18_t idat [NS][2]; logic [1:0] sa, sb; logic [8:0] rch;
  logic signed [31:0] rre, rim; logic done;
  spectrometer #(.NSIG(NS)) dut (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_data(idat),
    .sel_a(sa), .sel_b(sb), .int_frames(24'(NF)), .rd_chan(rch), .rd_re(rre), .rd_im(rim), .done);
  int checks = 0, failures = 0, ndone = 0;
  longint er [512], ei [512];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && done) ndone++;
  function automatic longint s32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction
  initial begin
    repeat (3) @(negedge clk); rst <= 0;
    for (int it = 0; it < 2; it++) begin
      int a, b;
      a = (it == 0) ? 1 : 3; b = (it == 0) ? 2 : 3;
      sa <= 2'(a); sb <= 2'(b);
      er = '{default: 0}; ei = '{default: 0};
      for (int f = 0; f < NF; f++)
        for (int c = 0; c < 256; c++) begin
          iv <= 1; isof <= (c == 0);
          for (int s = 0; s < NS; s++) for (int h = 0; h < 2; h++) begin
            idat[s][h].re <= 18'(int'($urandom_range(0, 40000)) - 20000);
            idat[s][h].im <= 18'(int'($urandom_range(0, 40000)) - 20000);
          end
          #0;
          @(posedge clk);
          for (int h = 0; h < 2; h++) begin
            longint ar, ai, br, bi;
            ar = longint'($signed(idat[a][h].re)); ai = longint'($signed(idat[a][h].im));
            br = longint'($signed(idat[b][h].re)); bi = longint'($signed(idat[b][h].im));
            er[2 * c + h] += ar * br + ai * bi;
            ei[2 * c + h] += ai * br - ar * bi;
          end
          @(negedge clk);
        end
      iv <= 0; isof <= 0;
      repeat (3) @(negedge clk);
      for (int k = 0; k < 512; k++) begin
        rch <= 9'(k);
        @(negedge clk);
        checks++;
        if (longint'(rre) != s32(er[k]) || longint'(rim) != s32(ei[k])) begin
          failures++;
          if (failures < 10) $display("FAIL it%0d ch%0d got %0d %0d exp %0d %0d", it, k, rre, rim, er[k], ei[k]);
        end
      end
    end
    checks++;
    if (ndone != 2) begin failures++; $display("FAIL done count %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
