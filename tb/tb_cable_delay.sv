// tb_cable_delay: feeds a sample counter to every signal and checks that the
// output of antenna a equals the input delayed by 512 + dly[a] samples, for
// delays at both ends of the +-512 range and in between, on both
// polarisations, with gaps in the valid stream.
module tb_cable_delay;
  import lfaa_pkg::*;
  localparam int NSIG = 8;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0, ov, osof;
  logic [NSIG*LANES*ADC_W-1:0] id = '0, od;
  logic signed [10:0] dly [NSIG/2];
  int checks = 0, failures = 0;
  int t = 0;        // time of the next input sample
  int nout = 0;

  cable_delay #(.NSIG(NSIG)) dut (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_data(id),
    .dly, .out_valid(ov), .out_sof(osof), .out_data(od));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (ov && !rst) begin
    nout++;
    if (nout > 600) begin
      for (int s = 0; s < NSIG; s++)
        for (int l = 0; l < LANES; l++) begin
          int tt;
          logic [7:0] exp;
          tt = (nout - 1) * 4 + l - 512 - int'(dly[s/2]);
          exp = 8'(tt * 3 + s);
          checks++;
          if (od[(s*LANES+l)*ADC_W +: ADC_W] !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL s%0d l%0d got %0d exp %0d", s, l,
              od[(s*LANES+l)*ADC_W +: ADC_W], exp);
          end
        end
    end
  end

  initial begin
    dly[0] = -11'sd512; dly[1] = 11'sd511; dly[2] = 11'sd1; dly[3] = -11'sd3;
    repeat (3) @(negedge clk);
    rst <= 0;
    for (int w = 0; w < 1200; w++) begin
      iv <= 1;
      for (int s = 0; s < NSIG; s++)
        for (int l = 0; l < LANES; l++) id[(s*LANES+l)*ADC_W +: ADC_W] <= 8'((4*w + l) * 3 + s);
      @(negedge clk);
      if (w % 5 == 0) begin iv <= 0; @(negedge clk); end
    end
    iv <= 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
