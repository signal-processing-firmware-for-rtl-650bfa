// tb_total_power: random 8-bit samples over 3 integrations of 3 frames; the
// sum of squares of each signal is computed in the testbench and compared
// with `power` when `done` pulses.
module tb_total_power;
  import lfaa_pkg::*;
  localparam int NSIG = 4;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0, done;
  logic [NSIG*LANES*ADC_W-1:0] id = '0;
  logic [47:0] power [NSIG];
  longint ref_acc [NSIG];
  longint ref_res [NSIG][$];
  int checks = 0, failures = 0, ndone = 0;

  total_power #(.NSIG(NSIG)) dut (.clk, .rst, .in_valid(iv), .in_sof(isof), .in_data(id),
    .int_frames(24'd3), .power, .done);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (done && !rst) begin
    ndone++;
    for (int s = 0; s < NSIG; s++) begin
      longint e;
      e = ref_res[s].pop_front();
      checks++;
      if (power[s] != 48'(e)) begin failures++; $display("FAIL s%0d %0d vs %0d", s, power[s], e); end
    end
  end

  initial begin
    for (int s = 0; s < NSIG; s++) ref_acc[s] = 0;
    repeat (3) @(negedge clk);
    rst <= 0;
    for (int f = 0; f < 10; f++) begin
      if (f % 3 == 0 && f > 0)
        for (int s = 0; s < NSIG; s++) begin ref_res[s].push_back(ref_acc[s]); ref_acc[s] = 0; end
      for (int w = 0; w < 216; w++) begin
        iv <= 1; isof <= (w == 0);
        for (int s = 0; s < NSIG; s++)
          for (int l = 0; l < LANES; l++) begin
            logic signed [7:0] x;
            x = 8'($urandom);
            id[(s*LANES+l)*ADC_W +: ADC_W] <= x;
            ref_acc[s] += longint'(x) * longint'(x);
          end
        @(negedge clk);
      end
    end
    iv <= 0; isof <= 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 3) begin failures++; $display("FAIL ndone %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
