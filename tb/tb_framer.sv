// tb_framer: checks PPS edge detection and phase report, sync_time/start_time
// handling, 216-word framing from the first word after the PPS edge, the
// frame counter, the frame time t1 + N_f*1080 ns and the ns time stamp.
module tb_framer;
  import lfaa_pkg::*;
  localparam int NSIG = 2;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic in_valid = 0;
  logic [NSIG*LANES*ADC_W-1:0] in_data = '0;
  logic [3:0] pps = '0;
  logic [1:0] sel = 2'd3;
  logic st_we = 0, arm = 0;
  logic [31:0] st_wd = '0;
  logic ov, osof, running;
  logic [NSIG*LANES*ADC_W-1:0] od;
  logic [31:0] sync_time, start_time, frame_num;
  logic [47:0] timestamp, ftime;
  logic [1:0] eph;
  int checks = 0, failures = 0;
  int nsof = 0, nwords = 0;

  framer #(.NSIG(NSIG)) dut (.clk, .rst, .in_valid, .in_data, .pps_samples(pps),
    .pps_phase_sel(sel), .sync_time_we(st_we), .sync_time_wdata(st_wd), .arm,
    .out_valid(ov), .out_sof(osof), .out_data(od), .running, .sync_time, .start_time,
    .timestamp, .frame_num, .frame_time_ns(ftime), .pps_edge_phase(eph));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor output framing
  logic [15:0] cnt_in = 0;
  always @(posedge clk) if (ov && !rst) begin
    nwords <= nwords + 1;
    if (osof) begin
      nsof <= nsof + 1;
      checks++;
      if (nwords % 216 != 0) begin failures++; $display("FAIL sof at word %0d", nwords); end
    end
    // data are a counter: word index since start equals data
    checks++;
    if (od[15:0] != 16'(nwords)) begin failures++; $display("FAIL data %0d vs %0d", od[15:0], nwords); end
  end

  initial begin
    repeat (4) @(negedge clk);
    rst <= 0;
    st_we <= 1; st_wd <= 32'd100;
    @(negedge clk); st_we <= 0;
    // a first PPS edge (not armed): sync_time must count
    pps <= 4'b1100; @(negedge clk); pps <= 4'b1111; repeat (5) @(negedge clk); pps <= 0;
    @(negedge clk);
    chk(sync_time == 101, "sync_time increments on PPS");
    chk(eph == 2, "edge phase reported");
    arm <= 1; @(negedge clk); arm <= 0;
    // valid words before the PPS must not be framed
    repeat (10) begin in_valid <= 1; in_data <= '1; @(negedge clk); end
    chk(!running, "not running before PPS");
    pps <= 4'b1000; in_valid <= 0; @(negedge clk); pps <= 4'b1111; @(negedge clk);
    chk(running, "running after PPS");
    chk(start_time == 102, "start_time captures sync_time at start");
    // stream 3 frames with gaps
    for (int w = 0; w < 3 * 216 + 5; w++) begin
      in_valid <= 1; in_data <= (NSIG*LANES*ADC_W)'(w);
      @(negedge clk);
      if (w % 7 == 3) begin in_valid <= 0; @(negedge clk); end
    end
    in_valid <= 0;
    repeat (3) @(negedge clk);
    chk(nsof == 4, $sformatf("four frame starts (%0d)", nsof));
    chk(frame_num == 3, $sformatf("frame_num 3 (%0d)", frame_num));
    chk(ftime == 48'(7560 + 3 * 1080), $sformatf("frame time %0d", ftime));
    chk(timestamp == 48'((3 * 216 + 5) * 5), $sformatf("timestamp %0d", timestamp));
    chk(sync_time == 102, "sync_time after second PPS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
