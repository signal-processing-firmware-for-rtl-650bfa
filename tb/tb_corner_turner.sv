// tb_corner_turner: 16 entries per time sample, blocks of 8 time samples,
// output frames of 4 time samples x 8 entries. Three blocks of random data
// are written (plus the first sample of a fourth, which closes the third);
// the testbench checks that each block is read out group by group, sub-block
// by sub-block, time-major with the entries inside, with out_sof/out_last
// framing, the frame identifiers and the channel/beam of the group, and that
// no overrun is flagged.
module tb_corner_turner;
  import lfaa_pkg::*;
  localparam int NE = 16, TB = 8, ST = 4, G = 8, NBLK = 3;
  localparam int NS = TB / ST, NG = NE / G;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0; logic [8:0] ich; logic [2:0] ibm; cplx16_t idat [2];
  logic ov, osof, olast, ovr; logic [63:0] od; logic [0:0] ogrp, osub; logic [31:0] oblk;
  logic [8:0] och; logic [2:0] obm;
  corner_turner #(.NENT_L(NE), .TBLK(TB), .SUB_T(ST), .GRP(G), .FRAME_GAP(2)) dut (.clk, .rst, .in_valid(iv),
    .in_sof(isof), .in_chan(ich), .in_beam(ibm), .in_data(idat), .out_valid(ov), .out_sof(osof),
    .out_last(olast), .out_data(od), .out_grp(ogrp), .out_sub(osub), .out_blk(oblk), .out_chan(och),
    .out_beam(obm), .overrun(ovr));
  int checks = 0, failures = 0;
  logic [63:0] mem [NBLK + 1][TB][NE];
  int chn [NE], bmn [NE];
  int n_out = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && ov) begin
    int b, r, c, t, s, g;
    b = n_out / (TB * NE); r = n_out % (TB * NE);
    g = r / (TB * G); r = r % (TB * G);
    s = r / (ST * G); r = r % (ST * G);
    t = r / G; c = r % G;
    checks++;
    if (od !== mem[b][s * ST + t][g * G + c] || osof !== (t == 0 && c == 0) ||
        olast !== (t == ST - 1 && c == G - 1) || int'(ogrp) != g || int'(osub) != s ||
        int'(oblk) != b || int'(och) != chn[g * G] || int'(obm) != bmn[g * G]) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d got %h sof%b last%b exp %h", n_out, od, osof, olast,
                                  mem[b][s * ST + t][g * G + c]);
    end
    n_out++;
  end
  initial begin
    for (int e = 0; e < NE; e++) begin chn[e] = 100 + e; bmn[e] = e % 8; end
    for (int b = 0; b <= NBLK; b++) for (int t = 0; t < TB; t++) for (int e = 0; e < NE; e++)
      mem[b][t][e] = {$urandom, $urandom};
    repeat (3) @(negedge clk); rst <= 0;
    for (int b = 0; b <= NBLK; b++)
      for (int t = 0; t < ((b == NBLK) ? 1 : TB); t++) begin
        for (int e = 0; e < NE; e++) begin
          iv <= 1; isof <= (e == 0); ich <= 9'(chn[e]); ibm <= 3'(bmn[e]);
          {idat[0].re, idat[0].im, idat[1].re, idat[1].im} <= mem[b][t][e];
          @(negedge clk);
        end
        iv <= 0; isof <= 0;
        repeat (2) @(negedge clk);
      end
    repeat (300) @(negedge clk);
    checks++;
    if (n_out != NBLK * TB * NE) begin failures++; $display("FAIL %0d outputs", n_out); end
    checks++;
    if (ovr) begin failures++; $display("FAIL overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
