// tb_chan_capture: 4 signals, blocks of 4 frames. Random channelized frames
// are sent (256 clocks of 2 channels per signal); the selected channel is 37
// for the first block and 100 for the second. Each emitted block must hold
// the selected channel of every signal and frame, rounded and saturated to
// 8+8 bit, four samples per word in time-major, signal-minor order, with
// m_tlast on the last word and the channel number in m_tuser.
module tb_chan_capture;
  import lfaa_pkg::*;
  localparam int NS = 4, NT = 4, SH = 4, NBLK = 2;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic iv = 0, isof = 0; cplx18_t idat [NS][2]; logic [8:0] sel;
  logic [63:0] md; logic mv, ml; logic [31:0] mu;
  chan_capture #(.NSIG(NS), .NSAMP(NT), .CAP_SHIFT(SH)) dut (.clk, .rst, .in_valid(iv), .in_sof(isof),
    .in_data(idat), .sel_chan(sel), .m_tdata(md), .m_tvalid(mv), .m_tlast(ml), .m_tuser(mu));
  int checks = 0, failures = 0, nw = 0;
  int xr [NBLK * NT][NS], xi [NBLK * NT][NS];
  int chs [NBLK] = '{37, 100};
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [7:0] q8(input int v);
    int r;
    r = (v + (1 << (SH - 1))) >>> SH;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return 8'(r);
  endfunction
  always @(posedge clk) if (!rst && mv) begin
    int b, w;
    logic [63:0] e;
    b = nw / (NT * NS / 4); w = nw % (NT * NS / 4);
    for (int k = 0; k < 4; k++) begin
      int i;
      i = 4 * w + k;
      e[16 * k +: 16] = {q8(xr[b * NT + i / NS][i % NS]), q8(xi[b * NT + i / NS][i % NS])};
    end
    checks++;
    if (md !== e || ml !== (w == NT * NS / 4 - 1) || mu[8:0] !== 9'(chs[b])) begin
      failures++; $display("FAIL word %0d got %h exp %h", nw, md, e);
    end
    nw++;
  end
  initial begin
    repeat (3) @(negedge clk); rst <= 0;
    for (int f = 0; f < NBLK * NT; f++) begin
      sel <= 9'(chs[f / NT]);
      for (int s = 0; s < NS; s++) begin
        xr[f][s] = int'($urandom_range(0, 8000)) - 4000;
        xi[f][s] = int'($urandom_range(0, 8000)) - 4000;
      end
      for (int c = 0; c < 256; c++) begin
        iv <= 1; isof <= (c == 0);
        for (int s = 0; s < NS; s++) for (int h = 0; h < 2; h++) begin
          if (2 * c + h == chs[f / NT]) begin
            idat[s][h].re <= 18'(xr[f][s]); idat[s][h].im <= 18'(xi[f][s]);
          end else begin
            idat[s][h].re <= 18'($urandom); idat[s][h].im <= 18'($urandom);
          end
        end
        @(negedge clk);
      end
    end
    iv <= 0; isof <= 0;
    repeat (50) @(negedge clk);
    checks++;
    if (nw != NBLK * NT * NS / 4) begin failures++; $display("FAIL %0d words", nw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
