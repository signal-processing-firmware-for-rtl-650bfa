// tb_spead_formatter: sends packets of random length with random side-channel
// fields through the SPEAD formatter while the output is stalled at random
// (m_tready low about a third of the time). Every output word is compared
// with the expected 9 header words, built here from the SPEAD-64-48 item
// layout, followed by the payload; m_tlast must mark the last payload word.
// Also counts the input stalls (s_tready low) seen, which must occur.
module tb_spead_formatter;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  localparam int NPKT = 6;
  logic [63:0] s_tdata; logic s_tvalid = 0, s_tready, s_tlast = 0; logic [31:0] s_tuser;
  logic [31:0] pcnt; logic [47:0] plen, rtime, tstamp; logic [7:0] sa; logic [15:0] st, na;
  logic [63:0] m_tdata; logic m_tvalid, m_tready = 0, m_tlast;
  spead_formatter #(.PAY_DEPTH(16), .HDR_DEPTH(2)) dut (.clk, .rst, .s_tdata, .s_tvalid, .s_tready,
    .s_tlast, .s_tuser, .pkt_counter(pcnt), .pkt_length(plen), .ref_time(rtime), .timestamp(tstamp),
    .sub_array_id(sa), .station_id(st), .n_antennas(na), .m_tdata, .m_tvalid, .m_tready, .m_tlast);
  int checks = 0, failures = 0, stalls = 0;
  logic [63:0] exp_q [$];
  logic        expl_q [$];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) m_tready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (!rst) begin
    if (s_tvalid && !s_tready) stalls++;
    if (m_tvalid && m_tready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        logic [63:0] e; logic el;
        e = exp_q.pop_front(); el = expl_q.pop_front();
        if (m_tdata !== e || m_tlast !== el) begin
          failures++; $display("FAIL got %h/%b exp %h/%b", m_tdata, m_tlast, e, el);
        end
      end
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst <= 0;
    for (int p = 0; p < NPKT; p++) begin
      int len; logic [15:0] lch; logic [3:0] bm; logic [8:0] pch;
      len = (p == 0) ? 40 : int'($urandom_range(1, 30));
      lch = 16'($urandom); bm = 4'($urandom); pch = 9'($urandom);
      pcnt <= $urandom; plen <= 48'(len * 8); rtime <= {$urandom, 16'($urandom)};
      tstamp <= {$urandom, 16'($urandom)}; sa <= 8'($urandom); st <= 16'($urandom); na <= 16'($urandom);
      s_tuser <= {3'b0, lch, bm, pch};
      @(negedge clk);
      exp_q.push_back(64'h5304_0206_0000_0008);
      exp_q.push_back({16'h8001, lch, pcnt});
      exp_q.push_back({16'h8004, plen});
      exp_q.push_back({16'h9027, rtime});
      exp_q.push_back({16'h9600, tstamp});
      exp_q.push_back({16'h9011, 48'(pch) * 48'd781250});
      exp_q.push_back({16'hB000, 16'h0, 12'h0, bm, 7'h0, pch});
      exp_q.push_back({16'hB001, 8'h0, sa, st, na});
      exp_q.push_back({16'h3300, 48'h0});
      for (int i = 0; i < 9; i++) expl_q.push_back(1'b0);
      for (int i = 0; i < len; i++) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        s_tvalid <= 1; s_tdata <= d; s_tlast <= (i == len - 1);
        exp_q.push_back(d); expl_q.push_back(i == len - 1);
        @(posedge clk); while (!s_tready) @(posedge clk);
        @(negedge clk);
      end
      s_tvalid <= 0; s_tlast <= 0;
      repeat (int'($urandom_range(0, 3))) @(negedge clk);
    end
    repeat (500) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no input stall"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
