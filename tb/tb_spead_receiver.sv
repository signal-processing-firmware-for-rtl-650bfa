// tb_spead_receiver: builds SPEAD-64-48 packets here (magic word, 8 items in
// a shuffled order, payload) and sends them to the receiver with random
// output stalls. Checks the decoded header fields, the regenerated side
// channel {logical channel, beam, physical channel}, the payload words and
// m_tlast. One packet carries a wrong magic number: it must raise hdr_error
// and its payload must be dropped.
module tb_spead_receiver;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  localparam int NPKT = 6, BAD = 3;
  logic [63:0] s_tdata; logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] m_tdata; logic m_tvalid, m_tready = 0, m_tlast; logic [31:0] m_tuser;
  logic [31:0] pcnt; logic [47:0] plen, rtime, tstamp, cfreq; logic [7:0] sa; logic [15:0] st, na;
  logic herr;
  spead_receiver dut (.clk, .rst, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .m_tdata, .m_tvalid,
    .m_tready, .m_tlast, .m_tuser, .pkt_counter(pcnt), .pkt_length(plen), .ref_time(rtime),
    .timestamp(tstamp), .center_freq(cfreq), .sub_array_id(sa), .station_id(st), .n_antennas(na),
    .hdr_error(herr));
  int checks = 0, failures = 0, nerr = 0;
  typedef struct { logic [63:0] d; logic l; logic [31:0] u; logic [31:0] pc; logic [47:0] ts, cf;
                   logic [15:0] nant; } exp_t;
  exp_t q [$];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) m_tready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (!rst) begin
    if (m_tvalid && m_tready) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        e = q.pop_front();
        if (m_tdata !== e.d || m_tlast !== e.l || m_tuser !== e.u || pcnt !== e.pc ||
            tstamp !== e.ts || cfreq !== e.cf || na !== e.nant) begin
          failures++; $display("FAIL got %h %b %h exp %h %b %h", m_tdata, m_tlast, m_tuser, e.d, e.l, e.u);
        end
      end
    end
  end
  logic fired = 0;   // input handshake of the last clock edge
  always @(posedge clk) fired <= s_tvalid && s_tready;
  always @(posedge clk) if (!rst && herr && !$past(herr)) nerr++;
  logic [64:0] tx [$];   // {last, data} words to send
  initial begin
    repeat (3) @(negedge clk); rst <= 0;
    for (int p = 0; p < NPKT; p++) begin
      logic [63:0] it [8];
      int len; logic [15:0] lch; logic [3:0] bm; logic [8:0] pch; logic [31:0] c; logic [47:0] ts, cf;
      logic [15:0] n;
      len = int'($urandom_range(1, 20));
      lch = 16'($urandom); bm = 4'($urandom); pch = 9'($urandom); c = $urandom;
      ts = {$urandom, 16'($urandom)}; cf = 48'(pch) * 48'd781250; n = 16'($urandom);
      it[0] = {16'h8001, lch, c};
      it[1] = {16'h8004, 48'(len * 8)};
      it[2] = {16'h9027, 48'd12345};
      it[3] = {16'h9600, ts};
      it[4] = {16'h9011, cf};
      it[5] = {16'hB000, 16'h0, 12'h0, bm, 7'h0, pch};
      it[6] = {16'hB001, 8'h0, 8'h5, 16'h77, n};
      it[7] = {16'h3300, 48'h0};
      for (int i = 7; i > 0; i--) begin   // shuffle the item order
        int j; logic [63:0] t;
        j = int'($urandom_range(0, i)); t = it[i]; it[i] = it[j]; it[j] = t;
      end
      tx.push_back({1'b0, (p == BAD) ? 64'h5305_0206_0000_0008 : 64'h5304_0206_0000_0008});
      for (int i = 0; i < 8; i++) tx.push_back({1'b0, it[i]});
      for (int i = 0; i < len; i++) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        if (p != BAD) q.push_back('{d, i == len - 1, {3'b0, lch, bm, pch}, c, ts, cf, n});
        tx.push_back({i == len - 1, d});
      end
    end
    while (tx.size() > 0) begin
      logic [64:0] w;
      w = tx.pop_front();
      s_tvalid <= 1; s_tdata <= w[63:0]; s_tlast <= w[64];
      @(negedge clk);
      while (!fired) @(negedge clk);
    end
    s_tvalid <= 0; s_tlast <= 0;
    repeat (200) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d words missing", q.size()); end
    checks++;
    if (nerr != 1) begin failures++; $display("FAIL hdr_error seen %0d times", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
