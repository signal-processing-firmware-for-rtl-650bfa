// tb_dest_lut: fills the 256-entry destination table with random MAC, IP and
// port values, overwrites some entries, then reads every entry in random
// order and checks the fields one clock after the address, including a read
// of an entry in the clock after it was rewritten.
module tb_dest_lut;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we = 0; logic [7:0] wt, rt = 0; logic [47:0] wm, rm; logic [31:0] wi, ri; logic [15:0] wp, rp;
  dest_lut dut (.clk, .wr_en(we), .wr_tid(wt), .wr_mac(wm), .wr_ip(wi), .wr_port(wp),
                .rd_tid(rt), .rd_mac(rm), .rd_ip(ri), .rd_port(rp));
  int checks = 0, failures = 0;
  logic [95:0] ref_t [256];
  int tr;
  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(input int t);
    we = 1; wt = 8'(t); wm = {$urandom, 16'($urandom)}; wi = $urandom; wp = 16'($urandom);
    @(posedge clk);
    ref_t[t] = {wm, wi, wp};
    @(negedge clk);
    we = 0;
  endtask
  initial begin
    @(negedge clk);
    for (int t = 0; t < 256; t++) wr(t);
    for (int k = 0; k < 20; k++) wr(int'($urandom_range(0, 255)));
    for (int k = 0; k < 300; k++) begin
      tr = (k == 0) ? int'(wt) : int'($urandom_range(0, 255));
      rt <= 8'(tr);
      @(negedge clk);
      checks++;
      if ({rm, ri, rp} !== ref_t[tr]) begin
        failures++; $display("FAIL tid %0d got %h exp %h", tr, {rm, ri, rp}, ref_t[tr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
