// stream_memory_tb: loads a bank, then checks that the L port returns words
// upward from address 0 and the b port downward from the top address, one
// cycle after each request, only advancing on requests, and that clear
// restarts both streams.
//
// Loading uses the host write port; requests are driven at the falling edge
// and data is checked one cycle later. Sequential, index-free reading
// follows the published stream memory; the L-upward / b-downward split of
// one bank is this design's choice.
module stream_memory_tb;
  localparam int AW = 10;
  logic clk = 0, rst_n = 0, clear = 0, l_req = 0, b_req = 0, we = 0;
  logic [31:0] l_rdata, b_rdata, wdata = 0;
  logic [AW-1:0] waddr = 0;
  logic [31:0] model [1 << AW];
  int checks = 0, failures = 0;
  int lp, bp;

  stream_memory #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic lr, br;
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = $urandom;
      model[a] = wdata;
    end
    @(negedge clk) begin we = 0; rst_n = 1; clear = 1; end
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk) clear = 0;
      lp = 0; bp = (1 << AW) - 1;
      for (int i = 0; i < 1500; i++) begin
        @(negedge clk);
        lr = 1'($urandom); br = 1'($urandom);
        l_req = lr; b_req = br;
        @(posedge clk); #1;
        if (lr) begin chk(l_rdata == model[lp % (1 << AW)], "L stream"); lp++; end
        if (br) begin chk(b_rdata == model[bp % (1 << AW)], "b stream"); bp--; end
      end
      @(negedge clk) begin l_req = 0; b_req = 0; clear = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
