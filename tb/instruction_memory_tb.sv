// instruction_memory_tb: self-checking test of one compute unit's
// instruction-memory bank (1024 words of 39 bits at the default sizes).
//
// The bank has a host write port used to load the program and one
// synchronous read port that the sequencer steps through in order; the word
// appears one clock after its address. The test loads random words, then
// reads them back both in program order and at random addresses, comparing
// each with the loaded copy one cycle after the address was applied. The
// depth follows the published 65,536 words split over 64 units; the read
// latency is this design's choice.
module instruction_memory_tb;
  localparam int AW = 10, W = 39;
  logic clk = 0, we = 0;
  logic [AW-1:0] raddr = 0, waddr = 0;
  logic [W-1:0] rdata, wdata = 0;
  logic [W-1:0] model [1 << AW];
  int checks = 0, failures = 0;

  instruction_memory #(.AW(AW), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {7'($urandom), $urandom};
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk) raddr = (i < 1024) ? AW'(i) : AW'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; if (failures < 10) $display("FAIL addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
