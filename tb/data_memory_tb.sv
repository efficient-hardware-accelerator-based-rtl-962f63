// data_memory_tb: self-checking test of one compute unit's data-memory bank
// (128 words at the default size, 8192 over 64 units).
//
// The bank has one write port (address from the compute unit's write
// counter), a read port for the compute unit (used to load spilled values
// back into the x_i register file) and a read port for the host. Both reads
// are synchronous: the word appears one clock after the address. The test
// writes random words at random addresses, keeps a copy in an array, and
// checks both read ports one cycle after each request. The synchronous reads
// and the host port are this design's choices.
module data_memory_tb;
  localparam int AW = 7;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0, host_raddr = 0;
  logic [31:0] wdata = 0, rdata, host_rdata;
  logic [31:0] model [1 << AW];
  int checks = 0, failures = 0;

  data_memory #(.AW(AW)) dut (.*);
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
      @(negedge clk); we = 1; waddr = AW'(a); wdata = $urandom; model[a] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = AW'($urandom); wdata = $urandom;
      re = 1; raddr = AW'($urandom); host_raddr = AW'($urandom);
      if (we && (waddr == raddr || waddr == host_raddr)) we = 0;
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks += 2;
      if (rdata !== model[raddr]) begin failures++; if (failures < 10) $display("FAIL cu port %0d", raddr); end
      if (host_rdata !== model[host_raddr]) begin failures++; if (failures < 10) $display("FAIL host port"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
