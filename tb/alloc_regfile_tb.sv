// alloc_regfile_tb: self-checking test of alloc_regfile, the register file
// with automatic write addresses used for both the x_i and the psum files.
//
// The DUT keeps a valid bit per word and writes to the lowest free word
// (waddr, combinational), reads asynchronously, and can free the word it
// reads (rrelease). A read and a write in the same cycle are
// read-before-write, so the freed word can be rewritten at once. The test
// runs random cycles of read, release and write at an 8-word size and
// mirrors the valid bits and contents in a model; it checks the write
// address, the free count, the full flag and the read data every cycle,
// including the same-cycle reuse of a released word, and never writes a
// full file. Inputs change at the falling edge. The lowest-free rule and the
// valid bits follow the published design; the same-cycle behaviour is this
// design's choice.
module alloc_regfile_tb;
  localparam int DEPTH = 8;
  localparam int AW = 3;
  logic clk = 0, rst_n = 0;
  logic ren, rrelease, wen, full;
  logic [AW-1:0] raddr, waddr;
  logic [31:0] rdata, wdata;
  logic [AW:0] free_count;
  int checks = 0, failures = 0;

  logic [31:0] model_mem [DEPTH];
  logic        model_valid [DEPTH];

  alloc_regfile #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int exp_addr, nfree, sameaddr_reuse;
    bit exp_full;
    sameaddr_reuse = 0;
    ren = 0; rrelease = 0; wen = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) model_valid[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // choose a read of a valid word (if any)
      ren = 0; rrelease = 0;
      if ($urandom_range(1) == 1) begin
        int cand;
        cand = $urandom_range(DEPTH - 1);
        if (model_valid[cand]) begin ren = 1; raddr = AW'(cand); rrelease = 1'($urandom_range(3) != 0); end
      end
      wen = 1'($urandom_range(2) != 0);
      wdata = $urandom;
      // model: lowest free word including this cycle's release
      exp_addr = -1; nfree = 0;
      for (int i = DEPTH - 1; i >= 0; i--) begin
        bit fr;
        fr = !model_valid[i] || (ren && rrelease && raddr == AW'(i));
        if (fr) begin exp_addr = i; nfree++; end
      end
      exp_full = (exp_addr < 0);
      if (exp_full) wen = 0;
      #1;
      chk(full == exp_full, "full");
      chk(free_count == (AW+1)'(nfree), "free_count");
      if (!exp_full) chk(waddr == AW'(exp_addr), "write address");
      if (ren) chk(rdata == model_mem[raddr], "read data");
      if (ren && rrelease && wen && exp_addr == int'(raddr)) sameaddr_reuse++;
      @(posedge clk);
      if (ren && rrelease) model_valid[raddr] = 0;
      if (wen) begin model_valid[exp_addr] = 1; model_mem[exp_addr] = wdata; end
    end
    chk(sameaddr_reuse > 0, "read-before-write reuse exercised");
    $display("read-before-write reuses: %0d", sameaddr_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
