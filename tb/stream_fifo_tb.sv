// stream_fifo_tb: a sequential memory model answers the FIFO's requests one
// cycle later. Checks that words leave in memory order under random pops,
// that a pop every cycle never finds the FIFO empty once it has started
// (one word per cycle), that the first word arrives two cycles after a flush,
// and that flush restarts the stream.
//
// Interface under test: flush, enable, mem_req / mem_rdata (one-cycle
// memory latency), pop, head and empty. Stimulus changes at the falling
// edge. The FIFO itself is this design's way of feeding the L and b streams
// at one word per cycle; the published design only says streams are read
// sequentially.
module stream_fifo_tb;
  logic clk = 0, rst_n = 0, flush = 0, enable = 0, mem_req, pop, empty;
  logic [31:0] mem_rdata, head;
  int checks = 0, failures = 0;
  int rd_ptr;           // memory model address counter
  int expect_idx;

  function automatic logic [31:0] word(input int i);
    return 32'h1000_0000 + 32'(i) * 32'd7;
  endfunction

  stream_fifo #(.DEPTH(4), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (flush) rd_ptr <= 0;
    else if (mem_req) rd_ptr <= rd_ptr + 1;
    mem_rdata <= word(rd_ptr);
  end

  initial begin
    repeat (10000) @(posedge clk);
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
    int starve;
    pop = 0;
    rd_ptr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) begin rst_n = 1; flush = 1; end
    @(negedge clk) begin flush = 0; enable = 1; end
    // latency: empty one cycle later, word present two cycles after enabling
    chk(empty, "empty right after flush");
    @(negedge clk);
    chk(empty, "still empty after one cycle");
    @(negedge clk);
    chk(!empty && head == word(0), "first word after two cycles");
    // random pops, check order
    expect_idx = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      pop = 1'($urandom) && !empty;
      if (pop) begin
        chk(head == word(expect_idx), "order");
        expect_idx++;
      end
    end
    // continuous pops: no starvation
    @(negedge clk) pop = 0;
    repeat (4) @(negedge clk);
    starve = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      if (empty) starve++;
      pop = !empty;
      if (pop) begin chk(head == word(expect_idx), "order at full rate"); expect_idx++; end
    end
    chk(starve == 0, "one word per cycle");
    // flush restarts from word 0
    @(negedge clk) begin pop = 0; flush = 1; end
    @(negedge clk) flush = 0;
    repeat (2) @(negedge clk);
    chk(!empty && head == word(0), "restart after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
