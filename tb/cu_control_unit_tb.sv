// cu_control_unit_tb: checks FIFO pops (L on every executed instruction, b
// on node finishes), the DFF enable, the gating of enables when no
// instruction is issued, and the data-memory write counter (starts at zero,
// steps on each write, restarts on clear).
//
// Inputs are driven at the falling edge and registered state is checked
// after the rising edge; control outputs are combinational from the
// decoded instruction and the run flag. The counter-addressed data memory
// follows the published design; the FIFO pop rules and the gating when no
// instruction is issued are this design's choices.
module cu_control_unit_tb;
  import sptrsv_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  cu_ctrl_t ctrl_in, ctrl;
  logic pop_l, pop_b, dff_en, dm_full;
  logic [T-1:0] dm_waddr;
  int checks = 0, failures = 0;
  int writes;

  cu_control_unit dut (.*);
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
    ctrl_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    writes = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      clear = (i == 1500);
      ctrl_in = cu_ctrl_t'({$urandom, $urandom});
      // keep the counter below the bank size
      if (writes >= DM_WORDS - 1) ctrl_in.dm_wen = 0;
      run = (i % 7 != 3);
      #1;
      chk(dm_waddr == T'(writes), "write address counter");
      if (!run) chk(!pop_l && !pop_b && !dff_en && !ctrl.dm_wen && !ctrl.xi_wen && !ctrl.psum_wen
                    && !ctrl.xi_ren && !ctrl.psum_ren && !ctrl.dm_ren, "gated when idle");
      else begin
        chk(pop_l == !ctrl_in.block, "L pop");
        chk(pop_b == (!ctrl_in.block && !ctrl_in.ct), "b pop");
        chk(dff_en == !ctrl_in.block, "DFF enable");
        chk(ctrl.dm_wen == ctrl_in.dm_wen, "dm write passes");
      end
      @(posedge clk);
      if (clear) writes = 0;
      else if (run && ctrl_in.dm_wen) writes++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
