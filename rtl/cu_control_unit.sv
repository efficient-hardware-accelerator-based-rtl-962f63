// cu_control_unit: per-cycle control of a compute unit.
//
// Takes the decoded instruction and
//  * gates every enable with run, so that no state changes between programs;
//  * pops the L_ij FIFO on every executed (non-blocked) instruction and the
//    b_i FIFO on every node-finishing instruction (ct=0), because the stream
//    memory holds the values in consumption order;
//  * enables the PE pipeline register (DFF) only when the PE is not blocked,
//    so a blocked PE keeps its last result (its partial sum) at its output;
//  * generates the data-memory write address with a counter that starts at
//    zero and steps on every write.
// The counter rule and the block/clock relation follow the source; the run
// gating and the counter clear at the start of a program are this design's.
//
// Timing: pops, DFF enable and the write address are combinational from the
// current instruction; the counter advances at the clock edge of a write.
module cu_control_unit
  import sptrsv_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,       // start of a program
  input  logic         run,         // an instruction is issued this cycle
  input  cu_ctrl_t     ctrl_in,
  output cu_ctrl_t     ctrl,        // gated controls
  output logic         pop_l,
  output logic         pop_b,
  output logic         dff_en,
  output logic [T-1:0] dm_waddr,
  output logic         dm_full
);

  logic [T:0] wcount;

  always_comb begin
    ctrl = ctrl_in;
    if (!run) begin
      ctrl.block    = 1'b1;
      ctrl.psum_ren = 1'b0;
      ctrl.psum_wen = 1'b0;
      ctrl.xi_ren   = 1'b0;
      ctrl.xi_wen   = 1'b0;
      ctrl.dm_ren   = 1'b0;
      ctrl.dm_wen   = 1'b0;
    end
    pop_l  = !ctrl.block;
    pop_b  = !ctrl.block && !ctrl.ct;
    dff_en = !ctrl.block;
  end

  assign dm_waddr = wcount[T-1:0];
  assign dm_full  = wcount[T];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) wcount <= '0;
    else if (ctrl.dm_wen && !dm_full) wcount <= wcount + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) ctrl.dm_wen |-> !dm_full)
    else $error("cu_control_unit: data memory bank full");

endmodule
