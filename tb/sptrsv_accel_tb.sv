// sptrsv_accel_tb: end-to-end test of the accelerator at its default size
// (64 compute units).
//
// The testbench contains a small off-line scheduler that plays the role of
// the accelerator's compiler. For a random sparse lower-triangular matrix it
//   * allocates row i to CU (i mod 64), in row order (topological order),
//   * schedules cycle by cycle with the medium-granularity dataflow: a CU
//     computes any edge L_ij * x_j of its nodes as soon as x_j exists,
//     without waiting for the node's other inputs,
//   * applies the partial-sum caching rules: a parked node that has become
//     computable is taken first; otherwise the current node continues;
//     otherwise the first computable new node is started, parking the
//     current partial sum, which needs two free psum words (one if the new
//     node is the first unstarted one) or else the CU blocks;
//   * picks edges preferring a source already read this cycle by another CU
//     (one register-file read broadcast to several CUs), then a value just
//     produced by a PE (taken from the output crossbar), then the lowest
//     source in a register file,
//   * writes each solution to its owner's data memory (S4) and, while it
//     still has consumers, to its owner's x_i register file, releasing the
//     register word on the read that serves its last consumer,
//   * emits the instruction words and the L / b streams in consumption order.
// It then loads the program, runs it, reads the solution from the data
// memory and compares it bit for bit with a reference solve that performs
// the same single-precision operations in the same order. It also checks
// the run length, and counts how often each mechanism occurred: each must
// occur at least once over the test matrices.
module sptrsv_accel_tb;
  import sptrsv_pkg::*;
  import fp_ref_pkg::*;

  localparam int P      = NUM_CU;
  localparam int MAXN   = 4096;
  localparam int MAXNNZ = 40000;
  localparam int MAXCYC = 1 << IMEM_AW;

  logic clk = 0, rst_n = 0;
  logic load_we = 0, load_sel = 0;
  logic [N-1:0] load_cu = 0;
  logic [IMEM_AW-1:0] load_addr = 0;
  logic [INSTR_W-1:0] load_data = 0;
  logic start = 0;
  logic [IMEM_AW:0] prog_len = 0;
  logic busy, done;
  logic [IMEM_AW:0] cycles;
  logic [N-1:0] rd_cu = 0;
  logic [T-1:0] rd_addr = 0;
  logic [31:0] rd_data;

  int checks = 0, failures = 0;

  sptrsv_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  `include "sptrsv_sched.svh"


  initial begin
    n_park = 0; n_reload = 0; n_swap = 0; n_block_dag = 0; n_block_psum = 0; n_fresh = 0;
    n_rfread = 0; n_broadcast = 0; n_release = 0; n_final = 0; n_dmwrite = 0; n_edge_early = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_case("wide levels", 640, 8, 0);
    run_case("long chains", 512, 6, 40);
    run_case("dense rows", 256, 24, 64);
    $display("mechanisms: park=%0d reload=%0d swap=%0d dag_block=%0d psum_block=%0d direct_reuse=%0d rf_read=%0d broadcast=%0d release=%0d finish=%0d dm_write=%0d early_edge=%0d",
             n_park, n_reload, n_swap, n_block_dag, n_block_psum, n_fresh, n_rfread, n_broadcast,
             n_release, n_final, n_dmwrite, n_edge_early);
    chk(n_park > 0, "psum parked");
    chk(n_reload > 0, "psum reloaded");
    chk(n_swap > 0, "psum swap (read-before-write)");
    chk(n_block_dag > 0, "blocked by dependences");
    chk(n_block_psum > 0, "blocked by psum capacity");
    chk(n_fresh > 0, "direct reuse through the output crossbar");
    chk(n_broadcast > 0, "one register read broadcast to several CUs");
    chk(n_release > 0, "x_i word released");
    chk(n_dmwrite > 0, "data memory writes");
    chk(n_edge_early > 0, "edge computed before the node's other inputs exist");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
