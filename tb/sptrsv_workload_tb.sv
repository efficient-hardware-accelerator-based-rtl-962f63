// sptrsv_workload_tb: runs sptrsv_accel at its default size (64 compute
// units) on random lower-triangular matrices with the sizes of the benchmark
// matrices the accelerator is evaluated on: the row count N and non-zero
// count NNZ of each listed benchmark (NNZ taken as including the diagonal,
// so NNZ - N off-diagonal entries). The real matrices' sparsity patterns
// are not available to a self-contained testbench, so each workload is a
// synthetic matrix of the same size; the dependence structure is drawn from
// a window of earlier rows (see gen_matrix_nnz in sptrsv_sched.svh), which
// keeps the number of live solution values within the x_i register files
// since the test scheduler does not spill.
//
// Only the benchmarks whose program fits one instruction-memory load (1024
// cycles per CU) and whose solutions fit the data memory (128 words per CU)
// are run. add32 (4960 rows, 14451 non-zeros) fits by size, but its
// synthetic stand-in forms dependence chains too long for 1024 cycles under
// this scheduler (about 1400 of its rows are solved by then), so it is left
// out. The synthetic matrices say nothing about the cycle counts of the real
// ones, whose structure differs. For each, the shared scheduler builds the program, the testbench
// loads and runs it, checks the run length and the start-to-done latency
// (prog_len + 5 cycles) and compares every solution bit for bit with a
// reference solve in the scheduled operation order. It prints the cycle
// count and the achieved operations per cycle for each workload.
module sptrsv_workload_tb;
  import sptrsv_pkg::*;
  import fp_ref_pkg::*;

  localparam int P      = NUM_CU;
  localparam int MAXN   = 8192;
  localparam int MAXNNZ = 65536;
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
    repeat (20000000) @(posedge clk);
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

  typedef struct {
    string name;
    int    rows;
    int    nnz;
  } workload_t;

  localparam int WINDOW = 256;

  task automatic run_workload(input workload_t w);
    gen_matrix_nnz(w.rows, w.nnz - w.rows, WINDOW);
    run_loaded(w.name);
  endtask

  initial begin
    workload_t wl [$];
    wl.push_back('{"bp_200",         822,  2874});
    wl.push_back('{"rajat19",        1157, 3956});
    wl.push_back('{"fpga_dcop_01",   1220, 4303});
    wl.push_back('{"fpga_trans_01",  1220, 5371});
    wl.push_back('{"west2021",       2021, 6160});
    wl.push_back('{"rajat04",        1041, 7625});
    wl.push_back('{"circuit204",     1020, 8008});
    wl.push_back('{"cz628",          628,  9123});
    wl.push_back('{"add20",          2395, 9867});
    wl.push_back('{"c-36",           7479, 12186});
    wl.push_back('{"bcsstm10",       1086, 14546});
    wl.push_back('{"rdb968",         968,  16101});
    wl.push_back('{"nnc1374",        1374, 17897});
    n_park = 0; n_reload = 0; n_swap = 0; n_block_dag = 0; n_block_psum = 0; n_fresh = 0;
    n_rfread = 0; n_broadcast = 0; n_release = 0; n_final = 0; n_dmwrite = 0; n_edge_early = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (wl[i]) run_workload(wl[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
