// compute_unit_tb: one compute unit driven by a hand-written program.
//
// The CU's S4 output is looped back to its input-crossbar port (a one-CU
// machine); the testbench drives the output-crossbar port, models the data
// memory bank and the two stream banks (L upward, b in its own sequence),
// and checks the PE result after every executed instruction against the
// reference arithmetic. The program exercises: loading x values into the
// x_i file through the output crossbar (S3=0), multiply-accumulate from the
// x_i file through the input crossbar (PE_en=01) with and without release,
// from the output crossbar (PE_en=10), PE feedback (S1=01), parking a partial
// sum in the psum file and reading it back (S1=10), node finish with b and a
// reciprocal (PE_en=11), a blocked cycle that must hold the PE result,
// writing results to the data memory through S4 at counter addresses, and
// loading a data-memory word back into the lowest free x_i word (S3=1).
module compute_unit_tb;
  import sptrsv_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, prefetch = 0, run = 0;
  cu_instr_t instr;
  logic [N-1:0] i_sel, o_sel;
  logic [31:0] xin, oin, s4_out, pe_out;
  logic dm_we, dm_re, l_req, b_req;
  logic [T-1:0] dm_waddr, dm_raddr;
  logic [31:0] dm_wdata, dm_rdata, l_rdata, b_rdata;
  int checks = 0, failures = 0;

  logic [31:0] lv [16];
  logic [31:0] bv [4];
  logic [31:0] dm [DM_WORDS];
  int lp, bp;

  compute_unit dut (.*);
  assign xin = s4_out;

  always #5 clk = ~clk;

  // stream and data memory models
  always_ff @(posedge clk) begin
    if (clear) begin lp <= 0; bp <= 0; end
    else begin
      if (l_req) lp <= lp + 1;
      if (b_req) bp <= bp + 1;
    end
    l_rdata <= lv[lp % 16];
    b_rdata <= bv[bp % 4];
    if (dm_we) dm[dm_waddr] <= dm_wdata;
    if (dm_re) dm_rdata <= dm[dm_raddr];
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic cu_instr_t nop();
    cu_instr_t i;
    i = '0;
    i.pe_en = PE_EN_BLOCK;
    return i;
  endfunction

  // Issue one instruction with the output-crossbar word o.
  task automatic issue(input cu_instr_t i, input logic [31:0] o);
    @(negedge clk);
    instr = i; oin = o; run = 1;
    @(posedge clk);
    #1 run = 0;
  endtask

  initial begin
    cu_instr_t i;
    logic [31:0] x1, x2, x3, x4, psa, psb, xa, xb_, p;
    x1 = 32'h4000_0000;  // 2.0
    x2 = 32'h4040_0000;  // 3.0
    x3 = 32'h40A0_0000;  // 5.0
    x4 = 32'h40E0_0000;  // 7.0
    for (int k = 0; k < 16; k++) lv[k] = rand_f(3);
    for (int k = 0; k < 4; k++) bv[k] = rand_f(3);
    instr = nop(); oin = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) begin rst_n = 1; clear = 1; end
    @(negedge clk) begin clear = 0; prefetch = 1; end
    repeat (3) @(negedge clk);
    prefetch = 0;

    // c0, c1: load x1, x2 into the x_i file (addresses 0 and 1)
    i = nop(); i.xi_wen = 1; issue(i, x1);
    i = nop(); i.xi_wen = 1; issue(i, x2);
    // c2: start node A: psum 0 + L0 * x1 (x_i word 0 through S4 and input crossbar)
    i = nop(); i.pe_en = PE_EN_MAC_XI; i.xi_ren = 1; i.xi_raddr = 0; issue(i, 0);
    psa = f_mul(lv[0], x1);
    chk(pe_out == psa, "A first edge");
    // c3: park A in the psum file, start node B: L1 * x2, release x_i word 1
    i = nop(); i.psum_wen = 1; i.pe_en = PE_EN_MAC_XI; i.xi_ren = 1; i.xi_rvs = 1; i.xi_raddr = 1;
    issue(i, 0);
    psb = f_mul(lv[1], x2);
    chk(pe_out == psb, "B first edge");
    // c4: B continues with feedback and an output-crossbar operand
    i = nop(); i.psum_raddr = 3'b100; i.pe_en = PE_EN_MAC_PE; issue(i, x3);
    psb = f_add(psb, f_mul(lv[2], x3));
    chk(pe_out == psb, "B feedback edge");
    // c5: blocked: the PE result must not change
    issue(nop(), 32'hDEAD_BEEF);
    chk(pe_out == psb, "blocked PE holds its result");
    // c6: finish B: (b0 - psum) * L3
    i = nop(); i.psum_raddr = 3'b100; i.pe_en = PE_EN_FINAL; issue(i, 0);
    xb_ = f_mul(f_add(bv[0], {~psb[31], psb[30:0]}), lv[3]);
    chk(pe_out == xb_, "B finish");
    // c7: write x_B to data memory through S4; resume A from the psum file (word 0)
    i = nop(); i.dm_wen = 1; i.s34_en = 2'b01; i.psum_ren = 1; i.psum_raddr = 0;
    i.pe_en = PE_EN_MAC_PE; issue(i, x4);
    psa = f_add(psa, f_mul(lv[4], x4));
    chk(pe_out == psa, "A resumed from psum file");
    // c8: finish A
    i = nop(); i.psum_raddr = 3'b100; i.pe_en = PE_EN_FINAL; issue(i, 0);
    xa = f_mul(f_add(bv[1], {~psa[31], psa[30:0]}), lv[5]);
    chk(pe_out == xa, "A finish");
    // c9: write x_A to data memory (address 1 by the counter)
    i = nop(); i.dm_wen = 1; i.s34_en = 2'b01; issue(i, 0);
    @(negedge clk);
    chk(dm[0] == xb_, "data memory word 0 = x_B");
    chk(dm[1] == xa,  "data memory word 1 = x_A");
    // c10: read data memory word 0; c11: write it to the x_i file (S3=1)
    i = nop(); i.dm_ren = 1; i.dm_raddr = 0; issue(i, 0);
    i = nop(); i.xi_wen = 1; i.s34_en = 2'b10; issue(i, 0);
    // c12: the reloaded word went to the lowest free address, 1
    i = nop(); i.pe_en = PE_EN_MAC_XI; i.xi_ren = 1; i.xi_raddr = 1; issue(i, 0);
    p = f_mul(lv[6], xb_);
    chk(pe_out == p, "reloaded value at lowest free x_i word");
    // c13: x_i word 0 still holds x1 (not released)
    i = nop(); i.psum_raddr = 3'b100; i.pe_en = PE_EN_MAC_XI; i.xi_ren = 1; i.xi_raddr = 0; issue(i, 0);
    p = f_add(p, f_mul(lv[7], x1));
    chk(pe_out == p, "unreleased x_i word kept");
    // c14: park it and start a new node while reading back nothing: psum file word 0 is free again
    i = nop(); i.psum_wen = 1; i.pe_en = PE_EN_MAC_PE; issue(i, x3);
    chk(pe_out == f_mul(lv[8], x3), "new node starts from zero");
    // c15: read-before-write: park the current node and read the parked one (word 0)
    i = nop(); i.psum_ren = 1; i.psum_raddr = 0; i.psum_wen = 1; i.pe_en = PE_EN_MAC_PE; issue(i, x1);
    chk(pe_out == f_add(p, f_mul(lv[9], x1)), "swap with read-before-write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
