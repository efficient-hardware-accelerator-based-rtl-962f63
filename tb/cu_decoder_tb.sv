// cu_decoder_tb: random instructions; every field is extracted here by bit
// position (fields packed MSB first: psum R_en, R_addr, W_en, x_i R_en, R_vs,
// R_addr, W_en, dm R_en, R_addr, W_en, I_en, O_en, S34_en, PE_en) and the
// PE_en and S1 tables are applied by hand.
//
// The decoder is combinational (cu_instr_t in, cu_ctrl_t out); each random
// instruction is applied for 1 ns before the outputs are compared. The field
// list and widths, the PE_en table and the S1 table (S1 hidden in the psum
// address MSB) follow the published instruction format; the bit positions,
// the S1 and S2 input numbering and the S34_en bit order are this design's
// choices and are checked as such.
module cu_decoder_tb;
  import sptrsv_pkg::*;
  cu_instr_t instr;
  cu_ctrl_t  ctrl;
  int checks = 0, failures = 0;

  cu_decoder dut (.instr, .ctrl);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s instr=%h", what, instr); end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [38:0] w;
    for (int i = 0; i < 5000; i++) begin
      w = {7'($urandom), $urandom};
      instr = cu_instr_t'(w);
      #1;
      chk($bits(cu_instr_t) == 39, "width");
      // PE_en table
      case (w[1:0])
        2'b00: chk(ctrl.block == 1, "block");
        2'b01: chk(!ctrl.block && ctrl.ct && ctrl.s2 == 2'b01, "PE_en 01");
        2'b10: chk(!ctrl.block && ctrl.ct && ctrl.s2 == 2'b10, "PE_en 10");
        2'b11: chk(!ctrl.block && !ctrl.ct && ctrl.s2 == 2'b00, "PE_en 11");
      endcase
      // S1 table from {R_en psum (bit 38), MSB of R_addr psum (bit 37)}
      case (w[38:37])
        2'b00: chk(ctrl.s1 == 2'b00, "S1 00");
        2'b01: chk(ctrl.s1 == 2'b01, "S1 01");
        default: chk(ctrl.s1 == 2'b10, "S1 1x");
      endcase
      chk(ctrl.psum_ren == w[38] && ctrl.psum_raddr == w[37:35] && ctrl.psum_wen == w[34], "psum fields");
      chk(ctrl.xi_ren == w[33] && ctrl.xi_rvs == w[32] && ctrl.xi_raddr == w[31:26] && ctrl.xi_wen == w[25], "x_i fields");
      chk(ctrl.dm_ren == w[24] && ctrl.dm_raddr == w[23:17] && ctrl.dm_wen == w[16], "dm fields");
      chk(ctrl.i_sel == w[15:10] && ctrl.o_sel == w[9:4], "interconnect fields");
      chk(ctrl.s3_dm == w[3] && ctrl.s4_pe == w[2], "S3/S4");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
