// cu_decoder: instruction decoder of a compute unit.
//
// Splits the 39-bit CU instruction into its fields and decodes the two packed
// encodings the instruction format defines:
//   PE_en -> {Block, ct, S2}:  00 -> blocked; 01 -> ct=1, S2=01;
//                              10 -> ct=1, S2=10; 11 -> ct=0, S2=00
//   {R_en psum, MSB of R_addr psum} -> S1:  00 -> 00, 01 -> 01, 1x -> 10
// (both tables are from the source). The S1 input order (00 constant zero,
// 01 PE feedback, 10 psum register file) and the S2 input order (00 b_i FIFO,
// 01 input crossbar, 10 output crossbar) are this design's reading of the
// block diagram; 10 = psum file and 00 = b_i follow from the source text.
// S34_en bit 1 drives S3 (1: data memory), bit 0 drives S4 (1: own PE output).
//
// Purely combinational.
module cu_decoder
  import sptrsv_pkg::*;
(
  input  cu_instr_t instr,
  output cu_ctrl_t  ctrl
);

  always_comb begin
    ctrl = '0;
    unique case (instr.pe_en)
      PE_EN_BLOCK:  begin ctrl.block = 1'b1; ctrl.ct = 1'b1; ctrl.s2 = S2_RHS;      end
      PE_EN_MAC_XI: begin ctrl.block = 1'b0; ctrl.ct = 1'b1; ctrl.s2 = S2_IN_XBAR;  end
      PE_EN_MAC_PE: begin ctrl.block = 1'b0; ctrl.ct = 1'b1; ctrl.s2 = S2_OUT_XBAR; end
      PE_EN_FINAL:  begin ctrl.block = 1'b0; ctrl.ct = 1'b0; ctrl.s2 = S2_RHS;      end
    endcase

    if (instr.psum_ren)             ctrl.s1 = S1_PSUM_RF;
    else if (instr.psum_raddr[K-1]) ctrl.s1 = S1_FEEDBACK;
    else                            ctrl.s1 = S1_ZERO;

    ctrl.s3_dm      = instr.s34_en[1];
    ctrl.s4_pe      = instr.s34_en[0];
    ctrl.psum_ren   = instr.psum_ren;
    ctrl.psum_raddr = instr.psum_raddr;
    ctrl.psum_wen   = instr.psum_wen;
    ctrl.xi_ren     = instr.xi_ren;
    ctrl.xi_rvs     = instr.xi_rvs;
    ctrl.xi_raddr   = instr.xi_raddr;
    ctrl.xi_wen     = instr.xi_wen;
    ctrl.dm_ren     = instr.dm_ren;
    ctrl.dm_raddr   = instr.dm_raddr;
    ctrl.dm_wen     = instr.dm_wen;
    ctrl.i_sel      = instr.i_en;
    ctrl.o_sel      = instr.o_en;
  end

endmodule
