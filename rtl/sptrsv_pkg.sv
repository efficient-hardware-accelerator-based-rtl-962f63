// sptrsv_pkg: sizes, instruction format and decoded control types shared by
// the SpTRSV accelerator.
//
// The accelerator is a VLIW machine: every cycle each compute unit (CU)
// receives one 39-bit instruction. The field list, order and widths follow
// the published instruction layout (psum register file, x_i register file,
// data memory, interconnect selects, multiplexer/PE controls). The layout does
// not fix bit positions; here the fields are packed most-significant first in
// the order listed, which is this design's choice.
//
// Sizes: 2^N CUs, 2^M-word x_i register file, 2^K-word psum register file,
// 2^T-word data-memory bank per CU. Defaults are the 64-CU configuration
// (N=6, M=6, K=3, T=7: 64 x 128 = 8192 data-memory words). Instruction and
// stream memories hold 65536 words in total, i.e. 1024 words per CU.
package sptrsv_pkg;

  localparam int unsigned N = 6;  // log2(number of CUs)
  localparam int unsigned M = 6;  // log2(x_i register file words)
  localparam int unsigned K = 3;  // log2(psum register file words)
  localparam int unsigned T = 7;  // log2(data memory words per CU)

  localparam int unsigned NUM_CU      = 1 << N;
  localparam int unsigned XI_WORDS    = 1 << M;
  localparam int unsigned PSUM_WORDS  = 1 << K;
  localparam int unsigned DM_WORDS    = 1 << T;
  localparam int unsigned IMEM_AW     = 10;  // 1024 instructions per CU
  localparam int unsigned SMEM_AW     = 10;  // 1024 stream words per CU

  // One CU instruction. Field order as published, MSB first.
  typedef struct packed {
    logic         psum_ren;    // R_en psum
    logic [K-1:0] psum_raddr;  // R_addr psum (MSB doubles as S1 select)
    logic         psum_wen;    // W_en psum
    logic         xi_ren;      // R_en x_i
    logic         xi_rvs;      // R_vs x_i: release the read word
    logic [M-1:0] xi_raddr;    // R_addr x_i
    logic         xi_wen;      // W_en x_i
    logic         dm_ren;      // R_en dm
    logic [T-1:0] dm_raddr;    // R_addr dm
    logic         dm_wen;      // W_en dm
    logic [N-1:0] i_en;        // input crossbar source select
    logic [N-1:0] o_en;        // output crossbar source select
    logic [1:0]   s34_en;      // [1] S3, [0] S4
    logic [1:0]   pe_en;       // Block / ct / S2 encoding
  } cu_instr_t;

  localparam int unsigned INSTR_W = $bits(cu_instr_t);  // 39 at defaults

  // PE_en encoding (published table).
  localparam logic [1:0] PE_EN_BLOCK  = 2'b00;  // Block=1
  localparam logic [1:0] PE_EN_MAC_XI = 2'b01;  // ct=1, S2 = input crossbar
  localparam logic [1:0] PE_EN_MAC_PE = 2'b10;  // ct=1, S2 = output crossbar
  localparam logic [1:0] PE_EN_FINAL  = 2'b11;  // ct=0, S2 = b_i FIFO

  // S1: partial-sum source of the PE.
  typedef enum logic [1:0] {
    S1_ZERO = 2'b00,
    S1_FEEDBACK = 2'b01,
    S1_PSUM_RF = 2'b10
  } s1_sel_e;

  // S2: x/b operand source of the PE.
  typedef enum logic [1:0] {
    S2_RHS = 2'b00,
    S2_IN_XBAR = 2'b01,
    S2_OUT_XBAR = 2'b10
  } s2_sel_e;

  // Decoded controls of one CU for one cycle.
  typedef struct packed {
    logic         block;
    logic         ct;
    s1_sel_e      s1;
    s2_sel_e      s2;
    logic         s3_dm;       // x_i write data from data memory (else output crossbar)
    logic         s4_pe;       // S4 passes own PE output (else x_i read data)
    logic         psum_ren;
    logic [K-1:0] psum_raddr;
    logic         psum_wen;
    logic         xi_ren;
    logic         xi_rvs;
    logic [M-1:0] xi_raddr;
    logic         xi_wen;
    logic         dm_ren;
    logic [T-1:0] dm_raddr;
    logic         dm_wen;
    logic [N-1:0] i_sel;
    logic [N-1:0] o_sel;
  } cu_ctrl_t;

endpackage
