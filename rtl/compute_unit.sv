// compute_unit: one compute unit (CU) of the accelerator.
//
// A CU owns a list of coarse nodes (matrix rows) and solves them one edge at
// a time: each executed instruction performs one multiply-accumulate
// psum + L_ij * x_j, or finishes a node with (b_i - psum) * (1/L_ii). The CU
// holds
//   * the decoder and control unit,
//   * S1, choosing the PE's partial sum: zero (new node), the PE's own
//     previous result (feedback, same node) or the psum register file
//     (a node parked earlier),
//   * S2, choosing the PE's x/b operand: the b_i FIFO, the input crossbar
//     (an x_j read from any CU's x_i register file) or the output crossbar
//     (an x_j just produced by any PE, reused without a register-file trip),
//   * the pipeline register (DFF) in front of the PE, clocked only when the
//     instruction is not blocked,
//   * the PE (floating-point adder and multiplier in series),
//   * the x_i register file (64 words) written through S3 from the output
//     crossbar or from the data memory (loading back a spilled value),
//   * the psum register file (8 words) that parks the partial sum of a node
//     that has no computable edge, so the PE can work on another node,
//   * S4, sending either the x_i register file's read word or this CU's own
//     PE result to the input crossbar and to the data-memory write port,
//   * the b_i and L_ij FIFOs fed from the stream memory.
// This structure is the published CU block diagram.
//
// Timing (this design's convention, which the scheduling software must
// follow): an instruction's reads, multiplexer selections and FIFO pops act
// in the cycle it is issued; the DFF captures the PE operands at the end of
// that cycle and the PE result (pe_out) is visible during the next cycle.
// So the write-back fields of an instruction (psum W_en, x_i W_en with S3,
// data-memory W_en with S4, O_en) act on the result of the previous executed
// instruction. Register-file reads are asynchronous; the data-memory read
// is synchronous (its word is written to the x_i file by the next
// instruction).
module compute_unit
  import sptrsv_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,      // start of a program: empty files, flush FIFOs
  input  logic         prefetch,   // stream FIFOs may fetch
  input  logic         run,        // instr is valid this cycle
  input  cu_instr_t    instr,
  // interconnect
  output logic [N-1:0] i_sel,      // which CU's S4 word this CU takes
  output logic [N-1:0] o_sel,      // which CU's PE result this CU takes
  input  logic [31:0]  xin,        // input crossbar word
  input  logic [31:0]  oin,        // output crossbar word
  output logic [31:0]  s4_out,     // to input crossbar and data memory
  output logic [31:0]  pe_out,     // to output crossbar
  // data memory bank
  output logic         dm_we,
  output logic [T-1:0] dm_waddr,
  output logic [31:0]  dm_wdata,
  output logic         dm_re,
  output logic [T-1:0] dm_raddr,
  input  logic [31:0]  dm_rdata,
  // stream memory bank
  output logic         l_req,
  input  logic [31:0]  l_rdata,
  output logic         b_req,
  input  logic [31:0]  b_rdata
);

  cu_ctrl_t    ctrl_dec, ctrl;
  logic        pop_l, pop_b, dff_en, dm_full;
  logic        rf_rst_n;
  logic [31:0] xi_rdata, xi_wdata, psum_rdata;
  logic [M-1:0] xi_waddr;
  logic [K-1:0] psum_waddr;
  logic        xi_full, psum_full;
  logic [M:0]  xi_free;
  logic [K:0]  psum_free;
  logic [31:0] l_head, b_head;
  logic        l_empty, b_empty;
  logic [31:0] s1_out, s2_out;

  // DFF: PE operand register.
  logic        ct_q;
  logic [31:0] psum_q, xb_q, lij_q;

  assign rf_rst_n = rst_n && !clear;

  cu_decoder u_dec (.instr(instr), .ctrl(ctrl_dec));

  cu_control_unit u_ctl (
    .clk, .rst_n, .clear, .run,
    .ctrl_in(ctrl_dec), .ctrl,
    .pop_l, .pop_b, .dff_en, .dm_waddr, .dm_full
  );

  // S1: partial sum source.
  always_comb begin
    unique case (ctrl.s1)
      S1_FEEDBACK: s1_out = pe_out;
      S1_PSUM_RF:  s1_out = psum_rdata;
      default:     s1_out = 32'd0;
    endcase
  end

  // S2: x_j / b_i source.
  always_comb begin
    unique case (ctrl.s2)
      S2_IN_XBAR:  s2_out = xin;
      S2_OUT_XBAR: s2_out = oin;
      default:     s2_out = b_head;
    endcase
  end

  // S3: x_i register file write data.
  assign xi_wdata = ctrl.s3_dm ? dm_rdata : oin;
  // S4: word offered to the input crossbar and the data memory.
  assign s4_out   = ctrl.s4_pe ? pe_out : xi_rdata;

  assign i_sel    = ctrl.i_sel;
  assign o_sel    = ctrl.o_sel;
  assign dm_we    = ctrl.dm_wen;
  assign dm_wdata = s4_out;
  assign dm_re    = ctrl.dm_ren;
  assign dm_raddr = ctrl.dm_raddr;

  alloc_regfile #(.DEPTH(XI_WORDS), .WIDTH(32)) u_xi_rf (
    .clk, .rst_n(rf_rst_n),
    .ren(ctrl.xi_ren), .raddr(ctrl.xi_raddr), .rrelease(ctrl.xi_rvs), .rdata(xi_rdata),
    .wen(ctrl.xi_wen), .wdata(xi_wdata), .waddr(xi_waddr), .full(xi_full), .free_count(xi_free)
  );

  alloc_regfile #(.DEPTH(PSUM_WORDS), .WIDTH(32)) u_psum_rf (
    .clk, .rst_n(rf_rst_n),
    .ren(ctrl.psum_ren), .raddr(ctrl.psum_raddr), .rrelease(1'b1), .rdata(psum_rdata),
    .wen(ctrl.psum_wen), .wdata(pe_out), .waddr(psum_waddr), .full(psum_full), .free_count(psum_free)
  );

  stream_fifo #(.DEPTH(4), .WIDTH(32)) u_l_fifo (
    .clk, .rst_n, .flush(clear), .enable(prefetch || run),
    .mem_req(l_req), .mem_rdata(l_rdata), .pop(pop_l), .head(l_head), .empty(l_empty)
  );

  stream_fifo #(.DEPTH(4), .WIDTH(32)) u_b_fifo (
    .clk, .rst_n, .flush(clear), .enable(prefetch || run),
    .mem_req(b_req), .mem_rdata(b_rdata), .pop(pop_b), .head(b_head), .empty(b_empty)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ct_q   <= 1'b1;
      psum_q <= '0;
      xb_q   <= '0;
      lij_q  <= '0;
    end else if (dff_en) begin
      ct_q   <= ctrl.ct;
      psum_q <= s1_out;
      xb_q   <= s2_out;
      lij_q  <= l_head;
    end
  end

  processing_element u_pe (.ct(ct_q), .psum(psum_q), .xb(xb_q), .lij(lij_q), .out(pe_out));

  // The schedule must never read an empty FIFO.
  assert property (@(posedge clk) disable iff (!rst_n) pop_l |-> !l_empty)
    else $error("compute_unit: L stream underrun");
  assert property (@(posedge clk) disable iff (!rst_n) pop_b |-> !b_empty)
    else $error("compute_unit: b stream underrun");

endmodule
