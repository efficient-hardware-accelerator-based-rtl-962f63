// sptrsv_accel: SpTRSV accelerator with medium-granularity dataflow.
//
// 2^LOG2_CU compute units (64 by default) run in lock step, each executing
// one instruction per cycle from its bank of the instruction memory. CUs
// exchange solution values through two crossbars: the input interconnect
// carries words read from any CU's x_i register file (or a CU's own fresh
// result) to PE operands, and the output interconnect carries PE results to
// x_i register files and directly to other PEs. Matrix values and right-hand
// sides stream from each CU's stream-memory bank; solutions are written to
// each CU's data-memory bank. All scheduling is done off-line: the hardware
// has no dependency checks, it does what each instruction says.
//
// Program sequence (this design's choice; the source does not describe the
// host side): load the instruction and stream banks through the load port,
// pulse start with prog_len set. The machine clears register files, FIFOs
// and counters (1 cycle), prefetches stream words and the first instruction
// (PREFETCH_CYCLES cycles), then issues prog_len instructions on consecutive
// cycles and raises done. The solution is read back through the rd_* port
// (one-cycle read latency). cycles reports the number of issued
// instructions.
//
// Ports are plain signals; the load port writes the instruction bank
// (load_sel=0, low INSTR_W bits of load_data) or the stream bank (load_sel=1,
// low 32 bits) of CU load_cu.
module sptrsv_accel
  import sptrsv_pkg::*;
#(
  parameter int unsigned LOG2_CU = N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host load port
  input  logic                 load_we,
  input  logic                 load_sel,
  input  logic [N-1:0]         load_cu,
  input  logic [IMEM_AW-1:0]   load_addr,
  input  logic [INSTR_W-1:0]   load_data,
  // run control
  input  logic                 start,
  input  logic [IMEM_AW:0]     prog_len,
  output logic                 busy,
  output logic                 done,
  output logic [IMEM_AW:0]     cycles,
  // result read port
  input  logic [N-1:0]         rd_cu,
  input  logic [T-1:0]         rd_addr,
  output logic [31:0]          rd_data
);

  localparam int unsigned NCU = 1 << LOG2_CU;
  localparam int unsigned PREFETCH_CYCLES = 3;

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_PREFETCH, S_RUN} seq_state_e;
  seq_state_e state;
  logic [1:0]          pf_cnt;
  logic [IMEM_AW:0]    pc;
  logic [IMEM_AW-1:0]  imem_raddr;
  logic                clear, prefetch, run;

  // ---------------------------------------------------------------- sequencer
  assign clear    = (state == S_CLEAR);
  assign prefetch = (state == S_PREFETCH);
  assign run      = (state == S_RUN);
  assign busy     = (state != S_IDLE);
  assign cycles   = pc;
  assign imem_raddr = run ? IMEM_AW'(pc + 1'b1) : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pf_cnt <= '0;
      pc     <= '0;
      done   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR;
          done  <= 1'b0;
          pc    <= '0;
        end
        S_CLEAR: begin
          state  <= S_PREFETCH;
          pf_cnt <= '0;
        end
        S_PREFETCH: begin
          pf_cnt <= pf_cnt + 1'b1;
          if (pf_cnt == 2'(PREFETCH_CYCLES - 1)) state <= (prog_len == '0) ? S_IDLE : S_RUN;
          if (pf_cnt == 2'(PREFETCH_CYCLES - 1) && prog_len == '0) done <= 1'b1;
        end
        S_RUN: begin
          pc <= pc + 1'b1;
          if (pc + 1'b1 == prog_len) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ compute units
  logic [NCU-1:0][31:0]      s4_out, pe_out, xin, oin;
  logic [NCU-1:0][LOG2_CU-1:0] i_sel, o_sel;
  logic [NCU-1:0][31:0]      host_rdata;

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    cu_instr_t   instr;
    logic [N-1:0] i_sel_full, o_sel_full;
    logic        dm_we, dm_re, l_req, b_req;
    logic [T-1:0] dm_waddr, dm_raddr;
    logic [31:0] dm_wdata, dm_rdata, l_rdata, b_rdata;
    logic        ld_here;

    assign ld_here = load_we && (load_cu == N'(c));
    assign i_sel[c] = i_sel_full[LOG2_CU-1:0];
    assign o_sel[c] = o_sel_full[LOG2_CU-1:0];

    instruction_memory #(.AW(IMEM_AW), .WIDTH(INSTR_W)) u_imem (
      .clk, .raddr(imem_raddr), .rdata(instr),
      .we(ld_here && !load_sel), .waddr(load_addr), .wdata(load_data)
    );

    stream_memory #(.AW(SMEM_AW)) u_smem (
      .clk, .rst_n, .clear,
      .l_req, .l_rdata, .b_req, .b_rdata,
      .we(ld_here && load_sel), .waddr(load_addr[SMEM_AW-1:0]), .wdata(load_data[31:0])
    );

    data_memory #(.AW(T)) u_dmem (
      .clk, .we(dm_we), .waddr(dm_waddr), .wdata(dm_wdata),
      .re(dm_re), .raddr(dm_raddr), .rdata(dm_rdata),
      .host_raddr(rd_addr), .host_rdata(host_rdata[c])
    );

    compute_unit u_cu (
      .clk, .rst_n, .clear, .prefetch, .run, .instr,
      .i_sel(i_sel_full), .o_sel(o_sel_full),
      .xin(xin[c]), .oin(oin[c]), .s4_out(s4_out[c]), .pe_out(pe_out[c]),
      .dm_we, .dm_waddr, .dm_wdata, .dm_re, .dm_raddr, .dm_rdata,
      .l_req, .l_rdata, .b_req, .b_rdata
    );
  end

  crossbar #(.NUM_PORTS(NCU), .SEL_W(LOG2_CU), .WIDTH(32)) u_in_xbar (
    .din(s4_out), .sel(i_sel), .dout(xin)
  );

  crossbar #(.NUM_PORTS(NCU), .SEL_W(LOG2_CU), .WIDTH(32)) u_out_xbar (
    .din(pe_out), .sel(o_sel), .dout(oin)
  );

  // Host read: the bank is selected one cycle after the address, matching the
  // memory's read latency.
  logic [N-1:0] rd_cu_q;
  always_ff @(posedge clk) rd_cu_q <= rd_cu;
  assign rd_data = host_rdata[rd_cu_q[LOG2_CU-1:0]];

  initial assert (LOG2_CU >= 1 && LOG2_CU <= N)
    else $error("sptrsv_accel: LOG2_CU must be in 1..N");

endmodule
