// alloc_regfile: register file whose write address is generated in hardware.
//
// Each word carries a valid bit. A write always goes to the free (invalid)
// word with the lowest address, found by a priority encoder over the valid
// bits; the software that schedules the machine predicts these addresses, so
// they need no instruction bits. A read returns the word in the same cycle
// (asynchronous read) and, when rrelease is set, frees it. The file supports
// read-before-write: a word freed by this cycle's read is already free for
// this cycle's write, and the read returns the old contents. Both the lowest-
// free-address rule and read-before-write are from the source; the
// asynchronous read and the clearing of all valid bits on a synchronous reset are this
// design's choices.
//
// Used twice per compute unit: the x_i file (64 words, release chosen by the
// instruction's R_vs bit) and the psum file (8 words, released on every read).
module alloc_regfile #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ren,
  input  logic [AW-1:0]    raddr,
  input  logic             rrelease,
  output logic [WIDTH-1:0] rdata,
  input  logic             wen,
  input  logic [WIDTH-1:0] wdata,
  output logic [AW-1:0]    waddr,
  output logic             full,
  output logic [AW:0]      free_count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [DEPTH-1:0] free_mask;

  assign rdata = mem[raddr];

  // Words free for this cycle's write, counting the word released by the read.
  always_comb begin
    free_mask = ~valid;
    if (ren && rrelease) free_mask[raddr] = 1'b1;
  end

  // Priority encoder: lowest free address.
  always_comb begin
    waddr = '0;
    full  = 1'b1;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (free_mask[i]) begin
        waddr = AW'(i);
        full  = 1'b0;
      end
    end
  end

  always_comb begin
    free_count = '0;
    for (int i = 0; i < DEPTH; i++) free_count = free_count + (AW+1)'(free_mask[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      if (ren && rrelease) valid[raddr] <= 1'b0;
      if (wen && !full)    valid[waddr] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wen && !full) mem[waddr] <= wdata;
  end

  // A scheduled write must find a free word.
  assert property (@(posedge clk) disable iff (!rst_n) wen |-> !full)
    else $error("alloc_regfile: write to a full register file");

endmodule
