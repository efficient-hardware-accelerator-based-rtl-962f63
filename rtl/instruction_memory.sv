// instruction_memory: one CU's bank of the instruction memory.
//
// The scheduling software emits one instruction per CU per cycle; the
// machine reads them strictly in sequence, so every bank is addressed by the
// common program counter. Synchronous read (the word appears one cycle after
// the address), one write port for loading a program. The total size of 65536
// instruction words (1024 per CU for 64 CUs) is from the source; the banking,
// the synchronous read and the load port are this design's choices.
module instruction_memory #(
  parameter int unsigned AW    = 10,
  parameter int unsigned WIDTH = 39
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [1 << AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
