// data_memory: one CU's bank of the data memory (2^T words).
//
// Receives the solution values: a CU writes through its S4 multiplexer at the
// address produced by its write counter, and reads a word back (synchronous
// read, one cycle) when a spilled x value is reloaded into its x_i register
// file. A second read port lets the host collect the solution after a run.
// The bank depth (8192 words over 64 CUs = 128) and the counter-addressed
// write are from the source; the host port is this design's addition.
module data_memory #(
  parameter int unsigned AW = 7
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata,
  input  logic [AW-1:0] host_raddr,
  output logic [31:0]   host_rdata
);

  logic [31:0] mem [1 << AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
    host_rdata <= mem[host_raddr];
  end

endmodule
