// stream_memory: one CU's bank of the stream memory.
//
// Holds the CU's matrix values (L_ij, and 1/L_ii for node finishes) and its
// right-hand sides b_i with no position information: the scheduling software
// stores them in exactly the order the CU will consume them. The L values
// are read upward from address 0 and the b values downward from the top
// address, each by its own sequential address counter and read port, so that
// an instruction finishing a node can take an L value and a b value in the
// same cycle. Storing L and b sequentially without positions is from the
// source; the two-ended layout, the two read ports and the load port are this
// design's choices. 1024 words per CU (65536 in total for 64 CUs) follows
// the source's memory size.
//
// Timing: a request (l_req/b_req) reads the word at the counter and steps
// the counter; the word appears one cycle later. clear resets both counters.
module stream_memory #(
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          l_req,
  output logic [31:0]   l_rdata,
  input  logic          b_req,
  output logic [31:0]   b_rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata
);

  logic [31:0]   mem [1 << AW];
  logic [AW-1:0] l_ptr, b_ptr;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      l_ptr <= '0;
      b_ptr <= '1;
    end else begin
      if (l_req) l_ptr <= l_ptr + 1'b1;
      if (b_req) b_ptr <= b_ptr - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    l_rdata <= mem[l_ptr];
    b_rdata <= mem[b_ptr];
  end

endmodule
