// stream_fifo: prefetch FIFO between the stream memory and the PE.
//
// The stream memory holds the matrix values L_ij and the right-hand sides b_i
// in exactly the order the compute unit consumes them, so the FIFO only has
// to keep reading the next sequential word. It issues a read request
// (mem_req) whenever the words stored plus the words already requested fit
// in DEPTH; the memory answers one cycle later (mem_rdata) and the word is
// written at the tail. The head word is shown combinationally and removed by
// pop. That the operands pass through FIFOs is from the source; the depth (4)
// and the request/fill scheme are this design's choices.
//
// Timing: after reset (or flush) the first word is available two cycles
// later; with one pop per cycle the FIFO then never runs empty.
module stream_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,      // discard contents (start of a run)
  input  logic             enable,     // allow prefetching
  output logic             mem_req,
  input  logic [WIDTH-1:0] mem_rdata,
  input  logic             pop,
  output logic [WIDTH-1:0] head,
  output logic             empty
);

  logic [WIDTH-1:0] buf_q [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [AW:0]      count;
  logic             req_q;        // a word arrives this cycle
  logic             do_pop;

  assign empty   = (count == '0);
  assign head    = buf_q[rd_ptr];
  assign do_pop  = pop && !empty;
  // Room for one more word counting the one in flight.
  assign mem_req = enable && !flush &&
                   ((count + (AW+1)'(req_q)) < (AW+1)'(DEPTH) ||
                    ((count + (AW+1)'(req_q)) == (AW+1)'(DEPTH) && do_pop));

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      req_q  <= 1'b0;
    end else begin
      req_q <= mem_req;
      if (req_q) wr_ptr <= wr_ptr + AW'(1);
      if (do_pop) rd_ptr <= rd_ptr + AW'(1);
      count <= count + (AW+1)'(req_q) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !flush && req_q) buf_q[wr_ptr] <= mem_rdata;
  end

  assert property (@(posedge clk) disable iff (!rst_n || flush) pop |-> !empty)
    else $error("stream_fifo: pop from an empty FIFO");

endmodule
