// crossbar: full NUM_PORTS x NUM_PORTS word crossbar.
//
// Every output port has its own multiplexer that can take any input port,
// selected by that output's SEL_W-bit select. Several outputs may take the
// same input in the same cycle (a broadcast), which is how one x_j read from
// a register file reaches every CU that needs it. The accelerator uses two of
// these: the input interconnect (register-file words to PE operands, select =
// the receiving CU's I_en) and the output interconnect (PE results to
// register files and PE operands, select = O_en). That both interconnects are
// crossbars is from the source; the combinational (unregistered) realisation
// is this design's choice. A select beyond NUM_PORTS-1 gives zero.
module crossbar #(
  parameter int unsigned NUM_PORTS = 64,
  parameter int unsigned SEL_W     = 6,
  parameter int unsigned WIDTH     = 32
) (
  input  logic [NUM_PORTS-1:0][WIDTH-1:0] din,
  input  logic [NUM_PORTS-1:0][SEL_W-1:0] sel,
  output logic [NUM_PORTS-1:0][WIDTH-1:0] dout
);

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    always_comb begin
      if (32'(sel[o]) < NUM_PORTS) dout[o] = din[sel[o]];
      else                         dout[o] = '0;
    end
  end

endmodule
