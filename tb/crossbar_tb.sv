// crossbar_tb: self-checking test of the 64-port crossbar used for both the
// input and the output interconnect.
//
// The crossbar is combinational: output o carries input sel[o]. Each round
// drives 64 random words and 64 random selects, waits 1 ns and checks all 64
// outputs against the selected inputs. Every third round points all outputs
// at one input, the broadcast case in which several compute units consume one
// register-file read or one PE result in the same cycle. The test runs at
// the published size of 64 ports of 32 bits.
module crossbar_tb;
  localparam int P = 64;
  logic [P-1:0][31:0] din, dout;
  logic [P-1:0][5:0]  sel;
  int checks = 0, failures = 0;

  crossbar #(.NUM_PORTS(P), .SEL_W(6), .WIDTH(32)) dut (.din, .sel, .dout);

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < P; i++) begin
        din[i] = $urandom;
        sel[i] = (it % 3 == 0) ? 6'(it % P) : 6'($urandom);
      end
      #1;
      for (int o = 0; o < P; o++) begin
        checks++;
        if (dout[o] !== din[sel[o]]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d sel %0d", o, sel[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
