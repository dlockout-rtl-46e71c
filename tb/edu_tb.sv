// edu_tb: self-checking test of the Error Detection Unit.
//
// For each point the testbench chooses whether the MUX output is the
// correct operand or not, and whether the observed comparator is healthy,
// stuck at 0 or stuck at 1. The expected EDU bit is computed from the
// four-row EDU table (observed XOR differs from expected XOR), together
// with the OR-reduced fault flag.
module edu_tb;
  localparam int unsigned DW = 16;
  localparam int unsigned NP = 8;

  logic [NP-1:0][DW-1:0] mux, correct;
  logic [NP-1:0]         xr, edu_o, exp_edu;
  logic                  fault;
  int                    checks = 0, failures = 0;

  edu #(.DATA_W(DW), .N_POINTS(NP)) dut (
    .mux_i(mux), .correct_i(correct), .xor_i(xr), .edu_o(edu_o), .fault_o(fault));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // The four rows of the EDU table on point 0, others healthy and correct.
    for (int row = 0; row < 4; row++) begin
      for (int n = 0; n < NP; n++) begin
        correct[n] = DW'($urandom());
        mux[n]     = correct[n];
        xr[n]      = 1'b0;
      end
      // row: {saf, mux incorrect}
      if (row[0]) mux[0] = ~correct[0];
      xr[0] = row[1];
      #1;
      checks++;
      if (edu_o[0] !== (row[1] ^ row[0]) || fault !== (row[1] ^ row[0])) begin
        failures++;
        $display("FAIL row %0d: edu %b fault %b", row, edu_o[0], fault);
      end
    end
    // Random mixes of healthy and stuck comparators.
    for (int it = 0; it < 200; it++) begin
      for (int n = 0; n < NP; n++) begin
        logic wrong;
        int   mode;
        correct[n] = DW'($urandom());
        wrong      = $urandom() % 2;
        mux[n]     = wrong ? correct[n] ^ DW'(1 + $urandom() % 100) : correct[n];
        mode       = $urandom() % 4;          // 0,1 healthy; 2 SA0; 3 SA1
        xr[n]      = (mode < 2) ? wrong : (mode == 3);
        exp_edu[n] = xr[n] ^ wrong;
      end
      #1;
      checks++;
      if (edu_o !== exp_edu || fault !== |exp_edu) begin
        failures++;
        $display("FAIL mix: edu %b expected %b", edu_o, exp_edu);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
