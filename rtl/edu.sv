// edu: Error Detection Unit for stuck-at faults on the DLockout comparators.
//
// A fault attack could hold an annotated XOR at 0 so that wrong keys are
// never counted. For every obfuscation point the EDU recomputes the
// expected comparator value with its own comparator (MUX output against the
// correct operand, OR-reduced) and outputs observed XOR ^ expected XOR. This
// reproduces the four rows of the EDU operation table: a stuck-at-0 on a
// correct selection and a stuck-at-1 on an incorrect one are ineffective
// (0), the other two cases are detected (1). fault_o is the OR over all
// points. What the fault flag drives is left open by the scheme; in this
// design it is a status output only.
//
// Purely combinational.
module edu #(
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned N_POINTS = 32
) (
  input  logic [N_POINTS-1:0][DATA_W-1:0] mux_i,
  input  logic [N_POINTS-1:0][DATA_W-1:0] correct_i,
  input  logic [N_POINTS-1:0]             xor_i,
  output logic [N_POINTS-1:0]             edu_o,
  output logic                            fault_o
);

  logic [N_POINTS-1:0] expected;

  always_comb begin
    for (int unsigned n = 0; n < N_POINTS; n++) begin
      expected[n] = (mux_i[n] != correct_i[n]);
      edu_o[n]    = xor_i[n] ^ expected[n];
    end
    fault_o = |edu_o;
  end

endmodule
