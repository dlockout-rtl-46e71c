// obf_point: one key-obfuscation point with its DLockout comparator.
//
// A 2:1 multiplexer, inserted by key-based obfuscation on an operand path,
// passes either the operand of the original design (correct_i) or a decoy
// (decoy_i). Its select is the applied key bit XORed with a mask bit; the
// correct operand is passed when key_i ^ mask_i equals the point's secret
// bit SECRET, which is fixed by the wiring and never stored as a value.
// With SECRET = 0 this is exactly the truth table of the masked
// obfuscation logic (correct when K = Mask); with mask_i = 0 it is the plain
// key-controlled MUX. The annotated XOR compares the MUX output with the
// correct operand; as the operand is DATA_W bits wide, the bitwise XOR is
// OR-reduced to one flag, xor_o = 1 meaning "this key bit is wrong". A wrong
// key bit is therefore only seen when the decoy and correct operands differ.
//
// Purely combinational, no clock.
module obf_point #(
  parameter int unsigned DATA_W = 32,
  parameter bit          SECRET = 1'b0
) (
  input  logic [DATA_W-1:0] correct_i,
  input  logic [DATA_W-1:0] decoy_i,
  input  logic              key_i,
  input  logic              mask_i,
  output logic [DATA_W-1:0] mux_o,
  output logic              xor_o
);

  logic sel;

  always_comb begin
    sel   = key_i ^ mask_i;
    mux_o = (sel == SECRET) ? correct_i : decoy_i;
    xor_o = |(mux_o ^ correct_i);
  end

endmodule
