// alu: arithmetic-logic unit of the example host datapath.
//
// The obfuscated datapath of the lockout scheme contains ALUs whose
// operands come through the key-controlled multiplexers; their operation
// set is not specified. This one offers add, subtract, xor and and on
// DATA_W-bit operands, selected by op. Purely combinational.
module alu
  import dlockout_pkg::*;
#(
  parameter int unsigned DATA_W = 32
) (
  input  alu_op_e           op,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [DATA_W-1:0] y
);

  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      ALU_XOR: y = a ^ b;
      ALU_AND: y = a & b;
      default: y = '0;
    endcase
  end

endmodule
