// alu_tb: self-checking test of the example ALU on random operands.
module alu_tb;
  import dlockout_pkg::*;
  logic [31:0] a, b, y, exp;
  alu_op_e     op;
  int          checks = 0, failures = 0;

  alu #(.DATA_W(32)) dut (.op(op), .a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      a  = $urandom();
      b  = $urandom();
      op = alu_op_e'(it % 4);
      #1;
      case (it % 4)
        0: exp = a + b;
        1: exp = a - b;
        2: exp = a ^ b;
        default: exp = a & b;
      endcase
      checks++;
      if (y !== exp) begin failures++; $display("FAIL op %0d: %h %h -> %h exp %h", it % 4, a, b, y, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
