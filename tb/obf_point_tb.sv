// obf_point_tb: self-checking test of one obfuscation point.
//
// Drives all four key/mask combinations for both secret-bit values with
// random, distinct correct and decoy operands, and checks the MUX output
// and the XOR flag against the masked-obfuscation truth table: the correct
// operand when key ^ mask equals the secret bit, else the decoy, flag 1 only
// for the decoy. Also checks that equal operands give flag 0 (the
// comparator cannot see a wrong key bit when the operands coincide).
module obf_point_tb;
  localparam int unsigned DW = 32;

  logic [DW-1:0] correct, decoy, mux0, mux1;
  logic          key, mask, xor0, xor1;
  int            checks = 0, failures = 0;

  obf_point #(.DATA_W(DW), .SECRET(1'b0)) dut0 (
    .correct_i(correct), .decoy_i(decoy), .key_i(key), .mask_i(mask),
    .mux_o(mux0), .xor_o(xor0));
  obf_point #(.DATA_W(DW), .SECRET(1'b1)) dut1 (
    .correct_i(correct), .decoy_i(decoy), .key_i(key), .mask_i(mask),
    .mux_o(mux1), .xor_o(xor1));

  task automatic check(input logic [DW-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      correct = $urandom();
      decoy   = correct ^ (32'h1 << ($urandom() % DW));  // always differs
      for (int km = 0; km < 4; km++) begin
        key  = km[1];
        mask = km[0];
        #1;
        // Table I (secret 0): K=0,M=0 correct; 0,1 incorrect; 1,0 incorrect; 1,1 correct
        check(mux0, (key == mask) ? correct : decoy, "mux secret0");
        check({31'b0, xor0}, {31'b0, key != mask}, "xor secret0");
        check(mux1, (key != mask) ? correct : decoy, "mux secret1");
        check({31'b0, xor1}, {31'b0, key == mask}, "xor secret1");
      end
    end
    correct = 32'h1234_5678;
    decoy   = correct;
    key = 1'b1; mask = 1'b0;
    #1;
    check({31'b0, xor0}, 32'd0, "equal operands hide a wrong bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
