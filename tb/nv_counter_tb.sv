// nv_counter_tb: self-checking test of the non-volatile counter model.
//
// Checks the provisioning clear, that writes take effect only with we
// high, and that the stored value is held over many idle cycles (the model
// has no functional reset to lose it to).
module nv_counter_tb;
  logic       clk = 0, prog_clear, we;
  logic [2:0] d, q, model;
  int         checks = 0, failures = 0;

  nv_counter #(.CNT_W(3)) dut (.clk(clk), .prog_clear(prog_clear), .we(we), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_clear = 1; we = 0; d = 0;
    @(posedge clk); #1;
    prog_clear = 0;
    model = 0;
    checks++; if (q !== 3'd0) begin failures++; $display("FAIL clear"); end
    for (int it = 0; it < 300; it++) begin
      we = ($urandom() % 3) == 0;
      d  = 3'($urandom());
      prog_clear = ($urandom() % 50) == 0;
      @(posedge clk); #1;
      if (prog_clear) model = 0;
      else if (we) model = d;
      checks++;
      if (q !== model) begin failures++; $display("FAIL it %0d: q %0d exp %0d", it, q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
