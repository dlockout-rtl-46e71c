// dlockout_keylen_tb: the locked design at the three key lengths that the
// lockout scheme was evaluated with, 32, 64 and 128 bits (one obfuscation
// point per key bit, 5 allowed attempts). Each size runs in its own
// keylen_harness: correct-key runs with latency and result checks, then a
// brute-force session that must lock the design on the 5th wrong key.
module dlockout_keylen_tb;
  logic clk = 0;
  logic d32, d64, d128;
  int   c32, c64, c128, f32, f64, f128;

  always #5 clk = ~clk;

  keylen_harness #(.KW(32),  .SECRET(32'hA5C3_96E1)) h32 (
    .clk(clk), .done(d32), .checks(c32), .failures(f32));
  keylen_harness #(.KW(64),  .SECRET(64'h0F1E_2D3C_4B5A_6978)) h64 (
    .clk(clk), .done(d64), .checks(c64), .failures(f64));
  keylen_harness #(.KW(128), .SECRET(128'hDEAD_BEEF_0123_4567_89AB_CDEF_F00D_CAFE)) h128 (
    .clk(clk), .done(d128), .checks(c128), .failures(f128));

  initial begin
    int checks, failures;
    fork
      begin
        @(posedge clk);  // harnesses clear done at time 0
        wait (d32 && d64 && d128);
        checks   = c32 + c64 + c128;
        failures = f32 + f64 + f128;
      end
      begin
        repeat (50000) @(posedge clk);
        checks   = c32 + c64 + c128;
        failures = f32 + f64 + f128 + 1;
        $display("watchdog expired");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
