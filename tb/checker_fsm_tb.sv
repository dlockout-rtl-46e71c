// checker_fsm_tb: self-checking test of the lockout checker.
//
// Provisions the counter, then applies a random sequence of check steps
// with and without flagged comparators, plus idle cycles with flags but
// no check (which must not count). A model of the attempt count gives the
// expected dp_comp in every cycle: 000 with no flag, 100 while the count
// after the attempt stays below the threshold, 001 from the attempt that
// reaches it on, for ever. Also checks that the count survives a long run
// and that the lockout is reached after exactly ALLOWED wrong attempts.
module checker_fsm_tb;
  import dlockout_pkg::*;
  localparam int unsigned NP = 12;
  localparam int unsigned ALLOWED = 5;

  logic          clk = 0, nv_init, check_en;
  logic [NP-1:0] xr;
  dp_comp_e      dp_comp, exp_comp;
  logic [2:0]    attempts;
  int            model_cnt, wrong_seen, lock_at;
  int            checks = 0, failures = 0;

  checker_fsm #(.N_POINTS(NP), .CNT_W(3), .ALLOWED_ATTEMPTS(ALLOWED)) dut (
    .clk(clk), .nv_init(nv_init), .check_en(check_en), .xor_i(xr),
    .dp_comp(dp_comp), .attempts(attempts));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nv_init = 1; check_en = 0; xr = '0;
    @(posedge clk); #1;
    nv_init = 0;
    model_cnt = 0; wrong_seen = 0; lock_at = -1;
    for (int it = 0; it < 400; it++) begin
      check_en = ($urandom() % 2) == 0;
      xr       = (($urandom() % 3) == 0) ? NP'(1) << ($urandom() % NP) : '0;
      #1;
      if (model_cnt >= ALLOWED)          exp_comp = DP_LOCKOUT;
      else if (xr != 0)                  exp_comp = (model_cnt + 1 >= ALLOWED) ? DP_LOCKOUT : DP_PARTIAL;
      else                               exp_comp = DP_OK;
      checks++;
      if (dp_comp !== exp_comp || attempts !== 3'(model_cnt)) begin
        failures++;
        $display("FAIL it %0d: dp_comp %b exp %b, attempts %0d exp %0d",
                 it, dp_comp, exp_comp, attempts, model_cnt);
      end
      if (check_en && xr != 0 && model_cnt < ALLOWED) begin
        model_cnt++;
        wrong_seen++;
        if (model_cnt == ALLOWED) lock_at = wrong_seen;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (lock_at != ALLOWED) begin
      failures++;
      $display("FAIL lockout after %0d wrong attempts, expected %0d", lock_at, ALLOWED);
    end
    // Provisioning clears the lockout.
    nv_init = 1; @(posedge clk); #1; nv_init = 0; xr = '0; check_en = 0; #1;
    checks++;
    if (dp_comp !== DP_OK || attempts !== 3'd0) begin failures++; $display("FAIL reprovision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
