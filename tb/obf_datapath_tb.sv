// obf_datapath_tb: self-checking test of the obfuscated datapath.
//
// Acts as the controller (load, check, KEY_W/4 steps) and compares with
// the reference model in dlockout_model_pkg:
//   - correct key, unmasked and masked (key = secret ^ mask): dp_comp = 000
//     at the check and the four result registers equal the model;
//   - one to several wrong key bits: dp_comp = 100 for the first
//     ALLOWED-1 wrong attempts and 001 from the ALLOWED-th on, with the
//     attempt count stepping by one per wrong check and surviving reset;
//   - the computation with a wrong key (steps forced by the testbench)
//     matches the model's wrong result, so the MUXes are really in the path;
//   - a comparator forced to a stuck value is reported by the EDU.
module obf_datapath_tb;
  import dlockout_pkg::*;
  import dlockout_model_pkg::*;
  localparam int unsigned KW = 32;
  localparam int unsigned ALLOWED = 5;
  localparam logic [KW-1:0] SECRET = 32'h3C5A_F00F;

  logic            clk = 0, reset, nv_init;
  regs_t           pi, dout, exp_r;
  logic [KW-1:0]   key, mask;
  ctrl_t           ctrl;
  dp_comp_e        dp_comp;
  logic [2:0]      attempts;
  logic            edu_fault;
  int              wrong_attempts = 0;
  int              checks = 0, failures = 0;

  obf_datapath #(.DATA_W(32), .KEY_W(KW), .CNT_W(3), .ALLOWED_ATTEMPTS(ALLOWED),
                 .KEY_SECRET(SECRET)) dut (
    .clk(clk), .reset(reset), .nv_init(nv_init), .pi(pi), .key(key), .mask(mask),
    .ctrl(ctrl), .dp_comp(dp_comp), .dout(dout), .attempts(attempts), .edu_fault(edu_fault));

  always #5 clk = ~clk;

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic regs_t distinct_inputs();
    regs_t r;
    do begin
      for (int i = 0; i < 4; i++) r[i] = $urandom();
    end while (r[0] == r[1] || r[0] == r[2] || r[0] == r[3] ||
               r[1] == r[2] || r[1] == r[3] || r[2] == r[3]);
    return r;
  endfunction

  // One pass: load, check (returns dp_comp seen), optionally compute.
  task automatic pass(input bit compute, output dp_comp_e seen);
    ctrl = '0; ctrl.load = 1'b1;
    @(posedge clk); #1;
    ctrl = '0; ctrl.check = 1'b1;
    #1 seen = dp_comp;
    @(posedge clk); #1;
    ctrl = '0;
    if (compute) begin
      for (int s = 0; s < KW / 4; s++) begin
        ctrl.step_en = 1'b1; ctrl.step_idx = STEP_W'(s);
        @(posedge clk); #1;
      end
      ctrl = '0;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dp_comp_e seen;
    ctrl = '0; reset = 1; nv_init = 1; key = '0; mask = '0; pi = '0;
    @(posedge clk); #1 reset = 0; nv_init = 0;
    expect_true(attempts == 0, "provisioned count is 0");

    // Correct key, unmasked and masked.
    for (int it = 0; it < 20; it++) begin
      pi   = distinct_inputs();
      mask = (it % 2) ? KW'($urandom()) : '0;
      key  = SECRET ^ mask;
      pass(1'b1, seen);
      exp_r = run(pi, KW, 128'(key), 128'(mask), 128'(SECRET));
      expect_true(seen == DP_OK, "correct key passes the check");
      expect_true(dout == exp_r, "correct key result");
      expect_true(!edu_fault, "no EDU fault on healthy comparators");
    end
    expect_true(attempts == 0, "correct keys do not count");

    // Wrong key computed anyway: result follows the decoys.
    pi  = distinct_inputs();
    mask = '0;
    key = SECRET ^ 32'h0000_0101;
    pass(1'b1, seen);
    wrong_attempts++;
    exp_r = run(pi, KW, 128'(key), 128'(mask), 128'(SECRET));
    expect_true(seen == DP_PARTIAL, "first wrong key: partial lockout");
    expect_true(dout == exp_r, "wrong key result follows the decoys");
    expect_true(dout != run(pi, KW, 128'(SECRET), 128'(0), 128'(SECRET)), "wrong key corrupts result");

    // Remaining wrong attempts, with a reset in between.
    while (wrong_attempts < ALLOWED + 2) begin
      pi   = distinct_inputs();
      mask = KW'($urandom());
      key  = SECRET ^ mask ^ (KW'(1) << ($urandom() % KW));
      pass(1'b0, seen);
      wrong_attempts++;
      expect_true(seen == ((wrong_attempts >= ALLOWED) ? DP_LOCKOUT : DP_PARTIAL),
                  $sformatf("wrong attempt %0d dp_comp %b", wrong_attempts, seen));
      expect_true(int'(attempts) == ((wrong_attempts < ALLOWED) ? wrong_attempts : ALLOWED),
                  "attempt count");
      if (wrong_attempts == 3) begin
        reset = 1; @(posedge clk); #1 reset = 0;
        expect_true(attempts == 3, "count survives reset");
      end
    end
    // Locked even with the correct key.
    key = SECRET; mask = '0; pi = distinct_inputs();
    pass(1'b0, seen);
    expect_true(seen == DP_LOCKOUT, "correct key after lockout still locked");

    // EDU: force a comparator stuck at 1 on a correct selection.
    reset = 1; nv_init = 1; @(posedge clk); #1 reset = 0; nv_init = 0;
    ctrl = '0; ctrl.load = 1'b1; @(posedge clk); #1 ctrl = '0;
    #1 expect_true(!edu_fault, "healthy before fault");
    force dut.xor_flag = 32'h0000_0010;
    #1 expect_true(edu_fault, "EDU flags stuck-at-1 comparator");
    release dut.xor_flag;
    #1 expect_true(!edu_fault, "healthy after release");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
