// dlockout_top_tb: end-to-end test of the locked design at its default size.
//
// The top keeps all its parameters (32-bit data, 32-bit key, 3-bit
// counter, 5 allowed attempts); the testbench plays the key holder, who
// knows the secret key, and the attacker, who does not. It checks:
//   - runs with the correct key, plain and masked: finish arrives
//     KEY_W/4 + 2 cycles after start and dout matches the reference model;
//   - wrong keys: no finish, partial lockout (back to idle, count + 1),
//     the count surviving a reset, and design lockout on the 5th wrong
//     attempt, after which even the correct key only reaches the blackhole,
//     across reset as well;
//   - the error detection unit flagging a comparator forced stuck at 1, and
//     the stuck-at-0 fault attack: comparators held at 0 let a wrong key
//     run uncounted, which the EDU reports.
// Every mechanism is counted and one that never happened is a failure.
module dlockout_top_tb;
  import dlockout_pkg::*;
  import dlockout_model_pkg::*;
  localparam int unsigned KW      = 32;
  localparam int unsigned ALLOWED = 5;
  localparam logic [KW-1:0] SECRET = 32'hA5C3_96E1;  // the top's default wiring

  logic          clk = 0, reset, nv_init, start;
  regs_t         pi, dout, exp_r;
  logic [KW-1:0] key, mask;
  logic          finish, locked_out, edu_fault;
  logic [2:0]    attempts;
  int            n_correct = 0, n_masked = 0, n_partial = 0, n_lockout = 0,
                 n_blackhole_hold = 0, n_reset_keep = 0, n_edu = 0, n_saf0_attack = 0;
  int            checks = 0, failures = 0;

  dlockout_top dut (
    .clk(clk), .reset(reset), .nv_init(nv_init), .start(start), .pi(pi),
    .key(key), .mask(mask), .finish(finish), .dout(dout), .locked_out(locked_out),
    .attempts(attempts), .edu_fault(edu_fault));

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

  // Pulse start and wait up to `limit` cycles for finish or a lockout outcome.
  // Returns the cycle count to finish (-1 if none).
  task automatic run_once(input int limit, output int latency);
    latency = -1;
    start = 1;
    @(posedge clk); #1 start = 0;
    for (int c = 1; c <= limit; c++) begin
      @(posedge clk); #1;
      if (finish) begin latency = c + 1; break; end
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
    int lat;
    reset = 1; nv_init = 1; start = 0; key = '0; mask = '0; pi = '0;
    repeat (2) @(posedge clk);
    #1 reset = 0; nv_init = 0;

    // Legitimate use.
    for (int it = 0; it < 10; it++) begin
      pi   = distinct_inputs();
      mask = (it % 2) ? KW'($urandom()) : '0;
      key  = SECRET ^ mask;
      run_once(KW, lat);
      exp_r = run(pi, KW, 128'(key), 128'(mask), 128'(SECRET));
      expect_true(lat == KW / 4 + 2, $sformatf("latency %0d, expected %0d", lat, KW / 4 + 2));
      expect_true(dout == exp_r, "result with the correct key");
      expect_true(!locked_out && attempts == 0, "no lockout with the correct key");
      if (lat == KW / 4 + 2 && dout == exp_r) begin
        n_correct++;
        if (mask != 0) n_masked++;
      end
    end

    // Attacker guessing keys.
    for (int att = 1; att <= ALLOWED; att++) begin
      pi   = distinct_inputs();
      mask = '0;
      do key = KW'($urandom()); while (key == SECRET);
      run_once(KW, lat);
      expect_true(lat == -1, "no finish with a wrong key");
      expect_true(int'(attempts) == att, $sformatf("count %0d after attempt %0d", attempts, att));
      if (att < ALLOWED) begin
        expect_true(!locked_out, "partial lockout returns to idle");
        if (!locked_out && lat == -1) n_partial++;
      end else begin
        expect_true(locked_out, "design lockout on the last allowed attempt");
        if (locked_out) n_lockout++;
      end
      if (att == 2) begin
        reset = 1; @(posedge clk); #1 reset = 0;
        expect_true(attempts == 2, "count kept over reset");
        if (attempts == 2) n_reset_keep++;
      end
    end

    // Locked: the blackhole holds, and after reset the correct key goes back to it.
    repeat (20) @(posedge clk);
    #1 expect_true(locked_out, "blackhole holds");
    reset = 1; @(posedge clk); #1 reset = 0;
    expect_true(!locked_out, "reset leaves the blackhole");
    key = SECRET; mask = '0; pi = distinct_inputs();
    run_once(KW, lat);
    expect_true(lat == -1 && locked_out, "correct key cannot unlock a locked design");
    if (lat == -1 && locked_out) n_blackhole_hold++;

    // Fault attack on a comparator: the EDU must see it.
    reset = 1; nv_init = 1; @(posedge clk); #1 reset = 0; nv_init = 0;
    key = SECRET; pi = distinct_inputs();
    start = 1; @(posedge clk); #1 start = 0;           // now in S1, inputs loaded
    expect_true(!edu_fault, "no EDU fault when healthy");
    force dut.u_dp.xor_flag = 32'h0100_0000;
    #1 expect_true(edu_fault, "EDU flags a stuck-at-1 comparator");
    if (edu_fault) n_edu++;
    release dut.u_dp.xor_flag;

    // Fault attack of the published analysis: comparators held at 0 while a
    // wrong key is applied. The attempt is not counted and the run goes
    // through, but the EDU reports the fault for every decoy selection.
    reset = 1; @(posedge clk); #1 reset = 0;
    pi = distinct_inputs(); mask = '0; key = ~SECRET;
    force dut.u_dp.xor_flag = '0;
    start = 1; @(posedge clk); #1 start = 0;
    expect_true(edu_fault, "EDU flags stuck-at-0 comparators under a wrong key");
    begin
      bit edu_seen = edu_fault;
      for (int c = 0; c < KW && !finish; c++) begin
        @(posedge clk); #1;
      end
      expect_true(finish && attempts == 0, "stuck-at-0 lets a wrong key through uncounted");
      exp_r = run(pi, KW, 128'(key), 128'(mask), 128'(SECRET));
      expect_true(dout == exp_r, "faulted run computes the decoy result");
      if (edu_seen && finish && attempts == 0) n_saf0_attack++;
    end
    release dut.u_dp.xor_flag;

    $display("mechanisms: correct=%0d masked=%0d partial=%0d lockout=%0d locked_after_reset=%0d count_kept=%0d edu=%0d saf0_attack=%0d",
             n_correct, n_masked, n_partial, n_lockout, n_blackhole_hold, n_reset_keep, n_edu, n_saf0_attack);
    if (n_correct == 0 || n_masked == 0 || n_partial == 0 || n_lockout == 0 ||
        n_blackhole_hold == 0 || n_reset_keep == 0 || n_edu == 0 || n_saf0_attack == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
