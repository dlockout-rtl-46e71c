// keylen_harness: drives one dlockout_top of key length KW through a
// legitimate session and a brute-force session, for dlockout_keylen_tb.
//
// Legitimate: NRUNS runs with the secret key (alternately plain and
// masked), each checked for a finish KW/4 + 2 cycles after start and for
// the reference-model result. Attack: random wrong keys until lockout; the
// lockout must come on exactly the ALLOWED-th attempt, after which the
// correct key no longer finishes. Reports its counts on done.
module keylen_harness #(
  parameter int unsigned      KW      = 32,
  parameter int unsigned      ALLOWED = 5,
  parameter int unsigned      NRUNS   = 6,
  parameter logic [KW-1:0]    SECRET  = '1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import dlockout_model_pkg::*;

  logic          reset, nv_init, start;
  regs_t         pi, dout, exp_r;
  logic [KW-1:0] key, mask;
  logic          finish, locked_out, edu_fault;
  logic [2:0]    attempts;

  dlockout_top #(.DATA_W(32), .KEY_W(KW), .CNT_W(3), .ALLOWED_ATTEMPTS(ALLOWED),
                 .KEY_SECRET(SECRET)) dut (
    .clk(clk), .reset(reset), .nv_init(nv_init), .start(start), .pi(pi),
    .key(key), .mask(mask), .finish(finish), .dout(dout), .locked_out(locked_out),
    .attempts(attempts), .edu_fault(edu_fault));

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL [KW=%0d] %s", KW, what); end
  endtask

  function automatic logic [KW-1:0] rand_key();
    logic [KW-1:0] k;
    for (int i = 0; i < KW; i += 32) k[i +: 32] = $urandom();
    return k;
  endfunction

  function automatic regs_t distinct_inputs();
    regs_t r;
    do begin
      for (int i = 0; i < 4; i++) r[i] = $urandom();
    end while (r[0] == r[1] || r[0] == r[2] || r[0] == r[3] ||
               r[1] == r[2] || r[1] == r[3] || r[2] == r[3]);
    return r;
  endfunction

  task automatic run_once(output int latency);
    latency = -1;
    start = 1;
    @(posedge clk); #1 start = 0;
    for (int c = 1; c <= KW; c++) begin
      @(posedge clk); #1;
      if (finish) begin latency = c + 1; break; end
    end
  endtask

  initial begin
    int lat, lock_at;
    done = 0; checks = 0; failures = 0;
    reset = 1; nv_init = 1; start = 0; key = '0; mask = '0; pi = '0;
    repeat (2) @(posedge clk);
    #1 reset = 0; nv_init = 0;
    for (int it = 0; it < NRUNS; it++) begin
      pi   = distinct_inputs();
      mask = (it % 2) ? rand_key() : '0;
      key  = SECRET ^ mask;
      run_once(lat);
      exp_r = run(pi, KW, 128'(key), 128'(mask), 128'(SECRET));
      expect_true(lat == KW / 4 + 2, $sformatf("latency %0d", lat));
      expect_true(dout == exp_r, "result with the correct key");
    end
    lock_at = -1;
    for (int att = 1; att <= ALLOWED + 1 && lock_at < 0; att++) begin
      pi = distinct_inputs();
      mask = '0;
      do key = rand_key(); while (key == SECRET);
      run_once(lat);
      expect_true(lat == -1, "no finish with a wrong key");
      if (locked_out) lock_at = att;
    end
    expect_true(lock_at == int'(ALLOWED), $sformatf("lockout on attempt %0d", lock_at));
    reset = 1; @(posedge clk); #1 reset = 0;
    key = SECRET; mask = '0; pi = distinct_inputs();
    run_once(lat);
    expect_true(lat == -1 && locked_out, "locked for good");
    $display("[KW=%0d] done at %0t: %0d checks, %0d failures", KW, $time, checks, failures);
    done = 1;
  end
endmodule
