// controller_tb: self-checking test of the DLockout controller.
//
// Runs the three outcomes of the key check with N_STEPS = 5:
//   dp_comp = 000  S0 -> S1 -> S2..S6 -> S0, finish exactly N_STEPS+2 clock
//                  edges after the edge that sampled start, with load, check
//                  and step_en/step_idx in the right cycles;
//   dp_comp = 100  S1 -> S0 (partial lockout), no finish;
//   dp_comp = 001  S1 -> blackhole, which holds for many cycles whatever
//                  start and dp_comp do, until reset.
module controller_tb;
  import dlockout_pkg::*;
  localparam int unsigned NS = 5;

  logic        clk = 0, reset, start;
  dp_comp_e    dp_comp;
  ctrl_t       ctrl;
  logic        finish;
  ctrl_state_e state;
  int          checks = 0, failures = 0;

  controller #(.N_STEPS(NS)) dut (
    .clk(clk), .reset(reset), .start(start), .dp_comp(dp_comp),
    .ctrl(ctrl), .finish(finish), .state(state));

  always #5 clk = ~clk;

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (state %s step %0d)", what, state.name(), ctrl.step_idx);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1; start = 0; dp_comp = DP_OK;
    repeat (2) @(posedge clk);
    #1 reset = 0;
    // Idle: stays in S0 without start.
    repeat (3) @(posedge clk);
    #1 expect_true(state == ST_S0 && !ctrl.load, "idle in S0");

    // Correct key.
    for (int run = 0; run < 3; run++) begin
      start = 1; dp_comp = DP_OK;
      #1 expect_true(ctrl.load && state == ST_S0, "load in S0 with start");
      @(posedge clk); #1 start = 0;
      expect_true(state == ST_S1 && ctrl.check && !ctrl.load && !ctrl.step_en, "S1 check");
      for (int s = 0; s < NS; s++) begin
        @(posedge clk); #1;
        expect_true(state == ST_COMP && ctrl.step_en && ctrl.step_idx == STEP_W'(s), "compute step");
        expect_true(!finish, "no finish before the end");
      end
      @(posedge clk); #1;
      // N_STEPS + 2 edges after the start edge.
      expect_true(finish && state == ST_S0, "finish after N_STEPS+2 cycles");
      @(posedge clk); #1;
      expect_true(!finish, "finish is one cycle");
    end

    // Partial lockout.
    for (int run = 0; run < 2; run++) begin
      start = 1;
      @(posedge clk); #1 start = 0; dp_comp = DP_PARTIAL;
      expect_true(state == ST_S1, "S1 before partial lockout");
      @(posedge clk); #1;
      expect_true(state == ST_S0 && !ctrl.step_en, "partial lockout back to S0");
      repeat (NS + 2) begin
        @(posedge clk); #1 expect_true(!finish && state == ST_S0, "no finish after partial lockout");
      end
    end

    // Design lockout.
    dp_comp = DP_OK; start = 1;
    @(posedge clk); #1 start = 0; dp_comp = DP_LOCKOUT;
    @(posedge clk); #1;
    expect_true(state == ST_BLACKHOLE, "enter blackhole");
    for (int c = 0; c < 40; c++) begin
      start   = $urandom() % 2;
      dp_comp = (c % 2) ? DP_OK : DP_PARTIAL;
      @(posedge clk); #1;
      expect_true(state == ST_BLACKHOLE && !finish && !ctrl.load && !ctrl.check && !ctrl.step_en,
                  "blackhole is permanent and inert");
    end
    reset = 1; #1;
    expect_true(state == ST_S0, "reset leaves blackhole");
    @(posedge clk); #1 reset = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
