// checker_fsm: DLockout checker that turns the comparator flags into dp_comp.
//
// At the key-check control step (check_en, state S1 of the controller) the
// checker looks at all annotated XOR outputs. If any of them is 1, the
// applied key is wrong and the incorrect-attempt counter, held in
// non-volatile storage (nv_counter), is incremented. dp_comp tells the
// controller what to do:
//   DP_OK      (000)  no XOR is 1: key correct, continue with S2
//   DP_PARTIAL (100)  wrong key and the count after this attempt is still
//                     below ALLOWED_ATTEMPTS: partial lockout, back to S0
//   DP_LOCKOUT (001)  the count reaches ALLOWED_ATTEMPTS on this attempt, or
//                     already has: design lockout, blackhole state
// The threshold test is a small comparator of the stored count (and the
// count after this attempt) against ALLOWED_ATTEMPTS.
// The 3-bit counter, the two dp_comp codes 100/001 and the "increment on
// any XOR = 1" rule follow the scheme; counting once per check step, the
// code 000, saturation at the threshold and never clearing the count on a
// correct key are this design's choices.
//
// Timing: dp_comp is combinational from xor_i and the stored count, so the
// controller uses it in the same S1 cycle; the incremented count is stored
// at the clock edge that ends S1. Because the count lives in NV storage the
// lockout holds across functional reset; only nv_init (provisioning) clears it.
module checker_fsm
  import dlockout_pkg::*;
#(
  parameter int unsigned N_POINTS         = 32,
  parameter int unsigned CNT_W            = 3,
  parameter int unsigned ALLOWED_ATTEMPTS = 5
) (
  input  logic                clk,
  input  logic                nv_init,
  input  logic                check_en,
  input  logic [N_POINTS-1:0] xor_i,
  output dp_comp_e            dp_comp,
  output logic [CNT_W-1:0]    attempts
);

  logic [CNT_W-1:0] count_q;
  logic [CNT_W-1:0] count_inc;
  logic             any_wrong;
  logic             locked;
  logic             nv_we;

  // The threshold must be representable in the counter.
  initial assert (ALLOWED_ATTEMPTS >= 1 && ALLOWED_ATTEMPTS < (1 << CNT_W))
    else $fatal(1, "checker_fsm: ALLOWED_ATTEMPTS does not fit in CNT_W bits");

  nv_counter #(.CNT_W(CNT_W)) u_nv (
    .clk        (clk),
    .prog_clear (nv_init),
    .we         (nv_we),
    .d          (count_inc),
    .q          (count_q)
  );

  always_comb begin
    any_wrong = |xor_i;
    locked    = (count_q >= CNT_W'(ALLOWED_ATTEMPTS));
    count_inc = count_q + CNT_W'(1);
    nv_we     = check_en && any_wrong && !locked;

    if (locked)
      dp_comp = DP_LOCKOUT;
    else if (any_wrong)
      dp_comp = (count_inc >= CNT_W'(ALLOWED_ATTEMPTS)) ? DP_LOCKOUT : DP_PARTIAL;
    else
      dp_comp = DP_OK;
  end

  assign attempts = count_q;

endmodule
