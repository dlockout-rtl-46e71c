// dlockout_top: key-obfuscated design with the DLockout lockout mechanism.
//
// Joins the controller and the obfuscated datapath as in the Glushkov
// model of the scheme: the controller drives the datapath's control
// signals, the datapath returns dp_comp from its checker FSM. A run is:
// raise start in S0 with the primary inputs and key (and mask) applied;
// the inputs are latched, S1 checks the key; with a correct key KEY_W/4
// compute steps follow and finish pulses one cycle after the last one, the
// results being in dout. A wrong key sends the controller back to S0
// (partial lockout) and counts one attempt; the ALLOWED_ATTEMPTS-th wrong
// attempt puts it in the blackhole state for good (locked_out). Key, mask
// and primary inputs must be held from start to finish.
//
// nv_init clears the non-volatile attempt counter and stands for the
// provisioning step at manufacture; it is not a field input. The key
// secret is a parameter because it is fixed by the obfuscation wiring.
module dlockout_top
  import dlockout_pkg::*;
#(
  parameter int unsigned      DATA_W           = 32,
  parameter int unsigned      KEY_W            = 32,
  parameter int unsigned      CNT_W            = 3,
  parameter int unsigned      ALLOWED_ATTEMPTS = 5,
  parameter logic [KEY_W-1:0] KEY_SECRET       = KEY_W'(32'hA5C3_96E1)
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   nv_init,
  input  logic                   start,
  input  logic [3:0][DATA_W-1:0] pi,
  input  logic [KEY_W-1:0]       key,
  input  logic [KEY_W-1:0]       mask,
  output logic                   finish,
  output logic [3:0][DATA_W-1:0] dout,
  output logic                   locked_out,
  output logic [CNT_W-1:0]       attempts,
  output logic                   edu_fault
);

  ctrl_t       ctrl;
  dp_comp_e    dp_comp;
  ctrl_state_e state;

  controller #(.N_STEPS(KEY_W / 4)) u_ctrl (
    .clk     (clk),
    .reset   (reset),
    .start   (start),
    .dp_comp (dp_comp),
    .ctrl    (ctrl),
    .finish  (finish),
    .state   (state)
  );

  obf_datapath #(
    .DATA_W           (DATA_W),
    .KEY_W            (KEY_W),
    .CNT_W            (CNT_W),
    .ALLOWED_ATTEMPTS (ALLOWED_ATTEMPTS),
    .KEY_SECRET       (KEY_SECRET)
  ) u_dp (
    .clk       (clk),
    .reset     (reset),
    .nv_init   (nv_init),
    .pi        (pi),
    .key       (key),
    .mask      (mask),
    .ctrl      (ctrl),
    .dp_comp   (dp_comp),
    .dout      (dout),
    .attempts  (attempts),
    .edu_fault (edu_fault)
  );

  assign locked_out = (state == ST_BLACKHOLE);

endmodule
