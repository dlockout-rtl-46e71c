// obf_datapath: key-obfuscated example datapath with DLockout circuitry.
//
// Structure (the Glushkov datapath of the lockout scheme): four registers
// R0..R3 are loaded from the primary inputs, two ALUs compute one step per
// cycle, and every ALU operand passes through a key-obfuscation point
// (obf_point), one per key bit, KEY_W in all. The lockout circuitry is the
// XOR comparator inside each point, the checker FSM that counts incorrect
// attempts in non-volatile storage and drives dp_comp to the controller,
// and the EDU that watches the comparators for stuck-at faults.
//
// Example schedule (this design's own; the scheme is applied to
// HLS-generated datapaths that are not reproduced here):
//   point j: correct operand R[j mod 4],
//            decoy   operand R[(j mod 4 + 1 + (j div 4) mod 3) mod 4]
//            (never the correct register), secret bit KEY_SECRET[j]
//   step s (0 .. KEY_W/4-1), ALU0 = points 4s, 4s+1 ; ALU1 = 4s+2, 4s+3
//     even s: R[0] <= p0 + p1 ; R[1] <= p2 - p3
//     odd  s: R[2] <= p0 ^ p1 ; R[3] <= p2 + p3
// The key check at S1 runs all KEY_W comparators on the registers just
// loaded from the primary inputs, as the scheme places the check in the
// first control step; the same multiplexers then serve the computation.
//
// Interface: ctrl (from the controller) gives load, check, step_en and
// step_idx. Registers update on the rising clock edge; reset clears them.
// dp_comp is combinational in the S1 cycle. The key and mask must be held
// by the user for the whole run: the key is never stored.
module obf_datapath
  import dlockout_pkg::*;
#(
  parameter int unsigned   DATA_W           = 32,
  parameter int unsigned   KEY_W            = 32,
  parameter int unsigned   CNT_W            = 3,
  parameter int unsigned   ALLOWED_ATTEMPTS = 5,
  parameter logic [KEY_W-1:0] KEY_SECRET    = KEY_W'(32'hA5C3_96E1)
) (
  input  logic                        clk,
  input  logic                        reset,
  input  logic                        nv_init,
  input  logic [3:0][DATA_W-1:0]      pi,
  input  logic [KEY_W-1:0]            key,
  input  logic [KEY_W-1:0]            mask,
  input  ctrl_t                       ctrl,
  output dp_comp_e                    dp_comp,
  output logic [3:0][DATA_W-1:0]      dout,
  output logic [CNT_W-1:0]            attempts,
  output logic                        edu_fault
);

  localparam int unsigned NREG    = 4;
  localparam int unsigned N_STEPS = KEY_W / 4;

  initial assert (KEY_W % 4 == 0 && KEY_W >= 4 && N_STEPS <= (1 << STEP_W))
    else $fatal(1, "obf_datapath: KEY_W must be a multiple of 4");

  logic [NREG-1:0][DATA_W-1:0]  r_q;
  logic [KEY_W-1:0][DATA_W-1:0] correct;
  logic [KEY_W-1:0][DATA_W-1:0] decoy;
  logic [KEY_W-1:0][DATA_W-1:0] mux_out;
  logic [KEY_W-1:0]             xor_flag;

  // Operand wiring of every obfuscation point.
  for (genvar j = 0; j < KEY_W; j++) begin : g_pt
    localparam int unsigned CSRC = j % NREG;
    localparam int unsigned DSRC = (CSRC + 1 + (j / NREG) % 3) % NREG;

    assign correct[j] = r_q[CSRC];
    assign decoy[j]   = r_q[DSRC];

    obf_point #(.DATA_W(DATA_W), .SECRET(KEY_SECRET[j])) u_pt (
      .correct_i (correct[j]),
      .decoy_i   (decoy[j]),
      .key_i     (key[j]),
      .mask_i    (mask[j]),
      .mux_o     (mux_out[j]),
      .xor_o     (xor_flag[j])
    );
  end

  // Operand selection of the current step and the two ALUs.
  logic [DATA_W-1:0] a0, b0, a1, b1, y0, y1;
  alu_op_e           op0, op1;
  logic              odd_step;

  always_comb begin
    a0       = '0;
    b0       = '0;
    a1       = '0;
    b1       = '0;
    for (int unsigned s = 0; s < N_STEPS; s++) begin
      if (ctrl.step_idx == STEP_W'(s)) begin
        a0 = mux_out[4*s];
        b0 = mux_out[4*s+1];
        a1 = mux_out[4*s+2];
        b1 = mux_out[4*s+3];
      end
    end
    odd_step = ctrl.step_idx[0];
    op0      = odd_step ? ALU_XOR : ALU_ADD;
    op1      = odd_step ? ALU_ADD : ALU_SUB;
  end

  alu #(.DATA_W(DATA_W)) u_alu0 (.op(op0), .a(a0), .b(b0), .y(y0));
  alu #(.DATA_W(DATA_W)) u_alu1 (.op(op1), .a(a1), .b(b1), .y(y1));

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      r_q <= '0;
    end else if (ctrl.load) begin
      r_q <= pi;
    end else if (ctrl.step_en) begin
      if (odd_step) begin
        r_q[2] <= y0;
        r_q[3] <= y1;
      end else begin
        r_q[0] <= y0;
        r_q[1] <= y1;
      end
    end
  end

  // Lockout circuitry.
  checker_fsm #(
    .N_POINTS         (KEY_W),
    .CNT_W            (CNT_W),
    .ALLOWED_ATTEMPTS (ALLOWED_ATTEMPTS)
  ) u_checker (
    .clk      (clk),
    .nv_init  (nv_init),
    .check_en (ctrl.check),
    .xor_i    (xor_flag),
    .dp_comp  (dp_comp),
    .attempts (attempts)
  );

  // Per-point EDU bits; only their OR leaves the datapath, so this vector
  // is otherwise unused.
  logic [KEY_W-1:0] edu_bits;

  edu #(.DATA_W(DATA_W), .N_POINTS(KEY_W)) u_edu (
    .mux_i     (mux_out),
    .correct_i (correct),
    .xor_i     (xor_flag),
    .edu_o     (edu_bits),
    .fault_o   (edu_fault)
  );

  assign dout = r_q;

  // Control from the controller: the three actions are exclusive.
  assert property (@(posedge clk) disable iff (reset)
                   $onehot0({ctrl.load, ctrl.check, ctrl.step_en}));

endmodule
