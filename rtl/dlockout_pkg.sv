// dlockout_pkg: types and constants shared by the DLockout blocks.
//
// dp_comp is the 3-bit status the lockout checker sends from the datapath
// to the controller. The codes 3'b100 (partial lockout) and 3'b001 (design
// lockout) are the ones of the published scheme; 3'b000 for "key correct"
// is this design's choice. The controller states follow the S0..Sn
// numbering of the scheme plus the blackhole state; the ALU operation set
// and the control-signal bundle belong to the small example host datapath.
package dlockout_pkg;

  typedef enum logic [2:0] {
    DP_OK      = 3'b000,  // every annotated XOR is 0
    DP_PARTIAL = 3'b100,  // wrong key, attempts left: go back to S0
    DP_LOCKOUT = 3'b001   // allowed attempts used up: blackhole
  } dp_comp_e;

  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,
    ALU_SUB = 2'd1,
    ALU_XOR = 2'd2,
    ALU_AND = 2'd3
  } alu_op_e;

  // Controller phase. S_COMP covers S2..Sn; the compute step index is
  // carried separately so that the number of steps is a parameter.
  typedef enum logic [2:0] {
    ST_S0        = 3'd0,  // idle, waits for start, loads primary inputs
    ST_S1        = 3'd1,  // key check
    ST_COMP      = 3'd2,  // S2..Sn, one ALU step per cycle
    ST_BLACKHOLE = 3'd7   // permanent lockout
  } ctrl_state_e;

  localparam int unsigned STEP_W = 8;  // width of the step index

  // Control signals from controller to datapath.
  typedef struct packed {
    logic              load;    // latch primary inputs into R0..R(NREG-1)
    logic              check;   // key-check control step (S1)
    logic              step_en; // write the ALU results of step step_idx
    logic [STEP_W-1:0] step_idx;
  } ctrl_t;

endpackage
