// nv_counter: behavioural model of the non-volatile attempt-counter storage.
//
// The lockout scheme keeps its count of incorrect key attempts in
// non-volatile storage so that a cold reboot cannot clear it. The storage
// technology is not specified, so this model stands in for a small NV cell
// array: a CNT_W-bit register written when we is high at a rising clock
// edge and not connected to any functional reset, so it keeps its value
// across resets. prog_clear models the one-time provisioning step at
// manufacture that sets the count to zero; it must not be reachable by a
// field user. In silicon this block is replaced by the process's NVM macro
// with the same ports.
module nv_counter #(
  parameter int unsigned CNT_W = 3
) (
  input  logic             clk,
  input  logic             prog_clear,
  input  logic             we,
  input  logic [CNT_W-1:0] d,
  output logic [CNT_W-1:0] q
);

  logic [CNT_W-1:0] cells;

  always_ff @(posedge clk) begin
    if (prog_clear)
      cells <= '0;
    else if (we)
      cells <= d;
  end

  assign q = cells;

endmodule
