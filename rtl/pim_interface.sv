// pim_interface: the rank-side control port through which the memory
// controller drives all PIM units of a rank.
//
// When the scheduler forwards a launch (launch_valid with the operation type
// and the 63 parameter bytes), the interface latches them, drives them to every
// PIM unit and pulses unit_start to all units in the next cycle, and marks every
// unit as running. A unit leaves the running set when it pulses its done line.
// any_busy is high from the launch until the last unit is done. The polling
// module reads the finish flags with status_rd; status_valid and status_done
// (one bit per unit, 1 = finished) answer in the next cycle.
//
// The design names the PIM interface and says that launches and polls go
// through it; the register-and-broadcast structure, the one-cycle status read
// and the per-unit running flags are this implementation's choices.
module pim_interface
  import pushtap_pkg::*;
#(
  parameter int unsigned NUM_PIM = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               launch_valid,
  input  op_type_e           launch_op,
  input  logic [PARAM_W-1:0] launch_params,
  output logic               unit_start,
  output op_type_e           unit_op,
  output logic [PARAM_W-1:0] unit_params,
  input  logic [NUM_PIM-1:0] unit_done,
  output logic               any_busy,
  input  logic               status_rd,
  output logic               status_valid,
  output logic [NUM_PIM-1:0] status_done
);
  logic [NUM_PIM-1:0] running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running      <= '0;
      unit_start   <= 1'b0;
      unit_op      <= OP_NONE;
      unit_params  <= '0;
      status_valid <= 1'b0;
      status_done  <= '0;
    end else begin
      unit_start   <= launch_valid;
      status_valid <= status_rd;
      if (status_rd) status_done <= ~running;
      if (launch_valid) begin
        unit_op     <= launch_op;
        unit_params <= launch_params;
        running     <= '1;
      end else begin
        running <= running & ~unit_done;
      end
    end
  end

  assign any_busy = (running != '0) || unit_start;

  assert property (@(posedge clk) disable iff (!rst_n) launch_valid |-> !any_busy);
endmodule
