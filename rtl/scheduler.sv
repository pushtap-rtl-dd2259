// scheduler: the memory-controller block that lets CPU and PIM units share the
// DRAM banks at fine grain.
//
// It takes requests in order from the head of the access queue and sorts them
// by address and access type:
//  * a write to LAUNCH_ADDR is a launch request. Its 64 bytes carry the
//    operation type (byte 0) and parameters (bytes 1..63). For the load-phase
//    operations LS and Defragment the scheduler first hands bank control to the
//    PIM units (HANDOVER_CYCLES, 0.2 us at 2.4 GHz = 480 by default), then
//    broadcasts the launch; when all units are finished it hands control back,
//    taking the same time. Compute-phase operations (Filter, Group, Aggregation,
//    Hash, Join) are broadcast at once and the CPU keeps the banks.
//  * a read of POLL_ADDR is a poll request; it goes to the polling module,
//    which answers the CPU itself.
//  * any other request is a normal access and goes to the DRAM interface, but
//    only while the CPU owns the banks; otherwise it waits (the CPU is blocked
//    for the load phase only).
// A pending refresh is issued ahead of the head request while the CPU owns the
// banks, and normal accesses wait during tRFC.
//
// What follows the design: recognising launch/poll by address and type,
// handing over bank control only for LS and Defragment, and the two-module
// split with the polling module. This implementation's choices: strict order
// (a blocked head blocks what is behind it), a launch waits until the previous
// operation has finished, one poll at a time, refresh deferred while the PIM
// side owns the banks, and the hand-back cost equal to the hand-over cost.
//
// Interface: q_valid/q_ready pop the queue head; d_valid issues one normal
// access per cycle; launch_valid is a one-cycle broadcast; bank_to_pim is the
// bank ownership seen by the DRAM interface. Event outputs (ev_*) are one-cycle
// pulses for performance counting.
module scheduler
  import pushtap_pkg::*;
#(
  parameter int unsigned        HANDOVER_CYCLES = 480,
  parameter logic [LADDR_W-1:0] LAUNCH_ADDR     = {1'b1, {(LADDR_W-1){1'b0}}},
  parameter logic [LADDR_W-1:0] POLL_ADDR       = {1'b1, {(LADDR_W-2){1'b0}}, 1'b1}
) (
  input  logic               clk,
  input  logic               rst_n,
  // access queue head
  input  logic               q_valid,
  input  mem_req_t           q_req,
  output logic               q_ready,
  // normal access to the DRAM interface
  output logic               d_valid,
  output logic               d_we,
  output logic [LADDR_W-1:0] d_addr,
  output logic [LINE_W-1:0]  d_wdata,
  // refresh
  input  logic               ref_req,
  output logic               ref_ack,
  input  logic               ref_busy,
  // PIM control
  output logic               launch_valid,
  output op_type_e           launch_op,
  output logic [PARAM_W-1:0] launch_params,
  input  logic               pim_busy,
  output logic               bank_to_pim,
  // polling module
  output logic               poll_start,
  input  logic               poll_busy,
  // events
  output logic               ev_stall,
  output logic               ev_handover
);
  typedef enum logic [1:0] {OWN_CPU, TO_PIM, OWN_PIM, TO_CPU} own_e;
  own_e                             own;
  logic [$clog2(HANDOVER_CYCLES+1)-1:0] cnt;
  op_type_e                         held_op;
  logic [PARAM_W-1:0]               held_params;
  logic                             launched;

  logic     is_launch, is_poll;
  op_type_e head_op;
  assign is_launch = q_req.we && (q_req.addr == LAUNCH_ADDR);
  assign is_poll   = !q_req.we && (q_req.addr == POLL_ADDR);
  assign head_op   = op_type_e'(q_req.data[7:0]);

  logic go_to_pim;

  always_comb begin
    q_ready       = 1'b0;
    d_valid       = 1'b0;
    d_we          = q_req.we;
    d_addr        = q_req.addr;
    d_wdata       = q_req.data;
    ref_ack       = 1'b0;
    launch_valid  = 1'b0;
    launch_op     = head_op;
    launch_params = q_req.data[LINE_W-1:8];
    poll_start    = 1'b0;
    go_to_pim     = 1'b0;
    ev_stall      = 1'b0;
    if (own == TO_PIM && cnt == '0) begin
      launch_valid  = 1'b1;
      launch_op     = held_op;
      launch_params = held_params;
    end else if (q_valid && is_poll) begin
      // polls never touch the banks: served in any ownership state
      if (!poll_busy) begin
        q_ready    = 1'b1;
        poll_start = 1'b1;
      end
    end else if (own == OWN_CPU) begin
      if (ref_req && !ref_busy) begin
        ref_ack = 1'b1;
      end else if (q_valid && !ref_busy) begin
        if (is_launch) begin
          if (!pim_busy) begin
            q_ready = 1'b1;
            if (op_needs_bank(head_op)) go_to_pim = 1'b1;
            else                        launch_valid = 1'b1;
          end
        end else begin
          q_ready = 1'b1;
          d_valid = 1'b1;
        end
      end
    end else if (q_valid) begin
      ev_stall = !is_poll;   // CPU access blocked by the load phase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      own         <= OWN_CPU;
      cnt         <= '0;
      launched    <= 1'b0;
      held_op     <= OP_NONE;
      held_params <= '0;
    end else begin
      unique case (own)
        OWN_CPU: if (go_to_pim) begin
          own         <= TO_PIM;
          cnt         <= $bits(cnt)'(HANDOVER_CYCLES);
          held_op     <= head_op;
          held_params <= q_req.data[LINE_W-1:8];
        end
        TO_PIM: if (cnt == '0) begin
          own      <= OWN_PIM;
          launched <= 1'b1;
        end else cnt <= cnt - 1'b1;
        OWN_PIM: begin
          launched <= 1'b0;
          if (!launched && !pim_busy) begin
            own <= TO_CPU;
            cnt <= $bits(cnt)'(HANDOVER_CYCLES);
          end
        end
        TO_CPU: if (cnt == '0) own <= OWN_CPU;
                else cnt <= cnt - 1'b1;
        default: own <= OWN_CPU;
      endcase
    end
  end

  assign bank_to_pim = (own != OWN_CPU);
  assign ev_handover = go_to_pim;

  // Normal accesses reach the DRAM only while the CPU owns the banks.
  assert property (@(posedge clk) disable iff (!rst_n) d_valid |-> !bank_to_pim);
  // A launch is never broadcast on top of a running operation.
  assert property (@(posedge clk) disable iff (!rst_n) launch_valid |-> !pim_busy);
endmodule
