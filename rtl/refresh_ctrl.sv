// refresh_ctrl: periodic all-bank refresh timer of the memory controller.
//
// Every TREFI_CYCLES the block raises ref_req and keeps it up until the
// scheduler answers with ref_ack (a one-cycle pulse, the cycle the refresh
// command is issued). From ref_ack it holds ref_busy for TRFC_CYCLES, the
// time the banks are unavailable. The refresh interval keeps counting while a
// request waits, so a late refresh does not push the following ones back.
// The defaults are the DDR5 timing of the evaluated system, tREFI = 3.9 us and
// tRFC = 121.9 ns, converted at the controller clock of 2.4 GHz (9360 and 293
// cycles). The design only names this block; the request/acknowledge protocol
// is this implementation's choice.
module refresh_ctrl #(
  parameter int unsigned TREFI_CYCLES = 9360,
  parameter int unsigned TRFC_CYCLES  = 293
) (
  input  logic clk,
  input  logic rst_n,
  output logic ref_req,
  input  logic ref_ack,
  output logic ref_busy
);
  logic [$clog2(TREFI_CYCLES+1)-1:0] interval;
  logic [$clog2(TRFC_CYCLES+1)-1:0]  busy_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      interval <= '0;
      busy_cnt <= '0;
      ref_req  <= 1'b0;
    end else begin
      if (interval == $bits(interval)'(TREFI_CYCLES - 1)) begin
        interval <= '0;
        ref_req  <= 1'b1;
      end else begin
        interval <= interval + 1'b1;
      end
      if (ref_ack) begin
        ref_req  <= 1'b0;
        busy_cnt <= $bits(busy_cnt)'(TRFC_CYCLES);
      end else if (busy_cnt != '0) begin
        busy_cnt <= busy_cnt - 1'b1;
      end
    end
  end

  assign ref_busy = (busy_cnt != '0);

  assert property (@(posedge clk) disable iff (!rst_n) ref_ack |-> ref_req);
endmodule
