// wram: working SRAM of one PIM unit (operand and result buffer).
//
// BYTES bytes organised as 64-bit words, matching the 64-bit PIM-DRAM wire, so
// 64 kB gives 8192 words. One port, one access per cycle: a write stores wdata
// at addr; a read returns the word on rdata in the next cycle (synchronous
// read, as an SRAM macro would). The size is the evaluated configuration
// (64 kB); the single port and one-cycle read latency are this implementation's
// choices. Written as an array so a synthesis tool can map it to a macro.
module wram #(
  parameter int unsigned BYTES = 65536,
  parameter int unsigned AW    = $clog2(BYTES / 8)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [63:0]   wdata,
  output logic [63:0]   rdata
);
  logic [63:0] mem [BYTES / 8];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
