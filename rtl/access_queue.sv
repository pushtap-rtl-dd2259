// access_queue: the memory controller's in-order queue of CPU requests.
//
// A plain synchronous FIFO of mem_req_t entries (cache-line address, read or
// write, 64-byte data) that sits between the CPU port and the scheduler. The
// design names this queue but gives neither its depth nor its policy; an
// in-order FIFO with DEPTH entries is this implementation's choice.
//
// Interface: valid/ready on both sides. in_ready is low when full, out_valid is
// high when the queue holds an entry; out_req shows the head entry, which is
// popped in a cycle where out_valid && out_ready. A push and a pop can happen in
// the same cycle. The head is visible in the cycle after it is written.
module access_queue
  import pushtap_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  mem_req_t in_req,
  output logic     out_valid,
  input  logic     out_ready,
  output mem_req_t out_req
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  mem_req_t          mem [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic [PW:0]       count;
  logic              push, pop;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_req   = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_req;
  end

  // A full queue never accepts; an empty one never pops.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH));
endmodule
