// dram_bank_model: behavioural model of one DRAM bank for simulation only
// (not synthesizable intent; the bank itself is a commodity DRAM part).
//
// 2**DEPTH_W words of 64 bits; the word address is taken modulo the depth.
// A write is stored at once; a read returns its data with rvalid LATENCY
// cycles after the request. ref is accepted and counted, nothing else.
// Testbenches preload and inspect 'mem' directly.
module dram_bank_model #(
  parameter int unsigned DEPTH_W = 12,
  parameter int unsigned LATENCY = 1
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [23:0] addr,
  input  logic [63:0] wdata,
  input  logic        ref_cmd,
  output logic        rvalid,
  output logic [63:0] rdata
);
  logic [63:0] mem [2**DEPTH_W];
  logic        v_pipe [LATENCY];
  logic [63:0] d_pipe [LATENCY];
  int unsigned n_ref = 0;

  initial begin
    for (int i = 0; i < 2**DEPTH_W; i++) mem[i] = '0;
    for (int i = 0; i < LATENCY; i++) begin v_pipe[i] = 1'b0; d_pipe[i] = '0; end
  end

  always_ff @(posedge clk) begin
    if (ref_cmd) n_ref <= n_ref + 1;
    if (req && we) mem[addr[DEPTH_W-1:0]] <= wdata;
    v_pipe[0] <= req && !we;
    d_pipe[0] <= mem[addr[DEPTH_W-1:0]];
    for (int i = 1; i < LATENCY; i++) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
  end

  assign rvalid = v_pipe[LATENCY-1];
  assign rdata  = d_pipe[LATENCY-1];
endmodule
