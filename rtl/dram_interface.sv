// dram_interface: connects the memory controller and the PIM units of one rank
// to the rank's DRAM banks.
//
// A rank has NUM_DEV devices (chips) of NUM_BANK banks, and one PIM unit per
// bank: unit u = dev*NUM_BANK + bank owns bank port u. The CPU side sees the
// rank interleaved across devices: one 64-byte cache line is eight 8-byte words
// at the same word address of the same bank of every device (the ADE
// dimension; byte lanes 8d..8d+7 belong to device d). A PIM unit sees only its
// own bank, 8 bytes per access (the IDE dimension).
//
// Line address mapping (this implementation's choice, the design does not fix
// one): bank = addr[log2(NUM_BANK)-1:0], word = the next BANK_AW bits.
// bank_to_pim selects who drives each bank port: the PIM units while they own
// the banks, the CPU otherwise. Read data returns with the banks' rvalid; all
// banks are assumed to answer in the same fixed number of cycles, so a CPU
// read completes when the addressed bank of device 0 answers. c_ref, the
// refresh command, goes to every bank.
module dram_interface
  import pushtap_pkg::*;
#(
  parameter int unsigned NUM_DEV  = 8,
  parameter int unsigned NUM_BANK = 8,
  localparam int unsigned NUM_PIM = NUM_DEV * NUM_BANK
) (
  input  logic                    bank_to_pim,
  // CPU side
  input  logic                    c_valid,
  input  logic                    c_we,
  input  logic [LADDR_W-1:0]      c_addr,
  input  logic [LINE_W-1:0]       c_wdata,
  input  logic                    c_ref,
  output logic                    c_rvalid,
  output logic [LINE_W-1:0]       c_rdata,
  // PIM side
  input  logic [NUM_PIM-1:0]      p_req,
  input  logic [NUM_PIM-1:0]      p_we,
  input  logic [BANK_AW-1:0]      p_addr  [NUM_PIM],
  input  logic [63:0]             p_wdata [NUM_PIM],
  output logic [NUM_PIM-1:0]      p_rvalid,
  output logic [63:0]             p_rdata [NUM_PIM],
  // bank ports
  output logic [NUM_PIM-1:0]      bk_req,
  output logic [NUM_PIM-1:0]      bk_we,
  output logic [BANK_AW-1:0]      bk_addr  [NUM_PIM],
  output logic [63:0]             bk_wdata [NUM_PIM],
  output logic                    bk_ref,
  input  logic [NUM_PIM-1:0]      bk_rvalid,
  input  logic [63:0]             bk_rdata [NUM_PIM]
);
  localparam int unsigned BB = (NUM_BANK > 1) ? $clog2(NUM_BANK) : 1;
  localparam int unsigned LINE_DEV_W = 64 * NUM_DEV;

  logic [BB-1:0]      c_bank;
  logic [BANK_AW-1:0] c_word;
  assign c_bank = (NUM_BANK > 1) ? c_addr[BB-1:0] : '0;
  assign c_word = c_addr[BB +: BANK_AW];
  assign bk_ref = c_ref;

  always_comb begin
    for (int d = 0; d < NUM_DEV; d++) begin
      for (int b = 0; b < NUM_BANK; b++) begin
        automatic int u = d * NUM_BANK + b;
        if (bank_to_pim) begin
          bk_req[u]   = p_req[u];
          bk_we[u]    = p_we[u];
          bk_addr[u]  = p_addr[u];
          bk_wdata[u] = p_wdata[u];
        end else begin
          bk_req[u]   = c_valid && (c_bank == BB'(b));
          bk_we[u]    = c_we;
          bk_addr[u]  = c_word;
          bk_wdata[u] = c_wdata[64*d +: 64];
        end
        p_rvalid[u] = bank_to_pim && bk_rvalid[u];
        p_rdata[u]  = bk_rdata[u];
      end
    end
  end

  // CPU read return: the bank of device 0 that answers selects the line.
  logic [LINE_DEV_W-1:0] line;
  always_comb begin
    c_rvalid = 1'b0;
    line     = '0;
    if (!bank_to_pim) begin
      for (int b = 0; b < NUM_BANK; b++) begin
        if (bk_rvalid[b]) begin
          c_rvalid = 1'b1;
          for (int d = 0; d < NUM_DEV; d++) line[64*d +: 64] = bk_rdata[d * NUM_BANK + b];
        end
      end
    end
    c_rdata = LINE_W'(line);
  end
endmodule
