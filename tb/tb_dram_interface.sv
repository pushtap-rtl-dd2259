// tb_dram_interface: a rank of 4 devices x 2 banks with bank models. Checks the
// CPU's interleaved view (a 64-byte line is one 8-byte word in the same bank of
// every device, device d holding bytes 8d..8d+7), that the same data is visible
// to each PIM unit in its own bank, that bank ownership steers the ports, and
// that refresh reaches every bank.
module tb_dram_interface;
  import pushtap_pkg::*;
  localparam int unsigned ND = 4, NB = 2, NP = ND * NB;
  logic clk = 0;
  always #5 clk = ~clk;
  logic bank_to_pim, c_valid, c_we, c_ref, c_rvalid, bk_ref;
  logic [LADDR_W-1:0] c_addr;
  logic [LINE_W-1:0] c_wdata, c_rdata;
  logic [NP-1:0] p_req, p_we, p_rvalid, bk_req, bk_we, bk_rvalid;
  logic [BANK_AW-1:0] p_addr [NP], bk_addr [NP];
  logic [63:0] p_wdata [NP], p_rdata [NP], bk_wdata [NP], bk_rdata [NP];

  dram_interface #(.NUM_DEV(ND), .NUM_BANK(NB)) dut (.*);
  for (genvar u = 0; u < NP; u++) begin : g_bank
    dram_bank_model #(.DEPTH_W(8), .LATENCY(1)) m (
      .clk, .req(bk_req[u]), .we(bk_we[u]), .addr(bk_addr[u]), .wdata(bk_wdata[u]),
      .ref_cmd(bk_ref), .rvalid(bk_rvalid[u]), .rdata(bk_rdata[u]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [LINE_W-1:0] lines [16];
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bank_to_pim = 0; c_valid = 0; c_we = 0; c_ref = 0; c_addr = '0; c_wdata = '0;
    p_req = '0; p_we = '0;
    foreach (p_addr[u]) begin p_addr[u] = '0; p_wdata[u] = '0; end
    // CPU writes 16 lines
    for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      lines[a] = {16{$urandom}};
      c_valid = 1; c_we = 1; c_addr = LADDR_W'(a); c_wdata = lines[a];
    end
    @(negedge clk); c_valid = 0;
    // device view: line a -> bank a%NB, word a/NB, device d holds bytes 8d..
    for (int a = 0; a < 16; a++)
      for (int d = 0; d < ND; d++)
        check(
              tb_peek(d * NB + a % NB, a / NB) == lines[a][64*d +: 64], $sformatf("line %0d device %0d", a, d));
    // CPU reads back
    for (int a = 0; a < 16; a++) begin
      @(negedge clk); c_valid = 1; c_we = 0; c_addr = LADDR_W'(a);
      @(negedge clk); c_valid = 0;
      check(c_rvalid && c_rdata[64*ND-1:0] == lines[a][64*ND-1:0], $sformatf("CPU read line %0d", a));
    end
    // PIM ownership: unit u reads word 3 of its bank, writes word 100
    bank_to_pim = 1;
    @(negedge clk);
    p_req = '1; p_we = '0; foreach (p_addr[u]) p_addr[u] = 3;
    c_valid = 1; c_we = 1; c_addr = 28'd0; c_wdata = '1;    // must be ignored
    @(negedge clk);
    p_req = '0; c_valid = 0;
    for (int u = 0; u < NP; u++) begin
      automatic int a = 3 * NB + u % NB, d = u / NB;
      check(p_rvalid[u] && p_rdata[u] == lines[a][64*d +: 64], $sformatf("PIM %0d sees its word", u));
    end
    check(!c_rvalid, "no CPU data while PIM owns banks");
    check(tb_peek(0, 0) == lines[0][63:0], "CPU write ignored while PIM owns banks");
    p_req = '1; p_we = '1;
    foreach (p_addr[u]) begin p_addr[u] = 100; p_wdata[u] = 64'(u) * 64'h1111; end
    @(negedge clk); p_req = '0; bank_to_pim = 0;
    for (int u = 0; u < NP; u++) check(tb_peek(u, 100) == 64'(u) * 64'h1111, "PIM write");
    // refresh
    c_ref = 1; @(negedge clk); c_ref = 0;
    check(g_bank[0].m.n_ref == 1 && g_bank[NP-1].m.n_ref == 1, "refresh reaches banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [63:0] tb_peek(int u, int w);
    unique case (u)
      0: return g_bank[0].m.mem[w];
      1: return g_bank[1].m.mem[w];
      2: return g_bank[2].m.mem[w];
      3: return g_bank[3].m.mem[w];
      4: return g_bank[4].m.mem[w];
      5: return g_bank[5].m.mem[w];
      6: return g_bank[6].m.mem[w];
      default: return g_bank[7].m.mem[w];
    endcase
  endfunction
endmodule
