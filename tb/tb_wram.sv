// tb_wram: random writes and reads against a reference array; checks the data
// and that a read returns in the following cycle.
module tb_wram;
  localparam int unsigned BYTES = 4096, AW = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we; logic [AW-1:0] addr; logic [63:0] wdata, rdata;
  wram #(.BYTES(BYTES)) dut (.*);
  int checks = 0, failures = 0;
  longint unsigned ref_mem [BYTES/8];
  bit written [BYTES/8];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    for (int i = 0; i < BYTES/8; i++) begin
      @(negedge clk); en = 1; we = 1; addr = AW'(i); wdata = {$urandom, $urandom}; ref_mem[i] = wdata;
    end
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      en = 1; we = $urandom_range(3) == 0; addr = AW'($urandom); wdata = {$urandom, $urandom};
      if (we) ref_mem[addr] = wdata;
      else begin
        automatic longint unsigned expv = ref_mem[addr];
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== expv) begin failures++; $display("FAIL read %0d", addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
