// tb_refresh_ctrl: checks that ref_req rises every TREFI cycles, is held until
// acknowledged, and that ref_busy lasts exactly TRFC cycles after the ack,
// also when the acknowledge comes late.
module tb_refresh_ctrl;
  localparam int unsigned TREFI = 40, TRFC = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ref_req, ref_ack, ref_busy;
  refresh_ctrl #(.TREFI_CYCLES(TREFI), .TRFC_CYCLES(TRFC)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int t, t_prev, busy_len;
    ref_ack = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    t = 0; t_prev = 0;
    for (int n = 0; n < 6; n++) begin
      // wait for the request
      while (!ref_req) begin @(negedge clk); t++; end
      if (n == 0) check(t == TREFI, $sformatf("first request after TREFI (%0d)", t));
      else        check(t - t_prev == TREFI, $sformatf("request period %0d", t - t_prev));
      t_prev = t;
      // acknowledge after a variable delay; request stays up meanwhile
      for (int d = 0; d < n; d++) begin @(negedge clk); t++; check(ref_req, "request held"); end
      ref_ack = 1; @(negedge clk); t++; ref_ack = 0;
      check(!ref_req, "request dropped after ack");
      busy_len = 0;
      while (ref_busy) begin @(negedge clk); t++; busy_len++; end
      check(busy_len == TRFC, $sformatf("busy for TRFC (%0d)", busy_len));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
