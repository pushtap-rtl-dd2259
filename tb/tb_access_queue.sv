// tb_access_queue: random push/pop traffic against a reference queue; checks
// order, contents, the full and empty flags and the one-cycle fill latency.
module tb_access_queue;
  import pushtap_pkg::*;
  localparam int unsigned DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  mem_req_t in_req, out_req;
  access_queue #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  mem_req_t model[$];
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_req = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready, "empty after reset");
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_req = '{addr: LADDR_W'(i), we: 1'b1, data: LINE_W'(i * 7)};
      model.push_back(in_req);
      @(negedge clk);
      check(out_valid, "visible one cycle after push");
    end
    in_valid = 0;
    check(!in_ready, "full after DEPTH pushes");
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      in_valid  = $urandom_range(1);
      out_ready = $urandom_range(1);
      in_req = '{addr: LADDR_W'($urandom), we: 1'($urandom), data: {16{$urandom}}};
      #1;
      check(out_valid == (model.size() != 0), "out_valid matches occupancy");
      check(in_ready == (model.size() != DEPTH), "in_ready matches occupancy");
      if (out_valid && out_ready) begin
        check(out_req == model[0], "head entry in order");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_req);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
