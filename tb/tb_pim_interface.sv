// tb_pim_interface: checks the launch broadcast (op, parameters and a start
// pulse one cycle later), the running set and any_busy as units finish in
// random order, and status reads of the finish flags.
module tb_pim_interface;
  import pushtap_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic launch_valid, unit_start, any_busy, status_rd, status_valid;
  op_type_e launch_op, unit_op;
  logic [PARAM_W-1:0] launch_params, unit_params;
  logic [N-1:0] unit_done, status_done;
  pim_interface #(.NUM_PIM(N)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    launch_valid = 0; launch_op = OP_NONE; launch_params = '0; unit_done = '0; status_rd = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!any_busy, "idle after reset");
    for (int round = 0; round < 10; round++) begin
      logic [N-1:0] fin;
      automatic logic [PARAM_W-1:0] p = {16{$urandom}};
      automatic op_type_e o = op_type_e'($urandom_range(1, 7));
      launch_valid = 1; launch_op = o; launch_params = p;
      @(negedge clk);
      launch_valid = 0;
      check(unit_start, "start pulse one cycle after launch");
      check(unit_op == o && unit_params == p, "operation and parameters broadcast");
      check(any_busy, "busy after launch");
      @(negedge clk);
      check(!unit_start, "start is one cycle");
      fin = '0;
      while (fin != '1) begin
        automatic logic [N-1:0] d = N'($urandom) & ~fin;
        unit_done = d; status_rd = 1;
        @(negedge clk);
        unit_done = '0; status_rd = 0;
        check(status_valid, "status answers in one cycle");
        check(status_done == fin, "status shows units finished before the read");
        fin |= d;
        check(any_busy == (fin != '1), "any_busy until the last unit is done");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
