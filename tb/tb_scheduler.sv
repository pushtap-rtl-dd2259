// tb_scheduler: drives the scheduler's queue-head port directly, with modelled
// PIM units, polling module and refresh timer, and checks:
//  * normal accesses pass straight to the DRAM side while the CPU owns the banks;
//  * a compute launch (Filter) is broadcast at once, keeps the banks with the
//    CPU, and normal accesses continue while the units compute;
//  * an LS launch hands the banks over: the broadcast comes HANDOVER cycles
//    after the request, a poll is still served, normal accesses stall until
//    the units finish and the banks come back HANDOVER+2 cycles after the units finish;
//  * a launch waits while a previous operation still runs;
//  * refresh is acknowledged ahead of requests and blocks them during tRFC.
module tb_scheduler;
  import pushtap_pkg::*;
  import pushtap_tb_pkg::*;
  localparam int unsigned H = 10;
  localparam logic [LADDR_W-1:0] LA = {1'b1, {(LADDR_W-1){1'b0}}};
  localparam logic [LADDR_W-1:0] PA = {1'b1, {(LADDR_W-2){1'b0}}, 1'b1};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic q_valid, q_ready, d_valid, d_we, ref_req, ref_ack, ref_busy;
  mem_req_t q_req;
  logic [LADDR_W-1:0] d_addr;
  logic [LINE_W-1:0] d_wdata;
  logic launch_valid, pim_busy, bank_to_pim, poll_start, poll_busy, ev_stall, ev_handover;
  op_type_e launch_op;
  logic [PARAM_W-1:0] launch_params;

  scheduler #(.HANDOVER_CYCLES(H), .LAUNCH_ADDR(LA), .POLL_ADDR(PA)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask
  always @(posedge clk) cyc <= cyc + 1;

  // PIM model: busy for pim_len cycles starting the cycle after a launch
  int pim_left = 0, pim_len = 20, t_launch = -1, t_pimdone = -1;
  assign pim_busy = (pim_left != 0);
  always @(posedge clk) begin
    if (launch_valid) begin pim_left <= pim_len; t_launch <= cyc; end
    else if (pim_left > 0) begin pim_left <= pim_left - 1; if (pim_left == 1) t_pimdone <= cyc + 1; end
  end
  // polling model
  int poll_left = 0, n_poll = 0;
  assign poll_busy = (poll_left != 0);
  always @(posedge clk) begin
    if (poll_start) begin poll_left <= 5; n_poll <= n_poll + 1; end
    else if (poll_left > 0) poll_left <= poll_left - 1;
  end
  // refresh model: ref_busy for 4 cycles after ack
  int rb = 0;
  assign ref_busy = (rb != 0);
  always @(posedge clk) begin
    if (ref_ack) rb <= 4; else if (rb > 0) rb <= rb - 1;
  end
  // DRAM-side monitor
  int n_dv = 0, t_dv = -1;
  always @(posedge clk) if (d_valid) begin
    n_dv <= n_dv + 1; t_dv <= cyc;
    checks++;
    if (bank_to_pim || ref_busy || ref_ack) begin failures++; $display("FAIL: access while banks unavailable"); end
  end

  // issue one request at the head; returns the cycle it was popped
  task automatic issue(mem_req_t r, output int t_pop);
    @(negedge clk);
    q_valid = 1; q_req = r;
    #1;
    while (!q_ready) begin @(negedge clk); #1; end
    t_pop = cyc;
    @(negedge clk);
    q_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t;
    line_t l;
    q_valid = 0; q_req = '0; ref_req = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. normal write and read
    issue('{addr: 28'h123, we: 1, data: LINE_W'(64'hABCD)}, t);
    check(t_dv == t && n_dv == 1, "normal write issued in its cycle");
    issue('{addr: 28'h124, we: 0, data: '0}, t);
    check(t_dv == t && n_dv == 2 && !bank_to_pim, "normal read issued");
    // 2. compute launch: no hand-over, CPU continues
    l = mk_filter(0, 8, 16, 4, 5, 9);
    issue('{addr: LA, we: 1, data: l}, t);
    check(t_launch == t, "compute launch broadcast at once");
    check(!bank_to_pim, "compute phase keeps banks with CPU");
    issue('{addr: 28'h200, we: 1, data: '1}, t);
    check(pim_busy && t_dv == t, "normal access while PIM computes");
    // 3. a launch waits for the running operation
    l = mk_ls(1, 2, 3, 4, 5, 6, 7, 8);
    pim_len = 30;
    issue('{addr: LA, we: 1, data: l}, t);
    check(t > t_launch && t >= t_pimdone, "second launch waited for the first to finish");
    check(bank_to_pim, "LS hands banks to PIM");
    // 4. poll served during hand-over / load phase
    issue('{addr: PA, we: 0, data: '0}, t);
    check(n_poll == 1 && bank_to_pim, "poll served while PIM owns banks");
    // 5. normal access stalls during load phase
    begin
      int tl_exp = t;   // placeholder
      int t2;
      issue('{addr: 28'h300, we: 0, data: '0}, t2);
      check(t_launch > tl_exp - 5, "LS launched");
      check(t2 == t_pimdone + H + 2, $sformatf("banks return H+2 cycles after PIM done (%0d vs %0d)", t2, t_pimdone));
      check(!bank_to_pim, "CPU owns banks again");
    end
    // exact hand-over delay
    begin
      int tp, tl;
      pim_len = 3;
      issue('{addr: LA, we: 1, data: mk_defrag(1, 2, 3, 4, 5)}, tp);
      wait (t_launch > tp);
      check(t_launch == tp + H + 1, $sformatf("launch after HANDOVER cycles (%0d)", t_launch - tp));
    end
    // 6. refresh
    wait (!bank_to_pim);
    @(negedge clk);
    ref_req = 1; q_valid = 1; q_req = '{addr: 28'h55, we: 1, data: '0};
    #1;
    check(ref_ack && !d_valid, "refresh ahead of the request");
    @(negedge clk); ref_req = 0;
    #1;
    check(!d_valid, "no access during tRFC");
    while (!q_ready) begin @(negedge clk); #1; end
    check(rb == 0, "access after tRFC");
    @(negedge clk); q_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
