// tb_polling_module: a modelled set of PIM units finishes after a random delay;
// checks that the module polls every POLL_INTERVAL cycles, answers only when
// every unit is finished, reports the number of polls, and holds its answer
// until it is taken.
module tb_polling_module;
  import pushtap_pkg::*;
  localparam int unsigned N = 4, IV = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic poll_start, busy, status_rd, status_valid, resp_valid, resp_ready;
  logic [N-1:0] status_done;
  logic [LINE_W-1:0] resp_data;
  polling_module #(.NUM_PIM(N), .POLL_INTERVAL(IV)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // unit model: unit u finishes at cycle fin_at[u]
  int cyc = 0, fin_at[N], last_rd = -1, n_rd = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_ff @(posedge clk) begin
    status_valid <= status_rd;
    for (int u = 0; u < N; u++) status_done[u] <= (cyc >= fin_at[u]);
  end
  always @(posedge clk) if (status_rd) begin
    if (last_rd >= 0) begin
      checks++;
      if (cyc - last_rd != IV + 1) begin failures++; $display("FAIL poll gap %0d", cyc - last_rd); end
    end
    last_rd = cyc; n_rd++;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int all_fin;
    poll_start = 0; resp_ready = 0;
    foreach (fin_at[u]) fin_at[u] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      all_fin = 0;
      foreach (fin_at[u]) begin fin_at[u] = cyc + $urandom_range(0, 120); if (fin_at[u] > all_fin) all_fin = fin_at[u]; end
      last_rd = -1; n_rd = 0;
      poll_start = 1; @(negedge clk); poll_start = 0;
      while (!resp_valid) begin
        @(negedge clk);
        checks++;
        if (resp_valid && cyc <= all_fin) begin failures++; $display("FAIL answered before all done"); end
      end
      check(busy, "busy while answer pending");
      check(resp_data[63:0] == 64'd1, "finish message");
      check(resp_data[95:64] == 32'(n_rd), "poll count reported");
      check(cyc - all_fin <= IV + 4, "answer within one poll interval of the last finish");
      repeat ($urandom_range(0, 3)) begin @(negedge clk); check(resp_valid, "answer held"); end
      resp_ready = 1; @(negedge clk); resp_ready = 0;
      check(!resp_valid && !busy, "answer taken");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
