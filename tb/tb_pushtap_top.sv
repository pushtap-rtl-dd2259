// tb_pushtap_top: end-to-end test of one channel (memory controller + rank of
// PIM units) with DRAM bank models, driven only through the CPU port.
//
// The CPU lays a table column out in the unified format: through interleaved
// line writes each PIM unit u receives its own chunk at base + STRIDE*u
// (block-circulant), plus a snapshot bitmap. It then runs a filter query the
// two-phase way: LS launch (load phase, banks handed to the PIM side), Filter
// launch (compute phase, banks stay with the CPU and OLTP traffic continues),
// LS launch to store the result bitmaps, with a poll after each. The CPU reads
// the result bitmaps back and compares them with its own evaluation. Finally
// it broadcasts MVCC metadata and runs Defragment, and checks the data region.
// Two more analytical passes follow: SUM(value) GROUP BY key (LS loads, Group,
// Aggregation, LS store of dictionary and sums) and a Join of two buckets per
// unit, each checked against the CPU's own computation.
// Each mechanism is counted: hand-over, stalled CPU access, CPU access during
// compute, poll that had to wait, refresh; one that never
// happened counts as a failure.
module tb_pushtap_top;
  import pushtap_pkg::*;
  import pushtap_tb_pkg::*;

  localparam int unsigned ND = 2, NB = 2, NP = ND * NB, BB = 1;
  localparam int unsigned WB = 16384;
  localparam int unsigned H  = 20;
  localparam logic [LADDR_W-1:0] LA = {1'b1, {(LADDR_W-1){1'b0}}};
  localparam logic [LADDR_W-1:0] PA = {1'b1, {(LADDR_W-2){1'b0}}, 1'b1};
  localparam int unsigned NW = 32;            // data words per unit
  localparam int unsigned W  = 4;             // element width (bytes)
  localparam int unsigned NE = NW * 8 / W;    // elements per unit
  localparam int unsigned NBM = (NE + 63) / 64;
  localparam int unsigned STRIDE = 64;
  localparam int unsigned BM_A = 16, D_A = 1024, R_A = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, resp_valid, bk_ref, bank_to_pim, ev_stall, ev_handover;
  mem_req_t req;
  logic [LINE_W-1:0] resp_data;
  logic [NP-1:0] bk_req, bk_we, bk_rvalid;
  logic [BANK_AW-1:0] bk_addr [NP];
  logic [63:0] bk_wdata [NP], bk_rdata [NP];

  pushtap_top #(
    .NUM_DEV(ND), .NUM_BANK(NB), .WRAM_BYTES(WB), .HANDOVER_CYCLES(H),
    .TREFI_CYCLES(400), .TRFC_CYCLES(10), .POLL_INTERVAL(4)
  ) dut (.*);

  for (genvar u = 0; u < NP; u++) begin : g_bank
    dram_bank_model #(.DEPTH_W(13), .LATENCY(1)) m (
      .clk, .req(bk_req[u]), .we(bk_we[u]), .addr(bk_addr[u]), .wdata(bk_wdata[u]),
      .ref_cmd(bk_ref), .rvalid(bk_rvalid[u]), .rdata(bk_rdata[u]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_handover = 0, n_stall = 0, n_cpu_in_compute = 0, n_poll_wait = 0, n_refresh = 0;
  always @(posedge clk) begin
    if (ev_handover) n_handover++;
    if (ev_stall) n_stall++;
    if (bk_ref) n_refresh++;
    if (dut.u_sched.d_valid && dut.pim_busy) n_cpu_in_compute++;
  end

  // ---- CPU port ----
  task automatic cpu_send(mem_req_t r);
    @(negedge clk);
    req_valid = 1; req = r;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
  endtask
  task automatic cpu_write(logic [LADDR_W-1:0] a, line_t d);
    cpu_send('{addr: a, we: 1'b1, data: d});
  endtask
  task automatic cpu_read(logic [LADDR_W-1:0] a, output line_t d);
    cpu_send('{addr: a, we: 1'b0, data: '0});
    while (!resp_valid) @(negedge clk);
    d = resp_data;
  endtask
  task automatic poll(string what);
    line_t m;
    cpu_read(PA, m);
    check(m[63:0] == 64'd1, {"poll finish message after ", what});
    if (m[95:64] > 1) n_poll_wait++;
  endtask

  // word w of every unit's bank through interleaved lines: unit u = d*NB + b
  longint unsigned img [NP][8192];
  task automatic cpu_store_words(int unsigned w0, int unsigned nw);
    for (int b = 0; b < NB; b++)
      for (int w = w0; w < w0 + nw; w++) begin
        line_t l = '0;
        for (int d = 0; d < ND; d++) l[64*d +: 64] = img[d*NB+b][w];
        cpu_write(LADDR_W'((w << BB) | b), l);
      end
  endtask
  function automatic longint unsigned cpu_word(line_t l, int d);
    return l[64*d +: 64];
  endfunction

  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_t l;
    int unsigned lo, hi;
    lo = 32'h2000_0000; hi = 32'hA000_0000;
    req_valid = 0; req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // ---- OLTP side lays out bitmap + column chunks ----
    foreach (img[u, w]) img[u][w] = 0;
    for (int u = 0; u < NP; u++) begin
      for (int i = 0; i < NBM; i++) img[u][BM_A + STRIDE*u + i] = {$urandom, $urandom};
      for (int i = 0; i < NW; i++)  img[u][D_A + STRIDE*u + i] = {$urandom, $urandom};
    end
    cpu_store_words(BM_A, STRIDE*NP);
    cpu_store_words(D_A, STRIDE*NP);
    // ---- load phase: bitmap then data ----
    cpu_write(LA, mk_ls(0, 0, 0, 0, BM_A, NBM, 0, STRIDE));
    poll("LS bitmap");
    cpu_write(LA, mk_ls(0, 0, 0, 0, D_A, NW, 1024, STRIDE));
    // an OLTP read right behind the launch: stalls for the load phase, still correct
    cpu_read(LADDR_W'((D_A << BB) | 1), l);
    for (int d = 0; d < ND; d++) check(cpu_word(l, d) == img[d*NB+1][D_A], "read after load phase");
    poll("LS data");
    // ---- compute phase: Filter; CPU keeps working on the banks ----
    cpu_write(LA, mk_filter(0, 1024, 4096, W, lo, hi));
    for (int i = 0; i < 6; i++) begin
      line_t r;
      l = {16{$urandom}};
      cpu_write(LADDR_W'(((3000 + i) << BB) | 0), l);
      cpu_read(LADDR_W'(((3000 + i) << BB) | 0), r);
      check(r[64*ND-1:0] == l[64*ND-1:0], "OLTP write/read during compute");
    end
    poll("Filter");
    // ---- load phase: store result bitmaps ----
    cpu_write(LA, mk_ls(R_A, NBM, 4096, STRIDE, 0, 0, 0, 0));
    poll("LS store");
    for (int b = 0; b < NB; b++)
      for (int w = R_A; w < R_A + STRIDE*NP; w++) begin
        cpu_read(LADDR_W'((w << BB) | b), l);
        for (int d = 0; d < ND; d++) begin
          automatic int u = d*NB + b;
          automatic int rel = w - R_A - STRIDE*u;
          if (rel >= 0 && rel < NBM) begin
            automatic longint unsigned expw = 0;
            for (int k = 64*rel; k < 64*rel + 64 && k < NE; k++) begin
              automatic longint unsigned x = (img[u][D_A + STRIDE*u + (k*W)/8] >> (8*((k*W)%8))) & 64'hFFFF_FFFF;
              automatic bit vis = img[u][BM_A + STRIDE*u + k/64][k%64];
              if (vis && x >= lo && x <= hi) expw |= 64'd1 << (k%64);
            end
            check(cpu_word(l, d) == expw, $sformatf("filter result unit %0d word %0d", u, rel));
          end
        end
      end
    // ---- MVCC defragmentation ----
    begin
      localparam int unsigned MA = 5000, DA = 5200, XA = 5600, RW = 2, NR = 6, NX = 10;
      int unsigned org [NX];
      for (int u = 0; u < NP; u++) begin
        img[u][MA] = {40'd0, 8'(RW), 16'(NX)};
        for (int r = 0; r < NR*RW; r++) img[u][DA + 16*u + r] = {$urandom, $urandom};
        for (int r = 0; r < NX*RW; r++) img[u][XA + 32*u + r] = {$urandom, $urandom};
      end
      for (int e = 0; e < NX; e++) begin
        automatic bit td = (e > 0) && $urandom_range(1);
        automatic int unsigned p = td ? $urandom_range(e-1) : $urandom_range(NR-1);
        org[e] = td ? org[p] : p;
        for (int u = 0; u < NP; u++) begin      // broadcast: same metadata in every bank
          img[u][MA + 1 + 2*e] = e;
          img[u][MA + 2 + 2*e] = {td, 39'd0, 24'(p)};
        end
      end
      cpu_store_words(MA, 1 + 2*NX);
      cpu_store_words(DA, 16*NP);
      cpu_store_words(XA, 32*NP);
      for (int u = 0; u < NP; u++)
        for (int e = 0; e < NX; e++)
          for (int k = 0; k < RW; k++) img[u][DA + 16*u + RW*org[e] + k] = img[u][XA + 32*u + RW*e + k];
      cpu_write(LA, mk_defrag(MA, DA, 16, XA, 32));
      poll("Defragment");
      for (int b = 0; b < NB; b++)
        for (int w = DA; w < DA + 16*NP; w++) begin
          cpu_read(LADDR_W'((w << BB) | b), l);
          for (int d = 0; d < ND; d++) begin
            automatic int u = d*NB + b;
            automatic int rel = w - DA - 16*u;
            if (rel >= 0 && rel < NR*RW)
              check(cpu_word(l, d) == img[u][w], $sformatf("defrag unit %0d word %0d", u, rel));
          end
        end
    end
    // ---- SUM(val) GROUP BY key: Group then Aggregation (2-byte columns) ----
    begin
      localparam int unsigned K_A = 5800, V_A = 6100, Z_A = 6400, B2_A = 6700, R2_A = 7000;
      localparam int unsigned NE2 = NW * 4;          // 2-byte elements per unit
      for (int u = 0; u < NP; u++) begin
        for (int i = 0; i < NW; i++) begin
          img[u][K_A + STRIDE*u + i] = 0;
          for (int e = 0; e < 4; e++) img[u][K_A + STRIDE*u + i] |= longint'($urandom_range(5)) << (16*e);
          img[u][V_A + STRIDE*u + i] = {$urandom, $urandom};
        end
        for (int i = 0; i < 16; i++) img[u][Z_A + STRIDE*u + i] = 0;
        for (int i = 0; i < 2; i++)  img[u][B2_A + STRIDE*u + i] = {$urandom, $urandom};
      end
      cpu_store_words(K_A, STRIDE*NP);
      cpu_store_words(V_A, STRIDE*NP);
      cpu_store_words(Z_A, STRIDE*NP);
      cpu_store_words(B2_A, STRIDE*NP);
      // WRAM: bitmap 14336, keys 6144, dictionary 10240 (+ sums at 10304), values 8192, indices 12288
      cpu_write(LA, mk_ls(0, 0, 0, 0, B2_A, 2, 14336, STRIDE));  poll("LS bitmap 2");
      cpu_write(LA, mk_ls(0, 0, 0, 0, K_A, NW, 6144, STRIDE));   poll("LS keys");
      cpu_write(LA, mk_ls(0, 0, 0, 0, Z_A, 16, 10240, STRIDE));  poll("LS zero tables");
      cpu_write(LA, mk_ls(0, 0, 0, 0, V_A, NW, 8192, STRIDE));   poll("LS values");
      cpu_write(LA, mk_group(14336, 6144, 10240, 12288, 2));     poll("Group");
      cpu_write(LA, mk_agg(14336, 8192, 12288, 10304, 2));       poll("Aggregation");
      cpu_write(LA, mk_ls(R2_A, 16, 10240, STRIDE, 0, 0, 0, 0)); poll("LS store sums");
      for (int b = 0; b < NB; b++)
        for (int d = 0; d < ND; d++) begin
          automatic int u = d*NB + b;
          longint unsigned dict[$], sums[8], got[16];
          dict.delete();
          for (int g = 0; g < 8; g++) sums[g] = 0;
          for (int k = 0; k < NE2; k++)
            if (img[u][B2_A + STRIDE*u + k/64][k%64]) begin
              automatic longint unsigned key = (img[u][K_A + STRIDE*u + k/4] >> (16*(k%4))) & 64'hFFFF;
              automatic longint unsigned val = (img[u][V_A + STRIDE*u + k/4] >> (16*(k%4))) & 64'hFFFF;
              automatic int ix = dict.size();
              foreach (dict[i]) if (dict[i] == key && ix == dict.size()) ix = i;
              if (ix == dict.size()) dict.push_back(key);
              sums[ix] += val;
            end
          for (int w = 0; w < 16; w++) begin
            cpu_read(LADDR_W'(((R2_A + STRIDE*u + w) << BB) | b), l);
            got[w] = cpu_word(l, d);
          end
          check(got[0] == longint'(dict.size()), $sformatf("group count unit %0d", u));
          foreach (dict[i]) check(got[1 + i] == dict[i], $sformatf("group key %0d unit %0d", i, u));
          for (int g = 0; g < 8; g++) check(got[8 + g] == sums[g], $sformatf("group sum %0d unit %0d", g, u));
        end
    end
    // ---- Join of two buckets per unit (4-byte keys) ----
    begin
      localparam int unsigned J1_A = 7300, J2_A = 7600, JR_A = 7900, N1 = 6, N2 = 6;
      for (int u = 0; u < NP; u++) begin
        img[u][J1_A + STRIDE*u] = N1;
        img[u][J2_A + STRIDE*u] = N2;
        for (int i = 0; i < N1; i++) img[u][J1_A + STRIDE*u + 1 + i] = {$urandom, 32'($urandom_range(3))};
        for (int i = 0; i < N2; i++) img[u][J2_A + STRIDE*u + 1 + i] = {$urandom, 32'($urandom_range(3))};
      end
      cpu_store_words(J1_A, STRIDE*NP);
      cpu_store_words(J2_A, STRIDE*NP);
      cpu_write(LA, mk_ls(0, 0, 0, 0, J1_A, N1 + 1, 2048, STRIDE)); poll("LS bucket 1");
      cpu_write(LA, mk_ls(0, 0, 0, 0, J2_A, N2 + 1, 2560, STRIDE)); poll("LS bucket 2");
      cpu_write(LA, mk_join(2048, 2560, 3072, 4));                  poll("Join");
      cpu_write(LA, mk_ls(JR_A, 1 + N1*N2, 3072, STRIDE, 0, 0, 0, 0)); poll("LS store join");
      for (int b = 0; b < NB; b++)
        for (int d = 0; d < ND; d++) begin
          automatic int u = d*NB + b;
          automatic int nh = 0;
          for (int i = 0; i < N1; i++)
            for (int k = 0; k < N2; k++)
              if (img[u][J1_A + STRIDE*u + 1 + i][31:0] == img[u][J2_A + STRIDE*u + 1 + k][31:0]) begin
                nh++;
                cpu_read(LADDR_W'(((JR_A + STRIDE*u + nh) << BB) | b), l);
                check(cpu_word(l, d) == {16'd0, 16'(i), 16'd0, 16'(k)}, $sformatf("join pair %0d unit %0d", nh, u));
              end
          cpu_read(LADDR_W'(((JR_A + STRIDE*u) << BB) | b), l);
          check(cpu_word(l, d) == longint'(nh), $sformatf("join count unit %0d", u));
        end
    end
    // ---- mechanisms ----
    $display("mechanisms: handover=%0d stall_cycles=%0d cpu_in_compute=%0d poll_wait=%0d refresh=%0d",
             n_handover, n_stall, n_cpu_in_compute, n_poll_wait, n_refresh);
    check(n_handover >= 4, "bank hand-over happened");
    check(n_stall > 0, "CPU access stalled by load phase");
    check(n_cpu_in_compute > 0, "CPU access during compute phase");
    check(n_poll_wait > 0, "poll that waited for the units");
    check(n_refresh > 0, "refresh issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
