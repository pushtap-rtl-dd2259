// tb_pim_unit: self-checking test of one PIM unit against a DRAM bank model.
//
// The unit (index 3, so every stride term is 3*stride) runs, through its
// start/done handshake: LS loads of a snapshot bitmap, group indices, a zeroed
// sum table and a 2-byte data column; Filter, Aggregation and Hash on them;
// an LS store of the results back to the bank; Group on the small-valued
// index column with a pre-seeded dictionary; Join of two buckets with random
// bits above the key width; and Defragment, first on the
// version-chain example (rows a,b,c; new versions d,e,f,g written by
// T1,T2,T3,T5) and then on random chains. Every result is compared with values
// computed here from the same inputs.
module tb_pim_unit;
  import pushtap_pkg::*;
  import pushtap_tb_pkg::*;

  localparam int unsigned ID = 3;
  localparam int unsigned WB = 16384;   // 2048 WRAM words
  localparam int unsigned S  = 100;     // stride used by all launches

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  op_type_e op;
  logic [PARAM_W-1:0] params;
  logic b_req, b_we, b_rvalid;
  logic [BANK_AW-1:0] b_addr;
  logic [63:0] b_wdata, b_rdata;

  pim_unit #(.PIM_ID(ID), .WRAM_BYTES(WB)) dut (
    .clk, .rst_n, .start, .op, .params, .busy, .done,
    .b_req, .b_we, .b_addr, .b_wdata, .b_rvalid, .b_rdata
  );
  dram_bank_model #(.DEPTH_W(13), .LATENCY(2)) bank (
    .clk, .req(b_req), .we(b_we), .addr(b_addr), .wdata(b_wdata), .ref_cmd(1'b0),
    .rvalid(b_rvalid), .rdata(b_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(line_t l);
    @(negedge clk);
    start = 1; op = op_type_e'(l[7:0]); params = l[LINE_W-1:8];
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  localparam int unsigned N_EL = 128;      // 2-byte elements = 32 words
  localparam int unsigned NG   = 8;        // groups
  longint unsigned bmw[2], dat[32], idxw[32];
  int unsigned lo, hi, hf;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; op = OP_NONE; params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------- stage column chunk in the bank ----------
    for (int i = 0; i < 2; i++)  begin bmw[i] = {$urandom, $urandom}; bank.mem[10 + ID*S + i] = bmw[i]; end
    for (int i = 0; i < 32; i++) begin idxw[i] = 0;
      for (int e = 0; e < 4; e++) idxw[i] |= longint'($urandom_range(NG-1)) << (16*e);
      bank.mem[20 + ID*S + i] = idxw[i]; end
    for (int i = 0; i < NG; i++) bank.mem[60 + ID*S + i] = 0;
    for (int i = 0; i < 32; i++) begin dat[i] = {$urandom, $urandom}; bank.mem[70 + ID*S + i] = dat[i]; end
    // LS: bitmap -> WRAM 0, indices -> 256, zero sums -> 1024, data -> 2048 (last: sets length)
    run(mk_ls(0, 0, 0, 0, 10, 2, 0, S));
    run(mk_ls(0, 0, 0, 0, 20, 32, 256, S));
    run(mk_ls(0, 0, 0, 0, 60, NG, 1024, S));
    run(mk_ls(0, 0, 0, 0, 70, 32, 2048, S));
    for (int i = 0; i < 32; i++) check(dut.u_wram.mem[256 + i] == dat[i], $sformatf("LS load word %0d", i));
    check(dut.u_wram.mem[0] == bmw[0] && dut.u_wram.mem[1] == bmw[1], "LS bitmap load");
    // ---------- Filter ----------
    lo = 16'h4000; hi = 16'hB000;
    run(mk_filter(0, 2048, 3072, 2, lo, hi));
    for (int k = 0; k < N_EL; k++) begin
      automatic longint unsigned x = elem_of(dat, k, 2);
      automatic bit vis = bmw[k/64][k%64];
      automatic bit exp_b = vis && x >= lo && x <= hi;
      check(dut.u_wram.mem[384 + k/64][k%64] == exp_b, $sformatf("filter bit %0d", k));
    end
    // ---------- Aggregation ----------
    run(mk_agg(0, 2048, 256, 1024, 2));
    begin
      longint unsigned sums[NG];
      foreach (sums[g]) sums[g] = 0;
      for (int k = 0; k < N_EL; k++)
        if (bmw[k/64][k%64]) sums[elem_of(idxw, k, 2)] += elem_of(dat, k, 2);
      for (int g = 0; g < NG; g++) check(dut.u_wram.mem[128 + g] == sums[g], $sformatf("agg sum %0d", g));
    end
    // ---------- Hash ----------
    hf = 32'h9E3779B1;
    run(mk_hash(0, 2048, 4096, hf, 2));
    for (int k = 0; k < N_EL; k++) begin
      automatic longint unsigned x = elem_of(dat, k, 2);
      automatic logic [63:0] e = {bmw[k/64][k%64], 31'd0, 32'(x * hf)};
      check(dut.u_wram.mem[512 + k] == e, $sformatf("hash %0d", k));
    end
    // ---------- LS store of the filter result ----------
    run(mk_ls(4000, 2, 3072, S, 70, 32, 2048, S));
    check(bank.mem[4000 + ID*S] == dut.u_wram.mem[384], "LS store word 0");
    check(bank.mem[4001 + ID*S] == dut.u_wram.mem[385], "LS store word 1");
    // ---------- Group: dictionary at word 1024, indices at word 1100 ----------
    begin
      longint unsigned dict[$];
      dut.u_wram.mem[1024] = 2; dut.u_wram.mem[1025] = 5; dut.u_wram.mem[1026] = 3;
      dict.push_back(5); dict.push_back(3);
      run(mk_group(0, 256, 8192, 8800, 2));
      for (int k = 0; k < N_EL; k++) begin
        automatic longint unsigned x = elem_of(idxw, k, 2);
        automatic int unsigned ix = 16'hFFFF;
        if (bmw[k/64][k%64]) begin
          ix = dict.size();
          foreach (dict[d]) if (dict[d] == x && ix == dict.size()) ix = d;
          if (ix == dict.size()) dict.push_back(x);
        end
        check(16'(dut.u_wram.mem[1100 + k/4] >> (16*(k%4))) == 16'(ix), $sformatf("group index %0d", k));
      end
      check(dut.u_wram.mem[1024] == longint'(dict.size()), "group dictionary size");
      foreach (dict[d]) check(dut.u_wram.mem[1025 + d] == dict[d], $sformatf("group dictionary %0d", d));
    end
    // ---------- Join: buckets at words 1500 and 1600, result at 1700 ----------
    begin
      automatic int unsigned n1 = 10, n2 = 12, nh = 0;
      logic [63:0] h1[10], h2[12];
      dut.u_wram.mem[1500] = n1; dut.u_wram.mem[1600] = n2;
      foreach (h1[i]) begin h1[i] = {$urandom, 16'($urandom), 16'($urandom_range(5))}; dut.u_wram.mem[1501 + i] = h1[i]; end
      foreach (h2[i]) begin h2[i] = {$urandom, 16'($urandom), 16'($urandom_range(5))}; dut.u_wram.mem[1601 + i] = h2[i]; end
      run(mk_join(12000, 12800, 13600, 2));
      for (int i = 0; i < n1; i++) for (int k = 0; k < n2; k++)
        if (h1[i][15:0] == h2[k][15:0]) begin
          check(dut.u_wram.mem[1701 + nh] == {16'd0, 16'(i), 16'd0, 16'(k)}, $sformatf("join pair %0d", nh));
          nh++;
        end
      check(dut.u_wram.mem[1700] == longint'(nh), $sformatf("join match count %0d", nh));
    end
    // ---------- Defragment: the a..g version-chain example ----------
    // data rows a,b,c = 0,1,2 (2 words each) at 1000+ID*S, delta rows at 1500+ID*S
    for (int r = 0; r < 3; r++) for (int w = 0; w < 2; w++) bank.mem[1000 + ID*S + 2*r + w] = 64'hD000 + 16*r + w;
    for (int r = 0; r < 4; r++) for (int w = 0; w < 2; w++) bank.mem[1500 + ID*S + 2*r + w] = 64'hE000 + 16*r + w;
    bank.mem[2000] = {40'd0, 8'd2, 16'd4};
    bank.mem[2001] = 1; bank.mem[2002] = {1'b0, 39'd0, 24'd0};   // T1: d -> D.a
    bank.mem[2003] = 2; bank.mem[2004] = {1'b0, 39'd0, 24'd2};   // T2: e -> D.c
    bank.mem[2005] = 3; bank.mem[2006] = {1'b1, 39'd0, 24'd0};   // T3: f -> delta.d
    bank.mem[2007] = 5; bank.mem[2008] = {1'b1, 39'd0, 24'd2};   // T5: g -> delta.f
    run(mk_defrag(2000, 1000, S, 1500, S));
    for (int w = 0; w < 2; w++) begin
      check(bank.mem[1000 + ID*S + 0 + w] == 64'hE000 + 16*3 + w, "row a <- g");
      check(bank.mem[1000 + ID*S + 2 + w] == 64'hD000 + 16*1 + w, "row b kept");
      check(bank.mem[1000 + ID*S + 4 + w] == 64'hE000 + 16*1 + w, "row c <- e");
    end
    // ---------- Defragment: random chains ----------
    begin
      int unsigned nd = 16, ne = 40, rw = 3;
      int unsigned org[40];
      longint unsigned expd[16][3];
      for (int r = 0; r < nd; r++) for (int w = 0; w < rw; w++) begin
        bank.mem[3000 + ID*S + rw*r + w] = {$urandom, $urandom};
        expd[r][w] = bank.mem[3000 + ID*S + rw*r + w];
      end
      bank.mem[2100] = {40'd0, 8'(rw), 16'(ne)};
      for (int e = 0; e < ne; e++) begin
        automatic bit to_delta = (e > 0) && ($urandom_range(1) == 1);
        automatic int unsigned p = to_delta ? $urandom_range(e-1) : $urandom_range(nd-1);
        org[e] = to_delta ? org[p] : p;
        bank.mem[2101 + 2*e] = e;
        bank.mem[2102 + 2*e] = {to_delta, 39'd0, 24'(p)};
        for (int w = 0; w < rw; w++) begin
          bank.mem[6000 + ID*S + rw*e + w] = {$urandom, $urandom};
          expd[org[e]][w] = bank.mem[6000 + ID*S + rw*e + w];
        end
      end
      run(mk_defrag(2100, 3000, S, 6000, S));
      for (int r = 0; r < nd; r++) for (int w = 0; w < rw; w++)
        check(bank.mem[3000 + ID*S + rw*r + w] == expd[r][w], $sformatf("random defrag row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
