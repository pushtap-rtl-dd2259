// pim_unit: one bank-level PIM unit with its WRAM and DMA path to its bank.
//
// The unit executes the operations carried by a launch request. Load-phase
// operations move data between its DRAM bank and its WRAM and run only while
// the scheduler has handed the bank to the PIM side; compute-phase operations
// touch only WRAM, so the CPU keeps the bank meanwhile.
//
//   LS          store result_len words from WRAM[result_offset] to DRAM at
//               result_addr + result_stride*PIM_ID, then load op0_len words
//               from DRAM at op0_addr + op0_stride*PIM_ID into WRAM[op0_offset].
//               The per-unit address (stride * unit index + base) is how every
//               unit finds its share of a block-circulant column.
//   Defragment  read the MVCC metadata the CPU broadcast into the bank and copy
//               each new version from the delta region over its origin row in
//               the data region (base addresses again offset by stride*PIM_ID).
//   Filter      for each loaded element that is visible in the snapshot bitmap,
//               test the condition; write a result bitmap to WRAM.
//   Aggregation add each visible element into result[index[k]] (SUM ... GROUP BY
//               with indices computed earlier).
//   Hash        write a hash of each element to WRAM.
//   Group       give each visible element the index of its value in a
//               dictionary in WRAM, appending new values (GROUP BY).
//   Join        compare every key of one hash bucket with every key of the
//               other bucket and list the matching pairs.
//
// In the design the unit is a general-purpose programmable core that interprets
// these requests in software; here each is a small fixed-function sequencer
// that does one WRAM or bank access at a time.
//
// Choices of this implementation where the design is silent:
//  * The number of elements of a compute operation is the length of the last
//    LS load (op0_len words * 8 / data_width); data_width is 1, 2, 4 or 8.
//  * Filter: condition[31:0] is a lower and condition[63:32] an upper bound,
//    inclusive; result bit k = visible(k) & (lo <= x_k <= hi). Bitmaps are bit
//    k of word k/64, elements are packed little-endian in 64-bit words.
//  * Aggregation: indices are 2-byte entries at index_offset, sums are 64-bit
//    entries at result_offset and accumulate onto what is there, so several
//    load/compute rounds can add up one column.
//  * Hash: result word k = {visible, 31'b0, lower 32 bits of x_k * hash_function}.
//  * Group (the design gives no dictionary layout): dict_offset holds word 0 =
//    number of entries D, then D 64-bit values. Element k gets the position of
//    x_k in the dictionary; a value not found is appended and D is written
//    back at the end. Indices are 2-byte entries at result_offset, the format
//    Aggregation reads; invisible elements get index 16'hFFFF.
//  * Join (no bucket layout given either): each bucket is word 0 = number of
//    entries, then one 64-bit word per entry whose low data_width bytes are
//    the key. Result: word 0 = number of matches, then one word per match
//    {16'b0, i, 16'b0, k} for entry i of bucket 1 and entry k of bucket 2, in
//    nested-loop order. The host sizes the result area.
//  * Defragment metadata: word 0 at meta_addr holds {row_words[23:16],
//    count[15:0]}; entry e (the delta row e) is two words at meta_addr+1+2e:
//    the transaction timestamp, then the pointer to the previous version
//    {region[63] (0 data, 1 delta), row[23:0]}. Entries are in commit order, so
//    copying in order leaves the newest version. The origin row of each entry
//    is kept in the upper half of WRAM, the half not used for data.
//
// Interface: start (one cycle, with op and params) begins an operation when
// busy is low; done pulses for one cycle when it ends. Bank port: one request
// per cycle (b_req, b_we, b_addr in 64-bit words), read data returns with
// b_rvalid in a later cycle; only one read is outstanding at a time.
module pim_unit
  import pushtap_pkg::*;
#(
  parameter int unsigned PIM_ID     = 0,
  parameter int unsigned WRAM_BYTES = 65536
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  op_type_e           op,
  input  logic [PARAM_W-1:0] params,
  output logic               busy,
  output logic               done,
  output logic               b_req,
  output logic               b_we,
  output logic [BANK_AW-1:0] b_addr,
  output logic [63:0]        b_wdata,
  input  logic               b_rvalid,
  input  logic [63:0]        b_rdata
);
  localparam int unsigned WWORDS = WRAM_BYTES / 8;
  localparam int unsigned AW     = $clog2(WWORDS);
  localparam int unsigned ORIG_BASE = WWORDS / 2;

  typedef enum logic [5:0] {
    S_IDLE, S_DONE,
    S_LS_ST_RD, S_LS_ST_WR, S_LS_LD_REQ, S_LS_LD_WAIT,
    S_DF_HDR_REQ, S_DF_HDR_WAIT, S_DF_PTR_REQ, S_DF_PTR_WAIT, S_DF_ORIG_WAIT,
    S_DF_ORIG_WR, S_DF_CP_REQ, S_DF_CP_WAIT,
    S_C_BM_RD, S_C_BM_WAIT, S_C_D_RD, S_C_D_WAIT, S_F_WR, S_H_WR,
    S_A_IX_RD, S_A_IX_WAIT, S_A_RS_RD, S_A_RS_WAIT,
    S_G_HDR, S_G_HDR_WAIT, S_G_DR, S_G_DW, S_G_PUT, S_G_WR, S_G_END,
    S_J_HDR1, S_J_HDR1_WAIT, S_J_HDR2, S_J_HDR2_WAIT, S_J_RD1, S_J_RD1_WAIT,
    S_J_RD2, S_J_RD2_WAIT, S_J_WR, S_J_END
  } state_e;

  state_e        state;
  op_type_e      cur_op;
  ls_args_t      ls;
  defrag_args_t  df;
  comp_args_t    cp;
  logic [15:0]   ld_words;      // length of the last LS load
  logic [31:0]   j;             // word / element / entry counter
  logic [15:0]   k;             // word counter inside a defragment row
  logic [31:0]   n_elem;
  logic [15:0]   df_count;
  logic [7:0]    df_row_words;
  logic [23:0]   origin;
  logic [63:0]   bm;            // current snapshot bitmap word
  logic [63:0]   resbits;       // filter result word under construction
  logic [63:0]   elem;          // current element (aggregation)
  logic [AW-1:0] agg_idx;
  logic [15:0]   g_count;       // dictionary entries (Group)
  logic [15:0]   g_s;           // dictionary search position
  logic [15:0]   g_idx;         // index found for the current element
  logic [63:0]   g_word;        // result index word under construction
  logic [15:0]   j_n1, j_n2;    // Join table sizes
  logic [15:0]   j_i, j_k;      // Join loop positions
  logic [15:0]   j_hits;        // Join matches written
  logic [63:0]   j_key1;

  // WRAM port
  logic          w_en, w_we;
  logic [AW-1:0] w_addr;
  logic [63:0]   w_wdata, w_rdata;

  wram #(.BYTES(WRAM_BYTES)) u_wram (
    .clk(clk), .en(w_en), .we(w_we), .addr(w_addr), .wdata(w_wdata), .rdata(w_rdata)
  );

  function automatic logic [AW-1:0] woff(logic [15:0] byte_off);
    return AW'(byte_off >> 3);
  endfunction

  function automatic logic [63:0] extract(logic [63:0] word, logic [2:0] byte_off, logic [7:0] w);
    logic [63:0] s;
    s = word >> (8 * byte_off);
    unique case (w)
      8'd1:    return {56'd0, s[7:0]};
      8'd2:    return {48'd0, s[15:0]};
      8'd4:    return {32'd0, s[31:0]};
      default: return s;
    endcase
  endfunction

  function automatic logic [63:0] key_mask(logic [7:0] w);
    unique case (w)
      8'd1:    return 64'hFF;
      8'd2:    return 64'hFFFF;
      8'd4:    return 64'hFFFF_FFFF;
      default: return '1;
    endcase
  endfunction

  // Join parameters: hash1_offset, hash2_offset, result_offset, data_width.
  logic [15:0] j_h1_off, j_h2_off, j_res_off;
  logic [7:0]  j_w;
  assign j_h1_off  = cp.bitmap_offset;
  assign j_h2_off  = cp.data_offset;
  assign j_res_off = cp.result_offset;
  assign j_w       = cp.data_width;

  // Byte position of element j of width w.
  logic [31:0] elem_byte;
  assign elem_byte = j * 32'(cp.data_width);

  logic [63:0] cur_x;
  logic        cur_vis, pass;
  logic [31:0] hash;
  assign cur_x   = extract(w_rdata, elem_byte[2:0], cp.data_width);
  assign cur_vis = bm[j[5:0]];
  assign pass    = (cur_x >= {32'd0, cp.cond[31:0]}) && (cur_x <= {32'd0, cp.cond[63:32]});
  assign hash    = 32'(cur_x * {32'd0, cp.cond[31:0]});

  // Per-unit DRAM bases: base + stride * unit index.
  logic [BANK_AW-1:0] res_base, op0_base, data_base, delta_base;
  assign res_base   = ls.result_addr + BANK_AW'(ls.result_stride * PIM_ID);
  assign op0_base   = ls.op0_addr    + BANK_AW'(ls.op0_stride * PIM_ID);
  assign data_base  = df.data_addr   + BANK_AW'(df.data_stride * PIM_ID);
  assign delta_base = df.delta_addr  + BANK_AW'(df.delta_stride * PIM_ID);

  logic last_elem;
  assign last_elem = (j + 1 == n_elem);

  // ---------------- access ports (combinational) ----------------
  always_comb begin
    w_en = 1'b0; w_we = 1'b0; w_addr = '0; w_wdata = '0;
    b_req = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    unique case (state)
      S_LS_ST_RD: if (j < 32'(ls.result_len)) begin
        w_en = 1'b1; w_addr = woff(ls.result_offset) + AW'(j);
      end
      S_LS_ST_WR: begin
        b_req = 1'b1; b_we = 1'b1; b_addr = res_base + BANK_AW'(j); b_wdata = w_rdata;
      end
      S_LS_LD_REQ: if (j < 32'(ls.op0_len)) begin
        b_req = 1'b1; b_addr = op0_base + BANK_AW'(j);
      end
      S_LS_LD_WAIT: if (b_rvalid) begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(ls.op0_offset) + AW'(j); w_wdata = b_rdata;
      end
      S_DF_HDR_REQ: begin b_req = 1'b1; b_addr = df.meta_addr; end
      S_DF_PTR_REQ: if (j < 32'(df_count)) begin
        b_req = 1'b1; b_addr = df.meta_addr + BANK_AW'(2 * j + 2);
      end
      S_DF_PTR_WAIT: if (b_rvalid && b_rdata[63]) begin
        w_en = 1'b1; w_addr = AW'(ORIG_BASE) + AW'(b_rdata[23:0]);
      end
      S_DF_ORIG_WR: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = AW'(ORIG_BASE) + AW'(j); w_wdata = {40'd0, origin};
      end
      S_DF_CP_REQ: if (k < 16'(df_row_words)) begin
        b_req = 1'b1; b_addr = delta_base + BANK_AW'(j * df_row_words) + BANK_AW'(k);
      end
      S_DF_CP_WAIT: if (b_rvalid) begin
        b_req = 1'b1; b_we = 1'b1; b_wdata = b_rdata;
        b_addr = data_base + BANK_AW'(origin * df_row_words) + BANK_AW'(k);
      end
      S_C_BM_RD: if (j < n_elem && j[5:0] == 6'd0) begin
        w_en = 1'b1; w_addr = woff(cp.bitmap_offset) + AW'(j >> 6);
      end
      S_C_D_RD: begin
        w_en = 1'b1; w_addr = woff(cp.data_offset) + AW'(elem_byte >> 3);
      end
      S_F_WR: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.result_offset) + AW'(j >> 6); w_wdata = resbits;
      end
      S_H_WR: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.result_offset) + AW'(j);
        w_wdata = {cur_vis, 31'd0, hash};
      end
      S_A_IX_RD: begin
        w_en = 1'b1; w_addr = woff(cp.aux_offset) + AW'(j >> 2);
      end
      S_A_RS_RD: begin
        w_en = 1'b1; w_addr = woff(cp.result_offset) + agg_idx;
      end
      S_A_RS_WAIT: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.result_offset) + agg_idx;
        w_wdata = w_rdata + elem;
      end
      // ---- Group ----
      S_G_HDR: begin w_en = 1'b1; w_addr = woff(cp.aux_offset); end
      S_G_DR: if (g_s < g_count) begin
        w_en = 1'b1; w_addr = woff(cp.aux_offset) + AW'(g_s) + AW'(1);
      end else begin                      // not found: append to the dictionary
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.aux_offset) + AW'(g_count) + AW'(1); w_wdata = elem;
      end
      S_G_WR: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.result_offset) + AW'(j >> 2); w_wdata = g_word;
      end
      S_G_END: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(cp.aux_offset); w_wdata = {48'd0, g_count};
      end
      // ---- Join ----
      S_J_HDR1: begin w_en = 1'b1; w_addr = woff(j_h1_off); end
      S_J_HDR2: begin w_en = 1'b1; w_addr = woff(j_h2_off); end
      S_J_RD1: if (j_i < j_n1) begin w_en = 1'b1; w_addr = woff(j_h1_off) + AW'(j_i) + AW'(1); end
      S_J_RD2: if (j_k < j_n2) begin w_en = 1'b1; w_addr = woff(j_h2_off) + AW'(j_k) + AW'(1); end
      S_J_WR: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(j_res_off) + AW'(j_hits) + AW'(1);
        w_wdata = {16'd0, j_i, 16'd0, j_k};
      end
      S_J_END: begin
        w_en = 1'b1; w_we = 1'b1; w_addr = woff(j_res_off); w_wdata = {48'd0, j_hits};
      end
      default: ;
    endcase
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur_op   <= OP_NONE;
      ld_words <= '0;
      j        <= '0;
      k        <= '0;
      done     <= 1'b0;
      bm       <= '0;
      resbits  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cur_op  <= op;
          ls      <= decode_ls(params);
          df      <= decode_defrag(params);
          cp      <= decode_comp(op, params);
          j       <= '0;
          k       <= '0;
          resbits <= '0;
          unique case (op)
            OP_LS:     state <= S_LS_ST_RD;
            OP_DEFRAG: state <= S_DF_HDR_REQ;
            OP_FILTER, OP_AGG, OP_HASH, OP_GROUP: begin
              state <= (op == OP_GROUP) ? S_G_HDR : S_C_BM_RD;
              unique case (decode_comp(op, params).data_width)
                8'd1:    n_elem <= 32'(ld_words) << 3;
                8'd2:    n_elem <= 32'(ld_words) << 2;
                8'd4:    n_elem <= 32'(ld_words) << 1;
                default: n_elem <= 32'(ld_words);
              endcase
            end
            OP_JOIN:   state <= S_J_HDR1;
            default:   state <= S_DONE;
          endcase
        end
        // ---- LS: store results, then load the next chunk ----
        S_LS_ST_RD: if (j < 32'(ls.result_len)) state <= S_LS_ST_WR;
                    else begin j <= '0; state <= S_LS_LD_REQ; end
        S_LS_ST_WR: begin j <= j + 1; state <= S_LS_ST_RD; end
        S_LS_LD_REQ: if (j < 32'(ls.op0_len)) state <= S_LS_LD_WAIT;
                     else begin ld_words <= ls.op0_len; state <= S_DONE; end
        S_LS_LD_WAIT: if (b_rvalid) begin j <= j + 1; state <= S_LS_LD_REQ; end
        // ---- Defragment ----
        S_DF_HDR_REQ: state <= S_DF_HDR_WAIT;
        S_DF_HDR_WAIT: if (b_rvalid) begin
          df_count     <= b_rdata[15:0];
          df_row_words <= b_rdata[23:16];
          j            <= '0;
          state        <= S_DF_PTR_REQ;
        end
        S_DF_PTR_REQ: if (j < 32'(df_count)) state <= S_DF_PTR_WAIT;
                      else state <= S_DONE;
        S_DF_PTR_WAIT: if (b_rvalid) begin
          if (b_rdata[63]) state <= S_DF_ORIG_WAIT;
          else begin origin <= b_rdata[23:0]; state <= S_DF_ORIG_WR; end
        end
        S_DF_ORIG_WAIT: begin origin <= w_rdata[23:0]; state <= S_DF_ORIG_WR; end
        S_DF_ORIG_WR: begin k <= '0; state <= S_DF_CP_REQ; end
        S_DF_CP_REQ: if (k < 16'(df_row_words)) state <= S_DF_CP_WAIT;
                     else begin j <= j + 1; state <= S_DF_PTR_REQ; end
        S_DF_CP_WAIT: if (b_rvalid) begin k <= k + 1; state <= S_DF_CP_REQ; end
        // ---- compute-phase element loop ----
        S_C_BM_RD: begin
          if (j >= n_elem) state <= (cur_op == OP_GROUP) ? S_G_END : S_DONE;
          else if (j[5:0] == 6'd0) state <= S_C_BM_WAIT;
          else state <= S_C_D_RD;
        end
        S_C_BM_WAIT: begin bm <= w_rdata; state <= S_C_D_RD; end
        S_C_D_RD: state <= S_C_D_WAIT;
        S_C_D_WAIT: begin
          unique case (cur_op)
            OP_FILTER: begin
              resbits[j[5:0]] <= cur_vis && pass;
              if (j[5:0] == 6'd63 || last_elem) state <= S_F_WR;
              else begin j <= j + 1; state <= S_C_BM_RD; end
            end
            OP_HASH: state <= S_H_WR;
            OP_GROUP: begin
              elem <= cur_x;
              g_s  <= '0;
              if (cur_vis) state <= S_G_DR;
              else begin g_idx <= 16'hFFFF; state <= S_G_PUT; end
            end
            default: begin          // Aggregation
              elem <= cur_x;
              if (cur_vis) state <= S_A_IX_RD;
              else begin j <= j + 1; state <= S_C_BM_RD; end
            end
          endcase
        end
        S_F_WR: begin resbits <= '0; j <= j + 1; state <= S_C_BM_RD; end
        S_H_WR: begin j <= j + 1; state <= S_C_BM_RD; end
        S_A_IX_RD: state <= S_A_IX_WAIT;
        S_A_IX_WAIT: begin
          agg_idx <= AW'(w_rdata >> (16 * j[1:0]));
          state   <= S_A_RS_RD;
        end
        S_A_RS_RD: state <= S_A_RS_WAIT;
        S_A_RS_WAIT: begin j <= j + 1; state <= S_C_BM_RD; end
        // ---- Group: find or append each visible element in the dictionary ----
        S_G_HDR: state <= S_G_HDR_WAIT;
        S_G_HDR_WAIT: begin g_count <= w_rdata[15:0]; g_word <= '0; state <= S_C_BM_RD; end
        S_G_DR: if (g_s < g_count) state <= S_G_DW;
                else begin g_idx <= g_count; g_count <= g_count + 1'b1; state <= S_G_PUT; end
        S_G_DW: if (w_rdata == elem) begin g_idx <= g_s; state <= S_G_PUT; end
                else begin g_s <= g_s + 1'b1; state <= S_G_DR; end
        S_G_PUT: begin
          g_word[16*j[1:0] +: 16] <= g_idx;
          if (j[1:0] == 2'd3 || last_elem) state <= S_G_WR;
          else begin j <= j + 1; state <= S_C_BM_RD; end
        end
        S_G_WR: begin g_word <= '0; j <= j + 1; state <= S_C_BM_RD; end
        S_G_END: state <= S_DONE;
        // ---- Join: nested loop over the two buckets ----
        S_J_HDR1: state <= S_J_HDR1_WAIT;
        S_J_HDR1_WAIT: begin j_n1 <= w_rdata[15:0]; state <= S_J_HDR2; end
        S_J_HDR2: state <= S_J_HDR2_WAIT;
        S_J_HDR2_WAIT: begin j_n2 <= w_rdata[15:0]; j_i <= '0; j_hits <= '0; state <= S_J_RD1; end
        S_J_RD1: if (j_i < j_n1) state <= S_J_RD1_WAIT;
                 else state <= S_J_END;
        S_J_RD1_WAIT: begin j_key1 <= w_rdata & key_mask(j_w); j_k <= '0; state <= S_J_RD2; end
        S_J_RD2: if (j_k < j_n2) state <= S_J_RD2_WAIT;
                 else begin j_i <= j_i + 1'b1; state <= S_J_RD1; end
        S_J_RD2_WAIT: if ((w_rdata & key_mask(j_w)) == j_key1) state <= S_J_WR;
                      else begin j_k <= j_k + 1'b1; state <= S_J_RD2; end
        S_J_WR: begin j_hits <= j_hits + 1'b1; j_k <= j_k + 1'b1; state <= S_J_RD2; end
        S_J_END: state <= S_DONE;
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
