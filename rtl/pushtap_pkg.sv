// pushtap_pkg: types and constants shared by the memory-controller and
// rank-side blocks of the PUSHtap PIM-HTAP design.
//
// The central item is the 64-byte launch request (a CPU cache-line write to a
// reserved address). Byte 0 holds the operation type and bytes 1..63 the input
// parameters. The field names and byte widths of every operation follow the
// launch-request table of the design (LS, Defragment, Filter, Group,
// Aggregation, Hash, Join). Two things are this implementation's choices:
// fields are packed in the listed order starting at byte 1, little-endian
// (byte k of the line is data[8k+7:8k]), and the type codes are numbered in the
// table's order starting at 1.
//
// Units: DRAM addresses (the *_addr fields, 3 bytes) and lengths (*_len) count 64-bit
// words of one bank; WRAM offsets (*_offset, 2 bytes) count bytes and must be
// 8-byte aligned; data_width counts bytes (1, 2, 4 or 8).
package pushtap_pkg;

  localparam int unsigned LINE_BYTES = 64;          // CPU cache line
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned BANK_AW    = 24;          // 3-byte addr field -> 2^24 words = 128 MB per bank
  localparam int unsigned LADDR_W    = 28;          // CPU line address: 2^27 lines = 8 GB rank + reserved half
  localparam int unsigned PARAM_W    = (LINE_BYTES - 1) * 8;

  typedef enum logic [7:0] {
    OP_NONE = 8'd0,
    OP_LS   = 8'd1,
    OP_DEFRAG = 8'd2,
    OP_FILTER = 8'd3,
    OP_GROUP  = 8'd4,
    OP_AGG    = 8'd5,
    OP_HASH   = 8'd6,
    OP_JOIN   = 8'd7
  } op_type_e;

  // Load-phase operations need the DRAM bank; compute-phase ones work in WRAM.
  function automatic logic op_needs_bank(op_type_e t);
    return (t == OP_LS) || (t == OP_DEFRAG);
  endfunction

  // One CPU request as it sits in the memory controller's access queue.
  typedef struct packed {
    logic [LADDR_W-1:0] addr;   // cache-line address
    logic               we;     // 1 = write, 0 = read
    logic [LINE_W-1:0]  data;   // write data
  } mem_req_t;

  typedef struct packed {
    logic [23:0] result_addr;
    logic [15:0] result_len;
    logic [15:0] result_offset;
    logic [15:0] result_stride;
    logic [23:0] op0_addr;
    logic [15:0] op0_len;
    logic [15:0] op0_offset;
    logic [15:0] op0_stride;
  } ls_args_t;

  typedef struct packed {
    logic [23:0] meta_addr;
    logic [23:0] data_addr;
    logic [15:0] data_stride;
    logic [23:0] delta_addr;
    logic [15:0] delta_stride;
  } defrag_args_t;

  // Filter, Group, Aggregation and Hash share this shape; 'aux' is the
  // operation's own field (dict_offset, index_offset, or unused) and 'cond' the
  // 8-byte condition (Filter) or 4-byte hash_function (Hash).
  typedef struct packed {
    logic [15:0] bitmap_offset;
    logic [15:0] data_offset;
    logic [15:0] aux_offset;
    logic [15:0] result_offset;
    logic [7:0]  data_width;
    logic [63:0] cond;
  } comp_args_t;

  // Byte k of the parameter field (byte k+1 of the line).
  function automatic logic [7:0] pbyte(logic [PARAM_W-1:0] p, int unsigned k);
    return p[8*k +: 8];
  endfunction

  function automatic logic [15:0] p16(logic [PARAM_W-1:0] p, int unsigned k);
    return {pbyte(p, k+1), pbyte(p, k)};
  endfunction

  function automatic logic [23:0] p24(logic [PARAM_W-1:0] p, int unsigned k);
    return {pbyte(p, k+2), pbyte(p, k+1), pbyte(p, k)};
  endfunction

  function automatic ls_args_t decode_ls(logic [PARAM_W-1:0] p);
    ls_args_t a;
    a.result_addr   = p24(p, 0);
    a.result_len    = p16(p, 3);
    a.result_offset = p16(p, 5);
    a.result_stride = p16(p, 7);
    a.op0_addr      = p24(p, 9);
    a.op0_len       = p16(p, 12);
    a.op0_offset    = p16(p, 14);
    a.op0_stride    = p16(p, 16);
    return a;
  endfunction

  function automatic defrag_args_t decode_defrag(logic [PARAM_W-1:0] p);
    defrag_args_t a;
    a.meta_addr    = p24(p, 0);
    a.data_addr    = p24(p, 3);
    a.data_stride  = p16(p, 6);
    a.delta_addr   = p24(p, 8);
    a.delta_stride = p16(p, 11);
    return a;
  endfunction

  function automatic comp_args_t decode_comp(op_type_e t, logic [PARAM_W-1:0] p);
    comp_args_t a;
    a = '0;
    a.bitmap_offset = p16(p, 0);
    a.data_offset   = p16(p, 2);
    unique case (t)
      OP_FILTER: begin                  // bitmap, data, result, width(1), condition(8)
        a.result_offset = p16(p, 4);
        a.data_width    = pbyte(p, 6);
        a.cond          = {p24(p, 12), p24(p, 9), p16(p, 7)};
      end
      OP_GROUP, OP_AGG: begin           // bitmap, data, dict|index, result, width(1)
        a.aux_offset    = p16(p, 4);
        a.result_offset = p16(p, 6);
        a.data_width    = pbyte(p, 8);
      end
      OP_HASH: begin                    // bitmap, data, result, hash_function(4), width(1)
        a.result_offset = p16(p, 4);
        a.cond          = {32'd0, p16(p, 8), p16(p, 6)};
        a.data_width    = pbyte(p, 10);
      end
      OP_JOIN: begin                    // hash1, hash2, result, width(1)
        a.result_offset = p16(p, 4);
        a.data_width    = pbyte(p, 6);
      end
      default: ;
    endcase
    return a;
  endfunction

endpackage
