// pushtap_tb_pkg: helpers for the testbenches: building 64-byte launch request
// lines (byte 0 = type, parameters packed little-endian from byte 1 in the
// order of the launch-request table), and reference element arithmetic.
package pushtap_tb_pkg;
  import pushtap_pkg::*;

  typedef logic [LINE_W-1:0] line_t;

  function automatic line_t put(line_t l, int unsigned byte_pos, int unsigned nbytes, longint unsigned v);
    for (int unsigned i = 0; i < nbytes; i++) l[8*(byte_pos+i) +: 8] = 8'(v >> (8*i));
    return l;
  endfunction

  function automatic line_t mk_ls(int unsigned res_addr, int unsigned res_len, int unsigned res_off,
                                  int unsigned res_stride, int unsigned op_addr, int unsigned op_len,
                                  int unsigned op_off, int unsigned op_stride);
    line_t l = '0;
    l = put(l, 0, 1, OP_LS);
    l = put(l, 1, 3, res_addr);  l = put(l, 4, 2, res_len);
    l = put(l, 6, 2, res_off);   l = put(l, 8, 2, res_stride);
    l = put(l, 10, 3, op_addr);  l = put(l, 13, 2, op_len);
    l = put(l, 15, 2, op_off);   l = put(l, 17, 2, op_stride);
    return l;
  endfunction

  function automatic line_t mk_defrag(int unsigned meta, int unsigned data, int unsigned data_stride,
                                      int unsigned delta, int unsigned delta_stride);
    line_t l = '0;
    l = put(l, 0, 1, OP_DEFRAG);
    l = put(l, 1, 3, meta);  l = put(l, 4, 3, data); l = put(l, 7, 2, data_stride);
    l = put(l, 9, 3, delta); l = put(l, 12, 2, delta_stride);
    return l;
  endfunction

  function automatic line_t mk_filter(int unsigned bm, int unsigned data, int unsigned res,
                                      int unsigned w, int unsigned lo, int unsigned hi);
    line_t l = '0;
    l = put(l, 0, 1, OP_FILTER);
    l = put(l, 1, 2, bm); l = put(l, 3, 2, data); l = put(l, 5, 2, res);
    l = put(l, 7, 1, w);  l = put(l, 8, 4, lo);   l = put(l, 12, 4, hi);
    return l;
  endfunction

  function automatic line_t mk_agg(int unsigned bm, int unsigned data, int unsigned idx,
                                   int unsigned res, int unsigned w);
    line_t l = '0;
    l = put(l, 0, 1, OP_AGG);
    l = put(l, 1, 2, bm); l = put(l, 3, 2, data); l = put(l, 5, 2, idx);
    l = put(l, 7, 2, res); l = put(l, 9, 1, w);
    return l;
  endfunction

  function automatic line_t mk_hash(int unsigned bm, int unsigned data, int unsigned res,
                                    int unsigned hf, int unsigned w);
    line_t l = '0;
    l = put(l, 0, 1, OP_HASH);
    l = put(l, 1, 2, bm); l = put(l, 3, 2, data); l = put(l, 5, 2, res);
    l = put(l, 7, 4, hf); l = put(l, 11, 1, w);
    return l;
  endfunction

  function automatic line_t mk_group(int unsigned bm, int unsigned data, int unsigned dict,
                                     int unsigned res, int unsigned w);
    line_t l = '0;
    l = put(l, 0, 1, OP_GROUP);
    l = put(l, 1, 2, bm); l = put(l, 3, 2, data); l = put(l, 5, 2, dict);
    l = put(l, 7, 2, res); l = put(l, 9, 1, w);
    return l;
  endfunction

  function automatic line_t mk_join(int unsigned h1, int unsigned h2, int unsigned res,
                                    int unsigned w);
    line_t l = '0;
    l = put(l, 0, 1, OP_JOIN);
    l = put(l, 1, 2, h1); l = put(l, 3, 2, h2); l = put(l, 5, 2, res); l = put(l, 7, 1, w);
    return l;
  endfunction

  function automatic line_t mk_op(op_type_e t);
    line_t l = '0;
    return put(l, 0, 1, t);
  endfunction

  // Element k of width w bytes in a packed little-endian word array.
  function automatic longint unsigned elem_of(longint unsigned words[], int unsigned k, int unsigned w);
    longint unsigned wd = words[(k*w)/8];
    longint unsigned s  = wd >> (8*((k*w)%8));
    if (w == 8) return s;
    return s & ((64'd1 << (8*w)) - 1);
  endfunction
endpackage
