// minisa_enc_pkg: testbench-side MINISA instruction encoder.
//
// Builds 128-bit instruction words with the field packing the decoder expects: opcode in bits
// [2:0], then the fields upward in table order. Counts (partition factors, G_r, G_c, VN_size,
// T) are stored minus one; offsets and strides as they are. The field widths depend on the
// array (wl = log2 AW, vr = log2(D/AH), rc = log2(D/AH*AW), ms = vr-1, vs = log2 AH), so each
// function takes them as arguments through the fw_t record.
package minisa_enc_pkg;

  typedef struct {
    int wl, vr, rc, ms, vs;
  } fw_t;

  function automatic fw_t widths(input int ah, input int aw, input int d);
    fw_t f;
    f.wl = (aw > 1) ? $clog2(aw) : 1;
    f.vr = ($clog2(d / ah) > 0) ? $clog2(d / ah) : 1;
    f.rc = ($clog2((d / ah) * aw) > 0) ? $clog2((d / ah) * aw) : 1;
    f.ms = ($clog2(d / ah) - 1 > 0) ? $clog2(d / ah) - 1 : 1;
    f.vs = (ah > 1) ? $clog2(ah) : 1;
    return f;
  endfunction

  function automatic logic [127:0] put(input logic [127:0] w, inout int pos, input longint v,
                                       input int width);
    logic [127:0] m;
    m = (128'(1) << width) - 128'(1);
    w |= (128'(v) & m) << pos;
    pos += width;
    return w;
  endfunction

  // op: 0 WVN, 1 IVN, 2 OVN
  function automatic logic [127:0] enc_layout(input fw_t f, input int op, input int order,
                                              input int x_l0, input int x_l1, input int r_l1);
    logic [127:0] w;
    int pos;
    w = 128'(op); pos = 3;
    w = put(w, pos, order, 3);
    w = put(w, pos, x_l0 - 1, f.wl);
    w = put(w, pos, x_l1 - 1, f.vr);
    w = put(w, pos, r_l1 - 1, f.vr);
    return w;
  endfunction

  function automatic logic [127:0] enc_map(input fw_t f, input int r0, input int c0,
                                           input int gr, input int gc, input int sr, input int sc);
    logic [127:0] w;
    int pos;
    w = 128'(7); pos = 3;
    w = put(w, pos, gr - 1, f.wl);
    w = put(w, pos, gc - 1, f.wl);
    w = put(w, pos, r0, f.rc);
    w = put(w, pos, c0, f.rc);
    w = put(w, pos, sr, f.vr);
    w = put(w, pos, sc, f.vr);
    return w;
  endfunction

  // df: 0 IO-S, 1 WO-S
  function automatic logic [127:0] enc_stream(input fw_t f, input int df, input int m0,
                                              input int sm, input int vn, input int t);
    logic [127:0] w;
    int pos;
    w = 128'(3); pos = 3;
    w = put(w, pos, df, 1);
    w = put(w, pos, m0, f.ms);
    w = put(w, pos, sm, f.ms);
    w = put(w, pos, vn - 1, f.vs);
    w = put(w, pos, t - 1, f.vr);
    return w;
  endfunction

  // store: 1 Store, 0 Load; target: 0 stationary, 1 streaming
  function automatic logic [127:0] enc_mem(input bit store, input longint addr, input int target);
    logic [127:0] w;
    int pos;
    w = store ? 128'(4) : 128'(5); pos = 3;
    w = put(w, pos, addr, 32);
    w = put(w, pos, target, 1);
    return w;
  endfunction

  function automatic logic [127:0] enc_act();
    return 128'(6);
  endfunction

endpackage
