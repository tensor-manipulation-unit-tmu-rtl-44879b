// tb_tmu_pkg -- helpers shared by the TMU testbenches.
//
// Builders for TM instructions (one per operator class, with the matrices A
// and B that make the address generator perform the operator) and small
// deterministic data generators. The expected results in the testbenches are
// computed from direct index formulas, not from A and B.
package tb_tmu_pkg;
  import tmu_pkg::*;

  // byte k of a generated test pattern number `seed`
  function automatic logic [7:0] pat(int seed, int k);
    return 8'((seed * 131 + k * 29 + (k >> 3) * 7 + 5) & 8'hff);
  endfunction

  function automatic beat_t pat_beat(int seed, int n);
    beat_t b;
    for (int i = 0; i < BUS_BYTES; i++) b[8*i +: 8] = pat(seed, n * BUS_BYTES + i);
    return b;
  endfunction

  function automatic inst_t inst_base(opcode_e op, addr_t src0, addr_t dst,
                                      int wi, int hi, int cb, int seg);
    inst_t t;
    t = '0;
    t.op        = op;
    t.src0_base = src0;
    t.dst_base  = dst;
    t.wi        = IDX_W'(wi);
    t.hi        = IDX_W'(hi);
    t.cb        = IDX_W'(cb);
    t.seg_len   = SEG_W'(seg);
    t.grp_in    = 5'd16;
    t.grp_out   = 5'd16;
    t.byte_mask = '1;
    for (int i = 0; i < BUS_BYTES; i++) t.byte_dest[i] = 2'd3;
    return t;
  endfunction

  // identity layout: out(x,y,c) = in(x,y,c) -- the matrix of Add, Route, Split
  function automatic inst_t inst_copy(opcode_e op, addr_t src0, addr_t dst,
                                      int wi, int hi, int cb, int cb_out, int c_ofs, int seg);
    inst_t t;
    t = inst_base(op, src0, dst, wi, hi, cb, seg);
    t.a[0][0] = 16'sd1;                 // x_o = x_i
    t.a[1][1] = COEF_W'(wi);            // y_o = w_i * y_i
    t.a[2][2] = 16'sd1;                 // c_o = c_i + c_ofs
    t.b[2]    = OFS_W'(c_ofs);
    t.c_stride = IDX_W'(cb_out * BUS_BYTES);
    return t;
  endfunction

  // Transpose (Table II): x_o = y_i, y_o = w * x_i (output width is hi)
  function automatic inst_t inst_transpose(addr_t src0, addr_t dst, int wi, int hi, int cb, int seg);
    inst_t t;
    t = inst_base(OP_TRANSPOSE, src0, dst, wi, hi, cb, seg);
    t.a[0][1] = 16'sd1;
    t.a[1][0] = COEF_W'(hi);
    t.a[2][2] = 16'sd1;
    t.c_stride = IDX_W'(cb * BUS_BYTES);
    return t;
  endfunction

  // Rot90 (Table II): x_o = -y_i + (h - 1), y_o = h * x_i
  function automatic inst_t inst_rot90(addr_t src0, addr_t dst, int wi, int hi, int cb, int seg);
    inst_t t;
    t = inst_transpose(src0, dst, wi, hi, cb, seg);
    t.op      = OP_ROT90;
    t.a[0][1] = -16'sd1;
    t.b[0]    = OFS_W'(hi - 1);
    return t;
  endfunction

  // Upsample (Table II): x_o = s x_i + dx, y_o = s*s*w y_i + dy*s*w; one instruction per (dx,dy)
  function automatic inst_t inst_upsample(addr_t src0, addr_t dst, int wi, int hi, int cb, int s,
                                          int dx, int dy, int seg);
    inst_t t;
    t = inst_base(OP_UPSAMPLE, src0, dst, wi, hi, cb, seg);
    t.a[0][0] = COEF_W'(s);
    t.a[1][1] = COEF_W'(s * s * wi);
    t.a[2][2] = 16'sd1;
    t.b[0]    = OFS_W'(dx);
    t.b[1]    = OFS_W'(dy * s * wi);
    t.c_stride = IDX_W'(cb * BUS_BYTES);
    return t;
  endfunction

  // fine-grained output: beat k goes to dst + 16 k
  function automatic inst_t fine_out(inst_t t);
    t.a[0][0]  = 16'sd1;
    t.c_stride = IDX_W'(BUS_BYTES);
    return t;
  endfunction
endpackage
