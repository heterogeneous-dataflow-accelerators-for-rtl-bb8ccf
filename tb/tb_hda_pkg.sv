// tb_hda_pkg: testbench helpers for the Maelstrom testbenches.
//
// refmem is a byte image of the global buffer as the testbench wrote it
// before a layer ran; ref_out computes from it, independently of the RTL, the
// 8-bit output a layer must produce at (k, oy, ox): a direct convolution
// (depth-wise when op is OP_DWCONV) with zero padding, stride, and the same
// shift-and-saturate requantisation. nv_cycles / shi_cycles give the cycle
// counts the two sub-accelerators' schedules imply at their lane budgets.
package tb_hda_pkg;
  import hda_pkg::*;

  localparam int unsigned REFMEM = 1 << 20;
  logic [7:0] refmem [REFMEM];

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  function automatic logic [7:0] ref_out(layer_desc_t d, int k, int oy, int ox);
    int acc, c_lo, c_hi, iy, ix, a, w;
    acc  = 0;
    c_lo = (d.op == OP_DWCONV) ? k : 0;
    c_hi = (d.op == OP_DWCONV) ? k : int'(d.c) - 1;
    for (int c = c_lo; c <= c_hi; c++)
      for (int r = 0; r < int'(d.r); r++)
        for (int s = 0; s < int'(d.s); s++) begin
          iy = oy * int'(d.stride) + r - int'(d.pad);
          ix = ox * int'(d.stride) + s - int'(d.pad);
          if (iy < 0 || ix < 0 || iy >= int'(d.iy) || ix >= int'(d.ix)) continue;
          a = int'($signed(refmem[int'(d.in_base) + (c * int'(d.iy) + iy) * int'(d.ix) + ix]));
          if (d.op == OP_DWCONV)
            w = int'($signed(refmem[int'(d.w_base) + (k * int'(d.r) + r) * int'(d.s) + s]));
          else
            w = int'($signed(refmem[int'(d.w_base) +
                     ((k * int'(d.c) + c) * int'(d.r) + r) * int'(d.s) + s]));
          acc += a * w;
        end
    return requant(acc, d.shift);
  endfunction

  // Cycles from the accepted start to the done pulse, NVDLA-style unit.
  function automatic int nv_cycles(layer_desc_t d, int KP, int CP, int L);
    int kt, steps, per_row;
    kt      = (d.op == OP_DWCONV) ? CP : KP;
    steps   = ((d.op == OP_DWCONV) ? 1 : ceil_div(int'(d.c), CP)) * int'(d.r) * int'(d.s);
    per_row = steps * (ceil_div(KP * CP, L) + 2 + int'(d.ox) * ceil_div(CP, L))
              + 3 + ceil_div(KP * int'(d.ox), L);
    return ceil_div(int'(d.k), kt) * int'(d.oy) * per_row + 1;  // + registered done
  endfunction

  // Cycles from the accepted start to the done pulse, Shi-diannao-style unit.
  function automatic int shi_cycles(layer_desc_t d, int OYP, int OXP, int L);
    int total, rows, nc, full, part;
    total = 0;
    nc = (d.op == OP_DWCONV) ? 1 : int'(d.c);
    for (int oy0 = 0; oy0 < int'(d.oy); oy0 += OYP) begin
      rows = (int'(d.oy) - oy0 < OYP) ? int'(d.oy) - oy0 : OYP;
      full = ceil_div(1 + rows * OXP, L) + 2;
      part = (d.stride == 1) ? ceil_div(1 + rows, L) + 2 : full;
      total += ceil_div(int'(d.ox), OXP) *
               (nc * int'(d.r) * (full + (int'(d.s) - 1) * part) + ceil_div(rows * OXP, L));
    end
    return int'(d.k) * total + 1;  // + registered done
  endfunction

  function automatic layer_desc_t mk_layer(op_e op, int k, int c, int iy, int ix,
                                           int r, int s, int st, int pad, int sh,
                                           int in_base, int w_base, int out_base);
    layer_desc_t d;
    d = '0;
    d.op = op; d.k = dim_t'(k); d.c = dim_t'(c);
    d.iy = dim_t'(iy); d.ix = dim_t'(ix);
    d.oy = dim_t'((iy + 2 * pad - r) / st + 1);
    d.ox = dim_t'((ix + 2 * pad - s) / st + 1);
    d.r = 4'(r); d.s = 4'(s); d.stride = 3'(st); d.pad = 3'(pad);
    d.in_base = gb_addr_t'(in_base); d.w_base = gb_addr_t'(w_base);
    d.out_base = gb_addr_t'(out_base); d.shift = 5'(sh);
    return d;
  endfunction

  function automatic int in_bytes(layer_desc_t d);
    return int'(d.c) * int'(d.iy) * int'(d.ix);
  endfunction

  function automatic int w_bytes(layer_desc_t d);
    return ((d.op == OP_DWCONV) ? 1 : int'(d.c)) * int'(d.k) * int'(d.r) * int'(d.s);
  endfunction

  function automatic int out_bytes(layer_desc_t d);
    return int'(d.k) * int'(d.oy) * int'(d.ox);
  endfunction

endpackage
