// cutie_ref_pkg: reference models for the testbenches, written without the
// RTL's helper functions.
//   - trit <-> integer conversion,
//   - the 5-trits-per-byte code (byte = sum over i of (t_i + 1) * 3^i),
//   - a golden model of one fused layer (convolution with zero padding and
//     strides, optional max/sum pooling, two-threshold ternarization), on
//     feature maps stored as int arrays in (y, x, c) order.
package cutie_ref_pkg;

  function automatic int t2i(input logic [1:0] t);
    return (t == 2'b01) ? 1 : (t == 2'b11) ? -1 : 0;
  endfunction

  function automatic logic [1:0] i2t(input int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b11 : 2'b00;
  endfunction

  // random trit with roughly the given percentage of zeros
  function automatic int rand_trit(input int zero_pct);
    if (int'($urandom_range(99)) < zero_pct) return 0;
    return ($urandom_range(1) == 1) ? 1 : -1;
  endfunction

  // byte code of five trits v[0..4] (ints in -1..1)
  function automatic logic [7:0] ref_code5(input int v0, v1, v2, v3, v4);
    int pw[5] = '{1, 3, 9, 27, 81};
    int vals[5];
    int s;
    vals = '{v0, v1, v2, v3, v4};
    s = 0;
    foreach (vals[i]) s += (vals[i] + 1) * pw[i];
    return 8'(s);
  endfunction

  // compress n trits of the int array v starting at off into a bit vector
  // (at most 4096 bits)
  function automatic logic [4095:0] ref_pack(input int v[], input int off, input int n);
    logic [4095:0] r;
    int g;
    r = '0;
    g = 0;
    for (int i = 0; i < n; i += 5) begin
      int t[5];
      for (int j = 0; j < 5; j++) t[j] = (i + j < n) ? v[off + i + j] : 0;
      r[8*g +: 8] = ref_code5(t[0], t[1], t[2], t[3], t[4]);
      g++;
    end
    return r;
  endfunction

  // decode a byte into five trit ints
  function automatic void ref_decode5(input logic [7:0] c, output int t[5]);
    int v;
    v = int'(c);
    for (int i = 0; i < 5; i++) begin
      t[i] = (v % 3) - 1;
      v = v / 3;
    end
  endfunction

  typedef struct {
    int in_w, in_h, ch_in, ch_out, kernel, sx, sy, pad;
    int pool_en, pool_avg, pool_size;
  } ref_cfg_t;

  // golden fused layer. w[o][((ky*K)+kx)*NIh + ci] with K and NIh the hardware
  // window side (kernel taps in the middle of the K x K window).
  function automatic void ref_layer(input int fin[], input ref_cfg_t c, input int K, input int NIh,
                                    input int w[][], input int thr_lo[], input int thr_hi[],
                                    output int fout[], output int ow_o, output int oh_o);
    int p, off, ow, oh, ps, qw, qh;
    int conv[];
    p   = (c.kernel - 1) / 2;
    off = c.pad ? 0 : p;
    ow  = (c.in_w - 1 - 2*off) / c.sx + 1;
    oh  = (c.in_h - 1 - 2*off) / c.sy + 1;
    conv = new[ow * oh * c.ch_out];
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int o = 0; o < c.ch_out; o++) begin
          int cy, cx, acc;
          cy = off + oy * c.sy;
          cx = off + ox * c.sx;
          acc = 0;
          for (int dy = -p; dy <= p; dy++)
            for (int dx = -p; dx <= p; dx++) begin
              int y, x;
              y = cy + dy;
              x = cx + dx;
              if (y >= 0 && y < c.in_h && x >= 0 && x < c.in_w)
                for (int ci = 0; ci < c.ch_in; ci++)
                  acc += fin[(y * c.in_w + x) * c.ch_in + ci] *
                         w[o][((dy + K/2) * K + (dx + K/2)) * NIh + ci];
            end
          conv[(oy * ow + ox) * c.ch_out + o] = acc;
        end
    ps = c.pool_en ? c.pool_size : 1;
    qw = ow / ps;
    qh = oh / ps;
    fout = new[qw * qh * c.ch_out];
    for (int qy = 0; qy < qh; qy++)
      for (int qx = 0; qx < qw; qx++)
        for (int o = 0; o < c.ch_out; o++) begin
          int v, first;
          v = 0;
          first = 1;
          for (int py = 0; py < ps; py++)
            for (int px = 0; px < ps; px++) begin
              int e;
              e = conv[((qy*ps + py) * ow + qx*ps + px) * c.ch_out + o];
              if (first) v = e;
              else if (c.pool_avg) v += e;
              else if (e > v) v = e;
              first = 0;
            end
          fout[(qy * qw + qx) * c.ch_out + o] = (v > thr_hi[o]) ? 1 : (v < thr_lo[o]) ? -1 : 0;
        end
    ow_o = qw;
    oh_o = qh;
  endfunction

endpackage
