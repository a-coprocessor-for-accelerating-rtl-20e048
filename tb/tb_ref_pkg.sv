// tb_ref_pkg: reference model of the pixel operations, written with plain
// integer arithmetic and independently of the RTL, for the testbenches.
package tb_ref_pkg;
  import ae_pkg::*;

  function automatic int chv(pixel_t p, int c);
    if (c == 0) return int'(p.y);
    if (c == 1) return int'(p.u);
    return int'(p.v);
  endfunction

  // 3x3: win[r*3+k], row r (0 = line above), column k (0 = left)
  // line = 1: win is a 9-pixel line window, centre win[4]
  function automatic pixel_t ref_op(pixel_t win[9], pixel_t b, pix_op_e op, logic [2:0] chan,
                                   bit line = 0);
    pixel_t res;
    int v[3];
    res = win[4];
    for (int c = 0; c < 3; c++) begin
      int a, bb, mx, mn, s;
      a  = chv(win[4], c);
      bb = chv(b, c);
      mx = 0; mn = 255; s = 0;
      for (int i = 0; i < 9; i++) begin
        int p, w;
        p = chv(win[i], c);
        if (p > mx) mx = p;
        if (p < mn) mn = p;
        if (line) w = (i == 4) ? 8 : 1;
        else      w = ((i / 3) == 1 ? 2 : 1) * ((i % 3) == 1 ? 2 : 1);
        s += w * p;
      end
      if (!chan[c]) v[c] = a;
      else case (op)
        OP_ADD:    v[c] = (a + bb > 255) ? 255 : a + bb;
        OP_SUB:    v[c] = (a > bb) ? a - bb : bb - a;
        OP_MULT:   v[c] = (a * bb) / 256;
        OP_GRAD:   v[c] = mx - mn;
        OP_DILATE: v[c] = mx;
        OP_ERODE:  v[c] = mn;
        OP_SMOOTH: v[c] = s / 16;
        default:   v[c] = a;
      endcase
    end
    res.y = 8'(v[0]);
    res.u = 8'(v[1]);
    res.v = 8'(v[2]);
    return res;
  endfunction

  // deterministic test image content
  function automatic pixel_t gen_pix(int img, int x, int y, int seed);
    pixel_t p;
    int h;
    h = (x * 37 + y * 101 + img * 53 + seed * 7) ^ (x * y * 13 + seed);
    p.y    = 8'(h);
    p.u    = 8'(h >> 3) ^ 8'(x);
    p.v    = 8'(h >> 5) + 8'(y * 3);
    p.pad  = 8'h00;
    p.alfa = 16'(x + 1000 * img);
    p.aux  = 16'(y + 7 * seed);
    return p;
  endfunction
endpackage
