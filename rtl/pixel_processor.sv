// pixel_processor: pixel level processor, stage 3 of the process unit.
//
// Computes one result pixel from the neighbourhood held in the matrix
// register. The window is either the 3x3 block (CON_0, CON_8) or the
// 9-pixel line (line = 1: LINE_H9, LINE_V9); in both the centre pixel is
// element 4 of the window. The operations are built from the sub-functions the AddressLib
// uses - add, sub, mult and a gradient - and work on each of the 8-bit
// Y, U and V channels selected by chan; unselected channels and the Alfa and
// Aux channels are copied from the centre pixel of image A.
//
//   OP_COPY   centre pixel                     (CON_0 and CON_8)
//   OP_ADD    min(A+B, 255)                    (inter)
//   OP_SUB    |A-B|, difference picture        (inter)
//   OP_MULT   (A*B) >> 8                       (inter)
//   OP_GRAD   max - min over the window        (intra, morphological gradient)
//   OP_DILATE max over the window              (intra)
//   OP_ERODE  min over the window              (intra)
//   OP_SMOOTH low-pass filter, weights sum to 16 (intra):
//             3x3: w(r)w(c), w = 1,2,1; line: 8 for the centre, 1 elsewhere
//
// sad_y is |A-B| of the Y channel, for a sum of absolute differences.
// Purely combinational; the result register behind it is in the process
// unit. The paper names the sub-functions and the kinds of operation
// (gradient, filters); the exact operation set and its encoding are this
// design's choice.
module pixel_processor
  import ae_pkg::*;
(
  input  nbh_t       nbh,
  input  logic       line,     // window is the 9-pixel line
  input  pix_op_e    op,
  input  logic [2:0] chan,     // {V,U,Y}
  output pixel_t     result,
  output logic [7:0] sad_y
);
  // channel c of pixel p: 0 = Y, 1 = U, 2 = V
  function automatic logic [7:0] ch(pixel_t p, int c);
    case (c)
      0:       return p.y;
      1:       return p.u;
      default: return p.v;
    endcase
  endfunction

  function automatic logic [7:0] absdiff(logic [7:0] a, logic [7:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  // the window as nine pixels, centre at index 4
  pixel_t win [9];
  always_comb begin
    for (int i = 0; i < 9; i++)
      win[i] = line ? nbh.l[i] : nbh.a[i / 3][i % 3];
  end

  logic [7:0] res_ch [3];

  always_comb begin
    for (int c = 0; c < 3; c++) begin
      logic [7:0]  a, b, mx, mn;
      logic [8:0]  sum;
      logic [15:0] prod;
      logic [11:0] acc;
      a  = ch(win[4], c);
      b  = ch(nbh.b, c);
      mx = 8'h00;
      mn = 8'hFF;
      acc = '0;
      for (int i = 0; i < 9; i++) begin
        logic [7:0] p;
        p = ch(win[i], c);
        if (p > mx) mx = p;
        if (p < mn) mn = p;
        if (line)
          acc = acc + (12'(p) << ((i == 4) ? 3 : 0));
        else  // weight 1,2,1 x 1,2,1 = shift by (row==1)+(col==1)
          acc = acc + (12'(p) << (((i / 3) == 1 ? 1 : 0) + ((i % 3) == 1 ? 1 : 0)));
      end
      sum  = 9'(a) + 9'(b);
      prod = a * b;
      if (!chan[c]) res_ch[c] = a;
      else begin
        case (op)
          OP_ADD:    res_ch[c] = sum[8] ? 8'hFF : sum[7:0];
          OP_SUB:    res_ch[c] = absdiff(a, b);
          OP_MULT:   res_ch[c] = prod[15:8];
          OP_GRAD:   res_ch[c] = mx - mn;
          OP_DILATE: res_ch[c] = mx;
          OP_ERODE:  res_ch[c] = mn;
          OP_SMOOTH: res_ch[c] = acc[11:4];
          default:   res_ch[c] = a;
        endcase
      end
    end
  end

  always_comb begin
    result      = win[4];
    result.y    = res_ch[0];
    result.u    = res_ch[1];
    result.v    = res_ch[2];
  end

  assign sad_y = absdiff(win[4].y, nbh.b.y);

endmodule
