// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Written independently of the RTL: plain integer products with the weights
// (no shifts-and-adds), floor division by 16 / 4 done by explicit integer
// arithmetic, and the clamp written out. The bilinear reference is
// floor((P1+P2+P3+P4)/4); the bicubic reference is
//   h_r = floor((-P(4r+1) + 6 P(4r+2) + 5 P(4r+3) + 5 P(4r+4)) / 16)
//   t   = floor((-h_0 + 6 h_1 + 5 h_2 + 5 h_3) / 16), clamped to 0..255.
// Also holds the synthetic test image used by the stream testbenches.
package tb_ref_pkg;

  function automatic int floor_div(input int a, input int b);
    int q;
    q = a / b;                       // truncates towards zero
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  function automatic int bil_ref(input int p1, input int p2, input int p3, input int p4);
    return floor_div(p1 + p2 + p3 + p4, 4);
  endfunction

  // Unclamped bicubic value; p[k] is tap P(k+1).
  function automatic int bic_raw(input int p [16]);
    int h [4];
    int w [4];
    w = '{-1, 6, 5, 5};
    for (int r = 0; r < 4; r++)
      h[r] = floor_div(w[0]*p[4*r] + w[1]*p[4*r+1] + w[2]*p[4*r+2] + w[3]*p[4*r+3], 16);
    return floor_div(w[0]*h[0] + w[1]*h[1] + w[2]*h[2] + w[3]*h[3], 16);
  endfunction

  function automatic int clamp255(input int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  // Synthetic test image: random grey, random black/white, smooth ramp, and
  // one 4x4 patch (top-left corner at line py, column px) whose bicubic
  // value overshoots 255: first line 255,0,0,0, then three lines 0,255,255,255.
  function automatic int patch_pixel(input int dy, input int dx);
    if (dy == 0) return (dx == 0) ? 255 : 0;
    return (dx == 0) ? 0 : 255;
  endfunction

endpackage
