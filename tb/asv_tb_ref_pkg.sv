// asv_tb_ref_pkg: reference arithmetic for the testbenches.
//
// Golden models of the scalar-unit operations, written directly from their
// mathematical definitions in 64-bit integer arithmetic (Q8.8 inputs and
// outputs, truncating shifts, division rounding toward zero, saturation to
// 16 bits), independent of the RTL's structure.
package asv_tb_ref_pkg;

  function automatic shortint rsat(longint v);
    if (v > 32767)  return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return shortint'(v);
  endfunction

  // Matrix Update of Farneback optical flow for pixel (x, y).
  function automatic void matupd(input shortint r0[5], input shortint r1[5],
                                 input shortint dx, input shortint dy,
                                 input int x, input int y, input int w, input int h,
                                 output shortint o[5]);
    longint b1, b2, a11, a22, a12, p1[5];
    int px, py;
    px = x + (int'(dx) >>> 8);
    py = y + (int'(dy) >>> 8);
    for (int i = 0; i < 5; i++) p1[i] = (px >= 0 && px < w - 1 && py >= 0 && py < h - 1) ? longint'(r1[i]) : 0;
    a11 = (longint'(r0[2]) + p1[2]) >>> 1;
    a22 = (longint'(r0[3]) + p1[3]) >>> 1;
    a12 = (longint'(r0[4]) + p1[4]) >>> 2;
    b1  = ((longint'(r0[0]) - p1[0]) >>> 1) + ((a11 * dx + a12 * dy) >>> 8);
    b2  = ((longint'(r0[1]) - p1[1]) >>> 1) + ((a12 * dx + a22 * dy) >>> 8);
    o[0] = rsat((a11 * a11 + a12 * a12) >>> 8);
    o[1] = rsat(((a11 + a22) * a12) >>> 8);
    o[2] = rsat((a22 * a22 + a12 * a12) >>> 8);
    o[3] = rsat((a11 * b1 + a12 * b2) >>> 8);
    o[4] = rsat((a12 * b1 + a22 * b2) >>> 8);
  endfunction

  // Compute Flow: solve the 2x2 system G d = h.
  function automatic void flow(input shortint g[5], output shortint o[2]);
    longint det, nx, ny;
    det = longint'(g[0]) * g[2] - longint'(g[1]) * g[1] + 64;
    if (det < 64) det = 64;
    nx = longint'(g[2]) * g[3] - longint'(g[1]) * g[4];
    ny = longint'(g[0]) * g[4] - longint'(g[1]) * g[3];
    o[0] = rsat((nx * 256) / det);
    o[1] = rsat((ny * 256) / det);
  endfunction

endpackage
