// fuzzy_ref_pkg
// Reference models used by the testbenches, written independently of the
// RTL: the enhancement polynomial is evaluated in floating point (real), and
// the Sobel magnitude straight from the 3x3 mask definitions.
package fuzzy_ref_pkg;

  // Enhancement curve, rounded to nearest and clamped to 0..255
  function automatic int fuzzy_ref(input int x);
    real xr, y;
    int  r;
    xr = real'(x);
    y  = -2.0454098505641e-7 * xr**4 + 7.615967514125e-5 * xr**3
         - 0.0041249658333 * xr**2 + 0.4911541875107 * xr;
    r  = $rtoi($floor(y + 0.5));
    if (r < 0)   r = 0;
    if (r > 255) r = 255;
    return r;
  endfunction

  // |Gx| + |Gy| for a 3x3 neighbourhood n[dy][dx], dy,dx in 0..2
  // (dy = 0 top row, dx = 0 left column), using the masks
  //   Gx: bottom row (1 2 1) minus top row (1 2 1)
  //   Gy: right column (1 2 1) minus left column (1 2 1)
  function automatic int sobel_ref(input int n [3][3]);
    int gx, gy;
    gx = (n[2][0] + 2*n[2][1] + n[2][2]) - (n[0][0] + 2*n[0][1] + n[0][2]);
    gy = (n[0][2] + 2*n[1][2] + n[2][2]) - (n[0][0] + 2*n[1][0] + n[2][0]);
    return (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
  endfunction

endpackage
