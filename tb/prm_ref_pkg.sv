// prm_ref_pkg: independent reference arithmetic for the testbenches.
// Computes chi2 and track parameters with wide signed integers, exactly as
// the fixed-point conventions of the design define them:
//   t_i  = h_i + sum_j S_ij*x_j            (Q16.16, exact)
//   chi2 = floor(sum_i t_i^2 / 2^16)       (Q16.16), 16-bit output = integer part, saturated
//   p_i  = floor((q_i + sum_j C_ij*x_j) / 2^12), saturated to signed 16 bits
package prm_ref_pkg;
  import prm_pkg::*;

  typedef logic signed [COORD_W-1:0] xvec_t [NCOO];

  function automatic xvec_t ref_coords(input logic [NLAYERS-1:0][31:0] cl);
    xvec_t x;
    int k = 0;
    for (int l = 0; l < NLAYERS; l++) begin
      x[k++] = cl[l][15:0];
      if (l < NPIX) x[k++] = cl[l][31:16];
    end
    return x;
  endfunction

  function automatic logic [63:0] ref_chi2(input xvec_t x, input int s[NDOF][NCOO], input int h[NDOF]);
    logic signed [159:0] acc, t;
    acc = 0;
    for (int i = 0; i < NDOF; i++) begin
      t = 160'(signed'(h[i]));
      for (int j = 0; j < NCOO; j++) t += 160'(signed'(s[i][j])) * 160'(signed'(x[j]));
      acc += t * t;
    end
    acc = acc >>> 16;
    if (acc > 160'(64'hFFFF_FFFF_FFFF_FFFF)) return 64'hFFFF_FFFF_FFFF_FFFF;
    return acc[63:0];
  endfunction

  function automatic logic [15:0] ref_chi16(input logic [63:0] c);
    return (c[63:32] != 0) ? 16'hFFFF : c[31:16];
  endfunction

  function automatic logic [15:0] ref_par(input xvec_t x, input int c[NCOO], input int q);
    longint t;
    t = longint'(q);
    for (int j = 0; j < NCOO; j++) t += longint'(c[j]) * longint'(x[j]);
    t = t >>> 12;
    if (t > 32767)  return 16'h7FFF;
    if (t < -32768) return 16'h8000;
    return t[15:0];
  endfunction
endpackage
