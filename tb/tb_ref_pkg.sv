// tb_ref_pkg -- floating-point reference arithmetic for the AI DCT testbenches.
//
// Everything here is computed directly from definitions, not from the RTL's
// structure: the basis z = {1, z1, z2, z1z2} from square roots, the 8-point DCT as a
// cosine sum, and the scaling g_k * s_k that the Arai AI transform applies to output
// k (s_0 = 1, s_k = 2cos(k pi/16); g_k = 1 for k = 0, 4, else 4).
package tb_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic real zb(int q);
    real r1, r2;
    r1 = $sqrt(2.0 + $sqrt(2.0));
    r2 = $sqrt(2.0 - $sqrt(2.0));
    case (q)
      0:       return 1.0;
      1:       return r1 + r2;
      2:       return r1 - r2;
      default: return (r1 + r2) * (r1 - r2);
    endcase
  endfunction

  // Scale of output k of the 1-D AI Arai transform relative to sum_n x_n cos(...).
  function automatic real kscale(int k);
    real s;
    s = (k == 0) ? 1.0 : 2.0 * $cos(k * PI / 16.0);
    return (k == 0 || k == 4) ? s : 4.0 * s;
  endfunction

  function automatic real cosk(int n, int k);
    return $cos((2 * n + 1) * k * PI / 16.0);
  endfunction

  // Expected decoded value of output k of the 1-D AI transform.
  function automatic real dct1_ref(real x [8], int k);
    real s;
    s = 0.0;
    for (int n = 0; n < 8; n++) s += x[n] * cosk(n, k);
    return kscale(k) * s;
  endfunction

  // Expected 2-D value (vertical v over rows r, horizontal h over columns c).
  function automatic real dct2_ref(real blk [8][8], int v, int h);
    real s;
    s = 0.0;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) s += blk[r][c] * cosk(r, v) * cosk(c, h);
    return kscale(v) * kscale(h) * s;
  endfunction

  function automatic real rabs(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // Channels produced at output k (bit q): X0, X4: a; X2, X6: a, d; odd: all.
  function automatic bit ch_present(int k, int q);
    if (k == 0 || k == 4) return (q == 0);
    if (k == 2 || k == 6) return (q == 0 || q == 3);
    return 1'b1;
  endfunction

endpackage
