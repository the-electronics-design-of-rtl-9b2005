// ktx_ref_pkg: reference arithmetic for the testbenches, written directly
// from the equations rather than from the RTL structure.  The mutual
// inductance correction is computed as a full 16 x 16 matrix-vector product,
// the PID as the incremental equation with a clamp of u to the 16-bit range.
package ktx_ref_pkg;
  import ktx_pkg::*;

  function automatic longint sat(longint x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  // matrix entry M[i][j] of a circulant, symmetric matrix with three values
  function automatic longint m_entry(int i, int j, coef_t c);
    int d;
    d = (i - j + N_PATH) % N_PATH;
    if (d > N_PATH / 2) d = N_PATH - d;
    case (d)
      0: return longint'(c.c0);
      1: return longint'(c.c1);
      2: return longint'(c.c2);
      default: return 0;
    endcase
  endfunction

  // codes: raw 16-bit ADC codes per path; result: corrected values
  function automatic void correct(input logic [15:0] codes [N_PATH], input coef_t c,
                                  output longint res [N_PATH]);
    longint y [N_PATH];
    for (int j = 0; j < N_PATH; j++) begin
      longint x;
      x = longint'($signed(codes[j][15:4]));                 // upper 12 bits
      y[j] = ((x * longint'(c.beta)) >>> BETA_FRAC) + longint'(c.alpha);
    end
    for (int i = 0; i < N_PATH; i++) begin
      longint s;
      s = 0;
      for (int j = 0; j < N_PATH; j++) s += m_entry(i, j, c) * y[j];
      res[i] = sat(((s >>> M_FRAC) * longint'(c.v)) >>> V_FRAC);
    end
  endfunction

  // one incremental PID step; state per path is kept by the caller
  function automatic longint pid_step(input longint meas, input coef_t c,
                                      inout longint u, inout longint e1, inout longint e2,
                                      output bit clamped);
    longint e, nu, lim_hi, lim_lo;
    e  = longint'(c.setpt) - meas;
    nu = u + longint'(c.a0) * e + longint'(c.a1) * e1 + longint'(c.a2) * e2;
    lim_hi = 32767 * 4096;
    lim_lo = -32768 * 4096;
    clamped = 0;
    if (nu > lim_hi) begin nu = lim_hi; clamped = 1; end
    if (nu < lim_lo) begin nu = lim_lo; clamped = 1; end
    u  = nu;
    e2 = e1;
    e1 = e;
    return nu >>> K_FRAC;
  endfunction
endpackage
