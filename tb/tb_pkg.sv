// tb_pkg: helpers shared by the testbenches.
//
// Conversions between real numbers and the Q2.30 complex format, a tolerance
// compare, and a floating-point reference model of the state-vector simulator
// (pair update of a 2x2 matrix, CX as an index swap) that the design's results
// are checked against. Qubit j acts on index bit n-1-j.
package tb_pkg;
  import qea_pkg::*;

  localparam real SCALE = 1073741824.0;  // 2^30

  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * SCALE));
  endfunction

  function automatic real to_r(fx_t x);
    return real'(x) / SCALE;
  endfunction

  function automatic cplx_t mk(real re, real im);
    cplx_t c;
    c.re = to_fx(re);
    c.im = to_fx(im);
    return c;
  endfunction

  function automatic real absr(real x);
    return x < 0.0 ? -x : x;
  endfunction

  // within tol (real units) in both components
  function automatic bit close(cplx_t got, real re, real im, real tol);
    return absr(to_r(got.re) - re) <= tol && absr(to_r(got.im) - im) <= tol;
  endfunction

  // reference 2x2 gate on qubit j of an n-qubit state held as two real arrays
  function automatic void ref_gate(ref real sr[], ref real si[], input int n, input int j,
                                   input real ur[4], input real ui[4]);
    int g = 1 << (n - 1 - j);
    for (int i = 0; i < (1 << n); i++) begin
      if ((i & g) == 0) begin
        real xr = sr[i], xi = si[i], yr = sr[i+g], yi = si[i+g];
        sr[i]   = ur[0]*xr - ui[0]*xi + ur[1]*yr - ui[1]*yi;
        si[i]   = ur[0]*xi + ui[0]*xr + ur[1]*yi + ui[1]*yr;
        sr[i+g] = ur[2]*xr - ui[2]*xi + ur[3]*yr - ui[3]*yi;
        si[i+g] = ur[2]*xi + ui[2]*xr + ur[3]*yi + ui[3]*yr;
      end
    end
  endfunction

  function automatic void ref_cx(ref real sr[], ref real si[], input int n, input int c, input int t);
    int cm = 1 << (n - 1 - c);
    int tm = 1 << (n - 1 - t);
    for (int i = 0; i < (1 << n); i++) begin
      if ((i & cm) != 0 && (i & tm) == 0) begin
        real tr = sr[i], ti = si[i];
        sr[i] = sr[i+tm]; si[i] = si[i+tm];
        sr[i+tm] = tr;    si[i+tm] = ti;
      end
    end
  endfunction

  // a random complex number with |re|,|im| < lim
  function automatic cplx_t rnd_c(real lim);
    real a = (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * lim;
    real b = (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * lim;
    return mk(a, b);
  endfunction

  // the paper's gate set: 0 H, 1 S, 2 Rx(th), 3 Ry(th), 4 Rz(th)
  function automatic void std_gate(input int kind, input real th, output real ur[4], output real ui[4]);
    real c = $cos(th / 2.0), sn = $sin(th / 2.0), h = 1.0 / $sqrt(2.0);
    ur = '{0.0, 0.0, 0.0, 0.0};
    ui = '{0.0, 0.0, 0.0, 0.0};
    case (kind)
      0: ur = '{h, h, h, -h};
      1: begin ur[0] = 1.0; ui[3] = 1.0; end
      2: begin ur[0] = c; ui[1] = -sn; ui[2] = -sn; ur[3] = c; end
      3: begin ur[0] = c; ur[1] = -sn; ur[2] = sn; ur[3] = c; end
      default: begin ur[0] = c; ui[0] = -sn; ur[3] = c; ui[3] = sn; end
    endcase
  endfunction

  function automatic bit is_sparse(int kind);
    return kind == 1 || kind == 4;
  endfunction

  function automatic gate_mat_t to_mat(real ur[4], real ui[4]);
    gate_mat_t m;
    m.u00 = mk(ur[0], ui[0]);
    m.u01 = mk(ur[1], ui[1]);
    m.u10 = mk(ur[2], ui[2]);
    m.u11 = mk(ur[3], ui[3]);
    return m;
  endfunction
endpackage
