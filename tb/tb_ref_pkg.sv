// tb_ref_pkg -- independent reference model of the AMS-HD datapath for the
// testbenches. Vectors are held in MAXD-bit containers with the active size
// passed as an argument. The Sobol points are computed here from the
// direction numbers m_j of each dimension (m_j = 1 for dimension 1,
// m_j = 2*m_{j-1} XOR m_{j-1} for dimension 2) and compared as real numbers.
package tb_ref_pkg;

  localparam int MAXD = 1024;
  typedef logic [MAXD-1:0] hv_t;

  function automatic real sobol_real(input int unsigned k, input int dim);
    longint unsigned m;
    longint unsigned acc;
    acc = 0;
    m   = 1;
    for (int j = 1; j <= 32; j++) begin
      if (j > 1 && dim == 2) m = (m << 1) ^ m;
      if (k[j-1]) acc = acc ^ ((dim == 1 ? 64'd1 : m) << (32 - j));
    end
    return real'(acc) / 4294967296.0;
  endfunction

  function automatic hv_t ref_mask(input int d, input real th);
    hv_t m = '0;
    for (int k = 0; k < d; k++) m[k] = sobol_real(k + 1, 1) < th;
    return m;
  endfunction

  function automatic hv_t ref_seed(input int d, input real th);
    hv_t s = '0;
    for (int k = 0; k < d; k++) s[k] = sobol_real(k, 2) >= (1.0 - th);
    return s;
  endfunction

  function automatic hv_t ref_lfsr_step(input hv_t q, input hv_t mask, input int d, input bit en);
    hv_t n = '0;
    bit fb = q[d-1];
    n[0] = en ^ (mask[0] & fb);
    for (int k = 1; k < d; k++) n[k] = q[k-1] ^ (mask[k] & fb);
    return n;
  endfunction

  // Thermometer code: bit k = (f > k/D), f = code / 2**fw.
  function automatic hv_t ref_thermo(input longint unsigned code, input int fw, input int d);
    hv_t h = '0;
    real f = real'(code) / real'(64'd1 << fw);
    for (int k = 0; k < d; k++) h[k] = f > (real'(k) / real'(d));
    return h;
  endfunction

  function automatic int ref_popcount(input hv_t v, input int d);
    int c = 0;
    for (int k = 0; k < d; k++) c += int'(v[k]);
    return c;
  endfunction

endpackage
