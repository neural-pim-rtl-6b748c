// tb_npim_model: reference arithmetic shared by the testbenches.
//
// Independent re-statements of the analog dataflow's ideal functions, used
// to compute expected values: bitline voltage of a crossbar column, one
// NNS+A accumulation step and the NNADC transfer function.
package tb_npim_model;
  localparam real M_VFS = 0.5;
  localparam real M_VDD = 1.2;

  function automatic real m_bl(int unsigned acc, int unsigned rows, int unsigned d);
    return M_VFS * real'(acc) / (real'(rows) * real'((1 << d) - 1));
  endfunction

  // Vo,i = (2^-d * Vo,i-1 + sum_j 2^j * dv_j) / (2^-d + 255)
  function automatic real m_nnsa(real prev, real dv [8], int unsigned d);
    real a, s;
    a = 1.0 / real'(1 << d);
    s = a * prev;
    for (int j = 0; j < 8; j++) s += real'(1 << j) * dv[j];
    return s / (a + 255.0);
  endfunction

  function automatic real m_vmax(int unsigned r);
    return (r == 1) ? 0.25 * M_VDD : (r == 2) ? 0.125 * M_VDD : 0.5 * M_VDD;
  endfunction

  function automatic int unsigned m_adc(real v, int unsigned r);
    real x;
    x = v / m_vmax(r) * 255.0;
    if (x <= 0.0) return 0;
    if (x >= 255.0) return 255;
    return int'($floor(x + 0.5));
  endfunction

  function automatic int m_su8(int v); return v < 0 ? 0 : v > 255 ? 255 : v; endfunction
  function automatic int m_ss8(int v); return v < -128 ? -128 : v > 127 ? 127 : v; endfunction

  // post-processing activation of s = sum - zero_point; a: 0 none, 1 relu,
  // 2 hard sigmoid, 3 hard tanh; result as the stored byte
  function automatic int m_act(int a, int s);
    case (a)
      1:       return m_su8(s);
      2:       return m_su8(128 + 4 * s);
      3:       return m_ss8(8 * s) & 255;
      default: return m_ss8(s) & 255;
    endcase
  endfunction
endpackage
