// tb_ref_pkg: reference arithmetic used by the testbenches to predict what
// the ARTEMIS datapath should produce, written without reusing any RTL.
//   prod(a, b)   ones left by a deterministic stochastic multiply of
//                magnitudes a and b (0..128): floor(a*b/128)
//   conv(level)  binary output of the analog-to-binary converter for a
//                MOMCAP charge 'level' (bit-line units, full scale 20*128)
//                with 128 evenly spaced comparator levels: floor(level/20)
//   sat8(v)      signed 8-bit saturation
package tb_ref_pkg;
  localparam int L    = 128;
  localparam int FULL = 20 * 128;

  function automatic int prod(input int a, input int b);
    if (a > L) a = L;
    if (b > L) b = L;
    return (a * b) / L;
  endfunction

  function automatic int conv(input int level);
    int n;
    if (level > FULL) level = FULL;
    n = 0;
    for (int k = 1; k <= L; k++)
      if (level * L >= k * FULL) n = k;
    return n;
  endfunction

  function automatic int sat8(input int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction
endpackage
