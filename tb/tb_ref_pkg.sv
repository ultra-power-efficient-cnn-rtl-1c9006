// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the RTL: DSFP values are computed with multiplications
// and divisions rather than shifts, and the float-to-DSFP conversion halves
// the value until the mantissa fits. Also common check counters' helpers.
package tb_ref_pkg;

  // activation word {e[3:0], m[4:0]} -> value m * 2^e
  function automatic longint ref_act_val(logic [8:0] a);
    longint p;
    p = 1;
    for (int i = 0; i < a[8:5]; i++) p = p * 2;
    return longint'(a[4:0]) * p;
  endfunction

  // coefficient word {s, e[1:0], m[11:0]} -> value (-1)^s * m * 2^e
  function automatic longint ref_coef_val(logic [14:0] c);
    longint p;
    p = 1;
    for (int i = 0; i < c[13:12]; i++) p = p * 2;
    return (c[14] ? -1 : 1) * longint'(c[11:0]) * p;
  endfunction

  // sum -> activation word after a right shift: negatives give 0,
  // values above 31*2^15 saturate, otherwise halve until below 32
  function automatic logic [8:0] ref_to_act(longint v, int sh);
    int e;
    if (v <= 0) return 9'd0;
    for (int i = 0; i < sh; i++) v = v / 2;
    if (v > 31 * 32768) return 9'h1FF;
    e = 0;
    while (v >= 32) begin
      v = v / 2;
      e++;
    end
    return {e[3:0], v[4:0]};
  endfunction

  // a random activation word with a bounded exponent (keeps sums modest)
  function automatic logic [8:0] rand_act(int max_e);
    logic [3:0] e;
    e = 4'($urandom_range(max_e, 0));
    return {e, 5'($urandom)};
  endfunction

  function automatic logic [14:0] rand_coef(int max_m);
    logic [11:0] m;
    m = 12'($urandom_range(max_m, 0));
    return {1'($urandom), 2'($urandom), m};
  endfunction

endpackage
