// sparq_ref_pkg -- arithmetic reference model of SPARQ for the testbenches.
//
// Works on integer values, not on bit fields: bsparq_q() returns the value an 8-bit
// activation is approximated by, found by growing the shift until the value fits the
// window; pair_dot() applies the vSPARQ case rule to a pair and returns the exact
// integer the hardware must add to its partial sum. lane_val() decodes one lane word
// (data, ShiftCtrl, MuxCtrl) against a weight pair.
package sparq_ref_pkg;

  function automatic int step_of(int n, int nopt);
    return (8 - n) / (nopt - 1);
  endfunction

  // approximation of x kept in a win-bit window, placements every `step` bits
  function automatic int bsparq_q(int x, int win, int step, bit rnd);
    int s, q;
    s = 0;
    while ((s + win < 8) && (x >= (1 << (s + win)))) s += step;
    q = x / (1 << s);
    if (rnd && s > 0 && ((x % (1 << s)) >= (1 << (s - 1)))) q = q + 1;
    if (q > (1 << win) - 1) q = (1 << win) - 1;
    return q * (1 << s);
  endfunction

  // shift (in bits) chosen for x
  function automatic int bsparq_shift(int x, int win, int step);
    int s;
    s = 0;
    while ((s + win < 8) && (x >= (1 << (s + win)))) s += step;
    return s;
  endfunction

  function automatic int pair_dot(int a0, int a1, int w0, int w1, int n, int nopt, bit rnd, bit vs);
    int st;
    st = step_of(n, nopt);
    if (vs && a1 == 0) return bsparq_q(a0, 2 * n, st, rnd) * w0;
    if (vs && a0 == 0) return bsparq_q(a1, 2 * n, st, rnd) * w1;
    return bsparq_q(a0, n, st, rnd) * w0 + bsparq_q(a1, n, st, rnd) * w1;
  endfunction

  // lane = {mux, sc[sb-1:0], data[n-1:0]}
  function automatic int lane_val(int lane, int n, int nopt, int w0, int w1);
    int sb, data, sc, mux;
    sb   = $clog2(nopt);
    data = lane % (1 << n);
    sc   = (lane / (1 << n)) % (1 << sb);
    mux  = (lane / (1 << (n + sb))) % 2;
    return data * (mux != 0 ? w1 : w0) * (1 << (sc * step_of(n, nopt)));
  endfunction

  // an activation drawn with many zeros and a bell-like spread of magnitudes
  function automatic int rand_act();
    int r;
    r = $urandom_range(0, 99);
    if (r < 40) return 0;
    if (r < 70) return $urandom_range(1, 15);
    if (r < 90) return $urandom_range(16, 63);
    return $urandom_range(64, 255);
  endfunction

  function automatic int rand_wgt();
    return $urandom_range(0, 255) - 128;
  endfunction

endpackage
