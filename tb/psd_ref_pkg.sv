// psd_ref_pkg: reference arithmetic and stimulus for the testbenches.
//
// Every function here recomputes what one unit of the engine should produce,
// written plainly over whole arrays with 64-bit integers and without any of
// the units' sequencing, so that a testbench can compare against it. It also
// makes synthetic preamplifier traces: a flat baseline followed by the
// running sum of a current pulse built from one to three triangles (one for
// a single-site-like event, several for a multi-site-like one) plus a little
// noise.
package psd_ref_pkg;
  import psd_pkg::*;

  localparam int MAXN = 1024;
  typedef longint trace_t [MAXN];

  // 9-point quadratic first-derivative Savitzky-Golay set, (k-5)/60 in 1.15
  function automatic coef_arr_t sg_deriv_coefs(int gain);
    coef_arr_t c;
    for (int k = 0; k < NTAPS; k++) c[k] = 16'((k - 4) * 32768 * gain / 60);
    return c;
  endfunction

  function automatic longint clip16(longint v, output bit sat);
    sat = 0;
    if (v > 32767)  begin sat = 1; return 32767;  end
    if (v < -32768) begin sat = 1; return -32768; end
    return v;
  endfunction

  // in-place filter result, computed from an untouched copy of the input
  function automatic void ref_sg(input trace_t u, input int len, input coef_arr_t c,
                                 input int sh, output trace_t s, output bit any_sat,
                                 input int taps = NTAPS);
    any_sat = 0;
    for (int n = 0; n < MAXN; n++) s[n] = u[n];
    for (int n = 0; n < len; n++) begin
      longint acc = 0; bit st;
      for (int k = 0; k < taps; k++) begin
        int idx = n - (taps - 1) / 2 + k;
        if (idx < 0) idx = 0;
        if (idx > len - 1) idx = len - 1;
        acc += longint'(c[k]) * u[idx];
      end
      s[n] = clip16(acc >>> sh, st);
      any_sat |= st;
    end
  endfunction

  function automatic void ref_peak(input trace_t j, input int len, output longint pv, output int pa);
    pv = j[0]; pa = 0;
    for (int i = 1; i < len; i++) if (j[i] > pv) begin pv = j[i]; pa = i; end
  endfunction

  function automatic void ref_cfd(input trace_t j, input int len, input longint pv, input int pa,
                                  input int pct, output int n0, output int n1);
    longint frac = (longint'(pct) * 65536 + 50) / 100;
    longint thr  = (pv * frac) >>> 16;
    n0 = pa; n1 = pa;
    while (n0 > 0 && j[n0-1] >= thr) n0--;
    while (n1 < len - 1 && j[n1+1] >= thr) n1++;
  endfunction

  function automatic void ref_area(input trace_t j, input int n0, input int n1,
                                   output int nmid, output longint f, output longint b);
    nmid = n0 + ((n1 - n0) >> 1);
    f = 0; b = 0;
    for (int i = n0; i <= n1; i++) if (i < nmid) f += j[i]; else b += j[i];
  endfunction

  function automatic void ref_moment(input trace_t j, input int n0, input int n1, input int nmid,
                                     output longint num, output bit ovf);
    longint m = 0;
    for (int i = n0; i <= n1; i++) m += j[i] * longint'((i - nmid) * (i - nmid));
    m *= 12;
    ovf = 0;
    if (m < 0)               begin num = 0;           ovf = 1; end
    else if (m > 64'hffffffff) begin num = 64'hffffffff; ovf = 1; end
    else num = m;
  endfunction

  // divisor scaling: shift so the value fits in w bits
  function automatic void ref_norm(input longint unsigned v, input int w,
                                   output longint unsigned sc, output int sh);
    int bl = 0;
    for (int b = 0; b < 64; b++) if (v[b]) bl = b + 1;
    sh = (bl > w) ? bl - w : 0;
    sc = v >> sh;
  endfunction

  function automatic void ref_div(input longint a, input longint d, input bit sgn,
                                  output longint q, output bit ovf);
    longint mag_a = (a < 0) ? -a : a;
    longint mag_d = (d < 0) ? -d : d;
    longint qm;
    bit neg = (a < 0) != (d < 0);
    if (mag_d == 0) begin
      ovf = 1;
      q = sgn ? (neg ? -32768 : 32767) : 65535;
      return;
    end
    qm = mag_a / mag_d;
    if (!sgn) begin
      ovf = qm > 65535; q = ovf ? 65535 : qm;
    end else begin
      ovf = neg ? (qm > 32768) : (qm > 32767);
      if (ovf) q = neg ? -32768 : 32767;
      else     q = neg ? -qm : qm;
    end
  endfunction

  // value * 2^15 from a quotient and its divisor shift
  function automatic longint to_q15(longint q, int sh);
    if (sh <= 15) return q * (longint'(1) << (15 - sh));
    return q >>> (sh - 15);
  endfunction

  function automatic int ref_bin(int width, longint aq, int ash, longint mq, int msh,
                                 int wbins, int abins, int mbins, int wshift);
    longint a15 = to_q15(aq, ash) + 32768;
    longint m15 = to_q15(mq, msh);
    int wb, ab, mb;
    if (a15 < 0) a15 = 0;
    if (a15 > 65535) a15 = 65535;
    if (m15 > 65535) m15 = 65535;
    wb = width >> wshift;
    if (wb > wbins - 1) wb = wbins - 1;
    ab = int'(a15) / (65536 / abins);
    mb = int'(m15) / (65536 / mbins);
    return (wb * abins + ab) * mbins + mb;
  endfunction

  // synthetic preamplifier trace: baseline, then the running sum of up to
  // three triangular current pulses, plus +-noise
  function automatic void make_trace(input int len, input int start, input int nsites,
                                     input int amp, input int noise, output trace_t q);
    longint cur [MAXN];
    for (int i = 0; i < MAXN; i++) cur[i] = 0;
    for (int s = 0; s < nsites; s++) begin
      int c = start + 8 + int'($urandom_range(0, 30));
      int w = 3 + int'($urandom_range(0, 8));
      int h = amp / nsites;
      for (int i = c - w; i <= c + w; i++)
        if (i >= 0 && i < len) cur[i] += h * (w - ((i < c) ? c - i : i - c)) / w;
    end
    q[0] = 1000;
    for (int i = 1; i < MAXN; i++)
      q[i] = (i < len) ? q[i-1] + cur[i] : 0;
    for (int i = 0; i < len; i++)
      q[i] += (noise > 0) ? longint'($urandom_range(0, 2 * noise)) - noise : 0;
  endfunction
endpackage
