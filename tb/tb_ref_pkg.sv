// tb_ref_pkg: reference arithmetic for the testbenches, written apart from
// the RTL.
//
// Values are held as plain integers (longint) and the fixed-point steps are
// spelled out as integer division by powers of two with floor rounding:
//   distance   = floor(sqrt(floor(sum (x-y)^2 / 2^10)))   Q10.8, max 2^18-1
//   score      = min(floor(distance * n / 2^6), 2^18-1)    Q16.2
//   y*n        = clamp(floor(y * n / 2^5))                 Q10.8
//   y*n + x    = clamp(y*n + floor(x / 2^5))               Q10.8
//   1/n        = round(2^17 / n)                           Q1.17
//   new anchor = clamp(floor(sum * inv / 2^12))            Q5.13
// where clamp limits to the signed 18-bit range. The square root uses real
// arithmetic and is then corrected to the exact integer floor.
package tb_ref_pkg;

  function automatic longint fdiv(input longint a, input longint b);  // floor(a/b), b > 0
    longint q;
    q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  function automatic longint clamp_s(input longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  function automatic longint isqrt_ref(input longint v);
    longint r;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic longint dist_ref(input longint x[], input longint y[]);
    longint s, r;
    s = 0;
    foreach (x[j]) s += (x[j] - y[j]) * (x[j] - y[j]);
    r = isqrt_ref(s / 1024);
    return (r > 262143) ? 262143 : r;
  endfunction

  function automatic longint score_ref(input longint d, input longint n);
    longint v;
    v = (d * n) / 64;
    return (v > 262143) ? 262143 : v;
  endfunction

  function automatic longint inv_ref(input longint n);
    if (n == 0) return 0;
    return (2 * 131072 + n) / (2 * n);   // round(2^17/n)
  endfunction

  // One anchor update; nmax is the counter ceiling (inverse table depth - 1).
  function automatic void update_ref(inout longint y[], inout longint n,
                                     input longint x[], input longint nmax);
    longint nm, nn, s;
    nm = (n >= nmax) ? nmax - 1 : n;
    nn = (n >= nmax) ? nmax : n + 1;
    foreach (y[j]) begin
      s    = clamp_s(clamp_s(fdiv(y[j] * nm, 32)) + fdiv(x[j], 32));
      y[j] = clamp_s(fdiv(s * inv_ref(nn), 4096));
    end
    n = nn;
  endfunction

endpackage
