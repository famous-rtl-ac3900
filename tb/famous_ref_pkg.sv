// famous_ref_pkg: reference arithmetic for the testbenches.
//
// A software model of the accelerator's number formats, written from their
// definitions rather than from the RTL: 8-bit requantisation, the base-2
// exponential with its 16-entry fraction table computed here from
// 2^(-f/16), and the row softmax with its reciprocal normalisation.
package famous_ref_pkg;

  function automatic int rq(longint v, int sh);
    longint s = v >>> sh;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  function automatic int exp2_tab(int f);
    real r = 32768.0 * (2.0 ** (-real'(f) / 16.0));
    return int'($floor(r + 0.5));
  endfunction

  function automatic longint exp_ref(longint d);
    longint u, ip;
    if (d > 65535) d = 65535;
    u  = (d * 23637) / 16384;
    ip = u / 16;
    if (ip >= 16) return 0;
    return longint'(exp2_tab(int'(u % 16))) / (longint'(1) << ip);
  endfunction

  // softmax of one row of scores s[0..L-1] (row index row for the mask)
  function automatic void softmax_row(input longint s[], input int L, input int row,
                                      input bit mask, input int scale, output int p[]);
    longint y[], e[], m, sum, r, v;
    bit first = 1;
    y = new[L]; e = new[L]; p = new[L];
    m = 0;
    for (int t = 0; t < L; t++) begin
      y[t] = (s[t] * longint'(scale)) >>> 16;
      if (!(mask && t > row) && (first || y[t] > m)) begin m = y[t]; first = 0; end
    end
    sum = 0;
    for (int t = 0; t < L; t++) begin
      e[t] = (mask && t > row) ? 0 : exp_ref(m - y[t]);
      sum += e[t];
    end
    r = (longint'(1) << 31) / sum;
    for (int t = 0; t < L; t++) begin
      v = (e[t] * r + (longint'(1) << 22)) >>> 23;
      p[t] = (v > 255) ? 255 : int'(v);
    end
  endfunction

endpackage
