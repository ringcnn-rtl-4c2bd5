// tb_ref_pkg: reference arithmetic for the eRingCNN testbenches.
//
// Bit-exact models written directly from the definitions, independent of the
// RTL structure: the Hadamard matrix entry H[i][k] = (-1)^popcount(i & k)
// (Sylvester order), the directional ReLU with component-wise Q-format shifts,
// round-to-nearest and 8-bit saturation.
package tb_ref_pkg;

  function automatic int hsign(input int i, input int k);
    return ($countones(i & k) % 2) ? -1 : 1;
  endfunction

  function automatic int sat8(input longint v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // x = Q((H relu(H (y << s))) >> t), or Q((y << s) >> t) without the ReLU
  function automatic void dir_relu_ref(input int n, input longint y[4], input int s[4],
                                       input int t[4], input bit relu_en,
                                       output int x[4], output bit saturated);
    longint a[4], h[4], z[4];
    saturated = 0;
    for (int i = 0; i < n; i++) a[i] = y[i] * (longint'(1) << (s[i] > 5 ? 5 : s[i]));
    if (relu_en) begin
      for (int i = 0; i < n; i++) begin
        h[i] = 0;
        for (int k = 0; k < n; k++) h[i] += hsign(i, k) * a[k];
        if (h[i] < 0) h[i] = 0;
      end
      for (int i = 0; i < n; i++) begin
        z[i] = 0;
        for (int k = 0; k < n; k++) z[i] += hsign(i, k) * h[k];
      end
    end else begin
      for (int i = 0; i < n; i++) z[i] = a[i];
    end
    for (int i = 0; i < n; i++) begin
      int tt;
      longint q;
      tt = t[i] > 17 ? 17 : t[i];
      q = (tt == 0) ? z[i] : ((z[i] + (longint'(1) << (tt - 1))) >>> tt);
      x[i] = sat8(q);
      if (q > 127 || q < -128) saturated = 1;
    end
  endfunction

endpackage
