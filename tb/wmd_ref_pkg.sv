// wmd_ref_pkg: reference arithmetic for the WMD accelerator testbenches.
//
// Integer models, written independently of the RTL, of a Po2 coefficient
// (0 or +/-2^-k applied as a right shift that rounds towards minus
// infinity, i.e. floor division), of one F_0 row, of one F_gen row with the
// implicit diagonal 1, and of a whole PE (F_0 followed by n F_gen passes).
// Codes use the layouts documented in wmd_pkg.  Values are 64-bit, so the
// models never wrap.
package wmd_ref_pkg;

  function automatic longint floor_div_pow2(longint x, int k);
    longint d = longint'(1) << k;
    if (x >= 0) return x / d;
    return -((-x + d - 1) / d);
  endfunction

  function automatic longint po2(longint x, bit en, bit neg, int sh);
    longint q;
    if (!en) return 0;
    q = floor_div_pow2(x, sh);
    return neg ? -q : q;
  endfunction

  // random F_0 code: {nz, neg, sh}, z = largest shift (sh_w = 2 for z = 3)
  function automatic logic [3:0] rand_f0_code();
    return 4'($urandom_range(0, 15));
  endfunction

  // PE reference.  coef holds the codes as in wmd_pe; sizes are passed in.
  function automatic void pe_ref(input int s_w, input int m, input int e, input int p_max,
                                 input int sh_w, input int idx_w,
                                 input logic [4095:0] coef, input longint vin[],
                                 input int n_fgen, output longint res[]);
    int f0c = 2 + sh_w;
    int fgc = 1 + sh_w + idx_w;
    int f0_bits = m * s_w * f0c;
    int fg_bits = m * (e - 1) * fgc;
    longint v[], nv[];
    v = new[m];
    nv = new[m];
    for (int i = 0; i < m; i++) begin
      v[i] = 0;
      for (int j = 0; j < s_w; j++) begin
        int b = (i * s_w + j) * f0c;
        int sh = 0;
        for (int t = 0; t < sh_w; t++) sh |= int'(coef[b + t]) << t;
        v[i] += po2(vin[j], coef[b + f0c - 1], coef[b + f0c - 2], sh);
      end
    end
    for (int p = 0; p < n_fgen; p++) begin
      for (int i = 0; i < m; i++) begin
        nv[i] = v[i];
        for (int k = 0; k < e - 1; k++) begin
          int b = f0_bits + p * fg_bits + (i * (e - 1) + k) * fgc;
          int idx = 0, sh = 0;
          for (int t = 0; t < idx_w; t++) idx |= int'(coef[b + t]) << t;
          for (int t = 0; t < sh_w; t++) sh |= int'(coef[b + idx_w + t]) << t;
          if (idx < m) nv[i] += po2(v[idx], 1'b1, coef[b + fgc - 1], sh);
        end
      end
      v = nv;
      nv = new[m];
    end
    res = v;
  endfunction

endpackage
