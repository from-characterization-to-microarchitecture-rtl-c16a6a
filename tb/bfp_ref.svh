// bfp_ref.svh -- independent reference functions for the converter tests:
// BF16 block -> BFP (shared exponent = max, mantissa = (1.f) >> (d+1) with
// sign) and (accumulator, exponent sum) -> FP32 packing.
  function automatic int ref_emax(input bf16_t v[], input int n);
    int e;
    e = 0;
    for (int i = 0; i < n; i++) if (int'(v[i].exp) > e) e = int'(v[i].exp);
    return e;
  endfunction

  function automatic int ref_mant(input bf16_t x, input int e);
    int sig, sh, mag;
    sig = (x.exp == 0) ? 0 : 128 + int'(x.frac);
    sh  = e - int'(x.exp) + 1;
    mag = (sh > 7) ? 0 : (sig >> sh);
    return x.sign ? -mag : mag;
  endfunction

  function automatic fp32_t ref_fp32(input longint acc, input int esum);
    fp32_t r;
    longint mag;
    int p, ex;
    r = '0;
    if (acc == 0) return r;
    r.sign = (acc < 0);
    mag = (acc < 0) ? -acc : acc;
    p = 0;
    while ((mag >> (p + 1)) != 0) p++;
    ex = esum + p - 139;
    if (ex <= 0) begin r.exp = 0; r.frac = 0; end
    else if (ex >= 255) begin r.exp = 8'hFF; r.frac = 0; end
    else begin
      r.exp  = 8'(ex);
      r.frac = 23'((mag << (23 - p)) & 64'h7F_FFFF);
    end
    return r;
  endfunction
