// pack_ref_pkg -- integer reference models used by the testbenches.
//
// packed_mult_ref() evaluates a packed outer product the long way: it forms
// the packed operands as integers, multiplies them, adds the approximate
// correction word if asked, wraps to 48 bits and then cuts each result out,
// applying round-half-up (full correction) or MSB restoration as selected.
// packed_mult_ref_w() does the same with a width per element; the operands
// must already lie in the range of their widths.
// It works on 64-bit integers only and shares no code with the RTL.
package pack_ref_pkg;

  typedef int int_arr_t [];

  function automatic longint sx(longint v, int w);
    return (v <<< (64 - w)) >>> (64 - w);
  endfunction

  function automatic longint ux(longint v, int w);
    return v & ((64'(1) << w) - 1);
  endfunction

  // mode: 0 none, 1 approximate, 2 full; mr: apply MSB restoration
  function automatic int_arr_t packed_mult_ref(
      int na, int a_w, int w_w, int_arr_t aoff, int_arr_t woff,
      int_arr_t a, int_arr_t w, int mode, bit mr);
    int_arr_t awd, wwd;
    awd = new[na];
    wwd = new[2];
    foreach (awd[i]) awd[i] = a_w;
    foreach (wwd[j]) wwd[j] = w_w;
    return packed_mult_ref_w(na, awd, wwd, aoff, woff, a, w, mode, mr);
  endfunction

  function automatic int_arr_t packed_mult_ref_w(
      int na, int_arr_t awd, int_arr_t wwd, int_arr_t aoff, int_arr_t woff,
      int_arr_t a, int_arr_t w, int mode, bit mr);
    int_arr_t r;
    longint bp = 0, adp = 0, p, f;
    int nr = 2 * na, rw;
    int roff [];
    roff = new[nr];
    r = new[nr];
    for (int n = 0; n < nr; n++) roff[n] = aoff[n % na] + woff[n / na];
    for (int i = 0; i < na; i++) bp += longint'(a[i]) <<< aoff[i];
    for (int j = 0; j < 2; j++) adp += longint'(w[j]) * (64'(1) << woff[j]);
    adp = sx(adp, 27);
    p = bp * adp;
    if (mode == 1)
      for (int n = 1; n < nr; n++)
        if (w[(n - 1) / na] < 0) p += 64'(1) << roff[n];
    p = ux(p, 48);
    for (int n = 0; n < nr; n++) begin
      rw = awd[n % na] + wwd[n / na];
      f = p >> roff[n];
      if (mode == 2 && roff[n] > 0) f += (p >> (roff[n] - 1)) & 1;
      if (mr && n < nr - 1 && roff[n + 1] - roff[n] < rw) begin
        int k = rw - (roff[n + 1] - roff[n]);
        longint prod = longint'(a[(n + 1) % na]) * longint'(w[(n + 1) / na]);
        f -= ux(prod, k) << (rw - k);
      end
      r[n] = int'(sx(f, rw));
    end
    return r;
  endfunction

endpackage
