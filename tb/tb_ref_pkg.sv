// tb_ref_pkg -- reference arithmetic for the testbenches, written apart from
// the RTL: the ideal transfer of the analog chain (nibble MAC -> V_mac ->
// surviving delay stages -> TDC code) and the two-cycle 8x8-bit combination.
//   V_mac = 800 mV - floor(S * 600 / 2025)   (clipped to 200 mV)
//   stages reached n = floor((V_mac - 200) / 40), 0..15
//   code = 15 - n
//   full = c(LL) + 16 c(LH) + 16 c(HL) + 256 c(HH), result = min(full/32, 255)
// where c(ab) is the code of IFM nibble a times weight nibble b.
package tb_ref_pkg;

  function automatic int ref_vmac(int s);
    real v;
    v = 800.0 - $floor(real'(s) * 600.0 / 2025.0);
    if (v < 200.0) v = 200.0;
    return int'(v);
  endfunction

  function automatic int ref_code_from_v(int v);
    int n;
    if (v <= 200) n = 0;
    else if (v >= 800) n = 15;
    else n = int'($floor(real'(v - 200) / 40.0));
    return 15 - n;
  endfunction

  function automatic int ref_code(int s);
    return ref_code_from_v(ref_vmac(s));
  endfunction

  // Nibble MAC of nine 4-bit inputs and nine 4-bit weight nibbles.
  function automatic int ref_nib_mac(input int x[9], input int w[9]);
    int s = 0;
    for (int i = 0; i < 9; i++) s += x[i] * w[i];
    return s;
  endfunction

  function automatic int ref_full(input int ifm[9], input int wt[9]);
    int xl[9], xh[9], wl[9], wh[9];
    for (int i = 0; i < 9; i++) begin
      xl[i] = ifm[i] % 16; xh[i] = ifm[i] / 16;
      wl[i] = wt[i] % 16;  wh[i] = wt[i] / 16;
    end
    return ref_code(ref_nib_mac(xl, wl)) + 16 * ref_code(ref_nib_mac(xl, wh))
         + 16 * ref_code(ref_nib_mac(xh, wl)) + 256 * ref_code(ref_nib_mac(xh, wh));
  endfunction

  function automatic int ref_out(int full);
    return (full / 32 > 255) ? 255 : full / 32;
  endfunction

endpackage
