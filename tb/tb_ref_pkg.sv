// tb_ref_pkg: reference arithmetic shared by the testbenches. Weight values
// are computed with integer multiplication, independently of the RTL shifts.
package tb_ref_pkg;
  import nbq_pkg::*;

  // Weight of an n-bit code, times 2^FRAC (an exact integer).
  function automatic longint wscaled(input int nbit, input int code);
    int frac = int'(frac_bits(nbit));
    int mag, s;
    longint w;
    if (nbit == 1) return code[0] ? -1 : 1;
    s   = (code >> (nbit - 1)) & 1;
    mag = code & ((1 << (nbit - 1)) - 1);
    if (mag == 0) return 0;
    w = 1;
    for (int i = 0; i < frac - (mag - 1); i++) w = w * 2;
    return (s != 0) ? -w : w;
  endfunction

  // Requantisation: floor(v / 2^frac), saturated to 16 bits.
  function automatic longint requant(input longint v, input int frac);
    longint d = 1;
    longint q;
    for (int i = 0; i < frac; i++) d = d * 2;
    q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;   // floor for negative values
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return q;
  endfunction
endpackage
