// Reference arithmetic for the testbenches, written independently of the RTL:
// forward-mode operand (low byte, sign-extended), power-of-two rescaling with
// round-half-up, saturation to 8 or 16 bits, and random stimulus helpers.
package tb_ref_pkg;
  function automatic longint ref_opnd(input int x, input bit fwd);
    int v;
    v = x & 16'hffff;
    if (fwd) begin v = v & 8'hff; if (v >= 128) v -= 256; end
    else if (v >= 32768) v -= 65536;
    return longint'(v);
  endfunction

  function automatic int ref_rq(input longint v, input int sh, input bit fwd);
    longint r, hi, lo;
    if (sh == 0) r = v;
    else begin
      // floor((v + 2^(sh-1)) / 2^sh)
      longint num, den;
      num = v + (longint'(1) << (sh - 1));
      den = longint'(1) << sh;
      r = num / den;
      if ((num % den != 0) && (num < 0)) r = r - 1;
    end
    hi = fwd ? 127 : 32767;
    lo = fwd ? -128 : -32768;
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return int'(r);
  endfunction

  function automatic int rnd_s(input int bits);
    int v;
    v = int'($urandom % (1 << bits));
    if (v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction
endpackage
