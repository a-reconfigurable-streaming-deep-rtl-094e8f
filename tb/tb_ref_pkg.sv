// tb_ref_pkg: reference arithmetic for the accelerator testbenches.
//
// Fixed-point helpers that follow the documented number format (16-bit
// Q8.8 data, products rounded to nearest and saturated) and the layer
// command encoding. They are written from the format's definition, not
// from the RTL.
package tb_ref_pkg;
  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // Round a sum of Q8.8 x Q8.8 products (Q16.16) to Q8.8.
  function automatic int rnd(input longint v);
    longint r;
    r = v + 128;
    r = (r >= 0) ? (r >> 8) : -((-r + 255) >> 8);
    return sat(r);
  endfunction

  function automatic logic [15:0] cmd(input int op, input int payload);
    return 16'((op << 12) | (payload & 12'hfff));
  endfunction

  function automatic int mode_word(input bit k1x1, input int stride, input bit relu,
                                   input bit pool, input bit pool3, input bit in_set, input int pad);
    int sl;
    sl = (stride == 4) ? 2 : (stride == 2) ? 1 : 0;
    return (pad << 7) | (int'(in_set) << 6) | (int'(pool3) << 5) | (int'(pool) << 4)
         | (int'(relu) << 3) | (sl << 1) | int'(k1x1);
  endfunction
endpackage
