// gnn_ref_pkg: reference arithmetic for the testbenches.
//
// Table generators for the activation and exponential look-up tables, and a
// plain model of the look-up addressing, written with real arithmetic and
// floor() rather than the shifts the hardware uses.
package gnn_ref_pkg;

  // Entry i of a 256-entry table whose inputs step by 1/2^(8-shift), centred on 0.
  function automatic real lut_input(input int i, input int shift);
    return real'(i - 128) * real'(2 ** shift) / 256.0;
  endfunction

  function automatic int tanh_entry(input int i);
    return int'($floor($tanh(lut_input(i, 3)) * 256.0 + 0.5));
  endfunction

  function automatic int relu_entry(input int i);
    real x = lut_input(i, 3);
    return (x > 0.0) ? int'(x * 256.0) : 0;
  endfunction

  // e^x in Q16.8, at least 1 so a sum is never zero, at most 2^24-1.
  function automatic longint exp_entry(input int i);
    real v = $exp(lut_input(i, 4)) * 256.0;
    longint r = longint'($floor(v + 0.5));
    if (r < 1) r = 1;
    if (r > 64'd16777215) r = 64'd16777215;
    return r;
  endfunction

  // Table index the hardware should use for the Q8.8 input x.
  function automatic int lut_index(input int x, input int shift);
    int q = int'($floor(real'(x) / real'(2 ** shift)));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q + 128;
  endfunction

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Floor division by 2^n that does not rely on an arithmetic shift.
  function automatic longint floordiv(input longint v, input int n);
    longint d = longint'(1) << n;
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q = q - 1;
    return q;
  endfunction

endpackage
