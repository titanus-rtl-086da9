// tb_ref.svh -- reference arithmetic for the testbenches, written with real
// numbers so that it is independent of the integer datapath it checks.
// Rounding is half away from zero; scales are in units of 1/256.

function automatic int ref_rnd(input real r);
  return (r >= 0.0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
endfunction

function automatic int ref_qmax(input int bits);
  return (1 << bits) - 1;
endfunction

function automatic int ref_scale(input int rmin, input int rmax, input int bits);
  int s;
  s = (rmax < rmin) ? 0 : ref_rnd(real'(rmax - rmin) * 256.0 / real'(ref_qmax(bits)));
  if (s < 1) s = 1;
  if (s > 65535) s = 65535;
  return s;
endfunction

function automatic int ref_zp(input int rmin, input int s, input int bits);
  int z;
  z = ref_rnd(-real'(rmin) * 256.0 / real'(s));
  if (z < 0) z = 0;
  if (z > ref_qmax(bits)) z = ref_qmax(bits);
  return z;
endfunction

function automatic int ref_quant(input int x, input int s, input int z, input int bits);
  int q;
  q = ref_rnd(real'(x) * 256.0 / real'(s)) + z;
  if (q < 0) q = 0;
  if (q > ref_qmax(bits)) q = ref_qmax(bits);
  return q;
endfunction

function automatic int ref_sat8(input longint v);
  if (v > 127) return 127;
  if (v < -128) return -128;
  return int'(v);
endfunction

function automatic int ref_deq(input int q, input int z, input int s);
  return ref_sat8(ref_rnd(real'(q - z) * real'(s) / 256.0));
endfunction
