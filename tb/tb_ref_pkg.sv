// tb_ref_pkg: reference models shared by the testbenches, written
// independently of the RTL: the frozen mismatch of an analog element, the
// xorshift32 step, the weight-to-cell mapping and a binary GRU timestep.
package tb_ref_pkg;

  localparam int LVL = 16;   // units per cell level

  // Mismatch value in [-mag, mag] for element idx: multiplicative hash,
  // xor-shift, second multiply, xor-shift, reduced modulo 2*mag+1.
  function automatic int ref_mismatch(int idx, int seed, int mag);
    longint unsigned h;
    if (mag <= 0) return 0;
    h = ((longint'(idx) + longint'(seed) * 7919) * 64'h9E3779B1) & 64'hFFFF_FFFF;
    h = h ^ (h >> 15);
    h = (h * 64'h85EBCA6B) & 64'hFFFF_FFFF;
    h = h ^ (h >> 13);
    return int'(h % longint'(2 * mag + 1)) - mag;
  endfunction

  function automatic int unsigned ref_xorshift(int unsigned s);
    s ^= s << 13;
    s ^= s >> 17;
    s ^= s << 5;
    return s;
  endfunction

  // Decision of sense-amp i: sign of the signal plus the offset with the
  // sign chosen by the polarity bit (0: +N_OS, 1: -N_OS).
  function automatic bit ref_sense(int bl, bit pol, int i, int seed, int os_max);
    int os;
    os = ref_mismatch(i, seed, os_max);
    return (bl + (pol ? -os : os)) > 0;
  endfunction

endpackage
