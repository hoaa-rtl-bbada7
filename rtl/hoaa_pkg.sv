// hoaa_pkg: constants and helper functions shared by the HOAA processing
// engine.
//
// It holds the hyperbolic CORDIC tables: the shift schedule (1, 2, 3, 4, 4,
// 5, ..., 13, 13, ... with the classic repeats of iterations 4 and 13 that
// hyperbolic CORDIC needs to converge), the angles atanh(2^-i) and the
// inverse CORDIC gain 1/K_h. The angles and the gain are stored once in
// Q2.30 and shifted down to the fraction width a user asks for, so every
// constant here follows from the formula next to it:
//   ATANH_Q30[i] = round(atanh(2^-i) * 2^30)
//   INV_KH_Q30   = round(2^30 / prod_k sqrt(1 - 2^(-2*s_k)))
// None of these numbers is printed in the paper; they are the standard
// CORDIC constants.
package hoaa_pkg;

  // Largest shift the angle table covers.
  localparam int unsigned MAX_SHIFT = 16;

  localparam logic [31:0] ATANH_Q30 [1:MAX_SHIFT] = '{
    32'd589812981, 32'd274247419, 32'd134923406, 32'd67196451,
    32'd33565361,  32'd16778582,  32'd8388779,   32'd4194325,
    32'd2097155,   32'd1048576,   32'd524288,    32'd262144,
    32'd131072,    32'd65536,     32'd32768,     32'd16384
  };

  // 1/K_h for the schedule 1..14 with 4 and 13 repeated, 1.2074970...
  localparam logic [31:0] INV_KH_Q30 = 32'd1296540103;

  // Number of micro-rotations for a CORDIC whose last shift is max_shift:
  // one per shift, plus one repeat at 4 and one at 13.
  function automatic int unsigned cordic_iters(input int unsigned max_shift);
    int unsigned n;
    n = max_shift;
    if (max_shift >= 4)  n++;
    if (max_shift >= 13) n++;
    return n;
  endfunction

  // Shift amount of micro-rotation k (k = 0 .. cordic_iters()-1).
  function automatic int unsigned cordic_shift(input int unsigned k);
    int unsigned s;
    s = k + 1;           // k = 0..3 -> 1..4
    if (k >= 4)  s = k;  // second 4, then 5, 6, ...
    if (k >= 14) s = k - 1;  // second 13, then 14, ...
    return s;
  endfunction

  // atanh(2^-s) rounded to frac fraction bits.
  function automatic logic [31:0] atanh_q(input int unsigned s, input int unsigned frac);
    logic [31:0] v;
    v = (s >= 1 && s <= MAX_SHIFT) ? ATANH_Q30[s] : 32'd0;
    return (v + (32'd1 << (29 - frac))) >> (30 - frac);
  endfunction

  // Inverse hyperbolic gain rounded to frac fraction bits.
  function automatic logic [31:0] inv_kh_q(input int unsigned frac);
    return (INV_KH_Q30 + (32'd1 << (29 - frac))) >> (30 - frac);
  endfunction

  // Largest |z| the schedule can rotate through (sum of its angles), less
  // one LSB, at frac fraction bits.
  function automatic logic [31:0] cordic_zmax(input int unsigned frac);
    logic [31:0] acc;
    acc = '0;
    for (int unsigned k = 0; k < cordic_iters(frac); k++)
      acc += atanh_q(cordic_shift(k), frac);
    return acc - 32'd1;
  endfunction

endpackage
