// Reference model of the second-order sections for the testbenches.
//
// Written in direct form with plain integer arithmetic, independently of the transposed,
// time-multiplexed RTL:  y(n) = Q(clip(sum of the five individually rounded products)).
// Signal words: 25 fractional bits; coefficients: 22; products rounded half up to 36; the sum
// clipped to [-1, 1) and rounded half up to 25 fractional bits, saturating at full scale.
package iir_ref_pkg;

  function automatic longint rnd_shift(longint v, int sh);
    return (v + (longint'(1) <<< (sh - 1))) >>> sh;
  endfunction

  class sos_ref;
    longint b0, b1, b2, a0, a1;
    longint x1, x2, y1, y2;
    int     clips;

    function new();
      b0 = 0; b1 = 0; b2 = 0; a0 = 0; a1 = 0;
      clear();
      clips = 0;
    endfunction

    function void clear();
      x1 = 0; x2 = 0; y1 = 0; y2 = 0;
    endfunction

    function longint step(longint x);
      longint t, y;
      t = rnd_shift(b0 * x, 11) + rnd_shift(b1 * x1, 11) + rnd_shift(b2 * x2, 11)
        + rnd_shift(a0 * y1, 11) + rnd_shift(a1 * y2, 11);
      if (t > (longint'(1) <<< 36) - 1) begin t = (longint'(1) <<< 36) - 1; clips++; end
      if (t < -(longint'(1) <<< 36))    begin t = -(longint'(1) <<< 36);    clips++; end
      y = rnd_shift(t, 11);
      if (y > (longint'(1) <<< 25) - 1) y = (longint'(1) <<< 25) - 1;
      x2 = x1; x1 = x;
      y2 = y1; y1 = y;
      return y;
    endfunction
  endclass

  // Coefficient from a real value, 22 fractional bits, rounded.
  function automatic longint coef(real v);
    return longint'($rtoi(v * 4194304.0 + (v >= 0.0 ? 0.5 : -0.5)));
  endfunction

endpackage
