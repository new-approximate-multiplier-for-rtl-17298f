// Arithmetic reference model of the Broken-Booth multiplier, for testbenches.
//
// Works on integers rather than bits: row j of the radix-4 recoding has digit
//   d_j = -2*y[2j+1] + y[2j] + y[2j-1]   (y[-1] = 0)
// and value d_j * x * 4^j. Breaking at level V keeps only the multiples of 2^V:
//   Type0: floor(d_j*x*4^j / 2^V) * 2^V
//   Type1: for d_j < 0 the inverted row is (d_j*x - 1)*4^j; it is broken the
//          same way and 4^j is added back only when 2j >= V.
// Digit -0 (bits 111) counts as zero. Valid for WL up to 30.
package bbm_ref_pkg;

  function automatic longint floor_break(input longint v, input int vbl);
    return (v >>> vbl) <<< vbl;
  endfunction

  function automatic longint ref_mult(input longint x, input longint y,
                                      input int wl, input int vbl, input bit type1);
    longint acc = 0;
    longint d, w, row;
    for (int j = 0; j < wl / 2; j++) begin
      d = -2 * ((y >>> (2 * j + 1)) & 1) + ((y >>> (2 * j)) & 1)
          + ((j == 0) ? 0 : ((y >>> (2 * j - 1)) & 1));
      w = longint'(1) <<< (2 * j);
      if (!type1 || d >= 0) begin
        acc += floor_break(d * x * w, vbl);
      end else begin
        row = (d * x - 1) * w;
        acc += floor_break(row, vbl);
        if (2 * j >= vbl) acc += w;
      end
    end
    return acc;
  endfunction

endpackage
