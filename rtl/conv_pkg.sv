// conv_pkg: constants shared by the 3x3 convolution blocks.
//
// Every block computes a 3x3 kernel over a 3x3 window, so it works through
// TAPS = 9 products; tap t covers window position row = t/3, col = t%3.
// The full-precision sum of nine DW x CW signed products needs
// DW + CW + GUARD bits, with GUARD = ceil(log2(9)) = 4 (one bit more than
// strictly needed, kept as the conventional guard for a 9-term sum).
package conv_pkg;
  localparam int unsigned TAPS    = 9;
  localparam int unsigned GUARD   = $clog2(TAPS);   // growth of a 9-term sum

  // Width of a full-precision 3x3 convolution result.
  function automatic int unsigned result_width(int unsigned dw, int unsigned cw);
    return dw + cw + GUARD;
  endfunction
endpackage
