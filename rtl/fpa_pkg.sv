// fpa_pkg: constants and sizing functions shared by the adder and the
// multiplier built on it.
//
// DEFAULT_N is the operand width the design is worked out for (64 bits, so
// products and the wide adder are 128 bits). count_width(m) is the number of
// bits that hold a count of up to m ones, which fixes how many rows a
// quantizer stage turns m rows into.
package fpa_pkg;

  localparam int unsigned DEFAULT_N = 64;

  // Bits needed to write any count 0..m in binary.
  function automatic int unsigned count_width(input int unsigned m);
    return $clog2(m + 1);
  endfunction

endpackage
