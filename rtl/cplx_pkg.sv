// cplx_pkg: constants and small helpers shared by the modulo-(2^(2n)+1)
// complex-residue datapath.
//
// The modulus 2^(2n)+1 factors over the Gaussian integers as (2^n+j)(2^n-j).
// A residue is carried as a pair of n-bit words, a real part and an
// imaginary part, whose integer value is  real + 2^n * imag  modulo
// 2^(2n)+1 (because 2^n = -+j modulo 2^n+-j, the same pair serves both
// conjugate moduli). N_PAPER is the channel width the design is centred on
// (n = 5, so the modulus is 1025); every module takes its own N parameter
// with this default.
package cplx_pkg;

  // Channel width n used as the default throughout (n = 5).
  parameter int unsigned N_PAPER = 5;

  // Width of the modulo-(2^(2n)+1) value: 2n+1 bits.
  function automatic int unsigned mod_width(int unsigned n);
    return 2 * n + 1;
  endfunction

endpackage
