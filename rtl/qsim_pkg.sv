// qsim_pkg: types and constants shared by the state-vector gate kernel.
//
// An amplitude of the state vector is a complex number held as two IEEE-754
// single-precision floats (real and imaginary part), 64 bits in all. The packing
// {im, re} with the real part in bits [31:0] is this design's own choice.
// Qubit indices (target, controls, register size) are carried in QIDX_W bits,
// enough for the 32-bit iteration and address indices used throughout.
package qsim_pkg;

  localparam int unsigned QIDX_W = 6;

  typedef logic [QIDX_W-1:0] qidx_t;

  typedef struct packed {
    logic [31:0] im;
    logic [31:0] re;
  } cfloat_t;

  // Flip the sign of a single-precision float (exact, no rounding).
  function automatic logic [31:0] fneg(input logic [31:0] x);
    return {~x[31], x[30:0]};
  endfunction

endpackage
