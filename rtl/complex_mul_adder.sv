// complex_mul_adder: one "a*x + b*y" unit of the matrix multiplication
// module, in complex binary32: four real products per complex product,
// then the complex sum. Combinational; matrix_mult registers the results.
module complex_mul_adder
  import hqr_pkg::*;
(
  input  cplx_t a,
  input  cplx_t x,
  input  cplx_t b,
  input  cplx_t y,
  output cplx_t z
);

  assign z = c_add(c_mul(a, x), c_mul(b, y));

endmodule
