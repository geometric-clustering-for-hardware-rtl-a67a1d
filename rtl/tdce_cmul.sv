// tdce_cmul -- complex multiplier of the simplified dot-product.
//
// Combinational product of a pre-summed value and a clustered tap, computed
// from four real products with full-precision sums and truncated back to the
// 16-bit, 11-fractional-bit format (tdce_pkg::cmul). The dot-product holds LP
// of these.
module tdce_cmul
  import tdce_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t p
);
  assign p = cmul(a, b);
endmodule
