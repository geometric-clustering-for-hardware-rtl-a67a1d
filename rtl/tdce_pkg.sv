// tdce_pkg -- shared types, constants and arithmetic of the Time-Domain
// Clustered Equalizer (TDCE).
//
// Every sample, pre-summed value, clustered tap and output sample is a complex
// number whose real and imaginary parts are signed fixed-point words of
// DATA_W = 16 bits with 5 integer bits (sign included) and FRAC_W = 11
// fractional bits. The word length and integer bits are those of the
// published FPGA implementation; treating the sign as one of the 5 integer
// bits, wrapping on overflow and truncating products are this design's own
// choices (they match the default behaviour of HLS fixed-point types).
//
// cadd() adds two complex words with two's-complement wrap-around.
// cmul() multiplies two complex words with four real products, keeps the
// full-precision sums and truncates (arithmetic shift right by FRAC_W, then
// keeps the low DATA_W bits) back to the common format.
package tdce_pkg;

  localparam int DATA_W = 16;  // word length of each real part
  localparam int FRAC_W = 11;  // fractional bits (5 integer bits remain)

  // Default configuration: TDCE KNN for 4 spans (320 km) of fibre, the case
  // the paper analyses in most detail (filter size, clusters, parallelism).
  localparam int DEF_M  = 97;  // filter size M_TDCE
  localparam int DEF_L  = 20;  // parallel samples per block L_KNN
  localparam int DEF_LP = 2;   // parallel complex multiplications L_P-KNN
  localparam int DEF_NC = 10;  // clusters N_C(KNN)

  typedef logic signed [DATA_W-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  localparam cplx_t CPLX_ZERO = '{re: '0, im: '0};

  function automatic cplx_t cadd(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re + b.re;
    r.im = a.im + b.im;
    return r;
  endfunction

  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    logic signed [2*DATA_W-1:0] rr, ii, ri, ir;
    logic signed [2*DATA_W:0] pr, pi;
    cplx_t r;
    rr = a.re * b.re;
    ii = a.im * b.im;
    ri = a.re * b.im;
    ir = a.im * b.re;
    pr = (2*DATA_W+1)'(rr) - (2*DATA_W+1)'(ii);
    pi = (2*DATA_W+1)'(ri) + (2*DATA_W+1)'(ir);
    r.re = pr[FRAC_W +: DATA_W];  // arithmetic shift right by FRAC_W, keep DATA_W bits
    r.im = pi[FRAC_W +: DATA_W];
    return r;
  endfunction

endpackage
