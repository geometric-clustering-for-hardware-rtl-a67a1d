// tdce_input_window -- input reader of the summation stage ("READ L SAMPLES").
//
// The equalizer produces L consecutive output samples per block. Output j of
// a block needs the M input samples x[j .. j+M-1] of a window of M+L-1
// samples: the M-1 samples kept from earlier blocks followed by the L samples
// of the new block. When Control Unit 1 asserts load with an input block
// present (in_valid), the window register is loaded with the kept history and
// the L new samples, and the last M-1 samples of that window become the new
// history. Each shift pulse then moves the window by one sample, so at
// iteration i of the summation lane j presents x[i+j]: the L samples read in
// parallel with one cluster index, as in the parallelized summation.
//
// in_data[0] is the oldest of the L new samples. History resets to zero, so
// the first block is filtered as if preceded by silence (a choice of this
// design; the paper does not discuss start-up). Loading and shifting take one
// clock edge each; load has priority over shift.
module tdce_input_window
  import tdce_pkg::*;
#(
  parameter int M = tdce_pkg::DEF_M,  // filter size
  parameter int L = tdce_pkg::DEF_L,  // parallel output samples per block
  localparam int W = M + L - 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,          // accept in_data and restart the window
  input  cplx_t in_data [L],   // L new samples, [0] = oldest
  input  logic  shift,         // advance the window by one sample
  output cplx_t lane [L]       // x[i+j] for lane j at iteration i
);

  cplx_t win  [W];
  cplx_t hist [M-1 > 0 ? M-1 : 1];
  cplx_t nxt  [W];  // window formed by the kept history and the new block

  always_comb begin
    for (int k = 0; k < M-1; k++) nxt[k] = hist[k];
    for (int k = 0; k < L; k++) nxt[M-1+k] = in_data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < W; k++) win[k] <= CPLX_ZERO;
      for (int k = 0; k < M-1; k++) hist[k] <= CPLX_ZERO;
    end else if (load) begin
      for (int k = 0; k < W; k++) win[k] <= nxt[k];
      // new history = last M-1 samples of the window just loaded
      for (int k = 0; k < M-1; k++) hist[k] <= nxt[k+L];
    end else if (shift) begin
      for (int k = 0; k < W-1; k++) win[k] <= win[k+1];
      win[W-1] <= CPLX_ZERO;
    end
  end

  always_comb begin
    for (int j = 0; j < L; j++) lane[j] = win[j];
  end

endmodule
