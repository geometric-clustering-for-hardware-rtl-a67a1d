// tdce_top -- Time-Domain Clustered Equalizer (TDCE) for chromatic dispersion
// compensation.
//
// The equalizer computes the M-tap complex FIR filter
//     y[n] = sum over i = 0 .. M-1 of x[n+i] * g_C[Q[i]]
// in which the M taps have been replaced by NC << M cluster centroids g_C and
// Q[i] names the cluster of tap position i. By the distributive law, samples
// that share a cluster are summed first (pre-summed values x_S) and each sum
// is multiplied once: NC complex multiplications per output instead of M.
//
// Blocks of L consecutive outputs are made at once, in three stages:
//   1. Summation (Control Unit 1, tdce_summation): M cycles, each adding L
//      consecutive input samples into L banks at the cluster index Q[i].
//   2. Memory Transfer (tdce_mem_transfer): NC cycles, copying the L banks to
//      L secondary banks (tdce_xs_bank) to free the summation banks.
//   3. Simplified dot-product (Control Unit 2, tdce_dot_product): NC*L/LP
//      cycles of LP complex multiply-accumulates, then L/LP cycles streaming
//      the L outputs, LP per cycle.
// The Dataflow Controller (tdce_dataflow_ctrl) overlaps stage 1 of block k+1
// with stage 3 of block k. With the defaults (4 spans of fibre, clustering by
// KNN: M = 97, L = 20, NC = 10, LP = 2) both sides take 110 cycles per block,
// so a block of 20 outputs leaves every 110 cycles in steady state.
//
// Interface: input blocks of L complex samples (in_data[0] oldest) with a
// valid/ready handshake; outputs LP samples per cycle with out_valid and no
// back-pressure; output block k holds y for the window made of the M-1
// samples before input block k and block k itself (history starts at zero).
// Q and g_C come from offline clustering software and are loaded through the
// q_cfg_* and g_cfg_* ports while the equalizer is idle.
// Data are 16-bit fixed point with 5 integer bits, as in the paper; the
// handshakes and reset behaviour are this design's choices.
module tdce_top
  import tdce_pkg::*;
#(
  parameter int M  = DEF_M,   // filter size M_TDCE, 97 (4 spans)
  parameter int L  = DEF_L,   // parallel samples per block L_KNN, 20
  parameter int LP = DEF_LP,  // parallel complex multiplications L_P-KNN, 2
  parameter int NC = DEF_NC,  // clusters N_C(KNN), 10
  localparam int AW = (M  > 1) ? $clog2(M)  : 1,
  localparam int IW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // input stream
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t         in_data [L],
  // configuration: sample mapping Q
  input  logic          q_cfg_we,
  input  logic [AW-1:0] q_cfg_addr,
  input  logic [IW-1:0] q_cfg_idx,
  // configuration: clustered taps g_C
  input  logic          g_cfg_we,
  input  logic [IW-1:0] g_cfg_addr,
  input  cplx_t         g_cfg_data,
  // output stream
  output logic          out_valid,
  output cplx_t         out_data [LP],
  output logic          busy
);

  logic          sum_en, sum_done, sum_busy;
  logic          xfer_start, xfer_busy, xfer_done;
  logic          dot_start, dot_ready, dot_busy, mac_done;
  logic          xs_full, sec_full, sec_in_use;
  logic [IW-1:0] xfer_src_addr, xfer_dst_addr, sec_addr, g_addr;
  logic          xfer_dst_we;
  cplx_t         xfer_src_data [L];
  cplx_t         xfer_dst_data [L];
  cplx_t         sec_data      [L];
  cplx_t         sec_unused    [L];
  cplx_t         g_data;

  tdce_dataflow_ctrl u_ctrl (
    .clk, .rst_n,
    .sum_en, .sum_done,
    .xfer_start, .xfer_busy, .xfer_done,
    .dot_start, .dot_ready, .mac_done,
    .xs_full, .sec_full, .sec_in_use
  );

  tdce_summation #(.M(M), .L(L), .NC(NC)) u_cu1 (
    .clk, .rst_n,
    .en        (sum_en),
    .in_valid, .in_ready, .in_data,
    .q_cfg_we, .q_cfg_addr, .q_cfg_idx,
    .busy      (sum_busy),
    .done      (sum_done),
    .xfer_addr (xfer_src_addr),
    .xfer_data (xfer_src_data)
  );

  tdce_mem_transfer #(.L(L), .NC(NC)) u_xfer (
    .clk, .rst_n,
    .start    (xfer_start),
    .busy     (xfer_busy),
    .done     (xfer_done),
    .src_addr (xfer_src_addr),
    .src_data (xfer_src_data),
    .dst_we   (xfer_dst_we),
    .dst_addr (xfer_dst_addr),
    .dst_data (xfer_dst_data)
  );

  for (genvar j = 0; j < L; j++) begin : g_sec
    tdce_xs_bank #(.NC(NC)) u_sec_bank (
      .clk,
      .we      (xfer_dst_we),
      .waddr   (xfer_dst_addr),
      .wdata   (xfer_dst_data[j]),
      .raddr_a (sec_addr),
      .rdata_a (sec_data[j]),
      .raddr_b ('0),
      .rdata_b (sec_unused[j])
    );
  end

  tdce_ctap_mem #(.NC(NC)) u_gc (
    .clk, .rst_n,
    .cfg_we   (g_cfg_we),
    .cfg_addr (g_cfg_addr),
    .cfg_data (g_cfg_data),
    .rd_addr  (g_addr),
    .rd_data  (g_data)
  );

  tdce_dot_product #(.L(L), .LP(LP), .NC(NC)) u_cu2 (
    .clk, .rst_n,
    .start    (dot_start),
    .ready    (dot_ready),
    .busy     (dot_busy),
    .sec_addr,
    .sec_data,
    .g_addr,
    .g_data,
    .mac_done,
    .out_valid,
    .out_data
  );

  assign busy = sum_busy || xfer_busy || dot_busy || xs_full || sec_full || sec_in_use;

endmodule
