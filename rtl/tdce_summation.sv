// tdce_summation -- Control Unit 1 and the summation datapath of the TDCE.
//
// For a block of L output samples the clustered convolution needs, per
// output j and cluster w, the pre-summed value
//     x_S[j][w] = sum over { i : Q[i] = w } of x[i+j],   i = 0 .. M-1.
// Following the parallelized summation of the paper, the loop runs over the
// M tap positions only: iteration i reads one cluster index w = Q[i] and the
// L consecutive samples x[i .. i+L-1] at once, and lane j adds x[i+j] into
// position w of its own bank. The M iterations take M cycles whatever L is.
//
// Structure (Fig. "FPGA diagram", part a): the sample mapping memory Q, the
// input window ("READ L SAMPLES"), L adders ("L SUMS") and L memory banks of
// NC positions. The cluster index drives the read MUX and the write DEMUX of
// every bank (here: the read and write address of each bank).
// The loop is pipelined in two stages so that a new iteration starts every
// cycle: stage 1 reads Q[i] and the L samples into registers, stage 2 reads
// the banks at Q[i], adds and writes back in the same cycle (read-modify-write
// on asynchronous-read banks, so back-to-back updates of the same cluster
// need no forwarding).
// Clearing x_S to zero at the start of a block is done with a per-cluster
// "written" mask instead of writing NC zeros: a position not yet written in
// this block reads as zero, both for the adders and for the transfer port.
//
// Handshake and timing: in_ready is high when the Dataflow Controller enables
// the unit (en) and the unit is idle. A block is taken in the cycle in_valid
// and in_ready are both high; M issue cycles follow, and done pulses in the
// cycle of the last bank write, M+1 cycles after the block was taken. After
// done, the banks hold the block's x_S until the next block is taken; the
// Memory Transfer reads them through xfer_addr/xfer_data (port B).
// The valid/ready input handshake and the pipeline depth are this design's
// choices; the paper describes the loop and its one-iteration-per-cycle rate.
module tdce_summation
  import tdce_pkg::*;
#(
  parameter int M  = tdce_pkg::DEF_M,  // filter size
  parameter int L  = tdce_pkg::DEF_L,  // parallel output samples per block
  parameter int NC = tdce_pkg::DEF_NC,  // number of clusters
  localparam int AW = (M  > 1) ? $clog2(M)  : 1,
  localparam int IW = (NC > 1) ? $clog2(NC) : 1,
  localparam int CW = $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,            // enable from the Dataflow Controller
  // input stream, L samples per block
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t         in_data [L],
  // configuration of Q
  input  logic          q_cfg_we,
  input  logic [AW-1:0] q_cfg_addr,
  input  logic [IW-1:0] q_cfg_idx,
  // status
  output logic          busy,
  output logic          done,          // one-cycle pulse: x_S of the block complete
  // read port for the Memory Transfer
  input  logic [IW-1:0] xfer_addr,
  output cplx_t         xfer_data [L]
);

  typedef enum logic {S_IDLE, S_RUN} state_t;
  state_t state;

  logic [CW-1:0] cnt;       // iterations issued so far
  logic          load, issue;
  logic [IW-1:0] q_idx;
  cplx_t         lane [L];

  // pipeline register between stage 1 and stage 2
  logic          p_vld;
  logic [IW-1:0] p_idx;
  cplx_t         p_x [L];

  logic [NC-1:0] written;   // positions written since the block was taken

  cplx_t bank_rd_a [L];
  cplx_t bank_rd_b [L];
  cplx_t bank_wd   [L];

  assign in_ready = en && (state == S_IDLE);
  assign load     = in_ready && in_valid;
  assign issue    = (state == S_RUN) && (int'(cnt) < M);
  assign busy     = (state == S_RUN);
  assign done     = (state == S_RUN) && (int'(cnt) == M) && p_vld;

  tdce_mapping_mem #(.M(M), .NC(NC)) u_q (
    .clk, .rst_n,
    .cfg_we  (q_cfg_we),
    .cfg_addr(q_cfg_addr),
    .cfg_idx (q_cfg_idx),
    .rd_addr (AW'(cnt)),
    .rd_idx  (q_idx)
  );

  tdce_input_window #(.M(M), .L(L)) u_win (
    .clk, .rst_n,
    .load,
    .in_data,
    .shift(issue),
    .lane
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      p_vld   <= 1'b0;
      p_idx   <= '0;
      written <= '0;
      for (int j = 0; j < L; j++) p_x[j] <= CPLX_ZERO;
    end else begin
      // stage 1: read cluster index and L samples
      p_vld <= issue;
      if (issue) begin
        p_idx <= q_idx;
        for (int j = 0; j < L; j++) p_x[j] <= lane[j];
        cnt <= cnt + 1'b1;
      end
      // stage 2 bookkeeping
      if (p_vld) written[p_idx] <= 1'b1;

      unique case (state)
        S_IDLE: if (load) begin
          state   <= S_RUN;
          cnt     <= '0;
          written <= '0;
        end
        S_RUN: if (done) state <= S_IDLE;
      endcase
    end
  end

  // stage 2: read-modify-write of every bank at cluster p_idx
  always_comb begin
    for (int j = 0; j < L; j++)
      bank_wd[j] = cadd(written[p_idx] ? bank_rd_a[j] : CPLX_ZERO, p_x[j]);
  end

  for (genvar j = 0; j < L; j++) begin : g_bank
    tdce_xs_bank #(.NC(NC)) u_bank (
      .clk,
      .we     (p_vld),
      .waddr  (p_idx),
      .wdata  (bank_wd[j]),
      .raddr_a(p_idx),
      .rdata_a(bank_rd_a[j]),
      .raddr_b(xfer_addr),
      .rdata_b(bank_rd_b[j])
    );
    assign xfer_data[j] = written[xfer_addr] ? bank_rd_b[j] : CPLX_ZERO;
  end

  // A block may only be taken while the pipeline is empty.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> !p_vld);

endmodule
