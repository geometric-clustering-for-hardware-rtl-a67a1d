// tdce_mapping_mem -- the sample mapping set Q of the clustered equalizer.
//
// Q holds, for each of the M positions of the (time-reversed) filter window,
// the index of the cluster whose pre-summed value the sample at that position
// is added into. Entry i is the cluster of tap g[M-1-i], so the summation
// reads Q[0], Q[1], ... Q[M-1] in order while it walks through the input
// samples x[i..i+L-1] (Algorithm "parallelized summation").
//
// Q is computed offline by the clustering software and written through the
// cfg_* port (one entry per cycle, cfg_we high) while the equalizer is idle.
// The paper keeps Q "in a register" read sequentially; here it is a register
// array with an asynchronous read port, so rd_idx follows rd_addr in the same
// cycle. Reset clears every entry to cluster 0 (a choice of this design).
module tdce_mapping_mem #(
  parameter int M  = tdce_pkg::DEF_M,  // filter size (4 spans, TDCE KNN)
  parameter int NC = tdce_pkg::DEF_NC,  // number of clusters
  localparam int AW = (M  > 1) ? $clog2(M)  : 1,
  localparam int IW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration write port
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  logic [IW-1:0] cfg_idx,
  // sequential read port used by Control Unit 1
  input  logic [AW-1:0] rd_addr,
  output logic [IW-1:0] rd_idx
);

  logic [IW-1:0] q_mem [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) q_mem[i] <= '0;
    end else if (cfg_we && (int'(cfg_addr) < M)) begin
      q_mem[cfg_addr] <= cfg_idx;
    end
  end

  assign rd_idx = (int'(rd_addr) < M) ? q_mem[rd_addr] : '0;

  // A cluster index written into Q must name an existing cluster.
  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (int'(cfg_idx) < NC));

endmodule
