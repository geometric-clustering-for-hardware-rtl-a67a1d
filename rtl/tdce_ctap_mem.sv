// tdce_ctap_mem -- the clustered filter taps gC (cluster centroids).
//
// Holds the NC complex taps that replace the M original taps after
// clustering. They are computed offline (KNN centroids, optionally refined by
// gradient descent) and written through the cfg_* port while the equalizer is
// idle. Control Unit 2 reads one tap per cluster through an asynchronous read
// port (rd_data follows rd_addr in the same cycle) and the MUX in front of
// the multipliers hands it to all LP multipliers at once.
// Storage as a register array with reset to zero is this design's choice.
module tdce_ctap_mem
  import tdce_pkg::*;
#(
  parameter int NC = tdce_pkg::DEF_NC,  // number of clusters
  localparam int IW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [IW-1:0] cfg_addr,
  input  cplx_t         cfg_data,
  input  logic [IW-1:0] rd_addr,
  output cplx_t         rd_data
);

  cplx_t g_mem [NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NC; i++) g_mem[i] <= CPLX_ZERO;
    end else if (cfg_we && (int'(cfg_addr) < NC)) begin
      g_mem[cfg_addr] <= cfg_data;
    end
  end

  assign rd_data = (int'(rd_addr) < NC) ? g_mem[rd_addr] : CPLX_ZERO;

endmodule
