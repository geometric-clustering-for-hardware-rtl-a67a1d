// tdce_xs_bank -- one pre-summed memory bank x_S for one of the L parallel
// output samples.
//
// A bank has NC positions, one per cluster, each a complex word (two 16-bit
// parts, 32 bits per position, 320 bits for NC = 10). The equalizer uses 2L
// banks: L summation banks written by Control Unit 1, and L secondary banks
// filled by the Memory Transfer and read by Control Unit 2.
//
// Interface: one synchronous write port (we/waddr/wdata, written at the clock
// edge) and two asynchronous read ports (A and B), as a LUT-based distributed
// RAM offers. The paper finds LUTRAM the better choice for these banks than
// BRAM; a register array with combinational reads is what maps to it. Port A
// serves the read-modify-write of the summation (or the dot-product reads),
// port B the Memory Transfer. There is no reset: every position is written
// before it is read (the summation masks positions it has not yet written).
module tdce_xs_bank
  import tdce_pkg::*;
#(
  parameter int NC = tdce_pkg::DEF_NC,  // positions = number of clusters
  localparam int IW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [IW-1:0] waddr,
  input  cplx_t         wdata,
  input  logic [IW-1:0] raddr_a,
  output cplx_t         rdata_a,
  input  logic [IW-1:0] raddr_b,
  output cplx_t         rdata_b
);

  cplx_t mem [NC];

  always_ff @(posedge clk) begin
    if (we && (int'(waddr) < NC)) mem[waddr] <= wdata;
  end

  assign rdata_a = (int'(raddr_a) < NC) ? mem[raddr_a] : CPLX_ZERO;
  assign rdata_b = (int'(raddr_b) < NC) ? mem[raddr_b] : CPLX_ZERO;

endmodule
