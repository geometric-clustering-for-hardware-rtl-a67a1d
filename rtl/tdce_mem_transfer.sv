// tdce_mem_transfer -- the Memory Transfer block of the TDCE.
//
// Once the summation has finished a block, its L banks hold x_S[j][w] for all
// L outputs j and NC clusters w. This block copies them in bulk to the L
// secondary banks, so that the summation banks are free for the next block
// while Control Unit 2 is still multiplying the current one.
// All 2L banks are separate memories, so one position can be moved in every
// bank at once: the copy walks the NC cluster positions, one per cycle, and
// takes NC cycles (the paper's "around N_C clock cycles").
//
// Timing: a start pulse (from the Dataflow Controller) begins the copy in
// the next cycle. In copy cycle w the block drives src_addr = w, takes the
// L words src_data (asynchronous read) and writes them with dst_we at
// dst_addr = w. done pulses in the last copy cycle; busy is high during the
// NC copy cycles. The data words go from the source read ports straight to
// the destination write ports (dst_data is src_data): the block's logic is
// the address sequencing and write enable, and keeping the data path free of
// registers keeps the copy at exactly NC cycles. The cycle-by-cycle schedule
// is this design's choice.
module tdce_mem_transfer
  import tdce_pkg::*;
#(
  parameter int L  = tdce_pkg::DEF_L,  // number of banks on each side
  parameter int NC = tdce_pkg::DEF_NC,  // positions per bank
  localparam int IW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // summation banks, read side
  output logic [IW-1:0] src_addr,
  input  cplx_t         src_data [L],
  // secondary banks, write side
  output logic          dst_we,
  output logic [IW-1:0] dst_addr,
  output cplx_t         dst_data [L]
);

  logic [IW-1:0] pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      pos  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        pos  <= '0;
      end
    end else if (int'(pos) == NC-1) begin
      busy <= 1'b0;
    end else begin
      pos <= pos + 1'b1;
    end
  end

  assign done     = busy && (int'(pos) == NC-1);
  assign src_addr = pos;
  assign dst_we   = busy;
  assign dst_addr = pos;
  always_comb begin
    for (int j = 0; j < L; j++) dst_data[j] = src_data[j];
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
