// tdce_dataflow_ctrl -- the Dataflow Controller of the TDCE.
//
// The summation hardware is idle while the dot-product runs, so the
// equalizer overlaps them: while Control Unit 2 multiplies block k out of the
// secondary banks, Control Unit 1 already sums block k+1 into the summation
// banks. The Memory Transfer in between hands a block from one bank set to
// the other. This controller keeps track of what the two bank sets hold and
// enables the three units:
//   * summation banks: FREE, or FULL from the summation's done until the
//     transfer's done. Control Unit 1 is enabled (sum_en) while they are FREE.
//   * secondary banks: EMPTY, FULL (written by the transfer, not yet read) or
//     IN_USE (being read by Control Unit 2, until its mac_done).
//   * xfer_start pulses when the summation banks are FULL, no transfer runs
//     and the secondary banks are EMPTY (or Control Unit 2 is in its last
//     MAC cycle); dot_start pulses when Control Unit 2 is ready and the
//     secondary banks are FULL (or the transfer is in its last cycle).
// Every output is a function of the registered state and the units' status
// inputs in the same cycle (no added latency). The paper names this block and
// its purpose; the two-flag scheme above is this design's own.
module tdce_dataflow_ctrl (
  input  logic clk,
  input  logic rst_n,
  // Control Unit 1
  output logic sum_en,
  input  logic sum_done,
  // Memory Transfer
  output logic xfer_start,
  input  logic xfer_busy,
  input  logic xfer_done,
  // Control Unit 2
  output logic dot_start,
  input  logic dot_ready,
  input  logic mac_done,
  // state, for observation
  output logic xs_full,
  output logic sec_full,
  output logic sec_in_use
);

  typedef enum logic [1:0] {SEC_EMPTY, SEC_FULL, SEC_IN_USE} sec_t;
  sec_t sec;

  // The transfer may begin in Control Unit 2's last MAC cycle: that cycle
  // reads cluster NC-1 while the transfer first writes cluster 0. Likewise
  // Control Unit 2 may start in the transfer's last cycle: its first read,
  // of cluster 0, comes a cycle later. Both keep the banks busy back to back.
  assign sum_en     = !xs_full;
  assign xfer_start = xs_full && !xfer_busy &&
                      ((sec == SEC_EMPTY) || ((sec == SEC_IN_USE) && mac_done));
  assign dot_start  = dot_ready && ((sec == SEC_FULL) || ((sec == SEC_EMPTY) && xfer_done));
  assign sec_full   = (sec == SEC_FULL);
  assign sec_in_use = (sec == SEC_IN_USE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs_full <= 1'b0;
      sec     <= SEC_EMPTY;
    end else begin
      if (sum_done)       xs_full <= 1'b1;
      else if (xfer_done) xs_full <= 1'b0;

      unique case (sec)
        SEC_EMPTY:  if (xfer_done) sec <= dot_start ? SEC_IN_USE : SEC_FULL;
        SEC_FULL:   if (dot_start) sec <= SEC_IN_USE;
        SEC_IN_USE: if (mac_done)  sec <= SEC_EMPTY;
        default:    sec <= SEC_EMPTY;
      endcase
    end
  end

  // The summation may not finish into banks that still hold a block.
  a_sum_into_free: assert property (@(posedge clk) disable iff (!rst_n)
    sum_done |-> !xs_full);
  // A transfer may only end while the secondary banks are empty.
  a_xfer_into_empty: assert property (@(posedge clk) disable iff (!rst_n)
    xfer_done |-> (sec == SEC_EMPTY));
  // Control Unit 2 only releases banks it is reading.
  a_mac_in_use: assert property (@(posedge clk) disable iff (!rst_n)
    mac_done |-> (sec == SEC_IN_USE));

endmodule
