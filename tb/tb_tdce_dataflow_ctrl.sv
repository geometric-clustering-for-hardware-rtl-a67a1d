// tb_tdce_dataflow_ctrl -- self-checking test of the Dataflow Controller.
// Simple timed models of the three units (summation of SUM cycles, transfer
// of XF cycles, dot-product of MAC + STR cycles) react to the controller's
// enables. A scoreboard model of the bank flags checks every output in every
// cycle, and the test checks that blocks pass through in order, that the
// transfer never overwrites banks Control Unit 2 is reading, and that
// summation and dot-product overlap. Two unit timings are run: one where the
// summation is slower and one where the dot-product is.
`timescale 1ns/1ps
module tb_tdce_dataflow_ctrl;
  logic clk = 0, rst_n = 0;
  logic sum_en, sum_done, xfer_start, xfer_busy, xfer_done;
  logic dot_start, dot_ready, mac_done;
  logic xs_full, sec_full, sec_in_use;
  int checks = 0, failures = 0;

  int SUM = 12, XF = 4, MAC = 9, STR = 3;
  int sum_cnt = -1, xf_cnt = -1, dot_cnt = -1;
  int total_fed = 0;  // blocks offered to the summation so far
  int blk_sum = 0, blk_xs = -1, blk_sec = -1, blk_dot = -1;
  int n_overlap = 0, done_blocks = 0;
  // reference flags
  bit m_xs_full = 0;
  int m_sec = 0;  // 0 empty, 1 full, 2 in use

  always #2 clk = ~clk;

  tdce_dataflow_ctrl dut (.*);

  // unit models (outputs derived from counters)
  assign sum_done  = (sum_cnt == SUM - 1);
  assign xfer_busy = (xf_cnt >= 0);
  assign xfer_done = (xf_cnt == XF - 1);
  assign mac_done  = (dot_cnt == MAC - 1);
  assign dot_ready = (dot_cnt < 0) || (dot_cnt == MAC + STR - 1);

  // Checking and model updates happen at the falling edge, where every
  // signal is stable. The unit models' next counter values are computed there
  // from the values of the current cycle and applied just after the next
  // rising edge, so the controller samples this cycle's values at that edge.
  int n_sum_cnt, n_xf_cnt, n_dot_cnt, n_blk_sum;
  always @(negedge clk) if (rst_n) begin
    // expected outputs from the model flags
    bit e_sum_en, e_xfer_start, e_dot_start;
    e_sum_en     = !m_xs_full;
    e_xfer_start = m_xs_full && !xfer_busy && (m_sec == 0 || (m_sec == 2 && mac_done));
    e_dot_start  = dot_ready && (m_sec == 1 || (m_sec == 0 && xfer_done));
    checks += 3;
    if (sum_en != e_sum_en)         begin failures++; $display("FAIL @%0t sum_en", $time); end
    if (xfer_start != e_xfer_start) begin failures++; $display("FAIL @%0t xfer_start", $time); end
    if (dot_start != e_dot_start)   begin failures++; $display("FAIL @%0t dot_start", $time); end
    if (xfer_start && m_sec == 2 && !mac_done) begin
      failures++; $display("FAIL: transfer started on banks still being read");
    end
    if (sum_cnt >= 0 && dot_cnt >= 0 && dot_cnt < MAC) n_overlap++;
    // model flag update (what the controller does at the next rising edge)
    if (sum_done) m_xs_full = 1; else if (xfer_done) m_xs_full = 0;
    case (m_sec)
      0: if (xfer_done) m_sec = dot_start ? 2 : 1;
      1: if (dot_start) m_sec = 2;
      2: if (mac_done)  m_sec = 0;
      default: ;
    endcase
    // block tracking
    if (xfer_done) blk_sec = blk_xs;
    if (dot_start) begin
      checks++;
      if (blk_sec != blk_dot + 1) begin failures++; $display("FAIL: block order %0d after %0d", blk_sec, blk_dot); end
      blk_dot = blk_sec;
    end
    if (sum_done) blk_xs = blk_sum - 1;
    if (dot_cnt == MAC + STR - 1) done_blocks++;
    // unit models: next counter values
    n_sum_cnt = sum_cnt; n_xf_cnt = xf_cnt; n_dot_cnt = dot_cnt;
    n_blk_sum = blk_sum;
    if (sum_cnt >= 0) n_sum_cnt = (sum_cnt == SUM - 1) ? -1 : sum_cnt + 1;
    else if (sum_en && total_fed > blk_sum) begin n_sum_cnt = 0; n_blk_sum = blk_sum + 1; end
    if (xf_cnt >= 0) n_xf_cnt = (xf_cnt == XF - 1) ? -1 : xf_cnt + 1;
    else if (xfer_start) n_xf_cnt = 0;
    if (dot_start) n_dot_cnt = 0;
    else if (dot_cnt >= 0) n_dot_cnt = (dot_cnt == MAC + STR - 1) ? -1 : dot_cnt + 1;
    @(posedge clk);
    #1;
    sum_cnt = n_sum_cnt; xf_cnt = n_xf_cnt; dot_cnt = n_dot_cnt;
    blk_sum = n_blk_sum;
  end

  initial begin
    #5 rst_n = 1;
    total_fed = 8;
    while (done_blocks < 8) @(negedge clk);
    // second timing: dot-product slower than summation
    repeat (3) @(posedge clk);
    #1;
    SUM = 5; XF = 3; MAC = 14; STR = 4;
    total_fed = 16;
    while (done_blocks < 16) @(negedge clk);
    checks += 2;
    if (blk_dot != 15)  begin failures++; $display("FAIL: %0d blocks reached the dot-product", blk_dot + 1); end
    if (n_overlap == 0) begin failures++; $display("FAIL: no overlap"); end
    $display("overlap cycles=%0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
