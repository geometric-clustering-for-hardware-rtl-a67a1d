// tb_tdce_summation -- self-checking test of Control Unit 1 and the summation.
// Loads a random Q (one cluster left unreferenced), feeds blocks of random
// samples and, after each done, reads all NC positions of the L banks through
// the transfer port and compares them with x_S computed by the reference
// model. Also checks: done comes exactly M+1 cycles after the block is taken
// (one iteration per cycle plus one pipeline stage), in_ready is low while
// the unit is busy or not enabled, and an unreferenced cluster reads zero.
`timescale 1ns/1ps
module tb_tdce_summation;
  import tdce_pkg::*;
  import tb_tdce_ref_pkg::*;
  localparam int M = 13, L = 4, NC = 5;
  localparam int AW = $clog2(M), IW = $clog2(NC);

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, in_ready;
  cplx_t in_data [L];
  logic q_cfg_we = 0;
  logic [AW-1:0] q_cfg_addr = '0;
  logic [IW-1:0] q_cfg_idx = '0;
  logic busy, done;
  logic [IW-1:0] xfer_addr = '0;
  cplx_t xfer_data [L];
  int checks = 0, failures = 0;
  int q [M];
  int xre[$], xim[$];
  longint cycle = 0;

  always #2 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tdce_summation #(.M(M), .L(L), .NC(NC)) dut (.*);

  // all sampling at the falling edge, where the unit's outputs are stable
  always @(negedge clk) if (rst_n && (busy || !en)) begin
    checks++;
    if (in_ready) begin failures++; $display("FAIL: in_ready while busy or disabled"); end
  end

  initial begin
    for (int i = 0; i < M-1; i++) begin xre.push_back(0); xim.push_back(0); end
    #5 rst_n = 1;
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      q[i] = (i < NC-1) ? i : $urandom_range(NC-2);   // cluster NC-1 unused
      q_cfg_we = 1; q_cfg_addr = AW'(i); q_cfg_idx = IW'(q[i]);
    end
    @(negedge clk); q_cfg_we = 0;
    repeat (3) @(negedge clk);
    for (int b = 0; b < 10; b++) begin
      longint t_load;
      for (int j = 0; j < L; j++) begin
        int r, m;
        r = (b == 9) ? 32767 - j : srand(30000);  // large values: sums wrap
        m = srand(30000);
        in_data[j].re = 16'(r); in_data[j].im = 16'(m);
        xre.push_back(r); xim.push_back(m);
      end
      @(negedge clk);
      in_valid = 1;
      repeat ($urandom_range(2)) @(negedge clk);   // enable comes late
      en = 1;
      #0.5;                                 // let in_ready follow en
      while (!in_ready) @(negedge clk);
      t_load = cycle;                       // taken at the next rising edge
      @(negedge clk); in_valid = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cycle - t_load != M + 1) begin
        failures++; $display("FAIL: done after %0d cycles, expected %0d", cycle - t_load, M + 1);
      end
      @(negedge clk); en = 0;
      checks++;
      if (busy) begin failures++; $display("FAIL: still busy after done"); end
      // compare the banks with the reference x_S
      for (int w = 0; w < NC; w++) begin
        xfer_addr = IW'(w);
        #0.2;
        for (int j = 0; j < L; j++) begin
          int sr, si;
          sr = 0; si = 0;
          for (int i = 0; i < M; i++) if (q[i] == w) begin
            sr = wrap16(longint'(sr) + xre[b*L+i+j]);
            si = wrap16(longint'(si) + xim[b*L+i+j]);
          end
          checks++;
          if (int'(xfer_data[j].re) != sr || int'(xfer_data[j].im) != si) begin
            failures++;
            $display("FAIL: block %0d xS[%0d][%0d] = (%0d,%0d), expected (%0d,%0d)",
                     b, j, w, xfer_data[j].re, xfer_data[j].im, sr, si);
          end
        end
      end
    end
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
