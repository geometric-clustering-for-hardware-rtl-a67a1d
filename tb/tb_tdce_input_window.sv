// tb_tdce_input_window -- self-checking test of the input window.
// Loads blocks of L random samples, then shifts M times; at every iteration
// i lane j must present sample x[base+i+j] of the whole input sequence
// (preceded by M-1 zeros), which checks both the new samples and the history
// carried from block to block. Some blocks are loaded with fewer than M
// shifts in between, as the history must not depend on the shifting.
`timescale 1ns/1ps
module tb_tdce_input_window;
  import tdce_pkg::*;
  localparam int M = 9, L = 4;

  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  cplx_t in_data [L];
  cplx_t lane [L];
  cplx_t seq [$];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  tdce_input_window #(.M(M), .L(L)) dut (.*);

  initial begin
    int base;
    for (int i = 0; i < M-1; i++) seq.push_back('0);
    #5 rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      int nshift;
      @(negedge clk);
      base = b * L;
      for (int j = 0; j < L; j++) begin
        in_data[j] = {16'($urandom), 16'($urandom)};
        seq.push_back(in_data[j]);
      end
      load = 1;
      @(negedge clk);
      load = 0;
      nshift = (b % 3 == 2) ? M/2 : M;
      for (int i = 0; i < nshift; i++) begin
        for (int j = 0; j < L; j++) begin
          checks++;
          if (lane[j] !== seq[base+i+j]) begin
            failures++;
            $display("FAIL: block %0d iter %0d lane %0d = %h, expected %h", b, i, j, lane[j], seq[base+i+j]);
          end
        end
        shift = 1;
        @(negedge clk);
        shift = 0;
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
