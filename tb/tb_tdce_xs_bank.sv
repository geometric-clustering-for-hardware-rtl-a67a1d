// tb_tdce_xs_bank -- self-checking test of one pre-summed memory bank.
// Random writes and reads on both asynchronous read ports against a model;
// a write becomes visible on the read ports after the clock edge, and a read
// in the same cycle as a write to that address still returns the old word.
`timescale 1ns/1ps
module tb_tdce_xs_bank;
  import tdce_pkg::*;
  localparam int NC = 10;
  localparam int IW = $clog2(NC);

  logic clk = 0;
  logic we = 0;
  logic [IW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  cplx_t wdata = '0, rdata_a, rdata_b;
  int checks = 0, failures = 0;
  cplx_t model [NC];
  bit    known [NC];

  always #2 clk = ~clk;

  tdce_xs_bank #(.NC(NC)) dut (.*);

  initial begin
    // fill every position once
    for (int w = 0; w < NC; w++) begin
      @(negedge clk);
      we = 1; waddr = IW'(w); wdata = {16'($urandom), 16'($urandom)};
      @(posedge clk); model[w] = wdata; known[w] = 1;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = $urandom_range(1);
      waddr = IW'($urandom_range(NC-1));
      wdata = {16'($urandom), 16'($urandom)};
      raddr_a = IW'($urandom_range(NC-1));
      raddr_b = (n % 3 == 0) ? waddr : IW'($urandom_range(NC-1));
      #1;
      checks += 2;
      if (rdata_a !== model[raddr_a]) begin failures++; $display("FAIL: A[%0d]", raddr_a); end
      if (rdata_b !== model[raddr_b]) begin failures++; $display("FAIL: B[%0d]", raddr_b); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
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
