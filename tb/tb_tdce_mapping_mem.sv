// tb_tdce_mapping_mem -- self-checking test of the sample mapping memory Q.
// Checks the reset contents, writes random cluster indices to every entry in
// random order, reads them all back (asynchronous read, same cycle), then
// overwrites part of them and checks that only those entries changed.
`timescale 1ns/1ps
module tb_tdce_mapping_mem;
  localparam int M = 97, NC = 10;
  localparam int AW = $clog2(M), IW = $clog2(NC);

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [AW-1:0] cfg_addr = '0, rd_addr = '0;
  logic [IW-1:0] cfg_idx = '0, rd_idx;
  int checks = 0, failures = 0;
  int model [M];

  always #2 clk = ~clk;

  tdce_mapping_mem #(.M(M), .NC(NC)) dut (.*);

  task automatic check_all();
    for (int i = 0; i < M; i++) begin
      rd_addr = AW'(i);
      #1;
      checks++;
      if (int'(rd_idx) != model[i]) begin
        failures++;
        $display("FAIL: Q[%0d] = %0d, expected %0d", i, rd_idx, model[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < M; i++) model[i] = 0;
    #5 rst_n = 1;
    check_all();
    for (int pass = 0; pass < 2; pass++) begin
      for (int n = 0; n < M; n++) begin
        int i;
        i = (pass == 0) ? (n * 37) % M : $urandom_range(M-1);
        @(negedge clk);
        cfg_we = 1; cfg_addr = AW'(i); cfg_idx = IW'($urandom_range(NC-1));
        model[i] = int'(cfg_idx);
      end
      @(negedge clk);
      cfg_we = 0;
      check_all();
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
