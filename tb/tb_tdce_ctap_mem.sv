// tb_tdce_ctap_mem -- self-checking test of the clustered-tap memory g_C.
// Checks the reset value, writes random complex taps, reads every entry back
// through the asynchronous read port, and checks that a write with cfg_we low
// changes nothing.
`timescale 1ns/1ps
module tb_tdce_ctap_mem;
  import tdce_pkg::*;
  localparam int NC = 10;
  localparam int IW = $clog2(NC);

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [IW-1:0] cfg_addr = '0, rd_addr = '0;
  cplx_t cfg_data = '0, rd_data;
  int checks = 0, failures = 0;
  cplx_t model [NC];

  always #2 clk = ~clk;

  tdce_ctap_mem #(.NC(NC)) dut (.*);

  task automatic check_all();
    for (int w = 0; w < NC; w++) begin
      rd_addr = IW'(w);
      #1;
      checks++;
      if (rd_data !== model[w]) begin
        failures++;
        $display("FAIL: gC[%0d] = %h, expected %h", w, rd_data, model[w]);
      end
    end
  endtask

  initial begin
    for (int w = 0; w < NC; w++) model[w] = '0;
    #5 rst_n = 1;
    check_all();
    for (int n = 0; n < NC; n++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = IW'(NC-1-n);
      cfg_data.re = 16'($urandom); cfg_data.im = 16'($urandom);
      model[NC-1-n] = cfg_data;
    end
    @(negedge clk);
    cfg_we = 0; cfg_addr = '0; cfg_data = '1;
    @(negedge clk);
    check_all();
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
