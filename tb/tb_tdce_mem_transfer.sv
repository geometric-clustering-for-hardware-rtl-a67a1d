// tb_tdce_mem_transfer -- self-checking test of the Memory Transfer.
// A model of the L source banks answers src_addr asynchronously; a model of
// the destination banks records the writes. After each start the copy must
// take exactly NC cycles (busy high NC cycles, done in the last), write every
// position once, and leave the destination equal to the source.
`timescale 1ns/1ps
module tb_tdce_mem_transfer;
  import tdce_pkg::*;
  localparam int L = 6, NC = 5;
  localparam int IW = $clog2(NC);

  logic clk = 0, rst_n = 0, start = 0, busy, done, dst_we;
  logic [IW-1:0] src_addr, dst_addr;
  cplx_t src_data [L];
  cplx_t dst_data [L];
  cplx_t src [L][NC];
  cplx_t dst [L][NC];
  int writes [NC];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  tdce_mem_transfer #(.L(L), .NC(NC)) dut (.*);

  always_comb for (int j = 0; j < L; j++) src_data[j] = (int'(src_addr) < NC) ? src[j][src_addr] : '0;

  // destination model: the write presented in a cycle, sampled mid-cycle
  always @(negedge clk) if (dst_we) begin
    writes[dst_addr]++;
    for (int j = 0; j < L; j++) dst[j][dst_addr] = dst_data[j];
  end

  initial begin
    #5 rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      int nbusy, ndone;
      for (int j = 0; j < L; j++) for (int w = 0; w < NC; w++) begin
        src[j][w] = {16'($urandom), 16'($urandom)};
        dst[j][w] = '0;
      end
      for (int w = 0; w < NC; w++) writes[w] = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      nbusy = 0; ndone = 0;
      while (busy) begin
        nbusy++;
        if (done) begin
          ndone++;
          checks++;
          if (nbusy != NC) begin failures++; $display("FAIL: done in copy cycle %0d", nbusy); end
        end
        @(negedge clk);
      end
      checks += 2;
      if (nbusy != NC) begin failures++; $display("FAIL: busy %0d cycles, expected %0d", nbusy, NC); end
      if (ndone != 1)  begin failures++; $display("FAIL: %0d done pulses", ndone); end
      for (int w = 0; w < NC; w++) begin
        checks++;
        if (writes[w] != 1) begin failures++; $display("FAIL: position %0d written %0d times", w, writes[w]); end
        for (int j = 0; j < L; j++) begin
          checks++;
          if (dst[j][w] !== src[j][w]) begin failures++; $display("FAIL: bank %0d pos %0d", j, w); end
        end
      end
      repeat (r) @(negedge clk);
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
