// tb_tdce_dot_product -- self-checking test of Control Unit 2 and the
// simplified dot-product.
// Models of the secondary banks and of g_C answer the unit's addresses
// asynchronously. For each block of random pre-summed values the L outputs
// must equal sum_w x_S[j][w] * g_C[w] (reference model, bit exact) and come
// out LP per cycle in order. Timing checks: mac_done in the NC*L/LP-th MAC
// cycle, out_valid for L/LP cycles right after it, and ready in the last
// stream cycle so that blocks started back to back follow without a gap.
`timescale 1ns/1ps
module tb_tdce_dot_product;
  import tdce_pkg::*;
  import tb_tdce_ref_pkg::*;
  localparam int L = 8, LP = 2, NC = 5;
  localparam int G = L / LP;
  localparam int IW = $clog2(NC);

  logic clk = 0, rst_n = 0, start = 0, ready, busy, mac_done, out_valid;
  logic [IW-1:0] sec_addr, g_addr;
  cplx_t sec_data [L];
  cplx_t g_data;
  cplx_t out_data [LP];
  int xs_re [L][NC], xs_im [L][NC];
  int gre [NC], gim [NC];
  int checks = 0, failures = 0;
  longint cycle = 0;
  longint t_start [$];
  int blk_started = 0, blk_done = 0;
  int exp_re [$][L], exp_im [$][L];
  int got_re [$], got_im [$];
  longint t_mac [$], t_first_out [$];

  always #2 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tdce_dot_product #(.L(L), .LP(LP), .NC(NC)) dut (.*);

  always_comb begin
    for (int j = 0; j < L; j++) begin
      sec_data[j].re = 16'(xs_re[j][(int'(sec_addr) < NC) ? sec_addr : 0]);
      sec_data[j].im = 16'(xs_im[j][(int'(sec_addr) < NC) ? sec_addr : 0]);
    end
    g_data.re = 16'(gre[(int'(g_addr) < NC) ? g_addr : 0]);
    g_data.im = 16'(gim[(int'(g_addr) < NC) ? g_addr : 0]);
  end

  // new random block, with its expected outputs
  task automatic new_block();
    int er [L], ei [L];
    for (int j = 0; j < L; j++) begin
      er[j] = 0; ei[j] = 0;
      for (int w = 0; w < NC; w++) begin
        int pr, pi;
        xs_re[j][w] = srand(32767); xs_im[j][w] = srand(32767);
        cmul_ref(xs_re[j][w], xs_im[j][w], gre[w], gim[w], pr, pi);
        er[j] = wrap16(longint'(er[j]) + pr);
        ei[j] = wrap16(longint'(ei[j]) + pi);
      end
    end
    exp_re.push_back(er); exp_im.push_back(ei);
  endtask

  // monitor, sampling at the falling edge where outputs are stable
  always @(negedge clk) begin
    if (mac_done) t_mac.push_back(cycle);
    if (out_valid) begin
      if (got_re.size() == 0) t_first_out.push_back(cycle);
      for (int p = 0; p < LP; p++) begin got_re.push_back(out_data[p].re); got_im.push_back(out_data[p].im); end
      if (got_re.size() == L) begin
        for (int j = 0; j < L; j++) begin
          checks++;
          if (got_re[j] != exp_re[blk_done][j] || got_im[j] != exp_im[blk_done][j]) begin
            failures++;
            $display("FAIL: block %0d y[%0d] = (%0d,%0d), expected (%0d,%0d)", blk_done, j,
                     got_re[j], got_im[j], exp_re[blk_done][j], exp_im[blk_done][j]);
          end
        end
        blk_done++;
        got_re.delete(); got_im.delete();
      end
    end
  end

  initial begin
    for (int w = 0; w < NC; w++) begin gre[w] = srand(32767); gim[w] = srand(32767); end
    #5 rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      new_block();
      // odd blocks start as soon as ready (back to back), even ones after a pause
      if (b % 2 == 0) repeat (2) @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1;
      t_start.push_back(cycle);             // taken at the next rising edge
      @(negedge clk); start = 0;
      // the bank contents must stay until mac_done
      while (!mac_done) @(negedge clk);
    end
    while (blk_done < 8) @(negedge clk);
    for (int b = 0; b < 8; b++) begin
      checks += 2;
      if (t_mac[b] - t_start[b] != NC*G) begin
        failures++; $display("FAIL: mac_done %0d cycles after start, expected %0d", t_mac[b] - t_start[b], NC*G);
      end
      if (t_first_out[b] - t_mac[b] != 1) begin
        failures++; $display("FAIL: output %0d cycles after mac_done", t_first_out[b] - t_mac[b]);
      end
      if (b % 2 == 1) begin
        checks++;
        if (t_start[b] - t_start[b-1] != NC*G + G) begin
          failures++; $display("FAIL: back-to-back start spacing %0d, expected %0d", t_start[b] - t_start[b-1], NC*G + G);
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
