// tb_tdce_top_full -- end-to-end test of the equalizer at its default size
// (4 spans, TDCE KNN: M = 97, L = 20, LP = 2, NC = 10), where summation and
// dot-product both take 110 cycles per block.
//
// Loads a sample mapping Q and clustered taps g_C, streams blocks of input
// samples into tdce_top and compares every output block, bit for bit, with
// the integer reference model of tb_tdce_ref_pkg. Three phases:
//   1. blocks with random gaps on the input (the pipeline drains and refills);
//      the latency from taking an idle block to its first output is checked;
//   2. blocks back to back; the steady-state block period is checked against
//      max(M+NC+3, NC*L/LP + max(L/LP, NC)) cycles;
//   3. after reloading Q so that one cluster is never referenced (and a new
//      g_C), blocks back to back again.
// It counts how often each mechanism occurred and fails if one never did:
// input back-pressure, summation overlapping the dot-product, a transfer
// waiting for the secondary banks, Control Unit 2 waiting for a transfer,
// reconfiguration, an unreferenced cluster.
`timescale 1ns/1ps
module tb_tdce_top_full;
  import tdce_pkg::*;
  import tb_tdce_ref_pkg::*;

  localparam int M = DEF_M, L = DEF_L, LP = DEF_LP, NC = DEF_NC;  // defaults of tdce_top
  localparam int G  = L / LP;
  localparam int AW = (M  > 1) ? $clog2(M)  : 1;
  localparam int IW = (NC > 1) ? $clog2(NC) : 1;
  localparam int LAT    = M + NC + 3 + NC*G;
  localparam int P_SUM  = M + NC + 3;
  localparam int P_DOT  = NC*G + ((G > NC) ? G : NC);
  localparam int PERIOD = (P_SUM > P_DOT) ? P_SUM : P_DOT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic in_ready;
  cplx_t in_data [L];
  logic q_cfg_we = 1'b0;
  logic [AW-1:0] q_cfg_addr = '0;
  logic [IW-1:0] q_cfg_idx = '0;
  logic g_cfg_we = 1'b0;
  logic [IW-1:0] g_cfg_addr = '0;
  cplx_t g_cfg_data = '0;
  logic out_valid;
  cplx_t out_data [LP];
  logic busy;

  always #2 clk = ~clk;  // 250 MHz

  tdce_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .q_cfg_we, .q_cfg_addr, .q_cfg_idx,
    .g_cfg_we, .g_cfg_addr, .g_cfg_data,
    .out_valid, .out_data, .busy
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // reference state
  int xre[$], xim[$];
  int q[], gre[], gim[];
  int q_of_blk[$][], gre_of_blk[$][], gim_of_blk[$][];
  int blocks_in = 0, blocks_out = 0;
  longint first_out_cycle[$];
  longint load_cycle[$];

  // mechanism counters
  int n_stall = 0, n_overlap = 0, n_xfer_wait = 0, n_dot_wait = 0;
  int n_reconfig = 0, n_unused_cluster = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cycle, msg);
  endtask

  task automatic configure(bit leave_one_unused);
    bit used [];
    q = new[M]; gre = new[NC]; gim = new[NC];
    used = new[NC];
    for (int i = 0; i < M; i++) begin
      q[i] = leave_one_unused ? $urandom_range(NC-2) : (i < NC ? i : $urandom_range(NC-1));
      used[q[i]] = 1;
    end
    for (int w = 0; w < NC; w++) begin
      gre[w] = srand(2047);   // |g| up to 1.0
      gim[w] = srand(2047);
      if (!used[w]) n_unused_cluster++;
    end
    @(negedge clk);
    for (int i = 0; i < M; i++) begin
      q_cfg_we = 1; q_cfg_addr = AW'(i); q_cfg_idx = IW'(q[i]);
      @(negedge clk);
    end
    q_cfg_we = 0;
    for (int w = 0; w < NC; w++) begin
      g_cfg_we = 1; g_cfg_addr = IW'(w); g_cfg_data.re = 16'(gre[w]); g_cfg_data.im = 16'(gim[w]);
      @(negedge clk);
    end
    g_cfg_we = 0;
    n_reconfig++;
  endtask

  // drive one block; returns after it has been taken
  task automatic send_block();
    int br[], bi[];
    br = new[L]; bi = new[L];
    for (int j = 0; j < L; j++) begin
      br[j] = srand(1023);      // |x| up to 0.5
      bi[j] = srand(1023);
      in_data[j].re = 16'(br[j]);
      in_data[j].im = 16'(bi[j]);
    end
    // called at a falling edge: in_ready is stable until the next rising edge
    in_valid = 1;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk);
    end
    load_cycle.push_back(cycle);
    for (int j = 0; j < L; j++) begin xre.push_back(br[j]); xim.push_back(bi[j]); end
    q_of_blk.push_back(q); gre_of_blk.push_back(gre); gim_of_blk.push_back(gim);
    blocks_in++;
    @(negedge clk);  // the block is taken at the rising edge before this
    in_valid = 0;
  endtask

  task automatic wait_idle();
    while (blocks_out < blocks_in || busy) @(negedge clk);
  endtask

  // output monitor, sampling at the falling edge where outputs are stable
  int ore[$], oim[$];
  always @(negedge clk) begin
    if (out_valid) begin
      if (ore.size() == 0) first_out_cycle.push_back(cycle);
      for (int p = 0; p < LP; p++) begin ore.push_back(int'(out_data[p].re)); oim.push_back(int'(out_data[p].im)); end
      if (ore.size() == L) begin
        int yre[], yim[];
        if (blocks_out >= blocks_in) fail("output block without an input block");
        else begin
          ref_block(xre, xim, blocks_out*L, q_of_blk[blocks_out], gre_of_blk[blocks_out],
                    gim_of_blk[blocks_out], M, L, NC, yre, yim);
          for (int j = 0; j < L; j++) begin
            checks++;
            if (ore[j] != yre[j] || oim[j] != yim[j]) begin
              fail($sformatf("block %0d y[%0d] = (%0d,%0d), expected (%0d,%0d)",
                             blocks_out, j, ore[j], oim[j], yre[j], yim[j]));
            end
          end
        end
        blocks_out++;
        ore.delete(); oim.delete();
      end
    end
  end

  // mechanism monitors (hierarchical, observation only)
  always @(negedge clk) if (rst_n) begin
    if (dut.u_cu1.busy && dut.u_cu2.busy) n_overlap++;
    if (dut.u_ctrl.xs_full && !dut.u_xfer.busy && !dut.u_ctrl.xfer_start) n_xfer_wait++;
    if (dut.u_cu2.ready && !dut.u_cu2.busy && dut.u_xfer.busy) n_dot_wait++;
  end

  initial begin
    int lat_blocks[$];
    for (int i = 0; i < M-1; i++) begin xre.push_back(0); xim.push_back(0); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    configure(0);
    // phase 1: gaps between blocks; each block starts from an idle equalizer
    for (int b = 0; b < 2; b++) begin
      int idx;
      idx = blocks_in;
      send_block();
      wait_idle();
      checks++;
      if (first_out_cycle[idx] - load_cycle[idx] != longint'(LAT))
        fail($sformatf("latency %0d cycles, expected %0d", first_out_cycle[idx] - load_cycle[idx], LAT));
      repeat ($urandom_range(3)) @(negedge clk);
    end
    // phase 2: back to back
    begin
      int first;
      first = blocks_in;
      for (int b = 0; b < 6; b++) send_block();
      wait_idle();
      for (int k = first + 2; k < blocks_out; k++) begin
        checks++;
        if (first_out_cycle[k] - first_out_cycle[k-1] != longint'(PERIOD))
          fail($sformatf("block period %0d cycles, expected %0d",
                         first_out_cycle[k] - first_out_cycle[k-1], PERIOD));
      end
    end
    // phase 3: new configuration with an unreferenced cluster
    configure(1);
    for (int b = 0; b < 6; b++) send_block();
    wait_idle();

    $display("mechanisms: stalls=%0d overlap_cycles=%0d xfer_wait_cycles=%0d dot_wait_cycles=%0d reconfigs=%0d unused_clusters=%0d",
             n_stall, n_overlap, n_xfer_wait, n_dot_wait, n_reconfig, n_unused_cluster);
    checks++; if (n_stall == 0)          fail("input back-pressure never happened");
    checks++; if (n_overlap == 0)        fail("summation never overlapped the dot-product");
    checks++; if (PERIOD != 110)         fail("default block period differs from the 110 cycles of the paper");
    checks++; if (n_dot_wait == 0)       fail("Control Unit 2 never waited for a transfer");
    checks++; if (n_reconfig < 2)        fail("reconfiguration never happened");
    checks++; if (n_unused_cluster == 0) fail("no cluster was left unreferenced");
    checks++; if (blocks_out != blocks_in) fail("blocks lost");
    $display("blocks=%0d period=%0d latency=%0d", blocks_out, PERIOD, LAT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2000000);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
