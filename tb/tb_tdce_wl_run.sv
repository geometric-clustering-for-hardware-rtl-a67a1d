// tb_tdce_wl_run -- one link configuration of the equalizer at its own size:
// builds a real chromatic-dispersion filter, clusters it, loads it into a
// tdce_top of that size and checks a stream of blocks. Instantiated once per
// configuration by tb_tdce_workloads_sized, which collects the results.
//
// The filter: g[m] = sqrt(j c T^2 / (D lambda^2 z)) exp(-j pi c T^2 m^2 /
// (D lambda^2 z)) for 32 GBd at 2 samples per symbol, D = 17 ps/(nm km),
// lambda = 1550 nm, z = SPANS * 80 km, centre M taps. Its taps are grouped
// into NC clusters by plain k-means (Lloyd) in the testbench, the centres
// are quantized to 16 bits with 11 fraction bits, and Q[i] is the cluster of
// the reversed tap g[M-1-i].
//
// Checks: every output equals the integer reference model bit for bit; the
// fixed-point output is within 5 % RMS of the same clustered filter in
// floating point; back-to-back blocks leave every
//   max(M + NC + 3, NC*L/LP + max(L/LP, NC))
// cycles. done rises when the configuration has finished; n_checks and
// n_fail carry its counts. It has no watchdog of its own: the instantiating
// testbench has one.
`timescale 1ns/1ps
module tb_tdce_wl_run #(
  parameter int SPANS = 1,
  parameter int M  = 31,
  parameter int L  = 10,
  parameter int LP = 2,
  parameter int NC = 9
) (
  output logic done,
  output int   n_checks,
  output int   n_fail
);
  import tdce_pkg::*;
  import tb_tdce_ref_pkg::*;

  localparam int AW = (M  > 1) ? $clog2(M)  : 1;
  localparam int IW = (NC > 1) ? $clog2(NC) : 1;
  localparam int NBLK = 5;
  localparam int G = L / LP;
  localparam int P_SUM = M + NC + 3;
  localparam int P_DOT = NC*G + ((G > NC) ? G : NC);
  localparam int PERIOD = (P_SUM > P_DOT) ? P_SUM : P_DOT;

  localparam real PI = 3.14159265358979;
  localparam real C_LIGHT = 299792458.0;
  localparam real LAMBDA = 1550.0e-9;
  localparam real DISP = 17.0e-6;        // 17 ps/(nm km) in s/m^2
  localparam real TS = 1.0 / 64.0e9;     // 32 GBd, 2 samples per symbol
  localparam real SCALE = 2048.0;

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

  always #2 clk = ~clk;

  tdce_top #(.M(M), .L(L), .LP(LP), .NC(NC)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .q_cfg_we, .q_cfg_addr, .q_cfg_idx,
    .g_cfg_we, .g_cfg_addr, .g_cfg_data,
    .out_valid, .out_data, .busy
  );

  int checks = 0, failures = 0;
  initial done = 1'b0;
  assign n_checks = checks;
  assign n_fail = failures;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cycle, msg);
  endtask

  // current configuration
  int q[], gre[], gim[];
  real tre[], tim[];           // unclustered reversed taps per window position
  real cre[], cim[];           // unquantized centres

  // input history (M-1 leading zeros, then every sample sent)
  int xre[$], xim[$];
  int blocks_in = 0, blocks_out = 0;
  longint first_out[$];
  real err_fx = 0.0, pow_cl = 0.0, err_cl = 0.0;

  // build taps, clusters, Q and g_C for one configuration
  task automatic build(int spans, int mf, int nf);
    real z, k2, amp, gr[], gi[], sr[], si[], cnt[];
    int asg[];
    z   = spans * 80.0e3;
    k2  = PI * C_LIGHT * TS * TS / (DISP * LAMBDA * LAMBDA * z);
    amp = $sqrt(C_LIGHT * TS * TS / (DISP * LAMBDA * LAMBDA * z));
    gr = new[mf]; gi = new[mf]; asg = new[mf];
    for (int k = 0; k < mf; k++) begin
      real m, ph;
      m  = k - (mf - 1) / 2;
      ph = PI / 4.0 - k2 * m * m;          // sqrt(j) = exp(j pi/4)
      gr[k] = amp * $cos(ph);
      gi[k] = amp * $sin(ph);
    end
    // k-means on the complex taps
    cre = new[NC]; cim = new[NC];
    foreach (cre[w]) begin cre[w] = 0.0; cim[w] = 0.0; end
    for (int w = 0; w < nf; w++) begin
      cre[w] = gr[(w * mf) / nf];
      cim[w] = gi[(w * mf) / nf];
    end
    for (int it = 0; it < 50; it++) begin
      sr = new[nf]; si = new[nf]; cnt = new[nf];
      for (int k = 0; k < mf; k++) begin
        real best, d;
        best = 1.0e30;
        for (int w = 0; w < nf; w++) begin
          d = (gr[k] - cre[w]) ** 2 + (gi[k] - cim[w]) ** 2;
          if (d < best) begin best = d; asg[k] = w; end
        end
        sr[asg[k]] += gr[k]; si[asg[k]] += gi[k]; cnt[asg[k]] += 1.0;
      end
      for (int w = 0; w < nf; w++)
        if (cnt[w] > 0.0) begin cre[w] = sr[w] / cnt[w]; cim[w] = si[w] / cnt[w]; end
    end
    // mapping over the window and quantized centres
    q = new[M]; tre = new[M]; tim = new[M];
    for (int i = 0; i < M; i++) begin
      if (i < mf) begin
        q[i] = asg[mf-1-i]; tre[i] = gr[mf-1-i]; tim[i] = gi[mf-1-i];
      end else begin
        q[i] = nf; tre[i] = 0.0; tim[i] = 0.0;   // the zero cluster
      end
    end
    gre = new[NC]; gim = new[NC];
    for (int w = 0; w < NC; w++) begin
      gre[w] = (w < nf) ? int'($floor(cre[w] * SCALE + 0.5)) : 0;
      gim[w] = (w < nf) ? int'($floor(cim[w] * SCALE + 0.5)) : 0;
      if (w >= nf) begin cre[w] = 0.0; cim[w] = 0.0; end
    end
  endtask

  task automatic load_config();
    @(negedge clk);
    for (int i = 0; i < M; i++) begin
      q_cfg_we = 1; q_cfg_addr = AW'(i); q_cfg_idx = IW'(q[i]);
      @(negedge clk);
    end
    q_cfg_we = 0;
    for (int w = 0; w < NC; w++) begin
      g_cfg_we = 1; g_cfg_addr = IW'(w);
      g_cfg_data.re = 16'(gre[w]); g_cfg_data.im = 16'(gim[w]);
      @(negedge clk);
    end
    g_cfg_we = 0;
  endtask

  // QPSK-like input: +-0.25 on each axis plus a little noise
  task automatic send_block();
    for (int j = 0; j < L; j++) begin
      int r, i;
      r = ($urandom_range(1) ? 512 : -512) + srand(64);
      i = ($urandom_range(1) ? 512 : -512) + srand(64);
      in_data[j].re = 16'(r); in_data[j].im = 16'(i);
      xre.push_back(r); xim.push_back(i);
    end
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    blocks_in++;
    @(negedge clk);
    in_valid = 0;
  endtask

  // output monitor
  int ore[$], oim[$];
  always @(negedge clk) begin
    if (out_valid) begin
      if (ore.size() == 0) first_out.push_back(cycle);
      for (int p = 0; p < LP; p++) begin
        ore.push_back(int'(out_data[p].re)); oim.push_back(int'(out_data[p].im));
      end
      if (ore.size() == L) begin
        int yre[], yim[];
        int base;
        base = blocks_out * L;
        ref_block(xre, xim, base, q, gre, gim, M, L, NC, yre, yim);
        for (int j = 0; j < L; j++) begin
          real fr, fi, er, ei;
          checks++;
          if (ore[j] != yre[j] || oim[j] != yim[j])
            fail($sformatf("block %0d y[%0d] = (%0d,%0d), expected (%0d,%0d)",
                           blocks_out, j, ore[j], oim[j], yre[j], yim[j]));
          // floating-point clustered and unclustered filters
          fr = 0.0; fi = 0.0; er = 0.0; ei = 0.0;
          for (int i = 0; i < M; i++) begin
            real a, b;
            a = xre[base+i+j] / SCALE; b = xim[base+i+j] / SCALE;
            fr += a * cre[q[i]] - b * cim[q[i]];
            fi += a * cim[q[i]] + b * cre[q[i]];
            er += a * tre[i] - b * tim[i];
            ei += a * tim[i] + b * tre[i];
          end
          err_fx += (ore[j] / SCALE - fr) ** 2 + (oim[j] / SCALE - fi) ** 2;
          err_cl += (fr - er) ** 2 + (fi - ei) ** 2;
          pow_cl += fr * fr + fi * fi;
        end
        blocks_out++;
        ore.delete(); oim.delete();
      end
    end
  end

  task automatic run(string name, int spans, int mf, int nf);
    int first;
    build(spans, mf, nf);
    load_config();
    err_fx = 0.0; err_cl = 0.0; pow_cl = 0.0;
    first = blocks_in;
    for (int b = 0; b < NBLK; b++) send_block();
    while (blocks_out < blocks_in || busy) @(negedge clk);
    for (int k = first + 2; k < blocks_out; k++) begin
      checks++;
      if (first_out[k] - first_out[k-1] != longint'(PERIOD))
        fail($sformatf("%s: block period %0d, expected %0d", name, first_out[k] - first_out[k-1], PERIOD));
    end
    checks++;
    if ($sqrt(err_fx / pow_cl) > 0.05)
      fail($sformatf("%s: fixed-point error %f of RMS output", name, $sqrt(err_fx / pow_cl)));
    $display("%s: M=%0d NC=%0d fixed-point error %.4f, clustering error %.4f (RMS, relative)",
             name, mf, nf, $sqrt(err_fx / pow_cl), $sqrt(err_cl / pow_cl));
    // flush the history so the next configuration starts from zeros
    xre.delete(); xim.delete();
    for (int i = 0; i < M-1; i++) begin xre.push_back(0); xim.push_back(0); end
    blocks_in = 0; blocks_out = 0; first_out.delete();
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
  endtask

  initial begin
    for (int i = 0; i < M-1; i++) begin xre.push_back(0); xim.push_back(0); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run($sformatf("%0d span(s), L=%0d", SPANS, L), SPANS, M, NC);
    $display("  block period %0d cycles for %0d outputs", PERIOD, L);
    done = 1'b1;
  end

endmodule
