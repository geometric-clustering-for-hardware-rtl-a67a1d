// tb_tdce_workloads_sized -- runs every link configuration of the design
// study at its own size, each in its own tdce_top instance
// (tb_tdce_wl_run), and collects the results.
//
// Sizes (filter taps M, parallel outputs L, complex multipliers LP,
// clusters NC):
//   1 span,  plain k-means clusters:   M=31,  L=10, LP=2, NC=9
//   1 span,  trained clusters:         M=31,  L=8,  LP=2, NC=6
//   2 spans, plain:                    M=53,  L=12, LP=2, NC=10
//   2 spans, trained:                  M=53,  L=10, LP=2, NC=8
//   4 spans, plain (default size):     M=97,  L=20, LP=2, NC=10
//   4 spans, trained:                  M=97,  L=18, LP=2, NC=8
//   8 spans, plain and trained:        M=189, L=36, LP=2, NC=12
// The two 8-span variants have the same sizes and run as one instance.
// The trained variants' centres come from offline training; here they are
// k-means centres with the trained variant's cluster count, which exercises
// the same hardware. Each instance checks its outputs bit for bit, the
// fixed-point error and its block period (see tb_tdce_wl_run).
// A watchdog ends the run with a failure if an instance never finishes.
`timescale 1ns/1ps
module tb_tdce_workloads_sized;

  localparam int N = 7;
  logic done [N];
  int   nc [N];
  int   nf [N];

  tb_tdce_wl_run #(.SPANS(1), .M(31),  .L(10), .LP(2), .NC(9))  u_s1_knn (.done(done[0]), .n_checks(nc[0]), .n_fail(nf[0]));
  tb_tdce_wl_run #(.SPANS(1), .M(31),  .L(8),  .LP(2), .NC(6))  u_s1_gd  (.done(done[1]), .n_checks(nc[1]), .n_fail(nf[1]));
  tb_tdce_wl_run #(.SPANS(2), .M(53),  .L(12), .LP(2), .NC(10)) u_s2_knn (.done(done[2]), .n_checks(nc[2]), .n_fail(nf[2]));
  tb_tdce_wl_run #(.SPANS(2), .M(53),  .L(10), .LP(2), .NC(8))  u_s2_gd  (.done(done[3]), .n_checks(nc[3]), .n_fail(nf[3]));
  tb_tdce_wl_run #(.SPANS(4), .M(97),  .L(20), .LP(2), .NC(10)) u_s4_knn (.done(done[4]), .n_checks(nc[4]), .n_fail(nf[4]));
  tb_tdce_wl_run #(.SPANS(4), .M(97),  .L(18), .LP(2), .NC(8))  u_s4_gd  (.done(done[5]), .n_checks(nc[5]), .n_fail(nf[5]));
  tb_tdce_wl_run #(.SPANS(8), .M(189), .L(36), .LP(2), .NC(12)) u_s8     (.done(done[6]), .n_checks(nc[6]), .n_fail(nf[6]));

  function automatic bit all_done();
    foreach (done[k]) if (!done[k]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int checks, failures;
    while (!all_done()) #100;
    #10;
    checks = 0; failures = 0;
    foreach (nc[k]) begin checks += nc[k]; failures += nf[k]; end
    checks++;
    if (checks < 7 * 20) begin
      failures++;
      $display("FAIL: too few checks (%0d)", checks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2000000);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

endmodule
