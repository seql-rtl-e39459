// tb_seql_workloads: runs seql_workload_harness once per benchmark
// configuration of the sequential evaluation (scan flip-flop count, size
// of the no-feedback set R_wof and number n of locked pairs), plus two
// small configurations in which the whole key space is enumerated:
// n = 4 with only locked cells in the chain (2^4 scan-correct keys) and
// n = 4 behind two unlocked cells (2^3 scan-correct keys). All harnesses
// run in parallel; the result line sums their checks.
module tb_seql_workloads;
  //                     name        SFFs  |R_wof|  n
  //                     b14          245     54     8
  //                     b15          449     70     9
  //                     b17         1415     97     6
  //                     b18         3320     23    10
  //                     b19         6642     30    10
  //                     b20/b21      490     22    10
  //                     b22          735     22    10
  //                     RISC-V      2031    226    10
  localparam int N = 10;
  logic [N-1:0] done;
  int c [N], f [N];

  seql_workload_harness #(.NFB(245 - 54),   .NWOF(54),  .NLOCK(8),  .SEED(14)) h_b14   (.done(done[0]), .checks(c[0]), .failures(f[0]));
  seql_workload_harness #(.NFB(449 - 70),   .NWOF(70),  .NLOCK(9),  .SEED(15)) h_b15   (.done(done[1]), .checks(c[1]), .failures(f[1]));
  seql_workload_harness #(.NFB(1415 - 97),  .NWOF(97),  .NLOCK(6),  .SEED(17)) h_b17   (.done(done[2]), .checks(c[2]), .failures(f[2]));
  seql_workload_harness #(.NFB(3320 - 23),  .NWOF(23),  .NLOCK(10), .SEED(18)) h_b18   (.done(done[3]), .checks(c[3]), .failures(f[3]));
  seql_workload_harness #(.NFB(6642 - 30),  .NWOF(30),  .NLOCK(10), .SEED(19)) h_b19   (.done(done[4]), .checks(c[4]), .failures(f[4]));
  seql_workload_harness #(.NFB(490 - 22),   .NWOF(22),  .NLOCK(10), .SEED(20)) h_b20   (.done(done[5]), .checks(c[5]), .failures(f[5]));
  seql_workload_harness #(.NFB(735 - 22),   .NWOF(22),  .NLOCK(10), .SEED(22)) h_b22   (.done(done[6]), .checks(c[6]), .failures(f[6]));
  seql_workload_harness #(.NFB(2031 - 226), .NWOF(226), .NLOCK(10), .SEED(5))  h_riscv (.done(done[7]), .checks(c[7]), .failures(f[7]));
  seql_workload_harness #(.NFB(3), .NWOF(4), .NLOCK(4), .SEED(2)) h_kag4  (.done(done[8]), .checks(c[8]), .failures(f[8]));
  seql_workload_harness #(.NFB(3), .NWOF(6), .NLOCK(4), .SEED(3)) h_kag4h (.done(done[9]), .checks(c[9]), .failures(f[9]));

  int checks = 0, failures = 0;

  initial begin
    wait (&done);
    for (int i = 0; i < N; i++) begin
      checks += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures = 1;
    for (int i = 0; i < N; i++) failures += f[i];
    $display("watchdog expired, done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
