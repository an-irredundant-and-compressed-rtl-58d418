// tb_mars_workloads: runs the accelerator at the evaluated configurations
// other than the default one, all in parallel, each on a 3 x 3 tile grid
// (four accelerator tiles):
//   tile 6 x 6 and 200 x 200 with 18-bit data,
//   tile 64 x 64 with 12-, 24- and 28-bit data (32-bit bus).
// Each run is a mars_workload_run instance that checks every output value,
// the markers and the burst lengths against its own model. The test ends
// when all runs have finished and prints the summed counts; a watchdog
// counts a failure if a run never finishes. Floating-point configurations
// are not run, as the engine computes in fixed point.
module tb_mars_workloads;
  localparam int NRUN = 5;
  logic fin [NRUN];
  int   chk [NRUN];
  int   fail [NRUN];
  int   checks = 0, failures = 0;

  mars_workload_run #(.T(6),   .N(18)) r_t6   (.finished(fin[0]), .checks(chk[0]), .failures(fail[0]));
  mars_workload_run #(.T(200), .N(18)) r_t200 (.finished(fin[1]), .checks(chk[1]), .failures(fail[1]));
  mars_workload_run #(.T(64),  .N(12)) r_n12  (.finished(fin[2]), .checks(chk[2]), .failures(fail[2]));
  mars_workload_run #(.T(64),  .N(24)) r_n24  (.finished(fin[3]), .checks(chk[3]), .failures(fail[3]));
  mars_workload_run #(.T(64),  .N(28)) r_n28  (.finished(fin[4]), .checks(chk[4]), .failures(fail[4]));

  function automatic bit all_done();
    for (int r = 0; r < NRUN; r++) if (!fin[r]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic report();
    checks = 0; failures = 0;
    for (int r = 0; r < NRUN; r++) begin
      checks += chk[r]; failures += fail[r];
      $display("run %0d: checks=%0d failures=%0d%s", r, chk[r], fail[r], fin[r] ? "" : " (not finished)");
    end
  endtask

  initial begin
    #1;
    while (!all_done()) #100;
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    report();
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
