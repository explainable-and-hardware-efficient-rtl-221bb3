// ctm_workloads_tb: runs ctm_top end to end at the other model sizes of the
// published study, each in its own instance of ctm_workload:
//   power     256 clauses in all (128 per class), 64 evaluated per cycle
//   latency   512 clauses in all (256 per class), 128 per cycle
//   accuracy  800 clauses in all (400 per class), 100 per cycle
//   patch7    7x7 patches, 200 clauses per class
//   patch9    9x9 patches, 200 clauses per class
// The three clause counts are the FPGA deployment profiles, the two patch
// sizes the models reported for other Booleanization methods (whose
// preprocessing is not built, so Enhanced Otsu is used here). The
// per-class split of the profile clause counts is an assumption.
module ctm_workloads_tb;
  localparam int unsigned N = 5;
  logic        finished [N];
  int unsigned checks_i [N], failures_i [N];

  ctm_workload #(.NAME("power"),    .CLAUSES(128), .CLAUSE_PAR(64))  w0 (finished[0], checks_i[0], failures_i[0]);
  ctm_workload #(.NAME("latency"),  .CLAUSES(256), .CLAUSE_PAR(128)) w1 (finished[1], checks_i[1], failures_i[1]);
  ctm_workload #(.NAME("accuracy"), .CLAUSES(400), .CLAUSE_PAR(100)) w2 (finished[2], checks_i[2], failures_i[2]);
  ctm_workload #(.NAME("patch7"),   .PATCH(7))                       w3 (finished[3], checks_i[3], failures_i[3]);
  ctm_workload #(.NAME("patch9"),   .PATCH(9))                       w4 (finished[4], checks_i[4], failures_i[4]);

  int unsigned checks = 0, failures = 0;

  initial begin
    automatic bit all_done = 1'b0;
    while (!all_done) begin
      #1000;
      all_done = 1'b1;
      for (int i = 0; i < N; i++) all_done &= finished[i];
    end
    for (int i = 0; i < N; i++) begin
      checks += checks_i[i];
      failures += failures_i[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    for (int i = 0; i < N; i++) begin
      checks += checks_i[i];
      failures += failures_i[i];
      if (!finished[i]) $display("TIMEOUT in workload %0d", i);
    end
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
